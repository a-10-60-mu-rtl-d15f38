// pe: processing element = CMUL -> ADD -> accumulator register.
//
// Each cycle with in_valid the PE takes one packed weight word (w) and the
// activation(s) its select MUXes picked from the shared SPad (a0, a1), and the
// CMUL forms the mixed-bit product. Four cycles later the product is added to
// the accumulator register, whose output is fed back into the adder. A product
// tagged 'first' starts a new sum instead of adding to the old one, so a new
// output pixel can begin without an idle cycle.
//
// Interface: acc holds the running sum; acc_valid pulses for one cycle each time
// a product has been added (CMUL_LAT = 4 cycles after in_valid).
//
// From the paper's figure: CMUL, ADD and a Reg whose output returns to the ADD.
// Own choices: the 24-bit accumulator (the paper gives no width), the 'first'
// tag used to restart the sum, and the asynchronous active-low reset.
module pe
  import cnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  bw_mode_e                mode,
  input  logic [7:0]              asel,
  input  logic [WGT_W-1:0]        w,
  input  logic signed [ACT_W-1:0] a0,
  input  logic signed [ACT_W-1:0] a1,
  output logic signed [ACC_W-1:0] acc,
  output logic                    acc_valid
);

  logic                     prod_valid;
  logic signed [PROD_W-1:0] prod;
  logic [CMUL_LAT-1:0]      first_pipe;

  cmul u_cmul (
    .clk, .rst_n, .in_valid, .mode, .asel, .w, .a0, .a1,
    .out_valid(prod_valid), .out(prod)
  );

  // 'first' follows the CMUL pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) first_pipe <= '0;
    else        first_pipe <= {first_pipe[CMUL_LAT-2:0], first};
  end

  // ADD + Reg
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= prod_valid;
      if (prod_valid)
        acc <= (first_pipe[CMUL_LAT-1] ? '0 : acc) + ACC_W'(prod);
    end
  end

endmodule
