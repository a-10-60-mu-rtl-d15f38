// mpe: mixed PE. A PE (CMUL -> ADD -> Reg) plus two pooling paths and an output
// multiplexer.
//
//  * P-CMP + Reg: running maximum of the selected activation a0 (max pooling).
//  * P-ADD + Reg: running sum of a0; SFT_ADD divides it by 2**pool_shift with an
//    arithmetic right shift (average pooling over a power-of-two window).
//  * MUX: op selects the accumulator (OP_CONV), the maximum (OP_MAX) or the
//    shifted sum (OP_AVG) as the MPE output.
//
// The pooling paths take the activation straight from the SPad select MUX, not
// through the CMUL, so their registers update one cycle after in_valid, while the
// convolution sum updates CMUL_LAT + 1 cycles after it. 'first' restarts all
// three registers. out_valid pulses when the path chosen by op has updated.
//
// From the paper's figure: the three paths, their registers, the feedback into
// P-CMP and P-ADD, the SFT_ADD block after the P-ADD register and the final MUX.
// Own choices: the power-of-two shift used as SFT_ADD, signed compare, and the
// register widths.
module mpe
  import cnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  bw_mode_e                mode,
  input  logic [7:0]              asel,
  input  pe_op_e                  op,
  input  logic [3:0]              pool_shift,
  input  logic [WGT_W-1:0]        w,
  input  logic signed [ACT_W-1:0] a0,
  input  logic signed [ACT_W-1:0] a1,
  output logic signed [ACC_W-1:0] out,
  output logic                    out_valid
);

  logic signed [ACC_W-1:0] acc;
  logic                    acc_valid;
  logic signed [ACT_W-1:0] max_q;
  logic signed [ACC_W-1:0] sum_q;
  logic                    pool_valid;

  pe u_pe (
    .clk, .rst_n, .in_valid, .first, .mode, .asel, .w, .a0, .a1,
    .acc, .acc_valid
  );

  // P-CMP and P-ADD with their registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q      <= '0;
      sum_q      <= '0;
      pool_valid <= 1'b0;
    end else begin
      pool_valid <= in_valid;
      if (in_valid) begin
        max_q <= (first || a0 > max_q) ? a0 : max_q;
        sum_q <= (first ? '0 : sum_q) + ACC_W'(a0);
      end
    end
  end

  // SFT_ADD and output MUX
  always_comb begin
    unique case (op)
      OP_MAX:  begin out = ACC_W'(max_q);           out_valid = pool_valid; end
      OP_AVG:  begin out = sum_q >>> pool_shift;    out_valid = pool_valid; end
      default: begin out = acc;                     out_valid = acc_valid;  end
    endcase
  end

endmodule
