// ddr_model: behavioural stand-in for the DDR controller and the off-chip DRAM
// behind it, as seen from the accelerator's DDR user port. Not synthesizable
// logic of the design: a word memory of DEPTH 32-bit words. A request is
// granted on a random cycle; a granted read returns its word, in order, after
// a random delay of LAT_MIN..LAT_MAX cycles; a granted write updates the memory.
// Testbenches fill and inspect mem directly.
module ddr_model #(
  parameter int DEPTH   = 65536,
  parameter int LAT_MIN = 2,
  parameter int LAT_MAX = 6
) (
  input  logic        clk,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [31:0] rdata
);
  logic [31:0] mem [DEPTH];
  int unsigned due_q[$];
  logic [31:0] data_q[$];
  int unsigned now = 0;

  initial begin
    gnt = 0; rvalid = 0; rdata = 0;
  end

  always @(negedge clk) gnt = ($urandom % 4) != 0;

  always @(posedge clk) begin
    now <= now + 1;
    if (req && gnt) begin
      if (we) mem[addr % DEPTH] <= wdata;
      else begin
        int unsigned due;
        due = now + LAT_MIN + $urandom % (LAT_MAX - LAT_MIN + 1);
        if (due_q.size() != 0 && due <= due_q[$]) due = due_q[$] + 1;
        due_q.push_back(due);
        data_q.push_back(mem[addr % DEPTH]);
      end
    end
    rvalid <= 1'b0;
    if (due_q.size() != 0 && due_q[0] <= now) begin
      void'(due_q.pop_front());
      rdata  <= data_q.pop_front();
      rvalid <= 1'b1;
    end
  end
endmodule
