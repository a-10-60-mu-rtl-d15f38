// tb_act_buffer: self-checking test of the activation buffer. Random writes and
// reads (sometimes to the same address in the same cycle) are compared with a
// shadow array one cycle after the read (read-before-write for a collision).
module tb_act_buffer;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int DEPTH = 256;
  logic re, we;
  logic [7:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  logic [31:0] shadow [DEPTH];
  logic [31:0] expd;
  logic chk;
  int checks = 0, failures = 0;

  act_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0; chk = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = $urandom; shadow[i] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (chk) begin
        checks++;
        if (rdata !== expd) failures++;
      end
      we = $urandom % 2; re = $urandom % 2;
      waddr = 8'($urandom); raddr = (($urandom % 4) == 0) ? waddr : 8'($urandom);
      wdata = $urandom;
      expd = shadow[raddr];
      chk = re;
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
