// tb_weight_index_buffer: self-checking test of the weight & index buffer.
// Rows are written as 32-bit slices into the weight and index memories in random
// order; every row is then read back and each of the 2 x 16 entries is compared
// with the bytes written: w from the weight row, sel0/sel1 from the low/high
// nibble of the index row byte (n*16 + m).
module tb_weight_index_buffer;
  import cnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int ROWS = 32;
  logic re, we, wsel;
  logic [4:0] raddr;
  logic [7:0] waddr;
  logic [31:0] wdata;
  wentry_t ent [2][16];
  logic [7:0] wb [ROWS][32], ib [ROWS][32];
  int checks = 0, failures = 0;

  weight_index_buffer #(.ROWS(ROWS)) dut (.*);

  initial begin
    re = 0; we = 0; wsel = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int k = 0; k < ROWS * 8 * 2; k++) begin
      int r, s;
      @(negedge clk);
      r = (k / 2) / 8; s = 7 - (k / 2) % 8;
      we = 1; wsel = k[0]; waddr = 8'(r * 8 + s); wdata = $urandom;
      for (int b = 0; b < 4; b++)
        if (wsel) ib[r][s*4+b] = wdata[b*8 +: 8];
        else      wb[r][s*4+b] = wdata[b*8 +: 8];
    end
    @(negedge clk); we = 0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      @(negedge clk); re = 1; raddr = 5'(r);
      @(negedge clk); re = 0;
      for (int n = 0; n < 2; n++)
        for (int m = 0; m < 16; m++) begin
          checks++;
          if (ent[n][m].w !== wb[r][n*16+m] ||
              {ent[n][m].sel1, ent[n][m].sel0} !== ib[r][n*16+m]) failures++;
        end
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
