// tb_computing_core: self-checking test of a computing core (2 core elements x
// 4 SPEs). Each of the 8 SPads is loaded with its own random chunk through its
// shift strobe while the IN word is shared; each core element gets its own
// random sparse entries. Expected: out[h][m] = sum over core elements n of
// sum over steps of w[n][m] * A_{n,h}[sel0[n][m]] (8-bit mode), computed here.
module tb_computing_core;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic [3:0] shift [2];
  logic in_valid, first, out_valid;
  logic [31:0] in_word;
  pe_cfg_t cfg;
  wentry_t ent [2][16];
  logic signed [23:0] out [4][16];
  int checks = 0, failures = 0;
  logic signed [7:0] model [2][4][16];
  int expv [4][16];

  computing_core dut (.*);

  initial begin
    shift[0] = 0; shift[1] = 0; in_valid = 0; first = 0; in_word = 0;
    cfg = '{mode: BW8, asel: 8'h00, op: OP_CONV, pool_shift: 4'd0};
    for (int n = 0; n < 2; n++) for (int m = 0; m < 16; m++) ent[n][m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int nnz;
      nnz = 1 + $urandom % 8;
      for (int h = 0; h < 4; h++) for (int m = 0; m < 16; m++) expv[h][m] = 0;
      for (int n = 0; n < 2; n++)
        for (int h = 0; h < 4; h++)
          for (int s = 3; s >= 0; s--) begin
            @(negedge clk);
            in_word = $urandom;
            shift[0] = 0; shift[1] = 0; shift[n][h] = 1'b1;
            for (int e = 0; e < 4; e++) model[n][h][s*4+e] = in_word[e*8 +: 8];
          end
      @(negedge clk); shift[0] = 0; shift[1] = 0;
      for (int e = 0; e < nnz; e++) begin
        @(negedge clk);
        in_valid = 1; first = (e == 0);
        for (int n = 0; n < 2; n++)
          for (int m = 0; m < 16; m++) begin
            ent[n][m].w = 8'($urandom); ent[n][m].sel0 = 4'($urandom); ent[n][m].sel1 = 4'($urandom);
            for (int h = 0; h < 4; h++)
              expv[h][m] += int'($signed(ent[n][m].w)) * int'(model[n][h][ent[n][m].sel0]);
          end
      end
      @(negedge clk); in_valid = 0; first = 0;
      repeat (8) @(negedge clk);
      for (int h = 0; h < 4; h++)
        for (int m = 0; m < 16; m++) begin
          checks++;
          if (int'(out[h][m]) != expv[h][m]) begin
            failures++;
            if (failures < 10) $display("h%0d m%0d out=%0d exp=%0d", h, m, out[h][m], expv[h][m]);
          end
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
