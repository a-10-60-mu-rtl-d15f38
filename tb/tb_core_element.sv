// tb_core_element: self-checking test of a core element (4 SPEs sharing entries).
// Each SPad gets its own random chunk through its own shift strobe; the shared
// entries are applied to all four. Expected: out[h][m] = sum over steps of
// w[m] * A_h[sel0[m]] in 8-bit mode, and the 4-bit two-weight form with
// asel = F0, computed here.
module tb_core_element;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic [3:0] shift;
  logic in_valid, first, out_valid;
  logic [31:0] in_word;
  pe_cfg_t cfg;
  wentry_t ent [16];
  logic signed [23:0] out [4][16];
  int checks = 0, failures = 0;
  logic signed [7:0] model [4][16];
  int expv [4][16];

  core_element dut (.*);

  initial begin
    shift = 0; in_valid = 0; first = 0; in_word = 0;
    cfg = '{mode: BW8, asel: 8'h00, op: OP_CONV, pool_shift: 4'd0};
    for (int m = 0; m < 16; m++) ent[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int nnz;
      nnz = 1 + $urandom % 8;
      cfg.mode = trial[0] ? BW4 : BW8;
      cfg.asel = trial[0] ? 8'hF0 : 8'h00;
      for (int h = 0; h < 4; h++) for (int m = 0; m < 16; m++) expv[h][m] = 0;
      for (int h = 0; h < 4; h++)
        for (int s = 3; s >= 0; s--) begin
          @(negedge clk);
          in_word = $urandom;
          shift = 4'(1 << h);
          for (int e = 0; e < 4; e++) model[h][s*4+e] = in_word[e*8 +: 8];
        end
      @(negedge clk); shift = 0;
      for (int e = 0; e < nnz; e++) begin
        @(negedge clk);
        in_valid = 1; first = (e == 0);
        for (int m = 0; m < 16; m++) begin
          ent[m].w = 8'($urandom); ent[m].sel0 = 4'($urandom); ent[m].sel1 = 4'($urandom);
          for (int h = 0; h < 4; h++)
            if (cfg.mode == BW8)
              expv[h][m] += int'($signed(ent[m].w)) * int'(model[h][ent[m].sel0]);
            else
              expv[h][m] += int'($signed(ent[m].w[3:0])) * int'(model[h][ent[m].sel0])
                          + int'($signed(ent[m].w[7:4])) * int'(model[h][ent[m].sel1]);
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
