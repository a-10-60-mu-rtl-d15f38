// tb_spe: self-checking test of one SPE. For each trial the SPad is filled with
// two successive chunks of four random words; after each chunk all 16 PEs take
// nnz random sparse entries (weight, sel0, sel1). The expected 16 sums are
// computed here from the words and entries: each weight segment (8, 4, 2 or 1
// bits, two's complement) times A[sel0] or A[sel1] as asel chooses. Pooling trials check the
// MPE channels with max and average over the selected activations. The first
// result must appear 5 cycles (convolution) or 1 cycle (pooling) after the
// first MAC step.
module tb_spe;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic shift, in_valid, first, out_valid;
  logic [31:0] in_word;
  pe_cfg_t cfg;
  wentry_t ent [16];
  logic signed [23:0] out [16];
  int checks = 0, failures = 0, cyc = 0, t_in, t_out;
  logic signed [7:0] model [16];
  int expv [16];
  int pmax [16], psum [16];

  spe dut (.*);
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (out_valid && t_out < 0) t_out = cyc;

  // sum over weight segments of (segment as signed b-bit number) x (A0 or A1)
  function automatic int seg_dot(bw_mode_e md, logic [7:0] as, logic [7:0] wv,
                                 logic signed [7:0] x0, logic signed [7:0] x1);
    int b, acc;
    b = (md == BW8) ? 8 : (md == BW4) ? 4 : (md == BW2) ? 2 : 1;
    acc = 0;
    for (int sg = 0; sg < 8 / b; sg++) begin
      int val;
      val = 0;
      for (int i = 0; i < b; i++) if (wv[sg*b+i]) val += (1 << i);
      if (wv[sg*b+b-1]) val -= (1 << b);
      acc += val * (as[sg*b] ? int'(x1) : int'(x0));
    end
    return acc;
  endfunction

  task automatic load_chunk();
    logic [31:0] words [4];
    for (int s = 0; s < 4; s++) words[s] = $urandom;
    for (int s = 3; s >= 0; s--) begin      // last word first: group g = word g
      @(negedge clk); shift = 1; in_word = words[s];
    end
    @(negedge clk); shift = 0;
    for (int i = 0; i < 16; i++) model[i] = words[i/4][(i%4)*8 +: 8];
  endtask

  initial begin
    shift = 0; in_valid = 0; first = 0; in_word = 0;
    cfg = '{mode: BW8, asel: 8'h00, op: OP_CONV, pool_shift: 4'd2};
    for (int m = 0; m < 16; m++) ent[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int nnz;
      nnz = 1 + $urandom % 8;
      cfg.mode = (trial % 3 == 1) ? ((trial % 4 == 1) ? BW4 : (trial < 8 ? BW2 : BW1)) : BW8;
      cfg.asel = (cfg.mode == BW4) ? 8'hF0 : (cfg.mode == BW2) ? 8'b1100_1100 :
                 (cfg.mode == BW1) ? 8'b1010_0101 : 8'h00;
      cfg.op   = (trial % 3 == 2) ? ((trial % 2) ? OP_MAX : OP_AVG) : OP_CONV;
      for (int m = 0; m < 16; m++) begin expv[m] = 0; pmax[m] = -1000; psum[m] = 0; end
      t_out = -1;
      for (int r = 0; r < 2; r++) begin
        load_chunk();
        for (int e = 0; e < nnz; e++) begin
          @(negedge clk);
          in_valid = 1; first = (r == 0 && e == 0);
          if (first) t_in = cyc;
          for (int m = 0; m < 16; m++) begin
            ent[m].w = 8'($urandom); ent[m].sel0 = 4'($urandom); ent[m].sel1 = 4'($urandom);
            expv[m] += seg_dot(cfg.mode, cfg.asel, ent[m].w, model[ent[m].sel0],
                               model[ent[m].sel1]);
            if (int'(model[ent[m].sel0]) > pmax[m]) pmax[m] = int'(model[ent[m].sel0]);
            psum[m] += int'(model[ent[m].sel0]);
          end
        end
        @(negedge clk); in_valid = 0; first = 0;
      end
      repeat (8) @(negedge clk);
      checks++;
      if (t_out - t_in != ((cfg.op == OP_CONV) ? 5 : 1)) begin
        failures++; $display("latency %0d", t_out - t_in);
      end
      for (int m = 0; m < 16; m++) begin
        int e;
        if (cfg.op == OP_CONV || m < 12) e = expv[m];
        else if (cfg.op == OP_MAX) e = pmax[m];
        else e = psum[m] >>> 2;
        checks++;
        if (int'(out[m]) != e) begin
          failures++;
          if (failures < 10) $display("trial %0d pe %0d out=%0d exp=%0d", trial, m, out[m], e);
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
