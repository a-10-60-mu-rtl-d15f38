// tb_top_controller: self-checking test of the layer sequencer on its own.
// The activation buffer is a testbench array whose word at address a encodes a,
// so every SPad load reveals which address was read. Two layers are run: a
// convolution (kernel 5, 2 channel groups, stride 2, 2 output passes, 2 rounds,
// 20 output pixels = one full and one partial tile) and a max-pooling layer.
// The testbench predicts, from the address rules of the design description,
// (1) every SPad shift: target SPE and word (or zero padding), (2) every
// weight-row read address, (3) every write-back address and data, given array
// outputs it drives itself (ReLU, shift and saturation applied here), and (4) the
// number of MAC strobes. The start-to-done cycle count is checked as well.
module tb_top_controller;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic desc_we, start, busy, done;
  logic [2:0] desc_idx;
  layer_desc_t desc_wdata;
  logic [3:0] num_layers;
  logic act_re, act_we, wib_re;
  logic [13:0] act_raddr, act_waddr;
  logic [31:0] act_rdata, act_wdata;
  logic [10:0] wib_raddr;
  logic [3:0] arr_shift [4][2];
  logic [31:0] arr_in_word;
  logic arr_in_valid, arr_first;
  pe_cfg_t arr_cfg;
  logic signed [23:0] arr_out [4][4][16];

  top_controller dut (.*);

  function automatic logic [31:0] tag(logic [13:0] a);
    return {a[7:0] ^ 8'h5A, 2'b01, a, 8'h3C};
  endfunction
  always_ff @(posedge clk) if (act_re) act_rdata <= tag(act_raddr);

  // array outputs depend on pixel, channel and pass so write-back can be checked
  int cur_pass;
  always_comb
    for (int w = 0; w < 4; w++)
      for (int h = 0; h < 4; h++)
        for (int m = 0; m < 16; m++)
          arr_out[w][h][m] = 24'((w * 4 + h) * 37 - m * 53 + cur_pass * 11 - 200);

  int checks = 0, failures = 0;
  int sh_q[$];          // expected shifts: {w,n,h} << 32 | word
  logic [31:0] shw_q[$];
  int sh_t[$];
  int rd_q[$];          // expected weight rows
  int wa_q[$];          // expected write addresses
  logic [31:0] wd_q[$]; // expected write data
  int n_valid = 0, exp_valid = 0;

  function automatic logic [7:0] rq(int v, int sh, int relu);
    int s;
    s = v >>> sh;
    if (relu && s < 0) s = 0;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return 8'(s);
  endfunction

  task automatic predict(layer_desc_t d);
    int G, rf, tiles, passes;
    G = d.in_groups;
    rf = d.pool ? d.kernel : d.kernel * G;
    tiles = (d.l_out + 15) / 16;
    passes = d.out_passes;
    for (int q = 0; q < passes; q++)
      for (int t = 0; t < tiles; t++) begin
        for (int r = 0; r < d.rounds; r++) begin
          for (int w = 0; w < 4; w++)
            for (int n = 0; n < 2; n++)
              for (int h = 0; h < 4; h++)
                for (int s = 3; s >= 0; s--) begin
                  int j, p, k, g;
                  logic [31:0] wv;
                  j = (r * 2 + n) * 4 + s;
                  p = t * 16 + w * 4 + h;
                  k = d.pool ? j : j / G;
                  g = d.pool ? q : j % G;
                  wv = (j < rf && p < d.l_out) ?
                       tag(14'(d.in_base + (p * d.stride + k) * G + g)) : 32'd0;
                  sh_t.push_back((w << 8) | (n << 4) | h);
                  shw_q.push_back(wv);
                end
          for (int e = 0; e < d.nnz; e++) begin
            rd_q.push_back(d.wgt_base + (q * d.rounds + r) * d.nnz + e);
            exp_valid++;
          end
        end
        for (int w = 0; w < 4; w++)
          for (int h = 0; h < 4; h++) begin
            int p;
            p = t * 16 + w * 4 + h;
            if (p >= d.l_out) continue;
            for (int qq = 0; qq < (d.pool ? 1 : 4); qq++) begin
              logic [31:0] wv;
              int grp;
              grp = d.pool ? 3 : qq;
              for (int e = 0; e < 4; e++)
                wv[e*8 +: 8] = rq((w * 4 + h) * 37 - (grp * 4 + e) * 53 + q * 11 - 200,
                                  d.out_shift, d.relu);
              wa_q.push_back(d.pool ? d.out_base + p * G + q
                                    : d.out_base + p * passes * 4 + q * 4 + qq);
              wd_q.push_back(wv);
            end
          end
      end
  endtask

  // monitors
  always @(posedge clk) if (rst_n) begin
    for (int w = 0; w < 4; w++)
      for (int n = 0; n < 2; n++)
        for (int h = 0; h < 4; h++)
          if (arr_shift[w][n][h]) begin
            int et;
            logic [31:0] ew;
            checks++;
            if (sh_t.size() == 0) failures++;
            else begin
              et = sh_t.pop_front(); ew = shw_q.pop_front();
              if (et != ((w << 8) | (n << 4) | h) || arr_in_word !== ew) begin
                failures++;
                if (failures < 8) $display("shift w%0d n%0d h%0d word %h exp tgt %h word %h",
                                           w, n, h, arr_in_word, et, ew);
              end
            end
          end
    if (wib_re) begin
      checks++;
      if (rd_q.size() == 0 || int'(wib_raddr) != rd_q.pop_front()) failures++;
    end
    if (arr_in_valid) n_valid++;
    if (act_we) begin
      int ea;
      logic [31:0] ed;
      checks++;
      if (wa_q.size() == 0) failures++;
      else begin
        ea = wa_q.pop_front(); ed = wd_q.pop_front();
        if (int'(act_waddr) != ea || act_wdata !== ed) begin
          failures++;
          if (failures < 8) $display("wb addr %0d data %h exp %0d %h", act_waddr, act_wdata, ea, ed);
        end
      end
    end
  end
  always_comb cur_pass = int'(dut.pass);

  initial begin
    layer_desc_t d0, d1;
    int t0, cyc;
    desc_we = 0; start = 0; desc_idx = 0; desc_wdata = '0; num_layers = 0;
    d0 = '0;
    d0.op = OP_CONV; d0.mode = BW8; d0.in_base = 16'd100; d0.out_base = 16'd3000;
    d0.wgt_base = 16'd7; d0.l_out = 12'd20; d0.in_groups = 8'd2; d0.out_passes = 8'd2;
    d0.kernel = 8'd5; d0.stride = 4'd2; d0.rounds = 8'd2; d0.nnz = 5'd3;
    d0.out_shift = 5'd2; d0.relu = 1'b1;
    d1 = '0;
    d1.pool = 1'b1; d1.op = OP_MAX; d1.in_base = 16'd3000; d1.out_base = 16'd5000;
    d1.wgt_base = 16'd40; d1.l_out = 12'd4; d1.in_groups = 8'd2; d1.out_passes = 8'd2;
    d1.kernel = 8'd4; d1.stride = 4'd4; d1.rounds = 8'd1; d1.nnz = 5'd4;
    predict(d0);
    predict(d1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); desc_we = 1; desc_idx = 0; desc_wdata = d0;
    @(negedge clk); desc_we = 1; desc_idx = 1; desc_wdata = d1;
    @(negedge clk); desc_we = 0; start = 1; num_layers = 2; t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 10;
    repeat (3) @(negedge clk);
    checks++;
    if (sh_t.size() || rd_q.size() || wa_q.size()) begin
      failures++; $display("left over: %0d %0d %0d", sh_t.size(), rd_q.size(), wa_q.size());
    end
    checks++;
    if (n_valid != exp_valid) begin failures++; $display("valid %0d/%0d", n_valid, exp_valid); end
    // 2 passes x 2 tiles x (2 x (128+1+3) + 7 + 64 + 1) + 2 passes x (128+1+4 + 7 + 16 + 1) + 1
    checks++;
    if (cyc != 2*2*(2*132 + 72) + 2*(133 + 24) + 1) begin
      failures++; $display("cycles %0d", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
