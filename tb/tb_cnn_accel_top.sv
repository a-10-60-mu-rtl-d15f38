// tb_cnn_accel_top: end-to-end test of the accelerator at its default sizes.
//
// An 8-layer 1D CNN for a 512-sample, single-lead electrogram (the layer count of
// the published network; its shapes are this test's own) runs through the whole
// chip: DDR model -> data mover -> buffers -> PE array -> buffers -> DDR.
//   L0 conv    k=5 s=1  1(->4) -> 16 ch, 8-bit weights, ReLU   512 -> 508
//   L1 maxpool k=4 s=4  16 ch                                 508 -> 127
//   L2 conv    k=3 s=1  16 -> 32 ch, 4-bit weights, ReLU      127 -> 125
//   L3 maxpool k=4 s=4  32 ch                                 125 -> 31
//   L4 conv    k=3 s=2  32 -> 32 ch, 8-bit weights, ReLU      31  -> 15
//   L5 avgpool k=4 s=4  32 ch                                 15  -> 3
//   L6 conv    k=3 s=1  32 -> 16 ch, 4-bit weights, ReLU      3   -> 1
//   L7 conv    k=1 s=1  16 -> 16 ch, 8-bit weights (class scores) 1 -> 1
// About half of all weights are zero.
// The testbench acts as the compiler: it prunes random dense weights, sorts the
// non-zeros of each PE into SPad-chunk lists, pads all lists of a layer to the
// same length with zero weights and packs them into weight/index rows. The
// expected output of every layer is computed here by direct convolution and
// pooling on the dense tensors, and every word of every layer's ofmap is
// compared in the activation buffer; the final ofmap is also uploaded to DDR
// and compared there. The run time is checked against the controller's cycle
// formula. Each mechanism (8-bit and 4-bit MACs, max and average pooling,
// multi-round accumulation, zero-padded SPad words, partial last tile, ReLU
// clamping, int8 saturation, several output passes) is counted and must occur.
module tb_cnn_accel_top;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic desc_we, start, busy, done, dm_cmd_valid, dm_cmd_ready, dm_done;
  logic [2:0] desc_idx;
  layer_desc_t desc_wdata;
  logic [3:0] num_layers;
  dm_cmd_t dm_cmd;
  logic ddr_req, ddr_we, ddr_gnt, ddr_rvalid;
  logic [31:0] ddr_addr, ddr_wdata, ddr_rdata;

  cnn_accel_top dut (.*);
  ddr_model #(.DEPTH(65536)) u_ddr (.clk, .req(ddr_req), .we(ddr_we), .addr(ddr_addr),
    .wdata(ddr_wdata), .gnt(ddr_gnt), .rvalid(ddr_rvalid), .rdata(ddr_rdata));

  int checks = 0, failures = 0;
  localparam int NL = 8;
  localparam int LIN = 512;
  localparam int DDR_IN = 0, DDR_WGT = 4096, DDR_IDX = 20480, DDR_OUT = 40000;

  // layer shapes
  int   is_pool [NL] = '{0, 1, 0, 1, 0, 1, 0, 0};
  int   kk      [NL] = '{5, 4, 3, 4, 3, 4, 3, 1};
  int   ss      [NL] = '{1, 4, 1, 4, 2, 4, 1, 1};
  int   cin     [NL] = '{4, 16, 16, 32, 32, 32, 32, 16};
  int   cout    [NL] = '{16, 16, 32, 32, 32, 32, 16, 16};
  int   lin     [NL] = '{512, 508, 127, 125, 31, 15, 3, 1};
  int   bits    [NL] = '{8, 0, 4, 0, 8, 0, 4, 8};
  int   relu    [NL] = '{1, 0, 1, 0, 1, 0, 1, 0};
  int   oshift  [NL] = '{6, 0, 4, 0, 8, 0, 4, 6};
  pe_op_e pop   [NL] = '{OP_CONV, OP_MAX, OP_CONV, OP_MAX, OP_CONV, OP_AVG, OP_CONV, OP_CONV};
  int   base    [NL+1] = '{0, 1024, 4096, 5120, 6144, 6400, 6656, 6720, 6784};

  // dense tensors (reference)
  int x [NL+1][][];            // activations [pos][ch]
  int wd [NL][][][];           // weights [oc][k][ic]
  int lout [NL], rounds [NL], nnz [NL], wrow [NL+1];
  // mechanism counters
  int n_relu = 0, n_sat = 0;

  // weight / index rows being built: [row][n*16+m] bytes
  logic [7:0] wrows [4096][32];
  logic [7:0] irows [4096][32];

  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // -------- build network, reference results and weight rows --------
  task automatic build();
    int row;
    row = 0;
    x[0] = new[LIN];
    for (int p = 0; p < LIN; p++) begin
      x[0][p] = new[4];
      x[0][p][0] = int'($urandom % 201) - 100;
      for (int c = 1; c < 4; c++) x[0][p][c] = 0;
    end
    for (int l = 0; l < NL; l++) begin
      int G, rf;
      G = cin[l] / 4;
      lout[l] = (lin[l] - kk[l]) / ss[l] + 1;
      rf = is_pool[l] ? kk[l] : kk[l] * G;
      rounds[l] = (rf + 4 * N_CE - 1) / (4 * N_CE);
      wrow[l] = row;
      x[l+1] = new[lout[l]];
      if (!is_pool[l]) begin
        int lim;
        lim = (bits[l] == 8) ? 128 : 8;
        wd[l] = new[cout[l]];
        for (int o = 0; o < cout[l]; o++) begin
          wd[l][o] = new[kk[l]];
          for (int k = 0; k < kk[l]; k++) begin
            wd[l][o][k] = new[cin[l]];
            for (int c = 0; c < cin[l]; c++)
              wd[l][o][k][c] = (($urandom % 2) == 0 || (l == 0 && c > 0)) ? 0 :
                               int'($urandom % (2 * lim)) - lim;
          end
        end
        // reference convolution
        for (int p = 0; p < lout[l]; p++) begin
          x[l+1][p] = new[cout[l]];
          for (int o = 0; o < cout[l]; o++) begin
            int acc, v;
            acc = 0;
            for (int k = 0; k < kk[l]; k++)
              for (int c = 0; c < cin[l]; c++)
                acc += wd[l][o][k][c] * x[l][p*ss[l]+k][c];
            v = acc >>> oshift[l];
            if (relu[l] && v < 0) begin v = 0; n_relu++; end
            if (v != sat8(v)) n_sat++;
            x[l+1][p][o] = sat8(v);
          end
        end
        // compile: per pass q, round r, core element n, PE m -> list of (reg, w)
        begin
          int lists [][][][][$];   // [q][r][n][m] of packed (reg<<8 | w&ff)
          int maxn;
          lists = new[cout[l] / 16];
          maxn = 1;
          for (int q = 0; q < cout[l] / 16; q++) begin
            lists[q] = new[rounds[l]];
            for (int r = 0; r < rounds[l]; r++) begin
              lists[q][r] = new[N_CE];
              for (int n = 0; n < N_CE; n++) begin
                lists[q][r][n] = new[16];
                for (int m = 0; m < 16; m++) begin
                  for (int i = 0; i < 16; i++) begin
                    int j, k, g, c;
                    j = (r * N_CE + n) * 4 + i / 4;
                    if (j >= rf) continue;
                    k = j / G; g = j % G; c = g * 4 + i % 4;
                    if (wd[l][q*16+m][k][c] != 0)
                      lists[q][r][n][m].push_back((i << 8) | (wd[l][q*16+m][k][c] & 255));
                  end
                  begin
                    int ne;
                    ne = (bits[l] == 8) ? lists[q][r][n][m].size()
                                        : (lists[q][r][n][m].size() + 1) / 2;
                    if (ne > maxn) maxn = ne;
                  end
                end
              end
            end
          end
          nnz[l] = maxn;
          for (int q = 0; q < cout[l] / 16; q++)
            for (int r = 0; r < rounds[l]; r++)
              for (int e = 0; e < maxn; e++) begin
                int rr;
                rr = row + (q * rounds[l] + r) * maxn + e;
                for (int n = 0; n < N_CE; n++)
                  for (int m = 0; m < 16; m++) begin
                    int a, b;
                    a = 0; b = 0;
                    if (bits[l] == 8) begin
                      if (e < lists[q][r][n][m].size()) a = lists[q][r][n][m][e];
                      wrows[rr][n*16+m] = 8'(a);
                      irows[rr][n*16+m] = {4'd0, 4'(a >> 8)};
                    end else begin
                      if (2*e   < lists[q][r][n][m].size()) a = lists[q][r][n][m][2*e];
                      if (2*e+1 < lists[q][r][n][m].size()) b = lists[q][r][n][m][2*e+1];
                      wrows[rr][n*16+m] = {4'(b), 4'(a)};
                      irows[rr][n*16+m] = {4'(b >> 8), 4'(a >> 8)};
                    end
                  end
              end
          row += (cout[l] / 16) * rounds[l] * maxn;
        end
      end else begin
        // pooling: MPE j of pass g takes word k, element j: SPad register k*4 + j
        nnz[l] = kk[l];
        for (int q = 0; q < G; q++)
          for (int e = 0; e < kk[l]; e++) begin
            int rr;
            rr = row + q * kk[l] + e;
            for (int n = 0; n < N_CE; n++)
              for (int m = 0; m < 16; m++) begin
                wrows[rr][n*16+m] = 8'd0;
                irows[rr][n*16+m] = (m >= 12) ? {4'd0, 4'(e * 4 + (m - 12))} : 8'd0;
              end
          end
        row += G * kk[l];
        for (int p = 0; p < lout[l]; p++) begin
          x[l+1][p] = new[cin[l]];
          for (int c = 0; c < cin[l]; c++) begin
            int mx, sm;
            mx = -1000; sm = 0;
            for (int k = 0; k < kk[l]; k++) begin
              if (x[l][p*ss[l]+k][c] > mx) mx = x[l][p*ss[l]+k][c];
              sm += x[l][p*ss[l]+k][c];
            end
            x[l+1][p][c] = (pop[l] == OP_MAX) ? mx : sat8(sm >>> 2);
          end
        end
      end
    end
    wrow[NL] = row;
  endtask

  task automatic dma(logic up, dm_target_e tg, int da, int ba, int len);
    @(negedge clk);
    while (!dm_cmd_ready) @(negedge clk);
    dm_cmd_valid = 1;
    dm_cmd = '{upload: up, target: tg, ddr_addr: 32'(da), buf_addr: 20'(ba), len: 20'(len)};
    @(negedge clk); dm_cmd_valid = 0;
    while (!dm_cmd_ready) @(negedge clk);
  endtask

  function automatic logic [31:0] word_of(int l, int p, int g);
    logic [31:0] wv;
    for (int e = 0; e < 4; e++) wv[e*8 +: 8] = 8'(x[l][p][g*4+e]);
    return wv;
  endfunction

  // -------- mechanism counters from the running design --------
  int c_bw8 = 0, c_bw4 = 0, c_max = 0, c_avg = 0, c_round = 0, c_zero = 0, c_skipwb = 0,
      c_pass = 0;
  always @(posedge clk) if (rst_n && busy) begin
    if (dut.arr_in_valid && dut.arr_cfg.op == OP_CONV && dut.arr_cfg.mode == BW8) c_bw8++;
    if (dut.arr_in_valid && dut.arr_cfg.op == OP_CONV && dut.arr_cfg.mode == BW4) c_bw4++;
    if (dut.arr_in_valid && dut.arr_cfg.op == OP_MAX) c_max++;
    if (dut.arr_in_valid && dut.arr_cfg.op == OP_AVG) c_avg++;
    if (dut.arr_in_valid && !dut.arr_first && dut.u_ctrl.round != 0) c_round++;
    if (dut.u_ctrl.sh_pend && dut.u_ctrl.sh_zero) c_zero++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_WB && !dut.u_ctrl.act_we) c_skipwb++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_WB && dut.u_ctrl.pass != 0) c_pass++;
  end

  initial begin
    int t0, t1, expc;
    desc_we = 0; start = 0; desc_idx = 0; desc_wdata = '0; num_layers = 0;
    dm_cmd_valid = 0; dm_cmd = '0;
    build();
    // put input, weights and indices in DDR
    for (int p = 0; p < LIN; p++) u_ddr.mem[DDR_IN + p] = word_of(0, p, 0);
    for (int r = 0; r < wrow[NL]; r++)
      for (int s = 0; s < 8; s++) begin
        u_ddr.mem[DDR_WGT + r*8 + s] = {wrows[r][s*4+3], wrows[r][s*4+2], wrows[r][s*4+1], wrows[r][s*4]};
        u_ddr.mem[DDR_IDX + r*8 + s] = {irows[r][s*4+3], irows[r][s*4+2], irows[r][s*4+1], irows[r][s*4]};
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    dma(0, TGT_ACT, DDR_IN, base[0], LIN);
    dma(0, TGT_WGT, DDR_WGT, 0, wrow[NL] * 8);
    dma(0, TGT_IDX, DDR_IDX, 0, wrow[NL] * 8);
    for (int l = 0; l < NL; l++) begin
      layer_desc_t dsc;
      dsc = '0;
      dsc.pool = is_pool[l][0];
      dsc.op = pop[l];
      dsc.mode = (bits[l] == 4) ? BW4 : BW8;
      dsc.asel = (bits[l] == 4) ? 8'hF0 : 8'h00;
      dsc.in_base = 16'(base[l]);
      dsc.out_base = 16'(base[l+1]);
      dsc.wgt_base = 16'(wrow[l]);
      dsc.l_out = 12'(lout[l]);
      dsc.in_groups = 8'(cin[l] / 4);
      dsc.out_passes = 8'(is_pool[l] ? cin[l] / 4 : cout[l] / 16);
      dsc.kernel = 8'(kk[l]);
      dsc.stride = 4'(ss[l]);
      dsc.rounds = 8'(rounds[l]);
      dsc.nnz = 5'(nnz[l]);
      dsc.out_shift = 5'(oshift[l]);
      dsc.relu = relu[l][0];
      dsc.pool_shift = 4'd2;
      @(negedge clk); desc_we = 1; desc_idx = 3'(l); desc_wdata = dsc;
    end
    @(negedge clk); desc_we = 0;
    // expected run time: per tile, rounds*(load + 1 + nnz) + drain + write-back + 1
    expc = 1;
    for (int l = 0; l < NL; l++) begin
      int tiles, passes, wbn;
      tiles  = (lout[l] + 15) / 16;
      passes = is_pool[l] ? cin[l] / 4 : cout[l] / 16;
      wbn    = is_pool[l] ? 16 : 64;
      expc  += passes * tiles * (rounds[l] * (128 + 1 + nnz[l]) + (CMUL_LAT + 3) + wbn + 1);
    end
    @(negedge clk); start = 1; num_layers = 4'(NL); t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    checks++;
    $display("run: %0d cycles (expected %0d)", (t1 - t0) / 10, expc);
    for (int l = 0; l < NL; l++)
      $display("  L%0d: l_out %0d rounds %0d nnz %0d", l, lout[l], rounds[l], nnz[l]);
    if ((t1 - t0) / 10 != expc) failures++;
    // every layer's ofmap in the buffer
    for (int l = 0; l < NL; l++) begin
      int G2, errs;
      G2 = (is_pool[l] ? cin[l] : cout[l]) / 4;
      errs = 0;
      for (int p = 0; p < lout[l]; p++)
        for (int g = 0; g < G2; g++) begin
          checks++;
          if (dut.u_act.mem[base[l+1] + p*G2 + g] !== word_of(l+1, p, g)) begin
            failures++; errs++;
            if (errs < 4) $display("L%0d p%0d g%0d got %h exp %h", l, p, g,
                                   dut.u_act.mem[base[l+1] + p*G2 + g], word_of(l+1, p, g));
          end
        end
    end
    // upload class scores and compare in DDR
    dma(1, TGT_ACT, DDR_OUT, base[NL], 4);
    repeat (3) @(negedge clk);
    for (int g = 0; g < 4; g++) begin
      checks++;
      if (u_ddr.mem[DDR_OUT + g] !== word_of(NL, 0, g)) failures++;
    end
    $display("mechanisms: bw8=%0d bw4=%0d max=%0d avg=%0d round>0=%0d zero_words=%0d skipped_wb=%0d pass>0=%0d relu=%0d sat=%0d",
             c_bw8, c_bw4, c_max, c_avg, c_round, c_zero, c_skipwb, c_pass, n_relu, n_sat);
    checks++; if (c_bw8 == 0)    failures++;
    checks++; if (c_bw4 == 0)    failures++;
    checks++; if (c_max == 0)    failures++;
    checks++; if (c_avg == 0)    failures++;
    checks++; if (c_round == 0)  failures++;
    checks++; if (c_zero == 0)   failures++;
    checks++; if (c_skipwb == 0) failures++;
    checks++; if (c_pass == 0)   failures++;
    checks++; if (n_relu == 0)   failures++;
    checks++; if (n_sat == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
