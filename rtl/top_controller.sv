// top_controller: sequences the layers of the network over the PE array.
//
// The host writes up to MAX_LAYERS = 8 layer descriptors (layer_desc_t) and
// pulses start with the number of layers. For each layer the controller walks
//   output pass  (16 output channels for convolution, one channel group for pooling)
//   output tile  (W_CC x H_SPE = 16 output pixels, pixel p = tile*16 + w*H_SPE + h)
//   round        (each SPad takes 4 words = 16 activations of the receptive field;
//                 one round covers 4*N_CE words, core element n taking words
//                 (round*N_CE + n)*4 .. +3)
// and in each round runs two phases:
//   LOAD     32 SPads x 4 words are read from the activation buffer one word per
//            cycle and shifted into the SPad they belong to. The last word of a
//            chunk is shifted first, so SPad group g holds receptive-field word
//            chunk*4 + g. Words past the end of the receptive field (or for pixels
//            past the end of the ofmap) are replaced by zero: this is the padding
//            of unused computing units.
//   COMPUTE  nnz rows of the weight/index buffer are read, one per cycle, and
//            given to every PE at once as one MAC step. The first step of round 0
//            restarts the sums.
// After the last round the controller waits for the CMUL pipeline to drain,
// then writes the results back: each 24-bit sum is shifted right by out_shift,
// optionally clamped at zero (ReLU) and saturated to int8; four channels form one
// buffer word. Convolution ofmaps are stored as [pixel][out_passes*4 groups],
// pooling ofmaps as [pixel][in_groups].
//
// Receptive-field word j of pixel p is, for convolution, tap k = j / in_groups
// and channel group g = j % in_groups; for pooling, tap k = j and g = the pass.
// Its buffer address is in_base + (p*stride + k)*in_groups + g (no edge padding:
// l_out = (l_in - kernel)/stride + 1). The weight row of step e of round r in
// pass q is wgt_base + (q*rounds + r)*nnz + e.
//
// All PEs are driven by the same strobes every cycle, so no per-PE handshakes
// or FIFOs are needed. Cycles per tile: rounds*(128 + nnz + 1) + drain + write-back.
//
// From the paper: one top controller, synchronous operation of all PEs, weights
// and select signals read directly from the buffers, zero padding of unused
// computing units. The loop order, serial SPad loading, requantisation and
// descriptor format are this design's own.
module top_controller
  import cnn_pkg::*;
#(
  parameter int unsigned ACT_AW = 14,
  parameter int unsigned WIB_RW = 11
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // descriptor table and run control
  input  logic                    desc_we,
  input  logic [2:0]              desc_idx,
  input  layer_desc_t             desc_wdata,
  input  logic                    start,
  input  logic [3:0]              num_layers,
  output logic                    busy,
  output logic                    done,
  // activation buffer
  output logic                    act_re,
  output logic [ACT_AW-1:0]       act_raddr,
  input  logic [WORD_W-1:0]       act_rdata,
  output logic                    act_we,
  output logic [ACT_AW-1:0]       act_waddr,
  output logic [WORD_W-1:0]       act_wdata,
  // weight / index buffer
  output logic                    wib_re,
  output logic [WIB_RW-1:0]       wib_raddr,
  // PE array
  output logic [H_SPE-1:0]        arr_shift [W_CC][N_CE],
  output logic [WORD_W-1:0]       arr_in_word,
  output logic                    arr_in_valid,
  output logic                    arr_first,
  output pe_cfg_t                 arr_cfg,
  input  logic signed [ACC_W-1:0] arr_out [W_CC][H_SPE][M_PE]
);

  localparam int unsigned PIX     = W_CC * H_SPE;            // pixels per tile
  localparam int unsigned LD_N    = W_CC * N_CE * H_SPE * SPAD_GROUPS;
  localparam int unsigned DRAIN_N = CMUL_LAT + 2;

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_LOAD_END, S_COMPUTE, S_DRAIN, S_WB, S_NEXT
  } state_e;

  state_e      state;
  layer_desc_t desc_tab [MAX_LAYERS];
  layer_desc_t d;
  logic [3:0]  layer, n_layers;
  logic [7:0]  pass, round;
  logic [11:0] tile;
  logic [$clog2(LD_N):0] ld_cnt;
  logic [4:0]  e_cnt;
  logic [3:0]  drain_cnt;
  logic [$clog2(PIX*4):0] wb_cnt;

  assign busy = (state != S_IDLE);

  // ---------------- descriptor table ----------------
  always_ff @(posedge clk) begin
    if (desc_we && !busy) desc_tab[desc_idx] <= desc_wdata;
  end
  assign d = desc_tab[layer[2:0]];

  assign arr_cfg.mode       = d.mode;
  assign arr_cfg.asel       = d.asel;
  assign arr_cfg.op         = d.pool ? d.op : OP_CONV;
  assign arr_cfg.pool_shift = d.pool_shift;

  // ---------------- LOAD address generation ----------------
  logic [1:0]  ld_s;
  logic [$clog2(H_SPE)-1:0] ld_h;
  logic [$clog2(N_CE)-1:0]  ld_n;
  logic [$clog2(W_CC)-1:0]  ld_w;
  logic [15:0] ld_j, ld_k, ld_g, ld_p, rf_len;
  logic [ACT_AW-1:0] ld_addr;
  logic        ld_valid;

  always_comb begin
    ld_s = 2'(SPAD_GROUPS - 1 - (32'(ld_cnt) % SPAD_GROUPS));
    ld_h = $bits(ld_h)'((32'(ld_cnt) / SPAD_GROUPS) % H_SPE);
    ld_n = $bits(ld_n)'((32'(ld_cnt) / (SPAD_GROUPS * H_SPE)) % N_CE);
    ld_w = $bits(ld_w)'(32'(ld_cnt) / (SPAD_GROUPS * H_SPE * N_CE));
    ld_j = 16'(((32'(round) * N_CE + ld_n) * SPAD_GROUPS) + ld_s);
    ld_p = 16'(32'(tile) * PIX + 32'(ld_w) * H_SPE + ld_h);
    if (d.pool) begin
      ld_k   = ld_j;
      ld_g   = 16'(pass);
      rf_len = 16'(d.kernel);
    end else begin
      ld_k   = (d.in_groups != 0) ? ld_j / 16'(d.in_groups) : '0;
      ld_g   = (d.in_groups != 0) ? ld_j % 16'(d.in_groups) : '0;
      rf_len = 16'(d.kernel) * 16'(d.in_groups);
    end
    ld_addr  = ACT_AW'(32'(d.in_base) + (32'(ld_p) * 32'(d.stride) + 32'(ld_k)) * 32'(d.in_groups)
             + 32'(ld_g));
    ld_valid = (ld_j < rf_len) && (ld_p < 16'(d.l_out));
  end

  // read issued in cycle t, word shifted in cycle t+1
  logic                     sh_pend, sh_zero;
  logic [$clog2(W_CC)-1:0]  sh_w;
  logic [$clog2(N_CE)-1:0]  sh_n;
  logic [$clog2(H_SPE)-1:0] sh_h;

  always_comb begin
    for (int w = 0; w < W_CC; w++)
      for (int n = 0; n < N_CE; n++)
        arr_shift[w][n] = '0;
    if (sh_pend) arr_shift[sh_w][sh_n][sh_h] = 1'b1;
    arr_in_word = sh_zero ? '0 : act_rdata;
  end

  assign act_re    = (state == S_LOAD) && ld_valid;
  assign act_raddr = ld_addr;

  // ---------------- COMPUTE ----------------
  assign wib_re    = (state == S_COMPUTE);
  assign wib_raddr = WIB_RW'(32'(d.wgt_base)
                   + (32'(pass) * 32'(d.rounds) + 32'(round)) * 32'(d.nnz) + 32'(e_cnt));

  // ---------------- write-back ----------------
  logic [1:0]                wb_q;
  logic [$clog2(H_SPE)-1:0]  wb_h;
  logic [$clog2(W_CC)-1:0]   wb_w;
  logic [15:0]               wb_p;
  logic [$clog2(PIX*4):0]    wb_n;

  function automatic logic [ACT_W-1:0] requant(logic signed [ACC_W-1:0] v,
                                                logic [4:0] sh, logic relu);
    logic signed [ACC_W-1:0] s;
    s = v >>> sh;
    if (relu && s < 0) s = '0;
    if (s > 127)       return 8'sd127;
    else if (s < -128) return 8'h80;
    else               return s[ACT_W-1:0];
  endfunction

  always_comb begin
    wb_n = d.pool ? ($bits(wb_n))'(PIX) : ($bits(wb_n))'(PIX * 4);
    if (d.pool) begin
      wb_q = 2'(M_PE / GROUP_SZ - 1);   // the MPE group
      wb_h = $bits(wb_h)'(wb_cnt % H_SPE);
      wb_w = $bits(wb_w)'(wb_cnt / H_SPE);
    end else begin
      wb_q = wb_cnt[1:0];
      wb_h = $bits(wb_h)'((32'(wb_cnt) / 4) % H_SPE);
      wb_w = $bits(wb_w)'(32'(wb_cnt) / (4 * H_SPE));
    end
    wb_p = 16'(32'(tile) * PIX + 32'(wb_w) * H_SPE + wb_h);
    for (int e = 0; e < GROUP_SZ; e++)
      act_wdata[e*ACT_W +: ACT_W] =
        requant(arr_out[wb_w][wb_h][wb_q*GROUP_SZ+e], d.out_shift, d.relu);
    if (d.pool)
      act_waddr = ACT_AW'(32'(d.out_base) + 32'(wb_p) * 32'(d.in_groups) + 32'(pass));
    else
      act_waddr = ACT_AW'(32'(d.out_base) + 32'(wb_p) * (32'(d.out_passes) * 4)
                + 32'(pass) * 4 + 32'(wb_q));
    act_we = (state == S_WB) && (wb_p < 16'(d.l_out));
  end

  // ---------------- sequencing ----------------
  logic [11:0] n_tiles;
  assign n_tiles = 12'((32'(d.l_out) + PIX - 1) / PIX);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      layer        <= '0;
      n_layers     <= '0;
      pass         <= '0;
      tile         <= '0;
      round        <= '0;
      ld_cnt       <= '0;
      e_cnt        <= '0;
      drain_cnt    <= '0;
      wb_cnt       <= '0;
      done         <= 1'b0;
      sh_pend      <= 1'b0;
      sh_zero      <= 1'b0;
      sh_w         <= '0;
      sh_n         <= '0;
      sh_h         <= '0;
      arr_in_valid <= 1'b0;
      arr_first    <= 1'b0;
    end else begin
      done         <= 1'b0;
      sh_pend      <= (state == S_LOAD);
      sh_zero      <= !ld_valid;
      sh_w         <= ld_w;
      sh_n         <= ld_n;
      sh_h         <= ld_h;
      arr_in_valid <= (state == S_COMPUTE);
      arr_first    <= (state == S_COMPUTE) && (round == 0) && (e_cnt == 0);
      unique case (state)
        S_IDLE: if (start && num_layers != 0) begin
          n_layers <= num_layers;
          layer    <= '0;
          pass     <= '0;
          tile     <= '0;
          round    <= '0;
          ld_cnt   <= '0;
          state    <= S_LOAD;
        end
        S_LOAD: begin
          ld_cnt <= ld_cnt + 1'b1;
          if (ld_cnt == ($bits(ld_cnt))'(LD_N - 1)) state <= S_LOAD_END;
        end
        S_LOAD_END: begin            // last word is shifted in this cycle
          e_cnt <= '0;
          state <= S_COMPUTE;
        end
        S_COMPUTE: begin
          e_cnt <= e_cnt + 1'b1;
          if (e_cnt == d.nnz - 1'b1) begin
            ld_cnt <= '0;
            if (round == d.rounds - 1'b1) begin
              drain_cnt <= '0;
              state     <= S_DRAIN;
            end else begin
              round <= round + 1'b1;
              state <= S_LOAD;
            end
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 4'(DRAIN_N)) begin
            wb_cnt <= '0;
            state  <= S_WB;
          end
        end
        S_WB: begin
          wb_cnt <= wb_cnt + 1'b1;
          if (wb_cnt == wb_n - 1'b1) state <= S_NEXT;
        end
        S_NEXT: begin
          round  <= '0;
          ld_cnt <= '0;
          state  <= S_LOAD;
          if (tile + 1'b1 < n_tiles) begin
            tile <= tile + 1'b1;
          end else begin
            tile <= '0;
            if (pass + 1'b1 < d.out_passes) begin
              pass <= pass + 1'b1;
            end else begin
              pass <= '0;
              if (layer + 1'b1 < n_layers) begin
                layer <= layer + 1'b1;
              end else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Descriptors must not change while the array runs; a round needs work.
  a_no_desc_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
    desc_we |-> !busy);
  a_nnz_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_COMPUTE) |-> (d.nnz != 0 && d.rounds != 0));

endmodule
