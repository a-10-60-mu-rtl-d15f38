// cmul: mixed-bit-width signed reconfigurable multiplier.
//
// The 8-bit weight word W is cut into 1-bit segments. Each weight bit i owns an
// operand multiplexer that picks activation A0 or A1 (asel[i]) and a gating MUX
// that passes that activation when the weight bit is set. Three levels of adders
// then merge neighbouring partial products; in front of each adder a mux either
// shifts the upper operand (<<1, <<2, <<4) or passes it unshifted. Shifting at a
// level joins the two halves into one wider weight; not shifting keeps them as
// separate weights whose products are summed. So one CMUL computes
//   8-bit mode: W[7:0]*A                                 (1 product)
//   4-bit mode: W[3:0]*A + W[7:4]*A'                     (2 products)
//   2-bit mode: sum of four 2-bit weight x activation    (4 products)
//   1-bit mode: sum of eight 1-bit weight x activation   (8 products)
// where each segment's activation is A0 or A1 as set by asel.
// Weights and activations are two's complement; the most significant bit of each
// segment carries negative weight, so its gated product is negated (a 1-bit
// weight therefore takes the values 0 and -1).
//
// Timing: four register stages (after the gating MUXes and after each adder
// level), so out/out_valid follow in/in_valid by 4 cycles. The mode travels
// down the pipeline with the data. No stall input: the array runs in lock step.
//
// From the paper's figure: the bit-level operand muxes a0..a7 fed from A0/A1,
// the eight gating MUXes, the <<1/<<2/<<4 muxes, the adder tree and the four FF
// lines. Own choices: the negation of segment MSBs (the figure shows no sign
// handling), the select coding, and the valid bit.
module cmul
  import cnn_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  bw_mode_e                 mode,
  input  logic [7:0]               asel,
  input  logic [WGT_W-1:0]         w,
  input  logic signed [ACT_W-1:0]  a0,
  input  logic signed [ACT_W-1:0]  a1,
  output logic                     out_valid,
  output logic signed [PROD_W-1:0] out
);

  // Segment MSB mask per mode: bit i is the top bit of its segment
  function automatic logic [7:0] msb_mask(bw_mode_e m);
    case (m)
      BW8:     return 8'b1000_0000;
      BW4:     return 8'b1000_1000;
      BW2:     return 8'b1010_1010;
      default: return 8'b1111_1111;
    endcase
  endfunction

  // ---- stage 1: operand muxes and gating MUXes --------------------------
  logic signed [ACT_W:0] p_d [8];
  logic signed [ACT_W:0] p_q [8];
  always_comb begin
    logic [7:0] neg;
    neg = msb_mask(mode);
    for (int i = 0; i < 8; i++) begin
      automatic logic signed [ACT_W:0] ai;
      ai = asel[i] ? {a1[ACT_W-1], a1} : {a0[ACT_W-1], a0};
      if (!w[i])       p_d[i] = '0;
      else if (neg[i]) p_d[i] = -ai;
      else             p_d[i] = ai;
    end
  end

  bw_mode_e m1, m2, m3;
  logic     v1, v2, v3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 8; i++) p_q[i] <= '0;
      v1 <= 1'b0;
      m1 <= BW8;
    end else begin
      for (int i = 0; i < 8; i++) p_q[i] <= p_d[i];
      v1 <= in_valid;
      m1 <= mode;
    end
  end

  // ---- adder levels (combinational parts) --------------------------------
  logic signed [ACT_W+2:0]  q_d [4];
  logic signed [ACT_W+2:0]  q_q [4];
  logic signed [ACT_W+5:0]  r_d [2];
  logic signed [ACT_W+5:0]  r_q [2];
  logic signed [PROD_W-1:0] out_d;

  always_comb begin
    // level 1: pairs, <<1 when segments are 2 bits or wider
    for (int j = 0; j < 4; j++)
      q_d[j] = (ACT_W+3)'(p_q[2*j]) +
               ((m1 != BW1) ? ((ACT_W+3)'(p_q[2*j+1]) <<< 1) : (ACT_W+3)'(p_q[2*j+1]));
    // level 2: quads, <<2 when segments are 4 bits or wider
    for (int k = 0; k < 2; k++)
      r_d[k] = (ACT_W+6)'(q_q[2*k]) +
               ((m2 == BW8 || m2 == BW4) ? ((ACT_W+6)'(q_q[2*k+1]) <<< 2)
                                          : (ACT_W+6)'(q_q[2*k+1]));
    // level 3: <<4 only for 8-bit segments
    out_d = PROD_W'(r_q[0]) + ((m3 == BW8) ? (PROD_W'(r_q[1]) <<< 4) : PROD_W'(r_q[1]));
  end

  // ---- pipeline registers (FF lines 2..4) -----------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < 4; j++) q_q[j] <= '0;
      r_q[0]    <= '0;
      r_q[1]    <= '0;
      out       <= '0;
      v2        <= 1'b0;
      v3        <= 1'b0;
      out_valid <= 1'b0;
      m2        <= BW8;
      m3        <= BW8;
    end else begin
      for (int j = 0; j < 4; j++) q_q[j] <= q_d[j];
      r_q[0]    <= r_d[0];
      r_q[1]    <= r_d[1];
      out       <= out_d;
      v2        <= v1;
      v3        <= v2;
      out_valid <= v3;
      m2        <= m1;
      m3        <= m2;
    end
  end

endmodule
