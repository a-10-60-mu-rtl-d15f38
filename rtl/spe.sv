// spe: sparse processing element. One shared SPad, a bank of select MUXes, 12 PEs
// and 4 MPEs computing 16 output channels of one output pixel in parallel.
//
// Sparse operation: the weight/index buffer gives every PE one entry per cycle,
// a packed non-zero weight word and two 4-bit SPad indices (sel0, sel1). The
// PE's MUXes pick those SPad registers as the CMUL operands A0 and A1, so zero
// weights are never fetched or multiplied. All PEs take an entry every cycle and
// run in lock step; a PE with fewer non-zeros than the others gets zero-weight
// padding entries from the compiler.
//
// Interface: shift/in_word load the SPad (see spad); in_valid/first/ent feed
// one MAC step to all 16 PEs; cfg sets bit-width mode, A0/A1 bit select, MPE
// operation and average shift. out[m] is the sum (or pooled value) of output
// channel m; out_valid pulses when out has been updated (CMUL_LAT + 1 cycles
// after in_valid for convolution, 1 cycle for pooling).
//
// From the paper: 12 PEs + 4 MPEs, 16 input registers shared by all of them, a
// select MUX per PE driven by Sel, W per PE. Own choice: two MUXes per PE (the
// figure draws one) so that the CMUL's two activation inputs A0 and A1 can both
// be fed; sel1 is ignored in 8-bit mode unless asel asks for A1.
module spe
  import cnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    shift,
  input  logic [WORD_W-1:0]       in_word,
  input  logic                    in_valid,
  input  logic                    first,
  input  pe_cfg_t                 cfg,
  input  wentry_t                 ent [M_PE],
  output logic signed [ACC_W-1:0] out [M_PE],
  output logic                    out_valid
);

  logic signed [ACT_W-1:0] regs [SPAD_REGS];
  logic signed [ACT_W-1:0] a0 [M_PE];
  logic signed [ACT_W-1:0] a1 [M_PE];
  logic [M_PE-1:0]         v;

  spad u_spad (.clk, .rst_n, .shift, .in_word, .regs);

  // Select MUXes
  always_comb begin
    for (int m = 0; m < M_PE; m++) begin
      a0[m] = regs[ent[m].sel0];
      a1[m] = regs[ent[m].sel1];
    end
  end

  for (genvar m = 0; m < M_PE; m++) begin : g_pe
    if (m < M_PE - N_MPE) begin : g_plain
      pe u_pe (
        .clk, .rst_n, .in_valid, .first,
        .mode(cfg.mode), .asel(cfg.asel), .w(ent[m].w),
        .a0(a0[m]), .a1(a1[m]),
        .acc(out[m]), .acc_valid(v[m])
      );
    end else begin : g_mixed
      mpe u_mpe (
        .clk, .rst_n, .in_valid, .first,
        .mode(cfg.mode), .asel(cfg.asel), .op(cfg.op), .pool_shift(cfg.pool_shift),
        .w(ent[m].w), .a0(a0[m]), .a1(a1[m]),
        .out(out[m]), .out_valid(v[m])
      );
    end
  end

  // All PEs run in lock step; the MPE valid follows the selected operation.
  assign out_valid = v[M_PE-1];

endmodule
