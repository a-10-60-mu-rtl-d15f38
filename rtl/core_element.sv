// core_element: H_SPE = 4 SPEs that compute the same 16 output channels for four
// neighbouring output pixels (the ofmap-height dimension H of the array).
//
// All SPEs of a core element see the same weight/index entries, MAC strobes and
// configuration, because they apply one set of filters to different pixels; each
// SPE has its own SPad load strobe, while the IN word is broadcast. Outputs are
// the per-SPE, per-channel sums.
//
// From the paper: the core element holds SPE#0..#3 and is one slice of the
// input-channel dimension N. Own choice: the broadcast IN word with per-SPE shift
// strobes.
module core_element
  import cnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [H_SPE-1:0]        shift,
  input  logic [WORD_W-1:0]       in_word,
  input  logic                    in_valid,
  input  logic                    first,
  input  pe_cfg_t                 cfg,
  input  wentry_t                 ent [M_PE],
  output logic signed [ACC_W-1:0] out [H_SPE][M_PE],
  output logic                    out_valid
);

  logic [H_SPE-1:0] v;

  for (genvar h = 0; h < H_SPE; h++) begin : g_spe
    spe u_spe (
      .clk, .rst_n, .shift(shift[h]), .in_word, .in_valid, .first, .cfg, .ent,
      .out(out[h]), .out_valid(v[h])
    );
  end

  assign out_valid = &v;

endmodule
