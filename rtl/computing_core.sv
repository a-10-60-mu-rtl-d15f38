// computing_core: N_CE = 2 core elements working on disjoint parts of the input
// channels (the N dimension of the array), and the adders that merge their
// partial sums.
//
// Core element n receives its own weight/index entries ent[n] and its own SPad
// loads, so the two elements cover different slices of the receptive field of
// the same four output pixels. out[h][m] = sum over n of the elements' out[h][m].
// For pooling the second element is fed zeros and so adds nothing.
//
// Timing: the sum is combinational on the element outputs; out_valid is element
// 0's valid.
//
// From the paper: a computing core contains Core Element #0 and #1, and N is
// the input channel dimension. Own choice: combining the partial sums by adding
// them inside the computing core (the paper does not say where this happens).
module computing_core
  import cnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [H_SPE-1:0]        shift [N_CE],
  input  logic [WORD_W-1:0]       in_word,
  input  logic                    in_valid,
  input  logic                    first,
  input  pe_cfg_t                 cfg,
  input  wentry_t                 ent [N_CE][M_PE],
  output logic signed [ACC_W-1:0] out [H_SPE][M_PE],
  output logic                    out_valid
);

  logic signed [ACC_W-1:0] ce_out [N_CE][H_SPE][M_PE];
  logic [N_CE-1:0]         v;

  for (genvar n = 0; n < N_CE; n++) begin : g_ce
    core_element u_ce (
      .clk, .rst_n, .shift(shift[n]), .in_word, .in_valid, .first, .cfg,
      .ent(ent[n]), .out(ce_out[n]), .out_valid(v[n])
    );
  end

  always_comb begin
    for (int h = 0; h < H_SPE; h++)
      for (int m = 0; m < M_PE; m++) begin
        out[h][m] = '0;
        for (int n = 0; n < N_CE; n++) out[h][m] += ce_out[n][h][m];
      end
  end

  assign out_valid = &v;

endmodule
