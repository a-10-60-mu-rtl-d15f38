// weight_index_buffer: on-chip storage of the sparse weights and their SPad
// indices, read directly by all PEs without FIFOs.
//
// Each row holds one MAC step for the whole array: for every core element n and
// every PE m one packed weight byte (weight memory) and one index byte {sel1,
// sel0} (index memory). The entry of (n, m) sits at bits (n*M_PE + m)*8 +: 8 of
// both rows. Because all SPEs of a core element and all computing cores share
// filters, one row per cycle feeds the 512 PEs.
//
// Read: re/raddr, ent valid one cycle later (registered output).
// Write: 32-bit slices, wsel picks the weight or index memory, waddr is
// row * SLICES + slice.
//
// The paper names weight and index buffers (one box in the block diagram, two
// regions in the die photo) and says the weights and select signals are read
// straight from them. The depth, row format and write port are this design's.
module weight_index_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned ROWS = 2048
) (
  input  logic                                 clk,
  input  logic                                 re,
  input  logic [$clog2(ROWS)-1:0]              raddr,
  output wentry_t                              ent [N_CE][M_PE],
  input  logic                                 we,
  input  logic                                 wsel,   // 0 = weights, 1 = indices
  input  logic [$clog2(ROWS*N_CE*M_PE/4)-1:0]  waddr,
  input  logic [31:0]                          wdata
);

  localparam int unsigned ROW_W  = N_CE * M_PE * 8;
  localparam int unsigned SLICES = ROW_W / 32;

  logic [ROW_W-1:0] wmem [ROWS];
  logic [ROW_W-1:0] imem [ROWS];
  logic [ROW_W-1:0] wrow, irow;

  wire [$clog2(ROWS)-1:0]   wrow_a  = waddr[$bits(waddr)-1:$clog2(SLICES)];
  wire [$clog2(SLICES)-1:0] wslice  = waddr[$clog2(SLICES)-1:0];

  always_ff @(posedge clk) begin
    if (we && !wsel) wmem[wrow_a][wslice*32 +: 32] <= wdata;
    if (we &&  wsel) imem[wrow_a][wslice*32 +: 32] <= wdata;
    if (re) begin
      wrow <= wmem[raddr];
      irow <= imem[raddr];
    end
  end

  always_comb begin
    for (int n = 0; n < N_CE; n++)
      for (int m = 0; m < M_PE; m++) begin
        ent[n][m].w    = wrow[(n*M_PE+m)*8 +: 8];
        ent[n][m].sel1 = irow[(n*M_PE+m)*8+4 +: 4];
        ent[n][m].sel0 = irow[(n*M_PE+m)*8 +: 4];
      end
  end

endmodule
