// act_buffer: the ifmap & ofmap buffer. One on-chip memory that holds the input
// feature map of the running layer and receives its output feature map, so the
// next layer can read it in place.
//
// Organisation: DEPTH words of WORD_W = 32 bits; a word is one channel group, the
// four 8-bit activations of four consecutive channels at one position. One read
// port with a registered output (1 cycle latency) and one write port, as a
// simple dual-port SRAM macro would have.
//
// The paper names this buffer and shows it in the die photo but gives no size
// or port structure; the depth (64 KiB) and the 1R1W ports are this design's.
module act_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 16384
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WORD_W-1:0]        rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WORD_W-1:0]        wdata
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
