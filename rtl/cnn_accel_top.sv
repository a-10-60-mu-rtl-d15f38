// cnn_accel_top: the sparse mixed-bit-width CNN accelerator.
//
// Blocks: the top controller, the data download/upload unit, the ifmap & ofmap
// buffer, the weight & index buffer and the PE array of W_CC = 4 computing
// cores, each with N_CE = 2 core elements of H_SPE = 4 SPEs of M_PE = 16 PEs
// (12 PEs + 4 MPEs): 2 x 4 x 4 x 16 = 512 PEs that all run in lock step.
//
// Use: the host (through the data mover) downloads the input feature map,
// weights and indices from DDR into the buffers, writes the layer descriptors,
// pulses start and waits for done; then it uploads the final ofmap. While the
// controller is busy it owns the activation buffer; data mover commands are to
// be issued only while it is idle.
//
// Not built here: the PLL (the clock comes in on clk) and the DDR controller and
// PHY (their user-side port is brought out as ddr_*).
//
// From the paper: the block set and the 2x4x4x16 array with 12 PEs and 4 MPEs per
// SPE. The buffer sizes, the DDR user port and the host-side control ports are
// this design's own.
module cnn_accel_top
  import cnn_pkg::*;
#(
  parameter int unsigned ACT_DEPTH = 16384,
  parameter int unsigned WIB_ROWS  = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  // layer descriptors and run control
  input  logic        desc_we,
  input  logic [2:0]  desc_idx,
  input  layer_desc_t desc_wdata,
  input  logic        start,
  input  logic [3:0]  num_layers,
  output logic        busy,
  output logic        done,
  // data mover commands
  input  logic        dm_cmd_valid,
  output logic        dm_cmd_ready,
  input  dm_cmd_t     dm_cmd,
  output logic        dm_done,
  // DDR controller user port
  output logic        ddr_req,
  output logic        ddr_we,
  output logic [31:0] ddr_addr,
  output logic [31:0] ddr_wdata,
  input  logic        ddr_gnt,
  input  logic        ddr_rvalid,
  input  logic [31:0] ddr_rdata
);

  localparam int unsigned ACT_AW = $clog2(ACT_DEPTH);
  localparam int unsigned WIB_RW = $clog2(WIB_ROWS);
  localparam int unsigned WIB_AW = $clog2(WIB_ROWS * N_CE * M_PE / 4);

  // activation buffer ports
  logic              act_re, act_we;
  logic [ACT_AW-1:0] act_raddr, act_waddr;
  logic [31:0]       act_rdata, act_wdata;
  // controller side
  logic              c_act_re, c_act_we;
  logic [ACT_AW-1:0] c_act_raddr, c_act_waddr;
  logic [31:0]       c_act_wdata;
  // data mover side
  logic              m_act_re, m_act_we;
  logic [ACT_AW-1:0] m_act_raddr, m_act_waddr;
  logic [31:0]       m_act_wdata;
  logic              wib_we, wib_wsel, wib_re;
  logic [WIB_AW-1:0] wib_waddr;
  logic [31:0]       wib_wdata;
  logic [WIB_RW-1:0] wib_raddr;
  wentry_t           ent [N_CE][M_PE];

  // PE array
  logic [H_SPE-1:0]        arr_shift [W_CC][N_CE];
  logic [WORD_W-1:0]       arr_in_word;
  logic                    arr_in_valid, arr_first;
  pe_cfg_t                 arr_cfg;
  logic signed [ACC_W-1:0] arr_out [W_CC][H_SPE][M_PE];
  logic [W_CC-1:0]         arr_valid;

  top_controller #(.ACT_AW(ACT_AW), .WIB_RW(WIB_RW)) u_ctrl (
    .clk, .rst_n, .desc_we, .desc_idx, .desc_wdata, .start, .num_layers, .busy, .done,
    .act_re(c_act_re), .act_raddr(c_act_raddr), .act_rdata,
    .act_we(c_act_we), .act_waddr(c_act_waddr), .act_wdata(c_act_wdata),
    .wib_re, .wib_raddr,
    .arr_shift, .arr_in_word, .arr_in_valid, .arr_first, .arr_cfg, .arr_out
  );

  data_mover #(.ACT_AW(ACT_AW), .WIB_AW(WIB_AW)) u_dm (
    .clk, .rst_n, .cmd_valid(dm_cmd_valid), .cmd_ready(dm_cmd_ready), .cmd(dm_cmd),
    .done(dm_done),
    .ddr_req, .ddr_we, .ddr_addr, .ddr_wdata, .ddr_gnt, .ddr_rvalid, .ddr_rdata,
    .act_re(m_act_re), .act_raddr(m_act_raddr), .act_rdata,
    .act_we(m_act_we), .act_waddr(m_act_waddr), .act_wdata(m_act_wdata),
    .wib_we, .wib_wsel, .wib_waddr, .wib_wdata
  );

  // the controller owns the activation buffer while it runs
  always_comb begin
    act_re    = busy ? c_act_re    : m_act_re;
    act_raddr = busy ? c_act_raddr : m_act_raddr;
    act_we    = busy ? c_act_we    : m_act_we;
    act_waddr = busy ? c_act_waddr : m_act_waddr;
    act_wdata = busy ? c_act_wdata : m_act_wdata;
  end

  act_buffer #(.DEPTH(ACT_DEPTH)) u_act (
    .clk, .re(act_re), .raddr(act_raddr), .rdata(act_rdata),
    .we(act_we), .waddr(act_waddr), .wdata(act_wdata)
  );

  weight_index_buffer #(.ROWS(WIB_ROWS)) u_wib (
    .clk, .re(wib_re), .raddr(wib_raddr), .ent,
    .we(wib_we), .wsel(wib_wsel), .waddr(wib_waddr), .wdata(wib_wdata)
  );

  for (genvar w = 0; w < W_CC; w++) begin : g_cc
    computing_core u_cc (
      .clk, .rst_n, .shift(arr_shift[w]), .in_word(arr_in_word),
      .in_valid(arr_in_valid), .first(arr_first), .cfg(arr_cfg), .ent,
      .out(arr_out[w]), .out_valid(arr_valid[w])
    );
  end

  // host traffic to the buffers is not allowed while the array runs
  a_no_dma_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(m_act_we || m_act_re || wib_we));
  // every computing core finishes a step in the same cycle
  a_lock_step: assert property (@(posedge clk) disable iff (!rst_n)
    (arr_valid == '0) || (arr_valid == '1));

endmodule
