// cnn_pkg: sizes, types and the layer descriptor shared by the sparse CNN
// accelerator. The array dimensions N x W x H x M = 2 x 4 x 4 x 16 and the split
// of each SPE into 12 PEs and 4 mixed PEs (MPEs) are the fabricated chip's.
// The SPad holds 16 activations in 4 groups of 4. Everything else here
// (word widths, buffer depths, descriptor fields) is this implementation's own.
package cnn_pkg;

  // PE array dimension N x W x H x M
  localparam int unsigned N_CE   = 2;   // core elements per computing core (input channel split)
  localparam int unsigned W_CC   = 4;   // computing cores (ofmap width)
  localparam int unsigned H_SPE  = 4;   // SPEs per core element (ofmap height)
  localparam int unsigned M_PE   = 16;  // PEs + MPEs per SPE (output channels)
  localparam int unsigned N_MPE  = 4;   // of the M_PE, the last 4 are MPEs
  localparam int unsigned SPAD_GROUPS = 4;  // InReg groups
  localparam int unsigned GROUP_SZ    = 4;  // registers per group (= activations per IN word)
  localparam int unsigned SPAD_REGS   = SPAD_GROUPS * GROUP_SZ;  // 16
  localparam int unsigned IDX_W  = $clog2(SPAD_REGS);            // 4

  localparam int unsigned ACT_W  = 8;   // activation bits
  localparam int unsigned WGT_W  = 8;   // weight bits (packed 8/4/2/1-bit segments)
  localparam int unsigned PROD_W = 16;  // CMUL result bits
  localparam int unsigned ACC_W  = 24;  // accumulator bits
  localparam int unsigned CMUL_LAT = 4; // CMUL pipeline stages (four FF lines)

  localparam int unsigned WORD_W = GROUP_SZ * ACT_W;  // one activation word: 4 channels
  localparam int unsigned MAX_LAYERS = 8;             // the network has 8 layers

  // Weight bit-width mode of the CMUL
  typedef enum logic [1:0] {
    BW8 = 2'd0,
    BW4 = 2'd1,
    BW2 = 2'd2,
    BW1 = 2'd3
  } bw_mode_e;

  // Output selection of an MPE
  typedef enum logic [1:0] {
    OP_CONV = 2'd0,
    OP_MAX  = 2'd1,
    OP_AVG  = 2'd2
  } pe_op_e;

  // One sparse weight entry of one PE: packed weight and two SPad indices
  typedef struct packed {
    logic [WGT_W-1:0] w;
    logic [IDX_W-1:0] sel1;
    logic [IDX_W-1:0] sel0;
  } wentry_t;

  // Per-PE control that travels with the data into the CMUL pipeline
  typedef struct packed {
    bw_mode_e   mode;
    logic [7:0] asel;   // per weight bit: 0 = A0, 1 = A1
    pe_op_e     op;
    logic [3:0] pool_shift;
  } pe_cfg_t;

  // Layer descriptor, written by the host before a run
  typedef struct packed {
    logic        pool;       // 1 = pooling layer (MPEs only), 0 = convolution
    pe_op_e      op;         // OP_CONV / OP_MAX / OP_AVG
    bw_mode_e    mode;       // weight bit width
    logic [7:0]  asel;       // A0/A1 select per weight bit
    logic [15:0] in_base;    // activation buffer word address of the ifmap
    logic [15:0] out_base;   // activation buffer word address of the ofmap
    logic [15:0] wgt_base;   // weight/index buffer row of the first entry
    logic [11:0] l_out;      // ofmap length (positions)
    logic [7:0]  in_groups;  // ifmap channels / 4
    logic [7:0]  out_passes; // conv: ofmap channels / 16; pool: channel groups
    logic [7:0]  kernel;     // kernel (or pool window) length
    logic [3:0]  stride;     // stride
    logic [7:0]  rounds;     // receptive-field words / (4 * N_CE), rounded up
    logic [4:0]  nnz;        // non-zero entries per PE per round (1..16)
    logic [4:0]  out_shift;  // requantisation right shift
    logic        relu;       // clamp negatives to zero on write-back
    logic [3:0]  pool_shift; // SFT_ADD shift for average pooling
  } layer_desc_t;

  // Direction and target of a data-mover command
  typedef enum logic [1:0] {
    TGT_ACT = 2'd0,
    TGT_WGT = 2'd1,
    TGT_IDX = 2'd2
  } dm_target_e;

  typedef struct packed {
    logic        upload;    // 1 = buffer -> DDR, 0 = DDR -> buffer
    dm_target_e  target;
    logic [31:0] ddr_addr;  // 32-bit word address
    logic [19:0] buf_addr;  // 32-bit word address inside the target buffer
    logic [19:0] len;       // words
  } dm_cmd_t;

endpackage
