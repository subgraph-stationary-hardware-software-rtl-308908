// sushi_pkg: types and constants shared by the SubGraph-Stationary accelerator.
//
// The accelerator computes 3x3 int8 convolutions on a K_P x C_P array of
// 9-multiplier dot-product engines and keeps the weights that many SubNets
// of a weight-shared SuperNet have in common in an on-chip Persistent
// Buffer, so that they are fetched from off-chip only once across queries.
// The default array size (K_P = 16 kernels by C_P = 32 channels, 9216
// operations per cycle) and the off-chip word of 1152 bits (14.4 GB/s at
// 100 MHz) are the paper's Alveo U50 numbers; the command and configuration
// encodings below are this design's own.
package sushi_pkg;

  localparam int unsigned K_P    = 16;    // kernels in parallel (array rows)
  localparam int unsigned C_P    = 32;    // input channels in parallel (array columns)
  localparam int unsigned RS     = 9;     // 3x3 window = DPE size
  localparam int unsigned DW     = 8;     // int8 activations and weights
  localparam int unsigned ACC_W  = 32;    // accumulator / oAct partial-sum width
  localparam int unsigned DRAM_W = 1152;  // off-chip beat: 144 B per 100 MHz cycle
  localparam int unsigned TAG_W  = 16;    // output-pixel index carried with an iAct window
  localparam int unsigned ZS_W   = 40;    // one channel's {int32 scale, int8 zero point}

  typedef enum logic [1:0] {
    CMD_NOP       = 2'd0,
    CMD_LOAD_PB   = 2'd1,   // cache a SubGraph's tiles of one layer in the PB
    CMD_RUN_LAYER = 2'd2    // run one 3x3 convolution layer
  } cmd_op_e;

  // One convolution layer of a SubNet. Channels and kernels are counted in
  // groups of C_P and K_P. A weight tile is K_P kernels x C_P channels x 9.
  typedef struct packed {
    logic [9:0]  ih;         // input height  (>= 3)
    logic [9:0]  iw;         // input width   (>= 3)
    logic        stride2;    // 0: stride 1, 1: stride 2
    logic [7:0]  ncg;        // input channel groups used by this SubNet
    logic [7:0]  nkg;        // kernel groups used by this SubNet
    logic [7:0]  cg_stride;  // channel groups per kernel group in the SuperNet layout
    logic [31:0] wgt_base;   // off-chip beat address of the layer's tile (0,0)
    logic [7:0]  pb_kg;      // kernel groups held in the PB (cached SubGraph)
    logic [7:0]  pb_cg;      // channel groups held in the PB
    logic [15:0] pb_base;    // PB word address of the layer's cached tile (0,0)
    logic [7:0]  zsb_base;   // ZSB entry of kernel group 0
  } layer_cfg_t;

  typedef struct packed {
    cmd_op_e     op;
    logic [15:0] sg_id;      // CMD_LOAD_PB: SubGraph identifier recorded in the PB
    layer_cfg_t  layer;
  } cmd_t;

  typedef struct packed {
    logic [31:0] busy_cycles;   // cycles spent on commands
    logic [31:0] stall_cycles;  // cycles waiting for a DB bank (memory-bound)
    logic [31:0] pb_tiles;      // weight tiles served from the PB (SubGraph reuse)
    logic [31:0] db_tiles;      // weight tiles served from the DB
    logic [31:0] dram_beats;    // off-chip beats read
  } stats_t;

endpackage
