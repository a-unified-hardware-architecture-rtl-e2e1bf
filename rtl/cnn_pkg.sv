// cnn_pkg: types and constants shared by the unified convolution /
// deconvolution accelerator.
//
// The accelerator streams 64-bit words: one word is one pixel position of
// eight 8-bit channels (one channel group).  A 3x3 kernel is applied per
// input/output channel pair; eight input channels (NI) and eight output
// channels (NO) are processed in parallel, giving 64 process elements of nine
// multipliers each.  The 8-bit precision and the 64-bit word width follow the
// published design; the split of the 64 process elements into 8 x 8 channels
// and all field widths below are this design's own choices.
package cnn_pkg;

  localparam int unsigned PIX_W  = 8;    // pixel and weight width (8-bit fixed point)
  localparam int unsigned NCH    = 8;    // channels per 64-bit stream word
  localparam int unsigned WORD_W = PIX_W * NCH;
  localparam int unsigned KTAPS  = 9;    // 3x3 kernel
  localparam int unsigned PROD_W = 2 * PIX_W;
  localparam int unsigned PE_W   = PROD_W + 4;  // sum of 9 products
  localparam int unsigned ACC_W  = 32;   // partial-sum width
  localparam int unsigned BNS_W  = 16;   // batch-norm scale width
  localparam int unsigned BNB_W  = 32;   // batch-norm bias width
  localparam int unsigned DIM_W  = 10;   // feature-map width/height field
  localparam int unsigned GRP_W  = 5;    // channel-group count field

  // Words per weight set: NO x NI kernels of 9 bytes, 8 bytes per word.
  localparam int unsigned WSET_WORDS = (NCH * NCH * KTAPS * PIX_W) / WORD_W;  // 72
  // Words of batch-norm parameters per output group: 8 x 16-bit scales, 8 x 32-bit biases.
  localparam int unsigned BN_WORDS   = (NCH * (BNS_W + BNB_W)) / WORD_W;      // 6

  typedef logic signed [PIX_W-1:0] pix_t;
  typedef logic [WORD_W-1:0]       word_t;

  typedef enum logic [0:0] {MODE_CONV = 1'b0, MODE_DECONV = 1'b1} op_mode_e;
  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_LEAKY = 2'd2} act_mode_e;
  typedef enum logic [1:0] {POOL_NONE = 2'd0, POOL_MAX = 2'd1, POOL_AVG = 2'd2} pool_mode_e;

  // Zero-padding mode of the line buffer: one flag per side.
  typedef struct packed {
    logic top;
    logic bottom;
    logic left;
    logic right;
  } pad_mode_t;

  // One pre-loaded operation (one tile of one layer), 64 bits in the register file.
  typedef struct packed {
    logic [7:0]        reserved;
    logic [4:0]        bn_shift;   // right shift after batch normalisation
    pool_mode_e        pool;
    act_mode_e         act;
    logic [GRP_W-1:0]  co_groups;  // output channels / 8  (1..31)
    logic [GRP_W-1:0]  ci_groups;  // input channels / 8   (1..31)
    logic [DIM_W-1:0]  in_h;       // tile height in pixels (before padding)
    logic [DIM_W-1:0]  in_w;       // tile width in pixels (before padding)
    pad_mode_t         pad;
    op_mode_e          mode;
    logic [11:0]       spare;
  } job_t;

endpackage
