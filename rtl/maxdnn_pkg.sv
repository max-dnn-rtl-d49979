// maxdnn_pkg: types and constants shared by the multi-level approximate
// convolution engine.
//
// The engine runs the convolutional layers of a quantized DNN with a small
// set of ROUP approximate multipliers (M1, M2, M3) and chooses, per layer,
// which multiplier serves each multiplication: one per layer (LLAM), one per
// group of filters (FLAM), or one per group of input channels, per kernel
// row or per kernel column (KLAM). Independently, a layer can skip the
// multiplications whose weight lies far from the layer's weight mean (KLMS).
//
// The 8-bit two's-complement operands, the seven convolutional layers of
// ResNet-8, the 3x3 kernels and the three multipliers follow the paper. The
// field widths, the three-group split of filters/channels and the bounds
// that define the groups are this design's own choices.
package maxdnn_pkg;

  // Operand width of the multipliers (8-bit quantized network).
  localparam int unsigned DATA_W     = 8;
  // Product width of an N x N two's-complement multiplication.
  localparam int unsigned PROD_W     = 2 * DATA_W;
  // Convolution kernel size (3x3 kernels, w1..w9).
  localparam int unsigned KSIZE      = 3;
  localparam int unsigned KTAPS      = KSIZE * KSIZE;
  // Number of distinct approximate multipliers in the bank (M1, M2, M3).
  localparam int unsigned NUM_AXM    = 3;
  localparam int unsigned AXM_W      = 2;
  // Convolutional layers of ResNet-8.
  localparam int unsigned NUM_LAYERS = 7;
  localparam int unsigned LAYER_W    = 3;
  // Width of filter and channel indices (up to 256 filters / channels).
  localparam int unsigned IDX_W      = 8;
  // Accumulator width: 9 products of 16 bits summed over up to 256 channels
  // needs 16 + 4 + 8 = 28 bits; 32 are kept.
  localparam int unsigned ACC_W      = 32;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [AXM_W-1:0]         axm_id_t;
  typedef logic [LAYER_W-1:0]       layer_idx_t;
  typedef logic [IDX_W-1:0]         idx_t;

  // Granularity at which multipliers are assigned inside one layer.
  typedef enum logic [2:0] {
    APPR_LLAM      = 3'd0,  // one multiplier for the whole layer
    APPR_FLAM      = 3'd1,  // one multiplier per group of filters
    APPR_KLAM_CHAN = 3'd2,  // one multiplier per group of input channels
    APPR_KLAM_ROW  = 3'd3,  // one multiplier per kernel row
    APPR_KLAM_COL  = 3'd4   // one multiplier per kernel column
  } approach_e;

  // Configuration of one convolutional layer.
  typedef struct packed {
    approach_e        approach;
    axm_id_t          layer_axm;   // LLAM: multiplier of the layer
    idx_t             bound1;      // FLAM/KLAM-chan: group 0 is index < bound1
    idx_t             bound2;      //   group 1 is bound1 <= index < bound2, group 2 the rest
    axm_id_t [2:0]    group_axm;   // multiplier of group 0..2 (or of row/column 0..2)
    logic             klms_en;     // KLMS: skip multiplications of outlying weights
    logic             klms_2sigma; // 0: [mu-sigma, mu+sigma], 1: [mu-2sigma, mu+2sigma]
    data_t            klms_mu;     // mean of the layer's kernel weights
    logic [DATA_W-1:0] klms_sigma; // standard deviation of the layer's kernel weights
  } layer_cfg_t;

endpackage
