// accel_pkg: types and constants shared by the depthwise-separable CNN
// accelerator. All feature-map, weight and parameter values are 16-bit signed
// fixed point with FRAC fractional bits (Q7.8 by default). Products are
// 32 bits wide and sums are carried in ACC_W bits before being rounded back
// (arithmetic shift right, i.e. toward minus infinity) and saturated to 16
// bits. The 16-bit width and the sizes of the engine (32 slices of 3x3
// multipliers, 4 engines, 36 Kb of ping-pong weights, 24.5 Mb of feature-map
// buffer) follow the paper; the binary point, the rounding and the encodings
// below are this design's own choices.
package accel_pkg;

  localparam int unsigned DATA_W   = 16;   // paper: 16-bit quantization
  localparam int unsigned FRAC     = 8;    // binary point (assumed)
  localparam int unsigned PROD_W   = 2 * DATA_W;
  localparam int unsigned ACC_W    = 40;
  localparam int unsigned SLICES   = 32;   // paper: 32 slices per MME
  localparam int unsigned KK       = 9;    // 3x3 kernel
  localparam int unsigned PW_OUT   = 9;    // pointwise outputs per MME
  localparam int unsigned STD_OUT  = SLICES / 3; // standard-conv outputs per MME
  localparam int unsigned NUM_MME  = 4;    // paper: 4-MME array
  localparam int unsigned FM_LANES = NUM_MME * SLICES; // channels per buffer word
  localparam int unsigned W_PER_MME = SLICES * KK;     // 288 weights
  localparam int unsigned WSET     = NUM_MME * W_PER_MME; // 1152 weights per bank
  localparam int unsigned PSET     = 3 * FM_LANES;        // bias, scale, shift
  localparam int unsigned LOAD_BEAT = 32;  // 16-bit words per load beat
  localparam int unsigned FMB_DEPTH = 12544; // 24.5 Mb / (128 x 16 bit)
  localparam int unsigned FMB_AW   = 14;
  localparam int unsigned M_MAX    = 224;  // widest input (224x224 image)
  localparam int unsigned MW       = 8;    // width of the feature-map size field
  localparam int unsigned NUM_WIDTHS = 6;
  localparam int unsigned WIDTHS_DEF [NUM_WIDTHS] = '{224, 112, 56, 28, 14, 7};

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef enum logic [1:0] {MODE_STD = 2'd0, MODE_DW = 2'd1, MODE_PW = 2'd2} conv_mode_t;
  typedef enum logic [1:0] {RELU_NONE = 2'd0, RELU_STD = 2'd1, RELU_6 = 2'd2} relu_mode_t;
  typedef enum logic [1:0] {POOL_NONE = 2'd0, POOL_AVG = 2'd1, POOL_MAX = 2'd2} pool_mode_t;

  localparam data_t RELU6_MAX = data_t'(6 <<< FRAC);

  // Per-pass configuration of one engine.
  typedef struct packed {
    conv_mode_t  mode;
    logic [MW-1:0] width;      // M, side of the square input map
    logic        stride2;      // keep only even rows and columns
    logic        psum_en;      // pointwise: add a stored partial sum, not the bias
    logic        norm_en;
    relu_mode_t  relu;
    pool_mode_t  pool;
    logic [15:0] pool_size;    // S, number of consecutive pixels pooled
    logic [15:0] pool_recip;   // 1/S, unsigned Q1.15
  } mme_cfg_t;

  // One layer as issued to the control FSM.
  typedef struct packed {
    conv_mode_t  mode;
    logic [MW-1:0] width;
    logic        stride2;
    logic [11:0] in_ch;
    logic [11:0] out_ch;
    logic [FMB_AW-1:0] src_base;
    logic [FMB_AW-1:0] dst_base;
    logic        norm_en;
    relu_mode_t  relu;
    pool_mode_t  pool;
    logic [15:0] pool_size;
    logic [15:0] pool_recip;
  } layer_t;

  function automatic data_t sat16(input acc_t v);
    if (v > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (v < -acc_t'(32768)) return data_t'(-16'sd32768);
    else                         return data_t'(v);
  endfunction

endpackage
