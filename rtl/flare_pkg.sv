// flare_pkg -- types and constants shared by the FLARE computing core.
//
// Data points are 32-bit values (the block-size example in the paper uses
// 32-bit values). This implementation treats them as signed fixed-point
// numbers with DATA_FRAC fractional bits; the paper does not say whether the
// hardware works on floating or fixed point, so fixed point is this design's
// choice. Interpolation weights carry IW_FRAC fractional bits, the first
// convolution's weights CW_FRAC bits.
//
// Quantization follows the usual SZ-style linear quantizer: a prediction
// error e is turned into q = round(e / 2eb) and sent as the code q + RADIUS;
// code 0 marks an unpredictable point whose value travels verbatim.
package flare_pkg;

  localparam int unsigned DATA_W    = 32;  // width of one data point
  localparam int unsigned DATA_FRAC = 16;  // fractional bits of a data point
  localparam int unsigned IW_W      = 16;  // interpolation weight width
  localparam int unsigned IW_FRAC   = 8;   // interpolation weight fraction bits
  localparam int unsigned CODE_W    = 16;  // quantization code width
  localparam int unsigned CW_W      = 16;  // convolution weight width (W, b)
  localparam int unsigned CW_FRAC   = 12;  // convolution weight fraction bits
  localparam int unsigned WP_FRAC   = 24;  // fraction bits of the rescaled weights W'

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic [CODE_W-1:0]        code_t;
  typedef logic signed [IW_W-1:0]   iw_t;

  // operating mode of the core
  typedef enum logic {
    MODE_COMPRESS   = 1'b0,
    MODE_DECOMPRESS = 1'b1
  } mode_e;

  // which weight set the 1D systolic array applies for a target point
  typedef enum logic [1:0] {
    WSEL_MAIN   = 2'd0,  // (w1, w2, w3) on anchors t-3s, t-s, t+s
    WSEL_LINEAR = 2'd1,  // no anchor at t-3s: mean of t-s and t+s
    WSEL_COPY   = 2'd2,  // no anchor at t+s: copy t-s
    WSEL_ZERO   = 2'd3   // block origin: predict 0
  } wsel_e;

  // one quantized point: its code and, for code 0, its verbatim value
  typedef struct packed {
    code_t code;
    data_t value;
  } qitem_t;

  // interpolation/quantization settings shared by all lanes
  typedef struct packed {
    iw_t         w1;
    iw_t         w2;
    iw_t         w3;
    data_t       eb;      // absolute error bound (data units), > 0
    logic [31:0] inv2eb;  // round(2^32 / (2*eb)), unsigned
    code_t       radius;  // quantization radius, code = q + radius
  } pred_cfg_t;

endpackage
