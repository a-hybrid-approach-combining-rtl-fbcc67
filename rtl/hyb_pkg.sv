// hyb_pkg: types and constants shared by the hybrid ANN / soft-demapping receiver.
//
// All real-valued quantities (received I/Q samples, centroids, ANN weights,
// activations and gradients) use one 16-bit two's complement format, Q4.12
// (range [-8, 8), resolution 1/4096). The number format is this design's own
// choice; the modulation size (16 symbols, 4 bits per symbol) and the ANN shape
// (2 inputs, 16 hidden neurons, 4 outputs) follow the case study of the design.
package hyb_pkg;

  localparam int unsigned FX_W    = 16;   // word width
  localparam int unsigned FX_FRAC = 12;   // fractional bits
  localparam int unsigned M_BITS  = 4;    // bits per symbol
  localparam int unsigned N_SYM   = 16;   // constellation size (2**M_BITS)
  localparam int unsigned N_IN    = 2;    // ANN inputs (I and Q)
  localparam int unsigned N_HID   = 16;   // neurons per hidden layer
  localparam int unsigned N_OUT   = 4;    // ANN outputs, one per bit
  localparam int unsigned LLR_W   = 16;   // LLR word, signed Q8.8
  localparam int unsigned LLR_FRAC = 8;
  localparam int unsigned SCALE_FRAC = 8; // 1/(2 sigma^2) as unsigned Q8.8

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic signed [LLR_W-1:0] llr_t;
  typedef logic [M_BITS-1:0] bits_t;

  typedef struct packed {
    fx_t i;
    fx_t q;
  } cplx_t;

  localparam fx_t FX_ONE  = fx_t'(1 << FX_FRAC);
  localparam fx_t FX_HALF = fx_t'(1 << (FX_FRAC - 1));
  localparam fx_t FX_MAX  = fx_t'((1 << (FX_W - 1)) - 1);
  localparam fx_t FX_MIN  = fx_t'(-(1 << (FX_W - 1)));

  // Operating mode of the receiver.
  typedef enum logic [1:0] {
    MODE_INFER   = 2'd0,  // soft demapping with the current centroids
    MODE_TRAIN   = 2'd1,  // retraining the demapper ANN on pilots
    MODE_EXTRACT = 2'd2   // sampling the ANN and computing new centroids
  } mode_e;

  // Saturate a wide signed value to the 16-bit word.
  function automatic fx_t sat_fx(input logic signed [47:0] v);
    if (v > 48'sd32767) return FX_MAX;
    if (v < -48'sd32768) return FX_MIN;
    return fx_t'(v);
  endfunction

endpackage
