// car_pkg: word formats, types and fixed-point helpers shared by the CAR
// (Cascade of Asymmetric Resonators) cochlea datapath.
//
// Data words (section inputs, outputs and the states W1, W2) are DATA_W-bit
// two's-complement integers.  The 16-bit sound sample enters the cascade
// shifted left by IN_SHIFT, which gives IN_SHIFT guard bits below the input
// LSB and DATA_W-IN_W-IN_SHIFT bits of headroom above full scale.
// Coefficients a, c, g and h are COEF_W-bit signed fixed-point numbers with
// COEF_FRAC fractional bits (range -2 .. +2), read by a 25x18-class multiplier.
// A product is rounded (half up) back to the data format and saturated;
// every sum is saturated to DATA_W bits as well.
// The word lengths are this design's choice: the source fixed-point model
// determined its own word lengths but does not publish them.
package car_pkg;

  localparam int unsigned DATA_W    = 24;
  localparam int unsigned IN_W      = 16;
  localparam int unsigned IN_SHIFT  = 4;
  localparam int unsigned COEF_W    = 18;
  localparam int unsigned COEF_FRAC = 16;
  localparam int unsigned PROD_W    = DATA_W + COEF_W;
  localparam int unsigned WIDE_W    = DATA_W + 2;

  // Cycles from the start pulse of the core to its done pulse.
  localparam int unsigned CORE_LATENCY = 6;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [IN_W-1:0]   sample_t;

  // Coefficients of one section: a = r cos(theta), c = r sin(theta),
  // output gain g and zero-placement coefficient h.
  typedef struct packed {
    coef_t a;
    coef_t c;
    coef_t g;
    coef_t h;
  } coefs_t;

  // Stored state of one section.
  typedef struct packed {
    data_t w1;
    data_t w2;
  } state_t;

  localparam data_t DATA_MAX = data_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam data_t DATA_MIN = data_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Saturate a WIDE_W-bit value to the data word.
  function automatic data_t sat(input logic signed [WIDE_W-1:0] v);
    if (v > WIDE_W'(DATA_MAX))      return DATA_MAX;
    else if (v < WIDE_W'(DATA_MIN)) return DATA_MIN;
    else                            return v[DATA_W-1:0];
  endfunction

  // Coefficient times data word, rounded half up to the data format,
  // then saturated.
  function automatic data_t qmul(input coef_t k, input data_t d);
    logic signed [PROD_W-1:0] p;
    p = PROD_W'(k) * PROD_W'(d);
    p = p + PROD_W'(1 << (COEF_FRAC - 1));
    return sat(WIDE_W'(p >>> COEF_FRAC));
  endfunction

  // Sound sample to data word.
  function automatic data_t from_sample(input sample_t s);
    return data_t'(s) <<< IN_SHIFT;
  endfunction

endpackage
