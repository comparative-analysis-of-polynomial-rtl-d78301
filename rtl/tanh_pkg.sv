// tanh_pkg: number formats, method codes and constant functions shared by the
// fixed-point tanh units.
//
// Formats (follow the configuration "max input 6.0, 12 bit input precision,
// 15 bit output precision" used to compare all methods):
//   x     : signed S3.12, 16 bits (sign, 3 integer bits, 12 fraction bits)
//   |x|   : unsigned U3.12, 15 bits, the magnitude every method core works on
//   tanh  : signed S.15, 16 bits at the unit output; the cores produce the
//           unsigned magnitude U.15 in 15 bits (0 .. 1-2^-15)
// Table entries are quantised to 2^-15 like the output. These are the
// defaults: the cores and tanh_unit take the formats as parameters (AF, AW,
// YF, ALIM), so the constants below only set the main configuration.
//
// The constant functions below build the look-up tables at elaboration time
// from exp(); they are never synthesised as logic. tanh(a) = (e^2a-1)/(e^2a+1).
package tanh_pkg;

  localparam int IN_W     = 16;              // S3.12 input
  localparam int IN_FRAC  = 12;
  localparam int MAG_W    = IN_W - 1;        // U3.12 magnitude
  localparam int OUT_W    = 16;              // S.15 output
  localparam int OUT_FRAC = 15;
  localparam int Q_W      = OUT_W - 1;       // U.15 magnitude of tanh

  // Inputs at or beyond |x| = 6.0 return the largest output, 1-2^-15.
  localparam int          X_LIMIT = 6 << IN_FRAC;
  localparam logic [Q_W-1:0] Q_MAX = '1;

  typedef logic signed [IN_W-1:0]  x_t;
  typedef logic        [MAG_W-1:0] mag_t;
  typedef logic signed [OUT_W-1:0] y_t;
  typedef logic        [Q_W-1:0]   q_t;

  // The approximation methods compared (labels as in the method table).
  typedef enum logic [2:0] {
    M_PWL      = 3'd0,   // A : piecewise linear
    M_TAYLOR   = 3'd1,   // B1/B2 : Taylor series with run-time derivatives
    M_CATMULL  = 3'd2,   // C : uniform cubic Catmull-Rom spline
    M_VELOCITY = 3'd3,   // D : trigonometric expansion, velocity factors
    M_LAMBERT  = 3'd4,   // E : Lambert continued fraction, pipelined
    M_LAMBERT_POLY = 3'd5  // E : the same fraction as two polynomials
  } method_e;

  // The six configurations compared (step sizes as log2 of 1/step).
  localparam int A_STEP_LOG2  = 6;   // PWL, step 1/64
  localparam int B1_STEP_LOG2 = 4;   // Taylor, 3 terms, step 1/16
  localparam int B2_STEP_LOG2 = 3;   // Taylor, 4 terms, step 1/8
  localparam int C_STEP_LOG2  = 4;   // Catmull-Rom, step 1/16
  localparam int D_THR_LOG2   = 7;   // velocity factor, threshold 1/128
  localparam int E_K          = 7;   // Lambert, 7 divisions

  // ---------------------------------------------------------------- real math
  function automatic real tanh_r(real a);
    real e;
    e = $exp(2.0 * a);
    return (e - 1.0) / (e + 1.0);
  endfunction

  // tanh(a) rounded to a signed integer with 'frac' fraction bits, clipped to
  // the largest value below 1.0.
  function automatic longint tanh_fix(real a, int frac);
    real    s;
    longint v, lim;
    s   = tanh_r(a) * (2.0 ** frac);
    v   = longint'($floor(s + 0.5));
    lim = (longint'(1) << frac) - 1;
    if (v >  lim) v =  lim;
    if (v < -lim) v = -lim;
    return v;
  endfunction

  // Velocity factor of a, f_a = (1+tanh a)/(1-tanh a) = e^(2a), rounded to an
  // unsigned integer with 'frac' fraction bits.
  function automatic longint vf_fix(real a, int frac);
    return longint'($floor($exp(2.0 * a) * (2.0 ** frac) + 0.5));
  endfunction

  // ------------------------------------------------------------ latencies
  // Clock cycles from in_valid to out_valid of each method core; the unit
  // wrapper delays the sign and the saturation flag by the same amount.
  localparam int LAT_PWL      = 1;
  localparam int LAT_TAYLOR   = 1;
  localparam int LAT_CATMULL  = 1;
  localparam int LAT_VELOCITY = 2;
  localparam int LAT_LAMBERT_POLY = 2;

  // Lambert: one register after each of the K recurrence stages, one after
  // the final multiply and divide.
  function automatic int lat_lambert(int k);
    return k + 1;
  endfunction

  function automatic int core_latency(method_e m, int k);
    case (m)
      M_PWL:      return LAT_PWL;
      M_TAYLOR:   return LAT_TAYLOR;
      M_CATMULL:  return LAT_CATMULL;
      M_VELOCITY: return LAT_VELOCITY;
      M_LAMBERT_POLY: return LAT_LAMBERT_POLY;
      default:    return lat_lambert(k);
    endcase
  endfunction

endpackage
