// tanh_taylor_core: methods B1 (quadratic, step 1/16) and B2 (cubic, step
// 1/8), Taylor expansion of tanh(a) around the nearest stored point, for a
// non-negative a (U3.12 by default).
//
// How it works: only f = tanh(h) is stored, at the points h = i*step. The
// index i is a rounded to the nearest point, d = a - h (signed, |d| <= step/2)
// is the expansion distance. The derivatives come from f itself at run time:
//     f'      = 1 - f^2
//     f''/2   = -f * f'
//     f'''/6  = -(1 - 4f^2 + 3f^4) / 3
// and the polynomial is evaluated in Horner form, one multiplier and one
// adder per degree: y = f + d*(f' + d*(f''/2 + d*f'''/6)). With COEF_LUT = 1
// the three coefficients are read from tables of their own instead (larger,
// but with the squaring logic off the critical path). Coefficients and
// the running sum are kept with 30 fraction bits; the result is rounded to
// 2^-15. Table values are tanh rounded to 2^-15, computed at elaboration.
//
// Interface and timing: a and in_valid are sampled on the rising clock edge;
// y and out_valid follow one cycle later (LAT_TAYLOR = 1). Inputs at or past
// 6.0 return 1-2^-15. rst_n is asynchronous, active low, clears out_valid.
//
// Formats: AF and AW are the fraction bits and width of a, YF the fraction
// bits (and width) of y, ALIM the value of a from which the largest output is
// returned. The defaults give U3.12 in, U.15 out and 6.0; the other rows of
// the precision table (S2.13 and S2.5 inputs, S2.13 and S.7 outputs, range
// +-4 with ALIM = 2^AW) are parameter settings of the same logic.
//
// From the paper: the series (3)-(4), derivatives of tanh as functions of
// tanh (5)-(7), Horner evaluation (16), the two configurations and their
// step sizes. This design's own: expansion around the nearest point (which
// needs one table entry more than 6/step, the point 6.0 itself), the
// internal precision, and the output register. The table option follows the
// remark that coefficients may be computed at run time or stored.
module tanh_taylor_core
  import tanh_pkg::*;
#(
  parameter int TERMS     = 3,     // 3: quadratic (B1), 4: cubic (B2), 2: linear
  parameter int STEP_LOG2 = 4,     // step size 2^-4 = 1/16 (B1); 3 for B2
  parameter bit COEF_LUT  = 1'b0,  // 1: read the derivatives from tables
  parameter int AF        = IN_FRAC,  // fraction bits of a
  parameter int AW        = MAG_W,    // width of a
  parameter int YF        = OUT_FRAC, // fraction bits (and width) of y
  parameter int ALIM      = X_LIMIT   // a at or past this returns the maximum
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic [AW-1:0] a,
  output logic out_valid,
  output logic [YF-1:0] y
);

  localparam logic [YF-1:0] YMAX = '1;              // 1 - 2^-YF
  typedef logic [YF-1:0] ym_t;

  localparam int FB   = AF - STEP_LOG2;             // bits of d
  localparam int NPT  = ((ALIM + (1 << FB) - 1) >> FB) + 1; // 0 .. 6.0
  localparam int IW   = AW - FB + 1;                // rounded index width
  localparam int HALF = (FB > 0) ? 1 << (FB - 1) : 0;
  localparam int CF   = 30;                         // coefficient fraction bits
  // round(2^32 / 3), for the division of the third derivative by 3
  localparam longint K3 = (longint'(1) << 32) / 3 + 1;

  if (TERMS < 2 || TERMS > 4) begin : g_bad_terms
    $error("tanh_taylor_core: TERMS must be 2, 3 or 4");
  end

  typedef ym_t rom_t [NPT];

  function automatic rom_t build_rom();
    rom_t r;
    for (int i = 0; i < NPT; i++)
      r[i] = YF'(tanh_fix(real'(i) / real'(1 << STEP_LOG2), YF));
    return r;
  endfunction

  localparam rom_t LUT = build_rom();

  // Coefficient tables for COEF_LUT = 1: f', f''/2 and f'''/6 of the exact
  // tanh at each point, rounded to 2^-15, signed (|f'| reaches 1.0).
  typedef logic signed [YF+1:0] c_t;
  typedef c_t crom_t [NPT];

  function automatic crom_t build_coef(int n);
    crom_t r;
    real   t, c;
    for (int i = 0; i < NPT; i++) begin
      t = tanh_r(real'(i) / real'(1 << STEP_LOG2));
      case (n)
        1:       c = 1.0 - t * t;
        2:       c = -t * (1.0 - t * t);
        default: c = -(1.0 - 4.0 * t * t + 3.0 * t * t * t * t) / 3.0;
      endcase
      r[i] = (YF+2)'(longint'($floor(c * (2.0 ** YF) + 0.5)));
    end
    return r;
  endfunction

  localparam crom_t LUT_C1 = build_coef(1);
  localparam crom_t LUT_C2 = build_coef(2);
  localparam crom_t LUT_C3 = build_coef(3);

  typedef logic signed [63:0] s64_t;

  logic [IW-1:0] idx;
  logic          in_range;
  s64_t f, f2, f1, c2, c3, g, d, acc;
  ym_t   y_c;

  always_comb begin
    // nearest point: round a to a multiple of the step
    idx      = IW'(((AW+1)'(a) + (AW+1)'(HALF)) >> FB);
    in_range = (int'(a) < ALIM);
    f   = s64_t'(LUT[in_range ? int'(idx) : 0]) <<< (CF - YF);
    d   = s64_t'(a) - (s64_t'(idx) <<< FB);                  // units 2^-AF

    f2  = (f * f) >>> CF;                                     // f^2
    f1  = (s64_t'(1) <<< CF) - f2;                            // f'
    c2  = -((f * f1) >>> CF);                                 // f''/2
    g   = (s64_t'(1) <<< CF) - 4 * f2 + 3 * ((f2 * f2) >>> CF);
    c3  = -((g * K3) >>> 32);                                 // f'''/6
    if (COEF_LUT) begin
      f1 = s64_t'(LUT_C1[in_range ? int'(idx) : 0]) <<< (CF - YF);
      c2 = s64_t'(LUT_C2[in_range ? int'(idx) : 0]) <<< (CF - YF);
      c3 = s64_t'(LUT_C3[in_range ? int'(idx) : 0]) <<< (CF - YF);
    end

    if (TERMS == 4) acc = c2 + ((c3 * d) >>> AF);
    else            acc = c2;
    if (TERMS >= 3) acc = f1 + ((acc * d) >>> AF);
    else            acc = f1;
    acc = f  + ((acc * d) >>> AF);
    acc = (acc + (s64_t'(1) <<< (CF - YF - 1))) >>> (CF - YF);

    if (!in_range || acc > s64_t'(YMAX)) y_c = YMAX;
    else if (acc < 0)                     y_c = '0;
    else                                  y_c = YF'(acc);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  always_ff @(posedge clk)
    if (in_valid) y <= y_c;

endmodule
