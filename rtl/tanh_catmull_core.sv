// tanh_catmull_core: method C, uniform cubic Catmull-Rom spline through
// tanh control points, for a non-negative a (U3.12 by default).
//
// How it works: the control points P[k] = tanh(k*step) are stored for
// k = -1 .. 6/step + 2 (step 1/16 by default). The upper bits of a give the
// segment k, the lower FB bits are the spline parameter t in [0, 1) as they
// stand. The result is the dot product of the P vector with the t vector
//     y = 1/2 * [P[k-1] P[k] P[k+1] P[k+2]] . [ -t^3 + 2t^2 - t,
//                                              3t^3 - 5t^2 + 2,
//                                             -3t^3 + 4t^2 + t,
//                                               t^3 -  t^2      ]
// The t vector is computed by logic (t^2, t^3 and small integer multiples,
// all exact), the four products are summed exactly and the sum is rounded
// once to 2^-15. Points below zero are stored as -tanh, since tanh is odd.
// With TVEC_LUT = 1 the four weights are read from a table indexed by t
// instead (the same exact values, 4 x 2^FB entries), trading area for a
// shorter path.
//
// Interface and timing: a and in_valid are sampled on the rising clock edge;
// y and out_valid follow one cycle later (LAT_CATMULL = 1). Inputs at or past
// 6.0 return 1-2^-15. rst_n is asynchronous, active low, clears out_valid.
//
// Formats: AF and AW are the fraction bits and width of a, YF the fraction
// bits (and width) of y, ALIM the value of a from which the largest output is
// returned. The defaults give U3.12 in, U.15 out and 6.0; the other rows of
// the precision table (S2.13 and S2.5 inputs, S2.13 and S.7 outputs, range
// +-4 with ALIM = 2^AW) are parameter settings of the same logic.
//
// From the paper: the spline, its matrix, the dot-product form, the step
// size, lsbs used directly as t, t vector computed by logic or stored in a
// table. This design's own: exact wide arithmetic, rounding, the register.
// The paper also says five msbs index the table; with step 1/16 over [0, 6)
// seven are needed, and the step size was followed.
module tanh_catmull_core
  import tanh_pkg::*;
#(
  parameter int STEP_LOG2 = 4,     // step size 2^-4 = 1/16
  parameter bit TVEC_LUT  = 1'b0,  // 1: read the t vector from a table
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

  localparam int FB   = AF - STEP_LOG2;             // bits of t
  localparam int NSEG = (ALIM + (1 << FB) - 1) >> FB; // segments below ALIM
  localparam int NPT  = NSEG + 3;                   // P[-1] .. P[NSEG+1]
  localparam int KW   = AW - FB;                    // segment index width

  typedef logic signed [YF:0] p_t;
  typedef p_t rom_t [NPT];

  // rom[j] holds P[j-1]
  function automatic rom_t build_rom();
    rom_t r;
    for (int j = 0; j < NPT; j++)
      r[j] = (YF+1)'(tanh_fix(real'(j - 1) / real'(1 << STEP_LOG2), YF));
    return r;
  endfunction

  localparam rom_t LUT = build_rom();

  typedef logic signed [63:0] s64_t;

  // t-vector table for TVEC_LUT = 1: the same four exact weights for each of
  // the 2^FB values of t, weight i of t at index i*NT + t.
  localparam int NT = 1 << FB;
  typedef logic signed [3*FB+2:0] wt_t;
  typedef wt_t wrom_t [4*NT];

  function automatic wrom_t build_tvec();
    wrom_t  r;
    longint tt, t1, t2, t3, o;
    o = longint'(1) << (3 * FB);
    for (int v = 0; v < NT; v++) begin
      tt = longint'(v);
      t1 = tt << (2 * FB);
      t2 = (tt * tt) << FB;
      t3 = tt * tt * tt;
      r[v]          = (3*FB+3)'(-t3 + 2 * t2 - t1);
      r[NT + v]     = (3*FB+3)'(3 * t3 - 5 * t2 + 2 * o);
      r[2 * NT + v] = (3*FB+3)'(-3 * t3 + 4 * t2 + t1);
      r[3 * NT + v] = (3*FB+3)'(t3 - t2);
    end
    return r;
  endfunction

  localparam wrom_t TVEC = build_tvec();

  logic [KW-1:0] k;
  logic          in_range;
  s64_t          t, t2, t3, one;
  s64_t          w [4];
  s64_t          p [4];
  s64_t          acc;
  ym_t            y_c;

  always_comb begin
    k        = a[AW-1:FB];
    in_range = (int'(a) < ALIM);
    // t vector, in units of 2^-3FB
    one = s64_t'(1) <<< (3 * FB);
    t   = s64_t'(a[FB-1:0]) <<< (2 * FB);
    t2  = (s64_t'(a[FB-1:0]) * s64_t'(a[FB-1:0])) <<< FB;
    t3  = s64_t'(a[FB-1:0]) * s64_t'(a[FB-1:0]) * s64_t'(a[FB-1:0]);
    w[0] = -t3 + 2 * t2 - t;
    w[1] = 3 * t3 - 5 * t2 + 2 * one;
    w[2] = -3 * t3 + 4 * t2 + t;
    w[3] = t3 - t2;
    if (TVEC_LUT)
      for (int i = 0; i < 4; i++)
        w[i] = s64_t'(TVEC[i * NT + int'(a[FB-1:0])]);
    acc = '0;
    for (int i = 0; i < 4; i++) begin
      p[i] = s64_t'(LUT[in_range ? int'(k) + i : i]);
      acc  = acc + p[i] * w[i];
    end
    // 1/2 factor and the 2^-3FB units of the t vector, rounded
    acc = (acc + (s64_t'(1) <<< (3 * FB))) >>> (3 * FB + 1);

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
