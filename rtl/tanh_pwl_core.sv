// tanh_pwl_core: method A, piecewise-linear interpolation of tanh(a) for a
// non-negative a (U3.12 by default).
//
// How it works: the range [0, 6) is cut into segments of width 2^-STEP_LOG2
// (1/64 by default, 384 segments). The upper bits of a select a segment i,
// the lower FB = 12-STEP_LOG2 bits are the position inside it. With the end
// points P[i] = tanh(i*step) in a table the result is
//     y = P[i] + (P[i+1] - P[i]) * frac / 2^FB,
// one subtractor, one multiplier and one adder; the division by the step is
// a shift. The table is kept as two hard-wired halves, one with the even and
// one with the odd points, so P[i] and P[i+1] are always read from different
// halves in the same cycle (for odd i the roles swap and the even half is
// read one entry further on). Table values are tanh rounded to 2^-15 and are
// computed at elaboration from exp().
//
// Interface and timing: a and in_valid are sampled on the rising clock edge;
// y and out_valid follow one cycle later (LAT_PWL = 1). Inputs at or beyond
// the last segment return 1-2^-15. rst_n is asynchronous, active low, and
// clears out_valid only.
//
// Formats: AF and AW are the fraction bits and width of a, YF the fraction
// bits (and width) of y, ALIM the value of a from which the largest output is
// returned. The defaults give U3.12 in, U.15 out and 6.0; the other rows of
// the precision table (S2.13 and S2.5 inputs, S2.13 and S.7 outputs, range
// +-4 with ALIM = 2^AW) are parameter settings of the same logic.
//
// From the paper: the method, the step size of its main configuration,
// msbs-as-address / lsbs-as-interpolation-factor, the split into two
// alternating hard-wired tables. This design's own: rounding of the
// interpolation product and the output register.
module tanh_pwl_core
  import tanh_pkg::*;
#(
  parameter int STEP_LOG2 = 6,         // step size 2^-6 = 1/64
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

  localparam int FB    = AF - STEP_LOG2;            // interpolation bits
  localparam int IW    = AW - FB;                   // segment index width
  localparam int NSEG  = (ALIM + (1 << FB) - 1) >> FB; // segments below ALIM
  localparam int NEVEN = NSEG / 2 + 1;               // P[0], P[2] .. P[NSEG]
  localparam int NODD  = NSEG / 2;                   // P[1], P[3] .. P[NSEG-1]
  localparam int JW    = IW - 1;

  typedef ym_t even_rom_t [NEVEN];
  typedef ym_t odd_rom_t  [NODD];

  function automatic even_rom_t build_even();
    even_rom_t r;
    for (int j = 0; j < NEVEN; j++)
      r[j] = YF'(tanh_fix(real'(2 * j) / real'(1 << STEP_LOG2), YF));
    return r;
  endfunction

  function automatic odd_rom_t build_odd();
    odd_rom_t r;
    for (int j = 0; j < NODD; j++)
      r[j] = YF'(tanh_fix(real'(2 * j + 1) / real'(1 << STEP_LOG2), YF));
    return r;
  endfunction

  localparam even_rom_t LUT_EVEN = build_even();
  localparam odd_rom_t  LUT_ODD  = build_odd();

  logic [IW-1:0]   seg;
  logic [FB-1:0]   frac;
  logic [JW-1:0]   j;
  logic            in_range;
  ym_t              p_lo, p_hi;
  logic [YF-1:0]  diff;
  logic [YF+FB-1:0] prod;
  ym_t              y_c;

  always_comb begin
    seg      = a[AW-1:FB];
    frac     = a[FB-1:0];
    j        = seg[IW-1:1];
    in_range = (int'(seg) < NSEG);
    p_lo = '0;
    p_hi = '0;
    if (in_range) begin
      if (!seg[0]) begin
        p_lo = LUT_EVEN[int'(j)];
        p_hi = LUT_ODD[int'(j)];
      end else begin
        p_lo = LUT_ODD[int'(j)];
        p_hi = LUT_EVEN[int'(j) + 1];
      end
    end
    diff = p_hi - p_lo;                                // tanh is increasing
    prod = diff * frac + (YF+FB)'(1 << (FB - 1));     // rounded interpolation
    y_c  = in_range ? p_lo + YF'(prod >> FB) : YMAX;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  always_ff @(posedge clk)
    if (in_valid) y <= y_c;

endmodule
