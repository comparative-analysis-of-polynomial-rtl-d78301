// tanh_lambert_poly_core: method E in its non-iterative form. Lambert's
// continued fraction, truncated after K divisions, is expanded into one
// rational function, for a non-negative a (U3.12 by default).
//
// How it works: the truncated fraction equals x * N(x^2) / D(x^2), where N
// and D are the polynomials T_(K-1) and T_K of the recurrence
//     T_-1 = 1,  T_0 = 2K+1,  T_n = (2K+1-2n) T_(n-1) + x^2 T_(n-2)
// (see tanh_lambert_core). Their integer coefficients are worked out at
// elaboration by running the same recurrence on coefficient vectors. For
// K = 7:
//     N = 2027025 + 270270 x^2 + 6930 x^4 + 36 x^6
//     D = 2027025 + 945945 x^2 + 51975 x^4 + 630 x^6 + x^8
// so the numerator x*N has degree 7 and the denominator degree 8. x^2 is
// formed once. N and D are evaluated side by side in Horner form, one
// multiplier and one adder per degree. Then x*N is divided by D with the
// Newton-Raphson divider. Values carry 16 fraction bits; for a < 8 and
// K <= 8, D stays below 2^32.
//
// Interface and timing: a and in_valid are sampled on the rising clock edge.
// N, D and a are registered after the two Horner chains. The multiply and
// divide follow in the second cycle, so y and out_valid appear two cycles
// after the input (LAT_LAMBERT_POLY = 2). A new input may enter every clock.
// Inputs at or past ALIM return the largest output, and so does an
// approximant of 1.0 or more. rst_n is asynchronous, active low, and clears
// the valid flags.
//
// Formats: AF, AW, YF and ALIM as in the other cores (defaults U3.12 in,
// U.15 out, 6.0).
//
// From the paper: the non-iterative form, numerator and denominator
// polynomials evaluated in parallel with Horner's rule, one adder and one
// multiplier per degree, and one Newton-Raphson divider at the end. The
// degrees follow from K. The paper quotes degrees 7 and 6, which is K = 6
// here; the K = 7 of the main configuration gives degrees 7 and 8. This
// design's own: the formats, the register placement, and the clamp.
module tanh_lambert_poly_core
  import tanh_pkg::*;
#(
  parameter int K    = 7,         // number of divisions (fractions)
  parameter int AF   = IN_FRAC,   // fraction bits of a
  parameter int AW   = MAG_W,     // width of a
  parameter int YF   = OUT_FRAC,  // fraction bits (and width) of y
  parameter int ALIM = X_LIMIT    // a at or past this returns the maximum
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [AW-1:0] a,
  output logic          out_valid,
  output logic [YF-1:0] y
);

  localparam logic [YF-1:0] YMAX = '1;              // 1 - 2^-YF
  localparam int TW  = 48;                          // polynomial value width
  localparam int TFR = 16;                          // its fraction bits
  localparam int X2W = 2 * AW;
  localparam int X2F = 2 * AF;
  localparam int TF  = 24;                          // fraction bits of the quotient
  localparam int NC  = K / 2 + 2;                   // coefficient slots
  localparam int DN  = (K - 1 + 1) / 2;             // degree of N in x^2
  localparam int DD  = (K + 1) / 2;                 // degree of D in x^2

  if (K < 1 || K > 8) begin : g_bad_k
    $error("tanh_lambert_poly_core: K must be 1 .. 8");
  end

  typedef longint coef_t [NC];

  // Coefficients of T_n in powers of x^2, by the recurrence above.
  function automatic coef_t poly(int n);
    coef_t tm2, tm1, tn;
    for (int i = 0; i < NC; i++) begin
      tm2[i] = 0;
      tm1[i] = 0;
    end
    tm2[0] = 1;                                     // T_-1
    tm1[0] = 2 * K + 1;                             // T_0
    if (n < 0) return tm2;
    for (int s = 1; s <= n; s++) begin
      tn[0] = longint'(2 * K + 1 - 2 * s) * tm1[0];
      for (int i = 1; i < NC; i++)
        tn[i] = longint'(2 * K + 1 - 2 * s) * tm1[i] + tm2[i - 1];
      tm2 = tm1;
      tm1 = tn;
    end
    return tm1;
  endfunction

  localparam coef_t CN = poly(K - 1);
  localparam coef_t CD = poly(K);

  typedef logic [TW-1:0] t_val_t;

  // ------------------------------------------------------------ stage 1
  logic [X2W-1:0]    x2;
  t_val_t            n_c, d_c;
  logic [TW+X2W-1:0] pn, pd;

  always_comb begin
    x2  = X2W'(a) * X2W'(a);
    n_c = t_val_t'(CN[DN]) << TFR;
    d_c = t_val_t'(CD[DD]) << TFR;
    for (int i = DD - 1; i >= 0; i--) begin
      pd  = (TW+X2W)'(d_c) * (TW+X2W)'(x2);
      d_c = TW'(pd >> X2F) + (t_val_t'(CD[i]) << TFR);
    end
    for (int i = DN - 1; i >= 0; i--) begin
      pn  = (TW+X2W)'(n_c) * (TW+X2W)'(x2);
      n_c = TW'(pn >> X2F) + (t_val_t'(CN[i]) << TFR);
    end
  end

  logic          v1, in_range1;
  logic [AW-1:0] a1;
  t_val_t        n1, d1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;

  always_ff @(posedge clk)
    if (in_valid) begin
      a1        <= a;
      n1        <= n_c;
      d1        <= d_c;
      in_range1 <= (int'(a) < ALIM);
    end

  // ------------------------------------------------------------ stage 2
  logic [TW+AW-1:0] num_full;
  t_val_t           num;
  logic [TF:0]      quo;
  logic [TF:0]      y_r;
  logic [YF-1:0]    y_c;

  always_comb num_full = (TW+AW)'(a1) * (TW+AW)'(n1);
  always_comb num      = TW'(num_full >> AF);

  nr_divider #(.W(TW), .QF(TF), .RF(34), .ITER(3)) u_div (
    .num (num), .den (d1), .quo (quo)
  );

  always_comb begin
    y_r = (quo + (TF+1)'(1 << (TF - YF - 1))) >> (TF - YF);
    // a short fraction can exceed 1.0 near the top of the range
    if (!in_range1 || num >= d1 || y_r > (TF+1)'(YMAX)) y_c = YMAX;
    else                                               y_c = YF'(y_r);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;

  always_ff @(posedge clk)
    if (v1) y <= y_c;

endmodule
