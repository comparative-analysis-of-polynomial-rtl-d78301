// tanh_vf_core: method D, trigonometric expansion with velocity factors, for
// a non-negative a (U3.12 by default).
//
// How it works: a is split into a coarse part (the bits of weight 2^2 down
// to the threshold 2^-THR_LOG2, 1/128 by default) and a fine remainder b
// below the threshold. The velocity factor of a sum is the product of the
// velocity factors of its terms, f(u+v) = f(u)*f(v), where f(u) =
// (1+tanh u)/(1-tanh u) = e^2u. So each coarse bit (or group of GROUP bits)
// selects, through a multiplexer, either 1.0 or the stored factor of its
// weight, and a chain of multipliers forms f_a for the coarse part. Then
//     tanh(a_coarse) = (f_a - 1) / (f_a + 1)                (Newton-Raphson)
//     tanh(a)        = tanh(a_coarse) + b * (1 - tanh^2(a_coarse))
// the second line being the first-order correction for the small b.
// GROUP = 1 is the basic form, one 2-to-1 multiplexer and one multiplier per
// bit. GROUP = 2 stores the four products 1, f(lsb), f(msb), f(lsb)f(msb) of
// each bit pair and selects with 4-to-1 multiplexers, halving the
// multipliers. Factors are unsigned with 24 integer and 24 fraction bits
// (the largest, e^16 for a just under 8, needs 24 integer bits); they are
// computed at elaboration from exp().
//
// Interface and timing: a and in_valid are sampled on the rising clock edge.
// f_a is registered after the multiplier chain, the division and the
// correction term follow in the second cycle, so y and out_valid appear two
// cycles after the input (LAT_VELOCITY = 2). Inputs at or past 6.0 return
// 1-2^-15. rst_n is asynchronous, active low, clears the valid flags.
//
// Formats: AF and AW are the fraction bits and width of a, YF the fraction
// bits (and width) of y, ALIM the value of a from which the largest output is
// returned. The defaults give U3.12 in, U.15 out and 6.0; the other rows of
// the precision table (S2.13 and S2.5 inputs, S2.13 and S.7 outputs, range
// +-4 with ALIM = 2^AW) are parameter settings of the same logic.
//
// From the paper: the velocity factor identity, the multiplexer table of
// factors for the powers of two 2^2 .. 2^-7 selected by the bits of |x|, the
// product, (f-1)/(f+1), the correction b*(1-tanh^2 a), the two-bit grouping,
// the Newton-Raphson division. This design's own: the factor format, the
// register placement, and indexing of bits: the block diagram numbers the
// bits 15..6 and 5:0, which is a 13-fraction-bit magnitude; with the 12
// fraction bits of the main configuration the same weights are bits 14..5 of
// a and the remainder is bits 4:0.
module tanh_vf_core
  import tanh_pkg::*;
#(
  parameter int THR_LOG2 = 7,   // threshold 2^-7 = 1/128
  parameter int GROUP    = 1,   // bits per factor table (1 or 2)
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

  localparam int BF   = AF - THR_LOG2;              // bits of remainder b
  localparam int NB   = AW - BF;                    // coarse bits
  localparam int NG   = (NB + GROUP - 1) / GROUP;   // factor tables
  localparam int NE   = 1 << GROUP;                 // entries per table
  localparam int VI   = 24;                         // factor integer bits
  localparam int VFB  = 24;                         // factor fraction bits
  localparam int VW   = VI + VFB;
  localparam int TF   = 24;                         // tanh fraction bits

  typedef logic [VW-1:0] vf_t;
  typedef vf_t rom_t [NG*NE];      // table g, entry e at g*NE + e

  // Table g, entry v: velocity factor of v * 2^(g*GROUP - THR_LOG2).
  function automatic rom_t build_rom();
    rom_t   r;
    longint v, lim;
    lim = (longint'(1) << VW) - 1;
    for (int g = 0; g < NG; g++)
      for (int e = 0; e < NE; e++) begin
        v = vf_fix(real'(e) * (2.0 ** (g * GROUP - THR_LOG2)), VFB);
        r[g*NE + e] = VW'((v > lim) ? lim : v);
      end
    return r;
  endfunction

  localparam rom_t VF = build_rom();

  // ------------------------------------------------------------ stage 1
  logic [NG*GROUP-1:0] coarse;
  vf_t                 f_c;
  logic [2*VW-1:0]     prod;

  always_comb begin
    coarse = (NG*GROUP)'(a[AW-1:BF]);
    f_c    = VF[int'(coarse[GROUP-1:0])];
    for (int g = 1; g < NG; g++) begin
      prod = (2*VW)'(f_c) * (2*VW)'(VF[g*NE + int'(coarse[g*GROUP +: GROUP])]);
      prod = prod + (2*VW)'(longint'(1) << (VFB - 1));
      f_c  = VW'(prod >> VFB);
    end
  end

  logic          v1, in_range1;
  vf_t           f_a;
  logic [BF-1:0] b1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;

  always_ff @(posedge clk)
    if (in_valid) begin
      f_a       <= f_c;
      b1        <= a[BF-1:0];
      in_range1 <= (int'(a) < ALIM);
    end

  // ------------------------------------------------------------ stage 2
  localparam vf_t ONE = vf_t'(1) << VFB;

  logic [TF:0]     t_a;         // tanh of the coarse part, TF fraction bits
  logic [2*TF+1:0] t_sq;
  logic [TF:0]     one_m;
  logic [TF+BF:0]  corr;
  logic [TF+1:0]   sum;
  ym_t              y_c;

  nr_divider #(.W(VW), .QF(TF), .RF(34), .ITER(3)) u_div (
    .num (f_a - ONE),
    .den (f_a + ONE),
    .quo (t_a)
  );

  always_comb begin
    t_sq  = (2*TF+2)'(t_a) * (2*TF+2)'(t_a);
    one_m = (TF+1)'(1 << TF) - (TF+1)'(t_sq >> TF);            // 1 - tanh^2
    corr  = (TF+BF+1)'(((TF+BF+1)'(one_m) * (TF+BF+1)'(b1)) >> AF);
    sum   = (TF+2)'(t_a) + (TF+2)'(corr) + (TF+2)'(1 << (TF - YF - 1));
    sum   = sum >> (TF - YF);
    if (!in_range1 || sum > (TF+2)'(YMAX)) y_c = YMAX;
    else                                    y_c = YF'(sum);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;

  always_ff @(posedge clk)
    if (v1) y <= y_c;

endmodule
