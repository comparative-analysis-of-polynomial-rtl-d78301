// tanh_lambert_core: method E, Lambert's continued fraction for tanh,
// evaluated by a pipeline of recurrence stages, for a non-negative a,
// U3.12 by default.
//
// How it works: truncating the continued fraction
//     tanh x = x / (1 + x^2 / (3 + x^2 / (5 + ...)))
// after K divisions gives tanh x ~ x * T_(K-1) / T_K, where
//     T_-1 = 1,  T_0 = 2K+1,  T_n = (2K+1-2n) T_(n-1) + x^2 T_(n-2).
// x^2 is formed once; a chain of lambert_iter_unit stages computes T_0 .. T_K,
// and the last step multiplies x by T_(K-1) and divides by T_K with the
// Newton-Raphson divider. T values carry 16 fraction bits and 32 integer
// bits, ample for a < 6 (T_7 is below 2^28 there).
//
// Interface and timing: a new input may enter on every clock. Stage 1 holds
// T_0 and T_1 (the first stage needs no multipliers, its output is the
// constant 2K+1), stages 2 .. K one more T each, and the final multiply and
// divide are registered once more: y and out_valid appear K+1 cycles after
// a and in_valid (lat_lambert(K) in tanh_pkg). Inputs at or past 6.0 return
// 1-2^-15, and so does an approximant of 1.0 or more (for even K the
// truncated fraction rises above 1.0 just below x = 6, by 4e-4 at K = 6).
// rst_n is asynchronous, active low, clears the valid pipeline.
//
// Formats: AF and AW are the fraction bits and width of a, YF the fraction
// bits (and width) of y, ALIM the value of a from which the largest output is
// returned. The defaults give U3.12 in, U.15 out and 6.0; the other rows of
// the precision table (S2.13 and S2.5 inputs, S2.13 and S.7 outputs, range
// +-4 with ALIM = 2^AW) are parameter settings of the same logic.
//
// From the paper: the recurrence, K = 7 for the main configuration, one
// pipeline stage per fraction, one multiplier and one divider at the end.
// This design's own: the formats and the register placement.
module tanh_lambert_core
  import tanh_pkg::*;
#(
  parameter int K = 7,            // number of divisions (fractions)
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

  localparam int TW  = 48;
  localparam int TFR = 16;
  localparam int X2W = 2 * AW;
  localparam int X2F = 2 * AF;
  localparam int CW  = $clog2(2 * K + 2) + 1;
  localparam int TF  = 24;                          // fraction bits of the quotient

  typedef logic [TW-1:0] t_val_t;

  typedef struct packed {
    logic            in_range;
    logic [AW-1:0]            a;
    logic [X2W-1:0]  x2;
    logic [CW-1:0]   c;        // coefficient for the next stage
    t_val_t          t_n;      // newest T
    t_val_t          t_nm1;    // the one before
  } stage_t;

  stage_t         st [1:K];
  logic [K:1]     vld;         // valid flag of each stage

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld <= '0;
    else        vld <= K'({vld, in_valid});

  // ---------------------------------------------------------- stages 0 and 1
  logic [X2W-1:0] x2_c;
  t_val_t         t0, t0_pass, t1;
  logic [CW-1:0]  c1, c2;

  always_comb x2_c = X2W'(a) * X2W'(a);

  lambert_iter_unit #(.TW(TW), .TFR(TFR), .X2W(X2W), .X2F(X2F), .CW(CW)) u_it0 (
    .c_in (CW'(2 * K + 1)), .t_nm1_in (t_val_t'(1) << TFR), .t_nm2_in ('0),
    .x2 (x2_c), .t_n (t0), .t_nm1_out (), .c_out (c1)
  );

  lambert_iter_unit #(.TW(TW), .TFR(TFR), .X2W(X2W), .X2F(X2F), .CW(CW)) u_it1 (
    .c_in (c1), .t_nm1_in (t0), .t_nm2_in (t_val_t'(1) << TFR),
    .x2 (x2_c), .t_n (t1), .t_nm1_out (t0_pass), .c_out (c2)
  );

  always_ff @(posedge clk)
    if (in_valid) begin
      st[1].in_range <= (int'(a) < ALIM);
      st[1].a        <= a;
      st[1].x2       <= x2_c;
      st[1].c        <= c2;
      st[1].t_n      <= t1;
      st[1].t_nm1    <= t0_pass;
    end

  // ---------------------------------------------------------- stages 2 .. K
  for (genvar s = 2; s <= K; s++) begin : g_stage
    t_val_t        tn, tp;
    logic [CW-1:0] cn;

    lambert_iter_unit #(.TW(TW), .TFR(TFR), .X2W(X2W), .X2F(X2F), .CW(CW)) u_it (
      .c_in (st[s-1].c), .t_nm1_in (st[s-1].t_n), .t_nm2_in (st[s-1].t_nm1),
      .x2 (st[s-1].x2), .t_n (tn), .t_nm1_out (tp), .c_out (cn)
    );

    always_ff @(posedge clk)
      if (vld[s-1]) begin
        st[s].in_range <= st[s-1].in_range;
        st[s].a        <= st[s-1].a;
        st[s].x2       <= st[s-1].x2;
        st[s].c        <= cn;
        st[s].t_n      <= tn;
        st[s].t_nm1    <= tp;
      end
  end

  // ---------------------------------------------------------- x * T_(K-1) / T_K
  logic [TW+AW-1:0] num_full;
  t_val_t              num;
  logic [TF:0]         quo;
  logic [TF:0]         y_r;
  ym_t                  y_c;

  always_comb num_full = (TW+AW)'(st[K].a) * (TW+AW)'(st[K].t_nm1);
  always_comb num      = TW'(num_full >> AF);

  nr_divider #(.W(TW), .QF(TF), .RF(34), .ITER(3)) u_div (
    .num (num), .den (st[K].t_n), .quo (quo)
  );

  always_comb begin
    y_r = (quo + (TF+1)'(1 << (TF - YF - 1))) >> (TF - YF);
    // a short fraction can exceed 1.0 near x = 6; the divider needs num <= den
    if (!st[K].in_range || num >= st[K].t_n || y_r > (TF+1)'(YMAX)) y_c = YMAX;
    else                                          y_c = YF'(y_r);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vld[K];

  always_ff @(posedge clk)
    if (vld[K]) y <= y_c;

endmodule
