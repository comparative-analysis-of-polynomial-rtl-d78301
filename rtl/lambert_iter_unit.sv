// lambert_iter_unit: one stage of the continued-fraction recurrence for tanh,
//     T_n = c_n * T_(n-1) + x^2 * T_(n-2),   c_(n+1) = c_n - 2,
// with c_0 = 2K+1, T_-1 = 1 and T_-2 = 0 at the first stage, so that the
// stages produce T_0 = 2K+1, T_1 = (2K-1)(2K+1) + x^2, and so on.
//
// Interface: purely combinational; the enclosing pipeline adds registers.
// T values are unsigned fixed point with TFR fraction bits, x^2 has X2F
// fraction bits, c is an unsigned integer. Outputs: the new T_n, the T_(n-1)
// it was given (which the next stage needs as its T_(n-2)), and c_(n+1).
//
// From the paper: the recurrence and the stage structure of its block
// diagram (two multipliers, an adder for T_n, an adder that steps the
// coefficient by -2). This design's own: the number formats and the
// truncation of the x^2 product to TFR fraction bits.
module lambert_iter_unit #(
  parameter int TW  = 48,   // width of T values
  parameter int TFR = 16,   // fraction bits of T values
  parameter int X2W = 32,   // width of x^2
  parameter int X2F = 24,   // fraction bits of x^2
  parameter int CW  = 6     // width of the coefficient
) (
  input  logic [CW-1:0]  c_in,
  input  logic [TW-1:0]  t_nm1_in,   // T_(n-1)
  input  logic [TW-1:0]  t_nm2_in,   // T_(n-2)
  input  logic [X2W-1:0] x2,
  output logic [TW-1:0]  t_n,
  output logic [TW-1:0]  t_nm1_out,
  output logic [CW-1:0]  c_out
);

  logic [TW+CW-1:0]  p_c;
  logic [TW+X2W-1:0] p_x;

  always_comb begin
    p_c       = (TW+CW)'(c_in) * (TW+CW)'(t_nm1_in);
    p_x       = (TW+X2W)'(x2) * (TW+X2W)'(t_nm2_in);
    t_n       = TW'(p_c) + TW'(p_x >> X2F);
    t_nm1_out = t_nm1_in;
    c_out     = c_in - CW'(2);
  end

endmodule
