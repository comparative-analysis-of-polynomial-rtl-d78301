// lambert_iter_unit_tb: drives one recurrence stage with random T values,
// x^2 values and coefficients, and compares T_n = c*T_(n-1) + x^2*T_(n-2)
// (x^2 product truncated to the T format), the passed-on T_(n-1) and the
// stepped coefficient c-2 with values computed in 128-bit arithmetic. Also
// runs the whole recurrence for K = 1 and K = 2 on x = 1.0 and compares
// with the closed forms T_1 = 3 + x^2 and T_2 = 15 + 6x^2.
`timescale 1ns/1ps
module lambert_iter_unit_tb;

  localparam int TW = 48, TFR = 16, X2W = 30, X2F = 24, CW = 5;

  int checks = 0, failures = 0;

  logic [CW-1:0]  c_in, c_out;
  logic [TW-1:0]  t1, t2, tn, tp;
  logic [X2W-1:0] x2;

  lambert_iter_unit #(.TW(TW), .TFR(TFR), .X2W(X2W), .X2F(X2F), .CW(CW)) dut (
    .c_in, .t_nm1_in(t1), .t_nm2_in(t2), .x2, .t_n(tn), .t_nm1_out(tp), .c_out);

  task automatic expect_eq(longint got, longint want, string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  initial begin
    logic [127:0] e;
    for (int i = 0; i < 20000; i++) begin
      c_in = CW'($urandom_range(17, 2));
      t1   = TW'({$urandom, $urandom} >> 24);       // up to 2^40
      t2   = TW'({$urandom, $urandom} >> 28);
      x2   = X2W'($urandom_range(36 << X2F, 0));
      #1;
      e = 128'(c_in) * 128'(t1) + ((128'(x2) * 128'(t2)) >> X2F);
      expect_eq(longint'(tn), longint'(e[TW-1:0]), "T_n");
      expect_eq(longint'(tp), longint'(t1), "T_(n-1) pass");
      expect_eq(longint'(c_out), longint'(c_in) - 2, "c-2");
    end
    // K = 1: T_0 = 3, T_1 = 1*3 + x^2*1 with x = 1
    x2 = X2W'(1) << X2F;
    c_in = CW'(3); t1 = TW'(1) << TFR; t2 = '0; #1;
    expect_eq(longint'(tn), longint'(3) << TFR, "K1 T0");
    c_in = c_out; t2 = t1; t1 = tn; #1;
    expect_eq(longint'(tn), longint'(4) << TFR, "K1 T1");
    // K = 2: T_0 = 5, T_1 = 3*5 + 1 = 16, T_2 = 1*16 + 5 = 21 (15 + 6x^2)
    c_in = CW'(5); t1 = TW'(1) << TFR; t2 = '0; #1;
    c_in = c_out; t2 = t1; t1 = tn; #1;
    expect_eq(longint'(tn), longint'(16) << TFR, "K2 T1");
    c_in = c_out; t2 = t1; t1 = tn; #1;
    expect_eq(longint'(tn), longint'(21) << TFR, "K2 T2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
