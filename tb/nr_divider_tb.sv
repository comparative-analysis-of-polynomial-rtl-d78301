// nr_divider_tb: drives the Newton-Raphson divider with random numerator /
// denominator pairs of every magnitude (num <= den), plus the corner cases
// num = 0, num = den and den a power of two, and compares the quotient with
// the ratio computed in real arithmetic. The quotient is truncated, so it
// must lie within 4 LSB below and 1 LSB above the exact ratio.
`timescale 1ns/1ps
module nr_divider_tb;

  localparam int W  = 48;
  localparam int QF = 24;

  int checks = 0, failures = 0;

  logic [W-1:0] num, den;
  logic [QF:0]  quo;

  nr_divider #(.W(W), .QF(QF)) dut (.num, .den, .quo);

  task automatic check(logic [W-1:0] n, logic [W-1:0] d);
    real exact, got;
    num = n;
    den = d;
    #1;
    exact = (real'(n) / real'(d)) * (2.0 ** QF);
    got   = real'(quo);
    checks++;
    if (got > exact + 1.0 || got < exact - 4.0) begin
      failures++;
      if (failures < 20)
        $display("FAIL num=%0d den=%0d quo=%0d exact=%f", n, d, quo, exact);
    end
  endtask

  initial begin
    logic [W-1:0] n, d;
    int sh;
    check(48'd0, 48'd1);
    check(48'd1, 48'd1);
    check(48'd5, 48'd5);
    check(48'd1, 48'd2);
    check(48'd3, 48'd1 << 40);
    check((48'd1 << 47) - 1, (48'd1 << 47));
    check(48'hFFFF_FFFF_FFFF, 48'hFFFF_FFFF_FFFF);
    for (int i = 0; i < 20000; i++) begin
      d  = {$urandom, $urandom};
      sh = $urandom_range(W - 1, 0);
      d  = d >> sh;
      if (d == 0) d = 1;
      n  = {$urandom, $urandom};
      n  = n % (d + 1'b1);
      check(n, d);
    end
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
