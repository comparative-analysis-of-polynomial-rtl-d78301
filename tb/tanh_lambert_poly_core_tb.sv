// tanh_lambert_poly_core_tb: checks the non-iterative Lambert core at K = 7
// (main configuration, degrees 7 and 8) and K = 6 (degrees 7 and 6).
// Every magnitude 0 .. 32767 is streamed in, one per clock. Each result is
// compared with two references, both computed in real arithmetic:
//   * the truncated fraction itself, x * T_(K-1)(x) / T_K(x), with T run
//     through its recurrence numerically (not through the expanded
//     polynomials), rounded to 2^-15 and clipped below 1.0: the core must
//     be within 1 LSB of it for a < 6, and give 1-2^-15 from 6.0 on;
//   * tanh itself: at K = 7 the maximum error must stay within the listed
//     4.87e-5 plus 2^-17.
// The latency (2 cycles) is checked on every result.
`timescale 1ns/1ps
module tanh_lambert_poly_core_tb;
  import tanh_pkg::*;

  localparam real ULP = 1.0 / 32768.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid;
  mag_t a;
  logic ov7, ov6;
  q_t   y7, y6;

  tanh_lambert_poly_core #(.K(7)) dut7 (.clk, .rst_n, .in_valid, .a, .out_valid(ov7), .y(y7));
  tanh_lambert_poly_core #(.K(6)) dut6 (.clk, .rst_n, .in_valid, .a, .out_valid(ov6), .y(y6));

  mag_t   qa [$];
  longint qt [$];
  longint cycle = 0;
  real    maxe7 = 0.0, maxe6 = 0.0;

  always @(posedge clk) cycle <= cycle + 1;

  // truncated continued fraction by its recurrence, in real arithmetic
  function automatic real lambert(real x, int k);
    real tm2, tm1, tn;
    tm2 = 1.0;
    tm1 = real'(2 * k + 1);
    for (int n = 1; n <= k; n++) begin
      tn  = real'(2 * k + 1 - 2 * n) * tm1 + x * x * tm2;
      tm2 = tm1;
      tm1 = tn;
    end
    return x * tm2 / tm1;
  endfunction

  task automatic check(int k, mag_t av, q_t got, inout real maxe);
    real x, r, e;
    longint q;
    x = real'(av) / 4096.0;
    checks++;
    if (int'(av) >= X_LIMIT) begin
      if (got !== Q_MAX) begin
        failures++;
        $display("FAIL K=%0d a=%0d: %0d, expected saturation", k, av, got);
      end
      return;
    end
    r = lambert(x, k);
    q = longint'($floor(r * 32768.0 + 0.5));
    if (q > 32767) q = 32767;
    if (longint'(got) - q > 1 || q - longint'(got) > 1) begin
      failures++;
      if (failures < 20) $display("FAIL K=%0d a=%0d: %0d, fraction gives %0d", k, av, got, q);
    end
    e = real'(got) * ULP - $tanh(x);
    if (e < 0) e = -e;
    if (e > maxe) maxe = e;
  endtask

  always @(posedge clk)
    if (rst_n && ov7) begin
      mag_t   av;
      longint t0;
      if (qa.size() == 0) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        av = qa.pop_front();
        t0 = qt.pop_front();
        checks++;
        if (cycle - t0 != LAT_LAMBERT_POLY) begin
          failures++;
          $display("FAIL latency %0d", cycle - t0);
        end
        checks++;
        if (ov6 !== 1'b1) begin
          failures++;
          $display("FAIL K=6 valid missing");
        end
        check(7, av, y7, maxe7);
        check(6, av, y6, maxe6);
      end
    end

  initial begin
    in_valid = 1'b0;
    a = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int v = 0; v < 32768; v++) begin
      @(negedge clk);
      in_valid = 1'b1;
      a = mag_t'(v);
      qa.push_back(a);
      qt.push_back(cycle);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (qa.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", qa.size());
    end
    checks++;
    if (maxe7 > 4.87e-5 + ULP / 4.0) begin
      failures++;
      $display("FAIL K=7 max error %e", maxe7);
    end
    $display("max error K=7: %e, K=6: %e", maxe7, maxe6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
