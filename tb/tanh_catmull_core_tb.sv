// tanh_catmull_core_tb: sweeps every magnitude a in [0, 6) back to back, one
// input per clock, through two Catmull-Rom cores: step 1/16 (the default)
// and step 1/64 (the step listed for a one-LSB error bound). Each result is
// compared with tanh computed in real arithmetic; the bounds are 3.63e-5
// (the maximum error listed for step 1/16) and one output LSB, each plus
// 2^-17 for fixed-point effects. Also checked: one-cycle latency and the
// saturated output past 6.0. A third instance reads its t vector from a
// table and must give exactly the results of the default one.
`timescale 1ns/1ps
module tanh_catmull_core_tb;
  import tanh_pkg::*;

  localparam real ULP = 1.0 / 32768.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid;
  mag_t a;
  logic ov64, ov128, ovt;
  q_t   y64, y128, yt;

  tanh_catmull_core #(.TVEC_LUT(1'b1)) dutt (.clk, .rst_n, .in_valid, .a, .out_valid(ovt), .y(yt));

  tanh_catmull_core                   dut64  (.clk, .rst_n, .in_valid, .a, .out_valid(ov64),  .y(y64));
  tanh_catmull_core #(.STEP_LOG2(6)) dut128 (.clk, .rst_n, .in_valid, .a, .out_valid(ov128), .y(y128));

  // expected results, in issue order
  mag_t   q_a[$];
  longint q_t0[$];
  longint cycle = 0;
  real    maxerr64 = 0.0, maxerr128 = 0.0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic real ref_tanh(mag_t m);
    real x;
    x = real'(m) / 4096.0;
    return $tanh(x);
  endfunction

  task check_out(input mag_t m, input q_t got, input real tol, input string tag, output real err);
    real exp_v;
    err = 0.0;
    checks++;
    if (int'(m) >= X_LIMIT) begin
      if (got !== Q_MAX) begin
        failures++;
        $display("FAIL %s a=%0d: got %0d, expected saturation", tag, m, got);
      end
    end else begin
      exp_v = ref_tanh(m);
      err = real'(got) * ULP - exp_v;
      if (err < 0) err = -err;
      if (err > tol) begin
        failures++;
        if (failures < 20)
          $display("FAIL %s a=%0d: got %0d, ref %f, err %e", tag, m, got, exp_v * 32768.0, err);
      end
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && ov64 != ov128) begin
      failures++;
      $display("FAIL valid mismatch between instances");
    end
    if (rst_n && ov64) begin
      mag_t m;
      longint t0;
      real e64, e128;
      m  = q_a.pop_front();
      t0 = q_t0.pop_front();
      check_out(m, y64, 3.63e-5 + ULP / 4.0, "step1/16", e64);
      check_out(m, y128, ULP + ULP / 4.0, "step1/64", e128);
      if (e64 > maxerr64) maxerr64 = e64;
      checks++;
      if (!ovt || yt != y64) begin
        failures++;
        if (failures < 20) $display("FAIL t-vector table a=%0d: %0d vs %0d", m, yt, y64);
      end
      if (e128 > maxerr128) maxerr128 = e128;
      checks++;
      if (cycle - t0 != LAT_CATMULL) begin
        failures++;
        $display("FAIL latency %0d", cycle - t0);
      end
    end
  end

  initial begin
    in_valid = 1'b0;
    a = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int v = 0; v < X_LIMIT + 64; v++) begin
      @(negedge clk);
      in_valid = 1'b1;
      a = mag_t'(v);
      q_a.push_back(a);
      q_t0.push_back(cycle);
    end
    // a few inputs far past the limit
    for (int v = 0; v < 16; v++) begin
      @(negedge clk);
      a = mag_t'(32767 - v * 97);
      q_a.push_back(a);
      q_t0.push_back(cycle);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    if (q_a.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", q_a.size());
    end
    $display("max error step 1/16: %e, step 1/64: %e", maxerr64, maxerr128);
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
