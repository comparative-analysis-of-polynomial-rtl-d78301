// tanh_vf_core_tb: sweeps every magnitude a in [0, 6) back to back, one
// input per clock, through two velocity-factor cores: the default (one bit
// per factor multiplexer, threshold 1/128) and the grouped form (bit pairs,
// threshold 1/256). Each result is compared with tanh computed in real
// arithmetic; the bounds are 3.85e-5 (the maximum error listed for 1/128)
// and one output LSB (the bound for 1/256), each plus 2^-17. Also checked:
// two-cycle latency and the saturated output past 6.0.
`timescale 1ns/1ps
module tanh_vf_core_tb;
  import tanh_pkg::*;

  localparam real ULP = 1.0 / 32768.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid;
  mag_t a;
  logic ov64, ov128;
  q_t   y64, y128;

  tanh_vf_core                                dut64  (.clk, .rst_n, .in_valid, .a, .out_valid(ov64),  .y(y64));
  tanh_vf_core #(.THR_LOG2(8), .GROUP(2))     dut128 (.clk, .rst_n, .in_valid, .a, .out_valid(ov128), .y(y128));

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
      check_out(m, y64, 3.85e-5 + ULP / 4.0, "thr1/128", e64);
      check_out(m, y128, ULP + ULP / 4.0, "thr1/256,pairs", e128);
      if (e64 > maxerr64) maxerr64 = e64;
      if (e128 > maxerr128) maxerr128 = e128;
      checks++;
      if (cycle - t0 != LAT_VELOCITY) begin
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
    $display("max error 1/128: %e, 1/256 paired: %e", maxerr64, maxerr128);
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
