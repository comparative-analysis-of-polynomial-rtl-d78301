// tanh_taylor_core_tb: sweeps every magnitude a in [0, 6) through the PWL core
// back to back, one input per clock, and compares each result with tanh
// computed in real arithmetic. Checks: absolute error within the bound of the
// method plus one output LSB for rounding, one-cycle latency, and the
// saturated output for inputs past 6.0. A second instance with step 1/128
// (the table size quoted for the two-half LUT) is swept as well.
`timescale 1ns/1ps
module tanh_taylor_core_tb;
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
  logic [3:0] ovx;
  q_t   yx [4];
  real  maxx [4] = '{0.0, 0.0, 0.0, 0.0};
  localparam real   BX [4]   = '{3.65e-5 + ULP / 4.0, 3.23e-5 + ULP / 4.0,
                                 ULP + ULP / 4.0, ULP + ULP / 4.0};
  localparam string NX [4]   = '{"B1 coef LUT", "B2 coef LUT", "quad 1/32", "cubic 1/16"};

  tanh_taylor_core #(.TERMS(3), .STEP_LOG2(4), .COEF_LUT(1'b1)) dutx0 (.clk, .rst_n, .in_valid, .a, .out_valid(ovx[0]), .y(yx[0]));
  tanh_taylor_core #(.TERMS(4), .STEP_LOG2(3), .COEF_LUT(1'b1)) dutx1 (.clk, .rst_n, .in_valid, .a, .out_valid(ovx[1]), .y(yx[1]));
  tanh_taylor_core #(.TERMS(3), .STEP_LOG2(5))                  dutx2 (.clk, .rst_n, .in_valid, .a, .out_valid(ovx[2]), .y(yx[2]));
  tanh_taylor_core #(.TERMS(4), .STEP_LOG2(4))                  dutx3 (.clk, .rst_n, .in_valid, .a, .out_valid(ovx[3]), .y(yx[3]));

  tanh_taylor_core                            dut64  (.clk, .rst_n, .in_valid, .a, .out_valid(ov64),  .y(y64));
  tanh_taylor_core #(.TERMS(4), .STEP_LOG2(3)) dut128 (.clk, .rst_n, .in_valid, .a, .out_valid(ov128), .y(y128));

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
      check_out(m, y64, 3.65e-5 + ULP / 4.0, "B1", e64);
      check_out(m, y128, 3.23e-5 + ULP / 4.0, "B2", e128);
      if (e64 > maxerr64) maxerr64 = e64;
      for (int i = 0; i < 4; i++) begin
        real ex;
        checks++;
        if (!ovx[i]) begin
          failures++;
          $display("FAIL %s: valid missing", NX[i]);
        end
        check_out(m, yx[i], BX[i], NX[i], ex);
        if (ex > maxx[i]) maxx[i] = ex;
      end
      if (e128 > maxerr128) maxerr128 = e128;
      checks++;
      if (cycle - t0 != LAT_TAYLOR) begin
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
    $display("max error B1: %e, B2: %e", maxerr64, maxerr128);
    for (int i = 0; i < 4; i++) $display("max error %s: %e", NX[i], maxx[i]);
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
