// tanh_sweep_tb: accuracy against configuration, the parameter sweeps used
// to choose the compared configurations. Each method core is instantiated at
// every sweep point:
//   PWL            step 1/2 .. 1/128
//   Taylor         2, 3 and 4 terms, step 1/2 .. 1/32
//   Catmull-Rom    step 1/2 .. 1/128
//   velocity factor threshold 1/8 .. 1/128
//   Lambert        K = 2 .. 7
// Every magnitude in [0, 6) in steps of 3/4096 is applied to all of them (one
// input, then a pause longer than the deepest pipeline), and the maximum
// absolute and root-mean-square errors against tanh are collected and
// printed. Checks: within each family the maximum error does not grow as the
// parameter is refined (a plateau of one output LSB is allowed, where the
// 2^-15 output rounding dominates), and the six selected configurations stay
// within their listed maximum errors plus 2^-17. For Lambert, odd and even K
// are compared separately: even-K approximants rise above 1.0 near x = 6,
// the saturating output clamps them, and so they measure better than the
// unclamped fraction and better than the next odd K.
`timescale 1ns/1ps
module tanh_sweep_tb;
  import tanh_pkg::*;

  localparam real ULP = 1.0 / 32768.0;
  localparam int  NI  = 40;    // instances
  localparam int  STRIDE = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid;
  mag_t a;
  q_t   yv [NI];
  logic [NI-1:0] ov;

  // 0..6   PWL step 2^-1 .. 2^-7
  for (genvar i = 0; i < 7; i++) begin : g_pwl
    tanh_pwl_core #(.STEP_LOG2(i + 1)) u (.clk, .rst_n, .in_valid, .a, .out_valid(ov[i]), .y(yv[i]));
  end
  // 7..21  Taylor, terms 2..4 (groups of 5), step 2^-1 .. 2^-5
  for (genvar t = 0; t < 3; t++) begin : g_tay
    for (genvar i = 0; i < 5; i++) begin : g_s
      tanh_taylor_core #(.TERMS(t + 2), .STEP_LOG2(i + 1)) u (
        .clk, .rst_n, .in_valid, .a, .out_valid(ov[7 + 5 * t + i]), .y(yv[7 + 5 * t + i]));
    end
  end
  // 22..28 Catmull-Rom step 2^-1 .. 2^-7
  for (genvar i = 0; i < 7; i++) begin : g_cr
    tanh_catmull_core #(.STEP_LOG2(i + 1)) u (.clk, .rst_n, .in_valid, .a, .out_valid(ov[22 + i]), .y(yv[22 + i]));
  end
  // 29..33 velocity factor threshold 2^-3 .. 2^-7
  for (genvar i = 0; i < 5; i++) begin : g_vf
    tanh_vf_core #(.THR_LOG2(i + 3)) u (.clk, .rst_n, .in_valid, .a, .out_valid(ov[29 + i]), .y(yv[29 + i]));
  end
  // 34..39 Lambert K = 2 .. 7
  for (genvar i = 0; i < 6; i++) begin : g_lam
    tanh_lambert_core #(.K(i + 2)) u (.clk, .rst_n, .in_valid, .a, .out_valid(ov[34 + i]), .y(yv[34 + i]));
  end

  real maxe [NI];
  real sse  [NI];
  int  nsamp = 0;

  function automatic string label(int i);
    if (i < 7)  return $sformatf("PWL step 1/%0d", 1 << (i + 1));
    if (i < 22) return $sformatf("Taylor %0d terms step 1/%0d", (i - 7) / 5 + 2, 1 << ((i - 7) % 5 + 1));
    if (i < 29) return $sformatf("Catmull-Rom step 1/%0d", 1 << (i - 22 + 1));
    if (i < 34) return $sformatf("velocity factor thr 1/%0d", 1 << (i - 29 + 3));
    return $sformatf("Lambert K=%0d", i - 34 + 2);
  endfunction

  // refinement chains: pairs (coarser, finer)
  task automatic check_chain(int first, int n);
    for (int i = first; i < first + n - 1; i++) begin
      checks++;
      if (maxe[i + 1] > maxe[i] + ULP) begin
        failures++;
        $display("FAIL error grows from %s (%e) to %s (%e)", label(i), maxe[i], label(i + 1), maxe[i + 1]);
      end
    end
  endtask

  task automatic check_bound(int i, real bound);
    checks++;
    if (maxe[i] > bound) begin
      failures++;
      $display("FAIL %s: max error %e above %e", label(i), maxe[i], bound);
    end
  endtask

  initial begin
    for (int i = 0; i < NI; i++) begin
      maxe[i] = 0.0;
      sse[i]  = 0.0;
    end
    in_valid = 1'b0;
    a = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < X_LIMIT; v += STRIDE) begin
      real r;
      @(negedge clk);
      a = mag_t'(v);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      repeat (9) @(negedge clk);
      r = $tanh(real'(v) / 4096.0);
      nsamp++;
      for (int i = 0; i < NI; i++) begin
        real e;
        e = real'(yv[i]) * ULP - r;
        if (e < 0) e = -e;
        if (e > maxe[i]) maxe[i] = e;
        sse[i] += e * e;
      end
    end
    for (int i = 0; i < NI; i++)
      $display("  %-32s max %e  rms %e", label(i), maxe[i], $sqrt(sse[i] / nsamp));
    check_chain(0, 7);
    check_chain(7, 5);
    check_chain(12, 5);
    check_chain(17, 5);
    check_chain(22, 7);
    check_chain(29, 5);
    // Lambert: even K overshoot 1.0 near x = 6 and are clamped by the
    // saturating output, which favours them; compare odd and even K apart.
    for (int i = 34; i < 38; i++) begin
      checks++;
      if (maxe[i + 2] > maxe[i] + ULP) begin
        failures++;
        $display("FAIL error grows from %s to %s", label(i), label(i + 2));
      end
    end
    // more terms never hurt at equal step
    for (int i = 0; i < 5; i++) begin
      checks += 2;
      if (maxe[12 + i] > maxe[7 + i] + ULP || maxe[17 + i] > maxe[12 + i] + ULP) begin
        failures++;
        $display("FAIL Taylor error grows with more terms at step 1/%0d", 1 << (i + 1));
      end
    end
    check_bound(5,  4.65e-5 + ULP / 4.0);   // A
    check_bound(15, 3.65e-5 + ULP / 4.0);   // B1
    check_bound(19, 3.23e-5 + ULP / 4.0);   // B2
    check_bound(25, 3.63e-5 + ULP / 4.0);   // C
    check_bound(33, 3.85e-5 + ULP / 4.0);   // D
    check_bound(39, 4.87e-5 + ULP / 4.0);   // E
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
