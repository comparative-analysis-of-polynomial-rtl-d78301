// tanh_bank_top_tb: end-to-end test of the six tanh configurations (seven
// outputs: E in both its forms) at their default sizes. Every one of the 65536 S3.12 input codes is applied, mostly
// back to back with an idle cycle after every 97th input, and each of the
// seven output streams is compared with tanh computed in real arithmetic:
// within the maximum error listed for its configuration (plus 2^-17 for
// fixed-point effects) for |x| < 6, exactly +-(1-2^-15) beyond. Per output
// the latency is checked (1 cycle for A, B1, B2, C; 2 for D and polynomial
// E; 8 for pipelined E) and
// that results come out in input order.
//
// Mechanisms counted, each of which must occur: positive and negative
// saturation, negative inputs (sign restored at the output), PWL inputs in
// even and in odd segments (the two table halves swap roles), Taylor inputs
// on both sides of their expansion point, velocity-factor inputs with a
// non-zero remainder below the threshold (correction term used), idle cycles
// in the input stream and full-rate back-to-back inputs.
`timescale 1ns/1ps
module tanh_bank_top_tb;
  import tanh_pkg::*;

  localparam real ULP = 1.0 / 32768.0;
  localparam int  NO  = 7;
  // maximum error per configuration: A, B1, B2, C, D, E, E polynomial form
  localparam real BOUND [NO] = '{4.66e-5, 3.65e-5 + ULP / 4.0, 3.23e-5 + ULP / 4.0,
                                 3.63e-5 + ULP / 4.0, 3.85e-5 + ULP / 4.0,
                                 4.87e-5 + ULP / 4.0, 4.87e-5 + ULP / 4.0};
  // published mean error column, which measures as a root-mean-square error
  localparam real RMS_PUB [NO] = '{1.24e-5, 1.16e-5, 1.17e-5, 1.13e-5, 9.53e-6, 1.50e-5, 1.50e-5};
  localparam int  LAT [NO]   = '{1, 1, 1, 1, 2, 8, 2};
  localparam string NAME [NO] = '{"A", "B1", "B2", "C", "D", "E", "Ep"};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid;
  x_t   x;
  logic [NO-1:0] ov;
  y_t   yo [NO];

  tanh_bank_top dut (
    .clk, .rst_n, .in_valid, .x,
    .valid_a (ov[0]), .y_a (yo[0]),
    .valid_b1(ov[1]), .y_b1(yo[1]),
    .valid_b2(ov[2]), .y_b2(yo[2]),
    .valid_c (ov[3]), .y_c (yo[3]),
    .valid_d (ov[4]), .y_d (yo[4]),
    .valid_e (ov[5]), .y_e (yo[5]),
    .valid_ep(ov[6]), .y_ep(yo[6])
  );

  x_t     qx [NO][$];
  longint qt [NO][$];
  longint cycle = 0;
  real    maxerr [NO];
  real    sse [NO];
  int     nsse [NO];

  // mechanism counters
  int n_sat_pos = 0, n_sat_neg = 0, n_neg = 0, n_pwl_even = 0, n_pwl_odd = 0;
  int n_tay_below = 0, n_tay_above = 0, n_vf_corr = 0, n_idle = 0, n_b2b = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task check_one(input int o, input x_t xv, input y_t got, input longint t0);
    real    xr, err;
    int     mag;
    checks++;
    if (cycle - t0 != LAT[o]) begin
      failures++;
      $display("FAIL %s latency %0d", NAME[o], cycle - t0);
    end
    mag = (xv < 0) ? -int'(xv) : int'(xv);
    checks++;
    if (mag >= X_LIMIT) begin
      if (got != ((xv < 0) ? -y_t'(32767) : y_t'(32767))) begin
        failures++;
        $display("FAIL %s x=%0d: got %0d, expected saturation", NAME[o], xv, got);
      end
    end else begin
      xr  = real'(xv) / 4096.0;
      err = real'(got) * ULP - $tanh(xr);
      if (err < 0) err = -err;
      if (err > maxerr[o]) maxerr[o] = err;
      sse[o]  += err * err;
      nsse[o] += 1;
      if (err > BOUND[o]) begin
        failures++;
        if (failures < 30)
          $display("FAIL %s x=%0d: got %0d, ref %f, err %e", NAME[o], xv, got, $tanh(xr) * 32768.0, err);
      end
    end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < NO; o++)
        if (ov[o]) begin
          x_t xv;
          longint t0;
          if (qx[o].size() == 0) begin
            failures++;
            $display("FAIL %s: unexpected result", NAME[o]);
          end else begin
            xv = qx[o].pop_front();
            t0 = qt[o].pop_front();
            check_one(o, xv, yo[o], t0);
          end
        end
    end
  end

  task automatic count_mechanisms(x_t xv);
    int mag;
    mag = (xv < 0) ? -int'(xv) : int'(xv);
    if (xv < 0) n_neg++;
    if (mag >= X_LIMIT) begin
      if (xv < 0) n_sat_neg++; else n_sat_pos++;
    end else begin
      if (((mag >> (IN_FRAC - A_STEP_LOG2)) & 1) == 1) n_pwl_odd++; else n_pwl_even++;
      if ((mag & ((1 << (IN_FRAC - B1_STEP_LOG2)) - 1)) >= (1 << (IN_FRAC - B1_STEP_LOG2 - 1)))
        n_tay_above++;   // rounds up: expansion point above x
      else
        n_tay_below++;
      if ((mag & ((1 << (IN_FRAC - D_THR_LOG2)) - 1)) != 0) n_vf_corr++;
    end
  endtask

  task automatic expect_seen(int n, string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else
      $display("  %-34s %0d", what, n);
  endtask

  initial begin
    for (int o = 0; o < NO; o++) begin
      maxerr[o] = 0.0;
      sse[o]    = 0.0;
      nsse[o]   = 0;
    end
    in_valid = 1'b0;
    x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int v = 0; v < 65536; v++) begin
      @(negedge clk);
      if (v % 97 == 96) begin
        in_valid = 1'b0;
        n_idle++;
        @(negedge clk);
      end else if (v > 0) n_b2b++;
      in_valid = 1'b1;
      x = x_t'(v - 32768);
      count_mechanisms(x);
      for (int o = 0; o < NO; o++) begin
        qx[o].push_back(x);
        qt[o].push_back(cycle);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (12) @(posedge clk);
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (qx[o].size() != 0) begin
        failures++;
        $display("FAIL %s: %0d results missing", NAME[o], qx[o].size());
      end
      $display("  max error %-2s %e (bound %e)", NAME[o], maxerr[o], BOUND[o]);
    end
    // RMS error over -6 < x < 6, within 5% of the published column
    for (int o = 0; o < NO; o++) begin
      real rms;
      rms = $sqrt(sse[o] / real'(nsse[o]));
      $display("  rms error %-2s %e (published %e)", NAME[o], rms, RMS_PUB[o]);
      checks++;
      if (rms > 1.05 * RMS_PUB[o] || rms < 0.95 * RMS_PUB[o]) begin
        failures++;
        $display("FAIL %s rms error %e, published %e", NAME[o], rms, RMS_PUB[o]);
      end
    end
    expect_seen(n_sat_pos,   "positive saturation");
    expect_seen(n_sat_neg,   "negative saturation");
    expect_seen(n_neg,       "negative inputs");
    expect_seen(n_pwl_even,  "PWL even segment");
    expect_seen(n_pwl_odd,   "PWL odd segment (halves swapped)");
    expect_seen(n_tay_below, "Taylor point below x");
    expect_seen(n_tay_above, "Taylor point above x");
    expect_seen(n_vf_corr,   "VF correction term non-zero");
    expect_seen(n_idle,      "idle input cycles");
    expect_seen(n_b2b,       "back-to-back inputs");
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
