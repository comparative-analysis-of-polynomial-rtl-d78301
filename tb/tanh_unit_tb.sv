// tanh_unit_tb: applies all 65536 S3.12 codes to two signed tanh units, the
// default one (quadratic Taylor, step 1/16) and a Lambert one (K = 7, eight
// cycles deep), and checks: |error| within the listed maximum for the
// method plus 2^-17 where |x| < 6; +-(1-2^-15) where |x| >= 6, including
// x = -8.0 whose magnitude does not fit the core input; odd symmetry
// y(-x) = -y(x); and the latency of each unit, so that the delayed sign and
// saturation flag meet the right core result.
`timescale 1ns/1ps
module tanh_unit_tb;
  import tanh_pkg::*;

  localparam real ULP = 1.0 / 32768.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid;
  x_t   x;
  logic ov_t, ov_l;
  y_t   y_t_o, y_l_o;

  tanh_unit                        dut_t (.clk, .rst_n, .in_valid, .x, .out_valid(ov_t), .y(y_t_o));
  tanh_unit #(.METHOD(M_LAMBERT))  dut_l (.clk, .rst_n, .in_valid, .x, .out_valid(ov_l), .y(y_l_o));

  x_t     qx_t[$], qx_l[$];
  longint qt_t[$], qt_l[$];
  longint cycle = 0;
  y_t     res_t [65536];    // results of the Taylor unit by input code

  always @(posedge clk) cycle <= cycle + 1;

  task check_one(input string tag, input x_t xv, input y_t got, input longint t0,
                 input int lat, input real bound);
    int  mag;
    real err;
    checks++;
    if (cycle - t0 != lat) begin
      failures++;
      $display("FAIL %s latency %0d", tag, cycle - t0);
    end
    mag = (xv < 0) ? -int'(xv) : int'(xv);
    checks++;
    if (mag >= X_LIMIT) begin
      if (got != ((xv < 0) ? -y_t'(32767) : y_t'(32767))) begin
        failures++;
        $display("FAIL %s x=%0d: got %0d, expected saturation", tag, xv, got);
      end
    end else begin
      err = real'(got) * ULP - $tanh(real'(xv) / 4096.0);
      if (err < 0) err = -err;
      if (err > bound) begin
        failures++;
        if (failures < 20) $display("FAIL %s x=%0d: got %0d err %e", tag, xv, got, err);
      end
    end
  endtask

  always @(posedge clk)
    if (rst_n) begin
      if (ov_t) begin
        x_t xv;
        longint t0;
        xv = qx_t.pop_front();
        t0 = qt_t.pop_front();
        check_one("taylor", xv, y_t_o, t0, LAT_TAYLOR, 3.65e-5 + ULP / 4.0);
        res_t[int'(xv) + 32768] = y_t_o;
      end
      if (ov_l) begin
        x_t xv;
        longint t0;
        xv = qx_l.pop_front();
        t0 = qt_l.pop_front();
        check_one("lambert", xv, y_l_o, t0, lat_lambert(E_K), 4.87e-5 + ULP / 4.0);
      end
    end

  initial begin
    in_valid = 1'b0;
    x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int v = 0; v < 65536; v++) begin
      @(negedge clk);
      in_valid = 1'b1;
      x = x_t'(v - 32768);
      qx_t.push_back(x);  qt_t.push_back(cycle);
      qx_l.push_back(x);  qt_l.push_back(cycle);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (12) @(posedge clk);
    checks++;
    if (qx_t.size() != 0 || qx_l.size() != 0) begin
      failures++;
      $display("FAIL results missing");
    end
    // odd symmetry of the Taylor unit
    for (int v = 1; v < 32768; v++) begin
      checks++;
      if (res_t[32768 + v] != -res_t[32768 - v]) begin
        failures++;
        if (failures < 20) $display("FAIL symmetry at %0d", v);
      end
    end
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
