// tanh_unit: signed fixed-point tanh, S3.12 in, S.15 out by default, built
// around one of the method cores, chosen by METHOD. AF, AW, YF and ALIM
// select other formats (see the cores); x is AW+1 bits, y YF+1 bits.
//
// How it works: tanh is odd, so the cores only see the magnitude |x|. The
// unit takes the absolute value, passes it to the core, and negates the
// core's result again for a negative x. Inputs with |x| >= 6.0 (including
// -8.0, whose magnitude does not fit U3.12) give +-(1 - 2^-15), the largest
// output; tanh(6) differs from 1 by less than one output LSB. The sign and
// the saturation flag travel through a delay line as long as the core's
// pipeline, so results stay in step with their inputs.
//
// Interface and timing: x and in_valid are sampled on the rising edge; y and
// out_valid follow core_latency(METHOD, K) cycles later (1 for PWL, Taylor
// and Catmull-Rom, 2 for velocity factors and the polynomial Lambert form,
// K+1 for the pipelined Lambert form). A new input may
// be given every clock. rst_n is asynchronous, active low.
//
// From the paper: handling only positive arguments, the +-6 domain and the
// saturated value beyond it, the S3.12 / S.15 formats. This design's own:
// the delay line and the symmetric negative output -(1-2^-15).
module tanh_unit
  import tanh_pkg::*;
#(
  parameter method_e METHOD    = M_TAYLOR,
  parameter int      STEP_LOG2 = B1_STEP_LOG2, // PWL, Taylor, Catmull-Rom
  parameter int      TERMS     = 3,            // Taylor
  parameter int      THR_LOG2  = D_THR_LOG2,   // velocity factor
  parameter int      GROUP     = 1,            // velocity factor
  parameter int      K         = E_K,          // Lambert
  parameter int      AF        = IN_FRAC,      // fraction bits of x
  parameter int      AW        = MAG_W,        // width of x less the sign
  parameter int      YF        = OUT_FRAC,     // fraction bits of y
  parameter int      ALIM      = X_LIMIT       // |x| at or past this saturates
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic signed [AW:0] x,
  output logic out_valid,
  output logic signed [YF:0] y
);

  localparam int LAT = core_latency(METHOD, K);

  localparam logic [YF-1:0] YMAX = '1;

  logic [AW:0]     mag;
  logic [AW-1:0]   a;
  logic            sat, neg;
  logic            core_valid;
  logic [YF-1:0]   core_y;

  always_comb begin
    neg = x[AW];
    mag = neg ? (AW+1)'(-x) : (AW+1)'(x);
    // the most negative code has no positive twin in AW bits; it is taken
    // as the largest magnitude (only matters when ALIM is the full range)
    a   = mag[AW] ? '1 : mag[AW-1:0];
    sat = (int'(a) >= ALIM);
  end

  if (METHOD == M_PWL) begin : g_core
    tanh_pwl_core #(.STEP_LOG2(STEP_LOG2), .AF(AF), .AW(AW), .YF(YF), .ALIM(ALIM)) u_core (
      .clk, .rst_n, .in_valid, .a, .out_valid(core_valid), .y(core_y));
  end else if (METHOD == M_TAYLOR) begin : g_core
    tanh_taylor_core #(.TERMS(TERMS), .STEP_LOG2(STEP_LOG2), .AF(AF), .AW(AW), .YF(YF),
                       .ALIM(ALIM)) u_core (
      .clk, .rst_n, .in_valid, .a, .out_valid(core_valid), .y(core_y));
  end else if (METHOD == M_CATMULL) begin : g_core
    tanh_catmull_core #(.STEP_LOG2(STEP_LOG2), .AF(AF), .AW(AW), .YF(YF), .ALIM(ALIM)) u_core (
      .clk, .rst_n, .in_valid, .a, .out_valid(core_valid), .y(core_y));
  end else if (METHOD == M_VELOCITY) begin : g_core
    tanh_vf_core #(.THR_LOG2(THR_LOG2), .GROUP(GROUP), .AF(AF), .AW(AW), .YF(YF),
                   .ALIM(ALIM)) u_core (
      .clk, .rst_n, .in_valid, .a, .out_valid(core_valid), .y(core_y));
  end else if (METHOD == M_LAMBERT_POLY) begin : g_core
    tanh_lambert_poly_core #(.K(K), .AF(AF), .AW(AW), .YF(YF), .ALIM(ALIM)) u_core (
      .clk, .rst_n, .in_valid, .a, .out_valid(core_valid), .y(core_y));
  end else begin : g_core
    tanh_lambert_core #(.K(K), .AF(AF), .AW(AW), .YF(YF), .ALIM(ALIM)) u_core (
      .clk, .rst_n, .in_valid, .a, .out_valid(core_valid), .y(core_y));
  end

  // sign and saturation flag, delayed like the core
  logic [LAT-1:0] neg_d, sat_d;

  always_ff @(posedge clk)
    if (LAT == 1) begin
      neg_d <= LAT'(neg);
      sat_d <= LAT'(sat);
    end else begin
      neg_d <= LAT'({neg_d, neg});
      sat_d <= LAT'({sat_d, sat});
    end

  logic [YF-1:0] mag_y;

  always_comb begin
    mag_y = sat_d[LAT-1] ? YMAX : core_y;
    y     = neg_d[LAT-1] ? -(YF+1)'({1'b0, mag_y}) : (YF+1)'({1'b0, mag_y});
  end

  assign out_valid = core_valid;

endmodule
