// nr_divider: fractional divider, quo = num / den for num <= den, computed as
// num times the Newton-Raphson reciprocal of den.
//
// How it works: den is shifted left until its top bit is set (a leading-zero
// count), so that the normalised divisor d = den<<s / 2^W lies in [0.5, 1).
// The same shift is applied to num, which leaves the ratio unchanged. The
// reciprocal starts from the linear estimate r0 = 48/17 - 32/17*d (worst
// relative error 1/17) and is refined ITER times with r <- r*(2 - d*r); each
// refinement roughly squares the error, so three give about 2^-32 before the
// RF-bit truncation. Finally quo = (num<<s / 2^W) * r.
//
// Interface: purely combinational. num and den are unsigned W-bit integers
// (any common binary point), den must be non-zero and num <= den. quo is the
// unsigned ratio with QF fraction bits, QF+1 bits wide so that 1.0 fits; it
// is truncated, so it may sit up to a few 2^-QF below the exact ratio.
//
// The paper asks for division by multiplying with a Newton-Raphson
// reciprocal; the normalisation, the linear seed, the iteration count and all
// widths are this design's choices.
module nr_divider #(
  parameter int W    = 48,   // operand width
  parameter int QF   = 24,   // fraction bits of the quotient
  parameter int RF   = 34,   // fraction bits of the reciprocal datapath
  parameter int ITER = 3     // Newton-Raphson refinements
) (
  input  logic [W-1:0]  num,
  input  logic [W-1:0]  den,
  output logic [QF:0]   quo
);

  localparam int SW = $clog2(W);

  if (W < RF) begin : g_bad_width
    $error("nr_divider: W must be at least RF");
  end

  // Seed constants 48/17 and 32/17 with RF fraction bits.
  localparam logic [RF+1:0] C48 = (RF+2)'((longint'(48) << RF) / 17);
  localparam logic [RF+1:0] C32 = (RF+2)'((longint'(32) << RF) / 17);

  logic [SW-1:0]   shamt;
  logic [W-1:0]    dn, nn;
  logic [RF-1:0]   d;            // normalised divisor, value in [0.5,1)
  logic [RF+1:0]   r;            // reciprocal estimate, value in [1,2]
  logic [RF+1:0]   e;            // 2 - d*r
  logic [2*RF+1:0] dr;
  logic [2*RF+3:0] re;
  logic [W+RF+1:0] prod;

  // Leading-zero count of den.
  always_comb begin
    shamt = '0;
    for (int i = 0; i < W; i++)
      if (den[i]) shamt = SW'(W - 1 - i);
  end

  always_comb begin
    dn = den << shamt;
    nn = num << shamt;
    d  = dn[W-1 -: RF];

    // r0 = 48/17 - 32/17 * d
    dr = (2*RF+2)'(C32) * (2*RF+2)'(d);
    r  = C48 - (RF+2)'(dr >> RF);
    for (int it = 0; it < ITER; it++) begin
      dr = (2*RF+2)'(d) * (2*RF+2)'(r);
      e  = (RF+2)'(longint'(2) << RF) - (RF+2)'(dr >> RF);
      re = (2*RF+4)'(r) * (2*RF+4)'(e);
      r  = (RF+2)'(re >> RF);
    end

    prod = (W+RF+2)'(nn) * (W+RF+2)'(r);
    quo  = (QF+1)'(prod >> (W + RF - QF));
  end

endmodule
