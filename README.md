# Six fixed-point tanh units: polynomial and rational approximations side by side

Neural-network accelerators need the hyperbolic tangent as an activation
function, and they need it cheaply: a 16-bit fixed-point input, a 16-bit
output, and an error of about one or two output LSBs. There are many ways to
get there. This RTL builds six of them, with their parameters chosen so that
all six reach roughly the same accuracy, and runs them on a common input so
that their structure, size and latency can be compared:

| label | method | configuration | latency |
|---|---|---|---|
| A  | piecewise linear interpolation | step 1/64 | 1 |
| B1 | Taylor series, quadratic, derivatives from tanh | step 1/16 | 1 |
| B2 | Taylor series, cubic, derivatives from tanh | step 1/8 | 1 |
| C  | uniform cubic Catmull-Rom spline | step 1/16 | 1 |
| D  | trigonometric expansion with velocity factors | threshold 1/128 | 2 |
| E  | Lambert's continued fraction, pipelined | 7 divisions | 8 |
| E (polynomial form) | the same fraction as one rational function | 7 divisions | 2 |

The methods and their configurations come from a published comparison of
tanh approximations for VLSI (M. Chandra, "Comparative Analysis of Polynomial
and Rational Approximations of Hyperbolic Tangent Function for VLSI
Implementation"). That paper describes each unit at block-diagram level. The
bit-level arithmetic, the pipelining and the interfaces here are this
design's own. Each departure is listed below.

## Number formats and the odd-function wrapper

* Input `x`: signed S3.12 (1 sign bit, 3 integer bits, 12 fraction bits),
  so -8 <= x < 8.
* Output `y`: signed S.15 (1 sign bit, 15 fraction bits).
* Table entries: tanh rounded to 2^-15, the same as the output.

These are the defaults. Every core and `tanh_unit` take four format
parameters:

| parameter | meaning | default |
|---|---|---|
| `AF` | fraction bits of the input | 12 |
| `AW` | width of the magnitude (input width less the sign) | 15 |
| `YF` | fraction bits of the output (the core output is `YF` bits wide) | 15 |
| `ALIM` | magnitude, in input LSBs, from which the largest output is returned | 24576 (6.0) |

With these, the other formats of the precision table are settings of the
same logic: S2.13 in with S2.13 or S.15 out, and S2.5 in with S.7 out. For
those the range is ±4, the whole input range, so `ALIM = 2^AW` and nothing
saturates (see "Other formats" below).

tanh is odd, so every method core (`tanh_*_core`) works only on the
magnitude `a = |x|`, unsigned U3.12 (15 bits), and returns the unsigned
magnitude of tanh in 15 bits. `tanh_unit` wraps a core:

1. It takes the absolute value.
2. It flags saturation when |x| >= 6.0.
3. It delays the sign and the flag by the core's latency.
4. It negates the result again for a negative x.

The domain is cut at ±6 because tanh(6) = 1 − 1.2·10^-5 is within one LSB
of the largest output. Past it the unit returns ±(1 − 2^-15) = ±32767. This
also covers x = −8.0, whose magnitude does not fit the 15-bit core input.

All cores share one timing pattern:

* `a` and `in_valid` are sampled on a rising edge.
* `y` and `out_valid` appear a fixed number of cycles later.
* A new input may be given on every clock.
* `rst_n` is asynchronous and active low. It clears only the valid flags.
  Data registers are not reset, because they are only read when valid.

## The methods

### A: piecewise linear (`tanh_pwl_core`)

The range [0, 6) is split into 384 segments of width 1/64. The upper 9 bits
of `a` pick a segment i. The lower 6 bits are the position `frac` inside it:

    y = P[i] + (P[i+1] − P[i]) · frac / 64

The division by the step is a shift. The table is stored as two hard-wired
halves, one holding the even points P[0], P[2], … and one the odd points, so
both end points of a segment are read in the same cycle. For an odd segment
the halves swap roles, and the even half is read one entry further on.

### B1, B2: Taylor series with run-time derivatives (`tanh_taylor_core`)

Only f = tanh(h) is stored, at the points h = i·step. The derivatives of tanh
can be written in terms of tanh itself, so by default no derivative tables
are needed:

    f'     = 1 − f²
    f''/2  = −f·f'
    f'''/6 = −(1 − 4f² + 3f⁴)/3

The polynomial is evaluated in Horner form, one multiplier and one adder per
degree. B1 (`TERMS=3`) stops at the square term. B2 (`TERMS=4`) adds the
cube. `TERMS=2` gives the linear form, used only in the parameter sweep.

Forming the derivatives at run time costs squaring logic: two extra
multipliers for B1, more for B2. With `COEF_LUT=1` the core reads f',
f''/2 and f'''/6 from three more tables instead. Their entries are the exact
derivatives rounded to 2^-15. This form is larger but has a shorter path,
and its Horner part matches the count of one multiplier and one adder per
degree.

The expansion point is the **nearest** stored point, so the distance
d = a − h is signed and |d| <= step/2. This point matters: expanding from
the point below would double the worst-case error of B1. With the nearest
point, the measured errors equal the published ones to three digits.

The cost is one more table entry than 6/step: 97 entries for B1 and 49 for
B2, because the point 6.0 itself is needed.

### C: Catmull-Rom spline (`tanh_catmull_core`)

The spline passes through the control points P[k] = tanh(k/16). Over the
segment [k, k+1), with t the lower 8 bits of `a` read as a fraction:

    y = ½ · ( P[k−1]·(−t³+2t²−t) + P[k]·(3t³−5t²+2)
            + P[k+1]·(−3t³+4t²+t) + P[k+2]·(t³−t²) )

The four weights (the "t vector") are small integer combinations of t, t²
and t³. They are formed exactly in logic. The dot product is also kept
exact, and the sum is rounded once at the end.

The table holds P[−1] … P[97]. The point below zero is −tanh(1/16), because
tanh is odd.

With `TVEC_LUT=1` the four weights are read from a table of 4 × 256 exact
entries instead of being computed. The results are bit-identical.

### D: velocity factors (`tanh_vf_core`)

This is the least obvious of the six. Define the velocity factor of u as

    f(u) = (1 + tanh u)/(1 − tanh u) = e^(2u)

Then f(u+v) = f(u)·f(v), and tanh u = (f(u) − 1)/(f(u) + 1). The core works
in three steps:

1. **Coarse part.** Split `a` into a coarse part, the bits of weight 2^2 down
   to the threshold 2^-7, and a remainder b < 1/128. Each coarse bit drives
   a 2-to-1 multiplexer that chooses between 1.0 and the stored factor of its
   weight. Nine multipliers chain the ten choices into f_a, the factor of the
   coarse part. Factors are unsigned 24.24 fixed point: the largest product,
   for a just under 8, is e^16, which needs 24 integer bits.
2. **Coarse tanh.** Compute tanh(a_coarse) = (f_a − 1)/(f_a + 1) with the
   Newton-Raphson divider.
3. **Correction.** Add the first-order term for the remainder:
   tanh(a) ≈ tanh(a_coarse) + b·(1 − tanh²(a_coarse)).

A register after the multiplier chain gives a latency of 2.

With `GROUP=2`, each pair of bits shares one table of four entries: 1,
f(low bit), f(high bit) and their product. A 4-to-1 multiplexer selects the
entry, which halves the number of multipliers.

### E: Lambert's continued fraction (`tanh_lambert_core`, `lambert_iter_unit`)

Truncating tanh x = x/(1 + x²/(3 + x²/(5 + …))) after K divisions gives

    tanh x ≈ x · T_(K−1) / T_K,   T_−1 = 1,  T_0 = 2K+1,
    T_n = (2K+1−2n)·T_(n−1) + x²·T_(n−2)

Each `lambert_iter_unit` computes one T_n with two multipliers and an adder.
It also steps the coefficient down by 2 for the next stage. x² is formed
once and travels down the pipeline with x.

* The first unit's result is the constant 2K+1, so the first register stage
  holds T_0 and T_1.
* Stages 2 … K add one T each.
* A last stage multiplies x·T_(K−1) and divides by T_K.

This gives K+1 = 8 cycles of latency at full throughput. T values are 32.16
fixed point; at |x| < 6, T_7 stays below 2^28.

For even K, the truncated fraction rises slightly above 1.0 just below
x = 6 (by 4·10^-4 at K = 6). The divider needs numerator <= denominator, and
the output cannot exceed 1 − 2^-15, so the core compares the two and clamps.
As a side effect, even K measure noticeably better here than the unclamped
fraction does.

### E without iteration: two polynomials (`tanh_lambert_poly_core`)

The same truncated fraction can be multiplied out. T_(K−1) and T_K are
polynomials in x² with integer coefficients, so

    tanh x ≈ x · N(x²) / D(x²),   N = T_(K−1),  D = T_K

For K = 7:

    N = 2027025 + 270270 x² + 6930 x⁴ + 36 x⁶
    D = 2027025 + 945945 x² + 51975 x⁴ + 630 x⁶ + x⁸

The core works these coefficients out at elaboration. It runs the
recurrence above on vectors of coefficients. It then evaluates N and D side
by side in Horner form, one multiplier and one adder per degree. A second
cycle multiplies by x and divides with the same divider. Latency is 2
cycles, against 8 for the pipeline. The cost is a longer combinational path
(three multiply-adds for N, four for D, at K = 7).

The numerator x·N has degree 7 and the denominator degree 8. The source
describes this form as "degree 7 and 6". That pair is the K = 6
truncation, so the testbench also runs K = 6. The K = 7 pair reproduces the
main configuration's accuracy: its maximum error is 4.874·10^-5, the same as
the pipelined form. The clamp at 1.0 is the same as in the pipelined core.

### The divider (`nr_divider`)

D and E divide a numerator by a larger denominator. The divider works as
follows:

1. Shift the denominator left until its top bit is set (a leading-zero
   count), so that its value d lies in [0.5, 1).
2. Shift the numerator by the same amount.
3. Start the reciprocal from the linear estimate 48/17 − 32/17·d, whose
   worst relative error is 1/17.
4. Refine it three times with r ← r·(2 − d·r). Each refinement roughly
   squares the error, so three take it to about 2^-32.
5. Multiply the numerator by r.

The divider is combinational. The quotient is truncated to 24 fraction bits
and is good to a few units of 2^-24.

## Top level (`tanh_bank_top`)

The top feeds one S3.12 stream to seven `tanh_unit`s: the six configurations
of the table above, plus E in its polynomial form. It brings out seven S.15
results, each with its own valid flag, because the pipeline depths differ.

Running them side by side is a choice of this design, made to compare
them. A real accelerator would keep only one of them. `tanh_unit` on its own
is that single-method block. Its default is B1, the method the comparison
recommends for medium accuracy.

## Accuracy reached

Measured over all 24,576 magnitudes in [0, 6), against tanh in double
precision:

| unit | max abs error here | published max error | RMS error here | published "MSE" |
|---|---|---|---|---|
| A  (PWL 1/64) | 4.647e-5 | 4.65e-5 | 1.251e-5 | 1.24e-5 |
| B1 (quadratic Taylor, 1/16) | 3.654e-5 | 3.65e-5 | 1.168e-5 | 1.16e-5 |
| B2 (cubic Taylor, 1/8) | 3.228e-5 | 3.23e-5 | 1.172e-5 | 1.17e-5 |
| C  (Catmull-Rom 1/16) | 3.631e-5 | 3.63e-5 | 1.141e-5 | 1.13e-5 |
| D  (velocity factor 1/128) | 3.665e-5 | 3.85e-5 | 9.79e-6 | 9.53e-6 |
| E  (Lambert K=7) | 4.874e-5 | 4.87e-5 | 1.500e-5 | 1.50e-5 |
| E  (Lambert K=7, polynomial form) | 4.874e-5 | 4.87e-5 | 1.500e-5 | 1.50e-5 |

One output LSB is 3.05e-5.

For five units the match is exact, which suggests the bit-level choices
agree with the reference model. D comes out slightly better; the published
model probably quantises the factors more coarsely.

The published "MSE" column matches the root-mean-square error, not its
square, and is read that way here. The RMS values above are measured over
all inputs with |x| < 6, and `tanh_bank_top_tb` requires each to be within
5% of the published figure; all are within 3%.

The tighter settings listed for a one-LSB bound are also simulated, through
module parameters:

* PWL with step 1/128.
* Catmull-Rom with step 1/64.
* Velocity factors with threshold 1/256, bit pairs.
* Lambert with K = 8.

All four stay within 1.0 LSB.

## Accuracy against configuration

`tb/tanh_sweep_tb.sv` instantiates every core at the sweep points used to
choose the configurations: 40 instances. It measures maximum and RMS error
over [0, 6) in steps of 3/4096. Maximum errors measured:

| step / threshold | 1/2 | 1/4 | 1/8 | 1/16 | 1/32 | 1/64 | 1/128 |
|---|---|---|---|---|---|---|---|
| PWL | 2.3e-2 | 6.0e-3 | 1.5e-3 | 3.9e-4 | 1.1e-4 | 4.4e-5 | 3.0e-5 |
| Taylor, 2 terms | 2.3e-2 | 5.9e-3 | 1.5e-3 | 3.8e-4 | 1.1e-4 | | |
| Taylor, 3 terms | 5.1e-3 | 6.4e-4 | 9.2e-5 | 3.7e-5 | 3.0e-5 | | |
| Taylor, 4 terms | 6.4e-4 | 6.0e-5 | 3.1e-5 | 3.0e-5 | 3.0e-5 | | |
| Catmull-Rom | 5.1e-3 | 5.6e-4 | 8.1e-5 | 3.6e-5 | 3.2e-5 | 3.0e-5 | 3.1e-5 |
| velocity factor | | | 5.9e-3 | 1.5e-3 | 3.8e-4 | 1.0e-4 | 3.5e-5 |

| Lambert K | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|
| max error | 1.9e-2 | 7.6e-2 | 1.4e-3 | 2.9e-3 | 9.3e-5 | 4.9e-5 |

Below about 3e-5 the 2^-15 output rounding dominates, and refining further
gains nothing. The Lambert row is not monotonic because of the clamp
described above.

## Other formats

`tb/tanh_format_tb.sv` builds the precision table: four format rows, each
with the step, threshold or depth the table lists for every method, all 24
as `tanh_unit` instances. Every input code of each format is streamed
through them, one per clock. The maximum errors, in output ulps:

| input → output, range | A | B1 | B2 | C | D | E |
|---|---|---|---|---|---|---|
| S2.13 → S2.13, ±4 (1/128, 1/32, 1/16, 1/16, 1/128, 6) | 1.014 | 0.993 | 1.008 | 1.003 | 0.664 | 0.619 |
| S2.13 → S.15, ±4 (1/128, 1/32, 1/16, 1/64, 1/256, 6) | 1.052 | 1.006 | 1.010 | 1.013 | 0.657 | 0.988 |
| S3.12 → S.15, ±6 (1/128, 1/32, 1/16, 1/64, 1/256, 8) | 0.993 | 1.006 | 1.006 | 1.006 | 0.993 | 0.993 |
| S2.5 → S.7, ±4 (1/8, 1/32, 1/32, 1/8, 1/8, 4) | 0.914 | 0.914 | 0.914 | 0.914 | 0.914 | 0.914 |

The table's target is 1 ulp. The rows meet it to within 0.053 ulp, which
is left by rounding the table entries to the output format. The testbench
limit is 1.06 ulp. In the S3.12 row, the 0.993 comes from the saturated
output 1 − 2^-15 near |x| = 8. In the S2.5 row, every method reaches the
same 0.914, set by rounding to 2^-7 near the top of the range. There the
Taylor step 1/32 equals the input LSB, so the expansion distance is always
zero and the Taylor core reduces to its 129-entry table.

The most negative input code (−4.0 in the S2.x formats) has no positive
twin in `AW` bits. The unit treats it as the largest magnitude, 4 − 2^-AF;
the difference in tanh is far below an output ulp.

## Where this RTL departs from the source, or fills gaps

* **PWL step.** The PWL configuration gives step 1/64. Elsewhere the text
  sizes the two table halves at 384 entries each, which corresponds to step
  1/128. The RTL follows 1/64. `STEP_LOG2=7` gives the larger tables.
* **Catmull-Rom index.** The text says five input msbs index the Catmull-Rom
  table. With step 1/16 over [0, 6), seven bits are needed, and the RTL
  follows the step size.
* **Lambert depth.** The main configuration uses K = 7. A second table lists
  K = 8 for the same formats at a one-LSB bound. The RTL defaults to 7.
* **Velocity-factor bit numbering.** The velocity-factor diagram numbers the
  selecting bits 15..6 and the remainder 5:0, which fits a 13-fraction-bit
  magnitude. With the 12 fraction bits used here, the same weights
  (2^2 … 2^-7) are bits 14..5 and the remainder is bits 4:0.
* **Bit-pair table size.** The bit-pair scheme is quoted as 20 entries and
  4 multipliers at threshold 1/256. That count fits a ±4 range. Over ±6,
  `GROUP=2, THR_LOG2=8` needs 6 groups: 24 entries and 5 multipliers.
* **Taylor expansion point.** The nearest point is used, which adds one
  table entry (see B1, B2 above).
* **Coefficient and t-vector tables.** The table variants are built as
  options (`COEF_LUT`, `TVEC_LUT`). The defaults compute instead.
* **Lambert clamp.** The clamp of the Lambert approximant at 1.0 is this
  design's addition.
* **Non-iterative Lambert degrees.** The source gives degrees 7 and 6 for
  the polynomial form. At the main configuration's 7 divisions they are 7
  and 8. The RTL follows the division count. `K=6` gives the quoted pair.
* **Own choices.** Registers, latencies, valid flags, reset, internal word
  widths and rounding are this design's choices.

## Files

| file | contents |
|---|---|
| `rtl/tanh_pkg.sv` | formats, method codes, configuration constants, latencies, table-building functions |
| `rtl/tanh_pwl_core.sv` | A |
| `rtl/tanh_taylor_core.sv` | B1 / B2 |
| `rtl/tanh_catmull_core.sv` | C |
| `rtl/tanh_vf_core.sv` | D |
| `rtl/lambert_iter_unit.sv`, `rtl/tanh_lambert_core.sv` | E, pipelined |
| `rtl/tanh_lambert_poly_core.sv` | E, polynomial form |
| `rtl/nr_divider.sv` | Newton-Raphson fractional divider |
| `rtl/tanh_unit.sv` | signed wrapper around one core |
| `rtl/tanh_bank_top.sv` | all six, plus the polynomial E, on one input |
| `tb/*_tb.sv` | one self-checking testbench per module, plus `tanh_sweep_tb` and `tanh_format_tb` |

The tables are not stored as data files. Each core builds its table at
elaboration with a constant function. It evaluates tanh(a) = (e^2a − 1)/
(e^2a + 1), or e^2a for the velocity factors, in real arithmetic and rounds
the result to the table's fixed-point format. Tools must therefore support
`real` and `$exp` in constant functions; Verilator and slang both do.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops with `$finish`. For example, for
the full design:

    verilator --binary --timing -Irtl rtl/tanh_pkg.sv tb/tanh_bank_top_tb.sv \
              --top-module tanh_bank_top_tb -Mdir obj && obj/Vtanh_bank_top_tb

The end-to-end test `tanh_bank_top_tb` runs the top at its default sizes. It
applies all 65,536 input codes and checks every output against tanh, against
the saturation value, and for its latency. It compares each output's
RMS error with the published figure. It also counts each mechanism
(saturation of both signs, negative inputs, both PWL table halves, Taylor
points on both sides, the velocity-factor correction, idle and back-to-back
inputs) and fails if any never occurred. It takes well under a second.

The per-core testbenches sweep all magnitudes through the default
configuration and through one tighter one. They also cover the table
variants. `tanh_sweep_tb` runs the 40-point accuracy sweep; it takes about
half a minute to compile. `tanh_format_tb` runs the four format rows.
`nr_divider_tb` and `lambert_iter_unit_tb` compare against independent
wide-integer or real arithmetic. `tanh_lambert_poly_core_tb` compares the
polynomial form with the continued fraction evaluated by its recurrence in
real arithmetic, at K = 7 and K = 6.

## Changing it

* **Step sizes, threshold, depth.** Set the module parameters (`STEP_LOG2`,
  `TERMS`, `THR_LOG2`, `GROUP`, `K`) or the configuration constants in
  `tanh_pkg`. Tables resize themselves.
* **Latency.** If you add pipeline registers to a core, update its entry in
  `tanh_pkg::core_latency` so that `tanh_unit` delays the sign to match.
* **Formats.** Set `AF`, `AW`, `YF` and `ALIM` on `tanh_unit` (or a core).
  The package constants `IN_FRAC`, `MAG_W`, `OUT_FRAC` and `X_LIMIT` are
  only the defaults. The internal words (30 coefficient bits, 24 quotient
  bits, 24.24 velocity factors, 32.16 Lambert T values) suit inputs up to
  8 and outputs up to 15 fraction bits. Wider formats need them reviewed.
  The step must stay at least one input LSB. The velocity-factor threshold
  must leave at least one remainder bit.
