// tanh_bank_top: the six tanh configurations of the comparison side by side,
// all fed the same S3.12 input stream.
//
//   y_a  : A,  piecewise linear, step 1/64
//   y_b1 : B1, quadratic Taylor, step 1/16 (derivatives from tanh)
//   y_b2 : B2, cubic Taylor, step 1/8
//   y_c  : C,  cubic Catmull-Rom spline, step 1/16
//   y_d  : D,  velocity factors down to 1/128, linear correction below
//   y_e  : E,  Lambert continued fraction, 7 divisions, pipelined
//   y_ep : E,  the same fraction in its non-iterative form (two polynomials
//              of degree 7 and 8 evaluated side by side, one division)
//
// Each output has its own valid flag because the pipelines differ in depth:
// A, B1, B2 and C answer one cycle after the input, D and the polynomial
// form of E after two, the pipelined E after eight. All accept a new input
// every clock. Inputs are S3.12 (|x| < 8), outputs S.15; |x| >= 6 gives
// +-(1 - 2^-15).
//
// The methods, their formats and their step sizes are those of the
// comparison; putting them side by side on one input is this design's
// choice, a way to run and compare them together.
module tanh_bank_top
  import tanh_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  x_t   x,
  output logic valid_a,  output y_t y_a,
  output logic valid_b1, output y_t y_b1,
  output logic valid_b2, output y_t y_b2,
  output logic valid_c,  output y_t y_c,
  output logic valid_d,  output y_t y_d,
  output logic valid_e,  output y_t y_e,
  output logic valid_ep, output y_t y_ep
);

  tanh_unit #(.METHOD(M_PWL), .STEP_LOG2(A_STEP_LOG2)) u_a (
    .clk, .rst_n, .in_valid, .x, .out_valid(valid_a), .y(y_a));

  tanh_unit #(.METHOD(M_TAYLOR), .STEP_LOG2(B1_STEP_LOG2), .TERMS(3)) u_b1 (
    .clk, .rst_n, .in_valid, .x, .out_valid(valid_b1), .y(y_b1));

  tanh_unit #(.METHOD(M_TAYLOR), .STEP_LOG2(B2_STEP_LOG2), .TERMS(4)) u_b2 (
    .clk, .rst_n, .in_valid, .x, .out_valid(valid_b2), .y(y_b2));

  tanh_unit #(.METHOD(M_CATMULL), .STEP_LOG2(C_STEP_LOG2)) u_c (
    .clk, .rst_n, .in_valid, .x, .out_valid(valid_c), .y(y_c));

  tanh_unit #(.METHOD(M_VELOCITY), .THR_LOG2(D_THR_LOG2), .GROUP(1)) u_d (
    .clk, .rst_n, .in_valid, .x, .out_valid(valid_d), .y(y_d));

  tanh_unit #(.METHOD(M_LAMBERT), .K(E_K)) u_e (
    .clk, .rst_n, .in_valid, .x, .out_valid(valid_e), .y(y_e));

  tanh_unit #(.METHOD(M_LAMBERT_POLY), .K(E_K)) u_ep (
    .clk, .rst_n, .in_valid, .x, .out_valid(valid_ep), .y(y_ep));

endmodule
