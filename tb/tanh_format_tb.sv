// tanh_format_tb: the precision / range table. Each row fixes an input and
// an output format and the parameters each method needs for a maximum error
// of 1 output ulp:
//   row  in     out    range  A      B1    B2    C     D      E
//   0    S2.13  S2.13  +-4    1/128  1/32  1/16  1/16  1/128  6
//   1    S2.13  S.15   +-4    1/128  1/32  1/16  1/64  1/256  6
//   2    S3.12  S.15   +-6    1/128  1/32  1/16  1/64  1/256  8
//   3    S2.5   S.7    +-4    1/8    1/32  1/32  1/8   1/8    4
// All 24 tanh_unit instances take a new input every clock: every input code
// of the row's format (the 8-bit S2.5 codes repeat). Each output is compared
// with tanh of the input that produced it, the maximum absolute error per
// instance is printed in output ulps, and each must stay within the limit
// below. The sign handling, saturation and latency of tanh_unit are checked
// along the way (out_valid count and every output compared).
`timescale 1ns/1ps
module tanh_format_tb;
  import tanh_pkg::*;

  localparam int NR = 4;
  localparam int NM = 6;
  // Allowed maximum error, in output ulps: the table's 1 ulp plus a small
  // margin for the rounding of table entries to the output format (the worst
  // instance measures 1.053 ulp).
  localparam real LIM_ULP = 1.06;

  localparam int R_AF   [NR] = '{13, 13, 12, 5};
  localparam int R_AW   [NR] = '{15, 15, 15, 7};
  localparam int R_YF   [NR] = '{13, 15, 15, 7};
  localparam int R_ALIM [NR] = '{1 << 15, 1 << 15, 6 << 12, 1 << 7};
  // A, B1, B2, C, D as log2(1/step or 1/threshold); E as K
  function automatic int r_par(int r, int m);
    case (r)
      0:       return (m == 0) ? 7 : (m == 1) ? 5 : (m == 2) ? 4 : (m == 3) ? 4 : (m == 4) ? 7 : 6;
      1:       return (m == 0) ? 7 : (m == 1) ? 5 : (m == 2) ? 4 : (m == 3) ? 6 : (m == 4) ? 8 : 6;
      2:       return (m == 0) ? 7 : (m == 1) ? 5 : (m == 2) ? 4 : (m == 3) ? 6 : (m == 4) ? 8 : 8;
      default: return (m == 0) ? 3 : (m == 1) ? 5 : (m == 2) ? 5 : (m == 3) ? 3 : (m == 4) ? 3 : 4;
    endcase
  endfunction

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        in_valid;
  logic [15:0] v;
  logic        running;

  real maxe [NR][NM];
  int  nout [NR][NM];

  function automatic method_e meth(int m);
    case (m)
      0:       return M_PWL;
      1, 2:    return M_TAYLOR;
      3:       return M_CATMULL;
      4:       return M_VELOCITY;
      default: return M_LAMBERT;
    endcase
  endfunction

  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar m = 0; m < NM; m++) begin : g_m
      localparam int      AF  = R_AF[r];
      localparam int      AW  = R_AW[r];
      localparam int      YF  = R_YF[r];
      localparam int      P   = r_par(r, m);
      localparam method_e M   = meth(m);
      localparam int      K   = (m == 5) ? P : E_K;
      localparam int      LAT = core_latency(M, K);

      logic signed [AW:0] x;
      logic signed [YF:0] y;
      logic               ov;
      logic signed [AW:0] xd [LAT];

      assign x = (AW+1)'(v);

      tanh_unit #(
        .METHOD(M), .STEP_LOG2(P), .TERMS(m == 2 ? 4 : 3), .THR_LOG2(P),
        .GROUP(1), .K(K), .AF(AF), .AW(AW), .YF(YF), .ALIM(R_ALIM[r])
      ) u_unit (
        .clk, .rst_n, .in_valid, .x, .out_valid(ov), .y
      );

      always @(posedge clk) begin
        xd[0] <= x;
        for (int i = 1; i < LAT; i++) xd[i] <= xd[i-1];
      end

      always @(negedge clk)
        if (rst_n && ov && running) begin
          real ref_v, e;
          ref_v = $tanh(real'(xd[LAT-1]) / (2.0 ** AF));
          e     = (real'(y) / (2.0 ** YF) - ref_v) * (2.0 ** YF);
          if (e < 0) e = -e;
          if (e > maxe[r][m]) maxe[r][m] = e;
          nout[r][m] = nout[r][m] + 1;
        end
    end
  end

  function automatic string label(int m);
    case (m)
      0: return "A  PWL";
      1: return "B1 Taylor 3";
      2: return "B2 Taylor 4";
      3: return "C  Catmull-Rom";
      4: return "D  velocity";
      default: return "E  Lambert";
    endcase
  endfunction

  initial begin
    for (int r = 0; r < NR; r++)
      for (int m = 0; m < NM; m++) begin
        maxe[r][m] = 0.0;
        nout[r][m] = 0;
      end
    in_valid = 1'b0;
    running  = 1'b0;
    v        = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    running  = 1'b1;
    in_valid = 1'b1;
    for (int i = 0; i < 65536; i++) begin
      v = 16'(i);
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (12) @(negedge clk);
    running = 1'b0;
    for (int r = 0; r < NR; r++)
      for (int m = 0; m < NM; m++) begin
        $display("  row %0d %-15s max error %f ulp (%0d outputs)", r, label(m), maxe[r][m], nout[r][m]);
        checks += 2;
        if (maxe[r][m] > LIM_ULP) begin
          failures++;
          $display("FAIL row %0d %s: %f ulp", r, label(m), maxe[r][m]);
        end
        if (nout[r][m] != 65536) begin
          failures++;
          $display("FAIL row %0d %s: %0d outputs", r, label(m), nout[r][m]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
