// tb_rne_rounder: every input of the rounder (exponent field 0..31, mantissa,
// R, S, NaN) for both overflow policies. The expectation is computed from
// real numbers: the pre-rounding value plus half an ULP for R and a quarter
// ULP for S (any nonzero remainder below half an ULP), rounded by the
// reference conversion.
`timescale 1ns/1ps
module tb_rne_rounder;
  import snn_pkg::*;
  import fp8_ref_pkg::*;
  logic       sign, r, s, nan_in;
  logic [4:0] exp_in;
  logic [2:0] man_in;
  fp8_t       y, y_sat;
  logic       ovf, ovf_sat;
  int checks = 0, failures = 0, n_ovf = 0, n_tie_even = 0;

  rne_rounder #(.SATURATE(1'b0)) u_nan (.sign, .exp_in, .man_in, .r, .s, .nan_in, .y(y), .overflow(ovf));
  rne_rounder #(.SATURATE(1'b1)) u_sat (.sign, .exp_in, .man_in, .r, .s, .nan_in, .y(y_sat), .overflow(ovf_sat));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("MISMATCH %s: s=%0b e=%0d m=%0d R=%0b S=%0b nan=%0b y=%02h sat=%02h",
                                   what, sign, exp_in, man_in, r, s, nan_in, y, y_sat);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2 * 32 * 8 * 4 * 2; i++) begin
      real base, ulp, v;
      int  ue;
      logic [7:0] e8;
      {nan_in, sign, exp_in, man_in, r, s} = 11'(i);
      #1;
      ue   = ((exp_in == 0) ? 1 : int'(exp_in)) - 10;
      ulp  = 2.0 ** ue;
      base = ((exp_in == 0) ? 0.0 : 8.0 * ulp) + real'(man_in) * ulp;
      v    = base + (r ? ulp / 2.0 : 0.0) + (s ? ulp / 4.0 : 0.0);
      e8   = fp8_from_real(sign ? -v : v);
      if (sign && v == 0.0) e8 = 8'h80;
      if (nan_in) begin
        chk(fp8_is_nan(y) && fp8_is_nan(y_sat), "nan propagation");
      end else begin
        chk(fp8_same(y, e8), "round");
        if (fp8_is_nan(e8)) begin
          n_ovf++;
          chk(y_sat == {sign, 7'h7E}, "saturate");
          chk(ovf && ovf_sat, "overflow flag");
        end else begin
          chk(y_sat == y, "saturating variant in range");
          chk(!ovf, "no overflow flag");
        end
        if (r && !s && !man_in[0]) n_tie_even++;
      end
    end
    $display("overflow cases %0d, ties to even %0d", n_ovf, n_tie_even);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
