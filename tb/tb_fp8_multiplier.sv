// tb_fp8_multiplier: exhaustive check of the FP8 multiplier.
//
// All 256 x 256 operand pairs are applied and every output is compared with
// the double-precision reference (fp8_ref_pkg). Failures are also counted
// per input class (normal/subnormal/zero/NaN) so that a fault in the
// subnormal x normal path shows where it hits. The multiplier is
// combinational: each result is sampled 1 ns after the operands change.
`timescale 1ns/1ps
module tb_fp8_multiplier;
  import snn_pkg::*;
  import fp8_ref_pkg::*;

  fp8_t a, b, y;
  int   checks = 0, failures = 0;
  int   sub_norm_checks = 0, sub_norm_fail = 0;

  fp8_multiplier dut (.a(a), .b(b), .y(y));

  function automatic bit is_sub(input logic [7:0] x);
    return x[6:3] == 0 && x[2:0] != 0;
  endfunction

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp_y;
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        a = fp8_t'(8'(i));
        b = fp8_t'(8'(j));
        #1;
        exp_y = ref_mul(8'(i), 8'(j));
        checks++;
        if ((is_sub(8'(i)) && !is_sub(8'(j))) || (is_sub(8'(j)) && !is_sub(8'(i)))) sub_norm_checks++;
        if (!fp8_same(y, exp_y)) begin
          failures++;
          if ((is_sub(8'(i)) && !is_sub(8'(j))) || (is_sub(8'(j)) && !is_sub(8'(i)))) sub_norm_fail++;
          if (failures <= 10)
            $display("MISMATCH %02h * %02h = %02h, expected %02h", i, j, y, exp_y);
        end
      end
    end
    $display("subnormal x normal pairs: %0d checked, %0d failed", sub_norm_checks, sub_norm_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
