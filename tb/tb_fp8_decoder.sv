// tb_fp8_decoder: all 256 codes through the effective-exponent decoder.
// Expected fields are derived from the code's numeric value (fp8_ref_pkg):
// value = sig * 2^(exp_eff - 10) for every finite code.
`timescale 1ns/1ps
module tb_fp8_decoder;
  import snn_pkg::*;
  import fp8_ref_pkg::*;
  fp8_t          x;
  fp8_unpacked_t u;
  int checks = 0, failures = 0;

  fp8_decoder dut (.x, .u);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("MISMATCH code %02h: %s", x, what);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      real v, av;
      int  ee;
      x = fp8_t'(8'(i));
      #1;
      v  = fp8_to_real(8'(i));
      av = (v < 0.0) ? -v : v;
      chk(u.sign == x[7], "sign");
      chk(u.is_nan == (i[6:0] == 7'h7F), "nan flag");
      chk(u.is_zero == (av == 0.0), "zero flag");
      chk(u.is_sub == (av > 0.0 && av < 2.0 ** -6), "subnormal flag");
      chk(u.exp_eff >= 1, "effective exponent >= 1");
      ee = int'(u.exp_eff) - 10;
      if (!u.is_nan)
        chk(real'(u.sig) * (2.0 ** ee) == av, "value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
