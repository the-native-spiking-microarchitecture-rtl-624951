// tb_braun_multiplier: exhaustive check of the array multiplier at N = 4 (the
// mantissa size) and N = 5, against the integer product.
`timescale 1ns/1ps
module tb_braun_multiplier;
  logic [3:0] a4, b4;
  logic [7:0] p4;
  logic [4:0] a5, b5;
  logic [9:0] p5;
  int checks = 0, failures = 0;

  braun_multiplier #(.N(4)) u4 (.a(a4), .b(b4), .p(p4));
  braun_multiplier #(.N(5)) u5 (.a(a5), .b(b5), .p(p5));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 32; j++) begin
        a5 = 5'(i); b5 = 5'(j);
        a4 = 4'(i); b4 = 4'(j);
        #1;
        checks++;
        if (int'(p5) != i * j) begin
          failures++;
          if (failures <= 10) $display("MISMATCH N=5 %0d*%0d=%0d", i, j, p5);
        end
        if (i < 16 && j < 16) begin
          checks++;
          if (int'(p4) != i * j) begin
            failures++;
            if (failures <= 10) $display("MISMATCH N=4 %0d*%0d=%0d", i, j, p4);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
