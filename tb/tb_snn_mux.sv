// tb_snn_mux: all eight input combinations of the 4-neuron multiplexer.
`timescale 1ns/1ps
module tb_snn_mux;
  logic s, a, b, y;
  int checks = 0, failures = 0;

  snn_mux dut (.s, .a, .b, .y);

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Index {s,a,b}: s=0 selects b, s=1 selects a.
    logic [7:0] table_y = 8'b1100_1010;
    for (int i = 0; i < 8; i++) begin
      {s, a, b} = 3'(i);
      #1;
      checks++;
      if (y !== table_y[i]) begin
        failures++;
        $display("MISMATCH s=%0b a=%0b b=%0b y=%0b", s, a, b, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
