// tb_snn_gate: truth tables of the four spiking gates (AND, OR, NOT, XOR).
`timescale 1ns/1ps
module tb_snn_gate;
  import snn_pkg::*;
  logic a, b, y_and, y_or, y_not, y_xor;
  int checks = 0, failures = 0;

  snn_gate #(.OP(GATE_AND)) u_and (.a, .b, .y(y_and));
  snn_gate #(.OP(GATE_OR))  u_or  (.a, .b, .y(y_or));
  snn_gate #(.OP(GATE_NOT)) u_not (.a, .b, .y(y_not));
  snn_gate #(.OP(GATE_XOR)) u_xor (.a, .b, .y(y_xor));

  task automatic chk(input logic got, input logic exp_v, input string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("MISMATCH %s a=%0b b=%0b got %0b", what, a, b, got);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Expected outputs written out as truth tables, index {a,b}.
    logic [3:0] t_and = 4'b1000, t_or = 4'b1110, t_not = 4'b0011, t_xor = 4'b0110;
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i);
      #1;
      chk(y_and, t_and[i], "AND");
      chk(y_or,  t_or[i],  "OR");
      chk(y_not, t_not[i], "NOT");
      chk(y_xor, t_xor[i], "XOR");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
