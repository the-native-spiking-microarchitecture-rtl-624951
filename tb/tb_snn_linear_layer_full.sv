// tb_snn_linear_layer_full: the linear layer at its default size.
//
// No parameter is overridden: B = 1, D_IN = 256, D_OUT = 4, so the layer has
// 1024 multipliers and four 256-input adder trees. Three random X, W pairs
// (with some subnormal operands) enter on consecutive cycles; each output
// must match the tree-order reference and arrive exactly
// 1 + log2(256) = 9 cycles after its input.
`timescale 1ns/1ps
module tb_snn_linear_layer_full;
  import snn_pkg::*;
  import fp8_ref_pkg::*;

  localparam int B = 1, D_IN = 256, D_OUT = 4, LAT = 9, NVEC = 3;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  fp8_t [B-1:0][D_IN-1:0]     x;
  fp8_t [D_OUT-1:0][D_IN-1:0] w;
  fp8_t [B-1:0][D_OUT-1:0]    y;
  int checks = 0, failures = 0, cycle = 0;
  int exp_cycle[$];
  logic [7:0] exp_y[$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  snn_linear_layer dut (.clk, .rst_n, .in_valid, .x, .w, .out_valid, .y);

  function automatic logic [7:0] gen();
    if ($urandom_range(0, 9) == 0) return {1'($urandom), 4'd0, 3'($urandom)};
    return {1'($urandom), 4'($urandom_range(3, 9)), 3'($urandom)};
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("MISMATCH cycle %0d: %s", cycle, what);
    end
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (exp_cycle.size() > 0 && exp_cycle[0] == cycle) begin
      void'(exp_cycle.pop_front());
      chk(out_valid, "out_valid missing");
      for (int bi = 0; bi < B; bi++)
        for (int j = 0; j < D_OUT; j++) begin
          logic [7:0] e;
          e = exp_y.pop_front();
          chk(fp8_same(y[bi][j], e), $sformatf("y[%0d][%0d]=%02h expected %02h", bi, j, y[bi][j], e));
        end
    end else begin
      chk(!out_valid, "spurious out_valid");
    end
  end

  initial begin
    x = '0; w = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < NVEC; n++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int k = 0; k < D_IN; k++) begin
        for (int bi = 0; bi < B; bi++) x[bi][k] = fp8_t'(gen());
        for (int j = 0; j < D_OUT; j++) w[j][k] = fp8_t'(gen());
      end
      exp_cycle.push_back(cycle + LAT);
      for (int bi = 0; bi < B; bi++)
        for (int j = 0; j < D_OUT; j++) begin
          logic [7:0] prods[$];
          prods.delete();
          for (int k = 0; k < D_IN; k++) prods.push_back(ref_mul(x[bi][k], w[j][k]));
          exp_y.push_back(ref_tree_sum(prods));
        end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    chk(exp_cycle.size() == 0, "results outstanding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
