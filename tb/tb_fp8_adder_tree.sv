// tb_fp8_adder_tree: streams random vectors through two reduction trees.
//
// u8 (N = 8, three levels) and u5 (N = 5, padded to 8 with +0) get a new
// vector on most cycles, with random idle gaps. Each vector's expected sum is
// the tree-order reference sum, and its result must come out exactly
// ceil(log2 N) = 3 cycles after it went in, flagged by out_valid; out_valid
// must stay low on every other cycle.
`timescale 1ns/1ps
module tb_fp8_adder_tree;
  import snn_pkg::*;
  import fp8_ref_pkg::*;

  localparam int LAT = 3;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  fp8_t [7:0] d8;
  fp8_t [4:0] d5;
  logic v8, v5;
  fp8_t s8, s5;
  int checks = 0, failures = 0, cycle = 0;
  int exp_cycle[$];
  logic [7:0] exp8[$], exp5[$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  fp8_adder_tree #(.N(8)) u8 (.clk, .rst_n, .in_valid, .in_data(d8), .out_valid(v8), .out_sum(s8));
  fp8_adder_tree #(.N(5)) u5 (.clk, .rst_n, .in_valid, .in_data(d5), .out_valid(v5), .out_sum(s5));

  function automatic logic [7:0] rand_fp8();
    logic [7:0] c;
    do c = 8'($urandom); while (c[6:0] == 7'h7F && $urandom_range(0, 19) != 0);
    return c;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("MISMATCH cycle %0d: %s", cycle, what);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.
  always @(negedge clk) if (rst_n) begin
    if (exp_cycle.size() > 0 && exp_cycle[0] == cycle) begin
      void'(exp_cycle.pop_front());
      chk(v8 && v5, "out_valid missing");
      chk(fp8_same(s8, exp8.pop_front()), "N=8 sum");
      chk(fp8_same(s5, exp5.pop_front()), "N=5 sum");
    end else begin
      chk(!v8 && !v5, "spurious out_valid");
    end
  end

  initial begin
    logic [7:0] q8[$], q5[$];
    d8 = '0; d5 = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      q8.delete(); q5.delete();
      for (int k = 0; k < 8; k++) begin
        d8[k] = fp8_t'(rand_fp8());
        q8.push_back(d8[k]);
        if (k < 5) begin
          d5[k] = d8[k];
          q5.push_back(d8[k]);
        end
      end
      if (in_valid) begin
        exp_cycle.push_back(cycle + LAT);
        exp8.push_back(ref_tree_sum(q8));
        exp5.push_back(ref_tree_sum(q5));
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    chk(exp_cycle.size() == 0, "results outstanding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
