// tb_snn_linear_layer: end-to-end test of the linear layer at a reduced size.
//
// The layer is built with B = 2, D_IN = 16, D_OUT = 3 (latency 1 + 4 = 5
// cycles) and fed 400 random X, W pairs, mostly back to back. Every output
// element is compared with a reference that multiplies with the reference
// FP8 multiply and adds in the hardware's tree order, and every result must
// appear exactly 5 cycles after its input. The stimulus mixes ordinary
// values, subnormals, huge values and deliberately negated pairs, and the
// bench counts how often each mechanism of the datapath was exercised:
//   subnormal x normal products, products where the Sticky-Extra bit was
//   needed (odd significand product with a subnormal operand), subnormal
//   results, exact cancellations inside the tree, inexact (rounded) sums,
//   overflow to NaN, NaN propagation and back-to-back inputs.
// A mechanism that never occurred counts as a failure.
`timescale 1ns/1ps
module tb_snn_linear_layer;
  import snn_pkg::*;
  import fp8_ref_pkg::*;

  localparam int B = 2, D_IN = 16, D_OUT = 3, LAT = 5;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  fp8_t [B-1:0][D_IN-1:0]     x;
  fp8_t [D_OUT-1:0][D_IN-1:0] w;
  fp8_t [B-1:0][D_OUT-1:0]    y;
  int checks = 0, failures = 0, cycle = 0;
  int exp_cycle[$];
  logic [7:0] exp_y[$];
  int n_subnorm = 0, n_sticky = 0, n_subres = 0, n_cancel = 0, n_inexact = 0,
      n_ovf = 0, n_nan = 0, n_b2b = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  snn_linear_layer #(.B(B), .D_IN(D_IN), .D_OUT(D_OUT)) dut (
    .clk, .rst_n, .in_valid, .x, .w, .out_valid, .y);

  function automatic bit is_sub(input logic [7:0] c);
    return c[6:3] == 0 && c[2:0] != 0;
  endfunction
  function automatic bit is_norm(input logic [7:0] c);
    return c[6:3] != 0 && c[6:0] != 7'h7F;
  endfunction

  function automatic logic [7:0] gen(input int mode);
    logic [7:0] c;
    case (mode)
      0: c = {1'($urandom), 4'($urandom_range(4, 10)), 3'($urandom)};   // ordinary
      1: c = {1'($urandom), 4'd0, 3'($urandom)};                        // subnormal / zero
      2: c = {1'($urandom), 4'($urandom_range(12, 15)), 3'($urandom_range(0, 6))}; // huge
      default: c = 8'h7F;                                               // NaN
    endcase
    return c;
  endfunction

  // Reference product and tree sum that also count the events they meet.
  function automatic logic [7:0] ref_mul_count(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r;
    int sa, sb;
    r  = ref_mul(a, b);
    sa = (a[6:3] == 0) ? int'(a[2:0]) : 8 + int'(a[2:0]);
    sb = (b[6:3] == 0) ? int'(b[2:0]) : 8 + int'(b[2:0]);
    if ((is_sub(a) && is_norm(b)) || (is_sub(b) && is_norm(a))) begin
      n_subnorm++;
      if ((sa * sb) % 2 == 1) n_sticky++;
    end
    if (is_sub(r)) n_subres++;
    if (fp8_is_nan(r) && !fp8_is_nan(a) && !fp8_is_nan(b)) n_ovf++;
    if (fp8_is_nan(a) || fp8_is_nan(b)) n_nan++;
    return r;
  endfunction

  function automatic logic [7:0] ref_sum_count(input logic [7:0] v[$]);
    logic [7:0] cur[$], nxt[$], r;
    cur = v;
    while (cur.size() > 1) begin
      nxt.delete();
      for (int i = 0; i < cur.size(); i += 2) begin
        r = ref_add(cur[i], cur[i+1]);
        if (cur[i][6:0] != 0 && cur[i] == (cur[i+1] ^ 8'h80) && !fp8_is_nan(cur[i])) n_cancel++;
        if (!fp8_is_nan(r) && fp8_to_real(r) != fp8_to_real(cur[i]) + fp8_to_real(cur[i+1])) n_inexact++;
        if (fp8_is_nan(r) && !fp8_is_nan(cur[i]) && !fp8_is_nan(cur[i+1])) n_ovf++;
        nxt.push_back(r);
      end
      cur = nxt;
    end
    return cur[0];
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("MISMATCH cycle %0d: %s", cycle, what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
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
    logic prev_valid = 1'b0;
    x = '0; w = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      int mode_x, mode_w;
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      mode_x = ($urandom_range(0, 9) < 7) ? 0 : 1;
      mode_w = ($urandom_range(0, 29) == 0) ? 2 : 0;
      for (int k = 0; k < D_IN; k++) begin
        for (int bi = 0; bi < B; bi++) x[bi][k] = fp8_t'(gen(($urandom_range(0, 3) == 0) ? mode_x : 0));
        for (int j = 0; j < D_OUT; j++) w[j][k] = fp8_t'(gen(($urandom_range(0, 3) == 0) ? mode_w : 0));
      end
      if ($urandom_range(0, 99) < 3) x[0][$urandom_range(0, D_IN-1)] = fp8_t'(8'h7F);
      // Mirror pairs: element 2i+1 of x row 0 equals element 2i, and the
      // weights are negated, so the first tree level cancels exactly.
      if ($urandom_range(0, 9) == 0)
        for (int k = 0; k < D_IN; k += 2) begin
          x[0][k+1] = x[0][k];
          w[0][k+1] = fp8_t'(w[0][k] ^ 8'h80);
        end
      if (in_valid) begin
        if (prev_valid) n_b2b++;
        exp_cycle.push_back(cycle + LAT);
        for (int bi = 0; bi < B; bi++)
          for (int j = 0; j < D_OUT; j++) begin
            logic [7:0] prods[$];
            prods.delete();
            for (int k = 0; k < D_IN; k++) prods.push_back(ref_mul_count(x[bi][k], w[j][k]));
            exp_y.push_back(ref_sum_count(prods));
          end
      end
      prev_valid = in_valid;
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    chk(exp_cycle.size() == 0, "results outstanding");
    $display("mechanisms: subnormal x normal=%0d sticky-extra=%0d subnormal results=%0d cancellations=%0d rounded sums=%0d overflows=%0d NaN inputs=%0d back-to-back=%0d",
             n_subnorm, n_sticky, n_subres, n_cancel, n_inexact, n_ovf, n_nan, n_b2b);
    chk(n_subnorm > 0, "no subnormal x normal product");
    chk(n_sticky > 0, "Sticky-Extra never needed");
    chk(n_subres > 0, "no subnormal result");
    chk(n_cancel > 0, "no exact cancellation");
    chk(n_inexact > 0, "no rounded sum");
    chk(n_ovf > 0, "no overflow");
    chk(n_nan > 0, "no NaN input");
    chk(n_b2b > 0, "no back-to-back input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
