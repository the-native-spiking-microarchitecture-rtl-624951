// tb_fp8_adder: exhaustive and corner-case check of the spatial FP8 adder.
//
// Part 1 applies all 256 x 256 operand pairs and compares each result with
// the double-precision reference (fp8_ref_pkg). Part 2 repeats the three
// corner-case families the adder is meant to survive and counts each:
// exact cancellation x + (-x) = +0, crossing between the largest subnormal
// and the smallest normal, and overflow past 448. Combinational DUT, sampled
// 1 ns after each input change.
`timescale 1ns/1ps
module tb_fp8_adder;
  import snn_pkg::*;
  import fp8_ref_pkg::*;

  fp8_t a, b, y;
  int   checks = 0, failures = 0;
  int   n_cancel = 0, n_boundary = 0, n_overflow = 0;

  fp8_adder dut (.a(a), .b(b), .y(y));

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [7:0] ia, input logic [7:0] ib, input logic [7:0] exp_y);
    a = fp8_t'(ia);
    b = fp8_t'(ib);
    #1;
    checks++;
    if (!fp8_same(y, exp_y)) begin
      failures++;
      if (failures <= 10) $display("MISMATCH %02h + %02h = %02h, expected %02h", ia, ib, y, exp_y);
    end
  endtask

  initial begin
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++)
        check(8'(i), 8'(j), ref_add(8'(i), 8'(j)));

    // Exact cancellation, hand-written expectation: +0.
    for (int i = 0; i < 127; i++) begin
      check(8'(i), 8'(i) ^ 8'h80, 8'h00);
      check(8'(i) ^ 8'h80, 8'(i), 8'h00);
      n_cancel += 2;
    end
    // Largest subnormal (0x07) + smallest subnormal (0x01) = smallest normal (0x08).
    check(8'h07, 8'h01, 8'h08); n_boundary++;
    // Smallest normal - largest subnormal = smallest subnormal.
    check(8'h08, 8'h87, 8'h01); n_boundary++;
    // Largest subnormal + smallest normal = 15 * 2^-9 -> 1.111 * 2^-6 = 0x0F.
    check(8'h07, 8'h08, 8'h0F); n_boundary++;
    // Overflow: 448 + 448 and 448 + 32 exceed the range -> NaN; 448 + 8 rounds back to 448.
    check(8'h7E, 8'h7E, 8'h7F); n_overflow++;
    check(8'h7E, 8'h68, 8'h7F); n_overflow++;
    check(8'hFE, 8'hFE, 8'hFF); n_overflow++;
    check(8'h7E, 8'h58, 8'h7E); n_overflow++;

    $display("corner cases: cancellation=%0d boundary=%0d overflow=%0d", n_cancel, n_boundary, n_overflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
