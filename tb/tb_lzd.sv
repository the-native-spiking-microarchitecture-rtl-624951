// tb_lzd: leading-zero count of every 12-bit word (the adder's width) and
// every 8-bit word (the multiplier's), against a bit-by-bit scan.
`timescale 1ns/1ps
module tb_lzd;
  logic [11:0] x12;
  logic [3:0]  c12;
  logic [7:0]  x8;
  logic [3:0]  c8;
  int checks = 0, failures = 0;

  lzd #(.W(12)) u12 (.x(x12), .count(c12));
  lzd #(.W(8))  u8  (.x(x8),  .count(c8));

  function automatic int scan(input logic [11:0] v, input int w);
    for (int b = w - 1; b >= 0; b--) if (v[b]) return w - 1 - b;
    return w;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4096; i++) begin
      x12 = 12'(i); x8 = 8'(i);
      #1;
      checks++;
      if (int'(c12) != scan(12'(i), 12)) begin
        failures++;
        if (failures <= 10) $display("MISMATCH W=12 x=%03h count=%0d", x12, c12);
      end
      if (i < 256) begin
        checks++;
        if (int'(c8) != scan(12'(i), 8)) begin
          failures++;
          if (failures <= 10) $display("MISMATCH W=8 x=%02h count=%0d", x8, c8);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
