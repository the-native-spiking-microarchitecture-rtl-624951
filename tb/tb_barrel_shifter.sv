// tb_barrel_shifter: every 12-bit word with every shift 0..15, against the
// shift operator and a sticky bit computed as "some set bit was below the
// shift amount".
`timescale 1ns/1ps
module tb_barrel_shifter;
  logic [11:0] x, y;
  logic [3:0]  sh;
  logic        sticky;
  int checks = 0, failures = 0;

  barrel_shifter #(.W(12), .SH_W(4)) dut (.x, .sh, .y, .sticky);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4096; i++)
      for (int k = 0; k < 16; k++) begin
        logic exp_st;
        x = 12'(i); sh = 4'(k);
        #1;
        exp_st = 1'b0;
        for (int b = 0; b < 12; b++) if (b < k && x[b]) exp_st = 1'b1;
        checks++;
        if (y != 12'(i >> k) || sticky != exp_st) begin
          failures++;
          if (failures <= 10) $display("MISMATCH x=%03h sh=%0d y=%03h st=%0b", x, sh, y, sticky);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
