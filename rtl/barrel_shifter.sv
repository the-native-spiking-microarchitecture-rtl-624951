// barrel_shifter: logarithmic right shifter built from spiking MUX cells.
//
// Aligns the smaller significand in the spatial adder. Stage k moves the word
// by 2^k positions when bit k of the shift amount is set,
//     Y[i] = MUX(sh[k], X[i + 2^k], X[i]),
// so any shift 0..2^SH_W-1 takes SH_W MUX levels (four for the 12-bit
// datapath, 48 MUX cells). The design writes the same cascade with the
// opposite bit numbering. Each cell is the 4-neuron MUX of snn_mux, written
// through the shared snn_pkg::mux_fire function so that a shifter is one
// instance rather than 48. Besides the shifted word the shifter returns a
// sticky bit, the OR of every bit pushed off the low end; that output is this
// implementation's addition, it keeps the adder exact for shifts beyond the
// guard bits. Combinational.
module barrel_shifter
  import snn_pkg::*;
#(
  parameter int unsigned W    = 12,
  parameter int unsigned SH_W = 4
) (
  input  logic [W-1:0]    x,
  input  logic [SH_W-1:0] sh,
  output logic [W-1:0]    y,
  output logic            sticky
);

  logic [SH_W:0][W-1:0] st;
  logic [SH_W:0]        stk;

  assign st[0]  = x;
  assign stk[0] = 1'b0;

  for (genvar k = 0; k < SH_W; k++) begin : g_stage
    localparam int unsigned D = 1 << k;
    for (genvar i = 0; i < W; i++) begin : g_bit
      logic hi;
      if (i + D < W) begin : g_in
        assign hi = st[k][i+D];
      end else begin : g_zero
        assign hi = 1'b0;
      end
      assign st[k+1][i] = mux_fire(sh[k], hi, st[k][i]);
    end
    // Bits leaving the word at this stage.
    logic lost;
    if (D >= W) begin : g_all
      assign lost = |st[k];
    end else begin : g_low
      assign lost = |st[k][D-1:0];
    end
    assign stk[k+1] = stk[k] | (sh[k] & lost);
  end

  assign y      = st[SH_W];
  assign sticky = stk[SH_W];

endmodule
