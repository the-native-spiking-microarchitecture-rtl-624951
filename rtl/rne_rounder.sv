// rne_rounder: round-to-nearest-even and E4M3 packing.
//
// Last stage of both arithmetic engines. It takes a normalised result as an
// exponent field (0 for subnormal, may exceed 15 before the overflow test),
// three mantissa bits, the round bit R and the sticky bit S, and applies
//     Round_Trigger = R & (S | L)          (L = mantissa LSB)
// with two spiking gates, as in the design description. The increment runs
// over {exponent, mantissa} together, so a mantissa carry bumps the exponent
// and the largest subnormal rounds up into the smallest normal.
//
// Overflow: a result whose magnitude encoding would pass 0x7E (448) becomes
// NaN, as a float32 -> float8_e4m3fn conversion in PyTorch does; with
// SATURATE = 1 it clamps to +-448 instead. The description asks both for
// PyTorch bit-exactness and for "saturation" on overflow; the default follows
// the bit-exactness claim. Combinational.
module rne_rounder
  import snn_pkg::*;
#(
  parameter bit SATURATE = 1'b0
) (
  input  logic        sign,
  input  logic [4:0]  exp_in,
  input  logic [2:0]  man_in,
  input  logic        r,
  input  logic        s,
  input  logic        nan_in,
  output fp8_t        y,
  output logic        overflow
);

  logic       s_or_l, round_up;
  logic [8:0] em;

  snn_gate #(.OP(GATE_OR))  u_or (.a(s), .b(man_in[0]), .y(s_or_l));
  snn_gate #(.OP(GATE_AND)) u_and(.a(r), .b(s_or_l),    .y(round_up));

  always_comb begin
    em       = {1'b0, exp_in, man_in} + 9'(round_up);
    overflow = !nan_in && (em > 9'(FP8_MAX[6:0]));
    if (nan_in)
      y = fp8_t'(FP8_NAN);
    else if (overflow)
      y = fp8_t'({sign, SATURATE ? FP8_MAX[6:0] : FP8_NAN[6:0]});
    else
      y = fp8_t'({sign, em[6:0]});
  end

endmodule
