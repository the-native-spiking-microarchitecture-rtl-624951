// fp8_decoder: unpacks an FP8 E4M3 word into the fields the arithmetic uses.
//
// This is the representation layer in front of both arithmetic engines. It
// applies the two boundary rules of the format:
//   * implicit leading bit: for E != 0 the significand is 1.M, for E == 0 it
//     is 0.M (subnormal);
//   * effective exponent: E_eff = MUX(E == 0, 1, E), so a subnormal is scaled
//     by 2^(1-bias) rather than 2^(0-bias).
// The effective-exponent multiplexer is built from four spiking MUX cells as
// described; the zero, subnormal and NaN flags are this implementation's own
// plain logic (the E4M3 "fn" encoding has a single NaN, S.1111.111, and no
// infinities). Purely combinational.
module fp8_decoder
  import snn_pkg::*;
(
  input  fp8_t          x,
  output fp8_unpacked_t u
);

  logic                 e_zero;
  logic [EXP_W-1:0]     e_eff;
  localparam logic [EXP_W-1:0] ONE = EXP_W'(1);

  assign e_zero = (x.exp == '0);

  for (genvar i = 0; i < EXP_W; i++) begin : g_eeff
    snn_mux u_mux (.s(e_zero), .a(ONE[i]), .b(x.exp[i]), .y(e_eff[i]));
  end

  always_comb begin
    u.sign    = x.sign;
    u.exp_eff = e_eff;
    u.sig     = {~e_zero, x.man};
    u.is_zero = e_zero && (x.man == '0);
    u.is_sub  = e_zero && (x.man != '0);
    u.is_nan  = (x.exp == '1) && (x.man == '1);
  end

endmodule
