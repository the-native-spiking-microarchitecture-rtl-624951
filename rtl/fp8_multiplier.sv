// fp8_multiplier: bit-exact FP8 E4M3 multiplier with Sticky-Extra correction.
//
// Three parallel paths, all combinational (one logical step):
//   sign      S = SA xor SB, one spiking XOR gate;
//   exponent  E_raw = E_A,eff + E_B,eff - 7, a 5-bit ripple-carry sum so the
//             addition cannot overflow before the bias is removed;
//   mantissa  the 4 x 4 Braun array multiplies {h, m2, m1, m0} of both
//             operands into an 8-bit product P (binary point after bit 6).
//
// Normalisation. Only the top seven product bits P[7:1] travel through the
// normalising left shift; P[0] is held aside as sticky_extra. The left shift s
// equals the product's leading-zero count, limited so the exponent stays >= 1
// (s is nonzero only for subnormal x normal products, and then at most 4).
// When the exponent would fall below 1 the word is instead shifted right
// ("pre-shift" into the subnormal range) and the bits leaving it are ORed
// into the sticky bit. The Sticky-Extra correction then puts the held-aside
// bit back where the left shift would have taken it:
//     mantissa LSB |= (s >= 4) & sticky_extra
//     R            |= (s == 3) & sticky_extra
//     S            |= (s <  3) & sticky_extra
// The three equations follow the design description, which labels the first
// target M2; with s <= 4 the only place the bit can reach is the mantissa
// LSB, and that is where it goes here. The window width and the right-shift
// path are this implementation's own. Rounding is RNE (rne_rounder).
//
// Special values: a NaN operand gives NaN, a zero operand gives a zero with
// sign SA xor SB, a product beyond 448 gives NaN (or +-448 with SATURATE).
module fp8_multiplier
  import snn_pkg::*;
#(
  parameter bit SATURATE = 1'b0
) (
  input  fp8_t a,
  input  fp8_t b,
  output fp8_t y
);

  fp8_unpacked_t ua, ub;
  logic          sign;
  logic [4:0]    esum;
  logic [7:0]    prod;
  logic [3:0]    lz;

  fp8_decoder u_dec_a (.x(a), .u(ua));
  fp8_decoder u_dec_b (.x(b), .u(ub));

  snn_gate #(.OP(GATE_XOR)) u_sign (.a(ua.sign), .b(ub.sign), .y(sign));

  // 5-bit ripple-carry exponent adder.
  logic [5:0] ec;
  assign ec[0] = 1'b0;
  for (genvar i = 0; i < 5; i++) begin : g_eadd
    logic xa, xb;
    assign xa = (i < EXP_W) ? ua.exp_eff[i % EXP_W] : 1'b0;
    assign xb = (i < EXP_W) ? ub.exp_eff[i % EXP_W] : 1'b0;
    assign esum[i]  = xa ^ xb ^ ec[i];
    assign ec[i+1]  = (xa & xb) | (xa & ec[i]) | (xb & ec[i]);
  end

  braun_multiplier #(.N(4)) u_mant (.a(ua.sig), .b(ub.sig), .p(prod));

  lzd #(.W(8)) u_lzd (.x(prod), .count(lz));

  logic signed [6:0] e_raw;       // E_A,eff + E_B,eff - bias, range -5..23
  logic [3:0]        s_amt;       // normalising left shift
  logic [3:0]        r_amt;       // pre-shift right into the subnormal range
  logic [6:0]        win;         // P[7:1] after the left shift
  logic [7:0]        nrm;         // {win, 0} after the right shift
  logic              sticky_extra, sticky_r;
  logic [4:0]        e_res;
  logic [2:0]        man_raw, man_corr;
  logic              r_raw, r_corr, s_base, s_corr;
  logic [4:0]        exp_field;
  logic              nan_in;
  fp8_t              rounded;
  logic              ovf_unused;

  always_comb begin
    e_raw        = $signed({2'b00, esum}) - 7'sd7;
    sticky_extra = prod[0];
    // Left shift bounded by the exponent, right shift when it is below 1.
    if (e_raw >= 7'sd1) begin
      s_amt = (7'(lz) <= e_raw) ? lz : e_raw[3:0];
      r_amt = '0;
    end else begin
      s_amt = '0;
      r_amt = (e_raw == 7'sd0) ? 4'd0 : 4'(-e_raw);
    end
    win      = prod[7:1] << s_amt;
    e_res    = 5'(e_raw + 7'sd1 - 7'(s_amt));
    // Pre-shift: value keeps its weight, exponent field becomes 0.
    nrm      = {win, 1'b0} >> r_amt;
    sticky_r = |({win, 1'b0} & ~(8'hFF << r_amt));
    man_raw  = nrm[6:4];
    r_raw    = nrm[3];
    s_base   = |nrm[2:0] | sticky_r;
    // Sticky-Extra correction.
    man_corr = {man_raw[2:1], man_raw[0] | ((s_amt >= 4'd4) & sticky_extra)};
    r_corr   = r_raw  | ((s_amt == 4'd3) & sticky_extra);
    s_corr   = s_base | ((s_amt <  4'd3) & sticky_extra);
    // A result whose leading one did not reach the hidden position is
    // subnormal (only possible with the exponent pinned at 1 or pre-shifted).
    exp_field = nrm[7] ? e_res : 5'd0;
    nan_in    = ua.is_nan | ub.is_nan;
  end

  rne_rounder #(.SATURATE(SATURATE)) u_round (
    .sign(sign), .exp_in(exp_field), .man_in(man_corr), .r(r_corr), .s(s_corr),
    .nan_in(nan_in), .y(rounded), .overflow(ovf_unused));

  always_comb begin
    if (!nan_in && (ua.is_zero || ub.is_zero)) y = fp8_t'({sign, 7'd0});
    else                                        y = rounded;
  end

endmodule
