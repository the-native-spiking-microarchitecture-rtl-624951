// fp8_adder: spatial (S-Arch) FP8 E4M3 adder, five combinational stages.
//
// The iterative steps of floating-point addition are unrolled into one
// feed-forward network that settles within a single logical step:
//   1. Alignment: operands are decoded with effective exponents; the larger
//      magnitude is found by comparing the 7-bit magnitude codes, and
//      dE = MUX(|A| >= |B|, E_A - E_B, E_B - E_A) from two parallel
//      subtractors.
//   2. Barrel shifter: the smaller significand, widened to the 12-bit internal
//      format [h m2 m1 m0 g0..g7], is shifted right by dE through four MUX
//      levels. Bits shifted past g7 are ORed into g7 ("jammed" sticky).
//   3. 12-bit core: add, or subtract when the signs differ, giving a 13-bit
//      result (carry out included).
//   4. Normalisation: on a carry the word is shifted right once and the
//      exponent raised; otherwise the leading zero detector finds the first
//      one at position P in the 12-bit word and the word is shifted left by P,
//      E_norm = E_max - P, with the shift capped so the exponent stays >= 1
//      (the result is then subnormal).
//   5. RNE rounding: Round_Trigger = R & (S | L), see rne_rounder.
// Stage order, the 12-bit width with eight guard bits, the MUX shifter, the
// LZD and the rounding rule follow the design description. The sticky jam
// into g7, the carry handling and the special-value rules are this
// implementation's: exact cancellation gives +0, -0 + -0 gives -0, a NaN
// operand gives NaN and a sum beyond 448 gives NaN (or +-448 with SATURATE).
module fp8_adder
  import snn_pkg::*;
#(
  parameter bit SATURATE = 1'b0
) (
  input  fp8_t a,
  input  fp8_t b,
  output fp8_t y
);

  fp8_unpacked_t ua, ub, big, sml;
  logic          a_ge_b, eff_sub;
  logic [EXP_W-1:0] d_ab, d_ba, d_e;

  // ---- Stage 1: effective exponents, magnitude compare, shift amount ----
  fp8_decoder u_dec_a (.x(a), .u(ua));
  fp8_decoder u_dec_b (.x(b), .u(ub));

  always_comb begin
    a_ge_b = ({a.exp, a.man} >= {b.exp, b.man});
    d_ab   = ua.exp_eff - ub.exp_eff;
    d_ba   = ub.exp_eff - ua.exp_eff;
    big    = a_ge_b ? ua : ub;
    sml    = a_ge_b ? ub : ua;
  end

  for (genvar i = 0; i < EXP_W; i++) begin : g_de
    snn_mux u_mux (.s(a_ge_b), .a(d_ab[i]), .b(d_ba[i]), .y(d_e[i]));
  end

  snn_gate #(.OP(GATE_XOR)) u_sub (.a(ua.sign), .b(ub.sign), .y(eff_sub));

  // ---- Stage 2: barrel shifter on the 12-bit internal significand ----
  logic [INT_MAN_W-1:0] big_m, sml_m, sml_sh, sml_al;
  logic                 sh_sticky;

  assign big_m = {big.sig, {GUARD_W{1'b0}}};
  assign sml_m = {sml.sig, {GUARD_W{1'b0}}};

  barrel_shifter #(.W(INT_MAN_W), .SH_W(EXP_W)) u_shift (
    .x(sml_m), .sh(d_e), .y(sml_sh), .sticky(sh_sticky));

  assign sml_al = {sml_sh[INT_MAN_W-1:1], sml_sh[0] | sh_sticky};

  // ---- Stage 3: 12-bit add / subtract ----
  logic [INT_MAN_W:0] sum;
  assign sum = eff_sub ? ({1'b0, big_m} - {1'b0, sml_al})
                       : ({1'b0, big_m} + {1'b0, sml_al});

  // ---- Stage 4: leading zero detection and normalisation ----
  localparam int unsigned LZW = $clog2(INT_MAN_W + 1);
  logic [LZW-1:0]       lz;
  logic [EXP_W-1:0]     sh_l;
  logic [INT_MAN_W-1:0] nrm;
  logic                 c_sticky;
  logic [4:0]           e_norm, exp_field;

  lzd #(.W(INT_MAN_W)) u_lzd (.x(sum[INT_MAN_W-1:0]), .count(lz));

  always_comb begin
    sh_l     = '0;
    c_sticky = 1'b0;
    if (sum[INT_MAN_W]) begin
      nrm      = sum[INT_MAN_W:1];
      c_sticky = sum[0];
      e_norm   = 5'(big.exp_eff) + 5'd1;
    end else begin
      // Cap the shift at E_max - 1 so the exponent never drops below 1.
      sh_l   = (5'(lz) < 5'(big.exp_eff)) ? EXP_W'(lz) : big.exp_eff - EXP_W'(1);
      nrm    = sum[INT_MAN_W-1:0] << sh_l;
      e_norm = 5'(big.exp_eff) - 5'(sh_l);
    end
    exp_field = nrm[INT_MAN_W-1] ? e_norm : 5'd0;
  end

  // ---- Stage 5: RNE rounding ----
  localparam int unsigned RB = INT_MAN_W - 1 - MAN_W - 1;   // round-bit index
  logic  sticky_all, zero_sum, nan_in, res_sign;
  fp8_t  rounded;
  logic  ovf_unused;

  always_comb begin
    sticky_all = |nrm[RB-1:0] | c_sticky;
    zero_sum   = (sum == '0);
    nan_in     = ua.is_nan | ub.is_nan;
    // Exact cancellation is +0; a zero from two like-signed zeros keeps the sign.
    res_sign   = zero_sum ? (big.sign & ~eff_sub) : big.sign;
  end

  rne_rounder #(.SATURATE(SATURATE)) u_round (
    .sign(res_sign), .exp_in(exp_field), .man_in(nrm[INT_MAN_W-2 -: MAN_W]),
    .r(nrm[RB]), .s(sticky_all), .nan_in(nan_in), .y(rounded), .overflow(ovf_unused));

  assign y = rounded;

endmodule
