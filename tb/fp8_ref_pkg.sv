// fp8_ref_pkg: reference model for the testbenches, independent of the RTL.
//
// Converts E4M3 codes to real numbers and back using double-precision
// arithmetic. Every sum or product of two FP8 values is exact in a double, so
// fp8_from_real(fp8_to_real(a) op fp8_to_real(b)) is the correctly rounded
// result. The conversion back rounds to nearest, ties to even, returns
// +-NaN (S.1111.111) for magnitudes that round past 448 (float8_e4m3fn
// behaviour) and keeps the sign of zero.
package fp8_ref_pkg;

  function automatic bit fp8_is_nan(input logic [7:0] x);
    return x[6:0] == 7'h7F;
  endfunction

  function automatic real fp8_to_real(input logic [7:0] x);
    int  e, m;
    real v;
    e = int'(x[6:3]);
    m = int'(x[2:0]);
    if (e == 0) v = real'(m) / 512.0;                       // m * 2^-9
    else        v = (1.0 + real'(m) / 8.0) * (2.0 ** (e - 7));
    if (x[7]) v = -v;
    if (x[7] && v == 0.0) v = -0.0;
    return v;
  endfunction

  // Round a non-negative real to the nearest integer, ties to even.
  function automatic int rne_int(input real q);
    real fl, fr;
    int  n;
    fl = $floor(q);
    fr = q - fl;
    n  = int'(fl);
    if (fr > 0.5 || (fr == 0.5 && (n % 2) == 1)) n = n + 1;
    return n;
  endfunction

  function automatic logic [7:0] fp8_from_real(input real v);
    logic       s;
    real        ax, q;
    int         e, n, code;
    logic [63:0] bits;
    bits = $realtobits(v);
    s    = bits[63];
    ax   = (v < 0.0) ? -v : v;
    if (ax < 2.0 ** -6) begin
      n    = rne_int(ax * 512.0);          // units of 2^-9, 0..8
      code = n;                            // n == 8 is the smallest normal
    end else begin
      e = -6;
      while (e < 20 && ax >= 2.0 ** (e + 1)) e++;
      q = ax / (2.0 ** (e - 3));           // in [8, 16)
      n = rne_int(q);
      if (n == 16) begin
        n = 8;
        e = e + 1;
      end
      code = ((e + 7) << 3) | (n - 8);
    end
    if (code > 8'h7E) code = 8'h7F;
    return {s, 7'(code)};
  endfunction

  function automatic logic [7:0] ref_mul(input logic [7:0] a, input logic [7:0] b);
    if (fp8_is_nan(a) || fp8_is_nan(b)) return 8'h7F;
    return fp8_from_real(fp8_to_real(a) * fp8_to_real(b));
  endfunction

  function automatic logic [7:0] ref_add(input logic [7:0] a, input logic [7:0] b);
    real r;
    if (fp8_is_nan(a) || fp8_is_nan(b)) return 8'h7F;
    r = fp8_to_real(a) + fp8_to_real(b);
    // IEEE: x + (-x) is +0 under round-to-nearest; -0 + -0 is -0.
    if (r == 0.0) return (a[7] && b[7]) ? 8'h80 : 8'h00;
    return fp8_from_real(r);
  endfunction

  // Two results agree if bit-identical, or both NaN (NaN sign is not defined).
  function automatic bit fp8_same(input logic [7:0] x, input logic [7:0] y);
    if (fp8_is_nan(x) || fp8_is_nan(y)) return fp8_is_nan(x) && fp8_is_nan(y);
    return x == y;
  endfunction

  // Tree-order sum: pad to a power of two with +0, then add neighbouring
  // pairs level by level, exactly the order of the hardware reduction tree.
  function automatic logic [7:0] ref_tree_sum(input logic [7:0] v[$]);
    logic [7:0] cur[$];
    logic [7:0] nxt[$];
    int         p;
    cur = v;
    p = 1;
    while (p < cur.size()) p = p * 2;
    while (cur.size() < p) cur.push_back(8'h00);
    while (cur.size() > 1) begin
      nxt.delete();
      for (int i = 0; i < cur.size(); i += 2) nxt.push_back(ref_add(cur[i], cur[i+1]));
      cur = nxt;
    end
    return cur[0];
  endfunction

endpackage
