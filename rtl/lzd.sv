// lzd: hierarchical leading zero detector.
//
// Returns the number of zeros above the first set bit of x (W when x is 0).
// The input is padded on the right with ones up to a power of two P; leaf
// pairs of bits are combined in a binary tree where each node passes on the
// position from its left half if that half holds a one, and otherwise the
// right half's position with the next count bit set. The depth is log2(P)
// levels, the O(log N) scan the design calls for; the tree arrangement is this
// implementation's. Combinational.
module lzd #(
  parameter int unsigned W  = 12,
  localparam int unsigned LV = (W <= 1) ? 1 : $clog2(W),
  localparam int unsigned P  = 1 << LV,
  localparam int unsigned CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  x,
  output logic [CW-1:0] count
);

  logic [P-1:0]                 xp;
  logic [LV:0][P-1:0]           v;
  logic [LV:0][P-1:0][LV-1:0]   pos;

  always_comb begin
    xp = {x, {(P-W){1'b1}}} ;
    v   = '0;
    pos = '0;
    // Leaves, MSB first: node i covers bit P-1-i.
    for (int i = 0; i < P; i++) v[0][i] = xp[P-1-i];
    for (int l = 0; l < LV; l++) begin
      for (int i = 0; i < (P >> (l + 1)); i++) begin
        v[l+1][i] = v[l][2*i] | v[l][2*i+1];
        if (v[l][2*i]) pos[l+1][i] = pos[l][2*i];
        else           pos[l+1][i] = pos[l][2*i+1] | LV'(1 << l);
      end
    end
    count = v[LV][0] ? CW'(pos[LV][0]) : CW'(W);
  end

endmodule
