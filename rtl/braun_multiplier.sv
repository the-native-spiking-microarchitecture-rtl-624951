// braun_multiplier: unsigned N x N array multiplier (Braun array).
//
// The mantissa product of the FP8 multiplier. Partial products a[j] & b[i]
// are formed by AND gates and reduced row by row with carry-save full adders;
// row i produces product bit i, and a final ripple-carry row adds the last
// sum and carry vectors into the upper N product bits. The design names a
// 4 x 4 Braun array for the significands {hidden, m2, m1, m0}; the cell
// arrangement below is the textbook Braun array. Combinational.
module braun_multiplier #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);

  // s[i][j], c[i][j]: sum and carry out of the cell in row i, column j.
  logic [N-1:0][N-1:0] s, c;
  logic [N:0]          rc;   // final ripple carries

  for (genvar j = 0; j < N; j++) begin : g_row0
    assign s[0][j] = a[j] & b[0];
    assign c[0][j] = 1'b0;
  end
  assign p[0] = s[0][0];

  for (genvar i = 1; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_cell
      logic x, y, z;
      assign x = a[j] & b[i];
      assign y = (j < N-1) ? s[i-1][(j+1)%N] : 1'b0;
      assign z = c[i-1][j];
      assign s[i][j] = x ^ y ^ z;
      assign c[i][j] = (x & y) | (x & z) | (y & z);
    end
    assign p[i] = s[i][0];
  end

  // Final row: {0, s[N-1][N-1:1]} + c[N-1][N-1:0].
  assign rc[0] = 1'b0;
  for (genvar j = 0; j < N; j++) begin : g_final
    logic x, y;
    assign x = (j < N-1) ? s[N-1][(j+1)%N] : 1'b0;
    assign y = c[N-1][j];
    assign p[N+j]  = x ^ y ^ rc[j];
    assign rc[j+1] = (x & y) | (x & rc[j]) | (y & rc[j]);
  end

endmodule
