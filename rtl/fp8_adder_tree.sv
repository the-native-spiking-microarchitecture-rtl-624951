// fp8_adder_tree: binary-tree reduction of N FP8 values with spatial adders.
//
// Level l adds disjoint neighbouring pairs of the level l-1 partial sums,
//     Sum(l)[i] = Adder(Sum(l-1)[2i], Sum(l-1)[2i+1]),
// so N values are reduced in L = ceil(log2 N) levels instead of N - 1
// sequential additions. Each level is one spatial adder deep and is taken as
// one logical time step: its outputs are registered, the result appears L
// clock cycles after the inputs, and a new vector can enter every cycle.
// The tree shape follows the design description; the per-level register, the
// valid pipeline and the padding of N up to a power of two with +0 (x + 0 = x
// for every x except -0, which becomes +0) are this implementation's.
//
// The nodes form a heap: node 1 is the root, node k has children 2k and 2k+1,
// and the inputs sit at nodes P .. 2P-1. The sum order is therefore fixed by
// position, which matters because FP8 addition is not associative.
module fp8_adder_tree
  import snn_pkg::*;
#(
  parameter int unsigned N        = 256,
  parameter bit          SATURATE = 1'b0,
  localparam int unsigned L       = (N <= 1) ? 1 : $clog2(N),
  localparam int unsigned P       = 1 << L
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  fp8_t [N-1:0]   in_data,
  output logic           out_valid,
  output fp8_t           out_sum
);

  fp8_t [2*P-1:1] node;
  logic [L-1:0]   vpipe;

  for (genvar k = 0; k < P; k++) begin : g_leaf
    if (k < N) begin : g_in
      assign node[P+k] = in_data[k];
    end else begin : g_pad
      assign node[P+k] = fp8_t'(8'h00);
    end
  end

  for (genvar k = 1; k < P; k++) begin : g_node
    fp8_t s;
    fp8_adder #(.SATURATE(SATURATE)) u_add (.a(node[2*k]), .b(node[2*k+1]), .y(s));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) node[k] <= fp8_t'(8'h00);
      else        node[k] <= s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= L'({vpipe, in_valid});
  end

  assign out_valid = vpipe[L-1];
  assign out_sum   = node[1];

endmodule
