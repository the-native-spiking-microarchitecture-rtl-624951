// snn_linear_layer: FP8 linear layer Y = X W^T on the spatial arithmetic.
//
// The layer computes Y[b][j] = sum_k X[b][k] * W[j][k] for a batch of B input
// rows, D_OUT output features and D_IN input features, without bias.
//   * Broadcast multiplication: B * D_OUT * D_IN FP8 multipliers form every
//     product P[b][j][k] = X[b][k] * W[j][k] at once, in one logical step.
//   * Tree accumulation: one fp8_adder_tree per output element reduces the
//     D_IN products in ceil(log2 D_IN) levels.
// Every logical step is one clock cycle (products are registered, and each
// tree level is registered), so the latency is
//     T_linear = 1 + ceil(log2 D_IN)      (9 cycles for D_IN = 256)
// and the layer is fully pipelined: a new X, W pair can enter every cycle.
// The structure and the latency formula follow the design description,
// which also gives D_IN = 256 as its typical size. B and D_OUT are not given
// there; the defaults (1 and 4) are this implementation's choice. Each
// product and each partial sum is rounded to FP8, so results can differ by
// an ULP from a sequential sum: the summation order is the tree's.
//
// Interface: in_valid qualifies x and w; out_valid rises with y exactly
// T_linear cycles later. Asynchronous active-low reset clears the pipeline.
module snn_linear_layer
  import snn_pkg::*;
#(
  parameter int unsigned B        = 1,
  parameter int unsigned D_IN     = 256,
  parameter int unsigned D_OUT    = 4,
  parameter bit          SATURATE = 1'b0,
  localparam int unsigned LATENCY = 1 + ((D_IN <= 1) ? 1 : $clog2(D_IN))
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  fp8_t [B-1:0][D_IN-1:0]          x,
  input  fp8_t [D_OUT-1:0][D_IN-1:0]      w,
  output logic                            out_valid,
  output fp8_t [B-1:0][D_OUT-1:0]         y
);

  // ---- Logical step 1: broadcast multiplication ----
  fp8_t [B-1:0][D_OUT-1:0][D_IN-1:0] prod_q;
  logic                              prod_valid;

  for (genvar bi = 0; bi < B; bi++) begin : g_b
    for (genvar j = 0; j < D_OUT; j++) begin : g_j
      for (genvar k = 0; k < D_IN; k++) begin : g_k
        fp8_t p;
        fp8_multiplier #(.SATURATE(SATURATE)) u_mul (.a(x[bi][k]), .b(w[j][k]), .y(p));
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) prod_q[bi][j][k] <= fp8_t'(8'h00);
          else        prod_q[bi][j][k] <= p;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prod_valid <= 1'b0;
    else        prod_valid <= in_valid;
  end

  // ---- Logical steps 2 .. LATENCY: tree accumulation ----
  logic [B-1:0][D_OUT-1:0] tree_valid;

  for (genvar bi = 0; bi < B; bi++) begin : g_tb
    for (genvar j = 0; j < D_OUT; j++) begin : g_tj
      fp8_adder_tree #(.N(D_IN), .SATURATE(SATURATE)) u_tree (
        .clk(clk), .rst_n(rst_n), .in_valid(prod_valid), .in_data(prod_q[bi][j]),
        .out_valid(tree_valid[bi][j]), .out_sum(y[bi][j]));
    end
  end

  // All trees run in lock step; any one of them carries the valid flag.
  assign out_valid = tree_valid[0][0];

endmodule
