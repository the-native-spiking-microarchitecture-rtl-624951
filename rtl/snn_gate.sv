// snn_gate: a two-input spiking logic gate made of threshold neurons.
//
// Each gate is one (or, for XOR, two) single-step IF neurons. The inputs are
// binary spikes; excitatory synapses have weight +1.0 and inhibitory ones
// -1.0, and the gate function is set by the firing threshold:
//     AND(a,b) = I[a + b >= 1.5]
//     OR(a,b)  = I[a + b >= 0.5]
//     NOT(a)   = I[1 - a >= 0.5]      (constant bias current 1.0, b unused)
// These three follow the design description. XOR is described there only as
// a composite gate; here it is two neurons: an AND neuron n, and an output
// neuron with I = a + b - 2n and threshold 0.5, i.e. it relies on exact
// cancellation of the inhibitory current, which is also why XOR is the gate
// most sensitive to input noise.
//
// Potentials are counted in half units (weight 1.0 = 2, threshold 1.5 = 3),
// see snn_pkg. The gate is combinational: it settles within one time step.
module snn_gate
  import snn_pkg::*;
#(
  parameter gate_op_e OP = GATE_AND
) (
  input  logic a,
  input  logic b,
  output logic y
);

  logic signed [V_W-1:0] wa, wb;
  logic signed [V_W-1:0] v_unused0, v_unused1;

  assign wa = a ? V_W'(UNIT) : '0;
  assign wb = b ? V_W'(UNIT) : '0;

  if (OP == GATE_AND) begin : g_and
    if_neuron #(.VW(V_W), .VTH(TH_HIGH), .STATEFUL(1'b0)) u_n (
      .clk(1'b0), .rst_n(1'b1), .step(1'b0), .i_cur(wa + wb), .spike(y), .v_mem(v_unused0));
    assign v_unused1 = '0;
  end else if (OP == GATE_OR) begin : g_or
    if_neuron #(.VW(V_W), .VTH(TH_LOW), .STATEFUL(1'b0)) u_n (
      .clk(1'b0), .rst_n(1'b1), .step(1'b0), .i_cur(wa + wb), .spike(y), .v_mem(v_unused0));
    assign v_unused1 = '0;
  end else if (OP == GATE_NOT) begin : g_not
    // Bias current 1.0 minus the inhibitory input.
    if_neuron #(.VW(V_W), .VTH(TH_LOW), .STATEFUL(1'b0)) u_n (
      .clk(1'b0), .rst_n(1'b1), .step(1'b0), .i_cur(V_W'(UNIT) - wa), .spike(y), .v_mem(v_unused0));
    assign v_unused1 = {V_W{b}};   // b has no synapse on a NOT gate
  end else begin : g_xor
    logic n_and;
    if_neuron #(.VW(V_W), .VTH(TH_HIGH), .STATEFUL(1'b0)) u_n0 (
      .clk(1'b0), .rst_n(1'b1), .step(1'b0), .i_cur(wa + wb), .spike(n_and), .v_mem(v_unused0));
    if_neuron #(.VW(V_W), .VTH(TH_LOW), .STATEFUL(1'b0)) u_n1 (
      .clk(1'b0), .rst_n(1'b1), .step(1'b0),
      .i_cur(wa + wb - (n_and ? V_W'(2*UNIT) : '0)), .spike(y), .v_mem(v_unused1));
  end

endmodule
