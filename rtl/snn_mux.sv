// snn_mux: 2-to-1 spiking multiplexer, y = s ? a : b.
//
// Built exactly as the design describes it, from four threshold neurons:
//     y = OR(AND(s, a), AND(NOT(s), b)),
// i.e. a NOT neuron (bias 1.0, inhibitory s, threshold 0.5), two AND neurons
// (threshold 1.5) and an OR neuron (threshold 0.5). Each neuron is a
// single-step IF neuron (snn_pkg::if_fire); they are written inline rather
// than as four sub-instances because thousands of these cells make up the
// shifters of a full linear layer. It is what gives the neuron network
// conditional selection (control flow). Combinational, one time step.
module snn_mux
  import snn_pkg::*;
(
  input  logic s,
  input  logic a,
  input  logic b,
  output logic y
);

  logic ns, sa, nsb;

  always_comb begin
    ns  = if_fire(V_W'(UNIT) - syn(s), TH_LOW);     // NOT(s)
    sa  = if_fire(syn(s) + syn(a), TH_HIGH);        // AND(s, a)
    nsb = if_fire(syn(ns) + syn(b), TH_HIGH);       // AND(NOT s, b)
    y   = if_fire(syn(sa) + syn(nsb), TH_LOW);      // OR
  end

endmodule
