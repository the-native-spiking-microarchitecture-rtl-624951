// if_neuron: discrete-time integrate-and-fire neuron with soft reset.
//
// This is the computational primitive of the whole design. In each time step
// the membrane potential integrates the input current,
//     V[t] = beta * V[t-1] + I[t],
// fires when V[t] >= VTH, and on firing is decremented by VTH (soft reset),
// so the residue V[t] - VTH * S[t] is kept rather than cleared. The soft reset
// and the threshold test follow the design description; with beta = 1 it is
// the ideal IF neuron, with beta < 1 the leaky (LIF) neuron used for the
// leakage study. Beta is the fraction BETA_NUM / 2**BETA_SHIFT, a choice of
// this implementation.
//
// Two uses:
//   STATEFUL = 1  the potential is a register that carries the residue from
//                 step to step (temporal integration, carry-like behaviour).
//   STATEFUL = 0  the neuron is evaluated within one time step from a
//                 discharged state (V[t-1] = 0). This is how every logic gate
//                 of the spatial datapath uses it: no charge is retained, so
//                 leakage cannot change the result. The output is then purely
//                 combinational and clk / rst_n / step are unused.
//
// Interface: i_cur is the summed synaptic current (signed, in the same fixed
// point units as VTH); spike is S[t]; v_mem is the potential after the soft
// reset. In STATEFUL mode the register updates on the rising clock edge when
// step is high; spike and v_mem show the result of the step being taken.
// The potential is not saturated: VW must cover the expected range.
module if_neuron #(
  parameter int unsigned VW         = 8,
  parameter int          VTH        = 2,
  parameter int unsigned BETA_NUM   = 256,
  parameter int unsigned BETA_SHIFT = 8,
  parameter bit          STATEFUL   = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 step,
  input  logic signed [VW-1:0] i_cur,
  output logic                 spike,
  output logic signed [VW-1:0] v_mem
);

  logic signed [VW-1:0]         v_prev;
  logic signed [VW+BETA_SHIFT+1:0] v_scaled;
  logic signed [VW-1:0]         v_leak;
  logic signed [VW-1:0]         v_int;

  // Leak: beta * V[t-1], arithmetic shift keeps the sign.
  always_comb begin
    v_scaled = (VW+BETA_SHIFT+2)'(v_prev) * $signed({1'b0, (BETA_SHIFT+1)'(BETA_NUM)});
    v_leak   = VW'(v_scaled >>> BETA_SHIFT);
    v_int    = v_leak + i_cur;
    spike    = (v_int >= VW'(VTH));
    v_mem    = spike ? v_int - VW'(VTH) : v_int;
  end

  if (STATEFUL) begin : g_state
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    v_prev <= '0;
      else if (step) v_prev <= v_mem;
    end
  end else begin : g_spatial
    assign v_prev = '0;
  end

endmodule
