// snn_pkg: types and constants shared by the spiking FP8 datapath.
//
// All arithmetic blocks work on the FP8 E4M3 format in its "fn" flavour
// (1 sign, 4 exponent, 3 mantissa bits, bias 7, no infinities, S.1111.111 is
// the only NaN encoding). The internal mantissa of the spatial adder is 12 bits
// wide: hidden bit, three mantissa bits and eight guard bits, as in the design
// description. Neuron potentials are signed fixed-point numbers counted in
// half units, so the gate thresholds 0.5 and 1.5 become the integers 1 and 3.
package snn_pkg;

  localparam int unsigned FP8_W      = 8;
  localparam int unsigned EXP_W      = 4;
  localparam int unsigned MAN_W      = 3;
  localparam int unsigned BIAS       = 7;
  localparam int unsigned INT_MAN_W  = 12;   // internal adder mantissa [h m2 m1 m0 g0..g7]
  localparam int unsigned GUARD_W    = INT_MAN_W - MAN_W - 1;

  // Neuron potential: signed, in units of 0.5.
  localparam int unsigned V_W        = 8;
  localparam int          UNIT       = 2;    // synaptic weight 1.0
  localparam int          TH_HIGH    = 3;    // threshold 1.5 (AND)
  localparam int          TH_LOW     = 1;    // threshold 0.5 (OR, NOT, XOR)

  // Canonical NaN (positive); the sign bit is ORed in where it is known.
  localparam logic [7:0]  FP8_NAN    = 8'h7F;
  // Largest finite magnitude, 448.
  localparam logic [7:0]  FP8_MAX    = 8'h7E;

  typedef struct packed {
    logic                 sign;
    logic [EXP_W-1:0]     exp;
    logic [MAN_W-1:0]     man;
  } fp8_t;

  // Unpacked view produced by the effective-exponent decoder.
  typedef struct packed {
    logic                 sign;
    logic [EXP_W-1:0]     exp_eff;   // E, or 1 when E == 0
    logic [MAN_W:0]       sig;       // {hidden, m2, m1, m0}
    logic                 is_zero;
    logic                 is_sub;
    logic                 is_nan;
  } fp8_unpacked_t;

  typedef enum logic [1:0] {
    GATE_AND = 2'd0,
    GATE_OR  = 2'd1,
    GATE_NOT = 2'd2,
    GATE_XOR = 2'd3
  } gate_op_e;

  // Single-step threshold neuron: an IF neuron evaluated from a discharged
  // state (V[t-1] = 0) fires when its input current reaches the threshold.
  // This is if_neuron with STATEFUL = 0, written as a function so that large
  // arrays of gates (the barrel shifter) need no module instance per neuron.
  function automatic logic if_fire(input logic signed [V_W-1:0] i_cur, input int vth);
    return i_cur >= V_W'(vth);
  endfunction

  // Weighted current of one binary spike (weight +1.0).
  function automatic logic signed [V_W-1:0] syn(input logic spk);
    return spk ? V_W'(UNIT) : '0;
  endfunction

  // The 4-neuron spiking multiplexer, y = s ? a : b:
  //   OR(AND(s, a), AND(NOT(s), b)).
  function automatic logic mux_fire(input logic s, input logic a, input logic b);
    logic ns, sa, nsb;
    ns  = if_fire(V_W'(UNIT) - syn(s), TH_LOW);
    sa  = if_fire(syn(s) + syn(a), TH_HIGH);
    nsb = if_fire(syn(ns) + syn(b), TH_HIGH);
    return if_fire(syn(sa) + syn(nsb), TH_LOW);
  endfunction

endpackage
