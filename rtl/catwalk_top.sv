// catwalk_top: one Catwalk neuron with its N ramp-no-leak synapses.
//
// Inputs are a spike volley (spike_in[i] high for one cycle at the time that
// encodes input i's value; no spike means "infinity") and the N synaptic
// weights. Each synapse turns its spike into a pulse as long as its weight,
// and the neuron accumulates the pulses of all synapses, at most K per cycle,
// until the potential reaches `threshold`; then spike_out goes high for
// PULSE_CYCLES cycles. `rst` (synchronous) is the neuron reset between
// volleys: it clears the synapses, reloads the potential and ends a pulse.
//
// Timing: a spike arriving in cycle t can make `fire` rise in cycle t; the
// output spike starts at the next clock edge.
//
// The neuron follows the paper; the synapses are built here from its
// response-function description, and weights come in on ports because the
// paper does not cover weight storage or learning.
module catwalk_top #(
  parameter int unsigned N            = 16,
  parameter int unsigned K            = 2,
  parameter int unsigned W_BITS       = 3,
  parameter int unsigned P_BITS       = 5,
  parameter int unsigned PULSE_CYCLES = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N-1:0]      spike_in,
  input  logic [W_BITS-1:0] weight [N],
  input  logic [P_BITS-1:0] threshold,
  output logic              fire,
  output logic              spike_out,
  output logic [P_BITS-1:0] potential   // membrane potential minus threshold
);
  logic [N-1:0] resp;

  for (genvar i = 0; i < N; i++) begin : g_syn
    rnl_synapse #(.W_BITS(W_BITS)) u_syn (
      .clk, .rst, .spike(spike_in[i]), .weight(weight[i]), .resp(resp[i])
    );
  end

  catwalk_neuron #(.N(N), .K(K), .P_BITS(P_BITS), .PULSE_CYCLES(PULSE_CYCLES)) u_neuron (
    .clk, .rst, .x(resp), .threshold, .fire, .spike_out, .potential
  );
endmodule
