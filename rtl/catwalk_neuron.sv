// catwalk_neuron: the Catwalk SRM0 ramp-no-leak neuron: dendrite (unary top-k
// plus small counter), soma and axon.
//
// Input x[i] is the response bit of synapse i in this cycle. Each cycle the
// dendrite gives min(popcount(x), K), the soma adds it to the membrane
// potential and fires when the potential reaches `threshold`, reloading itself
// for the next spike, and the axon sends a PULSE_CYCLES-cycle output spike.
// `rst` is the neuron reset (synchronous): it reloads the potential and ends a
// pulse. The soma and axon are the ones of the earlier RNL neuron; only the
// dendrite differs.
//
// Timing: x to fire is combinational; spike_out rises one clock edge after the
// fire cycle.
module catwalk_neuron #(
  parameter int unsigned N            = 16,  // dendrite inputs
  parameter int unsigned K            = 2,   // top-k outputs
  parameter int unsigned P_BITS       = 5,   // membrane potential width
  parameter int unsigned PULSE_CYCLES = 8    // output spike length
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N-1:0]      x,
  input  logic [P_BITS-1:0] threshold,
  output logic              fire,
  output logic              spike_out,
  output logic [P_BITS-1:0] potential   // membrane potential minus threshold
);
  localparam int unsigned CW = $clog2(K + 1);

  logic [CW-1:0] count;

  dendrite #(.N(N), .K(K), .CW(CW)) u_dendrite (.x(x), .count(count));

  soma #(.P_BITS(P_BITS), .CW(CW)) u_soma (
    .clk, .rst, .count, .threshold, .fire, .potential
  );

  axon #(.PULSE_CYCLES(PULSE_CYCLES)) u_axon (
    .clk, .rst, .fire, .spike_out
  );
endmodule
