// dendrite: Catwalk dendrite, a unary top-k selector followed by a K-input
// parallel counter.
//
// Each clock cycle the N synapse response bits arrive on x. The top-k selector
// gathers up to K of the ones onto K wires and the compact counter adds them,
// so `count` = min(popcount(x), K). This count is the increment of the
// membrane potential for the cycle. It replaces the N-input parallel counter
// (N-1 full adders) of the earlier ramp-no-leak neuron; the two agree whenever
// no more than K synapses are active in the same cycle.
//
// Timing: purely combinational (selector depth plus one adder).
//
// Structure follows the paper (top-k then a small counter, one full adder for
// K = 2).
module dendrite #(
  parameter int unsigned N  = 16,
  parameter int unsigned K  = 2,
  parameter int unsigned CW = $clog2(K + 1)
) (
  input  logic [N-1:0]  x,
  output logic [CW-1:0] count
);
  logic [K-1:0] sel;

  unary_topk #(.N(N), .K(K)) u_topk (.x(x), .y(sel));
  compact_pc #(.M(K), .CW(CW)) u_pc (.x(sel), .count(count));
endmodule
