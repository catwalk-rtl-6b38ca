// rnl_synapse: ramp-no-leak synapse, turning an input spike into a response
// pulse as wide as the synaptic weight.
//
// When `spike` is high for a cycle, `resp` is high in that same cycle and in
// the following weight-1 cycles, W cycles in all (none for a weight of 0). The
// dendrite adds these bits every cycle, so the contribution accumulated
// t cycles after the spike is min(t+1, W): the ramp-no-leak response
// rho(W, t). A W_BITS-bit down-counter holds the cycles still to come. A second
// spike during a pulse restarts it. `rst` (synchronous) clears it.
//
// Timing: resp follows spike combinationally in the spike cycle, then comes
// from the counter.
//
// The response function and the pulse-of-width-W reading of it follow the
// paper. The paper leaves the synapse circuit out of its neuron figures; the
// counter, the 3-bit weight and the restart rule are this design's choices.
module rnl_synapse #(
  parameter int unsigned W_BITS = 3
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              spike,
  input  logic [W_BITS-1:0] weight,
  output logic              resp
);
  logic [W_BITS-1:0] remain;  // pulse cycles still to come after this one

  assign resp = spike ? (weight != '0) : (remain != '0);

  always_ff @(posedge clk) begin
    if (rst)                 remain <= '0;
    else if (spike)          remain <= (weight != '0) ? weight - 1'b1 : '0;
    else if (remain != '0)   remain <= remain - 1'b1;
  end
endmodule
