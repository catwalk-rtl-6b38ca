// soma: membrane potential register, accumulator and threshold check.
//
// The P_BITS-bit register holds the membrane potential offset by the
// threshold: it is loaded with -threshold (two's complement) and each cycle
// the dendrite count is added to it. When the addition carries out of the top
// bit, the accumulated potential has reached the threshold: `fire` is raised
// for that cycle and the register is loaded with -threshold again instead of
// the sum. The same reload happens on `rst`, which is the neuron reset that
// starts a new computation (fire is held low while rst is high).
//
// Interface: `count` is the dendrite output of this cycle; `threshold` must be
// 1..2**P_BITS-1. `fire` is combinational from count and the register.
// Timing: one register; fire is seen in the cycle whose count crosses the
// threshold, and the register restarts from -threshold on the next edge.
//
// Follows the paper's figure: 5-bit register, adder, a two-way select between
// the sum and -threshold driven by reset or the adder's carry. Firing when the
// potential reaches (not only exceeds) the threshold is what that structure
// gives. The reset is synchronous, a choice of this design.
module soma #(
  parameter int unsigned P_BITS = 5,
  parameter int unsigned CW     = 2
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [CW-1:0]     count,
  input  logic [P_BITS-1:0] threshold,
  output logic              fire,
  output logic [P_BITS-1:0] potential  // register value, potential - threshold
);
  logic              carry;
  logic [P_BITS-1:0] sum;

  always_comb begin
    {carry, sum} = {1'b0, potential} + (P_BITS + 1)'(count);
    fire = carry & ~rst;
  end

  always_ff @(posedge clk) begin
    if (rst || carry) potential <= -threshold;
    else              potential <= sum;
  end

  // A zero threshold would load 0, and the register could never carry out.
  a_threshold_nonzero: assert property (@(posedge clk) (rst || carry) |-> threshold != '0)
    else $error("soma: threshold must be 1..%0d", (1 << P_BITS) - 1);
endmodule
