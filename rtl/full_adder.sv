// full_adder: one full-adder cell, the building block of the compact parallel
// counter (the "FA" boxes of the neuron's dendrite).
//
// Interface: three one-bit inputs a, b, ci; s = a ^ b ^ ci is the sum bit and
// co = majority(a, b, ci) the carry. Purely combinational, no clock.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  assign s  = a ^ b ^ ci;
  assign co = (a & b) | (a & ci) | (b & ci);
endmodule
