// cas_unit: one unary compare-and-swap unit, or half of one.
//
// On a unary (one bit per clock cycle) pair of dendrite wires the larger of the
// two bits is their OR and the smaller their AND. The unit sends the OR to the
// lower wire of the pair (`hi`, towards the top-k outputs) and the AND to the
// upper wire (`lo`), so a 1 on either input always survives on `hi`. A full
// unit is two gates; a half unit keeps only the gate whose output is read
// later in the network (KIND = CAS_HALF_HI keeps the OR, CAS_HALF_LO the AND),
// and the output of the dropped gate is driven 0, which no later logic reads.
// Purely combinational, no clock.
//
// Follows the paper: the unit is two gates, AND for the minimum and OR for the
// maximum bit, larger values go to the lower wire, and half units drop one
// gate. Driving the dropped output to 0 is this design's choice.
module cas_unit
  import catwalk_pkg::*;
#(
  parameter cas_kind_t KIND = CAS_FULL
) (
  input  logic a,   // bit on the upper wire (i)
  input  logic b,   // bit on the lower wire (j)
  output logic lo,  // to wire i: a AND b (minimum)
  output logic hi   // to wire j: a OR b (maximum)
);
  if (KIND == CAS_FULL || KIND == CAS_HALF_LO) begin : g_and
    assign lo = a & b;
  end else begin : g_no_and
    assign lo = 1'b0;
  end

  if (KIND == CAS_FULL || KIND == CAS_HALF_HI) begin : g_or
    assign hi = a | b;
  end else begin : g_no_or
    assign hi = 1'b0;
  end
endmodule
