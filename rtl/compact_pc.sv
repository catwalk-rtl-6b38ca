// compact_pc: the small parallel counter behind the unary top-k selector.
//
// Counts the ones on its M inputs and gives the count as an unsigned binary
// number of CW = clog2(M+1) bits. In the Catwalk dendrite M is K, the number
// of top-k outputs, so in the main configuration (K = 2) the counter is a
// single full adder: sum = x[0] ^ x[1], carry = x[0] & x[1].
//
// How: the inputs are padded with zeros to L = 2**CW - 1 bits. Three bits go
// into one full adder. Larger L is split into two halves of (L-1)/2 bits, each
// counted by a compact_pc of its own, and the two (CW-1)-bit counts are added
// by a ripple chain of CW-1 full adders whose carry input takes the one
// remaining bit. For 15 bits this is 4 + 2*2 + 3 = 11 full adders, the
// classic compact counter; for 2 or 3 bits it is one full adder.
//
// Timing: purely combinational, depth about 2*CW full-adder delays.
//
// The recursive full-adder structure matches the compact counter of the
// earlier neuron that Catwalk shrinks (one full adder for K = 2); padding
// unused inputs with 0 and tying a spare carry input to 0 are this design's
// choices.
module compact_pc #(
  parameter int unsigned M  = 2,                // inputs
  parameter int unsigned CW = $clog2(M + 1)     // count width
) (
  input  logic [M-1:0]  x,
  output logic [CW-1:0] count
);
  localparam int unsigned L  = (1 << CW) - 1;   // padded input count
  localparam int unsigned G2 = (L + 1) / 4;     // full adders on the first level

  logic [L-1:0] xp;
  assign xp = L'(x);

  if (CW == 1) begin : g_one
    assign count = xp[0];
  end else begin : g_tree
    // The recursion unrolled into levels. Level d (2..CW) holds (L+1) >> d
    // counters of d bits. Level 2 counts triples of inputs with one full
    // adder each; a level-d counter adds two level-(d-1) counts with a ripple
    // chain of d-1 full adders whose carry input is one spare input bit.
    // Spare bits of level d start after those used by the levels below.
    for (genvar d = 2; d <= CW; d++) begin : g_lvl
      localparam int unsigned ND   = (L + 1) >> d;
      localparam int unsigned BASE = 3 * G2 + ((d > 2) ? (G2 - 2 * ND) : 0);
      for (genvar g = 0; g < ND; g++) begin : g_cnt
        logic [d-1:0] c;  // this counter's d-bit result
        if (d == 2) begin : g_leaf
          full_adder u_fa (.a(xp[3*g]), .b(xp[3*g+1]), .ci(xp[3*g+2]), .s(c[0]), .co(c[1]));
        end else begin : g_add
          for (genvar b = 0; b < d - 1; b++) begin : g_rca
            logic ci, s, co;
            if (b == 0) begin : g_cin
              assign ci = xp[BASE + g];
            end else begin : g_chain
              assign ci = g_rca[b-1].co;
            end
            full_adder u_fa (.a(g_lvl[d-1].g_cnt[2*g].c[b]), .b(g_lvl[d-1].g_cnt[2*g+1].c[b]),
                             .ci(ci), .s(s), .co(co));
            assign c[b] = s;
          end
          assign c[d-1] = g_rca[d-2].co;
        end
      end
    end

    assign count = g_lvl[CW].g_cnt[0].c;
  end
endmodule
