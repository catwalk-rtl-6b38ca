// unary_topk: unary top-k selector, the first half of the Catwalk dendrite.
//
// Takes the N dendrite bits of one clock cycle (one per synapse, 1 while that
// synapse's response pulse is high) and moves the ones onto K output wires:
// y[K-1] is 1 when at least one input is 1, y[K-2] when at least two are, and
// so on. The number of ones on y is therefore min(popcount(x), K), so a K-input
// counter can replace the N-input one. Ones beyond the K-th are dropped; with
// sparse spike volleys this rarely happens.
//
// How: an N-input unary sorting network of compare-and-swap units (AND to the
// upper wire, OR to the lower wire) is pruned at elaboration time by
// catwalk_pkg::topk_net, the paper's Algorithm 1: units that cannot reach the
// last K wires are removed and units with one unread output become half units.
// For N = 16, K = 2 this leaves 29 of the 60 units, 14 of them half units.
// The outputs are the last K wires, y[K-1] = wire N-1.
//
// Timing: purely combinational, depth at most that of the sorter (10 levels for
// N = 16).
//
// The pruning method and the choice of optimal sorters follow the paper. For
// N = 32 and 64 the sorter is built here from 16-input optimal blocks and
// Batcher merging stages (185 and 531 units), this design's substitute for the
// smallest known networks the paper takes from a public list.
module unary_topk
  import catwalk_pkg::*;
#(
  parameter int unsigned N = 16,  // dendrite inputs
  parameter int unsigned K = 2    // selected outputs
) (
  input  logic [N-1:0] x,
  output logic [K-1:0] y
);
  localparam logic [NET_BITS-1:0] NET  = topk_net(N, K);
  localparam int unsigned         NCAS = sorter_size(N);

  if (N > MAX_N || !(N == 4 || N == 8 || N == 16 || N == 32 || N == 64)) begin : g_bad_n
    $error("unary_topk: N must be 4, 8, 16, 32 or 64");
  end
  if (K < 1 || K > N) begin : g_bad_k
    $error("unary_topk: K must be in 1..N");
  end

  // v[c] is the state of the N wires in front of unit c.
  logic [N-1:0] v [NCAS+1];
  assign v[0] = x;

  for (genvar c = 0; c < NCAS; c++) begin : g_cas
    localparam int unsigned I    = cas_i(NET, c);
    localparam int unsigned J    = cas_j(NET, c);
    localparam cas_kind_t   KIND = cas_kind(NET, c);
    if (KIND == CAS_PRUNED) begin : g_pruned
      assign v[c+1] = v[c];
    end else begin : g_unit
      logic lo, hi;
      logic [N-1:0] nxt;
      cas_unit #(.KIND(KIND)) u_cas (.a(v[c][I]), .b(v[c][J]), .lo(lo), .hi(hi));
      always_comb begin
        nxt = v[c];
        if (KIND != CAS_HALF_HI) nxt[I] = lo;
        if (KIND != CAS_HALF_LO) nxt[J] = hi;
      end
      assign v[c+1] = nxt;
    end
  end

  assign y = v[NCAS][N-1 -: K];
endmodule
