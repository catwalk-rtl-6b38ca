// catwalk_pkg: shared types, constants and elaboration-time network builders
// for the Catwalk unary top-k neuron.
//
// A unary sorter is a list of compare-and-swap units (i, j) with i < j, applied
// in order. On one clock cycle every dendrite wire carries one bit; a unit puts
// the AND of its two bits on wire i and the OR on wire j, so the ones sink
// towards the high-numbered wires. The top-k selector keeps only the units that
// can still reach the last K wires (the pruning of the paper's Algorithm 1) and,
// of those, marks as "half" units the ones where only one of the two outputs is
// read later.
//
// Sorter sources: for 4, 8 and 16 inputs the tables below are the smallest
// known sorting networks (5, 19 and 60 units), the kind the paper prunes. For
// 32 and 64 inputs the smallest known networks are not reproduced; instead
// each block of 16 wires is sorted with the 16-input table and the blocks are
// merged with the merging stages of Batcher's odd-even merge sort. This gives
// 185 units for 32 inputs (the same count as the smallest known network) and
// 531 for 64 (the smallest known has 521), a design choice of this RTL.
// The 4-, 8- and 16-input tables were checked to sort all 0/1 inputs; the
// merged networks are correct by construction.
//
// Network encoding (NET_W = 16 bits per unit, unit 0 in the low bits):
//   [15:14] cas_kind_t, [13:7] wire i (AND output), [6:0] wire j (OR output).
package catwalk_pkg;

  // Limits of the generated networks.
  localparam int unsigned MAX_N   = 64;   // largest neuron fan-in supported
  localparam int unsigned MAX_CAS = 540;  // >= 531 units of the 64-input sorter
  localparam int unsigned NET_W   = 16;
  localparam int unsigned NET_BITS = MAX_CAS * NET_W;

  // What is left of one compare-and-swap unit after top-k pruning.
  typedef enum logic [1:0] {
    CAS_PRUNED  = 2'd0,  // removed: neither output reaches the top-k wires
    CAS_FULL    = 2'd1,  // both gates kept
    CAS_HALF_HI = 2'd2,  // only the OR gate (output on wire j) is kept
    CAS_HALF_LO = 2'd3   // only the AND gate (output on wire i) is kept
  } cas_kind_t;

  // Smallest known sorting networks, one byte per unit: {i[3:0], j[3:0]}.
  localparam logic [7:0] OPT4 [5] = '{
    8'h01, 8'h23, 8'h02, 8'h13, 8'h12
  };
  localparam logic [7:0] OPT8 [19] = '{
    8'h02, 8'h13, 8'h46, 8'h57,
    8'h04, 8'h15, 8'h26, 8'h37,
    8'h01, 8'h23, 8'h45, 8'h67,
    8'h24, 8'h35,
    8'h14, 8'h36,
    8'h12, 8'h34, 8'h56
  };
  localparam logic [7:0] OPT16 [60] = '{
    8'h0D, 8'h1C, 8'h2F, 8'h3E, 8'h48, 8'h56, 8'h7B, 8'h9A,
    8'h05, 8'h17, 8'h29, 8'h34, 8'h6D, 8'h8E, 8'hAF, 8'hBC,
    8'h01, 8'h23, 8'h45, 8'h68, 8'h79, 8'hAB, 8'hCD, 8'hEF,
    8'h02, 8'h13, 8'h4A, 8'h5B, 8'h67, 8'h89, 8'hCE, 8'hDF,
    8'h12, 8'h3C, 8'h46, 8'h57, 8'h8A, 8'h9B, 8'hDE,
    8'h14, 8'h26, 8'h58, 8'h7A, 8'h9D, 8'hBE,
    8'h24, 8'h36, 8'h9C, 8'hBD,
    8'h35, 8'h68, 8'h79, 8'hAC,
    8'h34, 8'h56, 8'h78, 8'h9A, 8'hBC,
    8'h67, 8'h89
  };

  // One encoded unit.
  function automatic logic [NET_W-1:0] cas_enc(cas_kind_t kind, logic [6:0] i, logic [6:0] j);
    return {kind, i, j};
  endfunction

  function automatic cas_kind_t cas_kind(logic [NET_BITS-1:0] net, int unsigned c);
    return cas_kind_t'(net[c*NET_W + 14 +: 2]);
  endfunction

  function automatic int unsigned cas_i(logic [NET_BITS-1:0] net, int unsigned c);
    return 32'(net[c*NET_W + 7 +: 7]);
  endfunction

  function automatic int unsigned cas_j(logic [NET_BITS-1:0] net, int unsigned c);
    return 32'(net[c*NET_W +: 7]);
  endfunction

  // Number of compare-and-swap units in the full sorter for n inputs.
  function automatic int unsigned sorter_size(int unsigned n);
    int unsigned cnt;
    if (n == 4)  return 5;
    if (n == 8)  return 19;
    // n >= 16: n/16 blocks sorted by OPT16, then Batcher merges of blocks of
    // p = 16, 32, ... wires, counted with the same loops as sorter_net.
    cnt = (n / 16) * 60;
    for (int unsigned p = 16; p < n; p = p * 2)
      for (int unsigned k = p; k >= 1; k = k / 2) begin
        for (int unsigned j = k % p; j + k < n; j = j + 2 * k)
          for (int unsigned i = 0; i < k && i + j + k < n; i++)
            if ((i + j) / (2 * p) == (i + j + k) / (2 * p)) cnt++;
        if (k == 1) break;
      end
    return cnt;
  endfunction

  // Full sorter for n inputs, every unit CAS_FULL. Batcher's merge step for
  // blocks of p sorted wires: for k = p, p/2, ..., 1 compare wire i+j with
  // i+j+k for j = k mod p, k mod p + 2k, ... and 0 <= i < k, whenever both lie
  // in the same block of 2p wires.
  function automatic logic [NET_BITS-1:0] sorter_net(int unsigned n);
    logic [NET_BITS-1:0] net;
    int unsigned c;
    for (int unsigned u = 0; u < MAX_CAS; u++) net[u*NET_W +: NET_W] = '0;
    c = 0;
    if (n == 4) begin
      for (int unsigned u = 0; u < 5; u++)
        net[u*NET_W +: NET_W] = cas_enc(CAS_FULL, 7'(OPT4[u][7:4]), 7'(OPT4[u][3:0]));
    end else if (n == 8) begin
      for (int unsigned u = 0; u < 19; u++)
        net[u*NET_W +: NET_W] = cas_enc(CAS_FULL, 7'(OPT8[u][7:4]), 7'(OPT8[u][3:0]));
    end else begin
      for (int unsigned b = 0; b < n; b = b + 16)
        for (int unsigned u = 0; u < 60; u++) begin
          net[c*NET_W +: NET_W] = cas_enc(CAS_FULL, 7'(b + 32'(OPT16[u][7:4])),
                                                    7'(b + 32'(OPT16[u][3:0])));
          c++;
        end
      for (int unsigned p = 16; p < n; p = p * 2)
        for (int unsigned k = p; k >= 1; k = k / 2) begin
          for (int unsigned j = k % p; j + k < n; j = j + 2 * k)
            for (int unsigned i = 0; i < k && i + j + k < n; i++)
              if ((i + j) / (2 * p) == (i + j + k) / (2 * p)) begin
                net[c*NET_W +: NET_W] = cas_enc(CAS_FULL, 7'(i + j), 7'(i + j + k));
                c++;
              end
          if (k == 1) break;
        end
    end
    return net;
  endfunction

  // Top-k selector: the sorter with each unit marked pruned, full or half.
  // One backward pass. `live` holds the wires whose value at that point still
  // reaches one of the last k wires (the set M of Algorithm 1). A unit touching
  // a live wire is kept; an output wire of a kept unit that is not live is never
  // read, so that gate is dropped (half unit).
  function automatic logic [NET_BITS-1:0] topk_net(int unsigned n, int unsigned k);
    logic [NET_BITS-1:0] net;
    logic [2*MAX_N-1:0] live;  // indexed by 7-bit wire numbers
    int unsigned size;
    logic [6:0] i, j;
    cas_kind_t kind;
    net  = sorter_net(n);
    size = sorter_size(n);
    live = '0;
    for (int unsigned w = n - k; w < n; w++) live[w] = 1'b1;
    for (int unsigned cc = size; cc > 0; cc--) begin
      i = 7'(cas_i(net, cc - 1));
      j = 7'(cas_j(net, cc - 1));
      if (live[i] && live[j])      kind = CAS_FULL;
      else if (live[j])            kind = CAS_HALF_HI;
      else if (live[i])            kind = CAS_HALF_LO;
      else                         kind = CAS_PRUNED;
      if (kind != CAS_PRUNED) begin
        live[i] = 1'b1;
        live[j] = 1'b1;
      end
      net[(cc-1)*NET_W +: NET_W] = cas_enc(kind, i, j);
    end
    return net;
  endfunction

  // Units of a given kind in the n-input top-k selector.
  function automatic int unsigned topk_count(int unsigned n, int unsigned k, cas_kind_t kind);
    logic [NET_BITS-1:0] net;
    int unsigned cnt;
    net = topk_net(n, k);
    cnt = 0;
    for (int unsigned c = 0; c < sorter_size(n); c++)
      if (cas_kind(net, c) == kind) cnt++;
    return cnt;
  endfunction

endpackage
