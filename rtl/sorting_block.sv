// sorting_block: Batcher odd-even merge sorting network.
//
// Sorts NIN words (NIN a power of two, 2L = 8 in the default decoder) into
// ascending unsigned order: dout[0] is the smallest, dout[NIN-1] the largest.
// The network is built from cas_unit compare-and-swap elements in
// log2(NIN)*(log2(NIN)+1)/2 layers: for 8 inputs, 19 C&S units in 6 layers
// (sort pairs, 2x2 merge, 4x4 merge), so the critical path is 1+2+3 = 6 C&S
// delays. The comparator positions follow Batcher's odd-even merge
// recursion; a position that has no comparator in a layer is a wire.
// Purely combinational; the decoder registers the results in its memory
// banks.
module sorting_block #(
  parameter int unsigned NIN = 8,
  parameter int unsigned W   = 12
) (
  input  logic [W-1:0] din  [NIN],
  output logic [W-1:0] dout [NIN]
);
  localparam int unsigned LG      = $clog2(NIN);
  localparam int unsigned NLAYERS = LG * (LG + 1) / 2;

  // Is element e the upper end of a comparator in the layer (p, k)?
  // (Knuth's formulation of Batcher's odd-even merge sort.)
  function automatic bit is_low(int unsigned e, int unsigned p, int unsigned k);
    int unsigned j0;
    j0 = k % p;
    if (e < j0 || e + k > NIN - 1) return 1'b0;
    if (((e - j0) % (2 * k)) >= k) return 1'b0;
    return (e / (2 * p)) == ((e + k) / (2 * p));
  endfunction

  // Layer ly of the network belongs to merge size P and comparator span K.
  function automatic int unsigned layer_p(int unsigned ly);
    int unsigned pi, base;
    base = 0;
    for (pi = 0; pi < LG; pi++) begin
      if (ly < base + pi + 1) return 1 << pi;
      base += pi + 1;
    end
    return 1;
  endfunction

  function automatic int unsigned layer_k(int unsigned ly);
    int unsigned pi, base;
    base = 0;
    for (pi = 0; pi < LG; pi++) begin
      if (ly < base + pi + 1) return (1 << pi) >> (ly - base);
      base += pi + 1;
    end
    return 1;
  endfunction

  for (genvar ly = 0; ly < NLAYERS; ly++) begin : g_l
    localparam int unsigned P = layer_p(ly);
    localparam int unsigned K = layer_k(ly);
    logic [W-1:0] x [NIN];   // layer input
    logic [W-1:0] y [NIN];   // layer output
    if (ly == 0) begin : g_first
      assign x = din;
    end else begin : g_next
      assign x = g_l[ly - 1].y;
    end
    for (genvar e = 0; e < NIN; e++) begin : g_e
      if (is_low(e, P, K)) begin : g_cas
        cas_unit #(.W(W)) u_cas (.a(x[e]), .b(x[e + K]), .lo(y[e]), .hi(y[e + K]));
      end else if (!(e >= K && is_low(e - K, P, K))) begin : g_wire
        assign y[e] = x[e];
      end
    end
  end

  assign dout = g_l[NLAYERS - 1].y;
endmodule
