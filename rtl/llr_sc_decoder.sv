// llr_sc_decoder: one LLR-SC component decoder, a line of N/2 PEs.
//
// The SC decoding tree of a length-N polar code has layers 0..log2(N);
// layer lam holds 2^lam LLRs of the node being decoded, layer log2(N) the
// channel LLRs. In one cycle this unit computes a whole layer lam from its
// parent layer lam+1: PE k (k < 2^lam) combines parent words k and k+2^lam,
//   f:  child[k] = f(parent[k], parent[k+2^lam])            (left child)
//   g:  child[k] = g(parent[k], parent[k+2^lam], psum[k])   (right child)
// where psum is the partial-sum vector of the already decoded left sibling.
// Outputs of PEs k >= 2^lam are don't-care and are not stored. With N/2 PEs
// every layer takes exactly one cycle, so one codeword needs 2N-2 compute
// cycles. The unit is combinational: parent LLRs come from, and child LLRs go
// back to, the LLR memory bank. The PE line and the natural-order tree follow
// the line-type SC decoder the architecture builds on; the operand routing is
// this design's own.
module llr_sc_decoder #(
  parameter int unsigned N = llrscl_pkg::N_DEF,
  parameter int unsigned Q = llrscl_pkg::Q_DEF,
  localparam int unsigned LGN = $clog2(N)
) (
  input  logic [Q-1:0]   parent [N],     // layer lam+1, words k >= 2^(lam+1) unused
  input  logic [LGN-1:0] lam,            // layer to compute, 0 .. LGN-1
  input  logic           op_g,           // 0: f units, 1: g units
  input  logic [N/2-1:0] psum,           // partial sums (g only)
  output logic [Q-1:0]   child  [N/2]    // layer lam, words k >= 2^lam don't-care
);
  // Operand b of PE k is parent[k + 2^lam]; PE k is only used for layers
  // with 2^lam > k, so it needs a mux over those layers alone.
  logic [Q-1:0] b_op [N/2];
  always_comb begin
    for (int k = 0; k < N / 2; k++) begin
      b_op[k] = '0;
      for (int lay = 0; lay < LGN; lay++) begin
        if (k < (1 << lay) && int'(lam) == lay) b_op[k] = parent[k + (1 << lay)];
      end
    end
  end

  for (genvar k = 0; k < N / 2; k++) begin : g_pe
    llr_pe #(.Q(Q)) u_pe (
      .a      (parent[k]),
      .b      (b_op[k]),
      .u_sum  (psum[k]),
      .control(op_g),
      .y      (child[k])
    );
  end
endmodule
