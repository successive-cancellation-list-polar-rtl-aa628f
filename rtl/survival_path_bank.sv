// survival_path_bank: survival path memory bank with partial sums.
//
// For each of the L paths it stores the decoded bits u[0..N-1] (L*N bits)
// and the partial-sum registers the g units need (N-1 bits per path).
// Partial sums: beta[lam] (2^lam bits, at offset 2^lam - 1) holds the
// re-encoded bits of the most recently finished left child at layer lam.
// When bit i is decided with value b the encoding climbs the tree: at each
// layer lam where bit lam of i is 1 the current vector v (the right child)
// becomes {beta[lam] ^ v, v}; at the first layer where bit lam of i is 0 the
// vector is stored as beta[lam] and the climb stops.
//   * init:   clears all bits and partial sums (start of a codeword).
//   * upd_en: path l becomes path src[l] extended by bit ubit[l] at index
//             bit_idx, with its partial sums updated as above (decision cycle).
//   * psum[l]: beta[rd_lam] of path l, zero-padded to N/2 bits.
// Storing the partial sums beside the paths (and copying them with the
// paths) is this design's choice; the bank layout is not prescribed.
module survival_path_bank #(
  parameter int unsigned N = llrscl_pkg::N_DEF,
  parameter int unsigned L = llrscl_pkg::L_DEF,
  localparam int unsigned LGN = $clog2(N),
  localparam int unsigned LGL = (L > 1) ? $clog2(L) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init,
  input  logic           upd_en,
  input  logic [LGN-1:0] bit_idx,
  input  logic [LGL-1:0] src  [L],
  input  logic           ubit [L],
  input  logic [LGN-1:0] rd_lam,
  output logic [N/2-1:0] psum [L],
  output logic [N-1:0]   u    [L]
);
  logic [N-2:0] beta      [L];
  logic [N-2:0] beta_next [L];

  // Partial-sum climb for each new path l, one generate level per layer.
  // v holds the vector arriving at layer lam (2^lam bits); reach says the
  // climb got that far (all lower bits of bit_idx are 1); the vector is
  // stored at the first layer whose bit of bit_idx is 0.
  for (genvar l = 0; l < L; l++) begin : g_path
    logic [N-2:0] bsrc;
    assign bsrc = beta[src[l]];
    for (genvar lam = 0; lam < LGN; lam++) begin : g_lay
      localparam int unsigned W   = 1 << lam;
      localparam int unsigned OFF = W - 1;
      logic [W-1:0] v;
      logic         reach;
      if (lam == 0) begin : g_leaf
        assign v     = ubit[l];
        assign reach = 1'b1;
      end else begin : g_up
        localparam int unsigned H  = W / 2;
        localparam int unsigned HO = H - 1;
        assign v     = {g_lay[lam - 1].v, g_lay[lam - 1].v ^ bsrc[HO +: H]};
        assign reach = g_lay[lam - 1].reach && bit_idx[lam - 1];
      end
      assign beta_next[l][OFF +: W] = (reach && !bit_idx[lam]) ? v : bsrc[OFF +: W];
    end

    // Partial sums of layer rd_lam: word k exists only in layers 2^lay > k.
    for (genvar k = 0; k < N / 2; k++) begin : g_rd
      always_comb begin
        psum[l][k] = 1'b0;
        for (int lay = 0; lay < LGN; lay++) begin
          if (k < (1 << lay) && int'(rd_lam) == lay) psum[l][k] = beta[l][(1 << lay) - 1 + k];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++) begin
        u[l]    <= '0;
        beta[l] <= '0;
      end
    end else if (init) begin
      for (int l = 0; l < L; l++) begin
        u[l]    <= '0;
        beta[l] <= '0;
      end
    end else if (upd_en) begin
      for (int l = 0; l < L; l++) begin
        u[l]          <= u[src[l]];
        u[l][bit_idx] <= ubit[l];
        beta[l]       <= beta_next[l];
      end
    end
  end
endmodule
