// llr_mem_bank: LLR messages memory bank of the list decoder.
//
// Holds, for each of the L paths, all 2N-1 LLR words of the SC tree
// (layer lam at word offset 2^lam - 1, the N channel LLRs last), L(2N-1)Q
// bits in all, as a register array.
//   * Load:  ld_we writes channel LLR ld_addr into every path's copy.
//   * Write: wr_en stores the 2^wr_lam results of a compute cycle into layer
//            wr_lam of each path.
//   * Copy:  cp_en replaces path l by the old contents of path cp_src[l]
//            (all paths at once) when the list is pruned.
//   * Read:  rd_data[l] is layer rd_lam of path l (words beyond 2^rd_lam
//            read as 0); bit_llr[l] is layer 0, the last-stage LLR.
// All writes take effect at the rising clock edge; reads are combinational.
// Each word's layer is fixed, so a layer write needs no address decoding.
// Copying whole paths in one cycle is this design's choice for the path
// replacement that pruning needs. The array has no reset: every word is
// written before it is read.
module llr_mem_bank #(
  parameter int unsigned N = llrscl_pkg::N_DEF,
  parameter int unsigned L = llrscl_pkg::L_DEF,
  parameter int unsigned Q = llrscl_pkg::Q_DEF,
  localparam int unsigned LGN = $clog2(N),
  localparam int unsigned LGL = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned LW  = $clog2(LGN + 1)
) (
  input  logic           clk,
  input  logic           ld_we,
  input  logic [LGN-1:0] ld_addr,
  input  logic [Q-1:0]   ld_data,
  input  logic           wr_en,
  input  logic [LW-1:0]  wr_lam,
  input  logic [Q-1:0]   wr_data [L][N/2],
  input  logic           cp_en,
  input  logic [LGL-1:0] cp_src  [L],
  input  logic [LW-1:0]  rd_lam,
  output logic [Q-1:0]   rd_data [L][N],
  output logic [Q-1:0]   bit_llr [L]
);
  logic [Q-1:0] mem [L][2*N-1];

  // Layer of word w: floor(log2(w+1)).
  function automatic int unsigned word_layer(int unsigned w);
    int unsigned lay = 0;
    while ((2 << lay) - 1 <= w) lay++;
    return lay;
  endfunction

  // Word w belongs to layer word_layer(w) and is element w - (2^layer - 1)
  // of it; a layer write touches only the words of that layer.
  always_ff @(posedge clk) begin
    for (int l = 0; l < L; l++) begin
      for (int w = 0; w < 2 * N - 1; w++) begin
        automatic int unsigned lay = word_layer(w);
        automatic int unsigned k   = w - ((1 << lay) - 1);
        if (lay == LGN && ld_we) begin
          if (int'(ld_addr) == int'(k)) mem[l][w] <= ld_data;
        end else if (cp_en) begin
          mem[l][w] <= mem[cp_src[l]][w];
        end else if (lay < LGN && wr_en && int'(wr_lam) == int'(lay)) begin
          mem[l][w] <= wr_data[l][k % (N / 2)];
        end
      end
    end
  end

  // Word k of a layer can only come from the layers that have a word k,
  // so each output is a small constant-index mux over those layers.
  always_comb begin
    for (int l = 0; l < L; l++) begin
      bit_llr[l] = mem[l][0];
      for (int k = 0; k < N; k++) begin
        rd_data[l][k] = '0;
        for (int lay = 0; lay <= LGN; lay++) begin
          if (k < (1 << lay) && int'(rd_lam) == lay) rd_data[l][k] = mem[l][(1 << lay) - 1 + k];
        end
      end
    end
  end
endmodule
