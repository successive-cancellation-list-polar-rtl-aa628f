// path_metric_bank: path metrics memory bank of the list decoder.
//
// Holds one PMW-bit two's-complement metric (log-probability, <= 0) and a
// valid flag per path, L*PMW + L bits.
//   * init:   metrics to 0; only path 0 valid (start of a codeword).
//   * upd_en: loads the metrics and flags of the new survival paths.
//   * best:   index and metric of the valid path with the largest metric
//             (lowest index on a tie), used to pick the decoded word.
// Only one path starts valid so that the list spreads out at the first
// information bits instead of holding L identical copies; invalid paths
// sort below every valid one. The valid flags are this design's choice.
module path_metric_bank #(
  parameter int unsigned L   = llrscl_pkg::L_DEF,
  parameter int unsigned PMW = llrscl_pkg::PMW_DEF,
  localparam int unsigned LGL = (L > 1) ? $clog2(L) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init,
  input  logic           upd_en,
  input  logic [PMW-1:0] m_new  [L],
  input  logic           v_new  [L],
  output logic [PMW-1:0] m      [L],
  output logic           valid  [L],
  output logic [LGL-1:0] best_idx,
  output logic [PMW-1:0] best_m
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++) begin
        m[l]     <= '0;
        valid[l] <= (l == 0);
      end
    end else if (init) begin
      for (int l = 0; l < L; l++) begin
        m[l]     <= '0;
        valid[l] <= (l == 0);
      end
    end else if (upd_en) begin
      for (int l = 0; l < L; l++) begin
        m[l]     <= m_new[l];
        valid[l] <= v_new[l];
      end
    end
  end

  // Argmax over {valid, metric}; strict compare keeps the lowest index.
  always_comb begin
    best_idx = '0;
    for (int l = 1; l < L; l++) begin
      if ({valid[l], ~m[l][PMW-1], m[l][PMW-2:0]} >
          {valid[best_idx], ~m[best_idx][PMW-1], m[best_idx][PMW-2:0]})
        best_idx = LGL'(l);
    end
    best_m = m[best_idx];
  end
endmodule
