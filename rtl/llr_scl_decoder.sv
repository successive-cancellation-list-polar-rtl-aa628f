// llr_scl_decoder: LLR-based successive cancellation list polar decoder.
//
// Decodes one length-N polar codeword with a list of L paths, keeping every
// message as a single Q-bit LLR instead of a pair of (log-)likelihoods.
// Structure (all clocked by clk, asynchronous active-low reset rst_n):
//   * L llr_sc_decoder component decoders (N/2 PEs each) compute one SC-tree
//     layer per cycle from the llr_mem_bank.
//   * L mcu units turn the last-stage LLR of each path and its metric into
//     the metrics of its two children (2L candidates).
//   * For an information bit, sorting_block orders the 2L candidates and the
//     L best become the new paths; for a frozen bit every path takes 0.
//   * llr_mem_bank, survival_path_bank and path_metric_bank copy each new
//     path from its parent and append the decided bit.
//   * scl_controller sequences 2N-2 layer cycles and N decision cycles:
//     a codeword takes 3N-2 cycles from start to done.
// Sort key of candidate j = 2*path + bit: {valid, metric, ~j}, unsigned
// (metric with its sign bit flipped), so keys are unique and a tie in metric
// goes to the lower candidate index; this tie rule is this design's choice.
// New path l is the l-th best candidate, so path 0 leads after a free bit.
//
// Interface: while idle, write the N channel LLRs (sign-magnitude, positive
// means bit 0) with llr_we/llr_waddr/llr_wdata, set frozen (1 = frozen bit),
// pulse start. busy stays high 3N-2 cycles, then done pulses; u_hat (the
// bits of the path with the largest metric) and best_metric stay valid until
// the next start.
module llr_scl_decoder
  import llrscl_pkg::*;
#(
  parameter int unsigned N   = N_DEF,
  parameter int unsigned L   = L_DEF,
  parameter int unsigned Q   = Q_DEF,
  parameter int unsigned PMW = PMW_DEF,
  localparam int unsigned LGN = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           llr_we,
  input  logic [LGN-1:0] llr_waddr,
  input  logic [Q-1:0]   llr_wdata,
  input  logic [N-1:0]   frozen,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [N-1:0]   u_hat,
  output logic [PMW-1:0] best_metric
);
  localparam int unsigned LGL = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned NC  = 2 * L;            // candidates
  localparam int unsigned LGC = $clog2(NC);
  localparam int unsigned KW  = 1 + PMW + LGC;    // sort key width
  localparam int unsigned LW  = $clog2(LGN + 1);

  // ---------------------------------------------------------------- control
  phase_e         phase;
  logic [LGN-1:0] lam, bit_idx;
  logic           op_g, init;

  scl_controller #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .phase, .lam, .op_g, .bit_idx, .init, .busy, .done
  );

  logic compute_cyc, decide_cyc;
  assign compute_cyc = (phase == ST_COMPUTE);
  assign decide_cyc  = (phase == ST_DECIDE);

  // --------------------------------------------------------- LLR memory bank
  logic [Q-1:0]   parent  [L][N];
  logic [Q-1:0]   child   [L][N/2];
  logic [Q-1:0]   bit_llr [L];
  logic [LGL-1:0] new_src [L];
  logic           new_bit [L];
  logic [PMW-1:0] new_m   [L];
  logic           new_v   [L];
  logic [LW-1:0]  lam_w;
  assign lam_w = LW'(lam);

  llr_mem_bank #(.N(N), .L(L), .Q(Q)) u_llr_mem (
    .clk,
    .ld_we  (llr_we && !busy),
    .ld_addr(llr_waddr),
    .ld_data(llr_wdata),
    .wr_en  (compute_cyc),
    .wr_lam (lam_w),
    .wr_data(child),
    .cp_en  (decide_cyc),
    .cp_src (new_src),
    .rd_lam (lam_w + 1'b1),
    .rd_data(parent),
    .bit_llr(bit_llr)
  );

  // ------------------------------------------------ survival path memory bank
  logic [N/2-1:0] psum [L];
  logic [N-1:0]   upath [L];

  survival_path_bank #(.N(N), .L(L)) u_paths (
    .clk, .rst_n, .init,
    .upd_en (decide_cyc),
    .bit_idx(bit_idx),
    .src    (new_src),
    .ubit   (new_bit),
    .rd_lam (lam),
    .psum   (psum),
    .u      (upath)
  );

  // ------------------------------------------------------ component decoders
  for (genvar l = 0; l < L; l++) begin : g_sc
    llr_sc_decoder #(.N(N), .Q(Q)) u_sc (
      .parent(parent[l]), .lam(lam), .op_g(op_g), .psum(psum[l]), .child(child[l])
    );
  end

  // --------------------------------------------- path metrics bank and MCUs
  logic [PMW-1:0] pm    [L];
  logic           pv    [L];
  logic [PMW-1:0] m0    [L];
  logic [PMW-1:0] m1    [L];
  logic [LGL-1:0] best_idx;

  path_metric_bank #(.L(L), .PMW(PMW)) u_metrics (
    .clk, .rst_n, .init,
    .upd_en  (decide_cyc),
    .m_new   (new_m),
    .v_new   (new_v),
    .m       (pm),
    .valid   (pv),
    .best_idx(best_idx),
    .best_m  (best_metric)
  );

  for (genvar l = 0; l < L; l++) begin : g_mcu
    mcu #(.Q(Q), .PMW(PMW)) u_mcu (
      .llr(bit_llr[l]), .m_prev(pm[l]), .m0(m0[l]), .m1(m1[l])
    );
  end

  // ------------------------------------------------------------ sorting block
  logic [KW-1:0] cand   [NC];
  logic [KW-1:0] sorted [NC];

  for (genvar j = 0; j < NC; j++) begin : g_cand
    localparam logic [LGC-1:0] IDX = LGC'(j);
    logic [PMW-1:0] mj;
    assign mj      = (j % 2 == 0) ? m0[j / 2] : m1[j / 2];
    assign cand[j] = {pv[j / 2], ~mj[PMW-1], mj[PMW-2:0], ~IDX};
  end

  sorting_block #(.NIN(NC), .W(KW)) u_sort (.din(cand), .dout(sorted));

  // ---------------------------------------------- prune or keep (frozen bit)
  always_comb begin
    for (int l = 0; l < L; l++) begin
      logic [KW-1:0]  s;
      logic [LGC-1:0] j;
      s = sorted[NC - 1 - l];
      j = ~s[LGC-1:0];
      if (frozen[bit_idx]) begin
        new_src[l] = LGL'(l);
        new_bit[l] = 1'b0;
        new_m[l]   = m0[l];
        new_v[l]   = pv[l];
      end else begin
        new_src[l] = LGL'(j >> 1);
        new_bit[l] = j[0];
        new_m[l]   = {~s[KW-2], s[KW-3:LGC]};
        new_v[l]   = s[KW-1];
      end
    end
  end

  assign u_hat = upath[best_idx];
endmodule
