// tb_llr_scl_decoder: end-to-end test of the LLR-SCL decoder.
//
// Encodes random information words with a rate-1/2 polar code (information
// positions: the indices of largest Hamming weight, a Reed-Muller-like
// choice made only for this test), maps them to BPSK, adds approximately
// Gaussian integer noise at three levels (none, moderate, heavy) and feeds
// the quantised sign-magnitude LLRs to the decoder. For every codeword it
// checks, against the bit-exact reference in scl_ref_pkg:
//   * the decoded word u_hat and the winning path metric,
//   * the latency: busy for exactly 3N-2 cycles,
//   * for noiseless codewords, that the transmitted word comes back.
// It also counts how often each mechanism of the design occurs (frozen-bit
// decisions, sorted information-bit decisions, path copies, candidates
// from still-empty paths kept by the sorter, tied metrics, g-unit LLR
// saturation, metric saturation) and counts a failure for any that never
// happens.
module tb_llr_scl_decoder;
  import scl_ref_pkg::*;

  localparam int N   = 64;
  localparam int L   = 4;
  localparam int Q   = 8;
  localparam int PMW = 8;
  localparam int NCW = 30;                  // codewords
  localparam int LGN = $clog2(N);

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           llr_we = 1'b0;
  logic [LGN-1:0] llr_waddr = '0;
  logic [Q-1:0]   llr_wdata = '0;
  logic [N-1:0]   frozen = '0;
  logic           start = 1'b0;
  logic           busy, done;
  logic [N-1:0]   u_hat;
  logic [PMW-1:0] best_metric;

  llr_scl_decoder #(.N(N), .L(L), .Q(Q), .PMW(PMW)) dut (
    .clk, .rst_n, .llr_we, .llr_waddr, .llr_wdata, .frozen, .start,
    .busy, .done, .u_hat, .best_metric
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int busy_cycles = 0;
  int n_hw_free = 0, n_hw_frozen = 0, n_hw_copy = 0, n_hw_empty = 0;

  always @(posedge clk) begin
    if (busy) busy_cycles++;
    if (dut.decide_cyc) begin
      if (frozen[dut.bit_idx]) n_hw_frozen++;
      else begin
        n_hw_free++;
        for (int l = 0; l < L; l++) begin
          if (dut.new_v[l] && dut.new_src[l] != l) n_hw_copy++;
          if (!dut.new_v[l]) n_hw_empty++;
        end
      end
    end
  end

  initial begin : watchdog
    repeat (NCW * (4 * N + N + 20) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : main
    scl_ref #(N, L, Q, PMW) rm = new();
    bit  frz   [N];
    bit  u     [N];
    bit  x     [N];
    int  ch    [N];
    int  score [N];
    int  noise_lvl, y, rank;
    logic [Q-1:0] sm;

    void'($urandom(32'h5eed_0001));
    for (int i = 0; i < N; i++) score[i] = $countones(i) * N + i;
    for (int i = 0; i < N; i++) begin
      rank = 0;
      for (int j = 0; j < N; j++) if (score[j] > score[i]) rank++;
      frz[i]    = (rank >= N / 2);
      frozen[i] = frz[i];
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    for (int cw = 0; cw < NCW; cw++) begin
      noise_lvl = (cw % 3 == 0) ? 0 : (cw % 3 == 1) ? 5 : 12;
      for (int i = 0; i < N; i++) u[i] = frz[i] ? 1'b0 : 1'($urandom);
      x = u;
      scl_ref#(N, L, Q, PMW)::encode(x, N);
      for (int i = 0; i < N; i++) begin
        y = x[i] ? -8 : 8;
        for (int t = 0; t < 4; t++)
          if (noise_lvl > 0) y += int'($urandom_range(2 * noise_lvl)) - noise_lvl;
        if (y > (1 << (Q - 1)) - 1) y = (1 << (Q - 1)) - 1;
        if (y < -((1 << (Q - 1)) - 1)) y = -((1 << (Q - 1)) - 1);
        ch[i] = y;
      end
      // load channel LLRs
      for (int i = 0; i < N; i++) begin
        sm = (ch[i] < 0) ? {1'b1, (Q-1)'(-ch[i])} : {1'b0, (Q-1)'(ch[i])};
        @(negedge clk);
        llr_we = 1'b1; llr_waddr = LGN'(i); llr_wdata = sm;
      end
      @(negedge clk);
      llr_we = 1'b0;
      start = 1'b1;
      busy_cycles = 0;
      @(negedge clk);
      start = 1'b0;
      @(posedge done);
      @(negedge clk);
      rm.decode(ch, frz);
      check(busy_cycles == 3 * N - 2, $sformatf("cw %0d latency %0d != %0d", cw, busy_cycles, 3 * N - 2));
      begin
        bit same, sent;
        same = 1'b1;
        sent = 1'b1;
        for (int i = 0; i < N; i++) begin
          if (u_hat[i] != rm.u_hat[i]) same = 1'b0;
          if (u_hat[i] != u[i]) sent = 1'b0;
        end
        check(same, $sformatf("cw %0d decoded word differs from reference", cw));
        check(int'(signed'(best_metric)) == rm.best_m,
              $sformatf("cw %0d metric %0d != ref %0d", cw, signed'(best_metric), rm.best_m));
        if (noise_lvl == 0) check(sent, $sformatf("cw %0d noiseless word not recovered (metric %0d)", cw, rm.best_m));
      end
    end

    $display("mechanisms: free=%0d frozen=%0d copies=%0d empty_kept=%0d ties=%0d llr_sat=%0d pm_sat=%0d",
             n_hw_free, n_hw_frozen, n_hw_copy, n_hw_empty, rm.n_ties, rm.n_llr_sat, rm.n_pm_sat);
    check(n_hw_free > 0,      "no information-bit (sort and prune) decision");
    check(n_hw_frozen > 0,    "no frozen-bit decision");
    check(n_hw_copy > 0,      "no path copy");
    check(n_hw_empty > 0,     "no empty path kept by the sorter");
    check(rm.n_ties > 0,      "no tied candidate metrics");
    check(rm.n_llr_sat > 0,   "no g-unit saturation");
    check(rm.n_pm_sat > 0,    "no metric saturation");
    check(n_hw_free == rm.n_free && n_hw_frozen == rm.n_frozen, "decision counts differ from reference");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
