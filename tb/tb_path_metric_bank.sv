// tb_path_metric_bank: test of the path metric bank at L = 4, PMW = 8.
// Checks the state after reset and init (metrics 0, only path 0 valid),
// random updates, and the best-path output (largest metric among valid
// paths, lowest index on a tie) against a model.
module tb_path_metric_bank;
  localparam int L = 4, PMW = 8, LGL = $clog2(L);
  logic           clk = 1'b0, rst_n = 1'b0, init = 1'b0, upd_en = 1'b0;
  logic [PMW-1:0] m_new [L];
  logic           v_new [L];
  logic [PMW-1:0] m [L];
  logic           valid [L];
  logic [LGL-1:0] best_idx;
  logic [PMW-1:0] best_m;
  int checks = 0, failures = 0;
  int mm [L];
  bit vv [L];

  path_metric_bank #(.L(L), .PMW(PMW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int b = 0;
    for (int l = 1; l < L; l++)
      if ((vv[l] && !vv[b]) || (vv[l] == vv[b] && mm[l] > mm[b])) b = l;
    for (int l = 0; l < L; l++) begin
      checks++;
      if (int'(signed'(m[l])) != mm[l] || valid[l] != vv[l]) failures++;
    end
    checks++;
    if (int'(best_idx) != b || int'(signed'(best_m)) != mm[b]) begin
      failures++;
      if (failures < 10) $display("FAIL best %0d exp %0d", best_idx, b);
    end
  endtask

  initial begin
    void'($urandom(13));
    for (int l = 0; l < L; l++) begin mm[l] = 0; vv[l] = (l == 0); end
    repeat (2) @(negedge clk);
    compare();
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t % 50 == 0) begin
        init = 1'b1;
        for (int l = 0; l < L; l++) begin mm[l] = 0; vv[l] = (l == 0); end
      end else begin
        upd_en = 1'b1;
        for (int l = 0; l < L; l++) begin
          mm[l] = -int'($urandom_range(t % 3 ? 128 : 3));
          vv[l] = ($urandom_range(3) != 0);
          m_new[l] = PMW'(mm[l]);
          v_new[l] = vv[l];
        end
      end
      @(negedge clk);
      init = 1'b0; upd_en = 1'b0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
