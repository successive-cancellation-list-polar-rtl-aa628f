// tb_scl_controller: test of the decoder schedule at N = 16 and N = 8.
// The expected sequence of (phase, layer, f/g, bit) is built independently:
// for bit i the layers visited are those from the top of the subtree that
// changes between bits i-1 and i down to layer 0, the first of them a g
// (except for bit 0), followed by one decision. busy must last 3N-2 cycles,
// init must accompany start, and done must pulse once.
module tb_scl_controller;
  import llrscl_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start16 = 1'b0, start8 = 1'b0;
  phase_e ph16, ph8;
  logic [3:0] lam16, bi16;
  logic [2:0] lam8, bi8;
  logic g16, g8, init16, init8, busy16, busy8, done16, done8;

  scl_controller #(.N(16)) dut16 (.clk, .rst_n, .start(start16), .phase(ph16), .lam(lam16),
    .op_g(g16), .bit_idx(bi16), .init(init16), .busy(busy16), .done(done16));
  scl_controller #(.N(8)) dut8 (.clk, .rst_n, .start(start8), .phase(ph8), .lam(lam8),
    .op_g(g8), .bit_idx(bi8), .init(init8), .busy(busy8), .done(done8));

  task automatic run(int n);
    int lgn = $clog2(n);
    int exp_ph [$], exp_lam [$], exp_g [$], exp_bit [$];
    int top, cyc, ndone;
    // expected schedule
    for (int i = 0; i < n; i++) begin
      if (i == 0) top = lgn - 1;
      else begin top = 0; while (((i >> top) & 1) == 0) top++; end
      for (int lay = top; lay >= 0; lay--) begin
        exp_ph.push_back(1); exp_lam.push_back(lay);
        exp_g.push_back(i != 0 && lay == top); exp_bit.push_back(i);
      end
      exp_ph.push_back(2); exp_lam.push_back(-1); exp_g.push_back(-1); exp_bit.push_back(i);
    end
    @(negedge clk);
    if (n == 16) start16 = 1'b1; else start8 = 1'b1;
    #1;
    checks++;
    if ((n == 16 ? init16 : init8) !== 1'b1) failures++;
    @(negedge clk);
    start16 = 1'b0; start8 = 1'b0;
    cyc = 0; ndone = 0;
    while (cyc < 4 * n) begin
      int ph, lm, gg, bb;
      logic bsy, dn;
      ph  = (n == 16) ? int'(ph16) : int'(ph8);
      lm  = (n == 16) ? int'(lam16) : int'(lam8);
      gg  = (n == 16) ? int'(g16) : int'(g8);
      bb  = (n == 16) ? int'(bi16) : int'(bi8);
      bsy = (n == 16) ? busy16 : busy8;
      dn  = (n == 16) ? done16 : done8;
      if (dn) ndone++;
      if (cyc < exp_ph.size()) begin
        checks++;
        if (!bsy || ph != exp_ph[cyc] || bb != exp_bit[cyc] ||
            (ph == 1 && (lm != exp_lam[cyc] || gg != exp_g[cyc]))) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d cycle %0d: ph %0d lam %0d g %0d bit %0d",
                                      n, cyc, ph, lm, gg, bb);
        end
      end else begin
        checks++;
        if (bsy) failures++;
      end
      cyc++;
      @(negedge clk);
    end
    checks++;
    if (exp_ph.size() != 3 * n - 2 || ndone != 1) begin
      failures++;
      $display("FAIL n=%0d schedule length %0d done pulses %0d", n, exp_ph.size(), ndone);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(16);
    run(8);
    run(16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
