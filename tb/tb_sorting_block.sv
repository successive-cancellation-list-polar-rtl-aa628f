// tb_sorting_block: test of the 8-input Batcher sorting network.
// All 256 0/1 input patterns (by the 0-1 principle these prove the network
// sorts) plus random words, with duplicates, compared with an insertion
// sort. It also counts the compare-and-swap units of the network, which
// must be 19.
module tb_sorting_block;
  localparam int NIN = 8, W = 12;
  logic [W-1:0] din [NIN];
  logic [W-1:0] dout [NIN];
  int checks = 0, failures = 0;

  sorting_block #(.NIN(NIN), .W(W)) dut (.din, .dout);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one();
    logic [W-1:0] ref_v [NIN];
    logic [W-1:0] t;
    bit ok;
    #1;
    ref_v = din;
    for (int i = 1; i < NIN; i++)
      for (int j = i; j > 0 && ref_v[j-1] > ref_v[j]; j--) begin
        t = ref_v[j]; ref_v[j] = ref_v[j-1]; ref_v[j-1] = t;
      end
    ok = 1'b1;
    for (int i = 0; i < NIN; i++) if (dout[i] != ref_v[i]) ok = 1'b0;
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL sort %p -> %p", din, dout);
    end
  endtask

  initial begin
    int ncas;
    void'($urandom(11));
    for (int p = 0; p < 256; p++) begin
      for (int i = 0; i < NIN; i++) din[i] = W'(p >> i & 1);
      run_one();
    end
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < NIN; i++) din[i] = W'($urandom_range(t % 2 ? 4095 : 7));
      run_one();
    end
    // count comparators the way the network places them
    ncas = 0;
    for (int ly = 0; ly < 6; ly++)
      for (int e = 0; e < NIN; e++)
        if (dut.is_low(e, dut.layer_p(ly), dut.layer_k(ly))) ncas++;
    checks++;
    if (ncas != 19) begin failures++; $display("FAIL %0d C&S units, expected 19", ncas); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
