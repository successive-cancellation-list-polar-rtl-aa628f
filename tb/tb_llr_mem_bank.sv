// tb_llr_mem_bank: test of the LLR memory bank at N = 16, L = 4, Q = 8.
// A shadow array models the bank. Random sequences of channel loads, layer
// writes and path copies (random source per path) are applied; after each
// clock every layer of every path is read back and compared, and bit_llr is
// compared with layer 0.
module tb_llr_mem_bank;
  localparam int N = 16, L = 4, Q = 8, LGN = $clog2(N), LGL = $clog2(L);
  localparam int LW = $clog2(LGN + 1);
  logic           clk = 1'b0;
  logic           ld_we = 1'b0, wr_en = 1'b0, cp_en = 1'b0;
  logic [LGN-1:0] ld_addr = '0;
  logic [Q-1:0]   ld_data = '0;
  logic [LW-1:0]  wr_lam = '0, rd_lam = '0;
  logic [Q-1:0]   wr_data [L][N/2];
  logic [LGL-1:0] cp_src [L];
  logic [Q-1:0]   rd_data [L][N];
  logic [Q-1:0]   bit_llr [L];
  int checks = 0, failures = 0;
  int shadow [L][2*N-1];
  int n_copy = 0;

  llr_mem_bank #(.N(N), .L(L), .Q(Q)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int lay = 0; lay <= LGN; lay++) begin
      rd_lam = LW'(lay);
      #1;
      for (int l = 0; l < L; l++) begin
        for (int k = 0; k < (1 << lay); k++) begin
          checks++;
          if (int'(rd_data[l][k]) != shadow[l][(1 << lay) - 1 + k]) begin
            failures++;
            if (failures < 10) $display("FAIL path %0d layer %0d word %0d: %0d vs %0d",
                                        l, lay, k, rd_data[l][k], shadow[l][(1 << lay) - 1 + k]);
          end
        end
        checks++;
        if (int'(bit_llr[l]) != shadow[l][0]) failures++;
      end
    end
  endtask

  initial begin
    int op, tmp [L][2*N-1];
    void'($urandom(5));
    // load channel and fill all layers so that the shadow is defined
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      ld_we = 1'b1; ld_addr = LGN'(i); ld_data = Q'($urandom);
      for (int l = 0; l < L; l++) shadow[l][N - 1 + i] = int'(ld_data);
    end
    @(negedge clk); ld_we = 1'b0;
    for (int lay = 0; lay < LGN; lay++) begin
      wr_en = 1'b1; wr_lam = LW'(lay);
      for (int l = 0; l < L; l++)
        for (int k = 0; k < N / 2; k++) begin
          wr_data[l][k] = Q'($urandom);
          if (k < (1 << lay)) shadow[l][(1 << lay) - 1 + k] = int'(wr_data[l][k]);
        end
      @(negedge clk);
    end
    wr_en = 1'b0;
    compare_all();
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      op = $urandom_range(2);
      ld_we = 1'b0; wr_en = 1'b0; cp_en = 1'b0;
      if (op == 0) begin
        ld_we = 1'b1; ld_addr = LGN'($urandom); ld_data = Q'($urandom);
        for (int l = 0; l < L; l++) shadow[l][N - 1 + int'(ld_addr)] = int'(ld_data);
      end else if (op == 1) begin
        wr_en = 1'b1; wr_lam = LW'($urandom_range(LGN - 1));
        for (int l = 0; l < L; l++)
          for (int k = 0; k < N / 2; k++) begin
            wr_data[l][k] = Q'($urandom);
            if (k < (1 << wr_lam)) shadow[l][(1 << wr_lam) - 1 + k] = int'(wr_data[l][k]);
          end
      end else begin
        cp_en = 1'b1;
        tmp = shadow;
        for (int l = 0; l < L; l++) begin
          cp_src[l] = LGL'($urandom);
          if (cp_src[l] != l) n_copy++;
          shadow[l] = tmp[cp_src[l]];
        end
      end
      @(negedge clk);
      ld_we = 1'b0; wr_en = 1'b0; cp_en = 1'b0;
      compare_all();
    end
    if (n_copy == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
