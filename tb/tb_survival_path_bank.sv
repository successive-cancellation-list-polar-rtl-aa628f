// tb_survival_path_bank: test of the survival path bank at N = 32, L = 4.
// Several random "decodes" are run: for each bit i every path picks a random
// source path and a random bit. A model keeps the paths' bits. Before each
// bit i > 0 the partial sums of layer t = ctz(i) must equal the polar
// encoding of the path's bits i-2^t .. i-1 (computed from the bits, not
// from partial-sum registers); the stored bits are compared after every
// update, and init must clear everything.
module tb_survival_path_bank;
  localparam int N = 32, L = 4, LGN = $clog2(N), LGL = $clog2(L);
  logic           clk = 1'b0, rst_n = 1'b0, init = 1'b0, upd_en = 1'b0;
  logic [LGN-1:0] bit_idx = '0, rd_lam = '0;
  logic [LGL-1:0] src [L];
  logic           ubit [L];
  logic [N/2-1:0] psum [L];
  logic [N-1:0]   u [L];
  int checks = 0, failures = 0;
  bit model [L][N];

  survival_path_bank #(.N(N), .L(L)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ctz(int v);
    int r = 0;
    while (v[r] == 1'b0) r++;
    return r;
  endfunction

  initial begin
    bit x [N];
    bit nm [L][N];
    int t;
    void'($urandom(9));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 6; run++) begin
      @(negedge clk); init = 1'b1;
      @(negedge clk); init = 1'b0;
      for (int l = 0; l < L; l++) for (int k = 0; k < N; k++) model[l][k] = 1'b0;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (u[l] != '0) failures++;
      end
      for (int i = 0; i < N; i++) begin
        if (i > 0) begin
          t = ctz(i);
          rd_lam = LGN'(t);
          #1;
          for (int l = 0; l < L; l++) begin
            for (int k = 0; k < (1 << t); k++) x[k] = model[l][i - (1 << t) + k];
            for (int s = 1; s < (1 << t); s *= 2)
              for (int j = 0; j < (1 << t); j += 2 * s)
                for (int k = 0; k < s; k++) x[j + k] ^= x[j + k + s];
            for (int k = 0; k < (1 << t); k++) begin
              checks++;
              if (psum[l][k] != x[k]) begin
                failures++;
                if (failures < 10) $display("FAIL run %0d bit %0d path %0d psum[%0d]", run, i, l, k);
              end
            end
          end
        end
        bit_idx = LGN'(i);
        upd_en  = 1'b1;
        for (int l = 0; l < L; l++) begin
          src[l]  = LGL'($urandom);
          ubit[l] = 1'($urandom);
          nm[l] = model[src[l]];
          nm[l][i] = ubit[l];
        end
        model = nm;
        @(negedge clk);
        upd_en = 1'b0;
        for (int l = 0; l < L; l++)
          for (int k = 0; k < N; k++) begin
            checks++;
            if (u[l][k] != model[l][k]) failures++;
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
