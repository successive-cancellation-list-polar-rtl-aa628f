// tb_llr_sc_decoder: test of one component decoder (line of N/2 PEs) at
// N = 32, Q = 7. For every layer, both f and g, random parent LLRs and
// partial sums, each valid child word k < 2^lam is compared with an integer
// model of f(parent[k], parent[k+2^lam]) or g(..., psum[k]).
module tb_llr_sc_decoder;
  localparam int N = 32, Q = 7, LGN = $clog2(N);
  localparam int MAXM = (1 << (Q - 1)) - 1;
  logic [Q-1:0]   parent [N];
  logic [LGN-1:0] lam;
  logic           op_g;
  logic [N/2-1:0] psum;
  logic [Q-1:0]   child [N/2];
  int checks = 0, failures = 0;

  llr_sc_decoder #(.N(N), .Q(Q)) dut (.parent, .lam, .op_g, .psum, .child);

  function automatic int val(logic [Q-1:0] w);
    return w[Q-1] ? -int'(w[Q-2:0]) : int'(w[Q-2:0]);
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, e, ma, mb;
    void'($urandom(3));
    for (int t = 0; t < 400; t++) begin
      for (int k = 0; k < N; k++) parent[k] = Q'($urandom);
      psum = (N/2)'($urandom);
      lam  = LGN'(t % LGN);
      op_g = t[3];
      #1;
      for (int k = 0; k < (1 << lam); k++) begin
        a = val(parent[k]); b = val(parent[k + (1 << lam)]);
        if (!op_g) begin
          ma = a < 0 ? -a : a; mb = b < 0 ? -b : b;
          e = ma < mb ? ma : mb;
          if ((a < 0) != (b < 0)) e = -e;
        end else begin
          e = psum[k] ? b - a : b + a;
          if (e > MAXM) e = MAXM;
          if (e < -MAXM) e = -MAXM;
        end
        checks++;
        if (val(child[k]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL lam %0d g %0d k %0d: got %0d exp %0d", lam, op_g, k, val(child[k]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
