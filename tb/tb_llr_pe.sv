// tb_llr_pe: exhaustive test of the LLR processing element at Q = 6.
// Every pair (a, b) of sign-magnitude words, both u_sum values and both
// control values are applied; the output is compared with integer models of
// the min-sum f function and the saturating g function.
module tb_llr_pe;
  localparam int Q = 6;
  localparam int MAXM = (1 << (Q - 1)) - 1;
  logic [Q-1:0] a, b, y;
  logic u_sum, control;
  int checks = 0, failures = 0;

  llr_pe #(.Q(Q)) dut (.a, .b, .u_sum, .control, .y);

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
    int va, vb, exp_v, got, ma, mb;
    for (int ia = 0; ia < (1 << Q); ia++)
      for (int ib = 0; ib < (1 << Q); ib++)
        for (int m = 0; m < 4; m++) begin
          a = Q'(ia); b = Q'(ib); u_sum = m[0]; control = m[1];
          #1;
          va = val(a); vb = val(b);
          if (!control) begin
            ma = va < 0 ? -va : va; mb = vb < 0 ? -vb : vb;
            // sign bit is the XOR of the input sign bits, even for zero
            checks++;
            if (y[Q-1] != (a[Q-1] ^ b[Q-1]) || int'(y[Q-2:0]) != (ma < mb ? ma : mb)) begin
              failures++;
              if (failures < 10) $display("FAIL f(%0d,%0d) got %h", va, vb, y);
            end
          end else begin
            exp_v = u_sum ? vb - va : vb + va;
            if (exp_v > MAXM) exp_v = MAXM;
            if (exp_v < -MAXM) exp_v = -MAXM;
            got = val(y);
            checks++;
            if (got != exp_v || (got == 0 && y[Q-1])) begin
              failures++;
              if (failures < 10) $display("FAIL g(%0d,%0d,u=%0d) got %0d exp %0d", va, vb, u_sum, got, exp_v);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
