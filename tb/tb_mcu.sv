// tb_mcu: exhaustive test of the metric computation unit at Q = 6,
// PMW = 7. For every LLR and every non-positive parent metric the two child
// metrics are compared with
//   llr >= 0: M0 = M, M1 = max(M - llr, -2^(PMW-1))
//   llr <  0: M0 = max(M + llr, -2^(PMW-1)), M1 = M
module tb_mcu;
  localparam int Q = 6, PMW = 7;
  localparam int PMIN = -(1 << (PMW - 1));
  logic [Q-1:0] llr;
  logic [PMW-1:0] m_prev, m0, m1;
  int checks = 0, failures = 0;
  int n_sat = 0;

  mcu #(.Q(Q), .PMW(PMW)) dut (.llr, .m_prev, .m0, .m1);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, mm, e0, e1;
    for (int il = 0; il < (1 << Q); il++)
      for (mm = PMIN; mm <= 0; mm++) begin
        llr = Q'(il); m_prev = PMW'(mm);
        #1;
        c = llr[Q-1] ? -int'(llr[Q-2:0]) : int'(llr[Q-2:0]);
        e0 = (c < 0) ? mm + c : mm;
        e1 = (c < 0) ? mm : mm - c;
        if (e0 < PMIN) begin e0 = PMIN; n_sat++; end
        if (e1 < PMIN) begin e1 = PMIN; n_sat++; end
        checks++;
        if (int'(signed'(m0)) != e0 || int'(signed'(m1)) != e1) begin
          failures++;
          if (failures < 10) $display("FAIL llr %0d M %0d: got %0d %0d exp %0d %0d",
                                      c, mm, signed'(m0), signed'(m1), e0, e1);
        end
      end
    if (n_sat == 0) begin failures++; $display("FAIL no saturation case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
