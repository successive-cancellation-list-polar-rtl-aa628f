// tb_cas_unit: random and corner-case test of the compare-and-swap element.
module tb_cas_unit;
  localparam int W = 12;
  logic [W-1:0] a, b, lo, hi;
  int checks = 0, failures = 0;

  cas_unit #(.W(W)) dut (.a, .b, .lo, .hi);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    void'($urandom(7));
    for (int t = 0; t < 5000; t++) begin
      a = W'($urandom); b = (t % 10 == 0) ? a : W'($urandom);
      if (t == 1) begin a = '1; b = '0; end
      if (t == 2) begin a = '0; b = '1; end
      #1;
      checks++;
      if (lo != ((a < b) ? a : b) || hi != ((a < b) ? b : a)) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h lo=%h hi=%h", a, b, lo, hi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
