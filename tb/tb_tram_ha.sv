// tb_tram_ha -- exhaustive self-check of the half adder: for all four input
// pairs, 2*c + s must equal a + b.
module tb_tram_ha;
  logic a, b, s, c;
  int checks = 0, failures = 0;

  tram_ha dut (.a(a), .b(b), .s(s), .c(c));

  initial begin : watchdog
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if ({c, s} != 2'(int'(v[1]) + int'(v[0]))) begin
        failures++;
        $display("FAIL a=%0d b=%0d -> c=%0d s=%0d", a, b, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
