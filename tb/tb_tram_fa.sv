// tb_tram_fa -- exhaustive self-check of the full adder: for all eight input
// triples, 2*co + s must equal a + b + ci.
module tb_tram_fa;
  logic a, b, ci, s, co;
  int checks = 0, failures = 0;

  tram_fa dut (.a(a), .b(b), .ci(ci), .s(s), .co(co));

  initial begin : watchdog
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, ci} = 3'(v);
      #1;
      checks++;
      if (int'({co, s}) != int'(v[2]) + int'(v[1]) + int'(v[0])) begin
        failures++;
        $display("FAIL a=%0d b=%0d ci=%0d -> co=%0d s=%0d", a, b, ci, co, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
