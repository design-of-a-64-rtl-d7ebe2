// tb_half_adder: exhaustive self-check of half_adder.
// All four input pairs are applied and s/c compared with the arithmetic sum
// a + b. A watchdog ends the run with a failure if it does not finish.
module tb_half_adder;
  logic a, b, s, c;
  int checks = 0, failures = 0;

  half_adder dut (.a(a), .b(b), .s(s), .c(c));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i);
      #1;
      checks++;
      if ({c, s} != 2'(a) + 2'(b)) begin
        failures++;
        $display("FAIL a=%0b b=%0b -> c=%0b s=%0b", a, b, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
