// tb_full_adder: exhaustive self-check of full_adder.
// All eight input combinations are applied and {cout, s} compared with the
// arithmetic sum a + b + cin. A watchdog ends the run with a failure.
module tb_full_adder;
  logic a, b, cin, s, cout;
  int checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      {a, b, cin} = 3'(i);
      #1;
      checks++;
      if ({cout, s} != 2'(a) + 2'(b) + 2'(cin)) begin
        failures++;
        $display("FAIL a=%0b b=%0b cin=%0b -> cout=%0b s=%0b", a, b, cin, cout, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
