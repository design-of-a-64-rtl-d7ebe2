// tb_bec: exhaustive self-check of the binary-to-excess-1 converter at its
// default width N = 6 (the paper's 6-bit BEC) and at N = 3, the smallest BEC
// used in the adder. x must equal b + 1 modulo 2^N, so the all-ones input
// must wrap to zero.
module tb_bec;
  int checks = 0, failures = 0;

  logic [5:0] b6, x6;
  logic [2:0] b3, x3;

  bec          dut6 (.b(b6), .x(x6));
  bec #(.N(3)) dut3 (.b(b3), .x(x3));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      b6 = 6'(i);
      b3 = 3'(i);
      #1;
      checks += 2;
      if (x6 != 6'(i + 1)) begin failures++; $display("FAIL N=6 b=%0d x=%0d", b6, x6); end
      if (x3 != 3'(i + 1)) begin failures++; $display("FAIL N=3 b=%0d x=%0d", b3, x3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
