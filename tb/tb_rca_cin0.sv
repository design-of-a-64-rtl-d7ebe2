// tb_rca_cin0: exhaustive self-check of rca_cin0 at the four group widths
// used in the adder (W = 2, 3, 4, 5; W = 2 is the module default).
// Every operand pair is applied and {cout, s} compared with a + b.
module tb_rca_cin0;
  int checks = 0, failures = 0;

  logic [1:0] a2, b2, s2;  logic c2;
  logic [2:0] a3, b3, s3;  logic c3;
  logic [3:0] a4, b4, s4;  logic c4;
  logic [4:0] a5, b5, s5;  logic c5;

  rca_cin0          dut2 (.a(a2), .b(b2), .s(s2), .cout(c2));
  rca_cin0 #(.W(3)) dut3 (.a(a3), .b(b3), .s(s3), .cout(c3));
  rca_cin0 #(.W(4)) dut4 (.a(a4), .b(b4), .s(s4), .cout(c4));
  rca_cin0 #(.W(5)) dut5 (.a(a5), .b(b5), .s(s5), .cout(c5));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 32; x++) begin
      for (int y = 0; y < 32; y++) begin
        a2 = 2'(x); b2 = 2'(y);
        a3 = 3'(x); b3 = 3'(y);
        a4 = 4'(x); b4 = 4'(y);
        a5 = 5'(x); b5 = 5'(y);
        #1;
        checks += 4;
        if ({c2, s2} != 3'(a2) + 3'(b2)) begin failures++; $display("FAIL W=2 %0d+%0d", a2, b2); end
        if ({c3, s3} != 4'(a3) + 4'(b3)) begin failures++; $display("FAIL W=3 %0d+%0d", a3, b3); end
        if ({c4, s4} != 5'(a4) + 5'(b4)) begin failures++; $display("FAIL W=4 %0d+%0d", a4, b4); end
        if ({c5, s5} != 6'(a5) + 6'(b5)) begin failures++; $display("FAIL W=5 %0d+%0d", a5, b5); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
