// tb_rca: exhaustive self-check of rca (group-1 ripple-carry adder with a live
// carry-in) at its default width W = 2 and at W = 5.
// Every operand pair and carry-in is applied; {cout, s} must equal a + b + cin.
module tb_rca;
  int checks = 0, failures = 0;

  logic [1:0] a2, b2, s2;  logic ci, c2;
  logic [4:0] a5, b5, s5;  logic c5;

  rca          dut2 (.a(a2), .b(b2), .cin(ci), .s(s2), .cout(c2));
  rca #(.W(5)) dut5 (.a(a5), .b(b5), .cin(ci), .s(s5), .cout(c5));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2; k++) begin
      for (int x = 0; x < 32; x++) begin
        for (int y = 0; y < 32; y++) begin
          ci = 1'(k);
          a2 = 2'(x); b2 = 2'(y);
          a5 = 5'(x); b5 = 5'(y);
          #1;
          checks += 2;
          if ({c2, s2} != 3'(a2) + 3'(b2) + 3'(ci)) begin
            failures++; $display("FAIL W=2 %0d+%0d+%0d", a2, b2, ci);
          end
          if ({c5, s5} != 6'(a5) + 6'(b5) + 6'(ci)) begin
            failures++; $display("FAIL W=5 %0d+%0d+%0d", a5, b5, ci);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
