// tb_csla_group: exhaustive self-check of one carry-select group at the four
// widths of a 16-bit slice (W = 2 default, 3, 4, 5). For every operand pair
// and both values of the select carry, {cout, s} must equal a + b + cin.
// It also counts how often each group took the BEC path (cin = 1) and the
// RCA path (cin = 0) with a carry produced, to show both mux inputs are used.
module tb_csla_group;
  int checks = 0, failures = 0;

  logic       ci;
  logic [1:0] a2, b2, s2;  logic c2;
  logic [2:0] a3, b3, s3;  logic c3;
  logic [3:0] a4, b4, s4;  logic c4;
  logic [4:0] a5, b5, s5;  logic c5;

  csla_group          dut2 (.a(a2), .b(b2), .cin(ci), .s(s2), .cout(c2));
  csla_group #(.W(3)) dut3 (.a(a3), .b(b3), .cin(ci), .s(s3), .cout(c3));
  csla_group #(.W(4)) dut4 (.a(a4), .b(b4), .cin(ci), .s(s4), .cout(c4));
  csla_group #(.W(5)) dut5 (.a(a5), .b(b5), .cin(ci), .s(s5), .cout(c5));

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
          a3 = 3'(x); b3 = 3'(y);
          a4 = 4'(x); b4 = 4'(y);
          a5 = 5'(x); b5 = 5'(y);
          #1;
          checks += 4;
          if ({c2, s2} != 3'(a2) + 3'(b2) + 3'(ci)) begin failures++; $display("FAIL W=2 %0d+%0d+%0d", a2, b2, ci); end
          if ({c3, s3} != 4'(a3) + 4'(b3) + 4'(ci)) begin failures++; $display("FAIL W=3 %0d+%0d+%0d", a3, b3, ci); end
          if ({c4, s4} != 5'(a4) + 5'(b4) + 5'(ci)) begin failures++; $display("FAIL W=4 %0d+%0d+%0d", a4, b4, ci); end
          if ({c5, s5} != 6'(a5) + 6'(b5) + 6'(ci)) begin failures++; $display("FAIL W=5 %0d+%0d+%0d", a5, b5, ci); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
