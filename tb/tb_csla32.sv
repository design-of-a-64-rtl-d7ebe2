// tb_csla32: self-check of the 32-bit adder made of two 16-bit slices.
// Applies the published 32-bit example (25567 + 22212 + 1 = 47780), carries
// that must cross from the lower to the upper slice, full-width overflow and
// random operands; {CA, S} must equal A + B + C. The carry between the slices
// must be seen at 1 at least once.
module tb_csla32;
  int checks = 0, failures = 0;
  int n_cross = 0;

  logic [31:0] a, b, s;
  logic        ci, co;

  csla32 dut (.A(a), .B(b), .C(ci), .S(s), .CA(co));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [31:0] x, input logic [31:0] y, input logic c);
    logic [32:0] exp;
    a = x; b = y; ci = c;
    #1;
    exp = 33'(x) + 33'(y) + 33'(c);
    checks++;
    if ({co, s} != exp) begin
      failures++;
      $display("FAIL %0h + %0h + %0d -> %0h (expected %0h)", x, y, c, {co, s}, exp);
    end
    if ((17'(x[15:0]) + 17'(y[15:0]) + 17'(c)) > 17'hFFFF) n_cross++;
  endtask

  initial begin
    apply(32'd25567, 32'd22212, 1'b1);
    checks++;
    if (s != 32'd47780 || co != 1'b0) begin
      failures++;
      $display("FAIL published example: %0d carry %0b", s, co);
    end
    apply(32'h0000_FFFF, 32'h0000_0000, 1'b1);
    apply(32'hFFFF_FFFF, 32'h0000_0000, 1'b1);
    apply(32'hFFFF_FFFF, 32'hFFFF_FFFF, 1'b1);
    for (int i = 0; i < 20000; i++)
      apply($urandom, $urandom, 1'($urandom));
    $display("carry crossed between the 16-bit slices %0d times", n_cross);
    checks++;
    if (n_cross == 0) begin
      failures++;
      $display("FAIL no carry crossed the slice boundary");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
