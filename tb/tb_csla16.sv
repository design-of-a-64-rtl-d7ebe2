// tb_csla16: self-check of the 16-bit modified SQRT CSLA slice.
// Applies the published 16-bit example (25567 + 22212 + 1 = 47780), corner
// cases (all ones plus carry, alternating patterns) and random operands. Each
// result {Cout, Sum} is compared with A_in + B_in + Cin; the internal group
// carries c1, c3, c6, c10 are compared with the carries into bits 2, 4, 7 and
// 11 of the exact sum, since they are the mux selects. Every group select must
// be seen at both 0 and 1 (BEC path and RCA path), or a failure is counted.
module tb_csla16;
  import csla_pkg::*;

  int checks = 0, failures = 0;
  int n_sel1 [NUM_GROUPS];
  int n_sel0 [NUM_GROUPS];

  logic [15:0] a, b, s;
  logic        ci, co;

  csla16 dut (.A_in(a), .B_in(b), .Cin(ci), .Sum(s), .Cout(co));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [15:0] x, input logic [15:0] y, input logic c);
    logic [16:0] exp;
    a = x; b = y; ci = c;
    #1;
    exp = 17'(x) + 17'(y) + 17'(c);
    checks++;
    if ({co, s} != exp) begin
      failures++;
      $display("FAIL %0d + %0d + %0d -> %0d (expected %0d)", x, y, c, {co, s}, exp);
    end
    for (int g = 1; g < NUM_GROUPS; g++) begin
      int unsigned lsb;
      logic [16:0] low;
      logic        cexp;
      lsb  = group_lsb(g);
      low  = (17'(x) & ((17'd1 << lsb) - 1)) + (17'(y) & ((17'd1 << lsb) - 1)) + 17'(c);
      cexp = low[lsb];
      checks++;
      if (dut.c[g] !== cexp) begin
        failures++;
        $display("FAIL carry into group %0d: %0b (expected %0b)", g + 1, dut.c[g], cexp);
      end
      if (cexp) n_sel1[g]++;
      else      n_sel0[g]++;
    end
  endtask

  initial begin
    apply(16'd25567, 16'd22212, 1'b1);
    checks++;
    if (s != 16'd47780 || co != 1'b0) begin
      failures++;
      $display("FAIL published example: %0d carry %0b", s, co);
    end
    apply(16'hFFFF, 16'h0000, 1'b1);
    apply(16'hFFFF, 16'hFFFF, 1'b1);
    apply(16'h0000, 16'h0000, 1'b0);
    apply(16'hAAAA, 16'h5555, 1'b1);
    apply(16'h5555, 16'h5555, 1'b0);
    for (int i = 0; i < 20000; i++)
      apply(16'($urandom), 16'($urandom), 1'($urandom));
    for (int g = 1; g < NUM_GROUPS; g++) begin
      $display("group %0d: BEC path selected %0d times, RCA path %0d times", g + 1, n_sel1[g], n_sel0[g]);
      checks++;
      if (n_sel1[g] == 0 || n_sel0[g] == 0) begin
        failures++;
        $display("FAIL group %0d did not use both mux inputs", g + 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
