// tb_top_64_bit: end-to-end self-check of the 64-bit modified SQRT CSLA at its
// default (and only) configuration.
//
// Applied, and compared with A + B + C_in computed in 65-bit arithmetic:
//   * the published example, 25567 + 22212 + 1 = 47780 with no carry out;
//   * operands of the four word lengths the adder family is evaluated at
//     (8, 16, 32 and 64 bits, zero-extended to 64 bits), random;
//   * corner cases: all ones plus carry-in (a carry that ripples through every
//     group and every slice), overflow, alternating bit patterns.
// Counted, from the exact sum, for each of the 16 carry-select groups: how
// often its mux took the BEC (carry 1) path and the RCA (carry 0) path; how
// often a carry crossed each of the three 16-bit slice boundaries; how often
// the adder overflowed (CA_out = 1). A mechanism never seen counts a failure.
// The adder is combinational, so each result is checked 1 time unit after its
// operands are applied (zero clock cycles of latency).
module tb_top_64_bit;
  import csla_pkg::*;

  localparam int NSLICE = 4;

  int checks = 0, failures = 0;
  int n_bec [NSLICE][NUM_GROUPS];
  int n_rca [NSLICE][NUM_GROUPS];
  int n_cross [NSLICE];
  int n_overflow = 0;
  int n_full_ripple = 0;

  logic [63:0] a, b, s;
  logic        ci, co;

  top_64_bit dut (.A(a), .B(b), .C_in(ci), .Sum_out(s), .CA_out(co));

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Carry into bit position k of x + y + c.
  function automatic logic carry_into(input logic [63:0] x, input logic [63:0] y,
                                      input logic c, input int unsigned k);
    logic [64:0] mask, low;
    mask = (65'd1 << k) - 65'd1;
    low  = (65'(x) & mask) + (65'(y) & mask) + 65'(c);
    return low[k];
  endfunction

  task automatic apply(input logic [63:0] x, input logic [63:0] y, input logic c);
    logic [64:0] exp;
    a = x; b = y; ci = c;
    #1;
    exp = 65'(x) + 65'(y) + 65'(c);
    checks++;
    if ({co, s} != exp) begin
      failures++;
      $display("FAIL %0h + %0h + %0d -> %0h (expected %0h)", x, y, c, {co, s}, exp);
    end
    for (int sl = 0; sl < NSLICE; sl++) begin
      for (int g = 1; g < NUM_GROUPS; g++) begin
        if (carry_into(x, y, c, sl * SLICE_W + group_lsb(g))) n_bec[sl][g]++;
        else                                                  n_rca[sl][g]++;
      end
      if (sl > 0 && carry_into(x, y, c, sl * SLICE_W)) n_cross[sl]++;
    end
    if (exp[64]) n_overflow++;
    if (&(x ^ y) && c) n_full_ripple++;
  endtask

  initial begin
    // Published example.
    apply(64'd25567, 64'd22212, 1'b1);
    checks++;
    if (s != 64'd47780 || co != 1'b0) begin
      failures++;
      $display("FAIL published example: %0d carry %0b", s, co);
    end

    // Corner cases.
    apply('1, '0, 1'b1);
    apply('1, '1, 1'b1);
    apply('0, '0, 1'b0);
    apply(64'hAAAA_AAAA_AAAA_AAAA, 64'h5555_5555_5555_5555, 1'b1);
    apply(64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000, 1'b0);
    apply(64'h0000_FFFF_FFFF_FFFF, 64'h0000_0000_0000_0001, 1'b0);

    // Word lengths 8, 16, 32 and 64 bits.
    for (int i = 0; i < 2000; i++) apply(64'($urandom & 32'hFF),   64'($urandom & 32'hFF),   1'($urandom));
    for (int i = 0; i < 2000; i++) apply(64'($urandom & 32'hFFFF), 64'($urandom & 32'hFFFF), 1'($urandom));
    for (int i = 0; i < 2000; i++) apply(64'($urandom), 64'($urandom), 1'($urandom));
    for (int i = 0; i < 20000; i++)
      apply({$urandom, $urandom}, {$urandom, $urandom}, 1'($urandom));

    // Mechanism coverage.
    for (int sl = 0; sl < NSLICE; sl++) begin
      for (int g = 1; g < NUM_GROUPS; g++) begin
        checks++;
        if (n_bec[sl][g] == 0 || n_rca[sl][g] == 0) begin
          failures++;
          $display("FAIL slice %0d group %0d: BEC path %0d, RCA path %0d", sl, g + 1,
                   n_bec[sl][g], n_rca[sl][g]);
        end
      end
      if (sl > 0) begin
        $display("carry into slice %0d (bit %0d): %0d times", sl, sl * SLICE_W, n_cross[sl]);
        checks++;
        if (n_cross[sl] == 0) begin
          failures++;
          $display("FAIL no carry into slice %0d", sl);
        end
      end
    end
    $display("BEC path taken in slice 0, group 5: %0d times; RCA path: %0d times",
             n_bec[0][4], n_rca[0][4]);
    $display("overflow (CA_out = 1): %0d times; full-length ripple: %0d times",
             n_overflow, n_full_ripple);
    checks += 2;
    if (n_overflow == 0)    begin failures++; $display("FAIL overflow never seen"); end
    if (n_full_ripple == 0) begin failures++; $display("FAIL full-length carry never seen"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
