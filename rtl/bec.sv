// bec: N-bit binary-to-excess-1 converter, x = b + 1 (mod 2^N).
//
// This block replaces the second ("carry-in = 1") ripple-carry adder of a
// classic carry-select group: adding one to the carry-in-0 result gives the
// carry-in-1 result. Structure as drawn in the paper's 6-bit BEC:
//   x[0] = ~b[0]
//   x[i] = b[i] ^ (b[0] & b[1] & ... & b[i-1])     for i >= 1
// with the running AND formed by a chain of two-input AND gates (N-2 ANDs and
// N-1 XORs and one inverter). The inputs are the RCA's sum bits with its carry
// as the MSB. Purely combinational.
module bec #(
  parameter int unsigned N = 6  // at least 2
) (
  input  logic [N-1:0] b,
  output logic [N-1:0] x
);
  logic [N-1:1] t;  // t[i] = b[0] & ... & b[i-1]

  assign t[1] = b[0];
  for (genvar i = 2; i < N; i++) begin : g_and
    assign t[i] = t[i-1] & b[i-1];
  end

  assign x[0] = ~b[0];
  for (genvar i = 1; i < N; i++) begin : g_xor
    assign x[i] = b[i] ^ t[i];
  end
endmodule
