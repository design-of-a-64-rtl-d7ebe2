// rca_cin0: W-bit ripple-carry adder whose carry-in is tied to zero.
//
// This is the "RCA with Cin = 0" half of a carry-select group. Because the
// carry-in is known to be zero, bit 0 is a half adder and bits 1..W-1 are full
// adders chained LSB to MSB, exactly as the group diagrams draw it (H at the
// bottom, F above). Outputs are the W-bit partial sum s and the partial carry
// cout; together they form the (W+1)-bit word that the BEC increments.
// Purely combinational; the carry ripples through W cells.
module rca_cin0 #(
  parameter int unsigned W = 2
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s,
  output logic         cout
);
  logic [W:0] c;  // c[i] is the carry into bit i

  assign c[0] = 1'b0;

  half_adder u_ha (.a(a[0]), .b(b[0]), .s(s[0]), .c(c[1]));

  for (genvar i = 1; i < W; i++) begin : g_fa
    full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .s(s[i]), .cout(c[i+1]));
  end

  assign cout = c[W];
endmodule
