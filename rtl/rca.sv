// rca: W-bit ripple-carry adder with a live carry-in.
//
// Group 1 of each 16-bit slice (bits 1:0) is a single ripple-carry adder fed by
// the slice carry-in; it has no BEC and no multiplexer. Its carry-out is c1,
// the select of group 2. All W cells are full adders (the paper does not draw
// this adder's cells; full adders are needed because the carry-in is live).
// Purely combinational.
module rca #(
  parameter int unsigned W = 2
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  logic [W:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < W; i++) begin : g_fa
    full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .s(s[i]), .cout(c[i+1]));
  end

  assign cout = c[W];
endmodule
