// top_64_bit: 64-bit modified square-root carry-select adder (the top).
//
// Sum_out + 2^64 * CA_out = A + B + C_in. The adder is two csla32 halves, each
// two csla16 slices; the lower half's carry-out ("carry") feeds the upper
// half. Inside a slice, groups of 2, 2, 3, 4 and 5 bits each compute their
// carry-in-0 result with a ripple-carry adder, the carry-in-1 result with a
// binary-to-excess-1 converter (BEC), and pick one with a multiplexer driven
// by the carry of the group below. Ports and names are the paper's; the way
// the 16-bit slices are chained is this design's reading of its hierarchy.
// Purely combinational: no clock, no reset, no latency in cycles.
module top_64_bit (
  input  logic [63:0] A,
  input  logic [63:0] B,
  input  logic        C_in,
  output logic [63:0] Sum_out,
  output logic        CA_out
);
  logic carry;

  csla32 top_32bit_inst (
    .A(A[31:0]),  .B(B[31:0]),  .C(C_in),  .S(Sum_out[31:0]),  .CA(carry)
  );
  csla32 top_32bit_inst2 (
    .A(A[63:32]), .B(B[63:32]), .C(carry), .S(Sum_out[63:32]), .CA(CA_out)
  );
endmodule
