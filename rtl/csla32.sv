// csla32: 32-bit adder built from two 16-bit modified SQRT CSLA slices.
//
// The lower slice adds bits 15:0 with the carry-in C; its carry-out ("carry")
// is the carry-in of the upper slice (bits 31:16), whose carry-out is CA. The
// hierarchy, the instance names and the port names follow the published
// simulation of the 64-bit design; how the halves are joined is not described
// in words, and a direct carry from the lower to the upper half is this
// design's reading. Purely combinational.
module csla32 (
  input  logic [31:0] A,
  input  logic [31:0] B,
  input  logic        C,
  output logic [31:0] S,
  output logic        CA
);
  logic carry;

  csla16 top_16bit_inst1 (
    .A_in(A[15:0]),  .B_in(B[15:0]),  .Cin(C),     .Sum(S[15:0]),  .Cout(carry)
  );
  csla16 top_16bit_inst2 (
    .A_in(A[31:16]), .B_in(B[31:16]), .Cin(carry), .Sum(S[31:16]), .Cout(CA)
  );
endmodule
