// half_adder: one-bit half adder (the cell marked "H" in the group diagrams).
//
// s = a xor b, c = a and b. It is the least significant cell of every
// carry-in-0 ripple-carry adder, where the carry-in is known to be zero.
// Purely combinational. The gate form is the textbook one; the paper names the
// cell but does not draw its gates.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);
  assign s = a ^ b;
  assign c = a & b;
endmodule
