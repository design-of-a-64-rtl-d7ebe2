// full_adder: one-bit full adder (the cell marked "F" in the group diagrams).
//
// s = a xor b xor cin, cout = a.b + cin.(a xor b). Used in the ripple-carry
// adders of every group. Purely combinational. The gate form is the textbook
// one; the paper names the cell but does not draw its gates.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic cout
);
  logic p;
  assign p    = a ^ b;
  assign s    = p ^ cin;
  assign cout = (a & b) | (cin & p);
endmodule
