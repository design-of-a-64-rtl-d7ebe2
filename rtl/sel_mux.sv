// sel_mux: 2N:N multiplexer of a carry-select group.
//
// Chooses between the carry-in-0 word d0 (from the ripple-carry adder) and the
// carry-in-1 word d1 (from the BEC) using the carry of the previous group as
// sel: sel = 0 gives d0, sel = 1 gives d1, the input numbering printed on the
// paper's 12:6 multiplexer. The word carries the group's sum bits and, as MSB,
// its carry. Purely combinational.
module sel_mux #(
  parameter int unsigned N = 6
) (
  input  logic [N-1:0] d0,
  input  logic [N-1:0] d1,
  input  logic         sel,
  output logic [N-1:0] y
);
  always_comb begin
    if (sel) y = d1;
    else     y = d0;
  end
endmodule
