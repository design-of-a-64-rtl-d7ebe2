// csla_group: one W-bit group of the modified (BEC-based) carry-select adder.
//
// A classic carry-select group computes its slice twice, with carry-in 0 and
// with carry-in 1, and lets the real carry pick one. Here only the carry-in-0
// sum is computed by a ripple-carry adder (half adder + W-1 full adders); the
// carry-in-1 result is that same (W+1)-bit word {carry, sum} plus one, made by
// a (W+1)-bit binary-to-excess-1 converter, which needs fewer gates than a
// second adder. A 2(W+1):(W+1) multiplexer driven by cin (the previous group's
// carry) selects {cout, s}. For W = 2, 3, 4, 5 this is the paper's
// 3-bit BEC + 6:3 mux, 4-bit BEC + 8:4 mux, 5-bit BEC + 10:5 mux and
// 6-bit BEC + 12:6 mux groups. The group carry is taken through the mux, as
// the paper's group diagrams draw it.
// Purely combinational: cin only has to pass the mux, so a group's output is
// ready one mux delay after cin once the RCA and BEC have settled.
module csla_group #(
  parameter int unsigned W = 2
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  logic [W-1:0] s0;     // carry-in-0 sum
  logic         c0;     // carry-in-0 carry
  logic [W:0]   word0;  // {c0, s0}
  logic [W:0]   word1;  // word0 + 1 = carry-in-1 result

  rca_cin0 #(.W(W)) u_rca (.a(a), .b(b), .s(s0), .cout(c0));

  assign word0 = {c0, s0};

  bec #(.N(W + 1)) u_bec (.b(word0), .x(word1));

  sel_mux #(.N(W + 1)) u_mux (.d0(word0), .d1(word1), .sel(cin), .y({cout, s}));
endmodule
