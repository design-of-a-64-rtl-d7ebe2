// csla16: 16-bit modified square-root carry-select adder slice.
//
// Bits 15:0 are split into five groups of 2, 2, 3, 4 and 5 bits. Group 1
// (bits 1:0) is a ripple-carry adder fed by Cin; its carry c1 selects group 2
// (bits 3:2), whose carry c3 selects group 3 (bits 6:4), then c6 selects
// group 4 (bits 10:7) and c10 selects group 5 (bits 15:11), whose carry is
// Cout. Each of groups 2-5 is a csla_group (carry-in-0 RCA, BEC, mux). Group
// sizes grow by one bit so that each group's RCA+BEC finishes at about the
// time its select carry arrives: the square-root sizing. Sizes, carry names
// and port names follow the paper; the module name is this design's own.
// Purely combinational.
module csla16
  import csla_pkg::*;
(
  input  logic [SLICE_W-1:0] A_in,
  input  logic [SLICE_W-1:0] B_in,
  input  logic               Cin,
  output logic [SLICE_W-1:0] Sum,
  output logic               Cout
);
  logic [NUM_GROUPS:0] c;  // c[g] is the carry into group g (c[0] = Cin)

  assign c[0] = Cin;

  rca #(.W(GROUP_W[0])) u_group1 (
    .a   (A_in[GROUP_W[0]-1:0]),
    .b   (B_in[GROUP_W[0]-1:0]),
    .cin (c[0]),
    .s   (Sum[GROUP_W[0]-1:0]),
    .cout(c[1])
  );

  for (genvar g = 1; g < NUM_GROUPS; g++) begin : g_grp
    localparam int unsigned LSB = group_lsb(g);
    localparam int unsigned GW  = GROUP_W[g];
    csla_group #(.W(GW)) u_group (
      .a   (A_in[LSB +: GW]),
      .b   (B_in[LSB +: GW]),
      .cin (c[g]),
      .s   (Sum[LSB +: GW]),
      .cout(c[g+1])
    );
  end

  assign Cout = c[NUM_GROUPS];
endmodule
