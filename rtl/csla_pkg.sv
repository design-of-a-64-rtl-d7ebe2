// csla_pkg: constants shared by the modified square-root carry-select adder.
//
// A 16-bit slice of the adder is cut into five groups of 2, 2, 3, 4 and 5 bits
// (LSB first). The first group is a plain ripple-carry adder fed by the slice
// carry-in; each later group is a carry-select group whose select input is the
// carry of the group below it. The group widths are the ones drawn for bits
// 15:0 of the published block diagram; the 64-bit adder is built from four such
// slices. group_lsb() returns the bit position where a group starts.
package csla_pkg;

  localparam int unsigned SLICE_W    = 16;
  localparam int unsigned NUM_GROUPS = 5;

  typedef int unsigned group_w_t [NUM_GROUPS];

  // Widths of groups 1..5 of a 16-bit slice, least significant group first.
  localparam group_w_t GROUP_W = '{2, 2, 3, 4, 5};

  // Bit position of the least significant bit of group g (0-based index).
  function automatic int unsigned group_lsb(int unsigned g);
    int unsigned lsb = 0;
    for (int unsigned i = 0; i < NUM_GROUPS; i++)
      if (i < g) lsb += GROUP_W[i];
    return lsb;
  endfunction

endpackage
