# A 64-bit square-root carry-select adder with binary-to-excess-1 converters

A ripple-carry adder is slow because every bit waits for the carry from the bit
below it. A carry-select adder (CSLA) avoids most of that wait. It cuts the word
into groups and computes each group's result twice in advance: once assuming the
incoming carry is 0, and once assuming it is 1. When the real carry arrives, a
multiplexer only has to pick one of the two results. The cost is area, because a
classic CSLA needs two ripple-carry adders per group.

This design keeps the ripple-carry adder for the carry-0 case and drops the
second one. A group's carry-1 result is its carry-0 result plus one. A
*binary-to-excess-1 converter* (BEC) computes "plus one" with only an inverter,
a chain of AND gates and one XOR per bit. That is fewer gates than a chain of
full adders. The groups also grow in width from the least significant end (the
"square-root" sizing). Each group's select carry therefore arrives at about the
time its own ripple-carry adder and BEC have settled. The result is a
combinational 64-bit adder:

    {CA_out, Sum_out} = A + B + C_in

The adder follows the paper "Design of a 64-bit SQRT-CSLA with Reduced Area and
High-Speed Applications in Low Power VLSI Circuits" (Pallavi, Padma, Kiran Kumar,
Suguna, Nalini). It is not by those authors. Where the paper leaves a choice
open, or contradicts itself, this text says so.

## The excess-1 trick inside one group

Take a group of `W` bits, with operand slices `a` and `b`:

1. **Carry-0 adder** (`rca_cin0`). Its carry-in is known to be 0, so bit 0 is a
   half adder and bits 1..W-1 are full adders, rippling upward. It produces the
   `W+1`-bit word `{c0, s0} = a + b`.
2. **BEC** (`bec`, `N = W+1` bits). It produces `{c0, s0} + 1`, which equals
   `a + b + 1`. This is exactly the result a second adder with carry-in 1 would
   give. The gates, LSB first, are:

       x[0] = ~b[0]
       x[i] =  b[i] ^ t[i],   t[1] = b[0],   t[i] = t[i-1] & b[i-1]

   So an `N`-bit BEC has one inverter, `N-2` two-input ANDs in a chain and
   `N-1` XORs. The carry-0 adder's carry `c0` is the BEC's top input bit, so
   the BEC also produces the group's carry for the carry-1 case.
3. **Select mux** (`sel_mux`, a `2(W+1):(W+1)` multiplexer). It is driven by
   the carry coming out of the group below. Select 0 passes the adder's word and
   select 1 passes the BEC's word. The selected word is `{cout, s}`, so the
   group's carry-out also goes through the mux.

In the paper's terms, the groups of a 16-bit slice are a "3-bit BEC with 6:3
mux" (W = 2), "4-bit BEC with 8:4 mux" (W = 3), "5-bit BEC with 10:5 mux"
(W = 4) and "6-bit BEC with 12:6 mux" (W = 5). `csla_group` is one such group.

## Group sizes and the carry chain of a 16-bit slice

`csla16` adds 16 bits in five groups. The widths are 2, 2, 3, 4 and 5 bits, LSB
first, and are kept in `csla_pkg::GROUP_W`:

| group | bits  | built from                          | select carry | carry out      |
|-------|-------|-------------------------------------|--------------|----------------|
| 1     | 1:0   | `rca`: 2 full adders, carry-in = Cin | (none)       | c1             |
| 2     | 3:2   | 2-bit RCA, 3-bit BEC, 6:3 mux       | c1           | c3             |
| 3     | 6:4   | 3-bit RCA, 4-bit BEC, 8:4 mux       | c3           | c6             |
| 4     | 10:7  | 4-bit RCA, 5-bit BEC, 10:5 mux      | c6           | c10            |
| 5     | 15:11 | 5-bit RCA, 6-bit BEC, 12:6 mux      | c10          | Cout           |

The carry names are the paper's. Group 1 has a live carry-in, so it is one
plain ripple-carry adder with no BEC or mux. The paper analyses timing in unit
gate delays: an XOR and a mux each count 3, an AND counts 1. On that scale the
select carry of each later group arrives after that group's own adder and BEC
have finished. The critical path is therefore group 1's adder, then one mux per
group. The paper gives the group outputs settling at 13, 16, 19 and 22 gate
delays for groups 2 to 5. This RTL has the same gate structure, but those
numbers are not checked here, because an RTL simulation has no gate delays.

In the RTL, the carries are the vector `c[0..5]` of `csla16`. `c[0]` is `Cin`,
and `c[g]` is the carry into group `g+1`, so `c[1]` = c1, `c[2]` = c3,
`c[3]` = c6, `c[4]` = c10 and `c[5]` = Cout.

## From 16 to 64 bits

`top_64_bit` instantiates two `csla32` halves, and each `csla32` instantiates
two `csla16` slices. In both places the lower part's carry-out (the net
`carry`) is the upper part's carry-in. This is the hierarchy of the paper's own
simulation and schematics (`top_64_bit` → `top_32bit_inst` → `top_16bit_inst1`,
with a `carry` net at both levels). Those figures name the instances and nets
but do not spell out the joining logic. A direct carry is the simplest reading
that fits them, and it is this design's choice.

The paper's block diagram of the 64-bit adder tells a different story. It draws
one flat chain of groups: the same first five groups up to bit 15, then groups
that are not drawn, then a last group `A[63:52]` selected by `c51`. That last
group is labelled with an 11-bit operand width, a "12-B BEC" and a "24:11" mux,
which do not fit a 12-bit field. The groups from bit 16 to bit 51 are not given
at all. That diagram is therefore not followed. The difference matters only for
delay: the carry between 16-bit slices passes through four muxes and one 2-bit
adder per slice, where a flat chain of ever-wider groups would pass through
fewer muxes. The sum is the same either way.

The resulting carry path, from `C_in` to `CA_out`, crosses per 16-bit slice one
2-bit ripple-carry adder and four muxes. Every other signal settles in parallel.

## Interface and timing

| port      | dir | width | meaning              |
|-----------|-----|-------|----------------------|
| `A`       | in  | 64    | operand              |
| `B`       | in  | 64    | operand              |
| `C_in`    | in  | 1     | carry-in             |
| `Sum_out` | out | 64    | sum, modulo 2^64     |
| `CA_out`  | out | 1     | carry-out (overflow) |

The adder has no clock, no reset and no registers, so its latency is zero
cycles. To use it in a clocked design, register its inputs or outputs around it.
Unsigned overflow is `CA_out`. For two's-complement use, signed overflow is not
produced and must be derived outside. The adder has no parameters: the group
sizes in `csla_pkg` define its structure.

## Files

| file | contents |
|------|----------|
| `rtl/csla_pkg.sv` | slice width, group widths, `group_lsb()` |
| `rtl/half_adder.sv`, `rtl/full_adder.sv` | one-bit cells (H and F in the paper's group drawings) |
| `rtl/rca_cin0.sv` | W-bit adder with carry-in 0 (HA + FAs) |
| `rtl/rca.sv` | W-bit adder with live carry-in (group 1) |
| `rtl/bec.sv` | N-bit binary-to-excess-1 converter |
| `rtl/sel_mux.sv` | 2N:N select multiplexer |
| `rtl/csla_group.sv` | one carry-select group (RCA + BEC + mux) |
| `rtl/csla16.sv` | 16-bit slice, five groups |
| `rtl/csla32.sv` | two slices |
| `rtl/top_64_bit.sv` | the 64-bit adder |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

Every module is plain synthesizable SystemVerilog. Generic synthesis of the top
gives 152 AND, 48 OR, 168 XOR, 16 NOT and 16 word-level multiplexers. The paper
quotes 1169 gates and 135 FPGA LUTs for its own 64-bit implementation. Those
numbers come from a different counting method and tool, so they cannot be
compared directly.

## Verification

Each testbench compares the block with exact integer arithmetic. Each one ends
by printing `TB_RESULT checks=<n> failures=<m>`, and each has a watchdog that
counts a failure if the run does not finish.

- The cells, `rca_cin0`, `rca`, `bec` and `csla_group` are checked exhaustively
  at every width the adder uses. The BEC tests include the all-ones input
  wrapping to zero.
- `tb_csla16` runs the paper's worked example, 25567 + 22212 + 1 = 47780 with
  carry-out 0, plus corner cases and 20,000 random additions. It also checks
  each internal group carry against the carry of the exact sum at that bit. It
  fails if any group's mux never picks its BEC input, or never picks its
  adder input.
- `tb_csla32` checks the same example, random operands, and carries across the
  slice boundary.
- `tb_top_64_bit` checks the full adder. It applies the paper's example; random
  operands of 8, 16, 32 and 64 bits (the word lengths the paper evaluates,
  zero-extended to 64 bits); the all-ones-plus-one case, whose carry ripples
  through every group; and overflow. It counts how often each of the 16 group
  muxes took each input, how often a carry crossed each slice boundary, and how
  often the adder overflowed. Any of these that never happened counts as a
  failure. It runs the top with no parameter changes, in well under a second.

Each testbench was also run against a copy of its module broken in one
deliberate way, and each reported failures.

To simulate one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/csla_pkg.sv tb/tb_top_64_bit.sv \
              --top-module tb_top_64_bit -Mdir obj && ./obj/Vtb_top_64_bit

`-Irtl` lets Verilator find the modules from their file names. The package must
come first on the command line.

## Where this departs from, or goes beyond, the paper

- **Joining the 16-bit slices**: chosen as described above, against the paper's
  flat block diagram.
- **Group carry**: the paper's introduction says carries are made by AND/OR
  logic and the mux picks only the sum. Its group drawings instead route the
  group carry through the mux, from the BEC and RCA words. This design follows
  the drawings.
- **Group 1**: the paper says only that group 1 is a single ripple-carry adder.
  Here it is two full adders.
- **Cell insides**: the half adder, full adder and mux are textbook gates. The
  paper names these cells and counts their gates (FA 13, HA 6, mux 4 per bit)
  but does not draw them. Only the BEC's gate structure comes from the paper.
- **Other word lengths**: the paper says it also built 8-, 16- and 32-bit
  versions. The 16- and 32-bit adders are `csla16` and `csla32`. An 8-bit
  version is not given, because the paper does not say how its groups are
  sized.
- **Not modelled**: the gate-delay, gate-count and power figures. These are
  properties of an implementation, not of the RTL.
