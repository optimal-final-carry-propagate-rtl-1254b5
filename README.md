# Dadda multiplier with a three-region hybrid final adder

In a parallel multiplier the last step is a carry propagate adder (CPA) that
adds the two rows left by the partial-product reduction tree. The inputs of
that adder do not arrive at the same time. The low columns of the tree have
few bits, so they settle early and one after another. The middle columns are
the tallest, so they settle last and almost together. The top columns settle
somewhat earlier again. A single adder type is therefore a poor fit for the
whole width.

This RTL builds an unsigned N x N Dadda multiplier whose final adder is cut
into three regions. Each region uses the adder type that suits its arrival
profile:

| region | bits (N = 64) | width | profile | adder |
|---|---|---|---|---|
| 1 | 0 - 31 | N/2 | early, rising | ripple carry adder (RCA) |
| 2 | 32 - 111 | N + 2^x = 5N/4 | late, flat | variable-block BEC carry select adder (BCSLA) |
| 3 | 112 - 127 | N/4 | earlier, falling | variable-block BEC carry look-ahead adder (BCLA) |

Here x = floor(log2 N) - 2. For a power of two, N + 2^x = 5N/4, and the three
widths add up to 2N.

Why these adder types:

- **Region 1.** Successive inputs arrive further apart than one full adder's
  carry delay, so a ripple carry keeps pace with them. It is also the smallest
  adder.
- **Regions 2 and 3.** All inputs are present at once and then wait for the
  carry from below. Each group here computes its sum in advance. When the real
  carry arrives, only a multiplexer remains on the path.
- **BEC instead of a second adder.** A binary-to-excess-1 converter (BEC) makes
  the "carry in = 1" result by adding one to the "carry in = 0" result. This
  replaces the second adder of a classic carry select adder and saves area and
  power.

The region widths and adder choices are those of the design this RTL
implements. The group sizing, the BEC logic and the Dadda adder placement are
standard constructions filled in here; see "Choices made in this RTL".

## Region widths for the four evaluated sizes

| N | final adder | region 1 | region 2 | region 3 | BCSLA groups (LSB first) | BCLA groups |
|---|---|---|---|---|---|---|
| 8 | 16 bits | 0-3 (4) | 4-13 (10) | 14-15 (2) | 2,3,5 | 2 |
| 16 | 32 bits | 0-7 (8) | 8-27 (20) | 28-31 (4) | 2,3,4,5,6 | 4 |
| 32 | 64 bits | 0-15 (16) | 16-55 (40) | 56-63 (8) | 2,3,5,6,7,8,9 | 3,5 |
| 64 | 128 bits | 0-31 (32) | 32-111 (80) | 112-127 (16) | 2,3,4,5,6,7,8,9,11,12,13 | 2,3,5,6 |

The region boundaries use the rounded equations above. The boundaries taken
directly from measured arrival profiles differ by a few bits: for example
0-5 / 6-14 / 15 at N = 8 and 0-29 / 30-112 / 113-127 at N = 64. The rounded
equations were chosen because they are what a designer can apply to any N.

## Datapath and timing

```
 a[N-1:0] --> dff_bank --+                                  +--> row0 --+
                         +--> and_array --> dadda_tree -----+           +--> hybrid_cpa --> dff_bank --> p[2N-1:0]
 b[N-1:0] --> dff_bank --+    (N^2 bits)    (N..2 rows)     +--> row1 --+    rca | bcsla | bcla
```

`dadda_mult` is the top. The datapath between its two ranks of flip-flops is
purely combinational:

- The operands present at rising edge k are captured at that edge.
- The product of that pair is on `p` right after edge k+1.
- A new pair can be applied every cycle.
- There is no reset and no valid or handshake signal, because the registers
  exist only to time the combinational multiplier.
- The final adder has a carry out, an extra output bit above region 3.
  It can never be 1 for a product, and an assertion in `dadda_mult` checks
  that.

## The Dadda reduction tree

`dadda_tree` is the largest and least obvious part of the design.

**Columns.** The AND array produces `pp[i][j] = b[i] & a[j]` with weight
2^(i+j). The tree regroups these bits into 2N columns. Column c holds every
bit with i + j = c, so its height is c+1 for c < N and 2N-1-c above that.

**Target heights.** Dadda's method fixes the target height of each stage by
working back from the final two rows. Each height is the largest integer no
more than 1.5 times the next one: 2, 3, 4, 6, 9, 13, 19, 28, 42, 63, ... The
tree uses every height below N, largest first, one per stage. That gives 4
stages for N = 8, 6 for 16, 8 for 32 and 10 for 64.

**Adder placement.** Within a stage, the columns are processed from the LSB
up. For column c, let `excess` = (height + carries arriving from column c-1)
- target. The stage places `excess/2` full adders (3 bits to 1 each) and, if
`excess` is odd, one half adder (2 bits to 1). No more are placed than needed
to reach the target, which is what makes the tree a Dadda tree rather than a
Wallace tree. A full adder's sum stays in column c and its carry moves to
column c+1.

**The schedule in code.** `cpa_pkg::dadda_stage(N, s)` computes this schedule
at elaboration. It returns one packed table per stage with, for every column:

- the height entering the stage,
- the number of full adders,
- the number of half adders,
- the number of incoming carries.

`dadda_tree` turns the table into `full_adder` and `half_adder` instances with
generate loops. After elaboration the tree is plain wiring between those cells.

**Bit order between stages.** The next stage's column lists its bits in this
order:

1. full-adder sums
2. half-adder sums
3. carries from the column below (full-adder carries first)
4. the bits the stage did not touch

Two elaboration-time `$error` checks guard this:

- A stage may never need more bits than a column holds.
- N must lie between 4 and 128.

Column 0 always holds the single bit `a[0] & b[0]`. It passes through
unchanged and becomes `row0[0]`, which is product bit P0.

## Variable-block BEC adders

`bcsla` and `bcla` share one structure. The region is split into groups that
grow towards the MSB ("square-root" sizing): 2, 3, 4, ... bits. Any bits left
over are spread one per group, starting from the MSB group. Each group works in
three steps:

1. It adds its own bits with carry in 0: an `rca` in BCSLA, a `cla` in BCLA.
   The result is `{c0, s0}`.
2. `bec_mux` forms `{c0, s0} + 1` with the excess-1 converter:
   X0 = ~B0, Xi = Bi ^ (B(i-1) & ... & B0).
3. The real carry into the group selects between the two results. The selected
   carry out is the select of the next group.

Larger groups sit where the carry arrives later, so their internal addition
has more time. The carry path through a region is one 2:1 multiplexer per
group.

`cla` forms every carry of a group directly from generate, propagate and carry
in as a two-level sum of products. That is reasonable for the 2 to 6 bit
groups it is used for.

## Choices made in this RTL

Where the source description leaves a detail open, this RTL makes the
following choices.

- **Adder width.** The final adder is 2N bits wide, covering bit positions
  0 to 2N-1 as in the region tables. The "2N-2" CPA length quoted for Dadda
  trees is not used. Bits the tree never fills are 0.
- **Region 3 at N = 8.** Region 3 is kept as its own BCLA even though it is
  only 2 bits wide. The measured profile for that size would merge it into
  region 2.
- **Region 2 adder.** Region 2 is a BCSLA for every N. An early analysis of
  the 8 x 8 case preferred a BCLA there, but the final design uses the BCSLA
  throughout.
- **N not a power of two.** Region 2 takes the 2N - N/2 - N/4 bits that
  regions 1 and 3 leave, so it may differ from N + 2^x.
- **Group sizes.** The sizes of the variable blocks, the internal structure of
  the CLA and the exact BEC logic are not specified. The standard forms above
  are used.
- **Dadda details.** The full/half adder placement and the bit order inside
  columns are not specified. The usual Dadda rule is used.
- **Registers.** There are no fan-out buffers: they are wires in RTL. The
  flip-flops have no reset.
- **No characterisation harness.** The load capacitors on the outputs and the
  input delays that model the arrival profile were part of the timing
  measurement set-up, not of the design, and are not modelled. The same holds
  for the extra register rank in front of the adder that was used to
  characterise the adder alone.
- **Default size.** N defaults to 64, the largest of the four evaluated sizes.
  Every module takes N (or a width W) as a parameter.

The delay, area and power results that motivate the adder choices came from
post-layout analysis in a 0.18 um process. Nothing in this RTL reproduces or
checks them; the testbenches check function and cycle timing only.

## Modules

| file | contents |
|---|---|
| `rtl/cpa_pkg.sv` | region widths, square-root group sizes, Dadda schedule (constant functions) |
| `rtl/dadda_mult.sv` | top: registers, AND array, Dadda tree, hybrid adder |
| `rtl/dff_bank.sv` | W-bit bank of D flip-flops |
| `rtl/and_array.sv` | N x N partial products |
| `rtl/dadda_tree.sv` | Dadda reduction to two rows |
| `rtl/hybrid_cpa.sv` | three-region final adder |
| `rtl/rca.sv`, `rtl/cla.sv` | ripple carry and carry look-ahead adders |
| `rtl/bec_mux.sv` | binary-to-excess-1 converter with select multiplexer |
| `rtl/bcsla.sv`, `rtl/bcla.sv` | variable-block BEC carry select / look-ahead adders |
| `rtl/full_adder.sv`, `rtl/half_adder.sv` | one-bit cells |

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops. Each has a watchdog that
counts a failure if the test hangs. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/cpa_pkg.sv tb/tb_dadda_mult.sv \
          --top-module tb_dadda_mult -Mdir obj_mult -j 8
./obj_mult/Vtb_dadda_mult
```

`-Irtl` lets Verilator find each module in `rtl/<name>.sv`. Building the
64 x 64 design takes about a minute. The same command with another `tb_*`
name runs the other testbenches:

| testbench | what it checks |
|---|---|
| `tb_dadda_mult` | default 64 x 64 multiplier, 4000 products back to back. Checks the one-cycle latency and that both inter-region carries took both values. |
| `tb_mult_sizes` | 8, 16, 32 and 64-bit multipliers side by side. 8 x 8 is exhaustive (65536 pairs); the others get random pairs. |
| `tb_dadda_tree` | row0 + row1 = a*b, exhaustive at N = 8 and random and corner cases at N = 64 |
| `tb_hybrid_cpa` | the final adder at N = 8, 16, 32, 64, carry chains across region borders, region widths |
| `tb_bcsla`, `tb_bcla`, `tb_rca`, `tb_cla` | the adders at default width and exhaustively at a small width |
| `tb_bec_mux` | the excess-1 converter and multiplexer, exhaustive at W = 4 and 7 |
| `tb_and_array`, `tb_dff_bank` | partial products; capture and hold of the registers |

All of these pass. The reference values come from the simulator's own `+`
and `*` operators, not from the RTL.

## Changing the design

- **Operand size.** Set `N` on `dadda_mult`. The tree schedule, region widths
  and group sizes all follow from it.
- **Region widths.** Change `region1_width`, `region2_width` and
  `region3_width` in `cpa_pkg`. `hybrid_cpa` checks that region 2 equals
  N + 2^x whenever N is a power of two; relax that check if you move the
  boundaries on purpose.
- **Group sizes.** Change `num_groups` and `group_size` in `cpa_pkg`. The
  groups of each region must add up to the region width.
