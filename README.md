# Monolithic-based unsigned multipliers

An N x N unsigned multiplier can be assembled like a construction kit from
one small multiplier that is designed once, as a single Boolean function of
all its inputs: a *monolithic* multiplier, for example 4x4->8 or 5x5->10.
The operands are cut into groups of M bits, every pair of groups is
multiplied by its own monolithic block, and the partial products are summed
with their weights — the schoolbook identity that also underlies the
Fourier-transform (Schönhage–Strassen) family of multiplication methods:

    A = sum_i A_i * 2^(M*i),   B = sum_j B_j * 2^(M*j)
    A*B = sum_i sum_j A_i*B_j * 2^(M*(i+j))

What makes the construction cheap is the final addition. Partial products
that do not overlap are not added at all: they are *joined*, i.e. placed
side by side in one wide row, and only the rows go through an adder tree.
For a 14x14 multiplier this turns 16 partial products, which would need 15
adders in 4 levels, into 7 rows needing 6 adders in 3 levels.

The same structure gives a multiplier in "saturation arithmetic", which in
this design means that the result has the width of the operands and holds
the **low N bits** of the product (A*B mod 2^N; it wraps, it is not clamped).
There, partial products that lie entirely above bit N-1 are never built, and
those that straddle bit N are built by a monolithic multiplier that only
produces the bits still needed.

This RTL follows the method as published by D. Gorodecky for N = 8..32
(regular and saturation arithmetic, 28 nm synthesis results); the worked
example of that publication, 14x14 with 4-bit groups, is the default size.
Everything here is combinational.

## Files

| file | what it is |
|------|------------|
| `rtl/ftm_pkg.sv` | constant functions that fix the geometry: group widths, which partial products exist, their widths, rows and bit positions |
| `rtl/mono_mult.sv` | monolithic multiplier, WA x WB -> WR bits, from its truth table |
| `rtl/pp_join.sv` | joins the partial products into rows |
| `rtl/adder_tree.sv` | binary tree of two-input adders over the rows |
| `rtl/ftm_mult.sv` | the N x N multiplier (`SAT` selects regular or saturation arithmetic) |
| `rtl/ftm_mult_top.sv` | top: one regular and one saturation multiplier on the same operands |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus `tb_workloads` for all evaluated sizes |

## Splitting the operands

With K = ceil(N/M) groups, groups 0..K-2 are M bits wide and the top group
takes the remainder. For 14 bits and M = 4: A_1 = a[3:0], A_2 = a[7:4],
A_3 = a[11:8], A_4 = a[13:12] (1-based names, as used below). The monolithic
blocks therefore come in the shapes 4x4->8, 4x2->6, 2x4->6 and 2x2->4.
The evaluated sizes use M = 5 for N = 10, 20 and 30 and M = 4 for all
others.

A monolithic multiplier (`mono_mult`) is written as the full disjunctive
normal form of its truth table. A constant table of 2^(WA+WB) entries holds
(a*b) mod 2^WR; output bit k is the OR of the minterms ({a,b} == idx) of all
entries whose bit k is 1. The number of such minterms, summed over the
output bits, is exported as `MINTERMS` and equals the published
unminimised-cover sizes (14, 111, 678, 3733, ... for 2x2->4, 3x3->6,
4x4->8, 5x5->10; 10, 68, 392, 2064, ... for the m x m -> m variants).
The original method minimises this cover off-line (Espresso, ELS) and
synthesises the minimised cover; here the full cover is handed to synthesis,
which does the minimising. The table is only a generator constant: there is
no storage and no clock.

## Joining partial products into rows

Call R_n = A_i*B_j with n = 4(i-1)+j. Its weight is 2^(4(i+j-2)) and it is
at most 8 bits wide. Two products whose diagonals i+j differ by 2 are 8 bit
positions apart, so they never overlap and can share a row as a plain
concatenation. All products of even diagonals therefore go into "even" rows,
all of odd diagonals into "odd" rows; a parity needs as many rows as its
most crowded diagonal holds products.

Which product of a diagonal goes into which row is decided by ranking the
products of the diagonal: widest first, then by lower A group. Rank r goes
into the r-th row of its parity. The rows are then ordered by rank,
alternating which parity comes first: E0, O0, O1, E1, E2, O2, O3, ...
(E = even, O = odd). For 14x14 the rows are (bit ranges 0-based):

| row | contents | bits |
|-----|----------|------|
| 0 | R16 & R11 & R3 & R1 | 27:0 |
| 1 | R12 & R7 & R2 & 0000 | 25:0 |
| 2 | R15 & R10 & R5 & 0000 | 25:0 |
| 3 | R8 & R6 & 0^8 | 21:0 |
| 4 | R14 & R9 & 0^8 | 21:0 |
| 5 | R4 & 0^12 | 17:0 |
| 6 | R13 & 0^12 | 17:0 |

These are exactly the rows of the published 14x14 example, in the published
order; there the last two are first added to each other. The publication states only the principle
("join as many products as possible into one vector") and the 14x14 result;
the parity-and-rank rule is this design's way of applying it to any N and M.
`pp_join` does nothing but this placement; it contains no gates.

## The adder tree

`adder_tree` adds neighbouring operands level by level (0+1, 2+3, ...).
When a level has an odd number of operands, the last two are still added
to each other and the one before them waits, unchanged and in its place,
for the next level. R rows thus take R-1 adders in ceil(log2 R) levels.
For the 14x14 rows above this gives the published tree:

    level 1:  row0 + row1      row2 + row3      R4 + R13      (row4 waits)
    level 2:  (row0+row1) + (row2+row3)         row4 + (R4+R13)
    level 3:  final sum, 28 bits

The reason for letting the operand before the last pair wait is that the
last rows are the narrowest ones (here R4 and R13, 6 bits at bit 12), so
they are combined early, as in the original tree; for other sizes the
rule is this design's own generalisation. All adders are written at the
full result width with `+`; constant-zero low and high bits are removed by
synthesis, and the adder architecture is left to it.

Adder counts that this construction gives, against the counts published for
the joining technique:

| N | M | regular: rows / adders / published | saturation: rows / adders / published |
|---|---|---|---|
| 8 | 4 | 3 / 2 / 2 | 3 / 2 / 2 |
| 10 | 5 | 3 / 2 / 2 | 3 / 2 / 2 |
| 12 | 4 | 5 / 4 / **10** | 5 / 4 / 4 |
| 14 | 4 | 7 / 6 / 6 | 7 / 6 / 6 |
| 16 | 4 | 7 / 6 / 6 | 7 / 6 / 6 |
| 18 | 4 | 9 / 8 / 8 | 9 / 8 / **6** |
| 20 | 5 | 7 / 6 / 6 | 7 / 6 / 6 |
| 22, 24, 30 | 4, 4, 5 | 11 / 10 / 10 | 11 / 10 / 10 |
| 26, 28 | 4 | 13 / 12 / 12 | 13 / 12 / 12 |
| 32 | 4 | 15 / 14 / 14 | 15 / 14 / **21** |

Three published entries differ (bold). For 12x12 the published "common
case" count (19) is also inconsistent with 9 partial products, so that row
looks like a misprint; for 18x18 and 32x32 saturation no construction is
published that would explain the numbers; here 18x18 uses 2 adders more
and 32x32 uses 7 fewer than stated. The design does not try to match
them.

## Saturation arithmetic

For `SAT = 1` the result is A*B mod 2^N. With 14 bits and M = 4:

* products at bit 16 and above (A2B4, A3B3, A3B4, A4B2, A4B3, A4B4) are not
  built;
* products at bit 8 (A1B3, A2B2, A3B1) are built modulo 2^6 (4x4->6 truth
  tables);
* products at bit 12 (A1B4, A2B3, A3B2, A4B1) are built modulo 2^2
  (4x2->2, 4x4->2, 2x4->2);
* A1B1, A1B2 and A2B1 are built in full.

That leaves 10 partial products (9 adders if they were summed one by one),
joined into 7 rows of 14 bits and summed by 6 adders, every adder and row
taken modulo 2^14. The general rule is in `ftm_pkg::prod_w`: a product at
bit position p keeps min(its full width, N-p) bits and does not exist if
N-p <= 0.

## Interfaces and timing

`ftm_mult #(N, M, SAT)`: inputs `a`, `b` [N-1:0], output `r` [2N-1:0] when
`SAT = 0` or [N-1:0] when `SAT = 1`. `ftm_mult_top #(N = 14, M = 4)`: inputs
`a`, `b`, outputs `r_reg` (2N bits) and `r_sat` (N bits). No clock, reset or
handshake: the outputs follow the inputs after the combinational delay
(monolithic block, then ceil(log2 R) adder levels). To use one in a clocked
design, register its inputs and outputs. The published speed figures
(roughly 1.2-2.5 GHz for 8-32 bits, 28 nm logic synthesis without place and
route) give an idea of the delay to expect.

The sizes tested are N = 8..32 with M = 4 or 5 and 10x10, 12x12 and 14x14
variants; other N and M elaborate by the same rules. The truth table has 2^(2M) entries, so M
much above 8 is impractical, in line with the method's own limit of
monolithic blocks with at most 16 inputs.

## Verification

Each testbench compares against integer arithmetic computed in the
testbench and prints `TB_RESULT checks=<n> failures=<n>`:

* `tb_mono_mult` — all inputs of 4x4->8, 5x5->10, 4x2->6, 4x4->4, 4x2->2.
* `tb_mono_mult_table1` — the minterm counts of the 2x2..5x5 blocks in
  both arithmetics against the published cover sizes, plus random products.
  (6x6 and larger build too slowly in the simulator and are not used.)
* `tb_pp_join` — the 14x14 rows of both arithmetics against the row formulas
  written out by hand (the table above and its saturation counterpart).
* `tb_adder_tree` — 1, 2, 3, 7, 8 and 9 operands, random and near-overflow;
  `tb_adder_tree_shape` checks the intermediate sums of the 14x14 tree.
* `tb_ftm_mult` — 14x14 and 10x10 (M = 5) in both arithmetics and 12x12,
  corners, walking ones, 20,000 random pairs.
* `tb_ftm_mult_top` — the default top, about 200,000 vectors; it also counts
  that the narrow top groups, the wrap-around of the saturation result, the
  truncated partial products and the dropped partial products were all
  exercised.
* `tb_workloads` — all 26 evaluated multipliers (N = 8..32, both
  arithmetics) against a 64-bit reference.

With Verilator 5, for example:

    verilator --binary --timing --assert -Irtl rtl/ftm_pkg.sv \
        tb/tb_ftm_mult_top.sv --top-module tb_ftm_mult_top
    ./obj_dir/Vtb_ftm_mult_top

The package must be named first; the other modules are found through
`-Irtl` (or `-y rtl`). `tb_workloads` builds 26 multipliers and takes about
a minute to compile and to run.

## Departures from the publication

* Monolithic blocks are stated as full (unminimised) DNF covers; the
  minimised covers of the original flow are not reproduced, and their
  quality, which drives the published speed results, is left to the
  synthesis tool.
* The general row assignment and the adder pairing are this design's own
  rules; for 14x14 they reproduce the published rows and tree exactly.
* In the published 14x14 figure the first row reads R16 & R11 & R3 & R6; the
  written formula has R1 in place of R6, and R6 already belongs to another
  row, so R1 is used.
* "Saturation" is implemented as the low N bits of the product, which is how
  the method defines it, not as clamping to 2^N-1.
* Only unsigned operands are supported, as in the original.
