# Signed 8x8 multiplier from four 4x4 Baugh-Wooley arrays

This design multiplies two 8-bit two's complement numbers in one combinational
step. It does not use one 8x8 array. It splits each operand into two 4-bit
halves and computes the four half-by-half products at the same time, in four
small Baugh-Wooley array multipliers. A short adder tree then adds the four
products with their weights. This split is called decomposition. The idea is
that four short arrays working side by side, plus a small final adder, have a
shorter critical path than one long array. The source design reports a path
delay of 10.516 ns (95.09 MHz) on a Virtex-6 xc6vlx75t-3 FPGA, against
15.345 ns for a Booth multiplier. The conclusion of the source gives
"95.9 MHz"; the table value, 95.09 MHz, is the one consistent with 10.516 ns.

```
            a[7:4] b[7:4]   a[7:4] b[3:0]   a[3:0] b[7:4]   a[3:0] b[3:0]
               |     |         |     |         |     |         |     |
            +--v-----v--+   +--v-----v--+   +--v-----v--+   +--v-----v--+
            | 4x4 BW    |   | 4x4 BW    |   | 4x4 BW    |   | 4x4 BW    |
            | s x s     |   | s x u     |   | u x s     |   | u x u     |
            +-----+-----+   +-----+-----+   +-----+-----+   +-----+-----+
                  | p_hh          | p_hl          | p_lh          | p_ll
                  |               +-------+-------+               |
                  |                 level 1: add                  |
                  |                       | (x 2^4)               |
                  +-------------- level 2: add to {p_hh, p_ll} ---+
                                          |
                                       p[15:0]
```

## Files

| file | what it is |
|---|---|
| `rtl/bw_pkg.sv` | package: the Baugh-Wooley correction constant, as a function |
| `rtl/baugh_wooley.sv` | N x N Baugh-Wooley array multiplier (default 4x4, signed) |
| `rtl/decomp_adder_tree.sv` | adds the four sub-products with their weights |
| `rtl/bw_decomp_mult.sv` | top: the N x N decomposed multiplier (default 8x8) |
| `tb/tb_baugh_wooley.sv` | all 4x4 signedness variants exhaustively, and an 8x8 array |
| `tb/tb_decomp_adder_tree.sv` | the adder tree, driven with computed sub-products |
| `tb/tb_bw_decomp_mult.sv` | the top at its default size, all 65,536 operand pairs |
| `tb/tb_bw_decomp_mult16.sv` | the top at N = 16, random and corner-case operands |

## Baugh-Wooley arrays: signed products with only additions

Write an N-bit two's complement number as
A = -a(N-1)·2^(N-1) + Σ a(i)·2^i, and likewise B. Multiplying out gives N²
partial-product bits a(i)·b(j) of weight 2^(i+j). Most of them add. The bits
where exactly one of the two factors is a sign bit have negative weight. The
sign-bit pair a(N-1)·b(N-1) has positive weight again.

An array of full adders can only add. The Baugh-Wooley method therefore
removes the subtractions with the identity

    -x·2^w = (1 - x)·2^w - 2^w = (~x)·2^w - 2^w

Each negative-weight bit is inverted. The leftover -2^w terms are all
constants, so their sum is folded into one constant row, taken modulo 2^(2N).
Every row of the array is then a plain positive number. In `baugh_wooley`:

1. the N x N AND gates form the partial-product bits, inverting those of
   negative weight;
2. a linear carry-save array adds the rows. Each row of full adders folds one
   partial-product row into a running (sum, carry) pair. The correction
   constant starts the pair;
3. one carry-propagate adder turns the last (sum, carry) pair into the
   2N-bit result.

For two signed operands the constant is 2^(2N-1) + 2^N: a 1 in column N and a
1 in column 2N-1. This is the textbook Baugh-Wooley form.

### Mixed signedness

`baugh_wooley` has two parameters, `A_SIGNED` and `B_SIGNED`. An operand
declared unsigned has no negative-weight top bit, so fewer bits are inverted
and the constant changes. `bw_pkg::bw_correction` derives the constant from
the rule above for any combination. For N = 4 the values are:

| A_SIGNED | B_SIGNED | inverted bits | constant (8 bits) |
|---|---|---|---|
| 1 | 1 | a3·b0..b2, a0..a2·b3 | `8'h90` (2^7 + 2^4) |
| 1 | 0 | a3·b0..b3 | `8'h88` (2^7 + 2^3) |
| 0 | 1 | a0..a3·b3 | `8'h88` |
| 0 | 0 | none | `8'h00` |

The source describes only the signed x signed array. The other variants are
this design's addition. The decomposition below needs them.

## Decomposition of a two's complement operand

This part is easy to get wrong. The 8-bit value splits as

    A = Ah·16 + Al,   Ah = a[7:4] read as signed (-8..7),
                      Al = a[3:0] read as unsigned (0..15)

Only the upper half carries the sign. The lower half is an ordinary unsigned
number. So the four sub-products have different signedness:

| unit | product | operands | range |
|---|---|---|---|
| `u_bw_hh` | Ah·Bh | signed x signed | -56..64 |
| `u_bw_hl` | Ah·Bl | signed x unsigned | -120..105 |
| `u_bw_lh` | Al·Bh | unsigned x signed | -120..105 |
| `u_bw_ll` | Al·Bl | unsigned x unsigned | 0..225 |

Every range fits in 8 bits, read as signed in the first three cases and as
unsigned in the last. Four signed x signed units would read a lower half such
as `1000` as -8 instead of 8, and the 8-bit product would be wrong for most
inputs. The source says the 4x4 units use the Baugh-Wooley method. It does not
say how the halves' signs are handled. The mixed-sign arrays are this design's
solution.

## The adder tree

The product is

    P = Ah·Bh·2^8 + (Ah·Bl + Al·Bh)·2^4 + Al·Bl     (mod 2^16)

`decomp_adder_tree` adds the terms on two levels:

- **Level 1.** The two cross products have the same weight. They are
  sign-extended to 9 bits and added.
- **Level 2.** Ah·Bh and Al·Bl do not overlap, since one covers bits 15..8 and
  the other bits 7..0. They are concatenated into one 16-bit word at no cost.
  The level-1 sum is sign-extended, shifted left by 4 and added to that word.

So only two carry-propagate adders follow the arrays: a 9-bit one and a 16-bit
one. Reading Ah·Bh as the upper byte of a 16-bit word is correct modulo 2^16,
because its own sign bit then lands on bit 15. The tree shape and the 4-column
offset of the cross products follow the source's decomposition figure. The
adders are plain `+` operators, because the source does not say how the
final-addition circuitry is built.

## Interfaces and timing

`bw_decomp_mult #(N = 8)`

| port | dir | width | meaning |
|---|---|---|---|
| `a` | in | N | multiplicand, two's complement |
| `b` | in | N | multiplier, two's complement |
| `p` | out | 2N | full-precision product, two's complement |

`baugh_wooley #(N = 4, A_SIGNED = 1, B_SIGNED = 1)` has ports `a[N-1:0]`,
`b[N-1:0]` and `o[2N-1:0]`. These names match the 4x4 unit of the source's RTL
view.

Nothing is clocked. There are no registers, no reset and no handshake. The
product is valid one propagation delay after the inputs change. With 8+8+16
ports, the top has the 32 I/O pins the source reports for its 8x8 design. The
4x4 unit alone has 16, as in the source's utilisation table.

## Parameters and other sizes

`N` must be even and at least 4; any other value stops elaboration with an
error. The top always uses four (N/2)x(N/2) Baugh-Wooley arrays. `N = 16` gives
the 16x16 structure "from 8x8 Baugh-Wooley multipliers". The source names it
as one of three 16x16 options, and `tb_bw_decomp_mult16` checks it. The other
two options are not provided: 4x4 units used directly, and a recursive split
whose 8x8 parts are themselves decomposed. `baugh_wooley` works for any N up
to 32. The limit comes from the 64-bit constant function in `bw_pkg`.

## Where this RTL departs from, or goes beyond, the source

- **Sub-multiplier signedness.** The signed/unsigned split and the mixed-sign
  arrays are this design's own (see above). The source is silent on them.
- **Adder structure.** The arrays use a linear carry-save scheme with one
  final adder. The tree uses two carry-propagate adders. The source says only
  "array addition" and "tree-like" combination.
- **Equation typo.** The source's expansion of the product sums its second
  term with the index of a(i) running up to N-1. That would count the
  a(N-1)·b(j) bits twice, with opposite signs. The correct range, up to N-2,
  is implemented.
- **Worked example.** The source's "+4 times -4 gives 0" example actually adds
  the two numbers (0100 + 1100 = 1_0000). The multiplier gives -16 (`8'hF0`)
  for these inputs, and the testbench checks that value.
- **Sequential variant not included.** The source also shows a generic
  sequential shift-and-add two's complement multiplier (partial-product and
  multiplier registers, a complementing mux and an adder whose carry-in is 1
  only in the last cycle). It is background taken from earlier work. The unit
  the source built is combinational, so that circuit is not part of this RTL.
- **Resource figures.** The source reports 13 LUTs for the multiplier. No
  complete 8x8 product fits in 13 six-input LUTs, so that number cannot be
  compared with this RTL. Likewise, FPGA timing is not reproduced here.

## Verification

Each testbench is self-checking. It computes the expected products with
integer arithmetic, independent of the RTL. It ends by printing
`TB_RESULT checks=<n> failures=<n>`, and a watchdog stops a run that hangs.

- `tb_baugh_wooley`: all 256 input pairs for each of the four 4x4
  signedness variants, the +4 x -4 example, and all 65,536 pairs of a signed
  8x8 array (66,561 checks).
- `tb_decomp_adder_tree`: sub-products worked out for all 65,536 8-bit
  operand pairs, plus 20,000 random 8-bit words on all four inputs, checked
  against the weighted-sum formula.
- `tb_bw_decomp_mult`: the top with default parameters over all 65,536 pairs.
  It also counts each operand sign combination, a negative cross-product sum,
  and a carry out of the low byte in the final adder. If any of these never
  occurs, it reports a failure.
- `tb_bw_decomp_mult16`: the N = 16 top, with 25 corner pairs and 100,000
  random pairs.

To run one with Verilator 5:

```
verilator --binary --timing -Irtl -y rtl +libext+.sv \
    rtl/bw_pkg.sv tb/tb_bw_decomp_mult.sv --top-module tb_bw_decomp_mult
./obj_dir/Vtb_bw_decomp_mult
```

Each run takes well under a second. All RTL lints clean with
`verilator --lint-only -Wall`.
