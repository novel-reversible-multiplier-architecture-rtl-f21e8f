# A reversible N x N multiplier from Fredkin and TSG gates

A reversible gate maps its input vector one-to-one onto its output vector, so
no information is lost as it computes. Such gates are of interest for
low-power charge-recovery CMOS, quantum and optical logic. This design is an
unsigned multiplier built only from two reversible gates:

* **Fredkin gates** form the partial products. With its third input held at 0,
  a Fredkin gate outputs the AND of its first two inputs. All N*N partial
  product bits therefore appear together, after one gate delay.
* **TSG gates** add them. A TSG is a 4-input, 4-output reversible gate. With one
  input tied to 0, a single TSG is a complete full adder. Chains of TSG full
  adders form parallel adders.

The partial products are summed as a binary tree. Adjacent partial products
are added pairwise. Each level halves their number, so the product is ready
after log2(N) adder levels. For the 4 x 4 case a hand-optimised netlist of 29
gates is used: 16 Fredkin and 13 TSG.

The architecture is the one proposed by H. Thapliyal and M. B. Srinivas in
"Novel Reversible Multiplier Architecture Using Reversible TSG Gate". The text
below notes each place where this RTL completes it or departs from it.

The RTL is purely combinational. It has no clock, no reset and no handshake.
Every reversible gate's *garbage* outputs are kept and brought out on a port.
A garbage output is one that no later gate and no primary output uses. Keeping
them makes the circuit's gate and garbage counts visible in simulation.

## The two gates

TSG gate (`tsg_gate`), inputs A B C D, outputs P Q R S:

    P = A
    Q = A'C' xor B'
    R = Q xor D
    S = Q.D xor (A.B xor C)

Tie C to 0 and Q becomes A xor B. Then R = A xor B xor D is the sum and
S = (A xor B).D xor A.B is the carry. So `tsg_full_adder` feeds (a, b, 0, cin)
into one TSG. It returns `sum` = R and `cout` = S, plus the garbage pair
{P, Q} = {a, a xor b}. This is one gate with two garbage outputs and one gate
delay. Reversible full adders built from other gates need three to five gates.

Fredkin gate (`fredkin_gate`), a controlled swap: P = A, Q = A'B + AC,
R = A'C + AB. When A = 1, B and C trade places. With inputs (x_i, y_j, 0),
R = x_i.y_j, and {x_i, x_i'.y_j} are garbage. The architecture takes this gate
as known and does not define it. This RTL uses the standard definition, which
matches the outputs x.y, x'.y and x that the gates are labelled with.

## Partial products

`pp_generator` holds an N x N array of Fredkin gates. Gate (i, j) gets x_i on
its control input, y_j on B and 0 on C, and drives `pp[j][i]`. Row j of `pp` is
therefore x when y_j = 1 and 0 otherwise. Every x and y line fans out to N
gates. Strict reversible design would insert copy gates for this fan-out.
These are not counted here, since the gate total of the 4 x 4 netlist does not
count them either.

## The 4 x 4 netlist (`rev_mult_4x4`)

This is the part that is hardest to follow. The adders are not grouped by
partial-product row. Each 4-bit adder takes two bits per column, spread over
the seven product columns:

| cell | column | A input | B input | carry in |
|---|---|---|---|---|
| R0 | 1 | x0y1 | x1y0 | 0 |
| R1 | 2 | x0y2 | x2y0 | R0 |
| R2 | 3 | x0y3 | x3y0 | R1 |
| R3 | 4 | 0 | x1y3 | R2 → R's carry is in column 5 |
| L0 | 2 | x1y1 | 0 | 0 |
| L1 | 3 | x1y2 | x2y1 | L0 |
| L2 | 4 | x3y1 | x2y2 | L1 |
| L3 | 5 | x2y3 | x3y2 | L2 → L's carry is in column 6 |
| M0..M3 | 2..5 | R1..R3 sums, R's carry | L0..L3 sums | 0, then ripple |
| F | 6 | x3y3 | L's carry | M's carry |

The products are then:

* P0 = x0y0, straight from a Fredkin gate.
* P1 is the sum of R0.
* P2..P5 are the sums of M0..M3, the level-2 adder.
* P6 and P7 are the sum and carry of F.

Level 1 is the R and L adders, and level 2 is the M adder. Every bit of weight
2^k is added only with other bits of weight 2^k, so the netlist is correct by
construction. An exhaustive test over all 256 operand pairs confirms this.
Each level-1 adder has one idle input: R3 has A = 0 and L0 has B = 0.

The cell inputs follow the published drawing. The wiring between the levels
was worked out from the column weights, because the drawing is hard to read
at that point. Which of a cell's two labelled operands goes to TSG input A is
also this design's choice. It changes only the garbage values, not the product.

Gate count: 16 + 4 + 4 + 4 + 1 = 29. This is the figure quoted for this
design. An earlier reversible array multiplier it was compared with needed 40
gates.

## The N x N tree (`rev_mult_tree`)

For N a power of two, level 0 is the N rows from `pp_generator`. At level l
the tree has N/2^l partial sums, each N + 2^l bits wide. Node k at level l
adds A = sum 2k and B = sum 2k+1 of the level below. B weighs h = 2^(l-1)
places more than A. The node works in three parts:

1. The low h bits of A are passed straight to the result.
2. An N-bit TSG parallel adder adds the next N bits of A to the low N bits of
   B. At level 1, A is a single N-bit row, so the adder's top A input is 0.
   Its carry is then the node's top bit, giving an N + 2 bit result.
3. From level 2 on, B has h further bits above the adder. A second chain of h
   TSG full adders adds the carry into them, with 0 as the second operand.
   The carry out of that chain can never be 1, because the node's sum fits in
   N + 2^l bits. It is kept as a garbage bit, and the testbench checks that it
   stays 0.

The level-1 structure is the plain "add two adjacent partial products with an
N-bit adder" scheme. The upper-bit chain of step 3 is this design's own
completion. The tree description does not say how bits above the N-bit adder
are handled at higher levels. Without the chain, the product is wrong.

The cost is N(N-1) + N(log2 N - 1)/2 TSG cells, against the N(N-1) the
general description estimates. For N = 4 that is 14 cells. This is one more
than the hand-made netlist, which saves a cell by merging x3y3 with the last
carries. `rev_multiplier` therefore uses the netlist for N = 4 and the tree
for every other N.

| N | Fredkin | TSG cells | garbage bits |
|---|---|---|---|
| 4 (netlist) | 16 | 13 | 58 |
| 4 (tree) | 16 | 14 | 61 |
| 8 | 64 | 64 | 259 |
| 16 | 256 | 264 | 1047 |

## Garbage port

`garbage` has width `rev_pkg::mult_garbage_bits(N)`. The partial-product
gates come first: `[2*(j*N+i) +: 2]` = {x_i, x_i'.y_j}. The adder cells follow,
two bits each, {a, a xor b}.

* In the 4 x 4 netlist, bits [39:32] belong to R, [47:40] to L, [55:48] to M
  and [57:56] to F.
* In the tree, the nodes follow level by level, as described in
  `rev_mult_tree.sv`.

Several garbage bits are, by their nature, copies of inputs or constants.
Synthesis reports them as idle outputs. A user who only wants the product can
leave the port open.

## Delay

The product settles after one Fredkin delay plus the TSG ripple through the
adder levels. Counted adder by adder, the 4 x 4 netlist has 4 + 4 + 1 TSG
stages. The level-2 adder starts while level 1 is still rippling, however.
Its cell M0 needs R1's sum, which is ready after 2 TSG delays. The longest
real path is therefore 1 Fredkin delay plus 7 TSG delays, ending at P7. In the
tree, level 1 costs N TSG delays and level l up to N + 2^(l-1).

The commonly quoted bound is d + N.d'.log2 N, with d the Fredkin delay and d'
the TSG delay. Faster reversible parallel adders would shorten this. The
`rev_parallel_adder` ports were kept simple so that such an adder can be
swapped in. Nothing in the RTL models delay: simulation is zero-delay and
functional.

## Idle-adder flags (`adder_shutoff_ctrl`)

An adder whose inputs are all zero does no useful work. The idea is to use
the operands' leading-zero counts to find such adders and switch them off to
save power. This RTL builds the decision but not the switch.

`adder_shutoff_ctrl` counts the leading zeros of x and y with two `lzc`
instances. The counts give the effective widths wx = N - lzc(x) and
wy = N - lzc(y). A partial product x_i.y_j can only be 1 when i < wx and
j < wy. An adder is flagged idle (`adder_on` bit = 0) when every partial
product that reaches it, directly or through an earlier adder, is ruled out
this way.

* For N = 4 the four flags are, in bit order, the right level-1 adder, the
  left level-1 adder, the level-2 adder and the column-6 cell.
* For the tree there is one flag per node, N - 1 in all. Node k of level l
  is fed by rows k.2^l to (k+1).2^l - 1, so it is busy exactly when x != 0
  and k.2^l < wy.

For example, the product 1 x 1 leaves all four 4 x 4 adders idle. In the
8 x 8 tree, any x times y = 1 keeps only the three nodes on the path from row
0 to the root busy.

This rule for what counts as "not in use" is this design's own. The counts
and flags are top-level outputs (`lzc_x`, `lzc_y`, `adder_on`). The datapath
itself is never gated. Switching a combinational adder off would not change
the product, and a power switch is outside what RTL describes. The top-level
testbench checks that an adder flagged idle really sees only zeros on every
input.

## What is not implemented

* **Level switch-off.** A control circuit could power down each adder level
  once it has finished. It is suggested as a further optimisation and claimed
  as a power-saving feature. A combinational multiplier has no event marking a
  level as finished, and power gating has no logic function. The idea is not
  specified beyond its purpose.
* **The power switches for idle adders.** `adder_on` says which adders may be
  switched off; the switches themselves are not modelled.
* Operands are unsigned. Signed multiplication is not addressed.

## Files

| file | contents |
|---|---|
| `rtl/rev_pkg.sv` | gate and garbage counts, tree offsets |
| `rtl/tsg_gate.sv` | TSG gate |
| `rtl/tsg_full_adder.sv` | one-TSG full adder |
| `rtl/fredkin_gate.sv` | Fredkin gate |
| `rtl/pp_generator.sv` | N x N Fredkin partial-product array |
| `rtl/rev_parallel_adder.sv` | W-bit ripple adder of TSG full adders |
| `rtl/rev_mult_4x4.sv` | 29-gate 4 x 4 netlist |
| `rtl/rev_mult_tree.sv` | general N x N tree |
| `rtl/lzc.sv` | leading-zero counter |
| `rtl/adder_shutoff_ctrl.sv` | idle-adder flags from the leading-zero counts |
| `rtl/rev_multiplier.sv` | top level, parameter N (default 4) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_rev_multiplier_full.sv` | the top at its default size only, exhaustive |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and ends the run. For
example, the end-to-end test:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_rev_multiplier \
        rtl/rev_pkg.sv tb/tb_rev_multiplier.sv -o sim && ./obj_dir/sim

Any other testbench works the same way with its own name in place of
`tb_rev_multiplier`. `-Irtl` lets verilator find the submodules by file name.

## What has been verified

* The TSG and Fredkin gates are checked over all inputs. This includes a check
  that each is a bijection, i.e. truly reversible.
* The full adder, the parallel adder (W = 4 exhaustively, W = 8 at random) and
  the partial-product array are checked against integer arithmetic.
* The 4 x 4 netlist is checked over all 256 operand pairs.
* The tree is checked exhaustively for N = 2, 4 and 8, and over random and
  corner operands for N = 16 and 32.
* The top-level test runs the default 4 x 4 instance and the 8 x 8 and 16 x 16
  tree instances. It counts the carry events of every carry path in the
  netlist: both level-1 carries, the level-2 carry and the carry into P7. It
  fails if any of them never occurs. It also checks the idle-adder flags and
  requires each 4 x 4 adder to be flagged idle at least once.
* The idle-adder flags are checked over every operand pair for N = 4 and 8,
  against a model that derives them from the widest operands with the same
  leading-zero counts.
* Each testbench has been shown to fail on a deliberately broken copy of its
  module.
