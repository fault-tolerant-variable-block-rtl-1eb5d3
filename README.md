# Fault tolerant variable block carry skip adder from parity preserving reversible gates

This is a binary adder built only from *reversible* gates. A reversible gate
has as many outputs as inputs, and its outputs determine its inputs. Every gate
used here is also *parity preserving*: the XOR of a gate's outputs equals the
XOR of its inputs. A circuit built only from such gates, with no fan-out, keeps
that property as a whole:

    parity(x, y, cin, constant inputs) == parity(s, cout, garbage outputs)

A fault that flips any single internal line therefore flips the parity of the
outputs. One parity comparison at the edge of the adder detects it, and no
checking is needed inside.

The adder is a carry skip adder. The operand bits are split into blocks. Each
block ripples its carry through its full adders. It also works out whether
every one of its bits propagates, and in that case it passes its carry-in
straight to its carry-out. In the *variable block* plan the blocks are narrow
at both ends of the word and wider in the middle. A carry generated near the
bottom or absorbed near the top then has a short ripple, and the middle blocks
mostly skip.

The RTL is plain combinational logic: no clock and no reset. Each reversible
gate is one small module whose outputs are the gate's equations. Garbage lines
are brought out as ports so that the parity of the whole design can be checked.

## The gates

| module | lines | outputs | role here |
|---|---|---|---|
| `f2g` (Feynman double) | 3 | P=A, Q=A^B, R=A^C | with B=C=0, makes fault tolerant copies of a block's carry-in |
| `frg` (Fredkin) | 3 | P=A, Q=A'B^AC, R=A'C^AB | swaps B and C when A=1. Used as a 2-input AND (C=0, output R) and as the skip multiplexer |
| `nft` (new fault tolerant) | 3 | P=A^B, Q=B'C^AC', R=BC^AC' | with A=0, output R is B·C: the AND of the NFT skip variant |
| `mig` (modified IG) | 4 | P=A, Q=A^B, R=AB^C, S=AB'^D | two of them make a full adder |

The MIG is the IG gate with its fourth output BD ^ B'(A^D) rewritten into the
equivalent AB' ^ D, which costs less logic.

**NFT equation.** This gate is often printed with Q = BC' ^ AC'. Taken
literally, that form is neither reversible nor parity preserving: inputs 000
and 001 both give 000. Keeping P and R, the only Q that preserves parity is
B'C ^ AC', and with it the gate is a bijection, so that form is used here. The
AND output R is the same in both forms, so the adder's function does not
depend on this choice. Only two garbage lines per NFT do.

## Fault tolerant full adder (`ftfa`)

Two MIGs. The first takes (a, b, 0, 0) and gives a, a^b, ab and the garbage line
g1 = ab'. The second takes (a^b, cin, ab, a) and gives:

* g2 = a^b. This garbage line is the bit *propagate* signal, and the skip logic
  uses it.
* sum = a^b^cin
* cout = (a^b)·cin ^ ab
* g3 = (a^b)·cin' ^ a

So the full adder has two constant inputs and three garbage outputs. On the
carry path it costs one MIG per bit: cin enters only the second MIG. The
constant inputs are ports (`k1`, `k2`), so all 32 input patterns can be shown
to be a bijection that keeps parity. Wherever the adder is used they are tied
to 0.

`ftrca` chains N of these into a ripple carry adder. It exports each bit's
propagate signal and its g1 and g3 lines.

## Carry skip block (`ftcsa_block`, `csl`)

A B-bit block (B = 4 in the two published drawings) is built as follows:

1. An `f2g` with two constant zeros copies the carry-in. One copy feeds the
   first full adder, one feeds the skip multiplexer, and the third is a garbage
   line. A reversible circuit may not fan a signal out, so the copy gate takes
   the place of a fan-out.
2. B `ftfa`s ripple the carry to c_B.
3. The carry skip logic (`csl`) ANDs the B propagate lines into the block
   propagate P. It uses a balanced tree of B-1 reversible two-input ANDs,
   ceil(log2 B) levels deep. A Fredkin gate with A=P, B=c_B, C=c0 then gives
   cout = P ? c0 : c_B on its Q output.

When P = 1 the rippled carry c_B equals c0 anyway, so the skip never changes
the sum. It only shortens the path the carry takes. `KIND` chooses the AND
gate:

* `CSL_NFT` (default): NFTs with A = 0.
* `CSL_FRG`: Fredkins with C = 0.

For B = 4 the tree is AND(p0,p1), AND(p2,p3) and the AND of those two. That
makes 13 gates: 8 MIG, 3 AND gates and 2 more (the F2G and the skip
multiplexer). For other B the tree is laid out like a heap. Node i is the AND
of nodes 2i and 2i+1, and the propagates are nodes B to 2B-1.

Line counts for B = 4:

* Inputs: 8 operand bits, the carry-in and 13 constants (8 in the full adders,
  2 at the F2G and 3 at the AND gates), 22 in all.
* Outputs: 4 sums, the carry-out and 17 garbage lines, also 22 in all.

In general a block has 4B+1 garbage lines. The block's garbage port is ordered
as follows:

| bits | content |
|---|---|
| `[0]` | F2G Q output (a copy of the carry-in) |
| `[B:1]` | g1 of each bit |
| `[2B:B+1]` | g3 of each bit |
| `[4B:2B+1]` | skip logic: {Q,P} of each AND node, then {R,P} of the multiplexer |

The published drawings also show a constant 0 going into the skip Fredkin gate,
and count 14 constant inputs for the 4-bit block. A Fredkin gate has only three
inputs, and those are already P, c_B and c0. With 13 constants the block's
input and output line counts match (22 each), as a reversible circuit requires,
so 13 is used here.

## The whole adder (`vbcsl`, top)

`vbcsl` chains blocks carry-out to carry-in. Block 0 holds the least
significant bits. The `PLAN` parameter chooses how the word is cut:

* **`PLAN_VARIABLE`** (default): T blocks (T even) of widths
  b, b+1, …, b+T/2−1, b+T/2−1, …, b+1, b. The widths must add up to N, which
  gives **b = N/T − T/4 + 1/2**. Only (N, T) pairs for which b is a whole
  number ≥ 1 are accepted, and elaboration stops with an error otherwise.
  Examples: N=16,T=2 → 8,8; N=22,T=4 → 5,6,6,5; N=12,T=6 → 1,2,3,3,2,1. When N
  is a power of two, T=2 is the only possibility. A variant with unequal steps
  would lift this limit, but it is not provided.
* **`PLAN_FIXED`**: N/BFIX blocks of BFIX bits. BFIX must divide N.

Defaults are N=16, T=2 and BFIX=8. The delay model below gives an optimum block
size of √(4N) = 8 for 16 bits. For the variable plan it gives an optimum block
count of 2·√N/√15 ≈ 2.07, which becomes the even T=2. Both plans therefore give
the same two 8-bit blocks at the default size.

The `garbage` port is 4N + (number of blocks) bits wide. Block j's lines start
at bit 4·(lowest bit of block j) + j.

The adder's only outputs are the sum, the carry-out and the garbage lines. To
use the fault detection, compare `^{x, y, cin}` with `^{s, cout, garbage}`.
A single wrong line anywhere inside always makes them differ (an even number
of wrong lines can cancel). The checker
itself is not part of this RTL.

## Delay: the model and what the RTL measures

Delay is counted in reversible gates along a path. The model the design was
sized with is:

* (1) ripple through a B-bit block: d_ripple(B) = B + 3
* (2) skip over a B-bit block: d_skip(B) = ⌈log2 B⌉ + 4
* (3) fixed blocks: T_fixed = 2·d_ripple(B) + (N/B − 2)·d_skip(B), which is
  about N/2 + 4√N − 2 at B = √(4N)
* (9) variable blocks: T_variable = 2·d_ripple(b) plus d_skip of every middle
  block, which is about N/2 + √15·√N − 3/2 at the optimum T

`vbcsl_pkg` has these as functions (`d_ripple`, `d_skip`, `t_fixed`,
`t_variable`). Every gate module has a `GATE_DELAY` parameter (default 0).
Setting it to 1 gives each gate one time unit of delay in simulation, so the
testbenches can measure real paths:

| path | measured (gates) | model |
|---|---|---|
| 4-bit block, operands → cout (ripple) | 6 = B+2 | 7 |
| 4-bit block, cin → cout, all bits propagating | 2 | 6 |
| N=22, T=4: carry generated in bit 0, rippled to the top sum bit | 17 = (b+2)+2(T−2)+(b+1) | 30 |
| fixed plan, N = 2/4/8/16/32/64 with B = 2/4/4/8/8/16 | 3 / 5 / 11 / 19 / 23 / 39 | 5 / 8 / 14 / 22 / 36 / 54 |

The model counts one gate more than the drawn structure on the ripple path:
two MIGs to c1, one per further bit, then the Fredkin gate, which is B+2. It
also charges the whole propagate tree to every skipped block. But in a middle
block the propagate signals are ready long before the carry arrives, and the
carry only passes the copy gate and the multiplexer. The model is therefore an
upper bound, and the testbenches check that it is one. Unit gate delay says
nothing about the speed of any particular technology.

## Files

* `rtl/vbcsl_pkg.sv`: enums `csl_kind_e` and `block_plan_e`, the block-plan
  arithmetic and the delay-model functions.
* `rtl/f2g.sv`, `frg.sv`, `nft.sv`, `mig.sv`: the gates.
* `rtl/ftfa.sv`, `ftrca.sv`, `csl.sv`, `ftcsa_block.sv`: the full adder, the
  ripple chain, the skip logic and the block.
* `rtl/vbcsl.sv`: the top level.
* `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.
  * Gates and the full adder: exhaustive truth table, reversibility and parity.
  * Ripple chain, skip logic and block: exhaustive or random sums against `+`,
    and parity. Both skip variants and several widths.
  * `tb_vbcsl`: six adders, covering both plans and both variants, one of
    them with unit gate delays. It checks
    sums and parity over 20,000 random vectors, and counts skips and
    overflows. It injects 400 single-line faults with `force` and requires
    every one to show as a parity mismatch. It also measures the worst path.
  * `tb_vbcsl_full`: the top at its default parameters with 200,000 vectors.
  * `tb_vbcsl_sizes`: measures the worst-case delay against the adder size.

Simulating one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/vbcsl_pkg.sv tb/tb_vbcsl.sv --top-module tb_vbcsl
./obj_dir/Vtb_vbcsl
```

`--timing` is needed because the testbenches use delays. Every module also
lints cleanly with `verilator --lint-only -Wall`.

## Where this RTL departs from, or adds to, the published design

* The NFT's Q output uses the parity preserving form (see *The gates*).
* The skip Fredkin gate has three inputs, so there are 13 constants per 4-bit
  block, not 14.
* Pin assignments that the drawings leave open are chosen here. Each choice is
  the only one that yields the intended function: the inner lines of the full
  adder, the constant pin of each AND, and the multiplexer's pins.
* The heap layout of the AND tree for B ≠ 4, the order of the garbage lines,
  the `PLAN_FIXED` option and `GATE_DELAY` are this design's own.
* Sizes where the block-width formula gives a fraction are rejected, not
  rounded.
* Widths are limited only by elaboration. The largest unit-delay model
  simulated is 64 bits: the C++ build of larger unit-delay models takes
  minutes. The zero-delay adders were simulated up to 22 bits.
