# A carry skip adder built only from Peres gates

A reversible gate maps each input pattern to a different output pattern, so
no information is lost, and in principle no energy has to be dissipated.
Reversible circuits have their own rules: as many outputs as inputs, no
fan-out without a copying gate, no feedback. Constant inputs and unused
("garbage") outputs are the price of making an irreversible function such as
addition fit these rules, and a good circuit keeps both, and the gate count,
small.

This RTL describes an adder built from one kind of reversible gate, the 3x3
**Peres gate**:

    (A, B, C)  ->  (P = A,  Q = A xor B,  R = AB xor C)

Two Peres gates make a full adder with one constant input and two garbage
outputs. Chains of these full adders are grouped into **carry skip blocks**,
and the blocks are chained into an N-bit **carry skip adder** whose block
sizes grow towards the middle of the word and shrink again (variable block
carry skip). Every logic function in the adder is a Peres gate. The Verilog
describes each gate as its Boolean function. Nothing here models the gates'
quantum realization, so the RTL synthesises to ordinary logic. What it keeps
is the structure: which gate feeds which, the gate count, and the depth in
gate levels.

The design is purely combinational. There is no clock and no reset.

## The Peres gate and what it is used for (`peres_gate`, `peres_or`)

Tying one line of a Peres gate to a constant gives the classical gates:

| inputs        | Q           | R            | used for                    |
|---------------|-------------|--------------|-----------------------------|
| (A, B, 0)     | A xor B     | A and B      | full adder, AND tree, skip  |
| (A, B, 1)     | A xor B     | A nand B     |                             |
| (1, B, C)     | not B       | B xor C      |                             |

OR takes two gates (`peres_or`). The first gate gets (A, B, 0) and gives
A xor B and AB. The second gets (A xor B, 1, AB) and gives XNOR on Q and
(A xor B) xor AB = A or B on R. The Peres gate is the three-line member of a
wider family of k x k gates. That family passes k-2 lines through and XORs
each of the last two lines with an arbitrary function of the lines above it.
Because those functions are left open, only the Peres member is built here.

## The Peres full adder (`peres_full_adder`)

    gate 1: (A, B, 0)        -> G1 = A,        A xor B,  AB
    gate 2: (A xor B, Cin, AB) -> G2 = A xor B,  Sum,      Cout = (A xor B)Cin xor AB

This takes two gates, one constant (the 0), and has two garbage outputs
(G1, G2). G2 is the bit's propagate signal `P_i = A_i xor B_i`, so the carry
skip logic gets it for free. Every output is two gate levels from A and B.
Sum and Cout are one gate level from Cin, so a carry ripples at one gate
per bit.

## The carry skip block (`csa_block`, `peres_and_tree`)

A B-bit block is a ripple chain of B Peres full adders, plus logic that
tells early whether the block's carry in will come straight out again:

* **Ripple.** Full adder i takes the carry of full adder i-1. The carry out
  of the top adder is the ripple carry `c_rip`.
* **Block propagate.** The B propagate bits go into a B-input AND made of
  B-1 Peres gates (third line tied to 0). The gates are paired level by
  level, so the tree is ceil(log2 B) gates deep. For B = 4 that means
  (P0,P1), (P2,P3), then one gate for P. An odd signal left over at a
  level goes up unchanged.
* **Skip.** If P = 1, every bit of the block propagates, so the block's
  carry out equals its carry in. One more Peres gate, with a 0 on its
  third line, forms the skip term `P and Cin`.
* **Merge.** `Cout = c_rip or (P and Cin)`, the usual carry skip merge.
  The OR is made from two Peres gates (`peres_or`).

Logically, `P and Cin` implies `c_rip`, so Cout always equals `c_rip`. The
skip path changes only how soon Cout is valid. It never changes its
value. This is true of every carry skip adder. It is also why a test can
see the skip mechanism only through the block propagate output or in a
simulation with gate delays, never through the sum.

### Where this block departs from the published one

The published block counts **one** Peres gate for the merge (3B gates per
block: 2B for the adders, B-1 for the AND, 1 for the merge). Given P, Cin and
`c_rip`, one Peres gate can form `P·Cin xor c_rip`, but not the OR. That XOR
is 0 when a block propagates a carry of 1: P = 1 and Cin = 1 force
`c_rip = 1`, so the XOR gives 0 where the carry should be 1. No other
assignment of the three signals to one Peres gate gives the right carry
either. This block therefore uses the two-gate OR:

| quantity (gate levels)                | published  | this RTL        |
|---------------------------------------|------------|-----------------|
| Peres gates per B-bit block           | 3B         | 3B + 2          |
| skip path, addends to Cout, eq. (2)   | ceil(log2 B) + 3 | ceil(log2 B) + 5 |
| Cin to Cout when P = 1                | 1          | 3               |
| ripple path, addends to Cout, eq. (1) | B + 1      | B + 3           |

(The published text also describes the ripple path as 2 gates to C1, one per
further bit, and one merge gate, which is B + 2 rather than the B + 1 of its
equation.) The broken copy used to show that the block test can fail is that
single-gate merge. It gives the wrong carry out in every case where the
skip is taken.

## Variable block sizes (`carry_skip_adder`)

A carry's worst path ripples through the first block, skips every middle
block and ripples through the last block. Short end blocks shorten the two
ripples. Long middle blocks mean fewer skips. With t blocks (t even) and
end blocks b bits wide, the widths from the least significant block up are

    b, b+1, ..., b+t/2-1, b+t/2-1, ..., b+1, b

so N = t·b + t²/4 − t/2, that is **b = N/t − t/4 + 1/2**. (In print this
relation appears with N/2 in place of N/t. N/t is the one the widths give,
and the one the later delay formulas need.) With the published estimate
ceil(log2 k) ≈ k/2, the worst-case delay is about 9t/4 − 5/2 + 3N/t + N/2.
That is smallest at t ≈ 1.15·sqrt(N), where it is N/2 + sqrt(3N) − 5/2.
For comparison, a fixed block size B (t = N/B blocks of B bits) is best at
B ≈ 1.73·sqrt(N), with delay N/2 + 3.47·sqrt(N) − 4.

Parameters of `carry_skip_adder`:

| parameter  | default | meaning |
|------------|---------|---------|
| `VARIABLE` | 1       | 1: variable layout above; 0: `T` blocks of `B` bits (fixed layout) |
| `B`        | 4       | width of the first and last block (fixed layout: of every block) |
| `T`        | 6       | number of blocks; must be even for the variable layout |
| `GATE_DELAY` | 0     | simulation only: delay of every Peres gate (see below) |
| `N`        | 30      | localparam, the adder width derived from `VARIABLE`, `B` and `T` |

The published analysis gives no particular width, so the default is this
design's choice. B = 4 makes the end blocks the 4-bit block of the reference
block diagram. T = 6 is the optimum number of blocks for N = 30. The blocks
are 4, 5, 6, 6, 5, 4. Not every N has an exact variable layout: 32 bits has
none with more than two blocks. That is why the width is derived from B
and T rather than set directly.

Ports: `x`, `y` (N bits) and `cin` in. `s` (N bits) and `cout` out.
`blk_p[k]` and `blk_cout[k]` expose block k's propagate and carry out. They
exist so a test can see the skip mechanism. In the published design they
are internal wires.

`csa_pkg` holds the layout functions (`blk_width`, `blk_lsb`,
`total_width`) and integer versions of the published delay equations
(`d_ripple`, `d_skip`, `t_worst`). Those use the exact ceil(log2 B), not
the k/2 estimate. They describe the published single-gate merge. For this
RTL, add 2 to every ripple and skip term.

## Delays in gate levels

Every module has a `GATE_DELAY` parameter, 0 by default. When it is
non-zero, each Peres gate delays its outputs by that many time units.
Synthesis ignores the parameter. With `GATE_DELAY = 1`, the time a signal
takes to settle after its inputs change is its path length in gate levels.
`tb_gate_delay` measures these path lengths:

| path                                         | measured |
|----------------------------------------------|----------|
| full adder, addends to Cout / Cin to Sum, Cout | 2 / 1  |
| 4-bit block, addends to ripple carry `c_rip` | 5 (= B + 1) |
| 4-bit / 6-bit block, addends to Cout by ripple | 7 / 9 (B + 3) |
| 4-bit / 6-bit block, addends to P            | 4 / 5 (2 + ceil(log2 B)) |
| 4-bit / 6-bit block, addends to Cout by skip | 7 / 8 (ceil(log2 B) + 5) |
| block, Cin to Cout with P = 1                | 3 |
| 4-bit block, Cin to `c_rip`                  | 4 |
| 30-bit default adder, worst case to the top sum bit | 23 |

The worst case for the whole adder is a carry generated in bit 0 that must
reach the top sum bit. It ripples out of the first block (4 + 3). It then
crosses four middle blocks at 3 levels each, because their propagate
signals are already settled. Last, it ripples up the last block to its
top sum bit (4). The published delay estimate, summed with exact
ceil(log2 B) for this layout, gives 34 levels. That estimate charges every
middle block its full addend-to-Cout skip delay, although the carry only
has to cross the block from Cin.

## Files

| file | contents |
|------|----------|
| `rtl/csa_pkg.sv` | block layout and delay-equation functions |
| `rtl/peres_gate.sv` | the Peres gate |
| `rtl/peres_or.sv` | XNOR/OR from two Peres gates |
| `rtl/peres_full_adder.sv` | two-gate full adder |
| `rtl/peres_and_tree.sv` | W-input AND from W-1 Peres gates |
| `rtl/csa_block.sv` | B-bit carry skip block |
| `rtl/carry_skip_adder.sv` | top: N-bit variable (or fixed) block carry skip adder |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_table3_sizes` and `tb_gate_delay` |
| `tb/fixed_csa_harness.sv` | driver/checker for one fixed-block adder, used by `tb_table3_sizes` |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each
also has a watchdog that counts a failure if the run hangs. To build and
run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/csa_pkg.sv \
        tb/tb_carry_skip_adder.sv --top-module tb_carry_skip_adder
    ./obj_dir/Vtb_carry_skip_adder

Replace the testbench name to run another one.

What the testbenches check. Each result is compared with the integer sum
`x + y + cin` computed in the testbench.

* `tb_peres_gate`: all 8 inputs against a hand-written truth table, that the
  gate is a bijection, and the AND/NAND/NOT uses.
* `tb_peres_or`, `tb_peres_full_adder`: exhaustive.
* `tb_peres_and_tree`: widths 1 to 9, exhaustive.
* `tb_csa_block`: B = 4 exhaustive, B = 5 and 7 random with forced full
  propagation. It also checks the block propagate, the ripple carry and the
  gate count 3B + 2.
* `tb_carry_skip_adder`: the 30-bit default adder, 20 000 random and
  constructed vectors. It also checks each block's propagate and carry out,
  and counts each mechanism: a block skipping a carry, generating one,
  absorbing one, a carry travelling from bit 0 out of the top, and overflow.
  It fails if any of these never happens.
* `tb_table3_sizes`: fixed-block adders of 4 to 4096 bits. The block size is
  the power of two nearest 1.73·sqrt(N). Each size gets random operands and
  operands whose carry crosses every block. The test also prints each size's
  worst-case delay in gate levels from the published equation.
* `tb_gate_delay`: the unit-delay measurements listed above, each compared
  with the value the structure should give.

## Limits

* Gate delay is modelled only as a uniform unit delay per Peres gate, and
  only in simulation. Fan-out, wiring and the differing cost of real gate
  realizations are not modelled.
* The quantum cost figures (4 per Peres gate, 8 per full adder) belong to
  the gate's quantum realization. Nothing here models it.
* Reversibility holds gate by gate. The RTL leaves garbage outputs
  unconnected, as the published circuits do. Where a signal is used twice
  (for example the block carry in, used by the first full adder and by the
  skip gate), a strictly reversible circuit would need a copying (Feynman)
  gate. Neither the published block nor this RTL counts one.
