# IGEF adder: a carry tree shaped by the arrival times of the operand bits

Most fast adders (carry-lookahead, conditional-sum, parallel-prefix) assume
that every operand bit arrives at the same moment. Inside a larger datapath
that is rarely true. A multiplier's final adder, for example, gets its middle
bits last. The *generalized earliest-first* (GEF) idea builds the carry tree
around the arrival times instead. Bits that are ready early are merged first,
into block terms or straight into carries, and late bits are merged only at
the top of the tree, so they pass through as few operators as possible. The
*improved* variant (IGEF) used here drops the sorting steps of the original
GEF procedure. At every time step it takes whatever is ready, merges
neighbouring terms, and forms a carry from the least significant end as soon
as it can.

This RTL is a parameterised, purely combinational N-bit adder,
`{cout, s} = a + b`. Its carry tree is worked out during elaboration by
running the IGEF procedure on a delay profile `DP` (the arrival time of each
bit, in operator delays). The defaults, nine bits all arriving at time 0,
give the tree drawn in Fig. 2(b) of *An Improved GEF Fast Addition Algorithm*
(Rahaman, Hossain, Hasan, Hashem). With the paper's twelve-bit profile
(Table 2) the same code builds that example, with the same carry times.

## Terms and the one operator

For each bit, `igef_pgr` forms

* `g_i = a_i & b_i` (generate),
* `r_i = a_i | b_i` (carry transmit), and
* `p_i = a_i ^ b_i` (propagate, used only for the sum).

A *term* is the `(G, R)` pair of a block of adjacent bits. Two terms, `lo`
below `hi`, merge with the group operator (written ∇, "nabla"):

    (G_lo, R_lo) ∇ (G_hi, R_hi) = (G_hi | R_hi & G_lo,  R_lo & R_hi)

A term that starts at bit 0 is a carry: its `G` is the carry out of its top
bit. The term of bit 0 on its own is the carry `c_0 = g_0`. There is no
carry input.

Each *circle* of the tree (`igef_op3`) merges up to three adjacent terms as
`(lo ∇ mid) ∇ hi`, a cascade of two operators. A two-term circle ties `hi` to
the identity `(g=0, r=1)`. For timing, one circle counts as one unit,
whether it has two inputs or three. This is the unit in which `DP` and all
the times below are given.

The sums are `s_0 = p_0` and `s_i = p_i ^ c_(i-1)`, with `cout = c_(N-1)`
(`igef_sum`).

## How the tree is built (igef_carry_net)

This is the core of the design. The constant function `build_plan()` runs
the following during elaboration, and generate loops then instantiate one
`igef_op3` per entry of the resulting node table.

**1. Spine.** Start with one term per bit, bit *i* ready at time `DP[i]`.
For t = 0, 1, 2, …:

* A term is *ready* if its time is ≤ t. A ready term that found no partner
  earlier stays ready.
* Take each maximal run of adjacent ready terms and cut it, from its LSB end,
  into groups of at most three.
* Each group of two or three terms becomes one circle. The new term is ready
  at max(input times) + 1.
* A group of one waits.
* A new term that starts at bit 0 is a carry.

Stop when one term, the carry out, covers all N bits. The spine gives the
carries on the critical path. For nine simultaneous bits these are C2 (after
level 1) and C8 (after level 2), the structure of Fig. 2(a).

**2. Remaining carries.** Every sum bit needs its own carry, so each missing
`c_i` is added afterwards. Take the first spine circle above *i*. Its inputs
are the carry `c_k` just below *i* and one or two blocks. `c_i` merges `c_k`
with:

* the blocks that lie wholly below *i*, and
* the prefix, up to *i*, of the block that holds *i*.

That prefix is built from the block's own sub-blocks, going down the tree.
So it is ready no later than the block itself, and the missing carries never
come later than the spine carry above them. For nine bits this reproduces
Fig. 2(b) circle for circle:

* C1 = c0 ∇ b1
* C3 = C2 ∇ b3
* C4 = C2 ∇ (b3 ∇ b4)
* C5 = C2 ∇ B[3..5]
* C6 = C2 ∇ B[3..5] ∇ b6
* C7 = C2 ∇ B[3..5] ∇ (b6 ∇ b7)

All of these are at level 2 or below.

**Worked example (Table 2 profile, N = 12, DP = 0,1,2,2,3,3,4,5,4,3,2,1).**

| t | merges made at this step | new term, ready at |
|---|---|---|
| 0 | bit 0 alone: waits | |
| 1 | c0 + b1 | c1 @ 2 |
| 2 | c1 + b2 + b3; b10 + b11 | c3 @ 3, B[10..11] @ 3 |
| 3 | c3 + b4 + b5; b9 + B[10..11] | c5 @ 4, B[9..11] @ 4 |
| 4 | c5 + b6; b8 + B[9..11] (b7 not ready) | c6 @ 5, B[8..11] @ 5 |
| 5 | c6 + b7 + B[8..11] | c11 @ 6 |

The filled-in carries are:

* c2, c4 at 3 and 4
* c7 = c6 ∇ b7, at 6
* c8 = c6 ∇ b7 ∇ b8, at 6
* c9 and c10, which reuse prefixes of B[8..11], at 6

The whole tree has 17 circles and a carry depth of 6.
Bit 7, the last to arrive (at 5), passes through one circle only.

The function also records each carry's time (`PLAN.ctm[i]`) and the latest
one (`CARRY_DEPTH`). The testbenches read these through hierarchical
references to compare them with the paper's numbers.

## Files

| file | role |
|---|---|
| `rtl/igef_pkg.sv` | `gr_t` (g, r) struct, identity constant, ∇ functions |
| `rtl/igef_pgr.sv` | per-bit p, g, r |
| `rtl/igef_op3.sv` | one circle: up to three terms merged |
| `rtl/igef_carry_net.sv` | elaboration-time IGEF procedure and the generated tree |
| `rtl/igef_sum.sv` | sum XORs and carry out |
| `rtl/igef_adder.sv` | top: `a`, `b` in; `s`, `cout` out |

Parameters of `igef_adder`:

* `N` (default 9), which must be at least 2;
* `DP[N]` (default all 0), as unsigned integers in operator delays.

The tree can hold up to `N*N+1` circles. If the procedure does not finish,
elaboration stops with an error.

## Simulating

Every testbench prints `TB_RESULT checks=… failures=…` and stops itself.
Each has a watchdog. For example:

    verilator --binary --timing -Irtl rtl/igef_pkg.sv tb/tb_igef_adder.sv --top-module tb_igef_adder
    ./obj_dir/Vtb_igef_adder

(`-Irtl` lets verilator find the remaining modules by name; add `-Itb` for
`tb_igef_profiles`, whose cases live in their own file.)

| testbench | what it checks |
|---|---|
| `tb_igef_pgr` | p, g, r against a bit-by-bit reference |
| `tb_igef_op3` | all 64 input combinations against the sum-of-products form of a 3-bit block |
| `tb_igef_sum` | the sum XORs and the carry out |
| `tb_igef_carry_net` | every carry against integer addition, for the 9-bit tree and the Table 2 tree; the elaborated carry times against those printed in Fig. 2(b) and Table 2 |
| `tb_igef_adder` | end to end, both examples; counts each mechanism and fails if one never occurs (see below) |
| `tb_igef_adder_full` | default adder, untouched parameters, all 2^18 operand pairs |
| `tb_igef_profiles` | 20 further trees: 2, 5, 16, 27 and 32 bits under ramp, hump, valley and scattered profiles (built by `tb_igef_profile_case`); checks the sums and that no carry is earlier than its inputs allow or later than the carry out |

The mechanisms `tb_igef_adder` counts are three-term circles, two-term
circles, blocks merged away from the LSB, early terms waiting for a late
neighbour, and carries that ripple the whole word.

All the testbenches run in well under a second.

## Where this departs from the paper or fills a gap

* **A hardware description of the procedure.** The paper states the
  procedure as an algorithm working on two arrays, P_time and T_time.
  Its claims about memory and sorting concern that algorithm, not the adder.
  Here the procedure runs once, during elaboration, and only its result, the
  tree, is hardware. For its own bookkeeping the elaboration function keeps
  each term's bit range and the inputs of each circle. The paper's version
  avoids a separate bit-position array.
* **Choices the paper leaves open.** The paper does not say:
  * how a run of more than three ready terms is cut (here: groups of three
    from the LSB end);
  * whether one circle may merge three terms (here it may, following the
    three-input circles of Fig. 2 and the text on cascading two operators
    for a 3-bit block);
  * how the carries off the spine are formed. The rule above is this
    design's own. It matches every circle of Fig. 2(b).
* **Table 2 quirk.** Iteration 4 of Table 2 shows a 4 under bit 7, whose
  arrival time is 5 in every other row. The design uses 5, which also gives
  the table's final time of 6.
* **C1.** Fig. 2(b) shows C1 without a circle of its own. Here it is a
  separate two-term circle at level 1, the same function and level as the
  first stage of the cascade inside the circle at bit 2.
* **Timing model.** Times count circles only. The setup of g/r (and p) and
  the final sum XOR are outside that count, as in the paper's tables. A
  three-term circle costs the same unit as a two-term one. In gates it is
  two operators deep, so real delays will differ.
* **Operators not used.** The paper also defines two more ternary operators,
  ⊗ and Δ, with group forms. Nothing in the IGEF tree needs them, so they
  are not built.
* **Not included.** There is no carry input (the paper takes c_0 = g_0) and
  there are no registers. The original GEF adder (Fig. 1 and Table 1 of the
  paper) is a comparison point only and is not built.
