# Look-ahead successive-cancellation polar decoder

A successive-cancellation (SC) decoder for polar codes decides the bits
u_1 … u_N one after another, and each decision changes the likelihoods of
all later bits. A plain pipelined SC decoder therefore needs 2(N−1) clock
cycles per N-bit codeword, and at any moment at most half of its processing
elements do useful work.

This design halves the latency to **N−1 cycles** with look-ahead. A
partial-sum dependent update (the "g" or Type I operation) has only two
possible results, one for each value of the not-yet-known bit. Both are
computed at once, in the same cycle and by the same processing element (PE)
as the min-sum ("f" or Type II) update, and the right one is picked with a
multiplexer once the bit is known. Each stage of the decoder tree is then
active once per pair of SC steps, not twice. Each cycle in which the last
stage is active delivers two decisions, u_{2i−1} and u_{2i}.

The RTL implements the pipelined look-ahead decoder: N−1 merged PEs in
log2 N stages, an input generating circuit (IGC) for the partial sums, and
a schedule controller. It is parameterised in the code length N (default 8,
the worked example of the architecture) and the LLR width Q (default 6).

## Arithmetic

LLRs are Q-bit two's complement numbers. With `a` the LLR of the upper half
of a sub-code and `b` the LLR of the lower half, the min-sum SC updates are:

    f(a, b)    = sgn(a)·sgn(b)·min(|a|, |b|)        (Type II)
    g(a, b, u) = b + (−1)^u · a                       (Type I)

Every result saturates to [−2^(Q−1), 2^(Q−1)−1].

### Adder-subtractor cells (`full_addsub`, `half_addsub`, `type1_pe`)

A 1-bit full adder and a 1-bit full subtractor share most of their logic:
the sum and the difference are both X⊕Y⊕Z, and the carry and the borrow
both build on X⊕Y:

    S = X⊕Y⊕C_in          C_out = X·Y  + (X⊕Y)·C_in
    D = X⊕Y⊕B_in          B_out = X̄·Y  + (X⊕Y)‾·B_in

`full_addsub` is this cell. Carry-in and borrow-in are separate pins,
because the two chains carry different values. `half_addsub` is the
bit-0 cell, with no incoming carry or borrow. `type1_pe` chains one
half cell and Q−1 full cells into a Q-bit unit that gives X+Y (`{c_q, s}`)
and X−Y (`d`) in parallel. Its borrow `b_q` is 1 exactly when X < Y, so the
same unit also works as a comparator.

### Sign-magnitude conversion (`ttos`, `stot`)

`ttos` turns a Q-bit two's complement value into a sign and a Q-bit
magnitude: it inverts conditionally on the sign, then a half-adder chain adds
the sign. Because the magnitude keeps Q bits, −2^(Q−1) converts without
overflow. `stot` goes the other way. Its input magnitude is Q+1 bits wide,
since a sum of two magnitudes can carry out. It converts back and
compresses the result to Q bits by saturating.

### Merged PE (`merged_pe`)

The merged PE produces all three results from one magnitude
adder-subtractor:

| output | value | used when |
|---|---|---|
| `out1` | f(in2, in1) | left subtree (min-sum) |
| `out2` | in1 + in2 | right subtree, u_{2i−1} = 0 |
| `out3` | in1 − in2 | right subtree, u_{2i−1} = 1 |

Here `in2` is the upper-half LLR `a` and `in1` the lower-half LLR `b`. Both
are converted to sign-magnitude. `type1_pe` forms S = |a|+|b| and
D = |a|−|b|. Its borrow picks the smaller magnitude for `out1`, whose sign
is the XOR of the input signs. For the two g candidates, a crossbar gives
S or |D| to each output:

- When the signs agree, a + b has magnitude S and b − a has magnitude |D|.
- When they differ, the two are swapped.

Each sign follows the sign-magnitude addition rules: a subtraction takes the
sign of the operand with the larger magnitude. Three `stot` blocks return
saturated Q-bit values.

## Decoder structure (`la_polar_decoder`)

```
 llr[0..N-1] ─► stage 0 ─► stage 1 ─► … ─► stage n-2 ─► last PE ─► llr_odd / llr_even
               (N/2 PEs)   (N/4 PEs)        (2 PEs)     (1 PE)     u_odd / u_even
                   ▲           ▲                ▲                      │
                   └──── ps ───┴──── igc ───────┴──────────────────────┘
                   stage_en, osel from la_ctrl
```

Stage s (0 … n−2, n = log2 N) is an `la_stage`. It holds N/2^(s+1) merged
PEs. PE j takes inputs 2j (as `in2`) and 2j+1 (as `in1`), so adjacent
inputs meet. When the stage is enabled, all three outputs of each PE are
registered. Each PE has two output multiplexers:

- the first chooses `out2` or `out3` by the PE's partial-sum bit from the
  IGC;
- the second hands the next stage either `out1` (`osel` = 0) or the chosen
  candidate (`osel` = 1).

The last stage is one merged PE without registers. Its `out1` is
L^(2i−1). The decision u_{2i−1} is 0 for a frozen bit and otherwise the sign
bit. That decision picks L^(2i) between `out2` and `out3`, and the sign of
L^(2i) gives u_{2i}. Both decisions are made in the same cycle.

**Input order.** Adjacent inputs meet in stage 0. For a code whose
generator matrix includes the bit reversal, G_N = B_N·F^⊗n, this is simply
`llr[k]` = L(y_{k+1}). In each pair the odd-numbered input y_{2j+1} is the
one whose sign the partial sum flips. For a code encoded with F^⊗n alone,
feed `llr[k]` = L(y_{bitrev(k)+1}). The testbenches do the latter.
Decisions always come out in order, u_1 first.

## The look-ahead schedule (`la_ctrl`)

Decoding the sub-code at stage s takes one cycle at stage s, then the
decoding of its left child at stage s+1 (fed by `out1`), then the decoding
of its right child at stage s+1 (fed by the chosen candidates). The last
stage takes one cycle and produces two bits. That gives 1 + 2·(…) = N−1
cycles. For N = 8 the active stages are (1-based, as in the published time
chart):

| cycle | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|
| stage | 1 | 2 | 3 | 3 | 2 | 3 | 3 |
| output | | | u1,u2 | u3,u4 | | u5,u6 | u7,u8 |

A stage's registers are written only when that stage is active. They stay
valid for as long as deeper stages need them.

`la_ctrl` holds this recursion as a stage pointer and one select bit per
registered stage:

- After stage s < n−1 comes stage s+1 with select 0.
- After the last stage comes the deepest stage whose select is still 0. It
  runs again with select 1.
- When no select is 0, the codeword is finished.

## Partial sums (`igc`)

The candidate selects at stage s are the bits of the polar transform
(x = u·F^⊗m) of the decisions just made in the left subtree under stage s.
The IGC builds them incrementally, level by level:

- **U_1:** one XOR-pass element turns the decoded pair into
  (u_{2i−1}⊕u_{2i}, u_{2i}).
- **Each higher level:** a demultiplexer, driven by that level's select
  bit c_k, routes a finished sub-vector.
  - If it was a left half, it goes into the level's store.
  - If it was a right half, it goes on to a row of XOR-pass elements. They
    combine it with the stored left half into the vector of the next larger
    subtree: `out[2j] = left[j] ⊕ right[j]`, `out[2j+1] = right[j]`.

This interleaved form keeps every vector in the tree order of the decoder
stages. For N = 8, stage 0 receives u1⊕u2⊕u3⊕u4, u3⊕u4, u2⊕u4, u4 (top to
bottom). Each level's store is exactly the select vector of its stage.
There are N/2−1 XOR-pass elements and N−2 stored bits. A vector is written
at the end of the cycle that completes it, and the next cycle uses it. So
partial sums cost no extra cycles.

## Interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the control state |
| `start` | in | 1 | `llr` and `frozen` valid; ignored while `busy` |
| `llr` | in | N×Q | channel LLRs in tree (bit-reversed) order |
| `frozen` | in | N | bit i set: u_{i+1} is frozen to 0 |
| `busy` | out | 1 | cycles 2 … N−1 of a codeword |
| `out_valid` | out | 1 | a decoded pair is present (combinational) |
| `out_idx` | out | log2 N − 1 | i−1 for the pair (u_{2i−1}, u_{2i}) |
| `llr_odd`, `llr_even` | out | Q | L^(2i−1), L^(2i) |
| `u_odd`, `u_even` | out | 1 | decisions |
| `done` | out | 1 | one-cycle pulse after the last pair |
| `u_hat` | out | N | all decisions (bit i = u_{i+1}), valid from `done` |

The `start` cycle is cycle 1: stage 0 computes on `llr` directly. The N/2
pairs appear in the cycles of the schedule above, and the last one in
cycle N−1. `done` rises in cycle N, and a new `start` is accepted in that
same cycle. So one codeword can start every N−1 cycles, and no second
codeword can overlap the first. Only control state is reset. The datapath
registers and the IGC stores are always written before they are read.

## What follows the architecture and what is this design's own

These follow the published architecture:

- the look-ahead schedule and its N−1 cycle latency;
- the tree of N−1 merged PEs;
- the adder-subtractor equations and cell chain;
- the merged PE's partitioning: two TtoS blocks, one Type I PE, a
  borrow-driven minimum, a crossbar, three StoT blocks;
- two output multiplexers per registered PE;
- the recursive IGC, built from XOR-pass elements and c_k demultiplexers.

These are this design's own choices, or departures:

- **Q = 6.** No word length is given.
- **Saturation.** `stot` saturates. Its "sign compression" is not specified
  further.
- **|D|.** The merged PE takes the magnitude of a negative difference D by
  negating it. How the original handles D < 0 is not shown.
- **Frozen bits.** The frozen set is an input port, and frozen values are 0.
- **Unregistered last stage.** The last stage has no registers, so there
  are 3(N−2) Q-bit datapath registers. The original gives two different
  counts, 3(N−1) delay elements in one place and q(3N−4) register bits in
  another. The outputs of a pair appear in the cycle its stage is active,
  as in the time chart.
- **IGC stores.** They are registers with a write enable, like the RAM
  variant of the architecture. The delay lines of its flip-flop variant are
  not used. Their controls c_k come from `la_ctrl` instead of being divided
  down from a toggling bit. The IGC holds N−2 bits, against N/2−2 bits of
  RAM in the original count.
- **Extra outputs.** `out_idx`, `u_hat`, `done` and `busy` are additions.

Not built: the three variants of the architecture that derive from this
decoder:

- the refined-pipelined M-concurrent decoder, which duplicates stages to
  overlap up to N−1 codewords;
- the folded decoder, which time-multiplexes every stage onto stage 1;
- the 2-parallel folded decoder.

The stand-alone Type II PE is also not built as a module: the merged PE
replaces it.

## Verification

Each module has a self-checking testbench in `tb/`:

| testbench | what it checks |
|---|---|
| `tb_full_addsub`, `tb_half_addsub`, `tb_type1_pe`, `tb_ttos`, `tb_stot`, `tb_merged_pe` | exhaustive at Q = 6, against integer arithmetic |
| `tb_la_stage` | random LLRs against f/g formulas, for all select combinations, and that the registers hold while `en` is low |
| `tb_la_ctrl` | enables, selects and flags at N = 8 and N = 32, against a schedule generated from its recursive definition with an explicit stack; at N = 8 also against the published stage sequence 1,2,3,3,2,3,3 |
| `tb_igc` | each partial-sum vector at the cycle it is used (N = 8 and 64), against the polar transform of the left-subtree decisions |
| `tb_la_polar_decoder` | end to end at the defaults N = 8, Q = 6 (described below) |
| `tb_la_polar_decoder_n1024` | the same end-to-end checks at N = 1024, the shortest practical code length |

The end-to-end testbench decodes 300 codewords at the defaults:

- Codewords are of two kinds: random LLRs with a random frozen set, and
  noiseless real polar codewords, which must decode to the information bits
  sent.
- The reference is an iterative natural-order SC min-sum decoder with the
  same saturation. It is written independently of the RTL.
- Checked: every LLR and decision; the pair order; the cycle of every pair
  against the time chart (3, 4, 6, 7 at N = 8), the last in cycle N−1;
  `done`; `u_hat`.
- Counted, and each must occur at least once: a u = 1 candidate taken at an
  inner stage and at the last stage, a frozen bit overriding a negative LLR,
  saturation, and an ignored `start` during `busy`.

To simulate with Verilator, for example the full decoder:

```
verilator --binary --timing --assert -Wall -Wno-fatal rtl/polar_pkg.sv rtl/*.sv \
    tb/tb_la_polar_decoder.sv --top-module tb_la_polar_decoder
./obj_dir/Vtb_la_polar_decoder
```

Swap in another testbench and top-module name to run a unit test. A
different code length is `#(.N(...))` on `la_polar_decoder`, and N must be a
power of two, at least 4. At N = 1024 Verilator needs about two minutes to
build, and its 30 codewords simulate in a few seconds.
