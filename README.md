# Path-overlapped list SC polar decoder

A list successive-cancellation (LSC) decoder with list size L keeps L candidate
decodings ("paths") alive and, in the usual hardware, gives each of them its own
SC decoder: L copies of a tree of processing units. This design keeps one tree.
The L paths go through it as a pipeline, each one clock cycle behind the
previous one, so that in a given cycle path 0 may be at stage 2 of the tree
while path 1 is at stage 3. Only the few stages that two paths can need in the
same cycle are duplicated. The price is a handful of cycles per decoded
information bit, spent waiting for the last path before the list is sorted.

The RTL follows the architecture and the schedules of T. Che, J. Xu and G. Choi,
"Overlapped List Successive Cancellation Approach for Hardware Efficient Polar
Code Decoder". That paper describes the overlapped schedule and the shared
decoder. It leaves the sorter, the metric unit, the memories and the number
formats to earlier LSC designs, so those parts here are this implementation's
own, kept as simple as the schedule allows. The section "Where this departs
from the paper" lists every such choice.

## Polar decoding in one page

An (N, k) polar code, N = 2^M, maps a vector u of N bits to x = u·F^{⊗M}, where
F = [[1,0],[1,1]]. Bit order is natural, with no bit reversal. N−k positions of
u are *frozen* to 0; the other k carry data. The decoder input is one LLR per
code bit. A positive LLR favours 0.

SC decoding estimates u_0, u_1, … in order on a binary tree of M stages.
Stage s (s = 1 at the bit side, s = M next to the channel) turns the 2^s LLRs
of a node into the 2^(s-1) LLRs of one child:

* f (left child): `f(a,b) = sign(a)·sign(b)·min(|a|,|b|)` (min-sum);
* g (right child): `g(a,b,β) = b + (1−2β)·a`, where β is the *partial sum*, the
  re-encoded bits of the left child that has already been decoded.

With one stage active per clock cycle, bit 0 costs M cycles (f at stages M…1).
Each later bit i costs ctz(i)+1 cycles: a g step at stage ctz(i)+1, then f steps
down to stage 1. For N = 8 the per-cycle stage sequence is
`3 2 1 1 2 1 1 3 2 1 1 2 1 1`, 2N−2 cycles in all.

List decoding keeps up to L paths. At an information bit each path splits into
a 0-extension and a 1-extension. Every path carries a metric, and lower means
more likely. The extension that disagrees with the sign of the bit's LLR λ
pays |λ|; the other keeps the metric. A frozen bit takes 0 and pays |λ| if λ < 0.
Once there are 2L candidates, the L with the lowest metrics survive. Each
survivor inherits its parent's inner LLRs and partial sums ("copying").

## The overlapped schedule

`olsc_ctrl` runs a *leader* that steps through the SC sequence of path 0, one
stage per cycle. Its step words pass down a delay line, so path p carries out
exactly the same step p cycles later. Each word records the stage, f or g, the
bit index, whether the bit is frozen, and how many paths were alive when it
was issued. A path takes part only in words issued while it existed. A word at
stage 1 finishes a bit, and it carries one of three decision modes:

| mode | when | what happens | stall |
|---|---|---|---|
| `DM_LOCAL` | frozen bit | each path takes 0 and updates its own metric | none |
| `DM_SPAWN` | information bit, 2·lcur ≤ L | path p keeps 0 and is copied into path p+lcur with 1; the path count doubles | none |
| `DM_SORT` | information bit with a full list, or the last bit | each path pushes its two candidates into the sorter as it finishes the bit | lcur−1 bubble cycles, then 1 sort-and-copy cycle |

A split path starts on the next bit, in its own slot of the overlap. Its copy
is made in the cycle its parent decides, so the data it needs is there before
it needs it. In sort mode the leader stops issuing. The waiting cycles let the
later paths finish the same bit. In the sort-and-copy cycle every path j becomes
the j-th best candidate, in all memories at once. Decoding then resumes.

Below is the schedule the RTL produces for the (8,4) code with information bits
3, 5, 6, 7 and L = 4. Bits u3 and u5 are split without waiting (cycles 7 and
11-12); u6 and u7 are sorted (cycles 17 and 22). The numbers give the stage each path works on, `.` means
idle and `SC` is sort-and-copy. It is the schedule drawn in the paper's Fig. 4,
and `tb_olsc_ctrl` checks it cell by cell, along with the L = 2 case of Fig. 3.

```
cycle    1  2  3  4  5  6  7  8  9 10 11 12 13 14 15 16 17 18 19 20 21 22
path 0   3  2  1  1  2  1  1  3  2  1  1  2  1  .  .  . SC  1  .  .  . SC
path 1                           3  2  1  1  2  1  .  . SC  .  1  .  . SC
path 2                                          2  1  . SC  .  .  1  . SC
path 3                                             2  1 SC  .  .  .  1 SC
```

When the last bit is an information bit, a codeword takes

    busy cycles = (2N − 2) + (k − log2 L)·L

Of these, 2N−2 are the SC steps. Then (k − log2 L)·(L−1) are the waiting cycles,
the overhead L_m = (k − log2 L)(l − 1) of the paper's Eq. (1). The last
k − log2 L cycles are the sort-and-copy steps, which a conventional LSC decoder
also pays. At the defaults (N = 1024, L = 4) this comes to 2046 + 4(k−2)
cycles: 4090 at rate 1/2.

## Duplicated stages

Because paths are staggered by one cycle, two paths use the same stage in the
same cycle whenever the SC sequence visits that stage twice within L
consecutive steps. Stage 1 does so constantly (`1 1`), stage 2 every third step,
and stage s ≥ 3 never for L ≤ 4. `olsc_sc_core` therefore builds stage s as
max(1, L >> (s−1)) copies of its 2^(s−1)-PU array. That is the plan in the
paper's architecture figure: for L = 2, two copies of stage 1; for L = 4, four
of stage 1 and two of stage 2. Each cycle the paths asking for stage s get
copies 0, 1, … in path order. Each copy has input multiplexers on the
requesting path's parent-node LLRs and partial sums. Its outputs go back into
that path's buffer, or for stage 1 to that path's metric lane. The `overflow`
output (and an assertion in the top) would flag a stage short of copies. The
schedule above cannot cause one, and the random stage requests in
`tb_olsc_sc_core` check that the flag works.

## Compute-ahead (optional, `PLCAS = 1`)

With a full list, every information bit costs `lcur` extra cycles: `lcur − 1`
waiting cycles while the later paths finish the bit, and one sort-and-copy
cycle. Often the sort changes nothing: every path survives with its own more
likely extension. Compute-ahead bets on that outcome.

At a sorted bit each path still pushes both candidates into the sorter. It
also writes its hard decision into its own memories at once, as a provisional
decision. Because that bit agrees with the sign of the LLR, the metric is
unchanged. The leader does not wait. It issues the next bit's steps (the g step
and the f steps down to stage 2) and holds only before that bit's decision
step. One cycle after the last path has pushed, `olsc_plcas` compares the
sorter's L survivors with the provisional bits:

* **Hit** (`spec_hit`): all L survivors are the provisional extensions, one per
  path. Nothing moves, the work done ahead is kept, and the leader goes on in
  the same cycle. The bit costs max(0, lcur − s) cycles instead of lcur, where
  s is the first stage of the next bit (ctz(i+1)+1). So it is free when the next
  bit starts high in the tree.
* **Miss**: that cycle becomes an ordinary sort-and-copy. The speculative step
  words still in the delay line are dropped, and the next bit restarts from its
  g step. The cost is exactly that of the plain schedule.

Undoing the guess needs no extra storage. The sort-and-copy rewrites the
decided bit, the metric and the one partial-sum register that the decision
changed. The speculative steps only wrote stage buffers that the restarted bit
computes again. Paths never run more than one bit ahead, and the last bit is
never speculated, so path 0 still ends as the best path. With `PLCAS = 0` (the
default) this logic is idle and the schedule is the one in the tables above.

## Datapath and storage

```
            +---------------------------+
 chan_llr ->| olsc_llr_ps_mem           |<-- spawn / sort-and-copy
            |  channel LLRs (shared)    |
            |  per path: inner LLRs,    |
            |  partial sums (psum_gen)  |
            +-----+---------------^-----+
                  |               | stage outputs
            +-----v---------------+-----+
 olsc_ctrl->| olsc_sc_core              |  one tree, duplicated stages 1..2
 step words |  olsc_stage x copies      |
            |   olsc_pu                 |
            +-----+---------------------+
                  | bit LLR per path
            +-----v-----+    +-------------+    +--------------------+
            | olsc_mcu  |--->| olsc_sorter |--->| olsc_survivor_mem  |--> u_hat
            | (per path)|    +-------------+    +--------------------+
            +-----+-----+          |
                  +--------> olsc_pm_mem <------+
```

| module | role |
|---|---|
| `olsc_pkg` | widths, `llr_t`/`pm_t`, f/g/metric arithmetic, step word `step_t`, candidate `cand_t` |
| `olsc_pu`, `olsc_stage` | one PU; one stage's PU array |
| `olsc_sc_core` | the shared tree with stage copies and copy allocation (combinational) |
| `olsc_ctrl` | leader, delay line, split/stall/sort-and-copy sequencing |
| `olsc_mcu` | the two extension metrics of a path from its bit LLR |
| `olsc_sorter` | keeps the L best candidates, inserting one path (two candidates) per cycle |
| `olsc_psum_gen` | updates a path's partial sums after a decision |
| `olsc_llr_ps_mem` | channel LLRs, per-path inner LLRs and partial sums, with path copy |
| `olsc_pm_mem`, `olsc_survivor_mem` | per-path metrics and decided bits, with path copy |
| `olsc_plcas` | compute-ahead hit check (used only when `PLCAS = 1`) |
| `olsc_decoder` | top level |

**Inner LLRs.** Each path stores the outputs of stages 2…M: N−2 LLRs, with stage
s at offset 2^(s−1)−2. Stage-1 outputs go straight to the metric lane and are
never stored. The channel LLRs (the input of stage M) are shared by all paths.

**Partial sums.** Each path holds one register per stage, 2^(s−1) bits for
stage s, packed into N−1 bits at offset 2^(s−1)−1. The register holds the
re-encoded bits of the latest finished left subtree at that stage, which is
what a g step there needs. After bit i is decided, `olsc_psum_gen` walks up from
the leaf. While bit j of i is 1 the finished node is a right child, and it
merges with its stored left sibling into `{left ⊕ β, β}`. At the first 0 it is
a left child and is stored. That is x = u·F^{⊗M} computed incrementally, and it
takes combinational logic of about N XOR gates per path.

**Copying.** Every memory copies a whole path in one cycle: register to register
through an L-to-1 multiplexer. This is the simplest way to get the single
sort-and-copy cycle of the schedule. At N = 1024 it is also the largest cost of
the design, since the inner LLRs alone are L·(N−2)·8 ≈ 32.7 kbit of flip-flops,
each behind a 4-to-1 multiplexer. A pointer-based memory, as in other LSC
designs, would avoid the copy but not change the schedule.

**Metric lanes.** There is one `olsc_mcu` per path, because with duplicated
stage-1 PUs several paths can finish a bit in the same cycle (say one a frozen
bit, another the bit before it). The sorter still receives at most one path per
cycle, because a sort-mode step word reaches each path in a different cycle.

**Sorter.** An ascending list of L entries (metric, parent path, bit). A push
inserts two candidates in sequence, and later arrivals go behind equal metrics.
So the result is the first L of a stable sort, in the order path 0/bit 0,
path 0/bit 1, path 1/bit 0, … . Survivor j becomes path j, which makes path 0
the best path after the final sort.

## Number formats

* LLRs: 8-bit two's complement, kept in the symmetric range [−127, 127]. The
  channel value −128 is clamped to −127 on loading, and g saturates.
* Path metrics: 16-bit unsigned, saturating at 65535.
* Both widths are constants in `olsc_pkg` (`LLR_W`, `PM_W`). The arithmetic
  functions follow them.

## Top-level interface (`olsc_decoder`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `start` | in | accepted while idle; samples `chan_llr` and `frozen` at that edge |
| `chan_llr[N]` | in | channel LLRs, `llr_t` |
| `frozen[N-1:0]` | in | 1 = u_i frozen to 0; this sets k and the code |
| `busy` | out | high during the decoding cycles counted above |
| `done` | out | one-cycle pulse one cycle after the final sort-and-copy |
| `u_hat[N-1:0]` | out | decoded u (all N bits, frozen ones are 0); valid from `done` until the next `start` |
| `best_pm` | out | metric of `u_hat` |
| `stall`, `sc_en`, `dup_use`, `spawn`, `spec_hit` | out | per-cycle event flags: waiting cycle, sort-and-copy, a duplicated PU copy in use, a path split, a compute-ahead hit |

Parameters: `N` (code length, power of two, default 1024), `L` (list size,
power of two ≥ 2, default 4) and `PLCAS` (compute-ahead, default 0). No CRC is included. The frozen set is an input
because code construction (picking the least reliable positions) is done
offline. For a standard design choose the frozen set with a construction
method of your choice.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_olsc_pu`, `tb_olsc_mcu` | arithmetic against integer formulas |
| `tb_olsc_sorter` | kept list against a stable sort, including ties and frozen (single-candidate) pushes |
| `tb_olsc_psum_gen` | every partial-sum register a g step may read against direct re-encoding of the left subtree |
| `tb_olsc_llr_ps_mem`, `tb_olsc_pm_mem`, `tb_olsc_survivor_mem` | random writes, splits and sort-and-copy against models |
| `tb_olsc_sc_core` | random stage requests for 4 paths against f/g per path; copy allocation; overflow flag |
| `tb_olsc_ctrl` | the L = 2 and L = 4 schedules of the (8,4) example, every cell, and their cycle counts (20, 22) |
| `tb_olsc_decoder` | 40 codewords at N = 32, L = 4 |
| `tb_olsc_decoder_full` | 6 codewords at the defaults, N = 1024, L = 4 |
| `tb_olsc_plcas` | 40 codewords at N = 32, L = 4 with `PLCAS = 1`; also the number of hits |

The end-to-end benches compare the decoded word, the best metric and the
busy cycle count with a behavioural list decoder in the testbench. That model
recomputes every bit LLR of every path from the channel, re-encoding left
subtrees directly, and shares no code with the RTL. Frames mix random frozen
sets with a half-rate frozen set, and noisy codewords with random LLRs. The
benches also require that stalls, sort-and-copy cycles, duplicated-PU use,
splits and frozen decisions all occur. The compute-ahead bench has its own
model of hits (the cost rule above) and requires both hits and misses; a
typical run sees about 330 hits and 190 misses. At N = 1024 a frame runs in well under a
second of simulation.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/olsc_pkg.sv tb/tb_olsc_decoder_full.sv --top-module tb_olsc_decoder_full
./obj_dir/Vtb_olsc_decoder_full
```

The default-size bench builds in about 20 s.

## Where this departs from the paper

* **Taken from the paper.** The single shared SC tree. The one-cycle stagger
  of the paths. The stage sequence. The waiting cycles and the single
  sort-and-copy cycle, which the RTL reproduces exactly for the (8,4) examples.
  Splitting without a stall while the list fills. The per-stage copy counts of
  the architecture figure. The pipelined (per-path) sorter. The split into MCU,
  sorter and three memories.
* **Stage copies.** The text also states a rule of duplicating 2^(i−1)−1
  stages for l ≤ 2^i−1. It says the figure's copies are "the minimum
  requirement for all the case", and that its 4-path example needs only one
  extra stage-1 unit. The design follows the figure, max(1, L>>(s−1)) copies of
  stage s. In this design's schedule, L = 4 never uses more than three stage-1
  copies, so one of the four is spare.
* **Own choices, not in the paper.** The min-sum f, the LLR and metric widths
  and the saturation. The LLR-based metric. The insertion sorter and its
  tie-breaking. The partial-sum register scheme. Register memories with
  whole-path copy. One metric lane per path (the paper counts one MCU).
  Sending the last bit through the sorter even when the list is not full or the
  bit is frozen. Resets.
* **Latency figure.** The overhead the RTL spends matches Eq. (1). The paper's
  plot of latency overhead against code rate (N = 1024, l = 4) shows values
  close to k − log2 l for 1-bit decision, not the (k − log2 l)(l − 1) of the
  equation. The RTL follows the equation and the drawn schedules.
* **Compute-ahead.** The paper describes it only as a timing sketch: a path
  goes on with its better candidate during the stall and drops that work if
  it turns out not to survive. Here a path runs at most one bit ahead. The
  guess is judged for the whole list at once, and any difference discards all
  of it. In the paper's best case there is no stall at all. Here a hit still
  waits max(0, lcur − s) cycles before the next decision. Compute-ahead is off
  by default.
* **Not included.** Multi-bit decision and adaptive list size. The paper
  describes both only by reference to other designs.
* **Cost.** The whole design is register-based and unpipelined inside a cycle.
  A stage-1 step, the metric, the partial-sum update and the path-copy
  multiplexers fall in one cycle. No timing or area results are claimed.
