# Two-phase HBM merge sorter

Sorting billions of bytes on an FPGA with high-bandwidth memory (HBM) runs
into two limits. A single large merge tree can consume only as much data per
cycle as one memory port gives it. Many small trees working in parallel can
use all the bandwidth, but each pass merges only up to 16 runs at a time, so
the final merge across all trees would take extra passes. This design splits
the sort into two phases.

* **Phase 1.** Sixteen merge trees each own one AXI port and one pair of
  HBM channels. They sort their own sixteenth of the data, pass after pass,
  with ping-pong: each pass reads one channel of the pair and writes the
  other. Every tree merges 16 runs into one per round, 8 elements per cycle.
  Phase 1 stops when each tree holds exactly four sorted sub sequences, so
  there are 64 of N/64 elements each in total.
* **Phase 2.** Four of the trees (0, 4, 8 and 12) are reconfigured as the
  lower levels of one 64-leaf tree. Each reads its 16 leaves from four
  channels. Three extra merge units (two at 16 and one at 32 elements per
  cycle) combine their four root streams. The result is 256 bytes per cycle
  of fully sorted data, more than one AXI port can write. A demultiplexer
  therefore deals it out in 4 KB batches, round-robin, to the write channels
  of the four reused trees.

Elements are 64 bits: a 32-bit key and a 32-bit value. They are sorted in
ascending key order.

## The streaming merge unit (`mms_merge_unit`)

Every node of every tree is an E-rate merge unit. It takes E elements per
cycle from one of two sorted input streams and emits E merged elements per
cycle with an initiation interval of one. The classic design feeds the upper
half of a bitonic merger back into its own input, which puts a long loop on
the critical path. This unit has no data feedback. Only the choice of input
loops back.

* The unit keeps the last batch it consumed from each input, `cur_a` and
  `cur_b`. Before the first batch of a run pair both hold −∞.
* The E largest elements of `cur_a ∪ cur_b` are exactly the elements that
  have been consumed but not yet output. Bitonic merger **L** recomputes that
  set every cycle.
* In the same slot the multiplexer takes the next batch **X** from the input
  whose head element is smaller (`a_0 <= b_0` picks a). X is delayed while L
  works.
* Bitonic merger **S** merges L's upper half with X. Its lower E elements are
  the output.
* A bitonic merger of 2E inputs has log2(2E) registered columns, so issue to
  output takes 2·log2(2E) cycles. That is 8 cycles for E = 8.

The elements carry an internal 2-bit class (−∞ fill, real, +∞ fill) above the
key. Fill values therefore never tie with real keys.

**Run framing.** The valid/ready streams carry `last` on the final batch of a
run and `empty` on a token that stands for a run of length zero.

* The first slot of a run pair outputs nothing.
* After both runs end, one flush slot merges L with a +∞ batch and outputs
  the held upper half with `last` set.
* Two empty runs give one empty token.
* So a pair of runs of n_a and n_b batches costs n_a + n_b + 1 cycles.

The whole pipeline advances only when the output register is free. A stalled
consumer freezes the unit without losing data.

## One merge tree (`merge_tree`)

A tree has 16 leaves and four levels of merge units: 8 at rate 1, 4 at
rate 2, 2 at rate 4 and 1 at rate 8. The levels are joined as follows.

* `leaf_feeder` turns each 512-bit leaf-buffer beat into eight 1-element
  tokens.
* `stream_coupler` pairs two consecutive E-wide batches into one 2E-wide
  batch between levels. This needs runs whose length is a multiple of the
  batch width, which holds for the power-of-two runs used here.
* `axi_read_engine` walks the 16 leaves round-robin. It issues a burst for a
  leaf only when that leaf's buffer has room for the whole burst, counting
  data already in flight. Read data is steered by ARID (= leaf index) and is
  always accepted.
* `axi_write_engine` buffers root beats. It writes them in bursts and
  reports done when every write response has come back.

The buffers hold two bursts. A burst is 1 KB (16 beats) for the twelve
ordinary trees. The reused trees use 4 KB (64 beats), because in phase 2
their write port must emit whole 4 KB batches.

## The pass plan (`topsort_ctrl`)

With N_t = N/16 = 2^log2_nt elements per tree, the target run length at the
end of phase 1 is T = N/64 = N_t/4. Each pass multiplies the run length R by
up to 16:

* `step = min(4, log2(T) − log2(R))`, and m = 2^step leaves are active.
* Each leaf gets G = N_t/(R·m) runs of R elements, stored contiguously at
  offset j·G·R·8 bytes in the source channel.
* Round g merges run g of every active leaf.
* Unused leaves send one empty token per round, so the tree's framing still
  works.
* The last pass therefore runs exactly four rounds and leaves four sorted
  sub sequences per tree.
* Pass p reads channel 2t + (p mod 2) and writes channel 2t + 1 − (p mod 2).

Phase 2 then reads as follows. Leaf 4j+s of reused tree 4i reads sub
sequence s of channel 8i + 2j + par, where par is the parity of the number of
phase-1 passes. Each leaf's read job is that whole sub sequence.

**Output map.** 4 KB batch b of the sorted result (batch 0 holds the smallest
keys) is written by port AXI-4(b mod 4) to channel
8(b mod 4) + 2((b/4) mod 4) + 1 − par, at offset (b/16)·4 KB. The
`out_par` output gives par.

`log2_nt` must be between 7 and 25. The lower bound makes at least one
4 KB batch per port. The upper bound is 4 GB of data, 256 MB per channel,
the whole 28-bit channel offset.

Number of phase-1 passes = ⌈(log2_nt − 2)/4⌉:

| data size | log2_nt | passes |
|---|---|---|
| 32 MB | 18 | 4 |
| 64 MB to 512 MB | 19–22 | 5 |
| 1 GB to 4 GB | 23–25 | 6 |

## Floorplan pipelining (`slr_pipe`)

The three dies of the target FPGA are joined by long wires. Trees 0 and 8 sit
on the die next to the HBM. Trees 1–3 and 9–11 are one die up. The other
eight are two dies up. Every AXI channel of a tree, and the phase-2 streams
of the reused trees, pass through 0, 2 or 4 register slices accordingly.

Each slice is a two-entry skid buffer. Valid and ready are both registered,
so throughput stays at one beat per cycle.

## Where this RTL departs from, or adds to, the published design

* **Merge-unit control.** The control and the run framing (last/empty
  tokens, first-slot bubble, flush slot) are this design's own. Only the
  L/S/multiplexer structure is published.
* **Level couplers.** `stream_coupler` between tree levels is an assumption.
  How a 2E-rate unit obtains 2E-wide input is not specified.
* **Leaf regions.** The contiguous layout of each leaf's region in phase-1
  passes is assumed.
* **Ping-pong channels.** The read/write channel alternation between passes
  is assumed. Only "read one channel, write the adjacent one" is given.
* **Batch rotation.** How batches rotate over an AXI port's four channels is
  assumed.
* **Pass count at 512 MB.** The published text says 512 MB takes 6 phase-1
  passes. The plan above gives 5: N/64 = 2^20 elements = 16^5. For 256 MB and
  4 GB it agrees with the text (5 and 6).
* **Memory subsystem.** AXI rate converters, the HBM crossbar, the HBM
  controllers and the memory itself are vendor parts. They are not here. The
  top exposes 16 AXI4 masters:
  * 512-bit data.
  * 33-bit address = {5-bit channel, 28-bit offset}.
  * 4-bit read ID.
  * One outstanding write burst queue of two per port.
* **Leaf choice per round.** The paper's figure of partially active trees is
  followed only in spirit. The first m leaves are the active ones.

## Files

The top is `rtl/topsort_top.sv`. `rtl/topsort_pkg.sv` holds the shared
types, constants and address functions. Each remaining `rtl/*.sv` file holds
one module, and its opening comment documents its interface and timing.

The self-checking testbenches in `tb/` print
`TB_RESULT checks=<n> failures=<n>`:

* The datapath blocks have their own testbenches. They cover the
  compare-swap cell, the bitonic merger, the merge unit, the FIFO, the
  coupler, the leaf feeder and the die-crossing pipe. The merge-unit test
  also checks the one-batch-per-cycle rate, and the bitonic test checks the
  log2(2E) latency.
* `tb/tb_merge_tree.sv` runs one tree, with its AXI read and write engines,
  through a complete phase 1 (two passes, the second tuned to 2 active
  leaves) against `tb/hbm_model.sv`. That is a behavioural AXI memory with
  random back pressure.
* The phase-2 merger, the write demux and the controller are exercised only
  by the end-to-end test.

`tb/tb_topsort_top.sv` runs the whole sorter at its default parameters. It
performs two complete sorts, of 2048 and of 8192 elements (log2_nt = 7 and
9), checks the result against the key permutation, and reports how often each
mechanism happened:

* passes of each parity
* the phase switch
* tuned last passes
* empty tokens from inactive leaves
* root stalls
* memory stalls
* demux batch switches
* skid-buffer use in die crossings

A sort of a realistic size (log2_nt ≥ 18) is far beyond what an RTL
simulation can run.

Building the end-to-end test is very slow. Verilator turns the sixteen
trees into several hundred megabytes of C++, which takes well over half an
hour to compile on a 4-core machine. No end-to-end result is reported here.
The largest configuration confirmed in simulation is one complete tree
through all of phase 1, at 128 elements.

To simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_topsort_top \
  rtl/topsort_pkg.sv rtl/*.sv tb/hbm_model.sv tb/tb_topsort_top.sv
./obj_dir/Vtb_topsort_top
```

Unit testbenches need only `rtl/` and their own file. Compiling the full top
is slow: the C++ model of 16 trees is large.
