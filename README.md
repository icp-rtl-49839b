# Instruction-Correlation Prefetching (ICP) in SystemVerilog

## The idea

Irregular loads are loads whose addresses follow no stride: `a[b[i]]`, a walk
down a linked list, an edge list that names the next vertex. The addresses
themselves rarely repeat, so a prefetcher that remembers address sequences
needs a lot of storage and still misses most of them. The *instructions*
that compute these addresses repeat all the time, though, and so does the
data-flow between them. In

```
PC_pre : lw  t2, 0(t5)      # loads an index
         add t3, a1, t2     # base + index
PC_suc : lw  t6, 0(t3)      # the irregular load
```

the value loaded by `PC_pre` plus a stable base `a1` is the address of
`PC_suc`, every time the loop runs. ICP learns such producer-to-consumer paths
from the committed instruction stream, stores them in a small table keyed by
the producer's PC, and, when the cache line holding the producer's value
arrives, recomputes the consumer's address in a tiny ALU and prefetches it.
Nothing address-specific is stored, so the whole mechanism fits in about
2 KB of state.

This RTL implements the prefetcher itself. The core, the caches and the
baseline prefetchers it attaches to are outside it; their signals are ports
of `icp_top`.

## Two phases and the blocks that do them

```
 demand requests (L1, L2) ──► pc_selector ×2 ──(Candidate Tables)──┐
                                                                   ▼
 committed instructions ──► commit_fifo ──► corr_detector ─edges─► corr_table
                              │              (produce_map)          │   │
                              └────────► source_predictor ◄─────────┘   │
                                                 │                      │
 MSHR alloc + fills ──► mshr_pc_ext ×2 ──► "exist?" ──► data_extractor  │
                                                            │           │
                                                            ▼           │
                                                     lw_calculator ◄────┘
                                                            │
                                                            ▼
                                                     prefetch requests
```

**Learning.** Each cache level has a `pc_selector` that decides which load
PCs are worth correlating. The `corr_detector` watches committed
instructions. When one of those PCs commits, it follows the register
data-flow forward from that instruction and writes every producer-to-successor
step that leads to a costly load into the `corr_table`.

**Prefetching.** Each returning line carries the compressed PC of the load
it was fetched for (`mshr_pc_ext`). If the Correlation Table knows that PC,
the `data_extractor` pulls the loaded value out of the line. The
`lw_calculator` then walks the learned steps. At each step it gets the
other operand from an immediate or from the `source_predictor`. Each load it
reaches becomes a prefetch.

All tables key instructions by a 10-bit compressed PC: the low 4 bits are
kept and the remaining bits are XOR-folded into 6 bits (`compress_pc` in
`icp_pkg`). Aliasing between two PCs is possible and harmless: the worst
outcome is a wrong prefetch.

## Choosing the PCs (`pc_selector`)

Each level samples its demand requests in an 8-entry Sample Table with LRU
replacement. Each entry holds two counters per PC: prefetch hits and demand
misses. A PC is only allocated when a request is a prefetch hit or a miss.
After an epoch of 4096 requests the selector ranks the entries in two passes,
one pick per clock:

* **PC_suc**: up to 4 PCs with the most misses and at least 4 misses. These
  loads are still missing despite the baseline prefetchers. The same set
  serves as **PC_pre^nf**, a producer the baseline prefetchers do not help.
* **PC_pre^f**: up to 4 PCs whose prefetch coverage hits/(hits+misses) is at
  least 0.1. These producers are already prefetched well, so their
  *prefetched* lines may start a chain. The comparison is done by
  cross-multiplying, so no divider is needed.

The result goes into the Candidate Table, and the Sample Table is cleared.
Each candidate has a small Count of tree constructions started from it.
Once Count reaches 4 in an epoch, the PC may not start another one. This
stops one hot PC from hogging the detector.

## Learning a dependency tree (`corr_detector`, `produce_map`)

This is the heart of the design. The detector is a three-state machine that
consumes one committed instruction per clock.

1. **Trigger.** A committed instruction whose PC is a PC_pre candidate
   becomes node 0 of a 16-entry Node Table. The L1 candidates are checked
   before the L2 ones, and the PC's Count must allow a start. The root's
   destination register goes into the Produce Map. The Produce Map is a
   16-entry CAM from physical register tag to node ID. While a tree is being
   built, other triggers are ignored.
2. **Build.** Each later instruction looks up its source tags in the
   Produce Map. On a hit it is appended as a new node, with
   `Parent` = the producing node. If it is a PC_suc candidate of the same
   level, it is marked `SUC`. Its destination tag then points to the new
   node. An instruction without a hit is not recorded, and neither is one
   the calculator cannot execute (multiply, divide, ...). If such an
   instruction writes a register, that register's Produce Map entry is
   invalidated, because the value there is no longer the tracked one. The
   build ends after 128 committed instructions or when the Node Table is
   full.
3. **Reconstruct.** A parent is always older than its child, so it always has
   a smaller ID. A single scan from the last node down to node 1 is
   therefore enough to mark every node that lies on a path to a PC_suc: a
   node is needed if it is a PC_suc or if a needed child already marked it.
   For each needed node, one edge per clock is written to the Correlation
   Table. The edge is (parent PC → this instruction). It carries the
   operation, the immediate, which operand the chain value enters, and
   whether the other operand must be predicted. This takes at most 15
   clocks. Meanwhile the commit buffer is not read and absorbs the stream.

For a load or store, only the base register is followed. When both sources of
an ALU instruction are tracked, src1's producer becomes the parent and src2
is treated as an external operand.

## Remembering the steps (`corr_table`)

The Correlation Table has 32 entries and is fully associative on the
producer PC. Each entry holds two successor slots, each of 41 bits:

| field | meaning |
|---|---|
| valid, Counter (4 b) | how often this successor has been learned |
| Friendly | the producer is a PC_pre^f, so its prefetched lines may start a chain |
| Level | cache level whose lines feed this step |
| Corr PC | compressed PC of the successor |
| Corr Inst | operation, chain operand position, use-immediate flag, 16-bit immediate |
| Src Pred, index | the other operand comes from the Source Predictor (src1 or src2) |

Re-learning a known successor increments its Counter. A new successor goes
into a free slot, or otherwise replaces the slot with the smaller Counter.
When all 32 entries are taken, whole entries are replaced round-robin. The
table has two combinational read ports: one for the "exist" filter on
incoming fills and one for the calculator.

## Turning a line into a prefetch

**`mshr_pc_ext`** stores one 10-bit compressed PC per MSHR target: 16×8 for
L1 and 32×8 for L2. It returns that PC with the fill.

**Exist filter** (in `icp_top`). A fill goes on only if its PC has a slot of
the fill's level. For a line brought in by a prefetch, the slot must also
be Friendly. When L1 and L2 fill in the same cycle, L1 wins and the L2 fill
is dropped and counted.

**`data_extractor`**. For a demand fill, the request's own offset and size
locate the value. A prefetched line has no offset, so the extractor keeps,
per friendly producer PC, a 4-bit counter for each 4-byte slot of the line,
trained by that PC's L1 demand requests. Every slot whose share of the
total is above 0.1 (`10·cnt > sum`) yields one value, lowest slot first.
Values are handed on one per clock.

**`source_predictor`**. This is an 8-entry last-value predictor for
operands that lie off the chain, for example the base `a1` above. It trains
on every committed instruction. An equal value sets the confidence bit; a
different value clears it and records the new value. It only predicts
when the bit is set. A step that needs a prediction without one is
skipped and counted.

**`lw_calculator`**. It loads a value with its PC, then executes the usable
slots of that PC's entry, one per clock. A slot is usable when its level
matches and its operation is supported; for the first step of a chain
started by a prefetched line, it must also be Friendly. ADD, SUB, SHL, SHR,
AND, OR and XOR results are pushed on a 4-entry stack and walked further,
which covers both slots and any branching. A load or store successor ends
its path: its address (value + immediate) is issued as a prefetch. If the
chain started from a demand-fetched line, the prefetch is flagged for the
LLC (`pf_to_llc`), because the demand has already caught up. If it started
from a prefetched line, it goes to the same level. A full stack drops the
push (counted), and a chain stops after 16 steps.

## Interface and timing

`icp_top` has no bus interfaces. All inputs are sampled on the rising edge of
`clk`, and `rst_n` is an asynchronous, active-low reset.

| group | signals | notes |
|---|---|---|
| L1 / L2 demand | `*_dem_valid, *_dem_pc, *_dem_pf_hit, *_dem_miss`, L1 also `l1_dem_off, l1_dem_size` | one request per level per clock |
| commit | `commit_valid, commit_rec` (`commit_rec_t`: PC, op class, dst/src tags, immediate, both source values) | a record arriving with the buffer full is dropped, and the core never stalls |
| MSHR | `*_mshr_alloc, *_mshr_id, *_mshr_tgt, *_mshr_pc` | written when a miss allocates a target |
| fills | `*_fill_valid, *_fill_mshr, *_fill_tgt, *_fill_is_pf, *_fill_off, *_fill_size, *_fill_line` | 64-byte line |
| prefetch | `pf_valid, pf_addr, pf_level, pf_to_llc` | one per clock at most |
| status | `commit_full, learning, calculating, stats` | `stats` holds 15 event counters |

Latencies at the default sizes:

* **Fill to prefetch.** A producer → ADD → load chain takes 5 clocks:
  1 clock to capture the line, 1 to load the calculator, 1 per step, and
  1 to register the prefetch. Each further ALU step adds one clock.
* **Candidate selection.** At most 2·TOP_N+1 = 9 clocks after the last
  request of an epoch.
* **Tree construction.** One clock per committed instruction (at most 128),
  then at most 15 clocks of reconstruction.

## Where this design departs from the source description or fills gaps

The description the design is based on gives the structure, the table
sizes, the thresholds 0.1 (coverage and offset share), the 128-instruction
and 16-node limits, the 8-entry commit buffer, and the 10-bit PC with
16×8 L1 MSHR targets. The following are this design's own choices:

* **Selector.** Top-n = 4, miss threshold = 4, epoch = 4096 accesses,
  Count limit = 4, and 16-bit counters. None of these numbers are given.
* **PC hash.** The exact folding function of the compressed PC.
* **Commit record.** It carries source *values* so that the Source
  Predictor can train. At 224 bits it is wider than the 16 bytes budgeted
  for a buffer entry.
* **Overflow handling.** Dropping instead of stalling when the commit
  buffer is full, the extractor is busy, or two fills collide.
* **Reconstruction order.** Reconstruction is a descending scan over the
  Node Table rather than a depth-first walk from the root. It writes the
  same set of edges in at most 15 clocks.
* **Unsupported operations.** These are excluded while the tree is built,
  so no path can pass through them.
* **Edges.** Only the edge that leaves the root is marked Friendly.
* **Operand tracking.** The predicted operand is identified by position
  (src1/src2), not by register name. Loads follow only their base register.
* **Data Extractor sizing.** The storage figure given for this table is
  self-inconsistent. It is built here as 32 entries of 16 × 4-bit counters.
* **Calculator.** A 4-entry stack, one step per clock, and a 16-step limit.
* **Replacement policies.** Round-robin replacement in the Data Extractor,
  the Source Predictor and the full Correlation Table.

The reorder-buffer extension that supplies source tags, the core, the caches
and the baseline prefetchers are not part of this RTL.

## Size

Coarse synthesis of `icp_top` at the default parameters gives about 1.9 k
flip-flop bits and 13.5 k memory bits (about 1.9 KB). That is in line with
the roughly 2 KB the approach is known for. About 1.8 k of those bits are
the commit buffer, because of its wide records.

## Workload fit

Reported correlation counts for the SPEC CPU irregular benchmarks range from
about 6 (astar) to about 73 (soplex). 32 producer entries with two slots
each hold all of them for astar, gcc, mcf, sphinx3 and xalancbmk. For
omnetpp and soplex the table keeps the most frequently learned steps.
Performance with 32 entries is reported to be on the plateau for both SPEC
and GAP. The longest reported path has 13 instructions, within both the
16-node tree and the 16-step calculator.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_pc_selector` | A PC with many prefetch hits becomes PC_pre^f; one with many misses becomes PC_suc. Also the miss threshold, coverage exactly 0.1, Top-4, LRU eviction, the Count limit, and selection latency. |
| `tb_commit_fifo` | Random enqueue/dequeue against a queue model; full and drop. |
| `tb_produce_map` | The worked example (lw/add/lw with an overwrite) and a random model. |
| `tb_corr_detector` | The lw/add/lw chain gives two edges with the right fields. Also the full-table and 128-instruction stops, invalidation, blocking, the Count limit, an L2 tree, and reconstruction time. |
| `tb_corr_table` | Edge insertion, Counter increment, smallest-Counter replacement, and capacity. |
| `tb_data_extractor` | The demand offset, the prefetched-line offset history (0.1 threshold, a share of exactly 0.1 rejected), learned sizes, back-pressure, busy, replacement, and random demand fills against a byte model. |
| `tb_source_predictor` | Confidence set and cleared, operand index, and random allocations and commits against a reference model. |
| `tb_lw_calculator` | The example chain (address and 4-clock latency), all seven operations, the LLC flag, Friendly gating, level mismatch, missing prediction, and stack overflow. |
| `tb_mshr_pc_ext` | PC round trip through every slot, against an independent hash. |
| `tb_icp_top` | End to end at the default sizes, with no parameter overrides; see below. |
| `tb_icp_workloads` | Two synthetic kernels at the default sizes, with coverage and accuracy; see below. |

`tb_icp_top` runs one full selection epoch per level. It then streams the
lw/add/lw chain, an ADD tree and an over-long tree, and drives demand and
prefetched fills. It checks the prefetch addresses and the 5-clock
fill-to-prefetch latency, and requires each of these mechanisms to occur:

* epoch selection
* tree start and both stop conditions
* invalidation
* commit-buffer and fill drops
* chain pushes and stack overflow
* skipped steps for lack of a prediction
* LLC and same-level prefetches

`tb_icp_workloads` runs the default-size design on two synthetic kernels
that stand for the two classes of programs it targets. The first is an
indirect gather, `sum += val[col[i]]`, as in graph and sparse-matrix codes.
A stride prefetcher brings `col[]` ahead, and ICP must turn each prefetched
`col[]` line into eight `val[]` prefetches. The second is a pointer chase,
`p = p->next`, where each demand fill of a node must yield a prefetch of the
next node to the LLC. Over the second half of each run, after learning, it
requires coverage of at least 80% and accuracy of at least 80% (gather) or
95% (chase). One run measured 97% coverage for the gather and 100% for the
chase. A third run interleaves the two loops. There the gather stays at
about 100%, but the chase drops to about 75%. The extractor holds one line
at a time, so a node fill that arrives while it is still emitting the
eight values of a `col[]` line is dropped. These kernels show the mechanism working. They do not estimate the
speedups reported for real programs, since the testbench has no core or
cache timing.

Simulate with plain Verilator, for example:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/icp_pkg.sv tb/tb_icp_top.sv --top-module tb_icp_top
./obj_dir/Vtb_icp_top
```

Any other testbench runs the same way with its own name. All sizes are
parameters of `icp_top` or of the blocks, and their defaults are the
values described above.
