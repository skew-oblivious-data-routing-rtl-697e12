# Skew-oblivious data routing for a histogram accelerator

Many data-intensive kernels (histograms, partitioning, sketches, graph
updates) do very little arithmetic per record; their speed is set by how
many buffer reads and writes can happen per cycle. The usual way to go fast
is to give every processing element (PE) its own on-chip buffer. If records
are assigned to PEs statically, every PE needs a full copy of the buffered
data. *Data routing* avoids the copies: each PE owns one slice of the data,
and a routing network sends each record to the PE that owns its slice. The
weak point is skew. When most records fall into one slice, one PE does all
the work while the others wait.

This design fixes that by adding **secondary PEs (SecPEs)**. A SecPE has the
same logic as a primary PE (PriPE) and its own buffer, but it owns no slice
of its own. At run time a profiler measures which PriPEs are overloaded and
attaches SecPEs to them. The overloaded PriPE's records are then spread
round-robin over the PriPE and its helpers. At the end, a merger adds each
helper's partial results back to its PriPE's results. If the skew moves to
another slice, a throughput monitor notices the drop and the SecPEs are
rescheduled.

The RTL builds this architecture for histogram building (HISTO). The
default configuration has:

* 8 tuple lanes (one 512-bit memory word of 8-byte tuples per cycle);
* 16 PriPEs, each holding 2 of the 32 bins;
* 15 SecPEs.

This follows the published skew-oblivious data-routing architecture
("Ditto", Chen et al.). In that work the architecture is an HLS template.
Here it is written as plain synthesizable SystemVerilog. Where this RTL
departs from the published description, the difference is stated below.

## Dataflow

```
 memory ─► mem_read_engine ─► 8 × prepe ─► 8 × mapper ─► combiner ─┬─► route_decoder #0  ─► route_filter #0  ─► histo_pe #0  (PriPE)
                                              ▲    │               │   ...
                                   plan pairs │    │ PriPE IDs     ├─► route_decoder #15 ─► route_filter #15 ─► histo_pe #15 (PriPE)
                                              │    ▼               ├─► route_decoder #16 ─► route_filter #16 ─► histo_pe #16 (SecPE)
                                         runtime_profiler          │   ...
                                              │ plan, reschedule   └─► route_decoder #30 ─► route_filter #30 ─► histo_pe #30 (SecPE)
                                              ▼                                                                   │ bin read / clear
                                            merger ◄──────────────────────────────────────────────────────────────┘
                                              │
                                              ▼
                                       mem_write_engine ─► memory
```

| File | Role |
|---|---|
| `rtl/ditto_pkg.sv` | Tuple type (32-bit key, 32-bit value), counter width, and the functions that fill the decoder table. |
| `rtl/mem_read_engine.sv` | Burst reads of the input relation. Hands out one 512-bit word per cycle. |
| `rtl/prepe.sv` | Tags a tuple with its PriPE: `dst = key mod 16`. |
| `rtl/mapper.sv` | Mapping table and round-robin redirect from a PriPE to its SecPEs. |
| `rtl/combiner.sv` | Registers the 8 tagged tuples of a cycle and broadcasts them to all 31 datapaths. |
| `rtl/route_decoder.sv` | Per destination: makes the 8-bit match mask and looks it up in a 256-entry table to get the count and lane positions. |
| `rtl/route_filter.sv` | Per destination: writes the selected tuples (up to 8 per cycle) into the PE's channel FIFO. |
| `rtl/histo_pe.sv` | PriPE/SecPE: read a bin, write it back plus one. Takes one tuple every 2 cycles. |
| `rtl/runtime_profiler.sv` | Workload histograms, greedy SecPE plan, throughput monitor. |
| `rtl/merger.sv` | Folds SecPE counts into PriPE results, by the plan. |
| `rtl/mem_write_engine.sv` | Packs 16 counts per 512-bit word and writes them out. |
| `rtl/ditto_histo_top.sv` | Connects all of the above and sequences a run. |

### Why 16 PriPEs for 8 lanes

A HISTO PE needs one cycle to read a bin and one to write it back, so it
takes a tuple every second cycle. To keep up with 8 tuples per cycle on
uniform data, 8 / (1/2) = 16 PriPEs are needed. In general:
`N_PrePE / II_PrePE = N_PriPE / II_PriPE = W_mem / W_tuple`.

With X SecPEs, only M/(M+X) of the buffer capacity holds distinct data. The
rest holds partial copies owned by helpers. X = M−1 = 15 is the largest
useful value: it covers the worst case, where every tuple belongs to one
PriPE, and lets 16 PEs share that PriPE's work. It is the default here.

## The data routing network

Every cycle the 8 lanes may carry tuples for any mix of the 31
destinations, including several tuples for one destination. The network
never has to choose which tuple loses:

1. The **combiner** broadcasts the whole group to all 31 datapaths. The group
   moves on only when every datapath can take it (`out_fire`).
2. Each **decoder** compares the 8 destination IDs with its own ID. The
   resulting 8-bit mask indexes a table built at elaboration. Entry `m` holds
   `popcount(m)` and, for k = 0..7, the lane of the k-th set bit of `m`. Its
   output is therefore "take c tuples, from lanes p0, p1, ...". A group with
   no tuple for this PE stops at the decoder.
3. Each **filter** copies those c tuples, in lane order, into its FIFO in one
   cycle. It accepts a new group only when at least 8 slots are free. The PE
   drains the FIFO one tuple at a time.

Order is kept per destination. Back-pressure from any one filter stalls the
whole routing network. The top counts the cycles in which that happens
(`stall_cycles`). The FIFO (32 tuples by default) smooths the short-term
imbalance that random data always has.

## Mapping and scheduling SecPEs

### Mapper

Each of the 8 mappers keeps its own copy of:

* a table of 16 rows × 16 columns of PE IDs;
* a counter per row.

Initially row r holds r everywhere and its counter is 1, so every tuple goes
to its own PriPE. A plan pair "SecPE s → PriPE p" writes s at column
`counter[p]` of row p and increments the counter. One pair is applied per
cycle.

Every row has a round-robin pointer. It steps once per clock cycle and wraps
when it reaches the row's counter. A tuple for PriPE p goes to
`table[p][ptr[p]]`. Take the plan 4→2, 5→2, 6→0 on 4 PriPEs:

* tuples for PriPE 2 go to 2, 4, 5, 2, 4, 5, ...;
* tuples for PriPE 0 alternate between 0 and 6;
* tuples for PriPEs 1 and 3 stay where they are.

The pointer steps with the clock, not with the tuples. All 8 lanes see the
same pointer, so in any one cycle all tuples of a hot PriPE go to the same
PE. The spreading happens across cycles, and the filter FIFOs absorb the
bursts.

### Profiler

The profiler runs as a serial state machine:

1. **Profile** (`PROFILE_CYCLES` = 256 cycles). The PriPE ID of every tuple
   that passes a mapper is counted in one of 8 separate histograms, one per
   mapper. Separate histograms avoid 8 updates per cycle to one counter.
2. **Merge** (16 cycles). The 8 histograms are added, one PriPE per cycle.
3. **Schedule** (15 × 16 cycles). Each iteration scans the 16 PriPEs and
   gives the next SecPE to the one with the largest `workload / (1 + SecPEs
   already attached)`. The test is done by cross-multiplication:
   `w_a·(k_b+1) > w_b·(k_a+1)`. On a tie the lower ID wins. Example: with
   workloads 60, 28, 125, 45 and three SecPEs, the plan is 4→2, 5→2, 6→0.
4. **Send** (15 cycles). The pairs go to the mappers and the merger.
5. **Monitor**. The profiler counts the tuples that pass in each
   `WINDOW`-cycle window. If a window has fewer than `threshold` tuples while
   input is still being read, it raises `resched`. A threshold of 0 turns
   rescheduling off.

### Reschedule sequence

1. `resched` restores the initial mapping table. From then on no new tuple
   is sent to a SecPE.
2. The merger waits until no tuple bound for a SecPE is left anywhere: not
   in the mapper or combiner registers, the SecPE decoders, their FIFOs, or
   the SecPEs themselves.
3. It adds every SecPE bin into an intermediate store under the SecPE's
   PriPE, clears the SecPE buffers and forgets the plan.
4. Its `flush_done` restarts the profiler, which goes back to step 1 of the
   profiler sequence above.

The PriPEs keep running through all of this. The published design has the
host re-launch the profiler and the SecPEs instead. Here the restart is
automatic.

### End of a run

When the read engine has delivered every word and the whole pipeline is
empty, the top stops the profiler and asks the merger for the final merge.
For each PriPE p and bin b, the merger emits:

`intermediate[p][b] + PriPE p's bin b + Σ (bin b of every SecPE attached to p)`

These come out as global bins p·2 + b, in ascending order. The write engine
stores them at `wr_base`, 16 counts per word.

## Interfaces and timing of the top

* **Run control.** Pulse `start` while idle, with `rd_base` (word address),
  `num_tuples`, `wr_base` and `threshold`. `done` rises after the last
  result word is written and stays high until the next `start`.
* **Input format.** Lane i of a 512-bit input word is bits `[i*64 +: 64]`.
  The key is the upper 32 bits of the lane. If `num_tuples` is not a
  multiple of 8, the unused lanes of the last word are ignored.
* **Results.** Global bin g is bits `[(g%16)*32 +: 32]` of word
  `wr_base + g/16`. Bin g holds the keys with `key[3:0] = g/2` and
  `key[4] = g%2`.
* **Memory read.** A request is `rd_req_valid/addr/len/ready`, with a burst
  of at most 16 words. Data returns in order on `rd_resp_valid/data`, which
  has no ready. The engine only issues a burst when it has room for all of
  its data.
* **Memory write.** `wr_valid/addr/data/ready`, one 512-bit word per transfer.
* **Counters.** `stall_cycles`, `sec_tuples`, `plans_applied` and
  `reschedules` are reset at `start`.
* **One run per reset.** The bin buffers are cleared after reset, and so is
  the merger's intermediate store. They are not cleared by `start`.
* **Latency.** Tuples pass through PrePE, mapper, combiner, decoder and
  filter, which is five register stages, and then the PE. The PEs sustain 8
  tuples per cycle in total. A new plan takes effect 256 + 16 + 240 + 15 ≈
  530 cycles after profiling starts.

## How far it can be trusted

Every block has a self-checking testbench in `tb/`. `tb/ddr_model.sv` is a
behavioural memory: fixed latency, in-order bursts, and a write port that
refuses one write in three.

`tb_ditto_histo_top` runs the full default configuration. It checks all 32
result bins against its own count in four runs:

| Run | Result |
|---|---|
| 16,384 uniform tuples | 2,162 cycles for 2,048 words, about one word per cycle |
| 8,192 tuples all on PriPE 2 | 2,257 cycles. One PE alone would need 16,384, so the SecPEs give about 7× |
| 16,384 tuples: PriPE 5 for the first half, PriPE 11 for the second, threshold 256 | One reschedule and a second plan |
| 1,003 tuples | Last input word only partly filled |

`tb_histo_zipf` runs the same top on Zipf-distributed keys (16,384 tuples
over 1,024 keys; rank r drawn with probability proportional to 1/r^alpha).
All 32 bins are exact for every alpha:

| alpha | Cycles | Tuples per cycle | Largest bin |
|---|---|---|---|
| 0 | 2,222 | 7.4 | 545 |
| 1 | 2,440 | 6.7 | 2,472 |
| 2 | 2,629 | 6.2 | 9,979 |
| 3 | 2,677 | 6.1 | 13,551 |

Without SecPEs the alpha = 3 run would be bound by one PE at half a tuple
per cycle, about 27,000 cycles. Most of the remaining gap to uniform data is
the 256-cycle profiling phase, during which routing is still unbalanced.

`tb_ditto_histo_top` also fails if any of these never happens: routing back-pressure,
tuples sent to SecPEs, a plan being applied, a reschedule.

The unit testbenches reproduce two worked examples:

* the mapper's table example: plan 4→2, 5→2, 6→0, with the resulting
  round-robin sequences;
* the profiler's scheduling example (same plan).

They also compare the profiler's plan with a floating-point greedy model on
random workloads.

To simulate with Verilator (the package comes first):

```
verilator --binary --timing --assert rtl/ditto_pkg.sv rtl/*.sv tb/ddr_model.sv \
  tb/tb_ditto_histo_top.sv --top-module tb_ditto_histo_top -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. Unit benches are
built the same way from the package, their module, and their testbench.

## Where this RTL departs from the published architecture, or fills gaps

* **Bins.** The published work leaves the bin hash unspecified. Here the
  bin inside a PE is `key[4 +: BIN_AW]`. `BIN_AW = 1` gives the 16-PE,
  32-bin layout of the published example. Raising `BIN_AW` makes the
  buffers deeper. Each PE then clears its buffer in 2^BIN_AW cycles after
  reset, and the final merge takes two cycles per bin.
* **Handshakes.** All 8 lanes share one valid/ready pair and move in lock
  step. The published design uses independent HLS kernels joined by
  channels.
* **Sizes chosen here.** The published work does not give these:
  - FIFO depths: read engine 64 words, filter 32 tuples;
  - burst length: 16;
  - monitoring window: 256 cycles;
  - counter width: 32 bits.
* **Threshold test.** A reschedule fires when a window has fewer than
  `threshold` tuples. The monitor only looks while input is still being
  read, so the end of the input does not trigger a reschedule.
* **Intermediate results after a reschedule.** They are kept on chip in the
  merger, M × 2^BIN_AW counters. The published design puts them in global
  memory.
* **Restart.** The profiler restarts by itself after a reschedule. The
  published design has the host re-launch it and the SecPEs.
* **Not built:**
  - the PE logic of the other applications the architecture was evaluated
    with: partitioning, pagerank, HyperLogLog, count-min heavy hitters;
  - the host-side framework that generates variants with different SecPE
    counts and picks one by sampling the dataset;
  - the DDR memory controller.

  To use another application, replace `histo_pe`, and `prepe`'s choice of
  `dst`, with that application's logic. Keep the PE's `in_*`, `busy` and
  `hp_*` ports, and adapt the merger's combining rule. The merger adds
  counts, which fits decomposable results only.
