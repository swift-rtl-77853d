# Swift in SystemVerilog: a decoupled multi-FPGA graph accelerator

Large graphs do not fit on one FPGA. When the work is split over several
cards, every iteration normally ends with a barrier: each card computes,
then all cards exchange the vertex values that changed (the *frontiers*)
over PCIe, and only then does the next iteration begin. The exchange is
slow, so the cards spend much of each iteration waiting on it.

The Swift design removes that barrier. Each card cuts its share of the graph
into *intervals* of source vertices. Each interval goes through its own cycle
of five operations, independently of the other intervals:

| short | operation | what happens |
|---|---|---|
| IF | import frontiers | values other cards changed are written into this card's copy of the source properties |
| PE | process edges | the edges of the interval whose source is active produce updates (value, destination) |
| PU | partition updates | updates are grouped by destination interval, so the apply step has locality |
| AU | apply updates | updates are summed into the destination properties; changed vertices become frontiers |
| EF | export frontiers | the new frontiers leave for the host, which passes them to every card |

At any moment one interval may be importing, a second running PE&PU and a
third applying, while a fourth exports. Communication is therefore hidden
behind computation, both between cards and inside one card.

This repository holds synthesizable RTL for one card (`swift_top`), with
testbenches for each block and for a two-card system. It follows the
published description of Swift where that description is specific. Where it
is not, the design makes its own choices, and the sections below say which
is which.

## The graph and where each part of it lives

All cards use the same global vertex IDs, so no ID is ever translated.
Three kinds of data are placed differently:

* **Source properties.** Every card keeps a full copy of all of them in one
  dedicated HBM channel, the *frontier channel*. There is one 128-bit word
  per vertex at address = vertex ID, holding `{tag[39:32], prop[31:0]}`.
* **Destination properties and incoming edges.** These are spread over all
  PEs of all cards. Each card has `NUM_PE` = 32 processing elements (PEs),
  each with its own *worker* HBM channel.
* **Intervals.** An interval holds `I = APPLY_DEPTH * NUM_PE * nfpgas`
  consecutive vertex IDs. This is 512 × 32 × 4 = 65536 for four cards.
  Within an interval, consecutive blocks of `APPLY_DEPTH` (512) vertices
  belong to consecutive PEs of the whole cluster. The PE with global number
  `g = fpga_id*NUM_PE + pe` owns vertices `[b*I + g*512, b*I + g*512 + 512)`
  of interval `b`. So every PE owns exactly 512 destination vertices per
  interval, and the apply buffer holds all of them at once.

A PE's edges are those whose destination it owns. They are grouped by the
interval of their *source*, because a PE processes one source interval at a
time.

Decoding a destination `v` in a PE is pure bit slicing, because every size
is a power of two:

* The interval is `v >> bin_shift`, where
  `bin_shift = log2(APPLY_DEPTH) + log2(NUM_PE) + cfg_log2_fpgas`.
* The index inside the PE's block is `v[8:0]`.

### Worker channel layout (word addresses)

| region | address | content |
|---|---|---|
| edge table | `k` for `k < 2048` | `{count[63:32], base[31:0]}`: edges with source in interval `k` |
| properties | `2048 + b*512 + i` | destination property `i` of interval `b` |
| update slots | `2048 + 2048*512 + (s*2048 + b)*BIN_CAP + j` | update `j` for destination interval `b`, slot `s` |
| edges | anywhere above the update slots, as the table says | `{src[95:64], dst[63:32], weight[31:0]}` |

The host prepares the edge table, the edges and the initial properties
before `start`. The frontier channel needs only the source properties.

## Activity without clearing: iteration tags

A vertex is active in iteration `i` if its value changed in iteration
`i-1`. Flags that must be cleared every iteration would cost a pass over
memory. Instead, each source entry carries an 8-bit tag:

* The apply step writes frontiers with `tag = i + 1`.
* The edge step treats a source as active when `tag >= i`.
* Before the run, the host marks initially active vertices with tag 1 and
  inactive ones with tag 0.

An interval is processed in iteration `i` only with entries that were
written for iteration `i` or later. In the asynchronous mode, "or later" is
exactly the freedom the decoupled model allows: a value that is fresher than
required is used.

## Life of an interval: `interval_scheduler`

The scheduler keeps one state per interval. The three states the design
description names are *ready-for-process*, *ready-for-export* and
*ready-for-import*. The RTL splits them into:

`IMPORT → PROCESS → PROCESSING → APPLY → APPLYING → EXPORT → EXPORTING → IMPORT …`

Three scanners each visit one interval per cycle:

* **Process scanner.** It turns `IMPORT` into `PROCESS` once the interval
  has received one frontier *batch* from every card, counting its own. It
  starts PE&PU on a `PROCESS` interval when the PE&PU engine and one of the
  two *update slots* are free.
* **Apply scanner.** It starts AU on a partitioned interval. The slot it
  reads is the one that interval's PE&PU filled. The other slot can be
  filling at the same time, which is how PE&PU of one interval overlaps AU
  of another.
* **Export scanner.** It asks the exporter to close an interval's batch
  once its AU is finished. After that, the interval's iteration count rises.
  Once the count reaches `cfg_max_iter`, the interval is `DONE`.

Intervals that start with no active vertex (`init_active[k] = 0`) skip
PE&PU and AU in their first iteration. They export an empty batch so that
the other cards' batch counts still add up. This is counted in `bypassed`.

With `cfg_sync = 1` the same hardware runs the conventional bulk-synchronous
schedule, the baseline of the decoupled model:

* Imports are held (`import_enable` low) until every interval has finished
  PE&PU of the current round, and only the round's `N * nfpgas` batches are
  let in.
* No interval may start the next iteration before all of them have arrived.
* Each cycle a dispatch is blocked by this barrier counts in
  `barrier_stalls`.

The result of a synchronous run is deterministic, and the end-to-end test
checks it exactly.

**Stopping on convergence (synchronous mode only).** A run stops when no
frontiers remain, or after `cfg_max_iter` iterations, whichever comes first.
The scheduler notes whether any frontier carrying data was imported in a
round. If a whole round imports none, no vertex is active for the next
iteration on any card:

* `converged` goes high.
* Intervals waiting to be processed are retired straight to `DONE`.
* `done` follows once every interval is `DONE` or retired.

Every card sees the same batches in a round, so all cards stop together. In
the asynchronous mode cards receive batches in different orders. There is no
common point at which they could agree that nothing is in flight, so an
asynchronous run always goes to `cfg_max_iter`.

## Inside a processing element

`processing_element` has two engines that share the worker channel through
`hbm_port_arbiter`:

* **PE&PU engine.** `source_interval_broadcaster` first reads the source
  interval from the frontier channel and writes it into the VertexProperty
  buffer of every PE. The engine then works through three steps:
  1. It reads the edge table word for the interval, then streams the edges
     into `process_edge`.
  2. `process_edge` is a two-stage pipeline, one edge per cycle. It looks
     up the source entry, skips an inactive source, and otherwise emits
     `(Process_Edge(weight, prop), dst)`.
  3. Updates pass into `partition_updates`, which keeps a BRAM bin of
     `BIN_DEPTH` (8) updates per destination interval. A full bin is burst
     to the interval's region of the chosen update slot in HBM. At the end
     of the interval, the remaining bins are flushed.
* **AU engine.** It takes the slot that one source interval's PE&PU
  filled. For every destination interval with updates in that slot, it
  works through four steps:
  1. It loads the PE's 512 destination properties of that interval from
     HBM into `apply_updates`.
  2. It streams in the updates from that interval's region of the slot.
  3. It applies them with a two-cycle read-modify-write. A read of the
     vertex being written in the same cycle gets the new value forwarded,
     so there is one update per cycle.
  4. It writes the buffer back and drains the vertices that changed. These
     are written to HBM and pushed, as frontiers, into the PE's frontier
     FIFO.

So the frontier *batch* of source interval `k` is the set of vertices,
in any interval, that the edges leaving `k` changed. The batch is labelled
with `k`. Interval `k` runs again once every card has sent its batch for
`k`. In the synchronous mode the barrier adds a further guarantee: every
update of the round has been imported before any interval runs again, so
the result equals a bulk-synchronous iteration.

Edge function: `res = prop` for PageRank and HITS, `res = weight * prop` for
SpMV. Apply is a sum. For PageRank the host is expected to pre-scale source
values by the out-degree. The damping step is left to the host.

A slot region holds `BIN_CAP` (1024) updates per destination interval. More
are dropped, and `overflow` is raised.

## Frontiers between cards

`export_frontier` drains the 32 frontier FIFOs round-robin onto the
card-to-host stream all the time, so export overlaps apply. To close
interval `k` it works as follows:

* It snapshots every FIFO's fill level. Those entries include all of `k`'s
  frontiers.
* It sends them.
* It then sends a message with `last = 1` for `k`.

The message type is `fmsg_t = {last, has_data, interval[15:0], vid[31:0],
prop[31:0], tag[7:0]}`.

The host (not part of this RTL) must deliver every message of every card
to the host-to-card stream of every card, the sender included. It must keep
each card's messages in order.

`import_frontier` writes each frontier into the frontier channel at its
vertex ID. On a `last` message it reports one finished batch for that
interval to the scheduler.

## Top-level interface: `swift_top`

| group | ports |
|---|---|
| configuration | `start`, `cfg_algo` (PR/SpMV/HITS), `cfg_num_intervals`, `cfg_max_iter`, `cfg_log2_fpgas` (1–8 cards), `cfg_fpga_id`, `cfg_sync`, `init_active[2048]` |
| worker HBM, per PE | `w_req_valid/ready`, `w_req = {we, addr[31:0], wdata[127:0]}`, `w_rsp_valid`, `w_rsp_data[127:0]` |
| frontier HBM | `f_req_valid/ready`, `f_req`, `f_rsp_valid`, `f_rsp_data` |
| host DMA | `h2c_valid/ready/msg`, `c2h_valid/ready/msg` |
| status | `running`, `done`, `converged`, `overflow`, and event counters (below) |

Every stream is valid/ready: a transfer happens on a clock edge where both
are high. HBM ports answer reads in request order, with any latency. Reset
is asynchronous and active low. There is one clock; the paper's cards run
at 150 MHz.

The counters are `edges_processed`, `edges_skipped`, `updates_applied`,
`apply_forwards`, `bin_full_flushes`, `frontiers_exported`,
`frontiers_imported`, `barrier_stalls` and `bypassed`, plus two overlap
counters:

* `overlap_pepu_au` counts cycles with PE&PU and AU busy together.
* `overlap_comp_comm` counts cycles computing while importing or exporting.

Parameter defaults are `NUM_PE` 32, `MAX_FPGAS` 8, `APPLY_DEPTH` 512,
`MAX_INTERVALS` 2048, `BIN_DEPTH` 8, `BIN_CAP` 1024 and `FR_DEPTH` 16. Two
come from the published design:

* 32 PEs per card: 128 PEs on four cards.
* Up to 8 cards.

The others are this design's choices.

## Where this design departs from the published one

* **Partitioning is one pass.** The published design partitions updates
  with a recursive tree of BRAM bins, making log2(range) passes through
  HBM. Here there is a single pass with one bin per destination interval.
  Locality within an interval comes from the apply buffer holding the whole
  interval.
* **Convergence stop in synchronous mode only.** The published flow stops
  when no frontiers remain *or* after a given number of iterations. Both
  stops are built for the bulk-synchronous mode. The asynchronous mode has
  only the iteration limit, for the reason given above.
* **32 workers plus a frontier channel.** The text places 128 PEs on four
  cards and also reserves one of the 32 HBM channels for frontiers. Those
  two numbers need 33 channels. This design keeps 32 PEs and brings the
  frontier channel out as its own port.
* **HITS is a simplification.** HITS is run as its sum-based propagation
  step. Alternating hub and authority passes, and normalisation, are not
  built. The published evaluation reports no Swift result for HITS either
  (out of memory).
* **One item per word in HBM.** Every edge, property, update and frontier
  entry takes a whole 128-bit HBM word. This keeps the address logic
  trivial but wastes capacity (next section).
* **Host side not included.** The host-side DMA double buffering, the graph
  pre-processing and the HBM itself are not RTL.

## Capacity at the default sizes

These checks assume four cards and a 256 MB pseudo-channel (16.8M words).

* **Worker channels.** About 5.2M words are fixed (table, properties and
  two update slots), which leaves about 11.5M words for a PE's edges.
* **Frontier channel.** This channel needs one word per vertex, which is
  the real limit.

| dataset | vertices | edges | intervals (max 2048) | edges per PE | fits |
|---|---|---|---|---|---|
| Indochina | 7.4M | 194M | 113 | 1.5M | yes |
| RMAT, scale 23 | 8.4M | 1.07B | 128 | 8.4M | yes |
| RMAT, scale 24 | 16.8M | 1.07B | 256 | 8.4M | yes (exactly fills the frontier channel) |
| Twitter, UK-2005, Weibo, RMAT scale 25, WebBase | 33.6M–118M | 0.5–1.4B | 512–1801 | ≤ 10.9M | no: the frontier copy exceeds one channel |
| SK-2005 | 50.6M | 1.9B | 773 | 14.8M | no: edges and frontier copy |

Packing four 32-bit properties per word, or spreading the frontier copy over
channels, would lift the limit. The counters and the address widths (32-bit
IDs and word addresses) already cover all of these graphs.

The source buffer of each PE is sized for eight cards: 131072 × 40 bits.
That is 1024 UltraRAM blocks per card, more than a U280 has. A four-card
build can set `MAX_FPGAS = 4`.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench, and each ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_swift_top` builds a two-card cluster at reduced sizes (2 PEs per
  card, 4 intervals of 16 vertices). It includes behavioural HBM channels
  with random back-pressure and a host model that broadcasts frontiers. It
  runs SpMV for three iterations.
  * **Synchronous run.** Every destination property and every card's
    frontier copy is compared with a reference computation.
  * **Asynchronous run.** It checks completion and that all frontiers were
    imported everywhere.
  * **Converging run.** A graph whose edges all lead into one interval runs
    with a limit of six iterations. Both cards must raise `converged`, and
    the run must take fewer cycles than the full runs (752 against 2305).
  * **Mechanisms.** It counts each mechanism and fails if one never
    occurred: skipped inactive edges, skipped inactive interval, full-bin
    burst, apply forwarding, barrier stall, PE&PU/AU overlap, and
    compute/communication overlap.
* `tb_swift_top_full` runs `swift_top` with every parameter at its default.
  The setup is one card, two intervals of 16384 vertices, 3000 edges and
  two synchronous SpMV iterations. It checks all 32768 properties and
  frontier entries exactly. It takes a few seconds.
* `tb_swift_cluster` connects four and then eight cards (2 PEs each)
  through a broadcasting host model. It runs three PageRank iterations on a
  256-vertex RMAT-style graph with 700 edges, in both modes.
  * Synchronous runs are checked exactly.
  * Asynchronous runs must import every frontier on every card and show
    compute/communication overlap.
  * Asynchronous is not always faster here. Frontiers that arrive early make
    vertices active an iteration sooner, which changes the amount of work.
    Cycles, synchronous vs asynchronous: 7381 vs 7478 on four cards, 4326 vs
    3700 on eight.

To run a testbench with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
  rtl/swift_pkg.sv tb/hbm_model.sv tb/tb_swift_top.sv --top-module tb_swift_top
./obj_dir/Vtb_swift_top
```

Replace `tb_swift_top` with any other `tb_*` module. `tb/hbm_model.sv` is a
behavioural HBM channel model for simulation only.

## Files

* `rtl/swift_pkg.sv`: widths, the structs above, algorithm and state
  enums, and the edge and apply functions.
* `rtl/swift_top.sv`: one card.
* `rtl/interval_scheduler.sv`: interval state table and scanners.
* `rtl/processing_element.sv`: the two engines of one PE.
* `rtl/process_edge.sv`, `rtl/partition_updates.sv` and
  `rtl/apply_updates.sv`: the PE datapaths.
* `rtl/source_interval_broadcaster.sv`, `rtl/import_frontier.sv` and
  `rtl/export_frontier.sv`: the frontier path.
* `rtl/hbm_port_arbiter.sv`, `rtl/hbm_stream_reader.sv` and
  `rtl/sync_fifo.sv`: channel sharing, burst reads and FIFOs.
