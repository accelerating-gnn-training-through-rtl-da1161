# Locality-aware dropout and merge for GNN training — RTL

During training, a graph neural network spends much of its time in
aggregation. In that phase every vertex reads the feature vectors of its
neighbours. The neighbours are scattered over the whole feature matrix, so
these reads land on random DRAM rows. Each read opens a row, moves one or two
bursts, and closes the row again. Training usually applies dropout to these
features anyway. Algorithmic dropout masks individual elements, which saves
almost no DRAM traffic: a burst is only saved when *every* element in it is
masked, and a row activation is only saved when every burst in that row is.

This unit sits between a GNN training accelerator and DRAM and intercepts
the accelerator's dense-feature reads. It uses DRAM-aware dropout and
reordering to turn that irregular stream into a more regular one:

* **Burst dropout** drops whole 64-byte bursts, not single elements.
* **Row dropout** groups pending bursts by DRAM row. It then keeps or drops
  whole rows, and keeps the overall dropped share at a configured rate
  `alpha`.
* **Locality-aware merging** reorders the aggregation edge list so that
  neighbours whose features sit in the same DRAM row are read back to back.
  Merging drops nothing.

Dropped bursts are not read. The accelerator receives zeros for them, with a
drop flag that doubles as the dropout mask. Scaling the kept data by
`1/(1-alpha)` is left to the accelerator's compute units.

The design follows the architecture published as *LiGNN* (Sun et al.,
"Accelerating GNN Training through Locality-aware Dropout and Merge"). It
builds that publication's main configuration, LG-T: custom trigger, row
filter, a 64 × 32 locality group table, and merging enabled. The burst
filter and the other variants (LG-B, LG-R, LG-S) are run-time settings of
the same hardware. This RTL is an independent implementation. Section
[Departures and own choices](#departures-and-own-choices) lists everything
the publication leaves open and how it was filled in here.

## Block structure

```
                 lignn_top
 edge list ─► locality_merger ──┐
             (rec_hasher,       │ feature read requests
              rec_table)        ▼
 direct reads ───────────► locality_filter ── keep ──► DRAM read requests
                           (address_mapper,     │
                            burst_filter,       │ drop
                            group_table = LGT,  ▼
                            trigger,        fake_zero_merge ◄── DRAM results
                            row_drop_ctrl)      │
                                                ▼
                                  dense tile beats (data or zero + drop flag)
```

| file | block |
|---|---|
| `lignn_pkg.sv` | address layout constants, stream structs, configuration structs, LFSR |
| `address_mapper.sv` | request (address, size) → bursts with their row identifier |
| `burst_filter.sv` | Bernoulli(alpha) drop per burst |
| `group_table.sv` | CAM of row keys, each with a FIFO: the locality group table (LGT), also used as the REC table |
| `cmp_tree.sv` | binary comparator tree that finds the shortest or longest queue, breaking ties at random |
| `trigger.sv` | decides when the LGT is output |
| `row_drop_ctrl.sv` | row dropout under the row integrity policy (the balance algorithm) |
| `locality_filter.sv` | the five blocks above, wired together |
| `rec_hasher.sv` | vertex → DRAM row of its feature |
| `rec_table.sv` | edge queues per row hash, output periodically |
| `locality_merger.sv` | hasher + REC table + edge → request conversion |
| `fake_zero_merge.sv` | merges DRAM data and zero beats into the tile stream |
| `lignn_top.sv` | the whole unit, plus statistics counters |

## Address vector and row keys

All locality decisions depend on knowing which DRAM row an address falls
in. The layout is the HBM example of the publication, fixed as constants in
`lignn_pkg`:

| address bits | meaning |
|---|---|
| 5:0 | byte within a 64-byte burst |
| 8:6 | channel/bank interleave (own reading; the publication does not name these bits) |
| 13:9 | column |
| 39:14 | row identifier: one "row" spans 16 KiB of address space |

`ADDR_W` is 40 bits. The row identifier (`addr >> 14`) is the key of both
tables. A 1 KiB feature (256 float32 values) therefore touches 16 bursts,
all under one key. For another DRAM standard, change `BURST_LSB` and
`ROW_LSB`.

## Burst dropout

`address_mapper` walks a request one burst per cycle. `burst_filter` then
drops each burst from a droppable request with probability `alpha/256`.
It uses a 32-bit LFSR that advances once per burst handled. Bursts from
non-droppable requests, such as weight reads, are never dropped. A
request is droppable if its `droppable` flag is set. On a bus that cannot
carry such a flag, an address range can be configured instead:
`range_en`, `drop_lo` and `drop_hi`. With `range_en` set, every request
whose start address falls in that range is also droppable. With the
row filter off (`row_en = 0`, the LG-B configuration), the bursts that
survive go straight to DRAM, and the table and trigger are idle.

## Locality group table and trigger

With `row_en = 1`, surviving droppable bursts go into the LGT. Each burst is
looked up by row key in all 64 entries at once:

* On a hit, the burst is appended to that entry's 32-deep FIFO.
* On a miss, the lowest-numbered free entry is claimed.
* If the queue or the table is full, the insert is refused. The trigger
  then fires, so the table can never block for good.

The trigger decides when the table is emptied:

* **Per request** (`TRIG_PER_REQUEST`, the LG-R configuration): fires after
  the last burst of each feature request.
* **Custom** (`TRIG_CUSTOM`, LG-S and LG-T): fires when the first of these
  is reached:
  * the table size reaches `tbl_thresh`;
  * the size of the queue just written reaches `q_thresh`;
  * `cnt_thresh` bursts have arrived since the last firing;
  * the table has held bursts for `time_thresh` idle cycles.

A threshold of zero switches that condition off. `flush` makes the trigger
fire until the table is empty; use it at the end of a layer. `fire` is a
registered pulse that comes one cycle after the event. While an output call
runs, no new bursts enter the table and the address mapper holds its
current burst. This matches the algorithm, in which the output step runs
inside the insertion loop.

## Row dropout: the balance algorithm

This is the least obvious part of the design. Each trigger starts one
*output call*. The call moves whole queues (whole DRAM rows) out of the
table, each either to **keep** (read from DRAM) or to **drop** (answered
with zeros). It keeps two counts: `k`, the bursts kept so far in this call,
and `d`, the bursts dropped so far.

```
while table not empty and k + d < n:
    if delta + (k + d) * alpha - d > 0:
        drop the SHORTEST queue;        d += its size
    else:
        keep the LONGEST queue meeting criteria C;   k += its size
delta += (k + d) * alpha - d            # once, at the end of the call
```

`delta` carries over from one call to the next. It measures how far the
dropped bursts lag behind the target share `alpha`:

* A positive value means too little has been dropped, so the next step
  drops.
* A value of zero or below means the next step keeps.

The steps are not symmetric:

* A drop takes the **shortest** queue, so each drop decision removes as
  little data as possible.
* A keep takes the **longest** queue, so each row activation that is paid
  for moves as many bursts as possible.

Over many calls, the dropped share converges to `alpha`. Each individual
row, however, is either fully read or not read at all. This is where the
row activations are saved.

Implementation details:

* `alpha` is an 8-bit fraction (`alpha*256`) and `delta` is held multiplied
  by 256. The test `delta + (k+d)·alpha − d > 0` is therefore done exactly
  in integers: `Δ + (k+d)·A − 256·d > 0`. `delta` is a signed 24-bit value
  and appears on the top as `delta`.
* Criteria C is a minimum queue length (`crit_min`) for a queue to be kept.
  It lets the keep step prefer rows that are worth opening. If no queue
  meets C, the longest queue is kept anyway, so a call always makes
  progress.
* Three `cmp_tree` instances find the shortest queue, the longest queue
  that meets C, and the longest queue overall. Each is a complete binary
  tree of comparators, `log2(64) = 6` levels deep. A tie at any node is
  settled by one bit of an LFSR, so among equal queues the choice is random.
* A call takes one cycle to choose a queue. Draining then takes one cycle
  per burst while the output accepts. With no backpressure, a call that
  moves `B` bursts in `Q` queues takes `B + Q + 1` cycles.

Worked example with `alpha = 0.5`, `n = 24`, and `delta = 0` at the start:

| step | k | d | test value | action |
|---|---|---|---|---|
| 1 | 0 | 0 | 0 | keep the longest queue (say 8 bursts) |
| 2 | 8 | 0 | 0 + 8·0.5 − 0 = 4 > 0 | drop the shortest queue (say 1 burst) |
| 3 | 8 | 1 | 9·0.5 − 1 = 3.5 > 0 | drop the shortest queue (1 burst) |
| … | … | … | … | … |

Drops continue until the dropped count catches up with the kept count. Any
remaining imbalance at the end of the call is stored in `delta` for the
next call.

## Locality-aware merging

The merger works on the aggregation edge list, before any request exists.
Suppose the feature matrix starts at `S`, every feature is `2^fshift` bytes
long, and float32 features are aligned to powers of two. Then the feature
of vertex `v` starts at `S + (v << fshift)`. Two neighbours share a DRAM row
exactly when their start addresses fall in the same 16 KiB row. The
row-equivalence-class (REC) hash is therefore `(S + (v << fshift)) >> 14`,
which is one adder and shifts. For 1 KiB features and `S` on a row boundary,
this reduces to comparing `v & ~7`.

`rec_table` is a second `group_table`, with 64 entries of 32 edges. It keys
each edge by the hash of its source vertex. An *output period* ends on any
of these:

* `range` edges have arrived since the last period (the "schedule range");
* an insert is refused;
* `flush` is high.

All queues are then released, lowest entry first, and each queue leaves
contiguously. Each released edge becomes one request:

* address: the source vertex's feature;
* size: one feature;
* tag: the destination vertex;
* droppable: yes.

With `merge_en = 0` the table is bypassed, and edges become requests in
their original order (the LG-S configuration).

## Dense tiles and the drop flag

`fake_zero_merge` combines two inputs into one tile stream:

* DRAM results of kept bursts, with `dropped = 0`;
* dropped bursts from the burst filter or row dropout, turned into all-zero
  beats with `dropped = 1`.

When both inputs are waiting, it alternates between them (round robin).
Every requested burst comes back exactly once. The accelerator matches
beats to requests by burst address and tag, because order is not kept.

## Configuration (`lignn_cfg_t`)

| field | meaning |
|---|---|
| `merge.merge_en`, `merge.feat_base`, `merge.fshift`, `merge.range` | merging on/off; feature matrix base `S`; log2 of feature bytes; edges per output period |
| `filter.burst_en`, `filter.burst_alpha` | burst filter on/off; its drop rate × 256 |
| `filter.range_en`, `filter.drop_lo`, `filter.drop_hi` | also treat requests starting in `[drop_lo, drop_hi)` as droppable |
| `filter.row_en` | LGT + trigger + row dropout on/off |
| `filter.row.alpha`, `.n`, `.crit_min` | row drop rate × 256; bursts output per call; criteria C |
| `filter.trig.mode`, `tbl_thresh`, `q_thresh`, `cnt_thresh`, `time_thresh` | trigger mode and thresholds (0 = off) |

The publication's variants map onto these fields as follows:

| variant | settings |
|---|---|
| LG-B | `burst_en = 1`, `row_en = 0` |
| LG-R | `row_en = 1`, per-request trigger; the publication pairs it with a 16 × 16 table (`ENTRIES = DEPTH = 16`) |
| LG-S | `row_en = 1`, custom trigger, `merge_en = 0` |
| LG-T | LG-S plus `merge_en = 1` |

In LG-R, LG-S and LG-T the burst filter is optional. Keep the configuration
static while the unit is busy.

## Interfaces and timing

All streams use valid/ready handshakes. A beat transfers on a clock edge
where both signals are high, and a valid beat is held until it is accepted.
Reset is synchronous and active low.

Top-level ports:

* **Inputs:** `edge_*` (`edge_t`: `src`, `dst`) and `req_*` (`rd_req_t`:
  `addr`, `size`, `tag`, `droppable`). Direct requests have priority over
  the merger.
* **DRAM side:** `dram_req_*` (`burst_t`) out, `dram_rsp_*` (`dram_rsp_t`,
  512-bit data) in.
* **Accelerator side:** `tile_*` (`tile_beat_t`) out.
* **Status:** `busy` is low once no request is held anywhere inside.
  `stats` counts bursts sent to DRAM, zero beats, burst drops, row keeps
  and drops, trigger firings, stall cycles, bypassed bursts and merge
  periods.

Throughput is one burst per cycle through the mapper and the filter, and
one edge per cycle through the merger. The mapper's first burst appears one
cycle after its request is accepted. The burst filter and the fake-zero
merge add no latency.

## Parameters and sizes

| parameter | default | origin |
|---|---|---|
| `ENTRIES`, `DEPTH` (LGT) | 64, 32 | publication, LG-S/LG-T table size |
| `M_ENTRIES`, `M_DEPTH` (REC table) | 64, 32 | own choice; the publication gives only its area |
| `BURST_LSB`, `ROW_LSB` | 6, 14 | publication, HBM example |
| `ADDR_W` | 40 | own choice (1 TiB) |
| `VID_W`, `TAG_W` | 27 | own choice; covers 1.1e8 vertices |
| `DATA_W` | 512 | own choice (one 64-byte burst) |

At the default sizes the whole unit synthesises, with yosys coarse
synthesis, to about 5.8k word-level cells, 6.1k flip-flop bits and 236k
memory bits. The two tables are written as flip-flop arrays. A real
implementation would use a CAM macro and SRAM FIFOs instead.

## Departures and own choices

* The burst filter uses plain Bernoulli sampling. The publication also
  mentions weighting by a burst's effective ratio or by load balance; that
  weighting is not built.
* The trigger also fires on a refused insert and on flush. This is a
  liveness rule added here. Compute-engine utilisation, which the
  publication lists as a possible trigger input, is not an input.
* Criteria C is a minimum queue length. If no queue meets it, the longest
  queue is kept.
* Insertion stalls for the whole of an output call. The publication's
  algorithm does the same, but a pipelined design could overlap the two.
* REC table size, period rule and queue order are own choices.
* The dropout mask is returned as a flag on each tile beat. The
  alternative of writing it to memory is not built.
* The address layout applies to HBM only. DDR4 and GDDR5 layouts would
  need other constants, and the publication does not give them.
* The second request input (`req_*`) and the statistics counters are
  additions.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_address_mapper` | burst ranges, row keys and `last` flags against arithmetic on the request; one burst per cycle |
| `tb_burst_filter` | one output per burst; protected bursts never dropped; dropped share within 3 points of `alpha` at 0.1, 0.5 and 0.8 |
| `tb_group_table` | cycle-by-cycle comparison against a keyed-FIFO reference model, covering hits, allocation, refusal and simultaneous insert and pop |
| `tb_cmp_tree` | winner against a linear scan; random tie breaking spreads over the leaves |
| `tb_trigger` | each firing condition, its one-cycle latency, suppression while busy, pending firing, idle-time count |
| `tb_row_drop_ctrl` | sequence of (keep or drop, queue size) decisions and `delta` against a reference model of the algorithm, over 300 calls; `B + Q + 1` cycle count |
| `tb_locality_filter` | LG-B, LG-S and LG-R: every burst leaves exactly once; protected bursts kept; dropped share; trigger, stall and bypass seen; droppable address range |
| `tb_rec_hasher` | formula in 64-bit arithmetic; the `v & ~7` property |
| `tb_rec_table` | edges out exactly once, contiguous per hash, in arrival order; period on count alone |
| `tb_locality_merger` | request contents; order without merging; fewer row changes with merging |
| `tb_fake_zero_merge` | data passed through, zero beats, drop flags, round robin |
| `tb_lignn_top` | whole unit at default sizes with a behavioural DRAM (`tb/dram_model.sv`) |
| `tb_lignn_alpha_sweep` | whole unit at default sizes, LG-T at five drop rates |
| `tb_lignn_lgr` | whole unit with a 16 × 16 locality group table, LG-R (per-request trigger) and LG-S |

`tb_lignn_top` runs the same 400-edge list, plus non-droppable weight
reads, in four configurations at `alpha = 0.5`. One run produced:

| configuration | dropped share | DRAM row activations |
|---|---|---|
| no dropout, no merging | 0 | 3176 |
| LG-B (burst dropout) | 0.496 | 2414 |
| LG-S (row dropout) | 0.500 | 1202 |
| LG-T (row dropout + merging) | 0.500 | 540 |

This is the qualitative trend the publication reports: burst dropout saves
some row activations, row dropout saves far more, and merging adds to that.
The graph is synthetic and the DRAM model is not a timing model, so the
figures are not comparable with the publication's.

`tb_lignn_alpha_sweep` runs the same kind of edge list in LG-T while
`alpha` steps from 0.1 to 0.9:

| alpha | dropped share | DRAM row activations |
|---|---|---|
| 0 (no dropout, no merging) | 0 | 3176 |
| 0.1 | 0.105 | 932 |
| 0.3 | 0.297 | 796 |
| 0.5 | 0.499 | 541 |
| 0.7 | 0.699 | 453 |
| 0.9 | 0.895 | 184 |

The dropped share follows `alpha` closely, even though every decision
covers a whole row. The testbench allows a difference of up to 0.06. At
`alpha = 0.1`, most of the gain comes from merging.

With the 16 × 16 table, `tb_lignn_lgr` measures 1608 activations for LG-R
at `alpha = 0.5`, against 3176 without dropout. On this edge list each
1 KiB feature fills one 16-deep queue by itself. Batching several
features per call, as LG-S does, therefore gains almost nothing at this
table size.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/lignn_pkg.sv tb/tb_lignn_top.sv --top-module tb_lignn_top
./obj_dir/Vtb_lignn_top
```

Replace `tb_lignn_top` with any other testbench name. `tb_lignn_top` and
`tb_lignn_alpha_sweep` use the default sizes; `tb_lignn_lgr` uses a
16 × 16 table. The unit testbenches for the tables and for the blocks
that contain them use smaller tables, for example 8 × 8, so that full and
blocked queues are reached quickly. Each run takes under a second.
