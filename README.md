# Cache level prediction on the L1 miss path

When a load misses in L1, a conventional hierarchy asks L2, then the last-level
cache (LLC), then memory, one after another. For a block that lives in memory
the L2 and LLC lookups are pure delay: on the evaluated system (L2 12 cycles,
LLC 20 cycles for tags plus 35 for data) more than 30 cycles pass before the
memory request even leaves the chip. A *level predictor* guesses, at the moment
of the L1 miss, where the block is, and sends the request straight to that
level. Levels that will miss are skipped; a guess that is too deep is caught by
the directory next to the LLC tags and repaired.

This RTL implements one core's predictor and the control around it:

* a **LocMap**, a table in ordinary memory that holds a 2-bit location code
  (L2, LLC or memory) for every 64-byte block, and a small **metadata cache**
  that keeps the hot part of that table on chip;
* a **Popular Levels Detector**, three counters that give a fast guess when
  the metadata cache misses;
* the **routing** of each L1 miss: the L2 lookup, a request sent past L2, or
  both at once;
* the **bypass MSHRs** in L2, which hold requests that skipped L2 so that the
  answer can be delivered, and which drop the extra answers of parallel
  lookups;
* the **misprediction check** at the LLC/directory, which decides whether the
  LLC answers, the request goes on to memory, or a recovery request goes back
  to L2.

The caches, directory, memory, prefetchers and core are not part of the RTL.
Their side of every interaction is a port of the top module `lp_top`.

## Location codes and masks

`rtl/lp_pkg.sv` holds the shared types and sizes.

| code `loc_t` | meaning |
|---|---|
| `2'b00` `LOC_MEM` | only in memory |
| `2'b01` `LOC_L2`  | in this core's L2 |
| `2'b10` `LOC_L3`  | in the LLC |
| `2'b11` `LOC_RSVD`| unused; read as memory |

The code for a block that has never been touched is 0, so a zero-filled table
means "in memory". A prediction is a mask `lvl_mask_t = {mem, l3, l2}` of the
levels to look up. A mask with one bit set is a *single-way* prediction; two
or three bits make a *multi-way* prediction, where the levels are looked up in
parallel.

## The LocMap and its address mapping (`locmap_addr_gen`)

One 64-byte LocMap line holds 256 codes, which covers 256 × 64 B = 16 KiB of
physical memory. The line that covers physical address `PA` is therefore

    LocMap line = base_line + (PA >> 14)          (64-byte line units)
    slot        = PA[13:6]                        (code at bits 2·slot+1 : 2·slot)

`base_line` is where the operating system put the table. The table costs
2 bits per 512-bit block, 0.39 % of memory; for the 16 GiB (34-bit physical
address) system it is 64 MiB. The unit is purely combinational. Two copies are
used: one for the lookup address and one for the update address.

## The metadata cache (`catalog_cache`)

The metadata cache is 2 KiB, 2-way set associative, with 64-byte lines: 32 lines
in 16 sets, together covering 8192 data blocks (512 KiB). It has two ports that
work in the same cycle.

**Lookup.** This port is used on every L1 miss. The hit flag and the code are
registered, so they appear one cycle after the request. A lookup miss starts a
fetch of the LocMap line from memory when the fetch engine is free. The prediction does not wait for the
fetch; it uses the detector instead (below).

**Update.** Cache events keep the LocMap current:

| event | code written | on a metadata miss |
|---|---|---|
| demand fill into L2 | L2 | fetch the line, write the code into it |
| demand fill into LLC | LLC | fetch the line, write the code into it |
| dirty eviction from L2 | LLC (the write-back goes there) | fetch, write |
| dirty eviction from LLC | memory | fetch, write |
| prefetch fill into L2 / LLC | L2 / LLC | dropped |

Clean evictions and coherence invalidations are not reported, so codes go
stale. The misprediction check catches the results of stale codes.

**Fetch engine and update queue.** One line fetch is in flight at a time. It
runs through the states `IDLE → RD_REQ → RD_WAIT → (WB) → IDLE`. An allocating
update that misses does not start a fetch itself. It enters a 4-entry
**update queue**. When the engine is idle it fetches:

* the line of a lookup miss, if there is one and the queue is not full;
* otherwise the line of the oldest queued update.

When a line arrives, every queued update for that line is written into it,
oldest first, and leaves the queue. An update that arrives in the install
cycle is written last. The install evicts the LRU way, taking an invalid way
first. If the victim line is dirty it is written back (`WB`) before the engine
is free again. An update to the line waiting in the write-back buffer is
written into the buffer.

These rules keep one invariant: **the line of a queued update is never in
the cache.** A lookup therefore never reads a line that still owes updates,
and a write-back never carries stale codes. Updates to one line are applied
in arrival order.

An allocating update is dropped only when the queue is full. Every update is
answered one cycle later as written, queued or dropped. `ev_applied` gives
the first two to the environment.

**Memory ports.** `mem_rd_valid/ready/line` is followed by
`mem_rd_resp_valid/data` (512 bits) any number of cycles later.
`mem_wr_valid/ready/line/data` carries a write-back.

## The Popular Levels Detector (`popular_level_detector`)

There are three 32-bit counters, one each for L2, LLC and memory. Each report of
the level that served an L1 miss (`hit_valid`, `hit_level`) adds one to that
level's counter and subtracts one from the other two. The counters saturate at
0 and at the maximum. Because the counters fall as fast as they rise, a change
in where data lives shows up within a few tens of misses.

To predict, the counters are ranked; on a tie the nearer level ranks higher.

* If the top counter exceeds `THRESH_ONE`, only the top level is predicted.
* Otherwise the second level is added. If the top two together also stay
  below `THRESH_TWO`, the third level is added as well.

The prediction is therefore one-, two- or three-way. It is formed
combinationally from the counter registers.

## The predictor (`level_predictor`)

For an L1 miss in cycle *t*, the prediction is valid in cycle *t+1*:

* **metadata hit**: a one-way mask holding the level the LocMap records
  (`pred_from_map = 1`);
* **metadata miss**: the detector's mask (`pred_from_map = 0`).

This one cycle is the predictor's whole cost on the L1 miss path. The
predictor also turns fill and eviction events into LocMap codes, as in the
table above, and passes the training reports to the detector.

## Routing a miss (`lp_top`)

The mask decides where the request goes:

* `l2` set: L2 is looked up as usual (`l2_req_valid`).
* `l3` or `mem` set: the request is also sent past L2 to the LLC and
  directory (`llc_req_valid`), carrying the mask, and an L2 MSHR entry is
  taken for it **without** an L2 tag lookup.

This gives three cases:

* A mask of L2 alone is the ordinary sequential walk.
* `{l3}`, `{mem}` and `{l3, mem}` bypass L2.
* A mask with L2 and a deeper level looks up both in parallel.

If all bypass MSHRs are busy and no entry holds the same line, the request
falls back to the sequential walk (`pred_fallback`). The request and the
prediction leave in the same cycle.

## Detection and recovery at the LLC (`mispredict_detector`)

The directory sits with the LLC tags. One tag lookup of a request that came
past L2 therefore tells where the block really is. The design does not
change the directory; `mispredict_detector` is the added decision in the LLC
controller. The decision is registered, so it comes one cycle after
`dir_valid`.

| actual location | mask | action | class |
|---|---|---|---|
| L2  | L2 looked up too | `NONE`: the parallel L2 lookup answers | sequential |
| L2  | L2 skipped | `REISSUE_L2`: recovery; a request goes to L2, which answers L1; the L2 bypass entry is freed | harmful |
| LLC | holds LLC or L2 | `RESPOND_L3`: LLC data read, answer goes back | skip / opportunity loss |
| LLC | memory only | `REISSUE_L3`: recovery; the LLC data array is read after all | harmful |
| memory | any | `FWD_MEM`: on to memory (the directory is always checked before memory) | skip / opportunity loss |

If the block is in L2, `release_l3_mshr` frees the LLC's own MSHR entry for the
request. On any recovery, every entry past the actual level goes. `mispredict`
marks the two recovery actions.

The class `outcome` compares the nearest predicted level with the actual one:

* deeper than actual: *harmful*;
* nearer than actual: *opportunity loss*;
* the same level: *sequential* if it is L2, else *skip*.

## Return path (`bypass_mshr`)

The L2 bypass MSHR file has 16 entries by default. A request for a line that
already has an entry merges into it, and its target count grows. Every
response that arrives at L2 is matched by line address:

* The first match fills L1 (registered, one cycle later) and frees the entry.
* A response that matches nothing is dropped (`resp_dropped`). These are the
  late duplicates of a parallel lookup, for example the LLC's answer after
  L2 already answered.
* A `REISSUE_L2` recovery frees its entry through the dealloc port, since L2
  then serves L1 directly.

## Timing summary

| from | to | cycles |
|---|---|---|
| `l1m_valid` | `pred_*`, `l2_req_*`, `llc_req_*` | 1 |
| `dir_valid` | `act_*`, `mispredict`, `outcome` | 1 |
| `resp_valid` | `l1_fill_*` or `resp_dropped` | 1 |
| `ev_valid` | `ev_applied` | 1 |
| metadata miss (engine idle) | line installed | about memory latency + 2 |

Reset is asynchronous and active low (`rst_n`) everywhere. The RTL accepts
one L1 miss, one event, one training report, one directory result and one
response per cycle.

## Size

At the default parameters, yosys maps `lp_top` to about 930 cells and 860
flip-flop bits, plus about 17.8 Kibit of memory arrays. Most of that memory is
the metadata cache's 16 Kibit of data; the rest is the update queue and the
MSHR line addresses.

## Departures from the described design and assumptions

* **Detector thresholds.** The two thresholds are not given. `THRESH_ONE = 16`
  and `THRESH_TWO = 24` are this design's choice. Ties rank the nearer level
  first.
* **Dirty-eviction codes.** An eviction from L2 records "LLC" and an eviction
  from the LLC records "memory": the level the write-back goes to.
* **Dropped updates.** The described design updates the LocMap on every
  demand fill and dirty eviction. Here such an update is lost when it misses
  the metadata cache while the 4-entry update queue is full. The end-to-end
  test deliberately thrashes the metadata cache: 64 LocMap lines share its
  32 lines, with a 30-cycle memory. In one run of it, about 1,900 of
  roughly 10,500 reported events were demand or dirty-eviction updates lost
  this way. A lost update only makes the LocMap staler; recovery repairs
  the resulting mispredictions. `UPQ_DEPTH` sets the queue size.
* **Metadata cache policy.** These are this design's choices: LRU
  replacement, write-back of modified lines, write-allocate for demand
  updates, and lookup misses taking the fetch engine ahead of queued
  updates.
* **MSHR file.** The L2 MSHR count is not given; 16 is assumed.
* **MSHR-full fallback.** The fallback to the sequential walk when the MSHRs
  are full is this design's own.
* **Memory-only masks.** A mask naming only memory still passes through the
  LLC tag/directory check; the LLC data array is not read.
* **Multi-core.** Each core gets its own `lp_top`. All cores share one LocMap
  in memory, and it is not kept coherent between their metadata caches (see
  *Four cores sharing one LocMap*). Coherence events do not update it. The
  location code has no value for "in another core's L2".
* **Physical address width.** 34 bits, from the 16 GB memory of the evaluated
  system. Change `P_W` for a larger machine.

## Files

| file | contents |
|---|---|
| `rtl/lp_pkg.sv` | sizes, `loc_t`, `lvl_mask_t`, event/action/outcome enums, mask helpers |
| `rtl/locmap_addr_gen.sv` | LocMap line and slot from a physical address |
| `rtl/catalog_cache.sv` | 2 KiB 2-way metadata cache with fetch/write-back engine |
| `rtl/popular_level_detector.sv` | three counters and the ranking heuristic |
| `rtl/level_predictor.sv` | metadata cache + detector + event-to-code mapping |
| `rtl/mispredict_detector.sv` | LLC-side action and outcome class |
| `rtl/bypass_mshr.sv` | L2 MSHRs for bypassed requests, return-path filtering |
| `rtl/lp_top.sv` | one core's subsystem: predictor, routing, detector, MSHRs |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_lp_kernels.sv` | stream-copy and gups address streams with L2/LLC models |
| `tb/tb_lp_multicore.sv` | four predictors sharing one LocMap and one LLC model |
| `tb/tb_locmap_mem.sv` | behavioural memory holding the LocMap for the testbenches |

## Testbenches

Each testbench compares the module against a model written independently
inside the testbench. Each prints `TB_RESULT checks=N failures=M` and has a
watchdog.

`tb_lp_top` runs the top at its default parameters for about 100 000 cycles.
It uses a behavioural model of L2, LLC/directory and memory over 512 blocks.
The model moves blocks through fills, prefetches, clean and dirty evictions.
It checks:

* the one-cycle prediction;
* every directory action and outcome class against the block's true location;
* that each request is answered exactly once, from the expected level;
* that the MSHRs are empty at the end.

It also counts each mechanism and fails if one never happened:

* LocMap and detector predictions, and multi-way predictions;
* bypass, parallel lookup and MSHR-full fallback;
* all five directory actions;
* dropped duplicates;
* LocMap fetches and write-backs;
* dropped updates.

## Behaviour under two memory kernels

`tb_lp_kernels` runs `lp_top` under the block address streams of two
kernels. Behavioural models of a 256 KiB 8-way L2 and a 2 MiB 16-way
non-inclusive LLC (both LRU) supply the true locations and report fills and
dirty evictions. There is no prefetcher, and one miss is in flight at a time.
One run gave:

| kernel | misses | sequential | skip | opportunity loss | harmful |
|---|---|---|---|---|---|
| stream-copy, pass 1 (2 × 4 MiB) | 131 072 | 0 | 131 069 | 3 | 0 |
| stream-copy, pass 2 | 131 072 | 0 | 65 792 | 65 280 | 0 |
| gups, 8 GiB table, 40 000 updates | 40 000 | 0 | 39 996 | 0 | 4 |

**Stream-copy.** In the first pass, every block is correctly predicted to be
in memory, almost always from the LocMap. In the second pass the codes of the
source array still say "L2". Those blocks left L2 through clean evictions,
which are never reported, and the arrays are larger than the LLC, so they are
really in memory. Those predictions are opportunity losses: a sequential walk
that could have skipped L2. The destination array was written, so its blocks
left through reported dirty evictions and are still predicted correctly. This
is the cost of not tracking clean evictions.

**gups.** Random addresses over 8 GiB almost never hit the 32-line metadata
cache. The detector predicts memory, and its counters keep that prediction
right.

## Four cores sharing one LocMap

Each core has its own predictor, but all of them read and write one LocMap
table in memory, and the metadata caches are not kept coherent with each
other. `tb_lp_multicore` runs four `lp_top` instances at once, each with its
own L2 model, over a shared 8 MiB 16-way LLC model:

* cores 0 and 1 run stream-copy (2 × 2 MiB, two passes);
* cores 2 and 3 run gups on private 2 GiB tables.

The two stream cores' arrays interleave 4 KiB page by page, so both metadata
caches hold copies of the same LocMap lines. Each write-back of such a line
overwrites the codes the other core wrote. One run gave:

| placement of the two stream cores' pages | core 0 harmful | core 1 harmful | skip (each) |
|---|---|---|---|
| interleaved page by page | 37 470 | 20 709 | 82 585 / 87 631 |
| separate 64 MiB regions (same kernels) | 421 | 413 | about 98 100 |

Each core made 131 072 misses. The harmful predictions are recovered
correctly, but each one costs a second lookup. The design is still correct
when cores share LocMap lines, but less accurate. An OS that gives each core
physical memory in 16 KiB-aligned pieces avoids the effect.

## Simulating

With Verilator 5, for example for the top:

    verilator --binary --timing -Wno-fatal --top-module tb_lp_top \
        rtl/lp_pkg.sv rtl/locmap_addr_gen.sv rtl/catalog_cache.sv \
        rtl/popular_level_detector.sv rtl/level_predictor.sv \
        rtl/mispredict_detector.sv rtl/bypass_mshr.sv rtl/lp_top.sv \
        tb/tb_locmap_mem.sv tb/tb_lp_top.sv
    ./obj_dir/Vtb_lp_top +verilator+rand+reset+2

Replace the top module and the file list for a unit testbench. The package
must come first. `+verilator+rand+reset+2` starts all state at random values,
which checks that reset covers everything that is read.
