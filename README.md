# Page-utility driven placement for hybrid DRAM/NVM main memory

A hybrid main memory puts a small, fast DRAM beside a large, slow
non-volatile memory (NVM, e.g. phase-change memory). Row-buffer hits cost
about the same in both. Row-buffer misses are much slower in NVM, and NVM
writes are slowest of all. All data starts in NVM, and the question is which
4 KB pages to copy into DRAM.

Simple policies move the pages with the most accesses or the most row-buffer
misses. This design goes further and estimates the **utility** of a page:
how much *system* performance would improve if that one page were in DRAM.
Utility is the product of two estimates.

1. **Stall-time reduction of the owning application.** Each NVM row miss that
   becomes a DRAM row miss saves a fixed latency. A saved cycle only shortens
   the application's stall if no other request of the same application is in
   flight at that moment. The design therefore measures, per page, the
   memory-level parallelism (MLP) its requests saw, and scales the saved
   latency by the **MLP ratio** `m/N`. Here `m` is the number of the page's
   requests in flight and `N` the number of the application's requests in
   flight.
2. **Sensitivity of system performance to that application.** Take system
   performance as weighted speedup, `sum(T_alone/T_shared)`. A cycle removed
   from application *i* is then worth `Speedup_i / T_shared`. Every
   management quantum has the same length, so this is proportional to the
   application's current speedup estimate.

A page migrates when its utility exceeds a threshold. Once per quantum a
hill climber moves the threshold: it keeps going in the same direction while
the total stall time of all applications falls, and reverses when it rises.

## Data flow

```
 request issue/completion events          per-core stall, interference
            |                                          |
            v                                          v
  page_mlp_tracker ---records---> stat_store   speedup_estimator --total stall--> migration_threshold
  (96 hot NVM pages,              (64 x 32,     (per quantum)                           |
   MLP sampled every 30 cyc)       LRU)              | speedup[app]                      | threshold
                                     |               v                                   v
                                     +-------> utility_calc ------utility-------> migration_decision
                                                                                         | page
                                                                                         v
        location lookups ---> dram_tag_store <--probe/fill/inval-- migration_buffer --block moves--> controllers
                               (8192 x 16, LRU)                    (2 status bits per block)
```

`ubm_top` wires all of this together. The cores, caches, the DRAM and NVM
controllers and the devices themselves are outside the design. So is the
monitor that measures inter-application interference. Their events enter
`ubm_top` as ports.

## Measuring MLP per page (`page_mlp_tracker`, `mlp_div_rom`)

This is the part that sets the design apart, and the least obvious one.

* The tracker holds an entry for every page with at least one NVM request in
  flight (a "hot" page). There are at most 96 entries, the size of the NVM
  read queue (64) plus the write buffer (32). An entry is keyed by
  (application, page). It counts the page's in-flight reads `m_rd` and
  writes `m_wr`, and holds four temporaries: `MLPAcc_rd/wr` and
  `MLPWeight_rd/wr`.
* The tracker also counts every application's in-flight reads `N_rd` and
  writes `N_wr`. These counts include DRAM requests.
* Every 30 cycles a sweep adds, to every entry,
  `MLPAcc += m/N` and `MLPWeight += m`, separately for reads and writes.
  Weighting each sample by `m` gives `MLPAcc/MLPWeight` as the mean MLP ratio
  seen by the page's requests, not by wall-clock time.
* The sweep covers 3 entries per cycle. Each lane has two table lookups,
  one for reads and one for writes. A full table takes 32 cycles, so a sweep
  of a full table slightly overruns the 30-cycle period; the next sweep then
  starts as soon as the previous one ends.
* No divider is used. `m` and `N` are both bounded by the 32-entry
  last-level-cache MSHR, so `m/N` comes from a 32 x 32 table of 10-bit
  quotients, `floor(m * 512 / N)`, in 1.9 fixed point (512 = 1.0). A
  constant function computes the table at elaboration, so no data file is
  needed.
* When a page's last in-flight request completes, its temporaries travel to
  the stat store with that completion's record, and the entry is freed.
  Every NVM completion produces a record, which also says whether that
  access was a row-buffer miss.

## Statistics and utility (`stat_store`, `utility_calc`)

The stat store is a 32-way, 64-set (2048-entry) cache with true LRU
replacement. Each entry keeps the page's read and write row-miss counts
(8 bits), `MLPAcc` (25 bits) and `MLPWeight` (15 bits). It takes one record
per cycle: it reads the set, updates it and writes it back on the same edge,
so consecutive records to one set need no forwarding. It sends the updated
entry on to `utility_calc`, which computes, in three pipeline stages:

```
avg_rd  = MLPAcc_rd / MLPWeight_rd,   avg_wr likewise            (1.9 fixed point)
dStall  = (miss_rd * dT_rd * avg_rd + miss_wr * dT_wr * avg_wr) >> 9   (cycles; p = 1)
U       = dStall * speedup[app] >> 8
```

`dT_rd` and `dT_wr` are the cycles an NVM row miss costs beyond a DRAM row
miss.

* For a read this is the tRCD difference (67.5 - 15 ns).
* For a write it is tRCD plus the tWR difference (180 - 15 ns).
* At 2.67 GHz these come to 140 and 581 cycles. They are parameters in
  `ubm_pkg` and `utility_calc`.
* Writes are assumed always to be on the critical path (`p = 1`).

## Sensitivity (`speedup_estimator`)

For each application the estimator counts three things over each quantum:

* `T_stall`: cycles the core was stalled on memory.
* `T_delay`: cycles with at least one request in flight.
* `T_interference`: delay caused by other applications, supplied by an
  external interference monitor as a per-cycle increment.

At the end of the quantum (1,000,000 cycles) it computes
`T_excess = T_stall * T_interference / T_delay` and
`speedup = 1 - T_excess / T_quantum`. The speedup is 8-bit, 255 ≈ 1.0, and
covers one application per cycle. It weights utilities during the next
quantum. The estimator reports the sum of all `T_stall` to the threshold
logic at the same time.

## Threshold and decision (`migration_threshold`, `migration_decision`)

The threshold is 8 bits wide. Before the comparison, the utility is shifted
right by `UTIL_SHIFT` (6) and saturated, so one threshold step stands for 64
speedup-weighted stall cycles. The threshold moves by `STEP` (1) per
quantum, starting from `INIT` (16) and moving upwards first. A total stall
time that is unchanged from the last quantum counts as "no improvement".

A selected page waits in a 4-entry queue. A page already in the queue is not
added twice. A selection that finds the queue full is dropped. The page comes
back when its next NVM request completes.

## Migration (`dram_tag_store`, `migration_buffer`)

DRAM is a 16-way set-associative cache of NVM pages with LRU replacement:
512 MB / 4 KB = 131072 frames in 8192 sets. Tag-store port A answers
lookups for memory requests, and a hit makes the way most recently used.
Port B serves the migration engine with three operations:

* PROBE returns whether the page hits, and otherwise the victim way and the
  page it holds.
* FILL writes a tag.
* INVAL clears a tag.

For each selected page the migration engine does the following:

1. It probes the tag store. A page already in DRAM is skipped.
2. If the victim frame is occupied, it copies the victim's 64 blocks from
   DRAM to NVM and then invalidates the victim's tag.
3. It copies the page's 64 blocks from NVM into the frame.
4. It writes the page's tag.

Each block is one move command. The controllers report when the block has
reached the migration buffer (`rd_done`) and when it has reached its
destination (`wr_done`). Two status bits per block record which of the
three places holds the valid copy. A lookup of the page being moved is
answered from those bits instead of from the tag store. The tag store
therefore changes only after the data has moved.

## Parameters (defaults are the full-size design)

| parameter | default | where |
|---|---|---|
| applications | 8 | `ubm_pkg::NUM_APPS` |
| tracked pages / lanes / sampling period | 96 / 3 / 30 cycles | `ubm_top` |
| stat store | 64 sets x 32 ways | `ubm_top` |
| quantum | 1,000,000 cycles | `ubm_top` |
| DRAM tag store | 8192 sets x 16 ways | `ubm_top` |
| MLP table | 32 x 32 x 10 bit | `mlp_div_rom` |
| widths: miss 8, MLPAcc 25, MLPWeight 15, page 36, speedup 8, stall/delay/interference 20, total 23, threshold 8 | | `ubm_pkg` |

## Where this RTL is its own design

The equations, the structure sizes, the counter widths, the 30-cycle
sampling, the table-based division, hill climbing, 16-way LRU DRAM caching
and the 2-bit block status all come from the published description of the
mechanism. The following are choices made here:

* one issue and one completion event per cycle;
* saturating counters;
* the fixed-point scales;
* `UTIL_SHIFT`, `STEP` and `INIT`;
* the decision-queue depth;
* one page in transit at a time;
* true-LRU age counters;
* set indices taken from the low page bits;
* one-cycle registered tag-store answers (the original evaluation charged
  6 cycles for this lookup);
* clearing sweeps after reset, during which `ready` is low (8192 cycles for
  the tag store).

Two parts are simplified or left out:

* **Shared pages.** The stat store keeps one entry per (application, page),
  but the per-application utilities of one page are *not* summed. Each
  entry is judged on its own.
* **`T_interference`.** This comes from an interference monitor outside this
  RTL (a stall-time-fair style estimator of bus, bank and row-buffer
  conflicts). Here it is a 20-bit counter fed by an 8-bit per-cycle
  increment.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
  --top-module tb_stat_store rtl/ubm_pkg.sv tb/tb_stat_store.sv -o sim
./obj_dir/sim +verilator+rand+reset+2
```

* `tb_ubm_top` runs eight synthetic applications at reduced sizes: a
  12-entry tracker, a 4-frame DRAM and a 3000-cycle quantum. It checks
  lookups against a model of the DRAM contents, including lookups steered by
  the migration buffer. It also checks that low-MLP ("serial") pages earn
  higher utility and are migrated more often than high-MLP ones. Finally it
  requires every mechanism to occur: sampling, flushing, threshold moves
  both ways, full queue, untracked page, eviction, skipped migration and
  steered lookup.
* `tb_ubm_top_full` runs the same workload on the default-size design for one
  full quantum (about 1.01 million cycles, a few seconds).
