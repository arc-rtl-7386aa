# Asymmetric-retention STT-RAM L1 caches for a DVFS multicore

STT-RAM is attractive for L1 caches because its cells barely leak. Its writes, though, are
slow and expensive. Relaxing the cell's *retention time* (how long a written bit stays
readable, from years down to microseconds) makes writes cheaper and faster. The cost is
that a block can decay while it is still in the cache. Which retention time is best
depends on the application: on how long its blocks live in the cache. It also depends on the
clock frequency. A faster clock turns over blocks sooner, so fewer of them expire, but it
also makes a write of fixed latency take more cycles.

The asymmetric-retention core (ARC) organisation handles this by making the cores of a
multicore deliberately different. Each core has an L1 data cache with its own retention
time and its own DVFS frequency cap. Software profiles an application briefly and then runs
it on the core that suits it best. This repository holds synthesizable SystemVerilog for
the memory side of a four-core ARC processor:

* the STT-RAM L1 data and instruction caches, with per-block retention monitor counters;
* the DVFS setting logic with per-core caps;
* the profiling performance counters that feed the core-selection model;
* the connection of all eight L1 caches to one shared last-level cache (LLC).

The processor pipelines, the LLC, main memory and the core-selection software are not part
of the RTL. Their signals are ports of the top module `arc_top`.

## The four cores

| Core | L1D retention | Frequency range | L1D write latency | Write cycles at the cap |
|------|---------------|-----------------|-------------------|-------------------------|
| 1    | 26.5 us       | 0.8 - 1.2 GHz   | 0.769 ns          | 1 |
| 2    | 10 us         | 0.8 - 1.6 GHz   | 0.601 ns          | 1 |
| 3    | 75 us         | 0.8 - 2.0 GHz   | 0.981 ns          | 2 |
| 4    | 400 us        | 0.8 - 2.0 GHz   | 1.389 ns          | 3 |

Every core also has:

* a 100 ms-retention STT-RAM L1 instruction cache;
* a 32 KB, 4-way, 64 B-line geometry for both L1 caches;
* a one-cycle read.

The frequency steps are 0.2 GHz apart, from 0.8 GHz (step 0) to 2.0 GHz (step 6). The caps
are chosen so that the two short-retention cores keep a one-cycle write. The constants live
in `rtl/arc_pkg.sv` (`CORE_RET_NS`, `CORE_WR_LAT_PS`, `CORE_FMAX_IDX`), indexed 0..3 for
cores 1..4.

## From wall-clock numbers to cycles

Retention time and write latency are physical times. The cache counts clock cycles, and the
clock moves with DVFS. Two conversions follow from the current DVFS step:

* write cycles = ceil(f x write latency);
* cycles per monitor-counter tick = floor(retention x f / 4).

Both are computed at elaboration time into 7-entry tables, one entry per step, using the
functions in `arc_pkg`. At run time they are looked up with the core's current step. Each
cell below gives write cycles / tick period in cycles ("-" = above the cap):

| Step (GHz) | 0.8 | 1.0 | 1.2 | 1.4 | 1.6 | 1.8 | 2.0 |
|------|-----|-----|-----|-----|-----|-----|-----|
| Core 1 | 1 / 5300 | 1 / 6625 | 1 / 7950 | - | - | - | - |
| Core 2 | 1 / 2000 | 1 / 2500 | 1 / 3000 | 1 / 3500 | 1 / 4000 | - | - |
| Core 3 | 1 / 15000 | 1 / 18750 | 2 / 22500 | 2 / 26250 | 2 / 30000 | 2 / 33750 | 2 / 37500 |
| Core 4 | 2 / 80000 | 2 / 100000 | 2 / 120000 | 2 / 140000 | 3 / 160000 | 3 / 180000 | 3 / 200000 |

The instruction caches use 100 ms retention: a tick every 20 to 50 million cycles.

## Keeping data alive: the monitor counters

Without refresh, a relaxed-retention cache has to drop a block before the block decays. Each
block therefore carries a 2-bit counter, a 4-state FSM (`retention_monitor`):

* A shared tick from `retention_timer` arrives every retention/4.
* Writing a whole line (a fill) puts the block in state 0.
* Every tick moves every valid block one state on.
* A block that reaches state 3 is flagged.
* The cache controller takes the lowest-numbered flagged block. It writes the block back to
  the LLC if it is dirty, then invalidates it.

The tick is shared, not aligned to each fill. A block is therefore flagged between 2 and 3
tick periods after its fill: between 50 % and 75 % of its retention time. The data is safe
as long as the block is invalidated before the next tick, at 75 % to 100 % of its
retention time. To that end the controller gives flagged blocks priority over new core
requests. The blocks flagged by one tick were all filled within one tick period, and
writing one back costs about as much as filling it, so the batch drains within a period.
There is no hard bound: an LLC much slower than its fill rate could break this. The
shortest tick period is 2000 cycles (10 us at 0.8 GHz). The testbenches check the
resulting rule directly: no hit is ever served from a line older than its retention time.

A later reference to such a block misses and refetches the line. This is an *expiration
miss*: a miss that exists only because the retention time ran out. The hardware does not
count expiration misses separately; the testbenches do.

A word store into a resident line does **not** restart the counter. It rewrites only those
cells, and the rest of the line keeps its original age. Only a fill restarts it. This is a
conservative choice made here: it is always safe, at the cost of dropping a frequently
stored-to line a little earlier than necessary.

A DVFS change can lengthen the tick period, for example when moving to a higher frequency.
The timer then carries on counting down from where it was. It can shorten the period, for
example when moving to a lower frequency. The remaining count is then cut to the new
period. Either way a tick never arrives later than one period at the new frequency, so
blocks may be aged slightly early, never late.

## The cache controller (`stt_l1_cache`)

The cache is write-back and write-allocate, and blocking (one request at a time). It is
built from three parts:

* the tag, valid and dirty state, held in registers;
* `stt_data_array`: 512 lines of 512 bits, with one-cycle reads and `wr_cycles`-long writes
  that commit in their last cycle;
* the timer and the monitor.

**Core side.** A valid/ready request carries `we`, a 33-bit address (8 GB), a 64-bit word
and byte enables. Tags are compared in the cycle the request is accepted.

* A read hit answers with `core_resp_valid` one cycle after acceptance.
* A write hit starts the array write at acceptance. It answers in the write's last cycle,
  that is `wr_cycles` after acceptance.

**Misses.** The victim is an invalid way if there is one, otherwise the tree pseudo-LRU
way. A miss goes through these steps:

1. If the victim is dirty, write it back (`S_WB_REQ`, `S_WB_WAIT`).
2. Fetch the line (`S_FILL_REQ`, `S_FILL_WAIT`).
3. Write the line into the array (`S_FILL_WR`). This takes the full write time and restarts
   the block's counter.
4. Replay the request as a hit (`S_REPLAY`).

**LLC side.** Line requests (`line_req_t`: fetch or write back, line address, 512-bit data)
use valid/ready. Each request is answered by exactly one `mem_resp_valid` pulse, with data
for fetches.

**Events.** `ev` (`cache_ev_t`) pulses one-cycle events:

* read or write hit or miss, at first lookup only (replays are not counted);
* dirty eviction;
* expiry invalidation;
* expiry write-back.

## Profiling counters (`perf_counters`)

A new application first runs for a profiling interval of 3 million instructions. Software
then feeds the counter values to a decision-tree model that picks the core. The features
that come from the L1 caches are counted here:

* L1D hits;
* L1D read accesses;
* L1D read misses;
* L1D total misses;
* L1I total misses.

Retired instructions (0..2 per cycle, a 2-wide core) and cycles are counted as well.
`start` clears the counters and opens the interval. The interval closes when the
instruction count reaches `PROFILE_INSTR`: `done` rises and the counters freeze. The counters
are 32 bits wide and saturate.

The model's other features describe the memory controller: bus utilisation, idle time and
memory read hits. That controller lies beyond the LLC and is not counted here.

## Sharing the last-level cache (`llc_arbiter`)

The eight L1 caches are numbered as clients: client 2c is core c's data cache and client
2c+1 its instruction cache. The arbiter grants them in round-robin order. Only one line
transaction is outstanding at a time. The LLC's answer goes back to the granted client, and
`llc_req_id` tells the LLC who is asking. The LLC must answer no earlier than the cycle
after it accepts a request.

There is no coherence between the private L1 caches. Each application runs on one core, and
the testbenches give each core its own address range.

## Hierarchy

```
arc_top                       4 cores, shared LLC port
├── arc_tile  (x4, CORE=0..3) one core's memory side
│   ├── dvfs_ctrl             step register, cap clamp, MHz and mV outputs
│   ├── stt_l1_cache (L1D)    core's retention time and write latency
│   │   ├── retention_timer
│   │   ├── retention_monitor 512 x 2-bit counters
│   │   └── stt_data_array    512 x 64 B
│   ├── stt_l1_cache (L1I)    100 ms retention, read-only from the core
│   └── perf_counters
└── llc_arbiter               8 clients -> 1 LLC port
arc_pkg                       constants, structs, timing functions
```

`arc_top` runs everything on one clock. A real chip would clock each core from its own PLL
at its DVFS frequency, and would need clock-domain crossings towards the LLC. Those are not
described, so they are not modelled. The RTL is cycle-accurate per core, with each core's
step applied to its own caches.

## Outside the RTL

These parts are described in words only, or are taken from elsewhere:

* **Processor cores.** In-order, 2-wide, similar to Cortex-A53.
* **LLC and main memory.** An 8 GB main memory. The LLC's size and organisation are not
  given, and a behavioural model stands in for both in the testbenches.
* **Clock and supply.** The PLLs and regulators that apply the DVFS outputs.
* **STT-RAM cell.** The one-transistor, one-MTJ cell. The data array models only its timing.
* **Core-selection software.** This includes the history table, the decision-tree model and
  the deadline and energy checks. On a new application it runs on a base core for the
  profiling interval, then predicts a core. It moves to a faster core if the deadline is
  missed, and keeps the base core if the prediction uses more energy. Finally it records
  the chosen core in a history table for the next run. There is one trained tree per
  performance constraint: best energy, 20 % slack, 10 % slack, best performance. These
  run as software, so no hardware for them is provided.

## Choices made where the description is silent

* The supply voltage is linear per step: 0.9 V + 75 mV x step, which reaches 1.35 V at
  2.0 GHz. Only the end points of that range are published.
* The instruction-cache write latency is 1.389 ns, the longest published data-cache value.
* The core word is 64 bits and the physical address is 33 bits.
* The cache is write-allocate and blocking, with invalid-first then tree pseudo-LRU
  replacement.
* Only a fill restarts a block's retention counter.
* Flagged blocks are drained lowest index first, with priority over core requests.
* DVFS changes apply on the next cycle; the reset step is 0.8 GHz.
* The profiling counters are 32 bits wide and saturate.
* The LLC arbiter uses round robin with one outstanding transaction.

## Differences from the published description

* One scaled-up figure labels the first core of each cluster 25.5 us. Everywhere else that
  core is 26.5 us, which is the value used here.
* The published energy and leakage figures of the cells are not modelled; the RTL carries
  only their timing.
* The same 1-cycle read is used for every retention time. The published hit latencies
  (0.443 to 0.464 ns) round up to one cycle at every step up to 2.0 GHz.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. For example,
the full-size run of the whole design:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_arc_top \
    rtl/*.sv tb/tb_arc_top.sv
./obj_dir/Vtb_arc_top
```

A block's testbench needs `rtl/arc_pkg.sv`, the block and its sub-blocks. For example,
`tb_stt_l1_cache` needs `retention_timer.sv`, `retention_monitor.sv`, `stt_data_array.sv`
and `stt_l1_cache.sv`.

| Testbench | What it establishes |
|-----------|---------------------|
| `tb_dvfs_ctrl` | Clamping to the cap, MHz and mV per step, the clamp pulse |
| `tb_retention_timer` | Tick period = retention/4 x f at every step; no late tick after a frequency change |
| `tb_retention_monitor` | 16 counters against a reference model under random ticks, fills and invalidations |
| `tb_stt_data_array` | Contents against a shadow array; 1-, 2- and 3-cycle writes; old data visible until commit (the array has no reset, so this is checked from the first full-line write on) |
| `tb_stt_l1_cache` | See below |
| `tb_perf_counters` | Every counter against an independent tally; interval end and freeze; restart |
| `tb_llc_arbiter` | Requests forwarded intact, responses routed, round-robin order, one outstanding |
| `tb_arc_top` | See below |

`tb_stt_l1_cache` uses a 400 ns retention time so that expiry happens often. It checks:

* load data against a word-level shadow memory;
* read-hit and write-hit latencies;
* that no hit is served from a line older than its retention time, in wall-clock time
  tracked through DVFS changes.

It also requires expiry write-backs, clean expiries, expiration misses and dirty
evictions to have occurred.

`tb_arc_top` runs all defaults: published retention times and the 3M-instruction interval.
It takes about 1.5 million cycles, about a minute in Verilator. In that run:

* all four cores run loads, stores and fetches against a behavioural LLC;
* cores 1 and 2 are clamped;
* core 2 drops to 0.8 GHz and core 4 changes steps.

It checks:

* data;
* latencies, including 1-, 2- and 3-cycle writes on the right cores;
* the retention-age rule per core;
* DVFS outputs;
* the profiling counters, which must end with `done` at exactly 3,000,000 instructions.

It also requires every mechanism to have occurred: each expiry and eviction kind on every
core, and LLC contention.
