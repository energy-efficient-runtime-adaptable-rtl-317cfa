# LARS: an L1 STT-RAM data cache whose retention time is chosen at run time

STT-RAM is attractive for L1 caches: it leaks far less than SRAM and is denser.
Its weak point is the write: a write must flip a magnetic tunnel junction, and
the energy and latency this takes grow with the cell's *retention time*, the
time a cell keeps its value without power. Cells can be built with retention
times of microseconds instead of years, which makes writes cheaper. But a block
that must stay in the cache longer than the retention time is then lost, unless
it is refreshed, and refreshing costs energy too.

Different programs need different retention times. A program whose blocks are
evicted within microseconds gains from the cheapest cells. A program that keeps
blocks for tens of milliseconds needs long-retention cells, or it suffers many
extra misses. LARS (Logically Adaptable Retention time STT-RAM) does not try to
change the cells. It builds the cache from **four complete STT-RAM units**, with
retention times of **100 µs, 1 ms, 10 ms and 100 ms**, and uses only one of them
at a time. Because STT-RAM is 3 to 9 times denser than SRAM, the four units fit
in roughly the area of one SRAM cache of the same capacity.

Two parts make this work:

* **Expiry instead of refresh.** Each block has a small monitor counter. When the
  counter says the block is about to outlive the active unit's retention time,
  the controller writes the block back if it is dirty and then invalidates it.
  The block then simply misses on its next use. Nothing is ever refreshed.
* **A tuner.** For each application it tries the units in turn, from the
  longest retention time down. Each unit runs for one tuning interval of 100
  million instructions. The tuner measures the interval's cache statistics and
  keeps the unit that is best by its criterion. It remembers the choice for when
  the application runs again. After tuning it keeps checking, and it tunes again
  when the metric drifts by more than 5%.

This repository gives synthesizable SystemVerilog for the cache (controller,
tag and data stores of the four units, status arrays with monitor counters)
and for the tuner (energy/EDP datapath, the four selection algorithms,
per-application history), with self-checking testbenches.

## Cache organisation

| | |
|---|---|
| capacity per unit | 32 KB, 64-byte lines, 4-way set associative: 128 sets × 4 ways |
| units | 4, index 0..3 = 100 µs, 1 ms, 10 ms, 100 ms |
| address | 32 bits: tag [31:13] (19 bits), set [12:6], byte in line [5:0] |
| read (hit) latency | 2 cycles, all units |
| write latency | 3, 4, 5, 7 cycles (100 µs … 100 ms) |
| policy | write-back, write-allocate |
| clock | 2 GHz (sets the monitor-clock periods below) |

Each unit (`stt_ram_unit`) holds a tag store and a data store. A read returns
the tags and lines of all four ways of a set at once, so the tag compare and the
data selection happen in the same 2-cycle access. A write stores one tag and one
whole line. An access occupies the unit for exactly its latency, and the next
access can start at the clock edge that ends it.

The arrays are ordinary memories. The physics of retention loss is not
modelled: the design ensures that no block is read after its retention time,
and that guarantee is what the status array and the controller implement.

## Status array and monitor counters

Each unit has its own status array (`status_array`): for each of its 512 blocks
a valid bit, a dirty bit and a **monitor counter** (`monitor_counter`).

The monitor counter is an N-state chain S0 … S(N−1) with N = 10 (4 bits).
It advances one state per pulse of the unit's *monitor clock*, whose period is
the retention time divided by N. At 2 GHz the periods are:

| unit | retention | monitor period | cycles (`TICKn`) |
|---|---|---|---|
| 0 | 100 µs | 10 µs | 20 000 |
| 1 | 1 ms | 100 µs | 200 000 |
| 2 | 10 ms | 1 ms | 2 000 000 |
| 3 | 100 ms | 10 ms | 20 000 000 |

A write to the block, or its invalidation, returns the counter to S0. A read does
not, because reading does not restore an STT-RAM cell. In S(N−1) the counter
raises *expired* and stays there until the controller invalidates the block.
Since monitor pulses are not aligned with writes, a block expires between
(N−2) and (N−1) monitor periods after its last write. That is always before the
retention time elapses, with at least one monitor period left for the
controller to act. Each unit's monitor clock is `monitor_tick_gen`, a one-cycle
enable pulse from a prescaler.

The status array reports the lowest-numbered *valid* expired block. Counters of
invalid blocks keep running but are ignored.

## The controller (`lars_dcache`)

The controller serves one CPU access at a time and accesses only the unit named
by the 2-bit location register `active_unit` (100 ms after reset). When idle,
it picks the next job by priority:

1. **Unit switch** requested by the tuner: migration (below).
2. **Expired block** in the active unit. If the block is dirty, the controller
   reads it (2 cycles), writes it to memory, then invalidates it. If it is
   clean, it invalidates it at once.
3. **CPU access.** The tags, lines and status of the set are read together.
   * Load hit: the word is returned. The response comes 2 cycles after the
     request is accepted.
   * Store hit: the word is merged into the line, and the line is rewritten
     (2 + 3…7 cycles). The block becomes dirty and its counter restarts.
   * Miss: the victim is the first invalid way, else the way named by a
     per-set round-robin pointer. A dirty victim is written back. The line is
     then fetched, merged with the store data on a store miss, and written into
     the unit. Its counter restarts.

**Migration.** When the tuner switches from unit *a* to unit *b*, the cache
state moves with it. For each of the 512 blocks, the block's set is read from
*a* (2 cycles). The block's tag and line are written into *b* (the write latency
of *b*), together with its valid and dirty bits. The block is then invalidated
in *a*. All 512 blocks are copied, valid or not, so a migration always takes
512 × (2 + WR_b) cycles: 2560, 3072, 3584 or 4608 cycles into the 100 µs, 1 ms,
10 ms or 100 ms unit. The 4608 cycles for the 100 ms unit is the migration cost
reported for the original design. The CPU is stalled during a migration.

### Interfaces

* CPU: `cpu_req`, `cpu_we`, `cpu_addr`, `cpu_wdata` are accepted in a cycle
  where `cpu_ready` is high. `cpu_resp` is high for one cycle when the access
  completes, with `cpu_rdata` for loads. Stores write a whole 32-bit word.
* Memory: `mem_req` with `mem_we`, `mem_addr` (line address, 26 bits) and
  `mem_wdata` are held until `mem_ack`. Read data is taken from `mem_rdata` in
  the ack cycle.
* Switch: `switch_req` and `switch_unit` are held until the one-cycle
  `switch_done`. A request for the unit already active is answered at once.
* `perf_ev`: one-cycle event pulses for the performance counters.

## Statistics and the energy model

`perf_counters` counts seven quantities per tuning interval:

* read requests
* write-backs
* write requests
* misses
* hit-latency cycles: lookups and store-hit writes
* miss-latency cycles: victim write-backs
* refill-latency cycles: line fetch and fill

At the end of an interval `snap` copies the counts into a snapshot register set,
which the tuner reads, and restarts the live counters.

`edp_datapath` turns the snapshot into energy and energy-delay product (EDP).
It has one multiplier, fed by two operand multiplexers, an intermediate
register and an accumulator. It works through five products in a fixed order:

| step | energy term | count |
|---|---|---|
| 1 | read energy per access | read requests |
| 2 | read energy per access | write-backs |
| 3 | write energy per access | write requests |
| 4 | write energy per access | misses (each refill writes the array) |
| 5 | leakage per cycle | miss + hit + refill latency |
| 6 | accumulated energy | miss + hit + refill latency → **EDP** |

The energies are per unit and are given in femtojoules:

| unit | read | write |
|---|---|---|
| 100 µs | 12 000 fJ | 40 000 fJ |
| 1 ms | 12 000 fJ | 56 000 fJ |
| 10 ms | 11 000 fJ | 76 000 fJ |
| 100 ms | 11 000 fJ | 101 000 fJ |

Leakage is 1.753 mW for all units. At 0.5 ns per cycle that is 876.5 fJ,
rounded to 877 fJ per cycle.

Each step takes one cycle, and `done` follows `start` by 8 cycles. The energy
register is 64 bits and the EDP 98 bits (fJ × cycles).

## The tuner (`lars_tuner`)

Software announces each application with `app_start` and a 3-bit `app_id`, and
the processor pulses `inst_retired` once per retired instruction. The tuner then
works in these steps:

1. **Lookup.** The application's `app_id` is looked up in `retention_history`,
   a table of 8 entries. Each entry holds a unit and a base value.
2. **Known application.** The tuner switches to the stored unit and goes
   straight to checking (step 5).
3. **New application: tuning.** The tuner switches to the 100 ms unit and runs
   one interval of `INTERVAL` instructions (100 000 000). It then takes the
   interval's metric. This first value is the *base*, and 100 ms is the current
   choice.
4. **Step down.** The tuner switches to 10 ms, then 1 ms, then 100 µs, with one
   interval each. The `algo` input selects how each result is judged:

   | `algo` | metric | a unit is kept when | tuning stops |
   |---|---|---|---|
   | `ALG_OPTIMAL` (LARS-Optimal) | EDP | EDP ≤ base; the base becomes this EDP | at the first worse unit |
   | `ALG_MISS` (LARS-Miss) | misses | misses × 20 < base × 21 (less than 5% above the 100 ms count); the base stays fixed | at the first worse unit |
   | `ALG_MISS_LB` (LARS-Miss-LB) | misses | as LARS-Miss, **or** the interval's miss rate < 0.05% (misses × 2000 < accesses) | at the first worse unit |
   | `ALG_SAMPLING` | EDP | EDP < best so far | after all four units |

   The chosen unit and base are written to the history. The cache then
   switches to the chosen unit (`tune_done` pulses).
5. **Checking.** Every following interval the same metric is measured on the
   chosen unit. If it exceeds base × 1.05, `retune` pulses and tuning starts
   again from 100 ms.

The statistics of the interval just ended are evaluated while the next interval
has not yet started. The counters are cleared when the next interval starts, so
the few cycles of evaluation and any migration in between are not counted.

## Where this RTL departs from, or fills in, the original description

The design follows the published description in:

* the four units and their parameters
* the single active unit and the 2-bit location register
* the monitor-counter state machine, and expiry handled as dirty → write back
  → invalidate, clean → invalidate
* the order and operands of the energy datapath
* the three tuning algorithms with their 5% and 0.05% thresholds, the
  descending search, and the checking process with its 5% re-tune threshold
* the 100-million-instruction interval
* state migration on a unit switch

The following are choices or readings of this implementation:

* **EDP step.** In the published datapath diagram, the accumulator that sums
  the five energy products is labelled "Current EDP". That sum is an energy,
  and no step is shown that multiplies by delay. Here the five products give
  the energy, and a sixth step reuses the multiplier to form the EDP: energy ×
  total latency.
* **Comparator.** The diagram labels the comparator "current < base". The
  LARS-Optimal algorithm listing and its prose say "less than or equal". The
  RTL uses ≤.
* **LARS-Miss-LB.** The prose tests the miss rate of the *base* (100 ms)
  interval. The algorithm listing tests the *current* interval's miss rate.
  The RTL follows the listing.
* **Algorithms in one tuner.** All four algorithms are in one tuner, selected
  by an input.
* **Reduced LARS-Miss tuner.** The parameter `EDP_EN = 0` (on `lars_tuner` and
  `lars_top`) builds the cheaper LARS-Miss tuner, which has no energy datapath.
  * In that build, a request for LARS-Optimal or sampling acts as LARS-Miss.
  * The original removes the statistic registers as well. Here the counters
    stay, because the LARS-Miss-LB miss rate needs the access counts.
* **Leakage.** Leakage is applied as energy per cycle, not as a current.
* **Not specified in the original, chosen here:**
  * the 32-bit address
  * replacement policy and write-allocate
  * one outstanding 32-bit CPU access
  * the controller's job priority
  * the latency split used by the counters
  * the history's size (8 entries) and its direct indexing by `app_id`
  * checking once per interval
  * all handshakes
  * reset state: everything invalid, 100 ms unit active
* **Migration copies every block,** valid or not. This makes the cost a
  constant and matches the reported 4608 cycles.
  A full sampling run here migrates 100 ms → 10 ms → 1 ms → 100 µs and then
  to the winner. That costs 11 776 to 13 824 cycles. The original reports
  15 872 cycles for this case, a figure this timing model does not reproduce.
* **Not part of the RTL:**
  * the MTJ cell and its retention physics
  * the processor
  * main memory: the testbenches use a behavioural model, `tb/lars_mem_model.sv`
  * the instruction cache, which in the original evaluation is an ordinary
    STT-RAM cache with a fixed 100 ms retention time
  * the refresh-based comparison scheme

## Files

`rtl/`:

| file | content |
|---|---|
| `lars_pkg.sv` | geometry, unit parameters, energies, statistics structs, algorithm enum |
| `monitor_counter.sv` | per-block N-state retention monitor |
| `monitor_tick_gen.sv` | monitor clock of one unit |
| `status_array.sv` | valid/dirty/monitor counter per block; expiry report |
| `stt_ram_unit.sv` | tag and data store of one unit, with its latencies |
| `lars_dcache.sv` | the controller with four units, status arrays and monitor clocks |
| `perf_counters.sv` | interval statistics |
| `edp_datapath.sv` | energy and EDP multiply-accumulate |
| `retention_history.sv` | per-application unit and base value |
| `lars_tuner.sv` | tuning and checking state machine; contains the datapath and history |
| `lars_top.sv` | cache + counters + tuner |

`tb/`:

* `tb_<module>.sv` is the testbench of each module.
* `tb_lars_tuner_miss.sv` tests the reduced tuner (`EDP_EN = 0`).
* `tb_lars_top.sv` runs the whole design end to end at reduced sizes.
* `tb_lars_top_full.sv` runs the top with every parameter at its default.
* `lars_mem_model.sv` is the main-memory model.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and ends with
`$finish`. For example:

```sh
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/lars_pkg.sv tb/tb_lars_top.sv --top-module tb_lars_top
./obj_dir/Vtb_lars_top
```

**`tb_lars_top`** uses reduced sizes: monitor periods of 60/120/240/480 cycles
and a 3000-instruction interval, so every unit expires blocks within the run.
A processor model issues loads and stores, and every load is checked against a
golden memory. For each tuning round the testbench recomputes, from the
interval statistics the hardware reported, which unit each algorithm must pick
and how many intervals it must take, and compares. A change in working set
forces a re-tune, and a restarted application must reuse its stored unit. The
run also counts hits, misses, write-backs, expiries, migrations, each algorithm,
re-tunes and history reuse, and fails if any never happened.

**`tb_lars_dcache`** checks the load-hit latency (2 cycles), the store-hit
latency (2 + write latency) and the exact migration cycle counts, with data
integrity through evictions, expiries and migrations.

**`tb_lars_top_full`** keeps every parameter at its default. It runs 3000 CPU
accesses with hits, misses and write-backs, checks latencies and counter values,
and checks that nothing is decided before the 100-million-instruction interval
ends. The simulator runs this design at about 10⁵ cycles per second. One
default interval (10⁸ instructions, at least 10⁸ cycles) would therefore take
over a quarter of an hour, and a full tuning round four times that. So complete
tuning rounds were simulated only with the reduced 3000-instruction interval.
Expiry at the default monitor periods (at least 180 000 cycles) is likewise only
exercised at reduced periods.

To change sizes, override the parameters of `lars_top`: `TICK0`…`TICK3`,
`INTERVAL`, `APP_W` and `EDP_EN`. The cache geometry and the per-unit energies and
latencies are in `lars_pkg`.
