# Temperature-aware phase-based tuning (TaPT) hardware

Embedded processors usually have no fan or heat sink to lean on, so temperature
becomes a design objective alongside execution time and energy. The three pull
against each other. A fast clock and large, highly associative caches with long
lines finish work sooner, but they run hotter and can cost energy.

This design lets the chip settle that trade-off by itself while it runs. Four
knobs are tuned separately for each *phase* of the running program:

- the size of each core's L1 instruction cache;
- its associativity;
- its line size;
- the core's clock frequency. The data cache has the same three cache knobs.

A phase is a stretch of execution whose behaviour stays roughly the same. It is
recognised by three numbers measured over a fixed interval: the instruction-cache
miss rate, the data-cache miss rate and the instructions per cycle.

- **Known phase.** When a phase appears that has been seen before, its stored
  configuration is put back at once.
- **New phase.** The hardware runs a small multi-objective evolutionary search
  (SPEA2, the strength-Pareto evolutionary algorithm, in a reduced form):
  - It tries a few dozen configurations on the live system, one interval each.
  - It ranks them by Pareto dominance over time, energy and peak temperature.
  - It keeps the best configuration for the phase.

The designer can set two things:

- a priority that decides which point of the Pareto set is used: energy-delay
  product, energy, temperature or time;
- optionally, a temperature ceiling that the chosen configuration must respect.

The RTL here describes the tuning hardware and the configurable caches for a
dual-core system. The cores, main memory, thermal sensors, the power/performance
estimator and the clock generator are outside it and appear as ports.

## The configuration space

Each L1 cache is built from four 8 KB banks with 16-byte physical lines. A
setting is a triple (size, associativity, line size):

| size | ways | banks on | banks per way |
|------|------|----------|---------------|
| 8 KB | 1 | 1 | 1 |
| 16 KB | 1 | 2 | 2 (concatenated) |
| 16 KB | 2 | 2 | 1 |
| 32 KB | 1 | 4 | 4 (concatenated) |
| 32 KB | 2 | 4 | 2 (concatenated) |
| 32 KB | 4 | 4 | 1 |

Each of these six rows combines with three line sizes (16, 32 or 64 bytes), which
gives 18 settings per cache.

The clock has 7 levels, 800 MHz to 2 GHz in 200 MHz steps. A full system
configuration is therefore one of 18 × 18 × 7 = 2268 combinations. It is carried
as the packed struct `sys_cfg_t` (`tapt_pkg`).

The *base configuration* is 32 KB, 4-way, 64-byte lines for both caches, at 2 GHz.
It is what the system resets to. It is also what every phase is measured under
when it is classified, so that signatures of the same phase are comparable.

Numbering used by the search engine: setting `k` (0..17) is row `k / 3` of the
table with line size `k % 3` (see `cache_cfg_from_idx`).

## System organisation (`tapt_soc`)

For each core `c` (`NCORES = 2`), `tapt_soc` holds three units:

```
           ic_* (fetch)            dc_* (load/store)
               |                         |
        +------v------+           +------v------+
        | L1 I-cache  |           | L1 D-cache  |     tapt_config_cache x 2
        +--+-------+--+           +--+-------+--+
   icm_* to memory |  events, cfg    | dcm_* to memory
                   v                 v
        +------------------------------------------+
        | tapt_module (per core)                    |
        |  perf counters -> classifier -> controller|
        |  phase history table, SPEA2 engine        |
        |  cache tuner -> cfg registers             |
        |  DFS controller -> freq_sel, core_halt    |
        +------------------------------------------+
           ^ temp, instr_retired     | snap, ivl_end -> estimator
           | est_time, est_energy <--+
```

Every port of the top is an unpacked array indexed by core. The exceptions are
`prio`, `thr_en` and `thr`, which all cores share.

The external parts connect as follows:

- **Core.** Drives `ic_*` and `dc_*` with a request that it holds until a one-cycle
  ack. It reports `instr_retired` (0..4 per cycle) and stops while `core_halt` is
  high.
- **Main memory.** Answers `icm_*` and `dcm_*` line reads of 16 bytes and word
  writes, with a req/ack handshake.
- **Thermal sensor.** Gives `temp` in whole °C.
- **Estimator.** Reads the interval counters `snap`. These are valid from the cycle
  after `ivl_end`. It must answer with 16-bit `est_time` and `est_energy`, valid
  in that same cycle. The tuning hardware compares only relative values, so the
  units are free.
- **Clock generator.** Follows `freq_sel` (0..6) and needs at most `TRANS_CYCLES`
  to settle.

One tuning module is built per core, and the cores are tuned independently. The
evaluated system draws a single tuning unit beside two cores but does not say how
it is shared. Independent per-core tuning is what its caches allow.

## The configurable cache (`tapt_config_cache`)

An address splits into these fields:

- a 4-bit byte offset within the 16-byte physical line;
- a 9-bit set index (512 sets per 8 KB bank);
- the tag above them.

The two lowest tag bits also select the bank when banks are concatenated into one
way.

- **Size: way shutdown.** Banks beyond the active count are never looked up or
  filled.
- **Associativity: way concatenation.** The active banks are grouped into ways of
  1, 2 or 4 banks. Within a way, the low tag bits pick the bank. A lookup compares
  the tags of one bank per way, which is the "candidate" set.
- **Line size: line concatenation.** A miss fills 1, 2 or 4 neighbouring physical
  lines, aligned to the logical line, into consecutive sets of the victim bank.
  Each beat is one memory read of 16 bytes.

Own choices:

- **Write-through, no write-allocate.** Stores go to memory one word at a time.
  Because the cache never holds dirty data, a reconfiguration only has to clear the
  valid bits. That takes one cycle (`cfg_we`, accepted only while `idle`).
- **Victim choice.** The victim is a free candidate bank if there is one, else the
  one a rotating pointer names.
- **Hit timing.** A hit answers in the cycle after the request is first seen, so
  back-to-back hits take two cycles each.
- **Events.** `ev_access` and `ev_miss` count each processor access once. The
  re-lookup after a refill is not counted again.

## Intervals, signatures and phase changes

**Counters** (`tapt_perf_counters`). Over each interval of `INTERVAL_CYCLES` the
block counts:

- cycles and retired instructions;
- accesses and misses of both caches;
- the peak sensor temperature.

The default is 1,000,000 cycles: a 10 ms interval at a 100 MHz tuning-logic clock.
At the interval's end, `ivl_end` pulses and the totals appear on `snap` in the
next cycle, marked by `snap_valid`. `restart` discards a partial interval. After
every reconfiguration it makes sure a measurement covers exactly one configuration.

**Signature** (`tapt_phase_classifier`). Three 32-bit/32-bit fixed-point dividers
(`tapt_frac_div`, 12 cycles, fixed latency) form the signature:

- iMR = imiss/iacc and dMR = dmiss/dacc, each in 1/256 and clamped to 256;
- IPC = instr/cycles, in 1/256 (0..1024).

All three axes share one unit, so the squared Euclidean distance

```
d² = (ΔiMR)² + (ΔdMR)² + (ΔIPC)²
```

weighs them equally. Squares are compared instead of distances, which gives the
same decisions with no square root.

**Phase change.** While a phase runs, the classifier compares each interval's
signature with a reference signature of the run.

- The first interval after a reconfiguration is skipped. The cache was just
  emptied, so its miss rates are cold-start values; using it as the reference made
  every warm interval look like a new phase.
- The second interval is the reference.
- Any later interval with d² > `PHASE_THR` (default 1024, a distance of 32/256)
  is a phase change.

## Tuning flow (`tapt_controller`)

```
RESET -> APPLY(base) -> CLASSIFY -> SEARCH --known--> APPLY(stored) -> RUN
                                      |                                 |
                                      +--new--> TUNE <-> EVAL           | phase change
                                                 | done: store, APPLY   v
                                                 +-------------> RUN   CLASSIFY
```

- **APPLY.** Starts the cache tuner and the DFS controller together. It waits for
  both, then restarts the interval. The tuner (`tapt_cache_tuner`) writes only
  caches whose setting changes, each when that cache is idle, so an unchanged
  cache keeps its contents. The DFS controller (`tapt_dfs_ctrl`) changes
  `freq_sel` and holds the core for `TRANS_CYCLES` (1824 cycles = 18.24 µs at
  100 MHz) if the level changes. Otherwise it answers at once.
- **CLASSIFY.** Runs one whole interval on the base configuration and takes its
  signature.
- **SEARCH.** The phase history table scans its entries for the nearest signature.
  - If d² ≤ `MATCH_THR` (= `PHASE_THR`), the phase is known. Its stored
    configuration is applied, and `n_reused` counts it.
  - Otherwise the engine starts (TUNE).
- **TUNE/EVAL.** For every configuration the engine asks for:
  - the controller applies it and runs one interval;
  - it returns `{est_time, est_energy, peak temp}` of that interval to the engine.
- **Store.** When the engine is done, the controller writes the signature, the best
  configuration and the final archive into the table. It then applies the best
  configuration and enters RUN. `n_tuned` and `n_evals` count these steps.
- **RUN.** Lasts until the classifier flags a phase change (counted by
  `n_changes`), and then the controller returns to CLASSIFY.

`mode` reports the state: 0 apply/reset, 1 classify/search, 2 tune/evaluate,
3 run.

## The characterization engine (`tapt_spea2`)

This is the heart of the design and the least obvious part.

**Working set.** The engine keeps a working set U of `S + ASIZE` members. Each
member is `{valid, sys_cfg_t, time, energy, peak temperature}`. The first `S`
slots are the population and the last `ASIZE` slots are the archive. The defaults
are `S = 20`, `G = 3` and `ASIZE = 5`.

**Start.** The archive is loaded from `init_arch`: the archive stored with the
nearest known phase, or all-invalid when the table is empty. These inherited
members keep their stored costs and are not re-run. That is why a new phase costs
exactly `S × G` evaluation intervals (60 by default, 0.6 s of execution), which is
about 2.6 % of the 2268 configurations.

**Each generation** goes through these steps:

1. **Draw.** `S` random configurations are drawn. Two 32-bit xorshift generators
   supply the randomness. A cache setting is the top bits of `rand × 18` and a
   frequency is the top bits of `rand × 7`, so the draws are close to uniform.
   Each draw is sent out on `eval_req`/`eval_cfg`, and its costs come back on
   `eval_done`/`eval_obj`.
2. **Strength.** For every ordered pair (i, j) of valid members, the engine records
   whether i dominates j. Dominance means i is no worse in all three costs and
   strictly better in one. The engine does one pair per cycle, which is
   (S+ASIZE)² = 625 cycles. The strength S(i) is the number of members i dominates.
3. **Fitness.** A second pass over the stored dominance bits adds, for each member,
   the strengths of its dominators. This gives R(i), where R = 0 means
   non-dominated.
4. **Threshold.** With `thr_en`, every member hotter than `thr` gets a penalty
   (S+ASIZE)² added to R. This is larger than any R reachable without it, so
   members under the ceiling always rank first.
5. **Archive.** The new archive is the `ASIZE` members with the smallest R. Ties go
   first to old archive members, then to the lower index. Selection is `ASIZE`
   sequential minimum searches. The non-dominated set is thus kept, cut down or
   topped up with the least dominated members. Full SPEA2 would break ties by a
   density estimate, which is left out here.

**Final choice.** After `G` generations, the engine chooses among the archive
members under the ceiling (all of them if `thr_en` is low). It takes the member
that minimises the priority key:

| `prio` | key |
|--------|-----|
| S | time × energy |
| N | energy |
| T | temperature |
| X | time |

If no member is under the ceiling, the coolest one is taken. `done` pulses with
`best_cfg` and `final_arch`.

**Overhead.** The engine's own work per generation is a few thousand cycles. That
is negligible against the `S` intervals of a million cycles each that the
evaluations take.

## Phase history table (`tapt_pht`)

The table has `NENT = 32` entries. Each entry holds a signature, a best
configuration and an archive of `ASIZE` members with their costs.

- **Search.** A search scans one entry per cycle. It reports the nearest valid
  entry `NENT + 1` cycles after `search_start`; the lower index wins ties.
- **Read.** Reads are combinational at `rd_idx`.
- **Write.** A new phase goes to the first free entry. When the table is full, a
  round-robin pointer picks the victim.

## Timing summary

| event | latency |
|-------|---------|
| cache hit | ack in the cycle after the request |
| cache miss | 1, 2 or 4 memory reads, then the hit path |
| reconfiguration of one cache | 1 cycle once idle; contents lost |
| frequency change | `TRANS_CYCLES` (1824) with the core halted |
| signature | 13 cycles after `snap_valid` |
| table search | `NENT + 1` cycles |
| new phase | 1 classification interval + `S × G` evaluation intervals |
| known phase | 1 classification interval + apply |

## Departures from the evaluated system and open points

- **Design-space count.** The evaluated system reports 1,701 configurations. The
  listed ranges on 8 KB banks give 2268 (18 × 18 × 7), and that is what is built.
- **Tuning-logic clock.** The clock is not specified; 100 MHz is assumed. This sets
  `INTERVAL_CYCLES = 1,000,000` and `TRANS_CYCLES = 1824`.
- **Cost-based dominance.** Dominance is written for costs, where smaller is
  better, rather than for "larger is better" objectives.
- **Archive truncation.** It keeps the lowest raw fitness, with no density term.
- **Phase detection.** The detection threshold, the fixed-point signature, the
  warm-up skip and the matching threshold are this design's own. No values for
  them are given.
- **Table size.** The table size (32) and its replacement rule are own choices. 32
  covers the 17 single-phase benchmarks the scheme was evaluated on.
- **New application.** The decision whether an application is new is not built;
  phases are detected from the counters alone.
- **Per-core tuning.** Each core has its own tuning module instead of one shared
  unit.
- **External parts.** The estimator's models, the sensors, the clock generator and
  the cores are external. The test benches contain simple behavioural stand-ins
  for them.
- **Tuning time.** Every evaluated configuration here runs for one whole interval,
  so characterising a new phase always takes `S × G` = 60 intervals (0.6 s at
  10 ms). The evaluated system reported a shorter average overhead (0.145 s)
  with the same settings. How that figure relates to 60 intervals of 10 ms is
  not explained, so the design does not try to match it.
- **Cache policy.** The write policy, the replacement policy and the
  memory-interface widths are own choices.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_tapt_config_cache`: random accesses in every setting against a memory
  model, plus reconfiguration flushes.
- `tb_tapt_perf_counters`: counts, peak temperature, restart and interval timing.
- `tb_tapt_phase_classifier`: division results, the warm-up and reference rule,
  and change detection.
- `tb_tapt_pht`: nearest-entry search against a reference model, timing and
  replacement.
- `tb_tapt_spea2`: strength, fitness and archive selection against a reference
  model, with every priority and with the threshold.
- `tb_tapt_cache_tuner` and `tb_tapt_dfs_ctrl`: write only when idle, skip
  unchanged caches, and halt exactly `TRANS_CYCLES`.
- `tb_tapt_controller`: the classify/tune/reuse/run flow with stand-in blocks.
- `tb_tapt_module`: a whole tuning module on statistical core and cache models. It
  runs phase A, then B, then A again, and checks the threshold, the reuse and
  the halts.
- `tb_tapt_soc`: both cores with real caches and memory and phase-program core
  models (`tb_soc_env.svh`), at reduced sizes. It counts every mechanism:
  - characterisations, reuses and phase changes;
  - frequency transitions and reconfigurations of both caches;
  - misses and multi-line fills;
  - values read back.
- `tb_tapt_soc_full`: the top with every parameter at its default. Two cores each
  characterise one phase (60 evaluations of 1,000,000-cycle intervals, about 62
  million cycles). It takes about 100 s of wall-clock time in Verilator.

### Running a testbench

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl +libext+.sv \
    rtl/tapt_pkg.sv tb/tb_tapt_soc.sv --top-module tb_tapt_soc -o sim
./obj_dir/sim
```

Replace `tb_tapt_soc` with any testbench name. Sizes are module parameters:

- `tapt_soc`: `NCORES`, `BANK_BYTES`, `INTERVAL_CYCLES`, `TRANS_CYCLES`, `S`, `G`,
  `ASIZE`, `NENT`, `PHASE_THR` (the engine's random seed is a `tapt_module` parameter, `SEED`);
- `tapt_pkg`: types and constants shared by all modules.
