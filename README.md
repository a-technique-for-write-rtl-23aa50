# A write-endurance aware, resizable RRAM last-level cache

Resistive RAM (RRAM) makes a dense, low-leakage last-level cache (LLC): 8 MB
fits in about the area of a 1 MB SRAM cache. It has two weaknesses. Many programs
do not need 8 MB, and the unused capacity still leaks. And RRAM cells wear out
after a limited number of writes, so a cache that concentrates its writes on a
few places fails early.

This design addresses both. The cache is divided into 256 *colors*, and any
color can be power-gated. Once per interval of 15 million instructions, a
hardware controller does three things:

1. It measures how the running program would have behaved with less or more
   cache.
2. It predicts the execution time and the energy of the memory subsystem for
   each candidate size.
3. It resizes the cache to the cheapest candidate that costs at most 2% of
   speed.

When colors are switched, the choice depends on how much each color has been
written:

- the most-written active colors are switched off;
- the least-written idle colors are switched on;
- when the size stays the same, a few hot active colors are swapped for cold
  idle ones.

Over time, this spreads the writes across the whole array.

The RTL is SystemVerilog-2017 in `rtl/`, with one module per file. The
testbenches are in `tb/`. The only part that is not synthesizable logic is
`rram_data_array`, a behavioural model of the RRAM macro.

## 1. Colors, regions and the mapping table

The geometry is as follows:

- an 8 MB, 8-way cache with 64-byte blocks has 16384 sets;
- a 4 KB page covers 64 consecutive sets;
- so the cache splits into N = 8 MB / (4 KB × 8) = 256 colors, each of
  64 sets × 8 ways = 32 KB.

Physical pages are grouped into 256 *regions* by the low 8 bits of the page
number. `color_mapping_table` holds one color per region, and the set index of
an address is:

```
set = { map[PPN[7:0]] (8 bits) , addr[11:6] (6 bits) }     tag = PPN = addr[39:12]
```

A region therefore lives entirely inside its color, and several regions may
share a color. To shrink the cache, move every region off some colors and gate
those colors. Because the color no longer follows from the address, the tag
must hold the whole page number. The region bits stay inside the tag, and the
flush engine uses them to pick out the blocks of a single region.

At reset, region r maps to color r, which gives the full-size cache. The table
also keeps, for each color, how many regions map to it. It can also report the
lowest-numbered region mapped to a given color. The balancing step uses both.

## 2. Seeing other cache sizes: profiling units

Five `profiling_unit`s are tag-only LRU copies of caches of 8, 4, 2, 1 and
0.5 MB. They all have 8 ways. Each one keeps only one set in 64 (set sampling),
so the five together hold 496 sets of tags.

- Every request the LLC accepts is offered to all five units.
- An access is sampled when the low 6 bits of the unit's (uncolored) set index
  are zero.
- Each unit counts sampled accesses, misses and load misses.

Multiplying by 64 estimates the miss counts of a full cache of that size.
Sizes between the five measured points are interpolated linearly. Because the
points are a power of two apart, the division is a shift.

## 3. Predicting time and energy (`config_evaluator`)

The time model uses the memory-stall part of the core's CPI stack. The core
reports each cycle:

- how many instructions it retired;
- whether it was stalled on memory.

`interval_counter` sums these over the interval.

- With `k` memory-stall cycles per load miss in the interval just ended, the
  estimated length of the interval with `c` colors is
  `T(c) = T + k · (LM(c) − LM(c_now))`.
- `LM` is the load-miss estimate from the profiling units.
- `k` is formed once per interval by a sequential divider, in Q8 fixed point.

Energy for `c` colors, in pJ, uses the constants in `llc_pkg`:

| term | formula |
|---|---|
| LLC leakage | T(c) · c/N · 370 (0.74 W at 2 GHz) |
| DRAM leakage | T(c) · 90 (0.18 W) |
| LLC dynamic | hits · 423 + misses · 85 + (write requests + fills) · 688 |
| DRAM dynamic | (misses + reconfiguration traffic) · 70 000 |
| transitions | colors switched · 512 blocks · 2 |

Reconfiguration traffic comes from the counters of clean and dirty blocks,
`block_state_counters`. These are updated on every insert, eviction and write
to a clean block, so the cache never has to be scanned.

- Switching `p` colors off out of `C` writes back `p·nDirty/C` dirty blocks.
- It discards `p·nClean/C` clean blocks. Half of those are assumed to be
  fetched again.

The per-color figure `(nDirty + nClean/2)/C` is the second division done each
interval.

The evaluator is purely combinational. The controller steps it through one
candidate per cycle.

## 4. The interval decision (`reconfig_controller`)

At `interval_end`, the controller raises `hold`. The LLC finishes its current
request and accepts no new one. The controller then runs these steps:

1. **Divide.** It computes `k` and the per-color flush cost, taking about
   50 cycles each.
2. **Evaluate.** It first estimates the full-size time `T(N)`. The candidates
   are `c_now − 16 … c_now + 16` in steps of two colors, clipped to
   `[N/16, N]`: at most 17 sizes.
   - A candidate more than 2% slower than `T(N)` is rejected.
   - Of the rest, the one with the least energy wins.
   - If all candidates are rejected, the largest is taken.
3. **Switch on** the needed number of idle colors, coldest first (fewest
   lifetime writes).
4. **Switch off** the needed number of active colors, hottest first. For each:
   - the LLC flushes it (dirty blocks written back, clean ones dropped);
   - each of its regions moves to the active color that holds the fewest
     regions;
   - its power-gate enable drops.
5. **Shuffle.** If the size did not change and some colors are idle, φ hottest
   active colors are swapped for φ coldest idle ones:
   - φ = 1 while C ≥ N/2;
   - φ = 2 while C ≥ N/8;
   - φ = 3 below that;
   - φ is never more than C or N − C.

   A color switched in this interval is locked until the next one.
6. **Balance.** While the busiest active color has two or more regions more than
   the least busy one, one region is flushed out of the busiest color and
   remapped to the least busy one. This is how newly switched-on colors receive
   regions.
7. **Finish.** It clears the profiling counters and drops `hold`.

"Hottest" and "coldest" come from `color_extreme_finder`. It scans all 256
colors in N+1 cycles and returns the highest- and lowest-keyed eligible colors,
with ties going to the lowest number. The key is either the color's write count
(`color_write_counters`, 32-bit saturating, bumped by every write into the
array) or its region count.

A reconfiguration costs, roughly:

- 17 evaluation cycles;
- one scan of about 260 cycles per color chosen;
- one flush walk per color or region: 512 tag checks, plus a data read and a
  memory write for every dirty block.

That is tens of thousands of cycles for a 16-color change. It is small against
an interval of several million cycles.

## 5. The cache itself (`llc_controller`, `rram_data_array`)

The controller is a blocking, write-back, write-allocate, 8-way LRU cache with
one request in flight.

- Tags and data are accessed one after the other: a 1-cycle tag lookup, then
  the RRAM macro.
- The macro model takes 13 cycles to read and 44 to write. These are 6.25 ns
  and 21.77 ns at 2 GHz, rounded up.

| request | latency (cycles from acceptance) |
|---|---|
| read hit | 15 |
| write hit | 46 |
| read miss | victim write-back (if dirty) + memory latency + 44 |
| write miss | victim write-back (if dirty) + 44, no fetch |

Write requests carry a full 64-byte line, as write-backs from the level above
do.

The flush engine serves the controller's `flush_valid` / `flush_ready` /
`flush_done` handshake. It walks the 64 sets × 8 ways of one color, optionally
matching one region. It writes dirty blocks back and invalidates clean ones.
Flushes take priority over requests.

After reset, the controller spends 16384 cycles clearing its tags. The
profiling units clear theirs in parallel. `init_busy` is high until both are
done.

Every data-array write is reported with its color to the write counters. Every
block state change is reported to nClean/nDirty. The macro model asserts that
accesses never overlap and never touch a gated color.

## 6. Top level (`rram_llc_top`)

| port | dir | meaning |
|---|---|---|
| `req_valid/ready, req_addr[39:0], req_write, req_load, req_wdata[511:0]` | in/out | LLC requests from the level above, one outstanding |
| `resp_valid, resp_hit, resp_rdata[511:0]` | out | completion, hit flag, read data |
| `retire_cnt[7:0], mem_stall` | in | per-cycle retired instructions and memory-stall flag from the core |
| `mem_req_valid/ready, mem_req{write,addr,wdata}, mem_resp_valid, mem_resp_rdata` | out/in | main-memory port for fills and write-backs |
| `color_pwr_en[N-1:0]` | out | enables for the per-color power switches |
| `n_active, reconfig_busy, init_busy, stats` | out | active colors, state, and counts of shrinks, grows, shuffles, colors off/on, region moves and rejected sizes |

The core, main memory and power switches are outside the design.

| parameter | default | meaning |
|---|---|---|
| `N_COLORS` | 256 | colors (8 MB); also the number of regions |
| `INTERVAL_INSNS` | 15 000 000 | instructions per decision interval |
| `SAMPLING_RATIO` | 64 | one profiled set in this many |

The package also fixes:

- α = N/16;
- β = 16;
- γ = 2%;
- the two-color step;
- the energy constants;
- the RRAM latencies.

## 7. Where this RTL goes beyond or departs from the source description

The description gives the organisation, the algorithm, its parameters and the
energy constants. The following are choices made here:

- **Hardware, not software.** The algorithm runs as a hardware state machine.
  It could equally run as an operating-system routine.
- **Candidates.** The candidate set is c ± β in steps of 2, i.e. β + 1 = 17
  sizes. The description's remark that only "γ + 1" configurations are
  examined is read as β + 1.
- **Interval length.** A 10M-instruction interval is also mentioned as an
  example. 15M is used, the value of the evaluation.
- **Cache controller.** LLC replacement (LRU), blocking operation, write-allocate
  without fetch and the 1-cycle tag lookup are assumptions. The RRAM miss
  latency (3.4 ns) is not modelled separately.
- **Region placement.** Which regions move to a switched-on color is not
  specified. Here, regions are balanced until per-color counts differ by at
  most one. A region moved between two active colors is flushed from its old
  color first, so no stale copy remains.
- **Switching order.** Colors are switched on before others are switched off.
  φ is capped at C and N − C; without the cap, a shuffle at C = 2 colors would
  switch every color off.
- **All rejected.** When no candidate meets the 2% bound, the largest candidate
  is taken.
- **Energy terms.** The transition energy is charged for every block of every
  color switched on or off. Fills count as array writes, both for energy and
  for the wear counters.
- **Color count.** The color count follows N = size / (page × ways), i.e. 256 for
  the 8 MB cache. An aside in the source that a 16 MB cache "has only 256
  colors" contradicts that formula (it would give 512) and is not used.
- **No compare mode.** The endurance-unaware variant (which switches off the
  colors with fewest regions and never shuffles) is a point of comparison, not
  part of this design, and is not built.

## 8. Verification

Each block has a self-checking testbench, `tb/tb_<module>.sv`. It compares the
block against a reference model written independently in the testbench, and
ends with a `TB_RESULT checks=… failures=…` line.

| testbench | what it checks |
|---|---|
| `tb_interval_counter` | interval boundaries with random retire rates, cycle and stall totals, carry-over |
| `tb_color_mapping_table` | set/color lookup, remaps, region counts, region search |
| `tb_color_write_counters` | random writes, saturation |
| `tb_block_state_counters` | random event streams against a model |
| `tb_profiling_unit` | sampled LRU cache against a reference model, counter clear |
| `tb_rram_data_array` | data, exact 13/44-cycle latencies |
| `tb_color_extreme_finder` | max/min over random keys and masks, ties, timing |
| `tb_config_evaluator` | time and energy against a reference computed in the testbench |
| `tb_llc_controller` | 4-color cache against an LRU model and golden memory, hit latencies, flushes, nClean/nDirty |
| `tb_reconfig_controller` | shrink 64→4 colors, hottest-off / coldest-on order, shuffle, grow, region moves, at 64 colors |
| `tb_rram_llc_top` | end to end at 32 colors, 1-in-4 sampling and 100k-instruction intervals: shrink, shuffle, grow back, every read checked, every mechanism counted |
| `tb_wear_leveling` | 24 intervals of a write-heavy 6-page working set at 32 colors: writes reach all colors, the most-written color holds at most a quarter of them (measured: 801 of 16 400, a 10× lifetime gain over two fixed colors) |
| `tb_rram_llc_full` | the top at its defaults for one full 15M-instruction interval: 256→240 colors, the 16 most-written colors (4–19) switched off, 600 write-backs, all data intact |

`tb/main_memory_model.sv` is a 160-cycle DRAM model used by the end-to-end
testbenches.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/llc_pkg.sv \
          tb/tb_rram_llc_top.sv --top tb_rram_llc_top -Mdir obj_top
./obj_top/Vtb_rram_llc_top
```

Approximate run times, excluding the build:

- block testbenches: a few seconds each;
- `tb_rram_llc_top`: about 8 s;
- `tb_rram_llc_full`: about 12 s (about a million cycles).

What has not been shown:

- energy savings or lifetime gains on real programs, which would need
  multi-billion-instruction traces;
- timing closure of the 64-bit combinational evaluator;
- any physical property of the RRAM macro.
