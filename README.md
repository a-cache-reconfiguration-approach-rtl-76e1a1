# A reconfigurable eDRAM last-level cache with valid-only refresh

Embedded DRAM (eDRAM) makes a dense last-level cache with low leakage. Its cells
hold their charge only for tens of microseconds, though, so a large eDRAM cache
spends most of its energy refreshing lines. The rest goes to leakage. This
design attacks both costs together:

* **Fewer powered lines (leakage).** The cache is split into *colors*, groups of
  sets chosen by the low bits of the physical page number. A small table decides
  which color each group of pages (a *memory region*) uses. When a program
  needs less cache, software maps all regions onto fewer colors, and the unused
  colors are powered off.
* **Fewer refreshed lines (refresh).** Each refresh period, only *valid* lines of
  *powered* colors are refreshed. A smaller active cache holds fewer valid
  lines, so it also needs fewer refreshes.
* **Decided in software, measured in hardware.** Once per interval (e.g. every
  10 million instructions) a software routine picks the color count. It uses
  counters that this hardware keeps: five sampled tag directories that predict
  the misses of caches 1, 1/2, 1/4, 1/8 and 1/16 of the full size, a running
  count of valid lines, and per-interval event counters.

The technique comes from the paper "A Cache Reconfiguration Approach for Saving
Leakage and Refresh Energy in Embedded DRAM Caches" (S. Mittal). That paper
evaluates the technique in a simulator and gives no circuit. The
SystemVerilog here is one hardware realisation of it. The last sections list
every point where this RTL had to choose for itself.

All parameter defaults match the evaluated system:

| quantity | default | where it comes from |
|---|---|---|
| capacity, associativity, line | 2 MB, 8 ways, 64 B (32768 lines, 4096 sets) | source system |
| page size | 4 KB | source system |
| colors M = size / (page x ways) | 64 (6-bit color numbers) | source formula |
| banks | 2 x 1 MB, one line refreshed per cycle per bank | source system |
| hit latency | 12 cycles | source system |
| refresh period | 88,000 cycles = 40 us at 2.2 GHz | source system |
| profiling units | 5, sizes X .. X/16, 1 set in 64 sampled | source system |
| physical address | 48 bits | this design |

## Colors and the address

The cache turns off whole colors, so the whole design depends on how an
address finds its set. With 4 KB pages and 64-byte lines, the page offset
covers the line offset and the low 6 set-index bits. The remaining 6 set-index
bits are the low bits of the page number. Normally they pick one of 64 groups
of 64 sets, and that group is the color. Here those 6 bits are a *region*
number, and the region is looked up in the color map:

```
 47                      18 17      12 11       6 5      0
+--------------------------+----------+----------+--------+
|           page number (high)        |          |        |
|                          |  region  | set in   | byte   |
+--------------------------+----------+ color    +--------+
set = { map[region] , addr[11:6] }        (12 bits, 4096 sets)
tag = addr[47:12]                         (36 bits, includes the region)
```

The region bits stay in the tag because several regions can share one color
after a shrink. Without them, lines of different regions would alias.

`color_map_table` holds two copies of the map. The *live* copy steers demand
accesses. Software writes new entries into the *shadow* copy, which has no
effect until the reconfiguration sequencer commits it. The whole table then
switches in one cycle. Both copies reset to the identity map, which is the
full cache.

The five profiling units ignore colors. Each emulates an ordinary cache of its
own size, indexed by the plain address. They answer the question "how would a
cache of size X/2^k behave", so they must not depend on the current
configuration.

## Reconfiguration: what is flushed and when

Software stages a new map (`sw_map_we`, one entry per cycle) and a new mask of
powered colors (`sw_mask_we`). It then pulses `sw_commit`. `reconfig_controller`
then runs three steps:

1. It starts the cache's **flush walk** over every line of the colors that are
   on now. A valid line survives only if two things hold:
   * its color stays on;
   * the new map still sends its region to that color.

   Any other valid line is invalidated. If it is dirty, it is written back to
   memory first. The walk takes one cycle per line, plus the memory handshake
   for each writeback. Colors that are already off are skipped in one cycle per
   set. No demand request is accepted during the walk.
2. When the walk ends, the new map becomes live. In the same cycle, the power
   enables `color_on` switch to the new mask.
3. The number of lines switched on or off is added to the transition counter.
   That number is (colors that changed) x 512 lines, the quantity B of the
   energy model.

The second condition in step 1 goes beyond simply flushing colors that are
turned off. When a region moves from color A to color B and A stays on, the
region's old lines in A become unreachable. If one of them were dirty, a later
miss in B would fetch stale data from memory. The walk therefore removes them
too. The source text describes only flushing the colors being turned off.

A commit with an empty mask is refused (`sw_error`). The rules that keep the
software's choices reasonable are the software's job and are not checked in
hardware:
* at least M/16 colors stay on;
* the color count changes in steps of two;
* at most 16 colors change per interval.

## Valid-only refresh

`refresh_controller` starts a refresh-event every `REFRESH_PERIOD` cycles. Each
bank then walks its own sets, and all banks walk in parallel. For each set it:

* reads the set's 8 valid bits, which takes one cycle;
* if the set's color is powered, refreshes each valid way, one per cycle;
* skips invalid ways and whole sets of powered-off colors.

A set costs one cycle plus one per valid line, and at least two. A full bank
therefore takes at most 2048 + 16384 = 18,432 cycles, well inside the
88,000-cycle period. If a walk is still running when the next period starts,
`refresh_overrun` is set.

A refresh takes its bank for the cycle. If a lookup or a flush step needs the
same bank in that cycle, it waits one cycle. In a normal hit, this wait
disappears inside the 12-cycle hit latency. The other bank is not affected.
The number of lines refreshed is counted as N_R.

The eDRAM cells and their charge decay are not modelled. The data array is a
plain array, and a refresh is a one-cycle bank reservation, which is what a
refresh costs the rest of the logic.

## Profiling units and the nValid counter

Each `profiling_unit` keeps only tags, in LRU order, for one sampled set in 64:
those whose set index has its low 6 bits at zero. The tag is 30 bits wide at
the full size and grows by one bit for each halving of the unit's size. Units
1X .. X/16 keep 64, 32, 16, 8 and 4 sets of 8 ways. For each sampled L2 access
(every accepted demand request) a unit counts:

* the access;
* whether it missed;
* whether it was a load miss.

Software multiplies the counts by 64. It then converts the load-miss difference
between sizes into memory stall cycles, on the assumption that stall cycles grow
linearly with load misses (the CPI-stack method). That gives the run time at
each size.

`nvalid_counter` counts the valid lines without scanning the tags: +1 on every
insertion, -1 on every eviction or flush of a valid line. It also outputs
min(nValid, Lines(Cs)) for a size Lines(Cs) that software writes into
`sw_lines_cs`. This is the predicted number of lines a refresh-event would
touch at that size.

## What the software does with the counters

The software routine is not part of the RTL. Its inputs and outputs are the
`sw_*`, `cnt_*`, `prof_*` and `n_valid` ports. For reference, the source method
runs these steps each interval:

1. **Candidates.** Take every even color count C with M/16 <= C <= M and
   |C - C_now| <= 16.
2. **Time estimate.** For each candidate, estimate the time T_i from the
   profiling counts. Reject candidates that are more than 3% slower than the
   full cache: (T_i - T_0) / T_0 > 3%.
3. **Energy estimate.** For each remaining candidate, estimate
   E = E_L2 + E_DRAM + E_algo, where
   * leakage = P_leak x (C/M) x T;
   * dynamic energy = E_dyn x (2 x misses + hits);
   * refresh energy = N_R x E_dyn;
   * DRAM energy = P_leak,DRAM x T + E_DRAM x accesses;
   * algorithm cost = E_chi x B plus the profiling units' own energy.
4. **Apply.** Stage the cheapest configuration and commit it.

The source figures for a 2 MB cache at 45 nm are:

* E_dyn = 0.648 nJ per access;
* SRAM leakage 1.296 W (eDRAM leaks 1/8 of that);
* 70 nJ per DRAM access and 0.18 W DRAM leakage;
* E_chi = 2 pJ per switched line;
* 0.0031 nJ per profiling access and 0.005 W profiling leakage.

`interval_counters` provides these per-interval totals, all cleared by
`sw_clear`:

* T in cycles;
* hits and misses;
* load misses;
* DRAM accesses;
* N_R, the lines refreshed;
* B, the lines switched;
* the per-cycle sum of powered colors. Divided by cycles x M, this gives the
  average active fraction.

## Interfaces and timing

* **Demand port `cpu_*`.** Valid/ready, whole 64-byte lines, one request in
  flight. A read is an L1 fill; a write is an L1 writeback. A hit answers
  exactly 12 cycles after the handshake cycle. A read miss answers after any
  dirty-victim writeback and the memory fetch. A write miss allocates without a
  fetch, because the whole line is supplied. `cpu_req_load` marks loads for the
  load-miss counters.
* **Memory port `mem_*`.** Valid/ready requests. A read is answered by a
  single `mem_resp_valid` cycle, after any delay.
* **Software port `sw_*`.** It is level and pulse based, with no bus protocol.
  `sw_busy` is high from commit until the new configuration is live.
* **Power gate enables.** `color_on[c]` powers color c. After reset, everything
  is on and every line is invalid.

## Module map

| module | role |
|---|---|
| `edram_pkg` | address widths and field positions, line type |
| `edram_reconfig_llc` | top: wires everything below, exposes demand, memory, software and counter ports |
| `edram_l2_cache` | tags, valid/dirty/LRU state, data array, demand FSM, flush walk, bank reservation for refresh |
| `color_map_table` | live and shadow region-to-color maps |
| `reconfig_controller` | commit sequence, power enables, B |
| `refresh_controller` | periodic valid-only refresh walk per bank |
| `profiling_cache`, `profiling_unit` | five sampled tag directories and their counters |
| `nvalid_counter` | valid-line count and refresh estimate |
| `interval_counters` | per-interval event totals |

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_edram_reconfig_llc \
          rtl/edram_pkg.sv tb/tb_edram_reconfig_llc.sv -o sim
./obj_dir/sim
```

`tb_edram_reconfig_llc` runs the whole cache at its full default size, with a
154-cycle memory model. It runs three intervals: full size, shrink by 16 colors
with remapping, then grow back. It checks:

* every read against a reference memory;
* that each refresh-event refreshes exactly nValid lines;
* the hit latency;
* the counters.

It also requires that each mechanism happens at least once: hits, misses,
eviction writebacks, refresh-events, refresh stalls, both directions of
reconfiguration, and flush writebacks. It takes about two seconds.

`tb_energy_saving_loop` closes the loop, also at full size. At the end of
every interval it runs the selection procedure above in the testbench, using
the hardware's counters, and applies the result through the software port. The
traffic has a 256 KB working set for six intervals, then a 768 KB one for six
more. The cache shrinks step by step from 64 to 8 colors, then grows back to
32. Every decision obeys the step rules, and every read returns correct data.
It takes about six seconds. Two details of the procedure are choices of this
testbench: misses at color counts between the profiled sizes are linearly
interpolated, and 154 stall cycles are charged per load miss.

The unit testbenches use reduced geometries where that makes them quicker or
more thorough. For example, the cache test uses 8 colors and 4 ways, and the
refresh test uses 4 colors, 4 sets per color and a 300-cycle period. They
compare against independent reference models: LRU queues for the profiling
units, a reference memory for the cache, and per-line refresh counts.

## Limits and departures

These points are choices of this design. The source method does not specify
them.

* The demand interface is line-granular, with one outstanding request. There
  is no MSHR or hit-under-miss.
* During the flush walk, demand requests wait. Reconfiguration happens once per
  interval, so this costs about 32K cycles every few million cycles.
* Flushing also drops lines of regions remapped between colors that stay on.
  This is needed for correctness.
* A color powers up with no latency when it is switched on.
* The bank of a set is its top index bit, so colors 0-31 are in bank 0.
* Refresh is periodic: all valid lines at the start of each period. It does not
  use per-line timestamps.
* Charge retention is not modelled. Nothing checks that a line is refreshed
  within its retention time, except by construction: each valid line is
  refreshed once per period.
* The energy-saving algorithm, the power-gating circuit, the core with its L1s
  and CPI stack, and main memory are outside the RTL.
* For the 30 us refresh period the source also evaluates, set
  `REFRESH_PERIOD = 66000`.
