# Colour-reconfigurable L2 for leakage saving under multitasking

A large last-level cache leaks energy all the time, whether or not the running program
needs all of it. This design lets a 2 MB, 8-way L2 switch itself off in slices while
it runs. Each slice is a *cache colour*. Every interval, the hardware estimates the
memory-subsystem energy that several nearby cache sizes would have cost and keeps the
cheapest one. It needs no offline profiling of the programs. Measurement restarts when
the operating system switches tasks, so the scheme follows both phase changes inside one
program and preemption between programs.

The RTL here is a synthesizable SystemVerilog model of the whole mechanism:

- the colour-indexed L2 with its flush engine;
- the region-to-colour mapping table;
- a sampled, multi-level, tag-only profiling cache;
- the stall-cycle counters;
- the energy estimation and selection datapath;
- the reconfiguration sequencer.

The processor, main memory and the analog power-gating transistors are outside it.

## 1. Cache colours and the mapping table

With 4 KB pages and 64-byte lines, one page covers 64 consecutive sets. A *colour* is
such a group of 64 sets. The default L2 has 4096 sets, so it has 64 colours of
32 KB each (64 sets x 8 ways x 64 B).

Physical pages are split into as many *regions* as there are colours. The region of a
page is its page number modulo 64. A small mapping table (MT) holds one colour number
per region. An L2 access forms its index as follows:

```
 address [51:12] page number (PPN)      -> tag (all 40 bits) ; PPN[5:0] = region
 address [11:6]  set within the colour  -> low index bits
 MT[region]                             -> high index bits (colour)
 set = {MT[region], address[11:6]}
```

Because the mapping can change, the colour cannot be recovered from the address. The
tag is therefore the whole page number. Its low 6 bits also name the region, and the
flush engine uses this to find the blocks of one region.

The active colours are always 0 .. C*-1, where C* is `active_colors`. The reconfiguration
controller keeps this rule: region r maps to colour r when r < C*, and to some active
colour otherwise. After reset C* = 64 and the MT is the identity.

## 2. Changing the number of colours

Colours only change at the end of an interval, so power switching never sits on the
access path. While the change runs, `reconfig_busy` holds off new L2 requests. A request
already in progress finishes first.

**Shrinking from C_old to C_new**

1. Each region whose colour is C_new or higher is remapped to colour (r mod C_new).
   The modulo is done by repeated subtraction.
2. Each colour from C_new to C_old-1 is flushed: dirty blocks are written back and all
   blocks are invalidated.
3. `color_on` drops for those colours.

**Growing from C_old to C_new**

1. The new colours are powered (`color_on`) and their state is cleared. Gated-Vdd does
   not keep cell contents, so whatever a colour holds when powered up is garbage.
2. Each region r from C_old to C_new-1 is handled in turn. Only the blocks of region r
   are flushed out of the colour the region used until now, MT[r]. Then MT[r] is set
   to r.

A colour costs 64 x 8 = 512 block on/off transitions. `block_transitions` accumulates
them.

The flush engine walks the colour's 64 sets. For each set it takes about 11 cycles plus
one memory write per dirty block. So a colour with no dirty data is flushed in roughly
700 cycles.

## 3. The profiling cache

The profiling cache answers one question: how many misses would the L2 have had during
this interval with fewer or more colours? It holds tags only and uses set sampling.
Within each colour, only the sets whose in-colour index is a multiple of R = 64 are
modelled, which is one set per colour at the default geometry.

There are six levels, and each one is a small 8-way LRU cache. They model L2s of
4, 8, 16, 32, 48 and 64 colours: N/16, 2N/16, 4N/16, 8N/16, 12N/16 and N. These six
sizes are the *profiling points*. A level with C colours sends region r to set
(r mod C). The levels therefore have 4 + 8 + 16 + 32 + 48 + 64 = 172 sets, which is
43·P/(16·R) for P = 4096 L2 sets. The tags take about 0.3 % of the L2's storage.

The 12N/16 level is not a power of two, and this is what coloured indexing makes
possible. Every accepted L2 request is shown to all six levels in the same cycle. Each
level counts its misses, and separately its load misses. Counters are zeroed at each
interval end and at each task switch. Tags are kept.

## 4. Predicting run time and energy

This part is the hardest to follow. `energy_saver` runs it once per interval, in about
52 cycles.

**Stall model.** `msc_counters` counts four things per interval:

- the cycles;
- the cycles in which the core reports an effective memory stall (`core_stall`), with
  overlap with other miss events already removed by the core;
- the L2 accesses A;
- the L2 load misses.

Stall cycles are assumed proportional to load misses. The penalty per miss,
PPM = stall / load misses, is computed by a restoring divider with 8 fraction bits. For
another size C:

```
 T(C) = (cycles - stall) + PPM x LM(C)
```

**Miss estimates between profiling points.** A profiled count is multiplied by R to
stand for the whole cache. Between two profiling points it is interpolated linearly.
The gaps between points are 4, 8, 16, 16 and 16 colours, all powers of two, so the
interpolation needs only shifts. M(C) and LM(C) are the resulting miss and load-miss
estimates.

**Marginal gain and the candidate window.** G(C*) is the drop in misses per added colour
on the profiling segment that contains C*. Candidates are spaced 2 colours apart and
stay between N/16 and N:

| G(C*)        | colours below C* | colours above C* |
|--------------|------------------|------------------|
| at most 200  | up to 6          | up to 4          |
| above 200    | up to 4          | up to 6          |

Together with C* this gives up to 11 candidates. For example, with C* = 40 and G = 150
the candidates are 28, 30, ..., 48. With G = 250 they are 32, ..., 52. Near the limits
of the range, fewer candidates remain. The window is not shifted to make up for them.

**Energy of a candidate** (integer picojoules, one candidate per cycle):

```
 E(C) = 1086·(A + M(C))              L2 dynamic: a hit costs 1, a miss 2 accesses' energy
      + 70000·M(C)                   memory dynamic
      + 1411·T(C)·C/64               L2 leakage, proportional to the powered share
      + 120·T(C)                     memory leakage
      + 2·512·|C − C*|               block on/off transitions
      + 5·A_prof + 5·T(C)            profiling cache dynamic and leakage
```

The coefficients come from these figures:

- 1.086 nJ per L2 access;
- 2.016 W of L2 leakage, plus 5 % for the gating transistors' area;
- 70 nJ per memory access and 0.18 W of memory leakage;
- 0.002 nJ per block transition;
- a 1.5 GHz clock.

The profiling cache's own energy is added too: 5 pJ per profiling access (0.005 nJ) and
5 pJ per cycle of leakage (0.007 W at 1.5 GHz, rounded up from 4.67). The access term is
the same for every candidate; the leakage term follows T(C).
The cheapest candidate wins. Candidates are scanned from small to large, and a tie keeps
the smaller cache.

## 5. Interfaces and timing (`cc_top`)

| Port group | Behaviour |
|---|---|
| `req_valid/req_ready`, `req_we`, `req_load`, `req_addr`, `req_wdata` | One line (64 B) per request, one request in flight. `req_ready` is low during the 4096-cycle state sweep after reset, while a flush or reconfiguration runs, and while a request is being served. |
| `resp_valid/resp_hit/resp_rdata` | A hit answers in the second cycle after acceptance. A miss adds the optional write-back of a dirty victim, then the fetch. A write miss allocates without fetching, since it carries a whole line. |
| `mem_req/mem_we/mem_addr/mem_wdata`, `mem_ack/mem_rdata` | Held until a one-cycle `mem_ack`; read data come with the ack. |
| `core_stall` | High in each cycle the core counts as an effective memory stall. |
| `task_switch` | One-cycle pulse. It clears the profiling and stall counters and restarts the interval. It does not change the cache size. |
| `color_on[63:0]` | Per-colour supply enable for the gated-Vdd sleep transistors. |
| `active_colors`, `reconfig_busy`, `decision_*`, `block_transitions`, `ev_l2_*`, `l2_ready` | Status. `decision_valid` pulses once per interval with the chosen count, its estimated energy and whether G(C*) was above the threshold. |

An interval end that comes while the previous decision is still being applied is
skipped.

## 6. Parameters

| Parameter (cc_top) | Default | Origin |
|---|---|---|
| `N_COLORS` | 64 | 2 MB / (8 ways x 4 KB) |
| `SPC` (sets per colour) | 64 | 4 KB page / 64 B line |
| `WAYS` | 8 | L2 associativity |
| `LINE_BYTES` | 64 | |
| `PPN_W` | 40 | tag width of the overhead estimate, used as the page-number width |
| `SAMPLE_R` | 64 | sampling ratio |
| `INTERVAL_CYCLES` | 5 000 000 | own choice, since no interval length was given |
| `LAMBDA` | 200 | marginal-gain threshold |

Two size rules apply. `N_COLORS` must be a multiple of 16 with N/16 a power of two.
`SPC` must be a multiple of `SAMPLE_R`.

## 7. Files

All files are in `rtl/`:

- `cc_pkg.sv`: constants, energy coefficients, flush-command type.
- `mapping_table.sv`: the MT.
- `l2_colored_cache.sv`: the L2 controller with its flush engine. Its state and data
  arrays are instances of `sram_sp.sv`, a single-port synchronous RAM.
- `prof_level.sv` and `profiling_cache.sv`: the profiling cache.
- `msc_counters.sv`: the stall-cycle counters.
- `energy_saver.sv`: the algorithm.
- `reconfig_ctrl.sv`: the reconfiguration sequencer.
- `cc_top.sv`: the top level.

Each file opens with a description of its behaviour and timing.

## 8. Departures and own choices

These points are not fixed by the technique as published and were chosen here:

- **Region and tag.** Region = page number mod colours. The tag is the full page number.
- **Remapping.** Which regions move on a reconfiguration, and to which colour, follows
  the rules of section 2.
- **Clear after power-up.** Newly powered colours are cleared explicitly.
- **Controller.** The L2 is a simple blocking controller with line-wide ports. The 12 ns
  L2 latency is not modelled as a cycle count.
- **Memory accesses.** They are counted as misses only; write-backs are not added to the
  memory energy.
- **Task switch.** A task switch also restarts the stall counters and the interval, not
  only the profiling counters.
- **Interval length.** It is 5M cycles.
- **Corner cases.** PPM is 0 when an interval has no load misses. Ties keep the smaller
  cache.
- **Overlap accounting.** Stall cycles with overlap removed are the core's job. The core
  is not part of this RTL.

These parts are not included:

- the core and L1 caches;
- main memory (the testbenches contain a behavioural model);
- the gated-Vdd transistors, which are driven through `color_on`.

## 9. Simulating

Each testbench in `tb/` checks itself. It prints `TB_RESULT checks=N failures=M` and
finishes. For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
          rtl/cc_pkg.sv tb/tb_cc_top.sv --top-module tb_cc_top
./obj_dir/Vtb_cc_top
```

| Testbench | What it shows |
|---|---|
| `tb_mapping_table` | identity after reset; random writes read back through both ports |
| `tb_msc_counters` | counts and the exact interval length; restart on a task switch |
| `tb_profiling_cache` | all six levels against a reference LRU model, before and after a counter clear |
| `tb_l2_colored_cache` (reduced size) | data against a reference memory through misses and write-backs; hit latency; colour, region and clear flushes with a remapped region |
| `tb_energy_saver` | the C* = 40, G = 150 / 250 candidate windows above; 60 random intervals with every candidate's energy and the choice compared with a reference model; latency of 52 cycles (13 with no load misses) |
| `tb_reconfig_ctrl` | flush sequences, MT contents, enables and transition counts for 64→40→48→4→4→64 |
| `tb_cc_top` (16 colours, 4000-cycle intervals, threshold 20) | a streaming phase shrinks the cache and a reuse phase grows it again, with all data checked. It counts every mechanism: shrink, grow, each flush kind, write-back, hit, miss, held request, both gain outcomes, task switch. |
| `tb_task_model` (same reduced size) | three tasks run as T1, T2, T3, T1, T2 with preemption at 800 and 1300 cycles into a 3000-cycle slice: each switch keeps the cache size and clears the profiling counters, data stay correct, and the cache both shrinks and grows |
| `tb_cc_top_full` (default sizes) | one whole 5M-cycle interval of streaming, then a shrink of the 2 MB cache, with data checked. It takes about 20 s. |

The end-to-end tests use small miss counts and short intervals. The threshold of 200 is
meant for full-size intervals, so `tb_cc_top` lowers it to 20 so that both marginal-gain
outcomes occur.
