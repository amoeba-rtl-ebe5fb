# AMOEBA: a GPU whose streaming multiprocessors fuse in pairs

Some GPU kernels run best on many small streaming multiprocessors (SMs).
Others run best on fewer, wider ones. Which one wins depends on:

- control divergence;
- how well memory accesses coalesce;
- how much L1 data neighbouring SMs share;
- how much they load the network-on-chip.

This design builds the GPU out of small SMs and lets two neighbours **fuse** into one SM of twice the width:

- one warp scheduler issues a 64-thread warp to both datapaths;
- the two L1 data caches become one cache with twice the associativity;
- the two coalescers become one;
- only one of the pair's two network interfaces sends traffic, and the other SM's router is bypassed.

A small online predictor decides, once per kernel, whether to fuse. It profiles the first thread block (CTA), then scores the profile with a logistic-regression model.

Inside a kernel, a fused pair can **split** again. This happens when divergent branches or memory stalls leave too many of its warps idle. Those warps move to the second SM. The pair fuses again once the second SM has finished them.

The RTL covers the reconfiguration logic and the parts of the SM that fusion changes:

- the profiler, predictor and controller;
- the split/re-fuse machinery;
- issue, coalescing and the L1;
- the request mesh.

It does not include:

- the SM arithmetic pipeline;
- shared memory;
- the L2 and memory controllers;
- the reply network.

Their signals are ports of `amoeba_top`.

Default sizes:

| Parameter | Default |
|---|---|
| SMs | 48 (24 pairs) |
| Threads per SM | 1024 (32 warps of 32) |
| L1 per SM | 16 KB, 128-byte lines |
| Memory controllers | 8 |
| Mesh | 8×7, 128-bit channels, 2-stage routers |

## Files

| File | Role |
|---|---|
| `rtl/amoeba_pkg.sv` | sizes, flit and queue-entry types, Q-format helpers |
| `rtl/cta_profiler.sv` | counts events over the profiled CTA and turns them into the metric vector |
| `rtl/frac_divider.sv` | serial fixed-point divider used by the profiler |
| `rtl/scalability_predictor.sv` | logistic-regression score: fuse or not |
| `rtl/reconfig_controller.sv` | per-kernel loop: profile → predict → broadcast mode |
| `rtl/switch_controller.sv` | per-pair split / re-fuse decisions and the fast warp move |
| `rtl/warp_regroup.sv` | picks the slow half-warp of a divergent memory instruction |
| `rtl/divergent_warp_queue.sv` | queue of warps waiting to run on the second SM |
| `rtl/gto_scheduler.sv` | greedy-then-oldest warp picker |
| `rtl/fused_issue.sv` | two schedulers, or one scheduler driving both datapaths |
| `rtl/coalesce_engine.sv`, `rtl/fused_coalescer.sv` | per-SM coalescing, and the 64-lane fused coalescer |
| `rtl/fused_l1_cache.sv` | two 4-way banks, or one 8-way cache |
| `rtl/noc_router.sv` | 5-port mesh router with a bypass path |
| `rtl/amoeba_sm_pair.sv` | one fusable pair: issue, coalescer, L1, network interfaces |
| `rtl/amoeba_top.sv` | 24 pairs, the controller and the 8×7 mesh |

Each file starts with a comment covering:

- its interface and timing;
- which parts follow the published design and which are choices made here.

## Kernel-level reconfiguration: profile, predict, broadcast

`reconfig_controller` waits for `kernel_start`. It then runs this sequence:

1. Pair 0 runs scale-out while its first CTA is profiled.
2. When that CTA ends (`cta_done`), the profiler turns its counters into rates.
3. The predictor scores the rates.
4. `fuse_mode` goes to every pair and holds until the next kernel.

**Profiler.** It counts events while `profiling` is high. Examples:

- instructions and cycles;
- thread accesses against issued memory requests;
- L1 data, instruction and constant accesses and misses;
- cycles threads sit idle behind a branch;
- merged MSHR misses;
- network latency;
- resident CTAs.

At `cta_done` it computes nine rates, one after the other, on a single serial divider; the concurrent-CTA metric is the peak resident count. Each ratio is a Q8.16 value (16 fraction bits).

- Ratios that need a rate (for example control-idle cycles per cycle) divide one counter by another.
- With 32-bit counters each division takes 51 cycles.
- The result is valid 459 cycles after `cta_done`.

The long latency does not matter. It is paid once per kernel, while the GPU keeps running scale-out.

**Predictor.** It computes a logit: the sum of coefficient × metric over the metrics, plus an intercept.

- Coefficients are the published regression weights, rounded to Q13.10.
- One multiply-accumulate runs per cycle into a 56-bit accumulator, so the decision is ready 11 cycles after start.
- It votes "fuse" when the logit is positive, i.e. predicted probability > 0.5.
- The exact logit is an output, so software can log it.

The controller's decision appears on the 472nd clock edge after `cta_done`.

## Inside a fused pair

### One scheduler, two datapaths

When fused, `fused_issue` does three things:

- it silences SM1's scheduler;
- it builds SM0's ready vector as the AND of both SMs' scoreboards;
- it sends the chosen warp id to both datapaths in the same cycle (`dp1_from_sm0`).

So a fused warp issues only when both of its 32-thread halves are ready. This is why a divergent half can hold the whole fused warp back. The split mechanism below exists to undo exactly that.

Warp age for the greedy-then-oldest policy is the warp slot number.

### The fused L1

Each SM has a 16 KB, 4-way, 32-set bank.

**Split.** Each port looks up only its own bank, in one cycle.

**Fused.** Port 0 looks up both banks: the same set index, eight tags compared.

- The answer comes a cycle later, modelling the longer wires between the two SMs.
- A miss refill goes to the bank chosen by a per-set toggle, so a fused set really holds eight different lines.
- The testbench checks for hits that only the eight-way set can produce.

**Stores** are write-evict: a store invalidates the line in whichever bank holds it.

**Storage.**

- Tags are per-set memory words, updated by read-modify-write.
- Valid bits are flip-flops, so reset clears the cache in one cycle.

### The fused coalescer

A fused memory instruction carries 64 addresses: lanes 0–31 from SM0 and 32–63 from SM1.

- Coalescing is serial: one 128-byte line request per cycle, always taking the lowest-numbered still-pending lane.
- A request covers every pending lane, in either half, that falls in the same line.
- So one request can serve both halves, which is where fusion saves memory traffic.
- Each request carries its 64-bit lane mask and a `last` flag.

### One network interface, and router bypass

The two SMs of a pair sit vertically adjacent in the mesh: SM0 above, SM1 below. The memory controllers are in row 0 at the top.

When fused:

- all of the pair's misses leave from SM0's interface, with SM0 as source;
- SM1's router switches to **bypass** and forwards south-to-north traffic in one cycle instead of two;
- traffic from pairs further down the column therefore crosses half of its routers at half the delay.

Routing is Y-first: north/south first, then east/west. That ordering is what makes bypassing the SM1 routers safe. A packet from any SM only ever travels north through a bypassed router and never has to turn in it.

The end-to-end bench measures a probe from the bottom row: it is 2 cycles faster fused than scale-out.

## Splitting and re-fusing a pair

The split machinery is the hardest part to follow. It spans `switch_controller`, `warp_regroup` and `divergent_warp_queue`.

There are two ways to split a fused pair. Both work on a simple count: how many of the pair's running warps are currently "bad".

### Control-divergence split

The decoder labels a warp at a divergent branch (`dec_ctrl_div`). `switch_controller` keeps a count Tc of labelled warps.

When Tc ≥ ¼ of the running warps:

1. The pair splits.
2. The labelled warps are pushed into the divergent-warp queue (`move_valid`, one per cycle).
3. SM1 runs them from the queue on its own scheduler.
4. SM0 keeps the rest.

### Memory-divergence split and warp regrouping

A fused memory instruction whose lanes miss unevenly leaves some lanes waiting on DRAM while others are ready. With `regroup` on, `warp_regroup` handles this case:

- It splits the 64 lanes into eight groups of eight, the width of one SIMD pipeline.
- Each group's miss score is the number of its active threads still waiting on a missed load (from the scoreboard).
- Si is the sum of the group scores. When Si reaches a threshold (16), the warp is memory-divergent, and the four groups with the highest scores become the "slow half".
- It counts that warp in Tm.

With `regroup` off, the upper half of the warp is simply taken as slow ("direct split").

Tm is tested against the same ¼ rule as Tc. When it trips, the slow halves move to SM1.

### Re-fusion

`sm1_exit_*` reports each divergent warp SM1 finishes. Once every moved warp has finished, the pair fuses again.

**Fast warp move.** If SM1 stalls for more than half of a 256-cycle check window, it means SM1 is starved. The controller then moves one extra ready warp to it (`fast_valid`). This keeps SM1's datapath busy.

### Shared resources while split

During a dynamic split only the schedulers and coalescers separate. The L1, the register files and the network interface stay fused:

- SM1's memory instructions go through the shared fused L1 port, arbitrated round-robin with SM0's;
- they leave the pair through SM0's interface;
- the router bypass stays on.

This differs from the scale-out mode chosen at kernel level, where everything is private.

## Verifying and simulating

Every block has a self-checking bench in `tb/`. Each bench:

- checks results against its own reference model;
- checks cycle counts where timing is defined;
- ends with `TB_RESULT checks=N failures=M`.

A plain Verilator run:

```
verilator --binary --timing -Wall -Wno-UNUSED -Irtl rtl/amoeba_pkg.sv rtl/*.sv tb/tb_fused_l1_cache.sv \
          --top-module tb_fused_l1_cache -o sim && ./obj_dir/sim
```

Drop `-Wno-UNUSED` to see every port the benches leave unconnected.

**`tb_amoeba_top`** runs the full-size design: 48 SMs, 8×7 mesh. Over two kernels (about a minute of Verilator build and run) it checks these mechanisms, and fails any that never happened:

- one fused and one scale-out kernel decision;
- L1 hits, misses and fused-only hits;
- merged coalescer requests;
- lockstep issue;
- control splits, warp moves and a fast move;
- regrouped and direct memory splits;
- bypassed traffic and the shorter fused latency.

**Lint note.** Verilator's lint reports `SYNCASYNCNET` on `rst_n`. This is expected:

- the handshake assertions use `disable iff (!rst_n)`, which samples reset synchronously;
- the logic itself uses `rst_n` only as an asynchronous reset;
- there is no clock-domain issue.

## Where this RTL departs from, or fills in, the published design

**Filled in here.** These points were not specified, so the values are this design's own choices:

- The profile runs on pair 0 only, while the kernel runs scale-out.
- The split threshold is ¼ of running warps, with the memory-regroup score threshold at 16.
- The fast-move window is 256 cycles.
- Warp age in the scheduler is the slot number.
- The MSHR metric is merged misses per L1 miss.
- The concurrent-CTA metric is the peak resident CTAs.
- In the L1, replacement is round-robin and stores are write-evict.
- Memory controllers are interleaved by line address mod 8.
- The floorplan puts controllers in row 0 and stacks pairs vertically.

**Conflicting statements, and the choice made.**

- **Threshold test.** The splitting flowchart tests "≥ threshold"; the text says "greater than". The RTL uses ≥.
- **SIMD width.** The fusion description speaks of 32 SIMD lanes; the configuration table gives SIMD width 8. Regroup groups use the table's 8.
- **Direction of the decision.** One sentence says to fuse when the kernel does better scaling out. Everywhere else, scale-up-friendly kernels are the ones fused. The RTL fuses on a positive logit, i.e. a scale-up prediction.

**Not built.**

- The SM pipeline (fetch, decode, register files, ALUs), shared memory, the L2 slices and memory controllers, the reply subnet, and the host interface.
- Their events enter on `prof_ev`, `dec_*`, `mlk_*`, `sm1_*`, `ready`.
- Refills enter on `fill_*`.

**Simplified.**

- Warps moved by the fast warp move are not tracked for re-fusion. Only the divergent warps gate it.
- Mode changes assume drained pipelines: the bench waits for outstanding requests before switching.
