# CBP: a coordinated cache, bandwidth and prefetch manager in SystemVerilog

When sixteen programs share one chip, they fight over three things in the
memory system: space in the shared last-level cache (LLC), off-chip memory
bandwidth, and the extra memory traffic their hardware prefetchers create.
Each of these can be managed on its own, by cache partitioning, bandwidth
partitioning and prefetch throttling. But the three interact. A program
with more cache sends fewer requests to memory, so it needs less bandwidth.
A prefetcher that brings in unused data eats bandwidth. Whether prefetching
helps a program depends on how much cache and bandwidth it has.

CBP manages all three together with three simple local controllers and a
fixed order between them:

1. **Cache first.** Avoiding a memory access is worth more than making it
   faster. Each program gets cache units so that the total number of misses
   drops, using the Lookahead algorithm on per-program hit curves.
2. **Bandwidth second.** Bandwidth is shared in proportion to the queuing
   delay each program saw. That delay already reflects the new cache size
   and the last prefetch setting.
3. **Prefetch last.** Every prefetcher runs for a short window, then every
   prefetcher is off for an equally long window. A program keeps its
   prefetcher only if it ran more than 5% faster with it. The test runs
   under the cache and bandwidth allocation just made.

This loop repeats every 10 ms. Over many intervals each controller feeds
the others. Prefetching changes the ATD hit counts and the queuing delays
that the next cache and bandwidth decisions use. The new allocation then
changes what the next prefetch test measures.

This RTL implements the manager for the configuration it was proposed for: a
16-tile chip with 16 out-of-order cores at 4 GHz, an 8 MB LLC made of
sixteen 512 KB 16-way banks, and four memory channels of 16 GB/s each. The
cores, caches, prefetchers, network and memory controllers are not part of
it. Nor is the logic that places a cache allocation on banks and ways
(per-core bank tables and way masks). The manager connects to all of these
through plain signals.

## Block map

```
             LLC accesses      LLC misses          responses     retired instructions
                  |                 |                  |                 |
   per app:   +-------+      +--------------+   +------------+           |
              |  atd  |      | mba_throttle |-->| qdelay_mon |           |
              +-------+      +--------------+   +------------+           |
                  | hit curves      ^ bw_mbps       | qdelay            |
                  v                 |               v                   v
             +-------------+   +----------+   +----------+      +-------------+
             | cache_alloc |   |          |<--| bw_alloc |      | pf_throttle |
             +-------------+   +----------+   +----------+      +-------------+
                  |  ^                             ^                   ^
                  |  |        cbp_sequencer        |                   |
                  |  +---------- start/done -------+------ windows ----+
                  v
            cache_units (to the bank tables / way masks, outside)
```

| File | What it is |
|---|---|
| `rtl/cbp_pkg.sv` | Shared constants (the defaults below) and the timeline phase enum |
| `rtl/atd.sv` | Sampled auxiliary tag directory of one program; hit counter per LRU depth |
| `rtl/cache_alloc.sv` | Lookahead cache allocation with a per-program minimum |
| `rtl/bw_alloc.sv` | Bandwidth allocation in proportion to queuing delay |
| `rtl/qdelay_mon.sv` | Per-program memory access time accumulator |
| `rtl/mba_throttle.sv` | Per-program request spacing that enforces the bandwidth allocation |
| `rtl/pf_throttle.sv` | Prefetch on/off decision from two instruction-count windows |
| `rtl/cbp_sequencer.sv` | The coordination timeline |
| `rtl/cbp_top.sv` | Everything above, wired for N programs |

## Units and default sizes

| Quantity | Default | Unit in the RTL | Origin |
|---|---|---|---|
| Programs (cores) | 16 | - | proposed system |
| Cache allocation unit | 32 KB = one way of one bank | `UNITS = 256` units | proposed system (8 MB / 32 KB) |
| Minimum cache per program (`min_ways`) | 4 units = 128 KB | units | proposed system |
| Total bandwidth | 64 GB/s | `TOTAL_BW = 64000` MB/s | proposed system |
| Minimum bandwidth per program | 1 GB/s | `MIN_BW = 1000` MB/s | proposed system |
| Speedup threshold | 1.05 | `105/100` | proposed system |
| Prefetch sampling period | 0.5 ms | `SAMPLE_TICKS = 500` ticks | proposed system |
| Reconfiguration interval | 10 ms | `RECONF_TICKS = 10000` ticks | proposed system |
| Prefetch interval | 10 ms | `PREF_INT_TICKS = 10000` ticks | proposed system |
| Time base | 1 us | `tick` input pulse | this design |
| Line size, clock | 64 B, 4000 MHz | used by the throttle | proposed system |
| ATD: modelled geometry | 512 sets x 256 ways, 1 set in 16 sampled (32 sets) | | this design |
| ATD tags | 16-bit XOR-folded partial tags | | this design |

Time is counted in ticks of an external 1 us pulse, so the controller does
not depend on the core clock frequency. Drive `tick` for one cycle every
microsecond.

## The timeline (`cbp_sequencer`)

```
 reset          0.5ms   0.5ms                      10 ms
   |  ON window | OFF window | decide | run ... | CACHE | BW | ON | OFF | decide | run ...
   ^ equal split of cache and bandwidth          ^ reconfiguration
```

* After reset both allocators hold an equal split: 16 units and 4000 MB/s
  per program. No miss or delay history exists yet.
* **SAMPLE_ON / SAMPLE_OFF**: `pf_enable` is forced to all ones, then all
  zeros, for `SAMPLE_TICKS` ticks each. `pf_throttle` counts each core's
  retired instructions in both windows. At the end it decides per core
  (`pf_decide`).
* **RUN**: each prefetcher follows its decision.
* **CACHE**: `RECONF_TICKS` after the previous cache step, the cache
  allocator runs. The ATD counters are frozen (`atd_hold`) while it reads
  them.
* On the cycle after the cache step, the ATD counters are halved
  (`atd_halve`). The bandwidth allocator captures the queuing delays
  (`bw_start`), and the delay monitors start a new window (`qd_roll`).
* **BW**: the bandwidth allocator runs. When it finishes, the next interval
  starts with sampling again.

Because the cache and bandwidth steps take only thousands of clock cycles,
much less than one 1 us tick, the interval stays 10 ms. If `PREF_INT_TICKS`
is set shorter than `RECONF_TICKS`, the two windows and the decision also
repeat on their own every `PREF_INT_TICKS` ticks.

## Cache allocation: ATD and Lookahead

**ATD (`atd`).** Each program has a small tag directory that models how the
program would behave if it owned the whole 8 MB cache. It covers 32 of the
512 sets. Each modelled set keeps 256 tags in recency order. So LRU stack
depth `p` corresponds to the `p+1`-th 32 KB unit. An access looks up the
tag, moves it to the front and increments `hit_cnt[p]` for the depth `p`
where it hit. The sum of `hit_cnt[0..k-1]` is the number of hits the
program would get with `k` units. The counters are halved once per
interval, so older behaviour fades. An access takes one cycle, and the
directory accepts one access per cycle.

**Lookahead (`cache_alloc`).** Each program first gets `MIN_UNITS`. The
remaining units are handed out in rounds:

* For every program with `a` units, and every `k` up to the units left,
  the marginal utility is `sum(hit_cnt[a..a+k-1]) / k`. The allocator keeps
  each program's best `k`. All programs are scanned in parallel, one `k`
  per cycle.
* The program with the highest best utility wins and receives its `k`
  units. Ties go to the lower index, and within a program to the smaller
  `k`.

Fractions are compared by cross-multiplication, so there is no divider. A
round takes `remaining + N + 1` cycles. The worst case at the defaults is
192 rounds, about 40,000 cycles (10 us). The allocator looks several
units ahead, so it can see a working set that only pays off once it fits
entirely. A greedy one-unit-at-a-time allocator would miss that cliff.

The output `cache_units[i]` is the number of 32 KB units for program `i`;
the units always add up to 256. Turning that number into bank-table entries
and per-bank way masks is the job of the partition enforcement outside this
RTL.

## Bandwidth allocation and enforcement

**Queuing delay (`qdelay_mon`).** Every cycle, each program's monitor adds
the number of that program's requests that are in flight. A request counts
while it waits at the throttle and while it is in memory, until its
response arrives. The sum is the total memory access time of the program's
requests. The controller uses the sum over the current and the previous
interval.

**Allocation (`bw_alloc`).**
`bw[i] = MIN_BW + floor(qdelay[i] * (TOTAL_BW - N*MIN_BW) / sum(qdelay))`.
At the defaults, 48 GB/s is shared in proportion to the delays on top of
1 GB/s for every program. The delays are captured when the step starts.
The sum takes N cycles, and each share takes one quotient bit per cycle
(66 cycles). The whole step takes about 1,100 cycles. If all delays are
zero, the remainder is split equally. Floor rounding may leave up to
N-1 MB/s unallocated.

**Enforcement (`mba_throttle`).** The allocation is enforced by delaying
requests after the LLC, in the style of memory bandwidth allocation by
delay insertion. A credit counter gains `bw_mbps` every cycle. A request
may pass only when the counter holds the cost of one line,
`64 B x 4000 MHz = 256000`. At 4 GB/s that is one line every 64 cycles
(16 ns); at 1 GB/s, one every 256 cycles. When the spacing is not a whole
number of cycles, it alternates between floor and ceil, so the average
rate is exact. Credit is capped just above one line, so an idle program
cannot save up a burst. The throttle uses valid/ready on both sides and
adds no latency when credit is available.

A low allocation lengthens the time requests wait at the throttle. That
wait is part of the measured queuing delay, so the next allocation sees the
program's real demand.

## Prefetch throttling (`pf_throttle`)

Both windows have the same length. The ratio of the instructions retired in
the on window to those retired in the off window is therefore the IPC
speedup from prefetching. The prefetcher is enabled when
`on * 100 > off * 105`. A speedup of exactly 1.05 disables it. `pf_en` is 1
for enabled. The top's `pf_enable` forces all prefetchers on, then off,
during the windows; otherwise it passes `pf_en` through.

## Where this RTL goes beyond or departs from the published description

* The published pseudo-code for prefetch throttling writes setting 0 when
  the speedup exceeds the threshold. The prose says such a prefetcher is
  activated. This RTL follows the prose.
* The published description does not give the inside of the ATDs. The
  stack-depth hit counters with set sampling follow the usual utility
  monitor design. The 256-way modelled geometry is this design's way of
  matching the 32 KB allocation unit of the distributed cache.
* "Queuing delays are accumulated with those from the previous interval"
  is read as a sliding window of two intervals.
* The queuing delay is measured as the full memory access time, including
  the wait at the throttle.
* Units (MB/s, 1 us ticks), rounding, tie rules, reset values, handshakes
  and all widths are this design's own.
* Not included: the cache partition enforcement (bank tables and way
  partitioning), the cores, caches, prefetchers, network and memory.
  `cache_units`, `pf_enable`, `inst_ret`, the LLC access/miss signals and
  the memory handshake are the ports to them.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `atd_tb` | hit/miss counters against a queue-based LRU model on random traffic; sampling, hold, halving |
| `cache_alloc_tb` | allocation against a behavioural Lookahead on 200 random curves, a cliff case and all-zero curves |
| `bw_alloc_tb` | shares against the formula; snapshot; latency of N + N(NUM_W+1) + 1 cycles |
| `qdelay_mon_tb` | a known 43-cycle request; window rollover; random traffic against a model |
| `mba_throttle_tb` | request spacing and count at 1, 4, 12 and 16 GB/s; back-pressure |
| `pf_throttle_tb` | boundary cases at exactly 1.05; 100 random decisions |
| `cbp_sequencer_tb` | window lengths in ticks, 20-tick reconfiguration spacing, step order, ATD hold/halve |
| `cbp_top_tb` | 4 programs, 3 reconfigurations: cache against a reference Lookahead on the live ATD counters, bandwidth against the formula, prefetch pattern, throttle spacing; counts every mechanism |
| `cbp_top_full_tb` | the same with every parameter at its default: 16 programs, 256 units, a full 10 ms interval (10,000 ticks) and one reconfiguration |
| `cbp_workload_tb` | the 14 sixteen-program mixes of the evaluation, as class mixes of synthetic programs (below), at default sizes with a 400-tick interval |

In both top-level tests, synthetic programs with known behaviour surround
the manager. App 0 reuses a working set and gains from prefetching. App 1
streams, floods memory and loses from prefetching. App 3 gains 1.5x from
prefetching. The others are indifferent. With a tick every cycle, the
full-size test runs in about 20 s.

`cbp_workload_tb` rebuilds each evaluated mix from its count of programs that
are sensitive to cache (C), bandwidth (B) and prefetching (P). A C program
reuses 12 lines per set, more than the 4-unit minimum. A B program always has
a miss waiting. A P program runs twice as fast with prefetching, and any other
program runs slower with it. For each mix the test checks the following:
- every P program, and only those, ends with its prefetcher on;
- the cache split equals a reference Lookahead and covers each C program's
  working set;
- every B program gets more bandwidth than any non-B program.

The published counts for w9 add up to 15 programs, so the test adds one
insensitive program. All 14 mixes run in about 30 s.

To run one with Verilator (package first):

```
verilator --binary --timing --assert -Irtl -Itb --top-module cbp_top_tb \
  rtl/cbp_pkg.sv rtl/atd.sv rtl/cache_alloc.sv rtl/bw_alloc.sv rtl/qdelay_mon.sv \
  rtl/mba_throttle.sv rtl/pf_throttle.sv rtl/cbp_sequencer.sv rtl/cbp_top.sv \
  tb/cbp_top_tb.sv -o sim && ./obj_dir/sim
```

The assertions in the RTL check the handshake rules. In `mba_throttle`,
valid must be held until ready. In `qdelay_mon`, a response needs a
request in flight. In `pf_throttle`, only one sampling window is open at a
time. In `cbp_top`, each allocator runs only during its own step.

## Cost

At the defaults the ATDs dominate. Each program's ATD stores
32 x 256 x 17 bits, about 139 Kbit, so the sixteen ATDs hold about 2.2 Mbit
of tag state. Each ATD also has a 256-entry tag comparison and 256 hit
counters. Fewer sampled sets (`SAMPLE_LOG2`) or narrower tags (`TAG_W`)
shrink this directly. The three controllers are small: a few hundred
counters, 16 multiplier pairs in the Lookahead scan and one serial divider.
