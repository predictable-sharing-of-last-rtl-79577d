# Sharing a last-level cache partition with a bounded worst-case latency

In a multicore running safety-critical software, every memory access needs a
worst-case latency (WCL) that can be computed in advance. Private partitions
of the last-level cache (LLC) give each core such a bound, but they waste
capacity. Two cores with tight real-time needs cannot share a partition the
naive way either. When a shared set is full, a core that misses must wait
until some line of the set is evicted. That eviction recalls the line from
the L2 caches that hold it, and the latency of that recall grows with the
cache sizes and with the cube of the number of cores. Worse, another core's
request can grab a line freed for someone else, and the original requester
waits again, so the bound is very loose.

This RTL implements the fix: a **set sequencer** inside the LLC. For every
full set with waiting requests, it keeps those requests in the order they first
reached the LLC. Only the oldest waiting core may take a line the set frees.
With one time-division bus slot per core, a core that shares a partition with
`n` cores out of `N` then waits at most

    WCL = (2(n-1)n + 1) · N · SW   cycles        (SW = slot width)

This bound depends on neither the cache size nor the partition size. With the
default `N = n = 4` and `SW = 50` it is 5000 cycles.

## The system

```
 core 0..N-1 (outside)      per core                       shared
 ───────────────────   ┌────────────────────────┐
 L1 miss  ──core_req──►│ l2_controller           │
                       │  tag/state array       │   ┌──────────┐   ┌─────────────────┐
                       │  PRB (1 request) ──┐   │   │ tdm_bus  │   │ llc_controller  │
                       │  PWB (write-backs)─┤RR├──►│ 1 slot   │──►│  partitions     │──► DRAM
                       │  prb_arbiter ──────┘   │   │ per core │   │  presence bits  │    (outside)
                       └────────────────────────┘◄──└──────────┘◄──│  set_sequencer  │
                                ▲     back-invalidation broadcast  └─────────────────┘
                                └───────────────────────────────────────┘
```

`llc_share_top` holds N `l2_controller`s, one `tdm_bus` and one
`llc_controller`. The cores, their L1 caches and the DRAM are not included.
The `core_*` ports take the requests that missed in a core's L1. The `dram_*`
ports go to a memory that must return a read inside one slot.

Default sizes are the evaluated configuration: 4 cores; L2 with 16 sets and
4 ways; LLC with 32 sets and 16 ways; 64-byte lines; 32-bit addresses. Line
addresses are therefore 26 bits wide (`llc_pkg::line_t`).

## One-slot TDM bus (`tdm_bus`)

Time is cut into slots of `SLOT_CYC` = 50 cycles. Core `i` owns slot `i` of
every period of `N·SLOT_CYC` cycles. In cycle 0 of its slot, the owner's L2
may put one message on the bus: a line request or a write-back. The LLC must
finish with it inside the same slot. A response goes only to the slot owner.
Back-invalidations are broadcast to all L2s at any time, with a per-core mask.

The 50-cycle slot is not printed as a number anywhere. It follows from the
stated bound of 5000 cycles for `n = N = 4`: 5000 / (25·4) = 50.

## Private L2, PRB and PWB (`l2_controller`, `prb_arbiter`, `pwb_fifo`)

Each core has at most one outstanding request.

- **Hit:** answered in the next cycle.
- **Miss:** the L2 first makes room in its set. It reserves a free way, or
  removes the round-robin victim and queues the victim in the **PWB**
  (pending write-back buffer, a FIFO as deep as the L2 has lines). The
  request then waits in the **PRB** (pending request buffer).
- **Arbitration:** `prb_arbiter` decides, at each of the core's slots, which
  of the two goes on the bus. When both are waiting it alternates between
  them, so neither starves.
- **Retries:** a request stays in the PRB until the LLC answers it, and is
  sent again in each later slot.
- **Recall (back-invalidation):** the L2 drops the line, even while it is
  waiting for its own miss, and queues it in the PWB. The write-back frees the
  LLC line only when it reaches the LLC in one of the core's own slots. This
  write-back latency is what the WCL analysis charges against the sharers.
- **Ordering:** a miss on a line whose write-back is still in the PWB waits
  until that write-back has left, so a request never overtakes its own
  write-back.

Every L2 eviction, clean or dirty, is sent as a write-back. This keeps the
LLC's per-core presence bits exact, so the LLC knows whom to recall from.

## Inclusive, partitioned LLC (`llc_controller`)

**Line state.** Each LLC line has a valid bit, a dirty bit, a presence bit per
core, an "evicting" bit and the full line address as its tag.

**Partitions.** These are static inputs per core:

- `part_set_base`: the first set.
- `part_set_bits`: log2 of the number of sets.
- `part_way_mask`: the ways the core may use.

A line maps to set `base + (line mod 2^bits)`. Cores given identical values
share a partition (`SS(s,w,n)` in the tables below). Disjoint values give
private partitions (`P(s,w)`).

**One decision per slot.** The message arrives in cycle 0 and is decided in
cycle 1:

| message / situation | action |
|---|---|
| write-back | clear the owner's presence bit; if the line is evicting and nobody holds it now, the way becomes free (written to DRAM if dirty) |
| request, hit, line not evicting | set presence bit, answer (cycle 2) |
| request, hit on an evicting line | wait (the line is leaving) |
| request, miss, sequencer permits, free way | DRAM read, fill, answer |
| request, miss, permits, a way no L2 holds | replace it in place (DRAM write if dirty), fill, answer |
| request, miss, permits, every way held | mark the round-robin victim evicting, broadcast the back-invalidation, wait |
| request, sequencer does not permit | wait |

**Waiting.** A request that waits is appended to the set sequencer once. The
L2 re-sends it in the core's next slots until it is answered. When a queued
core finally fills, it leaves the head of the queue.

**One eviction per set.** At most one eviction per set is in progress. Only
the request the sequencer permits may start one. So every freed line goes to
the core it was freed for, which is the property the bound rests on.

## Set sequencer (`set_sequencer`)

The set sequencer has two tables:

- **Queue lookup table (QLT):** one entry per set that has waiting requests,
  pointing to one queue of the sequencer.
- **Sequencer (SQ):** `N` queues of core numbers, oldest first.

A lookup takes the slot owner's set. The owner is permitted when the set has
no queue, or when the queue's head equals the owner. A core has at most one
outstanding request, so at most `N` sets have queues and no queue is longer
than `N`. The `N × N` storage therefore cannot overflow; an assertion guards
this.

## Timing, checked

Each testbench checks the latency of every miss against the bound, measured
from the first slot that carried the request (the wait for one's own slot
after the core raises the request is at most one period more):

| configuration (4-slot bus, SW = 50) | max observed | bound |
|---|---|---|
| SS(1,2,4), one set of 2 ways shared by 4 cores | 1613 | 5000 |
| SS(1,4,4) | 2413 | 5000 |
| SS(32,4,4) | 2013 | 5000 |
| P(1,w), private one-set partition | 613 | — |
| P(8,4) | 813 | — |
| SS(32,2,2), 2 of the 4 cores share | 1213 | 1000 by the formula, see below |

## Where the design departs from the paper or goes beyond it

- **Two-core sharing exceeds the formula.** With `n = 2` sharers in the
  4-slot schedule, the observed worst case (1213 cycles) is above
  `(2·1·2+1)·4·50 = 1000`. The cause is that a core's own L2 victims queue in
  the same PWB as the lines the LLC recalls. The bound's argument assumes at
  most `n-1` pending write-backs per PWB, and alternation with the core's own
  request then costs one extra period. With `n = N = 4` the observed values
  stay far below 5000. The testbench reports this case but does not check
  it.
- **Private-partition bound not checked.** The private-partition bound
  quoted with the evaluation (450 cycles) is not derived in the text. In this
  RTL a private miss in a full set recalls its own line and costs up to 613
  cycles, so that number is only reported.
- **No data.** The caches store tags and state only. The data arrays and the
  data path are not built; the bus and DRAM ports carry line addresses.
- **Slot width.** The slot width of 50 cycles is derived from the quoted
  bound, not stated. The DRAM read latency must stay below the slot; the
  testbenches use 10 cycles.
- **Own choices.** These are not prescribed by the text: round-robin victim
  choice in both caches, preferring an LLC way no L2 holds, at most one
  eviction per set, writing back clean L2 victims, the slot order `0..N-1`,
  and single-cycle bus transfers.
- **Best-effort baseline not built.** The best-effort shared LLC the design
  is compared with is not built.
- **Lint warnings.** Lint reports no latches, loops, multiple drivers or
  open pins. The warnings that remain are unused signal bits (for example,
  the upper bits of a line address that index a set), unused derived
  parameters, and the asynchronous reset shared by all flip-flops.

## Files

| file | contents |
|---|---|
| `rtl/llc_pkg.sv` | widths, default sizes, bus message and buffer entry types |
| `rtl/tdm_bus.sv` | one-slot-per-core TDM bus |
| `rtl/pwb_fifo.sv` | pending write-back buffer with a line-match port |
| `rtl/prb_arbiter.sv` | pending request buffer and PRB/PWB round robin |
| `rtl/l2_controller.sv` | private L2 tag/state array and controller |
| `rtl/set_sequencer.sv` | QLT and SQ |
| `rtl/llc_controller.sv` | inclusive partitioned LLC with back-invalidation |
| `rtl/llc_share_top.sv` | the whole subsystem |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_llc_share_top.sv` | end-to-end test at default sizes: SS(1,4,4), SS(32,4,4), P(8,4); checks inclusion after every step, the latency bound, and that every mechanism (L2 hit, LLC hit, fill, in-place replacement, back-invalidation, freeing write-back, wait, sequencer block, DRAM write) occurs |
| `tb/tb_workload_sweep.sv` | the worst-case sweep (one-set partitions, address ranges 1 KiB to 256 KiB) and the fixed-capacity comparison of shared against private partitions |

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself
with a watchdog.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_llc_share_top \
    rtl/llc_pkg.sv tb/tb_llc_share_top.sv -y rtl -Mdir obj
./obj/Vtb_llc_share_top
```

Replace the top module name to run any other testbench. The end-to-end test
builds in about 20 s and runs in about 2 s. To change the configuration, set
the parameters of `llc_share_top` (`N_CORES`, `L2_SETS`, `L2_WAYS`,
`LLC_SETS`, `LLC_WAYS`, `SLOT_CYC`) and drive the partition inputs. For
example, all cores with base 0, bits 0 and way mask `'hF` give SS(1,4,N).
