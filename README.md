# Rank-aware power management for a DRAM memory controller

Main memory burns a large share of a server's energy even when it is lightly used,
because DRAM ranks spend most of their time idle but awake. DDR3 offers five
low-power states, from a power-down that wakes in a few nanoseconds to a slow self
refresh that saves 90 % of the power but needs almost 7 µs to wake. Two things decide
how much a rank can save:

* **How long its idle periods are.** Pages are normally scattered over all ranks, so
  every rank sees short gaps. If the hot pages are gathered into a few ranks, the
  other ranks get long idle periods. The page popularity is tracked in hardware.
  Pages are moved between ranks once per *epoch*.
* **When it is put into which state.** Each rank gets a chain of timeouts
  Δ1 … Δ5, one per low-power state. After Δi idle cycles the rank drops to state
  Si. The operating system picks the timeouts for each rank at the start of every
  *slot*, from a histogram of that rank's idle periods in the previous slot.

This RTL is the memory-controller side of that scheme. It sits between the
last-level cache and an existing DDR memory controller. It translates and holds
requests, tracks page popularity, moves pages between ranks and controls each rank's
power state. It also records the idle-period histograms. The policy decisions are
left to OS software, which reaches the hardware through plain register-style ports:
which pages go to which rank, in what order they move, and which timeouts to use.

Default sizes are those of the reference system: 2 GB of DDR3 in 8 ranks and 4 KB
pages. A slot is 10^8 cycles and an epoch is ten slots.

## Block structure

```
 LLC requests                                                  base controller
 req_* ──► cmd_fifo ──► hold stage ─────────────────────────────► iss_* (frame, rank)
              │          │  ▲   │ lookup / blocked? / rank ready?
              │ snoop    │  │   ▼
              ▼          │ remap_table ◄──── remap pairs ─────┐
      mq_update_queue    │        ▲ os_remap_clear, irq_full  │
              ▼          │                                    │
          mq_table ◄─► mq_mem_* (descriptors in DRAM)         │
              ▲ os_mq_*  │                                    │
                         ▼                                    │
   os_mig_* ──────► migration_engine ── mig_cmd_* (copy/commit) ──► ranks
                         │ rank_wake / rank_active
                         ▼
   os_dem_cfg_* ──► demotion_ctrl ×8 ── rank_state[], rank_ready ──► base controller
                         │ idle_end, idle_len
                         ▼
   os_hist_* ◄──── idle_histogram ×8 ◄── slot_start
                         ▲
                  slot_epoch_timer ── irq_slot, irq_epoch
```

| module | role |
|---|---|
| `ramzzz_pkg` | shared widths, request, descriptor and migration types |
| `cmd_fifo` | request FIFO, served first come first served |
| `mq_update_queue` | 10 KB ring of pending popularity updates; a newer update to the same page cancels the queued one |
| `mq_table` | 4096-entry cache of page descriptors, organised as 16 LRU queues (the multi-queue, MQ, structure) |
| `remap_table` | 4096-entry direct-mapped translation from OS page number to DRAM frame |
| `migration_engine` | queue of planned moves, run segment by segment through one extra row buffer per rank |
| `demotion_ctrl` | one per rank: idle counter, demotion chain, wake-up timing |
| `idle_histogram` | one per rank: short-period counters and long-period list, double-buffered per slot |
| `slot_epoch_timer` | slot and epoch boundaries |
| `ramzzz_mc` | top: the hold stage and the wiring |

## The request path

A request carries a 22-bit page number, a line offset, a write bit and an
*application* bit. The application bit separates program traffic from the
controller's own traffic. Requests enter `cmd_fifo` and are served strictly in order.
The head of the FIFO moves into a single **hold stage**, where three things happen:

1. **Translation.** The page number is looked up in the Remapping Table, which gives
   a registered result one cycle later. On a hit the request continues with the new
   frame, and otherwise with its own page number. The rank is `frame >> RANK_LSB`,
   so ranks are contiguous frame ranges of 2^16 frames.
2. **Blocking.** If the page belongs to the migration segment being carried out,
   the request waits. Requests to other pages are not held back by the migration
   itself. However, FIFO order means a blocked head also holds the requests behind it.
3. **Wake-up.** If the target rank is in a low-power state, the request wakes it
   and waits until the rank is active again.

A request leaves through `iss_*` once all three are satisfied and the base
controller is ready. At best a request spends two cycles in the hold stage: the
lookup cycle and the issue cycle. Every application request that the FIFO accepts
also pushes a popularity update, off the request path.

## Page popularity: the MQ structure

Pages are ranked with the multi-queue (MQ) algorithm. There are 16 LRU queues. A
page's descriptor holds its page number, an access counter, its queue number, the
time of its last access and list pointers: 22 + 14 + 4 + 27 + 2×27 + 3 = 124 bits.

On each access the descriptor moves to the head of its queue. When the counter
reaches 2^(i+1), the descriptor is promoted from queue i to queue i+1. The least
recently used descriptor of every queue is checked against an expiration time. A
descriptor not touched for more than `LIFETIME` updates is demoted one queue down and
given a fresh expiration. Time here is logical: one tick per update.

`mq_table` keeps 4096 descriptors on chip, direct-mapped by
`page[11:0] ^ page[21:12]`. Descriptors evicted from the cache are written to DRAM
through `mq_mem_*` and fetched back on a miss. A fetched descriptor with its valid
flag clear starts the page in queue 0. The linked lists use the cache index as
pointer, so only pages present on chip are linked. An update costs about 20 cycles
on a hit, plus a write-back and fetch on a miss, plus 4 cycles per expiration
demotion.

To keep this off the request path, updates wait in `mq_update_queue`, a ring of
2560 32-bit slots (10 KB). A 4096-entry index on the same hash points at each
page's queued update. A newer update to the same page marks the older slot dead, so
every page has at most one pending update. When the ring is full, new updates are
dropped and counted.

The OS reads the lists through `os_mq_rd_idx`/`os_mq_rd_desc` and the
`os_mq_head`/`os_mq_tail` pointers. It uses them to group pages by popularity.
`os_mq_freeze` pauses updates while the OS walks the lists.

## Migrations

At each epoch the OS matches page groups to ranks. It then turns the necessary
moves into a graph between ranks and cuts its Eulerian cycles into **segments**: runs
of moves in which every rank sends at most one page and receives at most one. An
example is page 6 moving rank 0 → 1, page 4 rank 1 → 2 and page 2 rank 2 → 0.

The OS writes the moves into the migration queue (`os_mig_wr_*`). Each entry is 80
bits: OS page number, source frame, destination frame and an end-of-segment flag.
The queue holds 1024 entries, which is 10 KB. `os_mig_go` starts the work.

`migration_engine` then repeats the following until no segment is left:

1. **Choose** the longest segment not yet done (one table entry per cycle). Longer
   segments move more pages per wake-up.
2. **Load** it into registers. From now on its pages are *blocked*.
3. **Wait** for a cycle in which no application request could be issued. That is
   when the request path is empty or its head is itself blocked. The engine also
   waits until the OS is not committing and all ranks of the segment are awake. It
   wakes those ranks itself.
4. **Phase A:** for every move, copy the outgoing page into the spare row buffer of
   its *destination* rank (`MIG_TO_BUF`). Each rank has exactly one spare buffer and
   receives at most one page per segment, so all copies can proceed at once.
5. **Phase B:** once every copy has reported `mig_cmd_done`, every destination
   rank writes its buffer into the frame named in the move (`MIG_COMMIT`). In a
   cycle that frame was just vacated by the page that left it in phase A.
6. **Remap:** hand the (page, new frame) pairs to the Remapping Table one per
   cycle, then unblock the pages.

The base controller has to turn `MIG_TO_BUF` and `MIG_COMMIT` into DRAM commands.
Commands are issued one per cycle under `mig_cmd_ready`. `mig_cmd_done` pulses once
per completed command.

### Remapping Table and the OS commit

The Remapping Table is direct-mapped on the same 12-bit hash. If a new pair finds
its entry held by another page, the table is considered full. The insert then waits
and `irq_remap_full` rises, and the migration stalls in its remap step.

The OS then commits. It raises `os_commit`, which keeps new segments from starting.
It copies the table into its page tables and flushes the TLB entries. It pulses
`os_remap_clear`, which empties the table in one cycle, and finally drops
`os_commit`. The OS may also commit periodically.

**The OS must drain before it clears.** A request already in the controller still
carries the old page number, and once the entry is gone it would be issued to the
old frame. The exception is a request held behind the stalled segment itself. Its
page's entry is only written after the clear, so it still translates correctly.

## Demotion and wake-up

Each `demotion_ctrl` counts the idle cycles `t` of its rank. A rank is idle when no
request, migration or base-controller activity (`rank_busy_i`) touches it. The rank
sits in state S_I(t), where I(t) is the largest i with Δi < t, or ACT if there is
none.

With this rule a state whose timeout is not below the next state's timeout is simply
skipped. A timeout of all ones switches a state off, and that is the reset value, so
an unconfigured rank never sleeps. A timeout of 0 sends the rank to its state
straight away.

When a request or a migration needs a rank in state Si, the rank resynchronises for
R_i cycles and is ready R_i + 1 cycles after the need is first seen. The cycle is the
2.66 GHz processor cycle in which the slot length is given:

| state | DDR3 name | wake-up (ns) | `RESYNC_CYC` |
|---|---|---|---|
| S1 | ACT_PDN | 6 | 16 |
| S2 | PRE_PDN_FAST | 18 | 48 |
| S3 | PRE_PDN_SLOW | 24 | 64 |
| S4 | SR_FAST | 768 | 2043 |
| S5 | SR_SLOW | 6768 | 18003 |

`rank_state[r]` tells the base controller which state to put rank r in.
`rank_ready[r]` tells it when the rank may be used. Each controller also reports
the end of every idle period, with its length, to the histogram, and counts the
cycles spent in each state.

## Idle-period histograms, slots and epochs

The OS predicts the next slot's idle periods from the last slot's histogram. A
histogram with one bucket per length would need 10^8 counters. But in a slot of T
cycles at most √T idle periods can be longer than √T cycles. So `idle_histogram`
keeps two arrays per slot:
* `short[0..√T]`, counting the periods of each short length;
* `long[0..√T-1]`, listing the lengths of the longer periods in arrival order.

Each array holds 32-bit integers, with √T = 10^4.

The arrays are double-buffered. At `irq_slot` the banks swap. The OS then reads the
finished bank (`os_hist_*`, one cycle of latency) while the new slot is recorded
into the other. Every read clears the word it returns. `os_hist_long_cnt[r]` says
how many long entries there are.

After reset both banks are cleared by a sweep of √T + 1 cycles. An idle period that
ends in the very cycle of a slot boundary is not recorded.

The counters of every block can be read through `os_stat_sel`/`os_stat_rank` →
`os_stat_data`, one cycle after the selection. They cover MQ hits, misses,
promotions and demotions, and precluded or dropped updates. They also count
segments, migrated pages and remapped requests. Per rank they count wake-ups and
the cycles spent in ACT and in each low-power state, which gives the time breakdown
per power state. The selector encoding is listed at the top of `ramzzz_mc.sv`.

`slot_epoch_timer` raises `irq_slot` on the first cycle of every slot and `irq_epoch`
on the first cycle of every epoch; the first slot starts after reset. At `irq_slot`
the OS reads the histograms and writes new timeouts (`os_dem_cfg_*`, one state of one
rank per write). At `irq_epoch` it plans and loads the migrations.

## Sizes

| item | default | storage |
|---|---|---|
| ranks × frames per rank | 8 × 2^16 (`NUM_RANKS`, `RANK_LSB`) | — |
| request FIFO | 32 requests | flip-flops |
| MQ descriptor cache | 4096 × 124 bit | 62 KB |
| MQ update ring + index | 2560 × 32 bit + 4096 × 12 bit | 10 KB + 6 KB |
| Remapping Table | 4096 × (22 + 22) bit + 4096 valid bits | 22 KB |
| migration queue | 1024 × 80 bit | 10 KB |
| idle histograms | 8 ranks × 2 banks × (10001 + 10000) × 32 bit | 1.28 MB |

The address space reaches 2^22 pages (16 GB). The default system is 2 GB: 8 ranks of
256 MB. All the program mixes of the reference evaluation fit that, at 0.5–1.5 GB
each. Larger systems, such as 32 GB or 64 GB with 16 ranks, need wider page numbers
than the 22-bit descriptor field. Rank counts other than a power of two need a
different frame-to-rank rule. DDR2 and LPDDR2, with four and three low-power
states, need the state count in `ramzzz_pkg` and the wake-up table changed.

## Where this design departs from the reference scheme

* **Histogram size.** The histograms are double-buffered so the OS can read a
  finished slot while the next one is recorded. That doubles the 80 KB per rank
  that the scheme needs to 160 KB.
* **One cycle for translation.** Translation happens in a hold stage after the
  FIFO, not while the request waits in the queue. An unqueued request therefore
  pays one cycle for the lookup. It is never issued with a stale translation.
* **What a migration blocks.** Only the pages of the running segment are blocked.
  The scheme's description contains both this and a stricter "requests are buffered
  until the migration is concluded". The finer rule is the one built here.
* **MQ constants.** The expiration lifetime (65536 updates) and the descriptor hash
  are this design's choices; neither is given. Expiration is checked on the least
  recently used descriptor of each queue, once per update.
* **Remapping Table width.** An entry uses 45 of the 56 bits per entry that a 28 KB
  table would have.
* **Wake-up timing.** Wake-up times are the DDR3 nanosecond figures rounded up to
  2.66 GHz cycles, plus one cycle to start.
* **Outside this RTL.** The OS algorithms are not part of the RTL: grouping,
  maximum-weight matching, Eulerian-cycle scheduling, histogram prediction and the
  greedy timeout search. Neither are the base controller, the PHY and the DRAM.

## Simulating

All files are plain SystemVerilog. Every testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops on its own. For example:

```
verilator --binary --timing -Irtl -y rtl +libext+.sv rtl/ramzzz_pkg.sv \
          tb/tb_ramzzz_mc.sv --top-module tb_ramzzz_mc -Mdir obj -o sim
./obj/sim
```

| testbench | what it checks |
|---|---|
| `tb_cmd_fifo` | order, full/empty, simultaneous push/pop against a queue model |
| `tb_mq_update_queue` | order of surviving updates, preclusion, drops when full |
| `tb_mq_table` | the linked lists, counters, promotions, expirations and written-back descriptors against an MQ model, with cache conflicts |
| `tb_remap_table` | lookups, one-cycle latency, in-place updates, collisions, full interrupt and clear |
| `tb_migration_engine` | longest-first order, phase A before phase B, command frames, remap pairs, blocking, idle/commit gating, over 60 random epochs |
| `tb_demotion_ctrl` | the state reached after every idle length, skipped states, and the exact wake-up time from each state |
| `tb_idle_histogram` | short counters, long list, the √T boundary, bank swap and clear-on-read |
| `tb_slot_epoch_timer` | pulse positions and counters |
| `tb_ramzzz_mc` | whole controller with 3000-cycle slots and √T = 64 |
| `tb_ramzzz_mc_full` | whole controller at default size |
| `tb_ramzzz_mc_mix` | whole controller at default size under the six SPEC 2006 mixes M1..M6, with a grouping epoch |

`tb_ramzzz_mc` models the processor, the DRAM contents with their spare row buffers,
the descriptor memory and the OS. It checks that every request reaches the frame
that really holds its page, through migrations and a commit. It also checks every
histogram word against the idle periods reported. It fails unless each of these
happened:
* remapped and blocked requests, and a full FIFO;
* wake-ups, and entry into each of the five states;
* migration segments;
* MQ promotions, demotions, misses, write-backs and precluded updates;
* short and long idle periods;
* slot and epoch interrupts, and the table-full interrupt.

`tb_ramzzz_mc_full` runs the default-size controller through its reset sweeps and
traffic. It takes one rank into each low-power state and checks the exact wake-up
times: 17, 49, 65, 2044 and 18004 cycles. It also runs a migration epoch with the
three-rank example cycle. A 10^8-cycle slot is too long to simulate, so the slot
interrupt and histogram read-out are exercised only at reduced size.

`tb_ramzzz_mc_mix` drives the default-size controller with the six four-program
SPEC 2006 mixes M1..M6. Each mix keeps only its footprint (138k to 378k pages)
and its mean access rate (one access every 833 down to 64 cycles). The access
order is synthetic: 80% of accesses go to 1024 hot pages spread over all ranks.
After half the run, the testbench plays the OS grouping step. It moves the 512 hot
pages of ranks 4..7 into ranks 0..3, as 128 four-move segments, while traffic
continues. The test checks that every request reaches the right frame and
completes. It also checks that the moved pages are remapped, and that ranks 4..7
then wake up less often. Measured over equal windows, their wake-ups fall by a
factor of 3.6 to 5.5: from 43 to 12 in M1, and from 532 to 129 in M6.

Most testbenches use smaller sizes than the defaults, to keep simulations short.
The sizes are set through each module's parameters.
