# SARA: self-aware memory arbitration for a heterogeneous SoC

A phone-class SoC runs a CPU, a GPU, a DSP, a camera pipeline, a display,
codecs and radios against one shared DRAM. These cores need different things.
The display needs a buffer that never runs dry. The DSP needs short latency.
The video codec needs a frame finished within 33 ms. A radio needs a steady
bandwidth. DRAM bandwidth cannot be split into fixed shares, because what it
delivers depends on the access pattern (row hits versus precharges). So
static priorities or plain round-robin leave some cores starving while
others are served well ahead of need.

This design lets every DMA judge its own health and say how urgent it is:

1. **Meter.** Each DMA has a meter that measures, in the core's own terms,
   how well it is doing against its target.
2. **NPI.** A divider turns that measurement into one number, the
   *normalized performance indicator* (NPI). An NPI of 1.0 means "exactly
   on target", above 1 is ahead and below 1 is behind.
3. **Priority.** A small table turns the NPI into a 3-bit priority (0 = relaxed,
   7 = urgent). The DMA tags every request with it.
4. **Arbitration.** The on-chip network and the memory controller arbitrate
   on that tag. They follow the same rules everywhere: higher priority first,
   round-robin among equals. The DRAM scheduler may prefer row hits while
   nobody is urgent, and it ages out requests that have waited too long.

Nothing is centrally managed: a core that falls behind raises its own
priority, and drops it again once it has caught up.

## Top level (`sara_soc`)

`sara_soc` holds 14 metered DMA clients, a port for the CPU, the network and
the memory controller. The cores themselves and the DRAM devices are outside
it.

| # | client | meter | controller queue |
|---|--------|-------|------------------|
| 0 | GPU | frame progress | GPU |
| 1 | DSP | average latency | DSP |
| 2 | image processor | frame progress | media |
| 3 | video codec | frame progress | media |
| 4, 5 | frame rotator, read and write DMAs | frame progress | media |
| 6 | JPEG | frame progress | media |
| 7 | camera | write-buffer occupancy | media |
| 8 | display | read-buffer occupancy | media |
| 9 | GPS | processing time (as progress) | system |
| 10, 11 | WiFi, USB | bandwidth (as progress over a window) | system |
| 12 | modem | processing time (as progress) | system |
| 13 | audio | average latency | system |
| 14 | CPU (no meter, brings its own priority) | - | CPU |

How a core uses its client:

- **Jobs.** A core starts a job with `job_start`, `job_base`, `job_count` and
  `job_write`. A job is a run of 64-byte transactions at consecutive
  addresses. `job_busy` stays high until the last response has come back.
- **Issue gating.** `issue_en` lets the core hold back its issue rate. A DSP,
  for example, issues one request per so many cycles.
- **Configuration.** Each client has a meter configuration, `cfg[i]`
  (`meter_cfg_t`), and a writable priority table, `lut_*`.
- **Streams.** The display and camera clients each have a stream port, `strm_*`.
  It carries one LCD read or one sensor write per `strm_evt`.
- **Monitoring.** `npi`, `prio` and `txn_done` are visible per client. `mc_ev`
  carries the controller's event pulses: ACT, column command, row hit, aged
  entry served, Policy 2 bypass, and request refused because its queue is full.
- **Memory-system settings.** `rb_en` selects Policy 1 (0) or Policy 2 (1).
  `delta` is the Policy 2 threshold, 6 by default in use. `age_limit` is the
  aging threshold T; 10000 cycles is the intended setting.
- **DRAM side.** `dram_cmd` carries one command per cycle: ACT, PRE, RD or WR,
  with channel, rank, bank, row and column. The DRAM must answer every READ on
  `dram_rvalid`/`dram_rdata` exactly CL + tBURST = 44 cycles later.

Types and constants shared by all modules are in `sara_pkg`.

## Meters: turning "health" into one number

All NPIs are unsigned Q8.8: 16 bits with 8 fractional bits, so 0x0100 = 1.0.
They saturate at 0xFFFF. Every meter produces a numerator and a denominator.
`npi_divider` divides them by restoring division, one quotient bit per cycle.
A result is ready 18 cycles after `start`. When the result would overflow, or
the denominator is 0, it saturates in one cycle. Each client restarts its
divider as soon as it finishes, so the NPI is refreshed about every
18 cycles.

**Latency (`latency_meter`, DSP and audio).**
NPI = latency limit / average latency.

- The average is an exponential moving average with weight 1/16, updated on
  every completed transaction. The DMA measures latency from request
  acceptance to response.
- The limit is `cfg.limit`.
- Shorter latency gives a larger NPI and hence a lower priority.

**Frame progress (`progress_meter`, GPU, image processor, codec, rotator,
JPEG).** NPI = work done so far / work that should be done by now.

- Instead of multiplying elapsed time by a target rate, the meter keeps two
  running sums. Each completed transaction adds `num_inc` to the progress
  sum. Each cycle adds `den_inc` to the reference sum.
- Their ratio is the NPI. Choosing `num_inc : den_inc` sets the target rate:
  for example, 1 : 1/(cycles per transaction at target).
- Both sums clear when a new job starts (the start of a frame), or after
  `period` cycles.

The same meter serves two other kinds of core:

- Bandwidth cores (WiFi, USB) use it with a fixed `period` window. The NPI is
  then average bandwidth over target bandwidth.
- Processing-time cores (GPS, modem) use it per job. Their reference grows
  linearly over the job's time budget.

**Buffer occupancy (`occupancy_meter`, display and camera).**
The display's LCD drains a read buffer at a constant rate. If the refill rate
equals the drain rate, the level stays put. So:

```
NPI = refill / drain = 1 + (level - reference level) / (drain events in the window)
```

- `init_level` is the reference level, for example half the buffer.
- The meter counts drain events (`strm_evt`) over a window of `period` cycles.
  Both counts start at 1 instead of 0, so the ratio exists from the first
  cycle of a window.
- The camera is the mirror image. A sensor fills a write buffer that the DMA
  must empty, so the NPI is 1 − Δlevel / fills.

`stream_buffer` is the FIFO between the core-side stream and the DMA. It is a
64-entry, first-word-fall-through buffer.

## Priority table (`priority_lut`)

The table has eight registers, one per priority level. Register p holds the
lowest NPI still allowed to run at level p. Eight comparators test the
current NPI against all eight registers at once. Every level whose bound the
NPI meets is asserted, and the lowest asserted level wins. If none is
asserted, level 7 is used.

The reset bounds are 1.0 − p/8:

| level | lowest NPI allowed |
|-------|--------------------|
| 0 | 1.0 |
| 1 | 0.875 |
| … | … |
| 7 | 0.125 |

So a core on target or ahead runs at 0, and the further it falls behind,
the higher its priority. Software can rewrite any entry, for example to
match "reference lines" at ×1, ×0.75 and ×0.5 of target. The priority
output is registered.

## DMA (`dma_engine`)

- **Issue.** The DMA walks a job's addresses in 64-byte steps. It keeps up to
  8 transactions in flight. Each one carries the DMA's source id, its
  controller queue class, a 4-bit tag, and the priority current at issue.
- **Latency.** Each tag keeps its issue time-stamp. A response yields the
  transaction's latency one cycle after it arrives (`txn_done`, `txn_lat`),
  which the meters use.
- **Read order.** The memory controller reorders requests freely, so read
  data can return out of order. A small reorder buffer, indexed by tag,
  retires it in issue order on `rd_valid`/`rd_data`.

`sara_client` wraps one DMA with:

- its meter, selected by the `KIND` parameter;
- the divider;
- the priority table;
- for the display or camera, the stream buffer.

The display DMA issues only while the buffer has room for every transaction
it could have in flight. The camera DMA writes only while its buffer holds
data.

## On-chip network (`noc`, `noc_switch`, `prio_rr_arbiter`)

`prio_rr_arbiter` is the one arbitration rule used everywhere. Among the
requesting inputs it picks the highest priority. Among equals it picks the
first one at or after a round-robin pointer. The pointer moves past the
winner only when the grant is actually used.

`noc_switch` is one router output port. It consists of that arbiter plus a
one-entry output register; a transaction is a single flit.

`noc` is a two-level tree:

- **First level.** Five switches gather the requesters of each controller
  queue class: GPU, DSP, media, system and CPU. Cores of one class therefore
  compete in their own switch first. The system cores, for example, share one
  segment.
- **Second level.** A root switch picks among the five classes by priority
  and feeds the controller.
- **Responses.** Responses return on a registered broadcast bus that every
  client filters by source id.

Each DMA always uses one class, so its requests stay in order through the
network.

## Memory controller (`mem_ctrl`, `mc_scheduler`, `mc_bank_timing`)

**Entries and queues.**

- There are 42 request entries, divided among five queues: CPU 10, and GPU,
  DSP, media and system 8 each.
- A request is accepted only while its own queue has a free entry. A full
  media queue therefore never blocks the DSP.
- Every cycle, each entry works out its next DRAM command:
  - the READ/WRITE itself if its row is open;
  - PRECHARGE if another row is open;
  - ACTIVATE if the bank is closed.
- `mc_bank_timing` says whether that command is legal now. An entry whose
  command is legal is *ready*.
- One command issues per cycle.

**Choosing among ready entries (`mc_scheduler`).** Every ready entry gets a
sort key, and the largest key wins:

- **Aged entries first.** An entry that has waited `age_limit` cycles or more
  is served before everything else, oldest first, whatever its priority. This
  is how low-priority traffic cannot starve.
- **Policy 1 (`rb_en` = 0).** The key is the priority: higher wins.
- **Policy 2 (`rb_en` = 1).** The pairwise rule is: a row hit beats a miss
  when both priorities are below δ, or when they are equal; otherwise the
  higher priority wins. The scheduler encodes it as a key:

  | priority | key |
  |----------|-----|
  | p < δ | `{0, hit, p}` |
  | p ≥ δ | `{1, p, hit}` |

  Below δ, hits outrank every non-hit, however large the priority gap.
  At or above δ, priority decides, and a hit only breaks ties. Any urgent
  entry (p ≥ δ) beats every relaxed one.
- **Ties.** Among equal keys, the scheduler rotates round-robin over the five
  queues. Inside a queue, the oldest entry wins.

**Precharge guard.** Any entry may precharge a bank that another entry wants
kept open. Without a rule, two equal-priority entries to different rows of
one bank keep closing each other's row and never complete. So a PRECHARGE is
held back while some entry that hits the open row outranks the precharging
entry, or ties with it. "Outranks" uses the same order as the scheduler:
aged before non-aged, older before younger among aged, and otherwise by
priority.

**Bank timing (`mc_bank_timing`).** Down-counters per bank, per rank and per
channel enforce these cycle counts:

| parameter | cycles |
|-----------|--------|
| tRCD | 34 |
| tRP | 34 |
| tRTP | 14 |
| tWR | 34 (after the write burst) |
| tWTR | 19 |
| tRRD | 19 |
| tFAW | 75 (four-activate window) |
| data-bus occupancy | 8 |

**DRAM organisation.**

- 2 channels, 2 ranks per channel and 8 banks per rank: 32 banks.
- 2 GB in total, so addresses are 31 bits.
- The address decodes as {row[15], rank, bank[3], channel, column[5],
  offset[6]}. Consecutive 64-byte lines therefore alternate channels, and a
  2 KB row holds 32 lines.

**Responses.**

- A READ's data arrives CL + tBURST = 36 + 8 = 44 cycles after the command
  and goes back as the response.
- A write is acknowledged after the same delay.
- Responses are never back-pressured.

## Where this departs from, or goes beyond, the published description

The published description gives the meters' formulas, the table structure,
the two policies, δ = 6, aging at T = 10000 and the DRAM parameters. The
following are this design's own choices:

- **Number formats.** The NPI is Q8.8. The reset contents of the priority
  table are this design's. Level 7 is used when no level is asserted.
- **Meter internals.** The moving-average weight is 1/16. The frame-progress
  meter uses two running sums. The occupancy counts are biased by +1. The
  camera meter uses the mirror formula, and the GPS and modem
  ("processing time") meters use job progress: the source gives no formula
  for either.
- **Aging.** Aging is read as "serve waiting-too-long entries first, oldest
  first".
- **Controller.** The split of the 42 entries among the queues is this
  design's. So are the precharge guard, one command per cycle for both
  channels, and write acknowledgement after the read delay.
- **Omitted DRAM constraints.** tRAS, refresh, write latency and
  read/write bus turnaround beyond tWTR are left out. tBURST = 8 is assumed.
- **Structure.** The network topology, the DMA job interface, the reorder
  buffer and the stream-buffer depth are this design's.
- **Queue assignment.** Audio and the modem are placed in the system queue,
  and the image processor and camera in the media queue.
- **Baselines not built.** FCFS, plain round-robin, a frame-rate-only QoS
  scheme and FR-FCFS served only as baselines for comparison.

## Verification

Every module has a self-checking testbench in `tb/`. The display and
camera streams, the cores and the DRAM are testbench stimulus.
`tb/lpddr4_model.sv` is a behavioural DRAM that stores data, answers reads
after the fixed latency, and independently re-checks every timing rule.

`tb_sara_soc` runs the whole design at its default parameters:

- The workload is a scaled camcorder-like load on all 14 clients plus the
  CPU, over three 30000-cycle frames.
- The first frame uses Policy 1 with aging at 10000. The second uses
  Policy 2 with a short aging limit. The third uses Policy 2 with aging at
  10000, and leaves GPS, camera, rotator and JPEG idle: the lighter of the
  two use cases the design was evaluated with. It checks that the idle
  cores issue nothing while the others still finish.
- It checks that every transaction completes and that written data reads
  back.
- It checks that the DRAM model sees no timing violation.
- It checks that every mechanism actually happened: priority changes,
  row-hit bypass, aging, and a full queue.

A real 33 ms frame is about 62 million cycles at 1866 MHz, far beyond
simulation. The frames are therefore shortened and the job sizes scaled down
to match.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/sara_pkg.sv tb/tb_mem_ctrl.sv --top-module tb_mem_ctrl -o sim
./obj_dir/sim
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`. The
`-I` paths let Verilator find the modules a testbench uses. Smaller
controller or scheduler sizes (`NE`, `AGE_W`) can be set as parameters in
the block testbenches.
