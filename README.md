# MeDiC: a warp-type-aware GPU memory partition

A GPU warp runs all its threads in lockstep. When a warp executes a load,
its threads' requests go to the shared L2 cache, and the warp cannot move on
until the *slowest* of them has returned. This is **memory divergence**. A
warp where seven of eight requests hit in the L2 still waits for the one
miss that goes to DRAM. A warp where six of eight requests miss gains nothing
from its two hits: they only take L2 space and L2 bandwidth. Warps also keep
their hit behaviour for long stretches of execution, and requests often queue
for tens to hundreds of cycles in front of busy L2 banks.

Memory Divergence Correction (MeDiC) uses these facts. Each warp is measured
and labelled with a *warp type*. The type then drives three mechanisms in the
memory partition:

1. **Bypassing.** Warps that rarely hit skip the L2 and go straight to DRAM.
   Their few hits were worthless anyway. Bypassing them shortens the L2 queues
   for everyone and frees cache space.
2. **Insertion.** Lines are placed in the L2 by warp type. Lines of warps
   that nearly always hit are protected. Lines of warps that rarely hit are
   evicted first. Together with bypassing, this turns *mostly-hit* warps into
   *all-hit* warps, which then never wait for DRAM.
3. **Memory scheduling.** DRAM requests from mostly-hit warps go ahead of all
   others. Such a warp has only one or two requests outstanding, and it is
   stalled on exactly those.

This repository is synthesizable SystemVerilog for one memory partition with
all three mechanisms. It also includes the warp type identification that
drives them. The structure and rules follow the published MeDiC design (PACT
2015, and a later summary of it). That description gives no sizes, widths or
interfaces, so every number here is this implementation's own choice. They
are listed under *Parameters* and *Departures and own choices* below.

## Warp types

A warp's *hit ratio* is the share of its L2 lookups that hit during one
sampling interval. Five bands:

| type        | hit ratio      | bypass L2 | mostly-hit bit (DRAM priority) | insertion class |
|-------------|----------------|-----------|--------------------------------|-----------------|
| all-hit     | 100 %          | no        | 1                              | 2 (kept longest) |
| mostly-hit  | 70 % .. <100 % | no        | 1                              | 2               |
| balanced    | >20 % .. <70 % | no        | 0                              | 1               |
| mostly-miss | >0 % .. 20 %   | yes       | 0                              | 0 (evicted first) |
| all-miss    | 0 %            | yes       | 0                              | 0               |

The published bands share their end points (20 % and 70 %). Here, exactly
70 % counts as mostly-hit and exactly 20 % as mostly-miss. `medic_pkg.sv`
holds the encoding (`warp_type_e`, 3 bits). It also holds the three rules as
functions: `is_bypass`, `is_high` and `ins_class`, and the classifier
`classify`.

## Structure

```
             +-------------------------------- medic_partition --------------------------------+
 request --> | warp_type_id --type--> bypass_logic --+--> l2_bank 0 (req buffer, tags, data) --+ |
  (warp,     |    ^   ^                  |           +--> l2_bank 1                          | |
   line)     |    |   |                  |           +--> ...        hit --> reply arbiter --+-|--> reply
             |    |   +--- (warp, hit) --|-----------+--  l2_bank n-1                        | |
             |    |        per lookup    |  bypass         | miss                            | |
             |    |                      +-------------> mem_scheduler                       | |
             |    |                                      high queue (FR-FCFS) --+            | |
             |    |                                      low  queue (FR-FCFS) --+--> mux ----|-|--> DRAM request
             |    +-- type at fill time <-- line from DRAM -- fill bank n, reply ------------+ |<-- DRAM line
             +-----------------------------------------------------------------------------------+
```

| file | module | role |
|------|--------|------|
| `rtl/medic_pkg.sv` | package | widths, request/reply structs, warp types, the per-type rules, the DRAM address map |
| `rtl/warp_type_id.sv` | `warp_type_id` | per-warp hit and access counters, reclassification at each interval end |
| `rtl/bypass_logic.sv` | `bypass_logic` | sends a request to an L2 bank or straight to the DRAM queues |
| `rtl/l2_bank.sv` | `l2_bank` | request buffer, tag/data array, one-cycle lookup, fills |
| `rtl/insertion_policy.sv` | `insertion_policy` | victim choice and recency update for one set |
| `rtl/sync_fifo.sv` | `sync_fifo` | the per-bank request buffer |
| `rtl/mem_scheduler.sv` | `mem_scheduler` | two priority queues, priority mux, open-row table |
| `rtl/frfcfs_queue.sv` | `frfcfs_queue` | one age-ordered FR-FCFS queue |
| `rtl/medic_partition.sv` | `medic_partition` | the top level: wires everything together and arbitrates replies |

DRAM itself is not part of the RTL. The top level exposes a request port and
a reply port for it. `tb/dram_model.sv` is a small behavioural model of DRAM
for simulation.

## Warp type identification (`warp_type_id`)

This is the part with the most hidden choices, so it gets the most room.

* **Counters.** Each warp has an access counter and a hit counter, each
  `CNT_W` = 8 bits wide. Each L2 bank reports every lookup it finishes as
  `(warp, hit)` on its own update port. With four banks, four lookups can be
  counted in one cycle, even for the same warp.
* **Interval.** The sampling interval is a fixed number of cycles
  (`SAMPLE_INTERVAL` = 2048). In its last cycle (`interval_end`), every warp
  is reclassified in parallel and all counters are cleared. The ratio test
  uses no divider: `hits*10 >= acc*7` means mostly-hit, and `hits*5 <= acc`
  means mostly-miss. A lookup that arrives in that last cycle is not counted.
* **Saturation.** If a warp's access counter would overflow, neither of its
  counters changes for the rest of the interval. Its ratio stays exact for
  the first 255 lookups.
* **No lookups means balanced.** A warp with no L2 lookups during an interval
  becomes *balanced* at the end of that interval. Bypassed requests never
  reach the L2, so they are never counted. Without this rule, a warp that was
  once classified as bypassing could never be measured again. With it, such a
  warp alternates: one interval bypassed, one interval measured. Reset also
  makes every warp balanced.
* **Two read ports.** `qry_*` gives the type of the warp of an arriving
  request; this type steers bypassing and sets the request's mostly-hit bit.
  `qry2_*` gives the type of the warp whose line is returning from DRAM; this
  type chooses the insertion position (see below).

## Bypassing (`bypass_logic`)

This block is a combinational valid/ready demultiplexer. A request whose
warp is mostly-miss or all-miss goes to the scheduler with `bypass = 1`.
When its line returns, it is sent to the requester and **not** filled into
the L2. Every other request goes to the request buffer of bank
`addr % NUM_BANKS`. The ready of the chosen destination is returned as
`in_ready`.

## L2 bank and insertion policy (`l2_bank`, `insertion_policy`)

Each bank has a FIFO request buffer with `REQ_BUF_DEPTH` entries. Queuing
delay builds up here. The bank also holds a `SETS` x `WAYS` array of tags
and 128-byte lines. Each cycle, the oldest buffered request is looked up in
one cycle:

* **Hit.** The line goes into the one-entry hit register. The block becomes
  MRU and takes the class of the warp that hit it.
* **Miss.** The request goes into the one-entry miss register, tagged with
  its warp's mostly-hit bit.

A lookup waits while the output register it may need is still full. It also
waits in a cycle when a fill arrives, because fills go first. There are no
MSHRs. Two misses to the same line both go to DRAM. The second fill finds the
line already present and only rewrites it.

**Replacement state.** Each way has a recency age (0 = MRU .. `WAYS-1` =
LRU; the ages of a set always form a permutation) and a 2-bit class.

* **Victim.** The first invalid way. Otherwise, the way with the smallest key
  `{class, ~age}`: the lowest class first, and within a class the oldest. A
  mostly-miss line is therefore always evicted before a balanced line, and a
  balanced line before a mostly-hit line.
* **Insertion.** A fill enters at MRU for class 2, at age `WAYS/2` for class
  1, and at LRU for class 0. A hit moves the block to MRU. To move a way to
  age `p`: the ways older than it move one step younger, then the ways at
  age `p` or older move one step older.
* **Class of a fill.** The class comes from the warp's type **when the line
  returns**, not when the request was sent. A request from a mostly-miss warp
  is always bypassed, so with the request-time type, mostly-miss data could
  never enter the cache at all. The published description says such warps
  still insert some data, and draws the insertion policy on the DRAM return
  path. Fill-time typing gives exactly that: a balanced warp's miss is placed
  at LRU if the warp has been reclassified as mostly-miss while the line was
  in flight.

## Memory scheduler (`mem_scheduler`, `frfcfs_queue`)

Misses from every bank and bypassed requests all arrive at the scheduler.
Two round-robin pickers feed two queues of `QUEUE_DEPTH` entries:

* the high-priority queue takes requests with the mostly-hit bit set;
* the low-priority queue takes all the others.

Each picker considers only sources whose target queue has room. A full
low-priority queue therefore never holds back a high-priority request, which
is the reason for having two queues.

**Priority mux.** When the high-priority queue holds any request, the next
request to DRAM comes from it. Otherwise it comes from the low-priority
queue.

**FR-FCFS within a queue.** Each queue keeps its entries in arrival order.
It chooses the oldest entry whose DRAM row is open in its DRAM bank, or the
oldest entry if no row matches. The scheduler keeps the open-row table
itself: a row is open once the scheduler has sent a request to it. This
assumes an open-page DRAM controller.

**DRAM address map.** A line address is split as `{row, bank, column}`, with
`LINES_PER_ROW` lines per row and `DRAM_BANKS` banks.

## Interfaces and timing (`medic_partition`)

All ports use valid/ready handshakes and the packed structs of `medic_pkg`:

| port group | struct | direction |
|------------|--------|-----------|
| `req_*` | `mem_req_t` {id, warp, line address} | in |
| `resp_*` | `mem_resp_t` {id, warp, address, l2_hit, 1024-bit data} | out |
| `dram_req_*` | `dram_req_t` {id, warp, address, type, bypass, high} | out |
| `dram_resp_*` | `dram_resp_t` {the `dram_req_t`, data} | in, any order |

* Event pulses (`ev_interval_end`, `ev_hp_sel`, `ev_row_hit`, `ev_reorder`)
  and queue occupancies are provided for monitoring.
* Reset is synchronous and active low.
* **Hit latency.** A request accepted in cycle *c* that finds its bank idle
  is looked up in cycle *c+1* and answered in cycle *c+2*. The lookup itself
  takes one cycle, the lookup latency the published study assumes.
* **Miss latency.** This is queueing in the scheduler plus the DRAM time.
* **Replies.** Bank hits and DRAM replies share the reply port through a
  round-robin arbiter. A DRAM line is accepted, and filled, only in the cycle
  it wins that arbiter.

## Parameters

The published description gives no sizes. Every default below is this
implementation's choice. Two of them are based on the GTX 480-class GPU
that the original study simulated; those numbers come from outside the
description itself.

| parameter | default | meaning / origin |
|-----------|---------|------------------|
| `NUM_WARPS` | 720 | warps tracked; 15 SMs x 48 warps of a GTX 480-class GPU (`WARP_W` = 10 allows up to 1024) |
| `NUM_BANKS` | 4 | L2 banks per partition |
| `SETS`, `WAYS` | 32, 8 | 4 x 32 x 8 x 128 B = 128 KB per partition, i.e. 768 KB over 6 partitions |
| `REQ_BUF_DEPTH` | 8 | request buffer per bank |
| `QUEUE_DEPTH` | 16 | each of the two DRAM queues |
| `DRAM_BANKS`, `LINES_PER_ROW` | 16, 16 | DRAM address map (2 KB rows) |
| `CNT_W` | 8 | hit/access counter width |
| `SAMPLE_INTERVAL` | 2048 | cycles per sampling interval |

Widths live in `medic_pkg`: a 25-bit line address (32-bit byte addresses,
128-byte lines), 1024-bit lines, and an 8-bit request id.

## Departures and own choices

* **Reads only.** All requests are line reads. The published design bypasses
  stores as well, but its write handling is not described, so there is no
  store path, no dirty state and no write-back.
* **No MSHR merging.** Secondary misses go to DRAM again (see *L2 bank*).
* **Interval, counters, bands.** The interval is counted in cycles. The
  counter width, the saturation rule, the reset type, and the
  "no lookups means balanced" rule are all own choices. The band edges at
  20 % and 70 % are resolved as described above.
* **Fill-time type.** Fills are placed by the warp's type at fill time (see
  above).
* **Insertion positions.** The design description only says "closer to MRU"
  and "closer to LRU". The exact positions (MRU, middle, LRU) are own
  choices. So are the rule that a hit re-labels the block with the hitting
  warp's class, and the `{class, age}` victim key.
* **Scheduler details.** The round-robin enqueue, the open-row table kept by
  the scheduler, and the DRAM address map are own choices.
* **Not built.** DRAM and the interconnect between the SMs and the partition
  are outside this RTL.

## Simulation

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_warp_type_id` | 40 random intervals; every warp's type against a floating-point model of the bands; saturation; interval length; both read ports |
| `tb_bypass_logic` | routing and ready for random types and addresses |
| `tb_insertion_policy` | victim and new ages against a list-based LRU-stack model, 3000 random sets |
| `tb_l2_bank` | 30 000 cycles of random requests, out-of-order fills and back-pressure against a reference cache; lookup timing, hit data, miss fields, evictions by class |
| `tb_mem_scheduler` | 20 000 cycles against a two-list reference scheduler; high priority first, FR-FCFS order, high requests accepted while the low queue is full |
| `tb_medic_partition` | the whole partition at default parameters with `dram_model` (see below) |

`tb_medic_partition` drives five groups of warps: reuse, streaming, 50 %,
90 % and 10 % reuse. It checks every reply's id, address and data, and checks
that every request is answered exactly once. It checks the two-cycle hit
latency. It fails unless every mechanism occurred: all five warp types,
reclassification, bypassing, fills at MRU, middle and LRU, high-priority-first
selection, FR-FCFS reordering and request-buffer back-pressure. After
warm-up, at least 90 % of the reuse warps' requests must carry the mostly-hit
bit, and at least half of the streaming warps' requests must be bypassed.
It simulates about 12 000 cycles in well under a second.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/medic_pkg.sv tb/tb_medic_util_pkg.sv tb/tb_medic_partition.sv \
    --top-module tb_medic_partition
./obj_dir/Vtb_medic_partition
```

For the other blocks, replace the testbench name and keep the two package
files first.

## How far to trust it

* **What is checked.** Each block is checked against an independent
  reference model. For each block, a deliberately broken copy was shown to
  fail its testbench.
* **Not simulated: the workloads.** The published evaluation covers 15 GPGPU
  applications (NN, CONS, SCP, BP, HS, SC, IIX, PVC, PVR, SS, BFS, BH, DMR,
  MST, SSSP) in a full GPU simulator. None of them can be run here: there is
  no GPU core model, and only synthetic request streams are used. The
  partition places no limit on an application except the number of warps
  (up to 720 with the defaults).
* **Not studied: performance.** The speed-ups reported for MeDiC depend on
  parameters (interval length, queue sizes, DRAM timing) that this RTL had to
  choose. They were not measured with this RTL.
