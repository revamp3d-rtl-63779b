# RevaMp3D core-side logic in SystemVerilog

When logic and memory are built as one monolithic 3D (M3D) stack, main
memory sits a few micrometres above the cores. It is connected by very dense
inter-layer vias (ILVs). Memory bandwidth is then huge and memory latency is
short. Once memory stops being the bottleneck, the processor core itself
becomes the limit. RevaMp3D spends the silicon and the vertical wiring
differently from a conventional chip:

* The shared L2 is dropped. It rarely filters misses when main memory is
  this close, and removing it frees about a third of the logic area.
* The freed area goes into a wider core: 8-wide issue and a 256-entry
  reorder buffer. The L1 is split over two logic layers, which cuts its
  access time from 4 to 2 cycles.
* Already decoded micro-operations (uops) of hot loops are kept in main
  memory, not in a large on-chip cache. A small memoization unit streams
  them back into execution while the frontend is switched off.
* Locks are kept in a few extra register-file entries in every core, not
  in memory. A lock travels over the network straight into the other cores'
  register files.

The RTL here covers the new logic: the memoization unit and the
register-file synchronization, for 64 cores. It also wires them together
the way they sit on the chip. The conventional parts are outside the RTL
and are reached through ports:

* the out-of-order pipeline;
* the meshes-of-trees network;
* the memory controllers;
* the RRAM main memory.

## The memoization unit

### What it does

A loop body that has been fetched, decoded, renamed and issued once is
recorded as it leaves the issue stage. The recording is made in rows of 8
uops: one issue group, 64 bytes. The rows go to a reserved region of main
memory. The next time the loop starts, the unit replays the recorded rows
directly into execution. While it replays, `fe_gate` is high, so fetch,
decode and reorder can be power-gated.

The unit sits beside the issue stage, not in series with it. Issued groups
go to execution and to the unit at the same time. The pipeline therefore
gets no extra stage.

### Both paths of the branch

The key idea is that memory bandwidth is cheap. A loop whose body holds a
hard-to-predict branch is recorded twice, once for each outcome of that
branch. Each recording is a *segment*, and the two segments are kept in
step:

* The recorder is told which path (`rec_path`) it is following.
* It marks the row that holds the branch (`issue_br`). The segments of the
  two paths share the rows up to the branch, then diverge.

On replay, both segments are prefetched at once into the two halves of a
1280-byte buffer, 10 rows per path. Up to and including the branch row, the
two halves are popped together. After the branch row, only the predicted
half is popped.

When the branch resolves:

* **Correct prediction:** nothing happens.
* **Misprediction, other path recorded:** the unit drops the wrong half and
  carries on from the other half (`ev_switch`). That half already holds the
  rows just past the branch. The correct path costs no refetch, decode or
  reorder, and the frontend stays gated.
* **Misprediction, other path not recorded:** replay stops (`ev_abort`) and
  the frontend takes over.

### Parts and timing

The unit is split into the three parts the design names:

* **`mu_buffer`:** two circular FIFOs of 10 × 512-bit rows. A pop is seen on
  `rd_row` one cycle later, which is the single-cycle access the design
  asks for.
* **`mu_prefetcher`:** one per path. It is a stride prefetcher that reads
  `base + i·stride`.
  * It issues a read only while the rows in flight plus the rows already
    buffered leave room. A fill can therefore never overflow the buffer.
  * A cancel (switch, abort or end) stops issue at once. It also counts the
    rows still in flight so they are thrown away when they return.
* **`mu_mem_if`:** one address bus and two data ports, taken and not-taken.
  A round-robin arbiter shares the address bus between four requesters:
  two prefetcher reads and two recorder writes. Read data returns in order
  on the port of its path.

### Trace table and layout

`memo_unit` adds the trace table (8 entries, direct-mapped on the loop's
start PC) and the recorder with its 4-deep write queue. A recording is
abandoned (`rec_overflow`) in two cases:

* the write queue fills, for example while memory stalls;
* the segment grows past 64 rows.

Segment (entry e, path p) starts at
`MEMO_BASE + (2e + p) · 64 · cfg_stride`. With `MEMO_BASE = 0xF_0000_0000`
this is the top 4 GB of the 64 GB space.

### Latency

The prefetch depth hides only part of the main memory read latency. A path
can have at most 10 rows buffered or in flight. With 20-cycle reads (5 ns at
4 GHz), that limits steady replay to about 10 rows every 21 cycles. The
first rows of a replay arrive 21 cycles after the lookup hit. One row per
cycle would need either more buffer rows than 1280 bytes of 512-bit rows
allow, or narrower uops. The design does not give a uop encoding.

## Locks in the register file

Each core's register file has four extra entries. They have ports of their
own, added on the second logic layer (`sync_rf`). Every core holds a copy of
the same table of locked addresses and their owners.

### Taking and releasing a lock

1. The core sends LOCK(addr) as a message with `is_sync` set.
2. The router's selection structure (`sync_path_select`) sends it onto the
   synchronization path, not toward memory. Ordinary loads and stores take
   the baseline path unchanged.
3. The synchronization path (`sync_net`) takes one lock message per cycle,
   chosen round-robin. It broadcasts that message to every register file on
   the next edge.
4. Every copy applies the same message in the same order, so all copies
   stay equal. The requester's own copy reports the outcome (`grant_valid`,
   `grant_ok`).

A LOCK is refused in two cases:

* the address is already held;
* all four entries are in use. The core is then expected to fall back to an
  ordinary lock in memory.

A waiting core spins on its own register file (`probe_addr` → `probe_locked`),
which makes no network or cache traffic. UNLOCK frees the entry only for its
owner.

### Latency

A LOCK offered in cycle t is serialised at edge t+1. It is written into all
register files at edge t+2, and its grant is visible at the same time. Two
cores that race for one address get the same answer everywhere: exactly one
wins.

### Simplification

The real synchronization path is the tree network of the baseline chip. Its
router sizes and timing are not specified, so it is modelled as a single
serialisation point with a one-cycle broadcast. This is the part of the RTL
that departs most from a physical implementation. A distributed version
must still deliver lock messages to all cores in one global order.

## The L1 data cache

Each core keeps a private 32 KB L1 data cache (`l1_dcache`). It is 8-way set
associative with 64-byte lines. The design's change to the L1 is physical:
its arrays are split over two logic layers, and the shorter wires cut the
hit time from 4 cycles to 2. The RTL therefore keeps the ordinary logic of
a write-back, write-allocate cache and builds the 2-cycle hit:

* **Cycle 1 (TAG):** the eight tags of the set are compared. The hit line
  is read into a register. On a miss, the victim line is read instead.
* **Cycle 2 (RESP):** the word is answered (`resp_valid`). A store merges
  its bytes into the line and writes it back at the end of this cycle. The
  next request can be accepted in the same cycle.

A miss sends the dirty victim to memory if it has one. It then reads the
line, fills the victim's way and runs TAG again, this time as a hit.
Replacement is round-robin within each set.

The cache is blocking: one miss at a time. Nothing sits below it on the
chip: line reads and write-backs (`l1_mem_*`) go straight to the memory
controllers.

## Top level

`revamp_top` (`NUM_CORES = 64`) holds, for each core:

* a `memo_unit`;
* a `sync_path_select`;
* a `sync_rf`;
* an `l1_dcache`.

It has one `sync_net` for all cores. All per-core signals are unpacked
arrays indexed by core. There is no shared cache level: anything on the
baseline path goes to the memory controllers.

Shared types are in `revamp_pkg`:

* `uop_t`: an opaque 64-bit uop, 0 for an empty slot.
* `row_t`: 8 uops.
* `addr_t`: 36 bits, for 64 GB.
* `path_e`, `sync_op_e`, `core_msg_t`, `sync_msg_t`, `mu_cmd_t`.

## What is not in the RTL

These parts are not built:

* **The out-of-order core itself:** fetch, the branch predictor, decode,
  rename, issue queue, ALUs, load/store queues and the 256-entry ROB. They are standard structures. The
  design changes only their sizes and their physical layout.
* **The meshes-of-trees network and the memory controllers.** Their
  internals are not given.
* **The RRAM main memory.** It is a device technology. In the testbenches it
  is replaced by `tb/mu_mem_model.sv`: an associative store with 20-cycle
  reads, a stall input, and in-order return per data port.

Other things to know before trusting the RTL:

* **Own choices.** The row format, the trace table and the rule that
  matches the two paths up to the branch row are choices made here. Only
  the three-part split, the 1.28 KB buffer, the two ports, the reserved
  region and the gating come from the design description.
* **Recording is driven from outside.** The unit does not decide which
  loops or branches are worth memoizing. The core tells it when to start
  and stop recording and which path it follows.
* **Full size is simulated, but not synthesized.** The top is simulated at
  the full 64 cores. Yosys' coarse synthesis of the 64-core top takes more
  than 10 minutes, so no size figures are given for it. The blocks
  synthesize on their own.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. Each prints one
line `TB_RESULT checks=N failures=M`. With verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl --top-module tb_memo_unit \
  rtl/revamp_pkg.sv tb/tb_memo_unit.sv -o sim
obj_dir/sim +verilator+rand+reset+2
```

### The full-size test

`tb_revamp_top` runs the full 64-core top at its default parameters, in
well under a minute. Several cores work at the same time:

* **Core 0:** records both paths of a loop, replays it, then replays again
  with a mispredict that switches paths.
* **Core 5:** aborts on a mispredict with no recorded other path.
* **Core 63:** does a plain replay.
* **Core 7:** loses its recording to a memory stall.
* **Cores 1–8:**
  * take, refuse, spin on and release locks;
  * fill the table until it refuses a new lock.
* **Cores 20 and 40:** race for one address.
* **Core 10:** sends a store on the baseline path under backpressure.
* **Core 12:** gets an L1 hit in 2 cycles, a dirty eviction, and a
  read-back of the evicted line from memory.

It counts each of these mechanisms and fails if any of them never happened.
