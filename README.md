# Assist warps for GPU bandwidth compression: RTL of the assist-warp hardware

Memory-bound GPU kernels leave a large share of the arithmetic pipelines idle
while they wait for DRAM. An *assist warp* is a short, hardware-spawned
subroutine that runs on those idle lanes next to the application's own warps
(its *parent* warps). It shares the parent's register file and instruction
buffer. It is started by a hardware event and has a fixed priority relative
to its parent. The first use is bandwidth compression:

- Lines are kept compressed in L2 and DRAM, so they cross the memory bus in
  fewer bursts.
- A compressed line arriving at the core spawns a high-priority
  *decompression* assist warp, which the loading warp has to wait for.
- A line being written spawns a low-priority *compression* assist warp,
  which runs only when nothing else can issue.

The compression algorithms (BDI, FPC, C-Pack) are software in this scheme. The
hardware only stores, starts, schedules and retires assist warps, plus a few
helpers: a warp-wide predicate, a buffer for loads that wait for
decompression, a store buffer, and a cache for per-line compression metadata
at the memory controller.

This repository gives synthesizable SystemVerilog for that hardware. It does
not include the baseline SM pipeline, the caches, the interconnect, DRAM, or
the subroutine code. The top level `caba_top` brings all of those out as
ports.

## Blocks and where they sit

| File | Block | Location in the GPU |
|---|---|---|
| `caba_pkg.sv` | shared types: decoded assist instruction, SR.ID/Inst.ID, live registers | – |
| `assist_warp_store.sv` | **Assist Warp Store**: subroutine code, indexed by {SR.ID, Inst.ID} | SM front end |
| `assist_warp_table.sv` | **Assist Warp Table**: one entry per live assist warp | inside the controller |
| `assist_warp_controller.sv` | **Assist Warp Controller**: trigger → table → store → buffer, priorities, throttling, kill | SM front end |
| `assist_warp_buffer.sv` | **Assist Warp Buffer**: the instruction-buffer partitions plus a 2-entry low-priority partition | between decode and issue |
| `caba_issue_select.sv` | warp-scheduler pick with assist-warp priorities, GTO for parents | issue |
| `global_predicate.sv` | AND of all lane predicates of a warp | SIMT lanes |
| `load_replay_buffer.sv` | loads waiting for their line to be decompressed | load/store unit |
| `buffered_store_unit.sv` | pending store lines, compression, overflow release, fix-up of partial writes | L1 side |
| `md_cache.sv` | metadata cache: bursts per 128 B line | memory controller |
| `caba_top.sv` | wiring of all the above for one SM and one memory controller | – |

## Life of an assist warp

1. **Preload.** Before the kernel starts, the subroutines are written into the
   assist warp store (`ld_*` port). The controller is also configured:
   - `cfg_end_*`: the index of each subroutine's last instruction (SR.End).
   - `cfg_ev_*`: for each trigger event, a base SR.ID, whether the line's
     compression encoding is added to it, and a priority.
   - In `caba_top`, event 0 is decompression and event 1 is compression.
   - SR.ID is 5 bits: a "store/compress" bit above the 4-bit encoding. One
     decompressor and one compressor per encoding therefore fit.
2. **Trigger.** A trigger gives an event, the parent warp, an encoding, the
   live-in/out register IDs and an active mask.
   - The controller turns it into a table entry holding Warp ID, live
     registers, active mask, priority, SR.ID, Inst.ID = 0 and SR.End.
   - The entry is refused (`trig_ready` low) if the table is full, or if the
     same warp already runs the same subroutine.
3. **Deploy.** Each cycle the table picks one *eligible* entry in round-robin
   order and reads the store at {SR.ID, Inst.ID}. One cycle later the decoded
   word goes into the buffer, tagged with warp, priority, mask and position.
   Inst.ID then advances; after the entry's last instruction it is freed.
   Eligibility works as follows:
   - A high-priority entry needs a free slot in its parent warp's partition.
   - A low-priority entry needs a free slot in the low-priority partition, and
     a reported pipeline utilization (`pipe_util`) below `cfg_util_thresh`.
     This is the throttle: while it holds a low-priority entry back,
     `aw_throttled` is high.
   - An instruction already in flight to the same partition is counted.
4. **Issue.** The scheduler (`caba_issue_select`) takes candidates in this
   order:
   - Any ready high-priority assist instruction (round robin over warps).
   - Otherwise a parent instruction, greedy-then-oldest.
   - Only if neither exists, the head of the low-priority partition: an
     *idle cycle*.
5. **Finish.** The pipeline reports the end of an assist warp on `aw_done_*`
   with warp, SR.ID and, for compression, the outcome (compressible or not,
   encoding, compressed data).
6. **Kill.** `kill_*` removes all of a warp's table entries, any instruction of
   that warp on its way into the buffer, and its assist entries in both buffer
   partitions. Parent instructions stay. The load replay buffer and store
   buffer release whatever waited on that warp:
   - waiting loads are replayed;
   - a line being compressed is sent uncompressed;
   - a fix-up is restarted.

### Why decode is held off for a warp with a live decompression warp

High-priority assist instructions share the parent's instruction-buffer
partition, which is normally full of the parent's own decoded instructions. If
decode kept refilling every slot the scheduler freed, the assist instructions
might never get in. The scheduler's precedence would then be worthless, and
under a greedy scheduler the warp could wait forever.

The buffer therefore refuses new parent instructions for any warp that has a
live high-priority assist warp (`par_hold`, driven by the controller's
`warp_has_high`). Slots freed by the parent's issues go to the assist warp.
This costs the parent nothing it could use: it is waiting for the
decompressed data anyway. The end-to-end test deadlocked without this rule,
and it is not in the original description of the scheme.

## The compression data path

**Loads.** A line returning from L2 with its "compressed" bit set is taken
(`ld_fill_ready`) only when two things hold:
- the replay buffer has room;
- the controller accepted the decompression trigger.

The load's information is then kept with (warp, SR.ID). When an assist warp
without the store bit completes, the oldest waiting load of that warp and
subroutine becomes ready and is replayed on `replay_*`. Uncompressed lines pass
straight on.

**Stores.** `buffered_store_unit` keeps whole 128-byte lines with a byte mask.
Stores to a held line merge into it. Each line moves through these states:

```
FREE -> HELD -> (CMP) -> REL -> WAIT -> FREE
                              \-> FETCH -> FILL -> DREQ -> DCMP -> REL
```

- **HELD.** With compression enabled the unit asks for a low-priority
  compression assist warp (`cmp_req`). A result of "compressible" sends the
  line compressed with its encoding; otherwise it goes out raw.
- **Overflow.** If a new line arrives and no entry is free, the lowest held
  line is released uncompressed. Only one release happens at a time, so a
  burst of stores does not flush the whole buffer.
- **WAIT.** A released line stays until the lower level answers. A partial
  write into a line that is compressed below must be corrected: the unit
  fetches that line, triggers a decompression assist warp, merges its own
  bytes over the result, and sends the full line again. Otherwise the entry
  frees.

Completion routing in `caba_top`:
- The store bit of SR.ID marks a compression result.
- A decompression completion that matches no waiting load belongs to a store
  fix-up.

**Metadata.** The memory controller must know how many 32 B bursts (1 to 4)
each 128 B line takes. Two bits per line are kept in a reserved DRAM region:
8 MB for 4 GB.
- `md_cache` is an 8 KB, 4-way cache of that region with 32 B blocks
  (128 lines each), giving 64 sets.
- Replacement is true LRU, with write-allocate and write-back.
- A hit answers in one cycle. A miss first writes back a dirty victim, then
  reads the block from DRAM.

**Global predicate.** Compression subroutines test all lanes of a warp at
once. `global_predicate` holds, per warp, the AND of the lane predicates over
active lanes, plus the first failing lane.

## Timing summary

- **Assist warp store:** read 1 cycle after the request.
- **Trigger to first instruction in the buffer:** 2 edges (insert, select +
  store read, push).
- **Deployment:** then 1 instruction per cycle, shared by all live assist
  warps.
- **Buffers, table, replay buffer and store unit:** all handshakes are
  valid/ready and take effect at the clock edge. The scheduler's pick is
  combinational from buffer heads and readiness.
- **Metadata cache:** a hit answers one cycle after the request. A miss takes
  one write-back (if the victim is dirty), then one DRAM read, then one
  cycle.
- **Reset:** asynchronous and active low. The store and cache data arrays are
  not reset; their valid and state bits are.

## What follows the description and what was chosen here

**Taken from the scheme's description:**
- The store, table, controller and buffer, and the table's fields.
- Round-robin deployment; the entry is freed at the subroutine's end.
- High-priority assist warps in the parent's own partition; a two-entry
  low-priority partition used only in idle cycles.
- Throttling from functional-unit utilization; kill flushes table and buffer.
- Load information buffered until decompression.
- Stores buffered, with uncompressed release on overflow.
- Optimistic uncompressed stores, with re-fetch and decompression when wrong.
- The 8 KB 4-way metadata cache and its 2-bit burst counts.
- The AND-of-lanes predicate.
- The machine sizes used as defaults: 48 warps per SM, 32 threads per warp,
  128 B lines.

**Chosen here (the description is silent):**
- Per-warp partition depth 2, 48 table entries, 32 subroutines of up to 16
  instructions, 64-bit decoded words and 8-bit register IDs.
- The event table and SR.ID layout.
- The utilization-threshold test.
- One deployment per cycle.
- The parent hold described above.
- Strict precedence of high-priority assist warps over every parent.
- Warp index as age for the GTO scheduler.
- A 16-entry replay buffer and an 8-line store buffer; the original keeps
  stores in L1 sets or shared memory.
- The overflow victim and the completion routing.
- The metadata block size, LRU and write policy.
- Every handshake.

**Not built:**
- The baseline pipeline (fetch, decode, scoreboard, register file, ALUs,
  load/store unit), L1/L2, crossbar, memory controller scheduling and DRAM.
- The MOVE instructions that copy live registers. They are ordinary
  instructions of the subroutine.
- The compression subroutines themselves: the GPU's internal instruction
  encoding is not public.
- The one instance here stands for one scheduler. An SM with two schedulers
  would need a second issue select sharing the controller.

## Simulating

Each block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/caba_pkg.sv $(ls rtl/*.sv | grep -v caba_pkg) tb/tb_caba_top.sv \
    --top-module tb_caba_top -Mdir obj && obj/Vtb_caba_top
```

Replace `tb_caba_top` with `tb_<block>` for any block.

`tb_caba_top` runs the whole design at its default parameters, for about 14k
cycles. It surrounds the design with small models:
- a decoder that keeps all partitions full;
- a randomly stalling scoreboard, with an all-stall phase to create idle
  cycles;
- a pipeline that reports each assist warp's end a few cycles after its last
  instruction issues;
- an L2 with a mix of compressed and uncompressed lines, and some lines
  "compressed below" to force fix-ups;
- a DRAM behind the metadata cache.

It checks the following:
- Every compressed load is replayed exactly once with its own information.
- Assist instructions issue in order.
- No parent passes a ready high-priority assist instruction.
- Low-priority instructions issue only in idle cycles.
- Compressed releases carry the assist warp's result.
- The metadata cache returns the burst counts of a reference model.

It also counts each mechanism and fails if one never happened: high and low
deployment, throttling, idle-cycle issue, precedence over a ready parent,
replay, compressed and raw releases, overflow, fix-up, kill, and metadata hits
and misses. A typical run reports about 100 replays, 30 overflows and 6
fix-ups.

The block testbenches shrink warp counts or table sizes to stay short. The
assist-warp-store, metadata-cache and top-level tests run at full size.
