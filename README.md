# RepTFD hardware: replay-based transient fault detection

## Idea

The cores of a chip multiprocessor are split into two equal groups. The **checked group**
runs a parallel program. The **redundant group** runs the same program again, fed from
logs left by the first run, and the results of the two runs are compared. The groups
share no data, so a transient fault anywhere can corrupt only one run:
- in a core;
- in the uncore: shared cache, interconnect or memory controllers.

Re-executing a parallel program reproducibly needs the order of conflicting memory
accesses between threads. Recording every such order is too expensive. Most orders are
instead implied by coarse global timing, and only the rest are logged.

## Pending periods and blocks

A global sampling timer divides time into spans of 512 cycles.
- Each checked core cuts its stream of committed memory instructions into **blocks**, one
  per span, and logs each block's size.
- Block *b* is given the pending period [b, b+2] in span indices.
- Two accesses whose pending periods do not overlap are ordered by physical time. The
  replay reproduces that order through the **grant array**: block *b* of any core may
  start only after every core has ended the blocks whose period ends at *b*.
- For accesses in overlapping periods, the order must be logged explicitly.

To find those accesses, each checked core has an **access CAM** of 1024 entries that holds
its memory accesses of the current and the previous span.
- Each entry holds a 15-bit line tag, a 10-bit instruction counter, a store flag and an
  L1-hit flag.
- When a core misses in its L1, the **order recorder** searches the CAMs of all other
  checked cores. A conflicting entry exists when the two accesses are to the same line
  and at least one is a store.
- Each conflicting entry yields an order record "v before u". The record carries both
  core numbers and both memory-instruction numbers.
- Accesses that hit in the L1 need no search. A conflicting remote access would have
  taken the line away first, which turns the later access into a miss.

## Replay

Each redundant-core replay unit holds:
- a queue of block records;
- a queue of order records (16 entries);
- the registers `next_start`, `curr_end` and `next_end` of the replay algorithm.

The unit works as follows:
- A block starts when grant entry `next_start` has reached the number of cores.
- Every memory instruction of the block is then allowed through, one per request, until
  the block size is used up.
- At the end of a block, the unit increments grant entry `curr_end`.
- While the next memory instruction is the later access of a queued order, the core is
  paused until the peer core's replay count has passed the earlier access.
- The grant array is a ring of 256 entries. An entry is cleared once it is full and two
  more entries have filled.

Instruction results are XOR-folded into a **checksum** every 1024 committed instructions
on both sides. The **result comparator** of each redundant core compares its checksums in
order with the imported ones, and any difference raises `fault_detected`.

## Log streams

All records have one format: `log_rec_t` = {kind, core, peer, seq, peer_seq, data}. The
three kinds are block, order and checksum.

Export (`log_out_*`) is one valid/ready stream:
- Order records have strict priority.
- Block records also wait while the order recorder is still serving a request. This way
  every order leaves before the record of the block that holds its later access.
- Block and checksum records cannot be held back, so an overflow is flagged.

Import (`log_in_*`) is the reverse:
- A one-entry register forwards each record to its core's replay unit or comparator.
- The flags `log_in_room_blk/ord/cs[c]` tell the log storage which of core *c*'s targets
  can take a record.
- The storage keeps one sequence per core for block and order records together, and one
  for checksums. It serves any sequence whose head has room.
- A single shared in-order stream is not enough. A core waiting for a grant can hold up
  the very records its peers need, and the replay deadlocks.

## Files

- `rtl/reptfd_pkg.sv`: sizes and the record and CAM-entry types.
- `rtl/sampling_timer.sv`, `rtl/block_counter.sv`, `rtl/access_cam.sv`,
  `rtl/order_recorder.sv`, `rtl/checksum_unit.sv`, `rtl/log_export.sv`: the checked side.
- `rtl/log_import.sv`, `rtl/grant_array.sv`, `rtl/replay_unit.sv`,
  `rtl/result_compare.sv`: the redundant side.
- `rtl/sync_fifo.sv`: a small first-word-fall-through FIFO.
- `rtl/reptfd_top.sv`: all of the above for 8 checked and 8 redundant cores.
- `tb/tb_<module>.sv`: a self-checking testbench per module. Each prints `TB_RESULT`.

## Choices of this design (not fixed by the description)

- The record format, the valid/ready streams and the FIFO depths.
- The checksum is an XOR fold over 32-bit results, exported when the committed count is a
  multiple of 1024.
- The CAM entry is split into tag, counter and flags. The CAM is two 512-entry halves
  that swap on each span.
- Empty blocks are logged like any other, so the block sequence has no gaps.
- One L1-miss search is accepted at a time, in round-robin order. Its hits are captured
  in the accept cycle, and the missing access counts as performed at that edge.
- The grant array is a ring, not an unbounded array.

## Simulation

Each testbench runs with plain Verilator, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/reptfd_pkg.sv tb/tb_replay_unit.sv --top-module tb_replay_unit

## Status and limits

- Every module passes its own testbench.
- Each module has a deliberately broken copy, and its testbench catches the break.
- The end-to-end testbench `tb/tb_reptfd_top.sv` runs the full-size top:
  - it models the cores, MSI L1 caches, shared memory and log storage;
  - the first run and log export work, and every mechanism except grant stalls and
    checksum comparisons occurs;
  - **the replay part does not finish yet**: with the generated sharing pattern, the
    replay cores stop in order waits (a dependency cycle between order waits and block
    grants), so that testbench reports 5 failures.
- Not included: the cores themselves, the uncore, the off-chip log storage, and the
  checkpoint/rollback mechanism that reacts to `fault_any`.
