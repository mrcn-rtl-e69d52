# MRCN: section-wise speculative coherence for a near-memory core

A near-memory processing (NMP) core sits next to the DRAM stack and runs code
that the host CPU hands off to it. Both sides share memory, so their caches must
be kept coherent. Keeping them coherent line by line across the memory-side
network is slow. A cheaper approach is to let the NMP core run the offloaded
task *speculatively*, as if it owned every line. At the end of the task, one
check with the host decides whether anything the CPU wrote in the meantime
clashed with what the core touched. If something did, the core's work is thrown
away and redone.

The weak point of that approach is its granularity. One conflicting line
anywhere in a long task forces the **whole** task to run again. When many such
conflicts happen, the core spends most of its time re-executing.

MRCN narrows the damage. The task is cut into **sections** by breakpoints
(rollback points). The core keeps a separate access record, two Bloom-filter
signatures, for each section. The CPU's check names the *first* section that
conflicts, not just "yes, something conflicted". The core then keeps everything
before that section, discards the buffered stores from that section onward, and
restarts at that section's rollback point. With five sections and a conflict
near the end, only about a fifth of the task runs again.

This repository holds synthesizable SystemVerilog for the coherence hardware of
one NMP core and the matching unit on the host side. It also holds
self-checking testbenches, including a sweep that runs the synthetic benchmark
against the same hardware reduced to a single rollback point (whole-task
re-execution).

## Block diagram

```
           NMP core (not included; behavioural model in tb/)
   task_start / bp_mark / task_end      accesses (rd/wr, addr, data)
                 |                         |            |
                 v                         v            v
        +-----------------+     +-------------------+  +------------------+
        | mrcn_controller |---->| section_signature |  | spec_write_buffer|--> mem_wr (commit)
        | IDLE EXEC SEND  |     | rd/wr Bloom filter|  | 512 entries,     |
        | WAIT COMMIT     |     | per section       |  | tagged by section|
        +-----------------+     +-------------------+  +------------------+
          |   ^      |                    | signatures         ^  squash >= j / commit
          |   |      v                    v                    |
          |   |  rollback_point_table  coherence_link (NMP -> CPU, fixed latency)
          |   |  PC + context per sec.    |
          |   |                           v
          |   |                 +--------------------------------------------+
          |   |                 | cpu_coherence_unit                         |
          |   |                 |  cpu_write_history (2 banks x 64 lines)    |
          |   |                 |  conflict_checker (8 lines / cycle)        |
          |   |                 |  first_conflict_encoder                    |
          |   |                 +--------------------------------------------+
          |   |                           |  report {ovf, conflict, sec}
          |   +------ coherence_link (CPU -> NMP) <---+
          v
   stall / restart + restart PC/context to the core
```

`mrcn_top` wires all of this together. The core, the host CPU, the caches, the
memory stack and the memory-side network are not designed here. Their signals
are ports of the top:

- `core_*` for the core;
- `cpu_wr_*` for the stream of host writes to shared lines;
- `mem_wr` for the commit path into memory.

## Sections and rollback points

A task starts with `core_task_start`, which brings the start PC and context.
That becomes rollback point 0. Each `core_bp_mark` closes the current section,
opens the next one, and stores the PC and context it carries as that section's
rollback point (`rollback_point_table`).

There are `NUM_SEC = 5` sections. More breakpoints than that stay in the last
section; that choice is this design's own. `core_task_end` ends speculative
execution.

The current section number (`core_cur_sec`) tags two things:

- every access written into the signatures;
- every store written into the write buffer.

## Signatures

`section_signature` holds one read filter and one write filter per section,
each `SIG_BITS = 2048` bits wide.

An access to line address `L` (the byte address without its 6 offset bits)
sets `SIG_HASHES = 4` bits in the matching filter. Bit *k* is at
`fold(rotl26(L, 7k))`: rotate the 26-bit line address left by 7*k* and XOR-fold
the result down to 11 bits (`mrcn_pkg::sig_hash`).

A filter can report a line it never saw (a false positive). It can never miss a
line it did see. So a false positive only costs an unnecessary rollback and
never breaks correctness.

The filter size is this design's choice; the source does not give one. Consider
a 500-instruction block where 90% of instructions touch shared memory. It puts
about 90 lines into one section:

- With 512-bit, 2-hash filters, about 5-9% of lookups are false positives. In
  simulation, almost every check of such a block then failed, and the task
  never finished.
- With 2048 bits and 4 hashes, the rate falls to about 0.1%.

At the end of a task, all ten filters go to the host as one message
(`{wr_sig, rd_sig}`). The filters are then cleared for the next round.

## Validation on the host

`cpu_write_history` records the lines that the host writes to shared memory. It
has two banks of `HIST_DEPTH = 64` lines. One bank collects new writes while the
other is frozen and checked. A swap happens on every signature arrival. A write
in the same cycle as the swap goes to the new bank, so no write falls between
two windows. Each bank has an overflow flag: once more than 64 distinct lines
have been written, the record can no longer say which sections are safe.

`conflict_checker` scans the frozen bank `CHECK_LANES = 8` lines per cycle.
Each line is looked up in every section's filters:

- The eight lanes compute their hash indices once.
- All five sections share those indices.

A line that hits section *s* sets bit *s* of the conflict vector.
`first_conflict_encoder` picks the lowest set bit, the earliest section that
must be redone. If the bank overflowed, the report is "conflict in section 0",
which means re-run the whole task.

Which accesses count as a conflict is ambiguous in the source:

- One sentence says the host compares the addresses it receives against its
  own writes, with no distinction between NMP reads and writes.
- Another says a CPU write against an NMP read needs no re-execution.

The default (`CHECK_NMP_READS = 1`) checks CPU writes against both NMP filters.
This is the safe reading: a core that read a line before the CPU changed it has
used a stale value. `CHECK_NMP_READS = 0` gives the other reading.

## Speculative stores, squash and commit

`spec_write_buffer` holds up to `WB_DEPTH = 512` stores in program order, each
tagged with its section:

- A store to a word already buffered in the **same** section overwrites that
  entry.
- A load returns the youngest buffered store to its word (`core_fwd_hit`,
  `core_fwd_data`); otherwise it reads memory.

When the report arrives:

- **Conflict in section j:** every entry with a section ≥ *j* is dropped in a
  single cycle. Older sections keep their stores, and the core restarts from
  rollback point *j*.
- **No conflict:** the buffer drains to memory in exactly
  `COMMIT_CYCLES = 8` cycles, 64 entries per cycle in program order. 8 cycles
  is the commit time the source gives.

If the buffer fills up, `wb_overflow` is raised and the store is lost. This is
an error case, and the testbenches avoid it.

## Controller and timing

`mrcn_controller` moves through `IDLE → EXEC → SEND → WAIT → (EXEC | COMMIT) →
IDLE`. The core is stalled in SEND, WAIT and COMMIT. On a rollback, the restart
pulse comes one cycle after the report, with `core_restart_sec`, `_pc` and
`_ctx`. `task_rollbacks` counts how often the current task was rolled back.

Cycle budget at the defaults, from end of task to report:

| step | cycles |
|---|---|
| SEND (hand signatures to the link) | 1 |
| link NMP → host (`LINK_LAT`) | 18 |
| host check (64 lines / 8 lanes + 1 + report register) | 10 |
| link host → NMP | 18 |
| **total** | **47** |

The source puts this round trip at 40-50 cycles. The link latency of 18 cycles
is chosen so that the total lands in that range. The link itself is a
fixed-latency pipe that holds one message. An assertion fires if a second
message is sent while one is in flight, which the controller never does.

## Where this departs from the source

- **One core.** The evaluated system has a 16-node NMP mesh, 4 host cores,
  caches and HBM. Only one core's coherence path is built. A system would
  replicate the NMP side per core and give the host unit one write record per
  core.
- **Not given in the source; chosen here:** filter size and hash functions,
  write-record depth and its overflow fallback, the 8-lane scan, the link
  latency, the message format and all handshakes.
- **Checking against NMP reads.** See *Validation on the host*: the stricter of
  the two readings is the default.
- **After a rollback to section j,** only sections ≥ *j* are re-executed and
  re-recorded. The next check still looks at all sections. Sections before *j*
  have empty filters in that round, because their filters were cleared when
  sent. So a CPU write to a line that an earlier, already validated section
  read is not caught in later rounds. The source does not discuss repeated
  rounds; this design treats validated sections as final.
- **Breakpoints** are modelled as a one-cycle marker from the core, carrying
  the rollback PC and context (`CTX_W = 64` bits, a placeholder for the
  register state the core would save).
- **Not built:** the NMP core, the host CPU, caches, the memory stack and the
  network. Their function is outside the coherence mechanism, or not given.

## Testbenches

Every block has a self-checking testbench, `tb/tb_<block>.sv`. Each compares
the block against an independent model and prints
`TB_RESULT checks=N failures=M`.

- `tb_mrcn_top` runs the whole design with every parameter at its default. It
  has a behavioural core (`tb/nmp_core_model.sv`) and drives 40 tasks of 100 and
  500 instructions. It counts:
  - clean commits;
  - rollbacks to a middle section and to section 0;
  - rollbacks caused by record overflow;
  - tasks rolled back several times;
  - repeated stores.

  It also checks the 47-cycle round trip, the 8-cycle commit, and that memory
  ends up holding exactly what a non-speculative run would write.
- `tb_synthetic_sweep` runs the synthetic benchmark: blocks of 100 and 500
  instructions, and 10, 50 and 90% of instructions touching shared memory. Two
  copies of the design see the same host write stream: MRCN with five rollback
  points, and one rollback point (whole-task re-execution). Example result at
  500 instructions and 90% shared accesses: 5350 cycles and 1500 re-executed
  instructions with MRCN, against 12714 cycles and 9500 instructions for
  whole-task rollback. The host write rate (2% of cycles) and the shared region
  (16384 lines) are assumptions of the testbench.

- `tb_granularity_sweep` does the same for blocks of 10, 50, 250 and 1000
  instructions at 10% and 90% shared accesses. Here the single-section copy
  gets an 8192-bit filter pair, about the storage of five 2048-bit sections. A
  single 2048-bit filter fills up with the roughly 900 lines of a
  1000-instruction block, so almost every check would report a false conflict.
  At 1000 instructions and 90% shared accesses, MRCN takes 7307 cycles (5
  rollbacks), against 46232 cycles (40 rollbacks) for whole-task rollback. At
  small blocks without conflicts, MRCN is a few cycles slower per task: each
  breakpoint marker takes one cycle of the core model.

To simulate with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_mrcn_top rtl/mrcn_pkg.sv tb/tb_mrcn_top.sv
./obj_dir/Vtb_mrcn_top
```

Replace `tb_mrcn_top` with any other testbench name. The unit testbenches run
in seconds. The top-level test runs in about 15 seconds. Each sweep takes
one to two minutes, most of it compilation.

## Parameters

| parameter | default | source |
|---|---|---|
| `NUM_SEC` | 5 | rollback points drawn in the source's example |
| `COMMIT_CYCLES` | 8 | commit time given in the source |
| round trip | 47 | source gives 40-50 |
| `SIG_BITS`, `SIG_HASHES` | 2048, 4 | chosen (false-positive rate) |
| `WB_DEPTH` | 512 | chosen: holds a 500-instruction block's stores |
| `HIST_DEPTH`, `CHECK_LANES` | 64, 8 | chosen |
| `LINK_LAT` | 18 | chosen to meet the round trip |
| `CHECK_NMP_READS` | 1 | see above |

All modules take these as parameters. Changing them in `mrcn_pkg` changes every
default. Blocks of 1000 instructions can overrun the 512-entry write buffer if
more than about half their instructions store to distinct words. Raise
`WB_DEPTH` for those.
