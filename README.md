# Microgrid thread management in SystemVerilog

A Microgrid is a chip with many simple in-order cores. Its parallelism does
not come from an operating system scheduling software threads. Instead, the
hardware runs *families* of small threads directly. A running thread asks for
a group of cores (a *place*), says how many threads to start and over which
index range, and the cores create those threads themselves, one per cycle. A
thread that reads a register whose value is not there yet goes to sleep. The
write that fills the register wakes it again. Creating and synchronising
thousands of threads therefore costs a handful of cycles, not tens of
thousands.

This RTL is the part of that machine that makes it work: the per-core thread
and family bookkeeping, the registers that can put a thread to sleep, the
thread scheduler, and the two on-chip control networks that carry the family
protocol between cores. The instruction pipeline, the caches, the FPUs and
the memory system are not included. Their connections to thread management
are ports of the top module, so a pipeline can be attached.

## Places: naming a group of cores with one number

The cores of a place are contiguous, and their number is a power of two
aligned to its own size (a buddy system). This lets a single number, the
*place id*, encode both the first core and the size:

```
size       = pid & -pid            (lowest set bit)
first_core = (pid & (pid - 1)) >> 1
```

So pid 12 (binary 1100) is 4 cores starting at core 4, and pid 6 is 2 cores
starting at core 2. On a 128-core chip, pid 128 is the whole chip and pid 255
is core 127 alone. Two values are special:

- pid 0 means "the core I am running on".
- pid 1 means "my default place", which the core gets on a separate input
  (`cmd_default_pid`).

`placeid_decode` does this decoding and flags ids that fall outside the chip.

## The family protocol

A parent thread drives a family through five steps. Each step is a message
kind (`mg_pkg::mkind_e`). The parent's core sends it on the **delegation
network** to the first core of the place. From there it runs down the
place's cores on the **distribution network**.

1. **Allocate** (`M_ALLOC`).
   - The first core checks for a free family context, a free thread context
     and a free block of 32 registers, then reserves them.
   - It passes `M_ALLOC_REQ` to the next core, which does the same.
   - The last core replies `M_ALLOC_ACK` backwards along the chain. Each core
     records which family slot its successor used.
   - The first core then sends `M_ALLOC_OK`, with its own slot number, to the
     parent.
   - If any core lacks resources, it sends `M_ALLOC_UNDO` backwards and the
     cores behind it free what they reserved. The mode then decides:
     - *Normal* mode: the parent receives `M_ALLOC_FAIL`.
     - *Suspend* mode: the first core keeps the request and retries until
       resources are free, for example after a release.
2. **Configure** (`M_SETSTART`, `M_SETLIMIT`, `M_SETSTEP`, `M_SETBLOCK`,
   `M_SETPC`, `M_SETDEP`). These set the index range, the window size, the
   thread program address, and whether the family is *dependent*, meaning
   each thread reads a value written by the one before. Every core of the
   place stores them. There is no reply.
3. **Create** (`M_CREATE`).
   - Every core spends 4 cycles working out its share of the index range.
     The range `[start, limit)` in steps of `step` is split into equal
     consecutive pieces, one per core; a dependent family runs wholly on the
     first core.
   - After that, a core creates one thread per cycle. It stops creating while
     `block` (the *window*) threads of the family are alive on it.
   - The first core sends `M_CREATE_ACK` to the parent when its own creation
     is finished or its window is full.
   - Example: 40 threads on 4 cores with window 5 gives each core 10
     consecutive indexes, at most 5 of them alive at once.
4. **Put / get** (`M_PUT`, `M_GET`).
   - PUT writes a family register on every core of the place. It carries the
     *globals*, which all threads read, and the first *shared* value of a
     dependent family.
   - GET reads back the last thread's shared register, which is the result
     of a dependent family. The reply is `M_GET_RSP`.
5. **Sync and release**.
   - When all of a core's threads for the family have ended and its
     predecessor has reported the same, the core passes `M_DONE` on. The
     first core does not wait for a predecessor.
   - The last core sends `M_SYNC_DONE` to the parent.
   - `M_RELEASE` then frees the family context and its registers on every
     core.

Message ordering matters: a SET or PUT must not overtake the ALLOC or CREATE
before it. Both networks therefore keep the order of messages between any
two cores.

## Inside a core (`mg_core`)

### Tables

- The **family table** (8 entries) holds each family's parent and position
  in the place, its neighbours' slots, its parameters, and its creation and
  completion state.
- The **thread table** (32 entries) holds each thread's family, index,
  program counter and register block.
- All next-state logic lives in one combinational process, and the tables
  change at the clock edge.
- One shared range unit (a divider) and one creation path serve all
  families. The lowest-numbered family that needs one in a given cycle gets
  it. A thread's index comes from a running sum (`next += step`).

### Registers and windows

Each core has 1024 integer and 1024 float registers of 64 bits
(`sync_regfile`), split into 32 blocks of 32:

- Every thread gets a block of its own (`issue.base`).
- The family has one block for globals and the first shared value
  (`issue.glob_base`).
- `issue.dep_base` names the block the thread reads its dependent values
  from: the previous thread's block in a dependent family, otherwise the
  family block.

A block is kept until its thread has ended **and**, in a dependent family,
the next thread, which reads it, has ended too. Release frees everything.

### Registers that make threads wait

Every register has a state: *empty*, *waiting* or *full*.

- Reading a full register returns the data.
- Reading an empty or waiting register returns `rd_full = 0`. The reader's
  thread number is added to a waiting list, which is stored in the register's
  own data bits while the register is not full.
- A write through either port (synchronous from the pipeline, or
  asynchronous from memory, FPU or network) makes the register full. One
  cycle later, `wake_mask` names every thread on its list.
- Starting a new thread empties its block.

### Thread life cycle (`scheduler`)

Each context moves through the states below:

```
Empty -> Ready -> (I-cache hit) Active -> Running -> Ready | Suspended | Killed
               -> (miss) Waiting -> (fill) Active
Suspended -> (wake) Ready        Killed -> (cleanup) Empty
```

- Two round-robin pickers choose the ready thread that is looked up in the
  I-cache and the active thread that is issued. Each handles one thread per
  cycle.
- Write back (`wb_*`) tells the scheduler whether the thread rescheduled,
  suspended on an empty register, or ended.
- A wake can arrive between the read and the write-back that suspends the
  thread. The scheduler remembers it (`pend_wake`), so the thread goes
  straight back to Ready.

## The two networks

- **Delegation network** (`delegation_net`). It connects every core to every
  other core.
  - Each destination has a round-robin arbiter over the sources addressing
    it, and a one-entry output register.
  - A message sent in cycle *t* is at its destination in cycle *t+1*.
  - Messages from one source to one destination keep their order.
- **Distribution network** (`distribution_net`). It is a chain linking core
  *i* to core *i+1*, one link in each direction.
  - Each link is a two-stage elastic pipeline (`dist_link`), so a hop takes 2
    cycles.
  - A request across a place of *c* cores and its answer back take
    2 × 2 × (c − 1) cycles.
  - Across all 128 cores, an allocation therefore needs at least 508 cycles
    of travel.

All channels use valid/ready handshakes. A core's outputs are one-entry
registers that take a new message only when they were empty at the start of
the cycle. This keeps every ready signal free of combinational paths through
the other cores.

## Top level (`microgrid`)

`microgrid #(.NCORES(128))` has `NCORES` cores, one delegation network and one
distribution chain. Per core, `pin[i]` (`mg_pkg::pipe_in_t`) and `pout[i]`
(`pipe_out_t`) carry the following:

| group | direction | meaning |
|---|---|---|
| `cmd_*` / `rsp_*` | in / out | concurrency instructions of a parent thread on that core, and their answers |
| `ic_*` | out / in | I-cache lookup for the thread leaving Ready; hit now, or fill later |
| `issue_*` | out / in | the next active thread: its id, PC, index and the three register bases |
| `wb_*` | in | write back: reschedule, suspend or end, with the new PC |
| `ir_*`, `fr_*` | both | the integer and float register files: read (may suspend the reader), synchronous write, asynchronous write |
| `ev_*` | out | one-cycle events: thread created or killed, window full, allocation suspended |

Clock is `clk`. Reset is synchronous and active low (`rst_n`), and it empties
every table and every register state.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NCORES` | 128 | the 128-core chip layout |
| `NREGS` | 1024 per register file | register file figure (r0 … r1023) |
| `BLK_REGS` / allocation request | 32 / 31 registers | the allocation request asks for 31; blocks of 32 are this design's choice |
| `CREATE_START_CYCLES` | 4 | family creation start-up time |
| hop latency | 2 cycles | distribution network |
| `NTHREADS` | 32 | this design's choice |
| `NFAMILIES` | 8 | this design's choice |
| `REG_W` | 64 | this design's choice |
| `CORE_W` | 8 bits (up to 256 cores) | this design's choice |

## Where this design departs from the architecture it follows

- **Register reservation.** Registers are reserved in whole blocks on the
  way *forward* during allocation, and given back by `ALLOC_UNDO`. The
  architecture reserves them on the way back.
- **Register give-back.** Registers that a family does not use after
  creation are not returned early.
- **Allocation strategies.** Only the exact strategy is built, where the
  place must have exactly the cores asked for. The architecture's default
  strategy may shrink the place, in powers of two, down to one core; that
  is not built. The "normal" and "suspend" modes above only choose between
  failing and waiting.
- **Not built.** Break (stopping a family's creation from one of its
  threads), exclusive families and the exclusive context. I/O cores are also
  not built: they are only named in the source.
- **Suspended allocations.** At most one suspended allocation waits per
  core. Any further allocation requests for that core wait behind it.
- **Message layout and table sizes.** These are this design's own choices.
- **Outside thread management.** The pipeline stages, the caches, the shared
  FPUs, the memory rings and directories, and the resource manager (a
  software service) are outside this RTL.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M`. Each one has a
watchdog. For example:

```
verilator --binary --timing --assert --top-module tb_microgrid \
  rtl/mg_pkg.sv $(ls rtl/*.sv | grep -v mg_pkg) tb/tb_microgrid.sv tb/tb_pipe_model.sv
./obj_dir/Vtb_microgrid
```

| testbench | what it shows |
|---|---|
| `tb_placeid_decode` | every place id of a small chip and random ids of a large one |
| `tb_sync_regfile` | empty/waiting/full, several waiters on one register, both write ports, block clear |
| `tb_scheduler` | every transition of the thread life cycle, including an early wake |
| `tb_delegation_net` | 1-cycle delivery, per-pair order and completeness under random back-pressure (16 cores) |
| `tb_distribution_net` | 2 cycles per hop, the round trip across 8 cores, order of a 200-message stream |
| `tb_mg_core` | one core: 4-cycle creation start, one thread per cycle, window, dependent chain, family table full and suspended allocation |
| `tb_microgrid` | the whole chip at 8 cores, described below |

`tb_microgrid` attaches a small pipeline stand-in (`tb_pipe_model`) to every
core. In that stand-in:

- Each thread reads `dep_base + 1`.
- If the register is empty, the thread suspends.
- Otherwise it writes `value + index` to its own `base + 1` and ends.
- I-cache lookups miss at random.

The testbench runs three scenarios:

1. The 40-thread, 4-core, window-5 family (pid 12). Each core must run
   exactly its ten indexes with at most five alive.
2. A dependent family, whose result is read with GET.
3. An allocation that fails, followed by one that suspends until a release.

It also counts every mechanism and fails if one never happened: delegation
and distribution traffic, allocation success, failure and suspension,
creation, window full, thread suspension, I-cache miss, sync, release, GET,
and DONE passed along the chain.

**Largest size simulated.** End to end, the largest is 8 cores. A 128-core
build of the chip-level testbench with verilator took over half an hour of
C++ compilation, so no testbench runs the top at its default size.
Synthesising the top at 128 cores with a flattening flow is also slow: one
core takes about a minute.
