# A virtual-threaded processor in SystemVerilog

This processor keeps threads in hardware, not in an operating system. Each
thread is a small record, its *root*, held by a thread monitor. The hardware
schedules threads by priority, a few instructions at a time, and runs them on
an executive cluster. The cluster allocates registers to a thread only as its
code touches them.

Threads synchronise through semaphores that live in the memory unit. The
semaphore hardware queues waiting threads by priority and times them out with
hardware counters. An interrupt is not a handler call: it arrives as the
completion of a semaphore wait in an ordinary thread. Memory is reached
through *access controlled virtual addresses* (ACVA). An ACVA names either the
thread's own process space or another process's space, and the memory unit
checks every reference against grants held in hardware.

The RTL builds one complete processor of this kind:

- a thread monitor;
- one domain executive cluster;
- the memory and IO management unit (MIOMU), with its validation,
  translation, semaphore, interruption, block-copy, routing and RAM units;
- a priority-aware packet router joining them.

The design is synthesizable SystemVerilog-2017. It is checked with Verilator
(lint and simulation) and with the slang front end of Yosys.

## How a thread runs

```
          create / bootstrap                         fetch (local RAM)
                 |                                        ^
        +--------v---------+  transaction req   +---------+--------+
        |  thread monitor  |------------------->|                  |
        |  roots, scheduler|<-------------------|                  |
        |  pool, dispatch  |  transaction rsp   |  multichannel    |
        +------------------+                    |     router       |
        +------------------+  txn req / mem rsp |  (4 ports,       |
        | executive cluster|<------------------>|  highest prio    |
        | map, sched, FEU, |  txn rsp / mem req |  first)          |
        | LSU, reg blocks  |                    |                  |
        +------------------+                    |                  |
        +------------------+  mem req / rsp     |                  |
        |      MIOMU       |<------------------>|                  |
        +------------------+                    +---------+--------+
                                                          |
                                               debugging-monitor port (dbg_*)
```

1. **Root.** A thread is a root in the thread monitor. The root holds the TID,
   priority, status (non-privileged, privileged or hyper-privileged),
   instruction counter and last completion code. Reset creates a bootstrap
   thread: TID 0, hyper-privileged, highest priority, starting at `BOOT_PC`.
   Further threads enter through the `create_*` port.
2. **Forming a transaction.** The monitor's scheduler picks the
   highest-priority root waiting for scheduling, rotating among equal
   priorities. It fetches four instruction words at the instruction counter.
   It keeps the instructions up to and including the first branch, jump or
   halt. This group, together with its *information dependency graph*, is a
   transaction. `graph[i][j]` is set when instruction i must wait for an
   earlier instruction j, which happens when:
   - i reads a register that j writes;
   - i writes a register that j reads or writes;
   - both i and j are memory or semaphore operations, which keeps them in
     order;
   - i is the closing control instruction.
3. **Dispatch.** Formed transactions wait in a prioritized buffer pool: one
   FIFO per priority level, served highest level first. The dispatching unit
   sends the head to the cluster as a packet that carries the thread's
   priority. The root now waits for the result.
4. **Reply.** The cluster answers with the next instruction counter, a
   completion code, a halt flag and the last value written. The root goes back
   to scheduling at the new counter, or is freed if the thread halted.

Only one transaction per thread is in flight, so transactions of one thread
never overlap. Transactions of different threads do overlap, in the cluster
and in the MIOMU.

## The executive cluster and its register blocks

The cluster has up to `NSLOT` waiting transactions. Each slot holds the
instructions, the graph, and `issued` and `done` marks per instruction.

**Fine-grain register file.** The 16 architectural registers of a thread are
split into 4 blocks of 4 registers. Physical storage is `NPBLK` blocks (16 by
default), shared by all threads. The mapping table records which physical
block holds (TID, architectural block).
- A block a thread has never touched has no storage at all.
- A freshly allocated block reads as zero.
- A thread's blocks stay mapped across its transactions and are released when
  the thread halts.
- A thread that only uses r0–r3 therefore costs one block.

**Mapping unit.** It works on one transaction at a time. First it works out
which architectural blocks the transaction touches, and how many of them are
not mapped yet.
- If fewer blocks are free than it needs, the transaction is *parked*: this is
  a map stall, visible on `map_stall`. The slot is retried after some thread
  halts and releases blocks.
- Otherwise one block is looked up or allocated per clock.

Allocation is all-or-nothing on purpose. A transaction that held part of what
it needed could starve the very thread it waits for. For example, a consumer
spinning on a semaphore must let the producer map its registers.

**Scheduler.** Each clock it moves one ready instruction into the pipeline's
prioritized pool. An instruction is ready when it is mapped, not yet issued,
and all its predecessors in the graph are done. The scheduler takes it from
the highest-priority slot that has one.

**Pipeline.** The pool head goes to one of two units:
- **FEU** (functional unit): add, sub, and, or, xor, add-immediate,
  branch-if-non-zero, jump and halt, executed in the clock the instruction
  leaves the pool.
- **LSU** (load-store unit): loads, stores and semaphore operations. It sends
  a reference packet to the MIOMU tagged {port, slot, instruction} and does
  not wait. A semaphore wait may stay outstanding for thousands of clocks
  while other slots keep executing. The reply writes the destination register
  and marks the instruction done.

**Local jumps.** A taken branch or jump whose target lies inside the
transaction's own instruction block does not end the transaction. The jump is
always the transaction's last instruction, so everything before it has
finished. The cluster clears the issued and done marks of the instructions
from the target on, and the scheduler runs them again with the same register
mapping. A short counted loop thus stays in the cluster and sends nothing over
the network. The `local_jump` output pulses each time this happens.

When every instruction of a slot is done, the reply goes back to the thread
monitor. A halt also releases the thread's register blocks.

Not built: forcing a lower-priority instruction back out of the pipeline
queue, and spilling register blocks or waiting instructions to memory. The
pipeline's pool has a separate FIFO for each priority level, so a
higher-priority instruction never waits behind lower-priority ones that are
already queued. Forcing out would matter only if the levels shared their
storage.

## Access controlled virtual addresses

An ACVA is 32 bits:

| bit 31 (VAShr) | bits 30:23 | bits 22:0 | meaning |
|---|---|---|---|
| 0 | LVA[30:23] | LVA[22:0] | own process space, LVA = bits 30:0 |
| 1 | OPID | LVA | space of process OPID |

Each reference is checked in one clock, in two steps.

- **Access validation unit.** Every shared reference (VAShr = 1) must match a
  record (OPID, GntPID, OrVA, L, GntMode) of the access control directory. A
  record matches when:
  - the owner is OPID;
  - the grantee is the referencing thread's process;
  - the referenced bytes lie inside [OrVA, OrVA+L);
  - the requested mode (read, write, semaphore, execute) is within GntMode.

  Local references and hyper-privileged threads are not checked.
- **Translation unit.** It searches the all-context translation directory for
  a record (PID, VA, Len, PhA, RWSX) that covers the address. It returns
  PhA + offset, or completion code FAULT when no record covers it, or DENIED
  when the mode is outside RWSX or validation refused the reference.
  Hyper-privileged threads use the low 24 bits as a physical address.

Both directories are loaded through the `acd_wr_*` and `atd_wr_*` ports. In a
full system the operating system would own these tables.

## Hardware-driven semaphores

The synchronization unit (`hwds_sync_unit`) holds `NSEM` semaphore cells in
the physical region 0xC00000 and up. A thread reaches a cell with a semaphore
instruction (`OP_SEM`) whose register operand is the cell's ACVA. The ACVA is
translated like any other address and must have the `s` mode.

| operation | effect |
|---|---|
| Get | allocate a free cell; returns its ACVA (`SEM_VA + 4*index`) or EMPTY |
| Free | release a cell with no waiters |
| Lock | enter the critical interval, or queue in the mutex queue |
| Unlock | leave; the mutex-queue head enters |
| Wait | leave the interval and queue in the event queue |
| Pass | leave and admit the event-queue head, else the mutex-queue head |

The details that matter most:

- **Ordering.** Both queues are ordered by priority, then arrival. A
  high-priority thread is never stuck behind a low-priority one, so this
  mechanism cannot cause priority inversion.
- **Timeouts.** Lock and Wait take a timeout in ticks, where a tick is
  `TICK_DIV` clocks and 0 means forever. The cell's counter runs while
  someone waits with a timeout.
  - At zero, Lock waiters complete with TIMEOUT and are dropped.
  - At zero, Wait waiters move to the mutex queue, or enter directly if the
    interval is free. When they get back into the interval they complete with
    TIMEOUT.

  So, like a condition variable, a timed-out Wait still returns inside the
  critical interval. The producer/consumer loop relies on this: it tests the
  result against 1, the TIMEOUT code.
- **Completion.** Replies are asynchronous: a Lock may complete long after it
  was issued.
- **FAULT.** Misuse completes with FAULT. This covers an Unlock by a
  non-owner, a full queue, an operation on an unallocated cell, and a Free
  with waiters.

## Interrupts as semaphores

The interruption unit has an *interruption control block* per line. A block
holds a semaphore index, a TID, a priority and a one-bit counter. It is
programmed at ICU_BASE + 32·line + 4·field, with fields 0 semaphore, 1 TID,
2 priority, 3 counter and 4 status. Writing the counter activates the block.

A rising edge on `irq[line]` starts the supplier side of a producer/consumer
protocol, issued on behalf of the line's *dual thread*:

- Lock the semaphore, then test the counter.
- If the counter is 0: set it to 1 (the interrupt is delivered) and Pass,
  which wakes the dual thread sleeping in Wait.
- If the counter is 1: the previous interrupt has not been consumed yet.
  Wait, and test again when passed back.

The dual thread consumes the event, writes 0 to the counter (pulsing
`irq_ack` to the device) and Passes. No code ever runs in "interrupt context".

## The MIOMU as a whole

The MIOMU takes one reference at a time from the network and sends it through
validation and translation.

- **Refused.** A refused reference is answered at once.
- **Semaphores.** Semaphore operations go to the synchronization unit, and
  their replies return whenever that unit produces them. The interruption unit
  shares the unit's request port with priority, and replies tagged with the
  MIOMU's own port go back to it.
- **Loads and stores** go through the routing unit by physical address:

| physical address | target |
|---|---|
| 0 .. 4·RAM_WORDS−1 | local RAM (through the RAM access arbiter) |
| 0x800000 .. 0x800FFF | interruption control blocks |
| 0x801000 .. 0x801FFF | block processing unit registers |
| 0xC00000 .. | semaphore cells (semaphore operations only) |
| anything else | external DRAM-IO port `ext_*` |

The **block processing unit** copies a block of words inside the local RAM.
Its registers are 0 source, 1 destination, 2 length in words, and 3 control
(a write starts the copy). It pulses `bpu_done` when it finishes.

The **RAM access arbiter** shares the single-port RAM round-robin among three
requesters: the routing unit, the block processing unit and the instruction
fetch of the thread monitor.

## Network and packets

All units talk through `multichannel_router`. It has four ports:

| port | unit |
|---|---|
| 0 | thread monitor |
| 1 | executive cluster |
| 2 | MIOMU |
| 3 | debugging monitor (`dbg_*`) |

Each output serves the highest-priority input first, round-robin among equal
priorities, and holds one output register.

A packet (`net_pkt_t`, 209 bits) has a kind, source, destination, priority and
a body. The body is one of four structs:
- transaction request;
- transaction reply;
- memory/semaphore request, with a tag, TID, priority, status, ACVA, mode,
  semaphore op, write data and timeout;
- memory reply.

Debug-port requests are memory requests whose reply is tagged back to port 3.
They let a host read and write memory, program the ICBs and start block
copies.

## Instruction format

`{op[31:28], rd[27:24], rs1[23:20], rs2[19:16], imm[15:0]}`, with 16 registers.

| op | meaning |
|---|---|
| ADD/SUB/AND/OR/XOR | rd = rs1 op rs2 |
| ADDI | rd = rs1 + sext(imm) |
| LD | rd = mem[rs1 + sext(imm)] |
| ST | mem[rs1 + sext(imm)] = rs2 |
| SEM | semaphore op imm[2:0] on ACVA rs1, timeout rs2. Get writes the new ACVA to rd; the other ops write their completion code |
| BNZ | if rs1 != 0 go to imm |
| JMP | go to imm |
| HALT | end the thread |

Completion codes: 0 OK, 1 TIMEOUT, 2 EMPTY, 3 DENIED, 4 FAULT. A failed load
or store reports its code in the transaction reply.

## Where this departs from the architecture

The architecture gives the partition into units and what each unit does. It
leaves out widths, sizes, encodings and most of the internal algorithms, so
every number in `vthm_pkg` and every default parameter is this design's own
choice:
- 8 thread roots;
- 4 cluster slots;
- 16 register blocks;
- 8 semaphores with queues of 4;
- directories of 16 records;
- 64 KiB of local RAM.

Also this design's own:
- **Instruction set.** The architecture deliberately does not fix one.
- **Transactions.** Four words long, closed by the first control instruction.
  A control instruction is therefore always the last one in its
  transaction. A taken jump back into the transaction's own block is a
  local jump: the cluster re-arms the instructions from the target on and
  the loop runs there, without a round trip through the thread monitor.
- **Register blocks.** Released when the thread halts, not after every
  transaction, so registers survive between transactions.
- **Scale.** One thread monitor and one executive cluster stand in for the
  pools of each.
- **Thread creation.** Roots come from a port, without a process-descriptor
  lookup.
- **Interrupt control blocks.** Each line has one fixed block instead of
  blocks allocated and released by instructions. A block holds the
  semaphore's cell index rather than its ACVA, so the unit does not go through
  address translation.

Not built:
- the swapper, the L0 and local caches, and spilling of roots, instructions
  and register blocks to memory;
- forcing out lower-priority instructions;
- block transfers to IO devices;
- the debugging monitor, JTAG, the DRAM-IO and multiprocessor interfaces. The
  ones that connect to the processor appear as ports.

## Files and simulation

`rtl/vthm_pkg.sv` holds every shared type. Each other file in `rtl/` is one
module: the units named above, `prio_queue_pool` (the per-priority FIFO set
used by both monitor and cluster), `local_ram` and the top `vthm_processor`.
Each file begins with a description of its interface and timing.

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. Run one with, for example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/vthm_pkg.sv \
    tb/tb_hwds_sync_unit.sv --top tb_hwds_sync_unit -Mdir obj -o sim && obj/sim
```

There are two whole-processor tests:

- `tb/tb_vthm_processor.sv` runs with only four register blocks, so that the
  mapping unit has to stall.
- `tb/tb_vthm_full.sv` runs the same scenario with every parameter at its
  default.

The scenario:

1. The bootstrap thread allocates two semaphores.
2. Over the debug port, the host programs an ICB and raises an interrupt. It
   also runs a block copy and reads external memory.
3. A consumer thread waits with a timeout until a producer thread locks,
   writes and passes.
4. The producer then makes a shared reference it was never granted, and is
   refused.
5. Register-hungry threads compete for blocks, then each runs a short
   counted loop that stays inside its transaction through local jumps.

Both tests count every mechanism and fail any that never happened: semaphore
get, lock, unlock, wait, pass and timeout; interrupt delivery; local jumps; block copy;
external access; refusal; priority contention; and, in the reduced test, a map
stall. Each runs in well under a second.
