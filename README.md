# Freeway: a slice-out-of-order core that keeps independent loads moving

An in-order core stops issuing as soon as the oldest instruction waits for a
cache miss. That leaves few misses overlapped (little memory-level
parallelism, MLP).

A *slice-out-of-order* core fixes part of this cheaply. The *slices* are the
loads, the stores and the instructions that compute their addresses. The core
learns which instructions belong to slices and puts them in a second in-order
queue, the **B-IQ** (bypass queue). Everything else goes to the main queue,
the **A-IQ**. Address computation and loads can then run ahead of a stalled
main flow.

That scheme has a weak spot. Some slices need the result of an older load,
for example `p = p->next; x = p->val`. Such a *dependent slice* sits at the
head of the B-IQ until its producer load returns. Every independent load
behind it waits too, even though it could already go to memory.

Freeway fixes this with three small additions:

- **Tracking.** One extra bit per physical register says "this value comes
  from a load, or from something computed from a load". An instruction that
  reads such a register is part of a dependent slice and passes the bit on to
  its destination.
- **A third queue.** Dependent slices go to a new in-order queue, the **Y-IQ**
  (yielding queue). There they wait without blocking anyone. The B-IQ now
  holds only independent slices.
- **Store ordering with sequence numbers.** Loads from the B-IQ may now pass
  store-address computations still waiting in the Y-IQ. So every store gets a
  store-buffer entry at dispatch, tagged with a 7-bit program-order number. A
  load may go to memory only if every *older* store already has its address
  and none of them has the load's address.

All three queues are plain FIFOs: there is no search inside a queue. The
issue logic takes up to two instructions per cycle, oldest first, from the
queue heads; an ALU instruction right behind a head may go together with that
head. The machine stays
close to an in-order core in cost, but independent misses overlap even when
slices depend on each other.

This repository holds synthesizable SystemVerilog for that core:

- a two-wide front end (decode, rename, dispatch);
- the slice tables;
- the three queues and the issue logic;
- ALUs, a store buffer and an in-order commit window;
- self-checking testbenches for every block and for the whole core.

## Pipeline

```
 fe_* (2 instr/cycle)
   │
   D   decode x2, IST lookup with each PC ──────────────┐ (slice membership)
   │                                                     │
   R   rename x2 ─ RDT read (producer PC, dep. bit) ─ steer each instr ─┬─> A-IQ (64)
   │      │             │                                               ├─> B-IQ (32)
   │      │             └─ IBDA: producer PCs into the IST              └─> Y-IQ (32)
   │      └─ scoreboard entry (seq. number), store-buffer entry for a store
   │
   I/X scheduler: up to 2 from the queue fronts, oldest first, ≤ 1 load
   │      ALU ops, store address, store data finish in this cycle
   │      loads: store-buffer check, then request to the data cache
   │
   C   the two oldest finished instructions commit in order;
       a store writes the cache only here
```

- **D (decode).** The latch holds a pair of instructions. Slot 0 is the older
  one. Each instruction is decoded, and its PC is looked up in the *Instruction
  Slice Table* (IST) to learn whether it belongs to a slice.
- **R (rename/dispatch).** This one cycle does all of the following:
  - renames both instructions;
  - reads the *Register Dependence Table* (RDT) for their sources;
  - decides the queue of each instruction;
  - updates the RDT for their destinations;
  - inserts producer PCs into the IST;
  - allocates the scoreboard entries and any store-buffer entries;
  - pushes the micro-ops into the queues.
- **Dispatch rule.** Dispatch is in order. Slot 1 goes only together with
  slot 0, and only if the resources for both are free (window, physical
  registers, queue entries, store-buffer entries). If only slot 0 goes, slot 1
  moves down and goes alone in the next cycle. The front end is held until the
  latch is empty.
- **I/X (issue/execute).** Operand readiness uses one ready bit per physical
  register. This is stall-on-use: a head issues only when its sources are
  ready.
- **C (commit).** The scoreboard holds the 64 in-flight instructions in
  program order. Instructions record completion out of order. The two oldest
  are offered for commit when complete.

## Finding slices: IST, RDT and IBDA

Slices are learned over loop iterations by *iterative backward dependency
analysis* (IBDA). The RDT holds, for each physical register:

- the PC of the in-flight instruction that last wrote it;
- a producer-valid bit, cleared when that instruction commits;
- the slice dependence bit.

Whenever a load or store is dispatched, the RDT entry of its address register
gives the producer's PC. If that producer is still in flight, its PC is
written into the IST. The next time that PC is decoded it hits in the IST, so
it is a slice instruction too. Its own producers are then inserted, and so on
backwards, one level per iteration.

An instruction whose sources are all already committed has no producer in
flight, so the walk stops there. The IST is direct-mapped and tagged,
indexed by `PC[8:2]` (128 entries). Insertions land at the next clock edge.

`rtl/slice_steer.sv` holds the whole dispatch decision in one small function
block:

| instruction | goes to |
|---|---|
| not a slice instruction (not a load or store, IST miss) | A-IQ |
| slice instruction, no source with the dependence bit set | B-IQ |
| slice instruction, some source with the dependence bit set | Y-IQ |
| store | data part to A-IQ; address part to B-IQ, or to Y-IQ if the address register's bit is set |

The dependence bit written for the destination is `is_load OR (some source
bit set)`. A load's result is the start of a dependent chain, and the bit
propagates through every instruction that uses it. This applies whether or
not the reader is a slice instruction.

Within a dispatch pair, slot 1 sees slot 0's new mapping and new RDT entry
(PC, dependence bit, producer valid), exactly as if the two had been
dispatched one after the other.

## Memory ordering: the store buffer

A store is split in two micro-ops. The **address part** (`U_STA`) runs in the
B- or Y-IQ and writes the address into the store's entry. The **data part**
(`U_STD`) runs in the A-IQ and writes the data.

Each store gets its entry at dispatch. The entry is tagged with the store's
sequence number: the scoreboard slot plus a wrap bit, 7 bits for a 64-entry
window. Age is measured from the oldest in-flight instruction:
`age = seq - head_seq (mod 128)`.

The B-IQ head and the Y-IQ head each have a check port. A load at either head
is ready only if every valid entry with a smaller age than the load:

- already has its address (otherwise `ck_unres`), and
- does not have the same address (otherwise `ck_alias`).

Younger stores are ignored, even at the same address. Stores write memory
only when they commit as the oldest instruction, so a younger store cannot
have written yet. There is no store-to-load forwarding: a load that aliases
an older store waits until that store has drained to the cache.

Stores leave the buffer in order at commit, one per cycle.

## The issue logic

The scheduler sees six candidates: the head of each queue and the entry just
behind it. A head is ready when:

- its source registers are ready;
- for a load, the store-buffer check passes and the cache can take a request.

The entry behind a head is a candidate only if it is an ALU instruction whose
sources are ready, and only in a cycle where its own head is also issued, so
each queue still issues in order. It cannot depend on that head, because the
head's result is not ready yet.

Ready candidates are granted oldest first (by age from the scoreboard head).
Up to two are granted per cycle, in any combination of queues, with at most
one load. Slot 0 carries the older of the two.

Execution by micro-op type:

- **ALU results** are written at the end of the issue cycle. A dependent
  instruction can issue in the next cycle.
- **Loads** send `{address, tag = sequence number}` to the cache. They finish
  whenever the data comes back, in any order. The returned tag selects the
  destination register.

## Instruction set and encoding

The microarchitecture does not depend on an instruction set. A minimal one is
used so the core can run real programs:

```
[31:28] opcode  [27:24] rd  [23:20] rs1  [19:16] rs2  [15:0] imm (signed)
0 NOP   1 ADD rd=rs1+rs2   2 SUB rd=rs1-rs2   3 ADDI rd=rs1+imm
4 LD rd=M[rs1+imm]         5 ST M[rs1+imm]=rs2
```

There are 16 architectural registers and 80 physical registers. Registers
start at zero after reset. Memory is word addressed. Control flow is the
front end's business: the core receives an already-resolved stream of
`(PC, word)` pairs, so there are no branches and no recovery.

## Interfaces and timing of `freeway_core`

| port | dir | meaning |
|---|---|---|
| `fe_valid[2]`, `fe_pc[2]`, `fe_instr[2]`, `fe_ready` | in/out | instruction pairs; slot 0 older, valid bits a prefix; a pair is taken in a cycle with `fe_ready` high |
| `ld_req_valid/ready/addr/tag` | out/in/out/out | load request; accepted when valid and ready are both high |
| `ld_resp_valid/tag/data` | in | load data; any order, no back-pressure, at most one per cycle |
| `st_valid/ready/addr/data` | out/in/out/out | committed store; accepted when valid and ready are both high |
| `cm_valid[2]/cm_pc/cm_wr/cm_rd/cm_data` | out | commit trace, up to two per cycle, slot 0 older |
| `idle` | out | window and decode latch empty |
| `ev` | out | per-cycle event flags (`freeway_pkg::ev_t`) for performance counters |

All state uses a synchronous active-low reset, `rst_n`. Latencies:

- An instruction accepted at edge *t* is in D during the following cycle, and
  can dispatch then.
- A dispatched micro-op can reach a queue head and issue from the next cycle.
- An ALU result can be used by an instruction issuing in the next cycle.
- A load result can be used one cycle after the response.
- Commit of a finished instruction is seen one cycle after completion.

## Parameters

| parameter | default | notes |
|---|---|---|
| `AIQ_DEPTH`, `BIQ_DEPTH`, `YIQ_DEPTH` | 64, 32, 32 | queue sizes of the evaluated configuration; any depth ≥ 2 |
| `freeway_pkg::WINDOW` / `SEQ_W` | 64 / 7 | scoreboard size and sequence-number width (slot + wrap bit) |
| `ISSUE_W` | 2 | issue width |
| `freeway_pkg::DW` | 2 | decode / rename / dispatch / commit width (the pair logic is written for 2) |
| `IST_ENTRIES` | 128 | own choice |
| `SB_ENTRIES` (`SB_MAX`) | 16 | store-buffer entries; own choice |
| `freeway_pkg::NUM_PREGS` | 80 | 16 architectural + 64 in flight; own choice |

## Where this RTL departs from the published design

- **Instruction set.** The ISA is this design's own. The published evaluation
  ran x86 programs in a simulator.
- **Outside the core.** Fetch, instruction cache, branch prediction, the data
  caches, the last-level cache and its prefetcher, DRAM, and the vector and
  branch units are not designed here. The core exposes their interfaces
  instead. The testbench supplies a behavioural data memory: 4-cycle hits,
  30-cycle misses, up to 8 loads in flight.
- **Pipeline stages.** Decode and IST lookup share one stage. Rename, RDT,
  steering and dispatch share a second. Issue and execute share a third. The
  published pipeline draws them as separate stages.
- **Issue.** Two instructions may issue from one queue only if the second is
  an ALU instruction; a load or store part behind a head waits a cycle. The
  published design does not limit this. The scheduler looks only at the
  first two entries of each queue, and the width is fixed at two. The
  published window-scaling study up to 8-wide is not reproduced.
- **Dispatch and commit.** Dispatch is all in order, and a pair is refilled
  only once both slots have gone. Commit allows two per cycle but only one
  store, since there is one cache write port. These details are not
  published.
- **Store buffer.** There is no store-to-load forwarding, as published. The
  address compare is an exact full-word match. The published design only says
  loads stop on "aliasing" stores.
- **Sizes.** IST, store buffer, physical register file and register-file port
  counts are not published; the values above are this design's.
- **No recovery.** There are no branch mispredictions or exceptions, so no
  squash or recovery paths.

## Files

- `rtl/freeway_pkg.sv` holds the shared types: decoded instruction, micro-op,
  event flags and sizes. The remaining files in `rtl/` are one module each:
  - `decoder`, `alu`
  - `ist`, `rdt`, `rename`, `slice_steer`
  - `iq_fifo` (used for all three queues), `scheduler`, `regfile`
  - `store_buffer`, `scoreboard`
  - `freeway_core` (top)
- `tb/tb_<module>.sv` is a self-checking testbench for each module. Each
  compares against a reference model written independently in the testbench
  and prints `TB_RESULT checks=N failures=M`.
- `tb/dmem_model.sv` is the behavioural data memory.
- `tb/tb_freeway_core.sv` runs the core at its default sizes. A loop body of
  18 instructions runs 300 times (5400 instructions, two per cycle from the
  front end). The body contains:
  - independent slices;
  - a load → add → load dependent chain;
  - stores with independent and dependent addresses;
  - a load that aliases an older store;
  - a load behind a store whose address is still unknown.

  An in-order reference interpreter checks every commit (PC, register, value)
  and the final memory image. The testbench counts each mechanism and fails if
  any of them never occurs:
  - issue from each queue;
  - dual issue, including two from the same queue;
  - B-IQ issuing past a stalled Y-IQ head;
  - dependent and independent slice dispatch;
  - IBDA insertions and IST hits;
  - loads held by an unresolved or an aliasing older store;
  - dispatch stalls;
  - several loads in flight;
  - two-wide dispatch and commit.

  A typical run takes about 9,500 cycles (IPC ≈ 0.56, with a miss every 8th
  load).

- `tb/tb_freeway_sweep.sv` runs the same program (through the helper
  `tb/tb_core_run.sv`, one instance per configuration) in the configurations
  of two sensitivity studies:
  - queue sizes 64/32/32, 16/8/8 and 10/5/5;
  - data-memory hit latencies of 2, 4, 6 and 8 cycles.

  Every run must be correct. A longer latency must never finish sooner.
  Measured cycles:

  | hit latency | 2 | 4 | 6 | 8 |
  |---|---|---|---|---|
  | cycles | 9216 | 9533 | 10149 | 10715 |

  On this loop the queue size makes no difference: 9533 cycles at every
  size. The loop never fills even a 5-entry queue, because the 64-entry
  window and the misses limit it first.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/freeway_pkg.sv \
  rtl/decoder.sv rtl/alu.sv rtl/ist.sv rtl/rdt.sv rtl/rename.sv rtl/slice_steer.sv \
  rtl/iq_fifo.sv rtl/scheduler.sv rtl/regfile.sv rtl/store_buffer.sv rtl/scoreboard.sv \
  rtl/freeway_core.sv tb/dmem_model.sv tb/tb_freeway_core.sv \
  --top-module tb_freeway_core -o sim && ./obj_dir/sim
```

A unit testbench needs only the package, its module and the testbench, for
example:

```
verilator --binary --assert rtl/freeway_pkg.sv rtl/store_buffer.sv tb/tb_store_buffer.sv --top-module tb_store_buffer
```

The simulation is two-state, so every register that is read is reset or
initialised. The testbenches use `$urandom`. Concurrent assertions in the RTL
guard the handshake rules:

- no queue overflow or underflow;
- no allocation beyond free entries;
- commit acknowledgements only for offered entries;
- dispatch slots always a prefix.
