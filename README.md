# A NeuISA front end: one NPU core shared by several virtual NPUs

A cloud NPU core is a handful of large compute units: matrix engines (MEs,
128×128 systolic arrays) and vector engines (VEs). Most inference workloads
leave some of them idle. Traditional VLIW code makes that hard to fix. Each
instruction word names specific MEs and VEs at compile time, so a second
tenant cannot use an ME the first tenant is not using.

This RTL implements the alternative: a core front end that runs *virtual
NPUs* (vNPUs) side by side. A vNPU is a slice of the core: a number of MEs,
a number of VEs, memory segments and a priority. Programs are written in
**NeuISA**. In NeuISA an operator is cut into independent *micro tensor
operators* (uTOps), so the hardware, not the compiler, decides at run time
how many MEs a vNPU uses. Because of that, a vNPU can borrow ("harvest") MEs
and VEs that a co-located vNPU leaves idle. The owner gets them back by
preemption as soon as it needs them.

The core here is the evaluated configuration: 4 MEs, 4 VEs and up to 4
resident vNPU contexts. The MEs, VEs, SRAM, HBM and DMA engine are outside
this RTL. Their interfaces are ports of the top module `neuisa_core`.

## The program model the hardware runs

**uTOps.** A uTOp is a short VLIW instruction stream with its own PC and its
own 8 scalar registers (`r0` reads as zero). There are two kinds:

* An *ME uTOp* drives exactly one ME. It runs in one of the 4 ME instruction
  queues, and that queue is bound to one ME.
* A *VE uTOp* uses VEs only. It runs in one of the 4 VE instruction queues.

Both kinds may also issue VE operations. A VE operation is not bound to a
VE: the operation scheduler decides each cycle which VE runs it.

**Instruction word** (`neu_pkg::instr_t`, 136 bits, MSB first):

| field | bits | contents |
|---|---|---|
| misc slot | 32 | opcode (5), rd (3), rs (3), unused (5), imm (16) |
| VE slot 3..0 | 4 × 24 | opcode (4), vd (5), arg (15): vector address or operand fields |
| ME slot | 8 | opcode (3: nop / push / pop), vector register (5) |

The misc slot carries the uTOp control instructions. It also carries the few
scalar operations that loops need:

| op | meaning |
|---|---|
| `finish` | end of this uTOp |
| `nextGroup rs` | run group `rs` after the current group |
| `group rd`, `index rd` | read the current group index or uTOp index |
| `li`, `addi` | scalar immediate and add |
| `beq`, `bne`, `blt` | PC-relative branch: `pc ← pc + imm` if `rd ? rs` |
| `sld`, `sst` | read or write a per-vNPU scalar word |

**Groups and the execution table.** The uTOps of an operator form a *group*.
The uTOps of a group are independent and may run in any order, all at once
or one after another. A vNPU's *execution table* has one row per group. A
row holds 4 ME-uTOp start PCs and one VE-uTOp start PC, each valid or null.

* A launched vNPU starts at row 0.
* When every uTOp of a group has finished, the vNPU moves to the next row.
  If a uTOp executed `nextGroup`, it moves to that row instead. This gives
  loops across groups, with the loop counter kept in a scalar word.
* If two uTOps of one group name different targets, that is an exception:
  the vNPU stops in state ERROR.
* A row with no valid entry ends the program: state DONE and an interrupt.
* The table memory is not reset, so a program must end with a null row.

## Placing uTOps on MEs

`utop_scheduler` keeps, for every vNPU, the state of each uTOp of its current
group: null, pending, running or done, plus its PC and saved registers. It
makes at most one ME placement, one VE placement and one preemption per
cycle. The core has one scheduling mode for all vNPUs, set in a register.

### Spatial-isolated mode

Each vNPU is entitled to its allocated number of MEs.

1. **Entitlement.** A vNPU is *entitled* when it has a pending ME uTOp and
   runs fewer ME uTOps than its allocation. Entitled vNPUs are served first,
   round-robin, and get any free ME queue.
2. **Reclaim.** If an entitled vNPU finds no free queue, some other vNPU must
   be running more ME uTOps than its allocation. One of those harvesting
   uTOps is preempted (`reclaim_evt`). The freed queue goes to the entitled
   vNPU on a later cycle.
3. **Harvesting.** When no vNPU is entitled, a free ME queue goes to any
   vNPU with a pending ME uTOp, even beyond its allocation (`harvest_evt`).
   The paper's example is two vNPUs with 2 MEs each: when one has a single
   ME uTOp ready, the other runs three.
4. **VE uTOps always run** as soon as a VE queue is free, because they hold
   no ME.

A vNPU with enough work therefore always has its full allocation within one
preemption time. Idle MEs never stay idle while another vNPU has work.

### Temporal-sharing mode

This mode is for an oversubscribed core. Allocations are ignored. Every vNPU
has an active-cycle counter, which counts cycles in which any queue runs or
saves one of its uTOps, and a priority from 1 to 15.

* A free ME queue goes to the waiting vNPU with the smallest
  `active / priority`.
* If no queue is free, a waiting vNPU `u` preempts the uTOp of a running
  vNPU `w` once `(act_u + TS_SLICE) · prio_w < act_w · prio_u`
  (`ts_preempt_evt`). In words: `w` has run more than `TS_SLICE` cycles
  beyond its weighted share. `TS_SLICE` defaults to 1024.

### Preemption and resume

Preemption uses the same mechanism in both modes.

1. The scheduler raises `preempt_req` on one ME queue. Only one preemption
   is in flight at a time.
2. The queue first lets the instruction at its head finish issuing if it is
   partly issued, so no operation is lost or repeated.
3. It then stops fetching, drops its prefetched instructions and holds
   `me_ctx_save` high for `PREEMPT_LAT` = 256 cycles. This is the time to
   drain the ME's 128 rows of partial sums and 128 rows of weights to SRAM.
4. It reports the PC of the first instruction not yet executed and its
   scalar registers.
5. The uTOp goes back to pending with that state. It may resume in any ME
   queue later.

## Issuing operations

### Instruction queues (`inst_queue`)

Each queue fetches one instruction per cycle from the instruction memory,
which has one registered read port per queue, into a 4-entry FIFO.

The head instruction offers all its operations at once:

* The ME operation goes straight to the queue's ME (`me_valid`/`me_ready`).
  The ME model in the testbench takes one push or pop every 8 cycles.
* Each VE operation raises a request to the operation scheduler.

An instruction may issue over several cycles; the queue remembers which
slots have already gone out. It retires in the cycle its last operation
issues, and its misc slot executes at that moment. A taken branch flushes
the FIFO, so it costs the fetch latency again (2 cycles). `finish` frees the
queue in the same cycle.

### VE operation scheduling (`op_scheduler`)

Each cycle the scheduler does two steps:

1. **VEs per vNPU.** Every vNPU first receives `min(ready, allocated)` VEs.
   VEs left over are handed out to vNPUs with more ready operations than
   that, round-robin from a pointer that advances every cycle. This is VE
   harvesting (`ve_harvest_evt`).
2. **Operations within a vNPU.** Operations from ME uTOps go before those of
   VE uTOps. An ME is held until its uTOp finishes, so this frees MEs
   sooner.

Granted operations are packed onto VE ports 0, 1, 2, and so on. The whole
decision is combinational, within the cycle.

### Dispatch and memory isolation

`ve_dispatch` moves each granted operation to its VE port. For VE loads and
stores it replaces the vNPU's virtual SRAM address with a physical one.

Both memories are cut into fixed segments: 2 MB of SRAM (512 vectors of
4 KB) and 1 GB of HBM. `seg_xlate` holds a 64-entry table per vNPU per
memory and translates `{vseg, offset}` to `{pseg, offset}`.

* An access through an invalid entry is a page fault. The operation is
  dropped, `fault_evt` flags the vNPU and the vNPU stops in ERROR.
* The HBM table is exposed as a lookup port (`dma_*`) for the DMA engine.

## Host interface

Everything is programmed through a 32-bit register port with a 16-bit
address:

| address | contents |
|---|---|
| `0x0000 + v·0x100 + r` | context v: 0 CTRL (bit0 launch, bit1 clear interrupt/flags), 1 ME allocation, 2 VE allocation, 3 priority, 4 STATUS (`[2:0]` state, `[4]` interrupt, `[5]` page fault, `[6]` error), 5 active cycles (write clears) |
| `0x0F00` | mode: 0 spatial-isolated, 1 temporal-sharing |
| `0x1000 + {v, group, entry}` | execution table entry, data `{valid, pc[7:0]}`; entry 4 is the VE uTOp |
| `0x2000 + {v, vseg}` | SRAM segment table, data `{valid, pseg[5:0]}` |
| `0x3000 + {v, vseg}` | HBM segment table, same layout |
| `0x4000 + {v, word}` | scalar words (16 per vNPU) |
| `0x8000 + {v, pc, word}` | instruction memory, 5 words per instruction |

Notes:

* Register reads are combinational.
* The instruction memory and the execution table are write-only.
* `irq[v]` stays high from the end of vNPU v's program until it is cleared.

## Sizes

| quantity | value here | origin |
|---|---|---|
| MEs, VEs per core | 4, 4 | the evaluated core |
| ME-uTOp / VE-uTOp queues | 4, 4 | one per ME / VE, as the design requires |
| execution-table row | 4 ME entries + 1 VE entry | follows from the core size |
| ME preemption (context save) | 256 cycles | the evaluation's value |
| SRAM / HBM segment | 2 MB / 1 GB | evaluated core (128 MB SRAM, 64 GB HBM) |
| vNPU contexts | 4 | own choice (the evaluation co-locates 2) |
| code per vNPU, groups per vNPU | 256 instructions, 64 groups | own choice |
| scalar registers, scalar words | 8 per uTOp, 16 per vNPU | own choice |
| instruction FIFO | 4 per queue | own choice |
| temporal slice | 1024 cycles | own choice |
| instruction format widths | see above | own choice; the paper shows only the slot layout |

`NX`, `NY` and `NUM_VNPU` are constants in `neu_pkg`. All tables, queues and
schedulers scale with them.

## Where this departs from the paper, and what is missing

* The engines, the 128 MB SRAM, the HBM, the DMA engine, the PCIe virtual
  functions and the host-side vNPU manager and allocator are not here. The
  core exposes their interfaces as ports.
* VE operations are abstract: an opcode, a destination and one address or
  operand field. The real VE slot format, the load/store slots and the DMA
  slots of the production ISA are not modelled. Only VE loads and stores
  are translated.
* The scalar operations (`li`, `addi`, branches, `sld`/`sst`) and the scalar
  word store are this design's. They stand in for the scalar side of a VLIW
  core, which the paper assumes but does not specify.
* The paper's temporal-sharing policy is only described as priority-based
  and preemptive with an active-cycle counter. The weighting formula and the
  slice are this design's.
* The paper does not say how a page fault is reported. Here it drops the
  access and stops the vNPU with an interrupt.
* On a context switch the paper writes the uTOp's register file and the
  ME's intermediate data to SRAM. Here the scalar registers and PC are kept
  in the uTOp scheduler's per-uTOp state. The ME data movement is only
  signalled: `me_ctx_save` stays high for the save time, and the ME side
  does the copy.
* When a vNPU stops in ERROR, uTOps it still has in queues are not aborted.
  They run to their `finish`. A new launch of that vNPU is ignored until
  they have finished. A uTOp that never finishes keeps its queue.
* In temporal-sharing mode the VEs are shared purely by demand.
* The same instruction memory holds all vNPUs' code. Each vNPU has its own
  fixed region, so a vNPU cannot read another's code.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. With Verilator 5,
compile the package first:

```
verilator --binary --timing --assert rtl/neu_pkg.sv tb/tb_asm_pkg.sv rtl/*.sv \
          tb/tb_neuisa_core.sv --top-module tb_neuisa_core -Mdir obj -o sim
./obj/sim
```

For a single block, replace `rtl/*.sv` with that block's file and pick its
testbench. `tb_asm_pkg` has small helpers that build instruction words.

`tb_neuisa_core` runs the whole core at its default parameters (a few
thousand cycles) and makes every mechanism happen:

* ME harvesting, reclaim by preemption with the 256-cycle save, and resume;
* VE harvesting;
* a `nextGroup` loop over a scalar counter, and the conflicting-`nextGroup`
  exception;
* the three-group loop of the paper's program-structure example, with one
  snippet shared by two uTOps, `uTop.group` and `uTop.nextGroup %r0`;
* an SRAM page fault and HBM translation;
* temporal-sharing preemption by priority.

It checks exact ME and VE operation counts per vNPU, so a lost or repeated
operation around a preemption shows. It also checks that every SRAM address
leaving the core lies in the issuing vNPU's segment, that every save lasts
256 cycles, and the status, interrupt and counter registers. It fails if any
mechanism never happens.

`tb_core_random` runs 16 randomised rounds on the core at its defaults. Each
round picks:

* 2 to 4 vNPUs, with allocations that fit the core;
* the scheduling mode and the priorities;
* 1 to 3 groups per vNPU, with random ME uTOps and VE uTOps;
* a random ME latency for every operation.

Each round then demands the exact operation count per vNPU. Over the rounds,
every kind of harvesting and preemption must occur.

`tb_collocation` is an operator-level stand-in for the evaluated workload
pairs. It does not run the real networks, which live outside the core. It
times three programs on the core at its defaults:

* an ME-heavy vNPU with groups of 4 ME uTOps;
* a light vNPU with 1 ME uTOp and a VE-heavy VE uTOp per group;
* a hog vNPU with 2 long ME uTOps.

Each vNPU is allocated 2 MEs and 2 VEs. The measured times are:

| run | ME-heavy | light |
|---|---|---|
| alone | 974 cycles (98 % ME utilisation) | 965 cycles |
| next to the hog | 1926 cycles | – |
| next to each other | 1606 cycles | 965 cycles |

Harvesting gives the heavy vNPU the idle ME. The light vNPU loses nothing.
The testbench checks both of these.

`tb_utop_scheduler` checks the scheduling policies against queue models with
known run times. `tb_op_scheduler` checks the VE policy, including the
two-cycle example of two vNPUs with 2 VEs each.
