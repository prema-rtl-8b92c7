# A preemptible systolic-array NPU with predictive multi-task scheduling

Cloud inference accelerators are usually shared by many users. When a
low-priority inference is running and a high-priority request arrives, a
non-preemptive accelerator makes the new request wait for the whole network to
finish, which can take milliseconds. This design makes a TPU-style neural
processing unit (NPU) preemptible and adds a hardware scheduler that decides
*which* task should run and *how* the running task should give way.

Scheduling uses the PREMA policy ("predictive multi-task scheduling"). Each
task carries an estimate of its isolated run time, computed from its layer
shapes by an analytical model of the systolic array. A running task can give
way in three ways:

* **CHECKPOINT.** The NPU finishes the current matrix-multiply instruction,
  saves the task's live on-chip state to memory, and switches.
* **KILL.** The NPU stops at once. The killed task later restarts from scratch.
* **DRAIN.** The NPU does not interrupt. The newcomer waits until the running
  task finishes.

The scheduler chooses between DRAIN and CHECKPOINT from the predicted slowdown
of each task.

The RTL is SystemVerilog (IEEE 1800-2017). It is written to be synthesizable,
with memories written as arrays. Default parameters give the full-size
configuration:

* a 128 x 128 array of 16-bit multiply-accumulate units;
* an 8 MB unified (activation) buffer and a 4 MB weight buffer;
* a 16-entry task table and a 0.25 ms scheduling period at 700 MHz.

## Block diagram

```
 host ──ib_*──▶ instruction buffer ─▶ controller ──▶ DMA ◀──▶ off-chip memory
 host ──mmu_*─▶ MMU (per-task base/limit) ◀─ check ─┘  │
                                                      ▼
   UBUF ─▶ systolic data setup (skew) ─▶ 128x128 systolic array ─▶ de-skew ─▶ ACCQ
    ▲                  WBUF ─▶ (weight columns shifted in) ┘                 │
    └──────────────────────────── vector unit ◀──────────────────────────────┘

 host ──task_req──▶ preemption module: task queue ─▶ context table ─▶ PREMA
                      scheduler ─▶ mechanism select ─▶ start / ckpt / kill ─▶ controller
 host ──pred_*, lut_*──▶ latency predictor (+ output-length table for RNNs)
```

| File | Contents |
|---|---|
| `rtl/npu_pkg.sv` | shared types: instruction format, opcodes, task descriptor, context-table entry |
| `rtl/pe.sv`, `rtl/systolic_array.sv` | weight-stationary PE and the SH x SW array |
| `rtl/systolic_data_setup.sv` | triangular delay line (skew the input rows, de-skew the output columns) |
| `rtl/unified_buffer.sv`, `rtl/weight_buffer.sv`, `rtl/accumulator_queue.sv` | on-chip memories |
| `rtl/vector_unit.sv` | ReLU / add / requantise |
| `rtl/dma_unit.sv`, `rtl/mmu.sv` | memory transfers and per-task protection |
| `rtl/instruction_buffer.sv`, `rtl/npu_controller.sv`, `rtl/npu_core.sv` | instruction issue, sequencing, preemption mechanics; the core wrapper |
| `rtl/task_queue.sv`, `rtl/context_table.sv`, `rtl/prema_scheduler.sv`, `rtl/seq_divider.sv`, `rtl/mechanism_select.sv`, `rtl/preemption_module.sv` | the scheduler side |
| `rtl/latency_predictor.sv`, `rtl/seqlen_lut.sv` | run-time prediction |
| `rtl/prema_npu.sv` | top level |
| `tb/` | one self-checking testbench per block; `tb/dram_model.sv` is a behavioural memory |

## The instruction set and how a layer runs

The NPU executes coarse-grained (CISC) instructions, written by the host into
the instruction buffer. Each instruction is one `instr_t` (see `npu_pkg.sv`).

| Opcode | Effect |
|---|---|
| `LOAD_TILE` | `count` rows from memory (`dram_addr`, in 256-byte rows) into UBUF, WBUF or ACCQ at `buf_addr` |
| `STORE_TILE` | `count` rows from UBUF or ACCQ to memory |
| `GEMM` / `CONV` | multiply `count` activation rows (UBUF from `buf_addr`) by the weight tile (WBUF from `buf_addr2`) into ACCQ rows from `acc_addr`, overwriting or, with `accumulate`, adding |
| `VECTOR` | ACCQ rows → optional add of UBUF rows (`buf_addr2`) → optional ReLU → arithmetic right shift by `shift` → saturate to 16 bits → UBUF rows from `buf_addr` |
| `HALT` | end of task |
| `YIELD`, `RESUME` | end of a checkpoint trap routine / end of a restore routine (see below) |

Convolutions are expected to be lowered to matrix multiplies by the compiler,
so `CONV` executes exactly like `GEMM`.

DMA instructions and compute instructions each wait only for their own unit,
so a `LOAD_TILE` of the next weight tile overlaps the current `GEMM` (double
buffering). Set the `barrier` bit on an instruction that depends on an
earlier one: it then waits until both units are idle.

### GEMM timing

A weight tile is SH x SW values. WBUF row *j* holds column *j* of the tile,
one value per array row. A GEMM proceeds in two phases:

1. **Weight load (SW cycles).** The SW weight columns are read and shifted in
   from the left of the array, one column per cycle.
2. **Streaming (count + SH + SW cycles).** The `count` activation rows are read
   one per cycle and skewed: array row *i* sees its value *i* cycles late. The
   values flow right while partial sums flow down. The bottom-row results are
   de-skewed and written to the ACCQ.

The instruction therefore occupies the array for exactly **count + SH + 2·SW
cycles**, which is 512 cycles for a full 128-row tile. This matches the compute
term ACC + SH + 2·SW of the latency model. The streaming part alone,
SW + SH + ACC, is the figure usually quoted for a systolic GEMM once the
weights are latched. The testbenches check this cycle count at 4 x 4 and at
128 x 128.

### Memory interface

The memory port moves one buffer row (SH x 16 bits = 256 bytes) per cycle in
each direction:

* Read requests use a valid/ready handshake. Responses come back in order,
  with any latency, and cannot be stalled.
* Writes use a valid/ready handshake.

The testbench memory model has a fixed latency of 100 cycles. Every address the
DMA issues is checked by the MMU against a base/limit region for the running
task's ID. A violation ends the task with `task_done_fault`.

## Preemption: what happens in each mechanism

This is the part of the design with the most state. It is spread over
`npu_controller.sv` and `preemption_module.sv`.

**CHECKPOINT.** The preemption module pulses `ckpt_req`. The controller then
works in this order:

1. It stops issuing instructions.
2. It waits until the GEMM and any DMA in flight have completed, so the
   preemption point is always an instruction boundary after the GEMM's results
   are in the ACCQ.
3. It saves the PC and jumps to the task's **trap routine**, whose address is
   part of the task descriptor.

The trap routine is ordinary code written by the compiler for that task:

```
trap:    STORE_TILE bsel=ACCQ  ...   ; save the 32-bit partial sums (2 rows per ACCQ row)
         STORE_TILE bsel=UBUF  ...   ; save whatever UBUF rows are live
         YIELD                        ; ends the task's turn
restore: LOAD_TILE  bsel=UBUF  ...   ; the instructions after YIELD reload the state
         LOAD_TILE  bsel=ACCQ  ...
         RESUME                       ; jump back to the saved PC
```

`YIELD` reports two PCs to the preemption module:

* the saved PC;
* the restore entry, which is the instruction after `YIELD`.

The module stores both in the task's context-table entry and marks the task
*preempted*. When the task is picked again, it is started at its restore entry
with the saved PC as its resume PC.

An ACCQ row holds SW 32-bit sums, which is twice a buffer row. The DMA
therefore moves each ACCQ row as two memory rows, so partial sums survive a
checkpoint without rounding. Saving the whole 8 MB UBUF plus the ACCQ takes
about 33,000 cycles (47 µs). Real trap routines save only the live rows.

**KILL.** The preemption module pulses `kill_req`. The controller stops
the compute sequencer at once and aborts the DMA. The DMA keeps running only
to drain read responses still in flight, and writes none of them. After that,
`killed` is pulsed. The task returns to *ready* with its Executed count
cleared, and it restarts from its first instruction.

**DRAIN.** This needs no hardware action: the scheduler simply does not
interrupt the running task.

## The scheduler

### Context table

The context table has one entry per resident task, 16 by default. Each entry
has seven 64-bit fields:

* TaskID
* Executed (cycles run)
* Waited (cycles spent waiting while resident)
* Estimated (predicted isolated run time in cycles)
* Priority tokens (1, 3 or 9 for low, medium, high)
* Token
* State: valid, ready/running/preempted, and the program, trap, restore and
  resume PCs

Every cycle, the running entry's Executed increments and every other valid
entry's Waited increments.

### When the scheduler wakes

The scheduler runs when any of these happens:

1. a task moves from the queue into the table;
2. the running task finishes;
3. a scheduling period (175,000 cycles) elapses.

### What it does

* **On a period only:** every valid task gains
  `priority × Waited / Estimated` tokens. This is its slowdown so far,
  normalised to its own length. Tokens are fixed point with 8 fraction bits.
  The divide uses a serial divider, 64 cycles per task, so a period update
  takes about 64 cycles per resident task.
* **On every wake:** the threshold is the largest token count, rounded down
  to 9, 3 or 1. Tasks at or above the threshold are candidates. The
  candidate with the smallest Estimated wins.

If the winner is not the running task, `mechanism_select` compares:

* candidate remaining × candidate estimate;
* current remaining × current estimate.

This is the ratio test "degradation of the current task > degradation of the
candidate" of the policy, done with exact multiplications instead of
divisions. If the candidate's product is larger, the result is DRAIN;
otherwise it is CHECKPOINT. For comparison, `mech_mode` can force CHECKPOINT
or KILL every time.

### Where the estimates come from

The latency predictor applies the analytical model layer by layer and
accumulates the total. A layer of shape m x k x n is cut into SW x SH x ACC
tiles. Each tile costs the larger of its compute time and its memory time. A
final partial ACC tile is charged separately. The model's floors are kept
exactly as specified, so dimensions that are not multiples of the tile size
are under-counted; this follows the specification and is not a bug.

For recurrent layers the count is multiplied by a predicted number of time
steps. That number is read from a host-programmed table indexed by input
sequence length (64 entries by default). The host can run the predictor
before dispatching a task and put the result in the task descriptor.

## Using it

Host sequence:

1. Write the program, trap and restore routines into the instruction buffer
   (`ib_*`).
2. Give each TaskID a memory region (`mmu_*`).
3. Optionally compute the estimate (`pred_*`, `lut_*`).
4. Push a `task_req_t` (TaskID, priority, estimate, program PC, trap PC) with
   `task_req_valid`/`task_req_ready`.

Completion is reported on `task_done` with `task_done_id`. The `evt_*`
outputs pulse once per scheduler decision of each kind and are meant for
performance counters.

Each testbench builds with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb -Irtl rtl/npu_pkg.sv tb/tb_prema_npu.sv
./obj_dir/Vtb_prema_npu
```

Every testbench prints `TB_RESULT checks=N failures=M`.

* `tb_prema_npu` runs three tasks on a 4 x 4 instance under each policy. It
  requires every mechanism to occur at least once: schedule, period, start,
  checkpoint, kill, drain, completion, MMU fault, GEMM, vector op, DMA load
  and store. It checks all results against a software model.
* `tb_npu_core` checks the checkpoint/restore path instruction by instruction.
* `tb_prema_npu_full` runs one complete 128 x 128 GEMM layer at the default
  size through the whole top level. Verilator takes about 6 minutes to
  compile it; it then simulates in under a second.

## How far it follows the specification, and where it departs

**Taken from the specification:**

* the array size, buffer sizes, clock and memory latency;
* the CISC instruction classes;
* weight-stationary dataflow with ACCQ accumulation;
* the preemption point after a committed GEMM, with software trap routines
  using the DMA;
* the three mechanisms;
* the context-table fields and their width;
* the three wake-up conditions;
* the token rule, threshold and shortest-estimated-job choice;
* the DRAIN/CHECKPOINT test;
* the analytical latency model;
* the output-length table for RNNs;
* TaskID used as the address-space ID for protection.

**This design's own choices** (the specification does not give them):

* **Instructions.** The instruction encoding, the barrier bit and the
  `YIELD`/`RESUME` opcodes.
* **ACCQ path.** The DMA path to the ACCQ.
* **Weight loading.** Shifting weights in column by column, chosen so the GEMM
  time matches the model.
* **Protection.** Base/limit protection with no address translation.
* **Tokens and timing.** Fixed-point tokens, with Waited and Executed counted
  in cycles.
* **Handshakes.** All handshakes between blocks.
* **Table behaviour.** Lengths beyond the output-length table use its last
  entry.
* **ACCQ depth.** 128 rows, not specified.
* **Threshold test.** The policy text writes "token > threshold", but its own
  worked example (the threshold equals the largest token, rounded down) needs
  "≥", which is used.

**Known gaps:**

* **Vector unit.** It has no sigmoid or tanh; only pass, ReLU, add and
  add+ReLU.
* **Memory bandwidth.** The DMA moves 256 bytes per cycle, about 179 GB/s at
  700 MHz. The specified memory system offers 358 GB/s over 8 channels.
* **Memory.** The off-chip memory, its channels and the host bus are not part
  of the RTL.
* **Instruction buffer.** It holds 1024 instructions. A large network's
  program must be fed in pieces by the host, and how that is done is not
  specified.
* **Memories.** The buffers are flip-flop arrays. A real chip would use SRAM
  macros, and synthesising the 8 MB arrays as flops is impractically slow.
* **Weight entry.** Weights enter the array from its left edge, one column
  per cycle. The reference block diagram draws the weight buffer feeding the
  array's top edge. The arithmetic result and the cycle count are the same.
* **Scheduler latency.** A period update takes about 64 cycles per resident
  task. A very short task can therefore finish before a preemption decision
  about it is made.
