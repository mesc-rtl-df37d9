# A preemptible Gemmini-style matrix accelerator

A DNN accelerator that runs one long instruction stream per task is a source of
priority inversion in a real-time system. Suppose a high-priority or
high-criticality task needs the accelerator while a low-priority task holds it.
If the accelerator can only be handed over at the end of a whole workload, or of
a whole layer, the urgent task waits for all of it. This design lets the
operating system take the accelerator away *between any two accelerator
instructions*. The longest wait therefore becomes that of one instruction,
plus the time to save and restore the interrupted task's state.

The RTL is a Gemmini-style accelerator: a 16×16 weight-stationary systolic
array, a banked scratchpad and an accumulator, driven by RoCC-like instructions
from a host CPU. Three additions make instruction-level preemption possible:

* **Freeze and flush controls** in the instruction front end.
* **A config-copy buffer** that remembers the configuration in force, plus
  **default configuration channels** that let the OS move a task's data in and
  out without disturbing that configuration.
* **An address remapper** in front of the scratchpad. It lets several tasks
  keep their data resident in separate banks, so a context switch often does
  not have to copy the scratchpad at all.

All of `rtl/` is synthesizable SystemVerilog-2017. The top module is
`gemmini_rt`.

## Sizes

| Item | Value |
|---|---|
| Processing elements | 16 × 16, int8 inputs, int32 accumulation |
| Scratchpad | 256 KB: 8 banks × 2048 rows × 16 bytes (one int8 row per entry) |
| Accumulator | 64 KB: 1024 rows × 16 × 32 bit |
| DRAM port | 128-bit beats; an accumulator row moves as 4 beats, a scratchpad row as 1 |
| Remapping block | 256 entries × 128 bits = 4 KB |
| Bank semaphores | one per bank (8) |
| Configuration classes kept | 4 (execute, load, store, norm) |

All of these are the defaults of the parameters in `rtl/mesc_pkg.sv` and the
module parameters. None has been scaled down.

## Instruction set

Every instruction carries an 8-bit `id`, a 7-bit `funct7` and two 64-bit
operands, `rs1` and `rs2`. When it completes, `resp_valid[lane]` pulses with
its `id`. Lane 0 is configuration, 1 load, 2 execute, 3 store and 4
freeze/flush.

Move operands: `rs1` is the DRAM byte address; `rs2[31:0]` is the local row
address; `rs2[63:48]` is the number of rows. A local address with bit 19 set
(`0x0008_0000`) names accumulator rows. Any other local address is a
scratchpad row of the current task, which the remapper translates.

| funct7 | Instruction | Effect |
|---|---|---|
| 0x00 | `config` | `rs1[1:0]` selects the class (0 execute, 1 load, 2 store, 3 norm). For load and store: `rs2[39:0]` is the DRAM row stride; `rs1[63:32]` scale, `rs1[31:16]` block_stride, `rs1[15:8]` pixel_repeat, `rs1[2]` shrink. |
| 0x02 / 0x03 | `mvin` / `mvout` | Move rows using the task's configured stride. |
| 0x06 | `preload` | Record the scratchpad address of B (`rs1`) and the accumulator address of C (`rs2`). |
| 0x04 / 0x05 | `compute_preloaded` / `compute_accumulated` | C = A·B or C += A·B, where A is the 16 rows at `rs1`. |
| 0x07 | `flush` | `rs1[2:0]`: 1 resume issuing, 2 drop all queued instructions, 3 release the banks of task `rs2[7:0]`, 4 drop the queues and reset all configuration. |
| 0x18 / 0x19 | `step_wise_mvin` / `step_wise_mvout` | Like mvin/mvout, but always with the default configuration (densely packed rows, scale 1.0). |
| 0x1A / 0x1B | `mvin_config_buffer` / `mvout_config_buffer` | Move the config-copy buffer: a header beat with the valid mask in bits 3:0, then 4 entry beats `{rs2, rs1}`. |
| 0x1C | `reconfig` | Re-execute every stored configuration, 2 cycles each. |
| 0x1D / 0x1E | `mvin_remapping_block` / `mvout_remapping_block` | Move the 256 remapping block entries, one beat each. |
| 0x1F | `instruction_freeze` | Stop issuing. Instructions already running finish. |

The value 0x18 for the step-wise load and the field names of the configuration
come from the source design. The other new opcodes (0x19–0x1F) and all operand
layouts are this design's own encoding. The classic opcodes follow the public
Gemmini numbering.

## How a preemption works

The sequence below is driven by the OS. `tb/gemmini_rt_tb.sv` performs it
exactly this way.

1. **Freeze.** `instruction_freeze` is acted on the moment it arrives. It is
   never queued, so it cannot sit behind the work it is meant to stop. The
   reservation station stops issuing. Whatever load, compute or store is
   already running carries on to completion. The OS polls `inflight` until it
   drops. This wait is the only blocking the hardware itself imposes: at most
   one instruction's duration (31 cycles in the end-to-end test).
2. **Drop the queue.** `flush` with sub-operation 2 discards every queued,
   unissued instruction. Every instruction either completed, and so produced a
   response, or never started. The OS therefore knows exactly which
   instructions to send again later. Nothing is executed twice.
3. **Resume.** `flush` with sub-operation 1 re-enables issue, so the save
   instructions can run.
4. **Save the context.**
   * `step_wise_mvout` saves the accumulator rows. Their data is in place
     because nothing is half-done.
   * `mvout_config_buffer` saves the configuration in force.
   * `mvout_remapping_block` saves the task's address map.
5. **Decide about the scratchpad.** If enough unlocked banks remain for the
   next task, the interrupted task's banks stay locked and untouched. No copy
   is made. Otherwise the OS saves those rows with `step_wise_mvout`. It waits
   for that instruction's response, then sends `flush` sub-operation 3 with the
   task id, which releases the banks.
   * The response matters: flushes act on arrival, so a flush sent too early
     would overtake the save.
   * Released banks are zeroed by a sweep, one row per cycle. The next task
     therefore cannot read the old data. `clear_busy` is high during the
     sweep, and scratchpad writes wait for it.
6. **Flush the rest.** `flush` sub-operation 4 drops the queues, resets the
   load/store configuration registers and empties the config-copy buffer. The
   next task starts clean.

Restoring mirrors these steps:

* `step_wise_mvin` brings back the scratchpad rows, if they were saved. The
  remapper may place them in different physical banks.
* `step_wise_mvin` brings back the accumulator rows.
* `mvin_config_buffer` followed by `reconfig` brings back the configuration.
  Replaying the configuration re-records it, so the buffer again reflects the
  configuration in force.
* Finally the OS re-sends the instructions that had no response, together with
  the task's last `preload`. The preload's two operand addresses live in the
  execute controller and are not part of the saved context.

**Why step-wise moves.** Ordinary moves use the interrupted task's own stride
and scaling. A save made with them would depend on a configuration that
changes between tasks. Each load and store controller therefore passes through
a *default configuration channel*. When the instruction's funct7 is the
step-wise one, the channel substitutes a fixed default: row stride equal to the
row size, scale 1.0, no shrink, pixel_repeat 1. Otherwise it passes the task's
configuration through. Saves and restores are thus exact bit copies, whatever
the task had configured. The channel decides from funct7 alone. It needs
neither extra state nor a reconfiguration.

**A discrepancy in the source.** The context-save routine, as printed, copies
the scratchpad out when `next.banks + locked ≤ total`. The prose says the copy
depends on whether enough banks are left for the next task, which suggests the
opposite. The choice is software. The hardware supports both outcomes, and the
end-to-end test runs both.

## The address remapper

The scratchpad's physical rows are grouped into 8 banks of 2048 rows. Each bank
has a lock bit and an owner task. The *remapping block* is a table of 256
entries. Each entry is `{valid, task, laddr, real_laddr, rows}` and maps a run
of a task's local rows onto physical rows. The OS tells the accelerator which
task is moving data (`cur_task`) and how many banks it may hold
(`bank_quota`, the η of the bank-allocation analysis).

A scratchpad write is handled as follows:

1. If an entry of the task already covers the row, the write goes in place.
2. Otherwise, if the row continues the last run written into one of the task's
   banks and that bank has room, the run grows by one row.
3. Otherwise a new entry is made. It goes in the task's first bank that has
   room. Failing that, it goes in the first unlocked bank, which is then locked
   for the task. The second option is taken only while the task holds fewer
   banks than its quota.
4. Otherwise the write is dropped and `alloc_error` is set.

Banks fill from row 0 upward. Reads are looked up the same way. The lookup is
a parallel compare over all 256 entries, completed in the same cycle. The
accumulator is never remapped.

Writing a remapping block entry back (`mvin_remapping_block`) relocks its
bank for the entry's task. A saved map can therefore be reinstated as a whole
if the data itself never left the scratchpad.

## Issue rules and timing

* **Queues.** The reservation station sorts instructions into four queues:
  configuration (depth 4), load (8), execute (16) and store (4).
* **Issue order.** Instructions issue strictly in program order, one per cycle
  at most. An instruction issues only when no instruction of another class is
  still running. This simple rule replaces Gemmini's dependency tracking. It
  guarantees that a compute sees the rows its mvin wrote and a mvout sees the
  compute's result. Consecutive instructions of the same class follow each
  other without a gap.
* **Configuration.** A configuration executes inside the station in 2 cycles.
  Its response comes 3 cycles after it is accepted.
* **Compute.** A compute takes 2·16 + 3 = 35 cycles. It reads the 16 B rows,
  then the 16 A rows, one per cycle, and writes each result row into the
  accumulator.
* **Moves.** A move keeps one DRAM read outstanding at a time. Scratchpad
  reads go to the execute controller first, then the store controller.
  Accumulator writes go to the execute controller first, then the load
  controller. The DRAM port goes to the load controller first, then the store
  controller.

## Files

| File | Block |
|---|---|
| `rtl/mesc_pkg.sv` | Sizes, opcodes, instruction and entry structs |
| `rtl/reservation_station.sv`, `rtl/rs_queue.sv` | Front end: queues, in-order issue, configuration, freeze/flush |
| `rtl/config_copy_buffer.sv` | Latest configuration per class; save/restore/replay |
| `rtl/default_config_channel.sv` | Configuration register plus the default substitution for step-wise moves |
| `rtl/load_controller.sv`, `rtl/store_controller.sv` | DRAM ↔ scratchpad/accumulator/buffer moves |
| `rtl/execute_controller.sv` | preload / compute sequencing |
| `rtl/systolic_array.sv` | 16×16 weight-stationary array, one result row per cycle |
| `rtl/address_remapper.sv` | Bank locks, remapping block, allocation |
| `rtl/scratchpad.sv`, `rtl/accumulator.sv` | Memories (the scratchpad has the bank-clear sweep) |
| `rtl/gemmini_rt.sv` | Top level |
| `tb/*_tb.sv` | One self-checking testbench per block |
| `tb/dram_model.sv` | Behavioural DRAM with latency and stalls |

`tb/gemmini_rt_tb.sv` runs the whole design at its default sizes:

* Task A (C = 2·A·B, with its own strides) is preempted part way through.
* Task B runs a complete matrix product with different strides.
* A is restored and finishes.
* This is done once with A's banks kept and once with them saved and released.
* Both results are compared with products computed in the testbench.
* It also checks that the configuration was restored, that the banks were
  released and cleared, and that the bank quota refuses a write.
* It counts each mechanism and fails if one never occurred.

## Simulating

Each testbench is self-contained and prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mesc_pkg.sv tb/gemmini_rt_tb.sv --top-module gemmini_rt_tb
./obj_dir/Vgemmini_rt_tb
```

Some block testbenches override sizes to stay short: the remapper uses 8-row
banks, the load and store testbenches use small remapping blocks. The
end-to-end testbench uses none.

## What is not here

* **Not part of this RTL.** The host CPU, DRAM, TLB/DMA engine, Gemmini's
  transposer/im2col/scaling units, and the OS itself (scheduler, timers,
  mode switch, bank-allocation analysis) are outside it. The testbench plays
  the CPU and the OS. Convolutions must be lowered to matrix products by
  software.
* **Configuration fields.** They are stored, saved and replayed, but only the
  stride is used by the datapath.
* **Norm and execute configurations.** They are kept and replayed only.
* **Result rows.** Accumulator rows leave at full 32-bit precision, without
  scaling or activation.
* **Dependency tracking.** Gemmini's dependency tracking and overlapped issue
  are replaced by the class-wait rule above. This costs throughput but not
  correctness.
* **Timing closure.** The remapper's single-cycle 256-entry search is the
  obvious critical path. It would need pipelining for a high clock rate.
