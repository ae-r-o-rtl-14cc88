# ÆRØ-style partitioned processor in SystemVerilog

Avionics software of different criticality levels (flight director, autopilot, moving map, ...)
is normally kept apart in separate partitions. An RTOS separates them in time and space, or
each partition gets its own processor. The ÆRØ architecture (*"ÆRØ: A Platform Architecture for
Mixed-Criticality Airborne Systems"*) takes a third route: **one** in-order pipeline whose
partitioning is done entirely in hardware.

- Everything a program can see is built once per partition: the register bank, the jump
  register, the program counter and the return-address stack pointers. A 2-bit partition
  index selects which copy is connected to the pipeline.
- A small co-processor, the Switching-Control-Unit (SwCU), is the whole scheduler. It is a set
  of cycle counters that decide which partition owns the pipeline, and it switches in a fixed
  10 clocks.
- A switch copies nothing to memory. The pipeline drains, the pc is parked, and the index
  changes.
- Each partition sees its own segment of the instruction and data memories. This is done by
  putting the partition index on the two most significant address bits.

Software in a partition therefore runs exactly as it would alone. It is only cut into time
slices, and the cut points are known to the clock cycle. That makes the worst-case execution
time (WCET) of a partitioned program a closed formula (see *Timing of partitioned programs*).

This repository is a synthesizable RTL reconstruction of that architecture. The ISA, the
pipeline organisation, the switching protocol, the SwCU counters and the memory segmentation
follow the paper. Where the paper leaves details open, the choices made here are listed at the
end of each section and in the opening comment of every file.

---

## 1. The partition switch

The switch is the heart of the design and the part that is easiest to get wrong.

### Signals

| signal | width | meaning |
|---|---|---|
| `ptr_c_flag1` | 1 | A switch is in progress. The pc does not advance, and the fetch stage feeds the all-zero no-op instead of the memory word. |
| `ptr_c_flag2` | 2 | Active partition index (1..3). It selects the register bank, jump register, pc register, stack pointers and the two address MSBs. The value 0 means no partition runs (idle slot). |
| `pc_load` | 1 | A one-cycle pulse that saves the running pc into the outgoing partition's pc register and loads the incoming partition's saved pc. |
| `next_part` | 2 | The partition being switched to. |
| `expiry_flag` | 1 | The active partition has used up its execution time. |

### SwCU counters (`aero_swcu`)

- Every partition *p* has a **period clock** that counts down by one per cycle.
- One **execution clock**, shared by all partitions, counts up.
- After reset the period clocks hold `START[p]`. These offsets order the partitions inside the
  major frame.
- When *p* is granted the processor, its period clock reloads `PERIOD[p]` and the execution
  clock clears. The next grant of *p* therefore comes exactly `PERIOD[p]` cycles later.
- `expiry_flag` is high while the execution clock is at or above `EXEC[p]`.

A switch to partition *p* is triggered when *p*'s period clock equals `SWITCH_TIME` (10). It
then runs through these cycles:

```
cycle     0   1   2   ...   S-2   S-1   S
          |   flag1 = 1 ..............|
          |   fetch feeds no-ops; the pipeline drains (3 stages behind fetch)
                                  pc_load      flag2 <= p, flag1 <= 0 (grant)
period    S  S-1 S-2  ...    2     1    reload PERIOD[p]
```

`S` is `SWITCH_TIME`. In words:

1. `ptr_c_flag1` is high for `SWITCH_TIME-1` cycles.
2. In the cycle where the period clock reads 1, `pc_load` swaps the pcs.
3. At the next clock edge the partition index changes and the incoming program's first
   instruction is fetched.

The order (flag1 up, resources stored, resources loaded, flag1 down with flag2 changed) is the
one the paper draws. The paper's drawing is only 4 cycles long, while its text and schedule use
10 cycles. This design stretches the same sequence over `SWITCH_TIME` cycles. `SWITCH_TIME` must
be at least 3, which is checked by an elaboration-time assertion, so that the last real
instruction leaves execute before the index changes. A concurrent assertion in `aero_core`
checks that the partition index never changes while an instruction sits in execute.

**The outgoing partition pays for the switch.** A switch starts `SWITCH_TIME` cycles before the
incoming partition's period boundary, so those cycles are taken from the end of the outgoing
partition's slot. A partition whose slot is `EXEC` long therefore executes for about
`EXEC - SWITCH_TIME` cycles when another partition follows it directly.

**Idle slot.** When the active partition's execution time expires and no other switch is
pending, the SwCU runs the same sequence with target 0. Fetch then feeds no-ops and the pc
holds until the next partition is due. This reproduces the empty slot "X" in the paper's
demonstration schedule.

**Ties.** The paper's schedules never let two partitions compete. If two period clocks hit
`SWITCH_TIME` in the same cycle, the lowest index wins. A switch under way is never
interrupted.

### Resuming exactly where a program stopped

One cycle of latency is easy to overlook. The instruction memory has a registered read, so
when `ptr_c_flag1` rises, the word at `pc-1` is already on its way out of the memory. The fetch
multiplexer will replace that word with a no-op. `aero_pc_unit` therefore keeps `fetch_pc`
(the address of the word leaving the memory) and `fetch_valid`. When the stall begins, it
winds `pc` back once to `fetch_pc`, and that address is what `pc_load` saves.

On resume, the first word fetched is the first word that never executed. No instruction is
skipped or repeated. The same applies to:

- a word masked in the cycle after a taken branch, which is never saved;
- the idle slot;
- a switch that starts while a branch is being resolved. The branch's redirect is applied
  first, and the target is what gets saved.

---

## 2. Instruction set

Instructions are 16 bits. There are no immediates: constants live in data memory, as
DO-178-style code keeps them anyway. The first operand is also the destination.

| format | [15] | [14] | [13] | [12:9] | [8:0] |
|---|---|---|---|---|---|
| memory access | 1 | 1 | 1 = store, 0 = load | register | data address (9 bits) |

| format | [15] | [14] | [13:0] |
|---|---|---|---|
| memory address | 1 | 0 | instruction address (14 bits); loads the jump register |

| format | [15] | [14:8] | [7:4] | [3:0] |
|---|---|---|---|---|
| operational | 0 | opcode | operand_a (and destination) | operand_b |

| opcode | mnemonic | operation |
|---|---|---|
| 0x11 | add | a = a + b |
| 0x12 | sub | a = a - b |
| 0x13 | mul | a = low 32 bits of a * b |
| 0x31 | xor | a = a ^ b |
| 0x32 | and | a = a & b |
| 0x33 | or | a = a \| b |
| 0x34 | shr | a = a >> b[4:0] (logical) |
| 0x35 | shl | a = a << b[4:0] |
| 0x21 | jle | jump if a <= b (signed) |
| 0x22 | jge | jump if a >= b |
| 0x23 | jl | jump if a < b |
| 0x24 | jg | jump if a > b |
| 0x25 | je | jump if a == b |
| 0x26 | jne | jump if a != b |
| 0x27 | juc | jump always |
| 0x28 | call | push pc+1, jump to the jump register *(encoding chosen here)* |
| 0x29 | ret | jump to the top of the stack and pop it *(encoding chosen here)* |
| 0x0000 | nop | the word the fetch stage inserts; writes nothing |

Notes on the ISA:

- Every control transfer takes two instructions. First a memory-address instruction sets the
  jump register, then an operational instruction tests the condition.
- `call` and `ret` encodings are not published. The values above are this design's.
- Signed comparison and logical shifts are also this design's reading.
- The package `aero_pkg` has the encoders `enc_op`, `enc_ld`, `enc_st` and `enc_jad`.

**Rules for the assembler writer:**

1. Put one instruction (a no-op if nothing else fits) between an instruction that writes a
   register and one that reads it. There is no forwarding, but the register bank writes
   through: a write in the last stage is seen by a read in decode during the same cycle. One
   gap is therefore enough.
2. A taken jump, call or return costs two bubbles. It is resolved in execute; the word in
   decode is dropped and the next fetched word is masked.
3. A return's target is only ready two cycles after the call or return before it. The flush
   after each of them always provides that gap.

---

## 3. Pipeline (`aero_core`)

The four stages and what happens in each:

| stage | what happens |
|---|---|
| F | The pc goes through the instruction MCU (`{ptr_c_flag2, pc}`) to the instruction memory. The returned word passes the no-op multiplexer. |
| D | The word is sliced by format. The active bank's two read ports supply the operands; a memory-address instruction writes the active jump register. |
| E | The ALU evaluates and jump conditions are decided, which may redirect and flush. Calls push `pc+1` on the active stack. The data address passes the data MCU and is presented to the data cache; memory-mapped devices are sampled here. |
| M | Memory access and write-back share one stage, since the ISA is register-register. It writes the ALU result or loaded word to the active bank, or the store value to the data cache or the UART word. |

One instruction enters per clock and the pipeline itself never stalls. Only the fetch side is
ever held: by a switch, a flush or the idle slot. Execution time is therefore a plain count of
instructions plus two bubbles per taken transfer.

**Memory map of the 9-bit data address space**, as every partition sees it:

| CPU address | use |
|---|---|
| 0x000–0x03F | shared window: every partition reaches the same words (physical segment 0) |
| 0x010–0x017 | sampling ports 0..7 (read) |
| 0x018 | UART transmit word (write) |
| 0x019 | timer, low 32 bits (read) |
| 0x01A | partition id (read) |
| 0x01B | timer, high 32 bits (read) |
| 0x040–0x1FF | private: physical segment `ptr_c_flag2` |

- 0x018, 0x019 and 0x01A are the addresses used in the paper's example program.
- The shared window, the sampling-port addresses and the high timer word are choices made
  here.
- The paper only says that shared I/O belongs in the shared region and private I/O in a
  partition's own region.

---

## 4. Memory segmentation (`aero_mcu`)

For an *n*-bit physical address, the CPU drives bits `[n-3:0]` and the MCU drives bits
`[n-1:n-2]` with the active partition index. Software never sees the segmentation: all three
partitions may use the same addresses, for example the same stack base, and still land in
different physical words.

| memory | CPU bits | physical bits | size built |
|---|---|---|---|
| instruction memory | 14 | 16 | 64 K words × 16 bit (16 K words per partition) |
| data cache | 9 | 11 | 2 K words × 32 bit (512 per segment) |
| return-address stack | 6 (`SP_W`) | 8 | 256 × 16 bit (64 per partition) |

- The CPU has no write path into instruction memory. A loader port (the UART upload in the
  paper's board) fills it.
- The data cache also has a loader port, for static data copied in at reset.

**Shared region.** Addresses below `SHARED_TOP` (0x040) are sent to segment 0, which no
partition owns because index 0 means "idle". This is how this design gives the paper's
"shared region" an address.

---

## 5. Timing of partitioned programs

Take a program with stand-alone WCET τ_A0. Run it in partition *n*, whose slot is τ_pn long
and recurs every E_p cycles. It completes after

```
k      = ceil(τ_A0 / τ_pn)
τ_An   = (k - 1) * E_p + τ_A0 - (k - 1) * τ_pn
```

When the slot is at least τ_A0 long, τ_An equals τ_A0.

The system testbench checks this formula on the RTL with the paper's demonstration
application. The program is a counter loop that sends the partition id and the timer to the
UART when `m == i` and when `m == threshold`. It runs in all three partitions on the paper's
schedule:

| partition | slot (ms at 50 MHz) | slot (cycles) | period |
|---|---|---|---|
| 1 | 4 | 200,000 | 16 ms (800,000 cycles) |
| 2 | 12 | 600,000 | 32 ms (1,600,000 cycles) |
| 3 | 8 | 400,000 | 32 ms (1,600,000 cycles) |

There is also an idle slot.

Results at the default parameters (`aero_soc_full_tb`, 3.5 M cycles):

- The loop takes 10 cycles per iteration.
- With threshold 39,990, τ_A0 is 399,927 cycles, identical in every slot of partitions 2 and 3.
  The paper measured 399,963 cycles.
- Partition 1's usable slot is 199,990 cycles, shorter than τ_A0. Its effective WCET measured
  999,935 cycles, against 999,937 from the formula (19.9987 ms). The paper reports 19.99966 ms.
- The 2-cycle difference is the position of the output instructions inside the loop.

---

## 6. Configuring a schedule

All scheduling is in the parameters of `aero_swcu`, passed through `aero_soc`. The arrays are
packed and indexed `[p-1]` for partition *p*.

| parameter | default | meaning |
|---|---|---|
| `SWITCH_TIME` | 10 | cycles per switch (≥ 3) |
| `PERIOD` | {1600000, 1600000, 800000} | period of partitions 3, 2, 1 in cycles |
| `EXEC` | {400000, 600000, 200000} | execution time of partitions 3, 2, 1 |
| `START` | {1000010, 200010, 10} | first grant of partitions 3, 2, 1 |
| `CNT_W` | 32 | counter width (86 s at 50 MHz) |
| `SP_W` | 6 | log2 of return-stack entries per partition |

To turn milliseconds into cycles, multiply by the clock in kHz (50,000 at 50 MHz).

Place the starts so that one partition's grant comes no earlier than the previous partition's
grant plus its `EXEC`. Back-to-back is fine, because the switch is taken from the outgoing slot.
Any gap becomes an idle slot.

The avionics use case of the paper fits exactly into a 5 ms frame: flight director and
autopilot each get 2 ms at 200 Hz, and the moving map gets 1 ms at 10 Hz.

```
PERIOD = {5000000, 250000, 250000}, EXEC = {50000, 100000, 100000}, START = {200010, 100010, 10}
```

`aero_avionics_tb` runs that schedule.

---

## 7. Modules

Files live in `rtl/`, one module or package per file.

| module | role |
|---|---|
| `aero_pkg` | widths, partition count, memory map, opcodes, instruction decode helpers and encoders |
| `aero_soc` | top level: core, SwCU, instruction memory, data cache, timer, sampling ports |
| `aero_core` | the 4-stage pipeline with replicated state, two MCUs, the ALU, the address stack |
| `aero_swcu` | partition scheduler (period clocks, execution clock, switch sequencing) |
| `aero_pc_unit` | pc register, per-partition saved pcs, redirect, stall wind-back |
| `aero_reg_bank` | 16 × 32-bit register bank, 2 write-through read ports (one per partition) |
| `aero_alu` | single-cycle ALU and jump/call/return flags |
| `aero_addr_stack` | single-port 16-bit return-address memory, per-partition read/write pointers |
| `aero_mcu` | address segmentation by partition index, with the shared window |
| `aero_imem` | instruction memory, one read port, loader write port |
| `aero_dcache` | dual-port data memory, loader port has priority |
| `aero_timer` | 64-bit free-running cycle counter |
| `aero_sampling_ports` | sampling ports: last sample per port, read without consuming |

Top-level ports of `aero_soc`:

- clock and an asynchronous active-low reset;
- the two loader ports;
- the UART receive strobe (`valid`, `port`, `data`) and transmit strobe (`valid`, `data`);
- the switching flags `ptr_c_flag1`, `ptr_c_flag2` and `expiry_flag`, brought out for a logic
  analyser as on the paper's board.

The UART itself, the oscillator, the reset button and the LED debug port of the paper's FPGA
board are not part of the RTL.

---

## 8. Verification

Every testbench in `tb/` is self-checking. Each ends with `TB_RESULT checks=N failures=M` and
has a cycle watchdog.

| testbench | what it shows |
|---|---|
| `aero_alu_tb` | every opcode against a reference on random and corner operands; flags |
| `aero_reg_bank_tb` | random writes/reads against a model, write-through |
| `aero_pc_unit_tb` | cycle-by-cycle reference model with random stalls, redirects and partition switches |
| `aero_addr_stack_tb` | random nested push/pop in several partitions against per-partition models |
| `aero_mcu_tb` | every address and partition, shared window |
| `aero_swcu_tb` | scaled schedule: grant instants, flag1 length, pc_load before each grant, expiry timing, idle slots, grant counts |
| `aero_imem_tb`, `aero_dcache_tb`, `aero_timer_tb`, `aero_sampling_ports_tb` | storage and counters against models |
| `aero_core_tb` | a test program in two partitions, interrupted at a random cycle in 40 trials; results, stack, shared word, partition id, UART word and the 2-bubble branch penalty |
| `aero_soc_tb` | whole system, schedule scaled by 1/1000 |
| `aero_soc_full_tb` | whole system at the default (paper) parameters, 3.5 M cycles |
| `aero_avionics_tb` | avionics schedule at full scale, 10.3 M cycles |

`aero_soc_tb` checks the schedule, idle slots, partition-id isolation of every UART output, a
constant timer-to-output delay, uniform τ_A0, the WCET formula and the sampling-port copy. It
also counts each mechanism (switches, idle slots, pc restores, flushes, calls, returns, UART
words, expiries) and fails if any never occurs.

`aero_avionics_tb` runs stand-in periodic tasks of the published WCETs (1.127, 1.003 and
0.319 ms). It checks that every job finishes inside its window, that job lengths are identical
and that the rates are exact.

The shared stimulus and checks of the two system benches are in `aero_soc_checker`. The
application and a small in-bench assembler are in `aero_app_pkg`.

Running a testbench with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -yrtl -ytb \
    rtl/aero_pkg.sv tb/aero_app_pkg.sv tb/aero_soc_full_tb.sv --top-module aero_soc_full_tb
./obj_dir/Vaero_soc_full_tb
```

- Benches that do not use `aero_app_pkg` need only `rtl/aero_pkg.sv` and their own file.
- The full-size system bench runs in a few seconds.
- The memories are not reset. Everything that is read is reset or loaded first, so the benches
  also work in two-state simulation with random initial values.

---

## 9. Where this design departs from, or fills in, the paper

- **Instruction memory size.** The paper's board had 16 KB of instruction memory, but it also
  says the 14-bit per-partition address extended by the MCU to 16 bits gives each partition its
  own space. The RTL follows the 16-bit address: 64 K words (128 KB).
- **Switch length.** The paper's pipeline drawing shows 4 cycles, while its text and schedule
  use 10. `SWITCH_TIME` is a parameter, defaulting to 10.
- **Demonstration schedule.** The published table places partition 1's grants 800,020 and
  800,010 cycles apart. The RTL uses exact periods, with starts at 10, 200,010 and 1,000,010.
- **Encodings and mapping chosen here:** call/return encodings, signed compares, the idle
  encoding (index 0), the shared-window address, the high timer word address, the sampling-port
  addresses and the number of sampling ports (8).
- **Return-address stack.** The stack depth (64 per partition) is chosen here. Its pointers
  wrap silently on overflow or underflow, as the paper gives no overflow handling.
- **Returns flush the pipeline** like jumps and calls. The paper names only the jump and call
  flags as flush triggers.
- **Board parts outside the RTL.** The UART core, the 50 MHz oscillator, the reset button and
  the 32-bit LED debug port are not modelled; their signals are ports or absent.
- **Lint note.** The instruction-side MCU has no shared window (`SHARED_TOP_P = 0`), so its
  "below the window" comparison is constant. Lint tools report that, and it is intended.
