# Klessydra-T0: an interleaved multi-threaded RISC-V core for IoT end-nodes

An IoT end-node usually runs a handful of independent control loops side by
side. The Klessydra-T0 core gives each loop its own hardware thread. It keeps
one program counter, one register file and one set of control/status
registers per thread, and it fetches from a **different thread every clock
cycle**. Instructions of one thread are therefore a few cycles apart in the
pipeline. By the time an instruction needs the result of the previous
instruction of its thread, that result has already been written back. The
pipeline needs no forwarding paths, no interlocks and no branch prediction.
The core stays small, and its stages stay short.

This repository holds a SystemVerilog implementation of the **T023**
configuration:

- a three-stage pipeline;
- three hardware threads (the *thread pool size*);
- a *thread pool baseline* of two, meaning two active threads are enough for
  the pipeline to run without hazards.

The core executes RV32I, the machine-mode part of the RISC-V privileged
specification (v1.10) and AMOSWAP.W. Its pins are those of the core socket of
the Pulpino SoC (the RI5CY pin set), so it can replace that core.

In a simulated throughput test it reaches these rates:

- 1.00 instruction per cycle with three active threads;
- 0.857 with two threads;
- 0.429 with one thread.

The published T023 figures are 1.00, 0.862 and 0.431 (see
[Throughput](#throughput)).

## Contents

| File | What it is |
|---|---|
| `rtl/klessydra_t0_core.sv` | top level: pinout, thread replication, wiring |
| `rtl/harc_counter.sv` | picks the thread that fetches each cycle; inserts void slots |
| `rtl/pc_updater.sv` | PC register and next-PC logic of one thread |
| `rtl/fsm_IF.sv` | fetch stage and IF/ID register (Pulpino instruction port) |
| `rtl/fsm_ID.sv` | decode stage: operand read and one-hot decode into the ID/IE register |
| `rtl/fsm_IE.sv` | execute/write-back stage, the core's main state machine, load/store unit |
| `rtl/flush_logic.sv` | drops instructions of a thread that was just redirected |
| `rtl/reg_file.sv` | one 32 x 32-bit register file per thread |
| `rtl/csr_unit.sv` | CSRs, trap entry and MRET of one thread |
| `rtl/debug_unit.sv` | Pulpino-style debug port: halt, single step, register access |
| `rtl/core_clock_gate.sv` | latch-based clock gate on `clock_en_i` |
| `rtl/klessydra_pkg.sv` | shared types: one-hot operation indices, ID/IE record, CSR addresses |
| `tb/tb_*.sv` | one self-checking testbench per module, plus end-to-end and throughput tests |
| `tb/tb_mem_model.sv` | behavioural program/data memory with random stalls (simulation only) |
| `tb/rv_asm_pkg.sv` | RV32I instruction encoders used to write test programs in SystemVerilog |

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `THREAD_POOL_SIZE` | 3 | number of hardware threads (copies of PC, registers, CSRs) |
| `THREAD_POOL_BASELINE` | 2 | the fewest active threads that still fill every fetch slot; at least 2 |

The Klessydra naming is T0*BS*, with B the baseline and S the pool size. So
T022 is `THREAD_POOL_SIZE=2` and T024 is `THREAD_POOL_SIZE=4`, both with
baseline 2 and the same three-stage RTL. The full functional tests run at the
default size. T022 and T024 have only been run through the throughput test.

Variants with other pipeline depths were not built:

- T01x, with a two-stage pipeline;
- T03x, with a four-stage pipeline;
- the single-thread S0 core.

## The pipeline

```
            harc counter ──► harc_IF, void_IF
                 │
  pc[0..S-1] ──► PC mux ──► IF (fsm_IF) ──► ID (fsm_ID) ──► IE (fsm_IE) ──► register file of harc_IE
                     ▲          instr port      │ reads regs of       │ data port, CSR unit
                     │                          │ harc_ID             │ of harc_IE
                     └──────── redirect (branch / trap / MRET) ───────┘
```

Each cycle works like this:

1. **Thread selection.** The harc counter names the thread `harc_IF` whose PC
   is sent to program memory.
2. **Fetch (IF).** The fetch stage issues the request. When it is granted,
   that thread's PC advances by 4.
3. **Decode (ID).** The next cycle, the instruction word arrives in ID. The
   decoder reads rs1 and rs2 from the register file of `harc_ID` and turns the
   instruction into a one-hot operation vector, one bit per operation. It
   stores vector, immediate, operand values and thread id in the ID/IE
   register. One-hot costs flip-flops but takes decoding off the
   execute-stage critical path.
4. **Execute (IE).** The execute stage finishes the operation and writes the
   result into the register file of its thread in the same cycle.

ALU operations, jumps and branches take one cycle. Loads and stores wait for
the data memory. CSR instructions take two cycles.

The thread id travels with every instruction. The fetch and decode stages do
not otherwise know that there are several threads.

### Why there are no hazards: thread spacing

Take instruction *i* of thread *t*, fetched in cycle *c*:

- it is decoded (registers read) in cycle *c*+1;
- it writes back at the end of cycle *c*+2.

The next instruction of thread *t* must not read the registers before cycle
*c*+3, so it must not be fetched before cycle *c*+2. Fetches of one thread
must therefore be **at least two slots apart**. That is what a baseline of 2
means.

The harc counter enforces this rule:

- It walks round robin over the threads, skipping any thread that sleeps in
  WFI.
- If the next candidate issued within the last `THREAD_POOL_BASELINE-1`
  slots, the slot becomes a **void slot**. Nothing is fetched, and a bubble
  travels down the pipeline in its place.

| active threads | fetch sequence |
|---|---|
| 0, 1, 2 | 0 1 2 0 1 2 ... |
| 0, 2 | 0 2 0 2 ... |
| 1 only | 1 – 1 – 1 ... (– = void slot) |

The spacing is a property of the fetch order alone. Memory stalls only
stretch it, so correctness never depends on timing.

### Branches and flushes

A branch, jump, trap or MRET is resolved in IE. The new PC is written into the
thread's `pc_updater` in the same cycle, and that thread's next fetch already
uses it.

With three active threads, the thread's next instruction has not been fetched
yet when IE resolves, so nothing is lost. With fewer threads, one younger
instruction of the same thread may already be in flight:

- it may be fetched in the redirect cycle itself;
- or it may be waiting in ID.

The flush logic marks such an instruction, and it reaches IE as invalid. The
marking uses three signals:

- `flush_instruction_IF`: the instruction being fetched in the redirect cycle
  belongs to the redirected thread;
- its registered copy `flush_instr_previous_IF`, which follows that
  instruction into ID;
- `flush_instruction_ID`: the instruction now in ID belongs to the redirected
  thread.

Only instructions of the redirected thread are dropped. Other threads are
untouched.

The cost is one lost slot per taken branch when two threads run. With one
thread, each instruction is followed by a void slot, and each taken branch
also loses one slot to the flush.

### Stalls

There are two sources of stalls.

- **Program memory.** When it does not answer in one cycle, the ID slot waits
  for `instr_rvalid_i` and the stages behind it stall. When IE is busy while a
  word arrives, the fetch stage keeps the word in a holding register.
- **Execute stage.** IE holds the ID/IE register while it waits:
  - for a data grant (`DATA_GRANT`);
  - for data (`DATA_VALID_WAIT`);
  - for the CSR unit (`CSR_WAIT`).

While IE holds the register, no new fetch starts.

### The execute stage and the core states

`fsm_IE` is also the core's control state machine:

| State | Meaning |
|---|---|
| `RESET` | one cycle after reset, before the first fetch |
| `SLEEP` | idle: waiting for `fetch_enable_i`, or all threads sleep in WFI. `core_busy_o` is low here, so the platform may drop `clock_en_i` |
| `NORMAL` | executing; single-cycle instructions complete here |
| `DATA_GRANT` | data request raised, waiting for `data_gnt_i` |
| `DATA_VALID_WAIT` | waiting for `data_rvalid_i` |
| `CSR_WAIT` | waiting one cycle for the thread's CSR unit |
| `DEBUG` | halted; the debug unit has control |

**WFI.** A WFI takes its thread out of the harc counter's rotation; the other
threads keep running. The thread becomes active again as soon as its MIP
shows a pending interrupt, even with interrupts disabled. That is the RISC-V
meaning of WFI. When no thread is active and the pipeline is empty, the core
enters `SLEEP`. It returns to `NORMAL` when a thread wakes.

**Interrupts.**

- Pin: `irq_i` (with `irq_id_i`) is the external interrupt of **thread 0**.
- Other threads: a software interrupt, set by writing their own MIP.MSIP.
- Taking it: a pending, enabled interrupt of a thread is taken when the next
  instruction of that thread reaches IE. The instruction is not executed, its
  PC goes to MEPC, and the thread continues at MTVEC.
- Acknowledge: an external interrupt is acknowledged with a one-cycle
  `irq_ack_o` and `irq_id_o`, and its number is kept in the MIRQ CSR.

**Exceptions.** Each has a RISC-V cause code:

- illegal instruction;
- ECALL;
- misaligned load, store or jump target;
- data bus error (`data_err_i`).

A misaligned or faulting address is stored in MBADADDR.

**EBREAK** hands control to the debug unit, and execution continues at pc+4
when the debugger resumes.

**AMOSWAP.W** is the one atomic instruction, for locks shared by threads. IE
reads the word, then writes rs2 to the same address, and only then returns
the old value to rd. The pipeline behind IE is frozen the whole time, so no
other thread can reach memory between the read and the write. The test
programs use it as a spin lock.

**Loads and stores** follow the Pulpino data port:

- the address is the byte address;
- `data_be_o` marks the byte lanes;
- write data is replicated onto those lanes;
- read data is taken from its lanes and sign- or zero-extended.

### Control and status registers

Each thread has its own `csr_unit`:

| CSR | Address | Notes |
|---|---|---|
| MSTATUS | 0x300 | only MIE (bit 3) |
| MTVEC | 0x305 | resets to boot address + 0x80 |
| MEPC, MCAUSE, MBADADDR | 0x341–0x343 | written on trap entry |
| MIP | 0x344 | bit 11 external (read only, thread 0), bit 3 software (writable) |
| MHPMEVENT3 | 0x323 | event select: bit 0 cycles, 1 retired, 2 loads/stores, 3 taken branches, 4 `ext_perf_counters_i` |
| MHPMCOUNTER3 | 0xB03 | counts while PCER bit 0 is set |
| PCER | 0x7A0 | counter enable |
| MESTATUS | 0x7C0 | MIE saved on trap entry, restored by MRET |
| MCPUID, MIMPID | 0xF00, 0xF13 | constants 0x101, 0x23 |
| MHARTID | 0xF14 | {cluster_id, core_id, thread number} |
| MIRQ | 0xFC0 | number of the last external interrupt taken |

Other behaviour of the CSR unit:

- An unknown address raises an illegal-instruction trap.
- CSRRS and CSRRC with a zero operand read without writing.
- Trap entry and MRET are handled in the same unit, so the three ways a CSR
  can change are all in one place.

### Debug unit

The debug port follows the Pulpino protocol:

- the grant comes in the request cycle;
- read data comes with `debug_rvalid_o` one cycle later.

Three things halt the core:

- `debug_halt_i`;
- a write of DBG_CTRL with HALT set;
- an EBREAK.

On a halt request fetching stops, the instructions already fetched complete,
and IE enters `DEBUG`.

| Address | Register |
|---|---|
| 0x0000 | DBG_CTRL: bit 16 HALT, bit 0 SSTE (single-step enable) |
| 0x0004 | DBG_HIT: bit 0 SSTH, set when a single step has completed |
| 0x000C | DBG_CAUSE: 3 = EBREAK, 0x1F = halt request |
| 0x0400 + 0x80·t + 4·r | register x*r* of thread *t* (writes only while halted) |
| 0x2000 + 4·t | next PC of thread *t* (read only) |

Resuming is done with `debug_resume_i` or by writing HALT = 0. With SSTE set,
each resume grants exactly one instruction fetch. The core then drains, halts
again and sets SSTH.

### Clock gating

`core_clock_gate` is the usual latch-and-AND gate. The enable is
`clock_en_i OR test_en_i`, and it is latched while the clock is low, so the
gated clock cannot glitch. It is the only latch in the design.

## Pinout

The top-level ports match the RI5CY core socket of Pulpino:

- clock, reset and configuration: `clk_i`, `clock_en_i`, `test_en_i`,
  `rst_ni`, `boot_addr_i`, `core_id_i`, `cluster_id_i`, `fetch_enable_i`,
  `core_busy_o`;
- instruction port: `instr_req_o`, `instr_gnt_i`, `instr_rvalid_i`,
  `instr_addr_o`, `instr_rdata_i`;
- data port: `data_req_o`, `data_gnt_i`, `data_rvalid_i`, `data_we_o`,
  `data_be_o`, `data_addr_o`, `data_wdata_o`, `data_rdata_i`, `data_err_i`;
- interrupts: `irq_i`, `irq_id_i`, `irq_ack_o`, `irq_id_o`;
- debug port: `debug_req_i`, `debug_gnt_o`, `debug_rvalid_o`,
  `debug_addr_i` (15 bits), `debug_we_i`, `debug_wdata_i`, `debug_rdata_o`,
  `debug_halted_o`, `debug_halt_i`, `debug_resume_i`;
- `ext_perf_counters_i` (3 bits).

That is 321 signals in all.

Every thread starts at `boot_addr_i`, and a program tells the threads apart
by reading MHARTID.

Some outputs are plain copies of inputs, as in the Pulpino core:

- `debug_gnt_o` is `debug_req_i`;
- `irq_id_o` is `irq_id_i`.

## Throughput

The test `tb/tb_workload_throughput.sv` runs three cores side by side:

- T022, with `THREAD_POOL_SIZE=2`;
- T023, the default;
- T024, with `THREAD_POOL_SIZE=4`.

Each core has a memory that answers every access in one cycle. Each active
thread loops over a kernel of six instructions: five ALU operations and a
taken jump. The remaining threads sleep in WFI. The test counts the
instructions retired in a 1400-cycle window.

The interleaving predicts these rates for a kernel of k instructions:

- one thread: k/(2(k+1)), because a void slot follows every instruction and
  each taken jump flushes one slot;
- two threads: k/(k+1), with one flushed slot per taken jump;
- three or more threads: 1.

| active threads | expected (k = 6) | measured IPC (T022 / T023 / T024) | published IPC = MIPS × cycle time |
|---|---|---|---|
| 1 | 6/14 = 0.4286 | 0.4286 / 0.4286 / 0.4286 | T022 48.43×8.9 ns, T023 44.44×9.7 ns, T024 45.85×9.4 ns, all ≈ 0.431 |
| 2 | 6/7 = 0.8571 | 0.8571 / 0.8571 / 0.8571 | 96.86×8.9, 88.87×9.7, 91.71×9.4, all ≈ 0.862 |
| 3 | 1 | – / 1.0000 / 1.0000 | T023 103.09×9.7, T024 106.38×9.4, both 1.000 |
| 4 | 1 | – / – / 1.0000 | T024 106.38×9.4 = 1.000 |

The published kernels are not known, so the six-instruction loop is an
assumption. Still, all published three-stage figures fit this
microarchitecture with one taken branch about every six instructions. The
one-thread rate is exactly half the two-thread rate, and the rate is one
instruction per cycle once three threads run.

The clock periods (8.9 to 9.7 ns on a Xilinx Series 7 FPGA) are not
reproduced here. No timing analysis was done.

## Verification

Every testbench checks itself and ends with the line
`TB_RESULT checks=<n> failures=<n>`. Each one has a watchdog. Random
stimulus comes from `$urandom`.

| Testbench | What it checks |
|---|---|
| `tb_harc_counter` | issue order and void slots for several active-thread masks; no thread in adjacent slots |
| `tb_pc_updater` | random event mixes against a priority model (exception/interrupt > MRET > branch > +4) |
| `tb_fsm_IF` | one fetch per cycle with a fast memory; with random grant and pipeline stalls, every word reaches ID once, in order, with its PC |
| `tb_fsm_ID` | all RV32I/SYSTEM/AMO encodings: one-hot operation, immediate, register fields, hold and flush |
| `tb_fsm_IE` | random instruction records against a reference model (results, branch targets, traps and causes, memory contents); interrupts, WFI, SLEEP, DEBUG |
| `tb_reg_file` | random reads and writes on all ports of three banks; x0 |
| `tb_flush_logic` | a scoreboard of which instruction in ID belongs to a redirected thread |
| `tb_csr_unit` | random CSR instructions, traps and MRETs against a model; the performance counter |
| `tb_debug_unit` | bus timing, halt by register, pin and EBREAK, resume, GPR and NPC access, single step |
| `tb_core_clock_gate` | gated edges, no glitches, no cut pulses under random enable changes |
| `tb_klessydra_t0_core` | end to end, default parameters (see below) |
| `tb_workload_throughput` | the throughput table above (uses `tb_throughput_bench`, one core and memory per configuration) |

The end-to-end test runs one program on all three threads. Each thread:

- sums a series in a branch loop;
- stores the sum with SW, SB and SH, and reads it back with LW, LBU and LH;
- increments a shared counter under an AMOSWAP lock;
- traps with ECALL into a handler.

Then all threads sleep in WFI, and the core drops into `SLEEP` while the
testbench stops its clock. An external interrupt wakes thread 0, and an
EBREAK then hands the core to the debugger. The testbench reads registers of
every thread and the next PCs through the debug port, single-steps one
instruction and resumes.

Memory stalls on both ports are random throughout. The test counts how often
each mechanism occurred and fails if any never did:

- void slots;
- flushes;
- fetch and data stalls;
- CSR waits;
- traps;
- interrupts;
- thread and core sleep;
- debug halt and single step;
- AMOSWAP.

It reads internal signals by hierarchical name to do this.

Every testbench was also run against a copy of its module with one
deliberate bug, and each one failed on that copy.

To run one with Verilator, list the packages first:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/klessydra_pkg.sv tb/rv_asm_pkg.sv tb/tb_klessydra_t0_core.sv \
  --top-module tb_klessydra_t0_core -o sim
./obj_dir/sim
```

Each testbench finishes in well under a second of simulation time.

## Design choices not fixed by the published description

Each of these is this implementation's own decision:

- **Void-slot rule.** A slot is void when the next thread issued within the
  last baseline−1 slots. The published description says only that NOPs are
  inserted when too few threads are active.
- **Next-PC priority.** Exception/interrupt first, then MRET, then branch,
  then +4. A redirect is applied in the cycle it is raised. The
  `branch_condition_pending` signal exists but is informational.
- **No separate "WFI wait" state.** A published core state serves the
  single-thread S0 core. Here WFI works per thread, and the whole core sleeps
  only when every thread does.
- **Interrupt routing.** The external interrupt belongs to thread 0. An
  interrupt is taken on an instruction of the target thread reaching IE.
- **AMOSWAP.** It is done as a read then a write with the pipeline frozen.
- **Exact addresses and bit positions.** This covers the CSR addresses
  outside the RISC-V standard (PCER, MESTATUS, MIRQ, MCPUID) and the debug
  register map. The values chosen are those of the Pulpino/RI5CY family.
- **CSR details.** The MCPUID and MIMPID values, the MHARTID layout, the MTVEC
  reset value and the choice of counter events are all own choices.
- **Register-file ports.** Two read ports and one write port shared by all
  banks, plus a debug port. All registers reset to 0.
- **FENCE and FENCE.I** are no-operations. There is no cache or prefetch
  buffer to synchronise.
- **`ext_perf_counters_i`** is 3 bits wide, which makes the pin total 321.

## Limits

- Only the three-stage T02x family is implemented. The two- and four-stage
  variants and S0 are absent.
- Only the default 3-thread configuration has been verified functionally.
  Pool sizes 2 and 4 have only run the throughput kernel.
- Of the RVA extension, only AMOSWAP.W exists, as in the original core
  family. Compressed instructions, user mode and vectored interrupts are not
  supported.
- The register file is built from flip-flops: 3 × 32 × 32 bits, x0 included.
  After generic synthesis the core has about 1270 cells and 4370 flip-flop
  bits. An FPGA or ASIC flow would map the register file to memories.
- Synthesis tools may warn about the intended clock-gate latch, about the
  wide `harc` index used on 3-entry arrays (only the low bits matter), and
  about assertion code that reads the reset signal.
