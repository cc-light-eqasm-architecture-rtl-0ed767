# CC-Light eQASM processor in SystemVerilog

A superconducting quantum chip needs a classical controller that issues
single- and two-qubit gates with nanosecond-exact timing. It must also react
to measurement results fast enough for feedback. eQASM is an instruction set
for such a controller. An ordinary 32-bit integer pipeline (registers, ALU,
compare, branch, load/store) sits next to a quantum front end. In the quantum
front end, *instructions only describe when and where operations happen*:
- timing is written down explicitly, as waits between timing points;
- the target qubits are held in mask registers;
- what each opcode means physically is set in a configurable control store.

A queue-based timing back end then replays those operations on the exact
cycle. The instruction stream itself may run ahead of time.

This RTL implements the CC-Light instantiation of eQASM:
- seven qubits and sixteen directed qubit pairs;
- 32 general-purpose registers (GPRs);
- 32 single-qubit target registers S0..S31 and 32 two-qubit target registers T0..T31;
- 9-bit quantum opcodes, with two operations per bundle word;
- a 20 ns timing cycle, so one clock is one timing cycle at 50 MHz.

## Overall structure

```
             host ports                                   qubit-side ports
  imem load ──► instr_mem ─┐                        ┌──► cw_valid/cw [7]  (to pulse generators)
  dmem port ──► data_mem ◄─┤                        ├──► meas_trig [7]
  uc config ──► microcode_unit                      │
                    ▲      │                        │
                    │      ▼                        │
               ┌────┴── eqasm_core ──► timing_controller ──emit label──┐
               │  gpr_file, alu, comp_flags,          ▲ tl_close        ▼
               │  qotr_file, 2 x pair_mask_decoder    │         event_distributor
               │           │  event records per qubit └──────── (7 event_queues)
               │           └──────────────────────────────────────────►│
               │                                                       │
               └── FMR ◄── qmrr_file ◄── meas_res_valid/meas_res ──────┤
                           exec_flags ◄──────────────────── (flags) ───┘
```

| module | role |
|---|---|
| `eqasm_pkg` | widths, opcodes, flag codes, the control-store entry and event record types, the pair table |
| `cclight_top` | the whole processor; host, codeword and readout sides are plain ports |
| `eqasm_core` | fetch/execute pipeline for every instruction, expansion of bundle words to per-qubit events |
| `gpr_file`, `alu`, `comp_flags` | classical datapath: R0..R31, ADD/SUB/AND/OR/XOR/NOT, the twelve CMP flags |
| `instr_mem`, `data_mem` | 32768-word instruction store (17-bit byte PC), 1024-word dual-port data memory |
| `qotr_file` | S0..S31 (7-bit qubit masks) and T0..T31 (16-bit pair masks) |
| `pair_mask_decoder` | turns a T mask into per-qubit "source" and "target" roles |
| `microcode_unit` | 512-entry control store: opcode → codewords, measurement bit, execution-flag select |
| `timing_controller` | timing queue of {label, interval} and the timer that releases labels |
| `event_distributor`, `event_queue` | one operation queue per qubit; fires operations when their label is released |
| `qmrr_file` | measurement result registers Q0..Q6, with validity |
| `exec_flags` | four execution flags per qubit, for fast conditional execution |

## Instruction encoding

Every instruction is a 32-bit word. Bit 31 tells the two formats apart.

**Single-format word (bit 31 = 0).**

| bits | field |
|---|---|
| [30:25] | opcode |
| [24:20] | Rd |
| [19:15] | Rs |
| [14:10] | Rt |
| [9:0] | imm10 (LD/ST) |

Some instructions lay out their fields differently:

| instruction | fields |
|---|---|
| BR | bits [24:4] hold a 21-bit immediate, whose low 15 bits are the word offset; bits [3:0] hold the comparison-flag code |
| LDI | 20-bit sign-extended immediate in [19:0] |
| LDUI | Rd = {imm15, Rs[16:0]} |
| FMR | qubit index in [2:0] |
| QWAIT | 20-bit interval in [19:0] |
| QWAITR | takes its interval from Rs[19:0] |
| SMIS | Sd in [24:19] (6 bits, of which the low five address the 32 registers); 7-bit qubit mask in [6:0] |
| SMIT | Td in [24:19]; 16-bit pair mask in [15:0] |

The opcode constants are in `eqasm_pkg`. One departure from the published
tables: they print the same code for QWAIT and SMIS (0100000). Here SMIS keeps
that code, and QWAIT/QWAITR use 0110000/0110001, the codes of the CC-Light
assembler. Change `OP_QWAIT`/`OP_QWAITR` if your tool chain differs.

**Bundle word (bit 31 = 1).**

| bits | field |
|---|---|
| [30:22] | opcode of slot 0 |
| [21:17] | S or T register of slot 0 |
| [16:8] | opcode of slot 1 |
| [7:3] | S or T register of slot 1 |
| [2:0] | PI, the pre-interval |

Opcode 0 is QNOP, and a QNOP slot is ignored. Whether a slot's register is an
S or a T register is not encoded in the word. The control-store entry for the
opcode decides it (`two_qubit`).

## The classical pipeline (`eqasm_core`)

The pipeline has two stages.
- **F (fetch)** sends PC[16:2] to the synchronous instruction memory.
- **X (execute)** decodes the returned word, reads the GPRs, executes, and writes back, all in the same cycle.

Consequences:
- **No delay slot.** A taken branch steers the next fetch address straight to the target, so no instruction after a taken BR executes. The target is `PC + (imm[14:0] << 2)`, with PC the address of the BR.
- **Every dependence is resolved in hardware.** This covers GPR → GPR, CMP → BR/FBR and measurement → FMR. The published compiler spacing rules are still harmless. Those rules are one instruction between CMP and BR/FBR, and two between a measurement and FMR.
- **Stalls.** X holds its instruction and refetches its own address when:
  - an LD waits one cycle for the data memory, so LD takes 2 cycles;
  - an FMR waits for its Qi to be valid;
  - a quantum instruction finds the timing queue full, a target qubit's event queue full, or a qubit's outstanding-measurement counter saturated;
  - STOP has executed. STOP repeats forever and drives `stopped`.

**Comparison flags.** CMP stores twelve flags, using codes 0..11 in this order:

| code | flag | code | flag | code | flag | code | flag |
|---|---|---|---|---|---|---|---|
| 0 | ALWAYS | 3 | NE | 6 | LEU | 9 | GE |
| 1 | NEVER | 4 | LTU | 7 | GTU | 10 | LE |
| 2 | EQ | 5 | GEU | 8 | LT | 11 | GT |

Each flag compares Rt against Rs. For example, LT means Rt < Rs.

**SUB** computes Rs − Rt, as in the instruction's pseudo-code. The prose
description reads the other way round, and the pseudo-code was followed.

**LD and ST** address the word at `Rt + sext(imm10)`. Only bits [11:2] are
used, so the address wraps in the 1024-word memory.

**`run`.** While `run` is low, the core is held at PC 0 with nothing in flight.
The host loads the instruction memory, the data memory and the control store
through their ports, then raises `run`.

## Quantum front end: from a bundle word to per-qubit events

**Timing points.** The core keeps a current timing label. These instructions
open a new timing point:
- QWAIT and QWAITR;
- a bundle word with PI > 0.

Each one increments the label and pushes {label, interval} to the timing
controller. The interval counts cycles after the previous timing point.

**Expanding a bundle.** For each non-QNOP slot of a bundle word:
1. The opcode is looked up in the control store, which has two read ports (one per slot).
2. The addressed S or T register is read.
3. An S mask selects qubits directly.
4. A T mask goes through `pair_mask_decoder`. Each set bit *k* names a directed pair (source → target):

   | bits | pairs |
   |---|---|
   | 0–3 | 2→0, 0→3, 3→1, 1→4 |
   | 4–7 | 2→5, 5→3, 3→6, 6→4 |
   | 8–11 | 0→2, 3→0, 1→3, 4→1 |
   | 12–15 | 5→2, 3→5, 6→3, 4→6 |

   This table is the chip's coupling map, and it lives in `eqasm_pkg::pair_of`.
5. Every selected qubit gets one event record in its own event queue: {label, codeword, execution-flag select, is-measurement}. Sources of a pair get the entry's `cw_src`, and targets get `cw_tgt`. A single-qubit operation uses `cw_src`.

**Conflicts.** If the two slots of a bundle touch the same qubit, slot 0 wins
and the sticky `op_conflict` output is set. The same happens when one T mask
names a qubit twice.

**Measurements.** A measurement event also increments that qubit's
outstanding-measurement count in `qmrr_file`.

## Queue-based timing: the subtle part

The core runs ahead of the timeline and fills two kinds of queue: the timing
queue with timing points, and the event queues with operations. Time only
exists on the output side.

**Releasing labels.** `timing_controller` keeps a counter of cycles since the
last released label. It releases (`emit`) the head label once the counter
reaches that point's interval.

**When a point is complete.** A timing point can still collect operations
until the next point is opened: bundle words with PI = 0 add to the current
point. So the newest point is held back until one of these happens:
- a later point has been queued;
- the core signals `tl_close`, because it has stopped or is waiting in FMR.

The FMR case matters. A program that measures and then immediately reads the
result would otherwise wait forever for its own measurement.

**Late points.** If a point is released after its time has passed, `late`
pulses and the top's sticky `timing_late` is set. This means the program did
not run far enough ahead. Any following intervals are then counted from the
late release. The label queue starts with label 0 at interval 0, which marks
the start of the timeline.

**Firing operations.** `event_distributor` watches the released label. Each
qubit whose oldest queued event carries that label pops it, one cycle later:
- if the selected execution flag of that qubit is 1 at that moment, it drives `cw_valid[q]`/`cw[q]` and, for a measurement, `meas_trig[q]`;
- if the flag is 0, the operation is dropped. A dropped measurement pulses `meas_cancel`, so the result register stops waiting for it.

A second operation for the same qubit in one timing point can happen when the
slots hit the same qubit in different bundle words of one point. It fires one
cycle later and is reported through `late_fire`.

**Depths.** The timing queue holds 32 points and each event queue 16 records.
When a queue is full the core stalls, which throttles the program but never
loses an operation. The end-to-end test shows this: an event queue fills, so
only the 16 buffered operations keep their 1-cycle spacing. The rest of the
burst follows as fast as the core can issue them, and those points are
flagged late.

## Measurement results, FMR and fast conditional execution

- **`qmrr_file`** keeps, per qubit, the last result and a 4-bit count of issued but unfinished measurements. Qi is valid when that count is zero. FMR stalls until it is valid, then copies Qi into Rd.
- **`exec_flags`** keeps the last two finished results per qubit and forms four flags:

  | index | flag |
  |---|---|
  | 0 | always 1 |
  | 1 | last result was 1 |
  | 2 | last result was 0 |
  | 3 | last two results were equal |

  Which flag gates an operation is part of its control-store entry (`cond`). This gives feedback with no round trip through the instruction stream: an operation can depend on a measurement that finished only a few cycles earlier.

## Control store

The control store (`microcode_unit`) has one `ucode_t` entry per 9-bit opcode:

| field | meaning |
|---|---|
| `two_qubit` | the slot's register is a T register rather than an S register |
| `is_meas` | the operation is a measurement |
| `cond` | which execution flag gates it |
| `cw_src` | codeword for a single-qubit operation or a pair's source |
| `cw_tgt` | codeword for a pair's target |
| `dly2` | 0, or the distance in cycles (1..15) of a second codeword |
| `cw2_src`, `cw2_tgt` | the second codewords for the source and target sides |

The entry format is this design's own. An opcode therefore expands into one
or two timed codewords per qubit. A two-qubit gate can, for example, be a flux
pulse followed a few cycles later by a phase-correction codeword.

The second codeword is timed in `event_distributor` by a per-qubit countdown.
It uses the same execution-flag decision as the first. If a new operation
needs the qubit's output in the cycle the second codeword falls due, the new
operation goes first, the second codeword slips by one cycle, and `late_fire`
reports it. If a new two-codeword operation fires while a second codeword is
still pending, the pending one is lost and the sticky `op_conflict` output is
set.

It is written through the `host_uc_*` port, one entry per clock. It has no
reset, so every opcode a program uses must be configured.

## Interfaces and timing of the top

- **Host side:**
  - `host_imem_*` loads 32-bit words;
  - `host_dmem_*` is a second port to data memory, with reads one cycle later;
  - `host_uc_*` writes the control store;
  - `run` starts the program;
  - `stopped` reports that STOP has executed;
  - `pc` and `retire` show progress;
  - `timing_late` and `op_conflict` are sticky error flags.
- **Qubit side:**
  - `cw_valid[q]`, `cw[q]` (8-bit codeword) and `meas_trig[q]` pulse for one cycle, one cycle after the label is released;
  - readout results come back on `meas_res_valid[q]`/`meas_res[q]`, at any later time.
- **Reset** is asynchronous and active low. GPRs, flags, S/T registers, queues and result registers clear. The memories and the control store do not.

## Departures and open points

- **QWAIT/QWAITR opcodes.** They are changed, as described above.
- **Comparison-flag code values.** They are not printed in the source tables. Table order was used.
- **BLTU macro.** The macro text compares in the opposite direction to the flag table. The flag table and the CMP pseudo-code were followed.
- **Control store.** An opcode expands into at most two codewords per qubit, 1..15 cycles apart. Longer decompositions would need more entry fields or chained entries. The entry format and the per-opcode flag select are this design's choices.
- **Release rule.** The rule for holding the newest timing point, `tl_close` and the late flags are this design's. The source describes the queues only at the level of "buffer timing points and operations".
- **Undocumented sizes.** The data memory depth (1024 words), queue depths (32 timing points, 16 events per qubit), the 8-bit timing label and the 4-bit outstanding-measurement counter are not documented in the source. They are parameters on `cclight_top` or in `eqasm_pkg`.
- **Out of scope.** The analog parts are not part of the RTL: pulse generation, readout and discrimination, and the qubits. The host CPU and its protocol are also out of scope.

## Simulation

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
by printing `TB_RESULT checks=N failures=M`, and each has a watchdog. The
instruction encoders used by the core and top tests are in
`tb/eqasm_asm_pkg.sv`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl +libext+.sv \
  rtl/eqasm_pkg.sv tb/eqasm_asm_pkg.sv rtl/cclight_top.sv tb/tb_cclight_top.sv \
  --top-module tb_cclight_top -o sim && obj_dir/sim
```

(`-Wno-fatal` keeps the width warnings of the testbench helper calls from stopping the build.) `tb_cclight_top` runs the processor at its default sizes, about 10k cycles in
a few seconds. The testbench plays both sides:
- **Host:** it loads a program, configures the control store, and reads back a data-memory result after STOP.
- **Qubit side:** it records every codeword with its cycle and answers each measurement after 15 cycles.

The program is built around the feedback pattern: measure q1, FMR, CMP, BR,
then X or Y on q0. It adds:
- parallel one- and two-qubit operations;
- gated operations that run and that are dropped;
- a data-memory round trip;
- a burst that fills an event queue;
- 40 QWAITs that fill the timing queue;
- a deliberately late point.

The testbench checks codewords and their cycle spacing. It counts each
mechanism: FMR stall, load stall, event-queue stall, timing-queue stall, taken
branch, conditional execution and drop, measurement cancel, late release. Any
mechanism that never happened is a failure. Add `+trace` for a cycle trace.

`tb_workloads` runs the processor at its default sizes too. It configures the
control store with the complete CC-Light opcode map:
- prepz and MeasZ;
- the microwave codewords;
- the C0/C1 conditional groups, gated by "last result 0" and "last result 1";
- the flux pair operations.

It then runs three experiment-style programs against a small qubit model:
- a T1 sweep, with QWAITR delays taken from a register, FMR, and results stored to data memory;
- an unrolled Rabi amplitude sweep;
- a three-qubit Grover-shaped circuit: an H layer, a CZ oracle on a coupled pair, a second H layer, a conditional operation, and a parallel measurement.

It checks every result and the exact cycle spacing between pulses and
measurements.
