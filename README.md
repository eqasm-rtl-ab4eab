# An eQASM processor for a seven-qubit superconducting chip

A quantum computer's control electronics must do two things that pull in
opposite directions. Quantum operations have to reach the qubits on a
rigid, nanosecond-exact schedule. Yet a real quantum program is also a
*classical* program: it loops, branches on measurement results, and keeps
numbers in registers, none of which happens on a fixed schedule.

eQASM (executable QASM) is an instruction set that holds both sides in one
binary. Classical instructions (arithmetic, compare, branch, load/store, and
`FMR`, which fetches a measurement result into a register) run on an
ordinary pipeline at whatever speed they can. Quantum instructions do not
act on the qubits directly. They *book* operations on a timeline: each
waiting interval creates a new timing point, and each quantum operation is
attached to the most recent one. A separate timing controller replays that
timeline in real time, counting 20 ns cycles, and fires every booked
operation exactly at its point. As long as the instruction stream runs
ahead of the timeline, classical work costs nothing in quantum time.

This repository is synthesizable SystemVerilog for the digital part of the
control microarchitecture that implements the 32-bit eQASM instantiation
for a seven-qubit chip. It covers everything between the program memory and
the codeword triggers sent to the pulse generators. It also covers the
return path that brings measurement results back into the program. The
analog side (waveform generators, readout discrimination, microwave
switching, the qubits) is outside the design; the testbenches model only
what they need of it.

## The instruction set as built

Every instruction is 32 bits wide. Bit 31 selects the format.

**Quantum bundle** (bit 31 = 1): two quantum operations and a pre-interval.

| bits   | 31 | 30:22       | 21:17     | 16:8        | 7:3       | 2:0 |
|--------|----|-------------|-----------|-------------|-----------|-----|
| field  | 1  | q_opcode 0  | Si/Ti 0   | q_opcode 1  | Si/Ti 1   | PI  |

`PI` (pre-interval, 0..7 cycles) is the distance from the previous timing
point to the point at which both operations start. Writing `PI, op` is the
same as `QWAIT PI` followed by `op`. `PI = 0` adds the operations to the
previous timing point. That is how a bundle wider than two operations is
written over several instructions. q_opcode 0 is `QNOP`, an empty slot.

**Single format** (bit 31 = 0), opcode in bits 30:25:

| instruction        | opcode | fields used                                   |
|--------------------|--------|-----------------------------------------------|
| `NOP`              | 0x00   |                                               |
| `STOP`             | 0x01   | end of program; flushes the timeline          |
| `ADD/SUB/AND/OR/XOR Rd, Rs, Rt` | 0x02..0x06 | Rd 24:20, Rs 19:15, Rt 14:10 |
| `NOT Rd, Rt`       | 0x07   |                                               |
| `CMP Rs, Rt`       | 0x08   | sets all comparison flags                     |
| `BR flag, off`     | 0x09   | flag 24:21, signed offset 20:0 from this BR   |
| `FBR flag, Rd`     | 0x0A   | Rd 24:20, flag 3:0; Rd := flag (0/1)          |
| `LDI Rd, imm`      | 0x0B   | signed 20-bit immediate 19:0                  |
| `LDUI Rd, Rs, imm` | 0x0C   | Rd := imm[14:0] :: Rs[16:0]                   |
| `LD Rd, Rt(imm)`   | 0x0D   | word address Rt + signed imm[9:0]             |
| `ST Rs, Rt(imm)`   | 0x0E   | as LD                                         |
| `FMR Rd, Qi`       | 0x0F   | Qi in 2:0                                     |
| `SMIS Sd, mask`    | 0x20   | Sd 24:20, 7-bit qubit mask 6:0                |
| `SMIT Td, mask`    | 0x21   | Td 24:20, 16-bit pair mask 15:0               |
| `QWAIT imm`        | 0x22   | 20-bit interval 19:0                          |
| `QWAITR Rs`        | 0x23   | Rs 19:15; low 20 bits of Rs are the interval  |

Comparison flags (4-bit codes 0..11): ALWAYS, NEVER, EQ, NE, LT, LE, GT, GE,
LTU, LEU, GTU, GEU.

The quantum formats (bundle, SMIS, SMIT, QWAIT, QWAITR), their field widths
and the semantics of every instruction follow the eQASM definition. The
opcode numbers, the positions of the classical fields and the flag codes are
this design's own, because the definition leaves them open. They are
collected in `rtl/eqasm_pkg.sv`. The testbench include file
`tb/eqasm_asm.svh` has one encoder function per instruction and serves as a
small assembler.

## Addressing qubits: masks, pairs and OpSel

A quantum operation does not name its qubits. It names a *target register*,
either `Si` (32 registers, each a 7-bit qubit mask) or `Ti` (32 registers,
each a 16-bit mask of allowed qubit pairs). `SMIS`/`SMIT` write them. One
operation on a register with several bits set acts on all those qubits at
once (single-operation-multiple-qubit, SOMQ).

The chip has 16 allowed, directed pairs: eight couplings, each usable in both
directions. Pair *k* and pair *k+8* join the same two qubits in opposite
directions:

| pair   | 0   | 1   | 2   | 3   | 4   | 5   | 6   | 7   |
|--------|-----|-----|-----|-----|-----|-----|-----|-----|
| src→tgt| 2→0 | 0→3 | 3→1 | 1→4 | 2→5 | 5→3 | 3→6 | 6→4 |

(pairs 8..15 are the same couplings reversed). The coupling that each pair
number belongs to is taken from the chip's topology drawing. The direction
is fixed only for the pairs of qubit 0: 2→0 is pair 0 and 0→3 is pair 1.
For the other couplings, this design gives the lower number to the
direction shown in the table, which continues the same pattern. The
opposite choice would only swap the meaning of `Ti` bits *k* and *k+8*.

The Q control store (one per lane, written by the host) turns a 9-bit
q_opcode into either one micro-operation `μop_s` (single-qubit operation) or
two, `μop_src` and `μop_tgt` (two-qubit operation). The microinstruction
buffer then computes a 2-bit selector OpSel for every qubit:

| OpSel | meaning        |
|-------|----------------|
| 00    | no operation   |
| 01    | apply μop_src  |
| 10    | apply μop_tgt  |
| 11    | apply μop_s    |

For a single-qubit operation, OpSel*i* = 11 where bit *i* of `Si` is set. For
a two-qubit operation, OpSel*i* is the OR of the `Ti` bits of the pairs in
which qubit *i* is the target (high bit) and the OR of those in which it is
the source (low bit). For qubit 0 that is `{Ti[0]|Ti[9], Ti[1]|Ti[8]}`. A
`Ti` value that selects two pairs sharing a qubit cannot be applied. The
buffer flags it, and the processor stops with `error`, as for any other
conflict.

A micro-operation is `{device type, 8-bit codeword, execution-flag select}`.
The device types are microwave, flux and measurement. `DEV_NONE` marks
"nothing".

## From instruction to timing point

```
 classical   quantum      timestamp   VLIW lane 0  \   operation     device event   timing control  fast cond.
 pipeline -> instruction -> manager -> VLIW lane 1  -> combination -> distributor -> unit         -> execution -> ADI
 (100 MHz)   decoder       (labels)   (Ti/Si, Q control store,   (merge,     (per device    (queues, 20 ns  (flags)
                                       OpSel)                     buffer)     and qubit)     timer)
```

* **Timestamp manager.** A `QWAIT`, a `QWAITR` or a bundle whose PI is not
  zero opens a new timing point and gives it the next 8-bit *label*. An
  interval of zero leaves the current point open. `QWAIT 0` therefore
  behaves like `NOP`, and a `PI = 0` bundle joins the previous bundle.
* **VLIW lanes.** Each lane handles one slot of the bundle. It reads its
  target register and its Q control store, then selects a micro-operation
  per qubit. Each lane keeps its own copy of all target registers, and
  SMIS/SMIT write both copies.
* **Operation combination.** This block merges the two lanes' per-qubit
  outputs. It also collects every bundle instruction that belongs to the
  open timing point. The collected point is handed on only when the *next*
  point opens, or at `STOP`, because only then is it known to be complete.
  Two operations on one qubit stop the processor with `error`. This holds
  whether both come from the two lanes of one instruction (`lane_conflict`)
  or from two instructions of the same point (`bundle_conflict`). When a
  point leaves this block, it raises the pending-measurement counter of
  every qubit it measures.
* **Device event distributor.** This block splits a point into one timing
  queue entry `{label, interval}` and up to 21 device operations
  `{label, codeword, flag select}`, one for each device type and qubit
  channel.
* **Timing control unit.** It holds a timing queue (64 points) and one event
  queue per channel (32 operations each). The timer counts 20 ns cycles since
  the last point it fired. When the count reaches the interval of the head
  point, it pops that point, together with the head of every event queue
  carrying the same label. The timeline starts when the external `tl_start`
  trigger arrives, so the host can let the program run ahead and fill the
  queues first.

**Two clock rates.** All logic runs on one clock (100 MHz, 10 ns). The timing
control unit and fast conditional execution advance only on `tick`, which is
high for one clock in every `CLK_DIV = 2`. That gives the 50 MHz, 20 ns
quantum cycle without a second clock domain. `tick` is an output, and the
devices sample `adi_*` and present `res_*` on the same grid.

**Back-pressure and underrun.** When any queue has 8 or fewer free entries,
the classical pipeline stops issuing quantum instructions (`q_stall`). Eight
entries cover what is already in flight between the pipeline and the queues.
Classical instructions that need no quantum slot are held as well, because
issue is in order. The opposite failure is a point that arrives at the queue
head after its time has passed, because the program could not keep up. Such
a point fires at once and sets the sticky `underrun` flag. A correct
schedule never sets it.

## Feedback from measurements

There are two feedback paths, with different costs.

**Fast conditional execution** acts at the end of the pipeline. For every
qubit it keeps the last two measurement results that have returned, and
derives four flags from them:

| select | flag is 1 when                       |
|--------|--------------------------------------|
| 0      | always                               |
| 1      | last result was \|1⟩                 |
| 2      | last result was \|0⟩                 |
| 3      | last two results were equal          |

Each micro-operation carries a flag select, fixed in the Q control store.
When the timer fires an operation, the operation reaches the device only if
its qubit's selected flag is 1. Otherwise it is dropped (`cancelled`). A
conditional `C_X` that resets a qubit to |0⟩ after a |1⟩ result is one
instruction, with no branch. Results update the flags on the tick on which
they arrive, and an operation fired on that same tick already sees them.
Both stored results reset to |0⟩.

**Comprehensive feedback control (CFC)** hands the result to the program.
Each qubit has a result register `Qi` and a counter `Ci` of measurements
issued but not yet returned. A measurement increments `Ci`. A returned (or
cancelled) result decrements it. `Qi` is valid only when `Ci = 0`.
`FMR Rd, Qi` stalls the classical pipeline (`fmr_stall`) until `Qi` is
valid. It therefore always reads the result of the *latest* measurement of
that qubit, however far the instruction stream has run ahead of the
timeline. The program can then `CMP` and `BR` on the value.

Ci counts a measurement only once its timing point leaves operation
combination. Between the classical pipeline and that point there are a few
pipeline stages, and they also hold the open point. Two rules follow:

* `FMR` also waits until the quantum front end (decoder, timestamp manager,
  lanes) is empty. Otherwise it could overtake a measurement that has not
  yet been counted.
* **The measurement must be followed by a waiting instruction (or a bundle
  with PI > 0) before the FMR that reads it.** Otherwise the point that holds
  the measurement stays open, is never counted, and the FMR would read a
  stale value. The usual pattern, `MEASZ S1; QWAIT 30; FMR R1, Q1`, already
  satisfies this.

## Latencies (clock = 10 ns, tick = 20 ns)

| path                                            | latency                         |
|-------------------------------------------------|---------------------------------|
| classical instruction issue                     | 1 per clock; LD 2 clocks        |
| taken branch                                    | no bubble (next address computed in execute) |
| quantum instruction → decoder → timestamp → lanes | 1 + 1 + 2 clocks              |
| point complete → queues                         | 1 clock after the next point opens (distributor register) |
| timer fires point → `adi_valid`                 | 2 ticks (trigger register, release register) |
| result on `res_valid` → flags                   | same tick                       |
| result → `Qi` valid (if last pending)           | 1 clock after the sampling tick |

**Feedback latency.** This is the time from the tick on which a result
enters to the tick on which a codeword that depends on it leaves. It was
measured in the end-to-end testbench:

* Fast conditional execution takes **20 ns** (one cycle), when the
  conditional operation is scheduled for the tick on which the result
  arrives.
* CFC takes **180 ns** (9 cycles) for `FMR`, `CMP`, `BR` and a bundle. The
  time goes to the FMR wake-up, three classical instructions, the quantum
  front end, and the 2-tick trigger path. A CFC operation can never be on
  time for a point that lies less than this after the result. Such a point
  fires as soon as it reaches the timing queue and sets `underrun`, so a
  program should wait long enough after the measurement.

The prototype of the published design measured about 92 ns and 316 ns on
its FPGA. Those figures include the instrument interfaces, which are not
part of this RTL.

## Parameters

| parameter      | default | origin |
|----------------|---------|--------|
| qubits         | 7       | chip   |
| allowed pairs  | 16      | chip   |
| S / T registers| 32 / 32, 5-bit address | eQASM instantiation |
| VLIW width     | 2       | eQASM instantiation |
| q_opcode       | 9 bits  | eQASM instantiation |
| PI             | 3 bits  | eQASM instantiation |
| wait interval  | 20 bits | eQASM instantiation |
| quantum cycle  | 20 ns (`CLK_DIV = 2` at 100 MHz) | implementation |
| `IMEM_DEPTH`   | 32768 words | own choice; the instantiation defines no size |
| `DMEM_DEPTH`   | 4096 words  | own choice |
| `TQ_DEPTH`     | 64 points   | own choice |
| `EQ_DEPTH`     | 32 operations per channel | own choice |
| codeword       | 8 bits  | own choice |
| timing label   | 8 bits  | own choice |
| Ci counter     | 4 bits (15 pending measurements per qubit) | own choice |

The fixed sizes live in `rtl/eqasm_pkg.sv`. The memory and queue sizes are
parameters of `eqasm_processor`.

**Program size.** The 32768-word instruction memory is sized for the
randomized-benchmarking program used to compare instruction encodings. That
program applies 4096 Cliffords (about 7680 gates) to each of 7 qubits and
takes about 17,000 words with PI, SOMQ and two lanes. The 7-qubit Ising
model program, about 9,000 words, fits too. The square-root (Grover)
benchmark needs 8 qubits and cannot run on a 7-qubit instantiation.

## Host interface and use

1. Hold `rst_n` low for at least one clock.
2. Write the Q control store through `cfg_we/cfg_addr/cfg_data`. The entry is
   `{two_qubit, uop_a, uop_b}`: `uop_a` is μop_s or μop_src, and `uop_b` is
   μop_tgt. Both lanes are written together.
3. Write the program through `imem_we/imem_waddr/imem_wdata`, and any data
   through `dmem_h_*`.
4. Pulse `start`: execution begins at address 0.
5. Pulse `tl_start` when the timeline should begin. Its first point fires on
   the next tick. Starting the timeline some time after `start` lets the
   queues fill, which protects a dense schedule against underrun.
6. The program ends with `STOP`. Wait for `halted` and then `timeline_idle`.
   Read results through `dmem_h_*`.

`adi_valid[d][q]` / `adi_cw[d][q]` carry the codeword for device type *d*
(0 microwave, 1 flux, 2 measurement) on qubit *q*. Each is held for one tick
period. The pulse generators and the readout unit in the real set-up sit
behind a 32-bit codeword bus, whose bit assignment is not given. A
per-channel interface is used here instead and can be packed outside.

## Files

| file | contents |
|------|----------|
| `rtl/eqasm_pkg.sv` | sizes, topology, opcodes, record types |
| `rtl/eqasm_processor.sv` | top level |
| `rtl/instr_mem.sv`, `rtl/data_mem.sv` | memories |
| `rtl/classical_pipeline.sv` | fetch, GPRs, flags, classical execution, issue, FMR stall |
| `rtl/quantum_instr_decoder.sv` | field extraction |
| `rtl/timestamp_manager.sv` | timing points and labels |
| `rtl/vliw_lane.sv` | one lane: `target_registers`, `microcode_unit`, `qmicroinstr_buffer` |
| `rtl/operation_combination.sv` | merging, point buffering, conflict errors |
| `rtl/device_event_distributor.sv` | point → queue entries |
| `rtl/timing_control_unit.sv`, `rtl/sync_fifo.sv` | queues and timer |
| `rtl/fast_cond_exec.sv` | execution flags, release/cancel |
| `rtl/meas_result_reg.sv` | Qi and Ci |

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each compares
against values computed independently in the testbench and ends with a line
`TB_RESULT checks=N failures=M`. `tb/meas_discrimination_model.sv` is a
behavioural stand-in for the readout unit. It returns a result for every
measurement codeword 15 ticks later, following a scripted sequence, or
alternating 0/1 when no script is set.

`tb/tb_eqasm_processor.sv` runs the whole processor at its default sizes. It
executes a program built from the standard examples: a two-qubit AllXY
fragment (SOMQ, a two-operation bundle), a 100-iteration timed loop, a
feedback loop (measure, wait, FMR, compare, branch to X or Y), active reset
with a conditional `C_X` (executed once, cancelled once), a CZ on two pairs at
once, a bundle split with PI = 0, and QWAITR. Because the timeline starts
late, the queues fill and the pipeline is held by back-pressure. The
testbench records every codeword with its 20 ns time stamp and checks all 229
against a schedule computed from the program's intervals. It also checks the
FMR results stored to data memory, that no underrun or error occurred, and
that each mechanism (back-pressure, FMR stall, cancel, SOMQ) happened at
least once. A second program with two operations on one qubit in one bundle
must stop the processor with `error`. A third measures the two feedback
latencies given above.

`tb/tb_rb_workload.sv` runs randomized-benchmarking programs generated in
the testbench, again at full size, and checks every released codeword
against its expected time:

* one qubit, random gates from {I, X, Y, X90, Y90, Xm90, Ym90}, 256 gates
  each at 320, 160, 80 and 40 ns spacing, then the full 4096-Clifford
  sequence (7680 gates) at 20 ns. This takes 9228 words, with no underrun.
* seven qubits, each with its own random 7680-gate sequence, at 40 ns
  spacing. Qubits that receive the same gate share one SOMQ operation, and
  multi-qubit masks are loaded with SMIS when they change. This takes
  28831 words, which fits the 32768-word memory, and runs with no underrun.

**Issue rate.** The seven-qubit program needs about 3.75 instruction words
per timing point. The classical pipeline issues one word per 10 ns, so it
cannot sustain a new point every 20 ns. Run at 20 ns spacing, the same
program falls behind the timeline, and `underrun` is raised after the
queues' slack is used up. At 40 ns it keeps up. One qubit at 20 ns is no
problem, at one word per point. This is the issue-rate limit that PI, SOMQ
and VLIW are meant to relieve: they reduce it but do not remove it for seven
independent random sequences.

To simulate one testbench with Verilator 5 (the package must come first):

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_eqasm_processor \
  rtl/eqasm_pkg.sv $(ls rtl/*.sv | grep -v eqasm_pkg) \
  tb/meas_discrimination_model.sv tb/tb_eqasm_processor.sv
./obj_dir/Vtb_eqasm_processor
```

## Where this design departs from or adds to the published design

* Opcodes, classical field positions, comparison-flag codes, codeword width,
  label width, queue depths and memory sizes are this design's own choices.
* The timing controller and fast conditional execution use a 50 MHz clock
  enable in the 100 MHz domain, not a separate clock.
* The first timing point is set only by the external trigger `tl_start`.
  There is no dedicated instruction for it.
* The codeword interface to the instruments is per device type and qubit.
  It is not the 16+16-bit bus of the real set-up, and the mapping of
  devices to qubits (a microwave source shared through a switch matrix, two
  readout units on two feedlines) is not modelled: every qubit has its own
  microwave, flux and measurement channel.
* A measurement counts as issued (Ci + 1) when its timing point leaves
  operation combination, not when the classical pipeline issues it. FMR
  additionally waits for an empty quantum front end. Hence the rule above
  that a measurement must be followed by a waiting interval before FMR.
* The hardware checks `Ti` values for pairs that share a qubit and stops.
  The published design leaves this check to the assembler.
* A cancelled measurement releases its Ci count. Without this, FMR would wait
  forever for a result that will never come.
* Underrun detection, back-pressure and the `q_busy` FMR guard are
  additions needed to make the queue-based scheme safe in RTL.
* The sizes of the device operations of the real set-up (VSM masks,
  pulse-generator codeword tables) are not modelled. The Q control store
  entry carries only the device type, codeword and flag select.
