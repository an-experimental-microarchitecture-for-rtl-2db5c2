# A queue-timed control box for a superconducting qubit processor

Superconducting qubits are driven by short analog microwave pulses, typically 20 ns for a
single-qubit gate and a few hundred ns for a measurement. The pulses must arrive with
nanosecond precision relative to each other. The experiment around them is a classical
program with loops, counters and branches, and it may need measurement results to decide
what comes next. A processor that runs such a program cannot guarantee when each
instruction finishes. A waveform sequencer that plays a fixed list of samples has exact
timing but cannot run a program.

This design splits the two concerns. Instructions run on an ordinary in-order pipeline
that makes no timing promises. The pipeline does not start quantum operations itself.
It turns each operation into a *timestamped event* and puts it into a queue. From the
queues onward, everything is driven by one counter and runs with fixed latencies. The
pipeline only has to stay ahead of the clock, and the queues absorb its jitter. The
actual pulses are never sent as samples: each event carries a small *codeword*, and
every pulse generator plays a pre-loaded, calibrated waveform for that codeword after a
fixed delay.

The RTL is written in synthesizable SystemVerilog and uses a single 200 MHz clock
(5 ns per cycle). It contains:

* the classical pipeline (execution controller) with its instruction cache and register
  file;
* the physical microcode unit, with a microprogram store (Q control store) and the
  queue-filling logic;
* the timing control unit, with its timing queue and event queues;
* three AWGs (arbitrary waveform generators), each a micro-operation unit plus a
  codeword-triggered pulse generator;
* the digital measurement-pulse outputs;
* the measurement discrimination unit (MDU) and the averaging data collection unit.

The top module is `quma_control_box`.

## Instruction levels

Programs are written at three levels. The hardware lowers them step by step:

| level | example | where it is lowered |
|---|---|---|
| quantum instruction (QIS) | `Apply CNOT, {q0,q1}` | Q control store → microinstructions |
| quantum microinstruction (QuMIS) | `Wait 4`, `Pulse {awg1}, uop 2`, `MPG mask, 300`, `MD mask, r7` | physical microcode unit → timed events |
| micro-operation | uop 2 on AWG 1 | micro-operation unit → codewords |
| codeword | codeword 4 | pulse generator → DAC samples |

Classical instructions sit next to the QuMIS instructions in the same program. They are
`mov`, `add`, `sub`, `addi`, `and`, `or`, `xor`, `beq`, `bne`, `nop` and `stop`. One more
instruction is `QNopReg rs`, a `Wait` whose length is read from a register. This lets a
program compute delays, for example the long idle time that resets a qubit between
rounds.

### QuMIS semantics

* `Wait n` marks a new point on the timeline, `n` cycles after the previous one.
* `Pulse (mask, uop0, uop1, uop2)` starts, at the current time point, micro-operation
  `uop_i` on every AWG `i` selected by `mask`. This is a horizontal format: one
  instruction can drive all AWGs at the same instant.
* `MPG qaddr, D` raises the digital outputs selected by `qaddr` for `D` cycles, which
  triggers the measurement pulse.
* `MD qaddr, rd` starts one integration in the MDU. If requested, the resulting bit is
  written to register `rd`.

Operations with no `Wait` between them happen in the same cycle. Operations separated by
`Wait n` happen exactly `n` cycles apart. This holds no matter how long the pipeline took
to issue them.

### Encoding

The words are 32 bits wide, with the opcode in bits [31:26]. The encoding is this
design's own. `qumis_pkg` has encoder functions (`enc_*`) for writing programs in a
testbench.

| opcode | value | fields |
|---|---|---|
| NOP | 0 | |
| MOV | 1 | rd[25:22], imm[21:0] (sign-extended) |
| ADD / SUB / AND / OR / XOR | 2 / 3 / 5 / 6 / 7 | rd[25:22], rs[21:18], rt[17:14] |
| ADDI | 4 | rd[25:22], rs[21:18], imm[17:0] (sign-extended) |
| BEQ / BNE | 8 / 9 | ra[25:22], rb[21:18], absolute target[17:0] |
| STOP | 10 | ends execution |
| WAIT | 16 | interval[23:0] in cycles |
| QNOPREG | 17 | rs[21:18]: wait R[rs] cycles |
| PULSE | 18 | awg_mask[25:23]; uop of AWG i in bits [3i+2:3i] |
| MPG | 19 | qaddr[25:18] (one bit per digital output), D[15:0] |
| MD | 20 | qaddr[25:18], wb[17], rd[3:0] |
| APPLY | 24 | quantum opcode[25:20], qubit (AWG) mask[19:17] |

There are 16 registers of 32 bits.

## Execution controller

The execution controller is a four-stage pipeline: fetch, decode with register read,
execute, and write-back. Execute forwards its result to decode. A taken branch costs one
bubble.

Quantum instructions leave the pipeline in decode on a valid/ready stream, in program
order. `QNopReg` has already been turned into a `Wait` with the register value by then.
When the next stage cannot accept an instruction because a queue is full, the whole
pipeline stalls, and `stall_cycles` counts the stalls. Stalls are normal. A program that
waits 200 µs per round runs far ahead of the timeline, fills the queues and then stalls
until the timeline catches up.

The register file has a second write port, driven by the MDU. An `MD ..., rd` result
lands in `rd` whenever the integration finishes. If it lands in the same cycle as a
pipeline write to the same register, the measurement wins. A program that wants to
branch on a result must therefore give the measurement time to finish. The design has
no scoreboard that makes the pipeline wait for a pending `MD`.

## Physical microcode unit and Q control store

The Q control store expands an `Apply op, qaddr` into the microprogram stored for `op`.
It emits one QuMIS word per cycle. In every `Pulse` of the microprogram, the AWG mask is
ANDed with the Apply's qubit mask, so one stored microprogram serves any pair of qubits.
All other instructions pass through unchanged.

Example: the CNOT microprogram, with target qubit qt and control qubit qc:

```
Pulse {qt}, Ym90      Wait 4
Pulse {qt,qc}, CZ     Wait 8
Pulse {qt}, Y90       Wait 4
```

The Q control store is written through the host bus. It has an opcode table of
(start, length) entries and a 256-word microprogram memory.

Behind the Q control store, the microcode unit assigns *timing labels*:

* `Wait n` increments the current label `L` and pushes the time point `(n, L)` into the
  timing queue.
* `Pulse` pushes `(uop_i, L)` into the event queue of each selected AWG.
* `MPG` and `MD` push `(qaddr, D, L)` and `(qaddr, rd, L)` into their own queues.

An instruction is accepted only when every queue it writes has room. Labels are 8 bits
wide and wrap around. The labels of queued entries never span more than the queue depth,
so this is safe. Labels restart at 0 when `run` starts a program.

## Timing control unit: labels instead of timestamps

This is the part that makes the timing exact. Take this program:

```
Wait 40000 ; Pulse I           time point (40000, 1), event (I, 1)
Wait 4     ; Pulse I           time point (4, 2),     event (I, 2)
Wait 4     ; MPG ...; MD ...   time point (4, 3),     MPG (3), MD (r7, 3)
```

It leaves the following in the queues:

```
timing queue      AWG queue    MPG queue    MD queue
(40000, 1)        (I, 1)       (3)          (r7, 3)
(4, 2)            (I, 2)
(4, 3)
```

The **timing controller** has a counter that starts at 0 when the timing domain is
started (`td_start`, an external trigger). When the counter equals the interval at the
front of the timing queue, the controller does three things:

1. It broadcasts that entry's label to all event queues.
2. It pops the entry.
3. It restarts the counter.

Every event queue compares its front label with the broadcast label (the label
comparators). Every queue that matches fires its front event.

In the example, the first `I` pulse is triggered at T_D = 40000, the second at 40004,
and the measurement at 40008. The queues only ever look at their fronts, so one counter,
a handful of comparators and FIFOs are enough to control any number of outputs. An event
carries no absolute time: its time is whatever the counter said when its label came up.

Points to know:

* Fired events leave the unit on registers, one cycle after the broadcast. Every output
  path from here on has a fixed latency:

  | output | latency after the time point |
  |---|---|
  | digital output | +1 cycle |
  | MDU start | +1 cycle |
  | AWG analog output | +1 (queue) +1 (micro-op unit) +16 (pulse generator) = +18 cycles |

  Because these latencies are fixed, relative timing is exact. Absolute alignment
  between outputs is a matter of calibration.
* Label 0 is broadcast in the first cycle after `td_start`. Events issued before the
  first `Wait` therefore fire at T_D = 0.
* **Late entries.** If the pipeline falls behind, a time point or event may reach its
  queue after its moment has passed. The design fires it immediately instead of waiting
  forever, and sets the sticky flag `timing_late`, which is cleared by the next
  `td_start`. A correctly sized program never sets the flag; the end-to-end tests check
  this.
* One event per queue per time point. A second entry with the same label in the same
  queue fires one cycle later, as a late event.
* `Wait 0` counts as `Wait 1`. Intervals are 24 bits wide (up to 84 ms); `D` is 16 bits.
* Queue depth is 32 entries for each of the timing queue, the three AWG queues, the MPG
  queue and the MD queue.

## AWGs: micro-operations and codeword-triggered pulses

Each AWG has two parts.

The **micro-operation unit** holds, for each of 8 micro-operations, a sequence
`([Δt0, cw0]; [Δt1, cw1]; ...)` of up to 4 steps. A trigger plays the sequence:
codeword `cw_j` is emitted `Δt_j` cycles after the previous one. The first codeword
leaves one cycle after the trigger. A new trigger restarts playback with the new
sequence.

For example, a Z gate built from two pulses is `([0,1]; [4,4])`: codeword 1 now and
codeword 4 four cycles later. After reset, sequence `i` is `([0, i])`, so the unit simply
forwards the micro-operation index as the codeword. Each sequence word is written as
`{last[16], cw[10:8], Δt[7:0]}` at address `{uop, step}`.

The **codeword-triggered pulse generator** is a lookup table with one pulse per codeword
(8 codewords). Each pulse has up to 16 samples of I and Q (14-bit signed) and a length.
On a codeword trigger it plays that pulse, one sample per clock, starting exactly 16
cycles (80 ns) after the trigger. The outputs are 0 between pulses. A trigger that
arrives during a pulse cuts the pulse off. Two pulses triggered exactly one pulse length
apart therefore play back to back, with no gap.

A typical single-qubit table is:

| codeword | pulse |
|---|---|
| 0 | identity |
| 1 | Rx(π) |
| 2 | Rx(π/2) |
| 3 | Rx(−π/2) |
| 4 | Ry(π) |
| 5 | Ry(π/2) |
| 6 | Ry(−π/2) |

The contents are calibration data loaded by the host. They are not fixed in hardware.

## Measurement: pulse triggers, discrimination and averaging

**Digital outputs.** `MPG qaddr, D` drives each of the 8 outputs selected by `qaddr`
high for `D` cycles, starting one cycle after the event fires. External microwave
sources use these outputs to gate the measurement tone.

**MDU.** A fired `MD` event starts an integration over the next `L` samples of the two
ADC inputs (I and Q, 8-bit signed):

```
S = Σ_n ( adc_i[n]·W_I[n] + adc_q[n]·W_Q[n] ),   M = (S > T)
```

`W_I` and `W_Q` are signed 8-bit weights of up to 512 entries. `L` resets to 300 and
`T` resets to 0. The result `(S, M)` appears one cycle after the last sample. `M` goes
to the register file when the `MD` asked for it, and `S` goes to the data collection
unit.

There is one MDU. Every `MD` event triggers it, whatever its `qaddr`. An `MD` that fires
while an integration is still running is dropped and sets the sticky `md_overrun` flag.
Programs must space their measurements by at least `L + 1` cycles.

**Data collection unit.** After it is armed, this unit treats the MDU results as rounds
of `K` consecutive values. It keeps a 48-bit sum for each position `i`. After `N` rounds
it divides every sum by `N`, truncating toward zero, with a serial divider that takes
49 cycles per entry. It then raises `dcu_done`. The host reads the averages through
`dcu_rd_addr` / `dcu_rd_data`.

`K` resets to 42 and `N` to 25600, the sizes of the AllXY calibration experiment: 21
gate pairs, each measured twice per round.

## Host interface

The host interface replaces the USB link of a real box. It consists of:

* a write bus `cfg_we` / `cfg_addr[15:0]` / `cfg_wdata[31:0]`;
* `run`, which starts the program at address 0;
* `td_start`, which starts the timeline;
* read ports for registers (`reg_rd_*`) and averages (`dcu_rd_*`).

Address map (`addr[15:12]` selects the target):

| addr[15:12] | target | lower bits |
|---|---|---|
| 0 | instruction cache | word address [9:0] |
| 1 | AWG [11:10] | [9]=0: sequence memory `{uop, step}`; [9]=1: pulse table: [8]=0 sample `{cw, n}`, data I[13:0] / Q[29:16]; [8]=1 length of cw |
| 2 | MDU | [11:10]=0 W_I[addr], 1 W_Q[addr], 2: [0]=0 L, [0]=1 T |
| 3 | data collection | [1:0]=0 K, 1 N, 2 arm |
| 4 | Q control store | [9]=0 microprogram word [7:0]; [9]=1 opcode [5:0] entry `{length[15:8], start[7:0]}` |

Status outputs: `exec_running`, `td_running`, `td` (the T_D cycle count),
`timing_late`, `md_overrun`, `queues_empty`, `stall_cycles`, `md_result_valid` and
`md_result_bit`.

## Sizes and what they hold

The default parameters fit the AllXY experiment at full size:

* The program is 299 instruction words, against a 1024-word instruction cache.
* The idle time is `Wait 40000` (200 µs), against a 24-bit interval.
* The measurement is `MPG 300` with a 300-sample integration, against a 16-bit `D` and a
  512-entry weight memory.
* There are 42 results per round over 25600 rounds, against `K_MAX` = 64. The largest
  possible sum, 25600 · 300 · 2 · 128 · 128, needs less than 2^39 and fits the 48-bit
  accumulators.
* Only 7 pulses are needed, against 8 codewords.

The CNOT microprogram needs 6 words and a two-step micro-operation. Both are well within
the 256-word store and the 4-step sequences.

## Departures from the published architecture

* **Instruction encoding, `STOP`, and the `and`/`or`/`xor`/`nop` instructions** are this
  design's own. The architecture defines the instructions but publishes no binary
  format.
* **Q control store.** The architecture describes it, but the reference hardware left
  it out. Its programs used QuMIS directly. It is built here, and `Apply` expands
  microprograms as described.
* **Measurement write-back** to the register file is drawn as future work in the
  reference hardware, but the `MD ..., rd` instruction defines it. It is built here.
* **No load/store or main memory path.** The program lives entirely in the instruction
  cache.
* **One clock.** In the original box, data collection and communication run at 50 MHz.
  Here everything runs at 200 MHz. The averaging function is unchanged.
* **No LVDS links or USB.** The master controller and the AWGs (separate FPGA boards in
  the original) are wired directly. The USB command protocol is replaced by the
  configuration bus.
* **One sample per clock** at the DACs and ADCs (200 MS/s).
* **Integration starts immediately.** The MDU has no programmable delay between the
  `MD` trigger and the start of integration, and uses sample-by-sample weights.
* **Late-event policy, label width, queue depths, `Wait 0` handling, and micro-operation
  restart on a new trigger** are not specified by the architecture and are choices made
  here.
* **Only a single-qubit MDU**, as in the reference hardware. Several qubits would need
  one MDU per qubit, selected by `qaddr`.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the block against
values computed independently in the testbench and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_instr_cache` | random write/read-back |
| `tb_register_file` | random traffic against a model, write-through, measurement-port priority |
| `tb_execution_controller` | ALU/branch programs, forwarding, stall under back-pressure, QNopReg, measurement writes |
| `tb_q_control_store` | CNOT expansion with qubit substitution, pass-through order |
| `tb_physical_microcode_unit` | label assignment of the timeline example above |
| `tb_timing_control_unit` | exact firing cycles, same-label events, late flag |
| `tb_micro_operation_unit` | default forwarding, Seq_Z spacing, restart |
| `tb_ctpg` | 80 ns delay, sample-exact playback, back-to-back pulses |
| `tb_awg` | 17-cycle trigger-to-output latency through both stages |
| `tb_digital_output_unit` | random masks and durations against a model |
| `tb_mdu` | weighted sums, thresholds, latency L+1, overrun |
| `tb_data_collection_unit` | averages including negative ones, done flag |

Two end-to-end testbenches run an AllXY program on the whole box. They include a
behavioural qubit on AWG 2: a Bloch vector that is rotated by the pulses it sees on the
DAC outputs, with a 30-cycle readout response on the ADC inputs. They also run a CNOT
through `Apply` on AWGs 0 and 1. They check:

* pulse spacing and the 80 ns pulse latency on the DAC outputs;
* measurement pulses on the digital outputs;
* the ideal 0 / ½ / 1 "staircase" in the averaged results;
* the result bits written to registers;
* the loop counters;
* that the pipeline stalled on full queues;
* that no event was late and no measurement was dropped.

`tb_quma_control_box` uses a 400-cycle idle time and 3 rounds. `tb_quma_full` uses the
unmodified top, the real 40000-cycle idle time and 10 rounds. It runs in about 15 seconds in
Verilator.

To run one testbench with Verilator:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/qumis_pkg.sv tb/tb_quma_full.sv --top-module tb_quma_full
./obj_dir/Vtb_quma_full
```

The files in `rtl/` are one module (or package) each. All of them depend on `qumis_pkg`.
