# HiMA control system in SystemVerilog

A superconducting quantum processor needs, for every qubit, a stream of
precisely timed microwave and flux pulses and a readout that turns the
returning signal into a 0 or 1. This design is the digital part of such a
control system, organised after the HiMA (Hierarchical MicroArchitecture)
scheme:

* **Every channel runs its own program.** Each XY drive channel, each Z
  (flux) channel and each qubit's readout transmitter and receiver is a
  small processor with its own program memory and waveform table. The
  quantum circuit is compiled into one short program per channel, so adding
  qubits adds processors rather than load on a central one.
* **A tree of controllers keeps those programs in step.** Channels do not
  start on their own. A trigger comes down a tree (root controller, leaf
  controller, board, channel), and every board releases it only on a
  common periodic synchronisation pulse. All channels of a circuit
  therefore start in the same clock cycle, however far apart they sit.
* **Several independent jobs (processes) share the machine.** Every level
  of the tree keeps, per process, a mask of the children the process uses.
  A trigger for process p reaches only p's channels, so two circuits on
  disjoint qubits run at the same time. Each controller holds one task
  control processor per process, 32 of them.
* **Staggered starts.** Two processes started almost together can disturb
  each other through crosstalk. The root therefore delays the start of a
  shot of process p until every other running process is at least
  STI[p] cycles into its own shot. STI is the per-process safety trigger
  interval.
* **Mid-circuit feedback.** Readout results flagged for feedback travel up
  the tree. A controller program waits for the results it needs, computes
  one feedback bit per qubit, and sends them down. Channel programs branch
  on their bit.

The default build is the 72-qubit configuration: one root controller and
three qubit cluster control subsystems (QCCS) of 24 qubits each.

## System structure

```
hima_top
 ├─ sync_pulse_gen           one pulse every SYNC_PERIOD cycles, to every block
 ├─ controller  (root)       N=32 processes, K=3 ports (one per QCCS), 72-qubit feedback word
 └─ qccs ×3
     ├─ controller (leaf)    N=32, K=12 ports (one per board), 24-qubit feedback word
     ├─ drive_module ×8      Z boards, 8 channels each  ─┐
     ├─ drive_module ×3      XY boards, 8 channels each ─┤ each: exec_module_ctrl + 8 qubit_drive_unit
     └─ readout_module       4 feedlines × 6 qubits      ─┘ exec_module_ctrl + 4 feedline_output_unit
                                                           + 4 feedline_input_unit
```

Per QCCS this gives 64 Z channels for qubits and tunable couplers, 24 XY
channels and 24 readout transmit/receive pairs on four feedlines. The whole
system has 192 Z, 72 XY, 12 feedline DAC and 12 feedline ADC streams.
`hima_top` brings them out as arrays of 16-bit samples (DAC) and 11-bit
signed samples (ADC). Each stream carries one sample per clock; the real
converters run at 1.2 to 6.4 GS/s behind a wider parallel interface, which
is not modelled.

Board numbering inside a QCCS, used both on the configuration bus and in
the leaf controller's per-process port mask:

| index | board |
|---|---|
| 0–7 | Z drive boards |
| 8–10 | XY drive boards |
| 11 | readout board |
| 15 | the leaf controller itself (configuration only) |

## Instruction set

All programmable engines run 32-bit words with the operations below. The
operation set and operand names follow HiMA; the bit layout and STOP are this
design's.

| op | code | fields | runs on | meaning |
|---|---|---|---|---|
| GATE | 1 | `[27]` trig, `[26:16]` addr, `[15:0]` dur | drive unit, readout output unit | play `dur` samples of the waveform table starting at `addr` |
| WAIT | 2 | `[27]` trig, `[15:0]` dur | all | idle for `dur` cycles |
| MEASURE | 3 | `[27]` trig, `[26]` fb, `[25:24]` dtype, `[15:0]` dur | readout input unit | integrate `dur` ADC samples; dtype 0 = state, 1 = integrated value, 2 = raw samples; fb = 1 also reports the state for feedback |
| TRIGGER | 4 | `[27]` trig, `[26]` start | controller | send this process's trigger downwards; start = 1 marks the first trigger of a shot (subject to staggering) |
| FEEDBACK | 5 | `[15:0]` entry | controller | wait for the results named by feedback entry `entry`, decide, send feedback data |
| BR | 6 | `[23:16]` imm, `[15:0]` offset | all | wait for the feedback bit rs; if rs == imm jump to PC + offset, else continue |
| STOP | 15 | – | all | end of one pass (shot) |

`trig = 1` means "this operation starts at the next trigger of my process".
In a drive or readout output unit the operation is generated ahead of time
and held at the output switch, which plays the unit's IDLE value meanwhile.
In a readout input unit the operation is not loaded until the trigger. In a
controller the instruction waits for the trigger from the layer above.

A program pass ends at STOP or after `prog_len` words. The unit then runs
the program `loops` times per start, one pass per shot. `hima_pkg` provides
builder functions (`i_gate`, `i_wait`, `i_measure`, `i_trigger`,
`i_feedback`, `i_br`, `i_stop`) that the testbenches use to write programs.

## Execution units

### Drive unit (`qubit_drive_unit`)

```
program RAM ─► classical_exec_unit ─► op buffer (16) ─► waveform_generator ─► waveform FIFO (64) ─► output_switch ─► DAC
                      ▲ BR waits for feedback bit                 ▲ waveform table (2048 × 16 bit)     ▲ trigger, IDLE value
```

* The parser (`classical_exec_unit`) issues one operation per cycle while
  the operation buffer has room. It stops at a BR until the unit's feedback
  bit arrives. A feedback strobe that comes before the BR is kept for it.
* The generator turns each operation into `dur` samples, one per cycle,
  with no gap between operations. WAIT and MEASURE produce idle-marked
  samples so every unit of a qubit keeps the same timeline.
* The switch (`output_switch`) pops one sample per cycle. When the head
  sample is the first of a trig-flagged operation, it stops and outputs
  the IDLE value until the trigger. The buffers in front of it are then
  already full, so the pulse starts exactly one cycle after the trigger
  reaches the unit. A trigger that arrives before the operation reaches
  the head is remembered.
* Each unit picks its feedback bit out of the 24-bit QCCS feedback word
  with its `fb_sel` register.

The same module serves as the qubit readout output unit: it plays the
qubit's readout tone.

### Readout (`feedline_output_unit`, `feedline_input_unit`, `qr_input_unit`, `readout_dpu`)

Six qubits share a feedline, but each qubit is measured on its own
schedule:

* **Transmit.** The six readout output units of a feedline each generate
  their own tone. A saturating multi-input adder sums them into the
  feedline's DAC stream.
* **Receive.** The feedline's ADC stream is written every cycle into a
  shared ring buffer. Each sample is broadcast, one cycle later, to the six
  qubit readout input units.
* **Measure.** A readout input unit executing MEASURE integrates the
  broadcast samples against its own 2048-word discrimination kernel
  (`acc += adc × kernel[i]`). At the end of the window it reports the
  state (`acc > threshold`), the integrated value, or, with dtype 2, every
  raw sample. With fb = 1 the state also goes to the leaf controller as a
  feedback result.

The kernel-weighted sum is the simplest discriminator that does the job.
Demodulation to IQ and multi-state discrimination are left to the kernel
contents or are not modelled.

## Triggering

### Synchronisation pulse

`sync_pulse_gen` produces one pulse every `SYNC_PERIOD` (default 8) cycles
for every block. Every controller and every board passes incoming triggers
through a `sync_unit`, which holds them until the next pulse. Two triggers
that reach different boards a few cycles apart are therefore released in
the same cycle. In hardware the period should be a common multiple of the
periods of all local oscillators, so every shot starts at the same
microwave phase.

### Per-process masks at three levels

| level | block | mask | selects |
|---|---|---|---|
| root | `emitter` | 3 bits per process | QCCSs |
| leaf | `emitter` | 12 bits per process | boards |
| board | `process_manager` | 64 bits per process | units (drive units; or readout output units 0–23 and input units 24–47) |

On a board, `exec_module_ctrl` holds the sync unit, one process manager per
process and the `dispatcher`. The dispatcher ORs the per-unit strobes of
all processes. It flags, and asserts on, two processes addressing the same
unit in one cycle. The process managers also start (activate) their units
and report a per-process busy.

### Forwarding

A controller whose task control processor for process p is idle passes p's
triggers and feedback data from the layer above straight to its emitter.
This is how the leaf controllers relay the root's triggers. A process can
also be run entirely by a leaf controller (a local program, the root not
involved), or fired from outside through `ext_trig` when the root does not
run it.

### Readiness

A shot may only start when every board that takes part is armed. Each
board's process manager reports process p *ready* once all units in its
mask have been started (a board with an empty mask for p is always ready).
The leaf emitter ANDs these reports over the boards in p's mask and
sends the result up as `ready_up`, one register later. The root does the
same over its QCCSs. A TRIGGER with start = 1 is held in the task control
processor until its process is ready. Only after that does it go to the
trigger arbitration, which may then hold it further for the STI. Triggers
with start = 0 are never held. `hima_top` shows the root's view on
`root_ready`.

### Latency

A root TRIGGER reaches the DAC pins as follows:

1. +1 cycle through the root emitter.
2. Wait for the next pulse in the leaf sync unit, then +1.
3. +1 through the leaf emitter.
4. Wait for the next pulse in the board sync unit, then +2 to the unit.
5. +1 through the output switch.

Every channel of the process sees the same path length, so all channels
start in the same cycle. The end-to-end test checks this across QCCSs.

## Controllers and processes

`controller` is one module for the root and the leaf; parameters set the
port count and feedback width. It contains:

* **Task scheduler.** A start command for process p starts task control
  processor p. Starting a process that is still running is refused and
  counted in `rejects`.
* **Task control processors** (`task_control_processor`), one per process.
  Each runs WAIT / TRIGGER / FEEDBACK / BR. Each keeps a *task core
  counter*: cycles since its last start = 1 trigger.
* **Trigger arbitration** (`trigger_arbiter`).
  * Triggers with start = 0 pass at once.
  * A start = 1 request of process p is granted only when every other
    running process q has `core_cnt[q] ≥ STI[p]`. Until then it is held
    (`stagger_held`).
  * At most one start trigger is granted per cycle, lowest process first.
  * The arbiter also serialises feedback data, one word per cycle.
* **Emitter** (`emitter`), with the per-process port masks.

### Feedback

A feedback entry is 8 words in the controller's feedback table: 7 words of
qubit mask, then a mode word. FEEDBACK e works in four steps:

1. Collect flagged results until every qubit in entry e's mask has
   reported. Results are kept per qubit from the process start.
2. `feedback_decision_unit` computes, in one cycle, one bit per qubit and a
   bit for the controller itself (its BR register):
   * mode 0: each qubit gets its own state, e.g. for active reset; the
     controller bit is the parity.
   * mode 1: every qubit gets the parity of the masked states.
   * mode 2: every qubit gets the OR of the masked states.
3. Send the word down through the arbiter and emitter. Each child receives
   its 24-qubit slice.
4. The leaf forwards the whole slice to the boards in the process mask, and
   each unit takes its bit. A channel sitting at BR continues as soon as
   the bit arrives.

In the intended use the root makes all decisions and the leaf only relays.
The leaf has the same hardware, and a leaf-local program may use it.

## Configuration bus

Everything (programs, waveform tables, kernels, registers, masks, STI
values, start commands) is written over one bus: `cfg_t` = {we, addr[31:0],
data[31:0]}. It is registered once at the top and once per QCCS.

| bits | field |
|---|---|
| 31 | 0 = root controller, 1 = a QCCS |
| 30:27 | QCCS index |
| 26:23 | board index (see above; 15 = leaf controller) |
| 22:17 | unit index; in a controller the process; 63 = board's own registers |
| 16:14 | bank: 0 program, 1 waveform table / kernel / feedback table, 2 registers, 3 STI, 4 emitter mask, 5 start |
| 13:0 | word |

Registers (bank 2):

* Units: word 0 `prog_len`, 1 `loops`, 2 `fb_sel`, 3 IDLE value (drive /
  readout output unit) or threshold (readout input unit).
* Controllers: word 0 `prog_len`, word 1 `loops`, for the addressed
  process.
* Boards: unit 63, words 2p and 2p+1 hold process p's 64-bit unit mask.
  Bank 5 word p starts process p on the board, which activates the masked
  units.

`addr_root()` and `addr_qccs()` in `hima_pkg` build these addresses.

A typical run:

1. Load unit programs and tables.
2. Write the board masks and start the process on each board. Its units
   run up to their first trig-flagged operation and wait there.
3. Write the leaf and root emitter masks, the STI and the root program.
4. Start the process at the root.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| N | 32 | processes per controller / board | HiMA hardware limit (5 used in practice) |
| N_QCCS | 3 | QCCSs under the root | 72-qubit system; root supports up to 8 |
| NZ, NXY | 8, 3 | Z and XY boards per QCCS | HiMA |
| CH | 8 | channels per drive board | HiMA |
| F, KQ | 4, 6 | feedlines per readout board, qubits per feedline | HiMA |
| ADC_W | 11 | ADC sample width | HiMA |
| PROG_DEPTH | 1024 | program words per unit / process | chosen to hold a 400-Clifford RB sequence (~750 gates) |
| WAVE_DEPTH | 2048 | waveform table / kernel words | chosen |
| SYNC_PERIOD | 8 | cycles between sync pulses | chosen |
| FB_ENTRIES | 16 | feedback entries per process | chosen |
| operation buffer, waveform FIFO, shared memory | 16, 64, 1024 | depths | chosen |

## Where this design departs from HiMA or simplifies it

* One clock and one sample per cycle per channel; no multi-sample DAC/ADC
  interfaces, no analog front end.
* Host link, backplane serial bus and LVDS links are replaced by the
  configuration bus and plain wires.
* Only two controller layers are built. `controller` can also serve as a
  middle layer, but `hima_top` does not instantiate a three-layer cascade.
* The instruction encoding, STOP, `prog_len` / `loops`, the register and
  address maps, the feedback entry format and the three decision modes are
  this design's choices.
* Readout discrimination is a kernel-weighted sum against a threshold.
* The readiness check is built into every controller, not only the root.
  It is a level signal per process, not a message exchange.
* Staggering compares STI of the requesting process with the core counters
  of all other running processes, and grants at most one shot start per
  cycle.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. Build and run one with verilator, for
example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hima_pkg.sv tb/tb_controller.sv --top-module tb_controller
./obj_dir/Vtb_controller
```

What the system-level tests cover:

* **`tb_hima_top`** (2 QCCSs of 2 Z channels, 2 XY channels and 2 readout
  qubits; 4 processes). Each mechanism is counted, and one that never
  occurs is a failure:
  * a root-run process with readout and root feedback that triggers an
    active-reset pulse through BR;
  * a second root process whose board is started late, so the root first
    waits for readiness and then holds the trigger for the STI;
  * a leaf-run process;
  * an external trigger forwarded to both QCCSs, which start in the same
    cycle;
  * the switch holding IDLE before the trigger;
  * the sync pulse.
* **`tb_hima_top_full`** runs the same kind of shot on the full 72-qubit
  build (all defaults): the last qubit of the third QCCS is driven, read,
  decided on at the root and reset, and a forwarded trigger starts one Z
  channel in each QCCS in the same cycle. It takes a few minutes to
  compile.
* **`tb_qccs`** covers leaf-level feedback and configuration addressing.
* **`tb_controller`** covers staggering, rejects, sliced feedback and
  forwarding.

The block tests compare against values worked out in the testbench, using
random stimulus where it fits (FIFO, sync unit, process manager,
dispatcher, emitter, decision unit).
