# Instruction-driven qubit controller

A qubit control system has to drive many analog channels with microwave and
baseband pulses whose timing is exact to the clock cycle. It also has to read
qubit states back and change later pulses depending on what it read. The usual
approach samples every waveform on a host, stores it in memory, and plays it
back. The memory and the host-to-device bandwidth then grow with every
channel and every microsecond of experiment.

This controller does not store waveforms. Each channel runs a small program of
**pulse instructions**. An instruction sets the amplitude, frequency, phase and
envelope of a pulse and says how many clock cycles it lasts. The channel
computes its output samples on the fly by direct digital synthesis (DDS). A
numerically controlled oscillator (NCO) provides the carrier, which is scaled
by an amplitude and multiplied by an optional envelope shape. A 100 µs pulse
costs one 128-bit instruction, not 20,000 samples.

One controller has **22 channels**, each an I/Q pair of 16-bit samples per
clock. It also has **two readout paths** (probe DAC plus ADC), three shared
**envelope memories**, a **measurement register** that instructions can be
made conditional on, and an **execution controller**. Several controllers can
be locked together into one system through the execution controller. The
design assumes a 5 ns clock, so durations are in units of 5 ns.

## Block structure

```
host word bus ─ host_interconnect ─┬─ ctrl_regs ─────────── per-channel cfg, global cmds
                                   ├─ instr_mem (per channel)
                                   ├─ env_mem ×3 ──────────┐
                                   ├─ meas_register/meas_stats
                                   └─ digitizer_mem ×2     │
                                                           ▼
 exec_controller ─start/stop─► channel_pipeline ×22:
   (link_in/out)               instr_mem → exec_core → rf_controller | dc_controller
                                → gain_control → quad_correction → dc_correction
                                → skew_delay → predistortion_fir → dac_i/dac_q
                               exec_core RDO ─► readout_controller ─► readout_unit ×2
                                                    │   probe → ro_dac, adc → outcome
                                                    └─► meas_register, meas_stats, digitizer_mem
```

The top module is `qubit_controller`. Its parameters are `NCH` (22),
`IMEM_DEPTH` (1024 instructions per channel) and `DIG_DEPTH` (4096 raw
samples per readout unit). Shared widths and types are in the package
`qc_pkg`.

## The instruction set

| Mnemonic | Opcode | Effect | Use of `p0` |
|---|---|---|---|
| `WAIT` | 0 | Hold all parameters. If `on`=1 the channel keeps pulsing with them, so a pulse can be lengthened or a new envelope applied. | none |
| `STA` | 1 | Set the amplitude, or the DC level on a DC channel. | `[15:0]` Q1.15 amplitude |
| `STF` | 2 | Set the NCO tuning word. The phase stays continuous. | `[31:0]` f = p0·f_clk/2^32 |
| `STP` | 3 | Set the phase offset against the free-running NCO. | `[31:16]`, one turn = 2^16 |
| `STAP` | 4 | Set amplitude and phase together. | `[15:0]` amplitude, `[31:16]` phase |
| `SYNC` | 5 | Block until a rising edge of the external trigger. | none |
| `RDO` | 6 | Start a measurement window of `dur` cycles. | `[15:0]` threshold, `[20:16]` register bit, `[21]` 0 charge sensing / 1 reflectometry, `[22]` readout unit |

Every instruction also carries the following common fields:

- `dur`: 44 bits, in clock cycles. A value of 0 counts as 1. At 5 ns the
  longest instruction is about 24 hours.
- `env`: 0 means a flat envelope; 1–3 select an envelope memory.
- `on`: channel output enabled. With `on`=0 the parameters change silently
  and the output is zero.
- `cond`: 0 always, 1 execute only if the measurement bit is 1, 2 only if it
  is 0.
- `cond_bit`: which of the 32 measurement bits the condition reads.

An instruction whose condition fails changes nothing and outputs nothing. It
still takes its full duration, so a channel's timeline never depends on a
measurement outcome. To branch, a program gives both alternatives, one with
`IF_ONE` and one with `IF_ZERO`.

The word is a packed struct, MSB first:

```
[127:124] op   [123:122] cond   [121:117] cond_bit   [116] on   [115:112] env
[111:68]  dur  [67:36]   p0     [35:0]    reserved (write 0)
```

The host writes each word as four 32-bit lanes. Lane 0 holds bits 31:0.

## Execution timing (`exec_core`)

All of the controller's timing guarantees come from the execution core:

- **Zero dead time.** An instruction of duration d occupies exactly d
  cycles, and the next one begins on the following cycle. The instruction
  memory has a one-cycle read latency. A two-entry prefetch queue in front of
  the decoder hides that latency, so even a run of one-cycle instructions
  issues one per cycle. The queue refills while the current instruction
  counts down.
- **Same start for every channel.** The first instruction begins 4 cycles
  after `start`, identically in every core. Cores started together therefore
  stay aligned to the cycle for as long as their programs agree.
- **Same state at every start.** `start` clears the amplitude, frequency
  and phase registers, and every channel's NCO is cleared at the same
  moment. Each run of a program, that is each shot of an experiment,
  therefore produces the same carrier phases whatever the previous run left
  behind.
- **End of a program.** The program ends after `prog_len` instructions, a
  per-channel register. The core then drops `busy` and raises `done`.
- **`SYNC`.** `SYNC` stalls the core until the trigger goes high after
  having been low. The next instruction begins the cycle after that edge. At
  the top, the trigger passes through a two-flop synchronizer, which adds 2
  cycles.
- **`RDO`.** `RDO` sends one request to the readout controller in its first
  cycle. The channel then idles for the window.
- **Envelope index.** While an instruction runs, the core presents its pulse
  parameters on `pulse_o`. These include `env_idx`, the number of cycles since
  the instruction began, which addresses the envelope memory. It saturates at
  the last sample, so a pulse longer than the envelope holds its final value.

## Signal chain (`channel_pipeline`)

Each channel chains the following stages. The number after each stage is its
latency in cycles.

1. **RF controller** (3) computes
   `I + jQ = amp · env[idx] · (cos + j·sin)(θ_NCO + phase)`.
   - The NCO has a 32-bit accumulator and a 1024-entry sine table. The table
     is computed at elaboration from `$sin`, `round(32767·sin(2πk/1024))`.
     The cosine is read a quarter turn ahead.
   - The accumulator is cleared when the channel starts, so all channels share
     one phase reference. Otherwise it never resets, which is what makes
     frequency changes phase-coherent.
   - With `on`=0 the output is zero, but the NCO keeps running.
2. **DC controller** (3) replaces the RF controller when the channel's
   `dc_mode` register is set.
   - `STA` sets a level. The level moves towards it by `slew` LSB per cycle,
     or jumps if `slew`=0. This gives square or trapezoidal pulses.
   - With an envelope selected, the output is amplitude × envelope, which
     gives arbitrary waveforms by direct sampling.
   - Q is 0 on this path.
3. **Gain** (1): one Q2.14 factor for I and Q.
4. **Quadrature correction** (1): a 2×2 Q2.14 matrix, `I' = a11·I + a12·Q`
   and `Q' = a21·I + a22·Q`. It compensates the gain and phase imbalance of an
   external I/Q mixer.
5. **DC correction** (1) adds offsets to I and Q. These cancel the mixer's
   carrier (LO) leakage.
6. **Skew delay** (1 + skew): 0–63 whole cycles, which align channels whose
   cables or converters differ.
7. **Predistortion FIR** (1): 8 taps in Q2.14, applied to I and Q. It
   compensates the response of the line to the qubit. The reset value is tap
   0 = 1.0, which is transparent.

Every stage saturates to 16 bits. The first sample of a pulse reaches the
DAC port **8 + skew** cycles after the cycle in which its instruction issues:
3 in the RF or DC controller, 4 in the correction stages and the FIR, and 1
in the delay stage. The RF and DC paths have the same latency and every
channel has the same pipeline, so the relative timing between channels is
exactly what the programs say.

## Readout (`readout_controller`, `readout_unit`)

`RDO` sends a request to one of two readout units. If several channels ask
for the same unit in one cycle, the lowest-numbered channel wins. A request
that loses, or that finds the unit busy, is dropped and counted in a register
the host can read. The window opens the cycle after the request and lasts
`dur` cycles. It ends with a one-cycle result that is written to the chosen
measurement-register bit. Conditional instructions issued after that can
test it. Two discrimination methods exist:

- **Charge sensing.** The outcome is 1 if any ADC sample in the window
  exceeds the threshold.
- **Reflectometry.** The unit drives a quadrature probe tone on its readout
  DAC port. The tone's frequency and amplitude come from registers. The unit
  mixes each ADC sample with the tone and sums I and Q. The outcome is 1 if
  the mean I component reaches the threshold. Division is avoided by testing
  `Σ adc·cos ≥ thr · window · 2^15`.

  The delay between probe and echo is not compensated, so the decision
  uses only the part of the echo that is in phase with the probe. Both
  sums are outputs of `readout_unit`, but the top does not map them to the
  host bus. The raw samples in the digitizer memory serve for offline
  analysis.

Every window also feeds two other blocks:

- **Statistics** (`meas_stats`) counts shots and ones per measurement bit, so
  the host reads averages without fetching raw data.
- **Digitizer memory** records the raw ADC samples of every window, 4096 per
  unit. It stops when full, sets an overflow flag, and is cleared by a
  command.

## Several controllers (`exec_controller`)

| Mode | Host start/stop | Link |
|---|---|---|
| Single | Reaches the cores one cycle after the command. | Not used. |
| Conductor | Forwarded at once on `link_out` (1 = START, 2 = STOP, for one cycle). Reaches the local cores `link_delay + 1` cycles later. | Sends. |
| Performer | Ignored. | Acts on `link_in`, `link_delay + 1` cycles after it arrives. |

To start all units on the same clock edge, set each unit's `link_delay`:

- With L register stages on the link and a performer delay Dp, set the
  conductor's delay to L + 1 + Dp.
- With a different link length per performer, give each performer a delay
  that makes all the sums equal.

## Host access

A plain word bus stands in for the PCIe/DMA path. It accepts one access per
cycle (`h_wr`, or `h_rd` with `h_rvalid` one cycle later). Bits 31:28 of the
word address select the region:

| Region | Contents | Address fields |
|---|---|---|
| 0 | Control registers | `[9:5]` channel (31 = global), `[4:0]` register |
| 1 | Instruction memories (write) | `[27:22]` channel, `[21:2]` word, `[1:0]` lane |
| 2 | Envelope memories (write) | `[17:16]` memory 0–2 (instruction `env` 1–3), `[15:0]` sample |
| 3 | Measurement (read) | `[9:8]`: 0 register, 1 shot count, 2 ones count; `[4:0]` bit |
| 4 | Digitizer samples (read) | `[20]` unit, `[19:0]` sample |
| 5 | Digitizer fill count (read) | `[0]` unit |

Per-channel registers:

| Register | Name | Reset value |
|---|---|---|
| 0 | `dc_mode` | 0 |
| 1 | `gain` | 16384 (= 1.0) |
| 2–5 | `a11`, `a12`, `a21`, `a22` | identity |
| 6, 7 | `off_i`, `off_q` | 0 |
| 8 | `skew` | 0 |
| 9 | `slew` | 0 |
| 10 | `prog_len` (instructions in the program, 10 bits, so at most 1023) | 0 |
| 16–23 | FIR taps | tap 0 = 1.0, others 0 |

Global registers (channel 31):

| Register | Contents |
|---|---|
| 0 | Command, write-1 pulses: bit 0 start, bit 1 stop, bit 2 clear the measurement register, bit 3 clear the statistics, bit 4 clear the digitizers. Reads back `running`. |
| 1 | Mode: 0 single, 1 conductor, 2 performer. |
| 2 | `link_delay` |
| 3, 4 | Probe tuning words of readout units 0 and 1. |
| 5, 6 | Probe amplitudes of readout units 0 and 1. |
| 7 | Dropped readout requests. |
| 8 | Digitizer overflow flags. |

A typical run has five steps:

1. Write the envelopes.
2. Write the programs and `prog_len`.
3. Set the corrections.
4. Write the start command.
5. Poll `running`, then read the measurement register, the statistics and the
   digitizers.

## Where this design departs from, or fills in for, the published system

Kept from the published system:

- the ISA mnemonics and what each instruction does;
- the channel count, the two readout channels and the three envelope
  memories;
- the order of the correction stages;
- the two discrimination methods;
- the averaging unit;
- the conductor/performer scheme.

Everything else is this design's own choice: every bit encoding and field
width, the register and address maps, the NCO table size, the FIR length, the
delay range, the link codes and the readout decision rules.

Specific differences:

- **Programs live on chip.** Each channel has 1024 instruction words. The
  published system streams instructions from DRAM into on-chip FIFOs, which
  allows programs of any length. Here a longer program means a larger
  `IMEM_DEPTH`.
- **Raw readout data stays on chip too,** in 4096-sample memories. The
  published system writes it to DRAM. Windows longer than 20.48 µs keep only
  their first samples.
- **Not built:**
  - the PCIe interface, the DMA engine and the DDR3 memory controller. The
    host word bus takes their place.
  - the PLL and the clock and reset distribution, including fine (sub-cycle)
    skew adjustment. Only whole-cycle skew is implemented.
  - the DAC and ADC converters. Their samples are ports of the top.
  - the host software.
- **Every channel has both an RF and a DC controller,** chosen by a register.
  The published system does not say how its 22 channels are divided between
  the two kinds.
- **The readout decision rules are deliberately simple:** any-sample crossing,
  and projection of the mean on I. Loop delay is not compensated.
- **A DC channel puts its level on I** and holds Q at 0. The published
  waveform example draws DC steps on the Q output instead.
- **DC channels pass through the same correction stages** as RF channels,
  all at identity by default.
- **Crosstalk between gate voltages** is not corrected in hardware. The
  host is expected to fold crosstalk compensation into the DC levels it
  programs.

## Verification

Every module has a self-checking testbench in `tb/` named `tb_<module>`. Each
one compares the block with an independent model, checks cycle counts where
latency matters, and ends by printing `TB_RESULT checks=N failures=M`.

There are two system-level tests:

- **`tb_qubit_controller`** connects two small controllers (4 channels each)
  as conductor and performer. It checks that both units start on the same
  cycle and that back-to-back one-cycle instructions run. It also checks that
  conditional instructions are taken and skipped on real measurement
  outcomes, and exercises SYNC, both readout methods, a dropped request, raw
  recording, a DC ramp and STOP. It counts each of these mechanisms and fails
  if any never happened.
- **`tb_qubit_controller_full`** runs the top at its default size (22
  channels) through one complete programme over the host bus.
- **`tb_pulse_sequences`** runs the single-qubit calibration sequences of a
  spin-qubit experiment through a two-channel controller: Rabi, Ramsey,
  Hahn echo and AllXY. Channel 0 drives the microwave line and channel 1 a
  DC gate (load level, manipulation level, readout level). The testbench's
  ideal qubit is rotated by the controller's actual RF output samples, and a
  charge-sensor model feeds the readout ADC. The test checks:
  - each shot's measured outcome against the ideal result of the sequence;
  - every carrier sample against one free-running oscillator, which shows
    that phase stays coherent across the Ramsey and echo delays;
  - the 90° axes of y pulses;
  - exact pulse timing against the gate channel;
  - the statistics counters.

To simulate with Verilator, list the package first:

```
verilator --binary --timing -Wno-fatal -Irtl rtl/qc_pkg.sv rtl/*.sv tb/tb_qubit_controller.sv \
          --top-module tb_qubit_controller -o sim && ./obj_dir/sim
```

Replace the testbench file and the top module name to run any other
testbench. `-Wno-fatal` keeps Verilator's lint warnings, such as width
and unused-signal warnings, from stopping the build. The RTL is plain synthesizable SystemVerilog:

- all memories are arrays with synchronous reads;
- the only table, the sine table, is computed at elaboration time;
- there are no vendor primitives.
