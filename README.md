# Closed-loop control hardware for superconducting qubits

Dynamic quantum circuits need a measurement result to change what the control
electronics play next, within a small fraction of the qubits' coherence time.
That needs three things that conventional arbitrary waveform generators do not
give: a qubit state decision made in hardware a few clocks after the readout
signal ends, a way to send that decision to every output module, and pulse
sequencers that can branch on it without stopping their outputs.

This RTL builds that loop in three parts:

* **Readout receiver** (`qdsp_receiver`): turns a digitised readout record
  into one state bit per multiplexed qubit. A fast path integrates the raw
  samples against a stored, per-qubit kernel and thresholds the result. A
  slower path downconverts, filters and decimates each channel for
  calibration and for a second decision.
* **Trigger distribution module** (`tdm`): latches up to seven state bits on
  a strobe. It broadcasts them, with a periodic system trigger, as symbols
  on up to ten serial links.
* **Pulse sequencer module** (`aps2_module`): a small processor with a
  two-level instruction cache. Its instructions include loops, calls and
  branches on the received bits. It feeds seven output engines through
  queues: two waveform engines, four marker engines and a modulation engine.
  The waveforms are single-sideband modulated by numerically controlled
  oscillators, corrected for I/Q mixer errors and sent to two 14-bit DACs,
  four samples per clock.

`dqc_system` joins two receivers, one distribution module and nine sequencer
modules into the whole loop.

## Numbers at a glance

| | default | where it is set |
|---|---|---|
| samples per clock, ADC and DAC | 4 | `aps2_pkg::SPC`, `adc_decimator` |
| ADC / DAC width | 12 / 14 bit | ports, `DAC_W` |
| readout channels per receiver | 4 | `NCH` |
| fast kernel length | 4096 words | `KERNEL_LEN` |
| baseband kernel length | 512 samples | `BB_LEN` |
| channelizer decimation | 4 x 2, 24 taps per stage | `channelizer` |
| instruction width | 64 bit | `aps2_pkg::INSTR_W` |
| instruction cache line | 128 instructions | `inst_cache.LINE_WORDS` |
| circular / associative lines | 8 / 8, lookahead 4 | `inst_cache` |
| waveform cache | 131072 complex points, two pages | `waveform_cache.SAMPLES` |
| NCOs per module | 4, 24-bit phase | `modulation_engine` |
| sequencer modules, links | 9, plus 1 to another crate | `NAPS2`, `tdm.NOUT` |

## Readout: a decision in four clocks

The ADC gives four 12-bit samples per clock. `adc_decimator` adds them into
one sample per clock, which gives a factor-4 decimation with a box-car
anti-alias filter. A record starts with the word presented together with the
trigger and lasts `rec_len` words.

**Fast path.** Demodulation, filtering and integration are linear. So for
each qubit they fold into one complex kernel `k[n]`, and the decision is
`Re(sum x[n] k[n]) > threshold`. `kernel_integrator` holds the kernel in a
RAM written by the host. Each clock it multiplies the incoming real sample by
the kernel word, and it keeps the real and imaginary sums. On the sample
marked last it adds the final product, compares and outputs `state_o` with a
`state_valid_o` pulse 3 clocks later. Counting the decimator, the decision
comes 4 clocks after the last ADC word. The state bit holds until the next
decision. All channels of a receiver see the same samples, so a multiplexed
qubit is selected by its kernel alone.

**Diagnostic path.** The samples cross into a second, slower clock through an
asynchronous FIFO (`cdc_fifo`, Gray-coded pointers, first word falls through).
A record longer than that clock can drain sets a sticky `cdc_overflow_o`.
In the slow domain each channel (`channelizer`) does the following:
1. An `nco` runs at the channel's frequency.
2. A `cordic_rotator` mixes the sample with the NCO phase down to baseband.
3. Two `polyphase_decimator` FIR stages, each for I and for Q, decimate by 4
   and then by 2.
4. A second kernel integrator of up to 512 baseband points makes a second
   decision.
The record start resets the NCO phase and the filter phases, so every record
is processed identically.

The CORDIC rotator does 14 iterations, two per pipeline stage, after a
quadrant pre-rotation. It compensates the CORDIC gain with one multiply by
39797/65536 and saturates. Latency: 7 clocks.

## Distribution: one byte, one trigger, ten links

`tdm_steering` registers its eight inputs. Input 7 is the data-valid strobe;
on each rising edge the byte `{0, in[6:0]}` is sent to every link.
`trigger_generator` produces a one-clock trigger every `trig_interval`
clocks while `trig_run` is high, the first one right away.

Each `link_tx` sends one 9-bit symbol per clock: a K flag and a byte, as an
8b/10b transceiver carries them. The order of preference is:
1. the reserved trigger symbol K 0xBC;
2. otherwise a pending data byte (K flag clear);
3. otherwise idle, K 0x3C.

A byte that meets a trigger waits one clock in a holding register. From the
strobe pins to a data symbol on every link takes 3 clocks, or 4 when the byte
meets a trigger.

At the sequencer, `link_rx` moves the non-idle symbols into the sequencer
clock through another asynchronous FIFO. There a trigger symbol becomes a
one-clock trigger for all seven engines, so every module starts in the same
clock. Data bytes are queued, 16 deep, for the `LOAD_CMP` instruction.

## The sequencer

### Instruction set

Instructions are 64 bits: opcode `[63:60]`, selector `[59:56]`, payload
`[55:0]`. `aps2_pkg` has the encodings and `mk_instr()`.

| opcode | effect |
|---|---|
| `WAVEFORM`, `MARKER`, `MODULATOR` | write the payload (an engine command) to each engine in the selector mask |
| `WAIT` | write WAIT to all seven engines: each holds until the next trigger |
| `SYNC` | write SYNC to all engines, stall until every queue is empty and every engine waits at its SYNC, then release them in the same clock |
| `LOAD_REPEAT v` / `REPEAT a` | load the repeat counter; jump to `a` and count down while it is non-zero |
| `LOAD_CMP` | move the next link byte into the compare register (stall until one is there) |
| `CMP op v` | result = (register op v), op one of `=`, `!=`, `<`, `>` |
| `GOTO a`, `CALL a` | jump; conditional on the result when selector bit 0 is set; CALL pushes the return address and the repeat counter |
| `RETURN` | pop both |
| `PREFETCH a` | hint to load the line holding `a` into the associative cache |

The engine commands are listed below. Bits `[55:52]` hold the operation; counts
are in clock words of four samples.

* **Waveform engine:**
  * PLAY: TA flag `[51]`, count `[47:24]`, sample address `[16:0]`;
  * WAIT;
  * SYNC;
  * PREFETCH: page `[16]`, source word address `[31:0]`.
* **Marker engine:**
  * PLAY: last-word pattern `[51:48]`, count `[47:24]`, level `[0]`;
  * WAIT;
  * SYNC.
* **Modulation engine:**
  * the phase commands RESET_PHASE, SET_PHASE_OFFSET, SET_PHASE_INCREMENT and
    UPDATE_FRAME: NCO mask `[51:48]`, phase `[23:0]`;
  * MODULATE: NCO `[49:48]`, count;
  * WAIT;
  * SYNC.

### Why engines have queues

One decoder serves all the engines, dispatching one instruction per clock.
Each engine plays from its own command queue, so the decoder can run ahead
of playback. A branch or a cache refill costs decoder time but no output
time, as long as the queues hold work. Pulses therefore play back to back
with no gap, and every PLAY lasts at least two clocks. The engines are the
only part that waits for triggers. `SYNC` is the one place where the decoder
waits for the outputs, and it is what puts all engines on a common time
again after a data-dependent branch.

A taken jump flushes the sequencer's 8-entry look-ahead buffer and restarts
the fetch at the target. When the target is in the cache, this costs 3
clocks of dispatch.

### Instruction cache

A sequence of up to 128 M instructions lives in deep memory. The cache has
two parts:
* **Circular part.** Line L sits in slot L mod 8. The controller keeps the
  current line and fetches the 4 lines after it ahead of time. The other 3
  slots still hold the lines just played, so a short backward loop hits.
* **Associative part.** 8 lines with full tags, filled round-robin by
  `PREFETCH` hints. It holds subroutines from anywhere in memory.

A lookup answers the next clock with the instruction or a miss. On a miss the
sequencer asks again until the line has arrived. Fetch priority: the current
line on a miss, then a pending hint, then lookahead. Only one line is
fetched at a time.

### Waveforms and the analog path

The waveform cache holds 131072 complex points (16-bit I and Q), four to a
128-bit word, in two pages. The sequence can use both pages as one library.
It can also play from one page while a `PREFETCH` refills the other. The two
waveform engines read the same point: engine 0 takes the I half and
engine 1 the Q half. A time-amplitude PLAY repeats one point for `count`
clocks, which makes long flat pulses cheap.

The four samples of each clock are then processed as follows:
1. Each sample is rotated by the phase the modulation engine gives for that
   sample (`cordic_rotator`, 7 clocks).
2. `iq_correction` applies a 2x2 matrix in 2.14 fixed point, then the channel
   offsets, and saturates to the 14-bit DAC codes (2 clocks).

The 9 clocks after the engine are the processing budget the original
hardware quotes. The markers are delayed 9 clocks to line up with the analog
outputs.

### Modulation engine: frames that stay coherent

Four NCOs run all the time, selected or not, so a qubit's phase reference is
never lost. Each NCO has three values:
* an increment, which is the detuning;
* an offset, which makes X pulses differ from Y pulses;
* a frame, which accumulates virtual Z rotations.

The phase of sample k is `acc + k*inc + offset + frame`. Phase commands can
be queued during a MODULATE. They take effect together at the next
boundary: the end of a MODULATE, the release of a WAIT or SYNC, or the start
of a MODULATE from idle. A conditional Z rotation therefore lands exactly
between two pulses and needs no waveform at all.

## Timing summary

Numbers are in clocks of each block's own clock, as measured by the
testbenches.

| step | this design | original hardware |
|---|---|---|
| last ADC word to state bit | 4 | 14 |
| strobe to link symbol | 3 (4 on collision) | 1 + 1 |
| link symbol to trigger or data at the sequencer | about 3 for synchronising + 1 | (part of 210 ns interface) |
| taken jump, target cached | 3 | 16 |
| engine output to DAC word | 9 | 9 |
| trigger to first DAC word | 11 | not given |
| last ADC word to conditional pulse at the DAC, whole system, transceivers and converters excluded | 27 | about 430 ns including them |

## Departures from the original hardware

* The fast decision is quicker than the original's 14 clocks. The
  multiply-accumulate is pipelined in only three stages, and none of the
  original's interface registers are modelled.
* The jump penalty is 3 clocks instead of 16. The look-ahead buffer sits
  directly in front of the decoder, with no deeper fetch pipeline.
* The distribution module's input link from other distribution modules has
  no function in the baseline and is not built.
* The serial transceivers, the DDR memory controllers, the DACs and ADCs, the
  marker serializers and the host interfaces are outside the logic. The top
  module brings out their signals as ports: ADC words, one instruction-memory
  port and one waveform-memory port per sequencer, DAC and marker words.
  The links between distribution module and sequencers are plain wires
  clocked by the distribution module.
* The encodings are this design's own: opcodes, field positions, link symbol
  codes, the channel-to-input mapping of the state bits, and the 24-bit phase.
* The original's arbitration of one DDR memory between the two caches is
  replaced by two independent memory ports.
* `CMP` compares the whole byte. Testing one bit among several results takes
  a short chain of compares and branches.
* Only one `PREFETCH` hint can be pending in the instruction cache; a newer
  hint replaces it. A waveform prefetch that arrives during a fill is dropped
  and flagged.

## Files

`rtl/` holds one module or package per file, each opening with a description
of its function, interface and timing:

* **Shared and general:** `aps2_pkg`, `sync_fifo`, `cdc_fifo`.
* **Readout:** `adc_decimator`, `kernel_integrator`, `nco`, `cordic_rotator`,
  `polyphase_decimator`, `channelizer`, `qdsp_receiver`.
* **Sequencer:** `inst_cache`, `sequencer`, `waveform_cache`,
  `waveform_engine`, `marker_engine`, `modulation_engine`, `iq_correction`,
  `link_rx`, `aps2_module`.
* **Distribution:** `tdm_steering`, `trigger_generator`, `link_tx`, `tdm`.
* **Whole system:** `dqc_system`.

`tb/` holds one self-checking testbench per module, `<module>_tb.sv`, plus
`sdram_model.sv`, a behavioural deep memory with request latency and bursts.
Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. Most compare against an independent reference computed in the
testbench: sums, FIR and CORDIC arithmetic, an interpreter of the
instruction set, expected symbol streams. They also check latencies in
clocks.

`dqc_system_tb` runs the whole system at its default size: two 4-channel
receivers, 4096-word kernels, nine sequencer modules with full 128k-point
waveform caches. Eight rounds of measurement-driven branching are checked
on every module's DAC output. The test also checks that triggers, SYNC
releases, jumps, dispatch stalls, cache misses, baseband decisions and the
receiver FIFO overflow all happened.

`workloads_tb` runs the feedback circuits the system is meant for on a
reduced system with four sequencer modules, each round with random
measured states:
* **Simultaneous reset of three qubits.** Three modules each test their own
  bit of the shared byte and play a pi pulse only when it is 1. The same
  conditional pi pulse is the single-qubit fast reset, and it is also the
  conditional bit flip that makes entanglement by measurement deterministic.
* **Measurement-based S gate.** A fourth module turns its frame by a quarter
  turn when the ancilla bit is 1. Its next pulse must come out rotated
  accordingly on the I/Q outputs.

The sizes these circuits need all fit the default parameters:
* measurement records of 2.2 to 4.5 us are 550 to 1125 words, against
  4096-word kernels;
* three multiplexed qubits use three of a receiver's four channels;
* the state bits use 4 of the 7 data bits.

To simulate one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb --top-module sequencer_tb \
    rtl/aps2_pkg.sv tb/sequencer_tb.sv -o sim
obj_dir/sim +verilator+rand+reset+2
```

The other files are found through `-Irtl -Itb`. `dqc_system_tb` takes about
a minute to build and a second to run. The RTL uses no vendor primitives.
Memories are plain arrays: kernel RAMs, caches and FIFOs.
