# Digital control and readout logic for a multi-unit superconducting-qubit controller

A superconducting-qubit processor with tens of qubits is driven by several
identical controller units. Each unit makes microwave pulses for qubit control,
readout and parametric pumping, and digitises the returning readout signals.
Two jobs fall to the digital logic inside each unit:

* **Playing and capturing in one shared time frame.** Every unit keeps a
  64-bit time counter. A clock master keeps all these counters equal, so an
  experiment can start at the same counter value on every unit. A per-unit
  skew then lines up the pulse edges where they reach the chip.
* **Turning the readout stream into answers.** One readout line carries up to
  four resonator tones. The receive logic demodulates the line, separates the
  tones, filters, decimates, weights and sums each capture window, averages
  over repetitions and can classify each result into one of up to four states.

This repository holds synthesizable SystemVerilog for that digital part:
* the twelve-unit system;
* one unit's signal path and sequencer;
* every stage of the capture chain;
* the time synchronisation.

The RF parts are not modelled. These are the data converters with their
on-chip NCOs, the LO synthesisers, the up- and down-converting mixers,
filters, amplifiers and the clock-distribution hardware. The design ends at
plain sample ports where those parts would connect.

## System structure

```
                 timing_ref (62.5 kHz)
                        |
              +---------+----------+
              |    sync_master     |  master time counter
              +---------+----------+
                 sync_valid / sync_value (shared)
        +---------------+----------------+-----  ... 12 units
        v               v                v
 +--------------+ +--------------+ +--------------+
 |qube_unit_fpga| |qube_unit_fpga| |qube_unit_fpga|
 +--------------+ +--------------+ +--------------+
  host, adc_in[4] -> cap_out[16]; dac_out[16]
```

Each `qube_unit_fpga` contains the following.

| part | modules | what it does |
|---|---|---|
| register file | `unit_regs` | host writes to settings, memories and tables |
| time base | `time_counter`, `exec_scheduler` | follows the master; fires the start at the scheduled count plus skew |
| sequencer | `timing_list`, `capture_gate` | repetitions; awg start per repetition; capture windows |
| transmit, ×16 | `waveform_memory`, `dac_interface`, `nco`, `quad_mixer` | plays stored I/Q samples onto a digital carrier |
| receive, ×4 | `nco`, `quad_mixer`, `adc_interface` | demodulates the input; applies the capture gate and delay |
| capture, ×4 per input | `capture_unit` | FIR, decimation, window, sum, integration, classification |

Shared types, the register map and the fixed-point helpers are in
`qube_pkg`.

## Sample format and arithmetic

All signal paths carry one complex sample per clock in a struct:

* `iqs_t` has fields `valid`, `first`, `last` and `d.i`/`d.q` (16-bit signed).
* After the sum stage, values are 48-bit (`accs_t`).

Coefficients are Q1.15, so `0x7fff` is about +1. The helper `cmul_q15`
multiplies exactly, adds half an LSB and shifts right by 15. It saturates
to 16 bits. The same rule is used in the FIR, the window and the mixers.

The source system runs its converters at 500 MSa/s from a 250 MHz FPGA
clock, so it handles two samples per clock. This RTL keeps one sample per
clock. Every count below is therefore in samples, which is the same as
clocks. Widening the datapath to two lanes would not change the control
structure.

## Time synchronisation

`sync_master` counts system clocks. On every rising edge of the 62.5 kHz
reference, from the second one on, it measures the reference period P in
clocks. It then broadcasts the value its own counter will have one clock
after the next reference edge: `count + P + 1`.

Each unit's `time_counter` samples the reference through three flops. It
holds the last message, and at its next reference edge it loads that value
instead of incrementing. All units see the same edge in the same clock
(their synchronisers are identical), so after the first load every unit
counter equals the master counter. Later messages carry the correct next
value, so they leave the counters unchanged.

`synced` goes high at the first load. The testbench `tb_sync_master` releases
three units from reset at random times and checks them against the master on
every clock.

## Scheduled start and skew

The host writes a 64-bit start time and an 8-bit skew, then arms the unit.
`exec_scheduler` compares the unit counter with the start time every clock.
When the counter reaches it, the scheduler waits `skew` more clocks and
pulses `exec_start`. The pulse is on the clock where the counter reads
`start_time + skew + 1`. A start time already in the past fires at once.

`exec_start` does three things:

* it clears the phase of every NCO in the unit, so carriers are coherent from
  one execution to the next and between units;
* it starts `capture_gate`;
* it drops `armed`.

## Sequencer: repetitions and capture windows

`capture_gate` runs `n_reps` repetitions of `rep_period` clocks each.

* At clock 0 of a repetition it pulses `awg_start`, which starts playback on
  every transmit channel. It also pulses `rep_start`, with `first_rep` and
  `last_rep` set as levels.
* `timing_list` holds up to 16 windows as (start, length) pairs, in samples
  from the start of the repetition. Entries must be in ascending order and
  must not overlap. `n_sections` says how many are used. A zero-length entry
  is skipped.
* While a window is open, `gate_open` is high. `gate_first` and `gate_last`
  mark its ends.
* `done` pulses on the last clock of the last repetition.

Windows should end at least 16 clocks before the end of the period. This
gives the capture pipeline room to empty before the next `rep_start`.

The gate markers pass through `adc_interface`. That module delays them by
`cap_delay` clocks (0 to 255) relative to the sample stream, to account for
the round trip through cables and the chip. It then registers the stream
once.

## Transmit path

There are 16 channels per unit, and each channel is built as follows.

* `waveform_memory` holds 4096 complex samples. The host writes one sample
  per access as `{Q, I}`.
* On `awg_start`, `dac_interface` reads `wave_len` samples from
  `wave_start` upward, one per clock. The first sample appears one clock
  after the edge that samples the start. When no playback is running, the
  channel sends zeros with `dac_valid` low.
* `quad_mixer` multiplies each sample by the channel NCO. This moves the
  envelope to its intermediate frequency inside the converter band.

The NCO has a 32-bit phase accumulator, so the frequency word is
`f / f_s * 2^32`. The sine and cosine come from a 16-stage CORDIC with
4 guard bits, with an amplitude of about 32767 (full scale). The latency from phase to output is 16 clocks. An
execution should therefore leave the first 16 samples of a repetition unused,
because the CORDIC pipeline still holds the phases from before the clear.

## Receive path and capture chain

Each of the 4 receive inputs is demodulated by its own NCO. `quad_mixer`
multiplies by the conjugate carrier. The result is gated by `adc_interface`
and goes to four `capture_unit`s, one per readout tone. Each capture unit
runs the stages below in this order. Every stage has a bypass bit, and the
bits sit in the capture unit's control register.

| stage | module | operation | latency |
|---|---|---|---|
| FIR | `complex_fir` | 16 complex Q1.15 taps over valid samples; resets to a unit impulse | 1 |
| decimation | `decimator` | keeps every 4th sample of a window and always its last one | 1 |
| window | `complex_window` | multiplies the k-th decimated sample of a window by weight k (2048 weights) | 2 |
| sum | `sum_unit` | adds up a window into one 48-bit value; emitted with the window's last sample | 1 |
| integration | `integrator` | adds results of the same index over repetitions (1024 entries); outputs only in the last repetition | 2 |
| classification | `classifier` | two lines: bit k = (a_k·I + b_k·Q >= c_k), giving 4 categories | 1 |

How the stages combine:

* **Tone separation.** The four capture units on one input are told apart by
  their FIR taps. A complex band-pass around each tone keeps that tone. The
  window sum over whole carrier periods also rejects the others.
* **Capture modes.** Choosing bypass bits and `integrate` gives the usual
  modes:
  * a classified result per shot (integrate off);
  * an averaged, integrated value (integrate on, classifier bypassed);
  * an averaged time trace (sum bypassed, integrate on).
* **Output word.** The output `cap_word_t` carries the 48-bit I/Q value, the
  2-bit category and an `is_class` flag.
* **Integrator overflow.** If more than 1024 results are produced in one
  repetition, the surplus is not integrated. `int_overflow` counts it.

## Host register map

The host writes 32-bit words. Address bits [23:20] select a region.

| region | [23:20] | address fields | contents |
|---|---|---|---|
| control | 0 | [7:0]: 00/01 start time lo/hi, 02 arm, 03 skew, 04 repetitions, 05 period, 06 sections, 07 capture delay, 10+r receive NCO word | sequencer |
| transmit NCO | 1 | [7:0] channel | frequency word |
| playback | 2 | [11:4] channel, [0] 0 start / 1 length | waveform range |
| waveform | 3 | [19:14] channel, [13:0] sample | `{Q, I}` |
| timing list | 4 | [4:1] entry, [0] 0 start / 1 length | capture windows |
| capture config | 5 | [19:12] capture unit, [3:0]: 0 bypass bits `{integrate, cls, sum, win, dec, fir}`, 1/4 `{b, a}` of line 0/1, 2-3/5-6 `c` lo/hi of line 0/1 | per capture unit |
| FIR taps | 6 | [19:12] capture unit, [11:0] tap | `{Q, I}` |
| window weights | 7 | [19:12] capture unit, [11:0] index | `{Q, I}` |

Capture unit numbers are `input * 4 + tone`.

Timing of a write:

* the request is registered once;
* a memory write happens on the next clock;
* a setting is visible two clocks after the request.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `N_UNITS` | 12 | units in the system |
| `N_AWG` | 16 | transmit channels per unit |
| `N_RX` | 4 | receive inputs per unit |
| `N_CAP` | 4 | capture units (readout tones) per input |
| `WAVE_DEPTH` | 4096 | samples per waveform memory |
| `FIR_TAPS` | 16 | complex FIR taps |
| `WIN_DEPTH` | 2048 | window weights (decimated samples per window) |
| `INT_DEPTH` | 1024 | integration entries per repetition |
| `TL_DEPTH` | 16 | capture windows per repetition |

The counts of units, inputs and tones, and the stage order, follow the
source system. The depths, the tap count and all word widths are this
design's choices.

What these defaults hold:

* A 1.024 µs readout pulse is 512 samples at 500 MSa/s, or 128 after
  decimation. That is well inside a 2048-weight window.
* A 240 ns cross-resonance gate is 120 samples out of a 4096-sample memory.
* 5000 shots per state fit the 16-bit repetition count.
* Across 12 units there are 192 transmit channels and 48 receive inputs.
  A 64-qubit chip in groups of four needs 64 control lines, 16 readout lines
  and 16 pump lines.

## Where this design departs from the source system

* **Sample rate.** One sample per clock instead of two, as explained above.
* **Converter NCOs.** The coarse and fine NCOs and the channel combining
  inside the converter chips are outside the design. The transmit and
  receive NCOs here are the FPGA's own quadrature stage.
* **Insides of the capture stages.** The source names the stages and their
  order, but not their insides. The arithmetic, the widths, the decimation
  rule (keep the 4th sample of each group), the two-line classifier and the
  register map are choices made here.
* **Sync message format.** The synchronisation message (a 64-bit value
  loaded at the next reference edge) is a choice made here. The source gives
  only the mechanism: a shared 62.5 kHz reference and a counter value sent
  to every unit.
* **Host link and result memory.** The host link is a simple registered
  write port. The source uses Ethernet links, an SDRAM and a configuration
  network; none of these is modelled. Captured results leave on a stream
  port.

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

* `tb_<module>` tests the module against an independent model: random
  stimulus, exact expected values and cycle-exact latency checks.
* `tb_capture_unit` compares the whole chain, under 40 random
  configurations, with a behavioural model.
* `tb_qube_unit_fpga` runs one reduced unit end to end, with the transmit
  outputs looped back to the receive inputs.
* `tb_qube_system` runs the full 12-unit system at default sizes. It covers
  synchronisation, scheduled starts with a different skew per unit,
  playback, two-tone demultiplexing (by the window sum and by a FIR band
  stop), decimation, every bypass, integration, classification, capture
  delay and integrator overflow. It counts each of these mechanisms and
  fails any that never happened. It takes about 3 minutes with Verilator.

To run one testbench with Verilator:

```
verilator --binary --timing -y rtl -y tb rtl/qube_pkg.sv tb/tb_capture_unit.sv \
          --top-module tb_capture_unit -Mdir obj && obj/Vtb_capture_unit
```

Verilator leaves variables without reset at random values if run with
`+verilator+rand+reset+2`. The testbenches are written to pass that way.

## Known limits

* The classifier compares against straight lines. Curved or nearest-centroid
  decision regions are not provided.
* The integrator does not saturate. With 48 bits, 2^16 repetitions of a
  full-scale 2048-sample sum still fit.
* The time counter wraps after 2^64 clocks.
* Synthesis of the full 12-unit system is large. Each unit has 256 complex
  FIR multipliers and 16 CORDIC pipelines. Generic synthesis of the whole
  system is slow, and single units synthesise separately.
