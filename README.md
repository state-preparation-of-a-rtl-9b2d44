# Readout, state estimation and feedback firmware for a superconducting qubit

A qubit left alone settles into a thermal mixture. In the experiment this design
was built for, a fluxonium qubit at 1.26 GHz sits in |1> about 12 % of the time,
and waiting for it to relax takes several multiples of its 80 µs energy-relaxation
time. *Active reset* is much faster. You measure the qubit, decide in real time
whether it is in |1>, and if so apply a pi pulse that rotates it to |0>. The
whole sequence takes about 1.5 µs. Only a few hundred nanoseconds of it may be
spent inside the electronics: between the last sample of the readout pulse
coming in and the first sample of the correcting pulse going out.

This RTL is the FPGA fabric part of such a controller. It takes two 500 MSPS ADC
streams, the readout signal after the experiment and a reference copy, and turns
each readout pulse into one point (I, Q) in the IQ plane. It classifies that point
as |0> or |1> with a straight line. A small sequencer then picks the next pulses
from that result, so the conditional pi pulse reaches the DAC 11 clocks (88 ns)
after the last readout sample enters the fabric. The converters and their
rate-change filters, which make up the rest of the platform's latency, are not
part of this RTL.

```
 adc_ref ─► ref_delay ─┐
                       ├─► iq_mixer ─► iq_integrator ─► state_discriminator ─┬─► result_* (host)
 adc_sig ─► register ──┘      (I,Q products)   (window sums)    (|0>/|1>)   ├─► iq_histogram (host)
                                    ▲                                       │
                                    │ acq_start/len/tag                     ▼
                              feedback_sequencer ◄──────────────── res_valid/res_state
                                    │ pulse_start/env/len
                        ┌───────────┴────────────┐
                 pulse_generator          pulse_generator
                  (readout pair)           (drive pair)
                 dac_out[0], [1]          dac_out[2], [3]
```

## Sample words and clocking

The fabric runs at 125 MHz and the sample streams at 500 MSPS, so each clock
carries **SPC = 4 samples** per channel as a packed word `[SPC-1:0][W-1:0]`.
Lane 0 is the oldest sample. ADC samples are 12-bit two's complement and DAC
samples are 14-bit. All shared constants live in `rtl/qc_pkg.sv`.

| quantity | value | where it comes from |
|---|---|---|
| fabric clock | 125 MHz | paper |
| sample rate | 500 MSPS, 4 samples per clock | paper |
| ADC / DAC sample width | 12 / 14 bit | paper (converter resolution) |
| readout pulse and window | 800 ns = 400 samples = 100 clocks | paper |
| readout / drive intermediate frequency | 62.5 MHz / 80 MHz | paper (experiment) |
| product width | 24 bit | follows from 12 × 12 |
| I/Q accumulator | 42 bit (24 + 2 lane bits + 16 length bits) | own choice |
| window length | 16-bit count of clocks (up to 524 µs) | own choice |
| discriminator weights / offset | 18 bit / 64 bit signed | own choice |
| envelope memory per output pair | 1024 × 16 bit | own choice |
| sequencer program | 64 × 32 bit | own choice |
| histogram | 64 × 64 bins × 20 bit | own choice |

## Turning two ADC streams into one IQ point

This is the least obvious part of the design, and it is what makes the readout
work without a local oscillator inside the FPGA.

The readout pulse is split after up-conversion. One branch goes through the
cryostat, where the cavity's response changes its amplitude and phase, because
the cavity frequency depends on the qubit state. The other branch goes straight
to a second down-converter. Both come back at the intermediate frequency. The
reference therefore carries exactly the phase and frequency of the pulse that
was sent, and the signal carries the same waveform, rotated and scaled by the
cavity. Comparing the two removes any phase drift of the oscillators and
mixers.

**Alignment (`ref_delay`).** The two branches have different cable lengths, so
the reference is delayed by a calibrated number of whole samples (0–64) before
the comparison. The block keeps the last 16 clock words and, for each output
lane, picks the sample `delay` positions back in the joined window. This means
the delay does not have to be a multiple of four. The signal stream gets one
plain register so that both paths have the same fixed latency.

**Mixing (`iq_mixer`).** The in-phase product is `sig[n]·ref[n]`. For the
quadrature product the reference must be shifted by a quarter period. At a
62.5 MHz intermediate frequency and 500 MSPS one period is 8 samples, so a
quarter period is exactly **2 samples**: `sig[n]·ref[n-2]`. For a reference
`cos(ωn)` this is `cos(ωn − π/2) = sin(ωn)`. Because `n-2` can fall into the
previous clock word for lanes 0 and 1, the block keeps one old reference word.
The shift is a parameter (`Q_SHIFT`). It stays a quarter period only near
62.5 MHz; at other intermediate frequencies the I and Q axes are no longer
orthogonal. That is acceptable for a classifier that is trained on the same
axes.

**Integration (`iq_integrator`).** The four lane products are added and
registered, then accumulated while a window is open. A window opens in the
clock in which `start` is high and sums that clock's products and those of the
next `len-1` clocks. The sums appear with a one-clock `valid` two clocks after
the last product. The next window may open in the very next clock. To allow
that, the block outputs `busy_next`, the value `busy` will take after this
clock. The sequencer registers its start strobe, so it must know one clock
ahead whether the start will be accepted. A start that arrives while a window
is open is ignored and counted in `dropped`; the sequencer never produces one.

What the window sums to: for a reference of amplitude *R* and a signal
`A·cos(ωn + φ)`, the I sum over N samples is about `N·A·R/2·cos φ` and the Q sum
about `N·A·R/2·sin φ`. The qubit state moves (A, φ), so the two states form two
clouds in the IQ plane.

## Deciding the state

`state_discriminator` computes `w_i·I + w_q·Q + bias` and reports |1> when the
result is positive. The coefficients are inputs: a calibration program fits the
line, for example by linear discriminant analysis on shots taken in known
states, and writes the coefficients. The hardware only evaluates the line:
multiply in one stage, add and compare in the next. The I, Q and tag of the
shot come out with the decision.

The line used in the experiment was `Q = (5923.97·I + 93309.77)/8668.54` in the
units of its plots, with |1> on the large-I side. Its coefficients are
`w_i = 5924`, `w_q = −8669`, `bias = 93310·k`. Here *k* converts the plot units
to the integrator's raw sums. The testbenches use this line, with k = 7812 in
the end-to-end test.

## The sequencer and its instruction set

`feedback_sequencer` is what makes the loop *closed*. It runs a short program
from a 64-word memory that the host writes. It executes one instruction per
clock and can wait for a state estimate and branch on it. The instruction set is
this design's own; any scheme that can "continue with a different pulse sequence
after each state estimate" would do.

| bits 31:28 | name | fields | action |
|---|---|---|---|
| 0 | `END` | – | stop, raise `done` |
| 1 | `PULSE` | [27] channel (0 readout, 1 drive), [25:16] envelope address, [15:0] length in clocks | start a pulse, continue next clock |
| 2 | `ACQ` | [27] histogram tag, [15:0] window length in clocks | open an acquisition window; stalls while the integrator will still be busy |
| 3 | `WAIT` | [15:0] n | wait n clocks (at least 1) |
| 4 | `BRANCH` | [27] c, [25:16] target | wait until the estimate of the last `ACQ` is in, jump if it equals c |
| 5 | `JUMP` | [25:16] target | jump |

The struct `qc_pkg::instr_t` gives the same layout.

Two details keep the loop short and correct:

* The sequencer counts acquisitions whose estimate has not come back.
  `BRANCH` waits until the count is zero, so it always uses the estimate of the
  latest `ACQ`, even when several windows are in the pipeline.
* An estimate that arrives in the same clock as a waiting `BRANCH` is used
  straight away (bypass). No clock is spent storing it first.

The active-reset program used in the end-to-end test:

```
0  PULSE  readout, env 0, 100 clocks      ; 800 ns readout pulse
1  WAIT   19                              ; loop delay to the ADCs
2  ACQ    100 clocks                      ; integrate the response
3  BRANCH if |0> to 5                     ; ground state: nothing to do
4  PULSE  drive, env 0, 12 clocks         ; pi pulse
5  WAIT   20
6  PULSE  readout, env 0, 100 clocks      ; verification readout
7  WAIT   19
8  ACQ    tagged, 100 clocks              ; goes to the histogram
9  ACQ    20 clocks                       ; two short windows: stall, then back to back
10 ACQ    20 clocks
11 BRANCH if |0> to 12                    ; wait for all estimates
12 END
```

The `WAIT` before each `ACQ` covers the time from the sequencer's strobe through
the pulse generator, DAC, cables and ADC back to the products. It depends on
the setup and is found by calibration.

## Pulse generation

Each of the two output IQ pairs (readout, drive) is one `pulse_generator`. A
32-bit phase accumulator advances by `4·freq` per clock, and lane *l* adds
`l·freq`, where `freq = f_IF / 500 MHz · 2^32`; 62.5 MHz gives `0x2000_0000`.
The top 10 phase bits address a 1024-entry sine table,
`rtl/sine_lut.hex`, with entry k = round(32767·sin(2πk/1024)) in 16-bit two's
complement. Cosine reads the entry a quarter turn ahead. The carrier runs
continuously, so pulses keep a fixed phase relation to each other.

The pulse shape is a signed 16-bit envelope, one value per clock (four
samples), read from a 1024-word RAM that the host fills through `env_we`,
`env_sel`, `env_waddr` and `env_wdata`. A `PULSE` plays `len` consecutive words
from its envelope address. Output samples are `env·cos` and `env·sin`, scaled
to 14 bits: a full-scale envelope gives ±8191. Outputs are zero between pulses.
The first samples reach the DAC ports 3 clocks after the start strobe.

## IQ histogram

`iq_histogram` bins the tagged shots into a 64 × 64 grid. On each axis,
`bin = clamp((x >>> shift) + 32, 0, 63)`, so `hist_shift` sets the bin width.
Shots outside the grid land in the edge bins. A 20-bit count per bin holds one
million shots even if all land in one bin. Counting is a three-stage
read-modify-write. When a shot hits the bin being written back in the same
clock, it takes the forwarded value, so shots on consecutive clocks are never
lost. `hist_clear` zeroes the grid in 4096 clocks. The host reads a bin by
address `{q_bin, i_bin}` one clock later. `hist_total` counts the binned shots.

## Feedback latency, clock by clock

Let the last ADC word of the readout window be present in clock *t*. For a shot
found in |1>:

| clock | event |
|---|---|
| t | last ADC word at the ports |
| t+2 | its products reach the integrator (signal register / `ref_delay`, mixer register) |
| t+4 | window sums valid |
| t+6 | state estimate valid; `BRANCH` resolves in this clock (bypass) |
| t+7 | `PULSE drive` executes |
| t+8 | pulse start strobe |
| t+11 | first pi-pulse word on `dac_out[2]`/`dac_out[3]` |

11 clocks is 88 ns of fabric latency. The converters and the 4 GSPS ↔ 500 MSPS
decimation and interpolation filters come on top of this. The reported
platform latency was 428 ns, and those parts make up most of it. The
end-to-end test checks the 11 clocks on every pi pulse.

## What is not here, and where this departs from the source design

* **Converters, rate-change filters, processors.** The ADCs (4.096 GSPS, 12 bit),
  the DACs (6.554 GSPS, 14 bit), the decimation and interpolation filters
  between 4 GSPS and 500 MSPS, and the processors that configure the fabric are
  outside this RTL. The filters' type and coefficients were never published, and
  the other parts are fixed silicon. Their sample words and register settings
  appear as plain ports of `qubit_control_top`.
* **Register interface.** The settings (`ref_delay_samples`, `disc_*`,
  `*_freq`, `hist_shift`) and the program, envelope and histogram access ports
  are plain signals. A bus wrapper (AXI-Lite, for example) would drive them.
* **Own choices where the source is silent:** the instruction set; the
  envelope RAM and the NCO/table carrier; the histogram bin grid; all widths
  listed above; the range of the reference delay (0–64 samples); the direction
  of the quarter-period shift (reference delayed rather than advanced); the
  decision sign (`> 0` means |1>); the treatment of a start during an open
  window; the pipeline depths. The fitting of the discriminator line is left to
  software.
* **Histogram location.** The source says the histograms were taken on the
  platform but not whether by the fabric or the processors. Here the fabric
  builds them.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops on a watchdog:

| testbench | what it checks |
|---|---|
| `ref_delay_tb` | every output sample against the input stream, for delays 0, 1, 2, 5, 37, 64 |
| `iq_mixer_tb` | every I and Q product, including lanes that reach into the previous word; a 62.5 MHz tone gives Q = 0 over a period |
| `iq_integrator_tb` | window sums, tags, 2-clock result latency, back-to-back windows, `busy_next`, a dropped start |
| `state_discriminator_tb` | the experiment's line and cluster centres, points on and next to the line, 2000 random points, latency |
| `pulse_generator_tb` | every output sample at 62.5 and 80 MHz against `$sin`/`$cos`, 3-clock latency, length, idle zeros, restart |
| `feedback_sequencer_tb` | exact clock and fields of every strobe for \|0> and \|1> shots, `WAIT` timing, `BRANCH` bypass, `ACQ` stall |
| `iq_histogram_tb` | all 4096 bins against a reference count after 3000 shots with back-to-back hits, and after a clear |
| `qubit_control_top_tb` | 300 active-reset shots through `readout_model` at the top's default parameters (below) |
| `histogram_million_shots_tb` | one million shots from the experiment's two IQ clusters (11.7 % in \|1>) through the discriminator into the histogram: every bin, the total, no saturation, the \|1> population within 0.3 % |

`qubit_control_top_tb` uses `tb/readout_model.sv`, a behavioural loop. It
returns the readout DAC waveform as a reference stream 40 samples later and as a
signal stream 13 samples later still, with a state-dependent response
`(a·x[n] + b·x[n−2])/256` plus ±64 codes of uniform noise. The qubit starts in
|1> with probability 11.7 % and flips at the end of each drive pulse. The test
requires:

* every first estimate to match the prepared state;
* every verification readout to find |0>;
* the qubit to be in |0> after each shot;
* the 11-clock latency on every pi pulse;
* one histogram count per shot.

It also requires that each mechanism occurred at least once: pi pulse played,
pi pulse skipped, `BRANCH` waiting, `ACQ` stalled, back-to-back windows, and a
non-zero reference delay.

The model has no decay during readout and no measurement errors, so the test
shows a logically correct reset. It says nothing about fidelity. Its noise is
uniform and far smaller than the state separation.

Run any testbench with Verilator 5 from the repository root. The sine table is
read by the relative path `rtl/sine_lut.hex`.

```
verilator --binary --timing -Irtl -y rtl -y tb rtl/qc_pkg.sv \
    tb/qubit_control_top_tb.sv --top-module qubit_control_top_tb -o sim
./obj_dir/sim
```

Replace the testbench file and the top module name to run another testbench.
The top-level test simulates about 125,000 clocks in well under a second.

## Changing it

* Another intermediate frequency: set `freq` of the pulse generators. For the
  demodulation, choose `Q_SHIFT` as the nearest whole number of samples to a
  quarter period, `500 MHz / (4·f_IF)`.
* Longer reference delays: raise `MAX_DELAY` of the top, which adds
  `MAX_DELAY/4` words of registers.
* Other widths and memory depths are in `qc_pkg` and take effect everywhere.
  Keep `ACC_W ≥ 24 + 2 + LEN_W` so that no window can overflow.
