# In-pixel automatic threshold calibration for a timing-detector readout pixel

Every pixel of a timing readout chip for LGAD sensors has a discriminator.
It compares the preamplifier output against a threshold set by a 10-bit
DAC. The threshold has to sit a few millivolts above the pixel's
*equivalent baseline*: the DAC code at which the discriminator, with no
signal at its input, is high half of the time because of noise alone.
That baseline differs from pixel to pixel (process spread, mismatch,
sensor leakage) and drifts over time (temperature, bias settings,
radiation dose). So each pixel needs its own calibration, and it has to be
repeated regularly. Doing that through the slow-control link, one DAC
write and one read-back per point, takes minutes to hours for a chip.

This RTL puts the calibration in the pixel. No charge is injected. The
discriminator output is sampled on every edge of the 40 MHz clock, and the
high samples are counted over a fixed window. Far below the baseline the
count is the full window. Far above it the count is zero. Near the
baseline the count falls steeply from full to zero, and it crosses half
of the window at the baseline itself. Because the count decreases
monotonically with the threshold, a binary search finds the crossing in
10 steps. A short linear scan around that point then refines it and
measures how wide the noise transition is. One calibration takes 35 ms.
It needs only a start command and returns two numbers: the baseline `BL`
and the noise width `NW`. The pixel then applies `TH = BL + TH_offset`
by itself.

## Files

| file | what it is |
|---|---|
| `rtl/threshcal_pkg.sv` | widths, step timing and the state encoding shared by the blocks |
| `rtl/threshcal_top.sv` | the calibration block of one pixel: reset, start detection, clock gate, state machine, accumulator, bypass multiplexer |
| `rtl/cal_fsm.sv` | the state machine: binary search, linear scan, BL/NW extraction, bypass measurement |
| `rtl/sample_accumulator.sv` | one measurement: synchronizer, window counter, accumulator, Acc register |
| `rtl/tmr_reg.sv` | triplicated register with majority vote, which holds all state |
| `rtl/sync2.sv` | two-flip-flop synchronizer |
| `rtl/scan_start_detect.sv` | ScanStart rising-edge detector on the free-running clock |
| `rtl/clock_gate.sv` | latch-based clock gate |
| `tb/disc_model.sv` | behavioural front end for simulation: ideal DAC, Gaussian noise around a chosen baseline, discriminator |
| `tb/tb_*.sv` | self-checking testbenches, described below |

## Signals of the calibration block

`threshcal_top` sits between the pixel's slow-control registers and its
analog front end.

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | 40 MHz clock, free-running |
| `por_n` | in | 3 | outputs of three power-on-reset cells, active low |
| `ext_rst_n` | in | 1 | external reset, active low |
| `scan_start` | in | 1 | ScanStart; a rising edge starts a calibration, or one measurement in bypass mode |
| `bypass` | in | 1 | 1: the DAC gets `dac`, and ScanStart runs a single measurement |
| `dac` | in | 10 | user threshold code for bypass mode |
| `th_offset` | in | 6 | offset added to BL after calibration |
| `disc_pulse` | in | 1 | buffered discriminator output, asynchronous |
| `th` | out | 10 | threshold code to the DAC (and read back by slow control) |
| `bl` | out | 10 | equivalent baseline found |
| `nw` | out | 4 | noise width found |
| `scan_done` | out | 1 | calibration or measurement finished |
| `acc` | out | 16 | count of the last measurement window |
| `seu_err` | out | 1 | some triplicated register copy disagrees with its twins (diagnostic) |

`scan_start`, `bypass`, `dac` and `th_offset` come from slow control and
are static during a scan. After any reset every output is zero, and a
running scan stops.

## One measurement: the sample accumulator

`sample_accumulator` answers the question "what fraction of the time is
the discriminator high at the present threshold?" One `start` pulse opens
a window of 2^15 = 32768 clock periods (0.82 ms). The discriminator pulse
is asynchronous to the clock, so it first passes through two flip-flops.
This limits counting errors from metastability. Each sample that is 1
increments a 16-bit accumulator. The accumulator is one bit wider than the
15-bit window counter, so a discriminator that is high for the whole
window gives 32768 and cannot overflow. When the counter wraps (Stop), the
sum is copied into the `Acc` register and `done` pulses.

Exact timing, counted in rising clock edges, where S is the edge that sees
`start`:

```
edge     S      S+1   S+2   S+3   ...  S+32768  S+32769  S+32770
sample          #0    #1    #2         #32767
added                       #0    ...           #32766   #32767 -> Acc, done
```

Each sample reaches the accumulator two edges after it was taken, which is
the synchronizer delay. A valid bit travels beside each sample, so exactly
the 32768 samples taken inside the window are added, no more and no
fewer. `busy` (ScanBusy) is high until `done`. `noise_flag` is high when
`Acc` lies strictly between 0 and 32768, meaning the threshold is inside
the noise transition.

## The search: binary approximation, then a linear scan

`cal_fsm` drives the threshold through 35 steps of exactly 40000 cycles
(1 ms) each. In each step it:

1. applies the step's threshold on `th_reg`;
2. waits `SETTLE_CYCLES` = 7000 cycles so the DAC output can settle;
3. starts a measurement (32770 cycles);
4. uses the result at the end of the step.

If a measurement ever ends after the step time, the step is stretched
until it has finished. At the default sizes that never happens.

**Binary approximation, steps 1 to 10.** The first threshold is 512, the
middle of the range. After each measurement, if `Acc` < 16384 the
threshold was above the baseline, so the bit just tried is cleared.
Otherwise it is kept. Then the next lower bit is set and tried. After the
tenth step the result is the rough baseline `BL_int`: the highest code
whose count was at least half.

**Linear scan, steps 11 to 35.** The threshold goes upward through
`BL_int-12 … BL_int+12`, 25 codes. Near the ends of the DAC range this
window is shifted so that it stays inside 0…1023. Two results are built
during the scan:

* `BL` is the scanned code whose count is nearest to 16384. On a tie the
  lower code wins. Picking the nearest point rounds the true baseline to
  the nearest code, so the error of an ideal measurement lies within ±0.5
  code.
* `NW` is the number of scanned codes whose measurement raised NoiseFlag,
  meaning the count was neither 0 nor full. It saturates at 15. With
  0.6 codes of r.m.s. noise this gives 3 codes for an 8-bit accumulator
  and 4 to 5 codes for the 16-bit one.

The binary search is reliable even though single measurements are noisy.
Any code more than about four standard deviations of the noise away from
the baseline gives a count of exactly 0 or exactly full, so a wrong
decision can only happen close to the baseline. The ±12-code linear
window absorbs the resulting error in `BL_int`.

When the last step ends, `scan_done` rises and `th_reg` becomes
`BL + th_offset`, saturating at 1023. The sum is combinational. This
matters because the clock is switched off after the scan: a new
`th_offset` written later still takes effect at once. Before the first
complete calibration, `th_reg` is 0.

**Bypass.** With `bypass` high, the multiplexer in front of the DAC
passes the user code `dac` instead of `th_reg`. A ScanStart edge then runs
a single measurement at that code. The count appears on `acc` and
`scan_done` rises after it. `bl` and `nw` keep their values. This is the
manual mode for debugging, or for scanning the transfer curve point by
point from outside.

## Clock, start and reset

The calibration logic runs on a gated clock. It is switched on only while
a calibration or a measurement runs. This saves power, and it keeps
digital switching noise away from the front end during data taking.
`clock_gate` is the usual latch-plus-AND cell: the enable is latched
while the clock is low, so the gated clock never carries a shortened
pulse.

Only `scan_start_detect` runs on the free-running clock. It synchronizes
ScanStart and emits a one-cycle pulse on each rising edge, 3 to 4 clock
edges after the edge arrives. That pulse switches the gated clock on for
the edge at which the state machine sees it. After that, the busy flags of
the state machine and the accumulator keep the clock running. After a
reset the detector first waits until its synchronizer holds the real
ScanStart level. As a result, a ScanStart that is still high when reset is
released does not start a scan; it must go low and rise again.

Reset is asynchronous and active low. There are three power-on-reset
cells, one for each copy of the triplicated logic. Their outputs are
combined by a two-out-of-three vote, so a transient on one cell cannot
reset the block. The vote is then ANDed with the external reset.

## Radiation hardening

All state of the state machine, the accumulator and the start detector
sits in `tmr_reg`.
This is three copies of the register that load the same next value, with
a bitwise majority vote on the output. An upset in one copy never reaches
the logic. Because the next value is always computed from the voted
output, the upset copy is rewritten correctly at the next clock edge. The
`seu_err` output shows the disagreement while it lasts. The synchronizer
flip-flops are not triplicated.

A synthesis flow must be told to keep the three copies (for example with
keep or dont_touch attributes). They are identical logic, and a generic
optimiser merges them into one.

## What lies outside this RTL

These parts of the pixel meet the block at its ports and are not
described here as logic:

* the slow-control registers and their broadcast to all 256 pixels of a
  chip;
* the 10-bit threshold DAC (0.4 mV per code);
* the preamplifier, the discriminator with its programmable hysteresis,
  and the enable buffer in front of `disc_pulse`;
* the three power-on-reset cells;
* the TDC and the hit readout.

A full chip has one `threshcal_top` per pixel; the matrix itself is not
part of this code. `tb/disc_model.sv` stands in for the DAC, preamplifier
and discriminator in simulation. It assumes an ideal DAC, Gaussian noise
drawn about every 7 ns independently of the clock, and a discriminator
hysteresis that the testbench sets (0 unless stated).

## Parameters

| parameter | default | meaning |
|---|---|---|
| `CNT_BITS` | 15 | window of 2^CNT_BITS samples; the accumulator has CNT_BITS+1 bits |
| `STEP_CYCLES` | 40000 | clock cycles per scan step (1 ms at 40 MHz) |
| `SETTLE_CYCLES` | 7000 | cycles from applying a threshold to starting its measurement |

`cal_fsm` also takes `DAC_BITS` (10), `NW_BITS` (4), `OFFSET_BITS` (6) and
`LIN_HALF` (12). The top module uses those at their package values. A
different window needs `SETTLE_CYCLES + 2^CNT_BITS + 4 <= STEP_CYCLES`, or
the steps stretch.

## Where this RTL follows the published scheme and where it chooses

These are taken from the published scheme: the sample accumulator
structure (two-flop synchronizer, 15-bit counter, 16-bit accumulator,
Acc register, NoiseFlag and ScanBusy), the 32768-sample window, the
binary search from 512 with the half-count decision, the 25-point upward
linear scan around `BL_int`, the 1 ms step and the 35 ms total,
`TH = BL + TH_offset`, the bypass multiplexer and single measurement, the
gated clock, the two reset sources with three POR cells, all-zero outputs
after reset, and triplication with majority voting.

These are this design's own choices, because the scheme does not specify
them:

* BL is the point nearest to half a window; NW is the number of NoiseFlag
  points; NoiseFlag means 0 < Acc < full;
* the 7000-cycle settling delay inside each step, and the stretching of a
  late step;
* the linear window is shifted at the range ends, and `TH` saturates at
  1023;
* `th_reg` is 0 before the first calibration;
* `scan_done` also marks the end of a bypass measurement;
* start pulses are ignored while busy;
* ScanStart is treated as asynchronous;
* the POR vote;
* the TMR style (vote after every register, no triplicated synchronizer)
  and the `seu_err` output.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops with a
watchdog if it hangs.

| testbench | what it shows |
|---|---|
| `tb_sample_accumulator` | exact counts for constant, alternating and random inputs, at a 64-sample window and at the full 32768; result two edges after the last sample; ScanBusy, NoiseFlag, restart ignored, reset |
| `tb_cal_fsm` | against a reference search written in the testbench: every applied threshold of all 35 steps, BL, NW, BL+offset with saturation, 35 × STEP cycles, a stretched step, clamped windows at both range ends, bypass, reset mid-scan |
| `tb_tmr_reg` | single upsets in each copy are masked, flagged and corrected at the next edge; a double upset is not masked |
| `tb_clock_gate` | gated clock pulses exactly when enabled; enable glitches while the clock is high do not pass |
| `tb_scan_start_detect` | one pulse per rising edge, 3–4 edges late; none on falling edges or when reset ends with ScanStart high |
| `tb_threshcal_top` | the whole block (2^10 window, 1200-cycle steps) with the noisy front-end model: 12 calibrations over codes 100…1019, BL within 1 code, TH = BL + offset, bypass counts (full, zero, in between), clock off when idle, external reset mid-scan, a single POR glitch outvoted, an injected upset corrected; each of these mechanisms is counted and must occur |
| `tb_threshcal_full` | all defaults: one calibration lasts 1,400,005 cycles = 35.0 ms; BL = 172 for a baseline at 172.3; then a 32768-sample bypass measurement |
| `tb_baseline_sweep` | 321 calibrations for baselines 100…500 in 1.25-code steps (2^11 window): error within ±0.5 code, mean 0.25 |
| `tb_hysteresis` | three default-size blocks whose discriminators have 0, 0.5 and 1 mV hysteresis: BL unchanged (172), noise width narrowing (5, 3, 2); then a bypass-mode threshold scan up and down that gives the same transfer curve both ways |
| `tb_accbit_sweep` | 8-, 12- and 16-bit accumulators on the same front end: BL within 1 code for each, noise width growing with the window (3, 4, 4–5) |

Limits to keep in mind:

* The front-end model is ideal. It has no DAC non-linearity, and its
  noise is white.
* The synchronizer's metastability cannot be shown in a two-state
  simulator.
* Windows of 20 and 25 bits are accepted by the parameters but were not
  simulated.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv --top-module tb_threshcal_top \
  rtl/threshcal_pkg.sv tb/tb_threshcal_top.sv
./obj_dir/Vtb_threshcal_top
```

Replace the testbench name to run any other one. `-Wno-fatal` is needed
because the testbenches that inject upsets `force` register copies inside
`tmr_reg`, which Verilator reports as a second driver. `tb_threshcal_full` takes
a few seconds and `tb_baseline_sweep` about half a minute.
