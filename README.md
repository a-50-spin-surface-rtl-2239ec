# Measurement-and-feedback logic for a 50-spin SAW Ising machine

An Ising machine searches for the spin configuration s_i = ±1 that
minimises the Ising energy

    H = - sum_{i != j} J_ij s_i s_j

A MAX-CUT problem on a graph maps onto H directly: put J_ij = -1 on every
edge and 0 elsewhere. Minimising H then puts as many edge ends as possible
on opposite sides.

This machine is time-multiplexed, and its spins are RF pulses. A 50 mm
lithium-niobate surface-acoustic-wave (SAW) delay line, with a
phase-sensitive amplifier (PSA) and a linear amplifier, forms a ring with a
12 µs round trip. An RF switch running at 4.829 MHz with 50% duty carves the
circulating signal into 58 pulses of about 100 ns. The PSA forces each
pulse's phase to 0° or 180°, and that binary phase is the spin. 50 pulses
are Ising spins. The other 8 circulate uncoupled and only give the
electronics time to act.

The pulses never meet in the delay line, so all-to-all coupling is done
electronically, once per round trip, for each pulse:

1. **Measure.** A coupler taps the ring into a gain/phase detector. An 8-bit
   ADC digitises the detector's phase output, and the logic turns it into a
   spin vector.
2. **Compute.** For the pulse about to reach the injection coupler, the logic
   forms the coupling c_i = -r · Σ_j J_ij s_j. Here r is the amplitude
   injected per unit of coupling, as a fraction of the saturated pulse
   amplitude.
3. **Inject.** The sign of c_i sets a 0/180° phase shifter and |c_i| sets a
   digital attenuator (Attenuator 1). A second coupler adds the resulting
   coupling pulse to spin i as it passes.

Each computation ("run") starts from thermal noise. The loop gain is held
below unity for a while so that the old pulses die out. Then the gain is
raised: the pulses grow, the coupling steers their phases while they are
still small, and the state freezes as they saturate. The spin vector at the
end of the run is the answer.

This repository holds synthesizable SystemVerilog for the digital part
(steps 1–3, the pulse timing and the run sequencing). It also holds
self-checking testbenches, including a behavioural model of the analog ring
that lets the whole loop be simulated.

## Block structure

```
 adc_data ──► spin_detector ──► spins ─────────────┐
                 ▲                                 ▼
 slot_timer ─────┤ slot/phase             mvm_row: f_i = Σ J_ij s_j
   │ rf_switch   ▼                           ▲          │
   │      feedback_sequencer ── row i ──► coupling_matrix  ▼
   │        │  ▲                         coupling_encoder: c_i = -r f_i
   │        │  └─────── phase bit, attenuator code ◄──┘
   │        └──► phase_sel, att1_code (held for one slot)
   ▼
 RF switch              run_controller ──► att2_on (loop gain), solution
```

| file | role |
|---|---|
| `rtl/sawim_pkg.sv` | sizes, limits, run timing, the `mfb_cfg_t` configuration struct |
| `rtl/slot_timer.sv` | slot index / clock-in-slot counter, RF-switch pulse train |
| `rtl/spin_detector.sv` | window-averages ADC codes and thresholds them into the spin vector |
| `rtl/coupling_matrix.sv` | 50 × 50 × 4-bit J store: host writes one entry per clock, feedback reads a whole row |
| `rtl/mvm_row.sv` | one row of J·s in a single clock |
| `rtl/coupling_encoder.sv` | scaling by r, 2 %/30 % clipping, phase bit, 0.5 dB attenuator code |
| `rtl/feedback_sequencer.sv` | chooses which pulse the injector meets next and loads the outputs at the slot boundary |
| `rtl/run_controller.sv` | 10 ms runs: loop gain off for 5 %, on for 95 %; latches the solution |
| `rtl/sawim_mfb.sv` | top level |

## Time base: slots and round trips

Everything is organised around the **slot**, the time one pulse takes to
pass a fixed point. The design runs at 20 clocks per slot. With the
4.829 MHz pulse rate this needs a 96.58 MHz system clock. A round trip is
58 slots, or 1160 clocks (12.01 µs).

`slot_timer` counts `slot` (0…57, the pulse now at the detector) and
`phase` (0…19, the clock within the slot). `rf_switch` is high for phases
0–9. Slots 0–49 are the spins and slots 50–57 are the spare pulses.

The positions within one slot m are as follows:

| phase | what happens |
|---|---|
| 0 | `rf_switch` rises (pulse m formed). `feedback_sequencer` computes the next injector target t = (m + 1 − fb_lag) mod 58. If t < 50, it requests row t |
| 1 | row read strobe into `coupling_matrix` |
| 2 | row available, and `mvm_row` adds all 50 terms (this uses the spin vector as it stands now) |
| 3 | field f_t registered. `coupling_encoder` stage 1: \|c\| = r·\|f\|, clipping |
| 4 | stage 2: attenuator code and phase bit |
| 5 | result waits in the sequencer |
| 10–13 | `spin_detector` adds four ADC codes of pulse m |
| 14 | spin m decided and written into the spin vector |
| 19 | `phase_sel` / `att1_code` are loaded for target t. They hold for all of slot m+1 |

The injection coupler sits `fb_lag` slots downstream of the detector tap.
While pulse m is at the detector, the injector therefore sees pulse
m − fb_lag. The reset value of `fb_lag` is 8, which matches the eight spare
pulses reserved as feedback delay. It is a register because the real
distance depends on cabling. Every coupling pulse is computed one slot
before it is used, from the spin vector of that moment. The vector includes
any spin measured earlier in the same round trip. This "latest value"
behaviour is what the machine is meant to have: the coupling depends on the
instantaneous spin state.

Rate: each spin is measured once, and its coupling is recomputed once, per
round trip (12.01 µs). The source reports 28 round trips, about 340 µs, to
reach the ground state of its 262-edge test graph; 28 × 12.01 µs =
336 µs.

## From detector voltage to spin

The AD8302-type detector needs 50–70 ns to settle inside a 100 ns pulse.
`spin_detector` therefore ignores the start of the pulse. It adds the ADC
codes taken at phases 10–13. Those are the detector output of pulse clocks
7–10, after an assumed three-clock ADC pipeline. It compares the sum with
4 × `threshold`. A high code means in phase with the reference, stored as
bit 1 (s = +1). Spare slots are measured but not stored. `spin_flip`
strobes whenever a stored spin changes.

## The coupling pulse

`coupling_encoder` implements c_i = −r f_i with the amplitude limits the
source prescribes:

* r is `cfg.r_coef`, unsigned Q0.16. For example, 2000 means 3.05 % of the
  saturated amplitude per unit of coupling. This is the machine's global
  coupling strength. Sweeping it reproduces the "optimal coupling"
  experiment.
* A non-zero |c_i| below **2 %** is raised to 2 %. Below that threshold a
  coupling pulse cannot switch a spin.
* A |c_i| above **30 %** is cut to 30 %. Above that the ring is
  over-coupled and can become chaotic.
* The attenuator code is the attenuation below the 30 % level in 0.5 dB
  steps, rounded to the nearest step. So 0 means 30 %, and code 47 (23.5 dB)
  means 2 %. The code is found by comparing |c_i| with the 63 step midpoints
  0.30 · 10^(−(k+½)/40). A constant function builds those midpoints at
  elaboration from 10^(−1/40) ≈ 61870/65536 and 10^(−1/80) ≈ 63677/65536.
* A zero field gives code 63, the largest attenuation, with phase 0. So do
  the spare pulses, and every pulse while the loop gain is off.

**Sign convention.** Taken literally, the source's formula c_i = −r Σ J_ij
s_j with J_ij = −1 gives c_i = +r Σ_neighbours s_j. That pulls each spin
towards its neighbours, which is the opposite of what MAX-CUT needs. Whether
the physical injection reverses this depends on the phase of the injection
path, which is not documented. `cfg.phase_invert` therefore swaps the two
phase-shifter states:

* With `phase_invert = 0`, `phase_sel = 1` (180°) exactly when c_i < 0, as
  in the formula.
* The testbenches model a non-inverting injection path and run with
  `phase_invert = 1`. With `phase_invert = 0` the model converges to
  ferromagnetic states (H > 0), and the end-to-end test would fail.

## Runs

`run_controller` drives Attenuator 2 (`att2_on`). Each 10 ms run begins with
0.5 ms (5 %) of loop gain off, which is 41 round trips for the echoes to
decay. Then the gain is on for 9.5 ms. On the last clock of the run the
spin vector is copied to `solution`, `solution_valid` strobes and
`run_count` increments. Runs follow back to back while `run_enable` is high.
While the gain is off, the feedback sends no coupling pulses, so each run
starts from noise rather than from the previous answer.

## Host interface

* `cfg` (`sawim_pkg::mfb_cfg_t`) carries `r_coef`, `threshold`, `fb_lag`
  and `phase_invert`. It is sampled continuously, so it can be changed
  between runs.
* J is written one entry per clock: `j_we`, `j_row`, `j_col`, and `j_data`
  (4-bit signed, −8…7). Entries are not reset. Write all 2500 before the
  first run, preferably with `run_enable` low.
* The status outputs are `spins` (live), `spin_flip`, `slot`, `fb_target`,
  `fb_active`, `clip_hi`, `clip_lo`, `run_start`, `solution`,
  `solution_valid` and `run_count`.

## What follows the source and what is this design's own

Taken from the source:

* 50 coupled spins in 58 pulses, 8 of them spare
* 12 µs round trip, 4.829 MHz pulse train with 50 % duty
* an 8-bit ADC on the phase detector
* the feedback rule c_i = −r Σ J_ij s_j
* sign to a 0/180° phase shifter and magnitude to a digital attenuator
* the 2 % and 30 % amplitude limits
* 10 ms runs with 95 % loop-gain duty

This design's own choices, because the source does not specify them:

* the 96.58 MHz clock (20 clocks per slot)
* the ADC sampling window, averaging and threshold register
* the 4-bit J entries and the entry-wide host write port
* the row-parallel product in one clock
* the 6-bit, 0.5 dB-step attenuator code referenced to 30 %
* r as Q0.16
* the programmable injection lag (reset value 8)
* the one-slot look-ahead
* the phase-calibration bit
* gating the coupling while the loop gain is off
* putting the gain-off part at the start of a run
* latching the spins at the end of a run

The block schematic of the original machine was not available. The
connection order detector → logic → phase shifter → attenuator → injector
comes from the written description.

**Not implemented:**

* The analog ring itself: the SAW line, PSA, amplifiers, couplers,
  detector, ADC, phase shifter, attenuators, switch and the 320 MHz
  reference. The top exposes their control and data signals.
* Any transport of results to a host computer beyond the `solution` port.
* The local bias field h_i. The source's experiments use h_i = 0, and it
  describes no mechanism for it.
* A gradual ramp of the loop gain ("minimum gain principle"). It is
  suggested only as a possible refinement. The machine described here
  switches the gain on and off with Attenuator 2 (`att2_on`).
* One of the measured traces shows the gain switched on after 200 µs, while the
  95 % duty of a 10 ms period gives 500 µs. This design follows the
  10 ms / 95 % figures.

## Verification

Each block has a self-checking testbench `tb/<module>_tb.sv`. It computes
expected values independently (integer or real arithmetic in the testbench)
and ends with a `TB_RESULT checks=… failures=…` line.

| testbench | what it checks |
|---|---|
| `slot_timer_tb` | every clock against a reference counter; 1160-clock round trip; 50 % switch duty |
| `spin_detector_tb` | random window levels and thresholds; spin vector, strobe, slot and flip flag; spare slots |
| `coupling_matrix_tb` | all 2500 entries written and read back; one-clock latency; read during write |
| `mvm_row_tb` | 1000 random rows plus the extremes, against an integer sum |
| `coupling_encoder_tb` | random and swept fields and ratios against a real-arithmetic model; both clip cases; zero field; phase calibration |
| `feedback_sequencer_tb` | target (m − lag) mod 58 for lags 8, 0, 57 and 3; spare and disabled slots uncoupled; one row read per spin slot |
| `run_controller_tb` | gain edges, strobes, latched solution and count over 10 short runs; disable and restart |
| `sawim_mfb_tb` | full size, closed around `tb/sawim_ring_model.sv` (see below) |
| `sawim_workload_tb` | full size, problem classes and a coupling sweep (see below) |

`sawim_ring_model` is a behavioural model of the analog ring and is not
synthesizable. Each pulse is a signed amplitude. Once per round trip the
model updates it as a ← clip(g·a + injected coupling + noise, ±1), with
g = +2 dB while `att2_on` is high and −20 dB otherwise. It converts the
amplitude into a noisy ADC code. The gain and noise values are modelling
choices, not measurements.

`sawim_mfb_tb` runs the top with all default parameters. It loads a 50-node
Möbius ladder, then a random 262-edge graph, and makes two 10 ms runs on
each. A scoreboard recomputes every coupling pulse from the live spins and
compares it with `phase_sel`/`att1_code` in the slot it is used, about
200 000 couplings. The bench also checks:

* the slot and round-trip rates
* the 95 % gain duty
* the latched solutions
* that every solution has H < 0

It requires each mechanism to occur at least once: spin flips, clipping at
30 % and at 2 %, zero field, uncoupled spare pulses, gating while the gain
is off, gain switching and solution capture. It simulates 4–5 runs in a few
seconds.

`sawim_workload_tb` makes eight runs per case, in about one minute. One
seed gave the following with the model above; the numbers shift a little
from seed to seed:

| problem | result |
|---|---|
| Möbius ladder 8 (ground H = −16) | ground state in 7/8 runs |
| Möbius ladder 16 (ground −40) | 8/8 |
| Möbius ladder 32 (ground −88) | 2/8, mean −72 |
| Möbius ladder 50 (ground −150) | 0/8, mean −117 |
| random 50-node graph, 301 edges | best −202, mean −190 |
| random 50-node graph, 262 edges | best −188, mean −159 |
| same graph, zero coupling | mean +1 (random states) |
| same graph, coupling −20 … +5 dB | mean −157 … −167 |

The bench also measures how long after the gain is switched on the last
spin flip occurs. In the model this is 7–17 round trips (85–205 µs). The
hardware is reported to need 28 round trips. The figure is set by the
model's +2 dB small-signal gain and its noise floor: the logic itself
updates every coupling once per round trip, whatever the problem.

The trend, with certain success for small ladders and a falling success
rate as the problem grows, matches the hardware results reported for this
architecture. The absolute probabilities belong to the toy ring model, not
to the logic, so they say nothing about the real machine's success rate.
The random graphs are drawn by the testbench with the same sizes as the two
reported test problems, not the same edges, so their energies are not
comparable with the reported −218 and −228.

Energy convention: the testbenches use H = −Σ_{i≠j} J_ij s_i s_j, which
counts every edge twice. With it the 16-node Möbius ladder has ground
energy −40.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/sawim_pkg.sv tb/sawim_mfb_tb.sv --top-module sawim_mfb_tb -o sim
./obj_dir/sim
```

Any other bench works the same way: give its file and module name. The unit
benches need `rtl/sawim_pkg.sv` plus the module under test. The feedback
sequencer bench also needs `rtl/slot_timer.sv`. The simulation is two-state,
so the testbenches initialise everything they read. The J matrix is written
by the host sequence before any run.

## Changing sizes

All sizes are parameters with the package values as defaults:

* `NSPIN` and `NSLOT` may be changed together, with NSLOT > NSPIN.
  Index ports are `$clog2` wide. `fb_lag` is 6 bits, so NSLOT ≤ 64 unless
  that field is widened.
* `CLK_PER_SLOT` must leave room for the 5-clock feedback pipeline and the
  detector window; assertions check both.
* `SUM_W` must hold NSPIN · 2^(J_W−1); an assertion in `mvm_row` checks
  this.
* The run period is set by `RUN_PERIOD_CYCLES` and `RUN_OFF_CYCLES`.

A longer delay line or shorter pulses (more slots) change only these
parameters. The single-clock row product grows linearly with NSPIN.
