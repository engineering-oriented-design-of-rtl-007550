# Drift-resilient MTJ random number generator with pulse-width feedback

A magnetic tunnel junction (MTJ) written with a pulse that is just strong enough
switches only some of the time: whether it switched is a random bit. The catch is
that the switching probability depends steeply on temperature, on device ageing
and on the device itself, so a fixed write pulse that gives 50 % ones today gives
20 % or 80 % tomorrow. This design keeps the probability on target without any
sensor or calibration table. It closes a loop around the bits themselves: after a
1 the write pulse gets a little shorter, after a 0 a little longer, with step sizes
weighted so that the loop settles where the probability equals the target P0.

Two ideas make this practical in plain digital logic:

* **The control knob is the pulse width, not the voltage.** Switching probability
  rises with pulse width along a sigmoid (about 10 % at 62 ns and 90 % at 90 ns for
  the device the design was sized for). A width is easy to set from a clock: here an
  8-bit word sets 0–255 ns in 1 ns steps.
* **Downcalibration-2.** Correcting after every bit keeps the mean on target, but it
  also makes consecutive bits anti-correlated, which randomness tests catch. The
  published study this RTL follows found that correcting only once every *two*
  bits, using the most recent bit and discarding nothing, removes that
  correlation while still tracking drift. With 1 ns quantisation this is the
  setting that balanced out best in their simulations.

This repository gives synthesizable SystemVerilog for the pulse generator and the
feedback loop, a behavioural model of the analog delay line, and testbenches with a
behavioural MTJ model.

## One step of the generator

Each random bit is one *step* of the `trng_sequencer`, on the 125 MHz clock:

| phase | clocks | what happens |
|-------|--------|--------------|
| LOAD  | 1 | the input register captures the current control word |
| FIRE  | 1 | the coarse counter starts; the SR latch rises at the end of this clock |
| PULSE | N + 1 | the pulse is in flight (N = coarse count, see below); the last clock, with the latch already low, covers the 0–7 ns fine tail |
| READ  | 2 | `mtj_read_en` high; the MTJ state seen in the second clock is the bit |
| RESET | 4 | `mtj_reset` high, returning the MTJ to its starting (AP) state |

A step therefore takes 9 + N clocks (10 when N = 0). Near the 50 % point of the
reference device (word ≈ 75, N = 9) that is 18 clocks = 144 ns, or about
6.9 Mbit/s per MTJ. The bit strobe `rnd_valid` lasts one clock; `rnd_bit = 1`
means the MTJ switched to the low-resistance P state.

The READ and RESET lengths, and the reset phase itself, are this design's own: the
published description only says the MTJ is written and then read. Change
`READ_CYCLES` / `RESET_CYCLES` to suit the real sense amplifier and reset driver.

## The pulse generator

```
ctrl_word[7:0] ─► input_register ─┬─ coarse[7:3] ─► ×Step ─► +Bias ─► target (clocks)
                                  │                                        │
                                  │          fire ─► coarse_counter ─► coarse_comparator
                                  │                                        │ set / reset
                                  │                                     sr_latch ── latch_q
                                  │                                        │
                                  └─ fine[2:0] ─► tap_mux8 ◄── delay_chain (taps 0..7 ns)
                                                     │                     ▲ delay_code
                                                     ▼                     │
                                 output_buffer: pulse = latch_q | tap   dll_controller ◄─ phase_detector
                                                                           (replica delay_chain on clk)
```

**Coarse part (whole 8 ns periods).** The 5-bit coarse field is multiplied by
`coarse_step` and `coarse_bias` is added, giving a target count in clock periods.
With the published values Step = 1 and Bias = 0 the target is simply the coarse
field, 0–31 periods = 0–248 ns. On FIRE the comparator sets the latch (unless the
target is 0) and the counter starts at 1. The latch falls at the clock edge where the
count reaches the target, so it is high for exactly `target × 8 ns`. The latch is a
clocked, reset-dominant set/reset flip-flop, so both coarse edges sit on clock
edges. The published diagram only says "SR latch".

**Fine part (0–7 ns).** The latch level also runs through an eight-element delay
chain. Tap k is the level delayed by k element delays, and tap 0 is the level
itself. The 3-bit fine field selects a tap through the 8:1 mux. The output pulse is
the OR of the latch level and the selected tap. Both rise together, but the tap
falls k ns later, so

    pulse width = 8 × coarse + fine  =  ctrl_word  ns      (when coarse ≥ 1)

For words 1–7 the coarse field is 0, the latch never rises and no pulse is sent.
This matches the published label "0–248 ns" for the coarse path, but it means
widths of 1–7 ns cannot be produced. Those widths are far below the useful
switching range. The published block diagram does not show how the tap is combined
with the latch: the OR is this design's choice.

**Keeping the taps at 1 ns: the DLL.** An element's delay drifts with process,
voltage and temperature. A second copy of the chain, the replica, delays the clock
itself. The bang-bang `phase_detector` samples the replica's output on each rising
clock edge. If the chain is shorter than one 8 ns period, the delayed clock is still
high, so the detector says "up". If it is longer, the delayed clock is still low,
so it says "down". The detector is valid while the chain delay lies between 4 and
12 ns. `dll_controller` steps a 6-bit delay code once every 4 clocks and raises
`dll_locked` at the first change of direction. Both chains use the same code, so
once the replica spans one period, every tap of the signal chain is 1 ns. In the
model an element is `OFFSET_PS + code × STEP_PS` = 300 + 20·code ps, so lock is at
code 35. The loop then dithers by ±1 code, and the longest fine setting is then off
by up to 7 × 20 ps = 0.14 ns.

The published design shows one delay chain controlled by a DLL that is fed by the
clock and a phase detector. The replica arrangement, the detector circuit, the
counter loop and the lock rule are this design's choices.

## The Downcalibration-2 controller (`dcal_controller`)

The rule from the self-stabilisation literature this design follows, written for a
control value W and target probability P0:

* output bit 1 (switched): W ← W − (1 − P0)·ΔW
* output bit 0:            W ← W + P0·ΔW

In equilibrium the expected change is zero exactly when P(switch) = P0. No
probability is measured anywhere, and the loop needs no prior knowledge of the
device: it walks to the right width from any starting word.

Implementation:

* W is the pulse width in ns, held as an unsigned 8.8 fixed-point number.
* P0 is `target_p0 / 256`. So 128 is 0.5, 51 is 0.199 and 205 is 0.801.
* ΔW = `DELTA_Q / 256` ns, 2 ns by default. At P0 = 0.5 each correction is then
  exactly ±1 ns.
* A correction is applied only on every `CAL_N`-th bit (2 by default), using that
  bit. The bit count restarts on `init_load`.
* The word sent to the generator is W rounded to the nearest whole ns. The
  fraction is kept inside the controller. Without it, a biased target such as
  P0 = 0.2 with ΔW = 2 ns would round its upward step, 0.4 ns, to zero, and the loop
  could never recover.
* W saturates at 0 and 255.996 ns.
* `init_load` sets W to `init_word`, for example to restart from an arbitrary or a
  remembered point. After reset W is 128 ns.
* `cal_evt` marks each correction and `cal_dir` gives its direction
  (1 = wider pulse).

The published text gives the rule, the every-two-bits cadence, "the most recent bit"
and the quantisation to whole nanoseconds. ΔW, the P0 encoding, the hidden
fraction and saturation are this design's choices. Downsampling and discarding
variants, which the published study compared against, are not part of this design.
Setting `CAL_N = 1` gives the plain step-by-step loop, for comparison.

## Files

| file | role | from the published design / own |
|------|------|----------------------------------|
| `rtl/trng_pkg.sv` | widths (8/5/3 bits, 8 taps), control-word struct, sequencer states | widths published |
| `rtl/mtj_trng_top.sv` | top level, wiring of everything below | structure published, replica DLL own |
| `rtl/trng_sequencer.sv` | one step: load, fire, wait, read, reset | own |
| `rtl/dcal_controller.sv` | Downcalibration-N feedback, N = 2 | rule and cadence published |
| `rtl/input_register.sv` | holds the word during a step, splits 5/3 | published block |
| `rtl/coarse_multiplier.sv`, `rtl/coarse_adder.sv` | coarse × Step + Bias | published blocks, values 1 and 0 |
| `rtl/coarse_counter.sv`, `rtl/coarse_comparator.sv`, `rtl/sr_latch.sv` | coarse pulse of N × 8 ns | published blocks, circuit own |
| `rtl/delay_chain.sv` | **behavioural model** of the 8-tap delay line | taps 0..7 ns published |
| `rtl/tap_mux8.sv` | 8:1 tap select on the fine bits | published |
| `rtl/phase_detector.sv`, `rtl/dll_controller.sv` | DLL | named in the published design, circuit own |
| `rtl/output_buffer.sv` | forms the pulse (latch OR tap) | own |
| `tb/mtj_model.sv` | behavioural stochastic MTJ for the testbenches | own, sized from published curves |
| `tb/tb_<module>.sv` | one self-checking testbench per module | |
| `tb/tb_drift_workload.sv` | long temperature-drift run | |

Not in the RTL: the clock manager (a PLL or clock tile; `clk` is its 125 MHz
output), the analog pulse driver behind `pulse_out`, the MTJ, its sense amplifier
(`mtj_bit`) and its reset driver (`mtj_reset`).

## Top-level interface (`mtj_trng_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | 125 MHz clock; asynchronous active-low reset |
| `enable` | in | 1 | run steps back to back; the current step finishes when it drops |
| `target_p0` | in | 8 | target probability × 256 |
| `coarse_step`, `coarse_bias` | in | 4, 5 | coarse scaling; tie to 1 and 0 for the standard 1 ns/LSB word |
| `init_load`, `init_word` | in | 1, 8 | set the controller's width |
| `mtj_bit` | in | 1 | sensed MTJ state, 1 = P (switched) |
| `pulse_out` | out | 1 | write pulse to the MTJ driver |
| `mtj_read_en`, `mtj_reset` | out | 1 | sense enable; request to reset the MTJ |
| `rnd_valid`, `rnd_bit` | out | 1 | one random bit per step |
| `ctrl_word` | out | 8 | width (ns) used for the next pulse |
| `cal_evt`, `cal_dir` | out | 1 | a correction happened, and its direction |
| `dll_locked`, `dll_code` | out | 1, 6 | DLL status and delay code |

Wait for `dll_locked` before relying on the fine bits. An assertion checks that the
input register is never loaded while a pulse is in flight.

## Verification

Each module has a self-checking testbench. It compares against values computed in
the testbench and finishes with a line `TB_RESULT checks=N failures=M`.

* Combinational blocks are checked exhaustively or on random inputs.
* The counter, latch, register and sequencer are checked cycle by cycle. For the
  sequencer that includes the phase order and the 9 + N step length.
* `tb_delay_chain` polls every picosecond and checks that tap k switches
  k × (300 + 20·code) ps after the input, for five codes.
* `tb_dll_controller` checks step rate, saturation and lock. It then closes the
  loop around a replica chain and checks lock at code 34–36.
* `tb_dcal_controller` runs an independent model of the update rule for
  P0 = 0.5, 0.2 and 0.8, plus saturation.

`tb_mtj_trng_top` runs the whole design at its default parameters with the MTJ
model, for about 30,000 steps. It checks:

* every pulse is `ctrl_word` ns wide to within 0.2 ns;
* each step lasts 9 + N clocks;
* corrections come only after every second bit, in the direction of that bit;
* the measured probability is within 0.04 of the target for P0 = 0.5, 0.2 and 0.8,
  starting from arbitrary words;
* the mean stays near 0.5 through a shortened temperature ramp, oscillation and
  jumps.

It also counts DLL lock, upward and downward corrections, pulses with and without a
fine part, and target changes, and fails if any of them never happened. In a
typical run the width falls from 200 ns into the transition region in about 220
steps, and the three targets measure 0.500, 0.206 and 0.798 over 4000 bits each.

`tb_drift_workload` is the temperature-drift study at one tenth of its published
length: three segments of 100,000 steps (linear ramp 20→30 °C, ±5 °C sine,
jumps to 40 °C and 15 °C). The segment means come out between 0.502 and 0.503, and
at most 1 of 100 windows of 1000 bits is off by more than 0.08. For comparison, with
a fixed 75 ns pulse 46, 48 and 6 of 100 windows are off. The lag-1 autocorrelation of each
segment is between −0.003 and +0.003 and is checked to stay within ±0.015. The
same run with `CAL_N = 1`, which corrects after every bit, gives about −0.04. That
is the anti-correlation Downcalibration-2 is meant to remove. The full 3 × 10⁶ steps
would take about 0.44 s of chip time and roughly 11 minutes of simulation.

The MTJ model (`tb/mtj_model.sv`) switches with probability
1 / (1 + exp(−0.16 · (w − C(T)))), with C(T) = 75 ns + 1.7 ns/°C · (T − 25 °C).
The slope and midpoint were read off the published probability-versus-word curve.
The temperature coefficient is an assumption, chosen to reproduce the 20–80 % swing
that the published non-stabilised run shows over 20–30 °C. Statistical test suites
(NIST SP 800-22) were not run on the simulated bits.

Running a testbench with Verilator (5.x), from the repository root:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv rtl/trng_pkg.sv tb/tb_mtj_trng_top.sv \
    --top-module tb_mtj_trng_top -o sim
./obj_dir/sim
```

Replace the testbench name for any other module. `--timing` is needed because of
the delay-chain model and the testbench clocks.

## Limits and departures

* `delay_chain` is a behavioural model with `#` delays, not logic. A real design
  uses a hand-placed delay line or a vendor delay primitive with the same ports.
  The model drops an edge that arrives while the previous one is still in flight,
  so an element delay must stay below 4 ns (half a clock period). At the default
  sizes it is at most 1.56 ns.
* Words 1–7 send no pulse (see above). The published text gives the coarse range
  as "8 ns to 255 ns", while its diagram says 0–248 ns for the coarse path; this
  design follows the diagram.
* The step timing, the MTJ reset phase, the DLL circuit, the fixed-point form of
  the controller, ΔW = 2 ns and the 8-bit P0 are this design's own choices.
* Pulses wider than 255 ns, like the 400 ns of the published device sweeps, need
  `coarse_step` > 1, which coarsens the resolution to `8 × step` ns.
