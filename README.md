# Hardware body-bias regulation for a near-threshold multi-core cluster (28 nm UTBB FD-SOI)

In FD-SOI the back-gate ("body") voltage VBB shifts transistor thresholds.
Forward bias (VBB > 0) makes a circuit faster and leakier. Reverse bias
(VBB < 0) makes it slower and less leaky. A near-threshold chip's top speed
moves a lot with process corner and temperature. A chip that must run at a
guaranteed clock frequency can therefore be kept at that frequency with the
*least* forward bias it needs, instead of a worst-case guard band:

* measure how fast the silicon currently is, with an on-chip ring-oscillator
  sensor (a *process monitor box*, PMB);
* turn the sensor reading into an estimate of the maximum clock frequency,
  using a linear model fitted to the individual chip;
* close a PID loop that moves VBB until the estimated maximum frequency equals
  the requested frequency plus a safety margin.

The reference design runs this loop in software on the chip's processor. The
RTL here builds the same loop as hardware in the chip's always-on domain,
together with the boot-time calibration that fits the sensor model. Everything
runs on a 50 MHz reference clock. It is configured and observed through one
APB slave port.

## Structure

```
                 +-------------------------- bbreg_top ------------------------------+
 APB  <--------> | bbreg_regs (register file)                                        |
                 |    |  set-point, margin, model, gains, period      status, readings |
                 |    v                                                              |
 ring osc. x3 -->| pmb_ctrl --F_PMB--> bb_controller:                                |
 (safe,SoC,cl.)  |    ^                 pmb_model -> freq_error -> pid_controller    |
                 |    |                     -> vbb_model ---------------+             |
                 |    |                                                 v             |
                 |    +-------- calibration_fsm ---------------> bbgen (cluster) ---->| cluster wells
 bench handshake<|              (owns PMB + cluster generator     bbgen (SoC) ------->| SoC wells
 cluster F_OP   <|               while it runs)                                       |
                 +-------------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `bbreg_pkg` | Number formats, shared constants, and the state enums of the loop and calibration engine. |
| `pmb_ctrl` | Counts the three ring oscillators over a fixed window and reports each frequency in kHz. |
| `pmb_model` | Computes F_MAX = C_corr · F_PMB + F0, registered. |
| `freq_error` | Computes e = F_target + F_margin − F_MAX. |
| `pid_controller` | Discrete PID with anti-windup. Its output is the frequency gap F_gap. |
| `vbb_model` | Converts F_gap to a body-bias voltage and adds the margin. It rounds to 50 mV and clamps to −1 V … +650 mV. |
| `bb_controller` | The loop sequencer: reset, measure, compute, apply, wait, pause. |
| `calibration_fsm` | Sweeps VBB and searches the maximum frequency at each point, then fits C_corr and F0 by least squares. |
| `bbreg_regs` | APB3 register file. |
| `bbgen` | **Behavioural model** of the analog body-bias generator. Not synthesizable intent; it exists for simulation. |
| `seq_divider` | Shared restoring divider, one quotient bit per cycle. |
| `bbreg_top` | Wires everything as above. |

Outside the design, and brought out as ports:

* the ring oscillators themselves (analog cells);
* the cluster's clock generator, which receives the calibration frequency on `cal_fop_khz_o`;
* the cores that run the calibration benchmark, through the `bench_*` handshake.

## Number formats

All frequencies are integers in kHz and all voltages are integers in mV.
The loop therefore has no unit conversions except the two models.

| Quantity | Type | Width | Notes |
|---|---|---|---|
| frequency | `freq_t` | 20 bit unsigned | up to 1.048 GHz |
| frequency error / gap | `sfreq_t` | 24 bit signed | |
| VBB, well voltages | `vbb_t` | 13 bit signed | holds VDD + 1.5 V on the N-well |
| C_corr | `ccorr_t` | unsigned Q2.14 | 0.614 → 10060; 0.59 → 9667 |
| PID gains | `gain_t` | signed Q8.8 | |

## The regulation loop

One iteration (`bb_controller`):

1. **Measure.** Start a PMB measurement. `pmb_ctrl` opens a gate of 1000 reference cycles (20 µs). It synchronises the gate into each ring's own clock domain, which counts rising edges. The count is brought back after a settle time. The reading is count × 50 kHz. Measuring takes 1010 cycles.
2. **Estimate.** F_MAX = ((F_PMB · C_corr + 2¹³) >> 14) + F0, in one cycle.
3. **Compare.** e = F_target + F_margin − F_MAX, where F_margin = F_target · margin · 5 % / 100 mV.
   The margin is applied after the PID, as a fixed VBB offset. Without F_margin the integrator would regulate the chip back to F_target and cancel the margin. Adding the margin's frequency worth to the set-point keeps both in step: at equilibrium the chip runs at F_target(1 + 5 %·margin/100 mV).
4. **PID.** F_gap = (Kp·e + Ki·Σe + Kd·Δe) / 256. The three products are summed in 32 bits and then saturated.
   * The integrator does not accumulate in the direction of a VBB limit the actuator already sits at (conditional integration).
   * After a clear, the first step has no derivative term.
5. **VBB model.** The body-bias model is linear: 5 % of frequency per 100 mV at 0.7 V.
   * Regulating part: VBB_reg = ⌈F_gap · 2000 / F_target⌉ mV, rounded away from zero.
   * Then VBB = VBB_reg + margin, rounded *up* to the next 50 mV step so the chip never gets less bias than computed.
   * The result is clamped to −1000 … +650 mV (`sat_lo` / `sat_hi` flag the clamps).
   * The two divisions share one 40-bit sequential divider, about 85 cycles in total.
6. **Apply.** Write the generator and wait until both wells have settled. The model uses the N-well's 23 µs.
7. **Pause** for `PERIOD` cycles, then go back to step 1.

On enable, and whenever `F_TARGET` is written, the loop first drives VBB to 0 V in one step and clears the PID. It then starts from there.
Disabling the loop leaves the last VBB in place. Without the pause, one iteration takes about 2250 cycles (45 µs).

**Why the gains are small.** The VBB model measures its 5 % relative to F_target. The chip's real sensitivity is relative to its own unbiased speed. At a set-point far below the chip's natural speed, the loop gain therefore rises; at 100 MHz on a 170 MHz chip it is about 1.75. The reset gains (Kp 0.125, Ki 0.375, Kd 0.03125) keep the loop stable and free of undershoot over 85–260 MHz set-points on the behavioural chip used for verification. They are registers, so they can be retuned.

The reset to 0 V on a new set-point follows the reference design. Clearing the PID at the same moment is this design's own choice.

The gains were chosen to avoid undershoot. An undershoot (too little forward bias) is the dangerous direction: the chip is then slower than the clock it is given.

## Calibration

The PMB model depends on the process corner of the individual chip. An uncalibrated chip uses a population fit (0.614 / 6.86 MHz at 0.7 V) with a 150 mV margin. A calibrated chip uses its own fit with a 100 mV margin. `calibration_fsm` produces that fit at boot:

```
VBB := -800 mV - 50 mV ; F_OP := 100 MHz
repeat 30 times:
    VBB += 50 mV, wait for the generator
    repeat: F_OP += 1 MHz, run the benchmark (10000 iterations) at F_OP
    until it fails (wrong result, or no answer within BENCH_TIMEOUT cycles)
    F_OP -= 1 MHz                      -- last passing frequency
    measure the cluster PMB, accumulate (F_PMB, F_OP)
least squares:  C_corr = (nΣxy − ΣxΣy) / (nΣx² − (Σx)²),  F0 = (Σy − C_corr Σx) / n
```

* F_OP is not restarted at each point. Raising VBB only makes the chip faster, so the search continues upward from where it stopped.
* Only the four running sums are kept, not the list of points. The fit uses 80-bit products and one shared divider.
* A slope ≥ 4, a negative slope, or PMB readings with no spread give `fit_ok = 0`. In that case the registers keep their old model.
* When the fit is good, `C_CORR` and `F0` are loaded and `MARGIN` becomes 100 mV.

The flow searches with 1 MHz resolution and keeps the last *passing* frequency, so the fitted F0 comes out about 0.5 MHz low on average. On the verification chip (true 0.59 / 5.19 MHz) the fit gives 0.5902 / 4.63 MHz. This error is on the safe side and far below the 100 mV (≈ 5 %) margin.

Calibration is accepted only while the loop is stopped. While it runs, it owns the PMB controller and the cluster generator, and the loop is held off.

## Register map (APB3, 32-bit words, zero wait states)

| Addr | Name | Access | Reset | Meaning |
|---|---|---|---|---|
| 0x00 | CTRL | RW / W | 0 | [0] loop enable; [1] start calibration (pulse, reads 0) |
| 0x04 | F_TARGET | RW | 170000 | set-point, kHz; a write restarts the loop from VBB = 0 V |
| 0x08 | MARGIN | RW | 150 | VBB margin, signed mV |
| 0x0C | C_CORR | RW | 10060 | model slope, Q2.14 |
| 0x10 | F0 | RW | 6860 | model offset, signed kHz |
| 0x14/18/1C | KP/KI/KD | RW | 32/96/8 | PID gains, signed Q8.8 |
| 0x20 | PERIOD | RW | 50 000 000 | pause between iterations, cycles (1 s) |
| 0x24 | SOC_VBB | RW | 0 | SoC-domain VBB, mV; a write programs the SoC generator |
| 0x28 | STATUS | RO | | [0] cal busy [1] cal done [2] fit ok [3] at upper VBB limit [4] at −1 V [5] loop running [6] generator ready [11:8] loop state |
| 0x2C | F_PMB_CL | RO | | cluster PMB, kHz |
| 0x30 | F_MAX | RO | | last estimate, kHz |
| 0x34 | VBB_CL | RO | | cluster VBB, mV |
| 0x38 | F_PMB_SOC | RO | | SoC PMB, kHz |
| 0x3C | F_PMB_SAFE | RO | | safe-domain PMB, kHz |
| 0x40 | ERR | RO | | last mismatch e, signed kHz |
| 0x44 | ITER | RO | | iterations since reset |
| 0x48 | CAL_FOP | RO | | calibration's current F_OP, kHz |

PSLVERR is raised for an unmapped or unaligned address and for a write to a read-only register.

## Body-bias generator model

`bbgen` stands in for the analog generator. Its behaviour:

* A write clamps the request to −1.5 V … VDD/2 + 300 mV and floors it to the 50 mV grid.
* P-well and N-well then change in one step after their transition times: 11.5 µs for the P-well, 23 µs for the N-well.
* The P-well goes to VBB and the N-well to VDD − VBB.

The well mapping and the single-step transition are assumptions; the analog behaviour is not modelled. The SoC generator is not regulated; it holds what software writes (0 V out of reset).

## Where this design departs from the reference

* **The loop and calibration are hardware, not software.**
* **Margin inside the loop.** F_margin is added to the set-point (see step 3 of the loop). Without it, a PID with integral action would remove the margin.
* **VBB range.** The loop is limited to −1 V … +650 mV, the range over which the models were characterised. The generator model itself reaches −1.5 V. The block diagram prints "−1.5 V – 0.4 V" for the domains; the tables' +650 mV at 0.7 V is used instead.
* **Calibration sweep.** The sweep is 30 points of 50 mV from −800 mV to +650 mV. The stated "30 points over 1.5 V" does not fit a −1 V start with a +650 mV end. Starting at −800 mV also keeps the chip above the 100 MHz search start.
* **Choices made here where the reference gives no value:**
  * PID gains and the anti-windup rule;
  * PMB window (20 µs) and counter width;
  * reference clock (50 MHz);
  * benchmark time-out (1 000 000 cycles = 20 ms);
  * register map and bus.
* **Supply points.** The top defaults to the 0.7 V point. For the other two characterised supplies:
  * build it as `bbreg_top #(.VDD(500), .SLOPE_PCT(11))` or `#(.VDD(900), .SLOPE_PCT(3))`. This sets the generators' N-well reference, the body-bias sensitivity of the VBB model, and the upper VBB limit VDD/2 + 300 mV.
  * load the matching PMB model (0.47 / 3.21 MHz or 0.6 / 8.72 MHz) and margin through the registers.
  * The calibration search starts at 100 MHz, which is too high for a 0.5 V chip. Set the `CAL_F_START` parameter (kHz) of the top below that chip's slowest reverse-biased speed. At 0.5 V a 5 MHz start has been simulated: 107 benchmark runs fit C_corr 0.471 and F0 2.63 MHz against a chip whose true model is 0.47 / 3.21 MHz. The 1 MHz search grid pulls F0 low by about half a step. Above 550 mV the 0.5 V generator clamps, so the last sweep points repeat the 550 mV point. Calibration at 0.9 V has not been simulated.
* **Temperature-aware model.** The process- and temperature-aware model with a 50 mV margin can be loaded through the registers. No on-chip mechanism selects coefficients by temperature.

## Verification

Every block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=… failures=…`:

| Testbench | What it checks |
|---|---|
| `tb_pmb_ctrl` | Three rings at known frequencies, two sets, the measurement latency. |
| `tb_pmb_model` / `tb_freq_error` | Random and corner values against an integer reference. |
| `tb_pid_controller` | Cycle-by-cycle against a reference PID, including clear and anti-windup. |
| `tb_vbb_model` | Rounding, margin, clamps and latency. |
| `tb_bbgen` | Quantisation, clamping, transition times in cycles. |
| `tb_bb_controller` | The closed loop with a behavioural chip. Set-points 175 → 200 → 100 → 150 MHz plus 85 MHz (floor) are checked against the VBB the chip model needs; temperature tracking 10–80 °C. |
| `tb_calibration_fsm` | Two complete calibrations, one with wrong-result failures and one with hangs. The fitted slope and offset are checked. |
| `tb_bbreg_regs` | Reset values, read/write, pulses, PSLVERR, loading of the calibration result. |
| `tb_bbreg_top` | End to end at default parameters, through APB only. |
| `tb_bbreg_top_vdd` | Two tops built for 0.5 V and 0.9 V, each with its own chip model. The 0.5 V top first calibrates itself from a 5 MHz search start; the first benchmark frequency and the fitted model are checked. Then a slow and a fast set-point per supply; settled VBB, reverse and forward bias, and the set-point are checked. |

`tb_bbreg_top` runs these steps:

1. Regulate with the uncalibrated model.
2. A refused calibration request while the loop runs.
3. A full 30-point calibration, with one hang.
4. Set-points 175 / 200 / 100 / 150 / 85 / 260 / 170 MHz.
5. A temperature sweep.
6. A SoC VBB write.

It counts each mechanism — iterations, benchmark failures, time-out, fit loaded, refusal, VBB reset, forward bias, reverse bias, both limits, set-point reached, temperature tracking, SoC write, bus error — and fails any that never occurred. It takes about 30 s of simulation.

Settled results of `tb_bbreg_top` after calibration (typical chip at 25 °C, 100 mV margin):

| Set-point | VBB | Chip F_max |
|---|---|---|
| 175 MHz | +100 mV | 183.5 MHz |
| 200 MHz | +400 mV | 209.7 MHz |
| 100 MHz | −800 mV | 104.9 MHz |
| 150 MHz | −200 mV | 157.3 MHz |
| 85 MHz | −1000 mV (floor) | 87.4 MHz |
| 260 MHz | +650 mV (limit) | 231.6 MHz, unreachable |
| 170 MHz | +50 mV; then −300 mV at 80 °C and +150 mV at 10 °C | ≥ 170 MHz throughout |

The reference measurements show the same pattern:

* forward bias of a few hundred mV for 200 MHz;
* the −1 V floor at 100 MHz on a slower chip;
* VBB swinging between about +0.15 V and −0.3 V over a 16–71 °C temperature excursion at 170 MHz.

The reference text starts its set-point sequence at 175 MHz, while its plot shows 170 MHz; both are exercised here.

**How far this can be trusted.** The closed-loop behaviour was verified only against the behavioural chip described below.

* The gains and the margin-in-the-loop arrangement should be re-tuned on silicon.
* Each PMB reading has a ±1 count (±50 kHz) quantisation.
* The generator model settles instantly after its transition time.

`tb_chip_plant` is not a test. It is the behavioural chip the closed-loop tests use:

* F_max = 170 MHz · (1 + 0.35 %/°C · (T − 17 °C)) · (1 + 5 % · VBB/100 mV);
* PMB rings that follow the chip's true linear model;
* a benchmark that fails just above F_max and hangs further above.

Its numbers stand in for silicon. They are illustrative, not measured.

### Running with Verilator

```
verilator --binary --timing --assert -Wno-fatal rtl/bbreg_pkg.sv -y rtl -y tb \
          tb/tb_bbreg_top.sv --top-module tb_bbreg_top -o sim
./obj_dir/sim
```

Replace `tb_bbreg_top` with any other testbench name. `bbreg_pkg.sv` must come first on the command line; the other modules are found through `-y`.

`-Wno-fatal` is needed only by the closed-loop testbenches. Their chip model's ring oscillators use delays computed at run time, which Verilator reports as ZERODLY.
