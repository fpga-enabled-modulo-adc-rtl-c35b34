# Modulo ADC fold-loop controller in SystemVerilog

A conventional ADC clips any input that goes beyond its full scale. A *modulo*
ADC instead folds the input back into a small window `[-λ, λ)` before it is
digitised: whenever the signal leaves the window, a multiple of `2λ` is
subtracted from it (or added to it). The converter only ever sees a bounded
waveform. The large signal is recovered later, either from the folded samples
alone (with a reconstruction algorithm) or, when the number of folds is known,
by adding the folds back.

This RTL is the digital half of such a converter: one channel of an FPGA-based
modulo ADC. Most of the hardware is analog: the input buffer, a summing
amplifier, a window comparator with thresholds at `±λ`, and a 14-bit loop DAC
with a programmable gain stage. The FPGA closes the loop at 200 MHz. It
watches the two comparator flags and keeps a signed **fold count** `C_f`. It
drives the DAC so that the voltage added at the summing node is `2λ·C_f`. It
also rebuilds the unfolded signal from the ADC samples and `C_f`. With
`λ = 0.1 V` and a ±12 V analog supply, the loop can fold an input more than 100
times larger than `λ`.

```
 g(t) ──► buffer ──► (+) ──┬──► window comparator ──OVRP/OVRN──┐
                      ▲    │         (±λ)                      │
                      │    └──► 8-bit ADC ──y^[k]──┐           │
           gain ◄── 14-bit DAC ◄──────┐            │           │
                                      │            ▼           ▼
  ┌──────────── modulo_adc_top (200 MHz) ─────────────────────────────────┐
  │ flag_sync ─► fold_fsm ─C_f─► multibit_step ─► undercomp_cal ─► DAC pins │
  │                 ▲  └─► wait_timer (B2) ─┘                               │
  │ ADC register ─► drm (g~ = y^ − 2λ·C_f, C_f delayed) ─► capture_buffer   │
  └─────────────────────────────────────────────────────────────────────────┘
```

## Signs and encodings

The signs are easy to get backwards, so here they are first.

* The comparator flags form a status word `[B1 B0] = [OVRN, OVRP]`. `01`
  means the folded signal is above `+λ`, `10` means it is below `-λ`, and `00`
  means it is inside the window. `11` cannot happen with a working comparator;
  it is treated like `00`.
* The summing node forms `y = g + v_f`, with `v_f = 2λ·C_f`. So the signal
  going **above** `+λ` makes the controller **decrease** `C_f`, and going below
  `-λ` makes it increase `C_f`.
* Recovery is therefore `g~ = y^ − 2λ·C_f`.
* Inside the FPGA, DAC codes are two's complement, with one bit spent on the
  sign. The DAC pins (`dac_data`) carry the same code in offset binary, which
  is the two's-complement code with its MSB inverted. Code 8192 on the pins is
  0 V.
* ADC samples are 8-bit two's complement. With `λ = 0.1 V` the ADC reads `λ`
  as 25 codes, so `two_lambda = 50`.

## The folding controller (`fold_fsm`)

Four states. `C_f` changes only on entry to INCREASE or DECREASE:

| from | status `[B2 B1 B0]` | to | action |
|---|---|---|---|
| KEEP | `x01` (above `+λ`) | DECREASE | `C_f ← C_f − 1` |
| KEEP | `x10` (below `-λ`) | INCREASE | `C_f ← C_f + 1` |
| KEEP | `x00`, `x11` | KEEP | hold |
| INCREASE, DECREASE | any | WAIT | hold |
| WAIT | `1xx` | WAIT | hold |
| WAIT | `0xx` | KEEP | hold |

`B2` is the *wait* flag. While it is high, the analog front end is still
settling after a step, and the controller must not read the comparators again.
Otherwise one threshold crossing, still visible while the DAC step propagates,
would be counted twice. This is the oscillation the WAIT state prevents. In
this design `B2` comes from `wait_timer`, a counter loaded with `wait_cycles`
at every `C_f` update. A fold therefore takes at least step + WAIT + KEEP =
`wait_cycles + 2` cycles before the next one can start. With
`wait_cycles = 6` that is 40 ns, or a fold rate of 25 MHz. The fastest signal
in the test set needs about one fold every 0.5 µs.

`C_f` saturates at the range the DAC allows (next section). A step that would
leave the range is dropped and reported on `cf_sat`. The folded output then
stays outside the window until the input comes back.

## From fold count to DAC code (`multibit_step`)

One fold is not one DAC LSB. It is `2^q` codes, and `q` is a run-time input.
The raw code is `C_f·2^q`. With a 14-bit DAC and one sign bit, this leaves

    C_f ∈ [−2^(13−q), 2^(13−q) − 1]

| q | one fold (codes) | C_f range | largest ρ = peak/λ (≈ 2·C_f,max) |
|---|---|---|---|
| 5 | 32 | −256 … 255 | ~510 |
| 7 | 128 | −64 … 63 | ~126 |
| 9 | 512 | −16 … 15 | ~30 |

The analog gain is set so that one fold (`2^q` DAC LSBs after the gain stage)
equals `2λ`. A larger `q` means a smaller analog gain for the same `λ`, so less
noise from the gain stage. Pick the largest `q` whose range still covers
`ρ/2`. For `ρ ≈ 108`, that is `q = 7`. In practice the analog swing
(±12 V rails, about 60 folds each way, ρ ≈ 120, at `λ = 0.1 V`) limits the depth before the DAC
does.

## Under-compensation calibration (`undercomp_cal`)

This is the least obvious part of the loop. A DAC step of a full `2λ` makes a
sharp edge at the summing node. On the board, that edge rings and overshoots
past the threshold. The fix is to set the analog gain a little **low**, so that
a fold is worth `2λ − ΔV` (for example 180 mV instead of 200 mV). That trades
the overshoot for an error that grows with the fold count: after `C_f` folds
the feedback is short by `C_f·ΔV`, and a deeply folded signal drifts out of
the window.

The FPGA cancels the growth digitally. It adds `(C_f − 1)·ΔV` to the DAC code:

    code = C_f·2^q + (C_f − 1)·cal_step          (cal_step = ΔV in DAC codes)
    v    = C_f·(2λ − ΔV) + (C_f − 1)·ΔV = 2λ·C_f − ΔV

The remaining error is a **constant** `−ΔV`, the same for every fold count.
Two consequences for anyone using this block:

* Each single step is still `2λ`: the analog step `2λ − ΔV` plus the digital
  `ΔV`. So the calibration does not bring back a smaller analog edge. What it
  removes is the accumulation. Whether the overshoot benefit survives depends
  on how the DAC code change reaches the node. This RTL applies the step and
  the correction in the same DAC update, as written in the equation above.
* The window is shifted by `ΔV` (the feedback at `C_f = 0` is already `−ΔV`),
  and the recovered samples carry a constant offset: `g~ = g − ΔV`. Remove it
  downstream if it matters. The testbenches expect it.

`cal_step` must be set together with the gain stage. If the gain makes
`2^q + cal_step` codes equal `2λ`, the calibration is exact. An example is
`q = 7`, `cal_step = 16`: 144 codes = 200 mV, ΔV = 22.2 mV. `cal_step = 0`
turns the calibration off. The sum is saturated to the 14-bit range
(`dac_clipped`).

## Loop timing

All registers run on the 200 MHz controller clock. Counting the edge at which
a comparator flag is first sampled as edge 0:

| edge | event |
|---|---|
| 0, 1 | flag passes the two-flop synchroniser (`flag_sync`) |
| 2 | FSM enters DECREASE/INCREASE and `C_f` steps; `cf_update` high |
| 3 | DAC code register (`undercomp_cal`) updated; FSM in WAIT; `wait_timer` loaded |
| 4 | the DAC latches the code (external, one clock in the model) |
| 4 + settling | the comparator flag falls |
| 3 + `wait_cycles` | FSM back in KEEP, reads the flags again |

In the closed-loop simulation with the behavioural front end, the OVRP pulse
lasts 2 to 5 cycles. On the real board the comparable figure was 5 cycles
(25 ns). This loop delay is what limits the bandwidth. A fast input keeps
moving while the correction is on its way. If it turns around in that time,
the late fold pushes the output through the opposite threshold, and the count
goes wrong. The RTL cannot remove this. It only keeps its own share to two
synchroniser flops and one FSM cycle.

## Direct recovery and its alignment (`drm`)

The ADC runs at 100 MSPS. The top samples `adc_data` on every other
controller cycle (`adc_strobe`). The sample that arrives in the FPGA was taken
some time ago, through the DAC latency, the settling and the ADC pipeline. It
must be combined with the `C_f` that was in force *then*, not the current one.
`drm` keeps the last 32 values of `C_f`. It uses the one `cf_delay` cycles old:

    g~[k] = y^[k] − two_lambda · C_f(cf_delay cycles before the recovery edge)

For a DAC with one clock of latency and an ADC with `L` sample clocks of
pipeline delay, `cf_delay = 2L + 3`. That is 13 for `L = 5`, the value the
testbenches use. With a wrong `cf_delay`, every fold leaves a spike of `±2λ`
in `g~` as long as the error. This makes the value easy to trim on hardware.
Samples taken while the feedback is still moving (within a few cycles of a
fold) are not exact in any case.

`g~` is 24 bits wide, enough for the largest `C_f` times the largest
`two_lambda`.

## Sample capture (`capture_buffer`)

A one-cycle `cap_arm` pulse starts a burst. The next 65536 recovered samples
are stored as `{y^ (8), C_f (14), g~ (24)}` words. `cap_done` then rises, and
`cap_rd_addr`/`cap_rd_data` read the memory with one cycle of latency. The
depth covers a 50,000-sample record (0.5 ms at 100 MSPS), the length of the
record used for on-board recovery. Storing `y^` and `C_f` with `g~` means the
same burst can feed an offline algorithm that sees only `y^`, and be scored
against the hardware count.

## Run-time settings

All settings are plain input ports of `modulo_adc_top`. Drive them from
whatever register bank or debug core the system has.

| port | meaning | typical (λ = 0.1 V) |
|---|---|---|
| `q` | fold = `2^q` DAC codes | 7 |
| `cal_step` | ΔV in DAC codes, 0 = off | 16 (with gain set so 144 codes = 0.2 V) |
| `wait_cycles` | WAIT dwell after a fold | 6 |
| `two_lambda` | 2λ in ADC codes | 50 |
| `cf_delay` | C_f age used for recovery | 13 (ADC latency 5) |

Status outputs: `cf`, `state`, `cf_update`, `cf_sat`, `cf_in_range` (low if
`C_f` no longer fits after `q` was raised), `dac_clipped`, and the recovered
stream `g_valid`/`g_tilde`/`y_hat`/`cf_aligned`.

## What is outside the RTL, and where this design makes its own choices

Not in the RTL, because these parts are analog or vendor parts: the buffer,
summing amplifier, programmable-gain stage, loop DAC, threshold generator,
window comparator, sampling ADC, the FPGA PLL, the on-chip logic analyzer, the
board microcontroller and power supplies. `tb/afe_model.sv` models the analog
ones well enough to close the loop in simulation. It is not a circuit model:
the settling is a first-order step, the comparator is ideal with 3.5 mV of
hysteresis, and the ADC latency (5 samples) is assumed.

Where the RTL follows a precise description: the four-state FSM and its
transitions, the status encoding, `C_f·2^q` and its range, the calibration
formula, and the recovery formula.

This design's own choices:

* The two-flop flag synchroniser.
* The wait flag made by a timer. The original only says `B2` marks settling.
* Saturation of `C_f` at the range ends.
* Synchronous active-low reset to KEEP with `C_f = 0`.
* Applying the calibration in the DAC code, with ΔV in whole DAC codes.
* Two's complement inside the FPGA and offset binary on the DAC pins.
* The `C_f` alignment delay line.
* The capture memory's control and word format.
* A single 200 MHz clock domain. The original clocks the ADC at 100 MHz with a
  60° phase advance from the same PLL. Here the ADC word is registered in the
  200 MHz domain on alternate cycles, so the ADC clock phase has to be set
  outside, at the PLL and the ADC.
* Only one channel. The board has four, with one in use.

One inconsistency in the original description had to be resolved. In one
place the fold-count register drives the DAC directly; in another the FPGA
adds the calibration term to the feedback. The RTL adds the term.

## Files

| file | contents |
|---|---|
| `rtl/modulo_pkg.sv` | widths, state enum, status struct, `C_f` range functions |
| `rtl/flag_sync.sv` | comparator flag synchroniser |
| `rtl/fold_fsm.sv` | folding FSM and `C_f` register |
| `rtl/wait_timer.sv` | wait flag `B2` |
| `rtl/multibit_step.sv` | `C_f·2^q` and range check |
| `rtl/undercomp_cal.sv` | calibration, saturation, DAC register |
| `rtl/drm.sv` | direct recovery with `C_f` alignment |
| `rtl/capture_buffer.sv` | burst sample memory |
| `rtl/modulo_adc_top.sv` | one channel, all of the above |
| `tb/afe_model.sv` | behavioural analog front end (simulation only) |
| `tb/tb_*.sv` | self-checking testbenches |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
          rtl/modulo_pkg.sv tb/tb_modulo_adc_top.sv --top-module tb_modulo_adc_top
./obj_dir/Vtb_modulo_adc_top
```

* `tb_fold_fsm`, `tb_wait_timer`, `tb_multibit_step`, `tb_undercomp_cal`,
  `tb_drm`, `tb_capture_buffer` test one block each against a reference model
  written from the formulas above. They use random and directed stimulus,
  including the range ends and latencies.
* `tb_modulo_adc_top` closes the loop with `afe_model`, with the top at its
  default sizes. Scenarios:
  * a ρ = 91.56 sine captured in full and read back: the recovered extremes
    must be ±2289 codes less the calibration offset;
  * one full period of a ρ = 102, 1 kHz sine (`|C_f|` must reach 51);
  * a switch to `q = 9`;
  * an input needing 20 folds where `q = 9` allows 16, which makes the count
    saturate.

  The bench checks every DAC code, every settled recovered sample, the
  two-edge flag-to-step latency and the output window. It also counts that
  each mechanism (increase, decrease, WAIT dwell, saturation, `q` switch,
  calibration, capture) occurred. The run takes a few seconds.
* `tb_workloads` runs the whole test-signal set through the same loop. The set
  is sines (ρ 2.84 to 102), periodic sincs (ρ 3.24 to 29.8, bandwidths
  18–410 kHz), 16-QAM, BPSK and FSK. The bench checks recovery and that the
  fold count stays within `ceil(ρ/2) + 1`.

None of this exercises the analog failure modes (ringing, over-fold at high
input slew). To study those, replace `afe_model` with a better front-end model.
