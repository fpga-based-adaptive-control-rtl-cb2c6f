# Coincidence-driven adaptive phase stabiliser for fibre interferometers

Two unbalanced fibre interferometers in series (a Franson arrangement) turn a
heralded photon into a time-bin superposition and then analyse it. Whether the
photon leaves the second interferometer at detector D1 or at D2 depends on the
phase difference of the two interferometers, and that phase drifts with
temperature and vibration. Each interferometer has a fibre stretcher (ST1,
ST2) in its long arm, driven from a 12-bit DAC through an amplifier.

This RTL closes the loop in an FPGA **using only the photon counts
themselves**: no auxiliary laser and no model of the interferometer. Once per
second it counts how often the herald detector Tg fired together with D1 (or
D2) and nudges a stretcher code in whichever direction raised that count. This
is a Perturb-and-Observe (P&O) hill climber. Its adaptive variant scales the
nudge with the distance from the expected maximum count: large steps when far
from the fringe top, small ones near it. A *circular constraint* wraps the
code between two bounds that span one optical fringe (2π), so the loop never
runs into the end of the actuator's range.

The design follows the architecture, widths and controller algorithms of a
published FPGA implementation of this scheme. Details the publication leaves
open were filled in here; they are listed in
[What is taken as given and what is chosen here](#what-is-taken-as-given-and-what-is-chosen-here).

## Block diagram

```
tg_in ─► input_delay ─► toa_stamp ─ ev_tg ─┐
d1_in ─► input_delay ─► toa_stamp ─ ev_d1 ─┼─► singles_counter (CS: Tg, D1, D2)
d2_in ─► input_delay ─► toa_stamp ─ ev_d2 ─┼─► coinc_counter Tg&D1
              now: shared 8-bit counter ───┘   coinc_counter Tg&D2   (CC)
                                               coinc_counter D1&D2
                                                       │ stats (6 × 24 bit)
sync_gen ── sync_tick (1 Hz gate) ──► counters         ├─────────► readout ports (CPU)
                                                       ▼
                                                      apc ─ po_controller ch1 ─► dac1 (ST1)
                                                          └ po_controller ch2 ─► dac2 (ST2)
```

| File | Role |
|---|---|
| `rtl/phase_stab_pkg.sv` | widths, `event_t`, `stats_t`, `ctrl_cfg_t`, mode/state enums, `default_cfg()` |
| `rtl/input_delay.sv` | synchroniser + run-time selectable delay per detector |
| `rtl/toa_stamp.sv` | edge detector, 8-bit arrival time from the shared time base |
| `rtl/sync_gen.sv` | gate timer, one tick per `SYNC_PERIOD` cycles |
| `rtl/gated_counter.sv` | 24-bit counter latched and cleared by the gate |
| `rtl/singles_counter.sv` | singles of Tg, D1, D2 |
| `rtl/coinc_counter.sv` | coincidence of two event streams, 24-bit count |
| `rtl/po_controller.sv` | one P&O / adaptive P&O / sweep channel |
| `rtl/apc.sv` | source selection and two controller channels |
| `rtl/phase_stab_top.sv` | everything wired together |

## From photon to count

**Alignment.** The three detector pulses arrive with different cable and
electronic delays. Each goes through a two-flop synchroniser and a shift
register whose tap (`delay_*`, 0..31 cycles) is set at run time. Lining up the
delays is how the system chooses which time bins count as "together". In
the experiment the trigger is delayed so that only the short–long and
long–short paths coincide.

**Arrival time.** `toa_stamp` detects the rising edge of the aligned level.
It tags the edge with the current value of an 8-bit free-running counter
(`now`) that all channels share. Arrival times are thus known to one clock
period and compared modulo 256.

**Coincidence.** `coinc_counter` takes two event streams. Events on both in
the same cycle are compared directly. Otherwise an event that finds no partner
waits as *pending* until it is `window + 1` cycles old. A later event on the
other stream within `window` cycles of it counts one coincidence and consumes
the pending event, so no pair is counted twice. Three instances count Tg&D1,
Tg&D2 and D1&D2.

**Gating.** `sync_gen` closes a gate every `SYNC_PERIOD` cycles: 10^8 by
default, one second at an assumed 100 MHz clock. At the tick, every counter
copies its total to a snapshot and restarts. The counters saturate at
2^24−1. `stats_valid` follows the tick by one cycle. The same snapshot goes to
the controller and out of the top for a CPU to read.

## The controller

This is the part of the design where the details matter most.

### Direction state machine

Each channel (`po_controller`) keeps a control value `S` (the DAC code), the
count of the previous step `I_prev`, and a 3-state index. At every step, with
`I` the count of the gate just closed and `step` the current step size:

| index | condition | action | next index |
|---|---|---|---|
| 0 (`IDX_START`) | `EnControl` = 1 | S += step | 1 |
| 0 | `EnControl` = 0 | none | 0 |
| 1 (`IDX_UP`) | I > I_prev | S += step | 1 |
| 1 | otherwise | S −= 2·step | 2 |
| 2 (`IDX_DOWN`) | I > I_prev | S −= step | 2 |
| 2 | otherwise | S += step | 0 |

`I_prev` is then replaced by `I`. The published listing writes the assignment
`I_prev ← I_actual` *before* the comparison. Read as software, the comparison
would then never see a change. Read as hardware (non-blocking assignment), it
compares against the previous gate, which is what the RTL does. The "−2·step"
on a fall undoes the step that made things worse and probes the other side.
`EnControl` is only tested in state 0, as in the listing. Clearing it
therefore stops the loop once the machine next returns to state 0. From then
on the code stays frozen.

### Step size

* `MODE_PO` (classical): step = `p_step`, a constant.
* `MODE_ADAPTIVE`: step = `dp = ((Imax − I) >> shift) + beta`, clamped to
  `dp_max`. With the defaults (`shift` 3, `beta` 50, `dp_max` 562) this is
  `dp = (Imax − I)/8 + 50`. It is the power-of-two form of
  `dp = α/Imax · (Imax − I) + β`, where α sets the largest and β the smallest
  step. A count above `Imax` gives `dp = beta`. `Imax` is either the
  programmed value (default 3000 coincidences per gate) or, with `imax_auto`,
  the largest count seen since `EnControl` was last raised.

Far from the fringe top the count is low, the step is large and the loop
climbs quickly. Near the top the step shrinks toward `beta`, which limits the
dithering.

### Circular constraint

After each update: if `S > s_max` then `S = s_min`, else if `S < s_min` then
`S = s_max`. When `s_max − s_min` spans one optical fringe, a wrap lands on an
equivalent phase. The loop therefore never saturates at the end of the DAC or
amplifier range. The default bounds are 0 and 1700. The wrap is applied in
every mode, including classical P&O.

### Finding the bounds: sawtooth sweep

`MODE_SWEEP` adds `sweep_step` to `S` every gate and wraps at `s_max` back to
`s_min`. This produces the sawtooth used to calibrate the bounds. Watch the
coincidence counts while raising `s_max`. If the amplitude is too small, the
counts do not complete one fringe. If it is too large, the counts jump at the
wrap. At the right amplitude the counts run through one continuous cosine
period, and that `s_max` is the one to use for control. The search itself is
left to the operator or software.

### Two channels and the reference-channel switch

`apc` registers the statistic each channel selects (`cfg.src`: any CC or CS
total). It then steps both controllers together. The DAC codes change two
cycles after `stats_valid`. Changing `src` from `SRC_CC_TG_D1` to
`SRC_CC_TG_D2` moves the lock to the complementary fringe: D2 becomes bright
and D1 dark. This is the reference-channel transition used to measure the
loop's rise and fall time. Both stretchers act on the same phase difference,
so in normal use only one channel runs a P&O mode while the other is held.

### Timing summary

| event | cycle |
|---|---|
| detector pulse at pin | t |
| strobe into counters | t + 4 + delay |
| coincidence strobe (`cc_hit`) | t + 5 + delay |
| gate closes (`sync_tick`) | T |
| `stats`, `stats_valid` | T + 1 |
| DAC codes, `ctrl_stepped` | T + 3 |

## Configuration (`ctrl_cfg_t`, one per stretcher)

| field | default (`default_cfg()`) | meaning |
|---|---|---|
| `mode` | `MODE_ADAPTIVE` | `MODE_HOLD`, `MODE_PO`, `MODE_ADAPTIVE`, `MODE_SWEEP` |
| `en_control` | 0 | starts the P&O loop from state 0 |
| `src` | `SRC_CC_TG_D1` | count to maximise |
| `imax_auto`, `imax` | 0, 3000 | reference maximum |
| `p_step` | 50 | classical step |
| `beta`, `dp_max`, `shift` | 50, 562, 3 | adaptive step law |
| `s_min`, `s_max` | 0, 1700 | circular bounds |
| `sweep_step` | 100 | sawtooth increment per gate |

Top-level parameters: `MAX_DELAY` (32) and `SYNC_PERIOD` (100 000 000). The
other top inputs are `run` (starts the gate timer), `delay_tg/d1/d2` and
`coinc_window` (0..15 cycles).

## What is taken as given and what is chosen here

Taken from the publication:
* The chain delay → time-of-arrival → singles and coincidence counters →
  controller → two DACs.
* 8-bit arrival times, 24-bit counters and 12-bit DAC codes.
* The three coincidence pairs and the 1 Hz feedback rate.
* The classical and adaptive P&O state machines.
* The adaptive step law and its constants (1/8, 50, 562).
* The circular constraint, the upper bound 1700, the reference count 3000,
  and the use of a sawtooth to set the bounds.

Chosen here, because the publication does not say:
* **Clock.** 100 MHz is assumed. All timing is in clock cycles, so arrivals
  are resolved to 10 ns. The published design relies on an earlier
  time-of-arrival technique whose details are not reproduced. Any sub-period
  resolution it has is missing here.
* **Coincidence rule.** The criterion is an arrival-time difference of at
  most `coinc_window` cycles, with the pending-event scheme above. The pump
  laser pulses every 13.2 ns, so a window of 1 cycle (±10 ns) can also pair
  photons from neighbouring pulses. Align the delays so that true pairs land
  in the same cycle, and use window 0 when that matters.
* **Delay and gating.** The delay resolution is one cycle and its depth is 32.
  Counters saturate, and are latched and cleared by the gate.
* **Classical step.** `p_step` = 50 is assumed. The classical algorithm gets
  the same circular wrap as the adaptive one: its listing names no bounds, but
  the code has to stay inside 12 bits.
* **Controller details.** A count above `Imax` gives the minimum step. The
  `imax_auto` estimator is a running maximum. `S` resets to 0.
* **Two channels.** The two controllers are independent, each with its own
  settings and source.
* **Run-time algorithm choice.** Both algorithms are in one design, selected
  at run time. The published resource figures compare two separate builds.
* **Ports instead of a bus.** The CPU side is plain ports (settings in,
  statistics out), not a bus. The DACs are driven with parallel 12-bit codes.
  The real converters' interface is not known.

* **Resources.** The published builds use one DSP slice, half a block RAM
  and about 1000 LUTs as distributed RAM. This RTL has no multiplier (the
  1/8 is a shift) and no memory besides the delay lines. Its size is
  therefore not comparable with the published figures, which also include
  the embedded processor's interface.

Not part of the RTL: the detectors, DACs, amplifiers, stretchers, the
embedded processor, the USB link to the host and the clock manager.

## Verification

All testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.
Three concurrent assertions in the RTL are checked in simulation whenever
assertions are enabled. The sync pulse lasts one cycle. A coincidence strobe always
follows an event. After each controller step the code lies within
[`s_min`, `s_max`].

| testbench | what it shows |
|---|---|
| `tb_input_delay` | exact 3 + delay latency for taps 0, 1, 7, 20, 31 |
| `tb_toa_stamp` | one strobe per rising edge, correct time stamp, one-cycle latency |
| `tb_sync_gen` | tick period, first tick, stop when `run` is low |
| `tb_singles_counter` | per-gate totals against the stimulus, 24-bit saturation |
| `tb_coinc_counter` | isolated pairs at offsets −4..4 and lone events; counts against the offsets for windows 0–3 |
| `tb_po_controller` | 3000 steps in all modes against an integer model of the listings (`tb/po_ref_pkg.sv`); wraps at both bounds, large and minimum steps, reversals, sweep |
| `tb_apc` | source selection, switching, both channels, two-cycle latency |
| `tb_phase_stab_top` | closed loop with the optical model (`tb/interferometer_model.sv`), 48 000-cycle gates: statistics against the model's tallies, sweep, adaptive lock on Tg&D1, switch to Tg&D2, classical lock with ST2, freeze when released; every mechanism counted |
| `tb_workload_stabilization` | classical against adaptive from a dark fringe, including a reference-channel switch; measures 10–90 % rise time and locked noise |
| `tb_phase_stab_top_full` | default parameters (10^8-cycle gates, about 3000 pairs per second): three gates, totals against the model, adaptive step against `(3000 − CC)/8 + 50` |

The optical model draws a photon pair per 8-cycle slot. The twin goes to D1
with probability (1 + v·cos Δφ)/2. Here Δφ is a drifting noise phase plus
2π·(dac2 − dac1)/1700, and v = 0.9. The model adds dark counts and fixed
cable delays.

In the workload testbench both algorithms lock at about 2800 of a possible
~2850 coincidences per gate. The adaptive loop rises 10–90 % within about
1 gate; the classical loop with `p_step` = 50 takes 11–20 gates. This agrees
with the direction of the published rise-time improvement. The published
reduction in locked noise is **not** reproduced with these settings. Near the
top the adaptive step is about 75 codes, larger than the assumed classical
step of 50, so the adaptive lock dithers slightly more. The noise comparison
depends on the classical step, which is not known.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/phase_stab_pkg.sv tb/po_ref_pkg.sv tb/tb_phase_stab_top.sv \
    --top-module tb_phase_stab_top -Mdir obj && ./obj/Vtb_phase_stab_top
```

Replace the testbench name as needed; `tb/po_ref_pkg.sv` is only needed by
`tb_po_controller` and `tb_apc` but is harmless elsewhere. The full-size test
simulates 3·10^8 cycles and takes a few minutes; the others take seconds.

## Changing the design

* **Clock rate.** Set `SYNC_PERIOD` = clock frequency / feedback rate.
* **Delay range.** Raise `MAX_DELAY`; the `delay_*` ports widen with it.
* **Wider DAC.** `DAC_W` in the package. `S_W` must stay at least
  `DAC_W` + 2, so that `S − 2·dp_max` remains representable.
* **Other step laws.** Only the `dp_now` expression in `po_controller` has to
  change; the state machine and the wrap do not depend on it.
