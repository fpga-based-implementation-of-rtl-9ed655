# Grid-tie frequency and phase synchronisation controller

A grid-tied inverter may only push power into the mains if its output voltage
has the grid's frequency and phase. This RTL is the digital part of such an
inverter. It samples the grid voltage and the inverter's own output voltage,
sets its internal oscillator to the grid's frequency and phase, and drives the
four switches of a full H-bridge with sinusoidal PWM (SPWM) at that frequency
and phase.

Two mechanisms share one numerically controlled oscillator (NCO):

* **Frequency matching (feed-forward).** A zero-crossing detector with
  hysteresis finds the rising zero crossings of the grid voltage. The time
  between two of them is converted into the NCO's tuning word, so after at
  most two grid periods the inverter runs at the grid frequency.
* **Phase matching (a simplified PLL).** The grid sample is multiplied by the
  inverter-output sample. A low-pass filter reduces the product to its DC
  value, the *error signal*, which is 0.5 when the two normalised waves are in
  phase. A PID controller turns the distance from 0.5 into a small frequency
  correction. That correction is added to the zero-crossing word, and the
  oscillator slides in phase until the error signal reaches 0.5.

The block structure follows a published FPGA grid-tie design built on an NI
GPIC controller board: hysteresis ZCD, product, digital filter, PID, adder,
discrete-time VCO and SPWM. The source gives the algorithm but no widths,
rates or constants. Every number below that is not 50 Hz, 0.5 or "two
periods" is a choice made for this implementation.

```
 ref_sample ──► zcd_hysteresis ──zc──► freq_meter ──ftw_zcd──┐
     │                                                       ▼
     ├──► phase_product ──► lowpass_filter ──► pid_controller ──► freq_adder ──► nco ──► spwm_gen ──► gates (H-bridge)
     │          ▲                 (error signal)                                                   │
 out_sample ────┘  ◄──────────── sensed inverter output (external ADC) ◄── bridge + LC filter ◄────┘
```

## Number formats and clocking

| quantity | format | note |
|---|---|---|
| clock | 40 MHz (`grid_tie_pkg::CLK_HZ`) | everything is single-clock |
| voltage samples | signed 16-bit Q2.14 | normalised amplitude 1.0 = 16384, half of full scale |
| sample strobe | `sample_valid`, one clock wide | the filter constant assumes 100 kS/s |
| product / error signal | signed 18-bit Q2.14 | two in-phase amplitude-1.0 sines average to 8192 (0.5) |
| tuning word | unsigned 32 bits | NCO frequency = ftw · CLK_HZ / 2^48; 1 Hz ≈ 7.04·10^6 LSB |
| NCO sine, modulation index | Q1.15 | 32768 = 1.0 |

The voltage format puts the nominal amplitude at half of full scale on
purpose. As shown below, the phase loop needs the inverter output slightly
*above* the grid voltage, so the converter input needs headroom above 1.0.

## Frequency matching

### Zero-crossing detector with hysteresis (`zcd_hysteresis`)

A plain sign-change detector fires several times per crossing when the signal
is noisy. This detector accepts only rising crossings and cycles through
three states:

1. `ZCD_WAIT_NEG` – wait until a sample is below `-HYST`;
2. `ZCD_ARMED` – the first sample ≥ 0 is the crossing: pulse `zc_pulse`;
3. `ZCD_WAIT_POS` – ignore everything until a sample is above `+HYST`, then
   go back to 1.

Noise around zero cannot create a second crossing, because a crossing is
only accepted once the signal has reached +HYST and then fallen to −HYST.
Reset starts in state 1, so the first reported crossing is a real rising one.
`HYST` defaults to 3277: 0.2 of the nominal amplitude, or 0.1 of full scale.

The noise margin is HYST/2, not HYST. The detector arms as soon as one
sample falls below −HYST. At that moment the clean signal may be only
HYST − n below zero, where n is the noise peak. The next sample is accepted
if noise lifts it back to zero, which happens while still on the falling
side, whenever n > HYST/2. Choose `HYST` above twice the expected noise
peak. `tb_noise_levels` shows clean operation up to a peak of 0.08 with the
default 0.2. At a peak of 0.15, false crossings on the falling side appear.

### Period to tuning word (`freq_meter`, `serial_divider`)

A counter measures the clock cycles `P` between two validated crossings.
A restoring divider, one bit per clock, then forms `ftw = floor(2^48 / P)`.
Because the NCO adds `ftw` to a 48-bit accumulator every clock, it then runs
at exactly `CLK_HZ / P`, independent of the clock frequency. Behaviour:

* after reset the word is the nominal 50 Hz value;
* a new word appears 51 clocks (1.3 µs) after the crossing that closes a
  period;
* periods outside 20–100 Hz are discarded;
* if no crossing arrives for 2^24 clocks (0.42 s) the next crossing starts
  a fresh measurement.

Settling after a frequency step is therefore at most two periods: the rest of
the period in which the step happened, plus one full new period. At power-up,
add up to half a period while the detector first sees the negative level.

Resolution is limited by the sample grid. A crossing is only seen at the
next sample, so one period carries up to one sample (10 µs at 100 kS/s) of
error. That is a frequency error of about f²·Ts: 0.025 Hz at 50 Hz and
0.042 Hz at 65 Hz. Successive periods err in opposite directions, so the
mean frequency is exact, but a single word is not good to 0.01 Hz. A faster
converter, or interpolating the crossing time between samples, would improve
this. Neither is implemented.

## Phase matching

This is the part that needs care.

### What the detector measures

With grid `v1 = A1 sin ωt` and inverter `v0 = A0 sin(ωt + θ)`,

    v1 · v0 = A1·A0·cos θ / 2  −  A1·A0·cos(2ωt + θ) / 2

`phase_product` forms this product and `lowpass_filter` removes the 2ω term.
The filter is two cascaded first-order sections, `y += (x − y)/2^11`, each
with a corner near 7.8 Hz at 100 kS/s; together they attenuate the 100 Hz
ripple of a 50 Hz grid about 165 times. What is left, the error signal, is
`A1·A0·cos θ / 2`. For normalised amplitudes it is 0.5 exactly when θ = 0.

### Why 0.5 is a one-sided target

The PID (`pid_controller`) computes `e = 0.5 − error_signal`, then
`u = (KP·e + KI·Σe + KD·Δe) >> 8`, with clamps on the integrator and on the
output. `freq_adder` adds `u` to the zero-crossing word, and a positive `u`
speeds the NCO up.

For equal amplitudes `e = (1 − cos θ)/2`, which is never negative. The
correction therefore always *advances* the inverter's phase, quickly when θ
is large and ever more slowly as θ approaches 0 from behind. The loop is
stable only from one side. An inverter that leads simply advances a whole
cycle and approaches 0 from behind as well. Two consequences follow:

* **Keep the integral gain at zero.** Σe only grows, so an integral term
  pushes the phase past the target and keeps it cycling. The PID
  implements and tests all three terms, but the top level defaults to
  `KI = KD = 0`, i.e. proportional control.
* **The inverter amplitude must be slightly above the grid amplitude.** If
  A1·A0 < 1 the error signal can never reach 0.5. A small positive error
  then remains, and the phase keeps slipping slowly. If A1·A0 is slightly
  above 1, the loop settles where `A1·A0·cos θ = 1`. That point is stable,
  with the inverter lagging by θ0 = acos(1/(A1·A0)). The lag grows with the
  square root of the amplitude excess: 1 % gives about 8°, 0.1 % gives about
  2.6°. Set `mod_index` and the sensing gain so that the sensed inverter
  amplitude is just above the sensed grid amplitude.

With `KP = 440000` (about 4 Hz of correction per unit of error), the
end-to-end test locks within 0.35–0.6 s from a 115° offset at 35, 42.88, 50
and 65 Hz. It settles at about −8° with a 1 % amplitude excess.

### Oscillator (`nco`, `sine_lut`)

The NCO has a 48-bit phase accumulator and a 1024-point sine table. Only a
quarter wave is stored: 256 entries,
`Q[i] = round(32767·sin(2π(i + 0.5)/1024))`, in `rtl/sine_quarter.hex`. The
half-step offset makes the quadrants exact mirror images, so the table is
read forwards or backwards and negated by the two top phase bits. The sine
follows the phase by one clock.

## SPWM and the bridge (`spwm_gen`)

A symmetric triangle carrier counts 0 → HALF → 0. HALF = 2000 gives 10 kHz
at 40 MHz. The modulating value is `m = sine · mod_index`. Leg A compares
`(1 + m)·HALF/2` with the carrier and leg B compares `(1 − m)·HALF/2`. This
is unipolar (three-level) SPWM, so the bridge voltage is +Vdc, 0 or −Vdc,
and its local average is `m·Vdc`. Each leg's low-side switch is the
complement of its high-side switch. **No dead time is inserted.** A real
bridge needs it, and it must come from the gate driver or an added stage.
`mod_index` must not exceed 1.0 (32768).

## Top level (`grid_tie_top`)

Inputs:

* `ref_sample`, `out_sample`: the two converter samples, with their common
  strobe `sample_valid`;
* `mod_index`: the modulation depth.

Outputs:

* `gates`: the four switch drives, as an `hbridge_gates_t` struct;
* `zc_pulse`, `freq_measured`, `ftw_zcd`, `ftw_nco`, `error_signal`,
  `pid_out`, `nco_phase`: the internal loop signals, brought out for
  monitoring.

The converters, bridge, output filter, DC-DC stage and PV source lie outside
this logic.

Main parameters:

| parameter | default | meaning |
|---|---|---|
| `HYST` | 3277 | hysteresis level (Q2.14) |
| `LPF_SHIFT`, `LPF_STAGES` | 11, 2 | low-pass corner and order |
| `KP`, `KI`, `KD` | 440000, 0, 0 | PID gains, output scaled by 2^-8, in tuning-word LSB |
| `CARRIER_HALF` | 2000 | half carrier period in clocks |
| `grid_tie_pkg::CLK_HZ`, `SAMPLE_HZ` | 40 MHz, 100 kHz | clock and assumed sample rate |

If the sample rate changes, retune `LPF_SHIFT`. A corner about ten times
below twice the grid frequency works well. The PID gain per unit error
scales with `CLK_HZ`, through the tuning-word scale.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_zcd_hysteresis` | crossing positions on a clean sine; one crossing per cycle under noise below the hysteresis level; hand-built sequences that exercise every state |
| `tb_freq_meter` | exact `floor(2^48/P)` for the periods of 35, 42.88, 50, 65 Hz; 51-clock latency; reset word; rejection of implausible periods |
| `tb_phase_product` | random products against a model; mean of sin·sin(+θ) = cos θ/2 |
| `tb_lowpass_filter` | bit-exact model; step settling; ripple residue for a 100 Hz ripple |
| `tb_pid_controller` | all three terms and both clamps against a model; the default gains |
| `tb_freq_adder` | sums and both saturation limits |
| `tb_nco` | accumulator, every table entry over a full turn, output frequency |
| `tb_spwm_gen` | carrier shape and period, complementary legs, duty = (1 ± m)/2, three-level output |
| `tb_grid_tie_top` | closed loop at default parameters (below) |
| `tb_noise_levels` | full controller at 50 Hz with noise peaks 0, 0.02, 0.05, 0.08: one crossing per period, mean measured frequency within 0.1 Hz |

`tb_grid_tie_top` closes the loop through `inverter_plant_model`, a
behavioural model of the bridge, a two-pole output filter (1.5 kHz) and the
voltage sensing. The test drives a grid sine with small noise that
starts 115° ahead of the inverter at 50 Hz. It then steps the grid to
42.88 Hz, 65 Hz and 35 Hz.

* **Frequency:** in every segment the zero-crossing word must settle within
  two periods (2.5 at power-up) and stay within the sampling resolution.
* **Phase:** the phase must stay within 15° after less than one second, the
  error signal must hold 0.5 ± 0.02, and the inverter must settle on the
  lagging side, as the analysis above predicts.
* **Coverage:** the test counts each mechanism (validated crossings,
  noise flips rejected, frequency updates, PID corrections of both signs,
  locks, frequency steps) and fails if any never happened.
* **Bridge:** it checks that no bridge leg ever shoots through.

The run covers 5.7 s of simulated time, about two minutes with Verilator.

To run one testbench with Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
    rtl/grid_tie_pkg.sv tb/tb_grid_tie_top.sv --top-module tb_grid_tie_top -o sim
./obj_dir/sim
```

The sine table is read with `$readmemh("rtl/sine_quarter.hex")`, so run the
simulation from that same directory.

## Where this implementation goes beyond the source

These are implementation choices. The source describes none of them:

* all widths, the 40 MHz clock and the 100 kS/s sample rate;
* the Q2.14 normalisation;
* the period-counting frequency measurement and its divider;
* the filter type and order;
* the PID gains, the sign convention and the clamps;
* the NCO size;
* unipolar SPWM, the 10 kHz carrier and the lack of dead time;
* the detector's reset state and hysteresis value.

The source claims frequency matching to two decimal places. A single
measurement here is good to about f²·Ts (see above), so that claim holds
only on average unless the sample rate is about 400 kS/s or more. The
amplitude condition for phase lock and the resulting static lag follow
from the detector structure itself. They are not side effects of this
implementation.
