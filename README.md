# PID + disturbance-observer servo for laser frequency locking

A diode laser locked to an atomic line by an ordinary PID controller keeps a
broad band of residual frequency noise between the integrator's reach and the
servo bandwidth. In that band the PID cannot add gain without losing phase
margin. This design adds a **disturbance observer (DOB)** in parallel with an
unchanged PID. The DOB estimates the lumped disturbance acting on the loop and
subtracts it from the control signal, but only below the cutoff of a low-pass
"Q-filter". Above that cutoff the loop behaves exactly as the plain PID.

The observer is cut down as far as it goes:

* the inverse plant model is a single gain `Kn`, because every analog and digital
  element in the loop is flat well above the Q-filter cutoff;
* the Q-filter is a first-order exponential moving average (EMA) whose weight is
  a power of two, `alpha = 2^-n`, so the filter is one add, one subtract and a
  shift;
* `Kn * y` is formed by shifts and adds, so the observer uses no multiplier.

Tuning then comes down to one integer, `n` (the cutoff), and one gain sweep on
`Kn`.

The RTL covers both FPGA boards of the lock. The first board makes the 5 MHz
modulation for modulation-transfer spectroscopy (MTS) of the Rb-87 D2 line and
demodulates the photodetector into an error signal. The second board runs PID +
DOB and drives the laser current. Both run at 125 MHz with 14-bit converters.

## The control law

With error/measurement `y`, PID output `u_pid` and plant input `u_out`:

```
  u_out = u_pid - d_hat
  d_hat = Q [ Kn * y - u_out ]          Q(z): q[n] = (1 - 2^-n) q[n-1] + 2^-n x[n]
```

With a perfect model, the disturbance reaches the output through
`S_DOB = 1 - Q`. That is near 0 well below the cutoff and near 1 well above it.
The observer therefore only ever reduces the disturbance, and never amplifies it.
In the small-alpha limit the EMA cutoff is

```
  fc = 2^-n * fclk / (2 pi)
```

At `fclk = 125 MHz` the same EMA block serves three roles:

| shift n | cutoff    | where it is used                           |
|---------|-----------|--------------------------------------------|
| 4       | 1.243 MHz | lock-in low-pass on board 1                |
| 6       | 310.8 kHz | PID pre-filter on board 2                  |
| 8       | 77.7 kHz  | Q-filter, widest setting tried             |
| 9       | 38.9 kHz  | Q-filter, default                          |
| 10      | 19.4 kHz  | Q-filter                                   |
| 11      | 9.7 kHz   | Q-filter, narrowest setting tried          |

## Signal path

```
 board 1 (rp1_modem)                              board 2 (rp2_pid_dob)
 ------------------------------------             --------------------------------------------
 dds --carrier--------------------> rf_out1       rf_in = e = y --+--> pid_controller --u_pid--+
  |                                 (to EOM)                      |                             |
  +--ref_sin--+                                                   |                        (+)  v  (-)
              v                                                   +--> dob ---------d_hat---> [ - ]--> u_out --> rf_out
 rf_in --> lockin_demod --> ema_filter(n=4) --> rf_out2 ~~coax~~> |    ^                                  |    (laser current)
 (photodetector)                                (error)           |    +-------------- u_out -------------+
```

The two boards are separate FPGAs, each with its own clock. The only link
between them is analog: rf_out2 goes to a DAC and over a coax cable to the ADC
of board 2. The laser, optics and converters close the outer loop outside the
logic. `mts_servo_top` therefore places the two boards side by side. All
converter codes are ports, so nothing crosses clock domains inside the top.

## The disturbance observer (`rtl/dob.sv`)

This is the part worth reading closely. It is a five-stage pipeline, 40 ns at
125 MHz, from `y` to `d_hat`. At the default 38.9 kHz cutoff that delay costs
only 360° × 38.9 kHz × 40 ns = 0.56° of phase:

| stage | register     | content                                                                |
|-------|--------------|------------------------------------------------------------------------|
| 1     | `y1`, `u1`   | input samples of `y` and of the fed-back `u_out`                       |
| 2     | `pp_lo`, `pp_hi` | sums of `y1 << i` over the set bits `i` of `Kn`: bits 0-6 and bits 7-13 (bit 13 subtracts, because `Kn` is two's complement); `u2` delays `u_out` to match |
| 3     | `x3`         | `x = ((pp_lo + pp_hi) >>> 8) - u2`, the raw disturbance estimate       |
| 4     | EMA state    | the Q-filter (`ema_filter`, shift `q_n`)                               |
| 5     | `d_hat`      | the Q-filter output clipped to 14 bits                                 |

Points that are easy to miss:

* **Kn scaling.** `Kn * y` is scaled by 2^-8, so `Kn = 256` is unit gain and the
  published `Kn = 400` is 1.5625. The right value is `1 / (plant gain)`, where the
  plant gain is measured from DAC code at RF OUT to ADC code at board 2's RF IN.
* **Time alignment.** `u_out` passes through the same two registers as `y`.
  Stage 3 therefore subtracts the plant input and the measurement of the same
  sample instant. The output register of `rp2_pid_dob` adds one more clock on
  the feedback path.
* **Enable.** With `dob_en` low, every stage and the Q-filter state are held
  cleared, so `d_hat = 0` and the board is a plain PID. Raising the enable starts
  the observer from an empty filter, so it engages without a jump.
* **Word growth.** The product is 28 bits wide. After the 2^-8 scaling and the
  subtraction, `x` is 21 bits. The Q-filter works on those 21 bits plus 16 guard
  bits. Only `d_hat` is clipped back to the 14-bit DAC range.

## The EMA filter (`rtl/ema_filter.sv`)

The filter state `acc` holds the output with 16 fractional guard bits. It is
updated as

```
  acc <= acc + (((x << 16) - acc) >>> n)
```

The shift floors, so `acc` always lands between its old value and the new input.
It can never overflow, and it needs no clipping. The guard bits let a step as
small as one input LSB still move the state at `n = 15`. The output is
`acc >>> 16`, one clock after the input. A shift of `n = 0` passes the input
straight through.

## PID controller (`rtl/pid_controller.sv`)

The error first goes through an EMA pre-filter (n = 6). Then the three paths
are formed in parallel in one register stage:

```
  P = (kp * e) >>> 12
  I : acc += ki * e   (32 bits, clamped at its range), read as acc >>> 18
  D = (kd * (e[n] - e[n-1])) >>> 10
```

A second stage adds P, I and D and clips the sum to 14 bits. The latency from
`e` to `u_pid` is 3 clocks. From board 2's RF IN to RF OUT it is 4 clocks
through the PID and 6 through the DOB. The published gains
(`Kp = Ki = -200`, `Kd = -20`) are integers. The shifts 12/18/10 that give them
physical meaning are this design's choice, a convention common to Red Pitaya
PID cores. `int_rst` holds the integrator at zero.

## Board 1: carrier and lock-in (`rtl/dds.sv`, `rtl/lockin_demod.sv`, `rtl/rp1_modem.sv`)

* **DDS.** A 32-bit phase accumulator drives a 1024-entry sine table of 14-bit
  samples. The table is computed at elaboration as
  `round(8191 sin(2 pi k / 1024))`. The tuning word 171 798 692 gives
  5.000000 MHz. A second table read at `phase + ref_phase` supplies the lock-in
  reference. The phase offset lets the demodulation phase be matched to the
  delay of the optical and RF path.
* **Mixer.** The mixer computes `(rf_in * ref) >>> 13` and registers it. A
  detector component in phase with the reference, of amplitude A, gives about
  A/2 at DC.
* **Low-pass.** The mixer output goes through an EMA with n = 4 (1.24 MHz),
  which removes the 10 MHz product. The result is clipped to 14 bits and sent to
  RF OUT2.

## Run-time settings (`rtl/servo_pkg.sv`)

`rp1_cfg_t` holds:

* `ftw`: carrier tuning word;
* `ref_phase`: reference phase offset;
* `lpf_n`: lock-in low-pass shift.

`rp2_cfg_t` holds:

* `kp`, `ki`, `kd`, `kn`: 14-bit signed gains;
* `pf_n`: PID pre-filter shift;
* `q_n`: Q-filter shift;
* `int_rst`: integrator reset;
* `dob_en`: observer enable.

The package also holds the published defaults (`FTW_5MHZ`, `LOCKIN_LPF_N`,
`PID_PREFILT_N`, `DOB_Q_N`, `KP_DEFAULT`, ...). On the boards the settings would
come from the SoC's processor. Here they are plain input ports, since no
register map is defined.

`rp2_status_t` has four flags. Each is high for one cycle when that event
happens: PID sum clipped, integrator clamped, `d_hat` clipped, or output
junction clipped.

All resets are synchronous and active high. All samples are two's complement.

## What follows the published design, and what does not

These parts follow the published design:

* the PID + DOB structure and `u_out = u_pid - d_hat`;
* the scalar inverse model `Kn`;
* the EMA Q-filter with the power-of-two weight, and the multiplier-free
  observer;
* the five-clock observer latency;
* the shift counts 4 / 6 / 9 and the example gains;
* the 125 MHz clock, the 14-bit converters and the 5 MHz carrier;
* on board 1, the chain DDS -> demodulator -> EMA low-pass.

These are this design's own choices:

* all word widths beyond the 14-bit converters;
* the gain scaling shifts (P 12, I 18, D 10, Kn 8);
* the rounding (floor) and the 16 EMA guard bits;
* the DDS table size and the reference phase offset;
* clipping everywhere, integrator clamping, the DOB enable, the status flags and
  the resets;
* the split of the observer's work over its five stages.

Known departures:

* **One pre-filter, not several.** The published design speaks of PID EMA
  "pre-filters" in the plural. Here one pre-filter on the error feeds all three
  paths.
* **No setpoint.** Error and measured output are the same signal, as in the
  published board diagram. No setpoint subtraction is built.
* **Behaviour at `Kn = 1`.** Because of the 2^-8 Kn scaling, `Kn = 1` almost
  removes the model term. The observer then mostly feeds back `-Q u_out`, which
  in the test plant increases the error. The published sweep reports a small
  improvement at `Kn = 1`, so its Kn scaling must differ. It is not stated.
* **Resource use.** The observer here has 171 flip-flop bits. The published
  implementation quotes 1836 LUTs and 527 flip-flops, without saying what that
  count includes.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. `tb/servo_ref_pkg.sv` holds cycle-accurate
integer models of the PID and the observer. These models are written
independently of the RTL.

| testbench | what it establishes |
|-----------|---------------------|
| `ema_filter_tb` | bit-exact against an integer model for random inputs and shifts; step response within 2 LSB of `H(1-(1-2^-n)^k)`; n = 0 pass-through |
| `dds_tb` | carrier and quadrature reference equal `round(8191 sin)` computed in floating point; 5 MHz (sign changes per 2500 clocks) |
| `lockin_demod_tb` | product and scaling, including extreme codes |
| `rp1_modem_tb` | error = A/2 for an in-phase detector signal of amplitude A, sign follows A, near 0 in quadrature, (A/2) cos(phi) over a 16-step sweep of the reference phase; 5 MHz carrier |
| `pid_controller_tb` | 3-clock latency, unit gain, 40 000 cycles against the model (published and random gains), windup into the clamp |
| `dob_tb` | **5-clock latency**, steady state `400*y/256 - u_out` at n = 9, 60 000 cycles against the model, enable, clipping |
| `rp2_pid_dob_tb` | 4- and 6-clock latencies, 40 000 cycles against PID model + observer model + junction with feedback |
| `mts_servo_top_tb` | closed loop at default parameters (below) |
| `servo_workloads_tb` | the published operating conditions and sweeps in closed loop (below) |

### Closed-loop tests

The two closed-loop testbenches connect both boards through a behavioural
plant:

* **Laser.** Detuning = 1.28 × RF OUT code, four clocks late, plus a disturbance.
* **Detector.** Detuning × carrier / 8191 goes to board 1's RF IN.
* **Link.** Board 1's error reaches board 2 two clocks later.

The lock-in halves the signal, so the plant gain seen by board 2 is 0.64. The
exact observer gain is then `Kn = 256/0.64 = 400`, which is the published
value.

`mts_servo_top_tb` runs four phases:

1. The published PID alone, against a constant plus 5 kHz disturbance.
2. The DOB engaged without re-tuning the PID.
3. An overload beyond the actuator range. It must clip the PID, the integrator,
   `d_hat` and the output.
4. Recovery.

Results: the rms error is 243 codes with PID alone and 31.5 with the DOB
(17.7 dB lower). The mean error is removed in both cases, and the loop relocks
after overload.

`servo_workloads_tb` uses a constant plus tones at 3, 11 and 23 kHz. It gives
these rms errors in codes:

| setting | rms error |
|---------|-----------|
| baseline, integrator only at Ki = -1 | 358 |
| PID (Kp = Ki = -200, Kd = -20) | 257 |
| high-gain PID (Kp = -400, Kd = -40) | 252 |
| PID + DOB, Kn = 400, n = 9 | 112 (7.2 dB below PID) |
| Kn = 1 / 100 / 200 / 400 / 600 at n = 9 | 431 / 259 / 181 / 112 / 80 |
| n = 8 / 9 / 10 / 11 at Kn = 400 | 62 / 112 / 172 / 219 |

The trends match the physics of the design: a wider Q-filter and a stronger
model term suppress more. The test plant is an ideal gain with a small delay.
It does not reproduce the servo bumps and instability limits of a real laser,
so these numbers say nothing about the noise levels of a real lock.

## Simulating

Any testbench builds with plain Verilator 5. List the packages first and let
`-y` find the modules:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb \
    rtl/servo_pkg.sv tb/servo_ref_pkg.sv tb/mts_servo_top_tb.sv \
    --top-module mts_servo_top_tb -o sim
./obj_dir/sim
```

Replace `mts_servo_top_tb` with any other testbench name. Every testbench runs
in a few seconds at most. The closed-loop ones run the design at its default
parameters.

To change the behaviour:

* gains and shift counts are run-time inputs (`rp1_cfg`, `rp2_cfg`);
* widths and scaling shifts are module parameters (`KP_SHIFT`, `KI_SHIFT`,
  `KD_SHIFT`, `KN_SHIFT`, `FRAC`, `LUT_AW`, ...).

A change of `KN_SHIFT` moves the unit-gain value of `Kn`.
