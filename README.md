# Polarization switch: FPGA datapaths and driver models

Quantum key distribution with polarization-encoded photons needs the
polarization leaving the transmitter to be both *stable* against the fibre
and *switchable* between states, as fast as the key rate demands. This unit
closes a loop around a lithium-niobate polarization controller (PCM): a
classical reference beam, aligned in polarization with the quantum channel,
passes through the same controller and is measured by a polarimeter. The
measured state is shown on an isometric drawing of the Poincaré sphere,
and new controller settings are turned into electrode voltages that a
±70 V driver applies. The speed limit of the whole switch is the driver:
a full −70 V → +70 V swing takes 8 µs, i.e. about 125 kHz.

This repository holds synthesizable SystemVerilog for the digital part (the
FPGA) and clocked behavioural models of the converters and high-voltage
drivers around it, each with a self-checking testbench.

```
                 pol_v[4]          adc_code[4]            pix[3] (x, y, depth)
  polarimeter ──► adc ×4 ──► ┌───────────── fpga_core ─────────────┐ ──► display
                             │ int_to_float → ad_to_volts →        │
                             │ calibration_matrix → stokes_normalize│
                             │ → isometric_matrix → sphere_radius →│
                             │ sphere_offset                       │
  tracking   set_alpha/delta │                                     │ dac_code[6]
  algorithm ───────────────► │ pcm_voltage (cordic_sincos ×3)      │ ──► dac ×6 ──► hv_driver ×6 ──► PCM electrodes
                             └─────────────────────────────────────┘                       electrode_v[6]
```

`polarization_switch` is the top. Everything left of the ADC, right of the
drivers, the display and the algorithm that picks the settings are outside
the RTL; their signals are ports.

## Number formats

* **Floating point (visualisation path).** IEEE-754 binary32 words
  (`fp32_t`), computed by the combinational functions in `polsw_pkg`:
  `fp_mul`, `fp_add`, `fp_recip`, `fp_from_int`, `fp_to_int`, and dot
  products built from them. They truncate instead of rounding, flush
  subnormals to zero and saturate to infinity; NaN is not handled. One ulp
  is 1.2e-7 relative, far finer than a pixel.
* **Fixed point (control path and analog signals).** `volt_t` is a signed
  32-bit number with 16 fraction bits (±32 768 V, 15 µV steps). Analog
  voltages between the models are carried in this format, so the models
  elaborate in synthesis front ends that have no `real` type.
* **Settings.** `alpha` (eigen-mode angle) is a 16-bit phase word,
  α = 2π·alpha/2¹⁶. `delta` is a 16-bit fraction, δ = delta/2¹⁶, and sets
  the phase delay θ = 2πδ.

## The visualisation pipeline

Seven one-clock stages with a `valid` bit and no back-pressure, so a new
sample can enter every clock. Lane counts follow the published block
diagram: four lanes up to normalisation, three after.

| stage | module | operation |
|---|---|---|
| Int to Float | `int_to_float` | signed ADC code → binary32 (exact to 24 bits) |
| AD to Volts | `ad_to_volts` | × volts per LSB (default 10 V / 2¹⁵) |
| Calibration matrix | `calibration_matrix` | S = M·V, M a 4×4 input port (row k gives S_k) |
| Normalize 1/S0 | `stokes_normalize` | one reciprocal 1/S0, then S1..S3 × 1/S0 |
| Isometric matrix | `isometric_matrix` | 3×3 rotation to isometric view |
| Correct sphere radius | `sphere_radius` | × (200, −200, 200) pixels |
| Offset sphere center | `sphere_offset` | + (320, 240, 0), truncate to 12-bit signed pixels |

The calibration matrix depends on the individual polarimeter and on the
wavelength, so it is an input, not a constant. If you characterise the
polarimeter as V = A·S, load M = A⁻¹. A sample with S0 ≤ 0 (no light)
cannot be normalised: it comes out as the zero vector with `pix_dark` set.

The isometric matrix is the orthonormal rotation that looks down the
(1, 1, 1) diagonal, with s3 (circular polarization) pointing up:

```
row 0 (screen x) = ( 1/√2, −1/√2,    0 )
row 1 (screen up)= (−1/√6, −1/√6, 2/√6 )
row 2 (depth)    = ( 1/√3,  1/√3, 1/√3 )
```

The third lane (depth toward the viewer) is kept so that a display can draw
the far half of the sphere differently. The radius flips the sign of the
vertical lane because screen rows count downward. With the defaults, right
circular polarization (s = (0, 0, 1)) lands at pixel
(320, trunc(240 − 163.3)) = (320, 76).

`fpga_core` starts a conversion of all four ADC channels every
`SAMPLE_DIV` = 100 clocks and feeds the results in. Pixel coordinates come
out 7 clocks after the ADC reports. Concurrent assertions in `fpga_core`
enforce two timing rules during simulation: 7 clocks from ADC result to
pixel, and 1 clock from setting to DAC load.

## Control path: from retarder setting to DAC code

Each PCM stage is a linear retarder with three electrodes. To give it
eigen-mode e = (cos α/2, sin α/2, 0) and phase delay 2πδ, the device's data
sheet sets

```
Va = 2·V0·δ·sin α − Vπ·δ·cos α + Va_bias
Vb = 0
Vc = 2·V0·δ·sin α − Vπ·δ·cos α + Vc_bias
```

V0, Vπ and the two biases differ from stage to stage and come from a
calibration, so they are input ports (`cal_v0`, `cal_vpi`, `cal_vab`,
`cal_vcb`). `pcm_voltage` computes these equations for the three stages in
one clock. sin and cos come from a 20-step CORDIC (`cordic_sincos`, Q1.15,
about 2 LSB error).

**Caution.** As implemented, A and C receive the same signal term and differ
only in their bias, which is how the equations were published for this
design. Check this against the data sheet of your controller before
relying on it. If your device needs a different sign on one term for
electrode C, change the `vc[s]` line in `pcm_voltage.sv`.

Electrode B is grounded, so there are two driven channels per stage, six in
all: channel 2s is A of stage s and channel 2s+1 is C. Each voltage becomes
the DAC code that makes the driver produce it. The driver computes
Vout = 14·(2·Vdac − 5 V) and the DAC gives Vdac = 5 V·code/2¹⁶. Together:

```
code = 2^15 + V · 2^15 / 70 V        (clamped to 0 … 65535)
```

`dac_clip` flags a channel whose requested voltage lies beyond ±70 V. Codes
reset to mid-scale (0 V). A `set_valid` pulse updates all six codes one
clock later, and `dac_load` makes all six DACs take them together.

## The ±70 V driver and the switching speed

Each driver (`hv_driver`, behavioural) models a two-amplifier circuit:

1. An ADA4610 with 10 kΩ input and feedback resistors and +5 V reference
   gives V1 = 2·Vdac − 5 V, which maps 0–5 V to −5 V…+5 V.
2. An LTC6090-5 in non-inverting gain 1 + 130 kΩ/10 kΩ = 14 on ±70 V rails
   gives Vout = 14·V1.

The model clamps the target to the rails. It then slews toward the target
by a fixed step each clock: 140 V per 8 µs, i.e. 17.5 V/µs, or 0.175 V per
10 ns clock. A full swing therefore takes 800 clocks. The real amplifier's
slew depends on its gain. A 5 V/V configuration with a 3 V/V pre-amplifier
was proposed to reach about 1 MHz, but its slew rate is not known, so it
is not modelled. The rounded approach to the final value, the input RC
filter (10 kΩ / 15 pF) and the trimmer in the gain network are also left
out.

Timing of one switch, from `set_valid` to the electrode:

| step | clocks | time at 100 MHz |
|---|---|---|
| `pcm_voltage` (equations, CORDIC, code) | 1 | 10 ns |
| DAC load | 1 | 10 ns |
| driver slew, full ±70 V | 800 | 8 µs |

So the digital part adds 20 ns to an 8 µs transition. The analog driver
alone sets the switching rate: about 125 kHz at 14 V/V.

## Converters (behavioural)

* `adc`: one channel. It samples `vin` on `start` and returns a signed
  16-bit code `trunc(v·2¹⁵/10 V)` (saturating) with `done`, 4 clocks later.
  The top instantiates four, started together.
* `dac`: one channel, unsigned 16-bit, 0…5 V, updated on `load`. The top
  instantiates six.

Resolutions, ranges and the conversion time are assumptions. They are
parameters.

## What is assumed rather than given

The published design gives the structure: the seven visualisation stages
and their lane counts, three controller stages with two drivers each, the
electrode equations, the driver circuit values, the ±70 V range, the 14 V/V
gain and the 8 µs / 125 kHz transition. Everything else here is a choice of
this RTL:

* clock 100 MHz;
* 1 MS/s sampling;
* 16-bit converters with ±10 V ADC and 0–5 V DAC ranges;
* binary32 with truncation;
* Q16.16 voltages;
* the isometric matrix, 200-pixel radius and 640×480 screen centre;
* the no-light flag;
* the CORDIC;
* the DAC code mapping and clipping;
* reset values.

Not built:

* the polarimeter, the PCM, the optics that align the quantum and
  classical channels, the power supply;
* the display controller (only pixel coordinates are produced);
* the polarization-tracking algorithm that chooses α and δ. It comes from
  separate work and is not specified here; its outputs are the
  `set_valid`/`set_alpha`/`set_delta` ports.

## Files

* `rtl/polsw_pkg.sv`: types (`fp32_t`, `vec4_t`, `vec3_t`, `mat4_t`,
  `mat3_t`, `volt_t`) and the float functions.
* `rtl/int_to_float.sv` … `rtl/sphere_offset.sv`: visualisation stages.
* `rtl/pcm_voltage.sv`, `rtl/cordic_sincos.sv`: control path.
* `rtl/fpga_core.sv`: the two datapaths and the sampling schedule.
* `rtl/adc.sv`, `rtl/dac.sv`, `rtl/hv_driver.sv`: behavioural models
  (clocked, integer arithmetic; not meant for synthesis into the FPGA).
* `rtl/polarization_switch.sv`: top.
* `tb/<module>_tb.sv`: one self-checking testbench per module.
* `tb/polarization_switch_workload_tb.sv`: the switching workloads.
  `tb/tb_fp_pkg.sv` holds reference conversions between `real` and binary32.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself,
with a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/polsw_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/polarization_switch_tb.sv \
    --top-module polarization_switch_tb -Mdir obj
./obj/Vpolarization_switch_tb
```

Replace the testbench name for any other block. `polarization_switch_tb`
runs the top at its default parameters in well under a second. It:

* shows 33 polarization states, including no light;
* switches the controller 14 times while the display keeps updating;
* forces voltages past the rails;
* times a full ±70 V swing (it prints the clock count and the resulting
  rate).

`polarization_switch_workload_tb` runs the two switching workloads on the
whole unit at default parameters (about 1.1 million clocks, a few seconds):

* a ±70 V square wave with 10 µs per level, for five periods, where every
  transition must complete in 8 µs;
* ten random settings held for 1 ms each, where every channel must settle
  within |step| / 17.5 V/µs and hold the voltage of the equations.

The testbenches compare against values computed independently in double
precision (`$sin`, `$cos`, `$sqrt`, plain `real` arithmetic). Tolerances are
one pixel for coordinates, 0.02–0.05 V for electrode voltages and a few
ulp for float stages.
