# Phase-averaging PRL tracking loop for an LLRF chassis

An RF cavity controller measures every cavity phase against a phase
reference. In a linac hundreds of metres long, the reference reaches each
controller rack through a long coaxial *phase reference line* (PRL). The
electrical length of that cable changes with temperature, so on its own it
would drag every measured cavity phase along with it.

The line is therefore run in both directions. A VCO at the far end drives a
wave towards the master oscillator (MO), and the MO rack reflects it back
actively. A phase-lock circuit there pins the *average* of the two waves to
the MO phase. At any tap point the forward wave is late by the cable delay
from the tap to the MO, and the reverse wave is early by the same amount. If
the cable stretches, the two move by equal amounts in opposite directions,
and their average stays put.

This repository holds the digital half of that scheme. It is the FPGA
firmware in each LLRF chassis that turns the two tapped waves into a
drift-free reference:

* The forward and reverse taps are digitized and mixed to complex baseband
  by a digital LO (local oscillator).
* Each is multiplied by a complex gain written by software, and the two
  products are summed. For small errors, the imaginary part of the sum is
  proportional to the average phase.
* That error is integrated, and the integrator output is added to the phase
  of the digital LO.

The loop settles when the average phase of the two PRL signals is zero
relative to the LO. The same LO downconverts the cavity pickup signals, so
each cavity phase is measured against the cable-independent average, not
against a single direction of the cable.

## Signal flow

```
            +-------------+   interleaved I/Q, one pair / DECIM clocks
adc_fwd --->| ddc_channel |---------------------+
            +-------------+                     v
            +-------------+              +---------------+
adc_rev --->| ddc_channel |------------->| prl_phase_avg |--> track_phase
            +-------------+              +---------------+        |
            +-------------+                     ^ gains, enable   |
adc_cav[k]->| ddc_channel |--> cav_* out   +----------+           |
            +-------------+                | prl_regs |<-- software bus
                 ^ cos/sin                 +----------+           |
            +---------+                                           |
            | lo_nco  |<------------------------------------------+
            +---------+   LO phase = accumulator + track_phase
```

`prl_top` is the whole chassis firmware. Everything analog sits in front
of its ADC inputs: the PRL cable, couplers and splitters, the MO-rack PLL
and reflector, the VCO, the RF downconverters and the ADCs.

## The averaging arithmetic

Let the forward baseband sample be `x_f = a_f e^{j(θ_f − φ)}`, and the
reverse one `x_r = a_r e^{j(θ_r − φ)}`. Here φ is the tracking phase added
to the LO. Software writes two complex gains:

```
g_f = G_f e^{−jδ}      g_r = G_r e^{+jδ}
```

δ is the *actual* forward/reverse offset, half the phase difference
between the two directions at this tap. It is subtracted from the forward
signal and added to the reverse one, which brings the two into phase.
Then:

```
Im(g_f x_f + g_r x_r) = G_f a_f sin(θ_f − δ − φ) + G_r a_r sin(θ_r + δ − φ)
```

With `G_f a_f = G_r a_r` this is zero when `φ = (θ_f + θ_r)/2`, which is
the average phase. Cable stretch adds `+d` to θ_f and `−d` to θ_r, so φ
does not move. Drift of the LO distribution shifts θ_f, θ_r and every
cavity phase together, and φ follows it. Either way, the measured cavity
phases (cavity minus φ) stay constant.

The offset δ is known only modulo 180°, because `(θ_f − θ_r)/2` is
ambiguous by π. Either choice locks, but the loop then settles on φ or on
φ + 180°. Software therefore keeps a *nominal* offset and always takes the
candidate nearest to it. This makes the reference come up the same way on
every reboot.

In a rack with a single input (the unidirectional L3 segment of LCLS-II),
software writes zero to both reverse gain registers and uses δ = 0. The
loop then locks the forward signal to zero phase. The firmware is the same.

When averaging is disabled, the integrator is held at zero. The reference
phase is then zero, and the LO itself serves as the phase reference.

### Two multipliers, two adders, four clocks

`prl_phase_avg` gets by with one multiplier per input pair and two adders.
The trick is that the baseband samples arrive interleaved: I on one clock,
Q on the next. The imaginary part needed is:

```
Im(g x) = g_im·x_I + g_re·x_Q
```

Each multiplier is therefore fed `g_im` with the I word and `g_re` with the
Q word. The first adder sums the forward and reverse products. The second
adder is the integrator, and it takes in the two halves on successive
clocks. The pipeline is:

| clock | work                                                   |
|-------|--------------------------------------------------------|
| 1     | register x_f, x_r and the matching gain parts           |
| 2     | p_f = x_f·g_f, p_r = x_r·g_r (18×18 bits)               |
| 3     | s = p_f + p_r                                           |
| 4     | acc += s·2^−SUM_SHIFT; phase = acc[top 18 bits]         |

A sample presented on clock 0 is therefore reflected in `phase_o` four
clocks later. The integrator carries GUARD = 8 bits below the 18-bit phase
output, so that small corrections are not lost to rounding. It wraps modulo
one turn, as a phase should.

### Choosing the gains for a bandwidth

Each I/Q pair changes the phase by `K·e` radians, where e is the phase
error. With a 2^26-per-turn integrator and SUM_SHIFT = 10:

```
K = 2π (G_f a_f + G_r a_r) / 2^36
```

The closed-loop bandwidth is `BW ≈ K f_pair / 2π`. So software sets:

```
G_f a_f = G_r a_r = (BW / f_pair) · 2^36 / 2
```

Here a is the baseband magnitude that software reads with averaging off,
and f_pair = f_ADC / DECIM. Some numbers, with f_ADC = 1320/14 MHz and
DECIM = 33, so f_pair = 2.857 MHz, and a PRL signal at −10 dBFS
(a ≈ 41 840):

* At 10 kHz, G ≈ 2 870 per direction.
* At 300 kHz, G ≈ 86 100 per direction.

Both fit the 18-bit signed gain registers. The loop is type 1: it follows
phase steps with no residual error, but a steady phase ramp leaves a lag of
(ramp per pair)/K. Cable and LO drifts are slow enough (hours) for the lag
to be negligible.

## Digital LO and downconversion

The IF is 20 MHz: the LO is 1320 MHz and the PRL is 1300 MHz. The ADC clock
is 1320/14 MHz, so the IF is exactly 7/33 of the sample rate.

`lo_nco` keeps a 32-bit phase accumulator. Its step register resets to
`round(2^32·7/33)`. The tracking phase is added to the top 18 bits, and a
pipelined CORDIC (`cordic_sincos`, 18 stages, error ≤ 2 LSB) makes cos
and sin. The latency from accumulator to cos/sin is ITER + 2 = 20 clocks.

`ddc_channel` delays its ADC samples by the same 20 clocks, multiplies them
by (cos, −sin), and sums DECIM products. With DECIM a multiple of 33, that
boxcar covers whole turns of the image at twice the IF and cancels it
exactly, up to the 32-bit rounding of the step. The sum is scaled by 2^−19
and saturated to 18 bits.

An ADC tone of amplitude A gives a baseband magnitude of 0.98·(33/8)·A.
A −10 dBFS tone therefore gives about 41 840 of the 131 071 full scale,
while a full-scale tone just reaches saturation. A channel emits I and
then Q on consecutive clocks, once every DECIM clocks. All channels share the LO and the reset, so their streams
are aligned. `prl_top` asserts this for the two PRL streams.

## Register map (`prl_regs`)

Word addresses on a simple synchronous port: write on `we`, combinational
read.

| addr | name        | access | contents                            | reset |
|------|-------------|--------|-------------------------------------|-------|
| 0    | CTRL        | rw     | bit 0: phase averaging enable       | 0     |
| 1    | GAIN_F_RE   | rw     | forward gain, real (18-bit signed)  | 0     |
| 2    | GAIN_F_IM   | rw     | forward gain, imaginary             | 0     |
| 3    | GAIN_R_RE   | rw     | reverse gain, real                  | 0     |
| 4    | GAIN_R_IM   | rw     | reverse gain, imaginary             | 0     |
| 5    | LO_STEP     | rw     | LO phase step, 2^−32 turn / sample  | 7/33 turn |
| 6    | PHASE       | ro     | tracking phase, 2^−18 turn          | –     |

Gain reads return the value sign-extended. A start-up sequence is:

1. Leave CTRL at 0.
2. Read the forward and reverse baseband phases and magnitudes.
3. Choose δ next to the nominal offset.
4. Write the four gains.
5. Set CTRL = 1.

## Files

| file | contents |
|------|----------|
| `rtl/prl_pkg.sv` | widths, types (`cgain_t`), register addresses, default LO step |
| `rtl/cordic_sincos.sv` | pipelined CORDIC cos/sin |
| `rtl/lo_nco.sv` | digital LO with tracking-phase input |
| `rtl/ddc_channel.sv` | mixer + boxcar decimator, interleaved I/Q out |
| `rtl/prl_phase_avg.sv` | the phase-averaging tracking loop |
| `rtl/prl_regs.sv` | software registers |
| `rtl/prl_top.sv` | chassis firmware: 1 LO, 2 + N_CAV downconverters, loop, registers |
| `tb/tb_*.sv` | one self-checking testbench per module |

Top-level parameters: N_CAV = 4 cavity channels, DECIM = 33, SHIFT = 19,
ITER = 18, GUARD = 8, SUM_SHIFT = 10.

## Verification

Every testbench checks against an independent model and ends by printing
`TB_RESULT checks=N failures=M`. Each one also has a watchdog. To run one
with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/prl_pkg.sv \
          tb/tb_prl_top.sv --top-module tb_prl_top -o sim && obj_dir/sim
```

Replace `tb_prl_top` with any other testbench name.

* **`tb_cordic_sincos`**: random and corner phases, against `$cos`/`$sin`.
  Checks a tolerance of 2.5 LSB and the ITER + 1 latency.
* **`tb_lo_nco`**: several steps and a tracking phase that jumps. Compares
  against an independent phase model, and checks that `lo_valid` rises on
  the right clock.
* **`tb_ddc_channel`**: IF tones of random amplitude and phase. An exact
  integer model checks every I/Q word. The testbench also checks I-then-Q
  order, one pair per DECIM clocks, the recovered phase (which shows the
  image is cancelled) and saturation.
* **`tb_prl_phase_avg`**: in open loop, random data and gains, with the
  integrator compared bit-exactly every clock at the 4-clock latency,
  including enable clearing. In closed loop, the testbench plays the
  baseband PRL. It checks lock to the average phase, immunity to
  differential drift, following a common phase step, single-input mode
  and disable.
* **`tb_prl_top`**: the whole chassis at its default sizes, from IF tones
  to cavity phases. Its simple gain-setup routine follows the procedure
  above. It checks lock at 10 kHz, and cavity phases held within 0.004 rad
  through 0.8 rad of cable stretch and 0.2 rad of LO drift. It also checks
  disable (reference 0, cavities follow the LO), both offset choices, lock
  and tracking at 300 kHz, single-input mode and register read-back. Each
  mechanism is counted, and one that never occurs is a failure. It runs in
  about a second.
* **`tb_prl_workloads`**: two chassis with the longer decimations 528
  and 8448 (16 and 256 times 33; SHIFT raised by 4 and 8 bits). Each is
  set up for a bandwidth that suits its pair rate, 10 kHz and 100 Hz, and
  is checked for lock and for cavity phase held through cable stretch.
  It runs in a few seconds.
* **`tb_prl_monitor`**: a monitor chassis next to the MO that sees two
  reference lines. One line is tracked on the PRL inputs, and the other is
  read through two cavity channels. Each line's cable stretches on its own
  and the LO drifts. The difference between the two lines' averages must
  stay constant, which is the out-of-loop consistency check between
  segments.

## What follows the source and what is this design's own

These parts follow the published description:

* forward and reverse digitized separately and downconverted by a digital
  LO shared with the cavity channels;
* four PRL gain registers, that is two complex gains;
* products summed and integrated, with the integral moving the LO phase;
* two multipliers and two adders in a four-clock pipeline;
* software enable, with the reference phase zero when disabled;
* guard bits in the integrator;
* single-input use with the reverse gains at zero;
* the 300 kHz maximum and 10 kHz tested bandwidths;
* the 20 MHz IF.

The decimation 33 is taken from the "CIC: 33" setting of the published
loop noise spectra.

These are this design's own choices:

* every width: 16-bit ADC, 18-bit data, gains and phase, 32-bit LO
  accumulator, 8 guard bits;
* the interleaved I/Q format, and forming the imaginary part as the error
  signal;
* the CORDIC LO and the boxcar downconverter;
* the scaling shifts;
* the number of cavity channels;
* the register bus, its addresses and reset values;
* the ADC rate of 1320/14 MHz.

The published system's downconverter and filters are not described, and
they are surely more elaborate than a single boxcar.

The gain-calculation software runs on a host and is not part of the RTL.
Only a simple version of it lives in `tb_prl_top`.
