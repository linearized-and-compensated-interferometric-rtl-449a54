# Fringe processing for a two-axis homodyne length calibrator

A metre-scale length calibrator measures the travel of a stage with two
parallel single-pass He-Ne interferometers. Each interferometer delivers a
pair of quadrature signals, ideally `cos(2*pi*phi)` and `sin(2*pi*phi)`,
where `phi` counts interference fringes; one fringe is half a wavelength of
stage travel (about 316 nm). To calibrate a 3.3 m object within a minute the
stage must move at 0.1-0.2 m/s, which means fringe frequencies of several
hundred kilohertz, and the count must never slip by a single fringe over
more than ten million fringes.

This RTL is the FPGA part of that instrument. For each axis it takes 16-bit
ADC samples at 80 Msps and produces a fringe count `N` plus a fraction `phi`
at 100 ksps, after correcting the periodic non-linearity of the optics and
flagging every moment at which the count can no longer be trusted. A
processor next to it (in the original system the ARM side of a Zynq-7020)
converts counts to nanometres with an air-refractive-index correction, fits
the non-linearity model and talks to the operator; those parts are software
and are not in this RTL.

## Signal path

```
            80 Msps                 5 Msps (1:16)
ADC x,y ──► fringe_decimator ──► lin_tran ──► phase_cordic ──► error_detect ──► fringe_counter ──► 100 ksps record
 16 bit      block mean,          aX + b       atan2, |.|       amplitude,       N + phi
             1:2 .. 1:16                                         velocity
                                     ▲                                                  │
                                     │            reg_bank (processor bus)              │
                                     └──── coefficients, ratio, thresholds ◄──── records, errors
```

`axis_chain` holds one such chain; `ifm_signal_top` instantiates two of them
(one per interferometer) and one `reg_bank`. All shared types and widths are
in `ifm_pkg`.

| quantity | value | origin |
|---|---|---|
| ADC | 16 bit, 80 Msps, two channels per axis | source design |
| axes | 2 | source design |
| decimation | 1:16 (5 Msps) by default, 1:2 .. 1:16 selectable | source design (ratio), own (boxcar filter) |
| corrected sample | 18 bit signed | own |
| coefficients | 18 bit signed, Q3.14 | own |
| phase word | 18 bit, 2^18 codes per fringe (1.21 pm per code) | own, chosen finer than the 1.96 pm limit of 16-bit conversion |
| fringe count | 32 bit signed (3.5 m is 11.1 M fringes) | own |
| output rate | 100 ksps, every 800 clocks | source design |

## Correcting the ellipse: `lin_tran`

Real quadrature signals have offsets, unequal gains and a phase error
`beta` between them:

```
X = Kx*cos(p) + x0          Y = Ky*sin(p + beta) + y0
```

The pair `(X,Y)` then traces an ellipse, and `atan2(Y,X)` deviates from the
true phase periodically, once or twice per fringe. Because that ellipse is an
affine image of a circle, an affine map brings it back:

```
x' = a11*X + a12*Y + bx           a11 = R/Kx            a12 = 0
y' = a21*X + a22*Y + by           a21 = -R*tan(beta)/Kx a22 = R/(Ky*cos(beta))
                                  [bx;by] = -A*[x0;y0]
```

`R` is the wanted radius of the corrected circle in output LSBs (the
testbenches use 20000, leaving room for the CORDIC gain). With these
coefficients `x' = R*cos(p)` and `y' = R*sin(p)` exactly. The hardware does
not know about ellipses: it applies whatever 2x2 matrix and offset the
processor writes, so any fit that ends in an affine correction can be used.
The coefficients are Q3.14 (range about +-4), the output saturates at 18
bits, and the unit has two pipeline stages. Over the distortion ranges of
the source's own Monte Carlo study (`Kx, Ky` in 0.75..1.25, offsets up to
+-0.5 of the nominal amplitude, `beta` up to 30 degrees) the largest
coefficient is about 1.54 times the output/input scale, well inside range.

The fit itself (a least-squares ellipse fit over the decimated `(X,Y)`
pairs) runs on the processor. Every 100 ksps record carries the latest
decimated raw pair and amplitude so that the processor can collect points
for it.

## Phase and amplitude: `phase_cordic`

An 18-stage pipelined CORDIC in vectoring mode. A pre-rotation by half a turn
moves `x` into the right half plane; each stage `i` then rotates by
`+-atan(2^-i)` towards `y = 0` and adds the angle to an accumulator kept at
2^24 codes per turn. The data path carries 8 fractional guard bits, so the
error stays within about one code of the 18-bit output. The magnitude output
is `1.64676 * sqrt(x'^2 + y'^2)` (the CORDIC gain is not removed; thresholds
are set in the same units). Latency is ITER+2 = 20 clocks, throughput one
sample per clock, which is needed at 1:2 decimation (40 Msps).

## Counting without slips: `error_detect` and `fringe_counter`

The counter sees only the phase modulo one fringe. Between two samples it
takes the difference as a signed number, i.e. the shorter way round the
circle, and adds it to a register holding `N*2^18 + phi`. That is exact as
long as the phase moves less than half a fringe per decimated sample, so the
fringe frequency must stay below half the decimated sample rate:

| ratio | sample rate | hard limit (0.5 fringe/sample) | default alarm (0.25 fringe/sample) |
|---|---|---|---|
| 1:16 | 5 Msps | 2.5 MHz | 1.25 MHz |
| 1:2 | 40 Msps | 20 MHz | 10 MHz |

At 0.19 m/s a single-pass interferometer produces about 600 kHz, 0.12
fringe per sample at 1:16. In practice non-linearity and noise eat into the
margin, which is why the correction sits in front of the phase detector and
why the ratio can be lowered.

`error_detect` checks every phase sample before it reaches the counter:

* **velocity**: the shortest-way step exceeds `vel_max` (default a quarter
  fringe). Beyond half a fringe the direction is ambiguous and fringes are
  lost; the alarm fires before that.
* **amplitude**: the magnitude falls below `amp_min` (default 4096), e.g. a
  blocked beam; the phase of a vanished signal is meaningless.

Each sample carries its own flags; the record carries the OR of all flags
since the previous record; sticky flags per axis stay set until the
processor clears them, and are also available as output pins. An error does
not stop counting: the count continues and the processor decides whether the
measurement is void.

The counter restarts at `N = 0` on a clear command, keeping the fraction of
the first phase sample after it. Records leave every 800 clocks (100 ksps)
whatever the decimation ratio.

## Processor interface: `reg_bank`

A plain word bus: `bus_wr` with `bus_addr`/`bus_wdata` writes in one clock,
`bus_rd` returns `bus_rdata` one clock later. Word addresses, with
`AX = 16 + 16*axis`:

| address | access | content |
|---|---|---|
| 0x00 | R/W | `[2:0]` log2 decimation ratio (reset 4); write bit 8: clear sticky errors, bit 9: restart counts |
| 0x01 | R | bit 0 record ready, bit 1 overrun (both cleared by this read), `[31:16]` record sequence number |
| AX+0..3 | R/W | a11, a12, a21, a22 (Q3.14, sign-extended) |
| AX+4..5 | R/W | bx, by |
| AX+6 | R/W | amp_min (reset 4096) |
| AX+7 | R/W | vel_max (reset 0x10000, a quarter fringe) |
| AX+8 | R | N of the last record |
| AX+9 | R | `[17:0]` phi, `[19:18]` record errors {amp,vel}, `[21:20]` sticky errors |
| AX+10 | R | raw decimated x `[31:16]` and y `[15:0]` |
| AX+11 | R | amplitude |

`irq` equals the ready bit. A record stays readable for 10 us; the sequence
number lets the processor detect a record replaced while it was reading. The
position in nanometres is `(N + phi/2^18) * lambda_air / 2`, with
`lambda_air` from the vacuum wavelength and the refractive index of air
computed from temperature, pressure and humidity; that step belongs to
the processor.

## What follows the source and what does not

From the source design: the chain of stages and their order, two axes, 16-bit
80 Msps input, 1:16 decimation to 5 Msps with 1:2 as the lowest ratio, the
`aX + b` correction with coefficients from a processor-side ellipse fit,
`atan2` phase detection, amplitude and velocity error detection ahead of the
counter, `N + phi` counting and the 100 ksps output.

This implementation's own choices: the boxcar decimation filter, every
internal width and number format, the CORDIC method, the threshold registers
and their defaults, sticky flags, the restart command, the bus protocol and
register map (standing in for the SoC's own interconnect), and carrying the
raw pair in the records. The source states that overflows and dropouts are
detected "from the unwrapped data ... before the phase unwrapping"; here the
checks run on the wrapped phase just before the counter, where its block
diagram places them.

Not in the RTL: the interferometers, filters, variable-gain amplifiers and
ADCs (their samples are the top's inputs), and the processor software
(ellipse fit, unit conversion with refractive-index correction, CANopen and
socket communication, display).

## Simulation

Every module except the wrapper `axis_chain` (covered by the top-level
tests) has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/ifm_pkg.sv \
    rtl/fringe_decimator.sv rtl/lin_tran.sv rtl/phase_cordic.sv \
    rtl/error_detect.sv rtl/fringe_counter.sv rtl/reg_bank.sv \
    rtl/axis_chain.sv rtl/ifm_signal_top.sv tb/tb_ifm_signal_top.sv \
    --top-module tb_ifm_signal_top
./obj_dir/Vtb_ifm_signal_top
```

| testbench | what it establishes |
|---|---|
| `tb_fringe_decimator` | exact block means at 1:16 and 1:2, clamping, ratio change at a block boundary, one output per 16 clocks |
| `tb_lin_tran` | bit-exact affine map with saturation, 2-clock latency; a distorted ellipse is mapped onto a circle within 0.03 % |
| `tb_phase_cordic` | phase within 4 codes of 2^18 and magnitude within 0.05 % of real-arithmetic `atan2`/`sqrt`, all quadrants, latency |
| `tb_error_detect` | both alarms at and around their thresholds, wrap-around, sticky/clear |
| `tb_fringe_counter` | exact unwrapping over +-45 fringes of random motion, records every 800 clocks with the right errors, restart |
| `tb_reg_bank` | reset values, every register, clear pulses, ready/overrun/sequence handshake |
| `tb_ifm_signal_top` | whole design at default parameters: two axes with distortions drawn from the source's Monte Carlo ranges, 600 kHz and 100 kHz motion counted within 0.01 fringe after stopping, record rate, velocity alarm at 1.5 MHz, amplitude dropout, clears, and 3 MHz counted correctly after switching to 1:2 |

Two further testbenches repeat the source's own evaluations:

| testbench | what it establishes |
|---|---|
| `tb_bandwidth_sweep` | the fringe-counting sweep at 10, 30, 100, 300, 600 and 800 kHz and 1.2 MHz, default parameters, distorted signals: 100 % of the fringes counted at every point, no velocity alarm. The measured system lost fringes above 600 kHz, blamed on uncorrected analog offsets, which the digital model does not have |
| `tb_linearity_mc` | 300 random distortions from the Monte Carlo ranges, 32+-7 points each, through `lin_tran` and `phase_cordic`: the fixed-point result agrees with real-arithmetic correction within 0.01 degree (about 0.005 degree seen). The remaining error against the true phase is set by the +-0.005 noise: 0.19 / 0.33 / 0.45 degree at the 68.27 / 95.45 / 99.73 % points in one run |

The end-to-end tests stand in for the processor by computing the correction
coefficients from the distortion they generated, rather than fitting them.

## Changing it

* `ifm_pkg` holds the widths; `PHASE_W`, `COEF_FR` and `COUNT_W` can be
  changed there (the CORDIC angle table has 20 entries, so `ITER` <= 20).
* `ifm_signal_top` parameters: `NUM_AXES` (the register map has room for
  14), `OUT_DIV` (clocks per record), `CORDIC_ITER`.
* `fringe_decimator` `MAX_L2` sets the largest ratio; the smallest is
  `MIN_DEC_L2` in the package.
