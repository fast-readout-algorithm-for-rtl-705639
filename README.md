# Analytic beam-position readout for cylindrical four-electrode monitors

A beam position monitor (BPM) with four small pickup electrodes on the wall
of a round beam pipe sees a wall current that depends non-linearly on where
the beam passes. The usual readout takes each plane on its own, forms the
difference-over-sum ratio of the two opposite electrodes, and corrects it
with a polynomial. That works near the axis and fails for beams far from it.

This RTL implements an alternative described by P. Thieberger et al. in
"Fast readout algorithm for cylindrical beam position monitors providing good
accuracy for particle bunches with large offsets". For a relativistic pencil
beam in a cylinder of radius `a`, the two ratios

    Q_x = (A_x - B_x)/(A_x + B_x)        Q_y = (A_y - B_y)/(A_y + B_y)

are the components of a vector that points from the axis towards the beam.
Its length depends only on the normalised radius rho = r/a:

    Q = sqrt(Q_x^2 + Q_y^2) = 2 rho / (rho^2 + 1)

This inverts in closed form, so the position follows without any fitting:

    rho = 1/Q - sqrt(1/Q^2 - 1)          X = a rho Q_x/Q      Y = a rho Q_y/Q

Real electrodes have finite size. The published work compensates for that
with two calibration constants:

* a factor `b` that pulls in positions away from both axes:
  `Q'_x = Q_x + b Q_x |Q_y|` and `Q'_y = Q_y + b |Q_x| Q_y`;
* a small change `eps` of the radius, `a -> a(1 + eps)`.

The RTL is a pipeline of IEEE-754 single-precision operators. It takes the
four electrode amplitudes and returns X and Y 84 clocks later. It accepts a
new bunch every 14 clocks, which is 70 ns at 200 MHz.

## Data flow

```
 A_x,B_x --> bpm_ratio --Q_x--+                +---------------- bpm_pos_core ------------------+
                              +--> bpm_refine -+--> Q'^2 -> 1/Q'^2, Q' -> ... -> rho, aQ'_x/Q' -> X,Y
 A_y,B_y --> bpm_ratio --Q_y--+   (b)                                                  (a(1+eps))
           20 clocks              12 clocks                  52 clocks
```

`bpm_pos_top` wraps these three stages. In front of them it puts the input
handshake, which limits the sample rate.

## The position chain (`bpm_pos_core`)

The chain has seven columns of operators. The clock counts are those of the
original FPGA implementation: 3 for a multiply, 6 for an add or subtract, and
14 for a divide, reciprocal or square root.

| col | clocks | starts at | operations |
|-----|--------|-----------|------------|
| 1 | 3  | 0  | `Q_x*Q_x`, `Q_y*Q_y` |
| 2 | 6  | 3  | `Q^2 = Q_x^2 + Q_y^2` |
| 3 | 14 | 9  | `1/Q^2` (divide 1.0 by Q^2), `Q = sqrt(Q^2)` |
| 4 | 6  | 23 | `1/Q^2 - 1` |
| 5 | 14 | 29 | `sqrt(1/Q^2 - 1)`, `1/Q`, `Q_x/Q`, `Q_y/Q` |
| 6 | 6  | 43 | `rho = 1/Q - sqrt(1/Q^2 - 1)`; `a*Q_x/Q`, `a*Q_y/Q` (3 clocks, then 3 clocks of delay) |
| 7 | 3  | 49 | `X = rho * (a Q_x/Q)`, `Y = rho * (a Q_y/Q)` |

The results appear at clock 52. Operands that skip columns travel in
`delay_line` register chains: Q_x and Q_y wait 29 clocks for column 5, and Q
waits 6. Assertions check that the two or four results of a column always
arrive in the same clock.

### Near the axis: the paraxial switch

This is the least obvious part of the datapath. For a beam close to the axis,
Q is small. Then `1/Q - sqrt(1/Q^2 - 1)` subtracts two nearly equal large
numbers. In single precision the relative error of rho grows as about
2^-22/Q^2, and for Q = 0 the chain computes `inf - inf`, which is NaN.

The closed form also has a first-order limit, rho = Q/2, which gives X = a Q_x/2
and Y = a Q_y/2. Its relative error is about Q^2/4. The two error curves cross
near Q = 1/32.

So the core tests `Q^2 < 2^PARAXIAL_Q2_LOG2` (default -10) as soon as Q^2
exists, at clock 9. It carries the decision to column 7 in a delay line.
There it changes the operands of the two final multipliers to `(a/2, Q_x)` and
`(a/2, Q_y)`. No extra operator and no extra latency are needed. `a/2` is
formed by decrementing the exponent. The `paraxial` output flag goes out with
every result that used this form.

The published work gives the paraxial formula, but the switch point is this
design's own choice. At the 2^-10 threshold either form is off by about
4e-6 of the radius (relative error about 2.4e-4 of rho = 1/64).

### Beam outside the pipe

A ratio vector with Q > 1 has no physical position: the electrode signals are
then inconsistent, for example after a dead channel or a scraping beam.
`1/Q^2 - 1` is negative, the square root returns NaN, and X and Y come out as
NaN. Q = 1 exactly gives rho = 1, the wall.

## Rate and handshake

Two operator types set the rate:

* Divide and square root are iterative. Each takes 14 clocks and accepts a new
  operand only when the previous one is done.
* Multiply and add are fully pipelined.

Every iterative unit in the chain is used once per bunch, so the whole
pipeline can take one bunch every 14 clocks. `bpm_pos_top` enforces this with
a valid/ready input:

* `in_ready` drops for 13 clocks after each accepted sample.
* The sender holds `in_valid` and the amplitudes until `in_ready` is high.

Behind the input the pipeline never stalls. There is no output backpressure:
each result is a one-clock `out_valid` pulse. The iterative units assert that
they are never offered an operand while busy.

The calibration inputs are read at different times:

* `cfg_b` is read when the ratios enter the correction, 20 clocks after
  acceptance.
* `cfg_a_eff` is read in columns 6 and 7.

Change either of them only while no sample is in flight.

| quantity | this RTL | original FPGA build |
|---|---|---|
| clocks per sample | 14 | 14 (70 ns at 200 MHz) |
| correction + position chain | 12 + 52 = 64 clocks | 64 clocks (320 ns) |
| ratio stage | 20 clocks | 38 clocks |
| total latency | 84 clocks (420 ns at 200 MHz) | 102 clocks (510 ns) |

In the original system the ratios came from existing single-plane readout
blocks. Those blocks include signal processing before the ratio that is not
described, and that processing is not reproduced here. `bpm_ratio` computes
only the ratio: sum and difference in parallel (6 clocks), then a divide (14
clocks).

## The correction stage (`bpm_refine`)

For each plane the correction is computed as `Q + (b*Q) * |P|`, where P is the
other plane's ratio. It uses a multiply (3 clocks), a second multiply (3
clocks) and an add (6 clocks), 12 clocks in all. The original states only
that the refinement takes 12 clocks, and this order is the simplest that fits.
With `b = 0` the ratios pass through unchanged, bit for bit.

The published calibrations are listed below. Pass `a(1+eps)` in the unit in
which X and Y should come out.

| monitor | eps | b |
|---|---|---|
| 60 mm button BPM, 10 mm buttons | 0.0234 | -0.0144 |
| 100 mm stripline BPM, 30 deg strips (fit to 60% of radius) | 0.0225 | -0.0394 |
| 60 mm BPM, beta = 1 / 0.9 / 0.7 / 0.5 | 0.022 / -0.0013 / -0.035 / -0.057 | -0.0125 / -0.033 / -0.062 / -0.084 |
| 34.925 mm stripline BPM | 0 | -0.08 (best of -0.06, -0.08, -0.10) |

## Floating-point operators

All arithmetic is IEEE-754 binary32. The original used vendor floating-point
cores; `fp_mul`, `fp_addsub`, `fp_div` and `fp_sqrt` are self-contained
replacements with the same latencies.

* **Rounding:** round to nearest, ties to even.
* **Subnormals:** flushed to zero. Subnormal inputs read as zero, and results
  below 2^-126 become a signed zero.
* **Special values:** inf and NaN follow IEEE rules. Every NaN produced is
  `0x7FC00000`.
* `fp_mul` and `fp_addsub` compute their result in one combinational step
  followed by `LATENCY` registers. A synthesis tool with retiming spreads the
  logic over those registers. How the original cores divide the work among
  their clocks is not known.
* `fp_div` and `fp_sqrt` are restoring radix-2 units that produce two result
  bits per clock. They give 26 bits in 13 clocks: 24 significand bits plus a
  guard bit and one extra. The remainder supplies the sticky bit, and rounding
  takes the 14th clock.
* A reciprocal is `fp_div` with the dividend tied to 1.0.

The shared helpers are in `fp_pkg`: the round-and-pack function, the operator
latencies and the sample spacing `SAMPLE_II`.

## Top-level interface (`bpm_pos_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the control state |
| `in_valid` / `in_ready` | in / out | 1 | sample handshake, at most one sample per 14 clocks |
| `amp_ax`, `amp_bx` | in | 32 | amplitudes of the +X and -X electrodes (binary32) |
| `amp_ay`, `amp_by` | in | 32 | amplitudes of the +Y and -Y electrodes (binary32) |
| `cfg_b` | in | 32 | correction coefficient b (0 = off) |
| `cfg_a_eff` | in | 32 | effective radius a(1+eps), in the output length unit |
| `out_valid` | out | 1 | one-clock pulse, 84 clocks after acceptance |
| `x_pos`, `y_pos` | out | 32 | beam position (binary32) |
| `paraxial` | out | 1 | the result used the near-axis form |

Only the ratios of the amplitudes matter. Their overall scale, for example the
bunch charge, cancels.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself after a
fixed number of clocks.

The reference arithmetic is in `tb/tb_fp_pkg.sv`. Every binary32 operation is
evaluated in binary64 and rounded to binary32 once. Binary64 has more than
2*24+2 significand bits, so this gives the correctly rounded single-precision
result. That lets every testbench compare the RTL bit for bit.

| testbench | what it checks |
|---|---|
| `tb_fp_mul`, `tb_fp_addsub` | Random streams, overflow, underflow, cancellation, zero, inf and NaN, bit for bit. Latency of 3 and 6 clocks. |
| `tb_fp_div`, `tb_fp_sqrt` | The same kinds of operands, plus reciprocals and exact squares. Latency of 14 clocks and busy for 13 clocks. |
| `tb_bpm_ratio` | Ratios of random amplitudes, with zero and negative amplitudes. Latency of 20 clocks. |
| `tb_bpm_refine` | Random ratio pairs with the published b values and with b = 0. Latency of 12 clocks. |
| `tb_bpm_pos_core` | Ideal beams inside 95% of the radius, near-axis beams (paraxial path) and Q >= 1 (NaN). Positions within 1 um in a 30 mm monitor. Latency of 52 clocks. |
| `tb_bpm_pos_top` | Whole design at default size, end to end. Amplitudes come from the wall-current formula for random beams out to 90% of the radius. Checks bit-exact results, 84-clock latency, exact 14-clock spacing at full rate, and 2 um accuracy with the correction off. Counts input stalls, the paraxial path, correction on and off, and faulty-electrode samples; each must occur. |
| `tb_bpm_workloads` | The published monitor geometries and calibrations on position grids: 60 mm button, 100 mm stripline, the four beta values, and the 34.925 mm stripline. Results are bit-exact, and uncorrected grids are within 1e-4 of the radius. Prints the RMS displacement each correction causes on ideal signals. |

These testbenches use ideal point-electrode signals. They show that the
hardware computes the algorithm exactly as specified. They cannot confirm the
accuracy figures of the original study, which came from field-solver
simulations and beam measurements.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/fp_pkg.sv tb/tb_fp_pkg.sv tb/tb_bpm_pos_top.sv --top-module tb_bpm_pos_top
./obj_dir/Vtb_bpm_pos_top
```

(`-y` lets Verilator find each module in the file of its own name; the two
packages are listed first because they are imported.)

Replace the last testbench file and the top-module name to run another
testbench. Every run takes well under a second.

## Files

* `rtl/fp_pkg.sv`: binary32 type, constants, operator latencies and the
  round-and-pack function.
* `rtl/fp_mul.sv`, `rtl/fp_addsub.sv`, `rtl/fp_div.sv`, `rtl/fp_sqrt.sv`:
  the operators.
* `rtl/delay_line.sv`: operand delay register chain.
* `rtl/bpm_ratio.sv`, `rtl/bpm_refine.sv`, `rtl/bpm_pos_core.sv`: the three
  stages.
* `rtl/bpm_pos_top.sv`: top level.
* `tb/`: one testbench per module above, except `fp_pkg` and `delay_line`,
  plus `tb_bpm_workloads` and the reference package `tb_fp_pkg`.

## Departures from the original implementation, and limits

* The floating-point operators are this design's own, in place of vendor IP.
  Their latency and rate match the original; their resource use will differ.
  The original reports about 3000 LUTs and 40 DSP slices for the new block.
* The ratio stage takes 20 clocks, not 38, so the total latency is 84 clocks
  instead of 102.
* The paraxial switch and its threshold are this design's choice. The original
  schematic shows only the exact chain, and the text gives the paraxial
  formula.
* The order of operations inside the 12-clock correction is this design's
  choice.
* Input and output handshakes, reset behaviour, rounding mode and
  flush-to-zero are not specified by the original and were chosen here.
* Deriving the electrode amplitudes from the raw electrode signals (filtering,
  peak or integral detection, digitisation) is outside this RTL.
