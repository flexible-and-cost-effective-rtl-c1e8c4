# Spherical-to-Cartesian conversion with two cascaded CORDIC rotators

A point given in spherical coordinates (radius r, inclination θ, azimuth φ)
has the Cartesian coordinates

    x = r·sin θ·cos φ      y = r·sin θ·sin φ      z = r·cos θ

Evaluating these needs sines, cosines and multiplications. A CORDIC rotator
instead turns a vector (x, y) through an angle with nothing but shifts and
additions. Rotating (r, 0) by θ gives (r cos θ, r sin θ). Rotating
(r sin θ, 0) by φ gives (r sin θ cos φ, r sin θ sin φ). So two plane
rotations in a row give all three coordinates:

    stage 1:  (r, 0)        rotated by θ  ->  (r cos θ, r sin θ)        z = r cos θ
    stage 2:  (r sin θ, 0)  rotated by φ  ->  (r sin θ cos φ, r sin θ sin φ) = (x, y)

This RTL builds that design. It has a 16-bit iterative 2-D CORDIC stage, an
arctangent table for each stage, and a top level that chains two stages. The
top takes a conversion in 32 clock cycles and the 2-D stage a rotation in 16.
It follows a published FPGA design (originally VHDL for an Altera device) in
its structure, port names, number formats, table contents and latencies. The
sequencing details that the publication does not describe are choices made
here; they are listed at the end.

## Number formats

Every word is 16-bit two's complement.

**Angles** use 2^16/720 ≈ 91.02 LSB per degree. One word spans −360° to
+360°, and the useful range is ±90°:

| angle | word | angle | word |
|---|---|---|---|
| 15° | `0555` | −15° | `FAAA` |
| 30° | `0AAA` | −30° | `F555` |
| 45° | `1000` | −45° | `F000` |
| 60° | `1555` | −60° | `EAAA` |
| 90° | `2000` | −90° | `E000` |

To convert, multiply the angle in degrees by 65536/720 and truncate. The
rotator converges for |angle| up to about 99.9°, the sum of all its
micro-rotation angles.

**Magnitudes** (r, x, y, z) are integers scaled by 10000, so 1.0 is `2710`
and 0.5 is `1388`.

**Gain.** Every CORDIC rotation also stretches the vector by
G = ∏ √(1 + 2^−2i) ≈ 1.64676 for 16 micro-rotations. The hardware does not
correct for it; the caller pre-scales the input instead:

* One 2-D stage with x0 = `17B9` (0.607253 = 1/G, ×10000) and y0 = 0 gives
  x = cos z0 and y = sin z0, ×10000.
* The 3-D top applies G twice to x and y, so a unit radius is entered as
  r = `0E68` (1/G² ≈ 0.36876, ×10000). x and y then come out ×10000. z is
  stage 1's x, which has seen G only once, so z = r·G·cos θ. With r = `0E68`
  that is 0.6073·cos θ ×10000: for θ = 45° the result is `10C6`, not `1B9F`.
  The original design has the same property, and its worked examples
  compute z that way. Multiply z by 1/G if you need it on the same scale.

Keep the product G²·|r| below 32767, i.e. |r| ≤ about 12000, or x and y
overflow and wrap.

## The 2-D stage (`cordic`)

The stage holds three registers: x, y and the residual angle z. At step i
(i = 0…15) it reads the sign of z to pick the direction d = +1 (z ≥ 0) or
−1 (z < 0), then updates all three at once:

    x ← x − d·(y >>> i)
    y ← y + d·(x >>> i)
    z ← z − d·atan(2^−i)

The shifts are arithmetic and truncate. Each step therefore costs two
barrel shifters and three adder-subtractors, the same as Volder's classic
unit. After 16 steps z is close to zero and (x, y) has turned by the
original z0.

### Timing and handshake

* `load`, sampled while idle, starts a rotation. In that same clock edge
  the stage loads x0/y0/z0 and performs step 0; `busy` rises. A `load`
  while busy is ignored.
* Steps 1…15 follow, one on every rising edge of `f_clk` at which `itr` is
  high. `itr` low stalls the stage without losing state.
* After step 15 `busy` falls and `done` rises. `done` stays high until the
  next accepted `load`.
* With `itr` held high, `done` is high 16 cycles after the load cycle
  starts, counting the load cycle as the first.
* `x`, `y` and `z` are the working registers, so they show intermediate
  values while busy.
* `resetn` is an asynchronous active-low reset that clears every register.

### Why `count_out` runs one step ahead

The arctangent table (`angle_rom`) has a registered output, clocked by
`outclock`: the word addressed in one cycle appears in the next. The stage
drives the table's address from `count_out` and reads the word on its
`angle` input. For the right constant to arrive on time, `count_out` gives
the index of the step that will run at the **next** clock edge. It is the
next-state value of the internal step counter:

| cycle                       | step performed at the edge ending it | `count_out` in it | `angle` in it |
|---|---|---|---|
| idle                        | –                                    | 0                 | atan 2^0 |
| load                        | 0                                    | 1                 | atan 2^0 |
| 1st iteration               | 1                                    | 2                 | atan 2^−1 |
| …                           | …                                    | …                 | … |
| stalled (`itr` = 0)         | –                                    | unchanged         | unchanged |
| 15th iteration              | 15                                   | 0                 | atan 2^−15 |

This is also why a load must not interrupt a running rotation. Step 0
needs word 0, but while busy the table is delivering some other word, so a
load there is ignored rather than restarting.

## The arctangent table (`angle_rom`)

The table has 16 words, word i = round(atan(2^−i) in degrees × 65536/720):

    1000 0972 04FE 0289 0146 00A3 0051 0029 0014 000A 0005 0003 0001 0001 0000 0000

The original lists the same angles as hex digit strings with more
fractional precision; for example 14.036° appears as `4FD9`, i.e.
`04FD.9`. Rounding those strings to whole LSBs, rather than truncating
them, is what reproduces the original's simulation outputs exactly (see
"Accuracy"). The last two words are zero, so steps 14 and 15 only refine x
and y along the direction already chosen.

## The 3-D top (`sphere`)

`sphere` holds two `cordic` stages, each with its own `angle_rom`:

* Stage 1 gets x0 = r, y0 = 0 and z0 = θ.
* Stage 2 gets x0 = stage 1's y, y0 = 0 and z0 = φ.
* x and y are stage 2's x and y; z is stage 1's x.

A `load` while the top is idle starts stage 1 and captures φ, so r, θ and φ
need only be valid in the load cycle. When stage 1's `done` rises, the
next cycle loads stage 2 and performs its step 0, whatever `itr` is. Stage
2 then runs its 15 remaining steps.

With `itr` high throughout, the cycle count is 1 (load and step 0) + 15 +
1 (hand-off and stage 2 step 0) + 15 = 32 cycles, counting the load cycle.
After that `done` rises. `itr` low stalls whichever stage is iterating.
Ports: `f_clk`, `resetn`, `load`, `itr`, `r`, `theta`, `phi`, `x`, `y`, `z`
and `done`.

The two stages never work at the same time. A single stage and one table,
reused for both rotations, would do the same job in the same 32 cycles
with half the adders. The original uses two stages, and so does this RTL.

## Accuracy

The stages are bit-exact 16-bit integer machines, so the results can be
compared with the original's published simulations digit for digit.

| r, θ, φ | x | y | z | ideal (x, y, z) |
|---|---|---|---|---|
| `0E68`, 45°, 45° | `138A` | `138A` | `10C4` | `1388`, `1388`, `10C6` |
| `0E68`, 60°, 30° | `1D52` | `10E7` | `0BDC` | `1D4C`, `10EA`, `0BDC` |
| `0E68`, 45°, 30° | `17F0` | `0DCE` | `10C4` | `17EC`, `0DCF`, `10C5` |

The first two rows are exactly the outputs in the original's waveform
plots. The x and z of the third row are exactly its tabulated simulation
result. Its tabulated y (`10C5`) repeats the z column and looks like a
transcription slip. Errors stay below 7×10⁻⁴ of full scale here.

For the single stage, cos/sin of ±15° … ±90° agree with the ideal values
within 4×10⁻⁴. The original's own 2-D table does not match this RTL digit
for digit: it differs by up to a few LSB on most angles. It also prints `1BF9` for
cos 45° and sin 45°, a digit swap of `1B9F`.

Error grows with the input magnitude. Truncating shifts and a 1/91-degree
angle step leave a few LSB plus roughly 6×10⁻⁴ of the vector length in the
worst case seen over random tests.

## Simulating

Each testbench checks its block against models written independently in
`tb/cordic_ref_pkg.sv`. These are an arctangent table rebuilt with real
arithmetic, a plain-loop bit-exact CORDIC, and ideal `$sin`/`$cos`
results. Each testbench also checks the cycle counts above and prints
`TB_RESULT checks=N failures=M`.

* `tb_angle_rom`: every table word, the one-cycle read latency, and the two
  printed words `1000` and `0972`.
* `tb_cordic`: the original's angle sweep (x0 = `17B9`, ±15° … ±90°), then
  300 random vectors. Covers random `itr` stalls, loads while busy and both
  rotation directions, and checks 16 cycles plus stalls per rotation.
* `tb_sphere`: the three worked examples, with exact waveform values, then
  200 random conversions. Covers stalls, ignored loads, negative angles and
  the stage hand-off, and checks 32 cycles plus stalls per conversion. It
  runs the top at its default parameters.

With Verilator 5:

    verilator --binary --timing --assert --top-module tb_sphere \
        rtl/cordic_pkg.sv tb/cordic_ref_pkg.sv rtl/angle_rom.sv rtl/cordic.sv \
        rtl/sphere.sv tb/tb_sphere.sv
    ./obj_dir/Vtb_sphere

For the other testbenches, swap the top module and the last file (and drop
`sphere.sv` for `tb_cordic` and `tb_angle_rom`). Each simulation finishes
in well under a second.

## Parameters

`cordic` and `sphere` take `W` (word width, 16), `NITER` (steps per stage,
16) and `CW` (step counter and table address width, 4). The arctangent
constants and the angle scale are fixed for 16-bit words in
`cordic_pkg.sv`. A wider datapath needs a new table built with the formula
above; `NITER` above 16 also needs more table entries.

## What follows the original and what is this design's own

Taken from the original:
* The two-stage structure and how the stages are wired.
* The module and port names `f_clk`, `resetn`, `load`, `itr`, `x0`, `y0`,
  `z0`, `angle`, `count_out`, `r`, `theta` and `phi`.
* The table's `address`/`outclock`/`q` interface.
* 16-bit words, 16 table entries, the angle scale, the ×10000 magnitude
  scale, gain removal by pre-scaling r, and the latencies of 16 and 32
  cycles.

Chosen here, because the original does not describe it:
* What `itr` and `load` do. `itr` appears only as a pin and as a toggling
  trace in the waveforms; here it is a step enable.
* Load performs step 0, which makes the latency come out at 16 and 32
  cycles.
* Loads are ignored while busy.
* `count_out` runs one step ahead.
* The direction rule for d.
* Asynchronous active-low reset.
* Rounding of the table words.
* φ is latched at load.
* The added `busy` and `done` outputs.

The original's text says results come "after 15 iterations", yet its table
has 16 entries and it quotes a 16-cycle latency; this design performs 16
steps. Volder's figure labels its shifts 2^−(i−2), while the recurrence
uses 2^−i; the recurrence is followed.
