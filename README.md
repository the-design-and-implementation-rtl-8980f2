# FLANN non-linearity compensator for an LVDT displacement sensor

A linear variable differential transformer (LVDT) turns the position of a
movable core into a voltage. Near its null position that voltage grows in
proportion to the displacement, but further out the curve bends and is not
even symmetric: in the measured sensor this design is built around, +10 mm
reads 1.810 V while -10 mm reads -2.896 V, and the response flattens towards
+/-30 mm. Instead of correcting the coils, the fix here is to put an *inverse
model* after the sensor: a circuit that maps the measured voltage `v` back to
the displacement `x` that produced it, so that sensor plus circuit are linear
over the whole range.

The inverse model is a functional-link artificial neural network (FLANN). It
has no hidden layer. The input is expanded into a fixed set of trigonometric
basis functions, and the output is a weighted sum of them:

    y = w0*v + sum_{m=1..25} ( w(2m-1)*sin(m*pi*v) + w(2m)*cos(m*pi*v) )

That gives 51 terms. The weights are learned offline with the least-mean-square
(LMS) rule. In hardware the network is a three-stage datapath in 18-bit floating
point:

    in_v --> [ expansion ] --> 51 values --> [ multiplication ] --> 51 products --> [ addition ] --> out_y
             5 look-up sub-blocks            51 fp18 multipliers                    50 fp18 adders
             E1..E4: 10 outputs each         (w on a port)                          grouped per sub-block,
             E5: 11 outputs                                                          then one final tree

The RTL is SystemVerilog in `rtl/`, one module or package per file.
Self-checking testbenches are in `tb/`.

## The measured characteristic

Everything is sized around 13 measurements of one sensor. Each row is a
displacement and the demodulated output voltage read at it:

| x (mm) | -30 | -25 | -20 | -15 | -10 | -5 | 0 | 5 | 10 | 15 | 20 | 25 | 30 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| v (V) | -5.185 | -5.017 | -4.717 | -4.039 | -2.896 | -1.494 | 0.001 | 1.462 | 1.810 | 3.962 | 4.799 | 5.225 | 5.276 |

These values are `LVDT_V` and `LVDT_X` in `rtl/fp18_pkg.sv`. `LVDT_V` is the
default for the `VIN` parameter of the expansion tables. `LVDT_X` is the
desired output (the training target), and only the testbenches use it.

## Number format (fp18)

All datapath words are 18-bit floating point. The 18-bit width comes from the
original design, but the way the word is split is this design's own choice:

| bits | field | notes |
|---|---|---|
| 17 | sign | |
| 16:11 | exponent | biased by 31; 0 means the value is zero |
| 10:0 | fraction | hidden leading 1 |

- The 12-bit significand gives a relative step of 2^-11, about 0.05 %.
- The exponent covers magnitudes from 2^-30 to about 2^33.
- There are no subnormals, infinities or NaNs.
- Every operation rounds to nearest, with ties to even.
- A result whose exponent would fall below 1 becomes +0.
- A result whose exponent would exceed 63 saturates to the largest magnitude
  with its sign.
- Only +0 is ever produced.

`fp18_pkg::real2fp` and `fp18_pkg::fp2real` convert between fp18 and `real`
with exactly these rules. The RTL calls them only while it is being elaborated,
to build its tables. The testbenches use them at run time.

## Stage 1: expansion (`flann_expansion`, `flann_exp_sub`)

The expansion does no trigonometry at run time: it is a look-up table. This
is the main limit of the design. It only knows the input voltages it was built
for, which by default are the 13 measured points.

Each of the five sub-blocks `flann_exp_sub` works the same way:

1. It compares the 18-bit input word with the fp18 code of every table voltage.
2. On a match it drives out its stored slice of the expansion and raises `hit`.
3. If nothing matches, its outputs are +0 and `hit` is low.

All five sub-blocks see the same input. `flann_expansion` registers their 51
outputs, and it registers `out_hit` as the AND of the five `hit` bits.

The basis functions are numbered k = 0..50 in this order: v, sin(pi v),
cos(pi v), sin(2 pi v), cos(2 pi v), and so on. Sub-block j covers k = 10j
onwards:

| sub-block | k | functions |
|---|---|---|
| E1 | 0..9 | v, sin(pi v) .. sin(5 pi v) |
| E2 | 10..19 | cos(5 pi v) .. sin(10 pi v) |
| E3 | 20..29 | cos(10 pi v) .. sin(15 pi v) |
| E4 | 30..39 | cos(15 pi v) .. sin(20 pi v) |
| E5 | 40..50 | cos(20 pi v) .. sin(25 pi v), cos(25 pi v) |

How the tables are filled:

- The contents are not typed in. At elaboration each entry is computed as
  `real2fp(basis(k, VIN[i]))` using `$sin`/`$cos`. To re-target the tables,
  change the `VIN` parameter (and `NPTS`).
- The sin/cos arguments use the exact decimal voltage, not its fp18 rounding.
- The voltage is in volts and is not normalised. So sin(25 pi v) at 5 V is
  sampled far above its period. That is harmless for a table of 13 points, but
  the same weights would not give smooth results for voltages between the
  points.

The source sets the 11th output of E5 in two incompatible ways. The stated
count is 11, but the listed functions for E5 are only ten, and the five lists
together give 50 values, not 51. This design keeps the count of 11 and takes
cos(25 pi v), the next term of the series, as the missing output.

## Stage 2: multiplication (`flann_mult`, `flann_mult_sub`, `fp18_mul`)

The multiplication stage has one sub-block behind each expansion sub-block:
four with 10 multipliers and one with 11. Each multiplier forms
`p[k] = s[k] * w[k]`.

`fp18_mul` works as follows:

1. It multiplies the two 12-bit significands into a 24-bit product.
2. It normalises the product by at most one place.
3. It rounds the 11 fraction bits from a guard bit and a sticky bit.
4. It checks the exponent range.

`flann_mult` registers the products.

The weights enter on the `w` port of the top level. The design does not store
them. They come from training, and they must stay stable while samples are in
flight.

## Stage 3: addition (`flann_adder`, `fp18_sum_tree`, `fp18_add`)

The addition stage has 50 two-input adders for the 51 products:

- The products of each multiplication sub-block are first summed among
  themselves. That takes 9 adders for each 10-product group and 10 for the
  11-product group.
- A final tree of 4 adders combines the five partial sums.

Each of these sums is an `fp18_sum_tree`, which splits its inputs into the
first N/2 and the last N - N/2 words, sums each half recursively, and adds the
two results. Floating-point addition is not associative, so this order is part
of the specification. The reference models in the testbenches follow it
exactly (`fp18_ref_pkg::sum_tree`).

`fp18_add` is a conventional adder with three extra bits (guard, round,
sticky):

1. It puts the operand of larger magnitude first.
2. It shifts the smaller significand right by the exponent difference. Bits
   shifted out are ORed into the sticky bit.
3. It adds or subtracts the significands.
4. It normalises the result: right by one place after a carry, or left by the
   leading-zero count after a cancellation.
5. It rounds to nearest even.

The adder has a `sub` input because the original design describes an
adder/subtractor. In the tree `sub` is tied to 0, because each product already
carries its sign.

`flann_adder` registers the sum as `out_y`.

## Top level and timing (`flann_compensator`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst` | in | 1 | synchronous, active high; clears only the valid pipeline |
| `in_valid` | in | 1 | a sample is presented |
| `in_v` | in | 18 | fp18 LVDT voltage |
| `w` | in | 51 x 18 | fp18 weights, `w[k]` for basis function k |
| `out_valid` | out | 1 | `out_y` holds a result |
| `out_hit` | out | 1 | the sample was a table point |
| `out_y` | out | 18 | fp18 compensated displacement (mm, in the training units) |

Each stage ends in a register. A result therefore appears exactly 3 clock
cycles after its input, and a new sample can enter on every cycle. There is no
back-pressure. Data registers load only when their valid bit is high. This
timing is this design's choice: the original design gives no clocking
details.

Parameters:

- `NSUB` (5) is the number of expansion and multiplication sub-blocks.
- `SUBN` (10) is the number of outputs per sub-block. The last sub-block has
  one more.
- `NE` is derived as `NSUB*SUBN+1`, which gives 51 expansions.
- `NPTS` (13) and `VIN` set the table points.

`NSUB = 6` builds the 61-expansion variant.

## Training the weights

The weights are trained offline, not in hardware. They are chosen to minimise
the squared error between `y` and the known displacement `d = x` over the
measured points, using the LMS update:

    e = d - y;   w <- w + eta * e * s      (all weights start at 1)

`tb/flann_compensator_tb.sv` does this training in double precision with
eta = 0.02 and 2000 passes over the 13 points. It then rounds the weights to
fp18 and loads them. The trained weights are all smaller than 4 in magnitude.
With 51 basis functions and only 13 points the problem has more unknowns than
equations, so LMS converges to weights that fit all 13 points. After fp18
rounding, the worst error of the compensated output is 0.016 mm over the
+/-30 mm range.

## How far to trust it

Each block has a self-checking testbench in `tb/` whose expected values are
computed independently, in double precision, and rounded once. Because the
arithmetic units round correctly, every testbench compares bit for bit. A
tolerance is used only for the displacement error.

| testbench | what it checks |
|---|---|
| `fp18_mul_tb`, `fp18_add_tb` | 20-30k random and directed operand pairs each: ties, cancellation, saturation, flush to zero |
| `flann_exp_sub_tb`, `flann_expansion_tb` | every table entry of E1 and E5 and of the full expansion, misses, sub-block boundaries, one-cycle latency |
| `flann_mult_sub_tb`, `flann_mult_tb`, `fp18_sum_tree_tb`, `flann_adder_tb` | per-lane products; sums in the specified tree order; valid and hit alignment |
| `flann_compensator_tb` | end to end at the default size: LMS training, 13 points back to back and mixed with idle cycles and off-table inputs, 3-cycle latency, bit-exact output, error under 0.1 mm at every point |
| `flann_fe_sweep_tb` | the same with 11, 25, 51 and 61 expansions |

For the expansion sweep, 11 and 25 expansions run on the default build with
unused weights set to zero, and 61 expansions runs on an `NSUB = 6` instance.
The worst errors are 4.1 mm for 11, 1.25 mm for 25, 0.016 mm for 51 and
0.008 mm for 61. So 11 and 25 expansions under-compensate and 51 is enough,
the same ranking as the original study.

Where this RTL departs from, or adds to, the original design:

- The fp18 field split, the rounding and the saturation and flush rules are
  this design's own choices.
- The adder order inside each group is this design's own choice. Figure-level
  detail of the original fixes only the grouping per sub-block.
- The original draws a single adder at the output. Combining five partial sums
  needs four, and the total still comes to 50.
- E5's 11th output, cos(25 pi v), is inferred as described above.
- The pipeline registers, the valid and hit signalling, and the behaviour on
  unknown inputs are added.
- The weights are a port rather than fixed constants, because the trained
  values are not published.
- The analog sensor, its data-acquisition hardware and the LMS training itself
  are outside the RTL.

## Simulating

Any testbench builds with plain Verilator 5. Run from the directory that holds
`rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/fp18_pkg.sv tb/fp18_ref_pkg.sv tb/flann_compensator_tb.sv \
        --top-module flann_compensator_tb
    ./obj_dir/Vflann_compensator_tb

Each testbench ends with a line `TB_RESULT checks=N failures=M`. Every one
finishes in well under a second.

To change the table points, override `VIN`/`NPTS` on `flann_compensator`, and
train against the matching displacements. To change the number of basis
functions, set `NSUB` (and `SUBN`). The number format is set by `EXP_W`,
`MAN_W` and `BIAS` in `fp18_pkg`. The arithmetic units use these constants,
except that the leading-zero count in `fp18_add` is 4 bits wide, which fits an
11-bit fraction.
