# Activation functions as two-level logic: tanh and SELU circuits

Neural-network accelerators need one activation-function evaluator per
output lane, often hundreds of them, so a lookup-table ROM per lane adds up
quickly. The idea here is to replace each ROM with a small, purely
combinational sum-of-products circuit. The activation function is sampled
on a coarse grid and quantized to a few output bits. Each output bit then
becomes a Boolean function of a handful of input bits, which is minimized
with a Karnaugh map into an AND plane followed by an OR plane. There is no
memory access and no arithmetic on the approximated interval: the result is
valid two gate levels after the input changes.

This RTL gives two such circuits at the sizes the design is built around:

* **tanh 7_4**: 4 input bits, 7 output bits, approximating tanh on [0, 2).
* **SELU 8_5**: 5 input bits, 8 output bits, approximating the negative
  (exponential) branch of SELU on [-3.875, 0].

Each circuit is wrapped in a small unit that handles the sign, the linear
part (SELU) and saturation outside the approximated interval. A top module
runs both units on the same input and registers their outputs, so a result
is ready one clock cycle after its input.

## Number formats

All signals use sign-magnitude form. The two functions are odd (tanh) or
split by sign (SELU), so the magnitude path never has to negate anything.

| signal | format | range |
|---|---|---|
| input `x_sign`, `x_mag` | sign + unsigned Q5.3 (8 bits, LSB = 1/8) | ±31.875 |
| tanh output `tanh_mag` | unsigned Q1.7 (8 bits) | 0 … 1.0 |
| SELU output `selu_mag` | unsigned Q6.7 (13 bits) | 0 … 33.49 |

The 1/8 input step is the segment width of both approximations. tanh has
16 segments over [0, 2), addressed by magnitude bits [3:0]. SELU has 32
segments over [0, 3.875], addressed by bits [4:0]. The 8-bit magnitude width
is this design's choice. The circuits look only at those low bits plus an
"above range" OR of the upper bits, so widening `MAG_W` in `act_pkg`
changes nothing else.

## The two truth tables

Both circuits truncate (floor) the ideal value to the output grid:

```
tanh core   g(X) = floor( tanh(X/8) * 128 )                     X = 0..15
SELU core   f(X) = floor( λ·a·(1 − e^(−X/8)) * 128 )            X = 0..31
            λ = 1.0507, a = 1.6733
```

```
g : 0 15 31 45 59 70 81 90 97 103 108 112 115 118 120 122
f : 0 26 49 70 88 104 118 131 142 151 160 168 174 180 185 190
    194 198 201 204 206 208 210 212 213 215 216 217 218 219 219 220
```

The published description of the circuits is a Karnaugh map for one output
bit of each function and an AND/OR-plane table of product terms. The tables
above are the ones that reproduce those maps cell for cell:

* the tanh map of output bit Y1 (1s at X = 1, 2, 4, 5, 7, 9, 12, 13, 15);
* the SELU map of output bit Y3 (all 32 cells).

A search over the plausible alternatives found no other match. The
alternatives tried were steps of 1/4, 1/8 and 1/16, half-step offsets,
rounding instead of truncation, and other output scalings. Both testbenches
compare these bits against the transcribed maps as well as against the
formulas.

### tanh: 7 fraction bits, not 1 integer + 6

In the description, the 7-bit tanh output has one integer bit and six
fraction bits. The printed Karnaugh map and the OR plane do not fit that
format. They fit seven fraction bits: Y6, the MSB, is 1 exactly for
X ≥ 5, which is where tanh(X/8) ≥ 0.5. This RTL follows the map. The
integer bit is needed only for the saturated value 1.0, so `tanh_unit` adds
it and outputs Q1.7.

### tanh: how the sum of products is written

`tanh_7_4_core` is written as seven explicit sum-of-products expressions.
For outputs Y6 to Y1 it uses the product list that the published table gives
for that output. The complement bars of that table are not legible, and the
same product name does not mean the same term in every output. So each
product's literal polarities were fixed per output, such that the output
equals g(X). Y1 matches the four groups of its printed map:

```
Y1 = X2·¬X1 + X2·X0 + ¬X1·X0 + ¬X3·¬X2·X1·¬X0
```

The published products for the LSB, Y0, cannot produce the LSB of g under
any choice of polarities. They would need g(5) = 71, but tanh(5/8)·128 is
70.99. Y0 is therefore this design's own minimal cover of g:

```
Y0 = ¬X3¬X2X0 + ¬X3¬X2X1 + ¬X3X2¬X0 + X3¬X2¬X1 + X2¬X1¬X0
```

### SELU: a minimal sum of products per bit

The published SELU product table lists some terms several times verbatim,
and its bars are illegible too, so it cannot be restored term by term.
`selu_8_5_core` therefore gives each output bit as its own minimal
two-level cover of the truth table above. The cover was found by
Quine-McCluskey minimization, which picks the fewest products and then the
fewest literals. The covers use 3 to 8 products per bit, and each product
has at most 5 literals. The one row of the published table that can be read
unambiguously is Y7 = X4 + X3 + X2·X1·X0, which is 1 for X ≥ 7. The cover
found for Y7 is exactly that row.

## Around the cores

**tanh_unit** implements

```
tanh(x) =  sign(x) · 1.0                 |x| ≥ 2
           sign(x) · g(floor(8|x|))/128  |x| < 2
```

The sign goes straight to the output, because tanh is odd. x = ±2 counts as
saturated.

**selu_unit** implements

```
SELU(x) =  λ·x                            x ≥ 0
          −f(floor(8|x|))/128             −3.875 ≤ x < 0
          −λ·a = −225/128                  x < −3.875
```

* **Positive branch.** The positive branch is linear. It is a
  multiplication by the constant 269/256 = 1.05078 (λ rounded down to 8
  fraction bits), truncated to 7 fraction bits. Synthesis builds it from
  shifts and adds.
* **Saturated value.** The description gives two values for the saturated
  output: −a in its text and −λ·a in its equation. This design uses −λ·a,
  which is consistent with the other branches.
* **Boundary at −3.875.** The text puts x = −3.875 inside the approximated
  interval and the equation puts it in the saturated branch. This design
  follows the text, so all 32 core entries are used.

In both units an input of −0 gives an output of −0 (sign 1, magnitude 0).

## Top level and timing

`act_func_top` feeds one input sample to both units in parallel and
registers both results:

```
        x_sign, x_mag ──┬── tanh_unit ──┐
                        │               ├─► output register ─► tanh_*, selu_*
                        └── selu_unit ──┘       (enable = in_valid)
        in_valid ──────────────────────────► out_valid register
```

* **Latency and rate.** Latency is one clock and throughput is one sample
  per clock.
* **Holding results.** The results hold their last value while `in_valid`
  is low.
* **Reset.** `rst_n` is a synchronous, active-low reset. It clears
  `out_valid` and the results.

The register stage and the valid handshake belong to this design. The
activation logic itself has no state. The reported critical paths of the
two circuits are about 0.19 ns (tanh) and 0.22 ns (SELU) in a 28 nm library.
A register-to-register path through either circuit is therefore short
compared with typical accelerator clock periods.

## Accuracy

The mean absolute error, mean |exact − approximation| × 100 %, was measured
over x sampled uniformly and densely in (−2, 2). For the tanh circuit it is
3.5 %. For the SELU branch over (−3.875, 0), against λ·a·(eˣ − 1), it is
3.2 %. The description reports 4.19 % and 2.22 % under its own definition
of average error, but does not say where it samples. Network-level
accuracy, measured in software by swapping these approximations into
trained networks, changes by less than 2 points on MNIST and CIFAR-10 for
both functions. On ImageNet, tanh_7_4 loses about 8 points and SELU_8_5
gains about 0.4.

## Files

| file | contents |
|---|---|
| `rtl/act_pkg.sv` | formats, widths, λ and λ·a constants, sign-magnitude struct |
| `rtl/tanh_7_4_core.sv` | 4→7 tanh sum-of-products |
| `rtl/selu_8_5_core.sv` | 5→8 SELU sum-of-products |
| `rtl/tanh_unit.sv` | sign, saturation at \|x\| ≥ 2 |
| `rtl/selu_unit.sv` | λ·x branch, core branch, −λ·a saturation |
| `rtl/act_func_top.sv` | both units plus the output register |
| `tb/tb_ref_pkg.sv` | reference models from the formulas, in `real` arithmetic |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. It
has a watchdog that counts a failure if the run hangs. For example:

```
verilator --binary --timing --assert -Wall -Wno-fatal \
  rtl/act_pkg.sv rtl/tanh_7_4_core.sv rtl/selu_8_5_core.sv \
  rtl/tanh_unit.sv rtl/selu_unit.sv rtl/act_func_top.sv \
  tb/tb_ref_pkg.sv tb/tb_act_func_top.sv --top-module tb_act_func_top
./obj_dir/Vtb_act_func_top
```

What each testbench covers:

* **Cores.** The core testbenches are exhaustive. They also check the
  printed Karnaugh-map bits (tanh Y1, SELU Y3 and Y7).
* **Units.** The unit testbenches sweep every input of both signs.
* **Top.** The top testbench runs at the top's default sizes. It streams
  4000 random samples with random idle cycles, then the full input range.
  It checks one-cycle latency, the hold behaviour and reset. It also counts
  each branch (tanh core and both saturations; SELU linear, ladder and
  saturation; idle cycles) and fails if any branch count is zero.

## Changing the design

* **Another bit width.** Derive a new truth table from the formula,
  minimize each output bit into a sum of products, and adjust `TANH_IN_W`,
  `TANH_CORE_W`, `SELU_IN_W` or `SELU_CORE_W` in `act_pkg`. An example is
  one of the narrower variants the design space also covers: tanh with 5 or
  7 output bits and 4 or 6 input bits, or SELU with 5 or 7 output bits and
  4 input bits. `selu_unit` takes its saturation threshold from the core
  input width. `tanh_unit` saturates at |x| ≥ 2, a threshold derived from
  `IN_FRAC`.
* **Another input step.** Changing the grid, for example to 1/16, means
  changing `IN_FRAC`, the core logic and the reference functions in
  `tb_ref_pkg`.
* **A different λ approximation.** Edit `LAMBDA_Q8`. The testbench
  reference uses the same 269/256 constant and must be edited with it.
