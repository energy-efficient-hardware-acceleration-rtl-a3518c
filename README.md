# Power-of-two convolution layer: bit shifts instead of multipliers

Neural-network weights cluster around zero, with a roughly logarithmic
spread. If each weight is rounded to a signed power of two, ±2^-s, a
multiplication by a weight becomes a right shift by `s` plus a sign. Four bits
are enough to store such a weight: one sign bit and a three-bit shift. A
convolution engine can then use **bitshift-and-accumulate** (BAC) units
instead of multiply-and-accumulate (MAC) units. A shifter is smaller than a
4x8 multiplier and switches less, and a unit can skip its work when the weight
is zero.

This RTL is a convolution layer of 512 BAC units for 3x3 filters with 4-bit
power-of-two (PoT) weights and 8-bit activations. It also includes a small
wrapper that holds weights and activations in block RAM and runs the layer
over a feature map. In the published FPGA evaluation this layer used about
1.4 times less dynamic power than the same layer built with uniform 4-bit
weights and multipliers. That multiplier baseline is not part of this RTL.

## The weight code

A weight is a 4-bit sign/magnitude code `{neg, shift[2:0]}`. It is not two's
complement.

| code            | value                        |
|-----------------|------------------------------|
| `0sss`, sss<7   | +2^-sss: add `a >> sss`      |
| `1sss`, sss<7   | -2^-sss: subtract `a >> sss` |
| `0111`          | zero weight (`ZERO_WEIGHT`)  |
| `1111`          | unused; acts as -(a >> 7)    |

Shifts 0 to 6 with both signs give 14 non-zero levels. A power of 0 (a weight
of ±1) must be kept apart from a weight of exactly zero, so one of the two
codes left over (shift 7) is reserved for zero. This design picks `4'b0111`,
and the `ZERO_WEIGHT` parameter can change it. The layer-wide scale factor
(the largest weight magnitude, by which all weights are normalised before
rounding) is not applied here. It is meant to be folded into the following
batch-normalisation gain, so the accumulators hold sums in units of that
scale factor.

Weights are quantised offline:

1. Divide by the largest magnitude in the layer.
2. Take round(log2|w|) and clip it to the range of levels.
3. Store the negated exponent as the shift, together with the sign.

A pruning variant zeroes the weights below a fraction of the maximum and
renormalises the rest. This gives a "dead zone" around zero and keeps all 14
levels for the surviving weights. The hardware supports it as it is: pruned
weights simply use the zero code. The quantisation and pruning run in training
software and are not part of this RTL.

## The BAC unit (`bac_unit`)

Each unit computes:

```
                  ┌─ w == ZERO_WEIGHT ? 0 : (a >> w.shift) ─┐
partial product = │                                         │ , negated if w.neg
                  └─────────────────────────────────────────┘
acc += partial product
```

The data path is a shifter, a mux that forces 0 for the zero code, a mux
between the value and its negation, and the accumulator. The sign mux is
needed because the weight is sign/magnitude: a negative weight subtracts
rather than adds.

**Timing.** The unit has two stages. On an edge with `en=1` the signed 9-bit
partial product is registered. On the next edge it is added to the 32-bit
accumulator. For an NxN filter the N² taps go in on N² consecutive enabled
cycles. The complete sum is then on `out` N²+1 cycles after the first tap was
clocked in: 10 cycles for 3x3. `rst` is synchronous and clears the
accumulator and the pipeline register. `en` is ignored while `rst` is high. A
cycle with `en=0` leaves the accumulator as it is, so taps may come with gaps.

The following are choices made in this implementation:

* Activations are unsigned, as after a ReLU.
* The shift is logical and truncates the shifted-out bits.
* The accumulator is 32 bits. Nine taps need only 13 bits; the extra width
  leaves room for longer accumulations.

## The layer (`bac_layer`)

`NUM_FILTERS` (512) units are in parallel. They share `clk`, `en`, `rst` and
one activation `a_in`, and each unit has its own weight input `w_in[f]`. In
each cycle one activation of the current 3x3 input window goes in, together
with the weight of the same tap for every filter. After one window, `out[f]`
is filter f's result for that window. The filters are single-channel 3x3
filters. The layer does not accumulate over input channels, but a controller
could do that by leaving `rst` low across channels, given a wide enough
accumulator.

## The test wrapper (`pot_accel_top`)

```
 host write ports ──► weight_bram (9 rows x 512 weights) ──┐ w_in[511:0]
                                                           ▼
 host write ports ──► act_bram (7x7 map) ──► pad mux ──► bac_layer ──► out_data[511:0]
                           ▲                    ▲          ▲ en/rst   (results to a
                           └── layer_controller ┴──────────┘           logic analyser)
```

The wrapper runs one pass of the layer over one feature map.

* **`weight_bram`**: row `t` holds tap `t = ky*3+kx` of all 512 filters, 2048
  bits, so a single read feeds the whole layer for one cycle. The host loads
  it 32 bits (8 weights) at a time: chunk `c` holds filters `8c..8c+7`, with
  filter `8c+k` in bits `[4k+3:4k]`.
* **`act_bram`**: the input map, stored row by row, so pixel (y, x) is at
  address `y*IMG_W + x`.
* **`layer_controller`**: after `start`, visits output positions in row-major
  order, with stride 1 and zero padding `PAD` (1 by default, so the 7x7 map
  gives a 7x7 output). For each position it issues nine taps on nine
  consecutive cycles. Each tap reads one weight row and one pixel; a tap that
  falls in the padding reads nothing and is flagged `pad`, and the wrapper
  then feeds a 0. Both memories answer one cycle after the read, so
  `layer_en` and `pad` are the issue flags delayed by one cycle. `layer_rst`
  is raised with the read of tap 0, which clears the accumulators one cycle
  before that tap arrives.

**Cycle plan of one window (3x3).** The cycle numbers count from the first
read:

| cycle | controller                 | layer                                 |
|-------|----------------------------|---------------------------------------|
| 0     | read tap 0, `layer_rst`    | accumulators cleared at the edge      |
| 1..8  | read taps 1..8             | `en`: taps 0..7 enter stage 1         |
| 9     | wait                       | `en`: tap 8 enters stage 1            |
| 10    | wait                       | last partial product is accumulated   |
| 11    | `out_valid`, read next tap 0 | `out_data` holds the window's results |

So a window takes K²+2 = 11 cycles. A 7x7 map takes 49 x 11 = 539 cycles
from the edge that samples `start` to `done`. `done` comes in the same cycle
as the last `out_valid`, and `busy` stays high up to and including that
cycle. The results are held only for the `out_valid` cycle, because the next
window's reset clears them at the end of it. Whatever samples them, such as a
logic analyser or a downstream stage, must take them in that cycle.

Two assertions in the controller state its rules: `layer_rst` and `layer_en`
are never high together, and `start` is only accepted while idle.

## Parameters

| parameter     | default   | meaning |
|---------------|-----------|---------|
| `NUM_FILTERS` | 512       | filters, one BAC unit each |
| `KSIZE`       | 3         | filter size KSIZE x KSIZE |
| `A_WIDTH`     | 8         | activation bits |
| `W_WIDTH`     | 4         | weight bits (1 sign + shift) |
| `ACC_WIDTH`   | 32        | accumulator bits |
| `ZERO_WEIGHT` | `4'b0111` | code of the zero weight |
| `IMG_W`, `IMG_H` | 7, 7   | input feature map held in `act_bram` |
| `PAD`         | 1         | zero padding around the map |
| `WR_WIDTH`    | 32        | weight-memory write width |

The shared defaults are in `pot_pkg`. The filter count, filter size and bit
widths are those of the published layer. The accumulator width, the zero
code, the map size (7x7, the map size of the 512-filter layers of ResNet-18),
the padding, the memory organisation and the loading ports are this design's
own choices. The published work does not state them.

## Where this departs from, or adds to, the published design

* The clock generator and the on-chip logic analyser of the published test
  setup are vendor IP and are not included. `clk` is an input, and the
  results (`out_data`, `out_valid`, `out_y`, `out_x`) are top-level outputs.
* The published design does not say how its block RAMs are filled, how large
  they are or in what order the controller reads them. The write ports, the
  per-tap weight rows, the row-major map, zero padding and the 11-cycle window
  plan are choices made here.
* The zero-weight test compares the whole code with `ZERO_WEIGHT`. The
  published schematic draws it as a gate combining the weight and the
  constant.
* Which register makes up the first of the two pipeline stages is not
  specified. Here it is the partial-product register.
* The worked quantisation example in the published text writes a very small
  weight and a weight of power 0 with the same exponent, 0. This design
  follows the text's rule that the two must be distinct: the small weight
  becomes the zero code.
* Only a single input channel per filter is handled, as described.
  Multi-channel layers such as those of ResNet-20 (16 to 64 channels on maps
  up to 32x32) would need accumulation across channels and a larger
  activation memory.
* The zero-weight "skip" is the mux that forces a zero partial product. Any
  power saving from it depends on the implementation tool; no clock gating is
  written out.

## Verification

Every module has a self-checking testbench in `tb/`. Each one computes the
expected values independently, from the weight's definition
(-1)^neg · ⌊a / 2^shift⌋ (0 for the zero code), and prints
`TB_RESULT checks=N failures=M`.

* `tb_bac_unit`: every code with a=200, then 300 random windows. It checks the
  value and the N²+1 latency (the sum must be incomplete after N² cycles).
  It also covers enable gaps and `rst` overriding `en`.
* `tb_bac_layer`: 512 filters with independent random weights and 40 random
  windows. It checks every filter's result and the latency.
* `tb_weight_bram`, `tb_act_bram`: fill, random read-back, one-cycle
  latency, hold while `rd_en` is low, and read-during-write returning the old
  data.
* `tb_layer_controller`: compares every output, cycle by cycle, against the
  schedule above, for two back-to-back passes.
* `tb_paper_example`: the published worked example, a 3x3 filter whose
  weights quantise to the exponents [-, -4, -5, -3, -1, -1, 0, -2, -2], with
  the first weight stored as zero. It runs 100 activation windows through one
  unit; the all-255 window must give 278.
* `tb_pot_accel_top`: end to end at the default size (512 filters, 7x7, pad
  1). There are three passes with 0 %, about 40 % and about 70 % zero weights,
  the sparsity range the pruning method reaches. Each pass checks all
  49 x 512 results against a reference convolution, the output order and the
  539-cycle run time. It counts zero-weight skips, negative weights, each
  shift amount, padding taps and accumulator clears, and fails if any of them
  never happened.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/pot_pkg.sv tb/tb_pot_accel_top.sv \
          --top-module tb_pot_accel_top
./obj_dir/Vtb_pot_accel_top
```

The full-size testbench builds in under a minute and simulates in well under a
second. The RTL is plain synthesizable SystemVerilog: `always_ff` and
`always_comb`, one module per file, and the shared constants in
`rtl/pot_pkg.sv`. The two memories are written as arrays with
synchronous reads, so FPGA tools infer block RAM from them.
