# Control-variate approximate systolic MAC array

Most of the power of a DNN accelerator goes into its multipliers. One way to save it is to
use a *perforated* multiplier: an 8x8 array multiplier that simply does not generate its
`m` least significant partial products. It is smaller and faster. But each product then
misses `W * (A mod 2^m)`, always in the same direction, and over a convolution of length
`k` the missing amounts pile up. Their mean grows as `k`, and so does their variance.

The control-variate array corrects most of that error with almost no hardware. The
dropped term of product `j` is `W_j * x_j`, where `x_j = A_j[m-1:0]` is the low bits of the
activation. If each weight is replaced by one constant `C` per filter, the whole row's
error is estimated by a single product:

    V = C * sum_j x_j,        with C = mean of the filter's weights

Adding `V` at the end of the row makes the expected convolution error zero. The remaining
error is `sum_j x_j * (W_j - C)`, so its variance is
`(2^m-1)(2^m+1)/12 * sum_j (W_j - C)^2`. That is small, because trained filters have their
weights bunched around their mean. `C` is computed offline and sent with the weights, one
byte per filter.

In hardware this costs one running sum of `m`-bit values per MAC unit, plus one extra
column of units at the end of the rows. The extra column adds one clock of latency to the
array.

## Arithmetic

The design uses 8-bit unsigned weights `W`, activations `A` and biases `B`. The width of a
row result is `ACC_W = ceil(log2(N*(2^16-1)))`. The exact result of row `r` is

    G = B + sum_{j=1..N} W_j * A_j

and the array returns

    G* = {sum_N, B[m-1:0]} + C * sumX_N
       where sum_0  = B[7:m],  sum_j  = sum_{j-1}  + W_j * A_j[7:m]
             sumX_0 = 0,       sumX_j = sumX_{j-1} + A_j[m-1:0]

    G* = G - sum_j A_j[m-1:0] * (W_j - C)

Every product `W_j * A_j[7:m]` is an exact multiple of `2^m`. So the partial-sum chain
carries the sum divided by `2^m`, and its adder is `m` bits narrower. To match that, the
first unit of a row is seeded with the bias without its low bits, `B[7:m]`. The last unit
appends the missing bits `B[m-1:0]` below the finished sum. That single concatenation puts
the sum back at its true weight and restores the bias bits, so no shifter is needed.

Widths at the default configuration (`N = 64`, `m = 2`):

| quantity | formula | bits |
|---|---|---|
| perforated product `W*A[7:m]` | `16 - m` | 14 |
| partial sum `sum_j` | `ACC_W - m` | 20 |
| `sumX_j` | `ceil(log2(N*(2^m-1)))` | 8 |
| `V = C * sumX_N` | `XW + 8` | 16 |
| `G*` | `ACC_W` | 22 |

The ceiling-log width rules are written as `$clog2(x + 1)`, the number of bits that hold
`x` itself. This agrees with `ceil(log2(x))` except when `x` is an exact power of two. For
example, at `N = 64, m = 1`, `sumX` can reach 64 and needs 7 bits, not 6.

## Array organisation

```
             a_in[0]    a_in[1]         a_in[N-1]    c_in
               |          |                |           |
 w_in[0],b_in[0] -> MAC*(0,0) -> MAC*(0,1) -> ... -> MAC*(0,N-1) -> MAC+(0) -> g_out[0]
               |          |                |           |
 w_in[1],b_in[1] -> MAC*(1,0) -> ...                       ... -> MAC+(1) -> g_out[1]
               :          :                :           :
```

* **MAC\*** (`mac_star`): has registers for `A`, `W`, `S` (the partial sum) and `X`
  (`sumX`). It computes `S + W*A[7:m]` with the perforated multiplier (`perforated_mult`).
  In parallel it computes `X + A[m-1:0]` with a ripple-carry adder
  (`ripple_carry_adder`). That adder is off the critical path, so the slowest and
  smallest adder form is enough. `A` goes on down the column. `W` goes on along the row,
  but only while loading.
* **MAC+** (`mac_plus`): has registers for `S`, `B[m-1:0]`, `X` and `C`. It computes
  `{S, B[m-1:0]} + C*X` with an exact `XW x 8` multiplier and an `ACC_W`-bit adder. `C`
  goes on down the MAC+ column, but only while loading.
* **Bias low bits**: each row has an `N`-stage, `m`-bit delay line that carries
  `B[m-1:0]` beside the partial-sum chain. It arrives at the MAC+ together with `sum_N`.

The array is weight-stationary: row `r` holds the `N` weights of filter `r` and that
filter's `C`. Each input vector of `N` activations is shared by all rows, so one pass
produces the results of `N` filters.

## Using the array (`cv_mac_array`)

Ports: `clk`, `rst_n` (asynchronous, active low, clears every register), `load`,
`w_in[N]`, `c_in`, `a_in[N]`, `b_in[N]`, and `g_out[N]` (`ACC_W` bits each).

**Loading.** Hold `load` high for `N` clocks. In load clock `k` (0-based), drive
`W[r][N-1-k]` on `w_in[r]` for every row, and `C[N-1-k]` on `c_in`. The last column's
weight goes in first because the weights shift right, and the last row's `C` goes in
first because `C` shifts down. While `load` is low, all weights and `C` values hold and
`w_in` and `c_in` are ignored. Do not load while a stream is in flight: the array has no
second weight buffer.

**Streaming.** Number the clock edges so that edge `t0` is the first edge of vector 0.
Vector `i` uses these inputs and outputs:

* `a_in[j]` holds `A_i[j]` in the clock before edge `t0 + i + j` (skewed by column).
* `b_in[r]` holds `B_i[r]` in the clock before edge `t0 + i + r` (skewed by row).
* `g_out[r]` holds `G*_i[r]` after edge `t0 + i + r + N`, for one clock.

One vector can enter per clock. The latency from a row's bias to its result is `N + 1`
clocks: `N` MAC\* stages plus the one MAC+ register stage, which is one clock more than an
accurate array.

**Choosing `C`.** Use the rounded mean of the filter's weights. The correction still works
with other values of `C`, but with `C = 0` the array behaves like a plain perforated
array.

**Parameters.** Set `N` (array size) and `M` (perforated partial products, 1..7) on
`cv_mac_array`. Every width follows from them through the functions in `cv_pkg`.

## What follows the published design and what does not

Taken from the design as published:

* the MAC\* and MAC+ equations and register sets;
* the widths: 20/8/22 bits at `N = 64, m = 2`;
* the extra column of MAC+ units and its one-clock latency;
* the flow directions: activations down, partial sums and `sumX` along the rows, `C`
  down the last column;
* the ripple-carry `sumX` adder;
* the seeding with `B[7:m]` and the `{sum_N, B[m-1:0]}` concatenation.

Choices of this implementation, where the published description is silent:

* **Unsigned 8-bit operands.** The accumulator bound `N*(2^16-1)` implies unsigned
  products. A signed-weight version would need a signed `C`, signed sums and
  sign-extension in the MAC+ unit.
* **Stationary weights and `C`** held under a `load` enable, loaded through the row and
  column shift chains. The published figures show the weight and `C` registers passing
  their values on, but no load protocol.
* **The bias delay line** that carries `B[m-1:0]` to the MAC+ unit. Only the use of these
  bits is described, not how they get there. Its cost is `m*N` flip-flops per row.
* **The input skew convention and the reset behaviour.**
* **Plain SystemVerilog arithmetic** in place of vendor-optimised components. The
  perforated multiplier is written as explicit partial-product rows, `m..7`, summed
  together.

Not included:

* the buffers, memories, accumulators and control of a complete accelerator;
* the computation of `C`, which happens offline;
* the accurate baseline array.

## Running a layer larger than the array

A convolution layer whose filters have `k > N` weights, or that has more than `N` filters,
takes several passes. Each pass loads an `N x N` tile of weights, and the partial results
of the passes are added outside the array. Give every pass of a filter the same `C` (the
mean of the whole filter) and give the bias only in the first pass. The correction is
linear, so the summed result is exactly what one long row would give:
`G* = G - sum over all k weights of A[m-1:0] * (W - C)`.

`tb/tb_conv_layer.sv` runs a layer this way on a 16x16 array with `m = 2`. The layer is a
3x3 convolution with 16 input channels and 16 filters (`k = 144`), computed as 9 passes,
one per kernel tap, over a 4x4 output map. Over the 256 layer outputs, the RMS error was
138 with the correction and 29183 without it. The mean error was 8 with the correction and
27901 without it. The layer outputs themselves are around 2.4 million.

## Accuracy to expect

The array-level testbench reports the error with and without the correction. Each row has
8 inputs, and most filters are random weights bunched around a random centre. Over 960
row results for each `m`, the RMS error of the row sum was:

| `m` | RMS error without `V` | RMS error with `V` | mean error without `V` | mean error with `V` |
|---|---|---|---|---|
| 1 | 586 | 46 | 516 | -2.3 |
| 2 | 1757 | 115 | 1570 | -2.0 |
| 3 | 3882 | 226 | 3385 | 1.6 |

The default 64x64 array with `m = 2` (the large-array testbench with `N = 64`), over 16384
row results, gave an RMS error of 343
with `V` and 13245 without it. The mean error was -0.4 with `V` and 12461 without it.

The error grows quickly with `m`, so `m = 1` or `m = 2` is the practical range.

## Files

| file | contents |
|---|---|
| `rtl/cv_pkg.sv` | operand width, default `N` and `m`, width functions |
| `rtl/perforated_mult.sv` | `W * A[7:m]` multiplier |
| `rtl/ripple_carry_adder.sv` | ripple-carry adder for `sumX` |
| `rtl/mac_star.sv` | MAC\* unit |
| `rtl/mac_plus.sv` | MAC+ unit |
| `rtl/cv_mac_array.sv` | the `N x (N+1)` array (top) |
| `tb/tb_perforated_mult.sv` | exhaustive multiplier test, `m = 1, 2, 3` |
| `tb/tb_mac_star.sv`, `tb/tb_mac_plus.sv` | single-unit tests with a per-clock reference model |
| `tb/cv_array_tester.sv` | stimulus and checker for the array (not a testbench by itself) |
| `tb/tb_cv_mac_array.sv` | 8x8 arrays with `m = 1, 2, 3`: three weight loads, 40 vectors each |
| `tb/tb_cv_mac_array_large.sv` | a 32x32, `m = 2` array: two loads, 128 vectors each (set `N = 64` for the default size) |
| `tb/tb_conv_layer.sv` | a 3x3x16 convolution layer run in 9 passes on a 16x16 array |

Each testbench compares every result with an independent model computed from the exact
convolution. Each prints `TB_RESULT checks=<n> failures=<n>` and stops itself with a
failure if a watchdog expires.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cv_pkg.sv tb/tb_cv_mac_array.sv \
          --top-module tb_cv_mac_array
./obj_dir/Vtb_cv_mac_array
```

Replace the name to run another testbench. The 64x64 default array generates a large C++
model. Building it (`tb_cv_mac_array_large` with `N = 64`) takes tens of minutes on one
core, so pass `-j 0` to build in parallel. The 32x32 model builds in about two minutes.
Either simulation takes under a second. The 64x64 run passed all 16450 of its checks.
