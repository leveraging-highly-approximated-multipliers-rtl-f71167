# Control-variate approximate systolic MAC array

A DNN accelerator spends most of its power in the multipliers of its MAC
array. Aggressively approximate 8-bit multipliers save a lot of that power, but
their errors add up over every product of a convolution: the error of an output
has a mean that grows with the filter size k and a variance that grows with k
as well. Without retraining, the accuracy of the network collapses.

This RTL implements the *control variate* fix for that problem. Next to the
approximate sum, each row of the array accumulates a cheap, input-dependent
quantity `x_j` that is strongly correlated with the multiplication error, and
one extra column multiplies that sum by a per-filter constant `C`:

```
G* = B + sum_j AM(W_j, A_j) + V,      V = C * sum_j x_j
```

With `C` chosen offline from the filter's weights, `V` cancels the mean of the
convolution error and removes most of its variance. The cost is one small adder
per processing element and one extra column of `N` units for an `N x N` array.

The design supports three families of approximate multipliers, each tuned by an
approximation level `m`. The array is built for one of them at a time, selected
by a parameter.

## 1. The three approximate multipliers

All operands are unsigned 8-bit. Every approximate product below is a multiple
of `2^m`. The RTL therefore drops those `m` zero bits and carries `AM / 2^m` on
`16 - m` bits.

| kind (`axm_kind_e`) | what is removed | error `W*A - AM` | `x_j` fed to the sumX adder | `C` of a filter |
|---|---|---|---|---|
| `AXM_PERFORATED` (`rtl/axm_perforated.sv`) | the `m` least significant partial products `W*a_i*2^i`, `i < m` | `W * (A mod 2^m)` | `A[m-1:0]` (m bits) | mean of the filter's weights, `E[W]` |
| `AXM_RECURSIVE` (`rtl/axm_recursive.sv`) | the low-part sub-product `W_L*A_L`, where `W_L`, `A_L` are the `m` low bits | `W_L * A_L` | `A[m-1:0]` (m bits) | `E[W mod 2^m]` |
| `AXM_TRUNCATED` (`rtl/axm_truncated.sv`) | every partial-product bit `w_j*a_i` with `i + j < m` | `sum_{i<m} (W mod 2^(m-i)) * a_i * 2^i` | `OR(A[m-1:0])` (1 bit: did any error occur?) | `E[Ŵ]`, with `Ŵ = 1/2 * sum_{i<m} (W mod 2^(m-i)) * 2^i` |

Why these choices of `x_j` and `C` work:

* **Perforated and recursive.** The error is exactly `x_j` times a function of
  the weight: `x_j * W_j` and `x_j * W_L`. Replacing that function by its mean
  over the filter gives the per-output residual error `sum_j x_j * (W_j - C)`.
  This residual has zero mean, and its variance is smallest when `C` is the
  mean. Trained filters have tightly clustered weights, so the residual is
  small.
* **Truncated.** The exact error costs `m` small multiplications. Instead, the
  design only detects whether an error occurred (`x_j = 1` when any of the `m`
  low activation bits is set). `Ŵ_j` is the expected error given that.
  Averaging over uniform activations leaves a mean bias of `sum_j Ŵ_j / 2^m`
  per output. That constant `C0` is not computed in hardware: it is added to the
  filter's bias offline.

The multipliers are written as sums of the partial products (or sub-products)
that remain. The synthesis tool chooses the reduction tree.

## 2. Array organisation

```
              act_in[0]     act_in[N-1]     c_in
                 |              |             |
 w_in[0]  ->  MAC*(0,0) -> ... MAC*(0,N-1) -> MAC+(0)  -> g_out[0]
 B0[7:m]  ->     |              |             |      <- B0[m-1:0]
                 v              v             v
 w_in[1]  ->  MAC*(1,0) -> ... MAC*(1,N-1) -> MAC+(1)  -> g_out[1]
                 ...            ...           ...
```

* **Rows are filters.** Row `i` holds the `N` weights of one filter, one per
  `MAC*` unit, and outputs one result per activation vector. All rows see the
  same activation vector, one row later each.
* **Activations** enter at the top and move down one row per cycle.
* **Two partial sums** move right along a row. `sum` runs on the main adder and
  `sumX` on a separate small adder. The two are independent, so the `sumX`
  adder is off the critical path.
* **The bias is split.** `B[7:m]` enters the first unit of a row as `sum_0`.
  `B[m-1:0]` goes straight to the row's `MAC+`. There it is concatenated below
  `sum_N`, which shifts the reduced sum back into place and adds the low bias
  bits for free: `G* = {sum_N, B[m-1:0]} + C * sumX_N`.
* **Weights and C are stationary.** Weights are loaded through a shift chain
  along each row. The `C` values are loaded through a shift chain down the
  `MAC+` column. Both shift while `load` is high.

A `MAC*` unit (`rtl/mac_star.sv`) registers its activation, weight, partial-sum
and `sumX` inputs. It computes `s_out = s + AM(W,A)/2^m` and
`x_out = x + x(A)` combinationally from those registers. A `MAC+` unit
(`rtl/mac_plus.sv`) registers `sumX`, `sum` and `C`, then computes the exact
product `C * sumX` and the final addition.

### Widths at the default size (N = 64, perforated, m = 2)

| quantity | formula | bits |
|---|---|---|
| accurate accumulator / `G*` (`ACC_W`) | `ceil(log2(N*(2^16-1)))` | 22 |
| `MAC*` main adder (`SUM_W`) | `ACC_W - m` | 20 |
| approximate product | `16 - m` | 14 |
| `sumX` adder (perforated, recursive) | `ceil(log2(N*(2^m-1)+1))` | 8 |
| `sumX` adder (truncated) | `ceil(log2(N+1))` | 7 |
| `MAC+` multiplier | `SUMX_W x 8` | 8 x 8 |

All width formulas are functions in `rtl/cv_pkg.sv`.

## 3. Loading and streaming protocol

This is the part a user must get right. The array has no valid signals and no
skew buffers. It is a bare pipeline, and the surrounding system must present
data at the right cycles.

**Loading.** Hold `load` high for `N` cycles.

* In load cycle `c` (0-based), put the weight for column `N-1-c` of every row
  on `w_in[i]`. The first value shifted in ends up in the rightmost unit.
* In the same cycle, put the `C` of row `N-1-c` on `c_in`. The first `C`
  shifted in ends up in the bottom row.

Then drive `load` low, and set `bias[i]` to row `i`'s 8-bit bias. The bias port
is static: hold it for as long as the filters are in use. Changing weights
while vectors are in flight corrupts those vectors. Let the pipeline drain
(`2N` cycles) before a reload.

**Streaming.** Vector `t`, element `h` must be on `act_in[h]` in the cycle
before clock edge `E + t + h`. Each column is delayed by its index. One new
vector can start every cycle. Slots not covered by a vector may carry anything.

**Results.** The result of row `i` for vector `t` is on `g_out[i]` from clock
edge `E + t + N + i` until the next edge. Every row therefore has `N + 1`
register stages: one per `MAC*`, plus one for the `MAC+` column. This is one
cycle more than the same array with exact multipliers. `g_out` is combinational
from the `MAC+` registers, so register it at the consumer if needed.

The arithmetic wraps modulo `2^ACC_W`. `G*` approximates a convolution that
fits the accurate accumulator's width, so it stays in range. The exception is
when the exact result sits at the very top of that range and `V` overshoots the
error; no overflow flag is provided.

## 4. Preparing C and the bias

Per filter, over its `k = N` weights, with `C` rounded to an 8-bit integer:

* perforated: `C = round(mean(W_j))`, `C0 = 0`
* recursive: `C = round(mean(W_j mod 2^m))`, `C0 = 0`
* truncated: `C = round(mean(Ŵ_j))`, `C0 = sum_j Ŵ_j / 2^m`. Load
  `B + C0` as the bias.

`C` and the bias are 8-bit ports. With the truncated multiplier at `m = 7`,
`Ŵ` can reach 384 and `B + C0` can exceed 255. Clamp both. The end-to-end
testbenches (`tb/tb_array_harness.sv`) contain a reference implementation of
this preparation.

## 5. Parameters

| parameter | default | meaning |
|---|---|---|
| `KIND` | `AXM_PERFORATED` | multiplier family of every `MAC*` |
| `M` | 2 | approximation level `m`. Use 1..7; the published evaluation uses perforated 1-3, recursive 2-4 and truncated 5-7 |
| `N` | 64 | array size: `N` rows, `N` `MAC*` columns plus one `MAC+` column. The published evaluation uses 16, 32, 48 and 64 |
| `ACC_W` | `acc_width(N)` | result width |

## 6. Relation to the published design

These parts follow the published description:

* the three multipliers and their error formulas;
* the `MAC*` equations, including `x_j` and the split bias;
* the `MAC+` equations and the sizes of every adder and multiplier;
* the `N+1`-column arrangement, the one-cycle latency overhead, and the
  unpipelined `MAC+`;
* the directions of data flow (activations down, weights in from the left,
  partial sums right, `C` down the extra column).

These choices are this design's own, made where the description is silent:

* weight and `C` loading by shift chains, and the order of those shifts;
* a static bias port, with `B[m-1:0]` wired directly to `MAC+`;
* an asynchronous active-low reset that clears every register;
* unsigned arithmetic only;
* the host-side skew/de-skew timing of section 3.

Where this design departs from the published description:

* **Multiplier input.** The unit drawings label the multiplier's activation
  input `A[7:m]`. That only matches the perforated multiplier. The recursive and
  truncated products also depend on the low activation bits, so the whole
  activation byte is used.
* **`sumX` width.** The published width for the truncated `sumX` adder is
  `ceil(log2(N))`. For the other two multipliers it is
  `ceil(log2(N*(2^m-1)))`. Both are one bit short whenever the largest possible
  sum is a power of two, because that sum then does not fit. This is always the
  case for the truncated adder, and for the other two at `m = 1`. This design
  uses `ceil(log2(max+1))`. For the default `N = 64, m = 2` the width is the
  same 8 bits. For the truncated adder at `N = 64` it is 7 bits instead of 6.

Not included: weight and activation memories, skew buffers, accumulation of
dot products longer than `N` across passes, and the host. The published design
takes these from a TPU-like accelerator and does not describe them.

## 7. Verification

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_axm_perforated`, `tb_axm_recursive`, `tb_axm_truncated` | All 65536 operand pairs at each published `m`, compared with the error formulas. Over uniform inputs, the error mean and standard deviation also match the published error table, e.g. perforated m=2 gives 191.25 / 198.6 (table: 191 / 198), truncated m=7 gives 192.25 / 115 (table: 192 / 115). |
| `tb_mac_star` | One unit of each kind with random operands: exact `s_out`, `x_out`, `a_out`. The weight is held while `w_load` is low. One-cycle latency. |
| `tb_mac_plus` | `G* = {s, b_lo} + C*sumX`, including wrap-around. The `C` register is held. |
| `tb_cv_systolic_array` | 8 x 9 arrays of all three kinds, two load phases each (one reload), 40 vectors per phase. Every output is compared bit-exactly at its due cycle. Each mechanism (load, reload, `V != 0`, `x_j = 0`, nonzero low bias) must occur. |
| `tb_cv_configs` | All nine published `(kind, m)` configurations on 16 x 17 arrays. Outputs are bit-exact, and `V` must reduce the mean absolute error. |
| `tb_cv_systolic_array_full` | The default 64 x 65 array, two load phases of 96 vectors: 12288 outputs checked. |

The end-to-end testbenches draw filters whose weights cluster within ±12 of a
random centre. Across those filters, the mean absolute output error with `V`
is 4 to 120 times smaller than without it: about 4x for recursive m = 2,
whose error is already small, about 10x for the truncated multiplier, and
about 100x for the perforated one. At N = 64 with perforated m = 2, it is
about 56 against about 11000.

These tests show that the RTL computes the stated arithmetic. They do not
reproduce the published network accuracies, which need full CNN inference.

## 8. Simulating

All files are SystemVerilog-2017. `rtl/cv_pkg.sv` must be read first. A
testbench is built with Verilator like this:

```
verilator --binary --timing -Wno-fatal --top-module tb_cv_systolic_array \
    -y rtl -y tb +libext+.sv rtl/cv_pkg.sv tb/tb_cv_systolic_array.sv
obj_dir/Vtb_cv_systolic_array
```

To build another testbench, replace the module name. At the default size
(`tb_cv_systolic_array_full`), the Verilator build takes about 5 minutes and
1.2 GB of memory; the simulation itself takes under a second. To change the
configuration, override `KIND`, `M` and `N` on `cv_systolic_array`. The
harness in `tb/tb_array_harness.sv` takes the same parameters, and computes the
matching `C` values and expected outputs.
