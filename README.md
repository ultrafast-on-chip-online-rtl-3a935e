# Online-learning Kolmogorov–Arnold network kernel

This is synthesizable SystemVerilog for a small neural network that learns
while it runs. On every input sample it makes a prediction, takes one feedback
value per output, and applies one stochastic-gradient step to its own
parameters, all on chip and with a fixed cycle count. The network is a
Kolmogorov–Arnold network (KAN). A KAN layer has no weight matrix. Each edge
from input `p` to output `q` carries a learnable one-dimensional function
`phi_qp`, and each output sums its edges:

    y_q = sum_p phi_qp(x_p),     phi_qp(x) = sum_{i=0}^{G+S-1} w_qpi * B_i(x)

`B_i` are B-splines of order `S` on a uniform grid of `G` cells. There are
`G+S` coefficients per edge.

The property the hardware exploits is that B-splines are **local**. At any
input value exactly `S+1` of them are non-zero. So one sample reads `S+1`
coefficients per edge for the forward pass and changes only those same `S+1`
in the update. The gradient of a coefficient is

    dL/dw_qpi = g_q * B_i(x_p),    g_q = dL/dy_q,

and it is zero for every other coefficient. Raising `G` therefore adds
storage but no arithmetic. The compute per sample stays at
`IN * OUT * (S+1)` multiply-adds whatever the grid resolution. The spline
values are also bounded: `0 <= B_i <= 1` and `sum_i B_i = 1`. A layer output
therefore stays within the range of its coefficients, and a gradient is never
larger in magnitude than `g`. This keeps narrow fixed-point formats usable for
training (7 bits in the default configuration).

The design follows an FPGA online-learning kernel described in the literature
(Hoang, Gupta, Harris, "Ultrafast On-Chip Online Learning via Spline Locality
in Kolmogorov–Arnold Networks"). That kernel was written in C++ for high-level
synthesis. This RTL keeps its algorithm, storage organisation, number formats
and configurations. The control schedule and the interfaces are this design's
own; the last sections list where it departs.

## Configurations

| Parameter set | Layers | Grid `G` | Order `S` | Format `<W,I>` | Rate | Coefficients |
|---|---|---|---|---|---|---|
| **default**: single-shot qubit readout | [2,7,1] | 10 | 3 | <7,3> | 0.05 | 273 |
| drifting regression | [1,1] | 10 | 3 | <6,2> | 0.5 | 13 |
| Acrobot actor-critic | [6,4] | 5 | 1 | <22,8> | 0.001 | 144 |

`<W,I>` is a signed fixed-point number of `W` bits. `I` of them are integer
bits, sign included, so `<7,3>` covers [-4, 4) in steps of 1/16. The
learning rate is itself stored in the coefficient format, so 0.05 becomes
1/16 in `<7,3>`. The second and third rows are reached through top-level
parameters (`NUM_LAYERS=1`, `D_IN`, `D_OUT`, `G`, `S`, widths, `ETA`,
`GRID_MIN/MAX`); the testbenches `tb_kan_regression` and `tb_kan_acrobot_cfg`
show the exact settings.

## Per-sample arithmetic

Take one layer, input `p`, output `q`. Let `k` be the grid cell that holds
`x_p`, and let `b[r]` and `db[r]` (r = 0..S) be the values and slopes of the
`S+1` active splines in that cell. The active coefficient of slot `r` is
`w[k+r]`.

* **Forward**: `y_q = round( sum_p sum_r w_qp[k_p+r] * b_p[r] )`.
* **Update**: `w_qp[k_p+r] <- round( w_qp[k_p+r] - eta * g_q * b_p[r] )`,
  for r = 0..S only.
* **Gradient to the previous layer**:
  `dL/dx_p = round( sum_q g_q * sum_r w_qp[k_p+r] * db_p[r] )`. The gradient
  uses the coefficients as they were before this sample's update, the usual
  backpropagation order.

In a two-layer network the first layer's `g` is the second layer's
`dL/dx`. No activation function sits between layers, because the splines are
the nonlinearity. There are no bias terms and no extra "base" activation per
edge. The parameter counts of all three configurations
(13 = 1·1·13, 273 = 21·13, 144 = 24·6) contain spline coefficients only.

**Rounding.** Every product and sum is carried exactly, in a 128-bit
intermediate. Each stored result is rounded once: a layer output, an input
gradient, or an updated coefficient. Rounding is to nearest with ties to even
(convergent), followed by saturation to the format's range. `kan_pkg` holds
this step as `fx_round_sat`. The choice matters at these widths. Rounding
each partial product separately would give different low bits and, at 7 bits,
visibly different learning.

**Number formats.** The top has three: input `<XW,XI>`, coefficient
`<WW,WI>` and output/feedback `<OW,OI>`. The hidden activations between layers
are rounded to the input format, because they feed the next layer's grid
mapper. Gradients between layers use the output format. The spline tables and
the learning rate use the coefficient format.

## From an input value to table entries

`kan_grid_map` and `bspline_lut` are where this design departs most from a
textbook KAN, and where most of the detail lies.

**Cell and bin.** The grid covers `[GRID_MIN, GRID_MAX)` with `G` cells of
width `H`. For an input `x`, the mapper forms `t = (x - GRID_MIN) / H`,
clamps it to `[0, G)`, and keeps `F` fractional bits. The integer part is the
cell `k` and the fraction bits are the bin `u`, giving `2^F` bins per cell
(`F = 4`). An input below the grid maps to cell 0, bin 0. An input at or above
the top maps to the last bin of cell `G-1`. This is the clamp, and `ev_clamp`
reports it. `H` need not be a power of two (the default is 0.8). The
division is therefore a multiplication by a reciprocal constant, with
`2*ceil(log2(span))+1` fractional bits, enough that `floor` is exact for every
input code. The testbench checks this against integer division for all codes.

**Context.** The `(k, u)` pair of every input is registered when the layer
maps its inputs. That pair is the layer's context. The backward pass reads it
again instead of recomputing it, so the inputs need not be held after they are
accepted. One entry is kept per input `p`, shared by the `OUT` edges of that
input.

**Tables.** Cell-relative, the `S+1` active splines are the same polynomial
pieces in every cell of a uniform grid. A single table indexed by `u`
therefore serves all cells:

    b[r]  = B_r(xi_u)                 value of the r-th active spline
    db[r] = dB_r/dxi(xi_u) * (1/H)    slope per unit of x

`xi_u = (u + 0.5) / 2^F` is the centre of bin `u`. Slot `r = 0` is the
leftmost active spline, which is coefficient `k`. For cubic splines
`b = ((1-xi)^3, 3xi^3-6xi^2+4, -3xi^3+3xi^2+3xi+1, xi^3) / 6`. The tables are
not read from a file. `kan_pkg` computes them at elaboration, exactly in
integer arithmetic, from

    B_r(xi) = 1/S! * sum_{j=0}^{S+1} (-1)^j C(S+1,j) (xi + S - r - j)_+^S

with the derivative taken term by term. Each entry is then rounded like any
other value into the coefficient format. At 4 fractional bits the cubic values
are coarse; they still sum to 1 ± 2 LSB in every bin. Each layer input gets
its own copy of the table, a small ROM, so all inputs are read at once.

## Coefficient storage

`kan_coeff_store` holds one edge's `G+S` coefficients in `S+1` banks. The
banking is cyclic: coefficient `c` sits in bank `c mod (S+1)` at row
`c div (S+1)`. The active window `k..k+S` is `S+1` consecutive indices, so it
touches every bank exactly once. Each bank therefore needs only one read port
and one write port, and the whole window is read and written back in one
cycle. The store rotates data between bank order and slot order. Bank `b`
serves slot `(b - k) mod (S+1)`. The host port (`cfg_*`) reads or writes any
single coefficient. Reset clears all coefficients to zero.

Zero is a valid start for a single layer. It is not a useful start for two
layers: with all second-layer coefficients at zero, no gradient reaches the
first layer. The host should load small random values before learning.
`tb_kan_qubit_readout` does this.

## Sample protocol and timing

`kan_ctrl` runs one fixed schedule per sample. Its latency never depends on
the data. For the default two layers:

| Clock edge | Action | Interface |
|---|---|---|
| 0 | input handshake; layer 0 maps `in_x` into its context | `in_valid && in_ready` |
| 1 | layer 0 evaluates and registers the hidden values `h` | |
| 2 | layer 1 maps `h` | |
| 3 | layer 1 evaluates and registers `out_y` | `out_valid` high after this edge |
| F | feedback handshake; layer 1 updates, registers `dL/dh` | `fb_valid && fb_ready` |
| F+1 | layer 0 updates and registers `in_grad`; back to idle | `in_ready` high after this edge |

In general the forward pass takes `2*NUM_LAYERS` edges, handshake included,
and the backward pass `NUM_LAYERS`. If `zero_grad` is high with the feedback,
no coefficient changes and the kernel returns to idle at once; this serves
inference without learning. Both handshakes are valid/ready: the source holds
`valid` and data until the edge where `ready` is also high. Assertions in
`kan_ctrl` check this. The next input is accepted only after the feedback of
the previous one has been applied. The protocol is strictly
predict–feedback–update, so every prediction comes from the parameters as
updated by all earlier samples.

`fb_grad` is `dL/dy` in the output format. For a squared-error loss it is the
prediction minus the target, up to a factor that can be folded into the
learning rate. For a classifier trained on ±1 labels it is the same with the
label as target. For actor-critic it is the policy/value error. The kernel
does not compute losses.

At 200 MHz the default schedule is 20 ns forward and 10 ns backward. The HLS
kernel it follows reports 80 ns and 60 ns for the same network. The
difference comes from doing each layer step in a single cycle, with a long
combinational path: multiply, sum over up to `IN*(S+1)` products, round. No
timing closure has been run on this RTL. A fabric target at 200 MHz will
likely need pipeline registers inside `kan_layer`. The schedule in `kan_ctrl`
is the place to add those cycles.

## Files

| File | Contents |
|---|---|
| `rtl/kan_pkg.sv` | rounding/saturation, exact B-spline table arithmetic |
| `rtl/kan_grid_map.sv` | input → (cell, bin), clamp, context register |
| `rtl/bspline_lut.sv` | value and slope tables of the active splines |
| `rtl/kan_coeff_store.sv` | one edge's coefficients in `S+1` cyclic banks |
| `rtl/kan_edge.sv` | one edge: forward sum, in-place update, gradient share |
| `rtl/kan_layer.sv` | `IN x OUT` edges, reductions, output/gradient rounding |
| `rtl/kan_ctrl.sv` | per-sample schedule and handshakes |
| `rtl/kan_online_top.sv` | one or two layers, controller, host port |

Resource size of the default top after generic synthesis: about 6,700
word-level cells and 2,600 flip-flop bits, plus the tables. For scale, the
published HLS kernel for the same network used about 10,600 LUTs, 3,900
flip-flops and 84 DSP blocks after place and route, with 140 ns per update.

## Simulation

All testbenches are self-checking. Each prints `TB_RESULT checks=N failures=M`.
Build and run any of them with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/kan_pkg.sv tb/kan_ref_pkg.sv tb/tb_kan_full.sv --top-module tb_kan_full
    ./obj_dir/Vtb_kan_full

`tb/kan_ref_pkg.sv` is the reference arithmetic. It is written independently
of the RTL helpers: the spline tables come from the Cox–de Boor recursion in
real arithmetic, the grid mapping from integer division, and rounding from
division and remainder.

| Testbench | What it shows |
|---|---|
| `tb_kan_grid_map` | every input code, power-of-two and odd grid spans, clamping, context hold |
| `tb_bspline_lut` | every table entry for cubic <7,3> and linear <22,8> tables; partition of unity |
| `tb_kan_coeff_store` | window reads/writes for every cell with 4 and 3 banks |
| `tb_kan_edge` | forward sum, update, gradient share and saturation flag at two learning rates |
| `tb_kan_layer` | a 2x3 layer bit-exact over 200 samples, context reuse, clamping |
| `tb_kan_ctrl` | the schedule for 2 and 3 layers, handshake gaps, `zero_grad` |
| `tb_kan_online_top` | [2,7,1] end to end, bit-exact, with a narrowed grid so inputs clamp; counts forward passes, updates, `zero_grad` skips, clamps, saturations, first-layer updates |
| `tb_kan_full` | the default parameters unchanged, 2000 samples bit-exact |
| `tb_kan_regression` | the drifting-regression task (target changes at t = 500 and 1000); cumulative regret about 24 against about 620 for a learner that never updates |
| `tb_kan_qubit_readout` | the benchmark's synthetic readout stream (four Gaussian IQ clusters labelled by parity, Kerr phase twist, slow rotation and breathing, with the published stream parameters); about 89% accuracy over the last 1000 of 6000 samples |
| `tb_kan_acrobot_cfg` | the [6,4], S=1, <22,8> configuration bit-exact on random states and feedback |
| `tb_kan_acrobot_control` | the same configuration in closed loop: Acrobot swing-up with link masses and length re-drawn every episode, softmax action sampling and 3-step actor-critic feedback computed by the bench; mean return rises from about -495 to about -130 over 160 episodes (the task counts as solved near -100) |

The published HLS kernel reaches 13.2 regret and 92.8% readout accuracy. The
RTL gets close to both, though it is not bit-identical to that kernel: grid
range, LUT resolution and the rounding points are choices made here. For the
Acrobot task the published kernel reaches the solved regime in about 300
episodes; the closed-loop bench stops at 160 to keep the run short. Its
input scaling, return horizon, discount and feedback limit are the bench's
own choices, since the source does not state them.

## Choices not fixed by the source design

* Grid range: default [-4, 4), the whole `<7,3>` input range. The regression
  testbench uses [-1, 1), the Acrobot one [-8, 8).
* LUT resolution `F = 4`, with tables sampled at bin centres.
* Tables stored in the coefficient format, with the `1/H` factor folded into
  the slope table.
* Exact intermediates with one convergent rounding per stored value. The
  source keeps its accumulators in the coefficient format, so its sums can
  differ in the last bits, and they saturate where a partial sum would leave
  the range.
* Old coefficients used for the input gradient.
* Valid/ready handshakes, a one-step-per-cycle schedule, `zero_grad` sampled
  with the feedback, and `fb_grad` carrying `dL/dy`.
* Reset to zero, a host port for coefficient loading and read-back, and the
  `ev_clamp`/`ev_sat` event outputs.

## Not included

* The dense multilayer-perceptron kernel that the source compares against,
  and its LayerNorm variants. These are baselines, not part of this design.
* Partial unrolling for very wide inputs. The source unrolls less above 256
  inputs; this RTL instantiates every edge in parallel.
* Any loss, softmax or advantage computation, and the host software.
* Device-specific memory mapping. Coefficients and tables are written as
  plain arrays; synthesis decides between flip-flops and distributed RAM.
