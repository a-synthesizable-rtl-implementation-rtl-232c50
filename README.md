# A predictive-coding network in synthesizable SystemVerilog

<!--
Documentation of the RTL in rtl/ and of its testbenches in tb/: what the
network computes, how one neuron schedules a tick, how neurons exchange
values, how the tick is controlled, where the design departs from its
source description, and how to simulate it with plain verilator.
-->

This design is a network of neurons that learns without backpropagation.
Each neuron is a small, self-contained hardware unit (a *neural core*) that
holds one scalar state, one prediction error and the weights of its incoming
connections. The network learns by *predictive coding*: every layer tries to
predict the layer below it from the layer above it, and every neuron nudges
its own state and its own weights so as to shrink its local prediction
error. No neuron ever needs a global error signal, a stored forward pass or
a weight-transport network: it only talks to the neurons of the two
adjacent layers, over fixed point-to-point wires.

Computation advances in **ticks**. In one tick every core, in parallel,
runs the same short fixed schedule: form its prediction, form its error,
collect the error feedback from below, send its own feedback up, update its
weights, update its state. Supervised training and inference differ only in
what is applied from outside: which neurons are pinned to given values
(*clamped*) and whether the learning rate is zero.

All arithmetic is IEEE-754 single precision (binary32) with round to
nearest even, on one fused multiply-add design.

The default build is the network used for the main regression experiment:
2 inputs, 4 hidden neurons with ReLU, 3 outputs (written 2 → 4 → 3).

## 1. What a tick computes

Layers are numbered from the output: layer 0 is the output layer, layer
L-1 the input layer. Layer l is predicted from layer l+1 through the weights
θ⁽ˡ⁾. For neuron *i* of layer *l*, with N neurons in the layer above and M in
the layer below, one tick performs

```
x_eff  = x_obs            if the neuron is clamped this tick
       = x                otherwise

mu     = sum_{j<N} θ[i][j] * f(x_above[j])  +  θ[i][N] * 1        (bias lane)
eps    = x_eff - mu
b      = sum_{k<M} back_below[k]          where back_below[k] = θ_below[k][i] * eps_below[k]
back[j]= θ[i][j] * eps          for j < N, sent to neuron j of the layer above
θ[i][j]+= alpha * eps * f(x_above[j])     (j < N)
θ[i][N]+= alpha_bias * eps                (bias lane)
x      = x_obs                            if clamped and CLAMP_HARD = 1
       = x + gamma * (f'(x_eff) * b - eps)  otherwise
```

`f` is the activation of the layer above (applied inside the receiving
neuron: states travel between layers as raw values), `f'` the derivative of
the neuron's own layer activation, evaluated at `x_eff`. The state update is
one explicit Euler step of gradient descent on the sum of squared prediction
errors; the weight update is the matching local, Hebbian-like gradient step.
`gamma` is the state step size, `alpha` the learning rate, `alpha_bias` the
bias lane's own rate (0 freezes the biases).

The term `f'(x_eff) * b` is what replaces backpropagation: `b` is the
weighted sum of the errors of the layer below, and it pulls a hidden
neuron's state towards the value that would have explained the layer below
better. Learning comes from holding the input and the output layers clamped
while the hidden states settle and the weights follow their local errors.

## 2. The neural core and its schedule (`pc_neural_core`)

The core does not compute the sums in parallel. One multiply-add unit walks
over the indices, one operation per cycle, so the cost of a tick grows
linearly with the fan-in. The schedule is fixed and does not depend on
whether the tick is an inference or a learning tick:

| Stage   | Cycles | Main multiply-add each cycle          | Stored result              |
|---------|--------|---------------------------------------|----------------------------|
| PRED    | N+1    | `acc = θ[j] * f(x_above[j]) + acc`, bias lane (feature 1) last | `acc` = mu |
| ERR     | 1      | `eps = acc * (-1) + x_eff`            | `eps`, and `f'(x_eff)`     |
| BACKSUM | M      | `b = 1 * back_below[k] + b`           | `b`                        |
| BACKVEC | N      | `back[j] = θ[j] * eps`                | the upward products        |
| WUP     | N+1    | bias lane first: `θ[N] = alpha_bias * eps + θ[N]`; then `θ[j] = (alpha*eps) * f(x_above[j]) + θ[j]` | weights |
| STATE   | 1      | `x = gamma * (f'*b - eps) + x`, or `x = x_obs` (hard clamp) | state |

A tick therefore takes **3N + M + 4 cycles**. Stages with no work (N = 0
for the input layer, M = 0 for the output layer) are skipped. `busy` is high
for exactly those cycles, and `done` pulses in the cycle after STATE.

Two stages need a second product in the same cycle. The core has a second,
*auxiliary* multiply-add unit for them: in the first WUP cycle it forms
`alpha * eps` (rounded once and kept in a register for the remaining lanes),
and in the STATE cycle it forms `f'(x_eff) * b - eps`, which feeds the main
unit combinationally, so the state update is two chained fused operations in
one cycle. This is the longest combinational path of the design. Every
other result is a single rounded FMA; the rounding points are:

* `mu` is accumulated with one rounding per lane; the accumulator starts at
  -0 so the first product is taken exactly.
* `eps` is `x_eff - mu` rounded once.
* The weight update rounds `alpha*eps` once and then `ae * f + θ` once.
* The state update rounds `f'*b - eps` once and then `gamma * (...) + x` once.

The testbench reference model rounds at exactly these points, so it tracks
the hardware to within a relative 1e-5, except where tanh is involved
(section 6).

**Clamping.** `x_set_en` and `x_obs` are sampled on the start pulse and
hold for the tick. A clamped neuron uses `x_obs` in its error and in its
derivative gate; with the parameter `CLAMP_HARD = 1` (default) it also
stores `x_obs` as its state at the end of the tick. With `CLAMP_HARD = 0`
the observation only steers the tick and the stored state keeps following
its own dynamics.

**Inference and learning.** With `alpha = alpha_bias = 0` the WUP stage
still runs but adds zero to every weight (`0 * eps * f + θ` is θ for every
finite θ), so inference is the same schedule with different inputs.

## 3. How neurons exchange values: published snapshots

This is the part of the design where most of the timing subtlety lies.

Each core sends two things to its neighbours over dedicated wires: its
state `x` downward, to every neuron of the layer below (which reads it in
PRED and WUP), and its products `θ[j] * eps` upward, one to each neuron *j*
of the layer above (which sums them in BACKSUM). Layers have different
fan-ins, so their schedules have different lengths and reach each stage at
different cycles. If a core read its neighbour's live registers, what it
got would depend on the relative lengths of the schedules.

The core therefore **publishes snapshots**. On the start pulse it copies its
stored state into `x_out` and its last back vector into `back_out`; these
published values stay fixed for the whole tick while the working registers
change. During tick *t* every core reads exactly what its neighbours held at
the end of tick *t-1*. All neurons thus update simultaneously from the
previous tick's values (a Jacobi-style step), independent of fan-in and of
how far each layer's schedule has progressed.

One consequence is worth knowing when writing a driver: the back products a
core receives in tick *t* were formed in tick *t-1* from the lower layer's
errors and weights of that tick, so the feedback a hidden neuron sees is one
tick old. The network's reference model (`tb/pc_net_model_pkg.sv`) follows
the same rule and serves as an executable statement of it.

## 4. Layers, the network and the tick protocol

`pc_layer` is a row of cores of one layer. All cores share the states of
the layer above; core *i* receives column *i* of the lower layer's back
products (neuron *k* below sends `θ_below[k][i] * eps_k` to neuron *i*). A
completion aggregator (`pc_done_agg`) remembers which cores have finished
and produces one `done` pulse per tick when the last one has.

`pc_network` is the top level. It instantiates `NUM_LAYERS` layers from the
arrays `LAYER_SIZE` and `LAYER_ACT`, wires each layer to its two
neighbours, aggregates the layer done pulses the same way, and runs the
tick controller:

* `pc_tick_ctrl` turns a `start_tick` request into a one-cycle `start`
  pulse broadcast to every core, but only while the network is idle. A
  request made during a running tick is remembered and served as soon as
  that tick's network `done` has arrived; several requests made during one
  tick are merged into one.
* Each layer's done is the last of its cores; the network `done` is the
  last of its layers.

**Latency.** Counting the cycle in which `start_tick` is raised on an idle
network as cycle 0, the network `done` is high in cycle
`max over layers (3N + M + 4) + 4`: one cycle for the controller's start
register, the core schedule, then one cycle each for the core, layer and
network done registers. For the default 2 → 4 → 3 network the output layer
is the slowest (N = 4, M = 0: 16 cycles), so one tick takes 20 cycles.

| Network   | Slowest layer (3N+M+4) | Request to done |
|-----------|-----------------------|-----------------|
| 2 → 4 → 3 (default) | 16          | 20 |
| 2 → 2 → 1 | 11                    | 15 |
| 4 → 8 → 4 | 28                    | 32 |
| 8 → 16 → 8| 52                    | 56 |

`alpha`, `alpha_bias` and `gamma` are read during the tick and must stay
stable while `busy` is high; `x_set_en` and `x_obs` may change any time,
since they are sampled on the start pulse.

### Ports of `pc_network`

| Port | Width | Meaning |
|------|-------|---------|
| `clk`, `rst_n` | 1 | clock, asynchronous active-low reset (states, errors, weights to +0) |
| `start_tick` | 1 | request one tick |
| `alpha`, `alpha_bias`, `gamma` | 32 | binary32 rates, shared by all cores |
| `x_set_en[l][i]`, `x_obs[l][i]` | 1, 32 | clamp neuron *i* of layer *l* to `x_obs` for the next tick |
| `w_wr_en`, `w_wr_layer`, `w_wr_neuron`, `w_wr_idx`, `w_wr_data` | | write one weight; lane `N` of a neuron is its bias; only while idle |
| `w_rd_layer`, `w_rd_neuron`, `w_rd_idx` → `w_rd_data` | | read one weight, combinationally |
| `x_state[l][i]`, `eps[l][i]` | 32 | every stored state and error (unused slots read 0) |
| `busy`, `done` | 1 | tick running; one-cycle pulse at the end of a tick |

The arrays are `[NUM_LAYERS][MAX_N]` with `MAX_N` the largest layer.

### A training step, as a driver performs it

1. Load initial weights through the weight port.
2. For each sample: clamp the input layer (`x_set_en` of layer L-1) and the
   output layer (layer 0) to the sample; run some ticks with `alpha = 0`
   so the hidden states settle, then some ticks with `alpha > 0`.
3. To predict: clamp only the input layer, run ticks with `alpha = 0` and
   read `x_state` of layer 0.

The end-to-end testbench does exactly this (10 + 10 ticks per sample,
40 ticks to predict).

## 5. Arithmetic (`fp32_fma`)

`fp32_fma` computes `a*b + c` with a single rounding, round to nearest even,
in one combinational step. It handles subnormal inputs and outputs,
infinities, signed zeros and NaNs (always returned as the quiet NaN
`0x7FC00000`); it raises no exception flags. Multiplication is issued as
`a*b + (-0)` and addition as `1*b + c`, so one unit serves all three
operations. Internally the product (48 bits) and the addend are aligned in a
wide field with a sticky bit, added, normalised with a leading-zero count,
and rounded; exponent underflow shifts into the subnormal range before
rounding.

## 6. Activations (`pc_activation`)

Each layer has one activation, fixed at elaboration: linear, ReLU or tanh.
The unit returns `f(x)` and `f'(x)` for a binary32 `x`.

* Linear: `f = x`, `f' = 1`.
* ReLU: `f = max(x, 0)` (a negative zero maps to +0), `f' = 1` for
  `x > 0`, else 0 (the derivative at 0 is taken as 0).
* tanh: a table of `tanh(k/16)` for k = 0..128 in unsigned Q0.24 is
  computed at elaboration from `$tanh`, so no data file is involved. `|x|` is
  converted to a fixed-point position, the two neighbouring entries are
  interpolated linearly, and the sign is restored; `|x| >= 8` saturates to 1.
  `f' = 1 - f²`. The error against exact tanh is below 4e-4 for `f` and
  below 8e-4 for `f'`.

The activation is applied where a state is *consumed*: a core applies the
layer above's `f` to the raw states it receives, and its own layer's `f'` to
its own effective state.

## 7. Parameters and sizes

| Module | Parameter | Default | Meaning |
|--------|-----------|---------|---------|
| `pc_network` | `NUM_LAYERS` | 3 | number of layers |
| | `LAYER_SIZE` | `'{3, 4, 2}` | neurons per layer, index 0 = output |
| | `LAYER_ACT` | `'{ACT_LINEAR, ACT_RELU, ACT_LINEAR}` | activation per layer |
| | `CLAMP_HARD` | 1 | clamped neurons store `x_obs` |
| `pc_neural_core` | `N_IN`, `N_BACK` | 2, 3 | fan-in from above (N) and below (M) |
| | `ACT_IN`, `ACT_OWN` | linear, ReLU | activation of the layer above / own layer |
| `pc_layer` | `N_OWN`, `N_IN`, `N_BACK`, ... | 4, 2, 3 | a layer's size and fan-ins |
| `pc_done_agg` | `WIDTH` | 4 | number of units aggregated |

Any other network is a recompilation, e.g. the 2 → 2 → 1 tanh network is
`pc_network #(.LAYER_SIZE('{1, 2, 2}), .LAYER_ACT('{ACT_LINEAR, ACT_TANH, ACT_LINEAR}))`.
The input layer has no layer above; its cores run a tick with only a bias
lane and are normally clamped. The activation of the input and output
layers is normally linear.

Every core has its own two FMA units, so area grows with the number of
neurons, not with the number of weights. The default network (9 cores,
29 weights) synthesises to roughly 6,000 generic cells and 4,300 flip-flop
bits before technology mapping; most of the logic is the 18 FMA units.

## 8. Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and stops; a watchdog ends a run that
hangs. Reference values come from models written independently of the RTL
in `tb/`: `fp_ref_pkg` (binary32 rounding of a `real`, with subnormals),
`pc_core_model_pkg` (one neuron, rounding at the same points as the
hardware) and `pc_net_model_pkg` (a whole network with the snapshot rule of
section 3).

| Testbench | What it checks |
|-----------|----------------|
| `tb_fp32_fma` | special values, ties, subnormals, and about 30,000 random operand triples against an exact reference |
| `tb_pc_activation` | the three modes over a sweep of inputs; tanh within 4e-4 / 8e-4 |
| `tb_pc_neural_core` | two cores (ReLU with hard clamping; tanh with soft clamping and no layer below) over 60 ticks against the model; `busy` lasts 3N+M+4 cycles; published values are the previous tick's |
| `tb_pc_done_agg` | one pulse, one cycle after the last unit, with coinciding and stale pulses |
| `tb_pc_tick_ctrl` | start only when idle, deferred requests served, never overlapping ticks |
| `tb_pc_layer` | routing of states, back products and the weight port; layer done at 3N+M+6 |
| `tb_pc_network` | the default network: 40 ticks in lockstep with the model (every state, error and weight, relative 1e-5), the 20-cycle latency, a deferred request, and teacher–student training whose test error must halve in 6 epochs; it counts clamped and free neurons, inference and learning ticks, deferred requests and hidden neurons cut off by the ReLU, and fails if any never occurred |
| `tb_pc_network_workloads` | the 2 → 2 → 1 tanh, 4 → 8 → 4 and 8 → 16 → 8 networks in lockstep with the model, with their latencies, then 4 epochs of teacher–student training each (16 samples; test error must drop below 0.7 of its start; typical runs: 0.148 → 0.004, 0.54 → 0.063, 2.58 → 0.67). Helper harness `pc_net_lockstep` |

The tanh network is compared with a relative tolerance of 3e-3, because the
model uses exact tanh; everything else is compared to 1e-5.

To run a testbench with verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/pc_pkg.sv tb/fp_ref_pkg.sv tb/pc_core_model_pkg.sv tb/pc_net_model_pkg.sv \
  -y rtl -y tb --top-module tb_pc_network tb/tb_pc_network.sv
./obj_dir/Vtb_pc_network
```

The full-size network testbench finishes in a few seconds. Synthesis needs
only `rtl/`: read `rtl/pc_pkg.sv` first, then the other files, top
`pc_network`.

## 9. Where this design departs from its source description

The network equations, the stage order and per-stage cycle counts, the bias
lane with its own rate, the clamping rule with `CLAMP_HARD`, the
start-on-idle tick control and the two-level done aggregation follow the
published design. The following are this implementation's own:

* **Number encoding.** The source keeps binary32 values in a recoded
  internal format. Here they are kept in the standard 32-bit encoding; the
  rounded results are the same, only the internal representation differs.
* **Two multiply-add units per core** instead of one, so that the WUP and
  STATE stages keep their stated cycle counts (section 2).
* **Snapshot exchange.** When a core samples its neighbours is not fixed by
  the source; here every tick uses the previous tick's values (section 3).
* **tanh** is a 129-entry interpolated table (section 6), accurate to about
  4e-4; the source does not say how it computes tanh.
* **Rates shared by all layers.** One `alpha`, `alpha_bias` and `gamma` for
  the whole network.
* **Weight port.** Loading and reading weights through one addressed port
  is an addition; the source does not describe how weights are initialised.
* **Visibility.** Every state and error is a top-level output, to let a
  driver read the prediction and monitor convergence.
* ReLU'(0) = 0, reset values of zero, and NaN handling are choices made
  where the source is silent.

The results the source reports for the larger networks and the
hyperparameter sweeps come from a software model of the design, not from
its RTL. The testbenches here run those network sizes against a reference
model and train each for a few epochs on a small sample set; they show that
learning proceeds but do not reproduce the reported learning curves, which
use more samples and 25 epochs.

## 10. Files

| File | Content |
|------|---------|
| `rtl/pc_pkg.sv` | binary32 type, activation and stage enums, constants |
| `rtl/fp32_fma.sv` | fused multiply-add |
| `rtl/pc_activation.sv` | linear / ReLU / tanh and derivatives |
| `rtl/pc_neural_core.sv` | one neuron |
| `rtl/pc_done_agg.sv` | completion aggregator |
| `rtl/pc_tick_ctrl.sv` | tick controller |
| `rtl/pc_layer.sv` | one layer |
| `rtl/pc_network.sv` | the network (top) |
| `tb/*_pkg.sv` | reference models |
| `tb/pc_net_lockstep.sv` | reusable lockstep harness for any network size |
| `tb/tb_*.sv` | testbenches |
