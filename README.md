# Feedforward neural networks in hardware: parallel, per-neuron MAC and single-MAC realizations

A trained feedforward neural network (a multilayer perceptron) is, at inference
time, a fixed function: every weight and bias is a known constant. Neuron *j* of
layer *k* computes

    y_kj = sum_i w_kji * x_ki        z_kj = phi(y_kj + b_kj)

and the outputs of one layer are the inputs of the next. Because the weights
are constants, they do not need to be stored in a memory and fetched. They can
be built into the circuit, and each multiplication by a weight can become a few
shifts and additions instead of a general multiplier.

This RTL builds such a network, with its weights fixed at elaboration, in three
ways that trade area against latency:

| realization    | hardware                                                | clock cycles per inference                    | default 16-16-10-10 |
|----------------|---------------------------------------------------------|-----------------------------------------------|---------------------|
| **parallel**   | one constant multiplier per weight, all layers combinational, output flip-flops | 1                              | 1                   |
| **SMAC_NEURON**| one multiply-accumulate (MAC) unit per neuron; the layers run in turn | sum over layers of (inputs + 1)   | 17 + 17 + 11 = 45   |
| **SMAC_ANN**   | a single MAC unit for the whole network                 | sum over layers of (inputs + 2) × neurons     | 288 + 180 + 120 = 588 |

Two ideas make each realization cheaper:

* **Shift-adds constant multiplication.** A constant multiplier is written in
  canonical signed digit (CSD) form and built from shifted copies of the input
  that are added or subtracted. Shifts are only wiring. The parallel realization
  can be built this way, and so can the per-neuron-MAC realization, where one
  block of shift-adds forms the products of the selected input with all of a
  layer's weights.
* **Shifted weights.** Suppose every weight that goes through a MAC is a
  multiple of 2^s. The MAC can then store and multiply w / 2^s and shift the
  result back by s. The multiplier, adder and accumulator all become s bits
  narrower. A training flow can tune the weights to make s large. The hardware
  here finds s from the weight table at elaboration and sizes itself to match.

The architectures, the cycle counts and both ideas come from the published work
on these realizations. The number formats, the activation definitions, the
handshakes and the default weights are choices made for this RTL. They are
listed under [Departures and open points](#departures-and-open-points).

## Number formats and the neuron output stage

All values passed between layers are **signed 8-bit fixed point with 6
fractional bits**. So 1.0 is 64 and the range is [-2, 2). This covers the
primary inputs, every hidden output and the network outputs.

Weights and biases are integers. They come from multiplying the trained values
by 2^Q and taking the ceiling, where Q is the quantization value (default 6). They are
held as signed 8-bit numbers. A product w·x therefore has 6+Q fractional bits.

`bias_act` is the stage after every inner product. It does three things:

1. It adds the bias shifted left by 6, which lines it up with the products.
2. It shifts the sum right by Q (an arithmetic shift, rounding toward minus
   infinity). The value again has 6 fractional bits.
3. It applies the activation function and saturates to 8 bits:

| `act_e`      | function                         |
|--------------|----------------------------------|
| `ACT_LIN`    | saturate to [-128, 127]          |
| `ACT_RELU`   | max(a, 0), saturate to 127       |
| `ACT_SATLIN` | clip to [0, 1.0]                 |
| `ACT_HSIG`   | clip(a/4 + 0.5, 0, 1.0)          |
| `ACT_HTANH`  | clip to [-1.0, 1.0]              |

By default the hidden layers use htanh and the output layer uses hsig.

## Constant multiplication without multipliers

`csd_mult` takes a constant C and recodes it at elaboration as
C = Σ d_i 2^i, where each d_i is -1, 0 or +1 and no two neighbouring digits are
nonzero. Each nonzero digit adds or subtracts x shifted left by i. For example:

* 11 = 16 − 4 − 1, so 11x = (x<<4) − (x<<2) − x: two subtractors.
* 13 = 16 − 4 + 1: one subtractor and one adder.

A constant with t nonzero digits costs t − 1 adders or subtractors. A zero
weight costs nothing.

Two blocks build on `csd_mult`:

* `mcm_block` (multiple constant multiplication) multiplies one variable by
  many constants. It writes each constant as ±f·2^t with f odd (the constant's
  *fundamental*). It builds each distinct fundamental once and gives it to
  every constant that has it, with a wired shift and, if needed, a negation.
  So the constants 3, 6, −12 and 96 cost the adders of one multiplication by 3.
  The multiplierless SMAC_NEURON layer uses this block.
* `cmvm_block` (constant matrix-vector multiplication) computes all inner
  products of one layer, y = W·x, and the parallel realization uses it. The
  weights that multiply the same input x_i form one MCM, so the block is one
  `mcm_block` per input column followed by one adder tree per row.

Another view of the same products treats each neuron's inner product as its
own constant array-vector multiplication (CAVM). This view cannot share a
product between neurons, so the CMVM form is never worse, and it is the only
one written out.

Both blocks share the shifted copies of x and equal fundamentals. They do
**not** share partial sums between different fundamentals or different
inputs; for example, they do not compute x1 + x2 once and reuse it. Search
algorithms for such sharing exist and lower the adder count further, but they
are outside this RTL.

## Parallel realization (`parallel_layer`, `parallel_ann`)

Each layer is a combinational block:

* With `MULTLESS = 1` (the default), the inner products come from one
  `cmvm_block` per layer.
* With `MULTLESS = 0`, they are written as plain `x * w` products with constant
  w, and synthesis chooses how to build them.

One `bias_act` follows each neuron. The layers are chained with no registers in
between. Only the network outputs are registered.

Handshake: when `in_valid` is high at a clock edge, the result for the `x`
present at that edge is captured. `z` and `out_valid` appear on the next cycle.
The critical path runs through every layer.

## SMAC_NEURON: one MAC per neuron (`mac_unit`, `mac_ctrl`, `smac_neuron_layer`, `smac_neuron_ann`)

Each layer has one small controller, `mac_ctrl`. It is a counter, and it drives
one input multiplexer shared by all neurons of the layer. Each neuron has its
own weight multiplexer and its own `mac_unit` (multiplier, adder and register
R). Timing of one layer with n inputs:

```
cycle      0        1         2        ...  n           n+1
start      1        0         0             0
clr        1        0         0             0
en         0        1         1             1           0
sel        -        0         1             n-1
R          0     w0·x0    +w1·x1  ...   complete     (held)
done       0        0         0             0           1  (until next start)
done_pulse                                              1  (one cycle)
```

The layer's outputs are z_j = act(R_j · 2^s_j + b_j). They are combinational
from the held registers and valid while `done` is high.

The `done_pulse` of layer k is the `start` of layer k+1. A finished layer
therefore holds its outputs for the next layer and stops switching. The whole
network takes the sum over layers of (inputs + 1) cycles, counted from the start
cycle. `smac_neuron_ann` combines the last layer's flag with its own busy flag
into a network `done` that is low while a new computation is in flight. The
primary inputs must be held stable until `done`.

**Shifted weights per neuron.** For neuron j, s_j is the smallest number of
trailing zero bits among its nonzero weights. The neuron's weight multiplexer
holds w/2^s_j in 8 − s_j bits. Its multiplier, adder and register are s_j bits
narrower, and a wired shift restores the inner product. The default weights give
neurons with s = 0, 1 and 2.

**Multiplierless form** (`MULTLESS = 1`, the default). There is one `mcm_block`
per layer. It multiplies the currently selected input by every (shifted) weight
of the layer. Each neuron's multiplexer then picks its own product, and an adder
and register accumulate it. There are no multipliers; the cycle count is the
same.

## SMAC_ANN: one MAC for the whole network (`smac_ann_ctrl`, `smac_ann`)

This is the smallest realization and the hardest to follow, because a single
datapath is reused for every neuron of every layer. The datapath has these
parts:

* A **weight multiplexer** over all weights of the network, cut to the MAC
  width.
* An **input multiplexer**. It selects primary input `x[in_idx]` in layer 0 and
  the previous layer's output `in_r[in_idx]` afterwards.
* One **MAC**: multiplier, adder and register R.
* A **bias multiplexer** and a single `bias_act`. Its activation function is
  switched by the layer counter, so hidden layers get htanh and the output layer
  hsig.
* A **demultiplexer** into the output registers `out_r`, one per neuron of the
  widest layer.

`smac_ann_ctrl` holds three counters (layer, neuron, input) and a four-state
sequencer: idle, clear, accumulate, output. Each neuron with n inputs takes
n + 2 cycles:

```
CLR  (1 cycle)     R <= 0                               (for the first neuron this is the start cycle)
ACC  (n cycles)    R <= R + W[w_idx] * input[in_idx]    (w_idx += 1, in_idx = 0 .. n-1)
OUT  (1 cycle)     out_r[neuron] <= act_layer(R·2^s + B[b_idx])   (b_idx += 1)
```

So the network takes the sum over layers of (inputs + 2) × neurons cycles. The
weights are stored layer by layer, then neuron by neuron, then input by input.
Because of this order, the weight select is a counter that advances in every
accumulate cycle, and the bias select advances in every output cycle. No
multiplier is needed to form addresses.

**Why there are two register banks.** Suppose the output registers were fed
straight back as the next layer's inputs. Then writing neuron 0 of layer 2 would
overwrite layer 1's output 0, which neurons 1, 2, ... of layer 2 still need to
read. To avoid this, the output cycle of each layer's last neuron also copies
all output registers, including the value being written, into the input bank
`in_r`. The next layer reads only `in_r`. The copy happens in that same output
cycle, so it adds no cycles, at the cost of one register per neuron of the
widest layer.

**Shifted weights, globally.** SMAC_ANN has only one MAC, so it uses one shift
s: the smallest over all nonzero weights of the network. With the default weights
s = 0. The block testbench also runs a network whose weights are all even
(s = 1).

Assertions in `smac_ann_ctrl` check that the clear, accumulate and output
phases never overlap, and that nothing runs after `done`. `mac_ctrl` carries
similar checks.

## The top: `ann_top`

`ann_top` builds the **same** network, with the same weights and biases, in all
three realizations side by side:

* One `start` pulse launches all three.
* `par_valid` pulses one cycle later.
* `sn_done` rises after 45 cycles and `sa_done` after 588 cycles. Both stay high
  until the next start.
* The three output vectors are bit-identical.

The top exists for comparison and verification. A product would keep only the
architecture that fits its area and latency budget; each of `parallel_ann`,
`smac_neuron_ann` and `smac_ann` can be used on its own. The top's
`PAR_MULTLESS` and `SN_MULTLESS` parameters choose the multiplier style. The
SMAC_ANN engine always keeps its one multiplier, because replacing it with
shift-adds for every weight would cost far more.

## Configuring a network

Everything is set through parameters. The types and helpers are in `ann_pkg`.

| parameter | meaning | default |
|-----------|---------|---------|
| `NL` | number of layers | 3 |
| `TOPO` | `topo_t`: `TOPO[0]` primary inputs, `TOPO[k]` neurons in layer k | `'{16,16,10,10,0}` |
| `ACT` | `act_t`: activation of each layer | htanh, htanh, hsig |
| `W` | `wtab_t`: flat weight table | `gen_weights(DEF_TOPO,3,1)` |
| `B` | `btab_t`: flat bias table | `gen_biases(DEF_TOPO,3,1)` |
| `Q` | quantization value (weights and biases are scaled by 2^Q) | 6 |
| `MULTLESS` / `PAR_MULTLESS` / `SN_MULTLESS` | shift-adds instead of multipliers | 1 |

Table layout:

* The weight of layer k (0-based), neuron j, input i is at
  `W[w_off(TOPO,k) + j*TOPO[k] + i]`, where `w_off` is the sum of
  `TOPO[l]*TOPO[l+1]` over the earlier layers.
* The bias of layer k, neuron j is at `B[b_off(TOPO,k) + j]`.
* Each value must fit 8 signed bits.

Limits of the package tables: 4 layers, 16 neurons per layer, 1,024 weights and
64 biases. Change `MAX_*` in `ann_pkg` to go beyond them.

**About the default weights.** They are a stand-in: a fixed pseudo-random
sequence (`ann_pkg::hash32`) in [-48, 48]. Neuron j's weights are multiples of
2^(j mod 3), roughly one weight in eleven is zero, and the biases lie in
[-20, 20]. They exercise every datapath but do not solve any task. To use a
trained network, quantize its weights and biases as ceil(v·2^Q) and pass them as a `W`
table, for example from a function in your own package.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. All of them compare against
`ann_ref_pkg`. This is an integer model of the network written from the format
definitions, using floor division, explicit clamps and direct products; it
contains no CSD recoding and no shifted weights.

| testbench | what it covers |
|-----------|----------------|
| `tb_ann_pkg` | table offsets; CSD digits of every 8-bit constant; smallest shift on the worked example 20, 24, 26 (shift 1), with zero weights and on all-zero rows; shifted tables |
| `tb_bias_act` | all activations, corner and random values |
| `tb_csd_mult` | ten constants, including 11, 3, 5, 13 and ±127/128, against every 8-bit input; CSD digit counts |
| `tb_cmvm_block`, `tb_mcm_block` | a 2×2 example (11, 3; 5, 13) and larger matrices; offsets into the table; constants that share a fundamental |
| `tb_mac_unit`, `tb_mac_ctrl`, `tb_smac_ann_ctrl` | accumulator and controller sequences; cycle counts |
| `tb_parallel_layer`, `tb_parallel_ann` | both multiplier styles; all activations; 1-cycle latency |
| `tb_smac_neuron_layer`, `tb_smac_neuron_ann` | both styles; neurons with shift 0, 1 and 2; latency n+1 per layer; layers finish in order |
| `tb_smac_ann` | shift 0 and shift 1 networks; latency 92 for 5-6-4-3 |
| `tb_ann_top` | the default 16-16-10-10 top, with no parameter overrides, on 40 random vectors: all three engines, their latencies (1/45/588), and counts of layer gating, layer hand-over, shifted neurons, htanh and hsig clipping, and restart |
| `tb_workloads` | the five structures 16-10, 16-10-10, 16-16-10, 16-10-10-10 and 16-16-10-10, each as its own top, on all three engines; two of them with plain multipliers instead of shift-adds |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
    rtl/ann_pkg.sv tb/ann_ref_pkg.sv tb/tb_ann_top.sv --top-module tb_ann_top
./obj_dir/Vtb_ann_top
```

The full-size top builds in under a minute and simulates in about a second.
`tb_workloads` builds five tops and takes about 40 s to compile.

## Departures and open points

* **Number formats, the hsig slope, rounding and Q are choices.** The source
  fixes only the 8-bit layer inputs and outputs and the set of activation
  functions.
* **Only equal fundamentals are shared** in the CMVM and MCM blocks (see
  above). Their adder counts are those of CSD recoding of each distinct
  fundamental, not those of a minimum-adder search.
* **SMAC_ANN has a second register bank** (`in_r`) so that a layer's outputs
  cannot overwrite inputs that are still being read.
* **Zero weights** do not limit the shift s. A neuron with all weights zero gets
  s = 0.
* **Reset** is asynchronous and active low, and clears all registers. The
  handshakes are this RTL's own: a one-cycle `start`, a level `done`, and inputs
  held stable by the user until `done`.
* **The weight tuning is not part of the RTL.** This covers the choice of Q and
  the removal of CSD digits or raising of s without loss of accuracy. It is an
  offline step that decides the constants; the hardware only takes advantage of
  the result.
* **Accuracy is not reproduced.** No trained weights or data set are included,
  so the RTL is verified for bit-exact agreement with the integer model, not for
  classification accuracy.
