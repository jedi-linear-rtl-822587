# JEDI-linear: a one-jet-per-clock graph-network jet tagger in SystemVerilog

Level-1 trigger hardware at a hadron collider must decide, within a fixed and short time, what
kind of particle started each jet: a gluon, a light quark, a W, a Z or a top quark. The data
arrive at bunch-crossing rate. A graph network such as JEDI-net tags jets well. It treats the
jet's particles as nodes of a fully connected graph, and it evaluates a small network on every
ordered pair of particles. That costs O(N²) for N particles, which is too much logic and too
much latency for a trigger FPGA.

JEDI-linear removes the pairs. If the edge function is **affine**, f(x_i ‖ x_j) = W1·x_i + W2·x_j + C,
then the sum over partners j of particle i is

    Σ_j≠i f = W2·Σ_j x_j − W2·x_i + (N−1)(W1·x_i + C)

After dividing by N and dropping the O(1/N) terms, this becomes

    e_i ≈ W1·x_i + W2·mean_j(x_j) + C

That is one dense layer applied to each particle, plus one dense layer applied to the jet's average
and added back to every particle. The cost is O(N). The whole network then reduces to dense layers
and averages. Its weights are constants, so each multiplication by a weight becomes a handful of
shifted additions and subtractions. Every layer is laid out in its own logic, and a new jet can
enter on every clock.

This RTL builds that network with its default size of 64 particles × 16 features per jet.

## Dataflow

```
particles[64][16] ──► Einsum Dense1 ──X[64][32]──┬─► Einsum Dense2 ─S─► (delay) ─┐
   (8-bit)            (per particle,             │                              ├─► QAdd ──E[64][32]
                       shared weights, ReLU)      └─► QSum (mean) ─g─► Dense3 ─d─┘  (broadcast
                                                       over particles    (+bias C)   sum, ReLU)
E ──► Einsum Dense (per particle, ReLU) ──Y[64][32]──► mean over particles ──► Dense×4 ──► logits[5]
```

| stage | module | what it computes | clocks |
|---|---|---|---|
| input projection | `einsum_dense` (table 1) | X_p = relu(W_in·particle_p + b) | 1 |
| global gathering | `global_gather` | E_p = relu(W1·X_p + W2·mean(X) + C) | 3 |
| particle update | `einsum_dense` (table 4) | Y_p = relu(W4·E_p + b) | 1 |
| jet pooling | `qsum` | h = mean_p(Y_p) | 1 |
| classifier | `mlp_head` | 3 × (dense + ReLU), then dense to 5 logits | 4 |

The total latency is a fixed **10 clocks** from `in_valid` to `out_valid`, and the initiation
interval is **1 clock**. Nothing stalls, and no state is carried from one jet to the next. A trigger
system can therefore line the tag up with other data by a plain delay. The several jets of one
event are simply sent on consecutive clocks. An assertion in `jedi_linear`
checks that `out_valid` is `in_valid` delayed by exactly `LATENCY` clocks.

"Einsum Dense" means one dense layer whose single weight table is applied to every particle.
Because the weights are shared, the result does not depend on the order of the particles
(permutation invariance). Only the hardware is replicated: `einsum_dense` holds `N_PART` copies of
the layer side by side.

## The global gathering step (`global_gather`)

This block is the reason the design scales linearly, and it has the least obvious timing:

* **Clock 1.** `Einsum Dense2` computes S_p = W1·X_p for every particle. It has no bias and no ReLU.
  In parallel, `qsum` computes g = mean(X).
* **Clock 2.** `Dense3` computes d = W2·g + C. The bias C of the affine edge function is placed on
  this branch, because adding it once per jet is cheaper than adding it once per particle. S is
  held in one register so that it stays aligned with d.
* **Clock 3.** `qadd` adds d to every S_p, saturates the sum to 8 bits and applies ReLU.

The averages are floor(sum / N_PART). N_PART must be a power of two, so the division is an
arithmetic shift, and `qsum` reports an elaboration error otherwise. A jet with fewer particles than
N_PART arrives with its unused particle slots zero-padded. The average still divides by N_PART, as
a fixed-size average pool does.

## Multiplier-free layers (`cmvm_da`)

Every dense layer is a constant matrix–vector multiply (CMVM), y = requant(W·x + b). `cmvm_da`
writes each constant weight w in canonical signed digit form,
w = Σ_k d_k·2^k with d_k ∈ {−1, 0, +1}. This form has the fewest non-zero digits a constant can
have, so each output becomes a sum of the terms ±(x_i << k), one for each non-zero digit.

Weights that are zero produce no logic. Weights of 1 or 2 bits produce one or two adders each.
At elaboration, `cmvm_da` builds a term list for each output, held in a `localparam`. The list has
one entry per non-zero digit, giving the input index, the shift and the sign. The datapath is a
loop over that constant list, so synthesis is left with a pure adder graph: no DSP multipliers and
no weight memory.

The accumulator is wide enough that it can never overflow: 8 + 8 + 3 + log2(N_IN) bits. After the
sum, the layer *requantizes* its output:

1. It shifts the accumulator right arithmetically by `W_SHIFT = 6`. Weights and biases carry
   6 fractional bits, and the shift rounds toward −∞.
2. It saturates the result to the signed 8-bit range [−128, 127].
3. It applies ReLU if the layer's `RELU` parameter is set.

The adder graph's common sub-expressions are not shared between outputs by hand. That sharing, and
the placement of pipeline registers inside the adder trees, are left to the synthesis tool.

## Weights

`jedi_pkg::weight(layer, row, col)` and `jedi_pkg::bias(layer, row)` are the only source of
parameters. The shipped tables are **stand-ins, not a trained model**. They come from a 32-bit
integer hash of the coordinates and are shaped like a network trained with per-weight bitwidths:

* a weight has 0 bits (pruned) with probability 10/16;
* it has 1 magnitude bit with probability 2/16, 2 bits with 2/16, 3 bits with 1/16, and 4–8 bits
  with 1/16;
* the top magnitude bit is always set, and the sign is random;
* biases lie in −256…255.

To deploy a trained network, replace the bodies of these two functions with the trained integer
tables, keeping the scale of 2^−6. Nothing else changes. The per-layer tables are:

| id | layer | size | bias |
|---|---|---|---|
| `L_IN_PROJ` = 1 | Einsum Dense1 | N_FEAT → D_E | yes |
| `L_DENSE2` = 2 | Einsum Dense2 (W1) | D_E → D_E | no |
| `L_DENSE3` = 3 | Dense3 (W2, C) | D_E → D_E | yes |
| `L_EINSUM4` = 4 | Einsum Dense | D_E → D_E2 | yes |
| `L_MLP0`…`L_MLP0+3` = 5–8 | classifier | D_E2 → N_HID → N_HID → N_HID → N_CLASS | yes |

## Parameters of the top (`jedi_linear`)

| parameter | default | meaning |
|---|---|---|
| `N_PART` | 64 | particle slots per jet (power of two) |
| `N_FEAT` | 16 | features per particle |
| `D_E` | 32 | width of the particle embeddings and of the gathering |
| `D_E2` | 32 | width after the second Einsum Dense |
| `N_HID` | 32 | hidden width of the classifier |
| `N_CLASS` | 5 | number of jet classes (logits) |

The ports are:

* `clk`;
* `rst_n`, active low and synchronous, which clears only the valid pipeline;
* `in_valid` and `particles[N_PART][N_FEAT]`, the input jet;
* `out_valid` and `logits[N_CLASS]`, the result.

All values are 8-bit signed. Data registers are not reset. Downstream logic must qualify them with
`out_valid`.

Other sizes are set with these parameters. For example, `N_PART=128, N_FEAT=3` gives a
128-particle tagger that takes three features per particle. A model whose weight bitwidths differ
from particle to particle, which gives up permutation invariance, is **not** covered: every
particle here uses the same table.

## What comes from JEDI-linear and what is this design's own

**Following the published architecture:**

* the affine edge function and its linearization into "per-particle dense + dense of the mean,
  broadcast and added";
* the block structure Einsum Dense1 → {Einsum Dense2, QSum → Dense3} → QAdd → Einsum Dense →
  average → four dense layers → 5 classes;
* full unrolling with one hardware unit per operation, an initiation interval of 1 and a fixed
  latency;
* multiplier-free shift-add constant multiplication;
* pruned weights of zero bits and weights of at most 8 bits;
* the main size of 64 particles × 16 features.

**Chosen here, because the publication does not fix it:**

* the hidden widths: 32 everywhere;
* the number formats: 8-bit activations and weights with 6 fractional bits;
* the floor rounding and the saturation;
* ReLU as the activation after each hidden layer;
* the bias carried by Dense3;
* one register per layer, which gives 10 clocks. The published implementation registers after
  every two adders and reaches roughly 300 MHz with about 25 clocks of latency at this size. This
  RTL puts a whole layer's adder tree between registers, so it will close timing at a much lower
  clock;
* zero padding of short jets;
* the stand-in weights.

**Not included:**

* the training flow, which chooses each weight's bitwidth;
* sharing of common sub-expressions between outputs;
* the per-particle-quantized (non-permutation-invariant) variant;
* the surrounding trigger firmware: jet clustering, sorting and buffering upstream, and
  synchronization and links downstream. `particles`/`in_valid` and `logits`/`out_valid` are where
  those parts connect.

## Verification

The testbenches are self-checking. Each one prints `TB_RESULT checks=N failures=M` and stops
through a watchdog if the design hangs.

They compare against `tb/jedi_ref_pkg.sv`, an integer model that shares only the weight tables with
the design. The model multiplies weights the ordinary way and requantizes with `/` and `%`. It also
counts how often saturation and ReLU changed a value, so that a test can show those paths were
exercised.

| testbench | unit and size | what it covers |
|---|---|---|
| `cmvm_da_tb` | `cmvm_da`, 16→32 and 32→32 | 300 vectors, extremes, bias only; saturation and ReLU hit |
| `einsum_dense_tb` | 6 particles, 8→5 | streaming with gaps, latency 1 |
| `qsum_tb` | 8 × 6 | floor of negative means, latency 1 |
| `dense_layer_tb` | 32→32 and 32→12 | bias, ReLU, saturation, latency 1 |
| `qadd_tb` | 5 × 7 | saturation at +127 and clamping at 0 |
| `global_gather_tb` | 8 × 12 | the linearized gathering end to end, latency 3 |
| `mlp_head_tb` | default 32→…→5 | latency 4 |
| `jedi_linear_tb` | 8 particles, 16 features, width 16 | whole network; see below |
| `jedi_linear_full_tb` | default 64 × 16, width 32 | the same as `jedi_linear_tb`, at full size |
| `jedi_linear_configs_tb` | 8 × 3, 32 × 3, 128 × 16 | other evaluated jet sizes, elaborated side by side (helper `jedi_config_run`) |

The two end-to-end tests stream jets mostly back to back, with idle clocks between bursts. A jet
holds either a random number of particles, zero-padded, or a full set. Each test checks every
logit and the exact 10-clock latency. It also requires that each of these happened at least once:
back-to-back jets, idle clocks, padded jets, full jets, saturation, ReLU clamping, and logits that
are not all equal.

Running one testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/jedi_pkg.sv tb/jedi_ref_pkg.sv tb/jedi_linear_tb.sv --top-module jedi_linear_tb
./obj_dir/Vjedi_linear_tb
```

Verilator unrolls the constant-weight loops into straight-line code. This makes simulation fast,
but the default-size build takes one to two minutes, and `jedi_linear_configs_tb` (which holds a
128-particle instance) takes several. The reduced-size `jedi_linear_tb` builds in under a minute.

## Files

* `rtl/jedi_pkg.sv`: formats, layer ids, the CSD decomposition and the weight and bias tables.
* `rtl/cmvm_da.sv`: the shift-add dense layer, combinational.
* `rtl/einsum_dense.sv`, `rtl/dense_layer.sv`: registered per-particle and single-vector layers.
* `rtl/qsum.sv`, `rtl/qadd.sv`: the average pool and the broadcast add.
* `rtl/global_gather.sv`, `rtl/mlp_head.sv`: the gathering stage and the classifier.
* `rtl/jedi_linear.sv`: the top level.
* `tb/`: the reference model and the testbenches listed above.
