# LogicNet: a neural network built from truth tables

A neuron whose inputs and output are quantized to a few bits is just a Boolean
function. If it also reads only a handful of inputs, that function is small enough to
write down completely as a truth table, and an FPGA can hold truth tables natively in
its look-up tables (LUTs). A network of such neurons needs no multipliers, no weight
memory and no scheduler: every neuron becomes a small block of LUT logic, the layers
are wired to each other directly, and the whole network is unrolled in space. A new
input can enter on every clock cycle and the latency is one cycle per layer.

This RTL implements that idea (the "LogicNet" approach of the thesis *Exposing
Hardware Building Blocks to Machine Learning Frameworks*, Y. Akhauri, 2019) for its
main worked example: a classifier for particle-physics jet substructure that assigns
each jet to one of five classes (gluon g, light quark q, W boson, Z boson, top quark t),
the kind of decision a first-level trigger has to take within a few hundred
nanoseconds. The network is the thesis's "model E". The RTL follows the structure the
thesis gives for its generated Verilog. Where it fills gaps, the sections below say so.

## The network

```
 features (16 x 16-bit signed)
   |  input_quantizer         2-bit code per feature
   |  act_register            ---- cycle 1
   |  lut_layer 1             64 neurons, each reads 4 features (8 address bits), 2-bit out
   |  act_register            ---- cycle 2
   |  lut_layer 2             64 neurons, fan-in 4, 2-bit out
   |  act_register            ---- cycle 3
   |  lut_layer 3             64 neurons, fan-in 4, 2-bit out
   |  act_register            ---- cycle 4
   |  lut_layer 4 (output)    5 neurons, fan-in 4, 4-bit class scores
   v
 scores (5 x 4 bits)
```

Sizes (defaults of `logicnet_module`): three hidden layers of 64 neurons, 2-bit
activations, fan-in 4 synapses per neuron, an output layer of 5 neurons with fan-in 4
and 4-bit outputs. Every layer is sparse, so every neuron is a table with 2^8 = 256
entries. The batch normalisation and the quantizer that follow a neuron in training
are folded into its table, so a layer's output is already the next layer's quantized
input.

**Timing.** With `PIPELINED = 1` (the default) there is a register at the network
input and one in front of each later layer, and none after the output layer. A
vector sampled with `in_valid` on a rising edge comes out on `scores`, with
`out_valid`, after four rising edges, counting the one that sampled it. There is no
stall and no back-pressure: a new vector may enter on every edge (initiation interval
1). The critical path is one layer: one table look-up, that is about two LUT levels
for 8-bit tables. With `PIPELINED = 0` the network is purely combinational:
`scores` follows `features` in the same cycle, `out_valid` equals `in_valid`, and
`clk`/`rst_n` are unused.

**Reset.** `rst_n` is synchronous and active low. It clears every pipeline register
and its valid flag, so results in flight are dropped.

**Ports of `logicnet_module`.** `features[f*16 +: 16]` is feature f, signed.
`scores[c*4 +: 4]` is the unsigned score of class c, in the order g, q, W, Z, t. The
prediction is the class with the largest score. The network has no arg-max stage, and
there is no softmax: the thesis leaves its cost out.

## Neuron equivalents and their tables

`lut_neuron` is the whole neuron: `out = TABLE[in*OUT_BITS +: OUT_BITS]`. `lut_layer`
instantiates one per neuron and builds each address by concatenating the features
that neuron reads. The first chosen feature goes to the most significant position,
so a neuron wired to features 0, 2, 4 sees `{in[0], in[2], in[4]}`. A synapse always
carries a whole feature (all its bits); fan-in counts synapses, not bits.

What the tables contain is the hardest part to get right, and where this RTL
necessarily departs from a real deployment. In the thesis the tables come from a
trained network: training fixes the sparse connectivity and the weights, and each
neuron's table is then filled by evaluating the neuron on all of its input
combinations. The trained weights are not published, so the RTL computes stand-in
tables at elaboration time from the same neuron model:

```
acc  = bias(n) + sum_k weight(n,k) * value(input code k)
code = clamp(floor(acc / 4), 0, 2^OUT_BW - 1)     (OUT_BW > 1, "QuantReLU")
code = (acc >= 0)                                 (OUT_BW = 1, "QuantHardTanh")
value(c) = c for multi-bit codes, -1/+1 for 1-bit codes
```

Connectivity, weights and offsets come from a 32-bit integer hash of
(`SEED`, layer, neuron, index), in `logicnet_pkg`:

* each neuron reads `FANIN` distinct features drawn at random from the previous layer
  (a random bipartite expander, the "a-priori fixed sparsity" of the thesis);
* each weight is one of -3, -2, -1, +1, +2, +3;
* each offset is between -4 and +7;
* the batch-norm scale is fixed at 1/4.

`SEED` therefore fixes the whole network. The result is a correct, deterministic
circuit with the structure and size of model E. Its classification accuracy is
meaningless.

**Loading a trained network.** Set `USE_GIVEN = 1` on a `lut_layer`:

* `GIVEN_CONN[(n*FANIN+k)*16 +: 16]` is the feature read by synapse k of neuron n;
* `GIVEN_TABLE[n*T +: T]` is neuron n's table, with `T = 2^(FANIN*IN_BW)*OUT_BW` and
  entry a at bits `[a*OUT_BW +: OUT_BW]`.

`tb_lut_layer` does exactly this for the thesis's published single-layer example:
5 one-bit inputs, 3 neurons of fan-in 3, wired `{0,2,4}`, `{1,2,3}`, `{0,1,2}`, with
tables `1,1,1,0,1,0,0,0` and twice `1,0,1,0,1,0,1,0`. To carry a trained jet model, the
top would pass such parameters to its four layers. That path is written and tested on
the example layer only.

## Cost model and the 6:1 LUT mapping

The thesis estimates the size of a neuron with N input bits and M output bits, built
only from 6-input LUTs, as

```
LUT(N, M) = M * (2^(N-4) - (-1)^N) / 3        (N >= 6)
```

that is 1, 3, 5, 11, 21 and 43 LUTs per output bit for N = 6 to 11. `lut6_tree` builds
exactly that structure, and `lut_neuron` uses it when `IMPL = IMPL_LUT6`:

* split the table on its upper N-6 address bits;
* put each 64-entry slice in a leaf LUT that reads address bits [5:0];
* reduce the leaves with LUTs used as 4:1 multiplexers (4 data inputs and 2 select
  bits fill the six LUT inputs);
* if one select bit is left over, end with a 2:1 level.

Leaves plus multiplexers come to exactly the closed form: for example 8 + 2 + 1 = 11
for N = 9. `tb_lut6_tree` checks the count and the function for N = 3 and 6 to 11.
The thesis draws the 7- and 8-input cases. Its 8-input drawing gives the leaves
address bits 1..6; here they take bits 0..5, which is the same circuit with the
address bits permuted.

The default `IMPL_TABLE` writes each table as a plain look-up and leaves the logic
to synthesis, as the thesis's generator does. The thesis reports that synthesis then
needs far fewer LUTs than the formula: 1.6 to 9.5 times fewer in its measurements.
The formula is therefore an upper bound. `logicnet_module` exposes it per layer as
localparams `LUTS_L1..LUTS_L4`: 640, 640, 640 and 100 LUTs for the defaults.

## Input quantizer

The first layer needs 2-bit codes, so `input_quantizer` converts each signed 16-bit
feature:

* for `BW > 1` (QuantReLU): `code = clamp(round(x / STEP), 0, 2^BW - 1)`, rounding
  half up;
* for `BW = 1` (QuantHardTanh): `code = (x >= 0)`, meaning +1 or -1.

It is built from `2^BW - 1` comparators against the level boundaries
`(2k-1)*STEP/2`, so it needs no divider. `STEP` (default 256, i.e. a scale of 1.0
for 8 fractional bits) is the scale factor and must match the one used in training.
The thesis's own generated module takes inputs that are already quantized.
Implementing this stage in hardware, in front of the input register, is a choice of
this RTL.

## Files

| file | contents |
|---|---|
| `rtl/logicnet_pkg.sv` | cost formula, hash, connectivity, stand-in weights, neuron model |
| `rtl/lut6.sv` | 6-input LUT |
| `rtl/lut6_tree.sv` | N-input table mapped onto 6-input LUTs |
| `rtl/lut_neuron.sv` | one neuron as a truth table (plain or LUT-mapped) |
| `rtl/lut_layer.sv` | a sparse layer: wiring plus one neuron per output |
| `rtl/act_register.sv` | pipeline register with valid flag |
| `rtl/input_quantizer.sv` | feature quantizer |
| `rtl/logicnet_module.sv` | the jet-tagging network (top) |
| `tb/logicnet_ref_pkg.sv` | arithmetic reference model (no tables) for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_logicnet_full` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. From the directory
that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/logicnet_pkg.sv tb/logicnet_ref_pkg.sv tb/tb_logicnet_full.sv \
    --top-module tb_logicnet_full
./obj_dir/Vtb_logicnet_full
```

Replace `tb_logicnet_full` by any other testbench name. Building the top-level
testbenches takes about a minute; they run in well under a second.

* `tb_logicnet_full` runs the top exactly as delivered. It streams 64 jets one per
  cycle, checks every score against the reference model, and checks the four-cycle
  latency.
* `tb_logicnet_model_d` resizes the top to model D (10- and 12-bit tables) and
  checks 200 cycles of traffic against the reference model.
* `tb_logicnet_module` runs three copies side by side: registered, registered with
  explicit 6:1 LUT mapping, and combinational. It checks them over 600 cycles of
  random traffic with bubbles and a reset in mid-stream. It also counts that
  back-to-back inputs, bubbles, both quantizer clamps, the reset flush and both
  alternative modes actually occurred.

The reference model recomputes each neuron as weighted sum, offset and quantizer,
without truth tables. Agreement therefore checks table generation, table layout,
wiring and look-up together. The reference reads the connectivity and weights from
`logicnet_pkg`, because they define the network; it does not re-derive them.

## Changing it

* **Other topologies.** Override the top's parameters: `HL1..HL3`, `X`, `X_FC`, `BW`,
  `BW_FC`, `IN_BW`, `N_FEATURES`, `N_CLASSES`. Table size grows as 2^(X*BW) per
  neuron. The constant functions support fan-ins of up to 32 synapses, but tables
  beyond about 12 to 14 address bits become slow to elaborate and large to synthesize.
* **A different random network.** Change `SEED`.
* **A trained network.** Use `USE_GIVEN` on each `lut_layer`, as described above.
* **A different neuron model** for the stand-in tables: edit `weight()`, `bias()` or
  `activate()` in `logicnet_pkg`. The testbench reference uses its own copy of the
  quantizers, in `logicnet_ref_pkg`, and must be edited to match.

## Where this departs from the thesis, and why

* **Truth tables** are generated from hashed stand-in weights, not trained ones (see
  above).
* **Output layer cost.** The thesis's model table lists 200 LUTs for model E's output
  layer. Its own cost formula gives 100 for 5 neurons of 8 input and 4 output bits.
  The RTL has 5 output neurons, one per jet class named in the text.
* **Number of input features.** The thesis does not state it, and 16 is assumed (the
  usual feature count of this jet data set). The 16-bit fixed-point format, the
  quantizer scale and the rounding rule are also assumptions.
* **QuantReLU range.** The thesis text says a 3-bit QuantReLU produces integers 0 to
  8, while its figure shows levels up to 7. The RTL uses 0..2^BW-1, which fits in BW
  bits.
* **Valid flag and reset** are additions; the thesis's generated modules carry data
  bits only.
* **Model choice.** Models A to C of the jet study end in a dense layer. The thesis's
  generator cannot produce hardware for a dense layer, and a dense layer over 64
  inputs cannot be a truth table. Model E is therefore the configuration built here,
  as the sparse model the thesis lists with the lowest cost. Model D, the other
  all-sparse jet model (hidden layers 64, 32, 32, fan-in 5, output fan-in 6), runs on
  the same RTL by parameter override and is simulated by `tb_logicnet_model_d`.
* **Not built.** The dense quantized layer and the sparse depthwise-separable
  convolution: the thesis gives no hardware structure for either. Also not built are
  the FPGA's 5:2 LUTs and block RAMs, which synthesis may use but which the design
  never instantiates.
* **Skip connections**, which the thesis tries on its handwritten-digit networks, are
  not part of the jet model and are not built.
