# Training on an inference datapath: a SystemVerilog model of the TaxoNN PE array

An inference accelerator for neural networks already has what stochastic
gradient descent needs: multipliers, adders and an activation unit. It lacks
only the order in which to use them. The TaxoNN design (Hojabr et al.,
"TaxoNN: A Light-Weight Accelerator for Deep Neural Network Training") rewrites
the weight gradient of layer *i* so that each step is a single multiply. A few
multiplexers and registers then let the processing element's one multiplier
do the whole training computation, one step after another. The price is an
area overhead of about 10 % over an inference-only PE.

This RTL implements that scheme for the fully-connected layers of a network.
It includes the training PE, the per-layer buffers and shared "global
multiplier", a loss stage, and a layer-pipelined chain that runs forward
passes, back-propagation and weight updates. The default build is the
fully-connected tail of LeNet-5 on MNIST (256-120-84-10). Each layer uses the
fixed-point precision the paper reports for that dataset.

## 1. The arithmetic being mapped

Layer *i* computes `Y_i = f(W_i X_i)`, with `X_i = Y_{i-1}`. Training
subtracts `alpha * dE/dW_i` from the weights. The chain rule is regrouped
around one vector per layer:

```
G_n = dE/dY_n  * f'_n                 (last layer, from the loss)
G_i = (G_{i+1} W_{i+1}) * f'_i        (every other layer)
dE/dW_i = G_i X_i
```

`G_i` is a vector with one entry per neuron. It is formed in layer *i*, then
handed down to layer *i-1*, which needs it together with `W_i`. Each
quantity on the right-hand side is a sum of plain products. This is what lets
one multiplier per neuron do all the work.

## 2. The training PE (`taxonn_pe`)

Each neuron has one PE. Its datapath is one multiplier (`fx_mul`), one adder
and an activation unit that returns both `f(x)` and `f'(x)`. Three
multiplexers sit in front of them:

| mux  | inputs |
|------|--------|
| MUX1 (operand a) | input value X · R2 = G_{i+1} · R3 = −alpha · stored F' |
| MUX2 (operand b) | weight from the weight buffer · R5 = W_{i+1} · R1 · R4 |
| MUX3 (adder feedback) | sum register · R1 · zero |

The PE runs one operation per cycle. `pe_control` decodes the operation into
mux selects and register write enables:

| operation | MUX1 | MUX2 | result | when |
|-----------|------|------|--------|------|
| forward MAC | X | W[j][k] | sum += X·W | `x_valid & !x_upd` |
| step 1 | R2 | R5 | R1 += G_{i+1,m}·W_{i+1}[m][j] | cycle after `bwd_valid` loaded R2/R5 |
| step 2 | F' | R1 | R1 ← F'·R1 = G_{i,j} | `turn` (global multiplier is at this neuron) |
| step 3 | X | R1 | R4 ← X_k·G_{i,j} | `x_valid & x_upd` |
| step 4 | R3 | R4 | R4 ← −alpha·R4 | cycle after step 3 |

In the cycle after step 4, R4 goes out on the update port together with the
index *k*. The weight buffer adds it to `W[j][k]`. A weight update therefore
takes two multiplier cycles. The update pass feeds one input word every
second cycle, and the PE never has two claims on its multiplier in one cycle.
An assertion checks this.

PE timing:
- The forward result `y_valid` pulses two cycles after the last input.
- R1 is final two cycles after the last `bwd_valid`.
- An update word appears two cycles after its input.

The input stream is registered and passed on to the next PE. PE *j* sees word
*k* one cycle after PE *j-1* does.

## 3. A layer lane (`taxonn_layer`)

A layer is a lane of `N_OUT` PEs. Around the lane sit an input buffer, a
weight buffer, an output buffer, a buffer controller and the global
multiplier.

**Forward.** In the first layer the buffer controller reads the
host-written input buffer, one word per cycle. In later layers it takes the
previous layer's output stream, stores it and passes it into the lane in the
same cycle. Because of the one-cycle skew between PEs, neuron *j* finishes
`j` cycles after neuron 0. The outputs leave as a stream in neuron order,
which is exactly what the next layer wants as its input. A layer takes
`N_IN + N_OUT` cycles plus 3 cycles of registers, measured from the start
pulse to the last output.

**Back-propagation.** The layer above sends pairs `(G_{i+1,m}, W_{i+1}[m][*])`,
one *m* per cycle, and all PEs do step 1 in parallel. One cycle after the
last pair, the global multiplier scans the neurons, one per cycle:
- It raises `turn[j]`.
- It multiplies R1_j by F'_j.
- It sends `G_{i,j}` and row *j* of this layer's weights down, both
  registered.

PE *j* does step 2 in that same cycle. From the next cycle on it runs its own
update over *k*. Row *j* is sent down before PE *j* can change it, so the
layer below always receives the old weights.

Cycle counts, all measured from the last incoming pair:

| event | cycles |
|-------|--------|
| last G out | `N_OUT + 2` |
| last weight written (`upd_done`) | `N_OUT + 2·N_IN + 2` |

**Weight buffer.** The weight buffer is a register array:
- one read port and one read-modify-write update port per PE,
- a whole-row read for the G scan,
- a host port.

## 4. The chain, the loss and the pipeline (`taxonn_top`, `loss_unit`)

Layers are chained: layer *l* feeds layer *l+1* forward and receives its G
stream backward. This is one lane of the PE array per layer. When the last
layer's output is complete and `train` is set, the loss unit reads Y_n from
the output buffer, one neuron per cycle. It emits `e_m = Y_m − T_m` together
with a weight row that is 1.0 at position *m*. The last layer then treats the
loss exactly like a layer above it: step 1 leaves `R1_m = e_m`, and the scan
forms `G_n = e·F'_n`.

Each layer starts its scan as soon as the last G of the layer above has
arrived. G production therefore ripples down the chain with no idle cycles:

```
G chain (first loss word -> last G of the first layer) = N_n + sum_i N_i + 2·NL − 1
forward (start -> done, inference)                     = N_0 + sum_i N_i + 3·NL + 1
```

The first formula is the paper's `N_n + ΣN_i` plus two register stages per
layer. For the default network the numbers are:

| pass | cycles |
|------|--------|
| inference pass | 480 |
| G chain | 229 |
| whole training iteration (forward through last weight write) | 1224 |

The weight updates take the remaining time. Each PE needs `2·N_IN` cycles,
and the updates overlap the G scans of the same layer and of the layers
below. The testbenches count these overlaps.

## 5. Number formats

Each layer has its own format `(I,F)`: I integer bits, F fraction bits and a
sign bit, so `W = 1 + I + F`. The defaults are:

| layer | neurons | (I,F) | W | activation (test) |
|-------|---------|-------|---|-------------------|
| FC1 | 256 → 120 | (2,12) | 15 | sigmoid |
| FC2 | 120 → 84 | (1,12) | 14 | sigmoid |
| FC3 | 84 → 10 | (3,10) | 14 | sigmoid |

Arithmetic rules:
- Products are truncated (arithmetic shift by F) and saturated.
- The sum register and R1 carry 8 guard bits and are saturated when they
  leave the PE.
- Weight updates saturate.
- Values that cross a layer boundary are realigned and saturated by
  `fx_resize`. This covers activations going forward, and G and weights
  going backward.

`activation_unit` supports three functions:
- **ReLU:** `f'` is 1 for x > 0 and 0 otherwise.
- **Sigmoid:** a four-segment piecewise-linear approximation with slopes
  1/4, 1/8 and 1/32 and breaks at 1, 2.375 and 5, mirrored for negative x.
  Its derivative is `s(1−s)`, which uses one multiplier.
- **tanh:** computed as `2s(2x) − 1`, with derivative `4s'(2x)`.

The format needs `I ≥ 1` and `F ≥ 5`.

## 6. Using it

Host interface of `taxonn_top`:
- All data words are 32 bits. The low W bits are used, in the addressed
  layer's format, and reads are sign-extended.
- Load the weights (`wl_*`), the value of −alpha per layer (`alpha_*`), the
  input vector (`hx_*`) and the target vector (`tw_*`).
- Pulse `start` with `train` low for inference, or high for one SGD
  iteration. `done` pulses at the end.
- Read the outputs with `yr_*` and the weights with `wr_*`.
- The G stream of the first layer appears on `g0_*`, for layers that would
  precede it.
- `st_*` show per-layer activity.

Parameters: `NL`, `N[NL+1]` (layer sizes), `IB[NL]` and `FB[NL]`. For the
32×32 datasets (CIFAR10, SVHN), the FC input is 400 wide. Use `N[0] = 400` and
the precisions (1,10)(1,13)(2,13) or (2,12)(2,11)(4,12).

Simulate with plain Verilator from the folder holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/taxonn_pkg.sv tb/taxonn_ref_pkg.sv \
          tb/tb_taxonn_top.sv --top-module tb_taxonn_top -Mdir obj -o sim && obj/sim
```

Each testbench prints `TB_RESULT checks=N failures=M`. Here is what each one
covers:

| testbench | what it checks |
|-----------|----------------|
| `tb_taxonn_top` | a 6-5-4-3 network with tanh, ReLU and sigmoid layers: one inference pass and three training iterations |
| `tb_taxonn_top_full` | the default build, about 40 s of simulation |
| `tb_workload_cifar10`, `tb_workload_svhn` | the 400-120-84-10 settings with the precisions reported for those two datasets |
| `tb_taxonn_layer`, `tb_taxonn_pe`, ... | the blocks one by one, with exact cycle counts |

All of them compare against `taxonn_ref_pkg`, an integer reference model
written separately from the RTL. It predicts every output, every G value and
every updated weight bit for bit.

## 7. How far this follows the paper

These parts follow the paper:
- the G recursion and the four multiplier steps,
- the multiplexer inputs and the five registers R1–R5,
- the shared per-layer global multiplier (one neuron per cycle),
- the activation-derivative identities,
- per-layer (I,F) precisions,
- the pipelined ordering of back-propagation.

These are this design's own choices, because the paper leaves them open:
- the sign bit, truncation and saturation;
- the PLAN sigmoid;
- the squared-error loss;
- the zero input on MUX3, and keeping G_i in R1 after step 2;
- doing the weight add at the weight buffer's write port;
- keeping weights in the layer weight buffer rather than copied into PE
  scratchpads;
- one lane per layer for the 2D array;
- two cycles per weight update;
- all buffer organisations and handshakes;
- the host interface;
- the LeNet layer sizes.

Not built:
- The convolutional layers and their row-stationary mapping. The paper gives
  only a cycle count for them.
- The off-chip memory. It is represented by the host ports.
