# LightNN inference engine

A LightNN is a neural network whose weights are restricted to "k-ones" values:
a sign times a sum of at most *k* powers of two. Every weight-by-activation
product then becomes *k* shifts and *k − 1* additions instead of a multiplication.
With *k* = 1 (LightNN-1) a weight is ±2^-m and the multiplier shrinks to one shifter.
With *k* = 2 (LightNN-2) a weight is ±(2^-m1 + 2^-m2), which costs two shifters and one adder.
Binarized networks (weights ±1) are cheaper still but lose accuracy on small networks.
LightNNs sit between those and conventional networks.

This RTL is an inference engine for fully connected LightNNs. The weights come
already trained and quantised. The engine reads an input vector and a network
description, runs the layers one after another, and reports the index of the
largest output, which is the predicted class.

## Weight codes

Each exponent *m* ranges over 0…7 and takes a 3-bit field. A weight code sits
in one storage word:

| K | word width | bits |
|---|---|---|
| 1 | 4 | `[3]` sign, `[2:0]` m |
| 2 | 8 | `[7]` unused, `[6]` sign, `[5:3]` m2, `[2:0]` m1 |

- The value is `(-1)^sign · (2^-m1 + 2^-m2)`.
- Zero cannot be encoded.
- m1 = m2 is allowed and gives 2^(1-m).

The field widths and the one-byte word for K = 2 come from the LightNN storage
analysis. The order of the fields is this design's choice.

## Number format

- Activations, inputs and biases are signed 12-bit fixed point with 8 fraction
  bits (`DATA_W = 12`, `FRAC_W = 8`). The range is −8.0 … +7.996.
- The 12-bit width matches the limited-precision LightNN implementations.
  Their floating-point single-precision version needs vendor floating-point
  adders and is not built here.
- Inside a neuron, each activation is first extended by 7 fraction bits. A right
  shift by up to 7 therefore loses nothing, and products and sums are exact.
- After the sum, the activation unit drops the 7 extra bits by truncation
  toward −∞ and saturates to the 12-bit range.

## Datapath

```
 host ──► weight_mem ──row of FAN_IN codes + bias──┐
                                                   ▼
 host ──► act_mem bank l%2 ──FAN_IN activations──► lnn_neuron ──acc──► lnn_activation ──y──► act_mem bank (l+1)%2
                                                (FAN_IN × lnn_mult,                       └─► argmax (last layer)
                                                 sum, bias, register)
                      lnn_ctrl: layer table, issue / drain / bank swap
```

- **`lnn_mult`**: the equivalent multiply unit. It makes K arithmetic right
  shifts of the extended activation, adds them, and negates the sum when the
  sign bit is set.
- **`lnn_neuron`**: one neuron built for the largest fan-in (`FAN_IN`, default 784).
  - All FAN_IN products are formed in parallel and summed with the bias, then registered.
  - Inputs at index ≥ the layer's fan-in are masked. This matters because a
    k-ones code cannot express zero, so unused inputs must be removed explicitly.
  - This one neuron unit is the whole arithmetic of the engine. A layer is
    computed by sending its neurons through it, one per cycle.
- **`lnn_activation`**: selects the activation function per layer.
  - ReLU is used by LightNN-1 and LightNN-2.
  - Sign gives ±1.0, with sign(0) = +1. It is used by the "-bin" variants.
  - Identity is used for the output layer.
- **`weight_mem`**: one row per neuron of the whole network (`ROWS`, default 110).
  A row holds the neuron's FAN_IN weight codes and its bias. A read returns the
  full row one cycle after the request.
- **`act_mem`**: two banks of FAN_IN activations.
  - Layer *l* reads bank *l* mod 2 in full, as a register file.
  - It writes its results, one per cycle, into the other bank.
  - The host loads the network input into bank 0.
- **`argmax`**: watches the output layer as it is written and keeps the first
  largest value and its index.
- **`lnn_ctrl`**: the sequencer (next section).
- **`fp32_shift_unit`** (standalone, not used by the engine): the LightNN-1
  multiply for single-precision operands.
  - Multiplying by ±2^-m subtracts m from the exponent and XORs the sign.
  - Zero, subnormal and underflowing results become a signed zero.
  - Infinities and NaNs only take the sign.
  - It shows the floating-point form of the unit. The engine itself is fixed point.
- **`lightnn_pkg`**: holds the shared widths, the activation-mode enum and the
  layer-table entry type.

## Sequencing and timing

The controller keeps a table of up to `MAX_LAYERS` (4) entries. Each entry is a
`layer_cfg_t`: fan-in, fan-out, first weight row, and activation function.
Within a layer, neuron *j* moves through three pipeline steps:

| cycle | step |
|---|---|
| t | read weight row `row_base + j` |
| t+1 | neuron unit sums the products (`nrn_valid`) |
| t+2 | activation, write-back to `act_mem` (`wb_we`); argmax in the last layer |

- One neuron is issued every cycle.
- After the last neuron of a layer, the controller waits two cycles for the
  pipeline to drain, then swaps the banks. A layer of N neurons thus takes N + 2 cycles.
- `done` pulses Σ(N_l + 2) + 1 cycles after `start`. For the MNIST 784-100-10
  network that is 115 cycles.
- Loading the weights through the one-code-per-cycle host port takes far longer:
  about 78,400 cycles.

Host protocol, with the engine idle:

1. Write the weight codes (`w_we/w_row/w_col/w_code`) and biases (`b_*`).
2. Write the input vector (`x_*`, into bank 0).
3. Write the layer table (`cfg_*`) and set `num_layers`.
4. Pulse `start`.

`busy` stays high until the last write-back. The output-layer values can then be
read through `res_addr/res_data`. Weight, bias and table writes are ignored
while busy.

Assertions check the host rules:

- the layer table is within range: fan-in and fan-out are 1…FAN_IN, and rows fit in `ROWS`;
- `num_layers` is 1…MAX_LAYERS;
- the table is not written while busy;
- the write-back stays in step with the neuron register.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `K` | 2 | ones per weight (2: LightNN-2, 1: LightNN-1) |
| `DATA_W` | 12 | activation width |
| `FRAC_W` | 8 | activation fraction bits |
| `FAN_IN` | 784 | largest fan-in = neuron unit width = activation bank depth |
| `ROWS` | 110 | neurons in the whole network |
| `MAX_LAYERS` | 4 | layer table entries |

The defaults hold the MNIST "1-hidden" network: 784 inputs, 100 hidden ReLU
neurons, 10 outputs, 79,510 parameters.

The other evaluated networks do not fit:

- MNIST 3-hidden (three hidden layers of 4096) needs FAN_IN = 4096 and ROWS = 12,298.
  The layer type is supported, so only the parameters would have to grow.
- The convolutional networks (MNIST 2-conv, CIFAR-10 3-conv and 6-conv) need
  convolution and pooling. This engine has no mapping for them.

## How far it follows the LightNN design, and where it departs

Follows:

- k-ones weights with 3-bit exponents 0…7, stored in 4 bits (K = 1) or one byte (K = 2).
- Shift-and-add products.
- ReLU or sign activations per layer.
- One neuron's logic sized for the largest neuron, computing layer after layer
  from fetched weights, with results written back.
- Prediction by the largest output.

This design's own choices:

- fixed point instead of single-precision floating point;
- the fraction format, truncation and saturation;
- the weight-code bit order;
- parallel fetch of a whole weight row;
- the two-bank activation register file;
- one neuron per cycle with a two-cycle drain;
- the layer table and the host interface;
- sign(0) = +1;
- argmax ties go to the lowest index.

Not included:

- weight training and quantisation, including stochastic rounding. These are
  done offline, and the engine takes finished codes;
- the floating-point neuron datapath (only its LightNN-1 shift unit is given);
- convolution;
- the fully parallel "whole network in logic" variant used for very small networks.

## Verification

Each block has a self-checking testbench in `tb/`. Reference values come from
plain integer multiplication and division in `tb/tb_ref_pkg.sv`, never from
shifts.

| testbench | what it checks |
|---|---|
| `tb_lnn_mult` | all weight codes for K = 1 and 2 against edge and random activations |
| `tb_lnn_neuron` | a new random neuron every cycle, varying fan-in, one-cycle latency |
| `tb_lnn_activation` | all three functions on edge and random sums, saturation flag |
| `tb_weight_mem` | row read latency and hold, read-during-write |
| `tb_act_mem` | bank isolation, parallel and single reads |
| `tb_fp32_shift_unit` | all weight codes on edge floats (zeros, subnormals, limits, infinities, NaN) and random words, against a real-number reference |
| `tb_argmax` | ties, negative values, gaps |
| `tb_lnn_ctrl` | issue order, write-back two cycles after issue, banks, run length for 1-, 3- and 4-layer tables |
| `tb_lightnn_top` | LightNN-2 and LightNN-1 engines (32-input) side by side on five random networks |
| `tb_lightnn_full` | the default-size engine running a random 784-100-10 network end to end |

`tb_lightnn_top` compares every output value, the predicted class and the run
length against the reference. It also requires that each of the following
occurs at least once:

- ReLU, sign and identity layers;
- ReLU clipping;
- input masking;
- bank swap;
- saturation;
- back-to-back runs.

`tb_lightnn_full` checks the 115-cycle run, the 10 outputs and the class.

The weights in the tests are random codes, not a trained network, so the tests
check arithmetic and control, not classification accuracy.

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

Simulating with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_lightnn_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/lightnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_lightnn_top.sv
./obj_dir/Vtb_lightnn_top
```

The same pattern works for any testbench; replace the last file and the top
module name. The full-size test runs in a few seconds.

Lint warnings that remain, and why they stand:

- `SYNCASYNCNET` on `rst_n`: the concurrent assertions use the asynchronous
  reset in `disable iff`.
- Logic synthesis of the default size is slow, because the neuron unit holds
  784 shifter/adder pairs and a 784-input sum.
