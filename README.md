# Prediction poisoning for a hardware neural-network classifier

A neural network deployed in hardware can be copied without opening the chip. An
attacker with a working device queries it with many inputs, collects its output
probabilities, and trains a network of their own on those pairs ("knowledge
distillation"). Locking the weights behind a key does not help, because this attack
never needs the weights or the key, only the answers.

This design makes the answers worse teachers without making them worse answers. It
perturbs the class scores or the class probabilities with a cheap, deterministic
quantisation error. The top class stays the same, so the owner's accuracy barely
changes. The fine structure of the probability vector, which is what a distilling
student learns from, is destroyed or coarsened. The perturbation is plain bit
truncation: it needs no key and no random source, and it adds no clock cycle.

The RTL is a complete multilayer-perceptron classifier with this poisoning built in:
fully-connected layers, ReLU, SoftMax, and one of four defences chosen when the design
is built.

## Datapath

```
 in_data ─► input buffer (N_IN words)
              │
              ▼
        ┌─ dense layer 0 ─► ReLU ─┐
        │        ...              │   N_HID_LAYERS hidden layers, N_HID neurons each
        └─ dense layer L-1 ► ReLU ┘
              │
              ▼
        dense layer L  (N_CLASS scores)
              │
          [ST] pqn_trunc          ◄── score truncation, before SoftMax
              │
           softmax
              │
          [PT] pqn_trunc          ◄── prediction truncation, after SoftMax
          [Top1/Top3] topk_filter ◄── keep only the K largest predictions
              │
              ▼
          out_pred[N_CLASS]
```

Only one of the bracketed stages exists in a given build (parameter `POISON`). The
others are not generated at all, and without a defence the probabilities go straight
out.

## The four defences

Every score and probability is a 16-bit two's-complement word with 10 fractional bits
(1.0 = 1024). "Truncation to Q bits" keeps the Q most significant bits of that word and
clears the other 16 − Q. The value moves down onto a grid of step 2^(16−Q) LSBs. The
error always lies in (−step, 0], and it looks like quantisation noise that depends on
the data.

| defence | stage | what the attacker sees |
|---|---|---|
| ST, score truncation (Q = 9, 6, 5 evaluated) | on the class scores, before SoftMax | a complete, smooth-looking probability vector computed from coarsened scores. At Q = 5 the step is 2048 LSB = 2.0 in score units, a factor of e² in relative probability |
| PT, prediction truncation (Q = 9, 8, 7 evaluated) | on the probabilities, after SoftMax | probabilities on a grid of 1/16 (Q = 9) to 1/2 (Q = 7); most small probabilities become 0 |
| Top1 | after SoftMax | only the largest probability; all others read 0 |
| Top3 | after SoftMax | the three largest probabilities; all others read 0 |

The recommended defence, and the default build, is **ST with Q = 5**. It keeps a
plausible distribution over all classes, which hides that anything was done. Its
effect on the owner's accuracy is a few percent. PT at 7 to 8 bits zeroes nearly
everything, so it damages the device's own output much more. Top1 and Top3 are
obvious to an observer and were found to leave the model easier to steal.

Why the top class survives: truncation is monotonic (x ≤ y ⇒ t(x) ≤ t(y)), so it never
swaps the order of two words. It can only merge two words that fall into the same grid
cell into a tie. SoftMax is also monotonic, so under ST the largest score still gives
the largest probability. The only exception is a tie the truncation creates, which
SoftMax then breaks towards the lower class index. Under PT the same holds for the
probabilities, but at small Q whole vectors collapse to zero.

## Number format and arithmetic

* Activations, weights, biases, scores and probabilities: 16-bit signed, 10 fractional
  bits (range −32 to +32 − 2⁻¹⁰). The 16-bit width is the published one. The split
  into 6 integer and 10 fractional bits is this design's choice, matching the usual
  default of the HLS flow such networks come from.
* A dense layer accumulates full-precision products (20 fractional bits) in 48 bits,
  adds the bias aligned to 20 fractional bits, then shifts right by 10 (floor) and
  saturates to 16 bits.
* SoftMax subtracts the largest score, so every exponent is ≤ 0. It looks up
  e^(−k/16) for k = floor((max − s_i)/64) in a 256-entry table, stored as unsigned
  Q1.15 and computed at elaboration as round(e^(−k/16) · 32768). Differences of 16.0 or
  more give 0. Each probability is then the exact quotient
  floor(e_i · 1024 / Σ e_j), so the probabilities of one image add up to 1024 minus at
  most N_CLASS − 1.

## Dense layer: schedule and weight memory

The fully-connected layer (`dense_layer`) works through its neurons one after another.
Each cycle it feeds one chunk of LANES consecutive inputs to LANES multipliers, adds the
products in a tree and accumulates. A neuron therefore takes ceil(N_IN/LANES) cycles,
and the layer takes N_OUT of those. The weights live in LANES memories, one per
multiplier. Weight w[o][i] is in memory i mod LANES at address o·ceil(N_IN/LANES) +
⌊i/LANES⌋, so one read of all memories returns exactly the chunk's weights. The read
is synchronous, like a block RAM, and the multiply-accumulate stage runs one cycle
behind it. Inputs past N_IN in the last chunk are replaced by zero.

LANES (default 16) sets the speed against area. It does not change the numbers the
layer produces.

Trained weights are the very thing being protected, and the design has no fixed
network. Weights and biases are written at run time through the load port `wl`
(`nn_pkg::wload_t`):

| field | meaning |
|---|---|
| `en` | write this cycle |
| `layer` | dense layer index, 0 = first hidden layer, N_HID_LAYERS = output layer |
| `bias` | 1: write bias[neuron]; 0: write weight[neuron][input_idx] |
| `neuron`, `input_idx` | 12-bit indices |
| `data` | the 16-bit value |

The load port is only for use while no image is being processed. An assertion checks
this.

## Top level (`nn_obf_top`)

Parameters (defaults = the MNIST perceptron 784-100-10 with ST, 5 bits):

| parameter | default | meaning |
|---|---|---|
| `N_IN` | 784 | input words per image |
| `N_HID` | 100 | neurons per hidden layer |
| `N_HID_LAYERS` | 1 | hidden layers (1 to 14) |
| `N_CLASS` | 10 | classes |
| `LANES` | 16 | multipliers per dense layer |
| `POISON` | `POISON_ST` | `POISON_NONE`, `_ST`, `_PT`, `_TOP1`, `_TOP3` |
| `TRUNC_Q` | 5 | bits kept by ST or PT (1 to 16; 16 = no change) |

The three evaluated perceptrons are:

* MNIST 784-100-10: the defaults.
* FashionMNIST 784-100-100-10: `N_HID_LAYERS=2`.
* SVHN 3072-200-200-200-200-10: `N_IN=3072, N_HID=200, N_HID_LAYERS=4`.

Ports:

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset (control and output registers; memories are not reset) |
| `wl` | in | weight/bias load port |
| `in_valid`, `in_data`, `in_ready` | in/in/out | one input word per cycle in which both valid and ready are high, in the network's flattened input order |
| `out_valid` | out | one-cycle pulse: `out_pred` holds the poisoned predictions of the last image |
| `out_pred[N_CLASS]` | out | predictions, 10 fractional bits, held until the next image finishes |

Operation: load all weights and biases, then stream an image. After its N_IN-th word,
`in_ready` falls and the layers run one after another. Each layer starts on the
previous one's `done` and reads its inputs straight from the previous layer's output
registers. When SoftMax finishes, `out_valid` pulses and `in_ready` rises again. One
image is in flight at a time.

### Latency

From the cycle in which the last input word is accepted to the cycle in which
`out_valid` is high:

    2 + 27·N_CLASS + Σ over dense layers (N_OUT · ceil(N_IN/LANES) + 2)

| network | cycles |
|---|---|
| MNIST 784-100-10 (default) | 5,246 |
| FashionMNIST 784-100-100-10 | 5,948 |
| SVHN 3072-200×4-10 | 46,612 |

The four defences are purely combinational. All five builds of the same network
therefore have the same latency, cycle for cycle, and the testbench checks this.

## Where this RTL stops and what it assumes

Taken from the published design:

* the idea and the place of each defence (ST before SoftMax, PT after it, Top1 and
  Top3 on the predictions);
* the evaluated truncation widths;
* 16-bit scores and predictions;
* the layer sequences and neuron counts of the three perceptrons;
* the neuron datapath (multiply, accumulate, ReLU);
* SoftMax as the normalised exponential;
* zero added cycles for the defences.

This design's own choices:

* the 6.10 fixed-point split;
* keeping the upper Q bits as the meaning of "truncation to Q bits";
* saturation in the dense layers, where the HLS default would wrap;
* the lane-parallel time-multiplexed layer schedule and its memory layout;
* the run-time weight load port;
* the streaming input and one-image-at-a-time control;
* the SoftMax table resolution and its sequential divider;
* the tie rule of Top1/Top3 (lower index wins).

The published implementations came from an HLS flow and are fully parallel FPGA
designs. This RTL computes the same functions with a different, much smaller schedule,
so its area and speed are not comparable with the published FPGA figures.

Not included: the convolutional networks that were also evaluated. Their layer types
are known, but their kernel sizes, strides and padding are not, and the poisoning
stage does not depend on what comes before the output layer.

## How far it can be trusted

* Every prediction in the system tests matches a bit-exact model written from the
  definitions in "Number format and arithmetic". That shows that the RTL does what those
  definitions say. The definitions themselves are partly this design's choices: the
  binary point, saturation, the exp table and floor division. A network trained and
  quantised elsewhere will give slightly different probabilities unless its inference
  code uses the same rules.
* Each testbench was also run against a copy of its module with one deliberate error
  and failed, as it should.
* Cycle counts are checked exactly, and so is the claim that a defence adds no
  latency.
* Nothing here measures the security effect (how much a distilled copy loses). That
  is a property of the training experiment, not of the logic.
* Timing closure, area and power have not been evaluated for any technology.

## Files

| file | contents |
|---|---|
| `rtl/nn_pkg.sv` | shared types: `data_t`, `poison_e`, `wload_t`, `sat16` |
| `rtl/dense_layer.sv` | fully-connected layer with weight memories |
| `rtl/relu.sv` | rectifier |
| `rtl/pqn_trunc.sv` | truncation stage (ST and PT) |
| `rtl/softmax.sv` | SoftMax with exp table and divider |
| `rtl/topk_filter.sv` | Top1 / Top3 filter |
| `rtl/nn_obf_top.sv` | the classifier |
| `tb/nn_ref_pkg.sv` | bit-exact reference model used by the system testbenches |
| `tb/tb_*.sv` | self-checking testbenches, one per module plus system tests |

## Simulation

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a cycle watchdog. To run one with
Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_nn_obf_top \
    rtl/nn_pkg.sv rtl/*.sv tb/nn_ref_pkg.sv tb/tb_nn_obf_top.sv -o sim
obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_relu`, `tb_pqn_trunc`, `tb_topk_filter` | random and corner-value checks of the combinational stages (small values around zero for ReLU; Q = 16, 9, 8, 7, 6, 5, 4; K = 1 and 3 with many ties) |
| `tb_softmax` | 150 score vectors (narrow, wide and full-range) against the formula; sum ≈ 1; order kept; latency 271 cycles |
| `tb_dense_layer` | small layer with a padded last chunk; random weights; writes to other layers ignored; saturation both ways; latency |
| `tb_nn_obf_top` | reduced network (50-12-12-10) built nine times, once per evaluated defence setting (none, ST at 5, 6 and 9 bits, PT at 7, 8 and 9 bits, Top1, Top3), on shared inputs. Checks every prediction against the reference model and the latency of every build. Counts ReLU clipping, input stalls, ST changes, PT changes and zeroing, and Top1/Top3 suppression, and fails if any of these never happens. Also checks that Top1/Top3 keep the top class |
| `tb_nn_obf_full` | the default build (784-100-10, ST 5 bits), unmodified: loads 79,510 weights and biases, classifies five images, checks every prediction, the 5,246-cycle latency, and that a clear top class survives truncation |
| `tb_nn_obf_workloads` | the FashionMNIST and SVHN perceptrons at full size with ST 5 bits, checked against the reference model |

The reference model works from the arithmetic definitions above: integer dense layers,
floor and saturate, truncation as floor to a grid, SoftMax from the exponential formula
and integer division. It shares no code with the RTL.
