# A multiplier-free, bit-pruned MLP classifier for printed electronics

Printed circuits are cheap, flexible and non-toxic, but their transistors
are huge and slow. A conventional multilayer perceptron in printed
technology takes tens of square centimetres and tens of milliwatts. The
method this RTL implements is from "Embedding Hardware Approximations in
Discrete Genetic-based Training for Printed MLPs" (DATE 2024). It builds a
*bespoke* circuit for one trained network, with every coefficient wired in,
and it restricts the network to coefficients that are nearly free in
hardware:

* **Every weight is a signed power of two**, `w = s * 2^k`. Multiplying by a
  constant `2^k` is a shift, and a constant shift is only wiring. A negative
  sign costs one inverter per bit plus a constant.
* **Every weight has a bit mask `m`.** Only the input bits where `m` is 1
  enter the adder. A removed bit becomes a constant 0 in the adder tree, and
  full adders that only see constant zeros disappear during synthesis. A
  zero mask removes the whole connection. This is pruning at the level of
  single bits rather than whole weights.

Masks, signs, shifts and biases are integers, not differentiable
quantities. So the network is trained by a multi-objective genetic
algorithm (NSGA-II), which trades accuracy against an estimated full-adder
count. The training is software. This repository holds the circuit that a
trained chromosome turns into. Because no trained chromosome has been
published, a fixed pseudo-random one stands in by default (see
"Departures and own choices").

## The neuron

Neuron `j` of layer `l` computes

```
acc_j = sum_i  s_ij * ((x_i AND m_ij) << k_ij)  +  b_j
act_j = QReLU(acc_j)
```

Here `x_i` are unsigned activations: 4-bit features in layer 0 and 8-bit
QReLU outputs in layer 1. `m_ij` has the width of `x_i`. `k_ij` lies in
`0..6`, the range `[0, n-1)` for `n = 8` weight bits. `b_j` is a signed 8-bit
bias. No zero weight is needed: a zero mask is the same thing in hardware.

### How a weight becomes wiring (`pow2_masked_term`)

For a positive weight the summand is the masked input placed `k` columns
to the left. Take the example gene `m = 1001, s = -1, k = 3` with input
`x = x3 x2 x1 x0`. The row that enters the adder is `x3 0 0 x0 0 0 0`. Its
two middle bits are removed by the mask, and its three low bits are the
zeros the shift leaves. The row is then inverted, because `s = -1`.

Two's complement negation is `~v + 1`. The inverter part stays with the
summand. The `+1` is not added there. The neuron counts its negative,
non-removed summands and adds that count to the bias, at elaboration time.
The result is one constant row (`KCONST` in `approx_neuron`). So a neuron's
adder sees exactly `N_IN + 1` rows: one per input and one constant. The
upper bits of an inverted row are constant ones, and they fold into the
constant arithmetic the same way.

### The adder tree (`csa_adder_tree`)

The rows are summed by 3-to-2 reduction with full adders:

* Each level takes the rows three at a time.
* Each group of three goes through a row of full adders. The sum bit stays
  in its column. The carry moves one column to the left.
* Leftover rows pass to the next level unchanged.
* When at most two rows remain, a carry-propagate adder finishes the sum.

All arithmetic is modulo `2^ACC_W`. `ACC_W` is sized by
`mlp_pkg::acc_width` so that no possible sum overflows:

| layer (default build) | rows | ACC_W |
|---|---|---|
| hidden: 16 inputs x 4 bit, shift up to 6, bias 8 bit | 17 | 15 |
| output: 5 inputs x 8 bit, shift up to 6, bias 8 bit | 6 | 18 |

The RTL reduces whole rows (carry-save form). The full adders that see
constant-zero bits are removed by logic synthesis, not by the RTL. The cost
model used during training counts full adders column by column, over the
non-zero bits only. A synthesised netlist gives the same kind of saving:
for every three constant zeros in a column, one full adder and one carry
into the next column disappear.

### QReLU (`qrelu`)

A negative sum gives 0. A non-negative sum is shifted right by `SHIFT` and
clipped to 255, so activations always fit in 8 bits. `SHIFT` defaults to 0
(plain clipping). The hidden layer's value is set by `L0_SHIFT` at the top.

## The classifier (`approx_mlp`)

```
x_in[N_IN] (4 b) -> input reg -> hidden layer (N_HID neurons, QReLU) -> 8 b activations
                 -> output layer (N_OUT neurons, raw signed sums) -> argmax -> output reg -> class_out
```

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `in_valid` | in | 1 | `x_in` holds a sample |
| `x_in` | in | `N_IN x 4` | features, packed `[N_IN-1:0][3:0]` |
| `out_valid` | out | 1 | `class_out` holds a result |
| `class_out` | out | `clog2(N_OUT)` | predicted class |

The entire network is one combinational path between two registers. A
sample is accepted on an edge where `in_valid` is high. Its class appears
after the next edge, with `out_valid` high. That gives one inference per
clock, with a result one clock after sampling. In printed technology the
clock is very slow: the source design is timed at a 200 ms period, 250 ms
for the largest network. A reset clears both valid flags and drops a
sample in flight.

`argmax` walks the scores in order and replaces the current best only
with a strictly larger score. So on a tie the lowest class index wins.

## Loading a trained network

All coefficients are parameters of `approx_mlp`:

| parameter | type | index | meaning |
|---|---|---|---|
| `N_IN, N_HID, N_OUT` | int | | topology, default 16, 5, 10 |
| `L0_GENES` | `gene_t [N_HID-1:0][N_IN-1:0]` | `[neuron][input]` | hidden-layer genes |
| `L0_BIAS` | `logic [N_HID-1:0][7:0]` | `[neuron]` | hidden biases, two's complement |
| `L1_GENES` | `gene_t [N_OUT-1:0][N_HID-1:0]` | `[neuron][input]` | output-layer genes |
| `L1_BIAS` | `logic [N_OUT-1:0][7:0]` | `[neuron]` | output biases |
| `L0_SHIFT` | int | | hidden QReLU right shift, default 0 |

`mlp_pkg::gene_t` is `{m[7:0], neg, k[2:0]}`, where `neg = 1` means
`s = -1`. In layer 0 only `m[3:0]` is used. The indexing follows the order
of the chromosome: per weight (mask, sign, shift), then per neuron, then
per layer. When you change the topology you must give all four gene and
bias parameters at the new sizes. `tb/mlp_topology_check.sv` shows how to
compute them with constant functions.

The default genes come from `mlp_pkg::default_gene`, which hashes
(layer, neuron, input) into a 32-bit value:

* The mask is bits of the hash, limited to the input width.
* One hash value in eight forces a zero mask; one in eight forces a full
  mask.
* The sign and the shift (`0..6`) are further hash bits.

These genes only exercise the circuit. They classify nothing meaningfully.

## Evaluated networks

The five networks of the source evaluation. Each is a separate bespoke
circuit:

| data set | topology (in, hidden, classes) | default build runs it? |
|---|---|---|
| Breast Cancer | 10, 3, 2 | no, build with these parameters |
| Cardiotocography | 21, 3, 3 | no, build with these parameters |
| Pendigits | 16, 5, 10 | yes (the default) |
| Red Wine | 11, 2, 6 | no, build with these parameters |
| White Wine | 11, 4, 7 | no, build with these parameters |

`tb_mlp_workloads` builds all five and checks them, each with its own
pseudo-random chromosome.

## Departures and own choices

The source describes the neuron arithmetic, the approximations and the
full-adder reduction. The choices below are this design's own:

* **Registers, reset and handshake.** Only the clock period is given. The
  input and output registers, `in_valid`/`out_valid` and the asynchronous
  reset were added here.
* **Classifier stage.** Argmax, with ties going to the lowest index, is
  assumed.
* **No QReLU on the output layer.** The neuron equation is written with
  QReLU on every neuron. Here the output layer feeds raw sums to argmax,
  since clipping would create ties between saturated classes. Set
  `USE_QRELU` on that layer to change this.
* **Number formats.** The sign encoding (`neg` bit), the bias width (8 bits,
  added at the least significant bit), the `k` range (0..6, from `n = 8`),
  the QReLU scaling (`SHIFT`, default 0) and the accumulator widths are all
  assumed.
* **Adder reduction.** Rows are reduced word-wise rather than on a
  column-wise schedule, and the final adder is a plain `+`. After constant
  propagation the logic is the same.
* **Default chromosome.** It is pseudo-random, as described above.

Not part of this RTL: the genetic training, the full-adder area estimator,
the printed (EGFET) cell library, and the printed batteries or energy
harvester. The accuracy, area and power figures of the source cannot be
reproduced here, because they depend on its trained chromosomes and its
cell library.

## Verification

Each block has a self-checking testbench in `tb/`. They compare the RTL
with `tb/mlp_ref_pkg.sv`, an integer model that uses real multiplication
and negation, with no inverters, folded constants or adder trees:

| testbench | what it checks |
|---|---|
| `tb_pow2_masked_term` | every input value, for five gene kinds: partial mask, the `1001/-1/3` example, zero mask, largest shift, 8-bit input |
| `tb_csa_adder_tree` | random and all-ones operands for trees of 1, 2, 3, 4, 6, 11 and 17 rows |
| `tb_qrelu` | all 65,536 inputs, shift 0 and shift 3 |
| `tb_argmax` | random scores, forced ties, extremes |
| `tb_approx_neuron` | 16-input, 3-input and 5-input neurons; requires negative summands, partial masks, removed summands, shifts and QReLU at 0, 255 and in range |
| `tb_approx_layer` | 6-input, 4-neuron layer; each neuron must use its own genes |
| `tb_approx_mlp` | default build, no overrides: 3,000 offered samples with random gaps and a mid-stream reset. Checks class, order and one-clock latency, and requires every mechanism to occur |
| `tb_mlp_workloads` | the five topologies above, 500 samples each |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mlp_pkg.sv tb/mlp_ref_pkg.sv tb/tb_approx_mlp.sv --top-module tb_approx_mlp
./obj_dir/Vtb_approx_mlp
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
All of them finish in well under a second. The RTL passes Verilator's
lint (`-Wall`) and slang elaboration with no circuit warnings. The default
classifier synthesises to about 860 word-level cells and 69 flip-flop bits
before technology mapping.
