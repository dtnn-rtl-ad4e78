# DTNN classifier: neural network inference from lookup tables only

A conventional neuron multiplies every input by a stored weight and adds the
results. When the activations are binary, each neuron is only a Boolean
function of its inputs, and a lookup table can compute it without fetching
weights or doing arithmetic. But a table grows as 2^n with n inputs, so a
784-input neuron cannot be one table. The dendrite-tree neuron (Dtree
neuron) solves this the way a biological dendrite does. It splits the inputs
into groups of six. Each group goes into a 6-input LUT. The LUT outputs are
grouped by six again, and so on, until a single LUT gives the neuron's output.
Training folds the weights, biases and activation functions into the table
contents.

This RTL implements the MNIST classifier built that way. The datapath has
four stages:

| stage | module | work |
|---|---|---|
| 1 | `input_binarizer` | each 8-bit pixel is compared with 5 thresholds (0.2, 0.4, 0.5, 0.6, 0.8 of full scale, as codes 51/102/128/153/204), giving 5 binary images |
| 2 | `dtnn_fc_layer` (hidden) | each of the 5 ensemble members has 216 Dtree neurons reading its 784-bit image |
| 3 | `dtnn_fc_layer` (output) | each member has 10 Dtree neurons reading its 216 hidden bits |
| 4 | `ensemble_combiner` | per class, a single 6-LUT reduces the 5 member votes to one bit |

Every stage is registered. One image enters per clock and its 10 class bits
appear 4 clocks later. With `N_HID = 0` (the smaller 784-10 classifier) the
hidden stage is absent and the latency is 3.

## Tree shape

A neuron with n inputs has levels of ceil(n/6), ceil(ceil(n/6)/6), ... LUTs,
down to one. The last LUT of a level takes the remainder, and its unused index
bits are tied to 0. For 784 inputs this gives 131 + 22 + 4 + 1 = 158 LUTs; for
216 inputs it gives 36 + 6 + 1 = 43. The whole default classifier therefore
holds 5·(216·158 + 10·43) + 10 = 172,800 LUTs, and the 784-10 variant holds
7,910. These counts agree with the published LUT counts of the FPGA
implementations (172.79 K and 7.90 K). The shape functions are in `dtnn_pkg`.
One point departs from the source: a closed formula there, floor(log6 n), says
3 levels for 784 inputs. This design uses the 4 levels that repeated
ceil-division needs.

## Loading a network

On an FPGA the tables come from the bitstream. Here every neuron keeps its
tables in registers, and they are written through one port, `cfg`
(`dtnn_pkg::cfg_t`). Each clock with `cfg.we = 1` writes one 64-bit table,
selected by these fields:

* `member`: 0–4.
* `layer`: `CFG_HIDDEN`, `CFG_OUTPUT` or `CFG_COMBINER`.
* `neuron`: the neuron inside the layer.
* `lut`: the LUT inside the neuron. LUTs are numbered level by level, and node k of level 1 is LUT k.

Bit i of `data` is the output for index i, where input 0 of the node is the
index LSB. Addresses out of range are ignored. The tables are not reset. A
full load of the default design takes 172,800 clocks. This port is a design
choice of this RTL, not part of the source design.

## Interpreting the output

`class_bits[c]` is the final binary output of class c. The source does not
say how a single digit is picked from the ten bits. That choice is left to
the logic that reads the outputs.

## Generality

`dtnn_lut` and `dtree_neuron` also take `FANIN` and `ACT_W`. With those set,
a node looks up FANIN activations of ACT_W bits in a table of
ACT_W·2^(FANIN·ACT_W) bits. This matches the multi-bit (3–6 bit) activations
that the method uses for CNNs. The classifier uses only `FANIN = 6` and
`ACT_W = 1`. No convolutional dataflow is provided.

## Verification state

Each block except the top has a self-checking testbench in `tb/`.

* The testbenches compare against a software tree model, `dtnn_tb_pkg::ref_tree`.
* Tables come from a hash of their address.
* They check latency and one-per-clock throughput.
* They check that ignored writes change nothing.

All of these pass with Verilator 5. The end-to-end testbench
`tb_dtnn_classifier` runs two small classifiers: one with `N_HID = 12`, and a
784-10 instance. It checks them against `ref_classifier` and reloads the
combiner tables mid-stream. **It has not yet been run:** on a 16 GB machine
its C++ build ran out of memory. Treat the top-level integration as reviewed
but not simulated. There is no full-size simulation.

Simulate a block with, for example:

    verilator --binary --timing --assert -y rtl +libext+.sv \
      rtl/dtnn_pkg.sv tb/dtnn_tb_pkg.sv tb/tb_dtree_neuron.sv --top-module tb_dtree_neuron
    ./obj_dir/Vtb_dtree_neuron

Elaborating the full-size top is heavy. A slang-based front end needs about
45 MB and about 1 s per hidden neuron, so roughly 10 GB at the default size.
