# DWN inference accelerator: a pipelined network of lookup tables

A Differentiable Weightless Neural Network (DWN) classifies without weights or
multiplications. Every neuron is a small lookup table, a *RAM node*, addressed
by n binary inputs and holding 2^n trained bits. Layers of RAM nodes are chained
directly: the bits one layer outputs form the addresses of the next. The
network ends by counting ones per class and picking the class with the
largest count. Inputs reach the first layer as thermometer codes: z bits per
feature, with bit i set when the feature exceeds the i-th of z ordered
thresholds.

Training (done offline, in software) learns the table contents and also which
previous-layer bit drives each address input. Once training is over, both are
constants. In hardware a RAM node with n = 6 is exactly one FPGA LUT-6 or one
small block of gates, and the wiring between layers is plain wires. This RTL
implements that inference engine. The engine is:

* a 112-bit input port with decompression of the thermometer codes;
* a chain of registered LUT layers;
* per-class popcounts and an argmax, or, for tiny two-class chips, a learned
  pyramid of LUTs in place of the popcounts and argmax.

The engine is fully pipelined. It accepts a new sample every clock cycle, and
only the input port limits the rate.

The default configuration is the small MNIST model of the reference design:

* 784 features with z = 1;
* LUT-6 layers of 1000 and 500 nodes;
* 10 classes, 50 final nodes per class;
* a 112-bit input port.

The result appears 12 cycles after the first input beat. That is 60 ns at the
200 MHz clock of the reference implementation, the latency reported for that
model.

```
 in_data[111:0] ─► Interface / ─► Interconnect ─► LUT layer 0 ─► Interconnect ─► LUT layer 1 ─► Σ per class ─► argmax ─► out_class
 in_valid          Decompress     (fixed wires)   1000 × LUT-6   (fixed wires)   500 × LUT-6    (popcount)
                   (reg)                          (reg)                          (reg)          (reg)         (reg)
```

## Data flow and timing

Every stage ends in a register and nothing ever stalls. A sample enters as
`BEATS = ceil(NUM_FEATURES · ceil(log2(Z+1)) / BUS_W)` beats on `in_data`,
each one qualified by `in_valid`. Say the first beat is presented in cycle 0
and no idle cycles follow. Then:

| cycle | what holds the sample |
|---|---|
| 0 … BEATS-1 | input beats; the first BEATS-1 are buffered |
| BEATS | decompressed thermometer vector (interface register) |
| BEATS + l | output of LUT layer l (l = 1 … NUM_LAYERS) |
| BEATS + NUM_LAYERS + 1 | per-class popcounts |
| BEATS + NUM_LAYERS + 2 | `out_valid`, `out_class` |

At the defaults this is cycles 0–6 for the input and cycle 11 for the output:
12 cycles end to end. With the reduction head, the popcount and argmax rows
are replaced by one cycle per pyramid level.

The first beat of the next sample can follow the last beat of the previous
one directly. Beats can also be spread out with `in_valid` low in between;
the beat counter then just waits. There is no ready signal, because every
stage behind the port takes one sample per cycle. `out_valid` is high for one
cycle per sample, and results come out in input order.

Reset (`rst_n`) is asynchronous and active low. It clears the valid bits and
the beat counter. Data registers are not reset, because they are only read
while their valid bit is set.

## RAM nodes, the learned wiring, and where the model lives

`ram_node` is one K-input table. The top address bit steers a 2:1 multiplexer
between two (K-1)-input halves, the way an FPGA LUT-6 is built from two LUT-5s.
Mapped input k of a node is address bit k, with input 0 as the least
significant bit. Stored bit `INIT[a]` is the output for address `a`.

`dwn_lut_layer` instantiates `N_LUTS` nodes. Node j's address input k is wired
to previous-layer bit `dwn_pkg::map_index(SEED, style, j, k, K, N_IN)`, and
its table is `dwn_pkg::table_init(SEED, j)`. Both are evaluated while the
design elaborates, so the interconnect costs no logic at all. A layer registers
all node outputs: one cycle per layer.

**The model is not in any memory file.** It is defined by those two package
functions. Each layer calls them with a seed of its own
(`dwn_pkg::layer_seed(SEED, l)`; the pyramid uses `reduction_seed`). As
shipped, they produce a deterministic pseudo-random model: a 32-bit integer
hash of (seed, node, input) picks each input index, modulo the layer width,
and the table bits come from the same hash. This stand-in exercises every
path of the hardware, but it classifies nothing meaningful.

To deploy a trained network, rewrite `map_index` and `table_init` so that they
return the trained indices and contents, for instance from constant arrays in
the package. Nothing else changes. The testbench reference model reads the
same two functions, so every testbench stays valid for the new model. The
default model has 1500 nodes × 64 bits = 96,000 table bits (11.7 KiB) and
9000 mapping indices.

A node may read any bit of the layer before it. Several nodes may read the
same bit, and some bits may be read by none. This is what a learned mapping
produces, since each input picks its source independently.

## Input port and thermometer decompression

Sending a z-bit thermometer code for every feature would waste the 112-bit
port. Instead each feature travels as its *level*, the number of ones in its
code, in `LEVEL_W = ceil(log2(z+1))` bits. Feature f occupies sample bits
`[f·LEVEL_W +: LEVEL_W]`, beat b carries sample bits `[b·112 +: 112]`, and the
last beat is zero-padded.

`dwn_input_interface` keeps the first BEATS-1 beats in a buffer. When the
last beat arrives, it expands every feature in the same cycle: one
`thermometer_encoder` per feature, with thresholds 0, 1, …, z-1. Bit i of
feature f becomes `level > i` and lands at `out_bits[f·Z + i]`. The result is
registered. With z = 1 the level is the bit itself. With z = 200, as in the
tabular models, each feature travels as 8 bits instead of 200.

`thermometer_encoder` is a general comparator bank, `t[i] = q > thresholds[i]`,
so it can also encode raw feature values against trained thresholds. Here it
is used only for decompression. In the reference system the real-valued
features are encoded on the host.

## Output heads

**Popcount + argmax (`HEAD_POPCOUNT`, default).** The final layer's bits are
cut into `NUM_CLASSES` equal, contiguous groups: class c owns bits
`[c·G +: G]`, with G = final width / classes. `popcount` counts each group as
a tree:

1. Full adders reduce each trio of input bits to a 2-bit partial sum (carry =
   majority, sum = parity).
2. A balanced binary tree of ripple adders combines these partial sums. An
   adder at tree level d adds two (d+1)-bit operands with one half adder and
   d full adders, giving a (d+2)-bit sum. The tree is stored heap-style in
   `node[1 … 2P-1]`, padded with constant-zero leaves up to a power of two.

For 12 inputs this is the 12:4 tree: four trio full adders, then two 2-bit
adders, then one 3-bit adder, for 8 full adders and 3 half adders in all. The counts are registered. `argmax` then scans them and
keeps a later class only when its count is strictly larger, so ties go to the
lowest class index. The winning class is registered as `out_class`.

**Learnable reduction (`HEAD_REDUCTION`).** This head is for two-class
problems on very small chips. Counting ones can cost as much area as the
network itself, so the network instead learns its own reduction: a pyramid of
LUT layers, each `K` times narrower than the last, down to a single node whose
bit is the class. `dwn_reduction_tree` builds level widths `ceil(w/K)`. With
LUT-2 nodes and a 64-node last layer, these are 32, 16, 8, 4, 2 and 1, the
shape of the published tiny-chip models. Node j of a level reads the K
adjacent bits `j·K … j·K+K-1` below it. A short last group re-reads its final
bit. Each level is a registered `dwn_lut_layer`.

## Parameters and evaluated model sizes

`dwn_accelerator` parameters:

| parameter | default | meaning |
|---|---|---|
| `BUS_W` | 112 | input bits per cycle |
| `NUM_FEATURES` | 784 | features per sample |
| `Z` | 1 | thermometer bits per feature |
| `LUT_K` | 6 | inputs per RAM node (body and pyramid) |
| `NUM_LAYERS` | 2 | LUT layers in the body (1 … 8) |
| `LAYER_LUTS` | `'{1000, 500, 0, …}` | nodes per layer, 8 entries |
| `NUM_CLASSES` | 10 | classes; must be 2 with the reduction head |
| `HEAD` | `HEAD_POPCOUNT` | output head |
| `SEED` | 1 | selects the stand-in model |

The final layer width should be a multiple of `NUM_CLASSES`.

Other published models map onto these parameters as follows. Feature and
class counts come from the public datasets. BEATS and latency follow from the
pipeline above.

| model | Z | LUT_K | LAYER_LUTS | classes | beats | latency (cycles) |
|---|---|---|---|---|---|---|
| MNIST small (default) | 1 | 6 | 1000, 500 | 10 | 7 | 12 |
| MNIST large | 3 | 6 | 2000, 1000 | 10 | 14 | 19 |
| MNIST n=2 large | 3 | 2 | 6000, 6000 | 10 | 14 | 19 |
| Fashion-MNIST | 7 | 6 | 2000, 2000 | 10 | 21 | 26 |
| CIFAR-10 | 10 | 6 | 8000 | 10 | 110 | 114 |
| JSC (16 features) | 200 | 6 | 10 / 50 / 360 / 2400 | 5 | 2 | 6 |
| tiny two-class chip (5 features) | 200 | 2 | 64 + reduction head | 2 | 1 | 9 |

## How far this follows the reference design

These parts follow the reference design directly:

* the dataflow: decompress, then fixed interconnect, registered LUT layers,
  per-class summation and argmax;
* LUT-6 nodes built as two LUT-5s and a multiplexer;
* a register after every node;
* the popcount built from trios of full adders feeding a tree of
  half-/full-adder ripple adders;
* the thermometer code definition;
* the learnable-reduction pyramid;
* the default model sizes.

These are choices of this implementation:

* the address bit order;
* the level-code compression format and beat packing;
* the valid-only port;
* the assignment of contiguous final-layer groups to classes;
* the register stages after the popcounts and after argmax;
* lowest-index tie breaking;
* the reset scheme;
* adjacent-group wiring in the pyramid (the published pyramid may use learned
  wiring);
* the pseudo-random stand-in model.

Known differences from the published results:

* **Throughput.** With level coding, a 784-feature z = 1 sample needs 7 beats,
  so the engine delivers 28.6 M samples/s at 200 MHz. The reference reports
  50 M/s for this model, so its compression must pack samples more densely,
  by a method it does not describe. The core itself takes one sample per
  cycle, so a denser front end would lift the limit. Fed directly with
  thermometer bits (the reference's out-of-context measurement), the core
  classifies one sample per clock.
* **Latency of larger models.** This pipeline gives 19 cycles (95 ns) for
  the large MNIST model, against a reported 125 ns. The number of register
  stages in the reference is not known.
* **Model contents.** The network computes correctly for whatever model
  `dwn_pkg` defines, but no trained model is included, so no accuracy figure
  can be reproduced with the stand-in.
* **Training.** Training is not hardware and is not included: the
  extended-finite-difference gradients, the mapping weights and spectral
  regularization all stay in software.

## Verification

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M`,
and a watchdog ends it with a failure if it hangs. All of them compare the RTL
with `dwn_ref_pkg`, a behavioural model that evaluates layers bit by bit from
the same `dwn_pkg` functions. It has no pipeline, no split tables and no
adder tree.

| testbench | checks |
|---|---|
| `tb_thermometer_encoder` | random values against random ordered thresholds, values equal to a threshold, level → unary code |
| `tb_ram_node` | every address of a LUT-6 and a LUT-2 |
| `tb_dwn_lut_layer` | 40-input, 16-node LUT-6 layer, a new vector most cycles, one-cycle output and valid timing |
| `tb_popcount` | 12-, 50- and 1-input trees, zeros, ones, sparse/dense random |
| `tb_argmax` | 10 classes, many ties, lowest index wins |
| `tb_dwn_input_interface` | 2-beat and 1-beat samples, idle cycles, back-to-back samples, ignored padding |
| `tb_dwn_reduction_tree` | LUT-2 pyramid 16→1 and LUT-6 pyramid 20→4→1, latency, both output values |
| `tb_dwn_accelerator` | two reduced engines on one stream (popcount head, reduction head): class and exact arrival cycle of 400 samples. Checks that multi-beat samples, idle gaps, back-to-back samples, intermediate thermometer levels, argmax ties and both reduction outputs each occur |
| `tb_dwn_accelerator_full` | the default-size engine: 60 samples, back to back and with gaps, 12-cycle latency |
| `tb_dwn_workloads` | engines at the MNIST-large, Fashion-MNIST, JSC-small, JSC-large and tiny-chip sizes, via `dwn_workload_runner` |

The largest evaluated sizes (MNIST n=2, CIFAR-10) pass the same runner.
Their verilator builds take about ten minutes, so they are not part of
`tb_dwn_workloads`, which itself builds in about three minutes.

To run one testbench with verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/dwn_pkg.sv tb/dwn_ref_pkg.sv \
  --top-module tb_dwn_accelerator_full tb/tb_dwn_accelerator_full.sv -o sim
./obj_dir/sim
```

Uninitialised state starts random in a two-state simulator. The testbenches
depend only on reset and on valid-qualified data, so any
`+verilator+rand+reset` setting works. The default engine builds in about 15
seconds and simulates in well under a second. At the default size the engine
holds about 3000 flip-flops: 672 of beat buffer, 784 + 1000 + 500 of layer
outputs, and 60 of class counts.

## Files

`rtl/` holds one unit per file:

* `dwn_pkg` — types, and the model functions;
* `thermometer_encoder`;
* `ram_node`;
* `dwn_lut_layer`;
* `popcount`;
* `argmax`;
* `dwn_input_interface`;
* `dwn_reduction_tree`;
* `dwn_accelerator` — the top.

`tb/` holds the testbenches, the reference package `dwn_ref_pkg` and the
helper `dwn_workload_runner`.
