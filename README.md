# LogicNets in SystemVerilog: neural networks built only from truth tables

A neuron whose inputs and output are quantized to a few bits has only a
small, finite set of possible inputs. If a neuron reads γ activations of β
bits each, it sees only 2^(βγ) distinct input words. So, whatever weights,
batch normalization and activation function it was trained with, its
behaviour fits exactly in a truth table with X = β·γ input bits and β output
bits. An FPGA is built from small truth tables (6-input LUTs). LogicNets
trains networks whose every neuron is small enough to become such a table,
then emits the network as a netlist of tables with registers between the
layers. The circuit has no multipliers, adders, comparators, weight memories
or control path. One level of tables (often a single LUT level) sits between
registers. A new sample can enter on every clock, and the latency is one
clock per layer.

This RTL is a parameterised generator of such networks. One top module,
`logicnets_top`, builds a fully pipelined multilayer perceptron from:

- the number of input features and their bit width;
- for each layer, the number of neurons, the activation bit width β and the
  fan-in γ (the number of inputs per neuron).

The default parameters build the smallest network reported for the
jet-substructure classification (JSC) task, called JSC-S here. It has 16
features of 2 bits, hidden layers of 64, 32, 32 and 32 neurons, and 5 output
neurons. Every neuron is a 6-input, 2-output table.

## What the circuit is made of

```
in_features ─► [input reg] ─► layer 0 ─► [reg] ─► layer 1 ─► [reg] ─► … ─► layer L-1 ─► [reg] ─► out_act
in_valid    ─► [  reg    ] ──────────────► [reg] ────────────► [reg] ─► … ──────────────► [reg] ─► out_valid
```

| file | role |
|---|---|
| `rtl/logicnets_pkg.sv` | shared types and elaboration-time functions: random sparse connectivity, neuron parameters, LUT cost model |
| `rtl/hbb_lut.sv` | *hardware building block*: an X-input, Y-output truth table (a ROM) |
| `rtl/neq_hbb.sv` | *neuron equivalent*: one quantized neuron, enumerated into an `hbb_lut` while elaborating |
| `rtl/sparse_layer.sv` | one layer: N neurons, their sparse input wiring, and the register stage behind them |
| `rtl/logicnets_top.sv` | input register and the chain of layers |

### The truth table (`hbb_lut`)

The only logic in the design. `TABLE` is a packed constant of 2^X words of Y
bits, and the output is `TABLE[in_bits*Y +: Y]`. Synthesis maps this ROM to
LUTs and minimises it. A 6:1 table is one 6-input LUT. Wider tables become
trees of LUTs and wide multiplexers. Two more cases:

- The paper writes these tables as a `case` statement. The indexed constant
  used here describes the same ROM, and it lets the table be a parameter.
- Synthesis removes tables whose output nothing reads, and inputs the table
  does not depend on. The synthesized network is therefore much smaller than
  the cost model below predicts.

### The neuron and its enumeration (`neq_hbb`)

During training a neuron computes a weighted sum of its γ inputs. Batch
normalization and a quantized ReLU follow, and the result is a β-bit output.
`neq_hbb` turns that neuron into a table. A constant function
(`build_table`) evaluates the neuron on every one of the 2^X input words and
stores the results in the `TABLE` parameter of an `hbb_lut`. No arithmetic
is left after elaboration.

The neuron model used for the enumeration is:

```
y = clamp( (Σ_k w_k · x_k + b) >>> s , 0, 2^β_out − 1 )
```

- x_k are the unsigned inputs.
- w_k are integer weights in [−7, 7].
- b is a bias. It stands for the shift of the batch normalization.
- s is a right shift. It stands for the batch-norm scale combined with the
  quantizer step.
- The clamp is the quantized ReLU. With a 1-bit output it becomes a
  threshold.

Input k of a neuron occupies table address bits `[k*β_in +: β_in]`.

**Departure from the paper:** the trained weights of the paper's networks
are not published, so the weights, biases and shifts here come from a seeded
hash (`logicnets_pkg::neq_weight`, `neq_bias`, `neq_shift`). The circuits
have the paper's topology, table sizes, wiring density and timing. They do
not compute the paper's trained classifiers, so the accuracies the paper
reports cannot be reproduced with them. There are two ways to load a trained
network:

- replace those three functions; or
- give each `hbb_lut` its own table, produced by enumerating the trained
  neuron in the same way.

The enumeration is exact, so a trained network converted this way keeps its
accuracy.

### Sparse connections (`sparse_layer`)

The table size grows as 2^(β·γ), so the neuron fan-in has to stay small.
With β ≤ 3 and γ ≤ 7 the paper keeps X = β·γ ≤ 15. Each neuron is wired to
γ activations of the previous layer, and those γ are picked at random once,
when the network is generated ("fixed random sparsity"):

- `conn_indices(SEED, layer, neuron, γ, N_prev)` draws candidates from a
  32-bit hash stream and rejects repeated sources.
- The connections are only wires.
- With random picks, some activations of the previous layer feed no neuron.
  Lint reports their bits as unused, and synthesis removes the neurons that
  produced them. The paper notes this effect as one reason why its
  post-synthesis LUT counts are far below the model.

Behind the tables, every layer has a register stage. A valid bit with a
synchronous active-low reset travels alongside the data. The data registers
are not reset, because they carry nothing from one sample to the next. The
valid bit, its reset and the port packing are this design's own choices; the
paper specifies only the registers between the layers. An assertion checks
that `out_valid` is `in_valid` delayed by one clock.

### Timing

- **Initiation interval: 1.** Every clock one sample may enter and one result
  may leave. There is no back-pressure and nothing can stall.
- **Latency: `NUM_LAYERS + 1` clocks** from the `in_features` port to
  `out_act`. The extra clock is the input register; from the input register
  to the output register it is one clock per layer. JSC-S has 5 layers, so
  its latency is 6 clocks.
- **Logic depth:** one table between two registers. When X ≤ 6 that is a
  single LUT level; this is why the paper reports 1.5 GHz post-route for
  JSC-S.

### Interface of `logicnets_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous, active low; clears the valid pipeline |
| `in_valid` | in | 1 | `in_features` holds a sample this clock |
| `in_features` | in | `NUM_INPUTS*INPUT_BITS` | feature i at `[i*INPUT_BITS +: INPUT_BITS]`, unsigned, already quantized |
| `out_valid` | out | 1 | `out_act` holds a result |
| `out_act` | out | `LAYER_NEURONS[L-1]*LAYER_BITS[L-1]` | output neuron j at `[j*OUT_BITS +: OUT_BITS]`, unsigned |

The outputs are the quantized output-layer activations (class scores). No
softmax or argmax is built; the paper also leaves softmax out of its latency
figures. Converting raw physics or packet data into quantized features is
left to the user.

## The LUT cost model

Before training, a table's cost in 6-input LUTs is estimated as

```
LUTCost(X, Y) = Y/3 · (2^(X−4) − (−1)^X)
```

Two 6:1 LUTs and a third one acting as a multiplexer make a 7:1 table.
Repeating that construction gives the exponential growth, and each extra
output bit costs one more copy. `logicnets_pkg::lut_cost` implements the
formula. The network cost is the sum over all neurons, counting the output
layer. Some values:

| table or network | cost in 6:1 LUTs |
|---|---|
| 6:2 table | 2 |
| 12:2 table | 170 |
| 14:2 table | 682 |
| JSC-S network | 165 × 2 = 330 |
| JSC-M network | 165 × 255 = 42 075 |

`tb_workload_jsc_m` checks these and the NID numbers below against the
paper's figures.

## Configurations

Each network the paper reports is a parameter set of `logicnets_top`. The
hidden-layer sizes, β and γ are the paper's. The output layer is included
in `NUM_LAYERS`: 5 neurons for JSC, 1 neuron for the NID task (network
intrusion detection). With it included, the cost model reproduces the
paper's model-LUT column exactly for JSC-S, JSC-M, NID-S and NID-M.

| name | inputs × bits | LAYER_NEURONS | β | γ | table | model LUTs |
|---|---|---|---|---|---|---|
| JSC-S (default) | 16 × 2 | 64, 32, 32, 32, 5 | 2 | 3 | 6:2 | 330 |
| JSC-M | 16 × 3 | 64, 32, 32, 32, 5 | 3 | 4 | 12:3 | 42 075 |
| JSC-L | 16 × 4 | 32, 64, 192, 192, 16, 5 | 3 (out: 7) | 4 (out: 5) | 16:3 … 15:7 | see below |
| NID-S | 593 × 2 | 593, 100, 1 | 2 | 7 | 14:2 | 473 308 |
| NID-M | 593 × 2 | 593, 256, 128, 128, 1 | 2 | 7 | 14:2 | 754 292 |
| NID-L | 593 × 2 | 593, 100, 100, 100, 1 | 3 (in: 2) | 5 (in: 7) | 14:3, 15:3 | see below |

For example, JSC-M is:

```systemverilog
logicnets_top #(.NUM_INPUTS(16), .INPUT_BITS(3), .NUM_LAYERS(5),
                .LAYER_NEURONS('{64,32,32,32,5,0,0,0}),
                .LAYER_BITS   ('{3,3,3,3,3,0,0,0}),
                .LAYER_FANIN  ('{4,4,4,4,4,0,0,0})) u_net (...);
```

Caveats:

- **JSC-L and NID-L:** the paper describes these with per-layer exceptions
  for the first and last layers. Under the reading in the table above, the
  cost model does not reproduce the paper's model-LUT figures for them
  (JSC-L gives 273 265 instead of 303 285). Some detail of those two
  topologies is therefore not known, and their parameter sets are a best
  reading.
- **Latency of JSC-L:** the paper quotes 13 ns at 384 MHz, which is 5
  clocks, while the six layers above give 6 clocks from the input register
  to the output register. This is consistent with the same doubt about the
  topology.
- **Elaboration cost:** every table is computed while elaborating, at a
  cost proportional to the number of table words. With Verilator:
  - JSC-S: 10 560 words, elaborates in under a second.
  - JSC-M: 675 840 words, takes about 80 s.
  - NID-M: about 18 million words of 14 inputs; lint had not finished after
    20 minutes.
  - The full NID networks and JSC-L are therefore practical only with a
    faster elaborator, or with tables generated outside the simulator. The
    NID shape (593 inputs, 14:2 tables, one output) is simulated at 21
    neurons; that build takes about 2.5 minutes.
- **Accuracy:** none of the paper's accuracies applies to these stand-in
  tables (see the departure noted under the neuron section).

## Simulating

The testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops by itself; a watchdog ends a run
that hangs. The reference model in `tb/logicnets_ref_pkg.sv` recomputes
every neuron by plain multiply-accumulate, shift and clamp, on the
activations that the connection lists select. The RTL instead looks each
result up in its enumerated table, so the comparison checks:

- the enumeration;
- the table indexing;
- the sparse wiring;
- the layer order and the pipeline timing.

| testbench | what it covers |
|---|---|
| `tb_hbb_lut` | every address of a 6:2 and a 5:1 table |
| `tb_neq_hbb` | a 6:2 neuron (all 64 words), a 12:3 and a 14:2 neuron (3000 random words each) |
| `tb_sparse_layer` | a 16→24 layer with random valid pattern; connection lists distinct and in range; 1-clock latency |
| `tb_logicnets_top` | the default JSC-S network end to end: ~2000 results, exact 6-clock latency, and counts of back-to-back samples, bubbles, resets with samples in flight and full-pipeline cycles (each must occur) |
| `tb_workload_jsc_m` | the JSC-M network end to end, plus the cost model against the paper's numbers |
| `tb_workload_nid_reduced` | an NID-shaped network end to end: 593 features of 2 bits, 14:2 tables, hidden layers cut to 16 and 4 neurons, 1 output |

To run one with Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb \
  rtl/logicnets_pkg.sv tb/logicnets_ref_pkg.sv rtl/hbb_lut.sv rtl/neq_hbb.sv \
  rtl/sparse_layer.sv rtl/logicnets_top.sv tb/tb_logicnets_top.sv \
  --top-module tb_logicnets_top -Mdir obj_top
./obj_top/Vtb_logicnets_top
```

Replace the last file and the top module name to run another testbench. The
JSC-S run builds and finishes in a few seconds. The JSC-M run spends most of
its time elaborating its tables.

## Changing the design

- **Another topology:** set `NUM_LAYERS` (at most `MAX_LAYERS` = 8) and the
  first `NUM_LAYERS` entries of `LAYER_NEURONS`, `LAYER_BITS` and
  `LAYER_FANIN`. Each fan-in must not exceed the size of the previous layer
  or `MAX_FANIN` = 16.
- **Another random network:** change `SEED`. The connections and the
  stand-in weights change together.
- **Trained tables:** see the neuron section above. Input k of a neuron is
  the k-th entry of `conn_indices` for that neuron and occupies address bits
  `[k*β_in +: β_in]`.
- **Fewer registers** (several layers per clock) or a different reset
  policy: edit the `always_ff` blocks of `sparse_layer`.
