# NeuraLUT-Assemble inference core in SystemVerilog

A LUT-based neural network runs inference with lookup tables only. Each neuron's whole
function is enumerated into a truth table after training. The network then becomes a fixed,
sparse netlist of read-only tables with no multipliers, no weights in memory and no control.
The catch is fan-in. A table with F inputs of β bits each has 2^(βF) entries, so neurons
must stay very sparse, and that costs accuracy.

NeuraLUT-Assemble gets more fan-in by **assembling** one large neuron from a tree of small
tables. A first level of logical LUTs (L-LUTs) reads inputs chosen by training: the
*learned mapping*. The levels after it combine fixed, consecutive groups of outputs until
one output per tree is left. During training every L-LUT hides a small dense MLP, and skip
connections run across the whole tree. At inference time all of that, the skip paths
included, is inside the table contents. The hardware in this repository is therefore only:

* L-LUT ROMs,
* constant wiring (learned mappings and fixed tree grouping),
* pipeline registers after every layer or after every third layer.

The RTL builds any of the four networks evaluated in the NeuraLUT-Assemble paper
(Andronic and Constantinides). By default it builds the MNIST network.

## How a network is described

A network is a chain of L-LUT layers. Layer *l* has four properties:

| symbol | meaning |
|---|---|
| w_l | number of L-LUTs in the layer |
| F_l | fan-in of each L-LUT |
| a_l | 1 = *assemble* layer: L-LUT j reads outputs j·F … j·F+F−1 of the previous layer (needs w_{l−1} = w_l·F). 0 = *learned-mapping* layer: every L-LUT reads F values picked from all outputs of the previous layer |
| β | bits per activation |

Each run of layers that starts with a learned-mapping layer and continues with assemble
layers is a forest of trees. The MNIST network, for example, is two forests:

* layers 0–1: 360 trees of depth 2, each with 36 inputs;
* layers 2–5: 10 trees of depth 4, each with 1296 inputs, one per class.

| network (`NET`) | inputs | w_l | a_l | F_l | β (input, hidden, output) | L-LUT address bits |
|---|---|---|---|---|---|---|
| `NET_MNIST` (default) | 784 × 1 b | 2160, 360, 2160, 360, 60, 10 | 0,1,0,1,1,1 | 6 everywhere | 1, 1, 6 | 6 |
| `NET_JSC_CERNBOX` | 16 × 8 b | 320, 160, 80, 40, 20, 10, 5 | 0,1,1,1,1,1,1 | 1, then 2 | 8, 4, 8 | 8 |
| `NET_JSC_OPENML` | 16 × 6 b | same as CERNBox | same | same | 6, 3, 8 | 6 |
| `NET_NID` | 593 × 1 b | 60, 20, 9, 3, 1 | 0,1,0,1,1 | 6, 3, 3, 3, 3 | 1, 2, 2 | 6 |

Two of the published values have to be interpreted.

**Bit widths.** The published β lists have one entry fewer than the number of activation
widths a network needs. For example, JSC has 7 layers but the list is [8,4,4,4,4,4,8]. This
RTL reads the list as [input width, hidden width, …, output width]:

* the network inputs use the first entry;
* every hidden activation uses the second;
* the last layer's outputs use the last.

With this reading every L-LUT of MNIST, JSC OpenML and NID has 6 address bits. That matches
the paper's remark that in those three networks the L-LUTs are the size of a physical 6-input
LUT. It also makes the CERNBox L-LUTs larger (8 address bits), which the paper likewise says.

**Input count.** The NID network reads 593 one-bit inputs; the paper gives that number.

The tables live in `rtl/nla_pkg.sv` (`net_w`, `net_f`, `net_a`, `net_*_bw`). To add a
network, add its rows there.

## L-LUT contents and learned connections

Neither the trained truth tables nor the learned connection lists are published. Both are
replaced by seeded, deterministic stand-ins. They are evaluated while the design is
elaborated, so the result is still a netlist of constant ROMs and constant wires.

* **L-LUT content** (`nla_pkg::llut_entry`). The stand-in is a neuron with a fixed weighted
  sum.
  * Each of the F inputs gets a signed weight in [−3, 4] (never 0), drawn from a hash of
    (seed, layer, L-LUT index, input index).
  * For an address holding codes x_k, s = Σ w_k·x_k.
  * The output is `((s − lo) · 2^OUT_BW) / (hi − lo + 1)`, where lo and hi are the smallest
    and largest possible values of s. This rescales s linearly and monotonically onto the
    full output code range.
* **Learned mapping** (`nla_pkg::map_index`). Input k of L-LUT j in a learned-mapping layer
  is connected to previous output `(base + k·stride) mod IN_N`.
  * `base` and `stride` come from a hash, with 1 ≤ stride ≤ (IN_N−1)/(F−1).
  * So the F inputs of one L-LUT are always distinct, as a pruned connection group would be.

To run a trained network, replace these two functions with the trained tables and
connection lists, for example as case statements generated by the training flow. Nothing else
changes. Until then the outputs are deterministic but meaningless as classifications, so no
accuracy figure of the paper can be reproduced with this RTL.

Inside an L-LUT (`nla_llut`) the whole table is one constant vector. Entry *a* is in bits
`[a·OUT_BW +: OUT_BW]`, the same layout as an FPGA LUT's INIT value. The read is
combinational, with the address formed by the F input codes: input k is in bits
`[k·IN_BW +: IN_BW]`. Synthesis maps a 6-address-bit L-LUT onto one physical LUT per output
bit. A larger L-LUT becomes a small circuit of LUTs.

## Pipelining and timing

The paper compares two register placements:

* a register after every L-LUT layer, for the highest clock;
* a register after every third layer, for the lowest latency. Its main comparison uses this
  one.

The parameter `PIPE_EVERY` (default 3) chooses between them. A layer is registered when
(l+1) mod `PIPE_EVERY` = 0, and the last layer is always registered. The network inputs are
not registered.

* Latency: ⌈layers / `PIPE_EVERY`⌉ cycles (`nla_pkg::net_latency`).
* Throughput: one input vector per clock. There is no back-pressure.

| network | PIPE_EVERY=1 | PIPE_EVERY=3 | implied by the paper's latency × F_max |
|---|---|---|---|
| MNIST | 6 | 2 | 6 / 2 |
| JSC CERNBox | 7 | 3 | 7 / 2 |
| JSC OpenML | 7 | 3 | 7 / 2 |
| NID | 5 | 2 | 5 / 2 |

All per-layer figures agree, and so do the three-layer figures for MNIST and NID. For the two
7-layer JSC networks the paper's three-layer numbers imply two cycles, but this placement
gives three. The paper does not say where its registers sit in that case, so the RTL keeps the
uniform rule.

Register counts differ from the published flip-flop counts. For MNIST with three-layer
pipelining this RTL has 2160 + 60 data flip-flops, against about 700 published. The published
results were obtained with register retiming enabled. Retiming can move the register after
layer 2 forward through layer 3, which is only 360 wide. The RTL places registers at layer
boundaries and leaves such moves to the synthesis tool.

`in_valid`/`out_valid` is carried alongside the data so a user can tell which outputs are
meaningful. This handshake is not from the paper, which measures the core out of context.
The valid bits use an asynchronous active-low reset `rst_n`. The data registers are not
reset.

## Modules

| file | what it is |
|---|---|
| `rtl/nla_pkg.sv` | network tables, per-layer configuration struct, latency, hash, stand-in table and mapping generators |
| `rtl/nla_llut.sv` | one L-LUT: constant truth table, combinational read |
| `rtl/nla_learned_map.sv` | learned-mapping routing: W groups of F values selected from IN_N |
| `rtl/nla_layer.sv` | one layer: learned mapping or fixed tree grouping, W L-LUTs, optional output register |
| `rtl/nla_top.sv` | the network: generates every layer of `NET`, places the pipeline registers |

Top-level ports of `nla_top #(NET, PIPE_EVERY, SEED)`:

* `clk`
* `rst_n`
* `in_valid`
* `in_data`: `net_in_n·net_in_bw` bits, feature i in `[i·in_bw +: in_bw]`. The default is
  784 bits.
* `out_valid`
* `out_data`: `net_out_n·net_out_bw` bits, class j in `[j·out_bw +: out_bw]`. The default is
  60 bits.

## Verification

The testbenches compare the RTL against `tb/nla_ref_pkg.sv`. That is an independent software
model which:

* keeps the network tables as plain arrays;
* recomputes the hash, the stand-in neuron and the mapping from their formulas;
* runs an inference layer by layer on integer arrays.

| testbench | what it checks |
|---|---|
| `tb_nla_llut` | all addresses of four L-LUT shapes (6×1 b→1 b, 3×2 b→2 b, 2×4 b→4 b, 1×8 b→4 b) |
| `tb_nla_learned_map` | distinct picks per group; routed values for the NID and MNIST mappings under random inputs |
| `tb_nla_layer` | a registered learned-mapping layer (NID layer 0) and an unregistered tree layer (NID layer 3). Checks data, one-cycle latency, valid pass-through and reset |
| `tb_nla_top` | four networks end to end: NID with both pipelinings, JSC OpenML with 3-layer, JSC CERNBox with per-layer. Random streams with idle cycles; checks every output and latency; counts each mechanism (learned-mapping layers, tree layers, both pipelinings, back-to-back inputs, idle cycles) and fails if one never happens |
| `tb_nla_top_full` | the default MNIST core (5070 L-LUTs) with no parameter overrides: 24 random images streamed, all scores and the 2-cycle latency checked |

Running one with plain Verilator, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/nla_pkg.sv tb/nla_ref_pkg.sv tb/tb_nla_top_full.sv --top-module tb_nla_top_full
./obj_dir/Vtb_nla_top_full
```

Each testbench prints `TB_RESULT checks=N failures=M`. Building the full MNIST core takes
about three minutes and 0.5 GB, mostly to evaluate the 5070 tables. The smaller networks
build in well under a minute.

## Relation to the paper

These parts follow the paper:

* the layer structure and all sizes of the four networks;
* one ROM per L-LUT with 2^(βF) entries;
* assemble layers with fixed, consecutive grouping;
* learned mappings in front of every non-assemble layer;
* the two pipelining strategies.

These are this design's own:

* the reading of the β lists;
* the generated table contents and connection lists, which stand in for trained ones;
* the address packing;
* the valid/reset handshake;
* the register rule for networks whose layer count is not a multiple of three.

Not included:

* the training flow and the MLPs inside the L-LUTs, which exist only before enumeration;
* any output decoding such as an argmax, which the paper does not describe;
* the tree shapes of the JSC ablation study. Their layer widths are not given.
