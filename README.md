# A LUT-native Kolmogorov–Arnold network core

A Kolmogorov–Arnold network (KAN) puts its learned non-linearities on the edges of the
network rather than on the nodes. Every edge `(p -> q)` of layer `l` holds a trained
one-dimensional function `phi_{q,p}`, and a node only adds up what arrives:

    y_q = sum over p of phi_{q,p}(x_p)

Once inputs and activations are quantized to a few bits, a one-dimensional function of an
`n`-bit value is just a table of `2^n` words. Nothing has to be approximated, multiplied or
interpolated in hardware. Each learned edge function *is* a small lookup table, and each
node *is* an adder. This RTL is built on that idea:

* one **logical LUT (L-LUT)** per surviving edge, holding that edge's quantized function;
* one **pipelined adder tree** per neuron, summing the L-LUT outputs;
* a **requantizer** at the end of each tree, rounding and saturating the sum back to the
  next layer's code width;
* a **pipeline register between layers**.

The result uses no multipliers and no block memory. It takes a new input vector every clock
and has a latency of a handful of clocks. Because each edge adds its own term, pruning an
edge simply removes its table and one adder input. Nothing else in the network changes.

The default build is the jet-substructure classifier "JSC CERNBox": 16 inputs of 8 bits,
12 hidden neurons of 8 bits and 5 outputs of 6 bits, with a latency of 7 clocks.

## Number formats

All activations are **signed two's-complement codes**. The `n_l`-bit code of layer `l`
stands for `code x s_l`, where `s_l` is that layer's quantization step. The two ends of the
code range are the clip bounds `a` and `b` of the shared quantization domain.

An L-LUT of an edge into layer `l+1` stores words of `W = n_{l+1} + LUT_FRAC` bits. A word
is the edge's contribution to the next layer's value, in units of `s_{l+1} / 2^LUT_FRAC`.
With the default `LUT_FRAC = 2`, each table word carries two bits below the output LSB. The
fractions of all edges are added exactly, and the sum is rounded only once, at the end.

The requantizer (`kan_requant`) turns a neuron sum `S` into the next code:

    code = clip( floor( (S + 2^(LUT_FRAC-1)) / 2^LUT_FRAC ),  -2^(n-1),  2^(n-1) - 1 )

This rounds half up, then saturates. Example with `n = 6` and `LUT_FRAC = 2`:
* `S = 90` gives `floor(92/4) = 23`;
* `S = 130` gives `floor(132/4) = 33`, which saturates to `31`;
* `S = -6` gives `floor(-4/4) = -1`.

The table address is the raw input code, so code `-1` (all ones) reads the last table
word. Whatever order the training flow enumerates codes in, it must write the tables in
this order.

## Pipeline and latency

```
 x_p (n_l bits) ──► L-LUT ─► FF ──┐
 x_p' ───────────► L-LUT ─► FF ──┼─► [+ up to NADD] ─► FF ─► ... ─► FF ─► round/sat ─► FF ─► next layer
 ...                              ┘        adder tree, one register per stage          inter-layer register
```

Each layer takes:

* **1 clock** in the L-LUTs. The table word is registered.
* **`depth_l = ceil(log_NADD(N_l))` clocks** in the adder trees, where `N_l` is the largest
  number of surviving edges into one neuron of the layer. Each stage adds groups of up to
  `NADD` partial sums and registers them. Neurons with fewer edges get pass-through
  register stages, so the whole layer has one latency.
* **1 clock** in the inter-layer register, except after the last layer. Rounding and
  saturation are combinational between the last adder register and this register.

Total latency = `sum_l (1 + depth_l) + (L - 1)` clocks, with one new sample accepted every
clock. With `NADD = 4` this formula gives exactly the cycle counts reported for the source
design's benchmark networks. With `NADD = 2` (the fan-in used in the source's only drawing
of the tree) it gives none of them. So `NADD = 4` is the default:

| network (layer sizes, bit widths) | latency from the formula | reported latency |
|---|---|---|
| Moons [2,2,1], [6,5,8] | 2 + 2 + 1 = 5 | 5 cycles |
| Wine [13,4,3], [6,7,8] | 3 + 2 + 1 = 6 | 6 cycles |
| Dry Bean [16,2,7], [6,6,8] | 3 + 2 + 1 = 6 | 6 cycles |
| JSC OpenML [16,8,5], [6,7,6] | 3 + 3 + 1 = 7 | 7.1 ns at 987 MHz |
| JSC CERNBox [16,12,5], [8,8,6] (default) | 3 + 3 + 1 = 7 | 8.1 ns at 870 MHz |
| HalfCheetah actor [17,6], 8 bit | 1 + 3 = 4 | 4.5 ns at 884 MHz |
| ToyADMOS autoencoder [64,16,8,16,64], [7,8,8,7,8] | 4+3+3+3 + 3 = 16 | 0.07 µs at 228 M samples/s |

`tb_kan_workloads` builds each of these networks and checks the latency in simulation.

A valid bit travels alongside the data (`in_valid` → `out_valid`). There is no
back-pressure: the datapath never stalls, and a sample that enters comes out exactly
`latency` clocks later. The reset (`rst_n`, asynchronous, active low) clears only the
valid pipeline. Data registers are not reset.

## Pruning

During training, an edge whose function has a small L2 norm over its input grid is removed.
The hardware consequence is simple: the edge gets no L-LUT and its neuron's adder tree gets
one input fewer. `kan_layer` works out at elaboration, for every neuron, which inputs still
have an edge. It then instantiates only those tables, packs their outputs densely into the
neuron's adder tree, and sizes the layer's tree depth from the largest surviving fan-in. A
neuron that loses every edge drives the code 0. Its tree is not built.

Which edges survive is a property of the trained model, like the table contents. See the
next section.

## Truth-table contents

The tables and the pruning mask come out of training. They are data, not design, and a
trained model is not part of this code base. So that the hardware can be elaborated,
simulated and checked, `kan_pkg` defines stand-in contents:

* `edge_key(seed, layer, q, p)` hashes the edge coordinates (a 32-bit xor-shift/multiply
  mixer). Its low three bits are the edge's amplitude class `a` (0 to 7).
* `llut_entry(seed, layer, q, p, code, W)` is a pseudo-random value, uniform over
  `±a·R/24`, where `R = 2^(W-1) - 1`. Class 0 is an all-zero table.
* `edge_kept(seed, layer, q, p, PRUNE_LEVEL)` is `a > PRUNE_LEVEL`. The default level 0
  removes exactly the all-zero tables, about one edge in eight. Level -1 keeps every edge.

The amplitude `a·R/24` is chosen so that a 16-input neuron saturates now and then, but not
most of the time. Every L-LUT builds its table from these functions with a constant function
at elaboration, so synthesis sees a ROM.

**To run a trained model**, replace the bodies of `llut_entry` and `edge_kept` with lookups
into the trained tables and mask. Nothing else changes. Alternatively, give `kan_llut` its
table as a parameter.

## Modules

| file | what it is |
|---|---|
| `rtl/kan_pkg.sv` | defaults, table and pruning functions, tree-depth helpers |
| `rtl/kan_llut.sv` | one L-LUT: `2^IN_W` x `LUT_W` ROM with a registered output |
| `rtl/kan_adder_tree.sv` | balanced pipelined adder tree, fan-in `NADD`, optional padding to `DEPTH` |
| `rtl/kan_requant.sv` | round half up and saturate to the next code width |
| `rtl/kan_layer.sv` | one layer: L-LUTs of the surviving edges, a tree and a requantizer per neuron, the inter-layer register and the valid pipeline |
| `rtl/kan_core.sv` | top: a chain of `NUM_LAYERS` layers |

`kan_core` parameters:

| parameter | default | meaning |
|---|---|---|
| `NUM_LAYERS` | 2 | number of KAN layers `L` |
| `DIMS[L+1]` | `'{16, 12, 5}` | `d_l`: width of each activation vector |
| `BITS[L+1]` | `'{8, 8, 6}` | `n_l`: code width of each activation vector |
| `NADD` | 4 | adder-tree fan-in |
| `LUT_FRAC` | 2 | fractional bits of an L-LUT word below the output LSB |
| `SEED` | `32'h4B414E31` | selects the stand-in tables |
| `PRUNE_LEVEL` | 0 | stand-in pruning level (-1: keep every edge) |

Ports: `clk`, `rst_n`, `in_valid`, `x_in[DIMS[0]]` (signed `BITS[0]`-bit),
`out_valid`, `y_out[DIMS[L]]` (signed `BITS[L]`-bit).

## Verification

Every testbench checks itself and ends with a line `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_kan_llut` | every address of two L-LUTs, then random back-to-back addresses, against the table formula, one clock after the address |
| `tb_kan_adder_tree` | four trees (16 terms fan-in 4; 13 terms padded to 3 stages; 7 terms fan-in 2; a single term) with random terms every clock; sum and stage count |
| `tb_kan_requant` | every input value of two requantizers (with and without fractional bits) against an integer-division model, including exact halves and both saturation directions |
| `tb_kan_layer` | two single layers, one with its output register and full fan-in, one heavily pruned (neurons with different fan-ins, some with none) |
| `tb_kan_core` | the default core, no parameter overrides, 400 streamed samples: every output, the 7-clock latency, and that pruning, both saturation directions, rounding, back-to-back samples and idle cycles all occurred |
| `tb_kan_workloads` | the Moons, Wine, Dry Bean, JSC OpenML, HalfCheetah and ToyADMOS networks, each in its own core, with their latencies checked against the reported ones |

`tb/kan_core_checker.sv` is the shared stimulus generator and scoreboard used by the last
three testbenches. It holds an independent integer model of the network and computes the
expected latency with its own arithmetic.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/kan_pkg.sv tb/tb_kan_core.sv \
          --top-module tb_kan_core -Mdir obj_core
./obj_core/Vtb_kan_core
```

The default core elaborates and builds in about half a minute. `tb_kan_workloads` takes
about two minutes to build, most of it in ToyADMOS's 2,304 tables. For lint only, use
`verilator --lint-only -Wall -Irtl rtl/kan_pkg.sv rtl/kan_core.sv`.

## Where this RTL departs from the source design, and how far to trust it

* **Tables are stand-ins.** The structure, widths and timing are those of the trained
  networks. The numbers in the tables are not, so no accuracy can be measured with this
  code as it is.
* **`NADD = 4` is inferred**, from the reported cycle counts above. It was not stated.
* **Code format and rounding are choices made here.** The source fixes uniform
  quantization over a shared domain `[a, b]`. Signed codes, the `LUT_FRAC`-bit table
  format and round-half-up are this design's own.
* **The valid bit and reset** are additions. The source describes a free-running pipeline
  with an initiation interval of one.
* **Input preprocessing is not included.** That step is a folded batch normalization,
  shift-scale, clip and quantize of the raw features. The core expects features that are
  already quantized. The reported latencies leave no clock for this step inside the core.
* **MNIST (784-62-10) was not built.** How many edges survive pruning in that network is
  not known, so it cannot be sized. Its 8-clock reported latency implies at most 64
  surviving edges into any hidden neuron and 16 into any output.
* **One build holds one network.** As in the source flow, the tables and sizes are
  fixed when the design is elaborated. Another network means another set of parameters.
  The source names in-field table updates only as future work.
* The latency of every listed network matches its reported cycle count in simulation. No
  FPGA timing or resource figures were measured for this RTL.
