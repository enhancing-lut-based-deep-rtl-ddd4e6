# A LUT-only neural network with adder-split neurons and fixed fan-in connectivity

This is synthesizable SystemVerilog for a feed-forward neural network in which
every neuron is a lookup table. The network has no multipliers and no
accumulators at run time. Each neuron's weights, bias, batch normalisation and
activation are enumerated ahead of time into a truth table, and the neuron's
quantised inputs form that table's address. The result is an inference engine
that fits in FPGA logic (LUTs and flip-flops only). It takes one sample per
clock, and its latency is one clock per layer.

The design follows two ideas from the literature on LUT-based networks
(LogicNets, PolyLUT, NeuraLUT), where a neuron reads only `F` of the `N`
outputs of the layer before it:

1. **Adder-split neurons (PolyLUT-Add).** A single table over `F` inputs of
   `beta` bits has `2^(beta*F)` entries, so raising the fan-in is
   exponentially expensive. Here a neuron instead has `A` *sub-neurons*. Each
   sub-neuron is a table over its own `F` inputs. Their `A` results go into a
   small *adder* table, which also applies batch normalisation and the
   quantised activation. The neuron then sees `A*F` inputs for
   `A*2^(beta*F) + 2^(A*(beta+1))` table entries instead of `2^(beta*A*F)`.
2. **Trained fixed fan-in connectivity (SparseLUT).** Which `F` inputs each
   sub-neuron reads is a trained mask `M`, with exactly `F` ones per
   sub-neuron, instead of a random choice. In hardware the mask is only a
   choice of wires. A better mask costs no extra logic and no extra latency.
   The training algorithm runs offline in software and is not part of this
   RTL.

## Structure

```
sparselut_net                       NUM_LAYERS layers, chained
 └─ add_layer  (one per layer)      connectivity + N_OUT neurons + 1 register stage
     ├─ sparse_connect              mask M: F inputs per sub-neuron (wiring only)
     └─ add_neuron (N_OUT of them)
         ├─ subneuron_lut  x A      2^(F*beta_in) x (beta+1)-bit table
         └─ adder_lut               2^(A*(beta+1)) x beta-bit table
lutnn_pkg                           hash, placeholder weights, table arithmetic, mask
```

Within a layer, the sub-neuron tables and the adder table make up one
combinational stage. The layer's output register is the only state in the
design, apart from a valid bit that travels alongside the data.

## Number formats and bit packing

| signal | width | coding |
|---|---|---|
| network input feature | `BETA_IN` | unsigned |
| layer activation (neuron output) | `BETA` | unsigned (after ReLU) |
| sub-neuron result | `BETA+1` | two's complement |

The sub-neuron result is one bit wider than an activation. A sub-neuron has no
ReLU, so its result may be negative, and the adder table has to receive the
sign. Activations are non-negative and need no sign bit.

Packing (all vectors are flat, little-end first):

* `x[j*BETA_IN +: BETA_IN]` is input feature `j`; `y[c*BETA +: BETA]` is output neuron `c`.
* Sub-neuron table address: input slot `i` is in bits `[i*BETA_IN +: BETA_IN]`.
* Adder table address: sub-neuron `a`'s result is in bits `[a*(BETA+1) +: BETA+1]`.
* Input of `add_neuron`: slot `i` of sub-neuron `a` is in bits `[(a*F+i)*BETA_IN +: BETA_IN]`.
* Mask row `r = n*A + a` belongs to sub-neuron `a` of neuron `n`. The selected
  inputs fill the slots in ascending input index, so slot `k` gets the `k`-th
  set bit of the row.

The first layer can use its own input width `BETA_IN` and fan-in `F_IN`. Some of
the evaluated networks (JSC-XL-Add2: 7-bit features, fan-in 1) quantise
their raw features more finely than their hidden activations.

## What the tables contain

In a deployment, every table comes from the trained, quantised model: each
sub-neuron's table is that sub-neuron's function evaluated at every input
combination, and likewise each adder's table. Trained weights are not part of
this release. The tables are therefore filled, at elaboration, from a
deterministic placeholder model with the same structure. It is defined in
`rtl/lutnn_pkg.sv`:

* **Weights.** `w = (mix4(SEED, layer, 16*neuron+sub, term) mod (2m+1)) - m`,
  where `mix4` is a 32-bit multiply/xor-shift hash. Term weights use `m=4`,
  biases `m=8`.
* **Sub-neuron.** `acc = bias + sum over all monomials of the F inputs up to
  degree D of w*monomial`. For `D=2` and inputs `x1, x2` the monomials are
  `x1, x1^2, x1*x2, x2, x2^2`, which is PolyLUT's polynomial expansion.
  `D=1` gives a plain linear neuron as in LogicNets. Then
  `z = sat(acc >>> (BETA_IN+D-1), -2^BETA, 2^BETA-1)`.
* **Adder.** `s = sum of the A signed z`, then batch normalisation folded into
  `v = (g*s + t) >>> 1`, with `g` in 1..3 and `t` in 0..4 drawn from the
  same hash. The quantised activation is `y = sat(v, 0, 2^BETA-1)`, a ReLU
  with saturation.
* **Connectivity.** Row `r` of layer `l` selects
  `start + k*step (mod N_IN)` for `k = 0..F-1`, where `start` and
  `step <= (N_IN-1)/(F-1)` come from the hash. This guarantees `F` distinct
  inputs. It plays the part of the "random sparsity" baseline. A trained
  mask replaces `conn_index`.

To load a trained model, replace the body of `build_table()` in
`subneuron_lut.sv` and `adder_lut.sv` (or the functions they call) with the
trained transfer functions or table contents, and `lutnn_pkg::conn_index`
with the trained mask. Nothing else changes. The array sizes, bit packing and
timing do not depend on the contents.

Because the tables are computed while the design is elaborated, elaboration
time grows with the number of table entries. At the default size (1132
sub-neuron tables of 256 entries and 566 adder tables of 64 entries), a
Verilator lint takes about 1.5 minutes and a Verilator build about 1.5 to 2
minutes.

## Timing

* **Throughput:** one input vector per clock. There is no back-pressure and
  no stall.
* **Latency:** `NUM_LAYERS` clocks. A vector presented with `in_valid` before
  clock edge `k` appears on `y` with `out_valid` after edge
  `k + NUM_LAYERS - 1`.
* **Valid:** `out_valid` is `in_valid` delayed by the same number of
  registers. A gap in the input stream comes out as a gap in the output
  stream.
* **Reset:** `rst_n` is active low and synchronous. It clears every layer's
  output register and valid bit, which drops whatever is in flight.

## Parameters of `sparselut_net`

| parameter | default | meaning |
|---|---|---|
| `NUM_LAYERS` | 6 | number of layers |
| `NEURONS` | `'{784,256,100,100,100,100,10}` | `NEURONS[0]` inputs, then neurons per layer |
| `BETA_IN`, `F_IN` | 2, 4 | first-layer input width and sub-neuron fan-in |
| `BETA`, `F` | 2, 4 | activation width and sub-neuron fan-in of the other layers |
| `A` | 2 | sub-neurons per neuron (1..14) |
| `DEGREE` | 2 | polynomial degree of the placeholder sub-neurons (1..3) |
| `SEED` | `32'h5EED1234` | seed of the placeholder tables and mask |

The defaults are the MNIST network HDR-Add2 (28x28 pixels, 10 classes). The
other shapes this architecture is evaluated with are obtained by parameters
alone:

| network | inputs x bits | layers | beta | F | first-layer F | A | sub-table entries | adder entries |
|---|---|---|---|---|---|---|---|---|
| HDR-Add2 (MNIST, default) | 784 x 2 | 256,100,100,100,100,10 | 2 | 4 | 4 | 2 | 2^8 | 2^6 |
| CIFAR-10 with the HDR-Add2 shape | 3072 x 2 | 256,100,100,100,100,10 | 2 | 4 | 4 | 2 | 2^8 | 2^6 |
| JSC-XL-Add2 (jet tagging) | 16 x 7 | 128,64,64,64,5 | 5 | 2 | 1 | 2 | 2^10 (first layer 2^7) | 2^12 |
| JSC-M Lite-Add2 (jet tagging) | 16 x 3 | 64,32,5 | 3 | 2 | 2 | 2 | 2^6 | 2^8 |

The input width of HDR-Add2 and JSC-M Lite-Add2 is not stated separately for
those networks, so it is taken equal to `beta`. The CIFAR-10 input count
assumes the 32x32 RGB image is fed as 3072 features.
Of these shapes, HDR-Add2 and JSC-M Lite-Add2 are simulated (see below);
the CIFAR-10 and JSC-XL-Add2 shapes are not, because building their tables
at elaboration time takes too long (a JSC-XL-Add2 build was still
elaborating after 15 minutes; its 2^12-entry adder tables dominate).

The default network holds 566 neurons: 1132 sub-neuron tables of
256 x 3 bits and 566 adder tables of 64 x 2 bits. That is 941,824 table bits.
The pipeline registers hold 1,332 activation bits and 6 valid bits.
The single-table alternative with the same fan-in of 8 would need 2^16
entries per neuron.

The output layer is built like the hidden layers. A classifier takes the
arg-max of `y` outside the network.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against `tb/lutnn_ref_pkg.sv`, a reference model that evaluates the network
definition sample by sample with no tables. It rebuilds the mask as an
explicit bit row and scans it.

| testbench | what it checks |
|---|---|
| `tb_subneuron_lut` | every address of two sub-neuron tables (default size; degree 3 with 3-bit inputs); both signs occur |
| `tb_adder_lut` | every address of two adder tables (A=2, beta=2; A=3, beta=3); ReLU clipping and saturation both occur |
| `tb_add_neuron` | 2000 random inputs on two neurons (default; A=3, F=2, degree 1) |
| `tb_sparse_connect` | every output slot of a small and a default-size connection block, 50 random vectors |
| `tb_add_layer` | a 16-input, 8-neuron layer under a random stream with gaps: values, 1-clock latency, valid, reset |
| `tb_sparselut_net` | JSC-M Lite-Add2 end to end: 1500 cycles, gaps, mid-stream reset, latency 3 |
| `tb_sparselut_net_full` | the default HDR-Add2 network, untouched parameters: 120 cycles, latency 6 |

The end-to-end tests count how often each mechanism happens and fail if one
never does: back-to-back results (one per clock), bubbles, a flush by
reset, negative and saturated sub-neuron results, ReLU clipping, saturated
activations, non-zero and changing outputs.

To run one, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/lutnn_pkg.sv tb/lutnn_ref_pkg.sv rtl/*.sv tb/tb_sparselut_net.sv \
  --top-module tb_sparselut_net -o sim && ./obj_dir/sim
```

Each test prints
`TB_RESULT checks=N failures=M`.

## How far it can be trusted, and where it departs from the source architecture

* The structure follows the published PolyLUT-Add / SparseLUT architecture:
  the A-way split, the (beta+1)-bit sub-neuron results, batch normalisation
  and quantised activation after the addition, the table sizes
  `2^(beta*F)` and `2^(A(beta+1))`, fixed fan-in connectivity, and a
  latency of one clock per layer. The tests show that the RTL computes
  exactly the network defined above.
* **Table contents and mask are placeholders.** Classification accuracy is
  meaningless until trained tables and a trained mask are loaded. The
  arithmetic inside the placeholder tables (weight ranges, shift,
  saturation rule, folded batch normalisation) is this design's own choice.
* **Adder table size.** One drawing of the architecture labels the adder
  table as `2^(2*beta)` entries with a `2*beta+1`-bit address. The table-size
  formula and the reported entry counts (for example 2^6 for beta=2, A=2)
  both give `2^(A*(beta+1))`, and this design follows them.
* **Own choices, not from the source:** the valid bit, the synchronous reset,
  the ascending slot order of the connectivity, two's complement for
  sub-neuron results and floor-shift-then-saturate quantisers. The separate
  first-layer input width and fan-in (`BETA_IN`, `F_IN`) follow the
  source's per-network remarks; where it gives none they equal `BETA`, `F`.
* **Not included:** the connectivity training algorithm (prune and regrow
  with stochastic noise, run on a GPU before any RTL exists), the
  quantisation-aware training, and the flow that converts a trained model
  into tables. Input quantisation and the final arg-max are outside the
  network as well.
* Timing closure and FPGA resource use were not measured here. Each layer is
  one table-lookup deep, so a vendor tool maps each sub-neuron table to a
  small LUT tree and each adder table to another.
