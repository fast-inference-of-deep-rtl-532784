# A fixed-latency neural-network jet tagger in SystemVerilog

At the LHC, proton bunches cross 40 million times a second. The first trigger
stage has to decide within about a microsecond which collisions to keep. That
stage runs in FPGAs, so anything it computes must be a fully pipelined circuit
with a latency of a few hundred nanoseconds at most.

This design is one such circuit. It is a small fully connected neural network
that reads 16 jet-substructure observables of one jet. Examples of these
observables are the groomed jet mass, energy-correlation ratios such as N2, D2,
C1 and C2, and the particle multiplicity. From them the network gives the
probabilities that the jet came from a light quark, a gluon, a W boson, a
Z boson or a top quark.

The main idea is that nothing is fetched from memory:

* every weight is a constant in the logic;
* every multiplication has its own multiplier, or shares one under a fixed,
  compile-time schedule;
* every layer is its own pipeline stage.

At the default settings, a new jet enters every clock cycle. Its answer leaves
16 cycles later, which is 80 ns at 200 MHz.

## The network

```
16 features ─► dense 64 ─► ReLU ─► dense 32 ─► ReLU ─► dense 32 ─► ReLU ─► dense 5 ─► softmax ─► 5 probabilities
```

There are 16·64+64 + 64·32+32 + 32·32+32 + 32·5+5 = 4389 weights and biases.
The network is meant to be trained with L1 regularisation and then pruned step
by step. After pruning, about 70 % of the parameters are exactly zero and 1338
are left. A zero weight is a constant zero in the RTL, so synthesis removes its
multiplier. This pruning therefore saves DSP blocks in proportion, and it needs
no sparse-matrix logic.

Every number in the datapath (features, weights, biases, neuron values) is a
signed fixed-point value written `<16,6>`. It has 16 bits in all, 6 of them
above the binary point counting the sign, and 10 below. A raw value `v` means
`v/1024`, so the range is [-32, 32) and the step is about 0.001. Sixteen bits is
about where the fixed-point classifier stops losing accuracy against floating
point. Six integer bits is enough to keep the standardised inputs and the
neuron values from overflowing.

## The dense layer and the reuse factor (`rtl/dense.sv`)

A layer computes `y = W·x + b`, which takes `N_IN·N_OUT` multiplications. The
*reuse factor* R trades multipliers for time:

* with R = 1, every product has its own multiplier;
* with R > 1, each multiplier does R products on R consecutive cycles, so the
  layer needs R times fewer multipliers but takes a new input only every R
  cycles.

This RTL numbers the products neuron by neuron, `p = j·N_IN + i`. Multiplier
`m` does products `m·R … m·R+R-1`, one per cycle. The layer therefore has
exactly `ceil(N_IN·N_OUT/R)` multipliers. A 2×2 layer needs 4 multipliers at
R = 1, 2 at R = 2 and 1 at R = 4.

A multiplier's run of R products can cross from one neuron to the next. So
each neuron's accumulator adds, in each phase, those registered products that
belong to it. The multipliers that can feed a neuron form a window of about
`N_IN/R + 1`, so each neuron's adder stays small. The unused tail of the last
multiplier has zero weights.

```
edge 0        x_q <= in_x            (phase counter = 0)
edge 1 .. R   prod_q[m] <= w[m·R+phase] · x[(m·R+phase) mod N_IN]
edge 2 .. R+1 acc[j] <= (first ? b<<10 : acc[j]) + Σ prod_q[m] whose product is in neuron j
edge R+1      acc holds W·x+b, out_valid = 1  → taken by the next block at edge R+2
```

A layer therefore costs R+2 cycles, and each extra use of a multiplier adds
exactly one cycle. This fits the usual estimate for a layer:
`L = L_mult + (R-1)·II_mult + L_activ`, with a multiplier latency of 1 and a
multiplier interval of 1. The input and accumulator registers add one cycle
each.

Products are 32 bits wide and carry 20 fractional bits. The accumulator is wide
enough that it never overflows. Only the layer output is brought back to
`<16,6>`:

* the fraction is truncated (an arithmetic shift, which rounds towards minus
  infinity);
* a value out of range saturates, and `out_sat` flags it for that neuron.

The handshake is `in_valid`/`in_ready`:

* for R = 1, `in_ready` is always 1;
* for R > 1, `in_ready` drops for R-1 cycles after each accepted vector.

There is no output back-pressure, because a trigger pipeline never waits. An
assertion flags a producer that offers data while `in_ready` is low.

The weights come from `jet_weights_pkg::weight(layer, row, col)`. They are
evaluated at elaboration into one flat constant (`WTAB`), indexed by the
product number. For R > 1, each multiplier's weight input is a constant
multiplexer selected by the phase counter, and so is its input operand.

## ReLU (`rtl/relu.sv`)

ReLU is a sign test and a multiplexer per value. It is combinational and sits
between the accumulator register of one layer and the input register of the
next, so it adds no cycle and uses no table.

## Softmax from two tables (`rtl/softmax.sv`)

Smooth activations are not computed at run time. Their values are precomputed
over a range of inputs and stored in block RAM. For the five-way softmax, this
RTL uses the following four-stage pipeline:

1. Subtract the maximum: `d_i = max_j x_j − x_i ≥ 0`. The exponentials are then
   at most 1, whatever the range of the scores.
2. Read `e_i = exp(−d_i)` from a 512-entry table. The table has a step of 1/64
   over [0, 8), is stored as UQ1.15 (so `exp(0) = 32768`), and clamps at its
   last entry.
3. Add `S = Σ e_i`, which lies in [1, 5] because the largest score gives
   exactly 1. Read `1/S` from a 512-entry table with a step of 1/128. Entry k
   holds `1/(1+(k+½)/128)`.
4. Compute `y_i = e_i · (1/S)`, truncated to `<16,6>`. The result lies in
   [0, 1.0].

Both tables are filled at elaboration with `$exp` and division. Their reads are
registered, as a block-RAM read would be. Measured against double precision,
the error is below 0.005 on each probability. One vector can enter per cycle,
and the latency is 4 cycles.

## The top level (`rtl/jet_tagger.sv`)

`jet_tagger` chains four `dense` layers, three `relu` blocks and the `softmax`.
All dense layers share one `REUSE` parameter, so a layer is always free again
when the layer before it delivers. Assertions check this. Each layer holds a
different jet, so up to five jets are in flight at once.

| REUSE | new jet every | latency (cycles) | at 200 MHz |
|------:|--------------:|-----------------:|-----------:|
| 1     | 1 cycle       | 16               | 80 ns      |
| 2     | 2 cycles      | 20               | 100 ns     |
| 3     | 3 cycles      | 24               | 120 ns     |
| R     | R cycles      | 4·(R+2)+4        |            |

Latency is counted from the clock edge that takes a jet to the edge at which
its probabilities can be taken.

The ports are:

* `clk`, and `rst_n`, an asynchronous active-low reset;
* `in_valid`, `in_ready`, and `in_x[16]`, the features in `<16,6>`;
* `out_valid` and `out_y[5]`, the probabilities in the order q, g, W, Z, t;
* `sat_count`, a running count of dense-layer outputs that had to be clipped.
  It shows whether six integer bits are enough for the data actually fed in.

All ports are plain wires, as in a bare test design where every input and
output bit goes straight to an FPGA pin.

## The weights (`rtl/jet_weights_pkg.sv`)

The trained parameters are not available. A stand-in set of the right shape
and sparsity is generated from an integer hash of (layer, row, column):

```
h    = mix(layer·2^20 + row·2^10 + col)      (col = 1023 for the bias)
w    = (h mod 100) < 32 ? ((h >> 8) mod 1025) − 512 : 0      raw <16,6>, |w| ≤ 0.5
```

This leaves 1337 of the 4389 parameters non-zero, close to the 1338 of the
pruned network. The class probabilities this design produces are therefore
meaningless as physics. The timing, the structure and the arithmetic are the
real ones. To run a trained network, make `weight()` return its quantised
parameters (for instance as a `case` table). Nothing else changes.

## Where this RTL departs from, or adds to, the source design

* The source design generates the circuit with high-level synthesis and does
  not state a number of pipeline registers. Here every layer has an input
  register, a multiplier register and an accumulator register. The result is
  16 cycles at R = 1, where the source design reports about 15. The growth of
  4 cycles per reuse step is the same.
* The reuse schedule (which products share a multiplier), truncation with
  saturation, the valid/ready handshake, the asynchronous reset, the softmax
  algorithm and its table sizes, and the saturation counter are choices of
  this design.
* The precision is fixed at `<16,6>` by `W_TOT`/`W_INT` in `nn_pkg`. The
  saturation constants `FX_MAX`/`FX_MIN` and the testbench model assume 16
  bits, so other widths need those edits as well.
* The smaller 10-32-1 top-quark tagger with a sigmoid output, used in the
  source design to fit the I/O pins of a test board, is not built here.
  `dense` and `relu` can build its layers (`tb_tagger_1hl` does), but there is
  no sigmoid table.
* The computation of the 16 input observables is outside the design.
* DSP blocks, block RAM and pins are left to the FPGA tools to infer.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`:

* `tb_dense` runs a 20-input, 4-neuron layer at R = 1 and R = 3 side by side.
  At R = 3 its 80 products run on 27 multipliers, some of which serve two
  neurons. It checks every output bit-exactly against an integer model,
  including saturation, and checks the multiplier count. It also checks a
  latency of R+2 and an interval of R, and that the input was held off at
  R = 3.
* `tb_relu` checks corner and random values.
* `tb_softmax` compares against double-precision softmax within 0.01. It
  checks that the probabilities sum to 1 and that the latency is 4. Its inputs
  include ties and scores far apart, which reach the last entry of the
  exponential table.
* `tb_tagger_1hl` builds the hidden layer and output score of the 10-32-1
  tagger from `dense` and `relu` at R = 1 and R = 4. It checks the score (the
  sigmoid input) bit-exactly, a latency of 2·(R+2) and an interval of R.
* `tb_jet_tagger` (REUSE = 3) and `tb_jet_tagger_full` (default parameters)
  stream random jets through the whole network. They compare the output-layer
  scores bit-exactly with the integer model in `tb/jet_ref_pkg.sv`, and the
  probabilities with double-precision softmax. They check latency, interval
  and the saturation counter. They fail if overlapping jets, hidden-layer
  saturation, ReLU clipping or (for REUSE > 1) input hold-off never happened.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/nn_pkg.sv rtl/jet_weights_pkg.sv tb/jet_ref_pkg.sv \
  rtl/dense.sv rtl/relu.sv rtl/softmax.sv rtl/jet_tagger.sv \
  tb/tb_jet_tagger_full.sv --top-module tb_jet_tagger_full
./obj_dir/Vtb_jet_tagger_full
```

For the single-block testbenches, list only the packages and the block.
Verilator has no X state, so the testbenches pulse the asynchronous reset
after time 0, to give it a real falling edge.
