# A neural network flattened into weight-embedded logic

Most neural-network accelerators keep a limited number of general multiply-accumulate
(MAC) units and reuse them many times per inference, fetching weights from memory each
time. That caps throughput at a fraction of the clock rate, and moving the weights costs
much of the power. This design takes the opposite approach for small networks that must
classify or equalise at line rate, such as optical-fibre equalisation, trigger filtering
in particle physics or packet filtering. Every neuron of every layer gets its own logic,
and every trained weight is a constant built into that logic. A weight is not an operand.
The result is a pipeline with no control and no memory that takes one input vector and
delivers one result on every clock cycle.

The RTL here is parameterised SystemVerilog for that architecture:

- multipliers specialised for their constant weights;
- a MAC per neuron with a narrow, profiled accumulator;
- a requantiser with its scale factor embedded;
- ReLU;
- per-layer register stages, sized so that register retiming in synthesis can balance
  the pipeline.

The default build is a 21-input, 1-output optical-fibre equaliser with hidden layers of
50 and 25 neurons. Any fully connected ReLU network of up to 8 layers can be built by
changing two parameters.

## What one neuron computes

A neuron with inputs `x[i]` (8-bit signed), embedded weights `w[i]` (8-bit signed) and an
embedded bias `b` produces

```
s   = b + sum_i x[i] * w[i]                           full precision
a   = clamp(s, -2^(ACC_W-1), 2^(ACC_W-1)-1)           profiled accumulator, ACC_W = 14
q   = clamp(floor((a * M + 2^15) / 2^16), -128, 127)  requantise, scale M / 2^16
y   = max(q, 0)                                       ReLU (all layers but the last)
```

Each line is one module:

| step | module | how it is built |
|---|---|---|
| `x[i] * w[i]` | `const_mult` | the constant is recoded into canonical signed digits (digits -1, 0, +1, no two adjacent non-zero) at elaboration; the product is a sum of shifted copies of `x`, one adder or subtractor per non-zero digit |
| sum and clamp | `mac_unit` | one `const_mult` per input, an adder over all products and the bias, then saturation to `ACC_W` bits with a `sat` flag |
| rescale | `requantizer` | a `const_mult` by the layer's scale-factor numerator `M`, add half an LSB, arithmetic shift right by 16, saturate to 8 bits |
| ReLU | `relu` | clears the value when its sign bit is set; the last layer of the network bypasses it |
| all of the above | `neuron` | combinational chain MAC → requantiser → ReLU |

### Why the weights are constants

Once a weight is fixed, most of a general multiplier disappears. A zero weight, which is
what unstructured pruning leaves, produces no logic at all. A power of two is just
wiring, and a negative power of two is a negation plus wiring. For example, a 2-bit
signed multiplier by −2 reduces to a bit shift and a two-bit negation. The cost of a
weight therefore depends on how many non-zero signed digits it has, which is why
`const_mult` is written directly in that form. The adder that follows the multipliers
also simplifies once its operands are partly constant, and neighbouring neurons can share
terms. That sharing is left to logic synthesis: the RTL describes each neuron separately
and relies on the synthesis tool to merge and minimise across the whole flattened
network.

The same idea explains the training side of the method, which is not hardware and is
not included here. The network is trained with only a few dozen distinct weight values,
namely those whose constant multipliers are smallest. The published networks use 70 to
120 distinct values out of the 256 possible.

### The accumulator width

The exact width of a sum of N products of two 8-bit numbers is 16 + ⌈log2 N⌉ bits.
Trained networks rarely come near that bound. The method profiles the sums that occur on
the training data, discards rare outliers and sizes the adder for the rest. For one
neuron of the optical-fibre network, the profiled sums fit 14 bits once a single outlier
is discarded. `ACC_W` defaults to 14 for every layer.

An outlier that still occurs at run time is clamped to the nearest 14-bit value, not
wrapped. This behaviour is a choice of this design, because the method does not say what
an out-of-range sum should do. `mac_unit` always computes the full-precision sum first,
so the clamp is exact.

### Number formats

| quantity | format |
|---|---|
| network inputs, activations, outputs | 8-bit two's complement; after ReLU, 0..127 |
| weights | 8-bit two's complement constants |
| bias | integer constant in accumulator units |
| accumulator | `ACC_W`-bit two's complement, saturating |
| requantiser scale | `M / 2^16`, `M` a 16-bit constant per layer, rounding half up |

## Pipeline and retiming

```
 x ─► FF_in ─► [ layer 0 logic ] ─► IFF1 ─► IFF2 ─► FF_out ─► [ layer 1 logic ] ─► IFF1 ─► ... ─► y
```

`logic_nn` registers the input vector once (`FF_in`). Each `nn_layer` is followed by
`NUM_IFF + 1` register stages (`pipe_regs`): `NUM_IFF` inserted stages (default 2) and
the layer's own output register. In the RTL all of these stages sit after the ReLU, which
makes the RTL easy to read and the latency easy to count. They are not where the
registers should end up in silicon. The intended flow runs synthesis with register
retiming enabled. Retiming moves the inserted stages backwards into the
multiplier/adder/requantiser logic until the delay between registers is balanced, without
changing what appears at the outputs on any cycle. The method's example splits one
9-unit logic block into three 3-unit blocks. With a clock-to-q delay of 3 and a setup
time of 1, that cuts the clock period from 13 to 7.

Adding stages raises the clock frequency up to a point. After that, more stages only
cost flip-flops. The evaluation compared 2, 3 and 4 inserted stages, and `NUM_IFF` is a
parameter for that reason. A synthesis flow without retiming still gives a correct
circuit, but its critical path is the whole of each layer's logic.

Timing at the top level:

- latency is `1 + NUM_LAYERS × (NUM_IFF + 1)` cycles, which is 10 for the default
  configuration;
- throughput is one inference per cycle, so back-to-back inputs give back-to-back
  outputs;
- there is no back-pressure.

`in_valid` travels alongside the data and comes out as `out_valid`. The reset `rst_n` is
asynchronous and active low. It clears only this valid pipeline: data registers have no
reset, which keeps them free to be retimed and costs nothing, since invalid data is never
marked valid. A reset therefore discards every vector in flight.

## Configurations

`logic_nn` takes the network shape as `NUM_LAYERS` and the size list `SIZES`, of type
`nn_pkg::sizes_t`, 9 entries. Entry 0 is the number of inputs and entry `l+1` the number
of neurons in layer `l`. Unused entries are 0. The nine networks of the evaluation are
listed below. The output layer of each (1 output for the equalisers and the intrusion
detectors, 5 for the jet classifier) follows the hidden layers.

| network | task | `SIZES` | embedded weights before pruning |
|---|---|---|---|
| OFC-A | optical-fibre equaliser | 21, 40, 25, 1 | 1 865 |
| **OFC-B (default)** | optical-fibre equaliser | 21, 50, 25, 1 | 2 325 |
| OFC-C | optical-fibre equaliser | 21, 50, 50, 1 | 3 600 |
| JSC-A | jet substructure classifier | 16, 64, 16, 16, 8, 5 | 2 472 |
| JSC-B | jet substructure classifier | 16, 64, 32, 32, 32, 5 | 5 280 |
| JSC-C | jet substructure classifier | 16, 64, 48, 48, 32, 5 | 8 096 |
| NID-A | network intrusion detector | 593, 20, 1 | 11 880 |
| NID-B | network intrusion detector | 593, 20, 20, 1 | 12 280 |
| NID-C | network intrusion detector | 593, 25, 25, 1 | 15 475 |

For example, JSC-B is

```systemverilog
logic_nn #(.NUM_LAYERS(5), .SIZES('{16, 64, 32, 32, 32, 5, 0, 0, 0})) u_nn (...);
```

Because the weights are part of the circuit, each network is its own circuit: a given
build runs exactly one network. The smaller networks of the comparison with LUT-based
FPGA designs have no published layer sizes, so they are not listed.

## Where the weights come from

The trained weights, biases and scale factors of the published networks are not
available, so `nn_pkg` supplies a deterministic stand-in network. Every constant is drawn
from a 32-bit integer hash of (seed, layer, neuron, input index):

- about 6/16 of the weights are 0, standing in for pruning;
- the remaining weights lie in −16..15;
- biases lie in −256..255;
- each layer's scale-factor numerator `M` lies in 1024..2047, a scale between 1/64 and
  1/32.

These ranges keep most sums inside the 14-bit accumulator for random full-range inputs
while still making saturation happen. The stand-in uses at most 32 distinct weight
values, within the budget the method's training produces. The stand-in network computes
nothing meaningful. It exists so that the structure can be built, simulated and
synthesised at the published sizes.

To build a trained network, replace the bodies of `nn_pkg::weight`, `nn_pkg::bias` and
`nn_pkg::req_mult` with look-ups of the trained integer constants, for example a
`case` on (layer, neuron, input). Nothing else changes. `nn_layer` calls these functions
at elaboration and passes the results down as parameters. The test reference model
reads the same functions, so the testbenches keep working.

## Module hierarchy

```
logic_nn                 FF_in, NUM_LAYERS layers
└─ nn_layer  (× NUM_LAYERS)   SIZES[l+1] neurons + pipe_regs (NUM_IFF+1 stages)
   ├─ neuron (× N_OUT)        mac_unit → requantizer → relu
   │  ├─ mac_unit             const_mult × N_IN, adder, saturation
   │  ├─ requantizer          const_mult by M, round, shift, saturate
   │  └─ relu
   └─ pipe_regs
nn_pkg                   widths, size-list type, stand-in constants, signed-digit recoding
```

The default parameters of the lower-level modules are the small examples used in their
tests. `const_mult` defaults to the 2-bit weight −2, and `mac_unit` to the two-input
example with 2-bit weights −1 and −2 and a 5-bit sum. The parameters that matter for the
network are set from the top down.

## Simulation

Each module has a self-checking testbench in `tb/`. Each compares against values
computed independently, with plain integer arithmetic in the testbench or in
`tb/nn_ref_pkg.sv`, and ends by printing `TB_RESULT checks=N failures=M`. With Verilator
5:

```sh
verilator --binary --timing --assert -Irtl -Itb \
    rtl/nn_pkg.sv tb/nn_ref_pkg.sv tb/tb_logic_nn.sv --top-module tb_logic_nn
./obj_dir/Vtb_logic_nn
```

| testbench | what it checks |
|---|---|
| `tb_const_mult` | the 2-bit examples (weights −2 and −1) and nine 8-bit weights (−128, 127, 0, 107, −16, ±1, 85, −43) over every input value |
| `tb_mac_unit` | the two-input 2-bit example exhaustively; a six-input 8-bit MAC with bias on random and extreme vectors, including saturation and the `sat` flag |
| `tb_requantizer` | every 14-bit input for two scale factors, with rounding, saturation and `sat` |
| `tb_relu` | every 8-bit input, enabled and bypassed |
| `tb_pipe_regs` | data and valid delayed by exactly 3 cycles under random gaps |
| `tb_neuron` | a 4-input neuron with and without ReLU; requires accumulator saturation, requantiser saturation and ReLU clearing each to occur |
| `tb_nn_layer` | two layers against the reference model, with a latency of `NUM_IFF + 1` |
| `tb_logic_nn` | the default OFC-B network with no parameter overrides (see below) |
| `tb_workloads` | the other eight evaluated networks, each built as its own `logic_nn` and checked the same way, plus OFC-B with 0, 3 and 4 inserted stages per layer (latencies 4, 13 and 16 cycles) |

`tb_logic_nn` checks 2000 random input vectors, sent in bursts separated by idle cycles.
It checks every output value, a latency of exactly 10 cycles per vector, and
back-to-back outputs for back-to-back inputs. It also resets the design while vectors
are in flight and checks that they are discarded. The stimulus and checks live in
`tb/nn_stream_check.sv`, which can be reused for any configuration. It counts each
mechanism: pruned connections, accumulator saturation, requantiser saturation, ReLU
clearing, idle cycles, back-to-back outputs and the in-flight reset. It fails if any of
them never occurred. `tb_workloads` runs its eight networks, including the three
593-input intrusion detectors, and spends most of its time of a few minutes compiling.

## Departures and open points

What follows the method: 8-bit weights and activations, one constant multiplier per
connection, an adder per neuron, a profiled 14-bit accumulator, a requantiser with an
embedded scale factor, ReLU, registers after every layer with two inserted stages for
retiming, and the nine evaluated network shapes.

What this design chose where the method is silent:

- saturation, rather than wrap-around, of accumulator sums that exceed the profiled width;
- the fixed-point form of the scale factor: a 16-bit numerator, a shift of 16, rounding
  half up and output saturation;
- one scale factor per layer;
- a bias term per neuron;
- no ReLU on the output layer;
- the valid signal, reset only of the valid pipeline, and an input register `FF_in`;
- one `ACC_W` for every neuron. The method profiles each neuron separately and could give
  each its own width, but reports only the 14-bit example.

What is not here:

- the trained constants (see above);
- the training flow, including the hardware-aware selection of cheap weight values;
- retiming itself, which is a synthesis step;
- the I/O buffers in front of `FF_in` and behind the last register, which come from the
  cell library.

Reported figures such as clock frequency, power and transistor counts depend on the
trained weights, the 45 nm cell library and the synthesis flow. This RTL does not
reproduce them.
