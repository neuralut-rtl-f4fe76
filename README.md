# L-LUT networks with hidden dense sub-networks

A LUT-based neural network stores each neuron as a truth table instead of
computing it: a neuron whose F inputs are each β bits wide has only 2^(βF)
possible inputs, so its quantized output can be tabulated once and read from
a ROM. On an FPGA the ROM becomes a small circuit of native LUTs, and a whole
layer of such "logical LUTs" (L-LUTs) is evaluated in a single clock cycle.

NeuraLUT, the scheme implemented here, builds on one observation. The table
costs the same whatever function it holds, so an L-LUT can hide much more
than one linear neuron plus activation. Each L-LUT here holds a complete
small neural network. It is dense, several layers deep, and has residual
(skip) connections. Only the boundaries of these sub-networks are exposed to
hardware: F inputs of β bits and one β-bit output. The circuit between
L-LUTs stays very sparse. The benefit is a deep network with few circuit
layers, and since every circuit layer costs one cycle, that means low latency.

This RTL implements the circuit-level network: layers of L-LUTs with random
sparse wiring, one registered layer per clock cycle. It also implements the
table construction, which evaluates the hidden sub-network on every address.

## Files

| file | contents |
|---|---|
| `rtl/neuralut_pkg.sv` | shared types, the hash, the fan-in selection, the hidden sub-network function, the quantizer |
| `rtl/llut_layer.sv` | one layer of L-LUTs: sparse input selection, one ROM per L-LUT, output registers |
| `rtl/neuralut_top.sv` | the network: a chain of `llut_layer`s, by default the MNIST model HDR-5L |
| `tb/tb_ref_pkg.sv` | independent reference model used by all testbenches |
| `tb/tb_llut_layer.sv` | layer test (small layer, random and corner inputs) |
| `tb/tb_neuralut_top.sv` | end-to-end test of a reduced 3-layer network, with bubbles and a mid-stream reset |
| `tb/tb_neuralut_full.sv` | HDR-5L at full size, all defaults |
| `tb/tb_neuralut_jsc.sv` | the two jet-tagging networks JSC-2L and JSC-5L |

## One L-LUT

L-LUT `m` of layer `l` has fan-in F. Its F inputs are outputs of layer
`l-1`, or network inputs when `l = 0`. They are chosen once, at random,
before training: the "a priori random sparsity" of LogicNets, which NeuraLUT
adopts. The code for input slot `k` becomes bits `[k*β +: β]` of a βF-bit
address. The address reads a ROM of `2^(βF)` words of β_out bits, and the
word is registered. That is all the hardware does.

The ROM words are the truth table of the hidden sub-network 𝒩. It has input
width F, L affine layers, hidden width N and a single output. For a skip
step S > 0 the L layers are grouped into L/S chunks. Each chunk is

    F_i(x) = Â_{Si} ∘ φ ∘ … ∘ φ ∘ Â_{Si-S+1}(x)  +  R_i(x)

Here the `Â` are the chunk's affine layers, φ = ReLU, and R_i is an affine
skip connection from the chunk's input to its output. The whole sub-network
is `F_{L/S} ∘ φ ∘ … ∘ φ ∘ F_1`, followed by the output quantizer. With S = 0
it is a plain MLP of L affine layers with ReLU between them. With L = N = 1
and S = 0 it is a single LogicNets neuron.

`llut_layer` fills every ROM when simulation starts, or when synthesis
elaborates it. It calls `neuralut_pkg::subnet_eval` on each of the `2^(βF)`
addresses, decoding slot `k` from address bits `[k*β +: β]`.

### Arithmetic used for the tables (this design's choice)

The published models are trained in floating point and use learned
batch-norm and quantizer scales. Their weights are not available. So that
the RTL is complete and testable, the tables are built from a fixed,
reproducible integer sub-network:

- weight or bias = (low 4 bits of `h`) − 8, in [−8, 7], where
  `h = mix32(mix32(mix32(0x4E4C5554 ^ layer) ^ lut) ^ (a<<16 | j<<8 | k))`.
  `a` is the affine index: 0…L−1 for the main layers, L… for the skip
  connections. `j` is the output. `k` is the input, and `k = 32` gives the
  bias.
- `mix32(x)`: `x ^= x>>16; x *= 0x7feb352d; x ^= x>>15; x *= 0x846ca68b; x ^= x>>16`
- affine output `j` = ⌊(b_j + Σ_k w_jk·v_k) / 4⌋
- quantizer: `clamp(⌊v / 4⌋, 0, 2^β − 1)`

To deploy a trained model, replace `subnet_weights`, `affine` and `quantize`
in `neuralut_pkg` with the trained weights and the trained quantizer. The
tables can also be loaded in some other way. Nothing outside the
`build_tables` block of `llut_layer` depends on how the words were computed.

### Sparse wiring

Fan-in slot `k` of L-LUT `m` in layer `l` reads activation
`mix32(mix32(mix32(0x53504152 ^ l) ^ m) ^ k) mod N_IN`. If that index is
already used by an earlier slot, it steps by one (mod N_IN) until it is free,
so an L-LUT never reads the same activation twice. The wiring is computed at
elaboration (`localparam fanin_t IDX`). In hardware it is fixed routing, with
no multiplexers.

## The network and its timing

`neuralut_top` chains `NUM_LAYERS` layers. Layer `i` has `LAYER_SIZE[i]`
L-LUTs of fan-in `FANIN[i]` and `BETA_OUT[i]`-bit outputs. Every layer ends in
a register and the input is not registered, so:

- **latency** = `NUM_LAYERS` clock cycles from the edge that samples `in_x`
  to the edge that shows the result on `out_y`;
- **throughput** = one inference per cycle, with no stalls or back-pressure.

A valid bit travels with the data (`in_valid` → `out_valid`). It is the only
state that is reset: `rst_n` is synchronous and active low. Data registers
have no reset, and their contents are meaningless while `out_valid` is low.

Packing: feature `i` of `in_x` is at bits `[i*BETA_IN +: BETA_IN]`, and
class `m` of `out_y` at `[m*β +: β]`. The network outputs raw class scores.
Any argmax is left to the user.

### Configurations

| model | inputs | L-LUTs per layer | β | F | L | N | S | ROM words |
|---|---|---|---|---|---|---|---|---|
| HDR-5L (MNIST, default) | 784 × 2 bit | 256, 100, 100, 100, 10 | 2 | 6 | 4 | 16 | 2 | 566 × 4096 × 2 bit = 4.6 Mbit |
| JSC-2L (jet tagging) | 16 × 4 bit | 32, 5 | 4 | 3 | 4 | 8 | 2 | 37 × 4096 × 4 bit |
| JSC-5L (jet tagging) | 16 × 7 bit | 128, 128, 128, 64, 5 | 4 | 2 in layer 0, then 3 | 4 | 16 | 2 | 128 × 16384 + 325 × 4096 words of 4 bit |

The reported latencies fit one cycle per layer: HDR-5L at 431 MHz gives
about 12 ns for 5 cycles, JSC-2L at 727 MHz about 3 ns for 2 cycles, and
JSC-5L at 368 MHz about 14 ns for 5 cycles. The jet-tagging models are
obtained by overriding the top's parameters, as `tb_neuralut_jsc` does:

```systemverilog
neuralut_top #(
  .NUM_LAYERS(2), .N_INPUTS(16), .BETA_IN(4),
  .LAYER_SIZE('{32, 5}), .FANIN('{3, 3}), .BETA_OUT('{4, 4}),
  .SUBNET('{depth: 4, width: 8, skip: 2})
) u_jsc2l (...);
```

Limits of the package: F ≤ 8, N ≤ 32, L ≤ 8. L must be a multiple of S.
Elaboration checks these with assertions.

## Where this departs from the published design

- **Table contents.** They are built from pseudo-random integer weights,
  not trained ones, so the network computes a fixed but meaningless
  function. Its structure, sizes, wiring and timing are those of the
  published models, but its accuracy is not.
- **Arithmetic inside the sub-network.** This design uses integers with a
  divide-by-4 after each affine layer. The published models use floating
  point. Batch normalization and learned quantizer scales are not modelled:
  the quantizer is a fixed unsigned clamp.
- **Input quantization.** The features must arrive already quantized to
  `BETA_IN` bits. Batch normalization and quantization of raw features
  happen outside this RTL.
- **Connectivity.** The sparse wiring is random as in the original, but the
  generator is a hash, not the original training framework's random
  permutation. A trained model brings its own wiring, and `IDX` would then
  be replaced by it.
- **Additions.** The valid pipeline and its reset are this design's own.
  The fan-in slot to address-bit order is also this design's choice.

## Synthesis

The ROMs are written as arrays filled by an `initial` block that runs the
sub-network function. FPGA synthesis tools accept this form and turn each
ROM into LUT logic, as the published flow does. Building the tables takes
about 2.3 million sub-network evaluations for HDR-5L, and the synthesis tool
must do them all while it elaborates. Expect that step to take a long time.
Simulation compiles the function to C++ and does it in about a minute. For
fast synthesis experiments, lower the sizes with parameters.

## Simulation

With Verilator 5 (two-state, with `--timing`), from the directory that
holds `rtl/` and `tb/`:

```sh
verilator --binary --timing --assert -Wno-fatal --top-module tb_neuralut_top \
  -y rtl -y tb +libext+.sv rtl/neuralut_pkg.sv tb/tb_ref_pkg.sv tb/tb_neuralut_top.sv -o sim
./obj_dir/sim
```

Swap `tb_neuralut_top` for another testbench name to run that one. Each
prints `TB_RESULT checks=N failures=M`. Approximate run times on one core:

| testbench | what it checks | build + run |
|---|---|---|
| `tb_llut_layer` | every output word against the reference; distinct fan-in; valid timing; reset | < 1 min |
| `tb_neuralut_top` | 300 samples with bubbles, back-to-back input and a mid-stream reset; latency exactly 3 cycles; counts each of these mechanisms and the skip connections actually changing an output | < 1 min |
| `tb_neuralut_full` | HDR-5L at the default parameters, 12 samples back to back, latency 5 | ~1 + 2 min |
| `tb_neuralut_jsc` | JSC-2L and JSC-5L, 40 samples each, latencies 2 and 5 | ~1 + 2.5 min |

The reference model `tb_ref_pkg` restates the definitions above and shares
no code with the RTL. It evaluates each sub-network directly for each sample
rather than reading a table. A wrong table word, a swapped address field,
wrong wiring or a missing pipeline stage all show up as mismatches.
