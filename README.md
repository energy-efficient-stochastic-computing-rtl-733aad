# Stochastic-computing MLP with layer-wise adjustable sequence length

In stochastic computing (SC) a number is carried by a stream of bits: a stream of `L` bits
whose fraction of ones is `p` encodes the bipolar value `2p - 1` in `[-1, 1]`. Multiplication
becomes a single XNOR gate and a neuron's weighted sum becomes a count of ones, so a whole
multilayer perceptron can be built fully in parallel from very small logic. The price is time
and energy: a layer needs one clock per stream bit, and the accuracy of a value grows only with
the stream length. Both time and energy are close to proportional to `L`.

Adjustable sequence length (ASL) gives each layer its own length. The layers near the input
amplify noise the most (their errors are multiplied by every later layer), so they keep the full
`L = 1024`, while later layers are cut to `L/2`, `L/4` or less. Cutting a stream is free in SC:
every bit carries the same weight, so the first `L_i` bits of a stream encode the same value at a
lower precision. The only condition is that those first bits are still well spread, which holds
for Sobol quasi-random numbers (every prefix of `2^k` points hits each of `2^k` equal bins exactly
once) but not for LFSR sequences. This RTL implements such a network: a
784-1024-1024-512-256-10 SC MLP whose five weight layers run with lengths
`L_1 ... L_5 = 2^len_log2[i]` chosen at run time.

A typical "coarse" setting is `[1024, 512, 256, 256, 256]`, which runs in 2309 cycles instead of
5125 for the full length everywhere (55% less latency). "Fine" settings such as
`[1024, 512, 128, 64, 64]` (1797 cycles) come from a search over lengths against an accuracy
threshold. That search is done offline and is not part of the hardware; the hardware only takes
the five length codes.

## One layer

A layer with `N` inputs and `M` neurons (`sc_layer`) is fully parallel: every neuron works at
the same time and consumes one bit of each input stream per cycle.

```
 weight reg --> SNG (w > rnd) --+
                                XNOR --+
 input stream bit x_j ----------+      |
   ... N of these, plus the bias SNG --+--> adder tree --|reg|--> adder levels --> STanh FSM --> output bit
                                              (input side)        (output side)
```

* **Weight SNGs.** Each weight is held as a `W = 10` bit binary value `w` (bipolar weight
  `2w/1024 - 1`). A stochastic number generator (SNG) compares it with a random number:
  the stream bit is `w > rnd`. All weight SNGs of a layer share one Sobol generator, so one
  random number per cycle serves the whole layer.
* **Multiplication.** The weight bit and the input bit go through XNOR, the bipolar product.
* **Bias.** One more SNG per neuron produces the bias stream; its bit is added without
  multiplication (bias times +1).
* **Adder tree** (`adder_tree`). It counts the ones among the `N+1` product bits. It has one
  pipeline register, placed close to the output: the inputs are split into `PARTS = 4` groups,
  each group is counted, the four counts are registered, and the last two adder levels add
  them in the next cycle. Near the output there are few signals, so the register is small.
* **STanh** (`stanh_lfsm`). A saturating up/down counter of `2^STW` states (about `2(N+1)`)
  starts in the middle and moves by `2*count - (N+1)` each cycle, which is the sum of the
  `N+1` bipolar products. The output bit is 1 while the new state is in the upper half. Inputs
  that are positive on average drive the output towards all ones, negative ones towards all zeros,
  and inputs near zero give a smooth, tanh-shaped transition between the two.

A bit presented in cycle `t` leaves the neuron in cycle `t+1`: one cycle for the tree register.
The STanh output is taken from its next state, so the STanh register adds no further latency.

## Sobol generator

`sobol_rng` is the standard Gray-code Sobol generator: a counter holds the index `i`, a
priority encoder finds `m`, the position of the lowest zero bit of `i`, a table holds the
direction vectors `V_m`, and the next number is `q = q_prev XOR V_m`. After `clr` the output
is 0 and every enabled cycle advances one point. Running a layer for `L_i` cycles after a
restart therefore uses exactly the first `L_i` Sobol points. The direction vectors are
computed when the design is elaborated (`asl_pkg::sobol_dir`). Dimension 0 gives
`V_k = 2^(W-1-k)`, the van der Corput sequence. Dimension 1 uses the polynomial `x + 1`: the
direction numbers follow `m_j = m_{j-1} XOR 2 m_{j-1}`, i.e. 1, 3, 5, 15, 17, 51, ..., and
`V_k = m_{k+1} * 2^(W-1-k)`. Dimensions 2 to 4 use the next three standard (Joe-Kuo) polynomials.
The network inputs use dimension 0 and all weights use dimension 1. Input and weight streams
therefore come from different dimensions and stay uncorrelated.

## Running the layers: lengths, buffers and timing

The layers do not overlap. `asl_controller` runs layer 1 for `L_1` cycles, gives it one drain
cycle (its last bit leaves the tree register), then runs layer 2 for `L_2` cycles, and so on.
An inference therefore takes exactly

    cycles = L_1 + L_2 + L_3 + L_4 + L_5 + 5

which gives 5125 for `L = 1024` everywhere, 2309 for the coarse setting, and 1797, 1925 and 1989
for the three fine settings listed below.

Because layer `i+1` starts only after layer `i` has finished, each hidden layer's output streams
are kept in a `stream_buffer`, a memory of `2^LOG2 = 1024` words of `M` bits. Word `t` holds
bit `t` of every neuron. Layer `i+1` reads word `t & (L_i - 1)` in its cycle `t`:

* when `L_{i+1} <= L_i` (the usual case) it reads the first `L_{i+1}` bits. This is the
  truncation of the input streams, and no SNG regenerates them;
* when `L_{i+1} > L_i` the address wraps, and the shorter stream is read again from its
  start. The paper does not cover this case; the wrap is this design's choice so that any
  combination of lengths gives a defined result.

The first layer's inputs come from `input_sng_bank`: 784 input registers, each with an SNG on
Sobol dimension 0. The last layer's ten output streams are counted by `prob_estimator` up
counters. After `done`, `out_count[k] / L_5` is the fraction of ones of output `k`, and
`2*out_count[k]/L_5 - 1` is its bipolar value.

Layer `i`'s RNG and STanh states are all restarted by the `clr` pulse at `start`, and each RNG
advances only while its own layer runs. Every layer therefore sees its Sobol sequence from index 0.

## Using the top module `sc_mlp_asl`

| signal | meaning |
|---|---|
| `wl_we, wl_layer, wl_row, wl_col, wl_data` | write one weight: layer, neuron, input; `wl_col` equal to the layer's fan-in writes the neuron's bias |
| `xl_we, xl_addr, xl_data` | write one network input |
| `len_log2[5]` | per layer, `L_i = 2^len_log2[i]`; codes above `LOG2` (10) are clamped to 10 |
| `start` | pulse while idle; captures `len_log2` |
| `busy`, `done` | `busy` is high for the `sum(L_i)+5` cycles; `done` pulses once after that |
| `out_count[10]` | ones counted in each output stream |
| `act_saturated[5]` | per layer, some STanh counter hit an end this cycle (monitor) |

Values are written as 10-bit SNG values: a bipolar value `v` in `[-1, 1]` is
`round((v+1)/2 * 1024)`, limited to `0..1023`. Weights must therefore be scaled into `[-1, 1]`.
A value of 1023 encodes `+0.998`: the largest positive value falls one step short of +1.

Parameters of `sc_mlp_asl`: `NL` (weight layers, 5), `SIZES` (neuron counts, default
`'{784,1024,1024,512,256,10}`; use `'{1024,1024,1024,512,256,10}` for 1024-pixel inputs),
`LOG2` (log2 of the longest stream, 10), `W` (SNG width, 10), `PARTS` (tree groups before the
register, 4).

At the default size the network has about 2.4 million weight registers (24 Mbit) and the same
number of comparators and XNOR gates, plus 2.8 Mbit of stream buffers. This is the cost of the
fully parallel organisation. The RTL writes the per-weight comparators as a loop inside
`sc_neuron`, which keeps elaboration of the full network to well under a gigabyte. Synthesising the
full network is a long job: a smaller `SIZES` is the practical choice for trying out synthesis.

## Workloads

Networks and length settings from the published evaluation, against the default build:

| network | setting (L_1..L_5) | cycles | fits default build |
|---|---|---|---|
| 784-1024-1024-512-256-10 (Fashion-MNIST) | coarse 1024,512,256,256,256 | 2309 | yes |
| same | fine 1024,512,128,64,64 | 1797 | yes |
| same | uniform L = 1024 / 512 / 256 / 128 / 64 | 5125 / 2565 / 1285 / 645 / 325 | yes |
| 1024-1024-1024-512-256-10 (SVHN, CIFAR10, one channel) | coarse 1024,512,256,256,256 | 2309 | needs `SIZES[0] = 1024` |
| same, SVHN | fine 1024,512,256,64,64 | 1925 | needs `SIZES[0] = 1024` |
| same, CIFAR10 | fine 1024,512,256,128,64 | 1989 | needs `SIZES[0] = 1024` |

The cycle counts are what this RTL produces, and they equal the published ones;
`tb_sc_mlp_asl_wl` runs all of these settings on a network eight times narrower. Accuracy depends
on trained weights, and none are included here.

## What follows the published design and what does not

Taken from the paper: the layer structure (SNG, XNOR multiply, counting adder tree with one
register near its output, LFSM-based STanh), the Sobol generator built from counter, priority
encoder, direction-vector table and XOR register, the network sizes, `L = 1024`, lengths that
are powers of two, per-layer truncation with direct reuse of the previous layer's streams, the
probability-estimator counters, and the `sum(L_i) + 5` cycle count.

This design's own choices, where the description stops:

* the STanh state count and update rule, and the use of the next state for the output;
* the bias as an extra SNG bit in the count;
* weights stored as 10-bit SNG values in registers, loaded one per clock. The published
  flow starts from an FP16 model, and its FP16-to-stream conversion is not described;
* one shared Sobol generator per layer for the weights, and a separate one for the inputs;
* the Sobol direction numbers;
* the stream buffers, which the layer-after-layer timing requires, and the wrap-around when
  a layer is longer than its predecessor;
* the control handshake, the load ports and the asynchronous active-low reset.

Not built: the alternative where weights are already stored as bitstreams (the SNGs then
disappear); the "extended stochastic logic" (ESL) encoding, in which a value is the ratio of two
streams. The counting adder tree here passes the unscaled sum to the STanh as a binary number,
so no ESL division is needed. Note also that the text describes the accumulation as "based on a
multiplexer tree" in one place, while its figure and the rest of its description show a counting
adder tree with a register. This RTL follows the adder tree.

## Verification and simulation

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The reference models in
`tb/tb_ref_pkg.sv` are written independently of the RTL: they use tabulated Sobol points instead
of the package function and a separate STanh step.

* `tb_sobol_rng`: 1024 points of dimensions 0 and 1, stratification of every `2^k` prefix, hold, restart.
* `tb_sng`, `tb_adder_tree`, `tb_stanh_lfsm`, `tb_prob_estimator`, `tb_stream_buffer`:
  exhaustive or random checks against the reference, including the one-cycle tree latency.
* `tb_input_sng_bank`: exact one counts for truncated streams (`ceil(v*L/1024)`).
* `tb_sc_neuron`, `tb_sc_layer`: bit-exact outputs for random weights and inputs, at two lengths.
* `tb_asl_controller`: the coarse, fine and full settings give 2309, 1797 and 5125 busy cycles;
  it also checks the layer order, the bit index, the drain cycles, and the clamping of codes.
* `tb_sc_mlp_asl`: the whole network at 8-6-6-4-4-2 with `L = 64`. It runs four length
  settings for each of three random weight sets, compares the outputs bit-exactly with a reference
  network model, and checks the cycle count. It also counts how often each mechanism occurred:
  truncation, wrap-around, STanh saturation, a configuration change and a weight reload.
* `tb_sc_mlp_asl_wl`: the published length settings (full, coarse and the three fine ones) at
  the full stream length `L = 1024` and 10-bit values, on the network shape scaled down by 8
  (98-128-128-64-32-10). Everything is loaded through the ports. It checks the cycle counts 5125,
  2309, 1797, 1925, 1989, 2565, 1285, 645 and 325 and compares every output count with the reference model.

The largest network simulated is this 98-128-128-64-32-10 one at `L = 1024`. The full
784-1024-1024-512-256-10 network passes lint and elaboration at its default size. Its simulation
model, however, takes more than ten minutes of C++ compilation, so no full-size simulation is
included here.

To run one, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/asl_pkg.sv tb/tb_ref_pkg.sv \
        tb/tb_sc_mlp_asl.sv --top-module tb_sc_mlp_asl
    ./obj_dir/Vtb_sc_mlp_asl

Verilator finds the other modules by file name (`-Irtl`); packages are named explicitly.

## Files

`rtl/asl_pkg.sv` (constants, controller states, Sobol direction numbers), `rtl/sobol_rng.sv`,
`rtl/sng.sv`, `rtl/adder_tree.sv`, `rtl/stanh_lfsm.sv`, `rtl/sc_neuron.sv`, `rtl/sc_layer.sv`,
`rtl/input_sng_bank.sv`, `rtl/stream_buffer.sv`, `rtl/prob_estimator.sv`,
`rtl/asl_controller.sv`, `rtl/sc_mlp_asl.sv` (top); testbenches `tb/tb_<module>.sv`,
`tb/tb_sc_mlp_asl_wl.sv` and the reference package `tb/tb_ref_pkg.sv`.
