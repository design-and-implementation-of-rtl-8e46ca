# Neural-network digital predistorter, fully pipelined RTL

A power amplifier (PA) in a radio transmitter is only linear at low output
power. Driven harder, it compresses and distorts the signal. This smears
energy into the neighbouring channels (adjacent channel leakage) and blurs
the constellation (error vector magnitude). A digital predistorter (DPD) sits
in front of the PA and applies roughly the inverse distortion in the digital
baseband. The cascade of predistorter and PA then behaves like a linear
amplifier.

This design does the predistortion with a small feed-forward neural network
instead of the usual memory polynomial. Each complex baseband sample `x[n]`
is split into its real and imaginary parts. These feed `K` fully connected
hidden layers of `N` ReLU neurons, and two linear output neurons. The input
sample is also added straight onto the two outputs (a *linear bypass*), so
the hidden layers only have to learn the small nonlinear correction:

```
h_1      = ReLU(W_1 [Re x; Im x] + b_1)          W_1 : N x 2
h_l      = ReLU(W_l h_(l-1) + b_l),  l = 2..K    W_l : N x N
z        = W_(K+1) h_K + b_(K+1)                  W_(K+1) : 2 x N
x_hat[n] = (z_1 + Re x) + j (z_2 + Im x)
```

The network is trained offline by software, which is not part of this RTL.
Training first fits a second network that models the PA. It then trains the
predistortion network by backpropagating the output error through that PA
model. The hardware does inference only. The host writes the trained weights
into an on-chip RAM, and a loader copies them into registers beside the
multipliers. The default size, `N = 14` and `K = 1`, is the larger of the two
published FPGA design points. It has 72 parameters and 56 multipliers. It
takes one complex sample per clock and has a latency of 14 clocks.

## Block diagram

```
            host write port                    load_start
                  |                                 |
          +-------v--------+   raddr   +------------v-----------+
          |  weight_ram    |<----------|     ram_controller     |
          | (DEPTH = 5N+2) |---------->|  counter 0..DEPTH-1    |
          +----------------+   rdata   +------------+-----------+
                                                    | wbus {valid, addr, data}
                       broadcast to every neuron PE | (each keeps its own words)
             +-------------------+------------------+----------------+
             |                   |                                   |
x_re --+---> [PE h1,0] --\       |                                   |
x_im --+---> [PE h1,1] ---+---> [PE out re] --> (+) --> y_re         |
       |     ...          |                      ^                   |
       +---> [PE h1,N-1]-/+---> [PE out im] ---- | --> (+) --> y_im  |
       |                                         |      ^
       +-----> bypass_pipeline (13 registers) ---+------+
```

Each hidden PE takes both `Re(x)` and `Im(x)`, and each output PE takes all
`N` hidden outputs. For `K > 1`, further layers of `N` PEs are inserted
between the first hidden layer and the output PEs. Each of those PEs takes
all `N` outputs of the layer before it.

## The neuron processing element

`neuron_pe` computes one neuron, with one multiplier per input, so all the
products of a sample are formed in the same clock:

```
x[0] --[mult]--\
x[1] --[mult]---+-- balanced adder tree (operands: bias, p[last], ..., p[0]) --[ReLU mux]--> y
 ...            |
bias -----------/
        ^
 weights_cache (registers loaded from the broadcast bus)
```

* The multiplier (`pipe_mult`) has three register stages. They register the
  operands, the full 32-bit product, and the product rescaled to 16 bits.
* The adder tree (`adder_tree`) registers every level. It pairs neighbours
  left to right, and an odd value left over is passed up a level unchanged.
  The bias is the first operand and the product of the last input is the
  second. For the two-input neuron of the first hidden layer, this adds the
  bias to the `Im(x)` product first and the `Re(x)` product after it. That
  is the order of the published PE drawing.
* The ReLU is one multiplexer that selects zero when the sign bit is set. It
  is registered and is present only in hidden neurons.

Latency of a PE: `3 + ceil(log2(inputs + 1)) + (1 if ReLU)`. That is 6
clocks for a first-layer neuron, 8 for a deeper hidden neuron with 14
inputs, and 7 for an output neuron with 14 inputs.

## Pipeline timing

Everything is pipelined: a new sample can enter every clock, and there is no
stall or back-pressure. The latency from a sample on `x_re/x_im` to its
result on `y_re/y_im` is

```
LATENCY = 6                          first hidden layer
        + (K-1) * (4 + ceil(log2(N+1)))  further hidden layers
        + 3 + ceil(log2(N+1))        output neurons
        + 1                          bypass adder
```

| N  | K | parameters | multipliers | latency (clocks) | published DSP slices | published latency |
|----|---|-----------:|------------:|-----------------:|---------------------:|------------------:|
| 14 | 1 | 72         | 56          | 14               | 56                   | 14                |
| 6  | 1 | 32         | 24          | 13               | 24                   | 12                |
| 31 | 1 | 157        | 124         | 15               | not built            | not built         |
| 8  | 2 | 114        | 96          | 22               | not built            | not built         |

The multiplier count is `4N + (K-1)N^2`. At both published design points it
equals the number of DSP slices of the FPGA build.

The linear bypass is a chain of `LATENCY - 1` registers. It brings `x[n]` to
the output adders in the same clock as the output neurons' result for
`x[n]`. `in_valid` travels along the same chain and comes out as
`out_valid`. The datapath runs every clock whether or not a sample is
flagged valid; the flag only tells the consumer which outputs matter.

The published pipeline depths are not known. The depths here give the
published 14 clocks at `N = 14`, but they give 13 clocks at `N = 6`, where
12 was published.

## Loading the weights

Inference never reads the RAM. Every PE keeps its own weights and bias in
registers (`weights_cache`) that drive its multipliers and bias adder
directly. A load copies the RAM into these registers:

1. The host writes every parameter through `ram_we`, `ram_waddr` and
   `ram_wdata`, one word per clock. This does not disturb the running
   network.
2. The host pulses `load_start`. `ram_controller` counts through addresses
   0 to DEPTH-1, one per clock. Each address and the word read from it are
   broadcast on one shared bus to every PE.
3. Each cache compares the address with its own address range and stores the
   word in the matching register.
4. `load_done` pulses once, `DEPTH + 2` clocks after `load_start` (74 clocks
   for the default size). `load_busy` is high during the load. A second
   `load_start` is ignored while a load is running.

The network keeps running during a load. Samples that pass through while
their caches are being rewritten are computed with a mix of old and new
weights, so the host should stop sending samples, or discard the outputs,
until `load_done`. After reset all cached weights are zero. The network then
outputs its input unchanged (pure bypass) until the first load.

### Address map

Parameters are stored neuron by neuron, weights first and then the bias:

| addresses | contents |
|---|---|
| `3i`, `3i+1`, `3i+2` | hidden layer 1, neuron `i`: weight on `Re x`, weight on `Im x`, bias |
| `B + m` (m < N), `B + N` with `B = 3N + (l-2)N(N+1) + i(N+1)` | hidden layer `l >= 2`, neuron `i`: weight on neuron `m` of layer `l-1`, then bias |
| `B + m`, `B + N` with `B = 3N + (K-1)N(N+1) + j(N+1)` | output neuron `j` (0 = real, 1 = imaginary): weight on neuron `m` of layer `K`, then bias |

The total is `3N + (K-1)N(N+1) + 2(N+1)` words, which is `5N + 2` for one
hidden layer. The RAM address is 8 bits wide, so networks with up to 256
parameters fit. For one hidden layer that means `N <= 50`.

A network with fewer neurons runs on a larger build: write zeros for every
weight and bias of the unused neurons. An all-zero hidden neuron outputs
ReLU(0) = 0, and its output weight is zero, so the result is exactly that of
the smaller network. The latency stays that of the larger build.

## Number format and arithmetic

Every bus is 16 bits wide, signed, with 12 fractional bits (Q4.12, range
-8 to just under +8). This applies to samples, weights, biases, products and
sums alike.

* A product is the full 32-bit product shifted right by 12 (truncation
  towards minus infinity), saturated to 16 bits.
* Every addition saturates to 16 bits instead of wrapping. Saturating
  addition is not associative, so the adder-tree order described above is
  part of the numerical definition. The testbench model follows it exactly.
* Input samples in the range of about ±0.9 (±3700 LSB) leave ample headroom.

The 16-bit width is the published one. The position of the binary point,
the truncation and the saturation are this design's choices. A network
trained in floating point has to be quantised to Q4.12 before it is loaded.

## Interface of `nn_dpd_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous, active-low reset of every register except the RAM contents |
| `ram_we`, `ram_waddr`, `ram_wdata` | in | 1, 8, 16 | host write port of the weight RAM |
| `load_start` | in | 1 | start copying the RAM into the caches |
| `load_busy`, `load_done` | out | 1 | copy in progress; one-clock pulse at the end |
| `in_valid`, `x_re`, `x_im` | in | 1, 16, 16 | input sample, Q4.12 |
| `out_valid`, `y_re`, `y_im` | out | 1, 16, 16 | predistorted sample, `LATENCY` clocks later |

Parameters: `N` (neurons per hidden layer, default 14) and `K` (hidden
layers, default 1). The package `dpd_pkg` holds the word width, the binary
point, the multiplier depth, the address map and the fixed-point helpers.

## What follows the published design and what does not

Taken from the published accelerator:
* a fully parallel network with one multiplier per weight
* 16-bit buses throughout
* a ReLU built as one multiplexer
* the identity linear bypass, built as pipeline registers and two adders
* a host-writable RAM for weights and biases
* a counter that broadcasts every address and word to all neurons, with
  per-neuron caches that grab their own words
* one sample per clock
* 14 clocks of latency at `N = 14`

Chosen here, where the published description is silent:
* the binary point, truncation and saturation
* the pipeline depths, and so the latency of 13 clocks at `N = 6`
* the address map
* the start/busy/done load handshake
* the valid flags
* reset behaviour
* support for `K > 1`. Two-layer networks were evaluated for their
  accuracy only; no hardware for them was described.

Where the published material is inconsistent:
* The block diagram draws the weight path as a dashed chain from the RAM
  through one PE to the next. The text says the words are broadcast to all
  neurons. This design uses a broadcast bus.
* The latency saving over the polynomial predistorter is quoted as 42% in
  one place and 46% in another. The tabulated 14 and 26 clocks give 46%.
  This does not affect the RTL.

Not included:
* the power amplifier, the data converters and the RF chain
* the training software and the PA model network
* the memory-polynomial predistorter that the design was compared against

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the RTL
with an integer reference model in `tb_ref_pkg`. That model is written
independently of the RTL: plain integer arithmetic with the same rounding,
saturation and adder-tree order. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops.

| testbench | what it checks |
|---|---|
| `tb_weight_ram` | host writes, one-clock reads, out-of-range addresses, read during write |
| `tb_ram_controller` | every address in order with the right word, `busy`/`done` timing (`DEPTH+2` clocks), `start` ignored while busy |
| `tb_weights_cache` | captures only its own addresses and only valid words, holds otherwise, reset |
| `tb_neuron_pe` | a 2-input ReLU neuron and a 14-input output neuron: exact results at 6 and 7 clocks, ReLU clipping, saturation |
| `tb_bypass_pipeline` | exact 13-clock delay of sample and valid flag |
| `tb_bypass_adder` | saturating sums in both directions, one-clock latency |
| `tb_nn_dpd_top` | whole design at default size, see below |
| `tb_nn_dpd_ofdm` | default build fed with 10 generated LTE-like OFDM symbols (600 QPSK subcarriers, 1024-point inverse DFT, 72-sample cyclic prefix, about 9.6 dB PAPR): 10 960 samples back to back, every output and its latency checked |
| `tb_nn_dpd_workloads` | N = 6, 14 and 31 with K = 1, and N = 8 with K = 2, each against the model with its latency (uses the harness `tb_dpd_run`) |

`tb_nn_dpd_top` runs the default build end to end. It checks about 960
samples bit-exactly, each with the 14-clock latency. It also counts each of
the following and fails if any of them never happens:
* output equal to input before any load (bypass only)
* two cache loads of 74 clocks
* RAM rewrites during streaming that must not reach the caches
* back-to-back samples
* bubbles in the input stream
* the ReLU both clipping and passing
* 16-bit saturation

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_nn_dpd_top rtl/dpd_pkg.sv tb/tb_ref_pkg.sv tb/tb_nn_dpd_top.sv
./obj_dir/Vtb_nn_dpd_top
```

For another testbench, change the top module and the last file. Every
testbench simulates in a second or less. `tb_nn_dpd_workloads` takes a few
minutes to compile because it builds four network sizes.

## Files

`rtl/`:
* `dpd_pkg.sv`: shared types, constants, fixed-point helpers and the address map
* `nn_dpd_top.sv`: the top level
* `weight_ram.sv`, `ram_controller.sv`, `weights_cache.sv`: weight storage and loading
* `neuron_pe.sv`, `pipe_mult.sv`, `adder_tree.sv`: the neuron PE and its parts
* `bypass_pipeline.sv`, `bypass_adder.sv`: the linear bypass and the output adders

`tb/`: the testbenches above, plus the shared reference model `tb_ref_pkg.sv`.
