# A Bayesian LSTM accelerator with Monte Carlo dropout

A Bayesian recurrent network gives a prediction and also says how sure it is
of that prediction. Monte Carlo (MC) dropout is a cheap way to build one from
an ordinary LSTM network. Dropout stays switched on at inference, and the same
input sequence is run through the network S times, each time with a different
random dropout mask. The mean of the S outputs is the prediction. Their spread
is the uncertainty.

Two things make this expensive in hardware:

- The network runs S times, typically S = 30, so latency is everything.
- Every pass needs fresh random masks, one per gate and per input or hidden
  feature.

This RTL tackles both:

- **Fully unrolled layers.** Every LSTM layer is its own engine with its own
  multipliers and weight storage. Consecutive layers overlap in time.
- **Multiplier sharing per engine.** A *reuse factor* sets how much each engine
  shares its multipliers. The engines' time-step rates can be matched to a DSP
  budget.
- **Hidden mask generation.** Masks come from a small LFSR-based Bernoulli
  sampler next to each Bayesian layer. It generates the masks of the next pass
  while the current pass is computed.

The default build is a recurrent autoencoder for ECG anomaly detection:

- T = 140 time steps, one input feature, hidden size H = 16.
- Two encoder layers and two decoder layers.
- The first layer of the encoder and the first layer of the decoder are
  Bayesian (pattern Y N Y N).
- Reuse factors are R_x = 16 for input products and R_h = 5 for recurrent
  products.

A second architecture, a sequence classifier with a softmax over four classes,
is selected with one parameter.

## Network and arithmetic

Each layer is a standard LSTM. For gates q in {i, f, g, o}:

```
a_q   = W_q (x_t ⊙ z_x^q) + U_q (h_{t-1} ⊙ z_h^q) + b_q
i,f,o = sigmoid(a_i, a_f, a_o),  g = tanh(a_g)
c_t   = f ⊙ c_{t-1} + i ⊙ g
h_t   = o ⊙ tanh(c_t)
```

The z vectors are the dropout masks. There are eight of them:

- four input masks of I bits;
- four hidden masks of H bits.

Each bit is 1 (keep) with probability 1 - p, where p = 0.125. A mask set is
drawn once per MC pass and then held for all T steps of that pass. A
non-Bayesian layer uses no masks.

The masks are applied as they are, without scaling by 1/(1-p). A network trained
with inverted dropout has to fold that factor into its weights.

Number formats, from `brnn_pkg`:

| quantity | format |
|---|---|
| x, h, weights, biases, gate activations | 16-bit signed, 10 fractional bits (Q6.10) |
| products and accumulators | 40-bit, 20 fractional bits |
| cell state c_t | 32-bit, 20 fractional bits |
| softmax probabilities | Q6.10 |

The 16-bit data width and the 32-bit cell state are the paper's figures. The
split into 6 integer and 10 fractional bits is this design's choice. Results
saturate at the format limits.

Sigmoid and tanh are 1024-entry ROM tables over [-8, 8) in steps of 1/64. Inputs
outside that range read the end entries. The package computes the tables at
elaboration from the formula

```
table[k] = round(2^10 · f((k - 512) / 64))
```

so there are no data files.

## The LSTM layer engine (`lstm_layer`)

One engine contains the following, in datapath order:

1. **Two DX units** (`dx`). Each makes four masked copies of its vector, one per
   gate. One DX handles x_t and the other h_{t-1}. In a non-Bayesian layer they
   pass the vector through.
2. **Eight MVM units** (`mvm`). Four multiply the masked x copies by the gate
   input weights W_q, using reuse factor RX. The other four multiply the masked
   h copies by U_q, using reuse factor RH.
3. **Bias add, then the activation tables** (`act_lut`).
4. **The LSTM tail** (`lstm_tail`). It computes c_t and h_t for all H features
   in parallel, in three register stages: cell update, tanh(c_t), output
   product.

### Reuse factor, as built

An MVM for an H×N matrix has H·N products. With reuse factor R it builds
M = ceil(H·N / R) multipliers.

Product k = row·N + col is computed in cycle k / M by multiplier k mod M. It is
added into the accumulator of its row. The result is ready after
C = ceil(H·N / M) compute cycles. A larger R therefore means fewer multipliers
and more cycles.

### Time-step interval

Step t+1 needs h_t, so the step loop cannot be pipelined inside a layer. The
engine accepts one x_t every

```
II = max(CX, CH) + 9 cycles
```

where CX and CH are the compute cycles of the x-MVMs and the h-MVMs. The 9
cycles are:

| cycles | what happens |
|---|---|
| 1 | start |
| 1 | MVM result register |
| 2 | table lookup |
| 3 | tail |
| 2 | output register |

At the defaults II is 25 cycles in every layer of the autoencoder. For a
classifier with H = 8, RX = 12 and RH = 1 it is 17, 20 and 20.

A Bayesian layer reads its eight mask words in the first step of each pass,
which costs 8 extra cycles once per pass.

### Stream interface

Layers talk through valid/ready streams of vectors. The first and last steps of
a pass are marked with flags.

The first flag resets h and c to zero. It also makes a Bayesian layer take a new
mask set.

h_t waits in an output register, and the next step can start meanwhile. A layer
stalls only when the next h_t is ready while the last one has still not been
taken. `stall_o` shows this, and `mask_load_o` shows the mask-word reads.

## Bernoulli sampler (`bernoulli_sampler`)

Three 128-bit LFSRs (`lfsr`) each produce one pseudo-random bit per cycle:

- The feedback XORs bits 102, 121, 126 and 127, and enters at bit 0.
- The output is bit 127.

A three-input NAND of the three LFSR bits is 0 with probability 1/8. That is the
keep bit for p = 0.125.

A serial-in/parallel-out register (`sipo`) packs these bits into words. Its word
length is set at run time, to I for input masks or H for hidden masks.

A show-ahead FIFO (`mask_fifo`) holds exactly one mask set of eight words. The
word order is:

1. x-masks of i, f, g and o;
2. then h-masks of i, f, g and o.

The sampler runs freely until the FIFO is full. So while the engine computes
pass s, the masks of pass s+1 are already waiting. They are read out on eight
consecutive cycles at the start of the next pass.

Each LFSR has its own seed, derived from a 128-bit SEED parameter. Each layer in
the top gets its own seed in turn.

Three details here are this design's own choices:

- Tap 126 is not among the taps printed in the original figure, which shows 102,
  121 and 127. It is added to get a four-tap feedback.
- The word order.
- The seeds.

## Pipelining across layers and across MC passes

The layers form a chain of independent engines. Layer l+1 can work on step t
while layer l works on step t+1, so a pass through L layers takes about
T·II + (L-1)·(latency of one step) cycles, not L·T·II.

Passes are pipelined as well. The host simply streams the same sequence S times
back to back, and the next pass enters layer 0 as soon as the previous pass has
left it.

### Repeat unit (`repeat_unit`)

The autoencoder's decoder cannot start until the encoder has produced its
bottleneck h_T.

The repeat unit drops every encoder output except the last step of a pass. It
caches that last output and offers it to the decoder T times.

It keeps accepting encoder outputs while it replays. The next pass's encoding
waits in a one-entry pending register. So the encoder of pass s+1 runs at the
same time as the decoder of pass s.

At the defaults, S passes take about (S+1)·140·25 cycles. Thirty passes measure
108,819 cycles, which is 1.09 ms at 100 MHz.

## Top level (`brnn_top`)

The `ARCH` parameter selects the architecture.

**`ARCH_AUTOENCODER`** (the default):

- encoder layers I→H, H→H, …, with the last one H→H/2;
- the repeat unit;
- decoder layers H/2→H, H→H, …;
- a temporal dense layer (`dense`, H→O with O = I). It is one MVM unit used at
  every time step, and gives one reconstructed sample per step.

The anomaly score is computed on the host from the reconstruction error.

**`ARCH_CLASSIFIER`**:

- NL layers I→H, H→H, …;
- a dense layer applied only to h_T of each pass (H→4);
- a softmax (`softmax`).

The softmax works as follows:

- It subtracts the largest score.
- It reads exp from a 1024-entry table over [-16, 0].
- It divides each term by the sum, with one divider that handles one class per
  cycle.
- It gives O probabilities per pass, O + 3 cycles after the scores.

The host averages the S probability vectors or reconstructions. No averaging is
done in hardware.

Parameters:

| parameter | default | meaning |
|---|---|---|
| ARCH | ARCH_AUTOENCODER | or ARCH_CLASSIFIER |
| T | 140 | sequence length (repeat count of the decoder) |
| I | 1 | input features |
| H | 16 | hidden size |
| NL | 2 | layers in the encoder (and in the decoder), or classifier layers |
| B | 8'b0000_0101 | bit l = layer l is Bayesian, counting from the input |
| RX, RH | 16, 5 | reuse factors of the x- and h-MVMs in every layer |
| RD | 16 | reuse factor of the dense layer |
| O | I, or 4 | outputs per step (autoencoder), or classes |
| SEED | 128-bit constant | base seed of all samplers |

Ports:

| port | meaning |
|---|---|
| `x_valid`, `x_ready`, `x_vec[I]`, `x_first`, `x_last` | input stream, one step per transfer |
| `y_valid`, `y_ready`, `y_vec[O]`, `y_last` | output stream: one vector per step (autoencoder) or one per pass (classifier) |
| `cfg_we`, `cfg_sel`, `cfg_addr`, `cfg_data` | weight and bias writes |
| `stall_o[L-1:0]`, `mask_load_o[L-1:0]` | per-layer status |

### Weight and bias map

`cfg_sel` picks layer 0…L-1, or L for the dense layer. The address within a
layer, with gates q = 0..3 for i, f, g, o:

```
x-weights   q*I*H + row*I + col
h-weights   4*I*H + q*H*H + row*H + col
biases      4*I*H + 4*H*H + q*H + row
```

For the dense layer, weights are at `row*N + col` and biases at `O*N + row`, where
N is the dense layer's input width.

All weights live in registers inside the MVM units.

## Resources and speed against the original evaluation

The multiplier counts below are the units this RTL builds:

- 4·ceil(I·H/RX) + 4·ceil(H·H/RH) multipliers in the MVMs of each layer;
- 3·H in its tail;
- ceil(O·H/RD) in the dense layer.

| build | multipliers | II (cycles/step) |
|---|---|---|
| autoencoder H=16, NL=2, RX=16, RH=5, RD=16 (default) | 977 | 25 |
| classifier H=8, NL=3, RX=12, RH=1, RD=1 | 924 | 17 / 20 / 20 |
| classifier H=8, NL=1 | 316 | – |

The target FPGA (a Zynq XC7Z045) has 900 DSP blocks. The original work reports
758 DSPs for the autoencoder and 898 for the classifier.

Its own resource model counts a multiplier of the wide f·c_{t-1} product as two
DSPs. With the layer sizes above, that model gives about 1022 DSPs for the
autoencoder's LSTM layers, against its reported estimate of 754. The exact layer
sizes behind that figure are therefore uncertain. See the bottleneck note under
*Departures*.

Synthesis tools also map small constant products to logic rather than DSPs.
Here the weights are writable, so every product is a real multiplier.

Measured latency for one 30-pass inference at the defaults is 108,819 cycles.
That is 1.09 ms at 100 MHz, against about 0.83 ms per input reported for the
original design.

## Departures from the original design

- **Writable weights.** Weights are written at run time through `cfg_*`, rather
  than fixed as constants when the design is built.
- **Bottleneck dimension.** The source describes it in two ways that do not
  agree: as the last encoder layer's hidden state of size H/2, and as a decoder
  state of size H/2. This RTL gives the last *encoder* layer H/2 outputs. The
  decoder must output H features per step for the temporal dense layer.
- **One temporal dense unit.** The original resource model counts T copies of
  the dense MVM. Here a single unit is reused at every step.
- **Fourth LFSR tap.** Tap 126 was added, as described in the sampler section.
- **No dropout scaling.** Masks are applied without the 1/(1-p) factor.
- **Own choices where the source gives no details:**
  - the Q6.10 split;
  - the table sizes and ranges;
  - the MVM product schedule;
  - the stream handshakes;
  - the softmax internals.
- **Averaging off-chip.** The DMA engine, the host processor and the averaging of
  the S MC outputs are outside this RTL. The host streams the input S times and
  averages the outputs itself.
- **Synthesis of the activation tables.** The tables are computed with real
  arithmetic in constant functions. A synthesis front end with a low
  constant-evaluation step limit may stop on them. Simulators and lint accept
  them.

## Files

`rtl/` holds one module or package per file:

| file | contents |
|---|---|
| `brnn_pkg` | types, formats, table function |
| `lfsr`, `sipo`, `mask_fifo`, `bernoulli_sampler` | mask generation |
| `dx`, `mvm`, `act_lut`, `lstm_tail`, `lstm_layer` | layer engine |
| `repeat_unit`, `dense`, `softmax` | network heads |
| `brnn_top` | top level |

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each one
compares against independent reference models in `brnn_ref_pkg.sv`, bit exact,
and also checks latencies and intervals. All of them print
`TB_RESULT checks=… failures=…`.

The network testbenches are:

- `tb_brnn_top`: both architectures at reduced sizes, with random output
  backpressure. It checks that a stall, a mask-set read, ahead-of-time sampling,
  layer overlap and the repeat unit all occur.
- `tb_brnn_full`: the default autoencoder at full size, 30 passes. It also checks
  the 30-pass timing window.
- `tb_brnn_classifier`: the full-size four-class classifier (H=8, NL=3, Y N Y).

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/brnn_pkg.sv rtl/*.sv tb/brnn_ref_pkg.sv tb/top_harness.sv tb/tb_brnn_full.sv \
  --top-module tb_brnn_full && ./obj_dir/Vtb_brnn_full
```

The package is named first so that it is parsed before the modules that import
it. Verilator then warns that it sees the package twice, which does no harm.

Each block testbench needs only the package, its module and the modules below
it. Listing all of `rtl/` works for every testbench.
