# PRNN-CNN: a compact RF-fingerprinting classifier as a dataflow pipeline

RF fingerprinting tells apart radio transmitters of the same make and model by the small,
device-specific distortions that manufacturing leaves in their signals. The classifier here
identifies which of 30 identical ZigBee devices sent a transmission. Its front end is a
small recurrent layer whose neurons copy the dynamics of a silicon-photonic neuron: a leaky
state with a Lorentzian-shaped transfer function. Behind it sits a very small convolutional
classifier. The whole network has 6,302 parameters. That is about fifty times fewer than a
conventional CNN for the same task, small enough to run in real time on a low-cost FPGA.

This RTL implements that network as a streaming, fixed-point pipeline. Data units of
residual I/Q samples go in. For each unit, 30 log-probabilities come out, plus a decision
for the whole transmission. The network sizes, the recurrence, the activations and the
order of the pipeline stages follow the published design (Peng et al., "A
Photonic-Circuits-Inspired Compact Network: Toward Real-Time Wireless Signal Classification
at the Edge"). The paper gives no word widths, buffer structure, interfaces or evaluation
methods for the nonlinear functions, so those are this implementation's own choices. They
are listed in [Departures and choices](#departures-and-choices).

## What is classified

The input is *residual* data: the received baseband signal minus an ideal re-modulated
copy of the decoded bits, after carrier frequency and phase offsets have been removed. This
preprocessing runs on a host and is not part of the RTL. Each transmission is cut into
17 *data units* of 1,024 complex samples (two payload bytes each). A data unit is the unit of
work of the pipeline.

Each data unit is reshaped from 2 channels x 1,024 samples into 32 time steps of 64
features. Step `t` holds I samples `32t .. 32t+31` followed by Q samples `32t .. 32t+31`:

    X[t][j] = I[32t + j]        j = 0..31
    X[t][j] = Q[32t + j - 32]   j = 32..63

## The network

| Stage | Operation | Output | Parameters |
|---|---|---|---|
| Input weighting | `U[t] = W_in X[t] + b_in` | 32 x 16 | 1024 + 16 |
| PRNN | leaky recurrent layer, 16 Lorentzian neurons | 16 ch x 32 | 256 + 16 |
| Convolution 1 | Conv1D k=5, ELU, max-pool 2 | 16 ch x 14 | 1280 + 16 |
| Convolution 2 | Conv1D k=3, ELU, max-pool 2 | 16 ch x 6 = 96 | 768 + 16 |
| Fully connected | 96 -> 30, log softmax | 30 | 2880 + 30 |

The PRNN input weights and the recurrent weights together give the 1,312 parameters of
the PRNN layer.

### The photonic recurrent layer

This layer is the least conventional part of the design. A photonic neuron has a state
`s` that relaxes with time constant `tau` toward its weighted input. Its output is
`y = sigma(s)`, where

    sigma(x) = x^2 / (x^2 + (0.3 + 0.25 x)^2)

is the measured transfer function of a microring-modulator neuron. It is 0 at x = 0,
reaches 1 at x = -1.2 (where the second term of the denominator vanishes) and tends to
16/17 for large |x|, so outputs always lie in [0, 1]. One forward-Euler step of `tau ds/dt = -s + W_in x + W_rec sigma(s) + b`,
with `alpha = dt/tau = 0.5`, gives the recurrence that `prnn_layer` computes:

    s(t+1) = (1 - alpha) s(t) + alpha ( U[t] + W_rec sigma(s(t)) + b_rec )
    y(t)   = sigma(s(t+1))

`U[t]` does not depend on the state. A separate stage computes it ahead of time for all 32
steps, so the recurrence proper is only a 16 x 16 matrix-vector product per step. Every
neuron's new value needs every neuron's previous output. The 16 dot products of one step
(16 MACs each) therefore issue on 16 consecutive cycles, and the next step waits until all
16 results have come back and passed through `sigma`. This read-after-write dependency
limits the layer to one step per 16 issue cycles; the paper reports the same limit. Here a
step takes 20 cycles, and the whole layer about 650 cycles. With `alpha = 2^-1` the state
update is a shift and two adds. `sigma` uses an exact integer divide.

The state starts at 0 for every data unit.

### Convolutions, reshape and output

Both convolutions use 16 input and 16 output channels, stride 1 and no padding. Each is
followed by ELU (`x` for `x > 0`, `e^x - 1` otherwise) and max pooling over windows of 2.
The paper gives only output channels, kernel lengths and parameter counts. Stride, padding
and pool size follow from those counts: they are the only choice that leaves
`16 x 6 = 96` features for the 96-input fully connected layer. The same module,
`conv1d_pool`, implements both layers.

The second convolution writes channel `c`, position `l` to address `6c + l`. That is the
flattened order the fully connected layer reads, so the "Reshape" stage of the paper's
pipeline needs no data movement.

The fully connected layer produces 30 logits `z`. Log softmax turns them into
`log P = z - max(z) - ln(sum exp(z - max(z)))`. A transmission is classified by summing the
log-probability vectors of `N` of its data units (`N` = 1..17) and taking the largest
sum. More units give higher accuracy; fewer units give more transmissions per second.

## The pipeline

```
 s_* ──> load ──[X]──> input_weighting ──[U]──> prnn_layer ──[Y]──> conv1d_pool(k=5)
                                                                          │
 m_* <── store <──[L]── fc_logsoftmax <──[C2]── conv1d_pool(k=3) <──[C1]──┘
   └──> segment_accumulator ──> dec_*
```

Each `[ ]` is a `pingpong_buf`: two banks of the array passed between two stages. A stage
starts a data unit when its input buffer has a full bank and its output buffer has a free
bank. It holds both banks until it is done, then commits the output bank and releases the
input bank. Different stages thus work on different data units at the same time. When a
slow stage lets its input buffer fill up, everything before it stalls, back to the sample
stream. A host that stops reading results stalls the pipeline from the back.

Inside a stage, work is a sequence of *vector/vector multiplies*: LANES-wide dot-product
pieces issued one per cycle into `vec_mac`. `vec_mac` multiplies all lanes in parallel,
sums them in an adder tree and accumulates consecutive pieces between a `first` and a
`last` flag. It has a 3-cycle latency and accepts a new piece every cycle. The finished sum
comes out with a tag (the output index). The stage then applies the bias, rounding, the
activation and, for the convolutions, the running pool maximum.

| Stage | Lanes | Busy cycles per data unit |
|---|---|---|
| load | 1 word/beat | 2,048 (stream-limited) |
| input_weighting | 8 | 32·16·64/8 = 4,096 (+4) |
| prnn_layer | 16 | 32 · (16+4) ≈ 650 |
| conv1d_pool k=5 | 5 | 16·28·16 = 7,168 (+5) |
| conv1d_pool k=3 | 3 | 16·12·16 = 3,072 (+5) |
| fc_logsoftmax | 8 | 30·96/8 + 2·30 + 7 = 427 |
| store | 1 word/beat | 30 |

The first convolution is the slowest stage. It sets the initiation interval: in simulation
a new data unit finishes every 7,173 cycles. The latency from the first input sample to the
last log-probability is 17,497 cycles. At 100 MHz that is 13,900 data units/s and 175 us.
The paper measured 12,192 classifications/s and 219 us on its FPGA; it does not state its
clock. Per data unit the network performs 88,896 multiply-accumulates. At the paper's
assumed 170 pJ per MAC that is the 15 uJ per classification it reports, which suggests that
its "classification" is one data unit.

## Number format

All activations and parameters are 16-bit two's complement with 12 fraction bits (range
±8, resolution 1/4096). Products have 24 fraction bits and are summed in 40-bit
accumulators. Each stage output is rounded half up and saturated back to 16 bits. The
residual input must be scaled into ±8 before it is sent.

The nonlinear functions are evaluated as follows (helpers in `prnn_pkg`):

* `sigma`: numerator and denominator in integer arithmetic (`0.25x` truncated to 12
  fraction bits), integer division, quotient truncated; within 3 LSB of the exact value.
* `exp(x)`, x ≤ 0 (ELU and softmax): `2^(x·log2 e)`. The integer part of the exponent
  becomes a right shift; `2^f` on [0,1) is a cubic polynomial (error ≈ 2.5e-4).
* `ln(s)`, s ≥ 1 (softmax): leading-one position plus a quartic polynomial of
  `log2(1+m)`, times ln 2 (error < 1e-3).

## Parameters

The trained weights are not published, so they are loaded at run time. The parameter bus
(`wt_we`, `wt_addr[12:0]`, `wt_data[15:0]`) writes one word per cycle into the stage that
owns the address. Write the parameters only while the pipeline is idle.

| Addresses | Contents | Address of one word |
|---|---|---|
| 0 – 1023 | `W_in[n][j]` | `64n + j` |
| 1024 – 1039 | `b_in[n]` | `1024 + n` |
| 1040 – 1295 | `W_rec[n][m]` | `1040 + 16n + m` |
| 1296 – 1311 | `b_rec[n]` | `1296 + n` |
| 1312 – 2591 | conv1 `W[o][i][k]` | `1312 + 80o + 5i + k` |
| 2592 – 2607 | conv1 bias `b[o]` | `2592 + o` |
| 2608 – 3375 | conv2 `W[o][i][k]` | `2608 + 48o + 3i + k` |
| 3376 – 3391 | conv2 bias `b[o]` | `3376 + o` |
| 3392 – 6271 | fc `W[c][f]` | `3392 + 96c + f` |
| 6272 – 6301 | fc bias `b[c]` | `6272 + c` |

The index orders match PyTorch's `Linear` and `Conv1d` weight layouts (output, input,
tap). Exported weights can be written in order after converting them to 12-fraction-bit
integers.

## Interfaces of `prnn_cnn_top`

* **Sample stream in** (`s_valid`, `s_ready`, `s_data[15:0]`, `s_last`). One word per beat,
  I and Q interleaved (`I0, Q0, I1, Q1, ...`), 2,048 beats per data unit. `s_last` marks
  the last beat. A misplaced `s_last` pulses `framing_err`; the unit is still taken as
  2,048 beats.
* **Result stream out** (`m_valid`, `m_ready`, `m_data[15:0]`, `m_class[4:0]`, `m_last`).
  30 beats per data unit: class index and log-probability (12 fraction bits).
* **Decision** (`n_seg[4:0]`, `dec_valid`, `dec_class[4:0]`, `dec_score[31:0]`). After
  every `n_seg` data units, one pulse gives the class with the largest summed
  log-probability (lowest index on a tie) and that sum. `n_seg` is sampled at the start of
  each transmission; 0 counts as 1 and values above 17 count as 17.
* `busy[4:0]`: activity of the five compute stages, for monitoring.

Reset (`rst_n`) is active low and asynchronous. It empties all buffers but keeps the
parameters.

## Departures and choices

The following are this implementation's own. The paper either says nothing about them or
only names the part.

* Fixed-point format, rounding, and the polynomial `exp`/`ln`. The paper reports only a
  small accuracy loss on its FPGA "due to slight additional sources of imprecision".
* The PRNN has 1,312 parameters, 16 more than `W_in`, `W_rec` and one bias need. Here they
  are taken as two bias vectors, `b_in` (added in input weighting) and `b_rec`, as two
  PyTorch linear layers would have.
* `s(0) = 0` for each data unit, and the output indexing `y(t) = sigma(s(t+1))`.
* Stride 1, no padding and pool 2 in the convolutions: inferred from the parameter counts.
  ELU is applied before pooling; since ELU is monotonic, the order does not change the
  result.
* Lane counts: 8 for input weighting and the fully connected layer, 16 for the PRNN, and
  the kernel width (5, 3) for the convolutions. The paper's hierarchy figure shows five MACs
  for the first convolution.
* Two-bank buffers between stages, the stream formats, the parameter bus and its address
  map.
* The N-unit decision is done in hardware after the result stream. The paper defines the
  rule but does not say where it runs.

Not included:

* The residual preprocessing (transmission detection, preamble synchronisation, O-QPSK
  decoding with iterative frequency/phase regression, subtraction). The paper runs it
  offline in software.
* The host link (TCP over Ethernet to the Zynq processing system).
* The photonic implementation of the recurrent layer (microring weight banks, balanced
  photodetectors, microring modulators). The paper proposes it as future work; the digital
  `prnn_layer` emulates it.

## Files

`rtl/` has one unit per file:

* `prnn_pkg`: formats, sizes, address map, and the rounding/exp/ln helpers.
* `load_stage`, `input_weighting`, `prnn_layer`, `conv1d_pool`, `fc_logsoftmax`,
  `store_stage`: the pipeline stages.
* `vec_mac`: the MAC engine.
* `lorentzian`, `elu`: the activations.
* `pingpong_buf`: the inter-stage buffer.
* `segment_accumulator`: the transmission decision.
* `prnn_cnn_top`: the top level.

`tb/` has one self-checking testbench per unit (`tb_<unit>.sv`), the workload test
`tb_transmission_workload`, `tb_ref_pkg` (the testbenches' own rounding and floating-point
activations) and `tb_model_pkg` (a floating-point model of the whole network and the random
parameter set used by the end-to-end tests). Each testbench prints
`TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/prnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_model_pkg.sv tb/tb_prnn_cnn_top.sv \
    --top-module tb_prnn_cnn_top
./obj_dir/Vtb_prnn_cnn_top
```

Replace the top module to run any other testbench. The end-to-end test runs the full-size
design without parameter changes. It loads random parameters, streams six data units (two
transmissions of three units), and compares every log-probability with a floating-point
model of the network (tolerance 0.03). It checks both decisions, the latency and the
initiation interval. It also confirms that pipeline overlap, input back-pressure, host
back-pressure and the PRNN step-to-step wait all occurred. It builds in about half a minute
and runs in well under a second.

`tb_transmission_workload` runs whole transmissions. It classifies one transmission from
all 17 data units and two from 8 units each, and checks all 33 x 30 log-probabilities
(largest deviation from the model is about 0.013) and the three decisions. It also checks
that an 8-unit decision takes 8 pipeline intervals (57,384 cycles), which more than doubles
the transmission rate.

## How far to trust it

* Every unit test compares against values computed independently in the testbench.
  Integer paths (all MAC sums) are compared bit-exactly. Nonlinear outputs are compared with
  floating point within a few LSB. Every test has been shown to fail when its unit is broken
  in a relevant way.
* The parameters are random, not trained. The tests show that the arithmetic matches the
  network's equations. They cannot reproduce the paper's accuracy numbers, which need the
  trained weights and the residual dataset.
* Timing closure and resource use on an FPGA have not been evaluated. The weight memories
  and buffers are written as plain arrays with combinational multi-port reads: the
  input-weighting stage reads 8 words of X per cycle, the first convolution 5, the fully
  connected layer 8. A synthesis flow will map these to registers or to banked block RAM
  depending on the target.
