# A feedforward-network RF modulation classifier in FPGA logic

This design classifies received radio signals by modulation type directly in
FPGA fabric. No processor or accelerator is involved. A stream of complex
baseband (I/Q) samples from the RF front end is cut into blocks of 900 samples. Each block is one
*data sample*: 1800 real numbers. A small fully connected neural network,
trained offline, maps that vector to one of seven labels:

| label | 0 | 1 | 2 | 3 | 4 | 5 | 6 |
|---|---|---|---|---|---|---|---|
| class | noise | BPSK | QPSK | CPM | GFSK | QAM16 | GMSK |

The network has four layers of neurons: 1800 inputs, hidden layers of 100 and 20 ReLU
neurons, and 7 outputs. The output layer is a softmax. The label is the
class with the highest probability. The softmax probabilities are also
computed. All arithmetic is 16-bit
fixed point.

The main hardware idea is simple. The neurons of one layer do not depend on
each other, so a layer is built as M multiply-accumulate units working side by side.
The layer's inputs are fed past them one per clock. A layer of M neurons over N inputs
therefore takes about N clocks, whatever M is. For this network the first
layer dominates: 1800 of the roughly 1930 clocks per classification.

## The layer engine (`fnn_layer`)

All three weight layers use the same engine, with different sizes N (inputs,
or "synapses" per neuron) and M (neurons).

```
            +-------------+  i   +------------------------------------+
            | address_gen |----->| weight_memory: M columns x N words |
            +-------------+      +------------------------------------+
                   | i             | W_i0     | W_i1   ...    | W_i(M-1)
                   v               v          v               v
  x_addr/x_data  x_i  ------->  [ x ]      [ x ]    ...    [ x ]      mac_unit
  (input buffer or               [ + ]<-+   [ + ]<-+         [ + ]<-+  (one per
   previous layer)               [acc]--+   [acc]--+         [acc]--+   neuron)
                                   |          |               |
                               [relu_unit] [relu_unit] ... [relu_unit]
                                   v          v               v
                             +------------------------------------+
                             | neuron_out_reg (M words)           |--> next layer
                             +------------------------------------+
            control_unit: start / clear / mac_en / out_load / done
```

The cycle-by-cycle schedule of one pass is:

| cycle | control state | what happens |
|---|---|---|
| 0 | IDLE, `start` seen | `clear`: each accumulator loads its bias, shifted to the product scale. The index i is reset to 0. |
| 1 … N | RUN | `x_i` is read from the previous stage. `W_ij` is read from every column of the weight memory. All M accumulators add `x_i * W_ij`. i then steps. |
| N+1 | WB | if `out_ready`, every accumulator goes through its output stage and is written into the neuron output register (`out_load`). Otherwise the engine waits here. |
| N+2 | IDLE | `done` pulses. The new outputs are visible. |

So with no stall a pass takes N + 2 clocks from `start` to `done`. Both the input
read (`x_addr` to `x_data`) and the weight read are asynchronous. This is a
LUT-RAM style read, and it lets one register stage per neuron do a full
multiply-add each clock.

**Output stage (`relu_unit`).** The accumulator holds the dot product with 16
fractional bits, because two Q7.8 numbers were multiplied. The output stage:

1. shifts the value right by 8 (arithmetic shift, so it rounds toward minus infinity);
2. saturates it to the signed 16-bit range;
3. in hidden layers only, applies ReLU as a plain comparison: a negative value becomes 0.

The output layer skips the ReLU and keeps its signed scores.

**Accumulator width.** The width is `2*16 + clog2(N+1) + 1` bits (44 for N = 1800). The sum can
never wrap, so the only loss of precision is in the final rescaling.

## From samples to a label (`rf_classifier_top`)

```
s_valid/s_ready/s_data --> input_buffer --> layer 1 (1800 -> 100, ReLU)
   --> layer 2 (100 -> 20, ReLU) --> layer 3 (20 -> 7) --+--> argmax_unit  --> label
                                                         +--> softmax_unit --> probs
```

**Input buffer.** The `input_buffer` takes one complex sample per beat and stores it interleaved:
x(2k) = I(k) and x(2k+1) = Q(k). It has two banks of 1800 words. Each bank is written until it
holds a complete block of 900 samples. The full bank then starts layer 1, which reads it by
address, while writing continues in the other bank. A bank is freed when layer 1 writes back.
`s_ready` goes low only when both banks hold complete blocks that layer 1 has not yet read.
In that case the source must wait.

**Layer chaining.** Each layer reads the neuron output register of the layer before it. Layer k+1 is
started by layer k's `done`. A layer holds its write-back while the next layer
is still busy, so it never overwrites outputs that are still being read. With
the default sizes that stall cannot occur, because layers 2 and 3 together take far less
time than layer 1. It matters only for other sizes. In the same way, layer 3
holds its write-back while the softmax unit is still working on the previous
scores. The softmax takes 114 clocks, which is much shorter than layer 1, so
this wait also never happens at the default sizes.

**Latency**, counted from the clock in which the last I/Q beat of a data sample is
accepted to the clock in which `label_valid` is high:

    1 + (1800+2) + (100+2) + (20+2) + 1 = 1928 clocks

**Rate.** Layer 1 needs 1803 clocks per block of 900 samples. A steady stream of up to
900/1803 ≈ 0.5 samples per clock is therefore taken without ever dropping `s_ready`.
A faster burst fills both banks and is then held off. If a block arrives while layer 1 is busy,
it waits in its bank, and its latency grows by the waiting time.

The published implementation reports 24 µs per data sample and an input rate above
37 million I/Q samples per second without downsampling. The clock frequency is not
published. With this schedule, a 24 µs latency corresponds to a clock of about 80 MHz. At that
clock the sustainable input rate is about 39.9 Msample/s. The double buffer is what makes
the second number follow from the first. It is this design's choice; the block diagram
shows a single input buffer.

**Label decision (`argmax_unit`).** Softmax is strictly increasing in each
score, so the most probable class is the one with the largest raw score. The
label is therefore taken directly from the seven 16-bit scores, with ties going to the lower
index. It appears one clock after the output layer finishes, before the
probabilities are ready.

**Softmax (`softmax_unit`).** This unit turns the seven scores z into probabilities
p_i = exp(z_i) / Σ_j exp(z_j). It works in three steps:

1. **Subtract the maximum.** It subtracts the largest score from every score. This leaves the result
   unchanged and keeps every exponential in (0, 1].
2. **Exponentials.** Each d = max − z_i ≥ 0 is multiplied by log2(e). log2(e) is held as 94548/2^16.
   exp(−d) is then evaluated as 2^(−k) · 2^(−f/256): k is the integer part and f the first 8
   fraction bits. 2^(−f/256) comes from a 256-entry table. The table is built during elaboration
   as powers of round(2^30 · 2^(−1/256)) = 1070838486 in Q30. No data file is involved.
   The sum of the seven exponentials is formed in the same clock.
3. **Division.** One restoring divider produces one quotient bit per clock. It divides each
   exponential by the sum in turn and gives Q0.16 probabilities. 1.0 is shown as 0xFFFF.

The unit takes 2 + 7·16 = 114 clocks, so `probs_valid` follows `label_valid` by
113 clocks. The 8-bit table fraction limits each exponential to about 0.3 %
relative error. The probabilities are within 1 % of full scale of an exact softmax
of the same scores, which is the tolerance the tests use.

## Weights

The trained weights are not fixed in the RTL. They are written through a load port
while the classifier is idle:

| signal | meaning |
|---|---|
| `wl_layer` | layer to write: 1, 2 or 3 |
| `wl_we` | write row `wl_addr`: entry j of `wl_row` is the weight of synapse `wl_addr` for neuron j |
| `wl_bias_we` | write `wl_row` into that layer's biases |
| `wl_row` | 100 words. Layers with fewer neurons use the first 20 or 7 entries. |

The port is sized for the largest layer. `wl_addr` is wide enough for the
longest input (1800 rows, 11 bits), and `wl_row` is as wide as the widest
layer.

A full load takes 1800 + 100 + 20 row writes plus 3 bias writes. Weights and
biases use the same Q7.8 format as the data. An assertion flags a load while a
layer is busy.

## Top-level interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `s_valid`, `s_ready` | in/out | 1 | I/Q stream handshake |
| `s_data` | in | 32 | `fnn_pkg::iq_t`, a struct `{i, q}` of two signed 16-bit words |
| `wl_layer`, `wl_we`, `wl_bias_we`, `wl_addr`, `wl_row` | in | 2, 1, 1, 11, 100×16 | weight load port |
| `label_valid` | out | 1 | one-clock pulse when a new label is ready |
| `label` | out | 3 | class 0–6, held until the next result |
| `scores` | out | 7×16 | output-layer scores of the last result, Q7.8 |
| `probs`, `probs_valid` | out | 7×16, 1 | softmax probabilities (Q0.16), and a one-clock pulse when they are updated |
| `busy` | out | 1 | a data sample is being processed |
| `sat_event`, `relu_event` | out | 1 | pulse when some layer's write-back saturated a value or a ReLU zeroed one |

## Size

With the default parameters:

- **Weight storage:** 182,140 words, 2.91 Mbit, in three memories of 1800×100, 100×20 and 20×7 words.
- **Input buffer:** 2 × 1800 words.
- **Multipliers:** 127, one per neuron.
- **Accumulators:** 44-bit in layer 1, narrower in the others.

The published FPGA build used 210 DSP slices and a large share of LUT RAM. The
DSP count does not match one multiplier per neuron exactly. The published text
does not explain its internal organisation beyond the one-layer block diagram.

## What follows the published design, and what does not

These points follow the published design:

- the four layer sizes;
- 16-bit arithmetic;
- ReLU by a conditional in the hidden layers and no ReLU at the output;
- all neurons of a layer in parallel, each a multiply / add / register loop;
- a weight memory with one column per neuron, addressed by the synapse index;
- an input buffer, an address counter, a control unit and a neuron output register per layer;
- a softmax at the output, with the label as its argmax.

These points are choices of this design, where the description is silent:

- **Number format:** Q7.8, with truncating rescale and saturation.
- **Bias:** added by preloading the accumulator.
- **Reads:** asynchronous, one synapse per clock.
- **Engines:** three separate layer engines rather than one engine reused for all layers.
- **Input buffering:** two banks instead of one.
- **Interfaces:** the valid/ready sample stream, the I/Q interleaving order and the weight load port. The published build compiled the weights into the FPGA image.
- **Handshakes:** the write-back handshake between layers, and the reset style.
- **Softmax evaluation:** the base-2 exponential table, the serial divider and the Q0.16 output format.

These parts are outside this RTL:

- the RF transceiver that produces the samples;
- the processor system of the FPGA device;
- the link that carries the label to a display. Its protocol is not described.

The label, the scores and the probabilities are plain output ports.

## Simulating

Every file holds one module or package. `rtl/fnn_pkg.sv` must be read first. For example,
to run the end-to-end test at full size:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/fnn_pkg.sv tb/tb_rf_classifier_top.sv --top-module tb_rf_classifier_top
    ./obj_dir/Vtb_rf_classifier_top

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_rf_classifier_top` | Full size (defaults). Random weights are loaded. Four blocks are streamed back to back, which exercises the stall and blocks waiting for layer 1. Four more arrive at a steady 15/32 samples per clock, and no sample may be refused. Every score and label is checked, bit for bit, against a fixed-point model of the network in the testbench. Every probability is checked against a real-valued softmax of the expected scores, within 1 %. The first hidden layer's outputs are also checked. The latency must be 1927 clocks from layer 1's start, and 1928 clocks from the last beat when layer 1 is idle. The test requires that the input stall, filling during computation, waiting, ReLU zeroing and saturation each occurred. It runs in a few seconds. |
| `tb_rf_classifier_small` | The same checks on a reduced network, 8-24-16-7, with 12 blocks fed as fast as `s_ready` allows. At this size the softmax is slower than the layers, so layers stall at write-back and wait for one another. The test checks that these stalls happen and that every score, label and probability is still correct. |
| `tb_fnn_layer` | A 12×5 layer with and without ReLU, against a model: latency N+2, write-back stall, saturation, read port |
| `tb_softmax_unit` | probabilities against a real-valued softmax within 1 % of full scale, sum to one within 1 %, and 114-clock latency, for narrow, wide, equal and one-hot scores |
| `tb_mac_unit`, `tb_relu_unit` | arithmetic against 64-bit models, including full-scale operands and saturation edges |
| `tb_control_unit`, `tb_address_gen` | schedule, pulse widths and stall behaviour |
| `tb_input_buffer` | both banks, interleaving, `s_ready`/`full` against a count of pending blocks, overlap of writing and reading |
| `tb_weight_memory`, `tb_neuron_out_reg`, `tb_argmax_unit` | storage, addressed reads, tie rule |

The accuracy of the classifier itself depends on trained weights, and none are
included. The tests use random weights. They check that the hardware computes
the network exactly as the fixed-point model does, not that it recognises
modulations.

## Files

| file | contents |
|---|---|
| `rtl/fnn_pkg.sv` | widths, layer sizes, `iq_t`, `label_e`, accumulator width function |
| `rtl/address_gen.sv`, `rtl/control_unit.sv` | synapse index counter and layer sequencer |
| `rtl/mac_unit.sv`, `rtl/relu_unit.sv` | neuron datapath: multiply-accumulate, then rescale, saturation and ReLU |
| `rtl/weight_memory.sv`, `rtl/neuron_out_reg.sv`, `rtl/input_buffer.sv` | storage |
| `rtl/fnn_layer.sv` | one layer engine |
| `rtl/argmax_unit.sv` | label decision |
| `rtl/softmax_unit.sv` | output softmax probabilities |
| `rtl/rf_classifier_top.sv` | complete classifier |
| `tb/tb_*.sv` | self-checking testbenches |
