# FireFly-S spatial SNN accelerator in SystemVerilog

## Design idea

A spiking convolutional network is sparse on both sides. Most input spikes are zero
(70-90%), and after pruning most 4-bit weights are zero as well. Each synaptic operation
needs both a spike and a non-zero weight. So the useful work is the AND of two sparse
bitmaps: a spike bitmap and a weight bitmap.

This accelerator spends cycles only on those surviving pairs. It is a spatial,
layer-pipelined design: every network layer has its own core, and the cores are chained
by spike streams. All layers work at once on different parts of the image, and no
feature map goes to off-chip memory.

Weights are stored compressed. Each core keeps a bitmap (mask) of the non-zero weights plus
only the non-zero weight values, packed densely. A detector ANDs the incoming spike vector
with the weight mask and finds the set bits one per cycle. For each set bit, it computes
where that weight sits in the packed weight memory.

## Data format on the spike streams

A layer's feature map travels as a stream of words. Each word has PC bits, one per channel
in a channel group. The word order is:

```
for row h:  for column w:  for channel group g:  for time step t:  word[PC]
```

Each word holds the spikes of PC channels at one pixel and one time step. Each core
consumes words of width PCI (its input parallelism) and produces words of width PCO. The next
core's PCI equals this core's PCO. The number of groups is CIG = Ci/PCI on the input side and
COG = Co/PCO on the output side.

## Layer core (`snn_core`)

```
in -> padding -> dataflow_orchestrator -> PCO x [input FIFO -> sparsity_detector] -> buffer_pack -> maxpool -> out
```

* **padding** adds the zero border. It emits all-zero words for border positions without
  consuming input.
* **dataflow_orchestrator** buffers the last K rows of the padded map. From them it replays
  each KxK convolution window in the order the detectors need, once per output-channel group.
* **sparsity_detector** (PCO of them, one per output channel of a group) holds the
  weight masks, the packed weights, the biases and the thresholds. It runs the dual-side
  sparsity decode and a LIF neuron.
* **buffer_pack** aligns the PCO detector outputs into one PCO-bit word.
* **maxpool** does 2x2, stride-2 pooling. On spikes this is an OR. It is bypassed where the
  network has no pooling.

The detectors advance in lock-step on the input side. A word is released from the
orchestrator only when every detector's input FIFO has room. After that, each detector
runs at its own speed, because the number of pairs differs per output channel. The
per-detector FIFOs and the output buffer_pack absorb that difference.

## Dataflow orchestrator: window addressing

This is the least obvious part of the design. The orchestrator stores the padded map in a
circular RAM. It writes words in stream order at a push pointer. For every output pixel it reads
the KxK window, time step by time step, for every output-channel group.

The read order is set by nested status counters. From innermost to outermost they are
Ci (input channel group), Kw, Kh, T, Co (output channel group), Fw (output column), Fh
(output row). The read address is `base + offset`:

| counter that steps     | base stride              | offset stride            |
|------------------------|--------------------------|--------------------------|
| Ci or Kw               | -                        | T                        |
| Kh                     | -                        | ((Fw - Kw) * Ci + 1) * T |
| T (Kh wraps)           | -                        | reset to t               |
| Fw (next output column)| Ci * T                   | reset                    |
| Fh (next output row)   | Kw * Ci * T              | reset                    |
| end of map             | ((Kh - 1) * Fw + Kw) * Ci * T | reset               |

In the table, Fw is the padded width and Ci is the number of input channel groups.

The base pointer only grows. Words older than base are dead, so the push side may
overwrite them. A word may be popped only after it has been written (`fill > offset`).
A word may be pushed only while the window span fits in the RAM. The RAM depth is the
window span `((K - 1) * Fw + K) * Ci * T` plus HOLD words of slack. HOLD lets input
keep flowing while the core is busy on one pixel.

While the Co counter is above zero, the same window is read again for the next output-channel
group. This is the window reuse that keeps input traffic at one pass.

Each popped word carries three tags:
* `last`: the last word of the window for this time step;
* `chan_last`: the last word for this output pixel in this output-channel group;
* `pix_last`: the last word of the pixel.

The detectors use these tags to place the bias and reset the neuron.

## Sparsity detector: pair decoding and the bias squeeze

For each spike word, the detector reads the weight mask of the matching (kh, kw, ci-group)
position for its own output channel and computes `x = spikes & mask`. It then repeats, one
set bit per cycle:

```
y      = x & ~(x - 1)          // lowest set bit
prefix = (y | (y - 1)) & mask  // mask bits up to and including y
addr   = chan_base + vec_base + popcount(prefix) - 1
x      = x & ~y
```

Here `vec_base` is the number of non-zero weights in earlier mask vectors of the channel, and
`chan_base` is where the channel's weights start. The weight at `addr` is added to the membrane
current. When `x` is zero from the start, the vector costs one bubble cycle, so the
pipeline keeps a fixed rate of at least one cycle per input word.

After the last vector of a time step, the bias must be added and the neuron updated. That
needs one cycle. The bias squeeze (the paper's biasCycleReg) hides it:

* If the last vector was a bubble, the bias op takes that bubble's slot. No extra cycle.
* If the last vector produced pairs, a flag is set and the bias op takes one extra cycle
  after the final pair.

`bias_squeeze` is the small state machine that does this. Only bias ops make the neuron
output a spike.

## LIF neuron

The neuron works in integers. For each time step:

```
I = sum of selected weights + bias
V = V + ((I - V) >>> 1)     // tau = 2, leak on; without leak V = V + I (IF)
spike = V > Vth;  if spike: V = 0
```

V is cleared after the last time step of each output pixel, so every pixel starts at
V_reset = 0.

## Configuration

Each core holds its parameters in RAMs written through a simple port. The port signals are
`cfg_we`, `cfg_layer` (core), `cfg_det` (detector within the core), `cfg_sel`
(mask, weight, bias or threshold), `cfg_addr` and `cfg_data`.

* **Mask address:** `g * K*K*CIG + (kh*K + kw) * CIG + cg`. It holds a PCI-bit mask.
* **Weight words:** packed per detector in order (g, kh, kw, cg, lane), with zeros skipped.
* **Bias and threshold:** one entry per output-channel group g.

The compression flow that produces these bitmaps runs outside the chip and is not part of
this RTL.

## Default top: SCNN5

`firefly_s_top` chains NL cores with two-word register slices between them. Its defaults
build the SCNN5 network `1x28x28-8c3p1-16c3p2-mp2-32c3p1-mp2-64c3p1-64c3p1-mp2-10fc` at T = 4:

| layer | map   | pad | Ci | Co | PCI | PCO | pool |
|-------|-------|-----|----|----|-----|-----|------|
| 1     | 28x28 | 1   | 1  | 8  | 1   | 8   | -    |
| 2     | 28x28 | 2   | 8  | 16 | 8   | 16  | yes  |
| 3     | 15x15 | 1   | 16 | 32 | 16  | 16  | yes  |
| 4     | 7x7   | 1   | 32 | 64 | 16  | 16  | -    |
| 5     | 7x7   | 1   | 64 | 64 | 16  | 16  | yes  |
| 6 fc  | 3x3   | 0   | 64 | 10 | 16  | 5   | -    |

The fully connected layer runs as a 3x3 valid convolution over the final 3x3 map. Other
networks, such as SCNN7 and SCNN9, are built by overriding NL and the per-layer parameter
arrays.

## Differences from the published design

* **Parallelism:** the published parallelism for SCNN5 is (14, 25, 20, 14, 5). Here each PCO
  must divide Co, and the next layer's PCI must equal it. So the design uses
  8/16/16/16/16/5.
* **Weight RAMs:** they are sized for the dense case (Co * K*K * Ci words) so that any
  sparsity pattern loads. The published design sizes them to the compressed weights.
* **Pipeline:** fetch, decode, squeeze, weight read and neuron update are one stage each.
  The orchestrator's full and empty flags are combinational.
* **Widths:** 16-bit membrane, 8-bit bias and 4-bit weights.
* **Fixed rather than runtime-configurable:** layer shapes are parameters. The host
  interface of the FPGA board is not modelled, and neither is the compression flow.
* **Known issue:** in the end-to-end test of the full six-layer network, one output bit in
  16 differs from the software model. The single-core and block tests pass, including a
  core set up like the final layer. The cause has not been found.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M`. For example, with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/ff_pkg.sv tb/snn_ref_pkg.sv tb/tb_snn_core.sv --top-module tb_snn_core
```

`tb/snn_ref_pkg.sv` contains the software network model and the bitmap encoder used by the
testbenches. `tb_firefly_s_top` runs the default SCNN5 network end to end. It also counts
window reuse, padding, pooling, bubbles, bias absorption, extra bias cycles, orchestrator
back-pressure and input back-pressure.
