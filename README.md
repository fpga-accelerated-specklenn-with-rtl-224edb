# SpeckleNN embedding core: streaming fp32 CNN inference for X-ray speckle patterns

At an X-ray free-electron laser, a detector can deliver single-particle
diffraction images (speckle patterns) faster than they can be stored and
sorted later. SpeckleNN sorts them by mapping each image to a point in an
embedding space: images of the same kind land close together, and a hit is
classified by its Euclidean distance to a few labelled examples. This
repository holds synthesizable SystemVerilog for the part that has to run
next to the detector: the reduced SpeckleNN network that turns one 65 x 65
image into a 50-value embedding, in IEEE single precision, as the pixels
stream in. The distance comparison and any veto decision downstream of the
embedding are not part of the core.

The core's main ideas are:

* **Layers connected by streams, not by frame buffers.** Each layer consumes
  the previous layer's output in raster order as it is produced and keeps only
  the rows it still needs. Nothing is stored between layers except a few line
  buffers and the dense-layer accumulators.
* **Weights are data, not logic.** All 64,660 weights and biases are written at
  run time over an AXI4-Lite port. A retrained model is loaded without
  rebuilding the FPGA image.
* **32-bit floating point throughout.** The numbers match an ordinary float32
  software model to within rounding, so a model trained in PyTorch can be
  loaded unchanged.

## The network

| # | layer | kernel / units | output | parameters |
|---|-------|----------------|--------|-----------:|
| – | input | – | 1 @ 65 x 65 | – |
| 0 | conv + ReLU | 7 filters, 5 x 5 | 7 @ 61 x 61 | 175 + 7 |
| 1 | max-pool | 2 x 2, stride 2 | 7 @ 31 x 31 | – |
| 2 | conv + ReLU | 3 filters, 5 x 5 x 7 | 3 @ 27 x 27 | 525 + 3 |
| 3 | max-pool | 2 x 2, stride 2 | 3 @ 14 x 14 | – |
| 4 | dense + ReLU | 100 units | 100 | 58,800 + 100 |
| 5 | dense | 50 units | 50 (embedding) | 5,000 + 50 |
|   |       |       | **total** | **64,660** |

The convolutions use no padding and stride 1. The two pooling layers get an
odd-sized input (61 and 27). The last row and the last column then form
one-wide windows, so 61 becomes 31 and 27 becomes 14. PyTorch's
`ceil_mode=True` and TensorFlow's `padding='same'` pool the same way. The
3 x 14 x 14 map is flattened channel-major (index `c*196 + y*14 + x`), which
is how a (C, H, W) tensor is flattened in PyTorch. The embedding has no
activation.

## Data flow through the core

```
 rx AXI-Stream      conv0           pool0          conv1          pool1          dense0          dense1      tx AXI-Stream
 1 px / beat  --> 7 ch / beat --> 7 ch / beat --> 3 ch / beat --> 3 ch / beat --> 1 value / beat --> 1 value / beat -->
 65x65 frame      61x61            31x31           27x27          14x14           100               50, tLast on #50
   frame_ctrl     conv2d          maxpool2d       conv2d         maxpool2d       dense           dense
```

Each arrow is a `vec_stream_if`: valid/ready handshake, `last` on the final
beat of a frame, and N fp32 lanes per beat. A beat carries every channel of
one spatial position. Backpressure works everywhere. When a layer cannot
take data, the stall runs back through the chain to `rx_tready`.

### Convolution (`conv2d`)

The layer sees each input pixel once. It keeps K-1 = 4 previous rows in line
buffers (`lb`) and a 5 x 5 window register (`win`, one entry per input
channel). When pixel (r, c) is accepted, the column above it (four line-buffer
words plus the new pixel) shifts into the right edge of the window, and the
line buffers at column c move up one row. Once r >= 4 and c >= 4, the window
holds the complete input patch of output position (r-4, c-4).

A complete window is a *job*. While a job is pending, `PAR` `fp32_dot` units
each compute one output channel: 25 x IN_CH products, a pairwise adder tree,
then the bias. This takes OUT_CH / PAR cycles. The layer takes no new pixel
until the last group is done and the output register is free, so the window
stays still during the job. The finished vector goes through ReLU into the
output register. In the last cycle of a job the layer can already accept the
next pixel, so with PAR = OUT_CH it runs at one pixel per clock.

Default parallelism: conv0 has `PAR = 7`. It computes all seven filters
(175 multipliers) each cycle and keeps up with the input. conv1 has `PAR = 1`.
It computes one 175-term filter per cycle, so it spends 3 cycles on each output
position. Its input comes from pool0 in bursts of one vector every 2 cycles,
so conv1 sometimes stalls pool0, conv0 and finally `rx_tready`. Set
`CONV1_PAR = 3` on the top to remove these stalls, at the cost of 350 more
multipliers and adders.

### Max pooling (`maxpool2d`)

On an even column the layer stores the value in a hold register. On the next
(odd) column it takes the pairwise maximum. On an even row that horizontal
maximum goes into a one-row buffer (`rowbuf`). On the following odd row it is
compared with the buffered value and sent out. A last column with an even
index closes its pair alone. A last row with an even index is sent out without
waiting for a partner row. The layer takes one beat per clock and only stalls
when its output register is full. It compares floats by sign and magnitude,
and +0 and -0 count as equal.

### Dense layers (`dense`, `weight_ram`)

A dense layer works on one input element per clock. A beat with `IN_LANES`
channels becomes `IN_LANES` elements. Element (channel ch, beat p) is flat
input `i = ch*(IN_N/IN_LANES) + p`. The flat index is the read address of
`weight_ram`, which returns the `OUT_N` weights of input i in one synchronous
read. One cycle later `OUT_N` multiply-add units update `OUT_N` accumulators in
parallel. For the first element of a frame the addend is the bias instead of
the accumulator, so there is nothing to clear between frames.

After the last element the accumulators are sent out one per beat, neuron 0
first. dense0 applies ReLU on the way out; dense1 does not. New input is
refused from the moment the last element is issued until the last neuron has
left. dense0 has 100 lanes and dense1 has 50. The weight memory is one
DEPTH-word RAM per lane.

### Frame control (`frame_ctrl`)

`ap_idle` is high until `ap_start` is seen. The core then takes exactly 4,225
pixels from `rx` and drops `rx_tready` after the last one. One cycle after the
50th embedding word leaves on `tx`, `ap_done` is high for a single cycle. If
`ap_start` is still high at that point, the next frame starts at once;
otherwise the core goes back to idle. Frames are counted, not delimited by
tLast. The core sets the sticky `frame_err` output in two cases: tLast arrives
on any pixel other than the 4,225th, or tKeep/tStrb is not all ones. The frame
still runs.

## Timing

With `rx_tvalid` always high and `tx_tready` always high, the default build
takes **5,039 clock cycles** from the first accepted pixel to the 50th output
word. The table gives roughly where the time goes:

| phase | cycles |
|-------|-------:|
| pixel input: 4,225 pixels plus 648 cycles in which conv1 holds the stream | 4,873 |
| after the last pixel: last windows, pool1, the last dense0 elements, dense0 output serialised into dense1 (100 beats), dense1 output (50 words) | 166 |

For comparison, the SpeckleNN FPGA build built with the SLAC Neural Network
Library (HLS) was measured at 9,003 cycles at 200 MHz (45 µs). The testbench
checks that this core stays within that number. The arithmetic units here are
combinational: every `fp32_dot` is one multiplier stage plus up to eight adder
levels in a single cycle. This is correct RTL but would not close timing at
200 MHz on an FPGA. A production build would register the tree levels. That
adds a fixed pipeline delay and needs a credit or skid buffer in front of each
layer's output register. This has not been done here.

## Number format

All values are IEEE-754 binary32. `fp32_mul` and `fp32_add` round to nearest,
ties to even. They depart from full IEEE behaviour in a way common in FPGA
float cores:

* subnormal inputs are read as zero, and results below 2^-126 are flushed to
  a signed zero;
* overflow gives ±infinity;
* NaN inputs, 0 x inf and inf - inf give the quiet NaN `7fc00000`;
* an exact cancellation x + (-x) gives +0.

Float addition is not associative, so the adder-tree order of the
convolutions and the sequential order of the dense layers give results that
differ slightly from those of a framework. The difference is in the last bits
of each layer. The end-to-end test shows it is below 1e-4 of the output range.

## Loading a model

Each 32-bit write on the AXI4-Lite port stores one float. The byte address is
`{word_address, 2'b00}` and the word address has 20 bits:

| word address bits 19:17 | region | offset (bits 16:0) |
|---|---|---|
| 0 | conv0 weights | `((oc*1 + ic)*5 + kh)*5 + kw`, 175 words |
| 1 | conv0 bias | oc, 7 words |
| 2 | conv1 weights | `((oc*7 + ic)*5 + kh)*5 + kw`, 525 words |
| 3 | conv1 bias | oc, 3 words |
| 4 | dense0 weights | `{o[6:0], i[9:0]}`, o < 100, i < 588 |
| 5 | dense0 bias | o, 100 words |
| 6 | dense1 weights | `{o[6:0], i[9:0]}`, o < 50, i < 100 |
| 7 | dense1 bias | o, 50 words |

The conv weights use the (out, in, kh, kw) order of a PyTorch `Conv2d`
tensor. The dense weights use the (out, in) order of a PyTorch `Linear`
tensor. Writes outside a region's range are dropped.

The loader takes an AW and a W beat together in the same cycle. It writes the
word into the layer one cycle later and answers OKAY on B. A write whose
strobe is not `1111` gets SLVERR and writes nothing. There are no read
channels. While any pixel of a frame is inside the core, the loader accepts no
writes, and AWREADY/WREADY stay low until the frame's last output word has
left. A frame is therefore always computed with a single, complete model. A
host can update any subset of the weights between two frames, even when
`ap_start` is held high for back-to-back frames.

## Top-level ports (`speckle_nn_top`)

| port | dir | width | |
|------|-----|------:|-|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `ap_start`, `ap_done`, `ap_idle` | in/out/out | 1 | block control (see Frame control) |
| `frame_err` | out | 1 | sticky framing error |
| `rx_tdata`, `rx_tkeep`, `rx_tstrb`, `rx_tlast`, `rx_tvalid`, `rx_tready` | in (ready out) | 32/4/4/1/1/1 | image, one fp32 pixel per beat, row by row |
| `tx_tdata`, `tx_tkeep`, `tx_tstrb`, `tx_tlast`, `tx_tvalid`, `tx_tready` | out (ready in) | 32/4/4/1/1/1 | embedding, 50 fp32 words, tKeep = tStrb = `f` |
| `s_axil_aw*`, `s_axil_w*`, `s_axil_b*` | – | 22-bit address, 32-bit data | weight and bias writes |

Parameters: `CONV0_PAR` (default 7) and `CONV1_PAR` (default 1) set the
output channels that each convolution computes per cycle. Each must divide
its layer's channel count. All network sizes are constants in `snl_pkg`.

## Files

| file | contents |
|------|----------|
| `rtl/snl_pkg.sv` | types (`fp32_t`, `param_wr_t`), network sizes, address map, float compare |
| `rtl/vec_stream_if.sv` | the inter-layer stream interface, with a hold assertion |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | single-precision multiplier and adder |
| `rtl/fp32_dot.sv` | N-term dot product plus bias (multipliers and adder tree) |
| `rtl/relu.sv` | vector ReLU |
| `rtl/conv2d.sv` | streaming convolution layer |
| `rtl/maxpool2d.sv` | streaming 2 x 2 max-pool |
| `rtl/weight_ram.sv`, `rtl/dense.sv` | dense-layer weight memory and layer |
| `rtl/param_loader.sv` | AXI4-Lite weight loader |
| `rtl/frame_ctrl.sv` | frame admission, ap_* control, framing check |
| `rtl/speckle_nn_top.sv` | the core |
| `tb/tb_fp_pkg.sv` | double-precision reference helpers for the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
With Verilator 5:

```
verilator --binary --timing --assert -j 4 -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/snl_pkg.sv tb/tb_fp_pkg.sv tb/tb_speckle_nn_top.sv \
    --top-module tb_speckle_nn_top -o sim
./obj_dir/sim
```

Replace `tb_speckle_nn_top` with any other `tb_<module>` to run that
testbench. The full-size core has about 500 single-precision multipliers and
500 adders. Building its testbench takes a few minutes of C++ compilation.
The simulation itself (weight loading plus three frames) runs in seconds.

What the testbenches check:

* `tb_fp32_mul`, `tb_fp32_add` compare the units with a double-precision
  reference that is rounded to single precision bit by bit. They use about
  20,000 random operands each, plus directed ties, overflow, underflow and
  special values.
* `tb_fp32_dot` checks N = 1 and N = 2 bit-exactly and N = 25 within a
  rounding bound.
* `tb_conv2d`, `tb_maxpool2d` and `tb_dense` run small configurations with odd
  sizes, grouped computation (PAR < OUT_CH) and multi-lane dense input, under
  random valid gaps and random ready. They compare the layers with reference
  models and count stall cycles at full rate against the expected schedule.
* `tb_weight_ram`, `tb_param_loader` and `tb_frame_ctrl` cover the memory, the
  AXI4-Lite protocol (hold, SLVERR, B back-pressure, address decoding) and
  frame admission and control.
* `tb_speckle_nn_top` runs the full-size core with the default parameters. It
  loads all 64,660 parameters over AXI4-Lite, then runs three frames, and
  compares every embedding value with a double-precision model of the whole
  network. It checks the latency bound and makes each mechanism happen at
  least once: input backpressure, output backpressure, a weight write held
  during a frame, back-to-back frames, a partial model reload and a framing
  error.

## How closely this follows the published design, and where it differs

Taken from the published description: the network (layer types, kernel
sizes, channel counts, feature-map sizes, unit counts, ReLU placement after
the convolutions and the first dense layer), 32-bit floating point, layers
chained by streams, weights and biases held in memories that can be reloaded
at run time, 32-bit AXI-Stream image input and embedding output with
tKeep/tStrb, the `ap_done`/`ap_idle` block-control signals, and the latency of
the reference build, which is used here as an upper bound.

The choices made here, where the description is silent:

* the micro-architecture of every layer (line buffers, per-layer parallelism,
  the dense schedule);
* the stream protocol between layers;
* the rounding and flush-to-zero rules;
* the pooling behaviour on odd sizes (inferred from the layer sizes);
* the flatten order;
* the AXI4-Lite loader, its address map and its hold rule;
* the ap_start protocol and the framing-error rule;
* one frame in flight at a time.

Not included: the PCIe and DMA link to the host, clock generation and the
on-chip logic analyser of the board build. The core's AXI-Stream, AXI4-Lite
and clock/reset ports are where they connect. Pipelining for a 200 MHz clock
is also left out (see Timing). The resource use of the reference build has
not been reproduced. The original 5.6-million-parameter SpeckleNN model is
not implemented; only the reduced model is.
