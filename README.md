# RFLearn learning core: a CNN classifier in the receive path of a radio

A software radio that must react to what it hears (a jammer, a change of
modulation, another user on the band) has to turn raw I/Q samples into a
decision within the coherence time of the channel, which is often a few
milliseconds. Handing the samples to a CPU and running a neural network in
software is an order of magnitude too slow. The idea behind RFLearn is to put
the network itself in programmable logic, directly behind the RF front end:
samples stream from the transceiver into the classifier's memory, a chain of
hardware layers turns them into class scores, and the resulting "spectrum
knowledge" is handed straight to the logic that adapts the transmitter. The
CPU only configures the core and loads the trained weights; it is not in the
data path.

This repository holds synthesizable SystemVerilog for that learning core: a
convolutional neural network that classifies one 32 x 32 x 2 frame of I/Q
samples (for example into five modulation classes: BPSK, QPSK, 8PSK, 16QAM,
DQPSK), with its stream input, its weight memory, its layer memories, its
sequencing and its AXI-Lite control registers. Everything around the core
(processor, DMA engine, RF transceiver, actuation logic) is outside and meets
the core at its ports.

## The network

The core computes a fixed layer pattern

    IN -> [CVL -> RLL -> POL] x 2 -> [FCL -> RLL] x 2 -> FCL

where CVL is a convolution, RLL a rectified linear unit, POL a pooling layer
and FCL a fully-connected layer. The input is 32 rows of 32 I samples plus 32
rows of 32 Q samples, i.e. 1024 consecutive complex samples folded into two
32 x 32 channels. Filters are 3 x 3 with stride 1 and pooling length 3. The
default sizes are the "24-12 / 16-8" model: 24 and 12 kernels in the two
convolutions, 16 and 8 neurons in the two hidden fully-connected layers, and 5
outputs.

| stage      | tensor (channels x rows x cols) | words  | computed by     |
|------------|---------------------------------|--------|-----------------|
| input      | 2 x 32 x 32                     | 1024 (I and Q share a 32-bit word) | `axis_to_bram` |
| conv1+ReLU | 24 x 34 x 34                    | 27744  | `conv_layer`    |
| pool1      | 24 x 11 x 11                    | 2904   | `pool_layer`    |
| conv2+ReLU | 12 x 13 x 13                    | 2028   | `conv_layer`    |
| pool2      | 12 x 4 x 4 = 192 (flatten)      | 192    | `pool_layer`    |
| fc1+ReLU   | 16                              | 16     | `fc_layer`      |
| fc2+ReLU   | 8                               | 8      | `fc_layer`      |
| fc3 (scores) | 5                             | 5      | `fc_layer`      |

The convolutions grow the map (32 -> 34, 11 -> 13) because they are *full*
convolutions: the input is treated as zero outside its borders and every
position where the flipped 3 x 3 filter overlaps the input at all produces an
output, giving `1 + (n + h - 2) / s` outputs per dimension for an `n`-wide
input, `h`-wide filter and stride `s`. Written 0-based, output `(f, i, j)` is

    Y[f][i][j] = b[f] + sum_c sum_k sum_l Q[f][c][2-k][2-l] * X[c][i-k][j-l]

(for 3 x 3 filters, stride 1). Anyone loading weights trained with a framework
whose "convolution" is a cross-correlation with `same` or `valid` padding
must account for both the flip and the extra border: this is not the layer
most training libraries call Conv2D.

Pooling takes the maximum of each non-overlapping 3 x 3 region; rows and
columns that do not fill a region are dropped (34 -> 11, 13 -> 4). Flatten is
free: feature maps are stored channel-major, so reading pool2's memory at
addresses 0..191 in order is the flattened vector `c*16 + row*4 + col`.

The ReLU is not a separate layer with a memory of its own. It is folded into
the output stage of each convolution and of the two hidden fully-connected
layers (`rll_unit`); the last layer is linear so that its outputs are raw
class scores. `argmax_unit` picks the winning class (lowest index on a tie).

## One memory per layer

Every layer has the same shape: it reads its input from a block RAM, reads
its parameters from the shared weight memory, and writes its result into the
block RAM of the next layer. The structure keeps layers independent of each
other (a layer is changed or added without touching the others) and lets the
weights be rewritten at any time without changing the hardware.

```
 AXI-Stream  +-------------+   +-----+   +-------+   +-----+   +-------+   +-----+
 I/Q ------->| axis_to_bram|-->| in  |-->| conv1 |-->| c1  |-->| pool1 |-->| p1  |--> ...
             |  (FIFO)     |   | RAM |   |       |   | RAM |   |       |   | RAM |
             +-------------+   +-----+   +---^---+   +-----+   +-------+   +-----+
                                             |
  AXI-Lite   +-----------+  weight writes  +-+--------------+  read port, muxed by
 ----------->| axil_regs |---------------->| weights RAM    |  the running layer
             +-----+-----+                 | (6329 words)   |---> conv2, fc1, fc2, fc3
                   | start/stop/reset      +----------------+
             +-----v-----------+
             | layer_sequencer |---- layer_start[0..6], frame_release, done/irq
             +-----------------+

 ... --> conv2 --> c2 RAM --> pool2 --> p2 RAM --> fc1 --> f1 RAM --> fc2 --> f2 RAM --> fc3
                                                                                          |
                                            act_we / act_waddr / act_wdata <--------------+
                                            (scores to the actuation core), argmax_unit
```

All memories are `bram_sdp`: one write port, one read port, one cycle of read
latency, registered output. The weight memory has a single read port; the
layer sequencer's `active` index selects which layer drives it, which is safe
because only one layer runs at a time.

### Schedule

`layer_sequencer` runs the seven layers strictly in turn. Layer k+1 receives
its start pulse when layer k signals done, because each layer reads the whole
memory of its predecessor (a pooled value needs nine conv outputs spread over
three rows; the first fully-connected neuron needs all of pool2). An inference
starts when the controller has asked for one (or auto mode is on) *and* a full
input frame is in the input RAM. If the request comes first, the sequencer is
*armed* and waits for the frame.

As soon as conv1 has finished reading the input RAM, the sequencer pulses
`frame_release`, and the stream converter starts filling the input RAM with
the next frame while conv2 .. fc3 are still working. In auto mode the next
inference starts by itself as soon as the current one is done and that frame
is complete, so the core classifies frames back to back.

## The beat pipeline and loop pipelining

This is the part of the design that decides its speed, and the one that takes
most care to read in the code.

Each computing layer is a loop nest whose innermost body is one
multiply-accumulate (or, for pooling, one compare). This design calls one pass
of that body a *beat*. A beat has three stages of one clock cycle each:

- **RD**: the layer's address generator presents an input address and a
  weight address to the two memories;
- **EX**: the words come back (one cycle of read latency) and are multiplied
  and added to the accumulator (pooling: compared with the running maximum);
- **WR**: on the last beat of an output, the accumulator is requantised,
  saturated, rectified and written to the next layer's memory at the output's
  address.

One output of a convolution is a loop of `1 + C_IN * 9` beats: a bias beat that
loads `b[f]` into the accumulator, then one beat per filter tap. A
fully-connected neuron is `1 + N_IN` beats; a pooled value is 9 beats.

The `PIPELINE` parameter chooses between the two ways of running such a loop:

```
PIPELINE = 0 (not pipelined): a new beat enters RD only when the previous one left WR
cycle      1   2   3   4   5   6
beat 0     RD  EX  WR
beat 1                 RD  EX  WR          2 beats: 6 cycles, L beats: 3L cycles

PIPELINE = 1 (pipelined): a new beat enters RD every cycle
cycle      1   2   3   4
beat 0     RD  EX  WR
beat 1         RD  EX  WR                  2 beats: 4 cycles, L beats: L + 2 cycles
```

With `PIPELINE = 1` the address counters advance every cycle, and the EX stage
of beat *n* overlaps the RD stage of beat *n+1*. The loop is pipelined across
output boundaries too: the first beat of the next output (its bias beat)
enters RD right behind the last tap of the current one, so the accumulator is
reloaded in the same cycle in which the finished sum moves into WR. In steady
state a layer therefore retires one beat per clock, and a layer of B beats
takes B + 4 cycles from its start pulse to its done pulse (2 cycles to fill the
pipeline, the write of the last output, and the done handshake). With
`PIPELINE = 0` the same layer takes 3B + 2 cycles.

How the stages are tracked in the RTL: the loop counters (`f_q`, `i_q`,
`j_q`, `c_q`, `k_q`, `l_q` and the `bias_q` flag in the convolution) are the
beat in RD; their combinational decode gives the two memory addresses and a
`pad` flag for taps that fall outside the input. The `s1_*` registers carry
the beat into EX (valid, bias, pad, last tap, output address) while the
memories return its words; `s2_*` carry the write token and output address
into WR. `issue` decides whether a new beat enters RD: always while the loop
runs when `PIPELINE = 1`, and only when `s1_v` and `s2_v` are both empty when
`PIPELINE = 0`. A padded tap still takes its beat (the memory is read at
address 0 and the product is skipped), so every output costs the same number
of beats wherever it sits. Since the memories deliver data exactly one cycle
after the address, no stall logic is needed inside a layer: nothing in the
core ever waits in the middle of a loop.

The paper's own numerical example of pipelining says a 100-iteration loop
takes "300 versus 103" cycles; its figure and the rule it states (the next RD
overlaps the current EX) give L + 2, i.e. 102. The RTL follows the figure.

## Fixed-point arithmetic

All data, weights and biases are 16-bit two's-complement Q7.8 numbers
(8 fractional bits, range -128.0 .. +127.996). Products are Q15.16 and are
summed in a 40-bit accumulator, which cannot overflow for any layer of this
size (at most 217 products of 31 bits each). The bias beat loads the bias
shifted left by 8 so it lines up with the products.

`rll_unit` converts an accumulator back to Q7.8: an arithmetic right shift by
8 (rounding toward minus infinity), saturation to the 16-bit range, and for
hidden layers `max(0, x)`. Each layer reports a saturation event (`sat_evt`)
and a ReLU clip event (`clip_evt`); the register file keeps a sticky
"saturation seen" flag so the controller can tell when a weight set drives the
core out of range.

The input word from the stream is `{Q[15:0], I[15:0]}`, and both halves are
taken as Q7.8 numbers. Scaling the ADC samples into that range is up to the
front end or the training (the weights of conv1 can absorb any fixed scale).

## Getting samples in: the stream converter

The first layer needs the whole frame at once, and it reads it in an order
(tap by tap, filter by filter) that has nothing to do with the order in which
samples arrive. `axis_to_bram` therefore decouples the two: samples arrive on
an AXI-Stream slave (`s_axis_tdata/tvalid/tready`, one complex sample per
transfer), pass through a 16-entry FIFO (`sync_fifo`) and are written one per
clock into the input RAM at addresses 0..1023. Sample `t` is row `t / 32`,
column `t % 32` of both channels; the core reads the I half as channel 0 and
the Q half as channel 1 of the same word.

When 1024 samples have been written, `frame_ready` rises and writing stops.
The frame stays untouched until `frame_release`; meanwhile the FIFO fills and
`tready` falls, back-pressuring the DMA engine or front end. No sample is
dropped and no frame is ever overwritten while conv1 reads it. The cost is
that the stream is held for the duration of conv1 (about half the inference);
a source that cannot be stopped needs its own buffering in front of the core.

## Controlling the core

### Register map (AXI-Lite, 32-bit registers, byte addresses)

| addr | name   | access | bits |
|------|--------|--------|------|
| 0x00 | CTRL   | W (R: [3]) | [0] start one inference, [1] stop, [2] soft reset, [3] auto mode |
| 0x04 | STATUS | R | [0] busy, [1] done, [2] input frame ready, [3] saturation seen, [4] armed, [11:8] running layer (0..6) |
| 0x08 | WADDR  | RW | weight memory word address |
| 0x0C | WDATA  | W | weight word (low 16 bits); written at WADDR, then WADDR increments |
| 0x10 | RESULT | R | [7:0] class of the last inference, [31] valid |
| 0x14 | CYCLES | R | clock cycles of the last inference, start of conv1 to done |
| 0x18 | COUNT  | R | number of inferences completed |
| 0x40 + 4k | SCORE k | R | score of class k (Q7.8, sign-extended) |

Start, stop and soft reset are one-cycle pulses. Done, saturation and valid
are sticky and are cleared by a new start or a soft reset. `irq` follows the
done bit. Stop aborts the running inference at once and leaves auto mode; soft
reset also empties the stream FIFO and drops a half-collected frame. Writes
are taken when AWVALID and WVALID are both high (WSTRB is ignored); reads
answer one cycle after ARVALID. Both answer OKAY.

### Weight map

The trained parameters live in one 6329-word memory, in this order (default
sizes, word addresses):

| block | start | words | order within |
|-------|-------|-------|--------------|
| conv1 taps   | 0    | 24 x 2 x 3 x 3 = 432   | `((f*2 + c)*3 + r)*3 + q` |
| conv1 biases | 432  | 24   | `f` |
| conv2 taps   | 456  | 12 x 24 x 3 x 3 = 2592 | `((f*24 + c)*3 + r)*3 + q` |
| conv2 biases | 3048 | 12   | `f` |
| fc1 weights  | 3060 | 16 x 192 = 3072 | `n*192 + i` |
| fc1 biases   | 6132 | 16   | `n` |
| fc2 weights  | 6148 | 8 x 16 = 128 | `n*16 + i` |
| fc2 biases   | 6276 | 8    | `n` |
| fc3 weights  | 6284 | 5 x 8 = 40 | `n*8 + i` |
| fc3 biases   | 6324 | 5    | `n` |

Tap `(r, q)` is the element `Q[r][q]` of the equation above: the hardware does
the flipping, the weights are stored as the filter is written.

### Programming sequence

1. Write WADDR = 0, then write the 6329 weight words to WDATA in map order.
2. Either write CTRL = 0x1 for a single inference, or CTRL = 0x8 to classify
   every frame as it arrives.
3. Wait for `irq` (or poll STATUS[1]), read RESULT and, if wanted, the scores
   and CYCLES. In auto mode, COUNT tells how many frames have been classified.

The scores are also written, as they are computed, to the `act_*` port
(`act_we`, `act_waddr`, `act_wdata`), and `knowledge_valid` /
`knowledge_class` pulse with the winning class, so actuation logic can react
without the processor.

## Latency

With the default sizes and `PIPELINE = 1`, an inference is 998,345 beats
(conv1 527,136; pool1 26,136; conv2 440,076; pool2 1,728; fc1 3,088; fc2 136;
fc3 45) plus 6 cycles per layer, 998,387 cycles in all: 9.98 ms at 100 MHz.
The full-size testbench checks this number exactly. The two convolutions are
97 % of the work. With `PIPELINE = 0` the per-layer formula gives about three
times as much, 3 x 998,345 + 28 = 2,995,063 cycles (30 ms at 100 MHz). Both
numbers are measured exactly in simulation at the default sizes.

For comparison, the paper reports 75.9 ms for this model built with HLS
before loop optimisation and 37.9 ms after. Those figures come from a
different implementation and are not a target for this RTL; the cycle counts
here are this design's own.

## Model variants the core can run

The structure (two convolution/pooling stages, two hidden fully-connected
layers, one output layer) is fixed in hardware; the sizes are upper bounds. A
smaller model runs unchanged on the default build by padding with zeros: a
kernel or neuron with all-zero weights and a zero bias produces 0 after the
ReLU and adds nothing downstream, and an unused output class gets bias
-128.0 so it never wins. Thus the 18-9 and 12-6 kernel models, the 6-3 neuron
models, the four-class modulation sets and the three-class OFDM recogniser
with 12-6 neurons all fit, bit for bit, at the latency of the full model
(`tb_rflearn_paper_models` runs 24-12/16-8/5, 18-9/16-8/5, 12-6/6-3/5,
18-9/6-3/4 and 24-12/12-6/3 on the default build, pipelined and not, against
a reference evaluated at each model's own sizes; `tb_rflearn_variants` does
the same on a reduced build).
Models with more than 16/8 neurons (the OFDM 24-12 neuron variant), a larger
input (48 x 48 x 2) or a single convolution stage need a rebuild with other
parameters or, for the last, a different top level.

## Where this design departs from the paper

- **Memory links.** The paper connects layers and memories with AXI-Full; here
  they are native one-cycle BRAM ports, which carry the same transfers with
  none of the burst protocol.
- **Schedule.** Layers run strictly one after another; only frame collection
  overlaps computation. The paper does not say how its layers overlap.
- **ReLU** is fused into the producing layer instead of being a layer with a
  memory of its own.
- **Pooling** is maximum pooling with stride equal to its length, dropping
  partial regions. The paper allows maximum or average and gives no stride.
- **Convolution bias.** A per-filter bias is added; the paper's convolution
  formula has none, its fully-connected layers do.
- **Fixed point.** Q7.8 data, 40-bit accumulation, truncation and saturation
  are this design's; the paper says only "fixed-point arithmetic".
- **Loop pipelining** is applied to every layer, not only to the convolution
  loops, and `PIPELINE = 0` models the unoptimised loop as three cycles per
  iteration.
- **Latency** differs from the paper's HLS measurements, as above.
- **Network shape.** M = 2 convolution stages and K = 2 hidden layers are fixed;
  the paper's M = 1, K = 1 models need another top.
- **Register map, sample word format and input policy** (hold the frame until
  conv1 is done) are this design's own; the paper only says the controller
  starts, stops and checks the core through registers and loads weights at
  any time.

## Files

| file | contents |
|------|----------|
| `rtl/rflearn_pkg.sv` | data and accumulator types, Q7.8 limits, size functions, register offsets |
| `rtl/rflearn_learning_core.sv` | top level: all memories and layers, weight map, register file, sequencer |
| `rtl/conv_layer.sv` | full convolution with bias and fused ReLU |
| `rtl/pool_layer.sv` | max pooling |
| `rtl/fc_layer.sv` | fully-connected layer, optional ReLU |
| `rtl/rll_unit.sv` | requantise, saturate, ReLU |
| `rtl/argmax_unit.sv` | class scores and winner |
| `rtl/layer_sequencer.sv` | start/stop/auto control, layer order, cycle counter |
| `rtl/axis_to_bram.sv`, `rtl/sync_fifo.sv` | stream-to-memory converter and its FIFO |
| `rtl/bram_sdp.sv` | simple dual-port RAM, one-cycle read |
| `rtl/axil_regs.sv` | AXI-Lite register file |
| `tb/tb_ref_pkg.sv` | reference model: requantisation, full convolution, max pooling, dense layer |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_rflearn_learning_core.sv` | end-to-end test on a reduced network (12 x 12 input, 4-3 kernels, 6-4 neurons) |
| `tb/tb_rflearn_full.sv` | end-to-end test of the default 24-12 / 16-8 core |
| `tb/tb_rflearn_paper_models.sv` | the evaluated model variants at full size on the default build, pipelined and unpipelined |
| `tb/tb_rflearn_variants.sv` | smaller models zero-padded into a larger build, pipelined and unpipelined cores side by side |

Every testbench computes its expected values with the reference model in
`tb_ref_pkg` (written directly from the layer equations, 1-based as in the
equation, independently of the RTL's address generators), checks cycle counts
where a latency is defined, and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog. The reduced
end-to-end test drives the whole core through AXI-Lite and AXI-Stream with
random weights and samples and makes each mechanism happen and counts it:
stream back-pressure, arming before the frame, frame collection overlapping
computation, auto mode, stop, soft reset, weight reload, saturation and ReLU
clipping. The full-size test runs two complete inferences at the default
parameters (the second in auto mode after reloading the weights) and checks
class, scores and the exact cycle count against the reference model.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/rflearn_pkg.sv tb/tb_ref_pkg.sv tb/tb_conv_layer.sv \
    --top-module tb_conv_layer -o sim
./obj_dir/sim
```

Replace `tb_conv_layer` by any testbench; the other modules are found through
`-Irtl`. The simulator used has two states only, so every register that is
read is reset, and the tests pass with random initial values
(`+verilator+rand+reset+2`). Each test, the full-size one included (about 2 million
simulated cycles), runs in a few seconds once compiled.

## Changing the design

The top's parameters set the network: `IN_ROWS`, `IN_COLS` (input frame),
`KSIZE`, `STRIDE`, `POOL`, `K1`, `K2` (kernels), `N1`, `N2` (neurons),
`NCLS` (classes), `PIPELINE` and `FIFO_DEPTH`. All tensor sizes, memory
depths, address widths and the weight map follow from them (see the
localparams at the head of `rflearn_learning_core`). Data width and
fractional bits are `DW` and `FRAC` in `rflearn_pkg`. Memory depth grows with
the first convolution's map (`K1 x (IN_ROWS+2) x (IN_COLS+2)` words for 3 x 3
filters), which is the largest buffer by far. Adding a layer means adding a
memory, one `layer_start` index in the sequencer, a branch in the weight read
mux and a range in the weight map; the layer modules themselves are reused
unchanged.
