# H2PIPE weight streaming from HBM: RTL

H2PIPE is a layer-pipelined CNN accelerator for an FPGA with High-Bandwidth
Memory (HBM). Every layer of the network has its own compute engine, and all
layers work at the same time on successive rows ("lines") of the image. That
gives very high throughput, but normally every layer's weights must sit in
on-chip RAM, which large networks outgrow. The idea here is to keep the weights
of some layers in HBM and stream them into those engines as they compute.

HBM latency is long and variable, and several layers share one HBM
pseudo-channel. So the stream has to be prefetched far ahead, buffered deeply,
and flow-controlled in a way that cannot deadlock. This RTL implements that
weight distribution network, the boot-time path that writes weights into HBM,
and a small chain of layer engines to drive it end to end.

## Contents

- [Structure at a glance](#structure-at-a-glance)
- [The weight read path](#the-weight-read-path-one-per-pseudo-channel-in-use)
- [Why credits and not valid/ready](#why-credits-and-not-validready)
- [Freeze](#freeze)
- [The boot path: writing weights into HBM](#the-boot-path-writing-weights-into-hbm)
- [Layer engines and activations](#layer-engines-and-activations-simplified)
- [Clocks and crossings](#clocks-and-crossings)
- [Parameters](#parameters-defaults)
- [What the design can and cannot run](#what-the-design-can-and-cannot-run)
- [Departures from the original design](#departures-from-the-original-design)
- [Simulating](#simulating)
- [Verification status](#verification-status)

## Structure at a glance

```
                hbm_clk domain                     |            clk (core) domain
                                                   |
 HBM PC --AR--> weight_prefetch (credit_counter x3,|
   ^            weight_addr_gen x3, round robin)   |
   |                                               |
   +--R (256b)--> keep 240b + ID --> dcfifo -------+--> bm_router --> burst_matching_fifo x3
                                                   |                       |
                                                   |              weight_serializer (240->80)
                                                   |                       |
                                                   |   weight_chain: reg -> last_stage_fifo (group 0)
                                                   |                 reg -> last_stage_fifo (group 1) ...
                                                   |                       |  freeze = OR(almost_empty)
                                                   |                 layer_engine (ai_tb x 6 per group)
           <---- dequeue (toggle sync) ------------+------------------ one pulse per burst consumed
```

`h2pipe_top` holds N_LAYERS layer engines in a chain, with an
`act_line_buffer` in front of each one. A layer is HBM-fed if its bit in
`OFFLOAD` is set, and otherwise uses `onchip_weight_mem`. The HBM-fed layers
are packed, in pipeline order, three to a pseudo-channel. Channels are taken
"clockwise" around the two stacks: 0..15, then 31..16. Each channel in use gets
an `hbm_weight_reader`.

At boot, `input_buffer` and `input_stream_ctrl` send weight packets over a
narrow bus to an `hbm_weight_writer` on every channel. After boot, the same
buffer streams images into the first layer.

## The weight read path (one per pseudo-channel in use)

**Storage.** One HBM word is 256 bits, but only 240 of them are used. Those 240
bits hold three 80-bit weight vectors, and one 80-bit vector is what a group of
tensor blocks consumes per cycle: ten int8 weights, one per input channel of a
DOT10. Vector 0 sits in bits [79:0].

**Prefetching.** `weight_prefetch` runs in the HBM clock domain. It issues AXI
read bursts of `BURST_LEN` beats for up to three layers and interleaves them
round-robin. Each request carries the layer slot as its AXI ID. For each layer
it keeps:
- an address generator, which walks the layer's bursts and wraps back to the
  start for every image line;
- a credit counter.

**Into the core clock.** Returning beats, 240 data bits plus the ID, go through
a dual-clock FIFO into the core domain. There, `bm_router` sends each beat to
its layer's burst-matching FIFO. A burst arrives at HBM speed, but is consumed
at one vector per core cycle, so it lands in a FIFO one burst deep.

If that FIFO is full, the router waits, which blocks every later beat in the
DCFIFO. This head-of-line wait is visible as `hol_wait`. It always clears,
because the FIFO drains without any back-pressure; the next section explains
why.

**Serialization and delivery.** `weight_serializer` splits each 240-bit word
into three 80-bit vectors over three cycles. The vectors enter `weight_chain`,
a daisy chain with one register per group of six tensor blocks. Each group has
a 512 x 80 last-stage FIFO, built as two 40-bit-wide halves like the two RAM
blocks of the original. The 512 depth comes from the measured worst-case read
latency of about 1.2 us (364 cycles at 300 MHz). All groups of a layer pop
together.

## Why credits and not valid/ready

Several layers share one channel and one DCFIFO. With valid/ready flow
control, one layer whose FIFO is full can stop the shared DCFIFO. That can
starve a second layer, which the first one depends on for activations, so
nothing moves again.

This design never lets a downstream FIFO fill. Each layer has a credit counter
that starts at `floor(512 / (3*BURST_LEN))` bursts: 21 for bursts of 8, 5 for
bursts of 32. It works like this:
- Issuing a read takes one credit.
- The layer engine sends a `dequeue` pulse each time it has consumed one
  burst's worth of vectors (`3*BURST_LEN`), and that pulse returns one credit.
- The prefetcher issues a request only with a credit in hand, so every
  requested burst already has room in the last-stage FIFO.

This is why the serializer and the last-stage FIFOs have no ready input. The
FIFOs carry an assertion and a sticky `overflow` flag that would show a
violation. The top brings out `credit_stall`, in the HBM clock domain, for
cycles when a layer has no credit.

A line's vectors are padded to a whole number of bursts. The engine pops the
padding vectors and discards them, so dequeue counting stays aligned with the
bursts.

## Freeze

`freeze` is the registered OR of the group FIFOs' `almost_empty` flags (count
at most 2). The two-entry margin makes sure the one-cycle register delay cannot
pop an empty FIFO.

Freeze reaches only the layer engine's own control and the tensor blocks'
clock enable. The activation buffers and the layers around it keep running
under their own handshakes. A line that is frozen part-way continues exactly
where it stopped; `layer_stall` shows these cycles.

## The boot path: writing weights into HBM

The input-image buffer is 224x224x3 bytes, double-buffered: 9408 words of 256
bits. It is reused at boot for weights. The host fills it with packets:

- **Header word.** Bits [4:0] hold the target pseudo-channel, bits [31:8] the
  first HBM word address, and bits [63:32] the number of words that follow.
- **Data words.** `n_words` of them, a multiple of `BURST_LEN`.

`input_stream_ctrl` in weight mode cuts each word into nine 30-bit chunks,
lowest first, and drives them onto a 30-bit bus. The bus has one register
stage per pseudo-channel, in the order 0..31. Every channel's
`hbm_weight_writer` watches the bus:
1. It rebuilds words from the chunks; a start-of-packet flag re-aligns it on
   each header.
2. It keeps only the packets addressed to its channel.
3. It crosses them into the HBM clock through a small DCFIFO.
4. It writes them with AXI AW/W bursts and counts B responses. `done` goes high
   when nothing is outstanding.

When any writer's DCFIFO is nearly full (8 or fewer entries free), the
registered OR of those flags pauses the bus source. The margin covers the
pause register plus the bus register feeding that writer.

In image mode (`cmd_mode=0`), the same controller sends whole 256-bit words to
the first activation buffer. One channel row of W=36 bytes takes two words,
low bytes first, and ten rows make a line. `hbm_rd_enable` starts the
prefetchers once the weights are in HBM.

## Layer engines and activations (simplified)

`layer_engine` is deliberately small: a 1x1 convolution from 10 input channels
to `C_OUT=10` output channels, over a line of W = 3 x 6 x N_GROUPS = 36
positions. Its parts:
- **Tensor blocks.** `ai_tb` models the FPGA's tensor block: three DOT10 units
  sharing one weight vector, each on its own position, with ping-pong
  activation banks.
- **Per line.** The engine loads the next line into the shadow banks while it
  computes the current one. It applies one weight vector per cycle, one output
  channel per vector.
- **Output.** It requantizes to int8 (ReLU, arithmetic shift by `SHIFT=6`,
  saturate at 127). It writes one output row per channel into the next layer's
  `act_line_buffer`, which holds two lines.
- **Rate.** With weights available, a line takes `C_OUT + 2` cycles on chip,
  or `3*BURST_LEN + 2` when HBM-fed, because the padding vectors are popped
  too.

## Clocks and crossings

There are two clocks:
- `clk`: the engines, the buffers, the weight bus, and the read side of each
  DCFIFO.
- `hbm_clk`: the AXI ports, the prefetchers, and the write-address control.

Three things cross between them:
- Read data crosses in `dcfifo`, which uses Gray-coded pointers with two-flop
  synchronizers.
- Dequeue pulses cross through `pulse_sync`, a toggle and three flops. Pulses
  are at least `3*BURST_LEN` core cycles apart, so none is lost.
- Write data crosses in each writer's DCFIFO.

## Parameters (defaults)

| where | parameter | default | note |
|---|---|---|---|
| h2pipe_pkg | AXI data / used bits | 256 / 240 | three 80-bit vectors per word |
| h2pipe_pkg | N_PC | 32 | two stacks of 16 pseudo-channels |
| h2pipe_pkg | LAYERS_PER_PC | 3 | layers sharing one channel |
| h2pipe_pkg | BURST_LEN | 8 | 32 suits the mixed on-chip/HBM mode |
| h2pipe_pkg | LAST_DEPTH | 512 | last-stage FIFO depth |
| h2pipe_pkg | GROUP_SIZE | 6 | tensor blocks per last-stage FIFO |
| h2pipe_pkg | WR_PATH_W | 30 | boot-time weight bus width |
| h2pipe_pkg | INBUF_WORDS | 9408 | 224x224x3x2 bytes |
| h2pipe_top | N_LAYERS, OFFLOAD | 4, 4'b0111 | layers 0-2 from HBM, layer 3 on chip |
| h2pipe_top | N_GROUPS | 2 | line width 36 |
| h2pipe_top | SLOT_BYTES | 65536 | spacing of layer slots in a channel |

Quantities that come from the original design:
- 32 pseudo-channels;
- 240 of 256 bits used, as three 80-bit vectors;
- groups of 6 tensor blocks;
- 512-deep FIFOs built from two 40-bit halves;
- a 30-bit write bus;
- the 224x224x3x2 input buffer;
- burst lengths 8 and 32;
- three layers per pseudo-channel;
- the clockwise channel order.

The rest of the table is this design's own choice. So are:
- DCFIFO depths;
- the credit initial value formula;
- the almost-empty level;
- the packet format;
- the round-robin arbiter;
- the address layout;
- the requantization.

## What the design can and cannot run

The network side is a 4-layer slice of 1x1 convolutions. It cannot run
ResNet-18, ResNet-50 or VGG-16. Those need KxK convolutions, strides, pooling
and residual additions, and in the original those come from an earlier
generation of the accelerator.

What is complete is the weight side, sized as on the real device:
- writers on all 32 pseudo-channels;
- a reader with three layer slots per channel;
- 512-deep last-stage FIFOs;
- 240-bit words;
- credit flow control.

On that side, the numbers work out for those networks:
- 96 layer slots can hold ResNet-50's roughly 53 convolution layers.
- The 8 GB of HBM easily holds VGG-16's roughly 1.2 Gb of weights.

## Departures from the original design

- **Convolution engine.** The layer engine computes only 1x1 convolutions with
  10 input channels. The original's general convolution engine is not
  described in enough detail to build.
- **Tensor block.** `ai_tb` is ordinary logic with the tensor block's
  function. The activation cascade is replaced by a parallel load.
- **HBM controller and host link.** The hardened HBM controller is vendor IP,
  and so is the PCIe host interface. They are outside the RTL: the top exposes
  per-channel AXI ports and a host write port.
- **Offload selection.** Choosing which layers go to HBM, and scoring those
  choices, is compiler software. Here it is the `OFFLOAD` parameter.
- **Bus pause.** The weight bus pause is a single global signal.
- **Prefetch start.** Prefetching starts on an explicit `hbm_rd_enable`.

## Simulating

Every testbench is self-checking and prints a single `TB_RESULT` line. With
plain verilator, from the `tb/` folder:

```
verilator --binary --timing --assert --top-module <name>_tb \
  -I../rtl -I. -y ../rtl -y . +libext+.sv ../rtl/h2pipe_pkg.sv <name>_tb.sv
./obj_dir/V<name>_tb
```

Each block has its own testbench. `hbm_weight_reader_bl32_tb` repeats the
read-path test with 32-beat bursts (5 credits per layer). `tb/hbm_pc_model.sv` is a behavioural
pseudo-channel used by the reader, writer and top tests. It has:
- random read latency (60-140 cycles in the top test);
- occasional 400-cycle refresh stalls;
- random AR back-pressure;
- a slow W channel;
- a sparse memory.

`h2pipe_top_tb` runs the top at its default parameters, with no overrides.
Building it takes about 2 minutes and running it well under a second. It
works in two phases:
1. **Boot.** It writes four weight packets through the boot path, three for
   channel 0 and one for channel 7. It checks HBM contents word by word, and
   checks that no other channel saw a write.
2. **Images.** It loads the on-chip layer and enables prefetching. It then
   streams 16 random lines through all four layers and compares every output
   byte with a reference model.

It counts each flow-control event and fails if any never occurs:
- weight-bus pause;
- mode switch;
- mid-line freeze;
- credit stall;
- head-of-line wait;
- HBM refresh;
- dequeue;
- output back-pressure.

## Verification status

All block testbenches and the full-size top test pass. Each testbench was also
run against a deliberately broken copy of its module, and each one detected the
fault.

`h2pipe_top_7l_tb` changes only `N_LAYERS` (7) and `OFFLOAD`
(7'b1011111). That puts six layers on pseudo-channels 0 and 1, so two channels
stream weights at the same time. The test passes with the same checks and
counters as the 4-layer test.

Not verified: timing closure, and the clockwise wrap from channel 15 to 31,
which needs more than 48 HBM-fed layers.
