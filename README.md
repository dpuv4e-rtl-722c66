# DPUV4E in SystemVerilog: an INT8 CNN accelerator built around cascaded MAC chains

This RTL models a CNN accelerator of the kind built for an FPGA with an array of
vector engines. In DPUV4E each vector engine is one "compute core", and
convolution is spread over whole chains of them. The main idea is to lower the
bandwidth each core needs until its streams can keep it busy every cycle:

* A MAC core keeps a 16(IC) x 32(OC) weight tile for 64 pixels.
* It keeps a 64-pixel feature-map tile for 32 output channels.
* Four cores in a chain each take a different 16-channel slice of the same
  pixels. They add their partial sums through the cascade link, so a chain
  reduces 64 input channels without sending partial sums back to memory.
* Feature-map streams are multicast across output-channel groups. Weight
  streams are multicast across image rows.

A whole processing element (PE) thus computes 8 rows x 16 columns x 64 IC x
128 OC per iteration. It does this from 8 feature-map streams of 32 bits and
16 weight streams of 16 bits. At those widths every MAC core computes on every
cycle. The computation-to-communication ratio (CTC) is 1: loading the next tile
takes exactly as long as computing the current one.

The programmable-logic side is the rest:
* buffers, readers and writers that feed the chains;
* a scheduler that runs an instruction stream from DRAM;
* a weight memory shared by all engines;
* element-wise and pooling units;
* a depth-wise convolution PE;
* an optional low-channel convolution unit for the first layer.

In this RTL the vector-engine cores are ordinary synchronous modules with
valid/ready streams.

## 1. The convolution PE

The PE has 8 rows (`rtl/conv_pe.sv`). Each row is a chain:

`conv_mac_core` x 4 → `conv_acc_core` → `conv_nl_core`

### MAC core (`conv_mac_core`)

Every cycle the core does one step:
* it multiplies one pixel (16 INT8 channels) by a 16 x 8 weight block;
* it adds the 8 products to the 8 x 48-bit partial sums arriving on the
  cascade, and passes them on.

A core tile is 4 x 16 pixels x 32 OC, which is 256 steps. The step order is
column, then row, then OC group of 8.

While one tile computes, the next tile arrives in the other half of ping/pong
buffers:
* the FM tile is 1 KiB, sent as 256 words of 32 bits;
* the weight tile is 512 B, sent as 256 halfwords.

Stream layouts:
* FM word k holds bytes 4k..4k+3 of the tile, where byte index = pixel*16 + ic.
* Weight halfword k holds bytes 2k and 2k+1, where byte index = oc*16 + ic.

### Bubbles

The cascade is a valid/ready link. A core that lacks data back-pressures the
cores upstream. Cores downstream wait on an empty cascade. A late stream
therefore only delays the chain; it never mis-aligns it.

Each core reports a stall flag (`mac_stall`). The testbenches count these
bubbles. They appear under random stream gaps and disappear when the streams
run at full rate.

### ACC core (`conv_acc_core`)

The ACC core holds a PsumStack: 64 pixels x 32 OC x 32 bit, 8 KiB.

Before each output tile it reads a bias packet of 66 halfwords:

| Halfword | Content |
|---|---|
| 0 | number of iterations N to accumulate |
| 1 | activation in bits 9:8, right shift in bits 5:0 |
| 2..65 | 32 biases of 32 bits, low half first |

For each iteration it adds the cascade sums into the stack:
* the first iteration starts from the bias;
* after the last one the sums go to one half of a ping/pong AccOut buffer,
  together with the shift and activation of that tile.

The cascade sum is saturated to 32 bits.

### NL core (`conv_nl_core`)

The NL core reads AccOut four channels at a time. For each value it:
1. shifts right with round-half-up,
2. applies ReLU if selected,
3. saturates to INT8.

It emits 512 result words per tile. Each word holds 4 output channels of one
pixel. The word order is pixel-major, then groups of 4 channels.

### Row indexing

Row r = h*4 + og, where:
* h = 0..1 selects image rows 4h..4h+3;
* og = 0..3 selects output channels 32og..32og+31.

Streams are indexed `fm[h*4+c]`, `wt[og*4+c]`, `bias[og]`, `res[h*4+og]`, where
c is the position of the core in the chain.

Measured timing for one full-rate output tile of N iterations:
* tile time ≈ (N+1)·256 + 512 cycles (first load, N iterations, NL drain);
* `tb_conv_pe` checks this bound;
* `tb_conv_engine` measures 3162 cycles for a 3x3 convolution over 64 channels
  (N = 9).

## 2. A computing engine

`conv_engine` is the PE plus its programmable-logic side.

### FM buffer (`fm_buffer`)

* 16384 words of 512 bits (1 MiB) per engine.
* One word is 64 channels of one pixel.
* A map of C channels is stored pixel-major with ⌈C/64⌉ words per pixel:
  the word address is `base + (y*W + x)*cb_count + cb`.

### Conv controller (`conv_controller`)

The controller runs one CONV instruction, which is one output tile:
8 rows x 16 columns x 128 OC.

It iterates N = K·K·in_cb times. The order is kernel row, kernel column, then
channel block (innermost).

**Image reader.** Two readers (one for each image half) share the buffer read
port. Each builds the 4 x 16-pixel tiles for its four FM streams. Padding and
pixels outside the map are sent as zeros.

**Weight reader.** It requests weight rows `w_base + n*256 + k` (k = 0..255)
from the shared weight buffer. Each row has 16 halfword lanes, one per weight
stream; lane s = og*4 + c.

**Bias reader.** It sends the bias packets from the bias buffer. Bias row r
carries halfword r of group og in lane og.

With `bias_reuse` all four groups read lane 0. This is for layers with 32 or
fewer output channels, which would otherwise need four copies of one packet.

**Image writer.** It collects the 8 result streams and writes 2 output words
per pixel (128 channels) to `out_base + (oy*out_w + ox)*out_cb + oc_blk`. It
skips pixels that fall outside the output map.

### Load and store units

* `load_unit` copies DRAM words into the FM buffer.
* `store_unit` copies FM-buffer words to DRAM.

Both move one word per cycle when DRAM accepts it.

### MISC unit (`misc_unit`)

The MISC unit works in place on the FM buffer. It has three operations:

* **ADD:** `sat8((a >>> sa) + (b >>> sb))`. This is used for residual
  connections.
* **MAXPOOL:** window K, stride S. Taps outside the input are ignored.
* **AVGPOOL:** the same window walk, summing each channel in 16 bits. The
  result is `sat8((sum * avg_mul + 2^15) >>> 16)`, where the instruction
  supplies `avg_mul = round(65536 / taps)` instead of a divider. A global
  average pool over a map of up to 7x7 is one instruction.

In the original design these run on otherwise idle vector cores. Here they are
a small sequential unit in logic.

## 3. The whole DPU (`dpuv4e_top`)

`dpuv4e_top` contains:
* 8 engines;
* one `scheduler`;
* one `weight_load` unit;
* one `weight_buffer` shared by all engines (32768 rows x 256 bit, 1 MiB);
* a bias buffer of 512 x 512 bit in each engine;
* the low-channel unit and the DWC PE;
* a round-robin `ddr_arbiter` in front of a single DRAM port.

### DRAM port

The port carries `{we, addr[24], wdata[512]}` plus a requester id:
* ids 0..7: engines;
* id 8: scheduler;
* id 9: weight loader.

Reads must return in order.

### Instructions

Instructions are one DRAM word each:

`{opcode[4], engine_mask[8], argument}`

| Opcode | Action |
|---|---|
| LOAD / SAVE | DRAM ↔ FM buffer, for every engine in the mask |
| CONV | one output tile, for every engine in the mask |
| MISC | ADD, MAXPOOL or AVGPOOL, for every engine in the mask |
| WLOAD | DRAM → weight buffer (2 rows per DRAM word), or → bias buffers (one 512-bit word of 8 bias rows per DRAM word); waits until every engine is idle |
| SYNC | waits until every engine is idle |
| END | waits until every engine is idle, then pulses `done` |

The argument structs `xfer_t`, `conv_t` and `misc_t` are defined in
`rtl/dpu_pkg.sv`.

### Shared weights

The scheduler gives an instruction to all masked engines in the same cycle,
once all of them are idle. Engines running the same CONV on different images
then request the same weight rows in the same cycles. The weight buffer serves
all requesters of one row with a single read.

This is how a batch of 8 images shares one weight stream. `tb_dpuv4e_top`
counts these merged reads.

### Field limits

* Channel blocks are 6 bits: up to 4032 channels.
* Map sizes are 8 bits: at most 255 x 255.

## 4. Depth-wise convolution PE (`dwc_pe`)

The DWC PE has 24 pairs of `dwc_mac_core` → `dwc_racnl_core`: 3 groups of 8
rows. The 6 pairs of each 2-row cluster share one weight stream and one bias
stream.

A MAC core convolves a 16-channel tile with a K x K kernel (K ≤ 7, stride 1 or
2):
* Each cycle it adds two pixel-by-weight products into one of two accumulators.
  The accumulators are two neighbouring output columns.
* The weight stream is stored with zeros inserted, so both accumulators use the
  same pair of input pixels.
* Steps whose weights are both zero are skipped.

One iteration is 2 x 8 outputs x 16 channels and takes 96, 240 or 448 cycles
for K = 3, 5 or 7. The RACNL core adds the bias, then applies the shift,
activation and saturation.

## 5. Low-channel convolution unit (`low_channel_conv`)

This unit handles first layers with few input channels. It does 4 rows x 21 IC
x 32 OC multiply-accumulates per cycle.

For a 7x7, 3-channel stem, the 21 lanes are one kernel row (7 columns x 3
channels). Seven beats finish 4 pixels x 32 channels. The result then gets the
bias, shift, ReLU and INT8 saturation.

## 6. Where this RTL departs from the original design

**Compute cores.** The cores run as clocked logic with valid/ready streams.
The MAC, ACC, NL and DWC cores keep the original's sizes, buffers and dataflow.
They do not keep its instruction-level timing.

**Own choices.** The original does not specify these, so this design chose them:
* the instruction encoding;
* buffer depths;
* the DRAM port;
* stream packet formats;
* the reader/writer address formulas.

**Not fed from the buffers.** The DWC PE and the low-channel unit are complete
and tested on their own streams. In the top level, however, their streams are
ports: no instruction feeds them from the FM buffers.

**Not built:**
* the DWC PE's mode for standard convolutions;
* pooling windows larger than 7x7 (SqueezeNet's final 13x13 average);
* activations other than ReLU (LeakyReLU, ReLU6, SiLU);
* up-sampling;
* vendor-specific blocks (NoC, DDR controller, clocking).

**Workload consequences.**
* ResNet50, ResNet152 and SqueezeNet layers fit the buffers and field widths.
  Large weight sets are loaded one 128-OC group at a time, and the stem
  convolution needs row bands.
* YOLOv3 and YOLOv5n exceed the 255-pixel width field.
* MobileNetV2, EfficientNet and YOLOv5n also need activations that are not
  built.

## 7. Simulating

Every testbench under `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/dpu_pkg.sv tb/tb_dpuv4e_top.sv --top-module tb_dpuv4e_top
./obj_dir/Vtb_dpuv4e_top
```

`tb/ddr_model.sv` is a behavioural DRAM model with these properties:
* fixed read latency;
* periodic refusals;
* in-order read data.

### End-to-end testbenches

* **`tb_dpuv4e_top`** uses 2 engines and small buffers.
* **`tb_dpuv4e_full`** runs the same program with every parameter at its
  default, including 8 engines and 1 MiB buffers.

The program loads weights and biases, then loads an 8x12x64 map into each
engine. It then runs, on every engine:
1. a 3x3, pad 1, ReLU convolution to 128 channels;
2. a residual ADD;
3. a 2x2 max pool;
4. a global average pool of the pooled map.

It saves the results and ends. Each testbench checks:
* every output byte against a reference computed in the testbench;
* that bubbles, merged weight reads, DRAM refusals and conv activity all
  occurred.

### Block testbenches

Every block has its own testbench with random data and random back-pressure.
Where the design sets a rate, it is checked:
* the PE at one MAC step per cycle;
* load and store at one word per cycle;
* the low-channel unit at one beat per cycle.
