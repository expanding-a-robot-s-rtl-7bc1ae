# A SqueezeJet-style convolution accelerator for SqueezeNet v1.1

SqueezeNet v1.1 spends nearly all of its inference time in convolutions. All
of them except the first share three properties:

- the stride is 1;
- every input channel count is a multiple of 16;
- every output channel count is a multiple of 8.

This accelerator exploits those properties. It parallelises over channels,
not over pixels: 8 MAC-16 units each multiply 16 input channels per clock, and
each unit works on its own output channel. That is 128 multiply-accumulates per
clock with no partially filled lanes. Because all the parallelism is in the
channel dimensions, the same datapath serves both 1x1 and 3x3 kernels.

It is an RTL rendering of the SqueezeJet accelerator, which ran SqueezeNet
v1.1 on a Xilinx Zynq-7020 at 100 MHz as a remotely callable
object-recognition service for a robot. The published description gives the
block structure, the precisions and the parallelism. It does not give the
schedule, the buffer organisation, the stream formats or the requantisation;
this RTL supplies them. The section "Where this RTL departs from, or goes
beyond, the published design" lists each one.

## Number formats

| quantity          | format                                   |
|-------------------|------------------------------------------|
| weights, biases   | 8-bit signed                             |
| feature maps      | 16-bit signed                            |
| products          | 24-bit                                   |
| accumulator       | 36-bit (covers 3x3x64 = 576 products)    |

The network was quantised with dynamic fixed point: every layer has its own
fraction lengths for weights, biases, inputs and outputs. In integer terms,
each output is

    out = sat16( (acc + (bias <<< bias_shift)) >>> out_shift )
    out = max(out, 0)            if ReLU is enabled

Here `acc` is the integer dot product of weights and inputs, and
`bias_shift` and `out_shift` are per-layer settings. The right shift truncates
toward minus infinity. Saturation clips to [-32768, 32767].

## Block structure

```
 8-bit layer parameters ──┬──> weights_i (x8) ──┐
                          └──> bias_i    (x8) ──┤
                                                ├──> MAC-16 (x8) ──> requant ──> fmap_o_i (x8) ──> 16-bit output fmap
 16-bit input fmap ──> ITB ──> ITWB_i    (x8) ──┘
                    control logic  (layer configuration in)
```

| block         | module         | per unit? | default size                   | role |
|---------------|----------------|-----------|--------------------------------|------|
| MAC-16        | `mac16`        | yes       | 16 lanes, 3-stage pipeline     | 16 products, adder tree, accumulator |
| weights_i     | `weight_mem`   | yes       | 4096 x 128 bit                 | all of the layer's weights for the unit's output channels |
| bias_i        | `bias_mem`     | yes       | 128 x 8 bit                    | the unit's biases |
| ITB           | `itb`          | shared    | 168 x 256 bit                  | input rows that windows still need |
| ITWB_i        | `itwb`         | yes       | 36 x 256 bit                   | the current K x K x C input window |
| fmap_o_i      | `fmap_out_mem` | yes       | 128 x 16 bit                   | the current pixel's results |
| control logic | `sqj_ctrl`     | shared    |                                | sequencing, address generation |
| top           | `sqj_top`      |           |                                | wiring and requantisation |
| package       | `sqj_pkg`      |           |                                | widths, `layer_cfg_t`, `requant()` |

Output channel `m` always belongs to unit `m mod 8`, at local index `m div 8`.
Each unit has its own copy of the window buffer. Every copy receives the same
writes, so the eight units read their operands in parallel and never share a
memory port.

## How a layer is processed

Everything below is one layer. The host, which is not part of this RTL,
moves fmaps between layers and runs the pooling and softmax layers.

### 1. Parameter load

After `start`, the accelerator takes `out_ch*(K*K*in_ch + 1)` bytes on the
8-bit parameter stream:

1. The weights, in the order: output channel `m` outermost, then `ky`, then
   `kx`, then input channel `c` innermost.
2. One bias per output channel.

Weight `(m, ky, kx, c)` is stored in unit `m mod 8`:

- word `(m div 8)*K*K*G + (ky*K + kx)*G + c div 16`, where `G = in_ch/16`;
- lane `c mod 16`.

With this layout, one word read gives the 16 weights that pair with one
16-channel group of the window. Weights stay on chip for the whole layer, so
they are never fetched twice.

### 2. Pixel by pixel

After the parameter load the accelerator consumes input and produces output
one pixel at a time. Here a pixel means all the channels at one (x, y).
Input pixels arrive in raster order, with the channels of a pixel
consecutive. Output pixels leave in the same order. For each output pixel
(y, x) the control logic steps through four phases.

**FETCH.** Input values are accepted until the ITB holds the last input pixel
the window needs:

- 1x1 layers: pixel (y, x);
- 3x3 layers: pixel (y+1, x+1), clipped at the right and bottom edges.

The ITB packs each 16 consecutive channels into one 256-bit word.

- For 3x3 layers the ITB is a ring of three row slots. Row `r` lives in slot
  `r mod 3`, at word `slot*W*G + x*G + g`. When row y+1 is loaded, it
  overwrites row y-2, which no window for row y needs. The input is thus
  consumed at the rate the output is produced, and only three rows are ever
  on chip.
- For 1x1 layers the ITB holds one pixel.

**WIN.** The window is copied from the ITB into the ITWB copies, one word per
clock. For 3x3 layers the ITWB is a ring of three columns:

- ITWB word = `slot*3*G + ky*G + g`.
- At x = 0 all three columns are loaded (9G words).
- At each later x, the oldest column slot becomes the new right-hand column,
  and only 3G words are loaded.
- Window positions outside the map are written as zeros. This gives the
  padding of 1 that keeps the output the same size as the input.

A 1x1 layer copies G words.

**COMP.** The operand stream runs one pair per clock, with no bubbles:

- outer loop: each output-channel group `mg` (channels `8mg .. 8mg+7`);
- inner loop: each of the K*K*G window words.

Each clock reads one ITWB word and one weight word in every unit. The MAC-16
restarts its sum on the first word of a group. It delivers the sum 3 clocks
after the last word. Its bias is then read, and one clock later the
requantised result is written to `fmap_o_i[mg]`. This phase takes exactly

    (out_ch/8) * K*K * (in_ch/16) clocks per pixel.

**OUT.** The `out_ch` results leave on the 16-bit output stream, channel 0
first. The output buffers are read combinationally, so a stalled consumer
only holds the stream; nothing needs to be replayed.

### Timing summary

- Parameter load: one byte per accepted handshake.
- Per pixel:
  - FETCH: C clocks on average (one 16-bit value per clock);
  - WIN: 3G+1 clocks (9G+1 at x = 0), or G+1 for 1x1;
  - COMP: (out_ch/8)*K*K*G clocks;
  - DRAIN: 5 clocks (memory read, 3 MAC stages, requantisation register);
  - OUT: out_ch clocks;
  - a few clocks of state changes.

The phases are not overlapped.

Measured in simulation at full size, parameter load included:

| layer            | shape                | clocks    | at 100 MHz |
|------------------|----------------------|-----------|------------|
| fire2 expand3x3  | 56x56x16 -> 64, 3x3  | 520,787   | 5.2 ms     |
| fire2 squeeze1x1 | 56x56x64 -> 16, 1x1  | 314,644   | 3.1 ms     |
| fire9 expand3x3  | 14x14x64 -> 256, 3x3 | 440,484   | 4.4 ms     |
| conv10           | 14x14x512 -> 1000    | 1,601,196 | 16.0 ms    |

On layers with little work per pixel, the input stream (one 16-bit value
per clock) and the per-pixel overhead (window load, drain, output) cost more
than the MACs: fire2 squeeze1x1 needs only 25,088 MAC clocks of its 314,644,
and 200,704 clocks just to take in its input. The pure MAC time of all 25 accelerated SqueezeNet v1.1 layers is 2.86 M
clocks (28.6 ms at 100 MHz).

For comparison, the original system reports per-layer times on the board
that include moving data between external memory and the accelerator:
49.6 ms for conv10 and 223 ms for all convolution and fire layers together
(the first convolution included, on its own accelerator). These figures
cannot be compared one to one with the clock counts above, which assume
the streams never wait, but they show that this design's compute core is
not slower than the reported system.

## Interface of `sqj_top`

- **Clock and reset.** `clk`, and `rst_n`, which is synchronous and active
  low. Reset clears control state only, not the memories.
- **Control.**
  - `start`: one-clock pulse; it samples `cfg`.
  - `busy`: high until the layer completes.
  - `done`: pulses one clock after the last output.
- **`cfg` (`layer_cfg_t`).**
  - `width`, `height`: 8 bits each.
  - `in_ch`: a multiple of 16.
  - `out_ch`: a multiple of 8, at most 1023.
  - `k3`: 1 = 3x3 kernel with padding 1, 0 = 1x1.
  - `bias_shift`, `out_shift`: 5 bits each.
  - `relu`.
- **Streams.** Three valid/ready streams; a transfer happens in a clock where
  both valid and ready are high.
  - `prm_*`: 8 bits in;
  - `in_*`: 16 bits in;
  - `out_*`: 16 bits out.

A configuration is accepted only if it fits the buffers; assertions in
`sqj_ctrl` reject the others. With the defaults these are the limits:

- weights: `(out_ch/8)*K*K*(in_ch/16) <= 4096`;
- output channels: `out_ch/8 <= 128`;
- window: `K*K*in_ch/16 <= 36`;
- ITB: `3*width*in_ch/16 <= 168` for 3x3, or `in_ch/16 <= 168` for 1x1.

Every accelerated SqueezeNet v1.1 layer fits, from fire2 (56x56) to conv10
(512 -> 1000 channels). The limits are the tightest they can be: fire8 and fire9 expand3x3 fill the ITWB, and every expand3x3 layer except
fire6 and fire7 fills the ITB. The depths are parameters of `sqj_top`: `WDEPTH`, `BDEPTH`,
`ITB_ROW_WORDS` and `ITWB_DEPTH`.

Resource check against the published build, which used 134.5 of the 140
36-kbit block RAMs on the XC7Z020:

- The default weight memory is 8 x 4096 x 128 bit = 4 Mbit.
- That is about 114 block RAMs, consistent with the published build.

The 128 multipliers fit in the 192 DSP slices it reports.

## Where this RTL departs from, or goes beyond, the published design

- **Not included.**
  - The first SqueezeNet layer: 3 input channels, stride 2. It ran on a
    separate accelerator whose design is not described.
  - The ARM host.
  - The DMA / data-mover logic that fed the accelerator from DDR. Here the
    accelerator has plain valid/ready streams instead.
  - Pooling: the host does it.
- **This design's own choices.** None of these is taken from the published
  description:
  - the phase schedule and the fact that the phases do not overlap;
  - the row-ring ITB and the column-ring ITWB;
  - the word layouts;
  - the stream orders;
  - the 3x3 zero padding;
  - the requantisation formula, its truncating rounding, saturation and
    ReLU;
  - the accumulator width;
  - the default buffer depths. They were sized from SqueezeNet v1.1 layer
    shapes, not from the published description.
- **Naming.** The published text calls the window buffer "ITBW" and its
  figure calls it "ITWB"; the RTL uses `itwb`.
- **Separate copies.** Each unit has its own window buffer copy, as the
  published block diagram draws it, although one shared buffer with a wide
  read port would compute the same.
- **Timing closure.** The RTL has not been timed against 100 MHz on a real
  device.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench         | what it checks |
|-------------------|----------------|
| `tb_mac16`        | random dot products of 1..40 words, back to back and with gaps; worst-case values; result exactly 3 clocks after the last word |
| `tb_weight_mem`, `tb_bias_mem`, `tb_itwb`, `tb_fmap_out_mem`, `tb_itb` | write/read against a reference copy; lane writes; read-during-write; packing of 16 values per word |
| `tb_sqj_ctrl`     | the control logic alone, with tag models of the buffers (see below) |
| `tb_sqj_top`      | end to end at default sizes, see below |
| `tb_sqn_layers`   | end to end at default sizes on fire2 expand3x3 (56x56x16->64), fire2 squeeze1x1 (56x56x64->16), fire9 expand3x3 (14x14x64->256) and conv10 (14x14x512->1000); every output checked; runs in about 10 s |

`tb_sqj_ctrl` tags every input word as it enters the ITB. For every operand
the control logic issues, it then checks:

- that the window word points at the right input pixel and channel group, or
  at padding;
- that the weight word is the right one.

It also checks:

- where every parameter byte is routed;
- the window reload counts;
- the output order.

`tb_sqj_top` runs five layers of random data against a reference convolution:

- 1x1 and 3x3 kernels;
- a full ITWB and a full ITB;
- 512 input channels;
- a one-pixel-wide map.

It adds random gaps on all input streams and random back-pressure on the
output. It checks the operand-clock count of every layer, and counts that
each of these mechanisms actually occurred:

- padding;
- window sliding;
- ITB ring wrap;
- input starvation;
- output back-pressure;
- parameter gaps;
- saturation;
- ReLU.

Each testbench has been seen to fail when its module was broken on purpose.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/sqj_pkg.sv rtl/*.sv tb/tb_sqj_top.sv --top-module tb_sqj_top -o sim
./obj_dir/sim
```

To run another test, use its file and module name instead of `tb_sqj_top`.
`sqj_pkg.sv` must come first. Verilator warns that it is listed twice; this
is harmless, or list the files explicitly.

Every module is parameterised. The defaults are the full-size design, and
the testbenches run at those sizes except for the small memory tests. To
change the number of units (`NMAC`) or the buffer depths, override the
parameters of `sqj_top`. `sqj_ctrl` asserts, at `start`, that the layer fits
the buffers, and `sqj_top` asserts that `NMAC` is a power of two of at
least 4, as in the original design's scaling rule.
