# Direct hardware mapping of CNN layers for an FPGA-GPU embedded platform

An embedded GPU runs a convolutional network well, but some layers are
cheaper in energy and time on a small FPGA, where each multiplier is wired
to its own weight and feature maps stream through the logic without
touching external memory. That is *direct hardware mapping* (DHM). DHM is
costly in logic, so only part of a network fits. The idea behind this design
is to split each CNN module between the two devices: the FPGA takes a slice
small enough to map directly, the GPU takes the rest, and a PCIe link carries
feature maps between them. This repository gives SystemVerilog for the FPGA
side of such a split.

The target platform is a Jetson TX2 module joined to a Cyclone 10 GX FPGA by
a 4-lane PCIe gen2 link (about 2.5 GB/s). The GPU software, the PCIe hard IP
and the DMA engine are not part of this RTL. The top level ends at the two
streams that a PCIe DMA would feed and drain.

## The three ways a module is split

Each split is built as its own engine. `part_mode` on the top selects one.

| `part_mode`   | CNN module split | GPU computes | FPGA computes (engine) |
|---|---|---|---|
| `PART_DWCONV` | depth-wise separable convolution | the k x k per-channel convolution | the 1x1 convolution that follows (`pointwise_conv`) |
| `PART_GCONV`  | grouped convolution | k x k over C_I - g_l channels, then the concatenation | k x k over the remaining g_l channels (`dhm_conv`) |
| `PART_FUSED`  | fused layers | the layers after the pair | two consecutive layers; the map between them stays on chip (`fused_layers`) |

In the grouped split the FPGA's engine sees only its g_l input channels.
In the top, `C_IN` plays the part of g_l.

## Data flow and numbers

All feature-map values and weights are 8-bit two's complement. A weight has
6 fractional bits (`dhm_pkg::W_FRAC`). Each engine does the following for every
output value:

1. It accumulates products in 32 bits.
2. It adds 2^5 and shifts right arithmetically by 6 bits (round half up).
3. It saturates the result to the range -128..127.

So a feature map keeps the same number format from layer to layer. There is
no bias and no activation function.

Each pixel is a vector of all its channels, channel 0 in the low byte.
Pixels stream in raster order, one per accepted cycle. Every stream uses
valid/ready: a transfer happens on a rising edge where both signals are high.

### Sliding window (`window_extractor`)

- K-1 line buffers keep the previous K-1 rows. Each buffer is one array of
  `IMG_W` pixels.
- When a pixel is taken:
  - each buffer's entry at the current column is read out;
  - the entry is overwritten by the row below it, and the newest buffer gets
    the new pixel;
  - the K values read, plus the new pixel, form one column that shifts into
    a K x K register window.
- After pixel (y, x) is taken, the window holds rows y-K+1..y and columns
  x-K+1..x.
- Only positions with y, x >= K-1 are used. Their windows contain only pixels
  of the current frame, so the buffers need no reset.

### Convolution engine (`dhm_conv`)

Every filter has its own `dot_product` of K*K*C_IN multipliers. Nothing is
time-shared. All N output channels of a pixel come out together.

- Latency: the output for window position (y, x) is valid one cycle after
  pixel (y, x) is taken.
- Output positions: a position is kept when (y-K+1) and (x-K+1) are both
  multiples of `STRIDE`.
- Output size: `OUT_W = (IMG_W-K)/STRIDE + 1`, and the same for the height.
- Padding: the engine computes a valid convolution only. A layer that needs
  padding gets a map padded by the sender.
- `out_last` marks the last output pixel of a frame.
- Row and column counters wrap at the end of a frame, so frames can follow
  each other without a gap.

### Weights (`weight_store`)

Each engine keeps all its weights in registers beside the multipliers.
Weights are loaded by shifting, one per cycle while `wt_we` is high. The
first weight written ends up at index 0. For `dhm_conv`, filter n, kernel
row r, kernel column c and channel ch is weight number
`((n*K + r)*K + c)*C_IN + ch`. For `pointwise_conv` it is `n*C_IN + ch`. On
the top, `wt_sel` chooses the store:

| `wt_sel` | store |
|---|---|
| 0 | pointwise |
| 1 | grouped k x k |
| 2 | fused layer 1 |
| 3 | fused layer 2 |

### Back-pressure and the link (`ofm_serializer`)

An output pixel is `N_OUT*8` bits wide, 512 bits with the defaults. The
serializer sends it as `ceil(N_OUT*8/LINK_W)` beats, lowest channels first.
`link_last` is set on the final beat of a map.

While a pixel is being sent, the serializer holds `in_ready` low. Each engine
asserts `in_ready = !out_valid || out_ready`, so the stall travels back through
every layer to the input stream, and no data is lost.

With the defaults the link needs 8 cycles per output pixel, while the engine
could produce one pixel per cycle. The link therefore sets the rate. This
matches the measurements that motivated the design, where the PCIe transfer
and not the FPGA logic was the limit.

`part_mode` must only change between frames: after `link_last` has been sent
and before the next map starts.

## Parameters

The default sizes are those of the FPGA convolution experiment that the
design comes from: a 224 x 224 x 3 input, 64 filters of 5 x 5. That was the
largest convolution mapped directly on the Cyclone 10 GX.

| top parameter | default | meaning |
|---|---|---|
| `IMG_W`, `IMG_H` | 224 | input map size |
| `C_IN` | 3 | input channels (g_l in the grouped split) |
| `N_OUT` | 64 | output channels of every engine |
| `K`, `STRIDE` | 5, 1 | grouped-split kernel size and stride |
| `F_K1`, `F_N1`, `F_K2` | 3, 8, 3 | fused pair: kernel sizes and channels between the two layers |
| `LINK_W` | 64 | beat width towards the PCIe DMA |

The following are this design's own choices, not values from the source
work:

- the stride;
- the fused-pair sizes;
- the pointwise sizes (it uses `C_IN` -> `N_OUT`);
- the link width;
- the 6 fractional bits.

At the defaults the three engines hold 4800 + 192 + 216 + 4608 weight
registers and the same number of 8 x 8 multipliers.

## Where this departs from a fixed-function DHM build

- **Weights.** DHM proper hard-wires each weight as a constant, so the
  synthesis tool can simplify every multiplier. Here weights are registers
  loaded at run time. This costs more logic, but one bitstream serves any
  trained network of the same shape.
- **Pipelining.** Each layer has a single register stage: the window
  registers drive the multiplier and adder trees combinationally. A real
  FPGA build would add pipeline registers to the trees to reach a useful
  clock rate.
- **Partitions.** The three partitions sit side by side behind a mode
  select. A DHM flow would normally synthesise only the partition that a
  given network needs.
- **Layer sizes.** No layer sizes of SqueezeNet, MobileNetV2 or ShuffleNetV2
  are built in. Each of their layers needs its own parameter set: kernel,
  channel counts, map size and stride.

## Files

- `rtl/`
  - `dhm_pkg.sv`: shared types and `requant`.
  - `window_extractor.sv`, `weight_store.sv` and `dot_product.sv`: the
    building blocks.
  - `dhm_conv.sv`, `pointwise_conv.sv` and `fused_layers.sv`: the three
    engines.
  - `ofm_serializer.sv`: the link side.
  - `dhm_fpga_top.sv`: the top level.
- `tb/`
  - one self-checking testbench per module (`<module>_tb.sv`). Each compares
    against reference arithmetic computed in the testbench and prints
    `TB_RESULT checks=N failures=M`.
  - `dhm_fpga_top_tb` runs all three partitions at small sizes, with random
    stalls and mode switches.
  - `dhm_fpga_top_full_tb` runs one full 224 x 224 x 3, 64-filter 5 x 5
    frame at the default parameters. It checks all 48,400 x 64 outputs and
    the rate of one pixel per 8 cycles.

To simulate with Verilator:

```
verilator --binary --timing --assert rtl/dhm_pkg.sv rtl/*.sv tb/dhm_fpga_top_tb.sv \
          --top-module dhm_fpga_top_tb -Mdir obj && ./obj/Vdhm_fpga_top_tb
```

`dhm_conv_tb` also needs `tb/dhm_conv_tb_run.sv`. The full-size testbench
takes about a minute to build and 15 seconds to run.
