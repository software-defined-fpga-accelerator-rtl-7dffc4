# SqueezeJet-2: a line-buffered 8-bit CNN layer accelerator in SystemVerilog

SqueezeJet-2 accelerates the convolutional layers of small, mobile-oriented
ImageNet CNNs (SqueezeNet v1.1, ZynqNet) on a low-cost FPGA SoC such as the
Zynq xc7z020. The processor runs the network and hands one layer at a time to
the accelerator. The accelerator reads the layer's weights once into on-chip
caches. It then streams the input feature map through a line buffer and
computes each output pixel with 256 multiply-accumulate units: 16 processing
elements (PEs) of 16 MACs each. Every output pixel needs `CHO*K*K*CHI` MACs,
and the PEs do 256 of them per cycle. To keep the MACs busy, the accelerator
overlaps three tasks through double buffering:

* computing output pixel `wo`;
* reading the input for pixel `wo+1`;
* writing pixel `wo-1` back to memory.

All data is 8-bit *dynamic fixed point*: each layer has its own fraction
lengths for the input (`ei`), the output (`eo`) and the parameters (`ep`).
Optional ReLU and an optional fused max-pool are applied on the way out, so a
conv+maxpool pair needs no round trip through main memory.

The design follows an HLS (C++) accelerator that was published as a design
description, not as RTL. This code rebuilds it in RTL. The structure,
parallelism, caches and loop order come from that description. Port
protocols, cache sizes, data orders, rounding and the max-pool internals are
this implementation's choices. They are listed in "Departures and choices"
below.

## How one layer is computed

Think of the input feature map as `H x W` *pixels*, where a pixel means all
`CHI` channels at one position. The accelerator produces output pixels in
raster order. Each output pixel is computed whole, for all `CHO` channels,
before the next one starts.

```
for ho in 0 .. h_out-1:                       -- one output row
    LD_SHIFT : slide the line buffer down by `stride` rows,
               copy the window of pixel 0 into window bank 0
    for wo in 0 .. w_out-1:                   -- one output pixel
        in parallel, then wait for all three:
            pixel_calc  : window bank wo%2      -> out_pix bank wo%2
            LD_UPDATE   : read new input, fill window bank (wo+1)%2   (if wo+1 < w_out)
            write_back  : out_pix bank (wo-1)%2 -> output stream       (if wo > 0)
    write_back the row's last pixel
LD_DRAIN : consume whatever input no window used
```

`sqj2_conv_ctrl` carries out this loop nest. Before the first row it has
`sqj2_param_cache` read the biases and weights.

### Line buffer and windows

The line buffer (`sqj2_linebuf`) holds `K` input rows, each zero-padded on
both sides. A *window* is the `K x K x CHI` block of inputs under the kernel
for one output pixel. It is stored in (kernel row, kernel column, channel)
order in one of two window banks (`sqj2_window_buf`).

When the computation moves down by `stride` rows, the rows that are still
needed stay where they are. A small table, `linebuf_idx`, maps logical lines
(0 = top of the kernel) to physical lines. Sliding down one row rotates this
table, so the old top line becomes the new bottom line and is refilled.

The loader (`sqj2_fmap_loader`) fills the bottom line *lazily*:

* `LD_SHIFT` reads the new rows in full, except the last new row, of which
  it reads only the first `K` pixels.
* Each `LD_UPDATE` reads only the `stride` new pixels that the next window
  needs, then copies that window into the free bank.

Input traffic is therefore spread over the row, behind the computation. The
input stream is sequential, in row, column, channel order. Pixels that no
window uses are read and dropped: columns right of the last window, rows
below the last one, and rows or columns skipped when the stride exceeds the
kernel. Padding is written as zeros without touching the stream.

### Processing elements and the cycle count

`sqj2_pixel_calc` drives the 16 PEs (`sqj2_mac_pe`). In each cycle:

* one window word of `CHI_NUM = 16` input values goes to all PEs;
* each PE reads its own 16-value weight word;
* each PE multiplies the two words pairwise and adds the 16 products to its
  accumulator.

Output channel `co` belongs to PE `co % 16`, where it is local channel
`q = co / 16`. The sequencer walks `q` in the outer loop and the window word
in the inner loop. After the last word of a channel, each PE's `sqj2_requant`
turns its accumulator into an 8-bit result. The 16 results are written as one
word into the output-pixel buffer (`sqj2_out_pix_buf`). This write overlaps
with the next channel's accumulation.

One output pixel takes

```
ceil(CHO/16) * (K*K*CHI/16) + 5   cycles  (start to done)
```

This is the work term `CHO*K*K*CHI / (PAR_FACT*CHI_NUM)` of the original
design's performance model plus a pipeline fill of 5 cycles. The 5 cycles
are the cache read, the three PE stages (multiply, adder tree, accumulate)
and the buffer write. The pixel_calc testbench checks this count.

### Dynamic fixed point

A product of an input and a weight has fraction length `ei+ep`. The bias
uses the parameter fraction length `ep`. `sqj2_requant` works in four steps:

1. It brings the accumulator and the bias to a common fraction length
   without losing bits.
2. It shifts by `ei+ep-eo`.
3. If bits are dropped, it rounds half up.
4. It saturates to `[-128, 127]`.

Negative fraction lengths are allowed. `write_back` applies ReLU afterwards
if it is enabled.

### Fused max-pool

`sqj2_maxpool` sits between `write_back` and the output stream. When it is
bypassed, values pass through unchanged. When it is enabled, it computes the
window maximum in two steps.

* **Along the row.** One running maximum per channel is kept for the even
  and one for the odd pooled column. This works because the pool kernel is at
  most twice the stride: a value belongs to at most two neighbouring pooled
  columns, and those differ in parity.
* **Down the column.** When a column window closes, its maximum updates the
  running maxima of the even and odd pooled rows, stored per (pooled column,
  channel).

A pooled pixel leaves the block while the last input pixel of its window
passes through, so the output stays in raster order. Windows at the right and
bottom edges are clipped. The pooled output size is a register, so Caffe's
rounded-up sizes work: 113→56, 56→28, 28→14 for the 3x3/2 pools of
SqueezeNet v1.1. SqueezeNet's pools have to sit before its concatenation
("merge") layers, one pool per expand branch, so that each one follows a
single convolution.

## Interfaces

`sqj2_top` has four ports:

| port | role |
|---|---|
| `s_axil_*` | AXI4-Lite slave on the processor's general-purpose port; layer arguments and start/status |
| `s_param_*` | parameter stream: `cho` biases, then for each output channel its `K*K*CHI` weights in window order |
| `s_fmap_*` | input feature map, `H*W*CHI` values, row / column / channel order |
| `m_fmap_*` | output feature map in the same order (pooled if enabled); `m_fmap_last` on its last value |
| `irq` | high once a layer is done, until the next start |

All streams carry one signed 8-bit value per beat and use valid/ready. In the
original system the streams come from simple DMA engines: weights over the
HP port, feature maps over the cache-coherent ACP port.

Register map (byte offsets; all registers read back):

| offset | register | offset | register |
|---|---|---|---|
| 0x00 | CTRL: write bit 0 = start | 0x2C | EI, signed 6-bit |
| 0x04 | STATUS: bit 0 idle, bit 1 done | 0x30 | EO |
| 0x08 | H_IN | 0x34 | EP |
| 0x0C | W_IN | 0x38 | FLAGS: bit 0 ReLU, bit 1 max-pool |
| 0x10 | CHI (multiple of 16) | 0x3C | POOL_K |
| 0x14 | CHO | 0x40 | POOL_S |
| 0x18 | KERNEL | 0x44 | POOL_H_OUT |
| 0x1C | STRIDE | 0x48 | POOL_W_OUT |
| 0x20 | PAD | | |
| 0x24 | H_OUT = (H_IN+2*PAD-K)/S+1 | | |
| 0x28 | W_OUT | | |

Software computes the output sizes. It must also observe these rules:

* `CHI` must be a multiple of 16. The original design reshapes SqueezeNet's
  3-channel first layer in software into a 113x113x32, 1x1 layer.
* `CHO` can be any value; PEs whose channel does not exist compute unused
  values.
* A layer whose weights do not fit the caches is split into several
  invocations along the output channels.

## Sizes

The parallelism (16 PEs x 16 MACs) is the published configuration. The
published design gives no cache sizes. The sizes below are set in `sqj2_pkg`
and chosen to hold SqueezeNet v1.1:

| constant | value | holds |
|---|---|---|
| `K_MAX` | 3 | kernel size |
| `WIXCHI_MAX` | 8192 B | one padded input row (widest SqueezeNet v1.1 row: 7168) |
| `KXKXCHI_MAX` | 4608 B | one window (3*3*512) |
| `Q_CHOXKXKXCHI_MAX` | 16 KiB | weights per PE, 256 KiB in total |
| `CHO_MAX` | 1024 | output channels |
| `POOL_W_MAX`, `POOL_CH_MAX` | 64, 256 | pooled row width, channels when pooling |

Every SqueezeNet v1.1 layer fits. The exception is conv10, whose 512x1000
weights need two invocations of 500 channels each. Together the caches take
about 330 KiB of RAM. For comparison, the published xc7z020 build uses 96.5
block RAMs of 36 Kbit, about 434 KB.

## Speed on SqueezeNet v1.1 layers

`tb_sqj2_squeezenet` runs five layers of SqueezeNet v1.1 at their real sizes.
The streams run without gaps. Every output value is checked. Cycles are
counted from start to the done interrupt:

| layer | shape | cycles | pixel_calc bound |
|---|---|---|---|
| conv1 (reshaped) + pool1 | 113x113x32 → 64, pooled to 56x56 | 879k | 166k |
| fire3 squeeze | 56x56x128 → 16, 1x1 | 443k | 41k |
| fire5 expand3x3 + pool5 | 28x28x32 → 128, pooled to 14x14 | 162k | 117k |
| fire9 expand3x3 | 14x14x64 → 256 | 269k | 114k |
| conv10, first 500 channels | 14x14x512 → 500, 1x1 | 473k | 202k |

The 3x3 layers stay close to the compute bound, plus the one-time parameter
load (one byte per cycle). The 1x1 layers are limited by the byte-wide
streams:

* conv1 writes 64 output bytes for every 32 input bytes.
* fire3's squeeze reads 128 input bytes per output pixel.

The published accelerator runs the whole network in 74.91 ms at 100 MHz,
which is about 7.5 M cycles. With byte-wide streams this design would need
more than that, so the published build's memory transfers must be wider.
Widening `s_fmap`/`m_fmap` to one 16-value word per beat would bring the 1x1
layers near their compute bound. That change touches only the loader and
`write_back`.

## Departures and choices

* **Stream width.** The streams move one byte per beat. The original width is
  not published. Wider beats would shorten 1x1 layers, which are limited by
  reading input and writing output (see the speed table above).
* **DSP/LUT split.** The original design maps half of the multipliers to DSP
  blocks and half to LUTs. Here synthesis decides.
* **Barrier.** The three concurrent tasks of one output pixel meet at a
  barrier before the next pixel starts.
* **Rounding.** Rounding (half up) and saturation are chosen, not published.
* **Max-pool internals.** The fusion and the bypass are published. How the
  maxima are kept is this design's own: separable, with parity-indexed
  running maxima. It requires `pool_k <= 2*pool_s`.
* **Parameter order.** The parameter stream order and the one-channel-per-PE
  interleave (`co % 16`) are choices.
* **Software side.** Not part of this RTL:
  - the processor;
  - the DMA engines and the AXI HP/ACP ports;
  - the first-layer reshaping;
  - the merge and softmax layers;
  - splitting large layers into several invocations.

## Files and simulation

`rtl/` holds one module or package per file:

| module | block |
|---|---|
| `sqj2_pkg` | constants, types |
| `sqj2_ctrl_regs` | AXI4-Lite register file |
| `sqj2_param_cache` | weight/bias caches and their loader |
| `sqj2_mac_pe` | one PE |
| `sqj2_requant` | fixed-point output stage |
| `sqj2_pixel_calc` | PE array and sequencer |
| `sqj2_linebuf` | line buffer with rotation table |
| `sqj2_window_buf` | two window banks |
| `sqj2_out_pix_buf` | two output-pixel banks |
| `sqj2_fmap_loader` | line buffer and window filling |
| `sqj2_write_back` | ReLU and output |
| `sqj2_maxpool` | fused max-pool |
| `sqj2_conv_ctrl` | loop sequencer |
| `sqj2_top` | top level |

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M`.

`tb_sqj2_top` runs the whole accelerator at its default sizes on five small
layers:

* 3x3/1 with padding and ReLU;
* 1x1 with a fused pool;
* 3x3/2, as in ZynqNet;
* 1x1/2, where input pixels are skipped;
* 3x3 with a pool.

It checks every output value against a reference convolution written in the
testbench. It also counts that each mechanism occurred: both buffer banks,
compute overlapped with loading, padding, dropped input, output stalls,
input gaps, ReLU, saturation, pool and bypass.

`tb_sqj2_squeezenet` runs the real-size SqueezeNet layers listed above. It
takes about 35 s to build and run.

To run a testbench with Verilator (the package first):

```
verilator --binary --timing --assert -Irtl rtl/sqj2_pkg.sv \
    $(ls rtl/*.sv | grep -v sqj2_pkg) tb/tb_sqj2_top.sv --top-module tb_sqj2_top
./obj_dir/Vtb_sqj2_top
```

Simulations should start with random initial values
(`+verilator+rand+reset+2`): the testbenches do not depend on memory contents
they did not write.
