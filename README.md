# A layer-fused, depth-concatenated CNN accelerator in SystemVerilog

The first layers of a VGG-style network are expensive to run layer by layer. Their feature maps
are large (224 x 224 x 64 words after the first convolution), so they must be written to external
memory and read back for the next layer. This design avoids that. It fuses the first two 3x3
convolutions of VGG-16 and the 2x2 max pooling after them into one streaming pipeline. The image
enters once, as a serial pixel stream. Each layer starts work as soon as the few input rows its
next window needs have arrived. A pixel is dropped as soon as every output that depends on it is
computed. The only off-chip traffic is the input image, the weights and the pooled result.

Two ideas carry the design:

* **Depth concatenation.** All channels of a pixel travel together as one wide word. Channel d of a
  pixel sits in bits `[32*d +: 32]`, so a 3-channel input pixel is 96 bits wide. A whole 3-D
  window (3 x 3 x D) is therefore ready in one cycle, and so is a whole 3-D filter. The D
  depth slices are convolved in parallel.
* **Line-buffer fusion.** Each layer keeps only two image rows in a line buffer, plus a 3x3 window
  register. The output of one layer is streamed directly into the line buffer of the next.

The RTL follows the architecture of *DeCoILFNet* (Baranwal, Bansal, Nahar, Krishna). The paper
gives the block structure, the dataflow and the latencies. Widths, handshakes, flow control, reset
and the weight-loading port are this implementation's own choices. They are listed below.

## Data format

Every value is a 32-bit two's-complement fixed-point number in Q16.16 format (16 fraction bits).
The 32-bit word width comes from the paper; the Q16.16 split is our choice and is set in
`decoil_pkg::FRAC`. A product is the full 64-bit product shifted right by 16 bits (arithmetic
shift) and truncated to 32 bits. Sums wrap modulo 2^32. Nothing saturates and nothing is
rounded. There are no biases, because the paper mentions none. ReLU follows every convolution.

A stream word of L lanes is `L*32` bits wide, with lane 0 in the low bits. At the input, the
lanes are the image channels. After a convolution layer, lane f holds the output of filter f.

## One convolution layer (`conv_layer`)

```
 pixels (D lanes)                                                      pixels (K lanes)
 ──► pad_mux ──► line_buffer_window ──► [hold window, issue K filters] ──► conv3d_pipe ──► FIFO ──► depth_packer ──►
                                                   │                         ▲
                                              filter_bank ───────────────────┘
                                         (9 BRAMs, 1 filter/cycle)
```

1. **`pad_mux`** adds the one-pixel zero border. A counter walks the (H+2) x (W+2) padded frame.
   On border positions the mux outputs a constant zero and consumes no input. On interior
   positions it passes the input pixel through. The paper draws this zero-mux at the output of
   the previous layer. Putting it in front of every line buffer, including the first one, does
   the same job.
2. **`line_buffer_window`** holds KW-1 = 2 line memories, each one padded row wide, and a 3x3
   register of depth-concatenated pixels. For each accepted pixel:
   * the window shifts one column left;
   * its new right column is the two stored pixels of the current column plus the incoming pixel;
   * the line memories shift that column up by one row.

   The first complete window exists after 2*PW + 3 pixels, where PW is the padded width. After
   that, every pixel yields a window. The exception is the first two pixels of each row: their
   windows straddle the row wrap and are discarded.
3. **Filter issue.** A window is held while filters 0 to K-1 are issued, one per cycle. Every
   multiplier is busy on every cycle, and a layer produces one output pixel every K cycles.
   `filter_bank` has one BRAM per kernel tap (9 in all). Word f of the BRAM for tap (r, c) holds
   tap (r, c) of filter f for all D slices. Reading address f from all nine BRAMs returns the
   whole 3-D filter in one cycle. This read takes one cycle.
4. **`conv3d_pipe`** splits the window and the filter into D slices. D `conv2d_pipe` units (each
   has 9 multipliers and a 9-input adder tree) run in parallel, and a D-input adder tree sums
   their results. Every multiplier and every adder is a 9-stage pipeline, as in the paper. The
   latency is therefore 9 * (1 + ceil(log2 9) + ceil(log2 D)):
   * 45 cycles for a 2-D slice;
   * 63 cycles for D = 3;
   * 99 cycles for D = 64.

   ReLU is applied at the output and adds no cycle. Each result carries its filter index as a tag.
5. **Result FIFO and `depth_packer`.** Results arrive one filter per cycle. The packer collects
   the K results of a pixel into one K-lane word. That word is the depth-concatenated input pixel
   of the next layer.

### Flow control

The arithmetic pipeline has no stall input. Once a filter is issued, its result arrives LATENCY
cycles later whatever happens downstream. Downstream can still push back through a valid/ready
handshake: the pooling unit, or the consumer at the chip output, may stop. Credits make both
hold. The layer counts the results in flight plus the results waiting in the FIFO. It issues a
filter only while that count is below the FIFO depth. The FIFO depth is the next power of two
above LATENCY + 2: 128 for the layers built here. This is enough that a consumer which is always
ready never blocks issue. Then the pipeline runs without a stall after its initial fill, as the
paper states. When the consumer does stop, the layer fills its FIFO and then stops issuing. Its
line buffer then stops accepting pixels, and the stall travels upstream one handshake at a time.
The rule "count + in flight <= depth" is checked by an assertion. `ev_credit_stall` pulses on
every cycle in which a window waits for credit.

### Iterative depth decomposition (parameter `G`)

Deep layers (256 or 512 channels) would need too many multipliers. With `G > 1`, a layer splits
its D slices into G groups of D/G slices each. It sends one group per cycle through a datapath
that is only D/G slices wide. `depth_group_acc` adds the G partial sums of each filter and then
applies ReLU. Each filter takes G cycles instead of one. The default is `G = 1` (full
parallelism), because the two layers built here need only 27 + 576 multipliers. The group
multiplexer and the single-cycle accumulator are our choices. The paper describes only the
technique.

## Pooling (`max_pool`)

The pooling unit has a pool buffer with one K-lane entry per output column. An input pixel at
(r, c) addresses entry c/2:

* if r and c are both even, the pixel is written into the entry;
* for the next two pixels of the 2x2 window, the entry is replaced by the lane-wise signed
  maximum of itself and the pixel;
* for the fourth pixel (r and c both odd), that maximum is the pooled output.

An odd last row or column is dropped.

## The fused top (`decoilfnet_top`)

The top is a chain of `conv_layer`s. Any layer may have a `max_pool` after it. Each layer's output
stream feeds the next layer's padding and line buffer directly. Parameters:

| parameter | default | meaning |
|---|---|---|
| `IH`, `IW`, `D0` | 224, 224, 3 | input image |
| `NCONV` | 2 | number of conv layers (1 to 8) |
| `KS[8]` | `'{64, 64, 0, ...}` | filters of layer i; layer i+1 has depth `KS[i]` |
| `GS[8]` | all 1 | depth groups of layer i (see above) |
| `POOL_AFTER[8]` | `'{0, 1, 0, ...}` | 2x2 max pool after layer i; it halves the map for later layers |
| `LAT` | 9 | stages per multiplier and adder |

The defaults give conv1_1 → conv1_2 → pool1 of VGG-16: 224 x 224 x 3 in, 64 and 64 filters,
padding 1, stride 1, 112 x 112 x 64 out. The sizes are VGG-16's; the paper names these layers but
does not print their dimensions. Every layer applies ReLU.

| port | width | meaning |
|---|---|---|
| `in_valid/in_ready/in_data` | 1/1/`D0`*32 | input pixels in raster order, channels concatenated |
| `w_en[i], w_tap[i], w_addr[i], w_data[i]` | 1, 4, log2 max K, max(D0, max K)*32 | write tap `w_tap[i]` (= 3r + c) of filter `w_addr[i]` of layer i; all of that layer's slices in the low D_i*32 bits |
| `out_valid/out_ready/out_data/out_last` | 1/1/`KS[NCONV-1]`*32/1 | final pixels in raster order; `out_last` on the last pixel of a frame |
| `ev_pad, ev_discard, ev_credit_stall` | `NCONV` each | one event pulse per layer: padding zero, discarded window, credit stall |

Load the weights before streaming a frame: 9 writes per filter and layer. Frames can follow one
another without a gap. Reset (`rst_n`, active low, asynchronous) clears only control state. Data
registers and memories are not reset.

### Timing at the defaults

* Layer 1's first output pixel appears about 2 * 226 + 3 + 64 + 64 cycles after the stream
  starts (line fill, 64 filter issues, pipeline).
* Layer 2 issues 64 filters for each of its 224 x 224 windows: 3,211,264 cycles of issue. It is
  the bottleneck, and layer 1 runs alongside it at the same rate. In a longer chain the layer
  with the most `K * GS * H * W` sets the rate in the same way.
* Simulated: one frame takes **3,240,558 cycles** from the first input pixel to the last pooled
  output. That is 27.0 ms at 120 MHz. The paper reports 27.06 ms for conv1_1 to pool1 at 120 MHz.

### Size

* Multipliers: 9 * 3 + 9 * 64 = 603. The paper reports 605 DSPs for this configuration.
* Line buffers: 2 x 226 words of 96 bits and 2 x 226 words of 2048 bits.
* Filter BRAMs: 9 x 64 words of 96 bits and 9 x 64 words of 2048 bits.
* Pool buffer: 112 words of 2048 bits.
* Registers: the 9-stage pipelines hold several hundred thousand flip-flop bits.

## Files

| file | contents |
|---|---|
| `rtl/decoil_pkg.sv` | word type, Q16.16 multiply, operator latency (9), adder-tree helpers |
| `rtl/fx_mult_pipe.sv`, `rtl/fx_add_pipe.sv`, `rtl/delay_line.sv` | 9-stage multiplier, 9-stage adder, shift register |
| `rtl/adder_tree.sv` | pipelined N-input adder tree |
| `rtl/conv2d_pipe.sv`, `rtl/conv3d_pipe.sv` | 2-D slice convolution; D-slice 3-D convolution with ReLU |
| `rtl/filter_bank.sv` | 9 filter BRAMs, depth-concatenated words |
| `rtl/pad_mux.sv`, `rtl/line_buffer_window.sv` | zero padding; line buffer and 3x3 window |
| `rtl/sync_fifo.sv`, `rtl/depth_packer.sv` | result FIFO; K results into one output pixel |
| `rtl/depth_group_acc.sv` | accumulator for depth decomposition |
| `rtl/conv_layer.sv`, `rtl/max_pool.sv`, `rtl/decoilfnet_top.sv` | layer, pooling, fused top |
| `tb/tb_*.sv` | one self-checking testbench per block; `tb_ref_pkg.sv` holds the reference arithmetic |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself. Each has a watchdog.
Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/decoil_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_decoilfnet_top.sv --top-module tb_decoilfnet_top -Mdir obj
./obj/Vtb_decoilfnet_top
```

Other modules are found through `-Irtl`/`-Itb` by their file names. The main testbenches are:

* `tb_decoilfnet_top`: the paper's worked example (5x5x3 input, two layers of 3 filters, 2x2
  pooling). It streams 8 frames, with long and random output stalls, and checks every pooled
  value against a reference. It also requires that each mechanism occurs at least once: padding
  and discarded windows in both layers, credit stalls, back-pressure and pooled outputs.
* `tb_decoilfnet_full`: the top at its default size, one 224 x 224 frame. It checks 16 pooled
  pixels (all 64 channels each) against a reference computed from their receptive fields, the
  count and framing of all 12,544 outputs, and the frame time. It builds in about 2 minutes and
  runs in about 30 s.
* `tb_fused_4conv_full`: four fused layers of 64 filters, no pooling, on a 224 x 224 x 3 image
  (`NCONV` = 4, everything else at the defaults). It checks 8 output pixels (all 64 channels
  each) against a layer-by-layer reference of their 9 x 9 receptive fields, plus the count and
  framing of all outputs. A frame takes 3,269,819 cycles (27.25 ms at 120 MHz; the paper reports
  27.48 ms for this network). Four layers cost only about 58,000 cycles more than two, because
  each extra layer adds only its line fill. It builds in about 2 minutes and runs in under 2.
* `tb_fused_4conv`: the same four layers at 8 x 8 x 3 with 4 filters per layer, every output
  checked over two frames.
* `tb_fused_vgg7`: VGG-16's first seven layers (conv1_1, conv1_2, pool1, conv2_1, conv2_2, pool2,
  conv3_1), scaled to an 8 x 8 x 3 input and 4/4/8/8/16 filters. Layers 3 and 4 use 2 depth
  groups. Both fused testbenches check every output of two frames and require padding and
  discarded windows in every layer.
* `tb_conv_layer` and `tb_conv_layer_groups`: one layer on the 5x5x3 example, with G = 1 and
  G = 3. They check every value, the exact first-output latency, and an output every K*G cycles.
* Unit testbenches: these check the latencies of 9, 36, 45 and 63 cycles, the window contents,
  the padding, pooling and packing against independent models.

The testbenches model the arithmetic in `tb_ref_pkg` with plain integer operations, so a change
to `FRAC` must be made in both places.

## Where this departs from the paper, and what is missing

* **Our choices, not given in the paper:** the Q16.16 format; the valid/ready handshakes; credit
  flow control with a result FIFO; the weight-loading port; the tag that travels with each
  result; reset of control state only; line memories with asynchronous read; floor pooling of
  odd sizes.
* **Paper figures that disagree with its text:** the depth-concatenation figure prints 16-bit
  lanes in a 48-bit word, while the text and the results table say 32-bit fixed point. This
  design uses 32 bits.
* **Line buffer:** the paper draws three circular line buffers. Two line memories plus the window
  register hold the same data. The first window appears after 2b+3 pixels, as in the paper's
  pipeline diagram.
* **Padding:** the paper writes layer outputs into a zero-initialised output buffer through a
  0/data multiplexer. Here the same multiplexer, driven by a position counter, sits in front of
  each line buffer.
* **Latency:** the paper's 63-cycle convolution latency is reproduced exactly. A layer adds 1
  cycle for the filter BRAM read, 1 for the FIFO and 1 for the packer.
* **Deeper chains are not the default:** the 7-layer VGG-16 run (conv1_1 to conv3_1) and the
  4-layer 64-filter network are the same top with `NCONV` = 5 or 4. At full depth parallelism they
  need about 3,500 and 1,755 multipliers. The 4-layer network is simulated at full size, the
  7-layer run only at the reduced size above. The paper reports 2,907 DSPs for the 7-layer run
  but does not say how depth was split; pick `GS` to match a DSP budget.
* **Not built:** the external DDR memory and the host, the write-back of feature maps between
  separately fused groups of layers, and the depth-flattening preprocessing of the input are
  outside the design. Only stride 1 and 3x3 kernels are exercised.
