# ChipNet accelerator: a reused 5x5 convolution engine for LiDAR road segmentation

This is synthesizable SystemVerilog for the FPGA accelerator of ChipNet. ChipNet is a
small, fully convolutional network that labels the drivable region in one rotation of a
64-beam LiDAR. On a host, the point cloud is binned into a dense spherical-view image:
180 azimuth cells of 0.5° (from -45° to +45°) by the 64 laser lines. Each cell holds 14
features, which are x, y, z, θ, φ, ρ and intensity for the nearest and the farthest return in
the cell. The accelerator turns that 180 × 64 × 14 tensor into a 180 × 64 map of drivable-region
scores. A host then thresholds the map and projects it to a top view.

The main idea of the hardware is that every layer of the network is a 5 × 5 convolution on
a map of the same size. So a single 3D convolution unit, built once with 3,200 multipliers, is
reused for all twelve layers. A pair of finite-state machines schedules it, and all feature
maps and weights stay on chip.

## 1. The network the hardware runs

| layer | kernel (w × h × in × out) | in → out map |
|---|---|---|
| encoder | 5 × 5 × 14 × 64 | 180×64×14 → 180×64×64 |
| ChipNet block × 10 | identity + 3 × 3 + dilated 3 × 3, 64 → 64 | 180×64×64 → 180×64×64 |
| output mapping | 1 × 1 × 64 × 1 | 180×64×64 → 180×64×1 |

A *ChipNet block* sums three branches and then applies ReLU:

* the identity;
* a 3 × 3 convolution `w`;
* a 3 × 3 convolution `v` with dilation 2, which reaches two pixels out.

Because all three are linear and are added, the block is exactly one 5 × 5 convolution. Its
kernel, for input channel *i* and output channel *o*, is:

```
 v11  .   v12  .   v13
  .  w11  w12 w13   .
 v21 w21   c  w23  v23        c = w22 + v22 + (i == o ? 1.0 : 0)
  .  w31  w32 w33   .
 v31  .   v32  .   v33
```

The dots are zero taps. The hardware therefore needs only one operation, "5 × 5 convolution
over a zero-padded map, then requantize, then optional ReLU". The encoder uses all 25 taps. The
output mapping uses only the centre tap.

`kernel_compose` builds this kernel in hardware as the host writes weights. In `WT_BLOCK` mode
the host sends the nine `w` and nine `v` values, and the block places them and adds the
identity at the centre. In `WT_FULL5X5` mode a kernel is stored as given.

## 2. Data flow and schedule

```
 host ──► feature map buffer ──► 3D convolution unit ──► requantize ──► ReLU ──► intermediate buffer
 (input)   (64 banks, padded)     64 slices × 2 kernels                           (64 banks)
               ▲                  + 2 adder trees                                      │
               └──────────────────────── move after each layer ◄───────────────────────┘
                                                 output layer ──► map_valid / map_data
```

* **Feature map buffer** (`fmap_buffer`). It has one RAM bank per channel, and each bank holds the
  map with a 2-pixel zero border: 184 words per line and 68 lines, 12,512 words in all. All words
  start at zero. A pixel (row, col) is written to `(row+2)*184 + col+2`, so the border is never
  written. Reading addresses 0 … 12,511 in order then delivers the zero-padded map, and no
  padding logic is needed.
* **3D convolution unit** (`conv3d`). It has 64 slices, and slice *i* convolves input channel *i*.
  Each slice (`conv2d_slice`) has a line buffer and two 5 × 5 multiplier arrays, one per output
  channel of the current pass. Each array feeds a 25-input adder tree. Two 64-input adder trees
  then sum the slices. The unit therefore finishes two output channels in one sweep over the
  padded map.
* **Line buffer** (`line_buffer`). This is a shift register of 4 × 184 + 5 words, folded into five
  rows of 184, with the 5 × 5 window made of the first five registers of each row. When the
  pixel at padded position (r, c) is shifted in, the window is centred on the output pixel
  (r−4, c−4). The window is only complete, and the output only valid, when r ≥ 4 and c ≥ 4:
  that is 180 × 64 = 11,520 of the 12,512 positions.
* **Requantize and ReLU**. The 47-bit exact sum is rounded back to 18 bits, then ReLU zeroes
  negative values. The output layer skips ReLU.
* **Intermediate buffer** (`intermediate_buffer`). It receives the two finished channels of each
  pass at their unpadded address. After the layer, the outer FSM copies it, one pixel of all 64
  channels per cycle, into the feature map buffer, which the next layer reads.

### Passes and cycle count

A layer with 64 output channels takes 32 *passes*. Each pass:

1. reads the two kernels for the pass from the weight memory: 2 cycles;
2. streams the whole padded map through the unit: 184 × 68 = **12,512 cycles**;
3. waits `DRAIN` = 16 cycles for the pipeline to empty. This is the conv3d latency of 13 cycles
   plus the RAM read, the result register and the write.

That gives 12,530 cycles per pass. A frame is then as follows:

| part | cycles |
|---|---|
| encoder + 10 blocks: 11 × (2 + 32 × 12,530) | 4,410,582 |
| 10 + 1 moves between layers: 11 × 11,521 | 126,731 |
| output layer: 2 + 12,530 | 12,532 |
| **frame, from last input pixel to `frame_done`** | **≈ 4,549,845** |

That is about 13.0 ms at 350 MHz. The testbenches check this formula at reduced channel counts. Loading the
input takes another 11,520 cycles, or 33 µs, at one pixel per cycle. The time is fixed: it does
not depend on the data.

## 3. Fixed-point format

Data and weights are 18-bit two's complement with `FRAC` = 10 fraction bits (`chipnet_pkg`).

* Products are 36 bits with 20 fraction bits.
* The 25-tap trees add 5 bits and the 64-slice trees add 6 more, so the sum is 47 bits and never
  overflows.
* `requantize` adds 2⁹, shifts right arithmetically by 10 (round half up), and clips to
  [−2¹⁷, 2¹⁷−1].

This is the scale, round and clip sequence with which the network is trained for fixed-point
use. Changing `FRAC` in the package rescales the whole design, and the testbenches' reference
models use 2^FRAC as well.

## 4. Control

`outer_fsm` runs a frame through these states:

| state | does |
|---|---|
| `LOAD` | `in_ready` = 1; writes each accepted pixel into channels 0…13 of the feature map buffer |
| `START`, `CONV` | sets the layer configuration, starts the inner FSM, waits for its `done` |
| `MOVE`, `MVEND` | copies the intermediate buffer into the feature map buffer (11,521 cycles) |
| `DONE` | pulses `frame_done`, back to `LOAD` |

The layer configuration is set per layer:

| layer | passes | active input slices | ReLU | results go to |
|---|---|---|---|---|
| 0 (encoder) | 32 | 14 | yes | intermediate buffer |
| 1 … 10 (blocks) | 32 | 64 | yes | intermediate buffer |
| 11 (output) | 1 | 64 | no | `map_*` output stream |

During the encoder, slices 14…63 get zero weights whatever the weight memory holds. This
matters because their feature-map banks still hold the previous frame's data.

`inner_fsm` runs the passes of one layer through the states `WT` → `STREAM` → `DRAIN`. In
`STREAM` it tags every address with "window complete" and the output pixel index. The tag
travels down the `conv3d` pipeline next to the data and later gives the write address.

## 5. Interface of `chipnet_top`

All signals are synchronous to `clk`. `rst_n` is an asynchronous, active-low reset.

| group | signals | protocol |
|---|---|---|
| weights | `wt_we, wt_mode, wt_layer[3:0], wt_oc[5:0], wt_ic[5:0], wt_kernel` (25 × 18 bits) | one kernel per cycle while `busy` is low. Layer 0 = encoder, 1…10 = blocks, 11 = output (its kernels at `oc` = 0, centre tap). Unwritten kernels are zero. |
| input | `in_valid, in_ready, in_pix[14]` | valid/ready; 11,520 pixels in row-major order (row = laser line, column = azimuth cell); a transfer happens on a cycle with both high |
| output | `map_valid, map_idx, map_data` | 11,520 results, row-major, one per cycle while valid; no back-pressure |
| status | `busy, frame_done, clip` | `clip` pulses for every result that was saturated |

Weight tap *t* of a 5 × 5 kernel is at row `t / 5`, column `t % 5`, and the convolution is a
cross-correlation: `out(r,c) = Σ w[dy*5+dx] · in(r+dy−2, c+dx−2)`.

A simulation-only assertion flags a weight write while `busy` is high.

## 6. Size and resources

At the default parameters:

| resource | this RTL | reported for the original FPGA build |
|---|---|---|
| multipliers | 64 × 2 × 25 = 3,200 | 3,072 DSP slices |
| feature map buffer | 64 × 12,512 × 18 b = 14.4 Mb | |
| intermediate buffer | 64 × 11,520 × 18 b = 13.3 Mb | |
| weight memory | 64 banks × 768 × 450 b = 22.1 Mb | |
| all RAM | 49.8 Mb ≈ 1,384 36-Kb block RAMs | 1,543 block RAMs |
| line-buffer registers | 64 × 741 × 18 b = 854 kb | 33,530 slice registers |

The line buffers are written as shift registers, which is how the original design describes
them. On an FPGA, a synthesis tool maps such chains to shift-register LUTs or RAM, which explains
the low register count reported there. The weight memory stores every layer, the output layer
included, as full 5 × 5 kernels. For block layers that is wasteful: only 17 of the 25 taps can be
non-zero.

## 7. Where this RTL departs from the original description, or fills gaps

* **Fraction bits.** The 18-bit width is given, but the split is not. `FRAC` = 10 is a choice.
  Ties round half up.
* **Padding geometry.** A 2-pixel border around the 180-wide line gives the 184-word line
  length. This matches the 184 of the line buffer and the 12,512 cycles per pass.
* **Identity branch.** It is implemented as a fixed +1.0 on the centre tap of the same channel,
  as the block's description says. The layer table also lists a 1 × 1 × 64 × 64 kernel for it. A
  learned 1 × 1 identity can still be loaded by writing the centre taps in `WT_FULL5X5` mode.
* **Output layer.** No ReLU. The raw 18-bit score is streamed out, and no sigmoid is applied. The
  final activation is not specified.
* **Bias.** No bias terms, since none are mentioned.
* **Load and compute do not overlap.** The first layer starts only after the whole input is
  loaded. The original schedule hints that loading and convolving could overlap. Here that costs
  11,520 cycles (33 µs) per frame.
* **Moves.** A move costs 11,521 cycles per layer, which is about 3 % of the frame. The reported
  total of about 12.59 ms matches 11 × 32 × 12,512 cycles at 350 MHz, with no moves or pass
  overheads. The same source also gives 17.59 ms in its summary, and the 13.0 ms here lies
  between the two.
* **Weights** are written by the host through a port rather than fixed when the FPGA is built.
* **Host link.** The Ethernet interface, the point-cloud pre-processing and the top-view
  post-processing are outside this RTL. The top module has plain valid/ready ports where the
  Ethernet core would connect.

## 8. Files

| file | block |
|---|---|
| `rtl/chipnet_pkg.sv` | word format, kernel type, `wt_mode_e` |
| `rtl/chipnet_top.sv` | the accelerator |
| `rtl/outer_fsm.sv`, `rtl/inner_fsm.sv` | layer sequencer, pass controller |
| `rtl/fmap_buffer.sv` | zero-padded feature map buffer |
| `rtl/intermediate_buffer.sv` | layer output buffer |
| `rtl/weight_memory.sv`, `rtl/kernel_compose.sv` | kernel store, block-kernel builder |
| `rtl/conv3d.sv`, `rtl/conv2d_slice.sv`, `rtl/line_buffer.sv`, `rtl/adder_tree.sv` | convolution datapath |
| `rtl/requantize.sv`, `rtl/relu.sv` | output stage |

Every module has a testbench `tb/tb_<module>.sv`, and every testbench prints
`TB_RESULT checks=N failures=M`. The testbenches do the following:

* Each block is checked against a model written independently in the testbench.
* The timing figures given above (latencies, pass length, frame length) are checked too.
* `tb_chipnet_top` runs two frames of a reduced network: a 9 × 6 map, 4 channels, 3 inputs and
  2 blocks. It compares every output pixel with a fixed-point reference model, checks the frame
  latency, and counts that zero padding, the encoder channel mask, ReLU, saturation, the
  identity term, input back-pressure and the data move all occurred.
* `tb_chipnet_frame` runs one complete frame on the full 180 × 64 map, with 14 inputs, all 10
  blocks and the output mapping. It uses 16 feature channels instead of 64. To keep its reference
  cheap, its weights are sparse. It checks all 11,520 output pixels and the frame time. The frame takes 1,241,747 cycles, which
  is 3.55 ms at 350 MHz and matches the cycle model exactly. The simulation takes about 3 minutes.

A frame with all 64 channels was not simulated to the end. It is 4.55 M cycles through 64
slices, and Verilator manages about 2,200 cycles per second on it, so a frame would take about
35 minutes. The 64-channel configuration is covered by compilation and lint only. The largest
configuration simulated end to end is the 16-channel frame above.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/chipnet_pkg.sv \
          tb/tb_chipnet_top.sv --top-module tb_chipnet_top -o sim
./obj_dir/sim
```

`-y rtl` lets Verilator find each module in the file that has its name. Only the package has to
be listed first. The block testbenches take a few seconds. `tb_chipnet_frame` takes a few minutes.

The design has two-state simulation in mind: every register that is read before it is written
is reset or initialised. The RAMs are zero-initialised with `initial` loops, which FPGA tools
turn into the RAM contents.
