# SqueezeJet convolution-layer accelerator in SystemVerilog

SqueezeJet computes one convolutional layer of SqueezeNet v1.1 at a time, as a
coprocessor to an embedded CPU. The host sends the layer's weights and biases
and then streams the input feature map pixel by pixel. The accelerator streams
the output feature map back, pixel by pixel, with ReLU already applied. A
SqueezeNet layer has few enough parameters to sit on chip. They are loaded
once per layer and reused for every output pixel, so only the feature maps
move after that.

The accelerator is built around three ideas:

* **Channel parallelism.** Every convolution after the first one in
  SqueezeNet has a multiple of 16 input channels. Each MAC unit (MAC-16)
  therefore multiplies 16 input channels by 16 weights in every cycle, and
  this does not depend on the kernel size.
* **Output-channel parallelism.** NU = 2^n MAC units (8 by default) work on
  the same output pixel at once. Each one handles its own share of the output
  channels.
* **Buffers that shift by moving pointers.** The 3x3 window slides down and
  across the input. The line buffer and the window buffer each keep a small
  array of pointers to their rows (or columns), and a shift rotates those
  pointers. Only the row or column that was freed gets rewritten, so data is
  never copied inside a buffer.

The supported layers have stride 1, a 1x1 or 3x3 kernel, C_i a multiple of 16
up to 512, and C_o a multiple of NU up to 256. ReLU is fused into the layer.
The first SqueezeNet layer (stride 2, 3 input channels) needs a different
accelerator, which is not part of this RTL.

## Data formats and the arithmetic of one output

| quantity | width | format |
|---|---|---|
| activations (input and output fmap) | 16 bit | signed Q13.3 (3 fraction bits) |
| weights, biases | 8 bit | signed Q1.7 (7 fraction bits) |
| product | 24 bit | 10 fraction bits |
| accumulator | 40 bit | 10 fraction bits |

For output pixel (y, x) and output channel c_o, with a kernel of size K:

    acc  = sum over k_h, k_w < K and c_i < C_i of
           FMi[y+k_h][x+k_w][c_i] * W[c_o][k_h][k_w][c_i]
    s    = acc + (B[c_o] << 3)              -- align Q1.7 bias to 10 fraction bits
    out  = min(32767, max(0, s >>> 7))      -- ReLU, back to Q13.3, saturate

The shift truncates toward minus infinity, and the result saturates at the
top of the 16-bit range. Rounding is not specified by the published design,
so this rule is this RTL's own choice. The formula is in
`sqj_pkg::finish_acc`, and the testbenches compute it independently.

The input map is supplied **already padded**. `XI` and `YI` are the padded
sizes, and the output is (YI-K+1) x (XI-K+1) x C_o. For a SqueezeNet expand3x3
layer on a 55x55 map, the host sends 57x57 pixels with a zero border.

## Block structure

```
                    +-------------------- squeezejet ---------------------+
 AXI-Lite --------->| axil_regs --cfg/start--> sqj_ctrl (sequencer)       |
                    |                              | controls everything  |
 param stream (8) ->| stream_fifo -> param_loader -+--> weights_buf[u]    |
                    |                              +--> bias_buf[u]       |
 fmap in (16) ----->| stream_fifo -> itb (3 lines) --16x16--> itwb[u]     |
                    |                                          |          |
                    |      for u = 0..NU-1:  itwb[u] + weights_buf[u]     |
                    |                         + bias_buf[u] -> mac16[u]   |
                    |                         -> fmap_o_buf[u]            |
 fmap out (16) <----| stream_fifo <- channel-order mux over fmap_o_buf[u] |
                    +-----------------------------------------------------+
```

| module | role |
|---|---|
| `sqj_pkg` | formats, limits, `cfg_t`, the output function |
| `pointer_array` | N-entry pointer rotation: the shift mechanism |
| `itb` | input tile buffer: 3 line buffers, one activation written and 16 read per cycle |
| `itwb` | input tile window buffer: 3 column buffers, one per MAC unit |
| `weights_buf`, `bias_buf` | one unit's share of the layer parameters |
| `mac16` | 16 multipliers, an adder tree and an accumulator, pipelined |
| `fmap_o_buf` | one unit's channels of the current output pixel |
| `param_loader` | routes the parameter stream to the units |
| `sqj_ctrl` | sequences a whole layer |
| `axil_regs` | AXI4-Lite argument and control registers |
| `stream_fifo` | valid/ready FIFO on each of the three streams |
| `squeezejet` | top level |

## The pointer-array buffers

This is the least obvious part of the design. The ITB and the ITWB both use
`pointer_array`.

A pointer array with N = 3 entries maps a *logical* line number (0 = top,
oldest; 2 = bottom, newest) to a *physical* buffer. After s shifts, entry a
holds (a + s) mod 3:

| shifts | 0 | 1 | 2 | 3 |
|---|---|---|---|---|
| logical 0 -> physical | 0 | 1 | 2 | 0 |
| logical 1 -> physical | 1 | 2 | 0 | 1 |
| logical 2 -> physical | 2 | 0 | 1 | 2 |

A shift turns the old top line into the new bottom line. That line is the
only one the next input row overwrites. The other two lines are not touched
and have moved up one position.

**ITB (input tile buffer).** The ITB has three lines of 7168 activations
each, which is the capacity of the published design: 344.064 Kbit in total.
A line holds one input row, X_i * C_i activations, at element address
x*C_i + c. Each line is split into 16 banks, with element a in bank
a mod 16. One read therefore returns 16 consecutive channels of a pixel.
Writes take one activation per cycle, straight from the input stream. For a
3x3 layer:

1. *Initialisation.* Input rows 0 and 1 go into logical lines 1 and 2.
2. *Each output row.* The ITB shifts, and rows r and r+1 move to lines 0
   and 1. The first two pixels of row r+2 are written into line 2.
3. *Each output pixel x.* Input pixel x+2 of row r+2 is written into line 2.
   Column x+2 is then complete in all three lines.

**ITWB (input tile window buffer).** The ITWB holds the 3x3xC_i window in
three column buffers, one per kernel column k_w. A column holds 3 rows x C_i
channels as 16-wide vectors, at address k_h*C_i/16 + g. It has its own column
pointer array:

* At the start of an output row, ITB columns 0 and 1 are copied into logical
  window columns 1 and 2.
* For each output pixel, the window shifts one column and the new ITB column
  x+2 is copied into logical column 2. That takes 3*C_i/16 vector reads from
  the ITB. The two older columns are not touched.

The capacity is 3x3x512 activations, the published 73.728 Kbit. Every MAC
unit has its own ITWB, and all of them are written with the same vector in
the same cycle. This follows the published design, which gives each MAC unit
its own window buffer.

**1x1 layers** use neither step: the ITB and ITWB never shift. Each pixel is
written to address 0 of ITB line 2 and copied from there into window column
2, whose first C_i/16 vectors are then read.

## Parallel MAC slices and the order of the output channels

Output channel c_o belongs to unit u = c_o mod NU and is kernel slot
j = c_o / NU of that unit. Inside `weights_buf[u]`, slot j takes element
addresses j*K*K*C_i through (j+1)*K*K*C_i - 1, in (k_h, k_w, c_i) order.

For one output pixel, the controller issues C_o/NU kernels to every unit. A
kernel is K*K*C_i/16 vector pairs, one per cycle, with no gap between
kernels. The weight address is the same in all units, and so is the window
read. `mac16` marks the first and last vector of each kernel. It adds the
bias on the last vector and writes the finished channel into `fmap_o_buf[u]`,
three cycles after that last vector.

Once all C_o/NU results of every unit have arrived, the pixel is streamed out
in channel order, one activation per cycle: entry c_o / NU of unit c_o mod NU.

## Interfaces

**AXI4-Lite.** 32-bit registers, at byte addresses:

| address | register | meaning |
|---|---|---|
| 0x00 | CTRL | write bit0 = 1: start (ignored while busy). Read: bit0 busy, bit1 done (cleared by start), bit2 idle |
| 0x10 | K | 1 or 3 |
| 0x14 | CI | input channels |
| 0x18 | CO | output channels |
| 0x1C | XI | padded input width |
| 0x20 | YI | padded input height |

The register map is this design's own. The published accelerator only states
that its arguments arrive over AXI-Lite.

**Streams.** All three streams use a valid/ready handshake and pass through a
16-deep FIFO. After start, the accelerator takes:

1. From the 8-bit parameter stream: C_o*K*K*C_i weights in
   (c_o, k_h, k_w, c_i) order, with c_i fastest, followed by C_o biases.
2. From the 16-bit input stream: XI*YI*C_i activations, the whole padded
   map with every pixel sent once. Channels come fastest, then x, then y.
3. On the 16-bit output stream, it returns (XI-K+1)*(YI-K+1)*C_o activations
   in the same order.

The parameters are consumed first. The input map is read only when the
sequencer needs the next pixel. The streams may stall at any time on either
side.

## Timing

The phases of a layer do not overlap. After the parameter load (one byte per
cycle) and, for a 3x3 layer, the initialisation (2*XI*C_i cycles), one output
pixel takes about

    C_i  (input pixel)  +  K*C_i/16  (window column copy)
       +  (C_o/NU)*K*K*C_i/16  (MAC issue)  +  C_o  (output)  +  7..8

cycles, assuming both streams keep up. Each output row of a 3x3 layer adds
about 2*C_i + 6*C_i/16 + 2 cycles. Some cycle counts measured with the
defaults (NU = 8):

| layer (padded input) | cycles incl. parameter load | MAC issue cycles | ms at 100 MHz |
|---|---|---|---|
| fire2 expand3x3, 57x57x16 -> 64 | 506 396 | 217 800 | 5.06 |
| fire9 expand3x3, 15x15x64 -> 256 | 403 799 | 194 688 | 4.04 |
| conv10, one 256-channel slice, 13x13x512 -> 256 | 440 784 | 173 056 | 4.41 |

In every MAC issue cycle each unit performs 16 MACs, as the testbenches
check.

A complete fire2 module runs as three calls: squeeze (1x1, 55x55x64 -> 16)
takes 300 532 cycles, expand1x1 (16 -> 64) takes 291 505, and expand3x3 on the
padded 57x57 map takes 506 396. That is 1.10 M cycles, or 11.0 ms at 100 MHz,
for the accelerator alone. The measured fire2 time of the original system is
32.65 ms. That figure also includes the host's work (concatenating the two
expand outputs, padding) and the data transfers, so the two numbers are not
directly comparable. Without overlap, the input and output transfers take a
large share of the cycles in 1x1 layers with few channels. This is the main
place where this RTL leaves performance on the table.

## Sizes and what fits

Defaults (all in `sqj_pkg` and the top's parameters): NU = 8, 16 channels
per cycle, ITB 3 x 7168 activations, ITWB 3x3x512 per unit, 147 456 weights
in total (18 432 per unit), 256 biases and 256 output channels in total.
These are the published buffer sizes, converted to element counts. A layer
fits when:

* K*K*C_i*C_o <= 147 456;
* C_o <= 256 and C_o is a multiple of NU;
* C_i <= 512 and C_i is a multiple of 16;
* for 3x3 layers, XI*C_i <= 7168.

Every SqueezeNet v1.1 fire module fits. The largest, fire8/fire9
expand3x3 (64 -> 256), fills the weight buffer exactly. conv10 (512 -> 1000)
must be run as four calls of at most 256 output channels each.

## Own choices and departures from the published design

The block structure, number formats, buffer sizes, MAC-16 parallelism,
pointer-array shifting and the order of the per-row and per-pixel steps
follow the published design. The following are choices made for this RTL:

* The layer phases are sequential. The input transfer, the MAC work and the
  output transfer of consecutive pixels do not overlap.
* The input is supplied already padded.
* The channel-to-unit assignment is interleaved (c_o mod NU), and the
  parameter stream order is weights, then biases.
* 1x1 layers are staged through ITB line 2.
* Memories have a registered read with a latency of one cycle.
* The MAC pipeline has 3 stages, and the accumulator is 40 bits wide.
* The rounding rule is truncation, followed by saturation.
* The AXI-Lite register map, the valid/ready handshake and the FIFO depth are
  this design's own.
* The original was produced with a high-level synthesis tool. Its exact
  schedule and cycle counts are unknown, so the measured times in the table
  above are this RTL's and cannot be compared cycle for cycle.

## Verification and use

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog:

* `tb_pointer_array`: the pointer table above and random shifts.
* `tb_itb`, `tb_itwb`: writes, shifts and vector reads against a model that
  keeps physical lines and pointer rotation apart.
* `tb_weights_buf`, `tb_bias_buf`, `tb_fmap_o_buf`: write and read-back.
* `tb_mac16`: back-to-back random kernels against the output formula, with
  a 3-cycle latency and one vector per cycle. ReLU clamping and saturation
  are both exercised.
* `tb_param_loader`: where every weight and bias lands.
* `tb_sqj_ctrl`: the ITB write line and address of every input element, and
  the counts of shifts, MAC cycles, window writes and outputs.
* `tb_stream_fifo`, `tb_axil_regs`: the handshakes and the register map.
* `tb_squeezejet`: the whole accelerator with NU = 4 on five small 3x3 and
  1x1 layers, with random stalls and back-pressure. Every output is compared
  with a reference convolution. It also checks that every mechanism
  (ITB/ITWB shifts, both kernel sizes, input stalls, FIFO full, output
  back-pressure, ReLU, saturation) occurred.
* `tb_fire_module`: a whole fire2 module at the default parameters. The
  squeeze output is fed to expand1x1 and, with a zero border added, to
  expand3x3, as a host would do. About 435 000 outputs are checked.
* `tb_squeezejet_full`: the top with every parameter at its default, running
  fire2 expand3x3, fire9 expand3x3 and a conv10 slice at full SqueezeNet
  size, and then stalled and saturating layers. It checks about 280 000
  outputs and runs in a few seconds.

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
        rtl/sqj_pkg.sv tb/tb_squeezejet_full.sv --top-module tb_squeezejet_full
    ./obj_dir/Vtb_squeezejet_full

The RTL keeps to synthesizable SystemVerilog-2017. All memories are 1-D
arrays with a registered read, so they map to block RAM.
