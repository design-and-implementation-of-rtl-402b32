# A streaming W1A8 YOLOv3-tiny detector in SystemVerilog

This is the RTL for a small single-shot object detector built for a mid-size FPGA
(Zynq-7020 class). The detector is a YOLOv3-tiny-like network of eleven
convolutions, reduced to one detection scale. Most of it is *binarised*:

- The nine inner layers use **1-bit weights** (only the sign, ±1) and
  **8-bit activations** ("W1A8").
- Their convolutions need no multipliers. Each product becomes an addition or a
  subtraction.
- The first layer, which sees the raw image, and the last layer, which produces
  box and class scores, stay as fixed-point convolutions with 16-bit weights.

A 320×320 RGB image goes in as a pixel stream. The raw detection tensor comes
out as a stream of signed 32-bit words: 10×10 cells × 75 values (3 anchors ×
(4 box + 1 objectness + 20 VOC classes)). Decoding the boxes, thresholding and
non-maximum suppression are left to software on the processor.

## Network and data flow

```
RGB stream ─► rgb_adapter ─► Conv1 ─► Conv2 … Conv10 ─► Conv11 head ─► 32-bit raw words
 (24 bit)     (Q0.8 pixels)  (std)    (w1a8_backbone)   (std, 5 PEs)
```

| Layer  | Kind     | Kernel | Channels | Max-pool after | Feature map (in) |
|--------|----------|--------|----------|----------------|------------------|
| Conv1  | standard | 3×3    | 3 → 16   | yes            | 320×320          |
| Conv2  | W1A8     | 3×3    | 16 → 32  | yes            | 160×160          |
| Conv3  | W1A8     | 3×3    | 32 → 64  | yes            | 80×80            |
| Conv4  | W1A8     | 3×3    | 64 → 128 | yes            | 40×40            |
| Conv5  | W1A8     | 3×3    | 128 → 128 | no            | 20×20            |
| Conv6  | W1A8     | 3×3    | 128 → 128 | no            | 20×20            |
| Conv7  | W1A8     | 3×3    | 128 → 128 | yes           | 20×20            |
| Conv8  | W1A8     | 3×3    | 128 → 128 | no            | 10×10            |
| Conv9  | W1A8     | 1×1    | 128 → 64 | no             | 10×10            |
| Conv10 | W1A8     | 3×3    | 64 → 64  | no             | 10×10            |
| Conv11 | standard | 1×1    | 64 → 75  | no             | 10×10            |

Together these layers hold 736,880 weights. The table is `bnn_pkg::layer_cfg()`.
Every layer has its own hardware, and all layers run at the same time as one
pipeline. Each link between blocks is a valid/ready stream:

- A beat moves when both `valid` and `ready` are high.
- A source keeps an offered beat valid and unchanged until it is taken.
  Every stream source carries an assertion of this rule.

A 3×3 layer (`conv_layer`) is a chain of these blocks:

```
padding_adapter ─► line_buffer_3x3 ─► window reg ─► PE ─► post_process ─► result vector ─► [maxpool_2x2]
                                          ▲          ▲         ▲
                                          └── param_rom banks (signs/weights, Mul_prev, Div_current+bias)
```

- **`padding_adapter`** wraps each H×W map in a one-pixel ring of zeros. It
  inserts the border beats itself and passes inside pixels straight through.
- **`line_buffer_3x3`** keeps the two previous padded rows in line memories,
  plus a 3×3 register window. Once it has seen two rows and two columns, every
  new pixel completes one window, so a layer keeps the spatial size.
- A 1×1 layer has no padding and no line buffer. Each pixel is its own window.
- **`maxpool_2x2`** keeps the horizontal maximum of each column pair in a row
  memory of W/2 entries. On the odd row it emits the 2×2 maximum.

## Arithmetic

### W1A8 layers and the Mul_prev fusion

The trained network scales its binary weights per channel. Those scales are
folded into two fixed-point constants:

- **Mul_prev `m_i`**: one per *input* channel. It sits in the PE.
- **Div_current**: one per *output* channel. It sits in the post-processing.

For output channel `o`, with `s = ±1` and `a` an unsigned byte, the PE computes

```
acc_o = Σ_i Σ_k  s[o,k,i] · (m_i · a[k,i])          (what the network specifies)
      = Σ_i  m_i · ( Σ_k s[o,k,i] · a[k,i] )        (what w1a8_pe evaluates)
```

The two lines are equal because `m_i` does not depend on the kernel position
`k`. So the inner sum is pure add/subtract over the nine window positions, and
each input channel needs only one multiplier. A 3×3, 128-input layer therefore
uses 128 multipliers, not 1152.

Mul_prev is an unsigned 16-bit number with 12 fractional bits. Sign bit 1 means
+1. The sign bits of output channel `o` form one ROM word. Bit `j = k·CIN + i`
belongs to kernel position `k` (`k = ky·3 + kx`) and input channel `i`.

### Post-processing

`post_process` turns an accumulator into the next 8-bit activation in four
steps: scale, add bias, round, clip.

```
q = clip( floor( (acc · div + bias · 2^(SHIFT-8) + 2^(SHIFT-1)) / 2^SHIFT ), 0, 255 )
```

- `div` is Div_current stored as a reciprocal multiplier, so there is no divider.
- `bias` is signed with 8 fractional bits.
- `SHIFT` is 32 for W1A8 layers and 24 for Conv1.
- Rounding is half-up.

### Fixed-point formats

| Quantity | Format |
|---|---|
| Input pixels | Q0.8. The byte value is used as is. |
| Conv1 weights | Q5.11, 16 bit signed |
| Conv1 bias | Q2.14. It is shifted left by 5 to the product's 19 fractional bits. |
| Conv1 accumulator | 19 fractional bits |
| Conv11 input | `x_i = m_i · a_i`, with 12 fractional bits |
| Conv11 weights | Q1.15 |
| Conv11 bias | Q4.12. It is shifted left by 15. |
| Conv11 raw output | `sat32(round(acc / 2^12))`: signed 32 bit, 15 fractional bits. The real value is `raw / 2^15`. |

### Detection head

`conv11_head` latches one 64-channel pixel and multiplies it by Mul_prev. It
then computes the 75 outputs in 15 groups of `PE_NUM = 5` parallel dot
products. For each group it does four steps:

1. Put the group address on the weight and bias ROMs.
2. Wait out the ROM latency.
3. Enable the PE.
4. Send the five 32-bit words one per beat.

Words leave in y / x / channel order. `yolo3_tiny_top` raises `out_last` on the
7,500th word of a frame.

## Controllers and ROM timing

All parameters are in synchronous ROMs (`param_rom`). These behave like FPGA
block RAM without its optional output register: a word appears `ROM_LAT`
cycles after its address (default 1). The controllers are written around that
latency, not around a fixed assumption.

The `conv_layer` controller has four states:

- **LOAD** (W1A8 layers, once after reset): reads the CIN Mul_prev values into
  registers. Each word is latched `ROM_LAT` cycles after its address.
- **IDLE**: takes one window into the window register.
- **RUN**: issues output-channel addresses 0 … COUT−1, one per cycle. Beside
  the addresses runs a shift register of {valid, channel} tags, one stage per
  cycle:
  - at stage `ROM_LAT−1` the ROM words are valid and the PE samples;
  - one stage later `post_process` samples;
  - one stage later the byte is written into slot `channel` of the result vector.
- **DONE**: hands the full result vector to the output register when that is
  free, then returns to IDLE.

Timing and backpressure:

- One window costs `COUT + ROM_LAT + 4` cycles.
- A full output register stops the controller. That stalls the line buffer,
  then the padding adapter, then the layer before.
- `ROM_LAT` is a parameter of every layer. The unit testbench runs one
  configuration with `ROM_LAT = 2`.

Conv1 is the slowest stage: 320×320 windows × 21 cycles. A whole 320×320 frame
takes about **2.18 M cycles**; the end-to-end testbench measured 2,180,379 with
random input gaps. All later layers wait on Conv1.

## Parameters in the ROMs

The trained weights are not published. By default, every ROM word is computed
at elaboration by the generator functions in `bnn_pkg`:

- They hash (layer, kind, index) with a 32-bit integer hash (`prand`).
- Each value is shaped to its format and a realistic range:
  - Mul_prev 0.75 … 1.25;
  - Div_current chosen so that typical outputs spread over the byte range;
  - Conv1 weights ±1.0;
  - Conv11 weights ±1/16.

The whole datapath therefore runs on meaningful ranges and is fully checked,
but the result is not a trained detector.

To use real parameters, give a `param_rom` instance an `INIT_FILE`. It is a
`$readmemh` file with one word per line, in address order, in the word layouts
documented in `bnn_pkg::rom_word`:

| Bank | Word layout |
|---|---|
| signs | Bit `j` is the sign of term `j` of output channel `addr`. |
| Mul_prev | One 16-bit value per input channel. |
| post-processing | `{Div_current[15:0], bias[15:0]}` per output channel. |
| standard weights | Field `p·terms + j` is the weight of output `addr·PE_NUM + p`, term `j`. |
| standard biases | Field `p` is the bias of output `addr·PE_NUM + p`. |

The layers create their ROMs with the generator. To load files, set `INIT_FILE`
on the `u_wrom` / `u_mrom` / `u_qrom` / `u_brom` instances inside
`conv_layer` and `conv11_head`, for example by adding a parameter that is
passed through.

## Resources

These are memory sizes worked out from the RTL. Generic synthesis of the top
reports 1,274,160 memory bits, close to the total below.

| Memory | Bits |
|---|---|
| Parameter ROMs | 859,056 (731,648 of them are the W1A8 sign bits) |
| Line buffers | 313,952 |
| Pool row buffers | 92,160 |
| **Total** | **≈1.27 Mb**, about a quarter of a Zynq-7020's block RAM |

The arithmetic is:

- one adder tree and one set of Mul_prev multipliers per W1A8 layer;
- 27 multipliers for Conv1;
- 5 × 64 multipliers for Conv11.

Because every output channel of a window is computed in one cycle, the W1A8
adder trees are wide: 9 × 128 inputs for the 128-channel layers.

## Where this RTL departs from the original design

- **Schedule.** The original implementation reports 23.79 M cycles per 320×320
  frame at 30 MHz. It does not say how its PEs are shared or scheduled. This
  RTL gives each layer its own hardware and needs about 2.18 M cycles per frame.
  The end-to-end testbench only checks that a frame stays inside the original
  budget, not that it matches it.
- **Size of the arithmetic.** One output channel per cycle over a whole
  window is simple and fast, but it does not fit the target device:
  - it needs about 1,240 multiplications, against 220 DSP slices on a Zynq-7020;
  - the add/sub trees alone need about 70k LUTs, more than the device has.
  
  The original design is slower by about 11× and so presumably shares its PEs
  over time. To target that device, the natural change is to make `w1a8_pe`
  work through input-channel groups over several cycles. The controller's tag
  pipeline is the place to add that.
- **Rounding.** The reference software rounds half-to-even. This RTL rounds
  half-up everywhere. Results can differ by one LSB on exact ties.
- **Mul_prev on every W1A8 layer.** Mul_prev is applied on all W1A8 layers and
  on the head's input. A layer with a single scale is covered by equal `m_i`.
- **Conv1 bias.** Conv1 adds its Q2.14 convolution bias in the PE. The
  post-processing then applies Div_current and its own bias term.
- **Widths.** The widths of Mul_prev, Div_current and the post-processing bias,
  and the accumulator widths (40 bits W1A8, 48 bits standard), were chosen
  here, not taken over.
- **Added signals.** Framing is this design's own: the input end-of-frame
  marker, the `frame_err` flag that pulses when the marker is misplaced, and
  `out_last`.
- **Not included.** The processor-side post-processing (box decoding, NMS) and
  the clock generator are not part of this RTL. It runs on a single clock.

## Files

| File | Content |
|---|---|
| `rtl/bnn_pkg.sv` | formats, layer table, ROM kinds, parameter generators |
| `rtl/rgb_adapter.sv` | input stream, RGB to 3-channel Q0.8 vector, skid buffer, frame check |
| `rtl/padding_adapter.sv` | zero border |
| `rtl/line_buffer_3x3.sv` | 3×3 sliding windows |
| `rtl/param_rom.sv` | parameter ROM with read latency |
| `rtl/w1a8_pe.sv` | add/sub PE with Mul_prev |
| `rtl/std_conv_pe.sv` | fixed-point MAC PE (Conv1, Conv11) |
| `rtl/post_process.sv` | scale, bias, round, clip |
| `rtl/maxpool_2x2.sv` | 2×2 max-pool |
| `rtl/conv_layer.sv` | one layer with its controller |
| `rtl/w1a8_backbone.sv` | Conv2 … Conv10 |
| `rtl/conv11_head.sv` | detection head and output serialiser |
| `rtl/yolo3_tiny_top.sv` | the whole detector |
| `tb/tb_ref_pkg.sv` | behavioural model of the network (whole feature maps, direct equations) |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself. A
watchdog counts a failure if it hangs. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/bnn_pkg.sv tb/tb_ref_pkg.sv $(ls rtl/*.sv | grep -v bnn_pkg) \
    tb/tb_yolo3_tiny_top.sv --top-module tb_yolo3_tiny_top -o sim
./obj_dir/sim
```

The packages (`bnn_pkg.sv`, `tb_ref_pkg.sv`) come before the files that import
them. The 64×64 run takes a few seconds.

| Testbench | What it runs | Time |
|---|---|---|
| `tb_yolo3_tiny_top` | Two 64×64 frames through the whole detector | seconds |
| `tb_yolo3_tiny_full` | One full 320×320 frame at default parameters; 7,500 words checked against the model | about a minute; 2.18 M cycles |
| `tb_conv_layer` | Conv1, Conv2 (with `ROM_LAT = 2`), Conv5 and Conv9 on small maps, through `tb_conv_harness` | short |

The two end-to-end testbenches:

- check every output word against `tb_ref_pkg::ref_net`;
- vary input gaps and output backpressure at random;
- count input stalls, input gaps, output stalls, Conv1 pool outputs, inserted
  padding beats, Mul_prev loads, `out_last` and `frame_err`;
- fail if any of those never happened.

To change the image size, set `IMG_H` / `IMG_W` on `yolo3_tiny_top`. Both must
be multiples of 32. To change the head's parallelism, change `PE_NUM` on
`conv11_head`; it must divide 75.
