# A streaming cell classifier for a frame grabber's readout path

An image-based cell sorter has to decide where each cell goes before the
cell reaches the actuator. A bright-field camera photographs a cell in a
microfluidic channel, and a classifier labels it. A serial line then tells
the sorter which outlet to use. If that classifier runs on a host CPU or
GPU, the image first has to cross PCIe and a software stack, which takes
hundreds of microseconds. This design removes that trip. A very small
convolutional network, called "Student 2" here, sits inside the FPGA of
the camera's frame grabber. It classifies the pixels as they are read out
of the camera, and a 2-bit result leaves on a TTL line a few microseconds
after the image.

The network is the compressed student of a knowledge-distillation setup.
It separates B cells from T4 lymphocytes in 48×48 single-channel images
and has 5682 parameters. This RTL gives the network as a chain of
streaming layers. Around it are three small blocks:

- a pixel bridge that frames and scales camera pixels;
- a monitor that drives an "inference in progress" TTL line;
- a serial writeout of the class code.

All code is SystemVerilog-2017 and synthesizable. Every block has a
self-checking testbench.

```
 camera link IP ──pix_*──► pixel_bridge ──► student2_cnn ─────────────────► result_writeout ──► ttl_writeout
 (vendor, outside)          scale, frame     conv_0 ► ReLU ► pool            2-bit code          (to sorter)
                                 │           conv_1 ► ReLU ► pool                 │
 host registers ──cfg_*─────────────────────►dense_0 ► softmax/threshold          │
                                 │                                                │
                                 └─ frame_start ──► inference_monitor ◄─ result ──┘──► ttl_inference
```

## The network, and where its sizes come from

The layers and their reuse factors follow the source publication, as do
the input size, the parameter count and the two classes. The publication
names the layers conv_0, conv_1 and dense_0, with poolings and activations
between them. It does not print the channel counts or the feature-map
sizes. Only one small layout fits all the published numbers:

| layer   | operation                        | output   | parameters | reuse factor | multipliers |
|---------|----------------------------------|----------|-----------:|-------------:|------------:|
| conv_0  | 3×3 conv, 1→16, no padding, ReLU  | 46×46×16 | 144 + 16   | 1            | 144         |
| pool_0  | 2×2 max, stride 2                | 23×23×16 | –          | –            | –           |
| conv_1  | 3×3 conv, 16→16, no padding, ReLU | 21×21×16 | 2304 + 16  | 2            | 1152        |
| pool_1  | 2×2 max, stride 2 (drops row/col 20) | 10×10×16 | –       | –            | –           |
| dense_0 | 1600 → 2                         | 2 logits | 3200 + 2   | 25           | 128         |
| softmax | two-class confidence, threshold  | 2-bit code | –        | –            | –           |
| total   |                                  |          | **5682**   |              | 1424        |

Three independent checks support this layout:

- The parameters add up to exactly 5682.
- A reuse factor of 25 divides the 1600×2 dense products.
- The per-layer multiplier counts, as a share of the 1700 DSP slices of
  the Kintex UltraScale KU035 that the publication targets, are 8.5 %,
  67.8 % and 7.5 %. Those are the per-layer DSP shares the publication
  reports (8.4 %, 67.8 %, 7.5 %).

The reuse factor is the number of multiplications that share one
multiplier. Reuse 1 is fully parallel. The source does not give the
activation or pooling functions; ReLU and max pooling are this design's
choice.

## Streams, frames and overlap

Every layer is a stage with a valid/ready handshake on each side. Data
moves on a clock edge where both are high. A stage that presents valid
data keeps it unchanged until it is taken; `conv2d_stream` asserts this.

Frames carry no markers between layers. Each stage knows its frame size
and counts rows and columns from reset. So the pixel bridge must make sure
that exactly 48×48 pixels enter the network per frame:

- It drops pixels that arrive before the first start-of-frame flag, and
  any surplus after a full frame.
- If a new start-of-frame arrives early, it completes the short frame with
  zero pixels and pulses `frame_err`.

The network takes one pixel per clock and never stalls its input at that
rate, so frames can follow each other with no gap: one frame per 2304
cycles. The layers run at the same time on different parts of the image.
The second convolution works on rows that the first one finished a few
rows earlier.

Because pool_1 discards the last row and column of conv_1's 21×21 output,
the final result does not depend on the last two rows of the image. The
result therefore appears *before* the whole frame has entered. In the
full-size testbench, the first pixel to the result takes 2241 to 2242
cycles, about 60 cycles fewer than the 2304 pixels of a frame. At an
assumed 250 MHz that is 9.0 µs, within the 14.5 µs the publication
measured. The publication's own timing diagram starts inference only after
the 8 µs camera readout. Here inference overlaps the readout whenever the
camera link delivers pixels as they are read.

## Convolution with a reuse factor (`conv2d_stream`)

This is the most involved block.

- **Line buffers.** Two line buffers (K−1 rows of IN_W pixel vectors) hold
  the previous two image rows. The write index is the current column: each
  accepted pixel shifts its column up by one row.
- **Window.** A 3×3 window register shifts left by one column per pixel.
  Its new right-hand column is the two buffered pixels of that column plus
  the incoming pixel.
- **When a window is full.** After a pixel at row ≥ 2 and column ≥ 2 is
  accepted, the window holds a full patch. The output for position
  (row−2, col−2) is then computed.
- **Reuse.** There are K·K·CIN·COUT/RF multipliers, so the COUT output
  channels are computed in RF groups of COUT/RF, one group per clock.
  Channels 0–7 come in the first cycle and 8–15 in the second when RF = 2.
  The input stays not-ready during the extra RF−1 cycles. The cycle that
  finishes the last group may already accept the next pixel, so RF = 1
  runs at one pixel per clock.

For a frame with a free-flowing output, the input takes
H·W + ((H−2)(W−2) − 1)·(RF−1) cycles. The testbench checks this formula.
The split by output-channel group is this design's choice. An HLS tool
may fold the work differently, with the same multiplier count.

## Dense layer (`dense_rf`)

The dense layer first stores the 1600 features of a frame. They arrive 16
per beat, in channel-last raster order, which is the flatten order. It
then spends 25 cycles with 2×64 = 128 multiply-accumulates each. Cycle r
covers inputs 64r … 64r+63 for both outputs. The logits are ready 25
cycles after the last feature is accepted. The layer does not take new
input while it computes or while its result waits, but the next frame's
first features only reach it hundreds of cycles later.

## Number format

The publication says the network was quantized layer by layer, but it
gives no bit widths. Here every value is a signed 16-bit word, and the
position of the binary point is a parameter per layer:

| parameter (`student2_cnn`, `cellsort_top`) | fraction bits of      |
|--------------------------------------------|-----------------------|
| `PIX_FRAC`                                 | the network input     |
| `W0_FRAC`, `A0_FRAC`                       | conv_0 weights and biases, conv_0 output |
| `W1_FRAC`, `A1_FRAC`                       | conv_1 weights and biases, conv_1 output |
| `WD_FRAC`, `Z_FRAC`                        | dense_0 weights and biases, the logits   |

ReLU and pooling keep the format of their input. All seven default to
10 fraction bits (6 integer bits), the default format of the HLS flow
the original was built with; the defaults are this design's choice.

A layer with input format I, weight format W and output format O forms
its products with I+W fraction bits and sums them exactly in 48 bits.
The bias is aligned to the products by a shift of I. The sum is then
floored to O fraction bits by dropping I+W−O bits, and saturated to
16 bits (`cnn_pkg::requant`). O may not exceed I+W. An 8-bit camera
pixel p enters as p/256, i.e. p·2^(PIX_FRAC−8), which is p·4 at the
default. The confidence block first brings the logit difference to
16 fraction bits, so its sigmoid does not depend on `Z_FRAC`. Accuracy
with trained weights depends on these formats and has not been
evaluated.

## Confidence, rejection and the 2-bit code (`softmax_threshold`)

With two classes, the softmax probability of the winning class is
sigmoid(|z1 − z0|). This block computes it with the piecewise-linear PLAN
approximation, which needs only shifts and adds. The confidence has 16
fraction bits:

| d = \|z1 − z0\| | confidence        |
|-----------------|-------------------|
| d ≥ 5           | 1                 |
| 2.375 ≤ d < 5   | d/32 + 0.84375    |
| 1 ≤ d < 2.375   | d/8 + 0.625       |
| d < 1           | d/4 + 0.5         |

A comparator rejects the cell if the confidence is below the run-time
threshold `tau` (16 fraction bits). The publication describes this
uncertainty-aware rejection; the sorter would send such a cell to a
discard outlet. Setting tau to 0.5 or below turns rejection off. That is
the main configuration, where every cell gets a class.

The 2-bit code is this design's assignment:

| code | meaning                  |
|------|--------------------------|
| `01` | class 0, B cell          |
| `10` | class 1, T4 cell         |
| `00` | rejected                 |

Equal logits give class 0.

## TTL outputs and timing budget

- **`ttl_inference`** (`inference_monitor`) goes high on the cycle after
  the first pixel of a frame enters the network. It falls on the cycle
  after the result leaves, so on a scope its high time is the inference
  latency. `last_latency` holds that time in cycles. With frames in flight
  at the same time the line stays high until the last one is done.
- **`ttl_writeout`** (`result_writeout`) idles high. For each result it
  sends a low start bit and then the two code bits, most significant bit
  first, each 16 cycles long: 48 cycles, or 0.192 µs at 250 MHz. The
  publication's measured writeout takes 0.2 µs and idles high on its
  oscilloscope trace. The start bit and the bit timing are this design's
  choice.

The publication does not state a clock. At an assumed 250 MHz:

| step                                   | publication | this RTL (cycles → µs at 250 MHz) |
|----------------------------------------|------------:|----------------------------------:|
| inference (TTL high time)              | 14.5 µs     | 2241 → 9.0 µs                     |
| writeout                               | 0.2 µs      | 48 → 0.19 µs                      |
| frame interval, back to back           | 81 kfps     | 2304 → 108 kfps                   |

Exposure (2 µs) and readout (8 µs) belong to the camera and are not
modelled here.

## Loading the parameters

The original flow compiles trained weights into the bitstream. Trained
values are not available here. Instead, all 5682 parameters are registers
written through `cfg_we`/`cfg_addr`/`cfg_data`, one 16-bit value per
write. The address space is exactly the parameter list:

| addresses   | contents                                              |
|-------------|-------------------------------------------------------|
| 0–143       | conv_0 weights, index (ky·3+kx)·1·16 + co             |
| 144–159     | conv_0 biases                                         |
| 160–2463    | conv_1 weights, index ((ky·3+kx)·16 + ci)·16 + co     |
| 2464–2479   | conv_1 biases                                         |
| 2480–5679   | dense_0 weights, index i·2 + o, with input i = (r·10 + c)·16 + ch |
| 5680–5681   | dense_0 biases                                        |

This is the kernel layout (ky, kx, ci, co) that common training frameworks
export. Weights exported in another order must be permuted before they
are written. Writing parameters while a frame is in flight changes the
result of that frame.

## What lies outside this RTL

These parts of the system are vendor products or equipment. The design
uses them but does not describe their insides; at the top they appear as
ports:

- the CoaXPress camera interface IP and the frame grabber's user-logic
  framework, which handles camera triggering, DMA to the host, register
  access and TTL pins;
- the high-speed camera;
- the acoustic sorter.

The camera is assumed to deliver a 48×48 region of interest as 8-bit
monochrome pixels, one per beat. Finding and cropping the cell is left to
future work in the publication, and it is not here either.

Departures from the publication, in one place:

- The channel counts and feature-map sizes are derived, not printed.
- ReLU and max pooling are assumed.
- The 16-bit word and the 10-fraction-bit default of every layer's
  format are assumed.
- Weights are loadable rather than compiled in.
- Inference can overlap readout.
- The softmax uses PLAN.
- The code assignment and the serial format are this design's own.
- There are no FIFOs between layers. The HLS original has stream FIFOs;
  this chain is joined directly.

## Files

| file | contents |
|------|----------|
| `rtl/cnn_pkg.sv` | number format, layer geometry, reuse factors, address map, class codes |
| `rtl/conv2d_stream.sv` | line-buffer convolution with reuse factor |
| `rtl/relu_stream.sv` | registered ReLU stage |
| `rtl/maxpool2d_stream.sv` | streaming P×P max pooling |
| `rtl/dense_rf.sv` | flatten buffer and dense layer with reuse factor |
| `rtl/softmax_threshold.sv` | two-class confidence, argmax, rejection |
| `rtl/student2_cnn.sv` | the network: layer chain and parameter address decode |
| `rtl/pixel_bridge.sv` | pixel scaling and frame discipline |
| `rtl/inference_monitor.sv` | inference TTL and latency counter |
| `rtl/result_writeout.sv` | serial writeout of the code |
| `rtl/cellsort_top.sv` | top level |
| `tb/cnn_ref_pkg.sv` | whole-frame reference model of the network, used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_frame_rate_workload.sv` | the top at the publication's 50 kfps and 81 kfps frame rates |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Each has a watchdog. Build and run with Verilator 5, for
example the end-to-end test at full size:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/cnn_pkg.sv tb/cnn_ref_pkg.sv rtl/*.sv tb/tb_cellsort_top.sv \
  --top-module tb_cellsort_top -Mdir obj_top
obj_top/Vtb_cellsort_top
```

Use the same command with another `tb_<module>.sv` and its top-module for
a single block. The full-size network runs in well under a second of
simulation per frame.

What the tests establish:

- **`tb_cellsort_top`**, at the top's default parameters. It loads random
  parameters and streams seven frames from the camera side. For each
  frame it checks the code, class, confidence and logits against the
  reference model. It decodes the serial line and checks the TTL high
  time against `last_latency` and against 3625 cycles. It also requires
  each of these mechanisms to occur at least once:
  - stray and surplus pixels are dropped;
  - a short frame is padded;
  - a frame is rejected;
  - both classes occur;
  - results come out before their frame has fully entered.
- **`tb_student2_cnn`** runs the network alone at full size, with and
  without back-pressure. A second instance with other per-layer formats
  gets the same input. It checks:
  - bit-exact results against the reference, for both instances;
  - no input stall at one pixel per clock;
  - a frame interval of 2304 cycles.
- **`tb_frame_rate_workload`** runs the top at default parameters with
  frames triggered at fixed periods. Each frame's pixels arrive one per
  clock from its trigger. There are four frames every 5000 cycles
  (50 kfps, the rate of the publication's oscilloscope capture), then
  four every 3086 cycles (81 kfps, its pipelined throughput), at an
  assumed 250 MHz. It checks:
  - every result against the reference;
  - one separate inference-TTL pulse per frame;
  - each result arrives before the next trigger;
  - first pixel to end of writeout (2291 cycles) stays within 14.5 µs
    plus 0.2 µs (3675 cycles).
- **The block testbenches** compare each layer with a direct computation
  and check cycle counts:
  - the convolution's cycle formula for reuse 1 and 2, the second with
    non-default formats;
  - the dense layer's 25-cycle latency;
  - the writeout's 48 cycles;
  - the rejection at each of the publication's seven thresholds
    (0.50 to 0.99).

The checks cover the streaming hardware against a straightforward
arithmetic model of the same network. They do not cover classification
accuracy, which needs the trained weights.

## Changing the design

- `student2_cnn` takes the image side, both channel counts and the three
  reuse factors as parameters. The defaults come from `cnn_pkg`.
- COUT must be a multiple of the convolution reuse factor, and the
  flattened size a multiple of the dense reuse factor. An assertion at
  the start of simulation checks both.
- More classes would need a general softmax in place of the two-class
  sigmoid.
- `result_writeout.BIT_CYCLES` sets the serial bit time.
- The per-layer formats are parameters of `student2_cnn` and
  `cellsort_top`, with defaults in `cnn_pkg` (`FRAC_*`). The
  `pixel_bridge` scaling follows `PIX_FRAC`, which must be at least 8.
  When loading trained weights, set `W0_FRAC`, `W1_FRAC` and `WD_FRAC`
  to the formats they were quantized to.
- The word width is `DW` in `cnn_pkg`. The saturation limits in
  `requant` are written for 16 bits and must change with `DW`.
