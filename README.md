# An in-pixel first-layer front-end for object detection and tracking

A high-resolution camera normally sends every raw pixel to a separate processor,
and that processor's first job is usually to shrink the image with a strided
convolution and a pooling layer. This design moves that first layer into the image
sensor: a strided 7x7 convolution, batch normalization, ReLU and 2x2 pooling. The
chip then sends first-layer activations instead of pixels. The configuration built
by default sends 24 times fewer bits per frame than a raw RGB stream.

The RTL follows the architecture of *P²M-DeTrack: Processing-in-Pixel-in-Memory for
Energy-efficient and Real-Time Multi-Object Detection and Tracking* (Datta et al.).
The convolution is analog. Each pixel carries weight transistors, and the kernel's
pixels drive a shared column line together. Everything after the column lines is
digital and is written here as synthesizable SystemVerilog:

- the single-slope ADC counters;
- the batch-norm and ReLU arithmetic;
- the schedule that converts many kernels at once;
- the ReLU registers;
- the pooling logic;
- the output stream.

The analog parts (pixel array, ramp, comparator) are behavioural models, so the
whole chip can be simulated end to end.

The back-end (the rest of the faster R-CNN / QDTrack network on an FPGA) is not
part of this RTL. The sensor's output stream is the boundary.

## Main configuration

| quantity | value | origin |
|---|---|---|
| kernel K, stride S, padding D | 7, 4, 3 | K and S from the paper; D chosen (ResNet-50 stem padding) |
| output channels CO | 16 | from the paper's transistor count: ceil(7/4)² · CO = 64 |
| ADC / activation bits NB | 8 | paper |
| weight transistors per pixel | 64 = ceil(K/S)² · CO | paper's Eq. (1); `weight_transistors()` in `p2m_pkg` |
| pooling | 2x2, stride 2, average (max and none selectable) | paper gives stride 2 and avg/max; window size chosen |
| pixel array | 720 x 1280, 12-bit pixels | BDD100K frame size; 12 bits from the paper |
| conv map / pooled map per channel | 180 x 320 / 90 x 160 | derived |
| conversions per frame | 832 (52 per channel) | derived, matches the paper's Eq. (2) |
| clocks per frame | 430,484 | this design's ADC timing |
| bandwidth reduction | 24x | (2,764,800/230,400) · (4/3) · (12/8) |

The paper's other two configurations are a build-time parameter change away.
One is S = 2 with max pooling (6x reduction). The other is S = 6 without pooling
(13.5x). The stride is a parameter because in silicon it fixes which weight
transistors each pixel has.

## One conversion: CDS, batch norm and ReLU in the column ADC

Every pixel column has a single-slope ADC. A ramp shared by all columns feeds a
comparator per column, and each column has an up/down counter. A conversion
(`p2m_adc_sequencer`) takes 2^(NB+1)+3 = 515 clocks:

1. **SAMPLE** (1 clock).
   - The pixel array activates the kernels of this cycle. Each column line then
     carries two sums: pixel x |w| over the positive weights, and the same over
     the negative weights.
   - Every counter loads the channel's `bn_shift`.
   - The ramp restarts.
2. **NEG** (256 clocks). The ramp rises by `bn_step[ch]` per clock. Each counter
   counts **down** while the negative sum is still above the ramp.
3. **SWAP** (1 clock). The ramp restarts.
4. **POS** (256 clocks). Each counter counts **up** while the positive sum is above
   the ramp.
5. **LATCH** (1 clock). The results are written into the register bank.

After the two ramps the counter holds:

    count = bn_shift + min(ceil(pos/step), 256) - min(ceil(neg/step), 256)

The two-ramp subtraction is correlated double sampling used to apply signed
weights. The ramp slope is the batch-norm scale, and the preset is the batch-norm
shift. The column output `relu` clips the count to [0, 255]: values below zero
give the ReLU, and values above 255 saturate. In the paper, CDS, batch norm and
ReLU live in the ADC. The use of the counter preset for the shift and of the ramp
slope for the scale is this design's reading.

## The kernel-parallel schedule

This is the least obvious part of the design.

### Why a schedule is needed

A column line can carry only one kernel's sum per conversion. Two kernels that
share a pixel cannot be active together, because the pixel would drive both.
With K = 7 and S = 4, neighbouring output positions overlap. The paper's answer
(its Fig. 2) is to convert, in one cycle, every kernel that overlaps none of the
others, and to use otherwise idle ADCs to read several kernels stacked in the
same columns.

### How this design groups the kernels

The design fixes the grouping as follows (`p2m_pkg`, `p2m_scheduler`):

- **Phases.** Let P = ceil(K/S), which is 2 here. Output columns x with the same
  x mod P (the horizontal phase p) are P·S ≥ K pixels apart, so their kernels
  never overlap. The same holds for output rows with the same y mod P (the
  vertical residue q).
- **Strips.** The columns are cut into strips of P·S = 8 pixel columns, one strip
  per pair of output columns. In a cycle (q, p), strip b converts K = 7 kernels
  stacked vertically, all at output column x = b·P + p. The k-th kernel of the
  stack is at output row y = band·P·K + q + P·k. Its sum is read by ADC column
  b·P·S + k, one of the strip's own ADCs.
- **Bands.** A band is P·K = 14 output rows. It needs P·P = 4 cycles, one for each
  (q, p) pair.
- **Frame order.** Channels run one after another, since all channels use the same
  pixels. Within a channel, bands run top to bottom.

### Cycle count

A channel takes ceil(H_OUT / (P·K)) · P² cycles. For the 180-row map that is
13 · 4 = 52. The paper's Eq. (2) gives the same number: ceil(H/K) · ceil(K/S) =
26 · 2 = 52.

When H_OUT is not a multiple of P·K, Eq. (2) is only a lower bound and cannot be
reached. Rows with different residues can never share a cycle, and the band order
already uses the fewest cycles that groups of at most K same-residue rows allow.
For example, H_OUT = 32 with S = 2 needs 32 cycles per channel where Eq. (2) says
20.

### Which register holds which result

The same mapping is used in reverse to find each result. Output position (row yb
inside the band, column x) sits in ADC column (x/P)·P·S + yb/P, slot
(yb mod P)·P + x mod P. The pixel-array model and the pooling streamer both use
this map from `p2m_pkg`.

### Sizing limit

The strip assignment needs (ceil(W_OUT/P) − 1)·P·S + K ≤ W_IN ADC columns. That
is 1279 ≤ 1280 for all three of the paper's strides on a 1280-wide array. The top
module stops elaboration with an error if the condition fails.

## Register bank, pooling and the output stream

`p2m_register_bank` keeps P² = 4 NB-bit registers per ADC column for each band,
in two banks. The ADCs fill one bank while the pooling side reads the other. This
is the paper's "ReLU1 … ReLUN" register column in front of the averaging logic;
the number of registers and the double banking are this design's choices.

`p2m_pool_streamer` waits for a full bank and walks its 2x2 windows in raster
order. For each window it reads four values through four read ports, and
`p2m_pooling_unit` combines them:

- average: sum/4, truncated;
- maximum;
- in no-pooling mode, every convolution output goes out unchanged instead.

Each activation leaves on a valid/ready stream tagged with channel, row and
column. `pool_mode` is sampled per band.

Flow control works through the banks:

- When a band is complete, the scheduler marks its bank full and moves to the
  other bank.
- The streamer releases a bank once it has sent the band's last window.
- If the back-end holds `out_ready` low long enough that both banks are full, the
  scheduler **stalls** before the next band. No result is ever overwritten; an
  assertion checks this.

With the back-end always ready, a band's pooled output (7 x 160 values) drains in
fewer clocks than the next band's 4 conversions (2,064 clocks), so the front-end
never stalls.

## Modules

| module | kind | role |
|---|---|---|
| `p2m_pkg` | package | pooling/phase enums, size and address functions |
| `p2m_pixel_array` | behavioural model | weight-embedded pixel array, column-line sums |
| `p2m_ramp_generator` | behavioural model | shared ADC ramp, per-channel slope |
| `p2m_comparator` | behavioural model | column comparator |
| `p2m_relu_counter` | RTL | up/down column counter, BN shift, ReLU, saturation |
| `p2m_adc_sequencer` | RTL | timing of one two-ramp conversion |
| `p2m_scheduler` | RTL | channel/band/residue/phase order, bank hand-over, stall |
| `p2m_register_bank` | RTL | double-banked ReLU registers |
| `p2m_pooling_unit` | RTL | 2x2 average / max / bypass |
| `p2m_pool_streamer` | RTL | window walk, pooling, output stream |
| `p2m_frontend` | RTL top | the sensor chip |

Every file opens with a comment on the module's function, interface and timing.

### Top-level interface (`p2m_frontend`)

- **Clock and reset:** `clk`, active-low asynchronous `rst_n`.
- **Scene:** `pix_we/pix_row/pix_col/pix_val` load one pixel per clock. In the
  real chip this is the exposure.
- **Weights:** `w_we/w_ch/w_r/w_c/w_val` load one signed 4-bit weight per clock,
  per channel and kernel position. In the real chip the weights are fixed
  transistor widths, or non-volatile memory in a programmable variant.
- **Batch norm:** `bn_step[c]` and `bn_shift[c]`, per channel.
- **Pooling mode:** `pool_mode` selects `POOL_AVG`, `POOL_MAX` or `POOL_NONE`.
- **Frame control:**
  - `frame_start` is a one-clock pulse, accepted while `frame_busy` is low.
  - `frame_done` pulses once the last activation has been accepted.
  - `stall` and `conv_count` are status outputs.
- **Output stream:** `out_valid/out_ready`, carrying `out_data`, `out_ch`,
  `out_row` and `out_col`.

## What is modelled, and where this design departs from the paper

- **Analog parts are behavioural models.** The pixel array, ramp and comparator
  use integer "analog" units. The models leave out the analog non-idealities
  that the paper folds into training. The pixel-array model computes its column
  sums in one clock at `sample`.
- **The kernel runs over the raw sensor mosaic**, one value per pixel. The
  paper's 4/3 demosaicing factor appears only in the bandwidth arithmetic.
- **Sizes the paper does not give were chosen here:**
  - the 720x1280 array (the BDD100K frame, where the paper quotes 1.06 MPixel);
  - padding 3;
  - the 2x2 pooling window;
  - 4-bit weights and the port widths.
- **The conversion timing is this design's own.** The paper gives none.
- **Added here, not taken from the paper:** the two-bank register bank, the band
  order, the output handshake, and the stall.
- **Not built:** the paper's suggestion of two ADCs per column to double the frame
  rate. The back-end (processing elements, adder trees, ALUs, buffers, DRAM and
  CPU of its Fig. 1, produced there by an FPGA HLS flow) is not in this RTL.
- **No frame-rate claim.** The paper gives no ADC clock frequency. 430,484 clocks
  per frame means 17 frames/s needs at least a 7.3 MHz conversion clock.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. With plain Verilator:

    verilator --binary --timing --assert -Irtl rtl/p2m_pkg.sv tb/tb_p2m_frontend.sv \
              --top-module tb_p2m_frontend -Mdir obj -o sim && ./obj/sim

Verilator finds the other modules through `-Irtl`. The end-to-end testbenches
compare every output activation with a reference computed in the testbench from
the scene and weights, using integer arithmetic.

| testbench | what it runs |
|---|---|
| `tb_p2m_frontend` | 64x32 array, 2 channels, four frames |
| `tb_p2m_frontend_full` | default build, one frame |
| `tb_p2m_frontend_s2` | the paper's stride-2 configuration, small array |
| `tb_p2m_frontend_s6` | the paper's stride-6 configuration, small array |

`tb_p2m_frontend` covers:

- average, max and no pooling, switched between frames;
- a slow back-end that forces scheduler stalls;
- ReLU clipping and ADC saturation;
- conversion counts;
- frame length.

`tb_p2m_frontend_full` runs the default 720x1280, 16-channel build:

- 230,400 activations;
- 832 conversions;
- about 8 s of simulation.

`tb_p2m_frontend_s2` and `tb_p2m_frontend_s6` cover the paper's S = 2 and S = 6
configurations on a small array.

The block testbenches check:

- counter arithmetic;
- conversion timing (515 clocks);
- scheduler order, bank hand-over, stall, and the Eq. (2) count;
- register-bank contents;
- window addressing and pooling under back-pressure;
- the pixel-array sums.

To build another configuration, override `S`, `CO`, `H_IN` or `W_IN` on
`p2m_frontend`. The schedule, register bank size and addressing follow from
the package functions.
