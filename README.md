# BlissCam sensor RTL: in-sensor event map, ROI and random sparse sampling for eye tracking

An eye tracker needs only the few thousand pixels around the eye's moving parts. A
conventional image sensor digitizes and transmits all 256,000 pixels of a 640 × 400 frame
anyway. This design is a stacked digital-pixel sensor that reads out much less data per frame.
It does this in three steps:

1. **Event map.** Each pixel compares its new value with the value it had in the previous
   frame. The result is a one-bit "this pixel changed by more than σ" map.
2. **ROI.** A small NPU on the sensor's logic layer reads that map and produces a bounding box
   (ROI, region of interest).
3. **Sparse sampling.** Inside the box, each pixel decides at random whether to convert itself
   at all. Only about one pixel in five does.

The ROI is then read out column by column. The skipped pixels come out as zeros, and a
run-length encoder squeezes those zeros out before the link. A decoder on the host side rebuilds
the sparse ROI image for the segmentation network.

None of this adds much per-pixel circuitry. The pixel's existing single-slope ADC serves three
purposes, one after another:
- an analog memory;
- a subtract-and-compare circuit;
- the ADC itself.

The pixel's 10-bit SRAM also does three jobs: it stores the event bit, supplies random bits, and
holds the ADC code. The pixel counter both counts random ones and counts ADC ramp steps.

The RTL here covers the whole digital side of that chip: pixel logic, decoders, frame sequencer,
NPU hardware, output buffer and RLE. It also covers the host-side decoder. All parameters default
to the published configuration:
- a 640 × 400 array;
- 10-bit pixels;
- a 4-bit θ and a 16-entry table;
- an 8 × 8 MAC array;
- a 512 KB NPU scratchpad.

## The frame, phase by phase

`sensor_controller` broadcasts a phase code (`pix_phase_e` in `blisscam_pkg`) to every pixel.
Each pixel's behaviour is a pure function of that phase, a few shared wires (σ codes, ramp code,
θ, SRAM bit index) and its own row and column selects.

| phase | cycles | what the pixel does |
|---|---|---|
| EXPOSE | `exposure_cycles` | The comparator acts as a buffer with Hold closed. C_az− keeps F(t−1) while F(t) integrates. |
| EV_POS | 2 | Hold opens and the capacitor now holds F(t−1) − F(t). With V_th1 = +σ, SRAM bit 0 ← (d > σ). |
| EV_NEG | 2 | With V_th2 = −σ−1, SRAM bit 0 \|= ¬(d > −σ−1). Bit 0 is now \|d\| > σ. |
| ROI | until the NPU answers | `event_map_ready` is high. The NPU copies the event bits out row by row and returns the ROI. |
| SRAM_OFF, POWERUP | 1 + 1 | The SRAM is power-cycled. Every cell latches a random bit and the counter is cleared. |
| POPCOUNT | 10 | The counter adds SRAM bit 0…9, one per cycle. |
| DECIDE | 1 | The pixel sets `adc_en` ← in ROI ∧ popcount > θ. |
| ADC_RST | 2 | Auto-zero. The counter is cleared. |
| ADC | 1024 | The ramp falls from 1023 to 0. Where `adc_en` is set, the counter counts while the comparator is low. |
| ADC_STORE | 1 | SRAM ← counter, where `adc_en` is set. |
| READOUT | ROI columns × (y_max+1) | Column-serial readout through the output buffer (see below). |
| HOLD | 1 | Hold and Sample close, so the current frame becomes next frame's reference. `frame_done` pulses. |

Three details of this sequence need care.

**The −σ−1 threshold.** The comparator only tests "greater than". One test against +σ catches
d > σ. To catch d < −σ with the same strict comparator, the design tests d > −σ−1 and inverts the
result. The two steps together give exactly |d| > σ, including at the boundary d = ±σ. The paper
only says that ±σ are applied one after the other on V_th1 and V_th2. The extra LSB is this
design's choice; it makes the circuit match the definition "1 if the difference is greater than σ".

**The ADC code is inverted.** The ramp falls one LSB per cycle, and the count stops when the ramp
drops below the pixel level v. The stored code is therefore 1023 − v. In a real pixel the voltage
falls as light increases, so a larger code means a brighter pixel. The testbenches check against
1023 − v.

**Imaging mode.** `imaging_mode=1` skips eventification and ROI prediction. The ROI is the whole
array and every pixel is quantized (`force_sample`). This is the sensor's ordinary full-frame
mode, used for example to seed the tracker. It is an addition of this design.

## Random sampling and θ

Powering up a 6T SRAM cell leaves it in a random state. The ten cells of a pixel therefore give
ten fair random bits each frame. The counter adds them up to a popcount between 0 and 10. The
pixel is quantized only if popcount > θ.

The number of pixels sampled is set by choosing θ. `theta_lut` maps a 4-bit rate index `r` to θ.
Its reset contents are the ideal values for fair bits: the smallest θ with
P[Binomial(10, ½) > θ] ≤ r/16. That gives:

    r:     0  1  2  3  4  5  6  7  8  9 10 11 12 13 14 15
    θ:    10  7  7  6  6  6  6  5  5  5  4  4  4  4  3  3

For example, r = 3 selects θ = 6, which samples 176/1024 = 17.2 % of the ROI.

A real chip's cells are biased by process variation. The table is meant to be overwritten after
a calibration run, through `lut_wr_*`. The measured statistics that calibration would produce are
not available, so the defaults assume unbiased bits.

The model of the power-up randomness is `pixel_sram`. It is a behavioural model that draws
`$urandom` bits on the rising edge of `pwr` and reads 0 while unpowered. Because of `$urandom` it is a
simulation model only; a synthesised flow needs a real SRAM macro (or an RNG) in its place.

## ROI selection and sparse readout

The ROI arrives as `roi_t {x1, x2, y1, y2}`. Corners may be given in either order.

- `row_decoder` enables every row in [y1, y2] at once.
- `column_decoder` passes a one-hot token from column x1 to column x2.
- In the column that holds the token, each row drives its SRAM word onto the row bus if the pixel
  was sampled, and 0 if it was not. A pixel outside the ROI never runs its ADC.

`output_buffer` is a parallel-in, serial-out shift register, one word per row. It loads a whole
column and shifts it out one row per cycle. Rows above y1 (indices below y1) are shifted out
without being sent, and shifting stops at y2. One column therefore costs y_max + 1 cycles.

The controller waits for the buffer to drain before it steps the token. A 185 × 185 ROI whose
bottom row is row 300 takes 185 × 301 ≈ 56k cycles.

`rle_encoder` turns the word stream into `(value, run)` pairs. The run is a literal count from 1
to 1023 (`RUN_W` = 10 bits); longer runs are split. The last pair of a frame carries
`tx_last`. `rle_decoder` on the host expands the pairs back into the pixel stream `pix_*`. The
stream is column-major over the ROI, rows y1..y2 within each column. Unsampled pixels come out as
0. Every stream port uses a valid/ready handshake, so the link can stall at any point.

## In-sensor NPU

`insensor_npu` contains:
- an 8 × 8 output-stationary `systolic_array` with int8 operands and int32 accumulators;
- a 512 KB single-port scratchpad of 64-bit words (65,536 words) with a synchronous read;
- a sequencer for three commands.

| command | effect | busy cycles |
|---|---|---|
| `NPU_LOAD_EVENTS` | Copies the event map into the scratchpad from `a_addr`: row r fills words r·10 … r·10+9, with bit c of the row at bit c mod 64 of word c/64. | ROWS·⌈COLS/64⌉ = 4000 |
| `NPU_GEMM` | C = A·B for one 8×8 tile with reduction length k. Word `a_addr+i` is column i of A, word `b_addr+i` is row i of B. The result is shifted right by `shift`, optionally ReLU'd, saturated to int8, and written as 8 words at `c_addr`. | 2k + 3·8 + 1 |
| `NPU_SET_ROI` | Reads the word at `a_addr` as {y2, y1, x2, x1} (x1 in the low 16 bits) and hands it to the pixel array. | 2 |

The host reaches the scratchpad through `ext_*`, which only works while the NPU is idle. It uses
that port to load weights and, each frame, the previous frame's segmentation map.

The published ROI network has three convolution layers and two fully connected layers, about
2.1·10⁷ MACs. Its layer shapes and weights are not published, so there is no schedule to build.
The hardware above runs whatever sequence of commands the host's firmware issues.

The end-to-end testbench stands in for the network: it takes the bounding box of the event bits
in the scratchpad and publishes it with `NPU_SET_ROI`. Budget: 2.1·10⁷ MACs at the GEMM rate of
this design take about 1.6 ms at 0.5 GHz. That fits easily in the 8.3 ms frame period at
120 frames/s.

## Top-level interface (`blisscam_top`)

- **Frame control**
  - Inputs: `frame_start`, `imaging_mode`, `exposure_cycles`, `sigma` (a 10-bit code), `rate_sel`,
    `lut_wr_*`.
  - Status outputs: `frame_done`, `sensor_busy`, `phase`, `roi`, and `sampled_count` (the number
    of pixels that will be quantized this frame).
- **`v_pixel[ROWS][COLS]`**: the 10-bit level of each top-layer photodiode pixel. The analog
  front end is not modelled at the transistor level. The pixel's analog readout
  (`analog_readout`) is a behavioural model that works on these codes.
- **NPU**: `event_map_ready`, the command port `npu_cmd_valid/ready/npu_cmd`, `npu_busy`, and
  the scratchpad port `ext_*`.
- **`tx_*`**: the encoded pairs toward the MIPI CSI-2 transmitter.
- **`rx_*`**: the same pairs arriving at the host. Connect `tx_*` to `rx_*` to model a lossless
  link.
- **`pix_*`**: the decoded ROI pixel stream on the host.

## How the array is modelled

A 640 × 400 array of single-pixel module instances is too large for verilator to elaborate in
reasonable time. `dps_pixel` is therefore written lane-vectorized: one instance holds the N
pixels of one row, with identical per-pixel logic in every lane. These lanes share only what a
real row shares: the phase, the row select and the row output bus. `pixel_array` instantiates
400 of them with N = 640. `analog_readout`, `pixel_counter`, `pixel_sram` and `skip_adc_logic` are
vectorized in the same way, and with N = 1 each of them is a single pixel.

## Where this design departs from the paper or fills gaps

- The photodiode pixel, the analog bias and ramp generators, the MIPI PHY and the host NPU are
  not part of the RTL. Pixel levels enter as codes, and the σ, V_th and ramp values are codes
  produced by the controller.
- The ROI network is run as host-issued NPU commands. The NPU's command set, data layout and
  requantisation are this design's own.
- The following are this design's own choices:
  - the phase lengths (2 settle cycles, 2 auto-zero cycles);
  - the drain-before-step readout;
  - the −σ−1 threshold;
  - the RLE pair format;
  - imaging mode.
- The paper's frame timeline overlaps the sensor stages of one frame with the host's work on the
  previous frame. This design runs the sensor stages of consecutive frames strictly in sequence.
  The host stages lie outside the chip, so they are still free to overlap. The analog memory is
  refreshed in the HOLD phase at the end of each frame. The sensor does not itself wait for the
  previous frame's segmentation map: the host uploads the map through `ext_*` before it issues
  the ROI commands.

## Verification

Every block has a self-checking testbench in `tb/`, built with plain verilator:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_NAME \
        rtl/blisscam_pkg.sv tb/tb_NAME.sv -y rtl -o sim
    obj_dir/sim +verilator+rand+reset+2

Each testbench ends by printing `TB_RESULT checks=N failures=M`. Cycle counts are checked
wherever a latency is defined: the GEMM latency of 2k+25 cycles, 4000 cycles for
`NPU_LOAD_EVENTS`, the phase lengths of the controller, and y_max+1 cycles per output-buffer
column.

**`tb_blisscam_top`** runs the whole chip at 24 × 40 pixels for five frames; the last frame is
in imaging mode.
- The scene is a random background with a moving dark square.
- The testbench plays the ROI network: it issues LOAD_EVENTS, a GEMM tile, then the bounding box
  of the events through SET_ROI.
- The link stalls at random.
- It checks:
  - the event map against |F(t−1) − F(t)| > σ from the scene;
  - the applied ROI;
  - that the sampling rate lies near 17 %;
  - every decoded pixel against 1023 − v or 0.
- It fails if any mechanism never occurred: events, the ROI wait, segmentation-map upload,
  GEMM, sampled and skipped pixels, runs longer than 1, link back-pressure, rows skipped in the
  buffer, the θ-table write, and imaging mode.

**`tb_blisscam_full`** runs the same checks at the full default size (640 × 400, 512 KB
scratchpad) over two frames, without the imaging-mode frame. It takes about five minutes of
simulation.
