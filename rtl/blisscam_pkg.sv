// blisscam_pkg -- types and constants shared by the in-sensor sparse-sampling
// sensor and its host-side decoder.
//
// The sensor runs one frame as a fixed sequence of phases that are broadcast
// to every pixel (pix_phase_e).  The phase order follows the frame timing of
// the design: hold the previous frame in the analog memory during exposure,
// eventify against +sigma and then -sigma, hand the event map to the in-sensor
// NPU for ROI prediction, power the pixel SRAM down and up again to harvest
// random bits, count them, decide per pixel whether to quantize, run the
// single-slope ADC and read the ROI out column by column.  The split into these
// particular phases, their encoding and the widths below are choices of this
// implementation.
package blisscam_pkg;

  // Pixel value width: the per-pixel SRAM and SS ADC are 10 bits.
  localparam int unsigned PIX_W   = 10;
  // Width of the random-sample threshold theta (4 bits, 16-entry table).
  localparam int unsigned THETA_W = 4;
  // Coordinate width of an ROI corner (enough for any array up to 65535).
  localparam int unsigned COORD_W = 16;

  // Phase broadcast from the sensor controller to every pixel.
  typedef enum logic [3:0] {
    PH_IDLE      = 4'd0,   // nothing happens, analog memory keeps its value
    PH_HOLD      = 4'd1,   // Hold + Sample closed: copy the current frame onto C_az-
    PH_EXPOSE    = 4'd2,   // Hold closed, Sample open: analog memory holds F(t-1)
    PH_EV_POS    = 4'd3,   // Hold open, S1 closed (+sigma): compare F(t-1)-F(t)
    PH_EV_NEG    = 4'd4,   // Hold open, S2 closed (-sigma)
    PH_ROI       = 4'd5,   // event bit sits in SRAM bit 0 for the NPU to read
    PH_SRAM_OFF  = 4'd6,   // SRAM power-gated after the event map was consumed
    PH_POWERUP   = 4'd7,   // SRAM powered up: cells latch random bits
    PH_POPCOUNT  = 4'd8,   // counter sums the power-up bits, one bit per cycle
    PH_DECIDE    = 4'd9,   // "If Skip ADC" decision is latched
    PH_ADC_RST   = 4'd10,  // auto-zero / CRST before the ramp
    PH_ADC       = 4'd11,  // ramp runs, counter counts until the comparator flips
    PH_ADC_STORE = 4'd12,  // counter value written to the SRAM
    PH_READOUT   = 4'd13   // column-wise readout of the ROI
  } pix_phase_e;

  // ROI corners as produced by the in-sensor NPU: (x1,y1) and (x2,y2).
  typedef struct packed {
    logic [COORD_W-1:0] x1;
    logic [COORD_W-1:0] x2;
    logic [COORD_W-1:0] y1;
    logic [COORD_W-1:0] y2;
  } roi_t;

  // In-sensor NPU commands.
  typedef enum logic [1:0] {
    NPU_LOAD_EVENTS = 2'd0,  // copy the event map into the scratchpad
    NPU_GEMM        = 2'd1,  // one N x N output tile on the systolic array
    NPU_SET_ROI     = 2'd2,  // publish a scratchpad word as the ROI corners
    NPU_NOP         = 2'd3
  } npu_op_e;

  typedef struct packed {
    npu_op_e     op;
    logic [19:0] a_addr;   // LOAD_EVENTS: destination; GEMM: A; SET_ROI: source
    logic [19:0] b_addr;   // GEMM: B
    logic [19:0] c_addr;   // GEMM: destination of the int8 result tile
    logic [15:0] k;        // GEMM: reduction length
    logic [4:0]  shift;    // GEMM: right shift applied before saturation to int8
    logic        relu;     // GEMM: clamp negative results to zero
  } npu_cmd_t;

endpackage
