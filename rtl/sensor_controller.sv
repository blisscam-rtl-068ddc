// sensor_controller -- frame sequencer of the sensor.
//
// A frame, started by frame_start, runs through these phases in order (the
// phase is broadcast to all pixels, see dps_pixel):
//   EXPOSE     exposure_cycles cycles; the analog memory holds the previous
//              frame while the new one integrates.
//   EV_POS     SETTLE cycles with +sigma on V_th1,
//   EV_NEG     SETTLE cycles with -sigma on V_th2: the event map is formed.
//   ROI        event_map_ready is high; waits for roi_valid from the in-sensor
//              NPU and latches its ROI.
//   SRAM_OFF, POWERUP   one cycle each: the pixel SRAM is power-cycled.
//   POPCOUNT   10 cycles, bit_idx 0..9: pixels count their power-up ones.
//   DECIDE     one cycle: pixels latch the skip decision.
//   ADC_RST    AZ_CYCLES cycles of auto-zero.
//   ADC        2^VW cycles; v_ramp falls from 2^VW-1 to 0, one LSB a cycle.
//   ADC_STORE  one cycle.
//   READOUT    the column token starts at the first ROI column; each column
//              is loaded into the output buffer, which is left to drain before
//              the token steps, until the last ROI column has drained.
//   HOLD       one cycle: the frame just read is copied into the analog
//              memory as the reference for the next frame; frame_done pulses.
// In imaging mode (imaging_mode=1, the sensor's conventional full-frame mode)
// the ROI is the whole array, every pixel is quantized, and eventification
// and ROI prediction are skipped.
//
// The order of operations (exposure, eventification, ROI prediction,
// sampling, readout) and the use of +sigma then -sigma follow the design.
// The phase lengths (SETTLE, AZ_CYCLES), the drain-then-step readout and the
// frame_start/frame_done handshake are choices of this implementation.
//
// Lint note: the simulation assertions use `disable iff (!rst_n)`, which the
// linter reports as rst_n being used both as an asynchronous reset and as a
// synchronous signal (SYNCASYNCNET).  The assertions are not hardware; the
// flops themselves use rst_n only as an asynchronous reset.
module sensor_controller
  import blisscam_pkg::*;
#(
  parameter int unsigned ROWS      = 400,
  parameter int unsigned COLS      = 640,
  parameter int unsigned VW        = PIX_W,
  parameter int unsigned SETTLE    = 2,     // cycles per threshold comparison
  parameter int unsigned AZ_CYCLES = 2,     // auto-zero cycles before the ramp
  parameter int unsigned NBITS     = 10     // power-up bits summed per pixel
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  frame_start,
  input  logic                  imaging_mode,
  input  logic [31:0]           exposure_cycles,
  input  logic [VW-1:0]         sigma,
  // in-sensor NPU
  output logic                  event_map_ready,
  input  logic                  roi_valid,
  input  roi_t                  roi_in,
  // pixel array
  output pix_phase_e            phase,
  output logic [3:0]            bit_idx,
  output logic [VW-1:0]         v_ramp,
  output logic signed [VW+1:0]  v_th1,
  output logic signed [VW+1:0]  v_th2,
  output logic                  force_sample,
  output roi_t                  roi,
  output logic                  col_start,
  output logic                  col_step,
  input  logic                  col_active,
  input  logic                  col_last,
  // output buffer
  output logic                  buf_load,
  output logic                  buf_frame_last,
  input  logic                  buf_idle,
  // status
  output logic                  busy,
  output logic                  frame_done
);
  typedef enum logic [1:0] { R_START, R_LOAD, R_WAIT } rd_state_e;

  logic [31:0] cnt;
  rd_state_e   rd;
  logic        mode_q;

  assign v_th1           = $signed({2'b00, sigma});
  // The comparator decides F(t-1)-F(t) > V_th strictly; on integer codes the
  // negative threshold sits one LSB below -sigma so that the pair of
  // decisions is exactly |F(t-1)-F(t)| > sigma.
  assign v_th2           = -$signed({2'b00, sigma}) - (VW+2)'(1);
  assign v_ramp          = (phase == PH_ADC) ? VW'((1 << VW) - 1 - int'(cnt)) : '1;
  assign bit_idx         = (phase == PH_POPCOUNT) ? cnt[3:0] : '0;
  assign force_sample    = mode_q;
  assign event_map_ready = (phase == PH_ROI);
  assign busy            = (phase != PH_IDLE);

  always_comb begin
    col_start = 1'b0; col_step = 1'b0; buf_load = 1'b0; buf_frame_last = 1'b0;
    if (phase == PH_READOUT) begin
      unique case (rd)
        R_START: col_start = 1'b1;
        R_LOAD:  begin buf_load = col_active && buf_idle; buf_frame_last = col_last; end
        R_WAIT:  col_step = buf_idle && !col_last;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= PH_IDLE;
      cnt        <= '0;
      rd         <= R_START;
      mode_q     <= 1'b0;
      roi        <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      cnt        <= cnt + 1'b1;
      unique case (phase)
        PH_IDLE: begin
          cnt <= '0;
          if (frame_start) begin
            mode_q <= imaging_mode;
            phase  <= PH_EXPOSE;
          end
        end
        PH_EXPOSE: if (cnt + 1 >= exposure_cycles) begin
          cnt <= '0;
          if (mode_q) begin
            roi   <= '{x1: '0, x2: COORD_W'(COLS - 1), y1: '0, y2: COORD_W'(ROWS - 1)};
            phase <= PH_SRAM_OFF;
          end else phase <= PH_EV_POS;
        end
        PH_EV_POS: if (cnt == SETTLE - 1) begin cnt <= '0; phase <= PH_EV_NEG; end
        PH_EV_NEG: if (cnt == SETTLE - 1) begin cnt <= '0; phase <= PH_ROI; end
        PH_ROI: if (roi_valid) begin roi <= roi_in; cnt <= '0; phase <= PH_SRAM_OFF; end
        PH_SRAM_OFF: begin cnt <= '0; phase <= PH_POWERUP; end
        PH_POWERUP:  begin cnt <= '0; phase <= PH_POPCOUNT; end
        PH_POPCOUNT: if (cnt == NBITS - 1) begin cnt <= '0; phase <= PH_DECIDE; end
        PH_DECIDE:   begin cnt <= '0; phase <= PH_ADC_RST; end
        PH_ADC_RST:  if (cnt == AZ_CYCLES - 1) begin cnt <= '0; phase <= PH_ADC; end
        PH_ADC:      if (cnt == (1 << VW) - 1) begin cnt <= '0; phase <= PH_ADC_STORE; end
        PH_ADC_STORE: begin cnt <= '0; rd <= R_START; phase <= PH_READOUT; end
        PH_READOUT: begin
          unique case (rd)
            R_START: rd <= R_LOAD;
            R_LOAD:  if (!col_active)  phase <= PH_HOLD;
                     else if (buf_idle) rd <= R_WAIT;
            R_WAIT:  if (buf_idle) begin
                       if (col_last) phase <= PH_HOLD;
                       else          rd    <= R_LOAD;
                     end
            default: rd <= R_START;
          endcase
        end
        PH_HOLD: begin phase <= PH_IDLE; frame_done <= 1'b1; end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  a_roi_wait: assert property (@(posedge clk) disable iff (!rst_n)
    (phase == PH_ROI && !roi_valid) |=> phase == PH_ROI);
endmodule
