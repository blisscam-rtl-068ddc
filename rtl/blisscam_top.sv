// blisscam_top -- the eye-tracking image sensor with in-sensor sparse
// sampling, together with the run-length decoder that sits on the host side
// of the link.
//
// Sensor side: the frame sequencer (sensor_controller) drives the pixel array
// (pixel_array) through exposure, eventification, ROI prediction, random
// sampling, conversion and readout.  The in-sensor NPU (insensor_npu) reads
// the binary event map out of the pixel SRAMs, runs the ROI network issued on
// its command port, and returns the ROI corners.  The threshold table
// (theta_lut) supplies theta for the requested sampling rate.  During readout
// the ROI columns pass one by one through the output buffer (output_buffer)
// into the run-length encoder (rle_encoder), whose (value, run) pairs leave
// on the tx_* port toward the MIPI CSI-2 transmitter.
//
// Host side: pairs arriving from the MIPI receiver on rx_* are expanded by
// rle_decoder into the ROI pixel stream pix_* (column by column, rows y1..y2
// inside each column, 0 for unsampled pixels) for the segmentation network.
//
// Not inside this module: the top-layer photodiode pixels (their levels enter
// on v_pixel), the MIPI link itself (connect tx_* to rx_* for a lossless
// link), the analog reference generators (carried as codes), the ROI
// network's layer schedule (issued on npu_cmd_*) and the host NPU.  The host
// writes the previous frame's segmentation map and the network weights into
// the NPU scratchpad through ext_*.
module blisscam_top
  import blisscam_pkg::*;
#(
  parameter int unsigned ROWS       = 400,
  parameter int unsigned COLS       = 640,
  parameter int unsigned VW         = PIX_W,
  parameter int unsigned NPU_N      = 8,
  parameter int unsigned SPAD_BYTES = 524288,
  parameter int unsigned RUN_W      = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // frame control
  input  logic                 frame_start,
  input  logic                 imaging_mode,
  input  logic [31:0]          exposure_cycles,
  input  logic [VW-1:0]        sigma,
  input  logic [3:0]           rate_sel,
  input  logic                 lut_wr_en,
  input  logic [3:0]           lut_wr_idx,
  input  logic [THETA_W-1:0]   lut_wr_theta,
  output logic                 frame_done,
  output logic                 sensor_busy,
  output pix_phase_e           phase,
  output roi_t                 roi,
  output logic [31:0]          sampled_count,
  // top-layer pixel levels
  input  logic [VW-1:0]        v_pixel [ROWS][COLS],
  // in-sensor NPU
  output logic                 event_map_ready,
  input  logic                 npu_cmd_valid,
  output logic                 npu_cmd_ready,
  input  npu_cmd_t             npu_cmd,
  output logic                 npu_busy,
  input  logic                 ext_en,
  input  logic                 ext_we,
  input  logic [19:0]          ext_addr,
  input  logic [8*NPU_N-1:0]   ext_wdata,
  output logic [8*NPU_N-1:0]   ext_rdata,
  // sensor -> MIPI transmitter
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output logic [VW-1:0]        tx_value,
  output logic [RUN_W-1:0]     tx_run,
  output logic                 tx_last,
  // MIPI receiver -> host decoder
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  logic [VW-1:0]        rx_value,
  input  logic [RUN_W-1:0]     rx_run,
  input  logic                 rx_last,
  // decoded ROI pixel stream on the host
  output logic                 pix_valid,
  input  logic                 pix_ready,
  output logic [VW-1:0]        pix_data,
  output logic                 pix_last
);
  logic [3:0]           bit_idx;
  logic [VW-1:0]        v_ramp;
  logic signed [VW+1:0] v_th1, v_th2;
  logic [THETA_W-1:0]   theta;
  logic                 force_sample;
  logic                 col_start, col_step, col_active, col_last;
  logic [VW-1:0]        col_data [ROWS];
  logic [COORD_W-1:0]   ev_row_addr;
  logic [COLS-1:0]      ev_row_bits;
  roi_t                 npu_roi;
  logic                 npu_roi_valid;
  logic                 buf_load, buf_frame_last, buf_idle;
  logic                 ob_valid, ob_ready, ob_last;
  logic [VW-1:0]        ob_data;

  sensor_controller #(.ROWS(ROWS), .COLS(COLS), .VW(VW)) u_ctrl (
    .clk, .rst_n, .frame_start, .imaging_mode, .exposure_cycles, .sigma,
    .event_map_ready, .roi_valid(npu_roi_valid), .roi_in(npu_roi),
    .phase, .bit_idx, .v_ramp, .v_th1, .v_th2, .force_sample, .roi,
    .col_start, .col_step, .col_active, .col_last,
    .buf_load, .buf_frame_last, .buf_idle, .busy(sensor_busy), .frame_done
  );

  theta_lut u_lut (
    .clk, .rst_n, .wr_en(lut_wr_en), .wr_idx(lut_wr_idx), .wr_theta(lut_wr_theta),
    .rate_sel, .theta
  );

  pixel_array #(.ROWS(ROWS), .COLS(COLS), .VW(VW)) u_array (
    .clk, .rst_n, .phase, .bit_idx, .v_pixel, .v_th1, .v_th2, .v_ramp, .theta,
    .force_sample, .roi, .col_start, .col_step, .col_active, .col_last, .col_data,
    .ev_row_addr, .ev_row_bits, .sampled_count
  );

  insensor_npu #(.N(NPU_N), .SPAD_BYTES(SPAD_BYTES), .ROWS(ROWS), .COLS(COLS)) u_npu (
    .clk, .rst_n, .cmd_valid(npu_cmd_valid), .cmd_ready(npu_cmd_ready), .cmd(npu_cmd),
    .busy(npu_busy), .ext_en, .ext_we, .ext_addr, .ext_wdata, .ext_rdata,
    .ev_row_addr, .ev_row_bits, .roi(npu_roi), .roi_valid(npu_roi_valid)
  );

  output_buffer #(.ROWS(ROWS), .VW(VW)) u_obuf (
    .clk, .rst_n, .y1(roi.y1), .y2(roi.y2), .load(buf_load), .frame_last(buf_frame_last),
    .col_data, .idle(buf_idle), .out_valid(ob_valid), .out_ready(ob_ready),
    .out_data(ob_data), .out_last(ob_last)
  );

  rle_encoder #(.W(VW), .RW(RUN_W)) u_rle (
    .clk, .rst_n, .in_valid(ob_valid), .in_ready(ob_ready), .in_data(ob_data),
    .in_last(ob_last), .out_valid(tx_valid), .out_ready(tx_ready),
    .out_value(tx_value), .out_run(tx_run), .out_last(tx_last)
  );

  rle_decoder #(.W(VW), .RW(RUN_W)) u_rld (
    .clk, .rst_n, .in_valid(rx_valid), .in_ready(rx_ready), .in_value(rx_value),
    .in_run(rx_run), .in_last(rx_last), .out_valid(pix_valid), .out_ready(pix_ready),
    .out_data(pix_data), .out_last(pix_last)
  );
endmodule
