// pixel_array -- the ROWS x COLS array of digital pixels (bottom layer) with
// its row and column decoders.
//
// Every pixel receives the broadcast frame phase, the analog reference codes
// (v_th1 = +sigma, v_th2 = -sigma, the ramp) and theta.  The row decoder
// raises all ROI rows at once and the column decoder walks a token across the
// ROI columns; during PH_READOUT the column holding the token drives one value
// per row onto the row buses (col_data), a sampled pixel its ADC code and a
// skipped pixel 0.  The in-sensor NPU reads the event map a row at a time
// through ev_row_addr / ev_row_bits.
//
// Each array row is one dps_pixel instance holding COLS pixel circuits.  The
// NPU's row-wise access to the event bits is a choice of this implementation.
//
// Timing: ev_row_bits and col_data are combinational from the pixel state;
// column start/step act on the next rising edge.
module pixel_array
  import blisscam_pkg::*;
#(
  parameter int unsigned ROWS = 400,
  parameter int unsigned COLS = 640,
  parameter int unsigned VW   = PIX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  pix_phase_e            phase,
  input  logic [3:0]            bit_idx,
  input  logic [VW-1:0]         v_pixel [ROWS][COLS],
  input  logic signed [VW+1:0]  v_th1,
  input  logic signed [VW+1:0]  v_th2,
  input  logic [VW-1:0]         v_ramp,
  input  logic [THETA_W-1:0]    theta,
  input  logic                  force_sample,
  input  roi_t                  roi,
  input  logic                  col_start,
  input  logic                  col_step,
  output logic                  col_active,
  output logic                  col_last,
  output logic [VW-1:0]         col_data [ROWS],   // row buses to the output buffer
  input  logic [COORD_W-1:0]    ev_row_addr,
  output logic [COLS-1:0]       ev_row_bits,
  output logic [31:0]           sampled_count      // pixels that will be quantized
);
  logic [ROWS-1:0] row_sel;
  logic [COLS-1:0] rd_sel, col_in_roi;
  logic [COLS-1:0] ev_bits  [ROWS];
  logic [COLS-1:0] smp_bits [ROWS];

  row_decoder #(.ROWS(ROWS)) u_rowdec (
    .en(1'b1), .y1(roi.y1), .y2(roi.y2), .row_sel
  );

  column_decoder #(.COLS(COLS)) u_coldec (
    .clk, .rst_n, .x1(roi.x1), .x2(roi.x2), .start(col_start), .step(col_step),
    .rd_sel, .col_in_roi, .active(col_active), .last(col_last)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    dps_pixel #(.N(COLS), .VW(VW)) u_row (
      .clk, .rst_n, .phase, .bit_idx, .v_pixel(v_pixel[r]), .v_th1, .v_th2,
      .v_ramp, .theta, .force_sample, .row_sel(row_sel[r]), .col_sel(col_in_roi),
      .rd_sel, .event_bit(ev_bits[r]), .sampled(smp_bits[r]), .row_out(col_data[r])
    );
  end

  assign ev_row_bits = (32'(ev_row_addr) < ROWS) ? ev_bits[ev_row_addr[$clog2(ROWS)-1:0]] : '0;

  // Count of pixels that passed the skip logic (a status value for the host).
  always_comb begin
    sampled_count = '0;
    for (int r = 0; r < ROWS; r++) sampled_count += 32'($countones(smp_bits[r]));
  end
endmodule
