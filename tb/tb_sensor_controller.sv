// tb_sensor_controller -- runs frames through the sequencer with models of
// the NPU (roi_valid after a delay), the column decoder and the output buffer
// (busy for a random time per column).  Checks the phase order, the length of
// every fixed phase, the ramp and bit_idx sequences, the thresholds, one
// buffer load per ROI column, and the imaging-mode path.
`include "tb_check.svh"
module tb_sensor_controller;
  import blisscam_pkg::*;
  localparam int ROWS = 20, COLS = 30, VW = 10;
  logic clk = 0, rst_n = 0, frame_start = 0, imaging_mode = 0;
  logic [31:0] exposure_cycles = 37;
  logic [VW-1:0] sigma = 15;
  logic event_map_ready, roi_valid = 0;
  roi_t roi_in, roi;
  pix_phase_e phase;
  logic [3:0] bit_idx;
  logic [VW-1:0] v_ramp;
  logic signed [VW+1:0] v_th1, v_th2;
  logic force_sample, col_start, col_step, col_active, col_last;
  logic buf_load, buf_frame_last, buf_idle, busy, frame_done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sensor_controller #(.ROWS(ROWS), .COLS(COLS), .VW(VW)) dut (.clk, .rst_n, .frame_start, .imaging_mode,
    .exposure_cycles, .sigma, .event_map_ready, .roi_valid, .roi_in, .phase, .bit_idx, .v_ramp, .v_th1, .v_th2,
    .force_sample, .roi, .col_start, .col_step, .col_active, .col_last, .buf_load, .buf_frame_last, .buf_idle,
    .busy, .frame_done);
  `WATCHDOG(clk, 200000)

  // column decoder model
  int tok;
  assign col_active = (tok >= 0);
  assign col_last   = (tok == int'(roi.x2));
  always_ff @(posedge clk)
    if (!rst_n) tok <= -1;
    else if (col_start) tok <= int'(roi.x1);
    else if (col_step) tok <= col_last ? -1 : tok + 1;
  // output buffer model
  int bbusy;
  assign buf_idle = (bbusy == 0);
  always_ff @(posedge clk)
    if (!rst_n) bbusy <= 0;
    else if (buf_load) bbusy <= 1 + $urandom_range(6);
    else if (bbusy > 0) bbusy <= bbusy - 1;

  // phase recorder
  pix_phase_e seq [$];
  int len [$];
  int loads, ramp_ok, bit_ok, adc_cyc, pop_cyc, last_loads;
  always_ff @(posedge clk) if (rst_n) begin
    if (seq.size() == 0 || seq[$] != phase) begin seq.push_back(phase); len.push_back(1); end
    else len[$] = len[$] + 1;
    if (buf_load) begin loads++; if (buf_frame_last) last_loads++; end
    if (phase == PH_ADC) begin
      if (v_ramp != VW'(1023 - adc_cyc)) ramp_ok = 0;
      adc_cyc++;
    end
    if (phase == PH_POPCOUNT) begin
      if (bit_idx != 4'(pop_cyc)) bit_ok = 0;
      pop_cyc++;
    end
  end

  task automatic frame(input logic img, input int x1, input int x2, input int roi_delay);
    seq.delete(); len.delete(); loads = 0; last_loads = 0; ramp_ok = 1; bit_ok = 1; adc_cyc = 0; pop_cyc = 0;
    roi_in = '{x1: 16'(x1), x2: 16'(x2), y1: 16'd2, y2: 16'd9};
    @(negedge clk) frame_start = 1; imaging_mode = img;
    @(negedge clk) frame_start = 0;
    fork
      begin
        if (!img) begin
          wait (event_map_ready);
          repeat (roi_delay) @(negedge clk);
          roi_valid = 1; @(negedge clk); roi_valid = 0;
        end
      end
      begin
        @(posedge frame_done);
      end
    join
    @(negedge clk);
  endtask

  function automatic int plen(input pix_phase_e p);
    for (int i = 0; i < seq.size(); i++) if (seq[i] == p) return len[i];
    return -1;
  endfunction

  initial begin
    roi_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    `CHECK(v_th1 == 12'sd15 && v_th2 == -12'sd16, "thresholds +sigma / -sigma-1LSB")
    for (int f = 0; f < 4; f++) begin
      int x1, x2;
      x1 = $urandom_range(COLS - 1); x2 = x1 + $urandom_range(COLS - 1 - x1);
      frame(0, x1, x2, 5 + f * 3);
      `CHECK(seq.size() == 14, "phase count")
      `CHECK(seq[1] == PH_EXPOSE && seq[2] == PH_EV_POS && seq[3] == PH_EV_NEG && seq[4] == PH_ROI &&
             seq[5] == PH_SRAM_OFF && seq[6] == PH_POWERUP && seq[7] == PH_POPCOUNT && seq[8] == PH_DECIDE &&
             seq[9] == PH_ADC_RST && seq[10] == PH_ADC && seq[11] == PH_ADC_STORE && seq[12] == PH_READOUT &&
             seq[13] == PH_HOLD, "phase order")
      `CHECK(plen(PH_EXPOSE) == 37, "exposure length")
      `CHECK(plen(PH_EV_POS) == 2 && plen(PH_EV_NEG) == 2, "eventification length")
      `CHECK(plen(PH_ROI) == 5 + f * 3, "waits for the ROI")
      `CHECK(plen(PH_POPCOUNT) == 10 && bit_ok == 1, "popcount steps bits 0..9")
      `CHECK(plen(PH_ADC) == 1024 && ramp_ok == 1, "ramp 1023..0 in 1024 cycles")
      `CHECK(loads == x2 - x1 + 1 && last_loads == 1, "one load per ROI column")
      `CHECK(roi.x1 == 16'(x1) && roi.x2 == 16'(x2), "ROI latched")
    end
    frame(1, 0, 0, 0);
    `CHECK(seq[2] == PH_SRAM_OFF, "imaging mode skips eventification and ROI")
    `CHECK(loads == COLS && roi.y2 == 16'(ROWS - 1), "imaging mode reads the full frame")
    `CHECK(force_sample == 1'b1, "imaging mode forces sampling")
    `TB_FINISH
  end
endmodule
