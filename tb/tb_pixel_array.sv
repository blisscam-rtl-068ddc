// tb_pixel_array -- a small array (8 x 12) driven phase by phase through
// frames: checks the event map read port against the scene, that only ROI
// pixels can be sampled, the per-column readout through the decoders (ADC
// code of sampled pixels, 0 otherwise) and the sampled-pixel count.
`include "tb_check.svh"
module tb_pixel_array;
  import blisscam_pkg::*;
  localparam int ROWS = 8, COLS = 12, VW = 10, SIG = 15;
  logic clk = 0, rst_n = 0;
  pix_phase_e phase = PH_IDLE;
  logic [3:0] bit_idx = '0, theta = 4'd5;
  logic [VW-1:0] v_pixel [ROWS][COLS];
  logic signed [VW+1:0] v_th1 = 12'(SIG), v_th2 = -12'(SIG + 1);
  logic [VW-1:0] v_ramp = '1;
  logic force_sample = 0, col_start = 0, col_step = 0, col_active, col_last;
  roi_t roi;
  logic [VW-1:0] col_data [ROWS];
  logic [15:0] ev_row_addr = '0;
  logic [COLS-1:0] ev_row_bits;
  logic [31:0] sampled_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pixel_array #(.ROWS(ROWS), .COLS(COLS), .VW(VW)) dut (.clk, .rst_n, .phase, .bit_idx, .v_pixel, .v_th1, .v_th2,
    .v_ramp, .theta, .force_sample, .roi, .col_start, .col_step, .col_active, .col_last, .col_data,
    .ev_row_addr, .ev_row_bits, .sampled_count);
  `WATCHDOG(clk, 400000)

  logic [COLS-1:0] smp [ROWS];
  for (genvar r = 0; r < ROWS; r++) begin : g_peek
    assign smp[r] = dut.g_row[r].u_row.adc_en;
  end

  int prev [ROWS][COLS], cur [ROWS][COLS];
  task automatic ph(input pix_phase_e p, input int n);
    phase = p; repeat (n) @(negedge clk);
  endtask

  initial begin
    int x1, x2, y1, y2, nsmp, nev;
    roi = '0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      prev[r][c] = $urandom_range(1023); v_pixel[r][c] = VW'(prev[r][c]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    ph(PH_HOLD, 1);
    for (int f = 0; f < 8; f++) begin
      x1 = $urandom_range(COLS - 1); x2 = $urandom_range(COLS - 1);
      y1 = $urandom_range(ROWS - 1); y2 = $urandom_range(ROWS - 1);
      force_sample = (f == 7);
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
        cur[r][c] = prev[r][c] + (($urandom_range(2) == 0) ? int'($urandom_range(100)) - 50 : 0);
        if (cur[r][c] < 0) cur[r][c] = 0; if (cur[r][c] > 1023) cur[r][c] = 1023;
      end
      ph(PH_EXPOSE, 1);
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) v_pixel[r][c] = VW'(cur[r][c]);
      ph(PH_EXPOSE, 2);
      ph(PH_EV_POS, 2); ph(PH_EV_NEG, 2);
      phase = PH_ROI;
      nev = 0;
      for (int r = 0; r < ROWS; r++) begin
        ev_row_addr = 16'(r); #1;
        for (int c = 0; c < COLS; c++) begin
          int d; d = prev[r][c] - cur[r][c];
          `CHECK(ev_row_bits[c] == (d > SIG || d < -SIG), "event map row read")
          nev += ev_row_bits[c];
        end
      end
      @(negedge clk);
      roi = '{x1: 16'(x1), x2: 16'(x2), y1: 16'(y1), y2: 16'(y2)};
      ph(PH_SRAM_OFF, 1); ph(PH_POWERUP, 1);
      for (int b = 0; b < 10; b++) begin bit_idx = 4'(b); ph(PH_POPCOUNT, 1); end
      ph(PH_DECIDE, 1);
      nsmp = 0;
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
        int inroi;
        inroi = (r >= (y1 < y2 ? y1 : y2)) && (r <= (y1 < y2 ? y2 : y1)) && (c >= (x1 < x2 ? x1 : x2)) && (c <= (x1 < x2 ? x2 : x1));
        if (!inroi) `CHECK(smp[r][c] == 1'b0, "no sampling outside the ROI")
        if (force_sample && inroi) `CHECK(smp[r][c] == 1'b1, "imaging mode samples all ROI pixels")
        nsmp += smp[r][c];
      end
      `CHECK(sampled_count == 32'(nsmp), "sampled count")
      ph(PH_ADC_RST, 2);
      phase = PH_ADC;
      for (int v = 1023; v >= 0; v--) begin v_ramp = VW'(v); @(negedge clk); end
      v_ramp = '1;
      ph(PH_ADC_STORE, 1);
      phase = PH_READOUT;
      col_start = 1; @(negedge clk); col_start = 0;
      for (int c = (x1 < x2 ? x1 : x2); c <= (x1 < x2 ? x2 : x1); c++) begin
        `CHECK(col_active && col_last == (c == (x1 < x2 ? x2 : x1)), "column token")
        for (int r = 0; r < ROWS; r++)
          `CHECK(col_data[r] == (smp[r][c] ? VW'(1023 - cur[r][c]) : '0), "column readout")
        col_step = 1; @(negedge clk); col_step = 0;
      end
      ph(PH_HOLD, 1);
      prev = cur;
    end
    `TB_FINISH
  end
endmodule
