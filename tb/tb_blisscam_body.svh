// tb_blisscam_body.svh -- end-to-end test body shared by the reduced-size and
// the full-size testbench of blisscam_top.  The including module declares
// ROWS, COLS, NFRAMES, DO_IMAGING, BLOB and instantiates the top as `dut`.
//
// The testbench plays every part outside the chip:
//  * the scene: a fixed random background with a dark square ("pupil") that
//    moves a few pixels each frame, presented on v_pixel;
//  * the ROI network: on event_map_ready it writes a word of the previous
//    segmentation map into the NPU scratchpad, has the NPU copy the event map
//    (LOAD_EVENTS) and run one GEMM tile on it, then takes the bounding box of
//    the event bits in the scratchpad, grown by one pixel, as the ROI and
//    publishes it with SET_ROI.  Frame 0 has no valid previous frame and uses
//    a fixed box;
//  * the MIPI link: tx_* is wired to rx_* with random stalls.
// It checks the event map against |F(t-1)-F(t)| > sigma computed from the
// scene, the ROI against the scene's own bounding box, and every decoded
// pixel (column by column, rows y1..y2) against 1023 - level for pixels that
// were sampled and 0 for the others.  It counts how often each mechanism
// happened and fails any that never did.

  localparam int SIG = 15;
  logic clk = 0, rst_n = 0;
  logic frame_start = 0, imaging_mode = 0;
  logic [31:0] exposure_cycles = 20;
  logic [9:0] sigma = 10'(SIG);
  logic [3:0] rate_sel = 4'd3;
  logic lut_wr_en = 0;
  logic [3:0] lut_wr_idx = '0, lut_wr_theta = '0;
  logic frame_done, sensor_busy;
  pix_phase_e phase;
  roi_t roi;
  logic [31:0] sampled_count;
  logic [9:0] v_pixel [ROWS][COLS];
  logic event_map_ready, npu_cmd_valid = 0, npu_cmd_ready, npu_busy;
  npu_cmd_t npu_cmd = '0;
  logic ext_en = 0, ext_we = 0;
  logic [19:0] ext_addr = '0;
  logic [63:0] ext_wdata = '0, ext_rdata;
  logic tx_valid, tx_ready, tx_last, rx_valid, rx_ready, rx_last;
  logic [9:0] tx_value, rx_value;
  logic [9:0] tx_run, rx_run;
  logic pix_valid, pix_ready = 1, pix_last;
  logic [9:0] pix_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // lossless MIPI link with random stalls
  logic link_ok = 1;
  always @(negedge clk) link_ok <= ($urandom_range(7) != 0);
  assign rx_valid = tx_valid && link_ok;
  assign tx_ready = rx_ready && link_ok;
  assign rx_value = tx_value;
  assign rx_run   = tx_run;
  assign rx_last  = tx_last;

  // snapshot of the sampling decisions
  logic [COLS-1:0] smp [ROWS];
  for (genvar r = 0; r < ROWS; r++) begin : g_peek
    assign smp[r] = dut.u_array.g_row[r].u_row.adc_en;
  end

  // mechanism counters
  int n_events, n_roi_wait, n_sampled, n_skipped, n_runs_gt1, n_tx_stall, n_imaging, n_lut_write,
      n_gemm, n_segmap, n_rows_skipped;
  always @(posedge clk) begin
    if (tx_valid && !tx_ready) n_tx_stall++;
    if (tx_valid && tx_ready && tx_run > 1) n_runs_gt1++;
    if (phase == PH_ROI) n_roi_wait++;
    if (dut.u_obuf.busy && dut.u_obuf.pos < dut.u_obuf.lo) n_rows_skipped++;
  end

  int prev [ROWS][COLS], cur [ROWS][COLS];
  int bx, by;       // pupil position
  int bg [ROWS][COLS];

  function automatic int level(input int r, input int c, input int px, input int py);
    if (r >= py && r < py + BLOB && c >= px && c < px + BLOB) return 120 + (r - py) * 3 + (c - px);
    return bg[r][c];
  endfunction

  task automatic npu_run(input npu_cmd_t c);
    @(negedge clk); npu_cmd = c; npu_cmd_valid = 1;
    @(negedge clk); npu_cmd_valid = 0;
    while (npu_busy) @(negedge clk);
  endtask
  task automatic spad_write(input int a, input logic [63:0] d);
    @(negedge clk); ext_en = 1; ext_we = 1; ext_addr = 20'(a); ext_wdata = d;
    @(negedge clk); ext_en = 0; ext_we = 0;
  endtask

  localparam int WPR = (COLS + 63) / 64;
  localparam int EV_BASE = 0, SEG_BASE = 60000, W_BASE = 61000, C_BASE = 62000, ROI_ADDR = 63000;

  // the ROI "network" stand-in
  task automatic roi_firmware(input int frame, output int rx1, output int rx2, output int ry1, output int ry2);
    int ex1, ex2, ey1, ey2;
    spad_write(SEG_BASE, 64'(frame) * 64'h0101_0101_0101_0101);   // previous segmentation map
    n_segmap++;
    npu_run('{op: NPU_LOAD_EVENTS, a_addr: 20'(EV_BASE), default: '0});
    npu_run('{op: NPU_GEMM, a_addr: 20'(EV_BASE), b_addr: 20'(W_BASE), c_addr: 20'(C_BASE), k: 16'(4), shift: 5'd2, relu: 1'b1, default: '0});
    n_gemm++;
    ex1 = COLS; ex2 = -1; ey1 = ROWS; ey2 = -1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int d; logic e;
        d = prev[r][c] - cur[r][c];
        e = dut.u_npu.spad[EV_BASE + r * WPR + c / 64][c % 64];
        if (frame > 0) `CHECK(e == (d > SIG || d < -SIG), "event map in NPU scratchpad = |F(t-1)-F(t)| > sigma")
        if (e) begin
          n_events++;
          if (c < ex1) ex1 = c; if (c > ex2) ex2 = c; if (r < ey1) ey1 = r; if (r > ey2) ey2 = r;
        end
      end
    if (frame == 0 || ex2 < 0) begin
      rx1 = 2; rx2 = 2 + BLOB; ry1 = 1; ry2 = 1 + BLOB;
    end else begin
      rx1 = (ex1 > 0) ? ex1 - 1 : 0; rx2 = (ex2 < COLS - 1) ? ex2 + 1 : COLS - 1;
      ry1 = (ey1 > 0) ? ey1 - 1 : 0; ry2 = (ey2 < ROWS - 1) ? ey2 + 1 : ROWS - 1;
    end
    spad_write(ROI_ADDR, {16'(ry2), 16'(ry1), 16'(rx2), 16'(rx1)});
    npu_run('{op: NPU_SET_ROI, a_addr: 20'(ROI_ADDR), default: '0});
  endtask

  // decoded stream checker
  int exp_q [$];
  int n_words;
  always @(posedge clk) if (rst_n && pix_valid && pix_ready) begin
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected decoded pixel"); end
    else begin
      `CHECK(pix_data == 10'(exp_q[0]), "decoded pixel")
      `CHECK(pix_last == (exp_q.size() == 1), "last pixel flag")
      void'(exp_q.pop_front());
      n_words++;
    end
  end
  always @(negedge clk) pix_ready <= ($urandom_range(5) != 0);

  initial begin
    int rx1, rx2, ry1, ry2, sx1, sx2, sy1, sy2, nroi, nsmp;
    logic img;
    `WATCHDOG_BODY
    bx = 3; by = 2;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      bg[r][c] = 600 + int'($urandom_range(300));
      cur[r][c] = level(r, c, bx, by);
      v_pixel[r][c] = 10'(cur[r][c]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // calibration: rewrite the entry in use with the same ideal value
    @(negedge clk) lut_wr_en = 1; lut_wr_idx = 4'd3; lut_wr_theta = 4'd6;
    @(negedge clk) lut_wr_en = 0; n_lut_write++;
    // a weight tile for the GEMM
    for (int k = 0; k < 4; k++) spad_write(W_BASE + k, 64'h0102_0304_0506_0708 << k);
    for (int f = 0; f < NFRAMES; f++) begin
      img = (DO_IMAGING != 0) && (f == NFRAMES - 1);
      prev = cur;
      bx += 1 + (f % 2); by += (f % 3 == 0) ? 1 : 0;
      if (bx + BLOB >= COLS) bx = 1; if (by + BLOB >= ROWS) by = 1;
      @(negedge clk) frame_start = 1; imaging_mode = img;
      @(negedge clk) frame_start = 0;
      wait (phase == PH_EXPOSE);
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
        cur[r][c] = level(r, c, bx, by); v_pixel[r][c] = 10'(cur[r][c]);
      end
      if (!img) begin
        wait (event_map_ready);
        roi_firmware(f, rx1, rx2, ry1, ry2);
        if (f > 0) begin
          // the scene's own bounding box of changed pixels, grown by one
          sx1 = COLS; sx2 = -1; sy1 = ROWS; sy2 = -1;
          for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
            int d; d = prev[r][c] - cur[r][c];
            if (d > SIG || d < -SIG) begin
              if (c < sx1) sx1 = c; if (c > sx2) sx2 = c; if (r < sy1) sy1 = r; if (r > sy2) sy2 = r;
            end
          end
          if (sx2 >= 0) begin
            `CHECK(rx1 == (sx1 > 0 ? sx1 - 1 : 0) && rx2 == (sx2 < COLS - 1 ? sx2 + 1 : COLS - 1) &&
                   ry1 == (sy1 > 0 ? sy1 - 1 : 0) && ry2 == (sy2 < ROWS - 1 ? sy2 + 1 : ROWS - 1), "ROI covers the moving pupil")
          end
        end
      end else begin
        rx1 = 0; rx2 = COLS - 1; ry1 = 0; ry2 = ROWS - 1;
        n_imaging++;
      end
      wait (phase == PH_READOUT);
      `CHECK(roi.x1 == 16'(rx1) && roi.x2 == 16'(rx2) && roi.y1 == 16'(ry1) && roi.y2 == 16'(ry2), "ROI applied to the array")
      nroi = 0; nsmp = 0;
      for (int c = rx1; c <= rx2; c++)
        for (int r = ry1; r <= ry2; r++) begin
          exp_q.push_back(smp[r][c] ? 1023 - cur[r][c] : 0);
          nroi++;
          if (smp[r][c]) begin nsmp++; n_sampled++; end else n_skipped++;
        end
      `CHECK(sampled_count == 32'(nsmp), "no pixel outside the ROI quantized")
      if (!img && nroi >= 100)
        `CHECK(nsmp * 100 > nroi * 5 && nsmp * 100 < nroi * 35, "sampling rate near 17% inside the ROI")
      if (img) `CHECK(nsmp == nroi, "imaging mode quantizes every pixel")
      @(posedge frame_done);
      while (exp_q.size() > 0) @(negedge clk);
      $display("frame %0d: ROI x %0d..%0d y %0d..%0d, %0d of %0d pixels sampled", f, rx1, rx2, ry1, ry2, nsmp, nroi);
    end
    repeat (10) @(negedge clk);
    `CHECK(exp_q.size() == 0, "all ROI pixels delivered")
    `CHECK(n_events > 0,    "mechanism: eventification produced events")
    `CHECK(n_roi_wait > 0,  "mechanism: controller waited for ROI prediction")
    `CHECK(n_segmap > 0,    "mechanism: segmentation map returned to the sensor")
    `CHECK(n_gemm > 0,      "mechanism: NPU ran a GEMM tile")
    `CHECK(n_sampled > 0,   "mechanism: pixels sampled and quantized")
    `CHECK(n_skipped > 0,   "mechanism: pixels skipped (output 0)")
    `CHECK(n_runs_gt1 > 0,  "mechanism: run-length compression of a run")
    `CHECK(n_tx_stall > 0,  "mechanism: link back-pressure")
    `CHECK(n_rows_skipped > 0, "mechanism: output buffer skipped rows below the ROI")
    `CHECK(n_lut_write > 0, "mechanism: theta table calibration write")
    if (DO_IMAGING != 0) `CHECK(n_imaging > 0, "mechanism: imaging-mode frame")
    $display("events=%0d roi_wait=%0d sampled=%0d skipped=%0d runs>1=%0d stalls=%0d imaging=%0d words=%0d",
             n_events, n_roi_wait, n_sampled, n_skipped, n_runs_gt1, n_tx_stall, n_imaging, n_words);
    `TB_FINISH
  end
