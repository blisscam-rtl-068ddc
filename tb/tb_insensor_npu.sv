// tb_insensor_npu -- exercises the in-sensor NPU at a reduced size: loads
// operands through the host port, runs GEMM tiles (with shift, ReLU and
// saturation) and compares the int8 results read back with a reference
// product; copies an event map supplied by a reference pixel model and
// checks the packed words; publishes an ROI.  Busy cycle counts are checked
// against the documented latencies.
`include "tb_check.svh"
module tb_insensor_npu;
  import blisscam_pkg::*;
  localparam int N = 8, ROWS = 6, COLS = 100, SPAD = 8192, WPR = 2;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  npu_cmd_t cmd;
  logic ext_en = 0, ext_we = 0;
  logic [19:0] ext_addr = '0;
  logic [63:0] ext_wdata = '0, ext_rdata;
  logic [15:0] ev_row_addr;
  logic [COLS-1:0] ev_row_bits;
  roi_t roi;
  logic roi_valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  insensor_npu #(.N(N), .SPAD_BYTES(SPAD), .ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready,
    .cmd, .busy, .ext_en, .ext_we, .ext_addr, .ext_wdata, .ext_rdata, .ev_row_addr, .ev_row_bits, .roi, .roi_valid);
  `WATCHDOG(clk, 200000)

  // reference event map
  logic [COLS-1:0] evmap [ROWS];
  assign ev_row_bits = (32'(ev_row_addr) < ROWS) ? evmap[3'(ev_row_addr)] : '0;

  task automatic wr(input int a, input logic [63:0] d);
    @(negedge clk) ext_en = 1; ext_we = 1; ext_addr = 20'(a); ext_wdata = d;
    @(negedge clk) ext_en = 0; ext_we = 0;
  endtask
  task automatic rd(input int a, output logic [63:0] d);
    @(negedge clk) ext_en = 1; ext_we = 0; ext_addr = 20'(a);
    @(negedge clk) ext_en = 0;
    d = ext_rdata;
  endtask
  task automatic run(input npu_cmd_t c, output int cyc);
    @(negedge clk) cmd = c; cmd_valid = 1;
    @(negedge clk) cmd_valid = 0;
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
  endtask

  int A [N][40], B [40][N];
  initial begin
    logic [63:0] d;
    int cyc, sh, K;
    cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      K = (t == 0) ? 3 : 1 + $urandom_range(39);
      sh = (t < 2) ? 0 : $urandom_range(8);
      for (int k = 0; k < K; k++) begin
        logic [63:0] wa, wb;
        for (int i = 0; i < N; i++) begin
          A[i][k] = int'($urandom_range(255)) - 128; B[k][i] = int'($urandom_range(255)) - 128;
          if (t < 2) begin A[i][k] = A[i][k] / 16; B[k][i] = B[k][i] / 16; end
          wa[8*i +: 8] = 8'(A[i][k]); wb[8*i +: 8] = 8'(B[k][i]);
        end
        wr(100 + k, wa); wr(300 + k, wb);
      end
      run('{op: NPU_GEMM, a_addr: 100, b_addr: 300, c_addr: 500, k: 16'(K), shift: 5'(sh), relu: t[0], default: '0}, cyc);
      `CHECK(cyc == 2 * K + 3 * N + 1, "GEMM latency 2k+3N+1")
      for (int i = 0; i < N; i++) begin
        rd(500 + i, d);
        for (int j = 0; j < N; j++) begin
          int s, e;
          s = 0; for (int k = 0; k < K; k++) s += A[i][k] * B[k][j];
          e = s >>> sh;
          if (t[0] && e < 0) e = 0;
          if (e > 127) e = 127; if (e < -128) e = -128;
          `CHECK(d[8*j +: 8] == 8'(e), "requantised C[i][j]")
        end
      end
    end
    // event map copy
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) evmap[r][c] = ($urandom_range(3) == 0);
    run('{op: NPU_LOAD_EVENTS, a_addr: 1000, default: '0}, cyc);
    `CHECK(cyc == ROWS * WPR, "LOAD_EVENTS one word per cycle")
    for (int r = 0; r < ROWS; r++)
      for (int w = 0; w < WPR; w++) begin
        rd(1000 + r * WPR + w, d);
        for (int b = 0; b < 64; b++)
          `CHECK(d[b] == ((w * 64 + b < COLS) ? evmap[r][w * 64 + b] : 1'b0), "event bit packing")
      end
    // host writes past the end of the scratchpad are dropped, not wrapped
    wr(3, 64'h0123_4567_89ab_cdef);
    wr(SPAD / N + 3, 64'hdead_beef_dead_beef);
    rd(3, d);
    `CHECK(d == 64'h0123_4567_89ab_cdef, "out-of-range host write dropped")
    // ROI publication
    wr(900, {16'd37, 16'd5, 16'd90, 16'd12});
    fork
      run('{op: NPU_SET_ROI, a_addr: 900, default: '0}, cyc);
      begin @(posedge roi_valid); #1 `CHECK(roi.x1 == 12 && roi.x2 == 90 && roi.y1 == 5 && roi.y2 == 37, "ROI fields") end
    join
    `CHECK(cyc == 2, "SET_ROI latency")
    `TB_FINISH
  end
endmodule
