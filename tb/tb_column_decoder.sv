// tb_column_decoder -- checks that the column token visits exactly the ROI
// columns x1..x2 in increasing order, one per step, that last marks the final
// column, and that col_in_roi marks the whole range.
`include "tb_check.svh"
module tb_column_decoder;
  localparam int COLS = 48;
  logic clk = 0, rst_n = 0, start = 0, step = 0;
  logic [15:0] x1, x2;
  logic [COLS-1:0] rd_sel, col_in_roi;
  logic active, last;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  column_decoder #(.COLS(COLS)) dut (.clk, .rst_n, .x1, .x2, .start, .step, .rd_sel, .col_in_roi, .active, .last);
  `WATCHDOG(clk, 100000)
  initial begin
    x1 = 0; x2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int a, b, lo, hi, visited;
      a = $urandom_range(COLS - 1); b = $urandom_range(COLS - 1);
      x1 = 16'(a); x2 = 16'(b);
      lo = a < b ? a : b; hi = a < b ? b : a;
      #1;
      for (int c = 0; c < COLS; c++) `CHECK(col_in_roi[c] == (c >= lo && c <= hi), "col_in_roi")
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      visited = 0;
      for (int c = lo; c <= hi; c++) begin
        `CHECK(rd_sel == (COLS'(1) << c), "token on the expected column")
        `CHECK(last == (c == hi), "last flag")
        visited++;
        step = 1;
        @(negedge clk);
        step = 0;
      end
      `CHECK(visited == hi - lo + 1 && !active, "token leaves after the last column")
    end
    `TB_FINISH
  end
endmodule
