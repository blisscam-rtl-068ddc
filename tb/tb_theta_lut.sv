// tb_theta_lut -- checks the reset contents against the binomial tail
// (computed here independently from Pascal's triangle), and calibration writes.
`include "tb_check.svh"
module tb_theta_lut;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [3:0] wr_idx = '0, wr_theta = '0, rate_sel = '0, theta;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  theta_lut dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_theta, .rate_sel, .theta);
  `WATCHDOG(clk, 10000)
  int pas [11];
  int tail [12];
  initial begin
    // Pascal row 10
    pas[0] = 1;
    for (int n = 1; n <= 10; n++) begin pas[n] = 0; for (int k = n; k > 0; k--) pas[k] += pas[k-1]; end
    tail[11] = 0;
    for (int t = 10; t >= 0; t--) tail[t] = tail[t+1] + pas[t];   // tail[t] = #words with >= t ones
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 16; r++) begin
      int e;
      e = 15;
      for (int t = 15; t >= 0; t--) if ((t >= 10 ? 0 : tail[t+1]) * 16 <= r * 1024) e = t;
      rate_sel = 4'(r);
      #1 `CHECK(theta == 4'(e), "ideal reset entry")
    end
    rate_sel = 4'd3; #1 `CHECK(theta == 4'd6, "rate 3/16 -> theta 6")
    for (int r = 0; r < 16; r++) begin
      @(negedge clk) wr_en = 1; wr_idx = 4'(r); wr_theta = 4'(15 - r);
    end
    @(negedge clk) wr_en = 0;
    for (int r = 0; r < 16; r++) begin rate_sel = 4'(r); #1 `CHECK(theta == 4'(15 - r), "written entry"); end
    `TB_FINISH
  end
endmodule
