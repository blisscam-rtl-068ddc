// tb_skip_adc_logic -- exhaustive check of the quantize/skip decision:
// take = row && col && (force || popcount > theta).
`include "tb_check.svh"
module tb_skip_adc_logic;
  localparam int N = 2;
  logic row_sel, force_sample;
  logic [N-1:0] col_sel, take;
  logic [3:0] popcnt [N];
  logic [3:0] theta;
  int checks = 0, failures = 0;
  skip_adc_logic #(.N(N), .TW(4)) dut (.row_sel, .col_sel, .popcnt, .theta, .force_sample, .take_sample(take));
  initial begin
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 4; c++)
        for (int f = 0; f < 2; f++)
          for (int th = 0; th < 16; th++)
            for (int p = 0; p <= 10; p++) begin
              row_sel = r[0]; col_sel = c[1:0]; force_sample = f[0]; theta = th[3:0];
              popcnt[0] = p[3:0]; popcnt[1] = 4'(10 - p);
              #1;
              `CHECK(take[0] == (r == 1 && c[0] && (f == 1 || p > th)), "lane 0")
              `CHECK(take[1] == (r == 1 && c[1] && (f == 1 || (10 - p) > th)), "lane 1")
            end
    `TB_FINISH
  end
  initial begin #1000000; failures++; `TB_FINISH end
endmodule
