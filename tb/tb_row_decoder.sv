// tb_row_decoder -- random ROI row ranges (either corner order) against a
// reference range test, plus the disabled case.
`include "tb_check.svh"
module tb_row_decoder;
  localparam int ROWS = 40;
  logic en;
  logic [15:0] y1, y2;
  logic [ROWS-1:0] row_sel;
  int checks = 0, failures = 0;
  row_decoder #(.ROWS(ROWS)) dut (.en, .y1, .y2, .row_sel);
  initial begin
    for (int t = 0; t < 300; t++) begin
      int a, b, lo, hi;
      a = $urandom_range(ROWS + 3); b = $urandom_range(ROWS + 3);
      en = (t % 10 != 0); y1 = 16'(a); y2 = 16'(b);
      lo = a < b ? a : b; hi = a < b ? b : a;
      #1;
      for (int r = 0; r < ROWS; r++)
        `CHECK(row_sel[r] == (en && r >= lo && r <= hi), "row in [y1,y2]")
    end
    `TB_FINISH
  end
  initial begin #100000; failures++; `TB_FINISH end
endmodule
