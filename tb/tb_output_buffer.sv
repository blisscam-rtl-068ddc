// tb_output_buffer -- loads random columns, reads them back with random
// back-pressure and checks that exactly rows y1..y2 come out in order, that
// out_last marks only the last row of the frame's last column, and the cycle
// count of a column without back-pressure (y_max+1 cycles).
`include "tb_check.svh"
module tb_output_buffer;
  localparam int ROWS = 24, VW = 10;
  logic clk = 0, rst_n = 0, load = 0, frame_last = 0, out_ready = 1;
  logic [15:0] y1, y2;
  logic [VW-1:0] col_data [ROWS];
  logic idle, out_valid, out_last;
  logic [VW-1:0] out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  output_buffer #(.ROWS(ROWS), .VW(VW)) dut (.clk, .rst_n, .y1, .y2, .load, .frame_last, .col_data,
    .idle, .out_valid, .out_ready, .out_data, .out_last);
  `WATCHDOG(clk, 100000)
  initial begin
    y1 = 0; y2 = 0;
    for (int i = 0; i < ROWS; i++) col_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      int a, b, lo, hi, got, cyc;
      logic [VW-1:0] ref_col [ROWS];
      a = $urandom_range(ROWS - 1); b = $urandom_range(ROWS - 1);
      lo = a < b ? a : b; hi = a < b ? b : a;
      y1 = 16'(b); y2 = 16'(a);
      for (int i = 0; i < ROWS; i++) begin ref_col[i] = VW'($urandom); col_data[i] = ref_col[i]; end
      `CHECK(idle, "idle before load")
      load = 1; frame_last = (t % 2 == 1);
      @(negedge clk);
      load = 0;
      for (int i = 0; i < ROWS; i++) col_data[i] = '0;
      got = 0; cyc = 1;
      while (!idle) begin
        out_ready = (t < 25) ? 1'b1 : 1'($urandom_range(1));
        #1;
        if (out_valid && out_ready) begin
          `CHECK(out_data == ref_col[lo + got], "row order y1..y2")
          `CHECK(out_last == (frame_last && lo + got == hi), "out_last")
          got++;
        end
        @(negedge clk);
        cyc++;
      end
      `CHECK(got == hi - lo + 1, "row count")
      if (t < 25) `CHECK(cyc == hi + 2, "cycles per column = y_max + 1 (+1 load)")
    end
    `TB_FINISH
  end
endmodule
