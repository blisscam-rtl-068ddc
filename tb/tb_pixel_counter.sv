// tb_pixel_counter -- checks the per-pixel counter in both of its uses on
// four lanes: popcount of a 10-bit word presented one bit per cycle, and
// counting ramp cycles until a comparator flips; also clear and saturation.
`include "tb_check.svh"
module tb_pixel_counter;
  localparam int N = 4, W = 10;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [N-1:0] en = '0, inc = '0;
  logic [W-1:0] q [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pixel_counter #(.N(N), .W(W)) dut (.clk, .rst_n, .clr, .en, .inc, .q);
  `WATCHDOG(clk, 20000)

  logic [W-1:0] words [N];
  int exp_cnt;
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 20; trial++) begin
      for (int i = 0; i < N; i++) words[i] = W'($urandom);
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0; en = '1;
      for (int b = 0; b < W; b++) begin
        for (int i = 0; i < N; i++) inc[i] = words[i][b];
        @(negedge clk);
      end
      en = '0;
      for (int i = 0; i < N; i++) `CHECK(q[i] == W'($countones(words[i])), "popcount")
    end
    // ramp counting: lane i flips after t_i cycles
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    begin
      int t [N];
      for (int i = 0; i < N; i++) t[i] = 3 + 7 * i;
      for (int c = 0; c < 40; c++) begin
        en = '1;
        for (int i = 0; i < N; i++) inc[i] = (c < t[i]);
        @(negedge clk);
      end
      en = '0;
      for (int i = 0; i < N; i++) `CHECK(q[i] == W'(t[i]), "ramp count")
    end
    // saturation
    en = 4'b0001; inc = '1;
    repeat (1100) @(negedge clk);
    `CHECK(q[0] == '1, "saturates at all-ones")
    en = '0;
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    for (int i = 0; i < N; i++) `CHECK(q[i] == '0, "clear")
    `TB_FINISH
  end
endmodule
