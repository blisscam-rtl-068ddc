// tb_pixel_sram -- checks the pixel SRAM model: reads 0 when unpowered,
// per-bit writes, retention while powered, and that power-up leaves random
// contents whose ones fraction is near one half over many pixels and cycles.
`include "tb_check.svh"
module tb_pixel_sram;
  localparam int N = 64, W = 10;
  logic clk = 0, pwr = 0;
  logic [W-1:0] we [N], wdata [N], rdata [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pixel_sram #(.N(N), .W(W)) dut (.clk, .pwr, .we, .wdata, .rdata);
  `WATCHDOG(clk, 50000)

  int ones, total, distinct;
  logic [W-1:0] first [N];
  initial begin
    for (int i = 0; i < N; i++) begin we[i] = '0; wdata[i] = '0; end
    repeat (2) @(negedge clk);
    for (int i = 0; i < N; i++) `CHECK(rdata[i] == '0, "unpowered reads 0")
    ones = 0; total = 0; distinct = 0;
    for (int cyc = 0; cyc < 50; cyc++) begin
      @(negedge clk) pwr = 1;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        ones += $countones(rdata[i]); total += W;
        if (cyc == 0) first[i] = rdata[i];
        else if (cyc == 1 && rdata[i] != first[i]) distinct++;
      end
      @(negedge clk) pwr = 0;
    end
    `CHECK(ones * 100 > total * 45 && ones * 100 < total * 55, "power-up ones near 50%")
    `CHECK(distinct > N / 2, "power-up values change between power cycles")
    @(negedge clk) pwr = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin we[i] = '1; wdata[i] = W'(i * 7 + 1); end
    @(negedge clk);
    for (int i = 0; i < N; i++) begin we[i] = 10'b1; wdata[i] = '0; end
    @(negedge clk);
    for (int i = 0; i < N; i++) we[i] = '0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < N; i++) `CHECK(rdata[i] == (W'(i * 7 + 1) & ~W'(1)), "bit write and retention")
    @(negedge clk) pwr = 0;
    #1 `CHECK(rdata[3] == '0, "power-gated reads 0")
    `TB_FINISH
  end
endmodule
