// tb_rle_decoder -- feeds random (value, run) pairs with random back-pressure
// on both sides and checks the expanded stream and its last flag.
`include "tb_check.svh"
module tb_rle_decoder;
  localparam int W = 10, RW = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 1, out_last;
  logic [W-1:0] in_value = '0, out_data;
  logic [RW-1:0] in_run = 1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rle_decoder #(.W(W), .RW(RW)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_value, .in_run, .in_last,
    .out_valid, .out_ready, .out_data, .out_last);
  `WATCHDOG(clk, 200000)
  int exp_d [$], exp_l [$];
  int nwords = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_d.size() == 0) begin failures++; $display("FAIL unexpected word"); end
    else begin
      `CHECK(out_data == W'(exp_d[0]) && out_last == exp_l[0][0], "expanded word")
      void'(exp_d.pop_front()); void'(exp_l.pop_front()); nwords++;
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(4) != 0);
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 300; p++) begin
      int v, r; logic l;
      v = $urandom_range(1023); r = 1 + $urandom_range((1 << RW) - 2); l = (p % 7 == 6);
      for (int i = 0; i < r; i++) begin exp_d.push_back(v); exp_l.push_back(l && i == r - 1); end
      in_valid = 1; in_value = W'(v); in_run = RW'(r); in_last = l;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
      in_valid = ($urandom_range(3) == 0) ? 1'b0 : 1'b1;
      if (!in_valid) @(negedge clk);
    end
    in_valid = 0;
    repeat (200) @(negedge clk);
    `CHECK(exp_d.size() == 0, "all words emitted")
    `CHECK(nwords > 1000, "enough words")
    `TB_FINISH
  end
endmodule
