// tb_rle_encoder -- feeds random sparse streams (mostly zeros, like a sampled
// ROI), including the paper's example 1110000000, with random back-pressure,
// and checks the pairs against a reference run-length model, including run
// splitting at the largest count and the last flag.
`include "tb_check.svh"
module tb_rle_encoder;
  localparam int W = 10, RW = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 1, out_last;
  logic [W-1:0] in_data = '0, out_value;
  logic [RW-1:0] out_run;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rle_encoder #(.W(W), .RW(RW)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .in_last,
    .out_valid, .out_ready, .out_value, .out_run, .out_last);
  `WATCHDOG(clk, 200000)

  int exp_val [$], exp_run [$], exp_lst [$];
  int stream [$];
  int npairs = 0;

  task automatic model(input int s [$]);
    int v, r;
    v = s[0]; r = 1;
    for (int i = 1; i < s.size(); i++) begin
      if (s[i] == v && r < (1 << RW) - 1) r++;
      else begin exp_val.push_back(v); exp_run.push_back(r); exp_lst.push_back(0); v = s[i]; r = 1; end
    end
    exp_val.push_back(v); exp_run.push_back(r); exp_lst.push_back(1);
  endtask

  // output checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_val.size() == 0) begin failures++; $display("FAIL unexpected pair"); end
    else begin
      `CHECK(out_value == W'(exp_val[0]) && out_run == RW'(exp_run[0]) && out_last == exp_lst[0][0], "pair matches model")
      void'(exp_val.pop_front()); void'(exp_run.pop_front()); void'(exp_lst.pop_front());
      npairs++;
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 40; f++) begin
      stream.delete();
      if (f == 0) stream = '{1,1,1,0,0,0,0,0,0,0};
      else begin
        int len; len = 1 + $urandom_range(60);
        for (int i = 0; i < len; i++) stream.push_back(($urandom_range(4) == 0) ? int'($urandom_range(3)) + 1 : 0);
      end
      model(stream);
      for (int i = 0; i < stream.size(); i++) begin
        in_valid = 1; in_data = W'(stream[i]); in_last = (i == stream.size() - 1);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1;
      end
      in_valid = 0; in_last = 0;
      repeat (4) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    `CHECK(exp_val.size() == 0, "all pairs emitted")
    `CHECK(npairs > 100, "enough pairs seen")
    `TB_FINISH
  end
endmodule
