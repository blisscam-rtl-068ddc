// tb_analog_readout -- checks the three configurations of the analog readout
// model on random levels: analog memory (hold), subtraction against +sigma and
// -sigma, and single-slope comparison against a falling ramp.
`include "tb_check.svh"
module tb_analog_readout;
  localparam int N = 8, VW = 10;
  logic clk = 0;
  logic sample = 0, hold = 0, az1 = 0, az2 = 0, crst1 = 0, crst2 = 0, s1 = 0, s2 = 0;
  logic [N-1:0] s3 = '0, cmp_out;
  logic [VW-1:0] v_pixel [N];
  logic signed [VW+1:0] v_th1, v_th2;
  logic [VW-1:0] v_ramp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  analog_readout #(.N(N), .VW(VW)) dut (.clk, .sample, .hold, .az1, .az2, .crst1, .crst2,
    .s1, .s2, .s3, .v_pixel, .v_th1, .v_th2, .v_ramp, .cmp_out);
  `WATCHDOG(clk, 100000)

  int prev [N], cur [N], d, sig, flip;
  task automatic sw(input logic h, input logic sm, input logic a, input logic t1, input logic t2, input logic [N-1:0] t3);
    hold = h; sample = sm; az1 = a; az2 = a; crst1 = 0; crst2 = a; s1 = t1; s2 = t2; s3 = t3;
  endtask
  initial begin
    v_ramp = '1; sig = 15;
    v_th1 = 12'(sig); v_th2 = -12'(sig);
    for (int trial = 0; trial < 40; trial++) begin
      for (int i = 0; i < N; i++) begin
        prev[i] = $urandom_range(1023);
        cur[i]  = (i < 4) ? int'($urandom_range(1023)) : prev[i] + int'($urandom_range(40)) - 20;
        if (cur[i] < 0) cur[i] = 0;
        if (cur[i] > 1023) cur[i] = 1023;
      end
      // mode 1: capture F(t-1), then hold it while the input changes
      @(negedge clk) sw(1, 1, 0, 0, 0, '0);
      for (int i = 0; i < N; i++) v_pixel[i] = VW'(prev[i]);
      @(negedge clk) sw(1, 0, 0, 0, 0, '0);
      for (int i = 0; i < N; i++) v_pixel[i] = VW'(cur[i]);
      repeat (3) @(negedge clk);
      `CHECK(cmp_out == '0, "buffer mode output idle")
      // mode 2: +sigma then -sigma
      sw(0, 1, 0, 1, 0, '0);
      #1;
      for (int i = 0; i < N; i++) `CHECK(cmp_out[i] == ((prev[i] - cur[i]) > sig), "compare +sigma")
      @(negedge clk) sw(0, 1, 0, 0, 1, '0);
      #1;
      for (int i = 0; i < N; i++) `CHECK(cmp_out[i] == ((prev[i] - cur[i]) > -sig), "compare -sigma")
      // mode 3: ramp; lanes 0..N/2-1 on S3, the rest skipped
      @(negedge clk) sw(0, 1, 1, 0, 0, '0);
      #1 `CHECK(cmp_out == '0, "auto-zero output 0")
      @(negedge clk) sw(0, 1, 0, 0, 0, {{(N/2){1'b0}}, {(N/2){1'b1}}});
      for (int i = 0; i < N / 2; i++) begin
        flip = -1;
        for (int r = 1023; r >= 0; r--) begin
          v_ramp = VW'(r);
          #1;
          if (flip < 0 && cmp_out[i]) flip = r;
        end
        `CHECK(flip == cur[i], "ramp crossing at pixel level")
      end
      `CHECK(cmp_out[N-1:N/2] == '0, "skipped pixels never compare")
      v_ramp = '1;
    end
    `TB_FINISH
  end
endmodule
