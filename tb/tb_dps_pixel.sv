// tb_dps_pixel -- drives one row of digital pixels through complete frames
// by hand (every phase of the sequence) and checks the event bits, the
// random-sampling decision against the power-up bits, the converted values of
// the sampled pixels and the zero output of skipped or out-of-ROI pixels.
`include "tb_check.svh"
module tb_dps_pixel;
  import blisscam_pkg::*;
  localparam int N = 16, VW = 10, SIG = 15;
  logic clk = 0, rst_n = 0;
  pix_phase_e phase = PH_IDLE;
  logic [3:0] bit_idx = '0;
  logic [VW-1:0] v_pixel [N];
  logic signed [VW+1:0] v_th1 = 12'(SIG), v_th2 = -12'(SIG + 1);
  logic [VW-1:0] v_ramp = '1;
  logic [3:0] theta;
  logic force_sample = 0, row_sel = 1;
  logic [N-1:0] col_sel, rd_sel = '0, event_bit, sampled;
  logic [VW-1:0] row_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dps_pixel #(.N(N), .VW(VW)) dut (.clk, .rst_n, .phase, .bit_idx, .v_pixel, .v_th1, .v_th2,
    .v_ramp, .theta, .force_sample, .row_sel, .col_sel, .rd_sel, .event_bit, .sampled, .row_out);
  `WATCHDOG(clk, 200000)

  int prev [N], cur [N];
  logic [VW-1:0] pu [N];
  logic exp_take [N];
  int n_sampled, n_event;

  task automatic ph(input pix_phase_e p, input int cycles);
    phase = p;
    repeat (cycles) @(negedge clk);
  endtask

  initial begin
    n_sampled = 0; n_event = 0;
    for (int i = 0; i < N; i++) begin prev[i] = $urandom_range(1023); v_pixel[i] = VW'(prev[i]); end
    repeat (2) @(negedge clk);
    rst_n = 1;
    ph(PH_HOLD, 1);
    for (int frame = 0; frame < 12; frame++) begin
      theta = (frame % 3 == 0) ? 4'd4 : 4'd6;
      force_sample = (frame == 11);
      row_sel = (frame != 10);
      col_sel = (frame == 9) ? 16'h00FF : '1;
      for (int i = 0; i < N; i++) begin
        cur[i] = (i % 2 == 0) ? prev[i] + int'($urandom_range(200)) - 100 : prev[i] + int'($urandom_range(20)) - 10;
        if (cur[i] < 0) cur[i] = 0;
        if (cur[i] > 1023) cur[i] = 1023;
      end
      ph(PH_EXPOSE, 1);
      for (int i = 0; i < N; i++) v_pixel[i] = VW'(cur[i]);
      ph(PH_EXPOSE, 3);
      ph(PH_EV_POS, 2);
      ph(PH_EV_NEG, 2);
      ph(PH_ROI, 1);
      for (int i = 0; i < N; i++) begin
        int d; d = prev[i] - cur[i];
        `CHECK(event_bit[i] == (d > SIG || d < -SIG), "event bit = |F(t-1)-F(t)| > sigma")
        if (event_bit[i]) n_event++;
      end
      ph(PH_SRAM_OFF, 1);
      ph(PH_POWERUP, 1);
      for (int i = 0; i < N; i++) pu[i] = dut.sram_q[i];
      for (int b = 0; b < 10; b++) begin bit_idx = 4'(b); ph(PH_POPCOUNT, 1); end
      for (int i = 0; i < N; i++)
        exp_take[i] = row_sel && col_sel[i] && (force_sample || $countones(pu[i]) > theta);
      ph(PH_DECIDE, 1);
      for (int i = 0; i < N; i++) begin
        `CHECK(sampled[i] == exp_take[i], "sampling decision from power-up bits")
        if (sampled[i]) n_sampled++;
      end
      ph(PH_ADC_RST, 2);
      phase = PH_ADC;
      for (int r = 1023; r >= 0; r--) begin v_ramp = VW'(r); @(negedge clk); end
      v_ramp = '1;
      ph(PH_ADC_STORE, 1);
      phase = PH_READOUT;
      for (int i = 0; i < N; i++) begin
        rd_sel = '0; rd_sel[i] = 1'b1;
        #1;
        `CHECK(row_out == (exp_take[i] ? VW'(1023 - cur[i]) : '0), "readout value or 0")
        @(negedge clk);
      end
      rd_sel = '0;
      ph(PH_HOLD, 1);
      for (int i = 0; i < N; i++) prev[i] = cur[i];
    end
    `CHECK(n_sampled > 0 && n_event > 0, "sampling and events both occurred")
    `TB_FINISH
  end
endmodule
