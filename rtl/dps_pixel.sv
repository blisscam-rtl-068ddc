// dps_pixel -- bottom-layer circuit of the digital pixel: configurable analog
// readout, 10-bit counter, 10-bit SRAM and "If Skip ADC?" logic, sequenced by
// the frame phase broadcast from the sensor controller.  The module holds the
// N pixels of one array row, which share the row's control wires and drive one
// row output bus; N=1 is a single pixel.
//
// What each pixel does in each phase:
//  PH_HOLD      Hold and Sample closed: the current frame is copied onto C_az-.
//  PH_EXPOSE    Hold closed, Sample open: C_az- keeps F(t-1) while F(t) exposes.
//  PH_EV_POS    Hold open, S1 (+sigma): SRAM bit 0 <= (F(t-1)-F(t) > sigma).
//  PH_EV_NEG    S2 (-sigma-1 LSB): SRAM bit 0 |= !(F(t-1)-F(t) > v_th2), so bit 0
//               ends as |F(t-1)-F(t)| > sigma, the event bit.
//  PH_ROI       event_bit = SRAM bit 0, read by the in-sensor NPU.
//  PH_SRAM_OFF  SRAM power-gated.
//  PH_POWERUP   SRAM powered: its cells latch random bits; counter cleared.
//  PH_POPCOUNT  counter adds SRAM bit [bit_idx] (the controller steps 0..9).
//  PH_DECIDE    skip logic: adc_en <= in ROI && popcount > theta.
//  PH_ADC_RST   auto-zero; counter cleared.
//  PH_ADC       S3 (ramp) closed where adc_en; counter counts while cmp_out=0.
//  PH_ADC_STORE SRAM <= counter where adc_en.
//  PH_READOUT   the pixel whose rd_sel is set drives its SRAM word onto the
//               row bus if adc_en, and 0 if it skipped the ADC.
// With a ramp falling one LSB per cycle from all-ones, a pixel at level v
// converts to (2^VW-1) - v: the count grows as the pixel voltage falls with
// light.
//
// The eventification by subtraction and two thresholds, the reuse of SRAM and
// counter, the power-up random bits, the theta comparison and the forced-zero
// output follow the design.  The phase encoding, the two-step event latch into
// SRAM bit 0, the adc_en flip-flop that remembers the decision through
// conversion, and the switch settings per phase are choices of this
// implementation.
//
// Lint note: the simulation assertions use `disable iff (!rst_n)`, which the
// linter reports as rst_n being used both as an asynchronous reset and as a
// synchronous signal (SYNCASYNCNET).  The assertions are not hardware; the
// flops themselves use rst_n only as an asynchronous reset.
module dps_pixel
  import blisscam_pkg::*;
#(
  parameter int unsigned N  = 1,
  parameter int unsigned VW = PIX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  pix_phase_e            phase,
  input  logic [3:0]            bit_idx,      // PH_POPCOUNT: SRAM bit to add
  input  logic [VW-1:0]         v_pixel [N],  // from the top-layer pixels
  input  logic signed [VW+1:0]  v_th1,
  input  logic signed [VW+1:0]  v_th2,
  input  logic [VW-1:0]         v_ramp,
  input  logic [THETA_W-1:0]    theta,
  input  logic                  force_sample,
  input  logic                  row_sel,      // row decoder: row inside ROI
  input  logic [N-1:0]          col_sel,      // column decoder: column inside ROI
  input  logic [N-1:0]          rd_sel,       // readout: column currently driven
  output logic [N-1:0]          event_bit,
  output logic [N-1:0]          sampled,
  output logic [VW-1:0]         row_out       // row output bus
);
  logic hold, smp, az, s1, s2, sram_pwr;
  logic [N-1:0] s3, cmp_out, cnt_en, cnt_inc, take, adc_en;
  logic [VW-1:0] sram_we [N];
  logic [VW-1:0] sram_wd [N];
  logic [VW-1:0] sram_q  [N];
  logic [VW-1:0] cnt_q   [N];
  logic [THETA_W-1:0] popcnt [N];
  logic cnt_clr;

  // Switch and power settings per phase (shared by the row).
  always_comb begin
    hold = 1'b0; smp = 1'b0; az = 1'b0;
    s1 = 1'b0; s2 = 1'b0; sram_pwr = 1'b1;
    unique case (phase)
      PH_HOLD:      begin hold = 1'b1; smp = 1'b1; end
      PH_EXPOSE:    hold = 1'b1;
      PH_EV_POS:    begin smp = 1'b1; s1 = 1'b1; end
      PH_EV_NEG:    begin smp = 1'b1; s2 = 1'b1; end
      PH_SRAM_OFF:  sram_pwr = 1'b0;
      PH_ADC_RST:   begin az = 1'b1; smp = 1'b1; end
      PH_ADC:       smp = 1'b1;
      default:      ;
    endcase
  end
  assign s3 = (phase == PH_ADC) ? adc_en : '0;

  analog_readout #(.N(N), .VW(VW)) u_afe (
    .clk, .sample(smp), .hold, .az1(az), .az2(az), .crst1(1'b0), .crst2(az),
    .s1, .s2, .s3, .v_pixel, .v_th1, .v_th2, .v_ramp, .cmp_out
  );

  // SRAM writes.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      sram_we[i] = '0;
      sram_wd[i] = '0;
      unique case (phase)
        PH_EV_POS:    begin sram_we[i][0] = 1'b1; sram_wd[i][0] = cmp_out[i]; end
        PH_EV_NEG:    begin sram_we[i][0] = 1'b1; sram_wd[i][0] = sram_q[i][0] | ~cmp_out[i]; end
        PH_ADC_STORE: begin sram_we[i] = {VW{adc_en[i]}}; sram_wd[i] = cnt_q[i]; end
        default:      ;
      endcase
    end
  end

  pixel_sram #(.N(N), .W(VW)) u_sram (
    .clk, .pwr(sram_pwr), .we(sram_we), .wdata(sram_wd), .rdata(sram_q)
  );

  // Counter: popcount of the power-up bits, then single-slope conversion.
  assign cnt_clr = (phase == PH_POWERUP) || (phase == PH_ADC_RST);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      cnt_en[i]  = (phase == PH_POPCOUNT) || (phase == PH_ADC && adc_en[i]);
      cnt_inc[i] = (phase == PH_POPCOUNT) ? sram_q[i][bit_idx] : ~cmp_out[i];
      popcnt[i]  = cnt_q[i][THETA_W-1:0];
    end
  end

  pixel_counter #(.N(N), .W(VW)) u_cnt (
    .clk, .rst_n, .clr(cnt_clr), .en(cnt_en), .inc(cnt_inc), .q(cnt_q)
  );

  skip_adc_logic #(.N(N), .TW(THETA_W)) u_skip (
    .row_sel, .col_sel, .popcnt, .theta, .force_sample, .take_sample(take)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  adc_en <= '0;
    else if (phase == PH_DECIDE) adc_en <= take;
  end

  // Row output bus: only the selected column's pixel can drive it.
  always_comb begin
    row_out = '0;
    for (int i = 0; i < N; i++) begin
      event_bit[i] = sram_q[i][0];
      if (phase == PH_READOUT && rd_sel[i] && adc_en[i]) row_out |= sram_q[i];
    end
  end
  assign sampled = adc_en;

  // At most one column drives the row bus during readout.
  a_one_column: assert property (@(posedge clk) disable iff (!rst_n)
    (phase == PH_READOUT) |-> $onehot0(rd_sel));
endmodule
