// analog_readout -- BEHAVIOURAL MODEL (not synthesizable as a circuit) of the
// per-pixel configurable analog readout: one comparator, the two auto-zero
// capacitors C_az- and C_az+, and the switches Hold, AZ1, AZ2, S1, S2, S3,
// CRST1 and CRST2.  The module holds N identical pixel circuits that share
// their switch-control wires (one row of the array); N=1 is one pixel.
//
// Voltages are carried as integer codes in ADC LSBs.  v_pixel is the level
// the top-layer pixel presents through its Sample switch.  The model keeps
// one state value per pixel, the charge held on C_az-, and evaluates the
// comparator ideally (no offset, no noise), as the design requires read noise
// never to flip a decision.
//
// The three configurations of the circuit:
//  1 analog memory  Hold closed: the comparator is a unity buffer and C_az-
//                   tracks v_pixel while sample=1 and keeps it while sample=0.
//  2 subtractor     Hold open, sample=1: the node on C_az- becomes
//                   F(t-1)-F(t); C_az+ is tied to v_th1 (S1) or v_th2 (S2);
//                   cmp_out = (F(t-1)-F(t)) > v_th.
//  3 SS ADC         S3 closed: C_az+ receives the falling ramp; cmp_out goes
//                   to 1 once the ramp is at or below v_pixel.
// While AZ1 or AZ2 is closed the comparator sits in unity feedback and its
// output is 0.  CRST1 clears the stored charge; CRST2 has no effect in this
// ideal model.  The sign convention of cmp_out is a choice of this model.
//
// Timing: the stored charge updates on the rising clock edge; cmp_out is
// combinational in the switch settings and voltages.
module analog_readout #(
  parameter int unsigned N  = 1,          // pixels sharing the control wires
  parameter int unsigned VW = 10          // width of a voltage code
) (
  input  logic                 clk,
  input  logic                 sample,    // top-layer Sample switch closed
  input  logic                 hold,      // Hold switch (feedback loop)
  input  logic                 az1,       // auto-zero, inverting side
  input  logic                 az2,       // auto-zero, non-inverting side
  input  logic                 crst1,     // C_az- reset
  input  logic                 crst2,     // C_az+ reset to V_ref
  input  logic                 s1,        // C_az+ <- V_th1
  input  logic                 s2,        // C_az+ <- V_th2
  input  logic [N-1:0]         s3,        // C_az+ <- V_ramp (per pixel: skipped pixels stay open)
  input  logic [VW-1:0]        v_pixel [N],
  input  logic signed [VW+1:0] v_th1,     // +sigma
  input  logic signed [VW+1:0] v_th2,     // -sigma
  input  logic [VW-1:0]        v_ramp,    // single-slope ramp level
  output logic [N-1:0]         cmp_out
);
  logic [VW-1:0] c_az_minus [N];          // charge held on C_az- (frame t-1)

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (crst1)               c_az_minus[i] <= '0;
      else if (hold && sample) c_az_minus[i] <= v_pixel[i];
    end
  end

  always_comb begin
    logic signed [VW+1:0] diff;
    logic signed [VW+1:0] vth;
    vth = s1 ? v_th1 : v_th2;
    for (int i = 0; i < N; i++) begin
      diff = $signed({2'b00, c_az_minus[i]}) - $signed({2'b00, v_pixel[i]});
      if (az1 || az2 || hold || crst2) cmp_out[i] = 1'b0;
      else if (s3[i])                  cmp_out[i] = sample && (v_ramp <= v_pixel[i]);
      else if (s1 || s2)               cmp_out[i] = sample && (diff > vth);
      else                             cmp_out[i] = 1'b0;
    end
  end

  // The threshold switches S1 and S2 are never closed together, nor with S3.
  a_one_source: assert property (@(posedge clk) !(s1 && s2) && !((s1 || s2) && (s3 != '0)));
endmodule
