// rle_decoder -- host-side run-length decoder that turns the sensor's
// (value, run) pairs back into the ROI pixel stream before segmentation.
//
// Each accepted pair is expanded into run copies of value, one per cycle;
// the last copy of a pair marked in_last carries out_last.  The pair format
// matches rle_encoder.  The handshakes are choices of this implementation.
//
// Timing: a pair is accepted when the previous one is fully expanded (or on
// the same edge as its final word leaves); words leave at one per cycle under
// out_ready.
//
// Lint note: the simulation assertions use `disable iff (!rst_n)`, which the
// linter reports as rst_n being used both as an asynchronous reset and as a
// synchronous signal (SYNCASYNCNET).  The assertions are not hardware; the
// flops themselves use rst_n only as an asynchronous reset.
module rle_decoder #(
  parameter int unsigned W  = 10,
  parameter int unsigned RW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  in_value,
  input  logic [RW-1:0] in_run,
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic          out_last
);
  logic [RW-1:0] remain;
  logic          pair_last;

  assign out_valid = (remain != '0);
  assign out_last  = pair_last && (remain == RW'(1));
  assign in_ready  = (remain == '0) || (remain == RW'(1) && out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain    <= '0;
      out_data  <= '0;
      pair_last <= 1'b0;
    end else if (in_valid && in_ready) begin
      remain    <= in_run;
      out_data  <= in_value;
      pair_last <= in_last;
    end else if (out_valid && out_ready) begin
      remain <= remain - 1'b1;
    end
  end

  a_run_nonzero: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_run != '0);
endmodule
