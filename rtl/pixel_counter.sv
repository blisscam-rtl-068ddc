// pixel_counter -- the per-pixel counter shared by two jobs.  The module holds
// N independent pixel counters (one row of the array); N=1 is one pixel.
//
// During random sampling it sums the ten power-up bits of the pixel SRAM: the
// bits are presented one per cycle on inc and the counter counts the ones.
// During single-slope conversion inc is the inverted comparator output, so the
// counter counts the ramp cycles before the comparator toggles; that count is
// the pixel value.  Both uses come from the design; one shared clear/enable
// interface for them, and saturation at all-ones, are choices of this
// implementation.
//
// Timing: clr (synchronous, highest priority) zeroes q on the next edge;
// otherwise q[i] increments on an edge where en[i] && inc[i].
module pixel_counter #(
  parameter int unsigned N = 1,
  parameter int unsigned W = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic [N-1:0] en,
  input  logic [N-1:0] inc,
  output logic [W-1:0] q [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) q[i] <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        if (clr)                                q[i] <= '0;
        else if (en[i] && inc[i] && (~q[i] != '0)) q[i] <= q[i] + 1'b1;
      end
    end
  end
endmodule
