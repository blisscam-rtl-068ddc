// pixel_sram -- BEHAVIOURAL MODEL of the ten 6T SRAM cells under each pixel.
// The module holds N pixels' cells that share one power switch (one row of
// the array); N=1 is one pixel.
//
// The cells store the event bit after eventification and the ADC code after
// conversion.  They are power-gated between uses; when power returns each
// cross-coupled cell settles from a metastable point to a random 0 or 1.  The
// model draws those bits with $urandom on the rising edge of pwr, unbiased and
// independent per cell, and reads 0 while unpowered.  The sampling logic counts
// these bits, so they are the pixel's random source.  Per-bit write enables let
// the event bit (bit 0) be written alone.
//
// Timing: writes and the power-up draw happen on the rising clock edge;
// rdata is combinational.
module pixel_sram #(
  parameter int unsigned N = 1,
  parameter int unsigned W = 10
) (
  input  logic         clk,
  input  logic         pwr,          // supply on (shared)
  input  logic [W-1:0] we    [N],    // per-bit write enable
  input  logic [W-1:0] wdata [N],
  output logic [W-1:0] rdata [N]
);
  logic [W-1:0] cells [N];
  logic         pwr_q;

  always_ff @(posedge clk) begin
    pwr_q <= pwr;
    for (int i = 0; i < N; i++) begin
      if (pwr && !pwr_q) cells[i] <= W'($urandom);   // power-up metastability
      else if (pwr)      cells[i] <= (cells[i] & ~we[i]) | (wdata[i] & we[i]);
    end
  end

  always_comb
    for (int i = 0; i < N; i++) rdata[i] = pwr ? cells[i] : '0;
endmodule
