// theta_lut -- 16-entry table that turns a requested sampling rate into the
// 4-bit threshold theta compared against each pixel's count of power-up ones.
//
// The table is meant to be written after a one-time calibration in which the
// pixel SRAMs are power-cycled and the distribution of the 10-bit popcount is
// measured.  Until then it holds the values for ideal unbiased cells: entry r
// (requested rate r/16) is the smallest theta with
//     P[ Binomial(10, 1/2) > theta ] <= r/16,
// computed below at elaboration.  Entry 3 gives theta = 6, a rate of
// 176/1024 = 17%, near the one-in-five sampling used inside the ROI.  The
// reading of "rate" as r/16 and the reset contents are choices of this
// implementation.
//
// Timing: writes on the rising edge; theta is combinational in rate_sel.
module theta_lut #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned TW      = 4,
  parameter int unsigned NBITS   = 10     // power-up bits summed per pixel
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  logic [TW-1:0]              wr_theta,
  input  logic [$clog2(ENTRIES)-1:0] rate_sel,
  output logic [TW-1:0]              theta
);
  // Number of NBITS-bit words with more than t ones.
  function automatic int tail_count(input int t);
    int c, s;
    s = 0;
    c = 1;                                  // C(NBITS, 0)
    for (int k = 0; k <= int'(NBITS); k++) begin
      if (k > t) s += c;
      c = c * (int'(NBITS) - k) / (k + 1);  // C(NBITS, k+1)
    end
    return s;
  endfunction

  function automatic logic [TW-1:0] ideal_theta(input int r);
    for (int t = 0; t < (1 << TW); t++)
      if (tail_count(t) * int'(ENTRIES) <= r * (1 << NBITS)) return TW'(t);
    return '1;
  endfunction

  logic [TW-1:0] table_q [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(ENTRIES); r++) table_q[r] <= ideal_theta(r);
    end else if (wr_en) begin
      table_q[wr_idx] <= wr_theta;
    end
  end

  assign theta = table_q[rate_sel];
endmodule
