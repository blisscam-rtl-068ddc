// skip_adc_logic -- the per-pixel "If Skip ADC?" decision, for N pixels of a
// row (N=1 is one pixel).
//
// A pixel is quantized and read out only if it lies in the ROI (its row-select
// and column-select lines are both active) and the number of ones among its
// ten power-up SRAM bits, as summed by the pixel counter, is strictly greater
// than the global 4-bit threshold theta.  Per pixel this is a 4-bit magnitude
// comparator and two AND terms.  force_sample (full-frame imaging mode)
// bypasses the random draw; it is a choice of this implementation for the
// conventional imaging mode the sensor keeps.
//
// Purely combinational.
module skip_adc_logic #(
  parameter int unsigned N  = 1,
  parameter int unsigned TW = 4
) (
  input  logic          row_sel,          // shared by the row
  input  logic [N-1:0]  col_sel,
  input  logic [TW-1:0] popcnt [N],
  input  logic [TW-1:0] theta,
  input  logic          force_sample,
  output logic [N-1:0]  take_sample       // 1: quantize, 0: skip and output 0
);
  always_comb
    for (int i = 0; i < N; i++)
      take_sample[i] = row_sel && col_sel[i] && (force_sample || (popcnt[i] > theta));
endmodule
