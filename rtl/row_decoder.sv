// row_decoder -- drives the row-select lines of the pixel array for the ROI.
//
// All rows between the two row coordinates y1 and y2 of the ROI (inclusive)
// are activated at the same time, as the readout of a column delivers every
// ROI row in parallel.  The corners may arrive in either order; the decoder
// uses the smaller as the first row.  Ordering the corners and the enable are
// choices of this implementation.  Purely combinational.
module row_decoder
  import blisscam_pkg::*;
#(
  parameter int unsigned ROWS = 400
) (
  input  logic               en,
  input  logic [COORD_W-1:0] y1,
  input  logic [COORD_W-1:0] y2,
  output logic [ROWS-1:0]    row_sel
);
  logic [COORD_W-1:0] lo, hi;
  always_comb begin
    lo = (y1 <= y2) ? y1 : y2;
    hi = (y1 <= y2) ? y2 : y1;
    for (int r = 0; r < ROWS; r++)
      row_sel[r] = en && (COORD_W'(r) >= lo) && (COORD_W'(r) <= hi);
  end
endmodule
