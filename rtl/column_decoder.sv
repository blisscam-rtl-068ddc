// column_decoder -- selects the ROI columns of the pixel array.
//
// Readout is column by column, so the decoder activates the columns between
// x1 and x2 one after another.  It is a chain of flip-flops that passes a
// single token: start places the token on the first ROI column, each step
// moves it to the next column, and last reports that the token sits on the
// final ROI column.  A second output, col_in_roi, marks every ROI column at
// once; the pixels use it together with the row selects when they decide
// whether to quantize.  Corners may arrive in either order.
//
// The token chain, the col_in_roi output and the ordering of the corners are
// choices of this implementation.
//
// Timing: start or step take effect on the next rising edge; rd_sel, last and
// active are registered-state outputs.
//
// Lint note: the simulation assertions use `disable iff (!rst_n)`, which the
// linter reports as rst_n being used both as an asynchronous reset and as a
// synchronous signal (SYNCASYNCNET).  The assertions are not hardware; the
// flops themselves use rst_n only as an asynchronous reset.
module column_decoder
  import blisscam_pkg::*;
#(
  parameter int unsigned COLS = 640
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] x1,
  input  logic [COORD_W-1:0] x2,
  input  logic               start,      // put the token on the first ROI column
  input  logic               step,       // advance the token one column
  output logic [COLS-1:0]    rd_sel,     // one-hot column read select
  output logic [COLS-1:0]    col_in_roi, // all ROI columns
  output logic               active,     // token present
  output logic               last        // token on the last ROI column
);
  logic [COORD_W-1:0] lo, hi;
  always_comb begin
    lo = (x1 <= x2) ? x1 : x2;
    hi = (x1 <= x2) ? x2 : x1;
    for (int c = 0; c < COLS; c++)
      col_in_roi[c] = (COORD_W'(c) >= lo) && (COORD_W'(c) <= hi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_sel <= '0;
    else if (start) rd_sel <= COLS'(1) << lo;
    else if (step)  rd_sel <= (last ? '0 : rd_sel << 1);
  end

  assign active = (rd_sel != '0);
  assign last   = (32'(hi) < COLS) ? rd_sel[hi[$clog2(COLS)-1:0]] : 1'b0;

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(rd_sel));
endmodule
