// output_buffer -- parallel-in serial-out shift register between the pixel
// array and the run-length encoder.
//
// load captures one column of the array, one word per row bus, in a single
// cycle.  The buffer then shifts toward row 0's end: rows below the ROI are
// shifted out silently, one per cycle, and rows y1..y2 are presented one per
// cycle on a valid/ready stream, lowest row first.  out_last marks the last
// ROI row of the last ROI column (frame_last is set with load for that
// column).  idle is high when the buffer holds nothing more to send.
//
// The PISO structure follows the design; the row order, the silent skip of
// rows below the ROI and the stream handshake are choices of this
// implementation.
//
// Timing: load is accepted only while idle; a word is consumed on a rising
// edge with out_valid && out_ready.
//
// Lint note: the simulation assertions use `disable iff (!rst_n)`, which the
// linter reports as rst_n being used both as an asynchronous reset and as a
// synchronous signal (SYNCASYNCNET).  The assertions are not hardware; the
// flops themselves use rst_n only as an asynchronous reset.
module output_buffer
  import blisscam_pkg::*;
#(
  parameter int unsigned ROWS = 400,
  parameter int unsigned VW   = PIX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] y1,
  input  logic [COORD_W-1:0] y2,
  input  logic               load,
  input  logic               frame_last,   // this column is the last of the ROI
  input  logic [VW-1:0]      col_data [ROWS],
  output logic               idle,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [VW-1:0]      out_data,
  output logic               out_last
);
  logic [VW-1:0]      sr [ROWS];
  logic [COORD_W-1:0] pos;        // array row currently at the output end
  logic [COORD_W-1:0] lo, hi;
  logic               busy, last_col;

  assign lo = (y1 <= y2) ? y1 : y2;
  assign hi = (y1 <= y2) ? y2 : y1;

  assign out_valid = busy && (pos >= lo);
  assign out_data  = sr[0];
  assign out_last  = last_col && (pos == hi);
  assign idle      = !busy;

  logic shift;
  assign shift = busy && ((pos < lo) || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      pos      <= '0;
      last_col <= 1'b0;
      for (int i = 0; i < ROWS; i++) sr[i] <= '0;
    end else if (load && !busy) begin
      for (int i = 0; i < ROWS; i++) sr[i] <= col_data[i];
      pos      <= '0;
      busy     <= 1'b1;
      last_col <= frame_last;
    end else if (shift) begin
      for (int i = 0; i < ROWS-1; i++) sr[i] <= sr[i+1];
      sr[ROWS-1] <= '0;
      pos  <= pos + 1'b1;
      if (pos >= hi || pos == COORD_W'(ROWS-1)) busy <= 1'b0;
    end
  end

  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
