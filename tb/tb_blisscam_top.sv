// tb_blisscam_top -- end-to-end test of blisscam_top at a reduced array size
// (24 x 40 pixels, 5 frames, the last one in imaging mode).  See
// tb_blisscam_body.svh for what it drives and checks.
`include "tb_check.svh"
module tb_blisscam_top;
  import blisscam_pkg::*;
  localparam int ROWS = 24, COLS = 40, NFRAMES = 5, DO_IMAGING = 1, BLOB = 6;
  `define WATCHDOG_BODY fork begin repeat (400000) @(posedge clk); failures++; $display("FAIL watchdog expired"); `TB_FINISH end join_none
  blisscam_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  `include "tb_blisscam_body.svh"
endmodule
