// tb_blisscam_full -- end-to-end test of blisscam_top at the paper's full
// size: all parameters at their defaults (640 x 400 pixels, 8 x 8 NPU array,
// 512 KB scratchpad).  Two sparse frames with a moving pupil; same checks as
// the reduced-size test (see tb_blisscam_body.svh) without the imaging frame,
// whose 256,000-pixel readout would dominate the run time.
`include "tb_check.svh"
module tb_blisscam_full;
  import blisscam_pkg::*;
  localparam int ROWS = 400, COLS = 640, NFRAMES = 2, DO_IMAGING = 0, BLOB = 8;
  `define WATCHDOG_BODY fork begin repeat (2000000) @(posedge clk); failures++; $display("FAIL watchdog expired"); `TB_FINISH end join_none
  blisscam_top dut (.*);
  `include "tb_blisscam_body.svh"
endmodule
