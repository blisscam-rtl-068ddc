// tb_check.svh -- checking helpers shared by the testbenches.
// CHECK(cond, msg): counts one check and, if cond is false, one failure.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %s (line %0d)", msg, `__LINE__); \
    end \
  end
`define TB_FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`define WATCHDOG(clk, n) \
  initial begin \
    repeat (n) @(posedge clk); \
    failures++; \
    $display("FAIL watchdog expired"); \
    `TB_FINISH \
  end
`endif
