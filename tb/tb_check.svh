// tb_check.svh -- shared checking macros of the testbenches.
// A testbench declares `int checks, failures;` and uses CHECK for every
// comparison against an independently computed value, then FINISH to print
// the one-line result and stop.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      if (failures < 20) $display("FAIL: %s (time %0t)", msg, $time); \
    end \
  end
`define FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`define WATCHDOG(clk, n) \
  initial begin \
    repeat (n) @(posedge clk); \
    failures++; \
    $display("FAIL: watchdog expired"); \
    `FINISH \
  end
`endif
