// Shared testbench helpers: check counter macros, clock and watchdog.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH

`define TB_CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL: %s", msg); \
    end \
  end

`define TB_FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end

// Watchdog: counts a failure and ends the test after N clock cycles.
`define TB_WATCHDOG(CLK, N) \
  initial begin \
    repeat (N) @(posedge CLK); \
    failures++; \
    $display("FAIL: watchdog expired"); \
    `TB_FINISH \
  end

`endif
