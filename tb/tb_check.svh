// Shared check macro for the testbenches: counts a check and, when the
// condition is false, a failure with a message.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %s (time %0t)", msg, $time); \
    end \
  end
`endif
