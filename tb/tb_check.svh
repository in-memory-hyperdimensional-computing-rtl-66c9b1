// Shared check macro for the self-checking testbenches. Each testbench
// declares `int checks, failures;` and counts every comparison with CHECK.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL @%0t: %s", $time, msg); \
    end \
  end
`endif
