// Shared check macro of the self-checking testbenches: counts every check
// in `checks` and every miss in `failures`, printing the miss.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %0t: %s", $time, msg); \
    end \
  end
`endif
