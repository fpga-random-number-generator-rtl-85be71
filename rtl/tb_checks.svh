// Shared check counters and the CHECK macro for the self-checking testbenches.
// CHECK(cond, msg) counts one check and, if cond is false, one failure.
`ifndef TB_CHECKS_SVH
`define TB_CHECKS_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      if (failures <= 10) $display("FAIL %s (t=%0t)", msg, $time); \
    end \
  end
`endif
