// tb_util.svh: check counting shared by the testbenches.
// Each testbench declares `int checks, failures;` and uses CHECK.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      if (failures <= 10) $display("FAIL %s (t=%0t)", msg, $time); \
    end \
  end
`endif
