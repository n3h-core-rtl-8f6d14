// tb_util.svh: check counting shared by the testbenches. Each testbench
// declares `int checks, failures;` and uses CHECK(condition, message).
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      if (failures <= 10) $display("FAIL %s (time %0t)", msg, $time); \
    end \
  end
`define TB_FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`endif
