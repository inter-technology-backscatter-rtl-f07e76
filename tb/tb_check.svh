// tb_check.svh: counting check macro shared by the testbenches.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      if (failures < 20) $display("FAIL: %s (t=%0t)", msg, $time); \
    end \
  end
`endif
