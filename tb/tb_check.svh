// tb_check.svh -- check counting shared by the testbenches.
// Each testbench declares `int checks, failures;` and uses CHECK.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %s (t=%0t)", msg, $time); \
    end \
  end
`endif
