// tb_common.svh: check macro shared by the testbenches.  Each testbench
// declares `int checks, failures;` and counts every comparison with CHECK.
`ifndef TB_COMMON_SVH
`define TB_COMMON_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL t=%0t: %s", $time, msg); \
    end \
  end
`endif
