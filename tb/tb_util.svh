// tb_util.svh: check counters and a check macro shared by the testbenches.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (line %0d)", msg, `__LINE__); end end
`endif
