// tb_common.svh: check counter, check macro and result line shared by the
// block testbenches.
`ifndef TB_COMMON_SVH
`define TB_COMMON_SVH
`define TB_CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s", msg); end end
`define TB_DONE \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
