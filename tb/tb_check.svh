// tb_check.svh: check counting shared by the self-checking testbenches.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end end
`define FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
