// Shared self-check macros for the testbenches: each CHECK counts one check
// and, when its condition is false, one failure with a message.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s", msg); end end
`define TB_END \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
