// tb_util.svh: shared check bookkeeping for the self-checking testbenches.
// CHECK(cond, fmt-args) counts one check and, when cond is false, one failure with a
// message. TB_FINISH prints the result line and ends the simulation.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s", $sformatf msg); end end
`define TB_FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
