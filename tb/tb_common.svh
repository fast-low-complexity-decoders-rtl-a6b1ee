// tb_common.svh: check counters, watchdog and result line shared by the
// testbenches. A testbench declares "int checks = 0, failures = 0;" first.
`ifndef TB_COMMON_SVH
`define TB_COMMON_SVH
`define CHECK(c, msg) begin checks++; if (!(c)) begin failures++; $display("FAIL: %s", msg); end end
`define TB_WATCHDOG(T) initial begin #(T); failures++; $display("watchdog expired"); \
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define TB_END begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
