// Shared testbench helpers: check counters, a CHECK macro that compares a
// value with an independently computed expectation, and the result line.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define TB_COUNTERS int checks = 0; int failures = 0;
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (line %0d) t=%0t", msg, `__LINE__, $time); end end
`define TB_DONE begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define TB_WATCHDOG(CYCLES) \
  initial begin repeat (CYCLES) @(posedge clk); failures++; $display("FAIL watchdog expired"); `TB_DONE end
`endif
