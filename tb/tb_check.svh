// Shared testbench helpers: a clock, a check counter and the final report.
// Each testbench declares `int checks, failures;` before using CHECK.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL @%0t: %s", $time, msg); end end
`define REPORT \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define WATCHDOG(cycles) \
  initial begin repeat (cycles) @(posedge clk); failures++; $display("FAIL: watchdog"); `REPORT end
`endif
