// tb_check.svh: counters and check macro shared by the testbenches.
// Each testbench declares `int checks, failures;` through TB_COUNTERS and
// ends by printing the TB_RESULT line.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define TB_COUNTERS int checks = 0; int failures = 0;
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end end
`define TB_FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define WATCHDOG(clk, n) \
  initial begin repeat (n) @(posedge clk); failures++; $display("FAIL: watchdog"); `TB_FINISH end
`endif
