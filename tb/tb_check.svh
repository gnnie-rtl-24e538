// Shared checking helpers for the testbenches: a check counter, a failure
// counter and the final result line.
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s", msg); end end
`define FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
// Watchdog: after n clock cycles the run counts a failure and ends.
`define WATCHDOG(n) \
  initial begin repeat (n) @(posedge clk); failures++; $display("FAIL: watchdog"); `FINISH end
