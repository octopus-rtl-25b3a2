// Shared checking helpers for the self-checking testbenches: every check
// increments `checks`, a failing one also `failures` and prints a message.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end end
`define TB_FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define TB_WATCHDOG(cycles) \
  initial begin repeat (cycles) @(posedge clk); failures++; $display("FAIL watchdog"); `TB_FINISH end
`endif
