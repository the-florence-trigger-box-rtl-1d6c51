// Shared testbench helpers: a check counter, a failure counter, the CHECK
// macro and the final result line.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; \
    if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end end
`define TB_DONE \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define TB_WATCHDOG(clk, ncyc) \
  initial begin repeat (ncyc) @(posedge clk); failures++; \
    $display("FAIL: watchdog expired"); `TB_DONE end
`endif
