// Shared testbench helpers: a counted check and a cycle watchdog.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`ifndef TB_MACROS_SVH
`define TB_MACROS_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end end
`define WATCHDOG(clk, cycles) \
  initial begin repeat (cycles) @(posedge clk); failures++; \
    $display("FAIL: watchdog after %0d cycles", cycles); \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
