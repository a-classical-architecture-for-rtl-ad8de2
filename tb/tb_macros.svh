// Shared testbench helpers: check counters, clock/reset, watchdog.
`ifndef TB_MACROS_SVH
`define TB_MACROS_SVH
`define TB_CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end end
`define TB_EQ(got, exp, msg) \
  begin checks++; if ((got) !== (exp)) begin failures++; \
    $display("FAIL: %s: got %0h expected %0h (t=%0t)", msg, got, exp, $time); end end
`define TB_CLOCK(clk) initial clk = 1'b0; always #5 clk = ~clk;
`define TB_WATCHDOG(clk, ncyc) \
  initial begin repeat (ncyc) @(posedge clk); failures++; \
    $display("FAIL: watchdog expired"); \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define TB_DONE \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
