// Common testbench scaffolding: clock, counters, check macro, watchdog.
`define TB_CHECK(c, msg) begin checks++; if (!(c)) begin failures++; $display("FAIL: %s @%0t", msg, $time); end end
`define TB_WATCHDOG(ncyc) \
  initial begin \
    repeat (ncyc) @(posedge clk); \
    failures++; \
    $display("FAIL: watchdog expired"); \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`define TB_DONE begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
