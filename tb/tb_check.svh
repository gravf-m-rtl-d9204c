// Shared testbench helpers: check counting, clock, watchdog.
// Each testbench declares `int checks, failures;` before using these.
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s (time %0t)", msg, $time); end end

`define TB_FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

`define TB_WATCHDOG(clk, cycles) \
  initial begin \
    repeat (cycles) @(posedge clk); \
    failures++; \
    $display("FAIL: watchdog expired after %0d cycles", cycles); \
    `TB_FINISH \
  end
