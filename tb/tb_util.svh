// Shared testbench helpers: check counters, a tolerance compare and the
// result line printed at the end of every testbench.
int checks = 0;
int failures = 0;

`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; \
    if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end end

`define CHECK_NEAR(got, exp, tol, msg) \
  begin checks++; if (((real'(got)) - (exp) > (tol)) || ((exp) - (real'(got)) > (tol))) begin failures++; \
    if (failures < 20) $display("FAIL %s got=%0d exp=%f tol=%f (t=%0t)", msg, got, exp, tol, $time); end end

`define FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

`define WATCHDOG(clk, n) \
  initial begin repeat (n) @(posedge clk); failures++; $display("FAIL watchdog"); `FINISH end
