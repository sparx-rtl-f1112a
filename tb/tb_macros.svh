// Shared check and watchdog macros for the self-checking testbenches.
// Each testbench declares `int checks, failures;` and a clock `clk`.
`ifndef TB_MACROS_SVH
`define TB_MACROS_SVH

`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      if (failures <= 10) $display("FAIL %s (t=%0t)", msg, $time); \
    end \
  end

`define CHECK_EQ(got, exp, msg) \
  begin \
    checks++; \
    if ((got) !== (exp)) begin \
      failures++; \
      if (failures <= 10) $display("FAIL %s: got %0d (0x%0h) expected %0d (0x%0h) t=%0t", msg, got, got, exp, exp, $time); \
    end \
  end

`define FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end

// Watchdog: after CYC clock cycles count a failure and end the run.
`define WATCHDOG(CYC) \
  initial begin \
    repeat (CYC) @(posedge clk); \
    failures++; \
    $display("FAIL watchdog expired"); \
    `FINISH \
  end

`endif
