// Shared checking macros for the testbenches. Each testbench declares
// `int checks, failures;` and reports them in one TB_RESULT line.
`ifndef TB_MACROS_SVH
`define TB_MACROS_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL: %s (t=%0t)", msg, $time); \
    end \
  end
`define FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`endif
