// Shared checking helpers for the FDIP-X testbenches. A testbench declares
// `int checks, failures;` and uses CHECK to compare a value against an
// expected value worked out by the testbench itself.
`ifndef TB_COMMON_SVH
`define TB_COMMON_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %s (t=%0t)", msg, $time); \
    end \
  end
`define CHECK_EQ(got, exp, msg) \
  begin \
    checks++; \
    if ((got) !== (exp)) begin \
      failures++; \
      $display("FAIL %s: got %0h expected %0h (t=%0t)", msg, got, exp, $time); \
    end \
  end
`endif
