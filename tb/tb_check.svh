// Shared checking helpers of the testbenches: a check counter, a failure
// counter and a macro that compares one value with its expected value.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK_EQ(got, exp, what) \
  begin \
    checks++; \
    if ((got) !== (exp)) begin \
      failures++; \
      $display("FAIL %s: got %h expected %h", what, got, exp); \
    end \
  end
`define CHECK(cond, what) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %s", what); \
    end \
  end
`define TB_DONE \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`endif
