// Shared testbench helpers: check counting and the final result line.
// A testbench declares 'int checks, failures;' and uses these macros.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
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
`define TB_FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`endif
