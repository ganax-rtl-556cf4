// tb_common.svh: shared testbench helpers.
// CHECK_EQ compares a value against an independently computed expectation and
// counts checks and failures; the including module declares `checks` and
// `failures` as int.
`ifndef TB_COMMON_SVH
`define TB_COMMON_SVH
`define CHECK_EQ(got, exp, msg) \
  begin \
    checks++; \
    if ((got) !== (exp)) begin \
      failures++; \
      $display("FAIL %s: got %0h expected %0h (t=%0t)", msg, got, exp, $time); \
    end \
  end
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %s (t=%0t)", msg, $time); \
    end \
  end
`define TB_FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`endif
