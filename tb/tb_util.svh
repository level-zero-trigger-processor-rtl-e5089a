// tb_util.svh: check counting shared by the testbenches.
// CHECK(cond, msg) counts one check and, if cond is false, one failure with
// a message. Testbenches declare `int checks, failures;` themselves.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %0t: %s", $time, msg); \
    end \
  end
`define TB_END \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
`endif
