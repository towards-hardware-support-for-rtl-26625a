// tb_check.svh -- check counters and the CHECK macro shared by the testbenches.
// Include inside a module: declares `checks` and `failures`.
int checks = 0;
int failures = 0;
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL %s (t=%0t)", msg, $time); \
    end \
  end
`define TB_END \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
