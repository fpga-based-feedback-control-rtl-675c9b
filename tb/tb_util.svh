// tb_util.svh: check counters and the result line shared by the testbenches.
// A testbench declares `int checks, failures;` and uses CHECK / CHECK_NEAR.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL line %0d: %s", `__LINE__, msg); end end
`define CHECK_NEAR(got, exp, tol, msg) \
  begin checks++; if (((got) > (exp) ? (got) - (exp) : (exp) - (got)) > (tol)) begin failures++; \
    $display("FAIL line %0d: %s got %0d expected %0d", `__LINE__, msg, (got), (exp)); end end
`define TB_FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
