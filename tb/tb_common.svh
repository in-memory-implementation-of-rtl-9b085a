// Shared checking helpers of the testbenches: counters, compare macros and
// the closing line every testbench prints.
`ifndef TB_COMMON_SVH
`define TB_COMMON_SVH
`define TB_COUNTERS int checks = 0; int failures = 0;
`define CHECK(c, msg) begin checks++; if (!(c)) begin failures++; $display("FAIL: %s", msg); end end
`define CHECK_R(got, exp, tol, msg) begin checks++; \
  if (((got) - (exp)) > (tol) || ((exp) - (got)) > (tol)) begin \
    failures++; $display("FAIL: %s got %f expected %f", msg, got, exp); end end
`define TB_FINISH begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
