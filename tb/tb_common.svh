// tb_common.svh: bookkeeping shared by the self-checking testbenches.
// `TB_COMMON(limit) declares the check and failure counters, a check() task
// that counts one check and prints the failing condition, a finish() task
// that prints the TB_RESULT line and ends the run, and a watchdog that counts
// one failure and ends the run after `limit` time units.
`ifndef TB_COMMON_SVH
`define TB_COMMON_SVH
`define TB_COMMON(LIMIT) \
  int checks = 0, failures = 0; \
  task automatic check(input bit ok, input string what); \
    checks++; \
    if (!ok) begin failures++; $display("FAIL: %s", what); end \
  endtask \
  task automatic finish(); \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  endtask \
  initial begin \
    #(LIMIT); \
    failures++; \
    $display("watchdog expired"); \
    finish(); \
  end
`endif
