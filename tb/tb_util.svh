// tb_util.svh: clock, reset, check counting and watchdog shared by the unit
// testbenches. `TB_SETUP(n) declares clk, rst_n, checks, failures and a
// watchdog that fails the test after n cycles; `CHECK(cond, msg) counts one
// check and reports a failure; `TB_DONE prints the result line and stops.
`define TB_SETUP(WD) \
  logic clk = 1'b0, rst_n = 1'b0; \
  always #5 clk = ~clk; \
  int checks = 0, failures = 0; \
  initial begin \
    repeat (WD) @(posedge clk); \
    failures++; \
    $display("FAIL: watchdog expired"); \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end

`define CHECK(COND, MSG) \
  begin \
    checks++; \
    if (!(COND)) begin \
      failures++; \
      if (failures < 10) $display("FAIL: %s", MSG); \
    end \
  end

`define TB_DONE \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end
