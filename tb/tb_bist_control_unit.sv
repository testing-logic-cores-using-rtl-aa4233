// tb_bist_control_unit: checks that START keeps test_enable high for exactly
// the requested number of clocks (5, 1, 37 and 0 = 4096), that end_test rises
// RESP_LATENCY + 1 clocks after the last pattern, that START during a test is
// ignored, that RESET aborts and pulses core_reset once, that SELECT loads
// the result select, and the status word.
module tb_bist_control_unit;
  import bist_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0;
  wcdr_t cmd;
  logic test_enable, end_test, init, core_reset;
  result_sel_e sel;
  logic [15:0] status;
  int checks = 0, failures = 0;

  bist_control_unit dut (.clk, .rst_n, .cmd_valid, .cmd, .test_enable, .end_test, .init,
                         .core_reset, .sel, .status);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Issue one command for one clock; return whether init pulsed with it.
  task automatic issue(input bist_cmd_e c, input result_sel_e s, input int n, output bit saw_init);
    cmd = '{cmd: c, sel: s, count: 12'(n)};
    cmd_valid = 1;
    #1;
    saw_init = init;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // START n patterns, count test_enable clocks and the delay to end_test.
  task automatic run_test(input int n);
    int te = 0, t = 0, first_end = -1;
    bit si;
    issue(CMD_START, SEL_BN, n, si);
    check(si, $sformatf("init pulses with START %0d", n));
    check(!end_test, "end_test cleared by START");
    while (first_end < 0 && t < 5000) begin
      t++;
      if (test_enable) te++;
      if (test_enable && te == 3) check(status[11:0] == 12'((n == 0 ? 4096 : n) - 3), "status counter");
      if (end_test) first_end = t;
      @(negedge clk);
    end
    check(te == (n == 0 ? 4096 : n), $sformatf("test_enable clocks %0d for %0d", te, n));
    check(first_end == te + 2, $sformatf("end_test after %0d clocks", first_end));
    check(status[14] && !status[15], "status end_test");
  endtask

  initial begin
    bit si;
    int pulses;
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!test_enable && !end_test && !core_reset, "idle after reset");
    check(sel == SEL_STATUS, "select status after reset");
    run_test(5);
    run_test(1);
    run_test(37);
    run_test(0);
    // START while running is ignored
    issue(CMD_START, SEL_BN, 20, si);
    repeat (5) @(negedge clk);
    issue(CMD_START, SEL_BN, 100, si);
    check(!si, "no init for START during a test");
    repeat (20) @(negedge clk);
    check(end_test, "first test finished at its own count");
    // RESET
    issue(CMD_START, SEL_BN, 50, si);
    repeat (4) @(negedge clk);
    pulses = 0;
    issue(CMD_RESET, SEL_BN, 0, si);
    check(si, "init with RESET");
    for (int k = 0; k < 10; k++) begin
      if (core_reset) pulses++;
      check(!test_enable && !end_test, "RESET aborts");
      @(negedge clk);
    end
    check(pulses == 1, $sformatf("core_reset pulses %0d", pulses));
    // SELECT
    issue(CMD_SELECT, SEL_CN, 0, si);
    check(sel == SEL_CN, "select CN");
    issue(CMD_SELECT, SEL_CU, 0, si);
    check(sel == SEL_CU, "select CU");
    issue(CMD_NOP, SEL_BN, 0, si);
    check(sel == SEL_CU && !si, "NOP changes nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
