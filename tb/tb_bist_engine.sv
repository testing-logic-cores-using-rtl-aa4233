// tb_bist_engine: the BIST engine around three behavioural stand-ins of the
// modules under test. Runs full 4096-pattern sessions and a short one, and
// checks the length of the test, that every module saw the reference pattern
// sequence in every clock, and the three signatures against signatures
// predicted from the reference patterns and the stand-ins' next-state function.
module tb_bist_engine;
  import bist_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0;
  wcdr_t cmd;
  logic [15:0] dout;
  logic core_reset, test_enable, end_test;
  logic [53:0] bn_func, bn_in;
  logic [52:0] cn_func, cn_in;
  logic [44:0] cu_func, cu_in;
  logic [54:0] bn_out;
  logic [52:0] cn_out;
  logic [43:0] cu_out;
  int checks = 0, failures = 0;

  bist_engine dut (.clk, .rst_n, .cmd_valid, .cmd, .dout, .core_reset, .test_enable, .end_test,
                   .bn_func, .cn_func, .cu_func, .bn_in, .cn_in, .cu_in, .bn_out, .cn_out, .cu_out);

  core_module_model #(.IN_W(54), .OUT_W(55)) m_bn (.clk, .rst_n, .in(bn_in), .out(bn_out));
  core_module_model #(.IN_W(53), .OUT_W(53)) m_cn (.clk, .rst_n, .in(cn_in), .out(cn_out));
  core_module_model #(.IN_W(45), .OUT_W(44)) m_cu (.clk, .rst_n, .in(cu_in), .out(cu_out));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input bist_cmd_e c, input result_sel_e s, input int n);
    cmd = '{cmd: c, sel: s, count: 12'(n)};
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic session(input int n);
    logic [19:0] s;
    logic [63:0] sb, sc, su;     // stand-in states
    logic [15:0] eb, ec, eu;     // expected signatures
    int te = 0, bad = 0, t = 0;
    issue(CMD_START, SEL_BN, n);
    s = 20'h1;
    sb = 64'(bn_out); sc = 64'(cn_out); su = 64'(cu_out);
    eb = 0; ec = 0; eu = 0;
    while (test_enable) begin
      logic [63:0] pb, pc, pu;
      pb = ref_pattern(s, ref_cg(te), 54, 1);
      pc = ref_pattern(s, ref_cg(te), 53, 1);
      pu = ref_pattern(s, 4'h0, 45, 0);
      if (64'(bn_in) != pb || 64'(cn_in) != pc || 64'(cu_in) != pu) bad++;
      sb = model_next(sb, pb, 55); sc = model_next(sc, pc, 53); su = model_next(su, pu, 44);
      eb = ref_misr_next(eb, sb, 55); ec = ref_misr_next(ec, sc, 53); eu = ref_misr_next(eu, su, 44);
      s = ref_alfsr_next(s);
      te++;
      @(negedge clk);
    end
    while (!end_test && t < 10) begin t++; @(negedge clk); end
    check(te == (n == 0 ? 4096 : n), $sformatf("%0d patterns applied for %0d", te, n));
    check(bad == 0, $sformatf("%0d clocks with a wrong pattern", bad));
    check(t == 1, $sformatf("end_test %0d clocks after the last pattern", t + 1));
    issue(CMD_SELECT, SEL_BN, 0);     #1; check(dout == eb, $sformatf("BIT_NODE signature %h vs %h", dout, eb));
    issue(CMD_SELECT, SEL_CN, 0);     #1; check(dout == ec, $sformatf("CHECK_NODE signature %h vs %h", dout, ec));
    issue(CMD_SELECT, SEL_CU, 0);     #1; check(dout == eu, $sformatf("CONTROL_UNIT signature %h vs %h", dout, eu));
    issue(CMD_SELECT, SEL_STATUS, 0); #1; check(dout[15:14] == 2'b01, "status: ended, not running");
  endtask

  initial begin
    int rp;
    rp = 0;
    cmd = '0;
    bn_func = 54'({$urandom, $urandom}); cn_func = 53'({$urandom, $urandom}); cu_func = 45'({$urandom, $urandom});
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    #1;
    check(bn_in == bn_func && cn_in == cn_func && cu_in == cu_func, "functional inputs pass");
    session(0);
    session(100);
    bn_func = ~bn_func;
    repeat (7) @(negedge clk);
    session(0);
    issue(CMD_RESET, SEL_BN, 0);
    for (int k = 0; k < 4; k++) begin if (core_reset) rp++; @(negedge clk); end
    check(rp == 1, "core_reset pulse");
    issue(CMD_SELECT, SEL_BN, 0); #1; check(dout == 0, "RESET clears the signatures");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
