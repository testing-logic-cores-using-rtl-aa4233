// tb_p1500_bist_wrapper: end-to-end test of the wrapped core at the default
// parameters, driven only through the wrapper serial port as a TAP
// controller would drive it.
//
// The core clock (10 ns) and the wrapper clock WRCK (37 ns) are unrelated.
// Three behavioural stand-ins take the place of BIT_NODE, CHECK_NODE and
// CONTROL_UNIT. The session: bypass, EXTEST and INTEST through the boundary
// register; a 4096-pattern BIST started through the WCDR; status polled
// through the WDR until end_test; the three signatures read out and compared
// with signatures predicted from reference patterns and the stand-ins'
// next-state function; a RESET command; a second, 100-pattern run. Each
// mechanism is counted and one that never happened counts as a failure.
module tb_p1500_bist_wrapper;
  import bist_pkg::*;
  import tb_ref_pkg::*;

  logic wrck = 0, wrstn = 0, wsi = 0, shift_wr = 0, capture_wr = 0, update_wr = 0, select_wir = 0;
  logic wso;
  logic clk = 0, rst_n = 0;
  logic core_reset, test_enable, end_test;
  logic [7:0] pi, core_pi, core_po, po;
  logic [53:0] bn_func, bn_in;
  logic [52:0] cn_func, cn_in;
  logic [44:0] cu_func, cu_in;
  logic [54:0] bn_out;
  logic [52:0] cn_out;
  logic [43:0] cu_out;
  int checks = 0, failures = 0;

  p1500_bist_wrapper dut (
    .wrck, .wrstn, .wsi, .shift_wr, .capture_wr, .update_wr, .select_wir, .wso,
    .clk, .rst_n, .core_reset, .test_enable, .end_test,
    .pi, .core_pi, .core_po, .po,
    .bn_func, .cn_func, .cu_func, .bn_in, .cn_in, .cu_in, .bn_out, .cn_out, .cu_out
  );

  core_module_model #(.IN_W(54), .OUT_W(55)) m_bn (.clk, .rst_n, .in(bn_in), .out(bn_out));
  core_module_model #(.IN_W(53), .OUT_W(53)) m_cn (.clk, .rst_n, .in(cn_in), .out(cn_out));
  core_module_model #(.IN_W(45), .OUT_W(44)) m_cu (.clk, .rst_n, .in(cu_in), .out(cu_out));

  always #5    clk  = ~clk;
  always #18.5 wrck = ~wrck;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Mechanism counters.
  int n_bypass, n_extest, n_intest, n_wcdr_cmd, n_runs, n_end, n_small_dp, n_wide_dp;
  int n_status_running, n_sig_read, n_core_reset, n_functional, n_start_ignored;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- core-clock monitor: reference patterns and predicted signatures ----
  logic [19:0] m_s;
  logic [63:0] m_sb, m_sc, m_su;
  logic [15:0] exp_bn, exp_cn, exp_cu;
  int          m_k, last_len, m_bad;
  logic        te_prev;

  always @(negedge clk) begin
    if (!rst_n) begin
      te_prev <= 0; m_k <= 0; last_len <= 0; m_bad <= 0;
      exp_bn <= 0; exp_cn <= 0; exp_cu <= 0;
    end else begin
      logic [63:0] pb, pc, pu, sb, sc, su;
      logic [19:0] s;
      logic [15:0] eb, ec, eu;
      int k;
      if (core_reset) begin
        exp_bn <= 0; exp_cn <= 0; exp_cu <= 0;
        n_core_reset++;
      end
      if (test_enable) begin
        if (!te_prev) begin
          s = 20'h1; k = 0;
          sb = 64'(bn_out); sc = 64'(cn_out); su = 64'(cu_out);
          eb = 0; ec = 0; eu = 0;
          n_runs++;
        end else begin
          s = m_s; k = m_k; sb = m_sb; sc = m_sc; su = m_su;
          eb = exp_bn; ec = exp_cn; eu = exp_cu;
        end
        pb = ref_pattern(s, ref_cg(k), 54, 1);
        pc = ref_pattern(s, ref_cg(k), 53, 1);
        pu = ref_pattern(s, 4'h0, 45, 0);
        if (64'(bn_in) != pb || 64'(cn_in) != pc || 64'(cu_in) != pu) m_bad <= m_bad + 1;
        if (ref_cg(k) == 4'hF) n_wide_dp++; else n_small_dp++;
        sb = model_next(sb, pb, 55); sc = model_next(sc, pc, 53); su = model_next(su, pu, 44);
        exp_bn <= ref_misr_next(eb, sb, 55);
        exp_cn <= ref_misr_next(ec, sc, 53);
        exp_cu <= ref_misr_next(eu, su, 44);
        m_sb <= sb; m_sc <= sc; m_su <= su;
        m_s <= ref_alfsr_next(s);
        m_k <= k + 1;
      end else if (te_prev) begin
        last_len <= m_k;
      end
      if (!test_enable && bn_in == bn_func && cn_in == cn_func && cu_in == cu_func) n_functional++;
      te_prev <= test_enable;
    end
  end

  always @(posedge end_test) n_end++;

  // ---- wrapper serial port tasks ----
  task automatic wir_load(input wir_instr_e ins);
    logic [2:0] c;
    c = ins;
    select_wir = 1; shift_wr = 1;
    for (int i = 0; i < 3; i++) begin wsi = c[i]; @(negedge wrck); end
    shift_wr = 0; update_wr = 1;
    @(negedge wrck);
    update_wr = 0; select_wir = 0;
  endtask

  // Optional capture, shift n bits of 'din' (LSB first), optional update.
  task automatic dr_scan(input int n, input logic [63:0] din, input bit cap, input bit upd,
                         output logic [63:0] dout);
    dout = '0;
    if (cap) begin capture_wr = 1; @(negedge wrck); capture_wr = 0; end
    shift_wr = 1;
    for (int i = 0; i < n; i++) begin
      dout[i] = wso;
      wsi = din[i];
      @(negedge wrck);
    end
    shift_wr = 0;
    if (upd) begin update_wr = 1; @(negedge wrck); update_wr = 0; end
  endtask

  task automatic command(input bist_cmd_e c, input result_sel_e s, input int n);
    wcdr_t w;
    logic [63:0] dummy;
    w = '{cmd: c, sel: s, count: 12'(n)};
    wir_load(WS_WCDR);
    dr_scan(16, 64'(w), 0, 1, dummy);
    n_wcdr_cmd++;
    repeat (2) @(negedge wrck);   // let the command cross into the core clock
  endtask

  task automatic read_result(input result_sel_e s, output logic [15:0] r);
    logic [63:0] d;
    command(CMD_SELECT, s, 0);
    wir_load(WS_WDR);
    dr_scan(16, 64'h0, 1, 0, d);
    r = d[15:0];
  endtask

  task automatic run_and_check(input int n);
    logic [15:0] r;
    int polls = 0;
    command(CMD_START, SEL_BN, n);
    do begin
      read_result(SEL_STATUS, r);
      if (r[15]) n_status_running++;
      polls++;
    end while (!r[14] && polls < 2000);
    check(r[14], "end_test seen in the status word");
    check(last_len == (n == 0 ? 4096 : n), $sformatf("test ran %0d clocks for %0d patterns", last_len, n));
    check(m_bad == 0, $sformatf("%0d clocks with a wrong pattern", m_bad));
    read_result(SEL_BN, r); n_sig_read++;
    check(r == exp_bn, $sformatf("BIT_NODE signature %h vs %h", r, exp_bn));
    read_result(SEL_CN, r); n_sig_read++;
    check(r == exp_cn, $sformatf("CHECK_NODE signature %h vs %h", r, exp_cn));
    read_result(SEL_CU, r); n_sig_read++;
    check(r == exp_cu, $sformatf("CONTROL_UNIT signature %h vs %h", r, exp_cu));
  endtask

  initial begin
    logic [63:0] d;
    logic [15:0] r, v;
    {n_bypass, n_extest, n_intest, n_wcdr_cmd, n_runs, n_end, n_small_dp, n_wide_dp} = '0;
    {n_status_running, n_sig_read, n_core_reset, n_functional, n_start_ignored} = '0;
    bn_func = 54'({$urandom, $urandom}); cn_func = 53'({$urandom, $urandom}); cu_func = 45'({$urandom, $urandom});
    pi = 8'h3C; core_po = 8'hA5;
    repeat (3) @(negedge wrck);
    wrstn = 1; rst_n = 1;
    repeat (2) @(negedge wrck);

    // Bypass: one bit of delay between WSI and WSO.
    dr_scan(17, 64'h1_6B2D, 1, 0, d);
    check(d[16:1] == 16'h6B2D, $sformatf("bypass delay %h", d[16:0]));
    n_bypass++;

    // EXTEST: capture chip-side inputs and core outputs, drive po.
    wir_load(WS_EXTEST);
    v = 16'h96_E1;
    dr_scan(16, 64'(v), 1, 1, d);
    check(d[15:0] == {8'hA5, 8'h3C}, "EXTEST capture");
    check(po == 8'h96 && core_pi == pi, "EXTEST drives po");
    n_extest++;
    // INTEST: drive the core inputs.
    wir_load(WS_INTEST);
    dr_scan(16, 64'h00_5D, 1, 1, d);
    check(core_pi == 8'h5D && po == core_po, "INTEST drives core_pi");
    n_intest++;
    wir_load(WS_BYPASS);
    check(core_pi == pi && po == core_po, "terminals functional again");

    // Full 4096-pattern session, then START while running is ignored.
    run_and_check(0);
    command(CMD_START, SEL_BN, 300);
    command(CMD_START, SEL_BN, 5);
    repeat (400) @(negedge clk);
    if (last_len == 300) n_start_ignored++;
    check(last_len == 300, "second START during a test ignored");

    // RESET: clears signatures and pulses core reset.
    command(CMD_RESET, SEL_BN, 0);
    repeat (10) @(negedge clk);
    read_result(SEL_BN, r);
    check(r == 0, "signatures cleared by RESET");
    read_result(SEL_STATUS, r);
    check(r[15:14] == 2'b00, "idle after RESET");

    // A shorter session with other functional values beforehand.
    bn_func = ~bn_func; cu_func = ~cu_func;
    run_and_check(100);

    check(n_bypass > 0, "bypass used");
    check(n_extest > 0 && n_intest > 0, "boundary register used");
    check(n_runs == 3, $sformatf("%0d BIST runs", n_runs));
    check(n_end == 3, $sformatf("%0d end_test events", n_end));
    check(n_small_dp > 0 && n_wide_dp > 0, "both small and wide data-path selections applied");
    check(n_status_running > 0, "status read while the test ran");
    check(n_sig_read == 6, "signatures read");
    check(n_core_reset == 1, $sformatf("%0d core resets", n_core_reset));
    check(n_functional > 0, "functional inputs passed outside the test");
    check(n_start_ignored == 1, "START during a test");
    $display("mechanisms: bypass=%0d extest=%0d intest=%0d wcdr_commands=%0d runs=%0d end_test=%0d",
             n_bypass, n_extest, n_intest, n_wcdr_cmd, n_runs, n_end);
    $display("            small_datapath_patterns=%0d wide_datapath_patterns=%0d status_running=%0d",
             n_small_dp, n_wide_dp, n_status_running);
    $display("            signature_reads=%0d core_resets=%0d functional_clocks=%0d start_ignored=%0d",
             n_sig_read, n_core_reset, n_functional, n_start_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
