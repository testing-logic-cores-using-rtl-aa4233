// tb_result_collector: drives random module outputs with test_enable high
// for a burst of cycles and checks that each MISR compacted exactly the
// outputs of the cycles one clock after test_enable (RESP_LATENCY = 1), then
// reads the three signatures and the status word through the select.
module tb_result_collector;
  import bist_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, test_enable = 0;
  result_sel_e sel;
  logic [15:0] status, dout, e_bn, e_cn, e_cu;
  logic [54:0] bn_out;
  logic [52:0] cn_out;
  logic [43:0] cu_out;
  logic te_q;
  int checks = 0, failures = 0;

  result_collector dut (.clk, .rst_n, .init, .test_enable, .sel, .status,
                        .bn_out, .cn_out, .cu_out, .dout);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    n = 0;
    sel = SEL_STATUS; status = 16'hBEEF;
    bn_out = '0; cn_out = '0; cu_out = '0;
    e_bn = 0; e_cn = 0; e_cu = 0; te_q = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      te_q = test_enable;
      test_enable = (k >= 10 && k < 210);
      bn_out = 55'({$urandom, $urandom}); cn_out = 53'({$urandom, $urandom}); cu_out = 44'({$urandom, $urandom});
      // model: the outputs of the cycle after test_enable was high are compacted
      if (te_q) begin
        e_bn = ref_misr_next(e_bn, 64'(bn_out), 55);
        e_cn = ref_misr_next(e_cn, 64'(cn_out), 53);
        e_cu = ref_misr_next(e_cu, 64'(cu_out), 44);
        n++;
      end
    end
    @(negedge clk);
    check(n == 200, $sformatf("compacted %0d responses", n));
    sel = SEL_BN; #1; check(dout == e_bn, $sformatf("bn signature %h vs %h", dout, e_bn));
    sel = SEL_CN; #1; check(dout == e_cn, $sformatf("cn signature %h vs %h", dout, e_cn));
    sel = SEL_CU; #1; check(dout == e_cu, $sformatf("cu signature %h vs %h", dout, e_cu));
    sel = SEL_STATUS; #1; check(dout == 16'hBEEF, "status");
    init = 1;
    @(negedge clk);
    init = 0;
    sel = SEL_BN; #1; check(dout == 0, "init clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
