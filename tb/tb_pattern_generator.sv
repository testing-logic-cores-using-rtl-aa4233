// tb_pattern_generator: runs 600 patterns and checks every input bit of the
// three modules against the reference (ALFSR replicated to the port width,
// constraint code on the top 4 bits of BIT_NODE and CHECK_NODE inputs); checks
// that functional inputs pass when test_enable is low and that the sequence
// restarts on init.
module tb_pattern_generator;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, test_enable = 0;
  logic [53:0] bn_func, bn_in;
  logic [52:0] cn_func, cn_in;
  logic [44:0] cu_func, cu_in;
  logic [19:0] s;
  int checks = 0, failures = 0;

  pattern_generator dut (.clk, .rst_n, .init, .test_enable, .bn_func, .cn_func, .cu_func,
                         .bn_in, .cn_in, .cu_in);

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

  task automatic run(input int n);
    s = 20'h1;
    for (int k = 0; k < n; k++) begin
      #1;
      check(bn_in == 54'(ref_pattern(s, ref_cg(k), 54, 1)), $sformatf("bn pattern %0d", k));
      check(cn_in == 53'(ref_pattern(s, ref_cg(k), 53, 1)), $sformatf("cn pattern %0d", k));
      check(cu_in == 45'(ref_pattern(s, 4'h0, 45, 0)), $sformatf("cu pattern %0d", k));
      @(negedge clk);
      s = ref_alfsr_next(s);
    end
  endtask

  initial begin
    bn_func = 54'({$urandom, $urandom}); cn_func = 53'({$urandom, $urandom}); cu_func = 45'({$urandom, $urandom});
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    #1;
    check(bn_in == bn_func && cn_in == cn_func && cu_in == cu_func, "functional mode");
    test_enable = 1;
    run(600);
    test_enable = 0;
    #1;
    check(bn_in == bn_func && cn_in == cn_func && cu_in == cu_func, "functional mode after test");
    init = 1;
    @(negedge clk);
    init = 0; test_enable = 1;
    run(50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
