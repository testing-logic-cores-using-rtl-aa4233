// tb_constraint_generator: applies 4096 patterns and checks that the code
// steps 0, 1, ... every 16 patterns and then holds 15 to the end; checks
// hold with 'en' low and restart with 'init'.
module tb_constraint_generator;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [3:0] code;
  int checks = 0, failures = 0;

  constraint_generator dut (.clk, .rst_n, .init, .en, .code);

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

  initial begin
    int wide;
    wide = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(code == 0, "code 0 after reset");
    en = 1;
    for (int n = 1; n <= 4096; n++) begin
      @(negedge clk);
      check(code == ref_cg(n), $sformatf("after %0d patterns: %0d vs %0d", n, code, ref_cg(n)));
      if (code == 4'hF) wide++;
    end
    check(wide == 4096 - 240 + 1, $sformatf("patterns on the wide code %0d", wide));
    en = 0;
    repeat (5) @(negedge clk);
    check(code == 4'hF, "hold");
    init = 1;
    @(negedge clk);
    init = 0;
    check(code == 0, "init restarts");
    en = 1;
    repeat (40) @(negedge clk);
    check(code == 2, "restarted sequence");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
