// tb_misr: feeds random 55-bit words to the MISR and compares the signature
// after every clock with the reference (XOR fold by slices, then
// multiply-by-x modulo x^16 + x^5 + x^3 + x^2 + 1); checks hold and clear.
module tb_misr;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [54:0] d;
  logic [15:0] sig, ref_s;
  int checks = 0, failures = 0;

  misr dut (.clk, .rst_n, .init, .en, .d, .sig);

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
    d = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(sig == 0, "clear after reset");
    ref_s = 0;
    for (int k = 0; k < 1000; k++) begin
      d  = 55'({$urandom, $urandom});
      en = ($urandom % 8) != 0;
      @(negedge clk);
      if (en) ref_s = ref_misr_next(ref_s, 64'(d), 55);
      check(sig == ref_s, $sformatf("cycle %0d: %h vs %h", k, sig, ref_s));
    end
    // single bit in the top slice must reach the signature
    init = 1; en = 0;
    @(negedge clk);
    init = 0;
    check(sig == 0, "init clears");
    d = 55'd1 << 50; en = 1;
    @(negedge clk);
    check(sig == 16'h0004, $sformatf("bit 50 folds onto bit 2: %h", sig));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
