// tb_alfsr: checks the 20-bit ALFSR against polynomial arithmetic modulo
// x^20 + x^3 + 1, checks that its period is exactly 2^20 - 1 (the polynomial
// is primitive, so no state but zero is missed), and checks hold and reseed.
module tb_alfsr;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [19:0] state, ref_s;
  int checks = 0, failures = 0;

  alfsr dut (.clk, .rst_n, .init, .en, .state);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (1100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int period;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == 20'h1, "seed after reset");
    ref_s = 20'h1;
    en = 1;
    for (int k = 1; k <= 200; k++) begin
      @(negedge clk);
      ref_s = ref_alfsr_next(ref_s);
      check(state == ref_s, $sformatf("step %0d: %h vs %h", k, state, ref_s));
    end
    // hold
    en = 0;
    repeat (3) @(negedge clk);
    check(state == ref_s, "hold with en low");
    // reseed
    init = 1; en = 1;
    @(negedge clk);
    init = 0;
    check(state == 20'h1, "init reloads the seed");
    // period (run at full speed, only compare with the seed)
    period = 0;
    do begin
      @(negedge clk);
      period++;
      if (state == 20'h0) break;
    end while (state != 20'h1 && period < (1 << 20) + 5);
    check(period == (1 << 20) - 1, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
