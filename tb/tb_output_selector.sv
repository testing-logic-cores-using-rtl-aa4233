// tb_output_selector: checks that each of the four select codes passes the
// matching 16-bit input, for random input values.
module tb_output_selector;
  import bist_pkg::*;
  result_sel_e sel;
  logic [15:0] a, b, c, s, dout;
  int checks = 0, failures = 0;

  output_selector dut (.sel, .sig_bn(a), .sig_cn(b), .sig_cu(c), .status(s), .dout);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      logic [15:0] exp;
      a = 16'($urandom); b = 16'($urandom); c = 16'($urandom); s = 16'($urandom);
      sel = result_sel_e'(k % 4);
      exp = (k % 4 == 0) ? a : (k % 4 == 1) ? b : (k % 4 == 2) ? c : s;
      #1;
      checks++;
      if (dout !== exp) begin failures++; $display("FAIL sel %0d", k % 4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
