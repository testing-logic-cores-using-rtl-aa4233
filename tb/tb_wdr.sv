// tb_wdr: captures random 16-bit results into the WDR and shifts them out,
// LSB first, checking every bit; checks that nothing moves when not selected.
module tb_wdr;
  logic wrck = 0, wrstn = 0, sel = 0, shift_wr = 0, capture_wr = 0, wsi = 0;
  logic so;
  logic [15:0] d;
  int checks = 0, failures = 0;

  wdr dut (.wrck, .wrstn, .sel, .shift_wr, .capture_wr, .wsi, .d, .so);

  always #5 wrck = ~wrck;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge wrck);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read(output logic [15:0] r);
    capture_wr = 1;
    @(negedge wrck);
    capture_wr = 0; shift_wr = 1;
    for (int i = 0; i < 16; i++) begin
      r[i] = so;
      wsi = 1'b1;
      @(negedge wrck);
    end
    shift_wr = 0;
  endtask

  initial begin
    logic [15:0] r;
    repeat (2) @(negedge wrck);
    wrstn = 1;
    sel = 1;
    for (int k = 0; k < 30; k++) begin
      d = 16'($urandom);
      read(r);
      check(r == d, $sformatf("read %h vs %h", r, d));
    end
    check(so == 1'b1, "WSI shifted through");
    sel = 0;
    d = 16'h0;
    capture_wr = 1;
    @(negedge wrck);
    capture_wr = 0;
    check(so == 1'b1, "no capture when not selected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
