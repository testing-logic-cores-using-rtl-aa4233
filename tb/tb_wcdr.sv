// tb_wcdr: shifts random 16-bit words into the WCDR, checks the update stage
// and that the toggle flips once per update, that the update stage holds
// while a new word is shifted, and that nothing moves when not selected.
module tb_wcdr;
  logic wrck = 0, wrstn = 0, sel = 0, shift_wr = 0, update_wr = 0, wsi = 0;
  logic so, upd_tgl;
  logic [15:0] q;
  int checks = 0, failures = 0;

  wcdr dut (.wrck, .wrstn, .sel, .shift_wr, .update_wr, .wsi, .so, .q, .upd_tgl);

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

  task automatic shift_in(input logic [15:0] w, output logic [15:0] out);
    shift_wr = 1;
    for (int i = 0; i < 16; i++) begin
      wsi = w[i];
      out[i] = so;
      @(negedge wrck);
    end
    shift_wr = 0;
  endtask

  initial begin
    logic [15:0] w, prev, o;
    logic t;
    repeat (2) @(negedge wrck);
    wrstn = 1;
    check(q == 0 && upd_tgl == 0, "reset");
    sel = 1;
    prev = 0;
    for (int k = 0; k < 20; k++) begin
      w = 16'($urandom);
      t = upd_tgl;
      shift_in(w, o);
      check(q == prev, "update stage holds during shift");
      check(o == prev, "previous word shifted out");
      update_wr = 1;
      @(negedge wrck);
      update_wr = 0;
      check(q == w, $sformatf("update %h vs %h", q, w));
      check(upd_tgl == !t, "toggle");
      prev = w;
    end
    sel = 0;
    t = upd_tgl;
    shift_in(16'h1234, o);
    update_wr = 1;
    @(negedge wrck);
    update_wr = 0;
    check(q == prev && upd_tgl == t, "ignored when not selected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
