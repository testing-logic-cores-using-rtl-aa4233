// tb_wbr: checks the boundary register in its three uses: transparent
// terminals outside EXTEST/INTEST; EXTEST (capture the chip-side inputs,
// drive the chip-side outputs from the update stage); INTEST (drive the
// core inputs from the update stage, capture the core outputs).
module tb_wbr;
  import bist_pkg::*;
  logic wrck = 0, wrstn = 0, select_wir = 0, shift_wr = 0, capture_wr = 0, update_wr = 0, wsi = 0;
  wir_instr_e instr;
  logic so;
  logic [7:0] pi, core_pi, core_po, po;
  int checks = 0, failures = 0;

  wbr dut (.wrck, .wrstn, .instr, .select_wir, .shift_wr, .capture_wr, .update_wr, .wsi, .so,
           .pi, .core_pi, .core_po, .po);

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

  // Capture, then shift 16 bits in (v) while collecting the captured bits.
  task automatic cap_shift_update(input logic [15:0] v, output logic [15:0] got);
    capture_wr = 1;
    @(negedge wrck);
    capture_wr = 0; shift_wr = 1;
    for (int i = 0; i < 16; i++) begin
      got[i] = so;
      wsi = v[i];
      @(negedge wrck);
    end
    shift_wr = 0; update_wr = 1;
    @(negedge wrck);
    update_wr = 0;
  endtask

  initial begin
    logic [15:0] v, got;
    instr = WS_BYPASS;
    pi = 8'h5A; core_po = 8'hC3;
    repeat (2) @(negedge wrck);
    wrstn = 1;
    for (int k = 0; k < 10; k++) begin
      pi = 8'($urandom); core_po = 8'($urandom);
      #1;
      check(core_pi == pi && po == core_po, "transparent in bypass");
      @(negedge wrck);
    end
    // EXTEST
    instr = WS_EXTEST;
    for (int k = 0; k < 10; k++) begin
      logic [7:0] pi_now, cpo_now;
      v = 16'($urandom);
      pi_now = 8'($urandom); cpo_now = 8'($urandom);
      pi = pi_now; core_po = cpo_now;
      cap_shift_update(v, got);
      check(got == {cpo_now, pi_now}, $sformatf("EXTEST capture %h vs %h", got, {cpo_now, pi_now}));
      check(po == v[15:8], "EXTEST drives po");
      check(core_pi == pi, "EXTEST leaves the core inputs functional");
    end
    // INTEST
    instr = WS_INTEST;
    for (int k = 0; k < 10; k++) begin
      logic [7:0] cpo_now;
      v = 16'($urandom);
      cpo_now = 8'($urandom);
      core_po = cpo_now;
      cap_shift_update(v, got);
      check(got[15:8] == cpo_now, "INTEST captures core outputs");
      check(core_pi == v[7:0], "INTEST drives core inputs");
      check(po == core_po, "INTEST leaves po functional");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
