// tb_wir: shifts each instruction code into the WIR and updates it, checks
// the decoded instruction, the capture-and-shift-out of the current
// instruction, that shifting alone does not change it, that unknown codes
// become WS_BYPASS, that nothing happens with SelectWIR low, and WRSTN.
module tb_wir;
  import bist_pkg::*;
  logic wrck = 0, wrstn = 0, select_wir = 0, shift_wr = 0, capture_wr = 0, update_wr = 0, wsi = 0;
  logic so;
  wir_instr_e instr;
  int checks = 0, failures = 0;

  wir dut (.wrck, .wrstn, .select_wir, .shift_wr, .capture_wr, .update_wr, .wsi, .so, .instr);

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

  task automatic load(input logic [2:0] code, input bit do_update);
    select_wir = 1; shift_wr = 1;
    for (int i = 0; i < 3; i++) begin
      wsi = code[i];
      @(negedge wrck);
    end
    shift_wr = 0;
    update_wr = do_update;
    @(negedge wrck);
    update_wr = 0; select_wir = 0;
  endtask

  function automatic wir_instr_e expect_of(input logic [2:0] c);
    return (c <= 3'd4) ? wir_instr_e'(c) : WS_BYPASS;
  endfunction

  initial begin
    logic [2:0] got;
    repeat (2) @(negedge wrck);
    check(instr == WS_BYPASS, "bypass under reset");
    wrstn = 1;
    for (int c = 0; c < 8; c++) begin
      load(3'(c), 1);
      check(instr == expect_of(3'(c)), $sformatf("code %0d gives %0d", c, instr));
    end
    load(3'd3, 1);
    load(3'd1, 0);
    check(instr == WS_WCDR, "shift without update keeps the instruction");
    // capture and shift out
    select_wir = 1; capture_wr = 1;
    @(negedge wrck);
    capture_wr = 0; shift_wr = 1;
    for (int i = 0; i < 3; i++) begin
      got[i] = so;
      @(negedge wrck);
    end
    shift_wr = 0; select_wir = 0;
    check(got == 3'd3, $sformatf("captured instruction %0d", got));
    // update with SelectWIR low does nothing
    update_wr = 1;
    @(negedge wrck);
    update_wr = 0;
    check(instr == WS_WCDR, "no update with SelectWIR low");
    wrstn = 0;
    #1;
    check(instr == WS_BYPASS, "WRSTN resets to bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
