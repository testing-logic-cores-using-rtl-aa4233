// bist_control_unit: runs a BIST session on command from the wrapper.
//
// Commands arrive as a 16-bit word {cmd, sel, count} with a one-clock strobe
// 'cmd_valid'. START (ignored while a test runs) pulses 'init' to reseed the
// pattern generator and clear the signatures, loads the 12-bit
// pattern_counter with count-1 and raises test_enable for exactly 'count'
// clocks, one pattern per clock (count 0 stands for 4096). When the counter
// has run out, test_enable falls, the unit waits RESP_LATENCY clocks for the
// last response to be compacted and raises end_test, which stays high until
// the next START or RESET. RESET aborts a test, clears end_test, pulses
// 'init' and pulses 'core_reset' for one clock. SELECT loads the 2-bit result
// select driving the Output Selector. The 12-bit counter, test_enable,
// end_test and the 2-bit select are the published structure; the command
// encoding, the state machine and the status word layout are this design's.
module bist_control_unit
  import bist_pkg::*;
#(
  parameter int RESP_LATENCY = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  wcdr_t             cmd,
  output logic              test_enable,
  output logic              end_test,
  output logic              init,
  output logic              core_reset,
  output result_sel_e       sel,
  output logic [MISR_W-1:0] status
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;

  localparam int DW = (RESP_LATENCY > 1) ? $clog2(RESP_LATENCY + 1) : 1;

  state_e          state;
  logic [PC_W-1:0] pattern_counter;
  logic [DW-1:0]   drain;
  logic            do_start, do_reset;
  status_t         st;

  assign do_start = cmd_valid && cmd.cmd == CMD_START && state != S_RUN && state != S_DRAIN;
  assign do_reset = cmd_valid && cmd.cmd == CMD_RESET;
  assign init     = do_start || do_reset;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      pattern_counter <= '0;
      drain           <= '0;
      sel             <= SEL_STATUS;
      core_reset      <= 1'b0;
    end else begin
      core_reset <= do_reset;
      if (cmd_valid && cmd.cmd == CMD_SELECT) sel <= cmd.sel;
      if (do_reset) begin
        state           <= S_IDLE;
        pattern_counter <= '0;
      end else if (do_start) begin
        state           <= S_RUN;
        pattern_counter <= cmd.count - 1'b1;
      end else begin
        unique case (state)
          S_RUN: begin
            if (pattern_counter == '0) begin
              state <= (RESP_LATENCY == 0) ? S_DONE : S_DRAIN;
              drain <= DW'(RESP_LATENCY - 1);
            end else begin
              pattern_counter <= pattern_counter - 1'b1;
            end
          end
          S_DRAIN: begin
            if (drain == '0) state <= S_DONE;
            else             drain <= drain - 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  assign test_enable = (state == S_RUN);
  assign end_test    = (state == S_DONE);

  always_comb begin
    st.test_enable     = test_enable;
    st.end_test        = end_test;
    st.zero            = '0;
    st.pattern_counter = pattern_counter;
    status             = st;
  end

  // end_test and test_enable never overlap.
  a_exclusive: assert property (@(posedge clk) !(test_enable && end_test));

endmodule
