// p1500_bist_wrapper: top level. A P1500 wrapper around a logic core that
// carries its own at-speed BIST engine, so the core can be tested from a chip
// TAP controller with a handful of serial commands and no test vectors.
//
// Wrapper side (WRCK domain, wrapper serial port from the TAP controller):
// the WIR selects which register lies between WSI and WSO: WBY (1-bit
// bypass), WBR (boundary register on the core terminals pi/po), WCDR
// (commands to the BIST) or WDR (results from the BIST). With SelectWIR high
// the WIR itself is shifted. Core side (clk domain, the core's functional
// clock): the BIST engine drives the BIT_NODE, CHECK_NODE and CONTROL_UNIT
// modules of the core, which are outside this RTL and connect through the
// bn_/cn_/cu_ ports. Each WCDR update is passed to the clk domain by a toggle
// synchroniser and executed there as one command. A session: load WS_WCDR in
// the WIR, shift and update a START command with the pattern count, wait for
// end_test (count + RESP_LATENCY + a few clocks), then for each result shift
// a SELECT command, load WS_WDR and capture and shift out 16 bits. WSO is
// combinational from the last stage of the selected register. The register
// set and the WSO multiplexers follow the published wrapper; instruction
// codes, command word layout and the clock-domain crossing are this design's.
// An assertion checks the wrapper serial port rule that capture, shift and
// update never coincide.
module p1500_bist_wrapper
  import bist_pkg::*;
#(
  parameter int N_IN         = 8,
  parameter int N_OUT        = 8,
  parameter int RESP_LATENCY = 1
) (
  // Wrapper serial port.
  input  logic                wrck,
  input  logic                wrstn,
  input  logic                wsi,
  input  logic                shift_wr,
  input  logic                capture_wr,
  input  logic                update_wr,
  input  logic                select_wir,
  output logic                wso,
  // Core clock domain.
  input  logic                clk,
  input  logic                rst_n,
  output logic                core_reset,
  output logic                test_enable,
  output logic                end_test,
  // Core terminals through the boundary register.
  input  logic [N_IN-1:0]     pi,
  output logic [N_IN-1:0]     core_pi,
  input  logic [N_OUT-1:0]    core_po,
  output logic [N_OUT-1:0]    po,
  // Modules under test.
  input  logic [BN_IN_W-1:0]  bn_func,
  input  logic [CN_IN_W-1:0]  cn_func,
  input  logic [CU_IN_W-1:0]  cu_func,
  output logic [BN_IN_W-1:0]  bn_in,
  output logic [CN_IN_W-1:0]  cn_in,
  output logic [CU_IN_W-1:0]  cu_in,
  input  logic [BN_OUT_W-1:0] bn_out,
  input  logic [CN_OUT_W-1:0] cn_out,
  input  logic [CU_OUT_W-1:0] cu_out
);

  wir_instr_e       instr;
  logic             wir_so, wby_so, wbr_so, wcdr_so, wdr_so, dr_so;
  logic [WCDR_W-1:0] wcdr_q;
  logic             wcdr_tgl, cmd_valid;
  logic [WDR_W-1:0] result;
  logic             wby;

  wir u_wir (
    .wrck, .wrstn, .select_wir, .shift_wr, .capture_wr, .update_wr,
    .wsi, .so(wir_so), .instr
  );

  // Bypass register: captures 0, shifts one bit.
  always_ff @(posedge wrck or negedge wrstn) begin
    if (!wrstn) wby <= 1'b0;
    else if (!select_wir && instr == WS_BYPASS) begin
      if (capture_wr)    wby <= 1'b0;
      else if (shift_wr) wby <= wsi;
    end
  end
  assign wby_so = wby;

  wbr #(.N_IN(N_IN), .N_OUT(N_OUT)) u_wbr (
    .wrck, .wrstn, .instr, .select_wir, .shift_wr, .capture_wr, .update_wr,
    .wsi, .so(wbr_so), .pi, .core_pi, .core_po, .po
  );

  wcdr u_wcdr (
    .wrck, .wrstn, .sel(!select_wir && instr == WS_WCDR), .shift_wr, .update_wr,
    .wsi, .so(wcdr_so), .q(wcdr_q), .upd_tgl(wcdr_tgl)
  );

  wdr u_wdr (
    .wrck, .wrstn, .sel(!select_wir && instr == WS_WDR), .shift_wr, .capture_wr,
    .wsi, .d(result), .so(wdr_so)
  );

  // Data-register multiplexer, then WIR / data-register multiplexer.
  always_comb begin
    unique case (instr)
      WS_EXTEST, WS_INTEST: dr_so = wbr_so;
      WS_WCDR:              dr_so = wcdr_so;
      WS_WDR:               dr_so = wdr_so;
      default:              dr_so = wby_so;
    endcase
  end
  assign wso = select_wir ? wir_so : dr_so;

  // Wrapper serial port rule: at most one of capture, shift and update per
  // WRCK edge.
  a_wsp_one_event: assert property (@(posedge wrck) $onehot0({capture_wr, shift_wr, update_wr}));

  toggle_sync u_sync (.clk, .rst_n, .tgl_in(wcdr_tgl), .pulse(cmd_valid));

  bist_engine #(.RESP_LATENCY(RESP_LATENCY)) u_bist (
    .clk, .rst_n, .cmd_valid, .cmd(wcdr_t'(wcdr_q)), .dout(result),
    .core_reset, .test_enable, .end_test,
    .bn_func, .cn_func, .cu_func, .bn_in, .cn_in, .cu_in,
    .bn_out, .cn_out, .cu_out
  );

endmodule
