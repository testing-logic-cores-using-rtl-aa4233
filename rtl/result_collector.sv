// result_collector: compacts the responses of the three modules under test
// and makes the results readable.
//
// One 16-bit MISR per module (each with its own XOR cascade folding the 55,
// 53 or 44 output bits) and the Output Selector. The modules' outputs answer
// a pattern RESP_LATENCY clocks after it is applied, so the MISRs compact
// while test_enable delayed by RESP_LATENCY clocks is high: exactly one
// response per applied pattern. RESP_LATENCY = 1 (registered module outputs)
// is this design's assumption. 'init' clears all signatures; 'dout' is
// combinational from the signatures and 'sel'.
module result_collector
  import bist_pkg::*;
#(
  parameter int RESP_LATENCY = 1,
  parameter int BN_W         = BN_OUT_W,
  parameter int CN_W         = CN_OUT_W,
  parameter int CU_W         = CU_OUT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init,
  input  logic              test_enable,
  input  result_sel_e       sel,
  input  logic [MISR_W-1:0] status,
  input  logic [BN_W-1:0]   bn_out,
  input  logic [CN_W-1:0]   cn_out,
  input  logic [CU_W-1:0]   cu_out,
  output logic [MISR_W-1:0] dout
);

  logic              compact;
  logic [MISR_W-1:0] sig_bn, sig_cn, sig_cu;

  if (RESP_LATENCY == 0) begin : g_nodelay
    assign compact = test_enable;
  end else begin : g_delay
    logic [RESP_LATENCY-1:0] te_dly;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    te_dly <= '0;
      else if (init) te_dly <= '0;
      else           te_dly <= RESP_LATENCY'({te_dly, test_enable});
    end
    assign compact = te_dly[RESP_LATENCY-1];
  end

  misr #(.IN_W(BN_W)) u_misr_bn (.clk, .rst_n, .init, .en(compact), .d(bn_out), .sig(sig_bn));
  misr #(.IN_W(CN_W)) u_misr_cn (.clk, .rst_n, .init, .en(compact), .d(cn_out), .sig(sig_cn));
  misr #(.IN_W(CU_W)) u_misr_cu (.clk, .rst_n, .init, .en(compact), .d(cu_out), .sig(sig_cu));

  output_selector u_sel (
    .sel, .sig_bn, .sig_cn, .sig_cu, .status, .dout
  );

endmodule
