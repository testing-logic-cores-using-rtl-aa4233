// bist_engine: the at-speed self-test engine wrapped around the three
// modules of the logic core (BIT_NODE, CHECK_NODE and CONTROL_UNIT of a serial
// LDPC decoder).
//
// The Control Unit decodes commands and counts patterns; the Pattern
// Generator applies one pseudo-random pattern per clock to all three modules
// at once through the input multiplexers; the Result Collector compacts each
// module's outputs into its own 16-bit MISR and, through the Output Selector,
// presents one signature or the status word on 'dout'. The modules themselves
// are outside this block: their inputs leave on bn_in/cn_in/cu_in (the
// functional values bn_func/cn_func/cu_func when no test runs) and their
// outputs come back on bn_out/cn_out/cu_out. All of it runs on the core clock
// 'clk'. Command interface: a 16-bit bist_pkg::wcdr_t word with a one-clock
// strobe. The block structure follows the published BIST architecture; the
// response latency RESP_LATENCY of the modules is a parameter (default 1).
module bist_engine
  import bist_pkg::*;
#(
  parameter int RESP_LATENCY = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  wcdr_t               cmd,
  output logic [MISR_W-1:0]   dout,
  output logic                core_reset,
  output logic                test_enable,
  output logic                end_test,
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

  logic              init;
  result_sel_e       sel;
  logic [MISR_W-1:0] status;

  bist_control_unit #(.RESP_LATENCY(RESP_LATENCY)) u_cu (
    .clk, .rst_n, .cmd_valid, .cmd, .test_enable, .end_test, .init,
    .core_reset, .sel, .status
  );

  pattern_generator u_pg (
    .clk, .rst_n, .init, .test_enable,
    .bn_func, .cn_func, .cu_func, .bn_in, .cn_in, .cu_in
  );

  result_collector #(.RESP_LATENCY(RESP_LATENCY)) u_rc (
    .clk, .rst_n, .init, .test_enable, .sel, .status,
    .bn_out, .cn_out, .cu_out, .dout
  );

endmodule
