// pattern_generator: builds the test inputs of the three modules under test
// from one ALFSR and one Constraints Generator, and selects between them and
// the functional inputs.
//
// A single 20-bit ALFSR serves all three modules, which are therefore tested
// at the same time with the same patterns. Each module's input port is wider
// than the ALFSR, so the ALFSR bits are replicated: input bit i takes ALFSR bit
// (i mod ALFSR_W). BIT_NODE and CHECK_NODE also have a 4-bit constrained
// data-path select port; one Constraints Generator drives it on both, on the
// CG_W most significant input bits (the position is this design's choice).
// CONTROL_UNIT has no constrained inputs. While test_enable is high the
// multiplexers in front of the modules pass the patterns, otherwise the
// functional inputs; the generator advances one pattern per clock while
// test_enable is high, and 'init' reloads the ALFSR seed and restarts the CG.
module pattern_generator
  import bist_pkg::*;
#(
  parameter int BN_W = BN_IN_W,
  parameter int CN_W = CN_IN_W,
  parameter int CU_W = CU_IN_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  logic            test_enable,
  input  logic [BN_W-1:0] bn_func,
  input  logic [CN_W-1:0] cn_func,
  input  logic [CU_W-1:0] cu_func,
  output logic [BN_W-1:0] bn_in,
  output logic [CN_W-1:0] cn_in,
  output logic [CU_W-1:0] cu_in
);

  logic [ALFSR_W-1:0] lfsr;
  logic [CG_W-1:0]    cg;
  logic [BN_W-1:0]    bn_pat;
  logic [CN_W-1:0]    cn_pat;
  logic [CU_W-1:0]    cu_pat;

  alfsr u_alfsr (
    .clk, .rst_n, .init, .en(test_enable), .state(lfsr)
  );

  constraint_generator u_cg (
    .clk, .rst_n, .init, .en(test_enable), .code(cg)
  );

  // Replicate the ALFSR to each width, then overlay the constrained port.
  always_comb begin
    for (int i = 0; i < BN_W; i++) bn_pat[i] = lfsr[i % ALFSR_W];
    for (int i = 0; i < CN_W; i++) cn_pat[i] = lfsr[i % ALFSR_W];
    for (int i = 0; i < CU_W; i++) cu_pat[i] = lfsr[i % ALFSR_W];
    bn_pat[BN_W-1 -: CG_W] = cg;
    cn_pat[CN_W-1 -: CG_W] = cg;
  end

  assign bn_in = test_enable ? bn_pat : bn_func;
  assign cn_in = test_enable ? cn_pat : cn_func;
  assign cu_in = test_enable ? cu_pat : cu_func;

endmodule
