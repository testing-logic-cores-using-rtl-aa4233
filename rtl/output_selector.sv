// output_selector: picks the 16-bit result that the wrapper data register
// will capture.
//
// The 2-bit select comes from the BIST Control Unit: codes 0, 1 and 2 choose
// the BIT_NODE, CHECK_NODE and CONTROL_UNIT signatures, code 3 the status word
// (test_enable, end_test and the pattern counter). The 2-bit select and the
// three signatures are published; the code assignment and the status entry
// are this design's choice. Purely combinational.
module output_selector
  import bist_pkg::*;
#(
  parameter int W = MISR_W
) (
  input  result_sel_e  sel,
  input  logic [W-1:0] sig_bn,
  input  logic [W-1:0] sig_cn,
  input  logic [W-1:0] sig_cu,
  input  logic [W-1:0] status,
  output logic [W-1:0] dout
);

  always_comb begin
    unique case (sel)
      SEL_BN:     dout = sig_bn;
      SEL_CN:     dout = sig_cn;
      SEL_CU:     dout = sig_cu;
      SEL_STATUS: dout = status;
      default:    dout = status;
    endcase
  end

endmodule
