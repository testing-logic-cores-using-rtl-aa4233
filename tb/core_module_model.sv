// core_module_model: behavioural stand-in for one module of the logic core
// (BIT_NODE, CHECK_NODE or CONTROL_UNIT of the LDPC decoder) with that
// module's port widths. It is not the real module: it only gives the BIST a
// sequential circuit to exercise. Its output register takes
// tb_ref_pkg::model_next(state, in) on every clock and is cleared by reset,
// so its response to an input appears one clock later.
module core_module_model #(
  parameter int IN_W  = 54,
  parameter int OUT_W = 55
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IN_W-1:0]  in,
  output logic [OUT_W-1:0] out
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= OUT_W'(tb_ref_pkg::model_next(64'(out), 64'(in), OUT_W));
  end
endmodule
