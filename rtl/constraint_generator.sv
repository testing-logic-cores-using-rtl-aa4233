// constraint_generator: drives the constrained (data-path select) inputs of the
// modules under test during the BIST.
//
// Pseudo-random values on a data-path select port would waste most patterns
// on narrow data paths. This generator instead steps through the select codes
// 0, 1, 2, ... giving each SMALL_HOLD patterns, and once it reaches WIDE_CODE
// it holds that code for the rest of the test. The 4-bit port and the policy
// (few patterns on small data paths, the remaining ones on the selection that
// uses the most circuitry) follow the published description; the order of the
// codes, SMALL_HOLD = 16 and WIDE_CODE = 15 as the widest data path are this
// design's assumptions. 'init' restarts the sequence at code 0, 'en' counts one
// applied pattern; 'code' is registered.
module constraint_generator #(
  parameter int           W          = bist_pkg::CG_W,
  parameter int           SMALL_HOLD = 16,
  parameter logic [W-1:0] WIDE_CODE  = '1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         en,
  output logic [W-1:0] code
);

  localparam int HW = (SMALL_HOLD > 1) ? $clog2(SMALL_HOLD) : 1;
  logic [HW-1:0] hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code <= '0;
      hold <= '0;
    end else if (init) begin
      code <= '0;
      hold <= '0;
    end else if (en && code != WIDE_CODE) begin
      if (hold == HW'(SMALL_HOLD - 1)) begin
        code <= code + 1'b1;
        hold <= '0;
      end else begin
        hold <= hold + 1'b1;
      end
    end
  end

endmodule
