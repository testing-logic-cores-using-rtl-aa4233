// alfsr: autonomous linear feedback shift register, the pattern source of the
// BIST engine.
//
// One pattern per clock: while 'en' is high the register takes one step of an
// internal-XOR (Galois) LFSR, shifting left and folding the bit that leaves the
// top back in through the feedback polynomial POLY. 'init' reloads SEED (it wins
// over 'en'), and so does reset, so every test run applies the same sequence.
// The 20-bit width is the published size; the polynomial (x^20 + x^3 + 1, a
// primitive trinomial giving a period of 2^20 - 1) and the seed are this
// design's choice. 'state' is the register itself, valid one clock after the
// step that produced it.
module alfsr #(
  parameter int              W    = bist_pkg::ALFSR_W,
  parameter logic [W-1:0]    POLY = bist_pkg::ALFSR_POLY,
  parameter logic [W-1:0]    SEED = bist_pkg::ALFSR_SEED
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         en,
  output logic [W-1:0] state
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= SEED;
    else if (init) state <= SEED;
    else if (en)   state <= {state[W-2:0], 1'b0} ^ (state[W-1] ? POLY : '0);
  end

endmodule
