// misr: multiple-input signature register with an XOR-cascade input folder.
//
// A module output wider than the MISR is first folded onto W bits: folded bit
// j is the XOR of all input bits i with (i mod W) == j. While 'en' is high the
// signature then takes one internal-XOR LFSR step and absorbs the folded word:
// sig <= (sig << 1) ^ (sig[W-1] ? POLY : 0) ^ fold(d). 'init' clears the
// signature. The 16-bit size and the use of an XOR cascade follow the
// published design; the folding pattern and the polynomial
// (x^16 + x^5 + x^3 + x^2 + 1) are this design's choices. 'sig' is registered.
module misr #(
  parameter int           W    = bist_pkg::MISR_W,
  parameter int           IN_W = bist_pkg::BN_OUT_W,
  parameter logic [W-1:0] POLY = bist_pkg::MISR_POLY
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  logic            en,
  input  logic [IN_W-1:0] d,
  output logic [W-1:0]    sig
);

  logic [W-1:0] folded;

  always_comb begin
    folded = '0;
    for (int i = 0; i < IN_W; i++) folded[i % W] ^= d[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sig <= '0;
    else if (init) sig <= '0;
    else if (en)   sig <= {sig[W-2:0], 1'b0} ^ (sig[W-1] ? POLY : '0) ^ folded;
  end

endmodule
