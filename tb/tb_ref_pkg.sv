// tb_ref_pkg: reference models used by the testbenches to work out expected
// values without the RTL.
//
// The ALFSR and MISR references are written as polynomial arithmetic over
// GF(2): multiply by x, reduce modulo the characteristic polynomial, written
// here with its leading term. The MISR input fold is computed per output bit
// over the slices d[j], d[j+16], d[j+32], ... The constraint-generator
// reference is a closed formula of the number of applied patterns. The
// stand-in for the modules under test is a simple sequential function used
// both by tb/core_module_model.sv and by the testbenches that predict its
// responses.
package tb_ref_pkg;

  // x * a(x) mod p(x), p of degree n given with its leading term.
  function automatic logic [63:0] gf2_mulx(input logic [63:0] a, input logic [64:0] p, input int n);
    logic [64:0] t;
    t = {a, 1'b0};
    if (t[n]) t = t ^ p;
    return t[63:0] & ((64'd1 << n) - 1);
  endfunction

  localparam logic [64:0] P_ALFSR = (65'd1 << 20) | 65'd8 | 65'd1;                     // x^20+x^3+1
  localparam logic [64:0] P_MISR  = (65'd1 << 16) | 65'd32 | 65'd8 | 65'd4 | 65'd1;    // x^16+x^5+x^3+x^2+1

  function automatic logic [19:0] ref_alfsr_next(input logic [19:0] s);
    return 20'(gf2_mulx(64'(s), P_ALFSR, 20));
  endfunction

  function automatic logic [15:0] ref_fold(input logic [63:0] d, input int w);
    logic [15:0] f;
    for (int j = 0; j < 16; j++) begin
      f[j] = 1'b0;
      for (int k = j; k < w; k += 16) f[j] = f[j] ^ d[k];
    end
    return f;
  endfunction

  function automatic logic [15:0] ref_misr_next(input logic [15:0] s, input logic [63:0] d, input int w);
    return 16'(gf2_mulx(64'(s), P_MISR, 16)) ^ ref_fold(d, w);
  endfunction

  // Code driven by the constraint generator after n applied patterns.
  function automatic logic [3:0] ref_cg(input int n);
    return (n / 16 >= 15) ? 4'hF : 4'(n / 16);
  endfunction

  // Pattern for a module input of width w: ALFSR replicated, CG code on the
  // top 4 bits when the module has the constrained port.
  function automatic logic [63:0] ref_pattern(input logic [19:0] s, input logic [3:0] cg, input int w, input bit has_cg);
    logic [63:0] p;
    p = '0;
    for (int i = 0; i < w; i++) p[i] = s[i % 20];
    if (has_cg) for (int i = 0; i < 4; i++) p[w-4+i] = cg[i];
    return p;
  endfunction

  // Stand-in module: next state from state and input, output = state.
  function automatic logic [63:0] model_next(input logic [63:0] s, input logic [63:0] in, input int ow);
    logic [63:0] r, m;
    m = (64'd1 << ow) - 1;
    r = ((s << 1) | (s >> (ow - 1))) & m;
    return (r ^ in ^ (in << 7) ^ (in >> 3)) & m;
  endfunction

endpackage
