// csr_ref_pkg -- reference model used by the testbenches.
//
// It computes the behaviour of the original (not retimed) design one
// original clock cycle at a time, straight from the definition of the
// combinational slices, and an input stream that the testbenches feed to
// all thread copies:
//
//   stage(k, a, s) = rotl(a ^ s, k + 1) + (2k + 1)
//   step(C, S, I)  = stage(C-1, ... stage(1, stage(0, I, S), S) ..., S)
//   out(S, I)      = S ^ I
//   word(g)        = (g * 0x9E3779B1) ^ 0x5A5A1234        (32-bit)
package csr_ref_pkg;

  function automatic logic [31:0] stage(int k, logic [31:0] a, logic [31:0] s);
    logic [31:0] m;
    int          r;
    m = a ^ s;
    r = (k + 1) % 32;
    if (r == 0) return m + 32'(2 * k + 1);
    return ((m << r) | (m >> (32 - r))) + 32'(2 * k + 1);
  endfunction

  function automatic logic [31:0] step(int c, logic [31:0] s, logic [31:0] i);
    logic [31:0] x;
    x = stage(0, i, s);
    for (int k = 1; k < c; k++) x = stage(k, x, s);
    return x;
  endfunction

  function automatic logic [31:0] word(int g);
    return (32'(g) * 32'h9E3779B1) ^ 32'h5A5A1234;
  endfunction

endpackage
