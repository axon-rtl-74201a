// axon_ref_pkg -- reference arithmetic for the adder testbenches.
//
// Group signals are computed here straight from their definitions, bit by
// bit, with no prefix tree: G[i:j] by rippling c = g | t & c from bit j up to
// bit i, H[i:j] = g_i | G[i-1:j], and P[a:b] as the AND of the OR-propagates
// (1 for an empty span, a < b). Operands are held in 64-bit vectors.
package axon_ref_pkg;

  typedef logic [63:0] vec_t;

  function automatic logic ref_grp_g(vec_t a, vec_t b, int i, int j);
    logic c;
    c = 1'b0;
    for (int x = j; x <= i; x++) c = (a[x] & b[x]) | ((a[x] | b[x]) & c);
    return c;
  endfunction

  function automatic logic ref_grp_h(vec_t a, vec_t b, int i, int j);
    if (i == j) return a[i] & b[i];
    return (a[i] & b[i]) | ref_grp_g(a, b, i - 1, j);
  endfunction

  function automatic logic ref_grp_p(vec_t a, vec_t b, int hi, int lo);
    logic p;
    p = 1'b1;
    for (int x = lo; x <= hi; x++) p &= a[x] | b[x];
    return p;
  endfunction

  function automatic vec_t rand_vec();
    return {$urandom(), $urandom()};
  endfunction

  // random operand with long propagate runs: a ^ b has few zeros
  function automatic void rand_chain(int w, output vec_t a, output vec_t b);
    vec_t m;
    a = rand_vec();
    m = '0;
    for (int x = 0; x < w; x++) m[x] = ($urandom_range(0, 15) != 0);
    b = ~a & m | (a & ~m & rand_vec());
  endfunction

endpackage
