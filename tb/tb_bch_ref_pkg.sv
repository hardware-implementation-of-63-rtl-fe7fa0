// Reference model of the (63,51,t=2) BCH code for the testbenches.
//
// Written independently of the RTL: field multiplication is plain
// shift-and-add with reduction by x^6 = x + 1 (not the partial-product
// equations of the multiplier under test), the encoder is long division of
// x^12 m(x) by g(x) = (1 + x + x^6)(1 + x + x^2 + x^4 + x^6), with g(x) itself
// formed here as that product, and syndromes are direct evaluations
// r(alpha^i) = sum of alpha^(i*j) over the set bits r_j.
package tb_bch_ref_pkg;

  typedef logic [5:0] gf_t;

  function automatic gf_t ref_mul(gf_t a, gf_t b);
    logic [6:0] x;
    gf_t r;
    r = '0;
    x = {1'b0, a};
    for (int i = 0; i < 6; i++) begin
      if (b[i]) r ^= x[5:0];
      x = {x[5:0], 1'b0};
      if (x[6]) x ^= 7'b1000011;
    end
    return r;
  endfunction

  // alpha^e for any e >= 0
  function automatic gf_t ref_pow(int unsigned e);
    gf_t r;
    r = 6'd1;
    for (int unsigned i = 0; i < (e % 63); i++) r = ref_mul(r, 6'b000010);
    return r;
  endfunction

  // Product of two GF(2) polynomials.
  function automatic logic [12:0] ref_gen_poly();
    logic [6:0]  m1, m3;
    logic [12:0] g;
    m1 = 7'b1000011;   // 1 + x + x^6
    m3 = 7'b1010111;   // 1 + x + x^2 + x^4 + x^6
    g  = '0;
    for (int i = 0; i < 7; i++)
      if (m3[i]) g ^= 13'(m1) << i;
    return g;
  endfunction

  // Remainder of x^12 m(x) divided by g(x), bit i = coefficient of x^i.
  function automatic logic [11:0] ref_parity(logic [50:0] m);
    logic [62:0] d;
    logic [12:0] g;
    g = ref_gen_poly();
    d = {m, 12'b0};
    for (int i = 62; i >= 12; i--)
      if (d[i]) d ^= 63'(g) << (i - 12);
    return d[11:0];
  endfunction

  function automatic logic [62:0] ref_encode(logic [50:0] m);
    return {m, ref_parity(m)};
  endfunction

  function automatic gf_t ref_syndrome(logic [62:0] r, int unsigned i);
    gf_t s;
    s = '0;
    for (int unsigned j = 0; j < 63; j++)
      if (r[j]) s ^= ref_pow(i * j);
    return s;
  endfunction

  function automatic logic [50:0] rand_msg();
    return {$urandom(), $urandom()} & 51'h7_FFFF_FFFF_FFFF;
  endfunction

  // Two distinct bit positions 0..62.
  function automatic void rand_two_pos(output int unsigned p1, output int unsigned p2);
    p1 = $urandom_range(62);
    do p2 = $urandom_range(62); while (p2 == p1);
  endfunction

endpackage
