// pd_pkg: types, constants and Galois-field helpers shared by the
// soft-assisted product decoder.
//
// The component code is the binary BCH(255,231) code correcting t = 3 errors,
// built over GF(2^8). Its three syndromes S1, S3 and S5 are elements of
// GF(2^8); the error locator has degree at most three. The field is generated
// by the primitive polynomial x^8 + x^4 + x^3 + x^2 + 1 (0x11D). The code
// length and the error-correction capability follow the paper; the choice of
// primitive polynomial is this design's own, since the paper does not give one.
//
// Codeword bit j is the coefficient of x^j. An error at bit j has locator
// alpha^j, so the Chien search looks for roots at alpha^(-j).
//
// The functions here are used both on constants (to build tables at
// elaboration time) and on signals (as generic multipliers in the key-equation
// solver). They are plain shift-and-add loops and synthesize to XOR networks.
package pd_pkg;

  localparam int unsigned GF_M      = 8;           // field degree
  localparam int unsigned GF_ORDER  = 255;         // multiplicative order
  localparam logic [8:0]  GF_POLY   = 9'h11D;      // primitive polynomial
  localparam int unsigned CODE_N    = 255;         // component code length
  localparam int unsigned CODE_K    = 231;         // component code dimension

  typedef logic [GF_M-1:0] gf_t;

  // Syndromes of one component codeword.
  typedef struct packed {
    gf_t s1;
    gf_t s3;
    gf_t s5;
  } syn_t;

  // Error-locator polynomial lambda0 + lambda1 x + lambda2 x^2 + lambda3 x^3,
  // possibly scaled by a non-zero constant (roots are what matter).
  typedef struct packed {
    gf_t l0;
    gf_t l1;
    gf_t l2;
    gf_t l3;
  } elp_t;

  // Table of alpha^e for e = 0 .. 254.
  typedef logic [GF_ORDER-1:0][GF_M-1:0] gf_tbl_t;

  // Multiplication in GF(2^8), polynomial basis.
  function automatic gf_t gf_mul(input gf_t a, input gf_t b);
    logic [GF_M-1:0] acc;
    logic [GF_M-1:0] sh;
    acc = '0;
    sh  = a;
    for (int i = 0; i < GF_M; i++) begin
      if (b[i]) acc = acc ^ sh;
      // multiply sh by alpha, reducing modulo the primitive polynomial
      sh = {sh[GF_M-2:0], 1'b0} ^ (sh[GF_M-1] ? GF_POLY[GF_M-1:0] : '0);
    end
    return acc;
  endfunction

  // alpha^0 .. alpha^254, generated by repeated multiplication by alpha.
  function automatic gf_tbl_t gf_gen_exp();
    gf_tbl_t t;
    gf_t     v;
    v = 8'h01;
    for (int e = 0; e < GF_ORDER; e++) begin
      t[e] = v;
      v = {v[GF_M-2:0], 1'b0} ^ (v[GF_M-1] ? GF_POLY[GF_M-1:0] : '0);
    end
    return t;
  endfunction

  localparam gf_tbl_t GF_EXP = gf_gen_exp();

  // alpha^e for any non-negative exponent.
  function automatic gf_t gf_alpha(input int unsigned e);
    return GF_EXP[e % GF_ORDER];
  endfunction

  // Width of a counter that can hold values up to n.
  function automatic int unsigned cnt_w(input int unsigned n);
    return $clog2(n + 1);
  endfunction

endpackage
