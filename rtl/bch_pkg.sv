// bch_pkg -- field arithmetic and default sizes shared by the BCH decoder.
//
// The decoder works in GF(2^M) on a binary BCH code. By default M = 14 and
// the code is the length-16383 code correcting t = 72 bit errors, the code
// of the published FPGA test; the smaller codes used in the analysis
// (GF(2^5), t = 3 and GF(2^10), t = 17) are obtained by setting the modules'
// M and PRIM parameters. Field elements are M-bit vectors in the polynomial
// basis; alpha is the root of the primitive polynomial x^M + PRIM. The paper
// names the fields but not their polynomials: x^14 + x^10 + x^6 + x + 1,
// x^10 + x^3 + 1 and x^5 + x^2 + 1 are this design's choices.
//
// The functions take the field (m, prim) as arguments and work on MMAX-bit
// values whose bits at and above m are zero. Modules call them with their
// constant parameters, so after elaboration a product with a constant
// factor (alpha^(j*P), say) becomes a fixed XOR network and a general
// product an M x M multiplier.
package bch_pkg;

  localparam int unsigned MMAX = 16;                 // largest field degree
  typedef logic [MMAX-1:0] gfw_t;

  // Default field: GF(2^14), x^14 + x^10 + x^6 + x + 1.
  localparam int unsigned M_DEF    = 14;
  localparam gfw_t        PRIM_DEF = 16'h0443;       // x^10 + x^6 + x + 1

  // Default code sizes (paper, Sec. IV) and design choices.
  localparam int unsigned T_DEF     = 72;     // correctable bit errors
  localparam int unsigned N_DEF     = 16383;  // code length in bits
  localparam int unsigned P_DEF     = 8;      // bits per clock (design choice)
  localparam int unsigned KAPPA_DEF = 6;      // zero discrepancies before stop

  // a * b mod (x^m + prim), shift-and-add from the top bit of b.
  function automatic gfw_t gf_mul(gfw_t a, gfw_t b, int unsigned m, gfw_t prim);
    gfw_t r;
    gfw_t mask;
    logic msb;
    mask = gfw_t'((32'd1 << m) - 1);
    r = '0;
    for (int i = MMAX - 1; i >= 0; i--) begin
      if (i < int'(m)) begin
        msb = r[m - 1];
        r = ((r << 1) & mask) ^ (msb ? prim : '0);
        if (b[i]) r = r ^ a;
      end
    end
    return r;
  endfunction

  // a^(2^s): s successive squarings.
  function automatic gfw_t gf_sq_n(gfw_t a, int unsigned s, int unsigned m, gfw_t prim);
    gfw_t r;
    r = a;
    for (int unsigned i = 0; i < s; i++) r = gf_mul(r, r, m, prim);
    return r;
  endfunction

  // alpha^e for any e >= 0 (square and multiply).
  function automatic gfw_t gf_alpha_pow(longint unsigned e, int unsigned m, gfw_t prim);
    gfw_t r;
    gfw_t b;
    longint unsigned k;
    longint unsigned q1;
    q1 = (64'd1 << m) - 1;
    r = gfw_t'(1);
    b = gfw_t'(2);
    k = e % q1;
    while (k != 0) begin
      if (k[0]) r = gf_mul(r, b, m, prim);
      b = gf_mul(b, b, m, prim);
      k = k >> 1;
    end
    return r;
  endfunction

  // alpha^(-e)
  function automatic gfw_t gf_alpha_neg(longint unsigned e, int unsigned m, gfw_t prim);
    longint unsigned q1;
    q1 = (64'd1 << m) - 1;
    return gf_alpha_pow(q1 - (e % q1), m, prim);
  endfunction

endpackage
