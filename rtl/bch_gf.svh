// bch_gf.svh -- field helpers bound to the including module's M and PRIM.
//
// Included inside a module body that imports bch_pkg and has the
// parameters M (field degree) and PRIM (low bits of the primitive
// polynomial). Declares gf_t, an M-bit field element, and short wrappers
// around the bch_pkg functions for that field.
typedef logic [M-1:0] gf_t;

function automatic gf_t mul(gf_t a, gf_t b);
  return gf_t'(gf_mul(gfw_t'(a), gfw_t'(b), M, PRIM));
endfunction

function automatic gf_t sqn(gf_t a, int unsigned s);
  return gf_t'(gf_sq_n(gfw_t'(a), s, M, PRIM));
endfunction

function automatic gf_t apow(longint unsigned e);
  return gf_t'(gf_alpha_pow(e, M, PRIM));
endfunction

function automatic gf_t aneg(longint unsigned e);
  return gf_t'(gf_alpha_neg(e, M, PRIM));
endfunction
