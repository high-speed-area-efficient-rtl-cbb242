// tb_ref_pkg -- reference arithmetic for the testbenches, written
// independently of the design's gf_pkg: GF(2^md) products are formed as a
// full carry-less product followed by a separate reduction step, polynomials
// are evaluated by Horner's rule, and the GF(2^m) multiplier reference is the
// schoolbook product followed by long division by f(x).
package tb_ref_pkg;

  typedef logic [9:0]   el_t;    // GF(2^md) element, md <= 10
  typedef logic [127:0] wide_t;  // binary polynomial / codeword

  // field polynomials (the same field representation as the design)
  function automatic int ref_prim(input int md);
    case (md)
      3: return 11'h00d;  4: return 11'h013;  5: return 11'h025;
      6: return 11'h043;  7: return 11'h089;  8: return 11'h11d;
      default: return 0;
    endcase
  endfunction

  function automatic el_t ref_mul(input el_t a, input el_t b, input int md);
    logic [19:0] full;
    logic [19:0] pp;
    full = '0;
    for (int i = 0; i < 10; i++) if (b[i]) full = full ^ (20'(a) << i);
    pp = 20'(ref_prim(md));
    for (int d = 19; d >= 0; d--)
      if (d >= md && full[d]) full = full ^ (pp << (d - md));
    return el_t'(full);
  endfunction

  function automatic el_t ref_pow(input el_t a, input int e, input int md);
    el_t r;
    r = el_t'(1);
    for (int i = 0; i < e; i++) r = ref_mul(r, a, md);
    return r;
  endfunction

  // alpha^e, alpha = 2 (the element x)
  function automatic el_t ref_alpha(input int e, input int md);
    int n;
    n = (1 << md) - 1;
    return ref_pow(el_t'(2), ((e % n) + n) % n, md);
  endfunction

  // Evaluate a binary polynomial (bit i = coefficient of x^i, len bits) at y.
  function automatic el_t ref_eval_bin(input wide_t p, input int len, input el_t y, input int md);
    el_t acc;
    acc = '0;
    for (int i = len - 1; i >= 0; i--) acc = ref_mul(acc, y, md) ^ el_t'(p[i]);
    return acc;
  endfunction

  // Product in GF(2^m) defined by x^m + f (f = low m coefficients).
  function automatic wide_t ref_gf2m_mul(input wide_t a, input wide_t b, input wide_t f, input int m);
    logic [255:0] full;
    logic [255:0] fm;
    full = '0;
    for (int i = 0; i < m; i++) if (b[i]) full = full ^ (256'(a) << i);
    fm = 256'(f) | (256'(1) << m);
    for (int d = 2 * m - 2; d >= m; d--)
      if (full[d]) full = full ^ (fm << (d - m));
    return wide_t'(full) & ((wide_t'(1) << m) - 1);
  endfunction

  // A low-weight irreducible polynomial for the multiplier widths used in the
  // tests (low m coefficients only, x^m implicit).
  function automatic wide_t ref_field_poly(input int m);
    case (m)
      8:  return wide_t'('h1b);                                    // x^8+x^4+x^3+x+1
      16: return wide_t'('h2b);                                    // x^16+x^5+x^3+x+1
      45: return (wide_t'(1) << 4) | (wide_t'(1) << 3) | wide_t'(3); // x^45+x^4+x^3+x+1
      default: return '0;
    endcase
  endfunction

endpackage
