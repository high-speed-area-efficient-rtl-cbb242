// gf_pkg -- shared arithmetic for the binary BCH code that protects the
// multiplier output.
//
// The decoder works in a small field GF(2^MD) (MD = 6 for the BCH(63,45)
// code, MD = 5 for BCH(31,16)). Every element is carried in a gfe_t of
// GF_MAXW bits; only the low MD bits are used. The functions take MD as an
// argument, so one package serves every code size; with MD a parameter the
// loops unroll and the constant operands fold away in synthesis.
//
// The field is built from a fixed primitive polynomial per MD (table in
// prim_poly). For MD = 3 this is x^3 + x^2 + 1, the polynomial of the worked
// example that goes with the root-finding method; for the other sizes the
// usual textbook primitive polynomials are used (a design choice).
//
// bch_gen_poly computes the generator polynomial g(x) of the t-error
// correcting narrow-sense binary BCH code as the least common multiple of
// the minimal polynomials of alpha, alpha^3, ..., alpha^(2t-1). Its degree is
// the number of parity bits.
package gf_pkg;

  localparam int GF_MAXW = 10;    // largest supported field degree MD
  localparam int GP_W    = 128;   // width of a generator polynomial vector
  localparam int T_MAX   = 5;     // the locator's polynomial split covers degree <= 5

  typedef logic [GF_MAXW-1:0] gfe_t;
  typedef logic [GP_W-1:0]    gpoly_t;

  // Primitive polynomial of GF(2^md), bit i = coefficient of x^i.
  function automatic int prim_poly(input int md);
    case (md)
      3:       return 'b1101;          // x^3 + x^2 + 1
      4:       return 'b10011;         // x^4 + x + 1
      5:       return 'b100101;        // x^5 + x^2 + 1
      6:       return 'b1000011;       // x^6 + x + 1
      7:       return 'b10001001;      // x^7 + x^3 + 1
      8:       return 'b100011101;     // x^8 + x^4 + x^3 + x^2 + 1
      9:       return 'b1000010001;    // x^9 + x^4 + 1
      10:      return 'b10000001001;   // x^10 + x^3 + 1
      default: return 0;
    endcase
  endfunction

  // Multiplication in GF(2^md): shift-and-add with reduction by prim_poly.
  function automatic gfe_t gf_mul(input gfe_t a, input gfe_t b, input int md);
    gfe_t p;
    gfe_t x;
    gfe_t pp;   // low bits of the primitive polynomial (x^md term implicit)
    pp = gfe_t'(prim_poly(md));
    p  = '0;
    x  = a;
    for (int k = 0; k < GF_MAXW; k++) begin
      if (k < md) begin
        if (b[k]) p = p ^ x;
        // x <- x * alpha
        if (x[md-1]) x = ((x << 1) ^ pp) & gfe_t'((1 << md) - 1);
        else         x = (x << 1) & gfe_t'((1 << md) - 1);
      end
    end
    return p;
  endfunction

  function automatic gfe_t gf_sq(input gfe_t a, input int md);
    return gf_mul(a, a, md);
  endfunction

  // alpha^e for any integer e >= 0 (reduced mod 2^md - 1).
  function automatic gfe_t gf_alpha_pow(input int e, input int md);
    gfe_t r;
    int   n;
    int   ee;
    gfe_t pp;
    n  = (1 << md) - 1;
    ee = e % n;
    pp = gfe_t'(prim_poly(md));
    r  = gfe_t'(1);
    for (int k = 0; k < 1024; k++) begin
      if (k < ee) begin
        if (r[md-1]) r = ((r << 1) ^ pp) & gfe_t'(n);
        else         r = (r << 1) & gfe_t'(n);
      end
    end
    return r;
  endfunction

  // Table of all powers: entry e holds alpha^e, e = 0 .. 2^md - 2. Used as a
  // localparam so that constant powers are plain table look-ups.
  typedef gfe_t [1023:0] alpha_tab_t;

  function automatic alpha_tab_t gf_alpha_table(input int md);
    alpha_tab_t tab;
    gfe_t       r;
    int         n;
    gfe_t       pp;
    n   = (1 << md) - 1;
    pp  = gfe_t'(prim_poly(md));
    r   = gfe_t'(1);
    for (int e = 0; e < 1024; e++) begin
      tab[e] = '0;
      if (e < n) begin
        tab[e] = r;
        if (r[md-1]) r = ((r << 1) ^ pp) & gfe_t'(n);
        else         r = (r << 1) & gfe_t'(n);
      end
    end
    return tab;
  endfunction

  // Generator polynomial of the t-error-correcting binary BCH code of length
  // 2^md - 1 (bit i = coefficient of x^i).
  function automatic gpoly_t bch_gen_poly(input int md, input int t);
    gpoly_t      g;
    gpoly_t      prod;
    logic [1023:0] covered;
    gfe_t        mp [GF_MAXW+1];
    gfe_t        nx [GF_MAXW+1];
    gfe_t        root;
    int          n;
    int          e;
    int          deg;
    n       = (1 << md) - 1;
    g       = gpoly_t'(1);
    covered = '0;
    for (int i = 1; i < 2 * t; i += 2) begin
      if (!covered[i % n]) begin
        // minimal polynomial of alpha^i: product of (x + alpha^e) over the
        // cyclotomic coset of i
        for (int j = 0; j <= GF_MAXW; j++) mp[j] = '0;
        mp[0] = gfe_t'(1);
        deg   = 0;
        e     = i % n;
        for (int s = 0; s < GF_MAXW; s++) begin
          if (!covered[e]) begin
            covered[e] = 1'b1;
            root = gf_alpha_pow(e, md);
            // mp <- mp * (x + root)
            for (int j = 0; j <= GF_MAXW; j++) begin
              nx[j] = gf_mul(mp[j], root, md);
              if (j > 0) nx[j] = nx[j] ^ mp[j-1];
            end
            for (int j = 0; j <= GF_MAXW; j++) mp[j] = nx[j];
            deg++;
            e = (2 * e) % n;
          end
        end
        // g <- g * mp (carry-less; mp has 0/1 coefficients)
        prod = '0;
        for (int j = 0; j <= GF_MAXW; j++)
          if (j <= deg && mp[j][0]) prod = prod ^ (g << j);
        g = prod;
      end
    end
    return g;
  endfunction

  function automatic int poly_degree(input gpoly_t p);
    int d;
    d = 0;
    for (int i = 0; i < GP_W; i++) if (p[i]) d = i;
    return d;
  endfunction

  // Number of parity bits n - k of the code.
  function automatic int bch_parity_bits(input int md, input int t);
    return poly_degree(bch_gen_poly(md, t));
  endfunction

endpackage
