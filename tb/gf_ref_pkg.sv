// gf_ref_pkg: bit-serial reference arithmetic for the testbenches.
//
// Shift-and-add polynomial multiplication, interleaved modular multiplication,
// Fermat inversion (a^(2^m - 2)) and affine point addition/doubling on
// y^2 + xy = x^3 + x^2 + b. Written independently of the RTL's algorithms (no
// Karatsuba, no Euclid, no projective ladder) so that each can serve as a check.
// Operands are 512-bit vectors; the field size m and polynomial f are arguments.
package gf_ref_pkg;

  typedef logic [511:0] wide_t;

  // carry-less product of two n-bit polynomials
  function automatic wide_t clmul(input wide_t a, input wide_t b, input int n);
    wide_t r;
    r = '0;
    for (int i = 0; i < n; i++) if (b[i]) r = r ^ (a << i);
    return r;
  endfunction

  // a*b mod f, f of degree m (bit m set)
  function automatic wide_t mulmod(input wide_t a, input wide_t b, input wide_t f, input int m);
    wide_t r, x;
    r = '0;
    x = a;
    for (int i = 0; i < m; i++) begin
      if (b[i]) r = r ^ x;
      x = x << 1;
      if (x[m]) x = x ^ f;
    end
    return r;
  endfunction

  function automatic wide_t invmod(input wide_t a, input wide_t f, input int m);
    wide_t r, s;
    r = wide_t'(1);
    s = a;
    // exponent 2^m - 2 = binary 11..10: bits 1..m-1 set
    for (int i = 1; i < m; i++) begin
      s = mulmod(s, s, f, m);
      r = mulmod(r, s, f, m);
    end
    return r;
  endfunction

  typedef struct {
    bit    inf;
    wide_t x;
    wide_t y;
  } point_t;

  function automatic point_t padd(input point_t p, input point_t q, input wide_t f, input int m);
    point_t r;
    wide_t l, t;
    r.inf = 1'b0; r.x = '0; r.y = '0;
    if (p.inf) return q;
    if (q.inf) return p;
    if (p.x == q.x) begin
      if (q.y == (p.x ^ p.y) || p.x == '0) begin
        r.inf = 1'b1;
        return r;
      end
      // doubling: l = x + y/x; x3 = l^2 + l + a (a = 1); y3 = x^2 + (l+1) x3
      l = p.x ^ mulmod(p.y, invmod(p.x, f, m), f, m);
      r.x = mulmod(l, l, f, m) ^ l ^ wide_t'(1);
      r.y = mulmod(p.x, p.x, f, m) ^ mulmod(l ^ wide_t'(1), r.x, f, m);
      return r;
    end
    l = mulmod(p.y ^ q.y, invmod(p.x ^ q.x, f, m), f, m);
    t = mulmod(l, l, f, m) ^ l ^ p.x ^ q.x ^ wide_t'(1);
    r.x = t;
    r.y = mulmod(l, p.x ^ t, f, m) ^ t ^ p.y;
    return r;
  endfunction

  // double-and-add, most significant bit first
  function automatic point_t smul(input wide_t k, input point_t p, input wide_t f, input int m);
    point_t r;
    r.inf = 1'b1; r.x = '0; r.y = '0;
    for (int i = m; i >= 0; i--) begin
      r = padd(r, r, f, m);
      if (k[i]) r = padd(r, p, f, m);
    end
    return r;
  endfunction

endpackage
