// tb_ec_ref: reference arithmetic for the testbenches, written independently
// of the RTL: plain modular arithmetic with '%' and exponentiation, affine
// point addition with field inversion, and conversion to the RTL's
// Montgomery/projective representation.
package tb_ec_ref;
  import szkp_pkg::*;

  typedef logic [255:0] u256;
  typedef logic [511:0] u512;
  typedef struct { u256 c0; u256 c1; } f2_t;            // c0 + c1 u, u^2 = -1
  typedef struct { bit inf; f2_t x; f2_t y; } apt_t;    // affine point (G1 uses c1 = 0)

  function automatic u256 mmul(u256 a, u256 b, u256 m);
    u512 t = u512'(a) * u512'(b);
    return u256'(t % u512'(m));
  endfunction
  function automatic u256 madd(u256 a, u256 b, u256 m);
    logic [256:0] s = {1'b0, a} + {1'b0, b};
    return u256'(s % {1'b0, m});
  endfunction
  function automatic u256 msub(u256 a, u256 b, u256 m);
    return madd(a, m - (b % m), m);
  endfunction
  function automatic u256 mpow(u256 a, u256 e, u256 m);
    u256 r = 1;
    for (int i = 255; i >= 0; i--) begin
      r = mmul(r, r, m);
      if (e[i]) r = mmul(r, a, m);
    end
    return r;
  endfunction
  function automatic u256 minv(u256 a, u256 m);
    return mpow(a, m - 2, m);
  endfunction
  // x -> x * 2^256 mod m (Montgomery form)
  function automatic u256 to_mont(u256 x, u256 m);
    u512 t = {x, 256'b0};
    return u256'(t % u512'(m));
  endfunction

  // ---- Fq2 ----
  function automatic f2_t f2(u256 c0, u256 c1); f2_t r; r.c0 = c0; r.c1 = c1; return r; endfunction
  function automatic f2_t f2add(f2_t a, f2_t b);
    return f2(madd(a.c0, b.c0, P_BASE), madd(a.c1, b.c1, P_BASE));
  endfunction
  function automatic f2_t f2sub(f2_t a, f2_t b);
    return f2(msub(a.c0, b.c0, P_BASE), msub(a.c1, b.c1, P_BASE));
  endfunction
  function automatic f2_t f2mul(f2_t a, f2_t b);
    return f2(msub(mmul(a.c0, b.c0, P_BASE), mmul(a.c1, b.c1, P_BASE), P_BASE),
              madd(mmul(a.c0, b.c1, P_BASE), mmul(a.c1, b.c0, P_BASE), P_BASE));
  endfunction
  function automatic f2_t f2inv(f2_t a);
    u256 n = minv(madd(mmul(a.c0, a.c0, P_BASE), mmul(a.c1, a.c1, P_BASE), P_BASE), P_BASE);
    return f2(mmul(a.c0, n, P_BASE), msub(0, mmul(a.c1, n, P_BASE), P_BASE));
  endfunction
  function automatic bit f2eq(f2_t a, f2_t b); return a.c0 == b.c0 && a.c1 == b.c1; endfunction

  // ---- affine points (works for G1 with c1 = 0 and for G2) ----
  function automatic apt_t ainf(); apt_t r; r.inf = 1; r.x = f2(0, 0); r.y = f2(0, 0); return r; endfunction
  function automatic apt_t aneg(apt_t p); apt_t r = p; r.y = f2sub(f2(0, 0), p.y); return r; endfunction
  function automatic apt_t aadd(apt_t p, apt_t q);
    apt_t r; f2_t l;
    if (p.inf) return q;
    if (q.inf) return p;
    if (f2eq(p.x, q.x)) begin
      if (!f2eq(p.y, q.y) || (p.y.c0 == 0 && p.y.c1 == 0)) return ainf();
      // tangent: 3x^2 / 2y
      l = f2mul(f2mul(f2(3, 0), f2mul(p.x, p.x)), f2inv(f2add(p.y, p.y)));
    end else begin
      l = f2mul(f2sub(q.y, p.y), f2inv(f2sub(q.x, p.x)));
    end
    r.inf = 0;
    r.x = f2sub(f2sub(f2mul(l, l), p.x), q.x);
    r.y = f2sub(f2mul(l, f2sub(p.x, r.x)), p.y);
    return r;
  endfunction
  function automatic apt_t amul(apt_t p, u256 k);
    apt_t r = ainf();
    for (int i = 255; i >= 0; i--) begin
      r = aadd(r, r);
      if (k[i]) r = aadd(r, p);
    end
    return r;
  endfunction

  function automatic apt_t g1_gen();
    apt_t r; r.inf = 0; r.x = f2(1, 0); r.y = f2(2, 0); return r;
  endfunction
  // a point on the G2 twist y^2 = x^3 + 3/(9+u), x = 2 + u
  function automatic apt_t g2_gen();
    apt_t r; r.inf = 0; r.x = f2(2, 1);
    r.y = f2(256'h101f7278419308b95099eca02dcee0c5381f4d26d1d62313f057167f064101ce,
             256'h2b76c179599bb92a963dac85546a005a777f7c13f6a7b75d5918b6b5808f5fde);
    return r;
  endfunction

  // affine -> projective Montgomery (z scales X, Y, Z), packed as in the RTL:
  // bits [ext*256*k +: 256*ext] is coordinate k (X, Y, Z), c0 in the low word.
  function automatic logic [1535:0] to_proj(apt_t p, u256 z, int ext);
    logic [1535:0] r = '0;
    u256 zm = to_mont(z, P_BASE);
    f2_t X, Y, Z;
    if (p.inf) begin
      X = f2(0, 0); Y = f2(zm, 0); Z = f2(0, 0);
    end else begin
      X = f2(mmul(to_mont(p.x.c0, P_BASE), z, P_BASE), mmul(to_mont(p.x.c1, P_BASE), z, P_BASE));
      Y = f2(mmul(to_mont(p.y.c0, P_BASE), z, P_BASE), mmul(to_mont(p.y.c1, P_BASE), z, P_BASE));
      Z = f2(zm, 0);
    end
    if (ext == 1) r[767:0] = {Z.c0, Y.c0, X.c0};
    else          r = {Z.c1, Z.c0, Y.c1, Y.c0, X.c1, X.c0};
    return r;
  endfunction

  // projective Montgomery result equals affine reference?
  function automatic bit proj_eq(logic [1535:0] v, apt_t p, int ext);
    f2_t X, Y, Z;
    if (ext == 1) begin
      X = f2(v[255:0], 0); Y = f2(v[511:256], 0); Z = f2(v[767:512], 0);
    end else begin
      X = f2(v[255:0], v[511:256]); Y = f2(v[767:512], v[1023:768]); Z = f2(v[1279:1024], v[1535:1280]);
    end
    if (p.inf) return (Z.c0 == 0 && Z.c1 == 0) && !(Y.c0 == 0 && Y.c1 == 0);
    if (Z.c0 == 0 && Z.c1 == 0) return 0;
    // X = x Z and Y = y Z hold in Montgomery form as well (both sides scale by R)
    return f2eq(X, f2mul(p.x, Z)) && f2eq(Y, f2mul(p.y, Z));
  endfunction
endpackage
