// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Field and curve operations written directly from their definitions, with
// wide integers and the remainder operator, independent of the RTL
// package: inversion by Fermat's little theorem (x^(m-2)), point addition
// in affine coordinates with the chord and tangent rules, and scalar
// multiplication by double-and-add. Slow, but only the testbenches use it.
//
// The curve and field follow the paper's BLS12-381; none of this code is
// shared with the RTL.
package tb_ref_pkg;
  typedef logic [254:0] fr_t;
  typedef logic [380:0] fq_t;

  localparam logic [254:0] RMOD =
    255'h73eda753299d7d483339d80809a1d80553bda402fffe5bfeffffffff00000001;
  localparam logic [380:0] QMOD =
    381'h1a0111ea397fe69a4b1ba7b6434bacd764774b84f38512bf6730d2a0f6b0f6241eabfffeb153ffffb9feffffffffaaab;
  localparam logic [380:0] GX =
    381'h17f1d3a73197d7942695638c4fa9ac0fc3688c4f9774b905a14e3a3f171bac586c55e83ff97a1aeffb3af00adb22c6bb;
  localparam logic [380:0] GY =
    381'h08b3f481e3aaa0f1a09e30ed741d8ae4fcf5e095d5d00af600db18cb2c04b3edd03cc744a2888ae40caa232946c5e7e1;

  function automatic fr_t rm(fr_t a, fr_t b);
    logic [511:0] t;
    t = (512'(a) * 512'(b)) % 512'(RMOD);
    return t[254:0];
  endfunction
  function automatic fr_t ra(fr_t a, fr_t b);
    logic [511:0] t;
    t = (512'(a) + 512'(b)) % 512'(RMOD);
    return t[254:0];
  endfunction
  function automatic fr_t rs(fr_t a, fr_t b);
    logic [511:0] t;
    t = (512'(a) + 512'(RMOD) - 512'(b)) % 512'(RMOD);
    return t[254:0];
  endfunction
  // random element below the modulus
  function automatic fr_t rrand();
    logic [255:0] t;
    for (int i = 0; i < 8; i++) t[i*32 +: 32] = $urandom;
    t = t % 256'(RMOD);
    return t[254:0];
  endfunction
  // value that is 0 or 1 with probability 0.9, else random
  function automatic fr_t rsparse();
    int u;
    u = $urandom_range(0, 99);
    if (u < 45) return '0;
    if (u < 90) return fr_t'(1);
    return rrand();
  endfunction

  function automatic fq_t qm(fq_t a, fq_t b);
    logic [767:0] t;
    t = (768'(a) * 768'(b)) % 768'(QMOD);
    return t[380:0];
  endfunction
  function automatic fq_t qa(fq_t a, fq_t b);
    logic [767:0] t;
    t = (768'(a) + 768'(b)) % 768'(QMOD);
    return t[380:0];
  endfunction
  function automatic fq_t qs(fq_t a, fq_t b);
    logic [767:0] t;
    t = (768'(a) + 768'(QMOD) - 768'(b)) % 768'(QMOD);
    return t[380:0];
  endfunction
  function automatic fq_t qinv(fq_t a);
    fq_t r, b;
    logic [380:0] e;
    r = 381'd1; b = a; e = QMOD - 381'd2;
    for (int i = 0; i < 381; i++) begin
      if (e[i]) r = qm(r, b);
      b = qm(b, b);
    end
    return r;
  endfunction

  // affine point; inf = 1 for the point at infinity
  typedef struct { fq_t x; fq_t y; bit inf; } apt_t;

  function automatic apt_t aadd(apt_t p, apt_t q);
    apt_t o;
    fq_t l;
    if (p.inf) return q;
    if (q.inf) return p;
    if (p.x == q.x) begin
      if (qa(p.y, q.y) == '0) begin o.inf = 1; o.x = '0; o.y = '0; return o; end
      l = qm(qm(381'd3, qm(p.x, p.x)), qinv(qa(p.y, p.y)));
    end else begin
      l = qm(qs(q.y, p.y), qinv(qs(q.x, p.x)));
    end
    o.inf = 0;
    o.x = qs(qs(qm(l, l), p.x), q.x);
    o.y = qs(qm(l, qs(p.x, o.x)), p.y);
    return o;
  endfunction

  function automatic apt_t amul(logic [63:0] k, apt_t p);
    apt_t acc;
    acc.inf = 1; acc.x = '0; acc.y = '0;
    for (int i = 63; i >= 0; i--) begin
      acc = aadd(acc, acc);
      if (k[i]) acc = aadd(acc, p);
    end
    return acc;
  endfunction

  function automatic apt_t gen();
    apt_t g;
    g.x = GX; g.y = GY; g.inf = 0;
    return g;
  endfunction

  // projective (X:Y:Z) equals affine p?
  function automatic bit proj_eq(fq_t x, fq_t y, fq_t z, apt_t p);
    if (p.inf) return z == '0;
    if (z == '0) return 0;
    return (x == qm(p.x, z)) && (y == qm(p.y, z));
  endfunction
endpackage
