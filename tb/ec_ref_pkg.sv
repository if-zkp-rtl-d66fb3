// ec_ref_pkg: independent reference model for the testbenches. Elliptic-curve
// arithmetic on y^2 = x^3 + b in affine coordinates with explicit field
// inversion (Fermat), written without any of the Jacobian formulas used by
// the hardware, so agreement between the two is a real check.
package ec_ref_pkg;
  import zkp_pkg::*;

  typedef logic [2*FW-1:0] dfe_t;

  typedef struct {
    fe_t x;
    fe_t y;
    bit  inf;
  } apoint_t;

  function automatic fe_t fmul(fe_t a, fe_t b, fe_t p);
    dfe_t t;
    t = dfe_t'(a) * dfe_t'(b);
    return fe_t'(t % dfe_t'(p));
  endfunction

  function automatic fe_t fadd(fe_t a, fe_t b, fe_t p);
    logic [FW:0] t;
    t = {1'b0, a} + {1'b0, b};
    if (t >= {1'b0, p}) t = t - {1'b0, p};
    return t[FW-1:0];
  endfunction

  function automatic fe_t fsub(fe_t a, fe_t b, fe_t p);
    return (a >= b) ? (a - b) : (a + (p - b));
  endfunction

  function automatic fe_t fpow(fe_t a, fe_t e, fe_t p);
    fe_t r = fe_t'(1);
    for (int i = FW - 1; i >= 0; i--) begin
      r = fmul(r, r, p);
      if (e[i]) r = fmul(r, a, p);
    end
    return r;
  endfunction

  function automatic fe_t finv(fe_t a, fe_t p);
    return fpow(a, p - fe_t'(2), p);
  endfunction

  function automatic apoint_t aneg(apoint_t a, fe_t p);
    apoint_t r = a;
    if (!a.inf && a.y != '0) r.y = p - a.y;
    return r;
  endfunction

  function automatic apoint_t aadd(apoint_t a, apoint_t b, fe_t p);
    apoint_t r;
    fe_t lam, num, den;
    if (a.inf) return b;
    if (b.inf) return a;
    if (a.x == b.x) begin
      if (a.y != b.y || a.y == '0) begin
        r.x = '0; r.y = '0; r.inf = 1'b1;
        return r;
      end
      num = fmul(fe_t'(3), fmul(a.x, a.x, p), p);
      den = fadd(a.y, a.y, p);
    end else begin
      num = fsub(b.y, a.y, p);
      den = fsub(b.x, a.x, p);
    end
    lam   = fmul(num, finv(den, p), p);
    r.x   = fsub(fsub(fmul(lam, lam, p), a.x, p), b.x, p);
    r.y   = fsub(fmul(lam, fsub(a.x, r.x, p), p), a.y, p);
    r.inf = 1'b0;
    return r;
  endfunction

  // k * P by plain double-and-add over a 384-bit scalar
  function automatic apoint_t amul(logic [383:0] k, apoint_t a, fe_t p);
    apoint_t acc;
    acc.x = '0; acc.y = '0; acc.inf = 1'b1;
    for (int i = 383; i >= 0; i--) begin
      acc = aadd(acc, acc, p);
      if (k[i]) acc = aadd(acc, a, p);
    end
    return acc;
  endfunction

  function automatic apoint_t to_affine(point_t j, fe_t p);
    apoint_t r;
    fe_t zi, zi2;
    if (j.z == '0) begin
      r.x = '0; r.y = '0; r.inf = 1'b1;
      return r;
    end
    zi  = finv(j.z, p);
    zi2 = fmul(zi, zi, p);
    r.x = fmul(j.x, zi2, p);
    r.y = fmul(j.y, fmul(zi2, zi, p), p);
    r.inf = 1'b0;
    return r;
  endfunction

  // a Jacobian point equal to a, with a chosen non-trivial Z
  function automatic point_t to_jacobian(apoint_t a, fe_t z, fe_t p);
    point_t j;
    fe_t z2;
    if (a.inf) return '{x: '0, y: '0, z: '0};
    z2  = fmul(z, z, p);
    j.x = fmul(a.x, z2, p);
    j.y = fmul(a.y, fmul(z2, z, p), p);
    j.z = z;
    return j;
  endfunction

  function automatic bit aeq(apoint_t a, apoint_t b);
    if (a.inf || b.inf) return a.inf == b.inf;
    return (a.x == b.x) && (a.y == b.y);
  endfunction

  // generators: BLS12-381 G1 and BN128 G1
  localparam fe_t BLS_GX =
    381'h17f1d3a73197d7942695638c4fa9ac0fc3688c4f9774b905a14e3a3f171bac586c55e83ff97a1aeffb3af00adb22c6bb;
  localparam fe_t BLS_GY =
    381'h08b3f481e3aaa0f1a09e30ed741d8ae4fcf5e095d5d00af600db18cb2c04b3edd03cc744a2888ae40caa232946c5e7e1;

  function automatic apoint_t gen_bls();
    apoint_t g;
    g.x = BLS_GX; g.y = BLS_GY; g.inf = 1'b0;
    return g;
  endfunction

  function automatic apoint_t gen_bn();
    apoint_t g;
    g.x = fe_t'(1); g.y = fe_t'(2); g.inf = 1'b0;
    return g;
  endfunction

  function automatic fe_t rand_fe(fe_t p);
    logic [FW+63:0] t;
    for (int i = 0; i < (FW + 64) / 32 + 1; i++) t = {t[FW+31:0], 32'($urandom)};
    return fe_t'(t % (FW+64)'(p));
  endfunction
endpackage
