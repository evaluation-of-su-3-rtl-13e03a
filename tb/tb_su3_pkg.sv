// tb_su3_pkg: reference model for the testbenches, written with the simulator's native
// double-precision `real` arithmetic instead of the bit-level functions of su3_pkg.
// Matrices are rm_t (3x3 of complex reals). Provides random test matrices, conversion
// between su3_t and rm_t, matrix product with optional daggers, sum, scaling, the six-staple
// update and the Gram-Schmidt SU(3) projection, and a tolerance comparison.
// The testbenches assume the default binary64 number format.
package tb_su3_pkg;
  import su3_pkg::*;

  typedef struct {
    real re;
    real im;
  } rc_t;
  typedef rc_t rm_t [3][3];

  function automatic real fp2r(fp_t x);
    return $bitstoreal(64'(x));
  endfunction

  function automatic fp_t r2fp(real x);
    return fp_t'($realtobits(x));
  endfunction

  function automatic real rnd();
    return (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
  endfunction

  function automatic su3_t rand_su3();
    su3_t m;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        m[i][j].re = r2fp(rnd());
        m[i][j].im = r2fp(rnd());
      end
    return m;
  endfunction

  function automatic rm_t to_rm(su3_t m);
    rm_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        r[i][j].re = fp2r(m[i][j].re);
        r[i][j].im = fp2r(m[i][j].im);
      end
    return r;
  endfunction

  function automatic su3_t to_su3(rm_t r);
    su3_t m;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        m[i][j].re = r2fp(r[i][j].re);
        m[i][j].im = r2fp(r[i][j].im);
      end
    return m;
  endfunction

  function automatic rm_t r_dag(rm_t a);
    rm_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        r[i][j].re = a[j][i].re;
        r[i][j].im = -a[j][i].im;
      end
    return r;
  endfunction

  function automatic rm_t r_mul(rm_t a, rm_t b);
    rm_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        r[i][j].re = 0.0;
        r[i][j].im = 0.0;
        for (int k = 0; k < 3; k++) begin
          r[i][j].re += a[i][k].re * b[k][j].re - a[i][k].im * b[k][j].im;
          r[i][j].im += a[i][k].re * b[k][j].im + a[i][k].im * b[k][j].re;
        end
      end
    return r;
  endfunction

  function automatic rm_t r_add(rm_t a, rm_t b);
    rm_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        r[i][j].re = a[i][j].re + b[i][j].re;
        r[i][j].im = a[i][j].im + b[i][j].im;
      end
    return r;
  endfunction

  function automatic rm_t r_scale(rm_t a, real s);
    rm_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        r[i][j].re = a[i][j].re * s;
        r[i][j].im = a[i][j].im * s;
      end
    return r;
  endfunction

  // Forward staple U_nu(x+mu) U_mu(x+nu)^dag U_nu(x)^dag
  function automatic rm_t r_staple_fwd(rm_t l0, rm_t l1, rm_t l2);
    return r_mul(r_mul(l0, r_dag(l1)), r_dag(l2));
  endfunction

  // Backward staple U_nu(x+mu-nu)^dag U_mu(x-nu)^dag U_nu(x-nu)
  function automatic rm_t r_staple_bwd(rm_t l0, rm_t l1, rm_t l2);
    return r_mul(r_mul(r_dag(l0), r_dag(l1)), l2);
  endfunction

  // Gram-Schmidt projection of the rows, third row = conj(row1 x row2)
  function automatic rm_t r_proj(rm_t a);
    rm_t   r;
    real   n, dre, dim;
    n = 0.0;
    for (int k = 0; k < 3; k++) n += a[0][k].re * a[0][k].re + a[0][k].im * a[0][k].im;
    for (int k = 0; k < 3; k++) begin
      r[0][k].re = a[0][k].re / $sqrt(n);
      r[0][k].im = a[0][k].im / $sqrt(n);
    end
    dre = 0.0;
    dim = 0.0;
    for (int k = 0; k < 3; k++) begin
      dre += r[0][k].re * a[1][k].re + r[0][k].im * a[1][k].im;
      dim += r[0][k].re * a[1][k].im - r[0][k].im * a[1][k].re;
    end
    for (int k = 0; k < 3; k++) begin
      r[1][k].re = a[1][k].re - (dre * r[0][k].re - dim * r[0][k].im);
      r[1][k].im = a[1][k].im - (dre * r[0][k].im + dim * r[0][k].re);
    end
    n = 0.0;
    for (int k = 0; k < 3; k++) n += r[1][k].re * r[1][k].re + r[1][k].im * r[1][k].im;
    for (int k = 0; k < 3; k++) begin
      r[1][k].re = r[1][k].re / $sqrt(n);
      r[1][k].im = r[1][k].im / $sqrt(n);
    end
    for (int k = 0; k < 3; k++) begin
      int k1, k2;
      k1 = (k + 1) % 3;
      k2 = (k + 2) % 3;
      r[2][k].re =  (r[0][k1].re * r[1][k2].re - r[0][k1].im * r[1][k2].im)
                  - (r[0][k2].re * r[1][k1].re - r[0][k2].im * r[1][k1].im);
      r[2][k].im = -((r[0][k1].re * r[1][k2].im + r[0][k1].im * r[1][k2].re)
                  - (r[0][k2].re * r[1][k1].im + r[0][k2].im * r[1][k1].re));
    end
    return r;
  endfunction

  // Largest element difference, relative to max(1, |expected|)
  function automatic real r_err(su3_t got, rm_t exp);
    rm_t g;
    real e, d, s;
    g = to_rm(got);
    e = 0.0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        s = (exp[i][j].re < 0 ? -exp[i][j].re : exp[i][j].re);
        s = (s < 1.0) ? 1.0 : s;
        d = g[i][j].re - exp[i][j].re;
        d = (d < 0 ? -d : d) / s;
        if (d > e) e = d;
        s = (exp[i][j].im < 0 ? -exp[i][j].im : exp[i][j].im);
        s = (s < 1.0) ? 1.0 : s;
        d = g[i][j].im - exp[i][j].im;
        d = (d < 0 ? -d : d) / s;
        if (d > e) e = d;
      end
    return e;
  endfunction

  // Coordinates of site index i (x fastest) and back.
  function automatic int site_idx(int x, int y, int z, int t, int lx, int ly, int lz);
    return x + lx * (y + ly * (z + lz * t));
  endfunction

  // Smeared link mu at (x,y,z,t) of a periodic lattice stored as lat[site_idx]:
  // projection of U + coef * (sum of the six staples).
  function automatic su3_t smear_link(const ref site_t lat [], input int lx, ly, lz, lt,
                                      input int x, y, z, t, mu, input real coef);
    int  c [4], len [4], cp [4], cn [4], cpn [4], cm [4];
    rm_t s, u;
    len = '{lx, ly, lz, lt};
    c   = '{x, y, z, t};
    cp  = c;
    cp[mu] = (c[mu] + 1) % len[mu];
    u = to_rm(lat[site_idx(c[0], c[1], c[2], c[3], lx, ly, lz)][mu]);
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        s[i][j].re = 0.0;
        s[i][j].im = 0.0;
      end
    for (int nu = 0; nu < 4; nu++) begin
      if (nu == mu) continue;
      cn = c;  cn[nu] = (c[nu] + 1) % len[nu];
      cm = c;  cm[nu] = (c[nu] + len[nu] - 1) % len[nu];
      cpn = cp; cpn[nu] = (cp[nu] + len[nu] - 1) % len[nu];
      s = r_add(s, r_staple_fwd(to_rm(lat[site_idx(cp[0], cp[1], cp[2], cp[3], lx, ly, lz)][nu]),
                                to_rm(lat[site_idx(cn[0], cn[1], cn[2], cn[3], lx, ly, lz)][mu]),
                                to_rm(lat[site_idx(c[0], c[1], c[2], c[3], lx, ly, lz)][nu])));
      s = r_add(s, r_staple_bwd(to_rm(lat[site_idx(cpn[0], cpn[1], cpn[2], cpn[3], lx, ly, lz)][nu]),
                                to_rm(lat[site_idx(cm[0], cm[1], cm[2], cm[3], lx, ly, lz)][mu]),
                                to_rm(lat[site_idx(cm[0], cm[1], cm[2], cm[3], lx, ly, lz)][nu])));
    end
    return to_su3(r_proj(r_add(u, r_scale(s, coef))));
  endfunction

  // One full smearing iteration of a lattice.
  function automatic void smear_lattice(const ref site_t src [], ref site_t dst [],
                                        input int lx, ly, lz, lt, input real coef);
    for (int t = 0; t < lt; t++)
      for (int z = 0; z < lz; z++)
        for (int y = 0; y < ly; y++)
          for (int x = 0; x < lx; x++)
            dst[site_idx(x, y, z, t, lx, ly, lz)] = {
              smear_link(src, lx, ly, lz, lt, x, y, z, t, 3, coef),
              smear_link(src, lx, ly, lz, lt, x, y, z, t, 2, coef),
              smear_link(src, lx, ly, lz, lt, x, y, z, t, 1, coef),
              smear_link(src, lx, ly, lz, lt, x, y, z, t, 0, coef)};
  endfunction

  function automatic site_t rand_site_su3();
    site_t s;
    s = {rand_su3(), rand_su3(), rand_su3(), rand_su3()};
    return s;
  endfunction

  // Worst relative difference over the four links of a site.
  function automatic real site_err(site_t got, site_t exp);
    real e, d;
    e = 0.0;
    for (int mu = 0; mu < 4; mu++) begin
      d = r_err(got[mu], to_rm(exp[mu]));
      if (d > e) e = d;
    end
    return e;
  endfunction

  // 512-bit word w of a site record (word 0 = least significant bits).
  function automatic logic [HBM_W-1:0] site_word(site_t s, int w);
    logic [SITE_W-1:0] f;
    f = s;
    return f[w*HBM_W +: HBM_W];
  endfunction

endpackage
