// su3_pkg: number format, data types and arithmetic shared by the APE smearing datapath.
//
// A gauge link is a 3x3 complex matrix (an element of SU(3)); a lattice site carries four
// links, one per direction x, y, z, t. Reals are IEEE-754 words of EXP_W exponent and MAN_W
// fraction bits: binary64 (double) by default, binary32 with 8/23 and binary16 with 5/10.
// With double a site is 4 x 9 x 2 x 64 = 4608 bits, i.e. nine 512-bit memory words.
//
// The arithmetic functions are combinational and synthesizable:
//   fp_mul / fp_add / fp_sub : round-to-nearest-even; subnormal inputs and results are
//                              flushed to zero, overflow gives infinity, NaN is not handled.
//   c_* / su3_*              : complex and 3x3 complex-matrix helpers built on them.
//   fp_rsqrt_seed            : first guess for 1/sqrt(x) by the exponent-halving bit trick,
//                              refined by Newton-Raphson steps in su3_projection.
// The format and the flush-to-zero rounding policy are this design's choices; the source
// study compares double, float and half precision HLS kernels.
package su3_pkg;

  localparam int unsigned EXP_W = 11;
  localparam int unsigned MAN_W = 52;
  localparam int unsigned FP_W  = EXP_W + MAN_W + 1;
  localparam int unsigned BIAS  = (1 << (EXP_W - 1)) - 1;

  typedef logic [FP_W-1:0] fp_t;

  typedef struct packed {
    fp_t re;
    fp_t im;
  } cplx_t;

  // su3_t[r][c] is row r, column c.
  typedef cplx_t [2:0][2:0] su3_t;
  // site_t[mu] is the link in direction mu (0=x, 1=y, 2=z, 3=t).
  typedef su3_t [3:0] site_t;

  localparam int unsigned SU3_W  = $bits(su3_t);
  localparam int unsigned SITE_W = $bits(site_t);
  localparam int unsigned HBM_W  = 512;
  localparam int unsigned WORDS_PER_SITE = (SITE_W + HBM_W - 1) / HBM_W;

  localparam fp_t FP_HALF  = (fp_t'(BIAS) - fp_t'(1)) << MAN_W;
  localparam fp_t FP_3HALF = (fp_t'(BIAS) << MAN_W) | (fp_t'(1) << (MAN_W - 1));

  localparam fp_t RSQRT_MAGIC = (FP_W == 64) ? fp_t'(64'h5FE6_EB50_C7B5_37A9) :
                                (FP_W == 32) ? fp_t'(32'h5F37_59DF) :
                                               fp_t'(16'h59BB);

  localparam logic [EXP_W-1:0] EXP_MAX = '1;

  // ---------------------------------------------------------------- real arithmetic
  function automatic fp_t fp_pack(logic s, int e, logic [MAN_W:0] m);
    if (e <= 0) return {s, {(FP_W-1){1'b0}}};
    if (e >= int'(EXP_MAX)) return {s, EXP_MAX, {MAN_W{1'b0}}};
    return {s, EXP_W'(e), m[MAN_W-1:0]};
  endfunction

  function automatic fp_t fp_mul(fp_t a, fp_t b);
    logic                 s;
    logic [EXP_W-1:0]     ea, eb;
    logic [MAN_W:0]       ma, mb, m;
    logic [2*MAN_W+1:0]   p;
    logic                 g, st;
    int                   e;
    s  = a[FP_W-1] ^ b[FP_W-1];
    ea = a[FP_W-2 -: EXP_W];
    eb = b[FP_W-2 -: EXP_W];
    if (ea == '0 || eb == '0) return {s, {(FP_W-1){1'b0}}};
    ma = {1'b1, a[MAN_W-1:0]};
    mb = {1'b1, b[MAN_W-1:0]};
    p  = (2*MAN_W+2)'(ma) * (2*MAN_W+2)'(mb);
    e  = int'(ea) + int'(eb) - int'(BIAS);
    if (p[2*MAN_W+1]) begin
      m  = p[2*MAN_W+1 -: MAN_W+1];
      g  = p[MAN_W];
      st = |p[MAN_W-1:0];
      e  = e + 1;
    end else begin
      m  = p[2*MAN_W -: MAN_W+1];
      g  = p[MAN_W-1];
      st = |p[MAN_W-2:0];
    end
    if (g && (st || m[0])) begin
      if (&m) begin
        m = {1'b1, {MAN_W{1'b0}}};
        e = e + 1;
      end else begin
        m = m + 1'b1;
      end
    end
    return fp_pack(s, e, m);
  endfunction

  // Significand with hidden bit, then guard, round and sticky bits.
  localparam int unsigned XW = MAN_W + 4;

  function automatic fp_t fp_add(fp_t a, fp_t b);
    fp_t                x, y;
    logic [EXP_W-1:0]   ex, ey;
    logic [XW-1:0]      mx, my, ysh, r;
    logic [XW:0]        sum;
    logic [MAN_W:0]     m;
    logic               lost, rup;
    int                 d, e, lz;
    ex = a[FP_W-2 -: EXP_W];
    ey = b[FP_W-2 -: EXP_W];
    if (ey == '0) return (ex == '0) ? fp_t'(0) : a;
    if (ex == '0) return b;
    // x gets the larger magnitude
    if (a[FP_W-2:0] >= b[FP_W-2:0]) begin
      x = a; y = b;
    end else begin
      x = b; y = a;
    end
    ex = x[FP_W-2 -: EXP_W];
    ey = y[FP_W-2 -: EXP_W];
    mx = {1'b1, x[MAN_W-1:0], 3'b000};
    my = {1'b1, y[MAN_W-1:0], 3'b000};
    d  = int'(ex) - int'(ey);
    e  = int'(ex);
    if (d >= int'(XW)) begin
      ysh  = '0;
      lost = 1'b1;
    end else begin
      ysh  = my >> d;
      lost = (my & ((XW'(1) << d) - 1'b1)) != '0;
    end
    ysh[0] = ysh[0] | lost;
    if (x[FP_W-1] == y[FP_W-1]) begin
      sum = {1'b0, mx} + {1'b0, ysh};
      if (sum[XW]) begin
        r = sum[XW:1];
        r[0] = r[0] | sum[0];
        e = e + 1;
      end else begin
        r = sum[XW-1:0];
      end
    end else begin
      r = mx - ysh;
      if (r == '0) return fp_t'(0);
      lz = 0;
      for (int i = XW - 1; i >= 0; i--) begin
        if (r[i]) break;
        lz++;
      end
      r = r << lz;
      e = e - lz;
    end
    m   = r[XW-1:3];
    rup = r[2] && (r[1] || r[0] || m[0]);
    if (rup) begin
      if (&m) begin
        m = {1'b1, {MAN_W{1'b0}}};
        e = e + 1;
      end else begin
        m = m + 1'b1;
      end
    end
    return fp_pack(x[FP_W-1], e, m);
  endfunction

  function automatic fp_t fp_neg(fp_t a);
    return {~a[FP_W-1], a[FP_W-2:0]};
  endfunction

  function automatic fp_t fp_sub(fp_t a, fp_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp_t fp_rsqrt_seed(fp_t x);
    return RSQRT_MAGIC - (x >> 1);
  endfunction

  // One Newton-Raphson step for y ~ 1/sqrt(x): y * (3/2 - (x/2) * y * y).
  function automatic fp_t fp_rsqrt_step(fp_t x, fp_t y);
    fp_t h;
    h = fp_mul(fp_mul(fp_mul(FP_HALF, x), y), y);
    return fp_mul(y, fp_sub(FP_3HALF, h));
  endfunction

  // ---------------------------------------------------------------- complex arithmetic
  function automatic cplx_t c_mul(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = fp_sub(fp_mul(a.re, b.re), fp_mul(a.im, b.im));
    r.im = fp_add(fp_mul(a.re, b.im), fp_mul(a.im, b.re));
    return r;
  endfunction

  function automatic cplx_t c_add(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = fp_add(a.re, b.re);
    r.im = fp_add(a.im, b.im);
    return r;
  endfunction

  function automatic cplx_t c_sub(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = fp_sub(a.re, b.re);
    r.im = fp_sub(a.im, b.im);
    return r;
  endfunction

  function automatic cplx_t c_conj(cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = fp_neg(a.im);
    return r;
  endfunction

  function automatic cplx_t c_scale(cplx_t a, fp_t s);
    cplx_t r;
    r.re = fp_mul(a.re, s);
    r.im = fp_mul(a.im, s);
    return r;
  endfunction

  // |a|^2
  function automatic fp_t c_norm2(cplx_t a);
    return fp_add(fp_mul(a.re, a.re), fp_mul(a.im, a.im));
  endfunction

  // ---------------------------------------------------------------- 3x3 matrices
  function automatic su3_t su3_dag(su3_t a);
    su3_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        r[i][j] = c_conj(a[j][i]);
    return r;
  endfunction

  // Row-times-column sums are accumulated in column order: (p0 + p1) + p2.
  function automatic su3_t su3_mul(su3_t a, su3_t b);
    su3_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        r[i][j] = c_add(c_add(c_mul(a[i][0], b[0][j]), c_mul(a[i][1], b[1][j])),
                        c_mul(a[i][2], b[2][j]));
    return r;
  endfunction

  function automatic su3_t su3_add(su3_t a, su3_t b);
    su3_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        r[i][j] = c_add(a[i][j], b[i][j]);
    return r;
  endfunction

  function automatic su3_t su3_scale(su3_t a, fp_t s);
    su3_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        r[i][j] = c_scale(a[i][j], s);
    return r;
  endfunction

endpackage
