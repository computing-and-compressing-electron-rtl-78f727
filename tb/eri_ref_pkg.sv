// eri_ref_pkg: double-precision reference model for the ERI kernel testbenches.
//
// Everything here works on `real` values and is written independently of
// the RTL: fp32 <-> real conversion, the Cartesian GTO ordering, the setup
// formulas for B and C, the vertical and horizontal recurrences, the
// quadrature sum and the n-bit compression. Testbenches compare the fp32
// hardware against it with tolerances that allow for single precision.
package eri_ref_pkg;

  // ---------------------------------------------------------------- fp32
  function automatic real fp2real(input logic [31:0] f);
    real m;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] real2fp(input real r);
    logic s;
    real  a, frac;
    int   e;
    longint unsigned m;
    if (r == 0.0) return 32'd0;
    s = r < 0.0;
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    frac = (a - 1.0) * 8388608.0;
    m = longint'(frac);           // rounds to nearest
    if (m >= 64'd8388608) begin m = 0; e++; end
    return {s, 8'(e + 127), 23'(m)};
  endfunction

  function automatic logic [31:0] rnd_fp(input real lo, input real hi);
    return real2fp(lo + (hi - lo) * real'($urandom % 1000001) / 1000000.0);
  endfunction

  // ---------------------------------------------------------------- shells
  function automatic int n_gto(input int l);
    case (l)
      0: return 1;
      1: return 3;
      2: return 6;
      default: return 10;
    endcase
  endfunction

  // Exponents (x, y, z) of GTO n in a shell of momentum l, listed explicitly.
  function automatic int comp(input int l, input int n, input int xi);
    int t [10][3];
    case (l)
      0: t[0] = '{0, 0, 0};
      1: begin t[0] = '{1,0,0}; t[1] = '{0,1,0}; t[2] = '{0,0,1}; end
      2: begin t[0] = '{2,0,0}; t[1] = '{1,1,0}; t[2] = '{1,0,1};
               t[3] = '{0,2,0}; t[4] = '{0,1,1}; t[5] = '{0,0,2}; end
      default: begin
               t[0] = '{3,0,0}; t[1] = '{2,1,0}; t[2] = '{2,0,1}; t[3] = '{1,2,0};
               t[4] = '{1,1,1}; t[5] = '{1,0,2}; t[6] = '{0,3,0}; t[7] = '{0,2,1};
               t[8] = '{0,1,2}; t[9] = '{0,0,3}; end
    endcase
    return t[n][xi];
  endfunction

  function automatic int n_rys(input int la, input int lb, input int lc, input int ld);
    return (la + lb + lc + ld) / 2 + 1;
  endfunction

  // ---------------------------------------------------------------- setup
  typedef struct {
    real ra[3], rb[3], rc[3], rd[3];
    real al, be, ga, de;
    real t2[8], w[8];
  } quartet_t;

  typedef struct {
    real b[3][8];
    real c[6][8];
    real ab[3], cd[3];
  } aux_t;

  function automatic aux_t ref_setup(input quartet_t q, input int nr);
    aux_t o;
    real a, b, p[3], qq[3];
    a = q.al + q.be;
    b = q.ga + q.de;
    for (int x = 0; x < 3; x++) begin
      p[x]  = (q.al * q.ra[x] + q.be * q.rb[x]) / a;
      qq[x] = (q.ga * q.rc[x] + q.de * q.rd[x]) / b;
      o.ab[x] = q.ra[x] - q.rb[x];
      o.cd[x] = q.rc[x] - q.rd[x];
    end
    for (int m = 0; m < nr; m++) begin
      real t;
      t = q.t2[m];
      o.b[0][m] = t / (2.0 * (a + b));
      o.b[1][m] = 1.0 / (2.0 * a) - b * t / (2.0 * a * (a + b));
      o.b[2][m] = 1.0 / (2.0 * b) - a * t / (2.0 * b * (a + b));
      for (int x = 0; x < 3; x++) begin
        o.c[x][m]     = (p[x] - q.ra[x]) - b * (p[x] - qq[x]) * t / (a + b);
        o.c[3 + x][m] = (qq[x] - q.rc[x]) + a * (p[x] - qq[x]) * t / (a + b);
      end
    end
    return o;
  endfunction

  // ---------------------------------------------------------------- recurrences
  // I[i][j][k][l] for one axis and root, i <= la+lb, j <= lb, k <= lc+ld, l <= ld.
  typedef real iset_t [7][4][7][4];

  function automatic iset_t ref_rr(input int la, input int lb, input int lc, input int ld,
                                   input real b1, input real b2, input real b3,
                                   input real c0, input real c1, input real dab, input real dcd);
    iset_t r;
    real   v [8][8];
    int    ni, nk;
    ni = la + lb;
    nk = lc + ld;
    foreach (r[i, j, k, l]) r[i][j][k][l] = 0.0;
    foreach (v[i, k]) v[i][k] = 0.0;
    // build the (i, k) table by increasing i + k, using the VRRs
    v[0][0] = 1.0;
    for (int i = 0; i <= ni; i++) begin
      for (int k = 0; k <= nk; k++) begin
        if (i == 0 && k == 0) continue;
        if (k == 0) begin
          // I(i,0) from I(i-1,0) and I(i-2,0)
          v[i][0] = c0 * v[i-1][0] + ((i >= 2) ? real'(i - 1) * b2 * v[i-2][0] : 0.0);
        end else begin
          // I(i,k) from I(i,k-1), I(i,k-2), I(i-1,k-1)
          v[i][k] = c1 * v[i][k-1]
                  + ((k >= 2) ? real'(k - 1) * b3 * v[i][k-2] : 0.0)
                  + ((i >= 1) ? real'(i) * b1 * v[i-1][k-1] : 0.0);
        end
      end
    end
    for (int i = 0; i <= ni; i++)
      for (int k = 0; k <= nk; k++)
        r[i][0][k][0] = v[i][k];
    for (int j = 1; j <= lb; j++)
      for (int i = 0; i + j <= ni; i++)
        for (int k = 0; k <= nk; k++)
          r[i][j][k][0] = r[i+1][j-1][k][0] + dab * r[i][j-1][k][0];
    for (int l = 1; l <= ld; l++)
      for (int k = 0; k + l <= nk; k++)
        for (int i = 0; i <= ni; i++)
          for (int j = 0; j <= lb; j++)
            if (i + j <= ni)
              r[i][j][k][l] = r[i][j][k+1][l-1] + dcd * r[i][j][k][l-1];
    return r;
  endfunction

  // ---------------------------------------------------------------- full quartet
  // ERIs in output order: row = d*ngc + c, lane = b*nga + a.
  function automatic void ref_quartet(input int la, input int lb, input int lc, input int ld,
                                      input quartet_t q, output real eri [], output real bmax);
    aux_t  s;
    iset_t iv [3][8];
    int    nr, nga, ngb, ngc, ngd;
    nr  = n_rys(la, lb, lc, ld);
    nga = n_gto(la); ngb = n_gto(lb); ngc = n_gto(lc); ngd = n_gto(ld);
    s = ref_setup(q, nr);
    for (int x = 0; x < 3; x++)
      for (int m = 0; m < nr; m++)
        iv[x][m] = ref_rr(la, lb, lc, ld, s.b[0][m], s.b[1][m], s.b[2][m],
                          s.c[x][m], s.c[3 + x][m], s.ab[x], s.cd[x]);
    eri  = new[nga * ngb * ngc * ngd];
    bmax = 0.0;
    for (int d = 0; d < ngd; d++)
      for (int c = 0; c < ngc; c++)
        for (int b = 0; b < ngb; b++)
          for (int a = 0; a < nga; a++) begin
            real acc;
            acc = 0.0;
            for (int m = 0; m < nr; m++) begin
              real p;
              p = q.w[m];
              for (int x = 0; x < 3; x++)
                p = p * iv[x][m][comp(la, a, x)][comp(lb, b, x)][comp(lc, c, x)][comp(ld, d, x)];
              acc = acc + p;
            end
            eri[((d * ngc + c) * ngb + b) * nga + a] = acc;
            if ((acc < 0.0 ? -acc : acc) > bmax) bmax = (acc < 0.0 ? -acc : acc);
          end
  endfunction

  // Random quartet: centres on a unit lattice with a small offset, exponents
  // around 1.5, roots t^2 in (0,1) and weights in (0,1).
  function automatic quartet_t rnd_quartet();
    quartet_t q;
    for (int x = 0; x < 3; x++) begin
      q.ra[x] = fp2real(real2fp(real'($urandom % 4) + fp2real(rnd_fp(-0.2, 0.2))));
      q.rb[x] = fp2real(real2fp(real'($urandom % 4) + fp2real(rnd_fp(-0.2, 0.2))));
      q.rc[x] = fp2real(real2fp(real'($urandom % 4) + fp2real(rnd_fp(-0.2, 0.2))));
      q.rd[x] = fp2real(real2fp(real'($urandom % 4) + fp2real(rnd_fp(-0.2, 0.2))));
    end
    q.al = fp2real(rnd_fp(1.0, 2.0));
    q.be = fp2real(rnd_fp(1.0, 2.0));
    q.ga = fp2real(rnd_fp(1.0, 2.0));
    q.de = fp2real(rnd_fp(1.0, 2.0));
    for (int m = 0; m < 8; m++) begin
      q.t2[m] = fp2real(rnd_fp(0.01, 0.99));
      q.w[m]  = fp2real(rnd_fp(0.01, 1.0));
    end
    return q;
  endfunction

  function automatic logic [511:0] word_g(input quartet_t q);
    logic [511:0] w;
    for (int x = 0; x < 3; x++) begin
      w[32 * x +: 32]       = real2fp(q.ra[x]);
      w[32 * (3 + x) +: 32] = real2fp(q.rb[x]);
      w[32 * (6 + x) +: 32] = real2fp(q.rc[x]);
      w[32 * (9 + x) +: 32] = real2fp(q.rd[x]);
    end
    w[32 * 12 +: 32] = real2fp(q.al);
    w[32 * 13 +: 32] = real2fp(q.be);
    w[32 * 14 +: 32] = real2fp(q.ga);
    w[32 * 15 +: 32] = real2fp(q.de);
    return w;
  endfunction

  function automatic logic [511:0] word_r(input quartet_t q);
    logic [511:0] w;
    for (int m = 0; m < 8; m++) begin
      w[32 * m +: 32]       = real2fp(q.t2[m]);
      w[32 * (8 + m) +: 32] = real2fp(q.w[m]);
    end
    return w;
  endfunction

  function automatic real rabs(input real a);
    return a < 0.0 ? -a : a;
  endfunction

endpackage
