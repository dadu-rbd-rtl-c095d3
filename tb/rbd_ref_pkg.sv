// rbd_ref_pkg: double-precision reference model of the robot used by the
// testbenches. It rebuilds the link transforms and inertias as full 6x6 real
// matrices from the integer link description in rbd_pkg and runs textbook
// algorithms on them: RNEA for inverse dynamics, M column by column from
// RNEA (M e_j = ID(q, 0, e_j) - ID(q, 0, 0) with gravity off), M^-1 by
// Gauss-Jordan elimination and the derivatives by central finite
// differences of RNEA. None of the fixed-point functions of the design is
// used here.
package rbd_ref_pkg;
  import rbd_pkg::link_d_mm;
  import rbd_pkg::link_twist;
  import rbd_pkg::link_mass_g;
  import rbd_pkg::link_com_mm;
  import rbd_pkg::link_icom;

  parameter int MAXN = 16;
  typedef real rv6_t [6];
  typedef real rm6_t [6][6];
  typedef real rvn_t [MAXN];
  typedef real rmn_t [MAXN][MAXN];
  typedef rv6_t rfx_t [MAXN];

  function automatic rm6_t mzero();
    rm6_t m;
    foreach (m[i, j]) m[i][j] = 0.0;
    return m;
  endfunction

  function automatic rm6_t mmul(rm6_t a, rm6_t b);
    rm6_t m;
    foreach (m[i, j]) begin
      m[i][j] = 0.0;
      for (int k = 0; k < 6; k++) m[i][j] += a[i][k] * b[k][j];
    end
    return m;
  endfunction

  function automatic rv6_t mv(rm6_t a, rv6_t x);
    rv6_t y;
    for (int i = 0; i < 6; i++) begin
      y[i] = 0.0;
      for (int k = 0; k < 6; k++) y[i] += a[i][k] * x[k];
    end
    return y;
  endfunction

  function automatic rv6_t mtv(rm6_t a, rv6_t x);
    rv6_t y;
    for (int i = 0; i < 6; i++) begin
      y[i] = 0.0;
      for (int k = 0; k < 6; k++) y[i] += a[k][i] * x[k];
    end
    return y;
  endfunction

  // 6x6 transform parent -> link k as a full matrix
  function automatic rm6_t xform(int k, real q);
    rm6_t  X;
    real   rz[3][3], rx[3][3], E[3][3], sk[3][3], d;
    real   c, s;
    c = $cos(q); s = $sin(q);
    rz = '{'{c, s, 0.0}, '{-s, c, 0.0}, '{0.0, 0.0, 1.0}};
    if (link_twist(k) > 0) rx = '{'{1.0, 0.0, 0.0}, '{0.0, 0.0, 1.0}, '{0.0, -1.0, 0.0}};
    else                   rx = '{'{1.0, 0.0, 0.0}, '{0.0, 0.0, -1.0}, '{0.0, 1.0, 0.0}};
    foreach (E[i, j]) begin
      E[i][j] = 0.0;
      for (int m = 0; m < 3; m++) E[i][j] += rz[i][m] * rx[m][j];
    end
    d = real'(link_d_mm(k)) / 1000.0;
    sk = '{'{0.0, -d, 0.0}, '{d, 0.0, 0.0}, '{0.0, 0.0, 0.0}};   // [r]x, r=(0,0,d)
    X = mzero();
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        X[i][j] = E[i][j];
        X[i+3][j+3] = E[i][j];
        X[i+3][j] = 0.0;
        for (int m = 0; m < 3; m++) X[i+3][j] -= E[i][m] * sk[m][j];
      end
    return X;
  endfunction

  function automatic rm6_t inertia(int k);
    rm6_t I;
    real  m, cx, cy, cz, cc, c[3], sk[3][3];
    m = real'(link_mass_g(k)) / 1000.0;
    for (int a = 0; a < 3; a++) c[a] = real'(link_com_mm(k, a)) / 1000.0;
    cx = c[0]; cy = c[1]; cz = c[2];
    cc = cx*cx + cy*cy + cz*cz;
    sk = '{'{0.0, -cz, cy}, '{cz, 0.0, -cx}, '{-cy, cx, 0.0}};
    I = mzero();
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        I[i][j] = -m * c[i] * c[j] + ((i == j) ? (m * cc + real'(link_icom(k, i)) / 1000.0) : 0.0);
        I[i][j+3] = m * sk[i][j];
        I[j+3][i] = m * sk[i][j];
      end
    for (int a = 3; a < 6; a++) I[a][a] = m;
    return I;
  endfunction

  function automatic rv6_t crm(rv6_t v, rv6_t m);
    rv6_t o;
    o[0] = v[1]*m[2] - v[2]*m[1];
    o[1] = v[2]*m[0] - v[0]*m[2];
    o[2] = v[0]*m[1] - v[1]*m[0];
    o[3] = v[1]*m[5] - v[2]*m[4] + v[4]*m[2] - v[5]*m[1];
    o[4] = v[2]*m[3] - v[0]*m[5] + v[5]*m[0] - v[3]*m[2];
    o[5] = v[0]*m[4] - v[1]*m[3] + v[3]*m[1] - v[4]*m[0];
    return o;
  endfunction

  function automatic rv6_t crf(rv6_t v, rv6_t f);
    rv6_t o;
    o[0] = v[1]*f[2] - v[2]*f[1] + v[4]*f[5] - v[5]*f[4];
    o[1] = v[2]*f[0] - v[0]*f[2] + v[5]*f[3] - v[3]*f[5];
    o[2] = v[0]*f[1] - v[1]*f[0] + v[3]*f[4] - v[4]*f[3];
    o[3] = v[1]*f[5] - v[2]*f[4];
    o[4] = v[2]*f[3] - v[0]*f[5];
    o[5] = v[0]*f[4] - v[1]*f[3];
    return o;
  endfunction

  // RNEA. grav: include gravity. Returns tau; v, a, f (total) per link.
  function automatic void rnea(input int nb, input rvn_t q, input rvn_t qd,
                               input rvn_t qdd, input rfx_t fext, input bit grav,
                               output rvn_t tau, output rfx_t v, output rfx_t a,
                               output rfx_t f);
    rv6_t vp, ap, t;
    rm6_t X[MAXN];
    for (int i = 0; i < nb; i++) begin
      X[i] = xform(i, q[i]);
      if (i == 0) begin
        vp = '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
        ap = '{0.0, 0.0, 0.0, 0.0, 0.0, grav ? 9.81 : 0.0};
      end else begin
        vp = v[i-1]; ap = a[i-1];
      end
      v[i] = mv(X[i], vp);
      v[i][2] += qd[i];
      a[i] = mv(X[i], ap);
      a[i][2] += qdd[i];
      t = crm(v[i], '{0.0, 0.0, qd[i], 0.0, 0.0, 0.0});
      for (int r = 0; r < 6; r++) a[i][r] += t[r];
      t = crf(v[i], mv(inertia(i), v[i]));
      f[i] = mv(inertia(i), a[i]);
      for (int r = 0; r < 6; r++) f[i][r] += t[r] - fext[i][r];
    end
    for (int i = nb - 1; i >= 0; i--) begin
      tau[i] = f[i][2];
      if (i > 0) begin
        t = mtv(X[i], f[i]);
        for (int r = 0; r < 6; r++) f[i-1][r] += t[r];
      end
    end
  endfunction

  function automatic rvn_t id(int nb, rvn_t q, rvn_t qd, rvn_t qdd, rfx_t fext, bit grav);
    rvn_t tau;
    rfx_t v, a, f;
    rnea(nb, q, qd, qdd, fext, grav, tau, v, a, f);
    return tau;
  endfunction

  function automatic rmn_t mass(int nb, rvn_t q);
    rmn_t M;
    rvn_t z, e, t;
    rfx_t fz;
    foreach (z[i]) z[i] = 0.0;
    foreach (fz[i]) fz[i] = '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
    for (int j = 0; j < nb; j++) begin
      e = z; e[j] = 1.0;
      t = id(nb, q, z, e, fz, 1'b0);
      for (int i = 0; i < nb; i++) M[i][j] = t[i];
    end
    return M;
  endfunction

  function automatic rmn_t inv(int nb, rmn_t A);
    rmn_t B;
    real  p, fct;
    foreach (B[i, j]) B[i][j] = (i == j) ? 1.0 : 0.0;
    for (int c = 0; c < nb; c++) begin
      p = A[c][c];
      for (int j = 0; j < nb; j++) begin A[c][j] /= p; B[c][j] /= p; end
      for (int r = 0; r < nb; r++)
        if (r != c) begin
          fct = A[r][c];
          for (int j = 0; j < nb; j++) begin
            A[r][j] -= fct * A[c][j];
            B[r][j] -= fct * B[c][j];
          end
        end
    end
    return B;
  endfunction

  // d tau_i / d u_j, u = [q; qd], column j in 0..2nb-1, by central differences
  function automatic real did(int nb, rvn_t q, rvn_t qd, rvn_t qdd, rfx_t fext,
                              int i, int j);
    rvn_t qp, qm, dp, dm, tp, tm;
    real  h;
    h = 1.0e-5;
    qp = q; qm = q; dp = qd; dm = qd;
    if (j < nb) begin qp[j] += h; qm[j] -= h; end
    else        begin dp[j-nb] += h; dm[j-nb] -= h; end
    tp = id(nb, qp, dp, qdd, fext, 1'b1);
    tm = id(nb, qm, dm, qdd, fext, 1'b1);
    return (tp[i] - tm[i]) / (2.0 * h);
  endfunction

  function automatic real fx2r(logic signed [31:0] x);
    return real'(x) / 65536.0;
  endfunction
  function automatic logic signed [31:0] r2fx(real x);
    return 32'(longint'($rtoi(x * 65536.0)));
  endfunction
  function automatic bit close(real got, real ref_v, real rel, real abs_v);
    real e;
    e = got - ref_v;
    if (e < 0.0) e = -e;
    return (e <= abs_v) || (e <= rel * ((ref_v < 0.0) ? -ref_v : ref_v));
  endfunction
endpackage
