// rbd_pkg: shared types, constants and spatial-algebra functions for the
// rigid-body-dynamics accelerator.
//
// Number format: every datapath value is a signed Q16.16 fixed-point word
// (FW=32 bits, FRAC=16 fraction bits). A product is formed at 64 bits and
// shifted back, truncating toward minus infinity.
//
// Spatial vectors are 6-word packed arrays ordered [angular(0..2); linear(3..5)]
// for motion vectors and [moment; force] for force vectors (Featherstone's
// convention). Index 0 of a packed array is its least significant element.
//
// Robot model: a fixed-base serial chain of NB revolute joints. Every joint
// rotates about its local z axis, so the motion subspace S_i is the one-hot
// vector e_2, as in the paper's example submodule. The transform from the
// parent frame to link i is  iX_p = rot(Rz(q_i) * Rx(+-90deg)) * xlt(r_i),
// with r_i = (0, 0, d_i) and the twist sign alternating from link to link
// (an iiwa-like arm). The link constants (lengths, masses, centres of mass,
// inertias) are not taken from any real robot; they are set below in integer
// milli-units and turned into fixed-point constants at elaboration time, the
// way the paper stores robot constants on chip.
package rbd_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int FW   = 32;          // word width
  parameter int FRAC = 16;          // fraction bits

  typedef logic signed [FW-1:0] fx_t;
  typedef fx_t [5:0]            sv6_t;   // spatial vector
  typedef sv6_t [5:0]           sm6_t;   // 6x6 matrix, [col][row]


  // ------------------------------------------------------- function types
  // Interface argument "type" of a task (paper Table I).
  typedef enum logic [2:0] {
    F_ID   = 3'd0,   // tau  = ID(q, qd, qdd, fext)
    F_FD   = 3'd1,   // qdd  = FD(q, qd, tau, fext)
    F_M    = 3'd2,   // M(q)
    F_MINV = 3'd3,   // M^-1(q)
    F_DID  = 3'd4,   // d tau / d[q;qd]
    F_DFD  = 3'd5,   // d qdd / d[q;qd] from tau
    F_DIFD = 3'd6    // d qdd / d[q;qd] from qdd and a given M^-1
  } func_e;

  // Micro-instruction issued to the pipelines (paper: "inst").
  typedef enum logic [2:0] {
    I_RNEA   = 3'd0,  // RNEA with the task's qdd, derivative array in pass mode
    I_RNEA0  = 3'd1,  // RNEA with qdd = 0 (bias force C), pass mode
    I_DRNEA  = 3'd2,  // RNEA followed by Delta-RNEA
    I_M      = 3'd3,  // MMinvGen, out_M
    I_MINV   = 3'd4   // MMinvGen, out_Minv
  } inst_e;

  // ----------------------------------------------------- fixed-point math
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FW-1:0] p;
    p = a * b;
    return fx_t'(p >>> FRAC);
  endfunction

  // integer milli-units -> fixed point (rounded)
  function automatic fx_t fx_milli(longint m);
    longint t;
    t = (m * (64'sd1 <<< FRAC));
    if (t >= 0) t = (t + 500) / 1000; else t = (t - 500) / 1000;
    return fx_t'(t);
  endfunction

  // integer micro-units -> fixed point (truncated)
  function automatic fx_t fx_micro(longint m);
    return fx_t'((m * (64'sd1 <<< FRAC)) / 1000000);
  endfunction

  // ------------------------------------------------------ robot constants
  // All in milli-units (mm, g, 1e-3 kg m^2).
  function automatic int link_d_mm(int k);       return 150 + 20 * k;  endfunction
  function automatic int link_twist(int k);      return (k % 2 == 0) ? 1 : -1; endfunction
  function automatic int link_mass_g(int k);     return 4000 - 300 * k; endfunction
  function automatic int link_com_mm(int k, int ax);
    case (ax)
      0:       return 10;
      1:       return 40 + 5 * k;
      default: return 80;
    endcase
  endfunction
  function automatic int link_icom(int k, int ax);   // diag inertia about CoM
    case (ax)
      0:       return 60 - 4 * k;
      1:       return 55 - 3 * k;
      default: return 40 - 2 * k;
    endcase
  endfunction

  // Spatial inertia of link k about its joint frame origin:
  //   I = [ Ic + m(|c|^2 1 - c c^T) , m [c]x ; m [c]x^T , m 1 ]
  // Entry values are formed exactly in integer units of 1e-9 before rounding.
  function automatic sm6_t link_inertia(int k);
    sm6_t   I;
    longint m, c[3], cc;
    longint e;
    m = link_mass_g(k);
    for (int a = 0; a < 3; a++) c[a] = link_com_mm(k, a);
    cc = c[0]*c[0] + c[1]*c[1] + c[2]*c[2];
    for (int col = 0; col < 6; col++)
      for (int row = 0; row < 6; row++) I[col][row] = '0;
    // rotational block (1e-9 units: m[g]*c[mm]*c[mm] = 1e-3*1e-6)
    for (int r = 0; r < 3; r++)
      for (int cl = 0; cl < 3; cl++) begin
        e = -m * c[r] * c[cl];
        if (r == cl) e = e + m * cc + longint'(link_icom(k, r)) * 1000000;
        I[cl][r] = fx_t'((e * (64'sd1 <<< FRAC)) / 1000000000);
      end
    // m [c]x  (upper right, rows 0..2, cols 3..5), 1e-6 units
    //  [c]x = [0 -cz cy; cz 0 -cx; -cy cx 0]
    I[4][0] = fx_micro(-m * c[2]); I[5][0] = fx_micro(m * c[1]);
    I[3][1] = fx_micro(m * c[2]); I[5][1] = fx_micro(-m * c[0]);
    I[3][2] = fx_micro(-m * c[1]); I[4][2] = fx_micro(m * c[0]);
    // m [c]x^T (lower left) = transpose of the block above
    for (int r = 0; r < 3; r++)
      for (int cl = 0; cl < 3; cl++) I[cl][r+3] = I[r+3][cl];
    for (int a = 3; a < 6; a++) I[a][a] = fx_milli(m);
    return I;
  endfunction

  localparam fx_t FX_ONE_C = fx_t'(32'sd65536);   // 1.0

  // gravity expressed as the base acceleration a_0 = -g (g along -z)
  localparam fx_t GRAV = fx_t'(32'sd642908);   // 9.81 * 65536

  // ------------------------------------------------- 3-vector rotations
  // Rz(q) applied to a 3-vector: (c w0 + s w1, -s w0 + c w1, w2)
  function automatic void rz3(input fx_t s, input fx_t c,
                              input fx_t w0, input fx_t w1, input fx_t w2,
                              output fx_t o0, output fx_t o1, output fx_t o2);
    o0 = fx_mul(c, w0) + fx_mul(s, w1);
    o1 = fx_mul(c, w1) - fx_mul(s, w0);
    o2 = w2;
  endfunction
  // Rz(q)^T
  function automatic void rz3t(input fx_t s, input fx_t c,
                               input fx_t w0, input fx_t w1, input fx_t w2,
                               output fx_t o0, output fx_t o1, output fx_t o2);
    o0 = fx_mul(c, w0) - fx_mul(s, w1);
    o1 = fx_mul(s, w0) + fx_mul(c, w1);
    o2 = w2;
  endfunction

  // E = Rz(q) * Rx(tw*90deg);  Rx(+90) w = (w0, w2, -w1), Rx(-90) w = (w0, -w2, w1)
  function automatic void e_mul(input int k, input fx_t s, input fx_t c,
                                input fx_t w0, input fx_t w1, input fx_t w2,
                                output fx_t o0, output fx_t o1, output fx_t o2);
    fx_t t1, t2;
    if (link_twist(k) > 0) begin t1 = w2;  t2 = -w1; end
    else                   begin t1 = -w2; t2 = w1;  end
    rz3(s, c, w0, t1, t2, o0, o1, o2);
  endfunction
  // E^T = Rx^T * Rz^T
  function automatic void et_mul(input int k, input fx_t s, input fx_t c,
                                 input fx_t w0, input fx_t w1, input fx_t w2,
                                 output fx_t o0, output fx_t o1, output fx_t o2);
    fx_t t0, t1, t2;
    rz3t(s, c, w0, w1, w2, t0, t1, t2);
    o0 = t0;
    if (link_twist(k) > 0) begin o1 = -t2; o2 = t1;  end
    else                   begin o1 = t2;  o2 = -t1; end
  endfunction

  // -------------------------------------------------- spatial transforms
  // iX_p m = [E w ; E (v - r x w)],  r = (0,0,d)  =>  r x w = (-d w1, d w0, 0)
  function automatic sv6_t x_mul(int k, fx_t s, fx_t c, sv6_t m);
    sv6_t o;
    fx_t  d, v0, v1;
    d  = fx_milli(link_d_mm(k));
    v0 = m[3] + fx_mul(d, m[1]);
    v1 = m[4] - fx_mul(d, m[0]);
    e_mul(k, s, c, m[0], m[1], m[2], o[0], o[1], o[2]);
    e_mul(k, s, c, v0, v1, m[5], o[3], o[4], o[5]);
    return o;
  endfunction

  // pX_i^* f = X^T f = [E^T n + r x (E^T f) ; E^T f]
  function automatic sv6_t xt_mul(int k, fx_t s, fx_t c, sv6_t f);
    sv6_t o;
    fx_t  d, n0, n1, n2, g0, g1, g2;
    d = fx_milli(link_d_mm(k));
    et_mul(k, s, c, f[0], f[1], f[2], n0, n1, n2);
    et_mul(k, s, c, f[3], f[4], f[5], g0, g1, g2);
    o[0] = n0 - fx_mul(d, g1);
    o[1] = n1 + fx_mul(d, g0);
    o[2] = n2;
    o[3] = g0; o[4] = g1; o[5] = g2;
    return o;
  endfunction

  // ------------------------------------------------------- cross products
  function automatic void cross3(input fx_t a0, input fx_t a1, input fx_t a2,
                                 input fx_t b0, input fx_t b1, input fx_t b2,
                                 output fx_t o0, output fx_t o1, output fx_t o2);
    o0 = fx_mul(a1, b2) - fx_mul(a2, b1);
    o1 = fx_mul(a2, b0) - fx_mul(a0, b2);
    o2 = fx_mul(a0, b1) - fx_mul(a1, b0);
  endfunction

  // motion cross product v x m = [w x mw ; w x mv + vl x mw]
  function automatic sv6_t crm(sv6_t v, sv6_t m);
    sv6_t o;
    fx_t  a0, a1, a2, b0, b1, b2;
    cross3(v[0], v[1], v[2], m[0], m[1], m[2], o[0], o[1], o[2]);
    cross3(v[0], v[1], v[2], m[3], m[4], m[5], a0, a1, a2);
    cross3(v[3], v[4], v[5], m[0], m[1], m[2], b0, b1, b2);
    o[3] = a0 + b0; o[4] = a1 + b1; o[5] = a2 + b2;
    return o;
  endfunction

  // force cross product v x* f = [w x n + vl x fl ; w x fl]
  function automatic sv6_t crf(sv6_t v, sv6_t f);
    sv6_t o;
    fx_t  a0, a1, a2, b0, b1, b2;
    cross3(v[0], v[1], v[2], f[0], f[1], f[2], a0, a1, a2);
    cross3(v[3], v[4], v[5], f[3], f[4], f[5], b0, b1, b2);
    cross3(v[0], v[1], v[2], f[3], f[4], f[5], o[3], o[4], o[5]);
    o[0] = a0 + b0; o[1] = a1 + b1; o[2] = a2 + b2;
    return o;
  endfunction

  // v x (S qd) with S = e_2 (angular z): crm(v) e_2 * qd
  //   = [(w1, -w0, 0) ; (v4, -v3, 0)] * qd
  function automatic sv6_t crm_s(sv6_t v, fx_t qd);
    sv6_t o;
    o[0] = fx_mul(v[1], qd);  o[1] = -fx_mul(v[0], qd); o[2] = '0;
    o[3] = fx_mul(v[4], qd);  o[4] = -fx_mul(v[3], qd); o[5] = '0;
    return o;
  endfunction

  // -S x y  (derivative of X y with respect to q): [(y1, -y0, 0) ; (y4, -y3, 0)]
  function automatic sv6_t neg_s_cross(sv6_t y);
    sv6_t o;
    o[0] = y[1];  o[1] = -y[0]; o[2] = '0;
    o[3] = y[4];  o[4] = -y[3]; o[5] = '0;
    return o;
  endfunction

  // S x* f with S = e_2: [(-n1, n0, 0) ; (-f4, f3, 0)]
  function automatic sv6_t s_crf(sv6_t f);
    sv6_t o;
    o[0] = -f[1]; o[1] = f[0]; o[2] = '0;
    o[3] = -f[4]; o[4] = f[3]; o[5] = '0;
    return o;
  endfunction

  // inertia of link k times a motion vector (constant sparse matrix)
  function automatic sv6_t i_mul(int k, sv6_t v);
    sm6_t I;
    sv6_t o;
    I = link_inertia(k);
    for (int r = 0; r < 6; r++) begin
      o[r] = '0;
      for (int cl = 0; cl < 6; cl++)
        if (I[cl][r] != 0) o[r] = o[r] + fx_mul(I[cl][r], v[cl]);
    end
    return o;
  endfunction

  // generic 6x6 matrix ([col][row]) times vector
  function automatic sv6_t m6_mul(sm6_t A, sv6_t x);
    sv6_t o;
    for (int r = 0; r < 6; r++) begin
      o[r] = '0;
      for (int cl = 0; cl < 6; cl++) o[r] = o[r] + fx_mul(A[cl][r], x[cl]);
    end
    return o;
  endfunction

  // congruence transform X^T A X of a symmetric 6x6 matrix for link k
  // (moves an articulated inertia from the link frame to the parent frame)
  function automatic sm6_t xt_a_x(int k, fx_t s, fx_t c, sm6_t A);
    sm6_t o;
    sv6_t e;
    for (int cl = 0; cl < 6; cl++) begin
      e = '0;
      e[cl] = FX_ONE_C;
      o[cl] = xt_mul(k, s, c, m6_mul(A, x_mul(k, s, c, e)));
    end
    return o;
  endfunction

  function automatic fx_t dot6(sv6_t a, sv6_t b);
    fx_t o;
    o = '0;
    for (int r = 0; r < 6; r++) o = o + fx_mul(a[r], b[r]);
    return o;
  endfunction

  function automatic sv6_t sv_scale(sv6_t a, fx_t k);
    sv6_t o;
    for (int r = 0; r < 6; r++) o[r] = fx_mul(a[r], k);
    return o;
  endfunction

  function automatic sv6_t sv_add(sv6_t a, sv6_t b);
    sv6_t o;
    for (int r = 0; r < 6; r++) o[r] = a[r] + b[r];
    return o;
  endfunction
  function automatic sv6_t sv_sub(sv6_t a, sv6_t b);
    sv6_t o;
    for (int r = 0; r < 6; r++) o[r] = a[r] - b[r];
    return o;
  endfunction

  // ------------------------------------------------ RNEA pipeline records
  // input_i of a forward submodule R_f (Fig. 9: q, sin q, cos q, qd, qdd, fext)
  typedef struct packed {
    logic dmode;                 // task also needs the derivative pass
    fx_t  q, s, c, qd, qdd;
    sv6_t fext;
  } rnea_in_t;
  // forward transfer ftr_i = {v_i, a_i}
  typedef struct packed { sv6_t v, a; } rnea_ftr_t;
  // downward transfer dtr_i = {q, sin q, cos q, f_i, [v_i, a_i]}
  typedef struct packed {
    logic dmode;
    fx_t  q, s, c, qd;
    sv6_t v, a, f;
  } rnea_dtr_t;
  // output_i = tau_i, [v_i, a_i, f_i]  (f_i including all descendants)
  typedef struct packed {
    logic dmode;
    fx_t  q, s, c, qd, tau;
    sv6_t v, a, f;
  } rnea_out_t;

  // --------------------------------------------- accelerator-level records
  // Number of links of the configured robot. The accelerator is configured
  // once per robot model; the task records below are sized by it.
  parameter int NB_ROBOT = 7;
  localparam int NR = NB_ROBOT;

  typedef fx_t  [NR-1:0]           vecn_t;     // one word per joint
  typedef vecn_t [NR-1:0]          matn_t;     // [row][col]
  typedef fx_t  [2*NR-1:0]         drow_t;     // one row of d/d[q; qd]
  typedef drow_t [NR-1:0]          dmat_t;     // [row][col]

  // a decoded task: u is qdd (ID, Delta-ID, Delta-iFD) or tau (FD, Delta-FD)
  typedef struct packed {
    func_e fn;
    vecn_t q, qd, u;
    sv6_t [NR-1:0] fext;
    matn_t minv;                                // given M^-1 (Delta-iFD only)
  } task_t;

  // a task with its trigonometric values, as issued by the input stream
  typedef struct packed {
    task_t tk;
    vecn_t s, c;
  } ttask_t;

  // what the schedule module needs to know about an issued job
  typedef struct packed {
    ttask_t tt;
    logic   stage;                              // Delta-FD: 0 = FD part, 1 = derivative part
    logic   needs_fb, needs_bf;
    inst_e  inst_fb, inst_bf;
  } desc_t;

  // one result, as handed to the encode module
  typedef struct packed {
    func_e fn;
    vecn_t vec;                                 // tau (ID) or qdd (FD)
    matn_t mat;                                 // M or M^-1 (full, symmetric)
    dmat_t dmat;                                // d tau/du (Delta-ID) or d qdd/du
  } result_t;

  // number of 32-bit words of a task in the input stream (after the type word)
  function automatic int task_words(func_e fn);
    return 3 * NR + 6 * NR + ((fn == F_DIFD) ? NR * NR : 0);
  endfunction
  // number of 32-bit words of a result in the output stream
  function automatic int result_words(func_e fn);
    case (fn)
      F_ID, F_FD:       return NR;
      F_M, F_MINV:      return NR * NR;
      F_DID, F_DIFD:    return 2 * NR * NR;
      default:          return 2 * NR * NR + NR * NR;   // Delta-FD also returns M^-1
    endcase
  endfunction

endpackage
