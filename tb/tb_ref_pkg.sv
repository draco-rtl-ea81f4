// tb_ref_pkg: real-valued reference models for the DRACO testbenches.
//
// Conversions between real numbers and the fixed-point format, a random robot
// model generator, and floating-point implementations of the spatial algebra,
// the RNEA and the original (dividing) Minv algorithm. The references use the
// same joint and frame conventions as the RTL (revolute joints about local z,
// X = [E 0; -E skew(r) E], E = rz(q) E_T) but are written independently in
// real arithmetic, so they check the hardware's quantised results.
package tb_ref_pkg;
  import draco_pkg::*;

  typedef real rv3[3];
  typedef real rm3[3][3];
  typedef real rv6[6];
  typedef real rm6[6][6];

  function automatic fx_t to_fx(real x);
    real y;
    y = x * real'(1 << F);
    return fx_t'($rtoi(y >= 0.0 ? y + 0.5 : y - 0.5));
  endfunction

  function automatic real to_r(fx_t x);
    return real'($signed(x)) / real'(1 << F);
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom % 100000) / 100000.0);
  endfunction

  function automatic real rabs(real x);
    return x < 0.0 ? -x : x;
  endfunction

  // ---- real spatial algebra ----
  function automatic rv3 rcross(rv3 a, rv3 b);
    rv3 o;
    o[0] = a[1]*b[2] - a[2]*b[1];
    o[1] = a[2]*b[0] - a[0]*b[2];
    o[2] = a[0]*b[1] - a[1]*b[0];
    return o;
  endfunction

  function automatic rm3 rz_et(real s, real c, rm3 et);
    rm3 e;
    for (int j = 0; j < 3; j++) begin
      e[0][j] = c*et[0][j] + s*et[1][j];
      e[1][j] = c*et[1][j] - s*et[0][j];
      e[2][j] = et[2][j];
    end
    return e;
  endfunction

  function automatic rm6 rxmat(rm3 e, rv3 r);
    rm6 x;
    rm3 rx;
    rx = '{'{0.0, -r[2], r[1]}, '{r[2], 0.0, -r[0]}, '{-r[1], r[0], 0.0}};
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) x[i][j] = 0.0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        x[i][j] = e[i][j];
        x[i+3][j+3] = e[i][j];
        x[i+3][j] = -(e[i][0]*rx[0][j] + e[i][1]*rx[1][j] + e[i][2]*rx[2][j]);
      end
    return x;
  endfunction

  function automatic rv6 rmv(rm6 m, rv6 v);
    rv6 o;
    for (int i = 0; i < 6; i++) begin
      o[i] = 0.0;
      for (int k = 0; k < 6; k++) o[i] += m[i][k] * v[k];
    end
    return o;
  endfunction

  function automatic rv6 rmtv(rm6 m, rv6 v);
    rv6 o;
    for (int i = 0; i < 6; i++) begin
      o[i] = 0.0;
      for (int k = 0; k < 6; k++) o[i] += m[k][i] * v[k];
    end
    return o;
  endfunction

  function automatic rm6 rmm(rm6 a, rm6 b);
    rm6 o;
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) begin
        o[i][j] = 0.0;
        for (int k = 0; k < 6; k++) o[i][j] += a[i][k] * b[k][j];
      end
    return o;
  endfunction

  function automatic rm6 rmt(rm6 a);
    rm6 o;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) o[i][j] = a[j][i];
    return o;
  endfunction

  function automatic rv6 rcrm(rv6 v, rv6 m);
    rv6 o;
    rv3 w, vl, mw, mv, a, b, c;
    w = '{v[0], v[1], v[2]}; vl = '{v[3], v[4], v[5]};
    mw = '{m[0], m[1], m[2]}; mv = '{m[3], m[4], m[5]};
    a = rcross(w, mw); b = rcross(w, mv); c = rcross(vl, mw);
    o = '{a[0], a[1], a[2], b[0]+c[0], b[1]+c[1], b[2]+c[2]};
    return o;
  endfunction

  function automatic rv6 rcrf(rv6 v, rv6 f);
    rv6 o;
    rv3 w, vl, n, fl, a, b, c;
    w = '{v[0], v[1], v[2]}; vl = '{v[3], v[4], v[5]};
    n = '{f[0], f[1], f[2]}; fl = '{f[3], f[4], f[5]};
    a = rcross(w, n); c = rcross(vl, fl); b = rcross(w, fl);
    o = '{a[0]+c[0], a[1]+c[1], a[2]+c[2], b[0], b[1], b[2]};
    return o;
  endfunction

  // ---- conversions of composite values ----
  function automatic rm3 m3_r(m3_t m);
    rm3 o;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) o[i][j] = to_r(m[i][j]);
    return o;
  endfunction

  function automatic rv3 v3_r(v3_t v);
    rv3 o;
    for (int i = 0; i < 3; i++) o[i] = to_r(v[i]);
    return o;
  endfunction

  function automatic rv6 v6_r(v6_t v);
    rv6 o;
    for (int i = 0; i < 6; i++) o[i] = to_r(v[i]);
    return o;
  endfunction

  function automatic rm6 m6_r(m6_t m);
    rm6 o;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) o[i][j] = to_r(m[i][j]);
    return o;
  endfunction

  function automatic v6_t r_v6(rv6 v);
    v6_t o;
    for (int i = 0; i < 6; i++) o[i] = to_fx(v[i]);
    return o;
  endfunction

  function automatic m6_t r_m6(rm6 m);
    m6_t o;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) o[i][j] = to_fx(m[i][j]);
    return o;
  endfunction

  // ---- robot model generation ----
  // kind 0: general arm (tree rotations of 0 / +-90 deg about x, random
  //         offsets); kind 1: coaxial chain (all joint axes on one line),
  //         whose joint-space inertias D_i equal each link's own inertia
  //         about the axis, chosen near 1.
  function automatic link_t rand_link(int kind);
    link_t lk;
    rm3 et;
    rv3 rt, cm;
    real m, ixx, iyy, izz, ca, sa;
    int rot;
    rm6 im;
    rot = (kind == 0) ? int'($urandom % 3) : 0;
    ca = 1.0; sa = 0.0;
    if (rot == 1) begin ca = 0.0; sa = 1.0; end
    if (rot == 2) begin ca = 0.0; sa = -1.0; end
    et = '{'{1.0, 0.0, 0.0}, '{0.0, ca, sa}, '{0.0, -sa, ca}};
    if (kind == 0) begin
      rt = '{urand(-0.2, 0.2), urand(-0.2, 0.2), urand(0.05, 0.3)};
      m = urand(0.5, 1.5);
      cm = '{urand(-0.1, 0.1), urand(-0.1, 0.1), urand(0.0, 0.2)};
      ixx = urand(0.05, 0.3); iyy = urand(0.05, 0.3); izz = urand(0.3, 0.8);
    end else begin
      rt = '{0.0, 0.0, urand(0.1, 0.3)};
      m = urand(0.5, 1.5);
      cm = '{urand(-0.1, 0.1), urand(-0.1, 0.1), urand(0.0, 0.2)};
      ixx = urand(0.05, 0.3); iyy = urand(0.05, 0.3);
      izz = urand(0.95, 1.05) - m * (cm[0]*cm[0] + cm[1]*cm[1]);
    end
    // spatial inertia about the link origin: [Ic + m cx cx^T, m cx; m cx^T, m 1]
    begin
      rm3 cx, ic;
      cx = '{'{0.0, -cm[2], cm[1]}, '{cm[2], 0.0, -cm[0]}, '{-cm[1], cm[0], 0.0}};
      ic = '{'{ixx, 0.0, 0.0}, '{0.0, iyy, 0.0}, '{0.0, 0.0, izz}};
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++) begin
          real s;
          s = 0.0;
          for (int k = 0; k < 3; k++) s += cx[i][k] * cx[j][k];
          im[i][j] = ic[i][j] + m * s;
          im[i][j+3] = m * cx[i][j];
          im[i+3][j] = m * cx[j][i];
          im[i+3][j+3] = (i == j) ? m : 0.0;
        end
    end
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) lk.E_T[i][j] = to_fx(et[i][j]);
      lk.r_T[i] = to_fx(rt[i]);
    end
    lk.I = r_m6(im);
    return lk;
  endfunction

  function automatic joint_in_t rand_joint(real vmax, real amax, real fmax);
    joint_in_t j;
    real q;
    q = urand(-3.1, 3.1);
    j.s = to_fx($sin(q));
    j.c = to_fx($cos(q));
    j.qd = to_fx(urand(-vmax, vmax));
    j.qdd = to_fx(urand(-amax, amax));
    for (int k = 0; k < 6; k++) j.fext[k] = to_fx(urand(-fmax, fmax));
    return j;
  endfunction

  function automatic rm6 link_x(link_t lk, joint_in_t j);
    return rxmat(rz_et(to_r(j.s), to_r(j.c), m3_r(lk.E_T)), v3_r(lk.r_T));
  endfunction

  // ---- reference RNEA: tau for a serial chain ----
  function automatic void ref_rnea(int n, link_t lk[], joint_in_t jin[], rv6 a_base,
                                   ref real tau[]);
    rv6 v[], a[], f[];
    rm6 x[];
    v = new[n]; a = new[n]; f = new[n]; x = new[n];
    for (int i = 0; i < n; i++) begin
      rv6 vp, ap, sqd, iv, ia, c;
      rm6 im;
      x[i] = link_x(lk[i], jin[i]);
      vp = (i == 0) ? '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0} : v[i-1];
      ap = (i == 0) ? a_base : a[i-1];
      v[i] = rmv(x[i], vp);
      v[i][2] += to_r(jin[i].qd);
      a[i] = rmv(x[i], ap);
      a[i][2] += to_r(jin[i].qdd);
      sqd = '{0.0, 0.0, to_r(jin[i].qd), 0.0, 0.0, 0.0};
      c = rcrm(v[i], sqd);
      for (int k = 0; k < 6; k++) a[i][k] += c[k];
      im = m6_r(lk[i].I);
      ia = rmv(im, a[i]);
      iv = rmv(im, v[i]);
      c = rcrf(v[i], iv);
      for (int k = 0; k < 6; k++) f[i][k] = ia[k] + c[k] - to_r(jin[i].fext[k]);
    end
    tau = new[n];
    for (int i = n - 1; i >= 0; i--) begin
      tau[i] = f[i][2];
      if (i > 0) begin
        rv6 fp;
        fp = rmtv(x[i], f[i]);
        for (int k = 0; k < 6; k++) f[i-1][k] += fp[k];
      end
    end
  endfunction

  // ---- reference Minv: original algorithm with inline division ----
  function automatic void ref_minv(int n, link_t lk[], joint_in_t jin[], ref real mi[][]);
    rm6 ia[], x[];
    rv6 fm[][], p[][], u[];
    real d[];
    ia = new[n]; x = new[n]; u = new[n]; d = new[n];
    fm = new[n]; p = new[n];
    mi = new[n];
    for (int i = 0; i < n; i++) begin
      mi[i] = new[n];
      fm[i] = new[n];
      p[i] = new[n];
      for (int j = 0; j < n; j++) begin
        mi[i][j] = 0.0;
        fm[i][j] = '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
        p[i][j] = '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
      end
      ia[i] = m6_r(lk[i].I);
      x[i] = link_x(lk[i], jin[i]);
    end
    for (int i = n - 1; i >= 0; i--) begin
      for (int k = 0; k < 6; k++) u[i][k] = ia[i][k][2];
      d[i] = u[i][2];
      mi[i][i] = 1.0 / d[i];
      for (int j = i + 1; j < n; j++) mi[i][j] = -fm[i][j][2] / d[i];
      if (i > 0) begin
        rm6 iad, t;
        for (int j = i; j < n; j++) begin
          rv6 fp;
          for (int k = 0; k < 6; k++) fm[i][j][k] += u[i][k] * mi[i][j];
          fp = rmtv(x[i], fm[i][j]);
          for (int k = 0; k < 6; k++) fm[i-1][j][k] += fp[k];
        end
        for (int r = 0; r < 6; r++)
          for (int k = 0; k < 6; k++) iad[r][k] = ia[i][r][k] - u[i][r] * u[i][k] / d[i];
        t = rmm(rmt(x[i]), rmm(iad, x[i]));
        for (int r = 0; r < 6; r++) for (int k = 0; k < 6; k++) ia[i-1][r][k] += t[r][k];
      end
    end
    for (int i = 0; i < n; i++) begin
      for (int j = i; j < n; j++) begin
        rv6 xp;
        xp = '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
        if (i > 0) begin
          real s;
          xp = rmv(x[i], p[i-1][j]);
          s = 0.0;
          for (int k = 0; k < 6; k++) s += u[i][k] * xp[k];
          mi[i][j] -= s / d[i];
        end
        p[i][j] = xp;
        p[i][j][2] += mi[i][j];
      end
    end
    for (int i = 0; i < n; i++) for (int j = 0; j < i; j++) mi[i][j] = mi[j][i];
  endfunction
endpackage
