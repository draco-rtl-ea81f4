// draco_pkg: shared number format, spatial-algebra types and arithmetic.
//
// Every RBD variable in the accelerator uses one uniform signed fixed-point
// format, fx_t: W bits with F fractional bits. The default 24-bit format with
// 12 integer and 12 fractional bits is the one chosen for the 7-joint iiwa arm
// and for Atlas on DSP58 devices; the 18-bit (10.8) HyQ build is obtained by
// setting W = 18 and F = 8 here.
//
// A multiplication rounds to nearest (add half an LSB, then shift), so a single
// quantised product is within 2^-(F+1) of the exact value, and saturates to the
// fx_t range. Additions wrap (two's complement), which is what a DSP
// accumulator does; the format is chosen so that the values stay in range.
//
// Spatial vectors are 6-vectors [angular; linear] (Featherstone ordering).
// Every joint is a single-DOF revolute joint about its local z axis, so the
// motion subspace S_i is the one-hot vector e_2: S^T x selects element 2 and
// S*s adds s to element 2. A joint transform iX_lambda is kept as a rotation E
// and a translation r: X = [E 0; -E*skew(r) E], with E = rz(q) * E_T and r = r_T,
// where E_T and r_T are the joint's constant tree transform.
package draco_pkg;

  localparam int W = 24;  // word width of every RBD variable
  localparam int F = 12;  // fractional bits

  typedef logic signed [W-1:0] fx_t;
  typedef fx_t [2:0] v3_t;   // 3-vector, element [k]
  typedef v3_t [2:0] m3_t;   // 3x3 matrix, [row][col]
  typedef fx_t [5:0] v6_t;   // spatial vector [w; v]
  typedef v6_t [5:0] m6_t;   // 6x6 matrix, [row][col]

  // Joint transform iX_lambda as rotation and translation.
  typedef struct packed {
    m3_t E;
    v3_t r;
  } xform_t;

  // Constant model data of one link/joint (from the robot description).
  typedef struct packed {
    m3_t E_T;  // tree-transform rotation
    v3_t r_T;  // tree-transform translation (parent frame)
    m6_t I;    // spatial inertia of the link in its own frame
  } link_t;

  // Per-joint state inputs of one task.
  typedef struct packed {
    fx_t s;     // sin q_i
    fx_t c;     // cos q_i
    fx_t qd;    // joint velocity
    fx_t qdd;   // joint acceleration (zero when computing the bias force C)
    v6_t fext;  // external force on the link, link frame
  } joint_in_t;

  // RBD functions the accelerator computes (Fig. 3(a) of the DRACO design).
  typedef enum logic [2:0] {
    FN_ID   = 3'd0,  // tau = ID(q, qd, qdd, fext)
    FN_MINV = 3'd1,  // M^-1 = Minv(q)
    FN_FD   = 3'd2,  // qdd = M^-1 (tau - C)
    FN_DID  = 3'd3,  // d tau / du (needs the derivative module)
    FN_DFD  = 3'd4   // d qdd / du = M^-1 d tau / du
  } fn_e;

  localparam fx_t FX_ONE = fx_t'(1 <<< F);
  localparam fx_t FX_MAX = {1'b0, {(W-1){1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(W-1){1'b0}}};

  // Rounded, saturated fixed-point product (one DSP multiply).
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*W-1:0] p;
    p = a * b;
    p = p + (2*W)'(1 <<< (F-1));
    p = p >>> F;
    if (p > (2*W)'(FX_MAX)) return FX_MAX;
    if (p < (2*W)'(FX_MIN)) return FX_MIN;
    return p[W-1:0];
  endfunction

  function automatic v3_t cross3(v3_t a, v3_t b);
    v3_t o;
    o[0] = fx_mul(a[1], b[2]) - fx_mul(a[2], b[1]);
    o[1] = fx_mul(a[2], b[0]) - fx_mul(a[0], b[2]);
    o[2] = fx_mul(a[0], b[1]) - fx_mul(a[1], b[0]);
    return o;
  endfunction

  function automatic v3_t m3v(m3_t m, v3_t x);
    v3_t o;
    for (int i = 0; i < 3; i++)
      o[i] = fx_mul(m[i][0], x[0]) + fx_mul(m[i][1], x[1]) + fx_mul(m[i][2], x[2]);
    return o;
  endfunction

  function automatic v3_t m3tv(m3_t m, v3_t x);
    v3_t o;
    for (int i = 0; i < 3; i++)
      o[i] = fx_mul(m[0][i], x[0]) + fx_mul(m[1][i], x[1]) + fx_mul(m[2][i], x[2]);
    return o;
  endfunction

  function automatic v3_t top3(v6_t x);
    return {x[2], x[1], x[0]};
  endfunction

  function automatic v3_t bot3(v6_t x);
    return {x[5], x[4], x[3]};
  endfunction

  function automatic v6_t cat6(v3_t a, v3_t l);
    return {l[2], l[1], l[0], a[2], a[1], a[0]};
  endfunction

  // iX_lambda from the joint's sin/cos and its constant tree transform.
  function automatic xform_t joint_xform(link_t lk, fx_t s, fx_t c);
    xform_t x;
    for (int j = 0; j < 3; j++) begin
      x.E[0][j] = fx_mul(c, lk.E_T[0][j]) + fx_mul(s, lk.E_T[1][j]);
      x.E[1][j] = fx_mul(c, lk.E_T[1][j]) - fx_mul(s, lk.E_T[0][j]);
      x.E[2][j] = lk.E_T[2][j];
    end
    x.r = lk.r_T;
    return x;
  endfunction

  // X * m for a motion vector.
  function automatic v6_t xm(xform_t x, v6_t m);
    v3_t w, v, t;
    w = top3(m);
    v = bot3(m);
    t = cross3(x.r, w);
    for (int k = 0; k < 3; k++) t[k] = v[k] - t[k];
    return cat6(m3v(x.E, w), m3v(x.E, t));
  endfunction

  // X^T * f for a force vector (child frame to parent frame).
  function automatic v6_t xft(xform_t x, v6_t f);
    v3_t n, fl, t;
    fl = m3tv(x.E, bot3(f));
    n = m3tv(x.E, top3(f));
    t = cross3(x.r, fl);
    for (int k = 0; k < 3; k++) n[k] = n[k] + t[k];
    return cat6(n, fl);
  endfunction

  // v x m (motion cross product).
  function automatic v6_t crm(v6_t v, v6_t m);
    v3_t a, b, c;
    a = cross3(top3(v), top3(m));
    b = cross3(top3(v), bot3(m));
    c = cross3(bot3(v), top3(m));
    for (int k = 0; k < 3; k++) b[k] = b[k] + c[k];
    return cat6(a, b);
  endfunction

  // v x* f (force cross product).
  function automatic v6_t crf(v6_t v, v6_t f);
    v3_t a, b, c;
    a = cross3(top3(v), top3(f));
    c = cross3(bot3(v), bot3(f));
    b = cross3(top3(v), bot3(f));
    for (int k = 0; k < 3; k++) a[k] = a[k] + c[k];
    return cat6(a, b);
  endfunction

  function automatic v6_t m6v(m6_t m, v6_t x);
    v6_t o;
    for (int i = 0; i < 6; i++) begin
      o[i] = '0;
      for (int k = 0; k < 6; k++) o[i] = o[i] + fx_mul(m[i][k], x[k]);
    end
    return o;
  endfunction

  function automatic m6_t m6mul(m6_t a, m6_t b);
    m6_t o;
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) begin
        o[i][j] = '0;
        for (int k = 0; k < 6; k++) o[i][j] = o[i][j] + fx_mul(a[i][k], b[k][j]);
      end
    return o;
  endfunction

  function automatic m6_t m6t(m6_t a);
    m6_t o;
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) o[i][j] = a[j][i];
    return o;
  endfunction

  // Full 6x6 motion transform [E 0; -E*skew(r) E].
  function automatic m6_t xmat(xform_t x);
    m6_t o;
    m3_t rx;
    rx[0][0] = '0;     rx[0][1] = -x.r[2]; rx[0][2] = x.r[1];
    rx[1][0] = x.r[2]; rx[1][1] = '0;      rx[1][2] = -x.r[0];
    rx[2][0] = -x.r[1]; rx[2][1] = x.r[0]; rx[2][2] = '0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        o[i][j]     = x.E[i][j];
        o[i][j+3]   = '0;
        o[i+3][j+3] = x.E[i][j];
        o[i+3][j]   = -(fx_mul(x.E[i][0], rx[0][j]) + fx_mul(x.E[i][1], rx[1][j])
                        + fx_mul(x.E[i][2], rx[2][j]));
      end
    return o;
  endfunction

endpackage
