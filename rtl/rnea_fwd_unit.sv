// rnea_fwd_unit (Rf): forward-pass stage of the Recursive Newton-Euler
// Algorithm for one joint.
//
// One unit exists per joint in the round trip pipeline; task data flows from
// the base (joint 1) towards the end effector. For joint i it computes, as in
// the RNEA forward pass:
//   X_i = rz(q_i) * X_T,i                      (from sin q_i, cos q_i)
//   v_i = X_i v_parent + S qd_i
//   a_i = X_i a_parent + S qdd_i + v_i x (S qd_i)
//   f_i = I_i a_i + v_i x* (I_i v_i) - fext_i
// v_i, a_i go to the next forward unit (forward transfer); f_i and X_i go to
// the FIFO of this joint for the backward unit (downward transfer). Gravity
// enters as the base acceleration a_0 = -g supplied to joint 1.
//
// Interface: in_valid qualifies the joint inputs, the parent's v/a and the
// link constants lk. Timing: one cycle, outputs registered, out_valid follows
// in_valid by one cycle. A new task can enter every cycle; the rate the
// pipeline actually runs at (its II) is set by the issue logic.
// The fully parallel datapath (all products in one cycle) is this
// implementation's choice; the paper does not give the unit's MAC schedule.
module rnea_fwd_unit
  import draco_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  link_t  lk,
  input  fx_t    s,
  input  fx_t    c,
  input  fx_t    qd,
  input  fx_t    qdd,
  input  v6_t    fext,
  input  v6_t    v_par,
  input  v6_t    a_par,
  output logic   out_valid,
  output v6_t    v,
  output v6_t    a,
  output v6_t    f,
  output xform_t x
);
  xform_t x_c;
  v6_t v_c, a_c, f_c, sqd, iv, ia, vxiv;

  always_comb begin
    x_c = joint_xform(lk, s, c);
    sqd = '0;
    sqd[2] = qd;
    v_c = xm(x_c, v_par);
    v_c[2] = v_c[2] + qd;
    a_c = xm(x_c, a_par);
    a_c[2] = a_c[2] + qdd;
    begin
      v6_t t;
      t = crm(v_c, sqd);
      for (int k = 0; k < 6; k++) a_c[k] = a_c[k] + t[k];
    end
    ia = m6v(lk.I, a_c);
    iv = m6v(lk.I, v_c);
    vxiv = crf(v_c, iv);
    for (int k = 0; k < 6; k++) f_c[k] = ia[k] + vxiv[k] - fext[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      v <= v_c;
      a <= a_c;
      f <= f_c;
      x <= x_c;
    end
  end
endmodule
