// rnea_module: inverse dynamics tau = ID(q, qd, qdd, fext) as a round trip
// pipeline (RTP).
//
// N forward units Rf (base to end effector) and N backward units Rb (end
// effector to base) form one pipeline stage per joint and pass. Between the
// forward and the backward unit of joint i a FIFO holds f_i and X_i until the
// backward wave of the same task arrives 2(N-1-i) cycles later, so tasks
// stream through without any memory traffic. The forward unit of joint N feeds
// the backward unit of joint N directly.
//
// The joint inputs of a task travel along the forward units with the task, so
// each unit sees its joint's data when the task reaches it. With qdd = 0 the
// same pipeline gives the bias force C used by forward dynamics.
//
// Interface: in_valid with the task's joint inputs jin and the base
// acceleration a_base (-gravity); per-joint link constants lk. Output: tau of
// every joint with out_valid. Timing: latency 2N cycles, a task may enter
// every cycle; the issue interval comes from the DSP allocation controller.
// The FIFO depth (2N) is this implementation's choice: it covers the worst
// case of one task per cycle.
module rnea_module
  import draco_pkg::*;
#(
  parameter int unsigned N = 7,
  parameter int unsigned FIFO_DEPTH = 2 * N
) (
  input  logic              clk,
  input  logic              rst_n,
  input  link_t [N-1:0]     lk,
  input  logic              in_valid,
  input  joint_in_t [N-1:0] jin,
  input  v6_t               a_base,
  output logic              out_valid,
  output fx_t [N-1:0]       tau
);
  typedef struct packed {
    v6_t    f;
    xform_t x;
  } dtr_t;

  logic              rf_valid [N];
  v6_t               rf_v [N], rf_a [N], rf_f [N];
  xform_t            rf_x [N];
  joint_in_t [N-1:0] tsk [N];

  logic              rb_valid [N];
  v6_t               rb_fpar [N];
  fx_t [N-1:0]       rb_tau [N];

  for (genvar i = 0; i < N; i++) begin : g_joint
    logic      f_in_valid;
    joint_in_t f_jin;
    v6_t       f_vpar, f_apar;
    joint_in_t [N-1:0] f_tsk;

    if (i == 0) begin : g_first
      assign f_in_valid = in_valid;
      assign f_tsk      = jin;
      assign f_vpar     = '0;
      assign f_apar     = a_base;
    end else begin : g_next
      assign f_in_valid = rf_valid[i-1];
      assign f_tsk      = tsk[i-1];
      assign f_vpar     = rf_v[i-1];
      assign f_apar     = rf_a[i-1];
    end
    assign f_jin = f_tsk[i];

    always_ff @(posedge clk) begin
      if (f_in_valid) tsk[i] <= f_tsk;
    end

    rnea_fwd_unit u_rf (
      .clk, .rst_n,
      .in_valid (f_in_valid),
      .lk       (lk[i]),
      .s        (f_jin.s),
      .c        (f_jin.c),
      .qd       (f_jin.qd),
      .qdd      (f_jin.qdd),
      .fext     (f_jin.fext),
      .v_par    (f_vpar),
      .a_par    (f_apar),
      .out_valid(rf_valid[i]),
      .v        (rf_v[i]),
      .a        (rf_a[i]),
      .f        (rf_f[i]),
      .x        (rf_x[i])
    );

    logic        b_in_valid;
    v6_t         b_fown, b_fchild;
    xform_t      b_xown;
    fx_t [N-1:0] b_tau;

    if (i == N - 1) begin : g_last
      assign b_in_valid = rf_valid[i];
      assign b_fown     = rf_f[i];
      assign b_xown     = rf_x[i];
      assign b_fchild   = '0;
      assign b_tau      = '0;
    end else begin : g_mid
      dtr_t dout;
      logic empty, full;
      logic [$clog2(FIFO_DEPTH+1)-1:0] cnt;
      sync_fifo #(.T(dtr_t), .DEPTH(FIFO_DEPTH)) u_fifo (
        .clk, .rst_n,
        .push (rf_valid[i]),
        .din  ('{f: rf_f[i], x: rf_x[i]}),
        .pop  (rb_valid[i+1]),
        .dout (dout),
        .empty(empty),
        .full (full),
        .count(cnt)
      );
      assign b_in_valid = rb_valid[i+1];
      assign b_fown     = dout.f;
      assign b_xown     = dout.x;
      assign b_fchild   = rb_fpar[i+1];
      assign b_tau      = rb_tau[i+1];
    end

    rnea_bwd_unit #(.N(N), .J(i)) u_rb (
      .clk, .rst_n,
      .in_valid (b_in_valid),
      .f_own    (b_fown),
      .x_own    (b_xown),
      .f_child  (b_fchild),
      .tau_in   (b_tau),
      .out_valid(rb_valid[i]),
      .f_par    (rb_fpar[i]),
      .tau_out  (rb_tau[i])
    );
  end

  assign out_valid = rb_valid[0];
  assign tau       = rb_tau[0];
endmodule
