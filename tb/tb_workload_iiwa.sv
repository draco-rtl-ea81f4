// tb_workload_iiwa: inverse dynamics of a 7-joint KUKA iiwa-like arm on the
// accelerator at its default configuration (7 joints, 24-bit 12.12).
//
// The model is an approximation of the LBR iiwa 14: joint offsets of
// 0.1575/0.2025/0.2045/0.2155/0.1845/0.2155/0.081 m, neighbouring joint axes
// at +-90 degrees, link masses 4/4/3/2.7/1.7/1.8/0.3 kg with rough centres
// of mass and inertias. It is close enough to give realistic magnitudes
// (gravity torques of tens of Nm), not an exact robot description.
// 30 ID tasks with gravity, random joint angles, velocities up to 1.5 rad/s
// and accelerations up to 3 rad/s^2 are streamed at the ID rate (II 3);
// every torque is compared with a floating-point RNEA and the latency of
// 2N cycles and the issue interval are checked.
// One Minv task is then run on the same arm and its largest error against
// the floating-point reference is printed, not checked: the holding factors
// of the deferred division exceed the 12.12 range on this arm, a known
// limit of that algorithm at 24 bits.
module tb_workload_iiwa;
  import draco_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 7;
  localparam int NT = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t [N-1:0]       lk;
  fx_t [N-1:0][N-1:0]  comp_offset;
  v6_t                 a_base;
  logic                task_valid, task_ready, dtau_valid, dtau_ready;
  fn_e                 task_fn, cur_fn;
  joint_in_t [N-1:0]   task_jin;
  fx_t [N-1:0]         task_tau, dtau, tau, qdd, dqdd;
  logic                tau_valid, minv_valid, qdd_valid, dqdd_valid;
  fx_t [N-1:0][N-1:0]  minv;
  logic [$clog2(2*N)-1:0] dqdd_col;
  logic                shared_to_rnea, dr_to_drnea, mr_to_minv, drnea_enable;
  logic [3:0]          cur_ii;
  logic                ev_ii_stall, ev_mode_switch, ev_div_wait, ev_fwd_wait;

  draco_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  real e_tau [NT][N];
  int  t_in [NT];
  int  nin = 0, nout = 0, last_in = -1;
  real mi_ref [][];
  bit  minv_done = 0;
  real minv_err = 0.0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic link_t make_link(real sa, rv3 rt, real m, rv3 cm, rv3 id);
    link_t l;
    rm3 cx;
    rm6 im;
    rm3 et;
    et = '{'{1.0, 0.0, 0.0}, '{0.0, 0.0, sa}, '{0.0, -sa, 0.0}};
    if (sa == 0.0) et = '{'{1.0, 0.0, 0.0}, '{0.0, 1.0, 0.0}, '{0.0, 0.0, 1.0}};
    cx = '{'{0.0, -cm[2], cm[1]}, '{cm[2], 0.0, -cm[0]}, '{-cm[1], cm[0], 0.0}};
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < 3; k++) s += cx[i][k] * cx[j][k];
        im[i][j] = ((i == j) ? id[i] : 0.0) + m * s;
        im[i][j+3] = m * cx[i][j];
        im[i+3][j] = m * cx[j][i];
        im[i+3][j+3] = (i == j) ? m : 0.0;
      end
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) l.E_T[i][j] = to_fx(et[i][j]);
      l.r_T[i] = to_fx(rt[i]);
    end
    l.I = r_m6(im);
    return l;
  endfunction

  // issue bookkeeping and result checks
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && task_valid && task_ready && task_fn == FN_ID) begin
      if (last_in >= 0) begin
        checks++;
        if (cyc - last_in != 3) begin failures++; $display("ID issue interval %0d", cyc - last_in); end
      end
      last_in = cyc;
      t_in[nin] = cyc;
      nin++;
    end
    if (rst_n && tau_valid) begin
      checks++;
      if (cyc - t_in[nout] != 2 * N) begin failures++; $display("latency %0d", cyc - t_in[nout]); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (rabs(to_r(tau[i]) - e_tau[nout][i]) > 0.05 + 0.01 * rabs(e_tau[nout][i])) begin
          failures++;
          $display("task %0d tau[%0d] = %f, expected %f", nout, i, to_r(tau[i]), e_tau[nout][i]);
        end
      end
      nout++;
    end
    if (rst_n && minv_valid) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (rabs(to_r(minv[i][j]) - mi_ref[i][j]) > minv_err) minv_err = rabs(to_r(minv[i][j]) - mi_ref[i][j]);
      minv_done = 1;
    end
  end

  initial begin
    link_t lks[];
    joint_in_t js[];
    real t[];
    rv6 ab;
    real maxt;
    lks = new[N];
    js = new[N];
    lks[0] = make_link( 0.0, '{0.0, 0.0, 0.1575},   4.0, '{0.0, -0.03, 0.12},  '{0.10, 0.09, 0.02});
    lks[1] = make_link( 1.0, '{0.0, 0.0, 0.2025},   4.0, '{0.0, 0.059, 0.042}, '{0.05, 0.018, 0.044});
    lks[2] = make_link(-1.0, '{0.0, 0.2045, 0.0},   3.0, '{0.0, 0.03, 0.13},   '{0.08, 0.075, 0.01});
    lks[3] = make_link( 1.0, '{0.0, 0.0, 0.2155},   2.7, '{0.0, 0.067, 0.034}, '{0.03, 0.01, 0.029});
    lks[4] = make_link(-1.0, '{0.0, 0.1845, 0.0},   1.7, '{0.0, 0.021, 0.076}, '{0.02, 0.018, 0.005});
    lks[5] = make_link( 1.0, '{0.0, 0.0, 0.2155},   1.8, '{0.0, 0.0006, 0.0004}, '{0.005, 0.0036, 0.0047});
    lks[6] = make_link(-1.0, '{0.0, 0.081, 0.0},    0.3, '{0.0, 0.0, 0.02},    '{0.001, 0.001, 0.001});
    for (int i = 0; i < N; i++) lk[i] = lks[i];
    comp_offset = '0;
    ab = '{0.0, 0.0, 0.0, 0.0, 0.0, 9.81};
    a_base = r_v6(ab);
    task_valid = 0; task_fn = FN_ID; task_jin = '0; task_tau = '0;
    dtau_valid = 0; dtau = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    maxt = 0.0;
    for (int k = 0; k < NT; k++) begin
      for (int i = 0; i < N; i++) begin js[i] = rand_joint(1.5, 3.0, 0.0); task_jin[i] <= js[i]; end
      ref_rnea(N, lks, js, ab, t);
      for (int i = 0; i < N; i++) begin
        e_tau[k][i] = t[i];
        if (rabs(t[i]) > maxt) maxt = rabs(t[i]);
      end
      task_fn <= FN_ID;
      task_valid <= 1;
      @(posedge clk);
      while (!task_ready) @(posedge clk);
    end
    task_valid <= 0;
    repeat (4 * N) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("%0d of %0d ID results", nout, NT); end
    $display("largest |tau| = %f Nm", maxt);
    // one Minv task on the same arm (measurement only)
    for (int i = 0; i < N; i++) begin js[i] = rand_joint(1.0, 1.0, 0.0); task_jin[i] <= js[i]; end
    ref_minv(N, lks, js, mi_ref);
    task_fn <= FN_MINV;
    task_valid <= 1;
    @(posedge clk);
    while (!task_ready) @(posedge clk);
    task_valid <= 0;
    repeat (120) @(posedge clk);
    checks++;
    if (!minv_done) begin failures++; $display("no Minv result"); end
    $display("Minv on this arm: largest element error %f (holding-factor range limit)", minv_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
