// tb_draco_top: end-to-end test of the DRACO accelerator at its default
// configuration (7 joints, 24-bit 12.12 format).
//
// A coaxial 7-joint chain (holding factors of the deferred division stay near
// 1, see the design notes) runs a task sequence that exercises every RBD
// function and every switch between them: ID, Minv, FD, dID, dFD, ID.
// Results are compared with floating-point references: RNEA torques, the
// original dividing Minv algorithm, FD = M^-1 (tau - C) and dFD columns
// M^-1 (d tau/du), with d tau/du columns supplied by the testbench in place
// of the external derivative module.
// Mechanisms counted (each must occur): II pacing stalls, mode switches with
// pipeline drain (and the DSP-group owners of every function), forward Minv units waiting for their reciprocal, dFD
// column streaming. The measured issue interval of every function is
// checked against its II. Divider collisions cannot happen when tasks are at
// least II_MB cycles apart, which the II values guarantee: the test checks
// that none occurs.
module tb_draco_top;
  import draco_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 7;
  localparam int NTASK = 22;
  localparam int CW = $clog2(2 * N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t [N-1:0]      lk;
  fx_t [N-1:0][N-1:0] comp_offset;
  v6_t                a_base;
  logic               task_valid;
  fn_e                task_fn;
  joint_in_t [N-1:0]  task_jin;
  fx_t [N-1:0]        task_tau;
  logic               task_ready;
  logic               dtau_valid;
  fx_t [N-1:0]        dtau;
  logic               dtau_ready;
  logic               tau_valid;
  fx_t [N-1:0]        tau;
  logic               minv_valid;
  fx_t [N-1:0][N-1:0] minv;
  logic               qdd_valid;
  fx_t [N-1:0]        qdd;
  logic               dqdd_valid;
  fx_t [N-1:0]        dqdd;
  logic [CW-1:0]      dqdd_col;
  fn_e                cur_fn;
  logic               shared_to_rnea, dr_to_drnea, mr_to_minv, drnea_enable;
  logic [3:0]         cur_ii;
  logic               ev_ii_stall, ev_mode_switch, ev_div_wait, ev_fwd_wait;

  draco_top dut (.*);

  // ---- task list and expected results ----
  fn_e       t_fn [NTASK];
  joint_in_t t_j [NTASK][N];
  real       t_tau [NTASK][N];
  real       e_tau [NTASK][N];     // RNEA output (ID, dID, dFD)
  real       e_mi [NTASK][N][N];   // M^-1
  real       e_qdd [NTASK][N];     // FD
  real       e_dtau [NTASK][2*N][N];
  real       e_dqdd [NTASK][2*N][N];

  int checks = 0, failures = 0;
  int n_stall = 0, n_switch = 0, n_divw = 0, n_fwdw = 0, n_cols = 0;
  int cyc = 0;
  int ti = 0;                      // next task to issue
  int dti = 0, dcol = 0;           // dtau stream position (task, column)
  int last_issue [5];
  int bad_ii = 0;
  // result cursors: index of the next task of each kind
  int r_tau = 0, r_mi = 0, r_qdd = 0, r_dq = 0;


  function automatic int next_of(int from, fn_e a, fn_e b, fn_e c);
    for (int k = from; k < NTASK; k++)
      if (t_fn[k] == a || t_fn[k] == b || t_fn[k] == c) return k;
    return NTASK;
  endfunction

  function automatic bit close(real g, real e, real abs_tol, real rel_tol);
    return rabs(g - e) <= abs_tol + rel_tol * rabs(e);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog: %0d of %0d tasks issued", ti, NTASK);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive tasks and d tau/du columns on the falling edge
  always @(negedge clk) begin
    task_valid <= rst_n && (ti < NTASK);
    if (ti < NTASK) begin
      task_fn <= t_fn[ti];
      for (int i = 0; i < N; i++) begin
        task_jin[i] <= t_j[ti][i];
        task_tau[i] <= to_fx(t_tau[ti][i]);
      end
    end
    dti = next_of(dti, FN_DFD, FN_DFD, FN_DFD);
    dtau_valid <= rst_n && (dti < NTASK);
    if (dti < NTASK)
      for (int i = 0; i < N; i++) dtau[i] <= to_fx(e_dtau[dti][dcol][i]);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (ev_ii_stall)    n_stall++;
      if (ev_mode_switch) n_switch++;
      if (ev_div_wait)    n_divw++;
      if (ev_fwd_wait)    n_fwdw++;
      if (task_valid && task_ready) begin
        int f;
        f = int'(t_fn[ti]);
        if (last_issue[f] >= 0 && ti > 0 && t_fn[ti-1] == t_fn[ti]) begin
          int ii_exp;
          ii_exp = (t_fn[ti] == FN_ID) ? 3 : 4;
          checks++;
          if (cyc - last_issue[f] != ii_exp) begin
            bad_ii++;
            failures++;
            $display("task %0d issued %0d cycles after the previous, II is %0d",
                     ti, cyc - last_issue[f], ii_exp);
          end
        end
        last_issue[f] = cyc;
        // DSP group owners of the issuing function
        checks++;
        if (shared_to_rnea != (t_fn[ti] == FN_ID) ||
            dr_to_drnea != (t_fn[ti] == FN_DID || t_fn[ti] == FN_DFD) ||
            mr_to_minv != (t_fn[ti] == FN_MINV || t_fn[ti] == FN_FD || t_fn[ti] == FN_DFD) ||
            drnea_enable != dr_to_drnea) begin
          failures++;
          $display("task %0d: DSP owners %b%b%b wrong for %s", ti, shared_to_rnea,
                   dr_to_drnea, mr_to_minv, t_fn[ti].name());
        end
        ti++;
      end
      if (dtau_valid && dtau_ready) begin
        if (dcol == 2 * N - 1) begin
          dcol = 0;
          dti++;
        end else dcol++;
      end
      // ---- results ----
      if (tau_valid) begin
        r_tau = next_of(r_tau, FN_ID, FN_DID, FN_DFD);
        for (int i = 0; i < N; i++) begin
          checks++;
          if (!close(to_r(tau[i]), e_tau[r_tau][i], 0.05, 0.01)) begin
            failures++;
            $display("task %0d tau[%0d] got %f expected %f", r_tau, i, to_r(tau[i]), e_tau[r_tau][i]);
          end
        end
        r_tau++;
      end
      if (minv_valid) begin
        r_mi = next_of(r_mi, FN_MINV, FN_MINV, FN_MINV);
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++) begin
            checks++;
            if (!close(to_r(minv[i][j]), e_mi[r_mi][i][j], 0.02, 0.03)) begin
              failures++;
              $display("task %0d Minv[%0d][%0d] got %f expected %f", r_mi, i, j,
                       to_r(minv[i][j]), e_mi[r_mi][i][j]);
            end
          end
        r_mi++;
      end
      if (qdd_valid) begin
        r_qdd = next_of(r_qdd, FN_FD, FN_FD, FN_FD);
        for (int i = 0; i < N; i++) begin
          checks++;
          if (!close(to_r(qdd[i]), e_qdd[r_qdd][i], 0.1, 0.03)) begin
            failures++;
            $display("task %0d qdd[%0d] got %f expected %f", r_qdd, i, to_r(qdd[i]), e_qdd[r_qdd][i]);
          end
        end
        r_qdd++;
      end
      if (dqdd_valid) begin
        int c;
        r_dq = next_of(r_dq, FN_DFD, FN_DFD, FN_DFD);
        c = int'(dqdd_col);
        n_cols++;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (!close(to_r(dqdd[i]), e_dqdd[r_dq][c][i], 0.05, 0.03)) begin
            failures++;
            $display("task %0d dqdd col %0d [%0d] got %f expected %f", r_dq, c, i,
                     to_r(dqdd[i]), e_dqdd[r_dq][c][i]);
          end
        end
        if (c == 2 * N - 1) r_dq++;
      end
    end
  end

  initial begin
    link_t lks[];
    joint_in_t js[];
    rv6 ab;
    real t[], cb[], mi[][];
    lks = new[N]; js = new[N];
    for (int i = 0; i < N; i++) begin
      lks[i] = rand_link(1);
      lk[i] = lks[i];
    end
    comp_offset = '0;
    ab = '{0.0, 0.0, 0.0, 0.0, 0.0, 9.81};
    a_base = r_v6(ab);
    for (int f = 0; f < 5; f++) last_issue[f] = -1;
    // ID x6, Minv x4, FD x5, dID x3, dFD x2, ID x2
    for (int k = 0; k < NTASK; k++) begin
      t_fn[k] = (k < 6) ? FN_ID : (k < 10) ? FN_MINV : (k < 15) ? FN_FD :
                (k < 18) ? FN_DID : (k < 20) ? FN_DFD : FN_ID;
      for (int i = 0; i < N; i++) begin
        js[i] = rand_joint(1.0, 2.0, 0.5);
        t_j[k][i] = js[i];
        t_tau[k][i] = urand(-5.0, 5.0);
      end
      ref_rnea(N, lks, js, ab, t);
      for (int i = 0; i < N; i++) e_tau[k][i] = t[i];
      ref_minv(N, lks, js, mi);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) e_mi[k][i][j] = mi[i][j];
      // C: RNEA with qdd = 0
      for (int i = 0; i < N; i++) js[i].qdd = '0;
      ref_rnea(N, lks, js, ab, cb);
      for (int i = 0; i < N; i++) begin
        e_qdd[k][i] = 0.0;
        for (int j = 0; j < N; j++) e_qdd[k][i] += mi[i][j] * (to_r(to_fx(t_tau[k][j])) - cb[j]);
      end
      for (int c = 0; c < 2 * N; c++) begin
        for (int i = 0; i < N; i++) e_dtau[k][c][i] = to_r(to_fx(urand(-2.0, 2.0)));
        for (int i = 0; i < N; i++) begin
          e_dqdd[k][c][i] = 0.0;
          for (int j = 0; j < N; j++) e_dqdd[k][c][i] += mi[i][j] * e_dtau[k][c][j];
        end
      end
    end
    task_valid = 0;
    dtau_valid = 0;
    task_fn = FN_ID;
    task_jin = '0;
    task_tau = '0;
    dtau = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ti == NTASK);
    repeat (200) @(posedge clk);
    checks++;
    if (r_tau != next_of(r_tau, FN_ID, FN_DID, FN_DFD) || r_tau != NTASK) begin
      failures++;
      $display("RNEA results: next expected task %0d", r_tau);
    end
    checks++;
    if (r_mi != NTASK && next_of(r_mi, FN_MINV, FN_MINV, FN_MINV) != NTASK) begin
      failures++;
      $display("Minv results missing");
    end
    checks++;
    if (next_of(r_qdd, FN_FD, FN_FD, FN_FD) != NTASK) begin
      failures++;
      $display("FD results missing");
    end
    checks++;
    if (n_cols != 2 * 2 * N) begin
      failures++;
      $display("dFD columns: %0d of %0d", n_cols, 4 * N);
    end
    $display("events: ii_stall=%0d mode_switch=%0d fwd_wait=%0d dfd_cols=%0d div_wait=%0d",
             n_stall, n_switch, n_fwdw, n_cols, n_divw);
    checks++; if (n_stall == 0)  begin failures++; $display("no II stall"); end
    checks++; if (n_switch != 5) begin failures++; $display("expected 5 mode switches"); end
    checks++; if (n_fwdw == 0)   begin failures++; $display("no forward wait on a reciprocal"); end
    checks++; if (n_divw != 0)   begin failures++; $display("unexpected divider collision"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
