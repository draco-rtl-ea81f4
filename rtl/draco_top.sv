// draco_top: DRACO rigid body dynamics accelerator.
//
// Composes the basic modules into the multi-function architecture:
//   ID    tau   = RNEA(q, qd, qdd, fext)                       rnea_module
//   Minv  M^-1  = Minv(q)                                       minv_module
//   FD    qdd   = M^-1 (tau - C),  C = RNEA(q, qd, 0, fext)     both + multiplier
//   dID   RNEA runs; the derivative module is external (see below)
//   dFD   d qdd/du = M^-1 d tau/du                              minv + multiplier
// dsp_alloc_ctrl selects the function, owns the shared DSP-group allocation
// and paces task issue to the function's II. Tasks of one function stream
// through the pipelines; a task of another function waits until the
// pipelines are empty.
//
// The derivative module (dRNEA, d tau/du) is not part of this RTL: for dFD
// its output columns enter through dtau_valid/dtau/dtau_ready (2N columns per
// task: N for d/dq, then N for d/dqd) and the RNEA results of dID/dFD tasks
// leave through tau for it.
//
// Interface:
//   task_valid/task_ready/task_fn/task_jin/task_tau: one task (joint state;
//     task_tau is the applied torque, used by FD)
//   lk, comp_offset, a_base: robot constants, Minv compensation offsets and
//     the base acceleration -g
//   tau_valid/tau: RNEA result (ID, and dID/dFD side output)
//   minv_valid/minv: M^-1 (Minv)
//   qdd_valid/qdd: forward dynamics result (FD)
//   dqdd_valid/dqdd/dqdd_col: one column of d qdd/du (dFD)
//   status: current function and II, DSP owners, dRNEA enable, event pulses.
// Timing: RNEA latency 2N cycles, Minv about 2N + 30 cycles, FD and dFD one
// more cycle after both operands are present.
module draco_top
  import draco_pkg::*;
#(
  parameter int unsigned N       = 7,
  parameter int unsigned II_ID   = 3,
  parameter int unsigned II_MINV = 4,
  parameter int unsigned II_FD   = 4,
  parameter int unsigned II_DID  = 4,
  parameter int unsigned II_DFD  = 4,
  parameter int unsigned II_MB   = 3,
  parameter int unsigned QDEPTH  = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  link_t [N-1:0]      lk,
  input  fx_t [N-1:0][N-1:0] comp_offset,
  input  v6_t                a_base,
  input  logic               task_valid,
  input  fn_e                task_fn,
  input  joint_in_t [N-1:0]  task_jin,
  input  fx_t [N-1:0]        task_tau,
  output logic               task_ready,
  input  logic               dtau_valid,
  input  fx_t [N-1:0]        dtau,
  output logic               dtau_ready,
  output logic               tau_valid,
  output fx_t [N-1:0]        tau,
  output logic               minv_valid,
  output fx_t [N-1:0][N-1:0] minv,
  output logic               qdd_valid,
  output fx_t [N-1:0]        qdd,
  output logic               dqdd_valid,
  output fx_t [N-1:0]        dqdd,
  output logic [$clog2(2*N)-1:0] dqdd_col,
  output fn_e                cur_fn,
  output logic               shared_to_rnea,
  output logic               dr_to_drnea,
  output logic               mr_to_minv,
  output logic               drnea_enable,
  output logic [3:0]         cur_ii,
  output logic               ev_ii_stall,
  output logic               ev_mode_switch,
  output logic               ev_div_wait,
  output logic               ev_fwd_wait
);
  localparam int unsigned CW = $clog2(2 * N);

  logic       issue;
  logic [7:0] inflight;
  logic       en_rnea, en_minv, en_drnea, en_mul;

  dsp_alloc_ctrl #(
    .II_ID(II_ID), .II_MINV(II_MINV), .II_FD(II_FD), .II_DID(II_DID), .II_DFD(II_DFD)
  ) u_alloc (
    .clk, .rst_n,
    .req_valid  (task_valid),
    .req_fn     (task_fn),
    .inflight   (inflight),
    .issue      (issue),
    .cur_fn     (cur_fn),
    .cur_ii     (cur_ii),
    .shared_to_rnea(shared_to_rnea),
    .dr_to_drnea(dr_to_drnea),
    .mr_to_minv (mr_to_minv),
    .en_rnea    (en_rnea),
    .en_minv    (en_minv),
    .en_drnea   (en_drnea),
    .en_mul     (en_mul),
    .ii_stall   (ev_ii_stall),
    .mode_switch(ev_mode_switch)
  );
  assign task_ready   = issue;
  assign drnea_enable = en_drnea;

  // ---------------- RNEA ----------------
  joint_in_t [N-1:0] rjin;
  always_comb begin
    rjin = task_jin;
    if (cur_fn == FN_FD)
      for (int i = 0; i < N; i++) rjin[i].qdd = '0;  // bias force C
  end

  logic        r_valid;
  fx_t [N-1:0] r_tau;
  rnea_module #(.N(N)) u_rnea (
    .clk, .rst_n, .lk,
    .in_valid (issue && en_rnea),
    .jin      (rjin),
    .a_base   (a_base),
    .out_valid(r_valid),
    .tau      (r_tau)
  );

  // ---------------- Minv ----------------
  logic               m_valid;
  fx_t [N-1:0][N-1:0] m_out;
  minv_module #(.N(N), .II_MB(II_MB)) u_minv (
    .clk, .rst_n, .lk, .comp_offset,
    .in_valid (issue && en_minv),
    .jin      (task_jin),
    .out_valid(m_valid),
    .minv     (m_out),
    .arb_wait (ev_div_wait),
    .fwd_wait (ev_fwd_wait)
  );

  // ---------------- operand queues of the multiplier ----------------
  logic mul_fire, fd_fire, dfd_fire, col_last;
  logic [CW-1:0] col;

  logic        c_empty, c_full;
  fx_t [N-1:0] c_q;
  logic [$clog2(QDEPTH+1)-1:0] c_cnt;
  sync_fifo #(.T(fx_t [N-1:0]), .DEPTH(QDEPTH)) u_cfifo (
    .clk, .rst_n,
    .push (r_valid && cur_fn == FN_FD),
    .din  (r_tau),
    .pop  (fd_fire),
    .dout (c_q), .empty(c_empty), .full(c_full), .count(c_cnt)
  );

  logic        t_empty, t_full;
  fx_t [N-1:0] t_q;
  logic [$clog2(QDEPTH+1)-1:0] t_cnt;
  sync_fifo #(.T(fx_t [N-1:0]), .DEPTH(QDEPTH)) u_taufifo (
    .clk, .rst_n,
    .push (issue && task_fn == FN_FD),
    .din  (task_tau),
    .pop  (fd_fire),
    .dout (t_q), .empty(t_empty), .full(t_full), .count(t_cnt)
  );

  logic               mi_empty, mi_full;
  fx_t [N-1:0][N-1:0] mi_q;
  logic [$clog2(QDEPTH+1)-1:0] mi_cnt;
  sync_fifo #(.T(fx_t [N-1:0][N-1:0]), .DEPTH(QDEPTH)) u_minvfifo (
    .clk, .rst_n,
    .push (m_valid && en_mul),
    .din  (m_out),
    .pop  (fd_fire || (dfd_fire && col_last)),
    .dout (mi_q), .empty(mi_empty), .full(mi_full), .count(mi_cnt)
  );

  assign fd_fire    = (cur_fn == FN_FD) && !c_empty && !t_empty && !mi_empty;
  assign dtau_ready = (cur_fn == FN_DFD) && !mi_empty;
  assign dfd_fire   = dtau_ready && dtau_valid;
  assign col_last   = (col == CW'(2 * N - 1));
  assign mul_fire   = fd_fire || dfd_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        col <= '0;
    else if (dfd_fire) col <= col_last ? '0 : col + 1'b1;
  end

  logic          y_valid;
  fx_t [N-1:0]   y;
  logic [CW-1:0] y_tag;
  matvec_multiplier #(.N(N), .TAG_W(CW)) u_mul (
    .clk, .rst_n,
    .in_valid (mul_fire),
    .minv     (mi_q),
    .vec      (fd_fire ? t_q : dtau),
    .sub      (fd_fire ? c_q : '0),
    .in_tag   (col),
    .out_valid(y_valid),
    .y        (y),
    .out_tag  (y_tag)
  );

  // ---------------- results ----------------
  assign tau_valid  = r_valid && (cur_fn != FN_FD);
  assign tau        = r_tau;
  assign minv_valid = m_valid && (cur_fn == FN_MINV);
  assign minv       = m_out;
  assign qdd_valid  = y_valid && (cur_fn == FN_FD);
  assign qdd        = y;
  assign dqdd_valid = y_valid && (cur_fn == FN_DFD);
  assign dqdd       = y;
  assign dqdd_col   = y_tag;

  // A task is finished when its last result leaves.
  logic done;
  always_comb begin
    case (cur_fn)
      FN_ID, FN_DID: done = r_valid;
      FN_MINV:       done = m_valid;
      FN_FD:         done = y_valid;
      default:       done = y_valid && (y_tag == CW'(2 * N - 1));
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + (issue ? 8'd1 : 8'd0) - (done ? 8'd1 : 8'd0);
  end

endmodule
