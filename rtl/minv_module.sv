// minv_module: mass matrix inverse M^-1 = Minv(q) with division deferring.
//
// Structure (one stage per joint, round trip pipeline):
//  * Backward units Mb_N .. Mb_1 (minv_bwd_unit) pass the alpha-scaled
//    articulated inertia, F matrix and holding factor alpha from the end
//    effector to the base. No unit divides.
//  * Each Mb_i sends D_i alpha_{i+1} to the shared pipelined dividers
//    (div_share) and its downward data (s, c, U_i alpha_{i+1}, the scaled row
//    of M^-1) to the joint's FIFO. The FIFO of joint 1 is the extra buffer
//    that waits for the first division, since Mf_1 follows Mb_1 directly.
//  * Forward units Mf_1 .. Mf_N (minv_fwd_unit) fire when their FIFO entry,
//    their reciprocal and (except Mf_1) the forward transfer of the previous
//    unit are all present, and fill one row of M^-1 each.
//  * The upper triangle is mirrored into a full symmetric matrix and the
//    compensation offset is added (minv_compensation).
// The reciprocal is off the backward critical path: division of joint i runs
// while Mb_{i-1} .. Mb_1 still work.
//
// Interface: in_valid with s/c of every joint (jin; other fields unused), link
// constants lk, comp_offset; out_valid with the full matrix minv.
// Timing: about 2N + divider latency + 3 cycles. Tasks may enter every II_MB
// cycles or slower (II_MB = Mb units per divider). arb_wait reports a
// divider collision, fwd_wait a forward unit that waited for its reciprocal.
// FIFO depths are this implementation's choices, sized for II_MB >= 3.
module minv_module
  import draco_pkg::*;
#(
  parameter int unsigned N          = 7,
  parameter int unsigned II_MB      = 3,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  link_t [N-1:0]      lk,
  input  fx_t [N-1:0][N-1:0] comp_offset,
  input  logic               in_valid,
  input  joint_in_t [N-1:0]  jin,
  output logic               out_valid,
  output fx_t [N-1:0][N-1:0] minv,
  output logic               arb_wait,
  output logic               fwd_wait
);
  typedef struct packed {
    fx_t         s;
    fx_t         c;
    v6_t         u_a;
    fx_t [N-1:0] row_da;
  } dtr_t;

  typedef struct packed {
    v6_t [N-1:0]        p;
    fx_t [N-1:0][N-1:0] m;
  } ftr_t;

  // backward chain
  logic              mb_valid [N];
  m6_t               mb_i [N];
  v6_t [N-1:0]       mb_f [N];
  fx_t               mb_alpha [N];
  v6_t               mb_u [N];
  fx_t [N-1:0]       mb_row [N];
  fx_t               mb_da [N];
  joint_in_t [N-1:0] tsk [N];

  logic [N-1:0] req_valid, res_pop, res_empty;
  fx_t  [N-1:0] req_d, res_q;

  // forward chain
  logic               mf_fire [N];
  logic               mf_valid [N];
  v6_t [N-1:0]        mf_p [N];
  fx_t [N-1:0][N-1:0] mf_m [N];
  logic [N-1:0]       fwait;

  for (genvar i = N - 1; i >= 0; i--) begin : g_b
    logic              b_valid;
    joint_in_t [N-1:0] b_tsk;
    m6_t               b_i;
    v6_t [N-1:0]       b_f;
    fx_t               b_alpha;
    if (i == N - 1) begin : g_tip
      assign b_valid = in_valid;
      assign b_tsk   = jin;
      assign b_i     = '0;
      assign b_f     = '0;
      assign b_alpha = FX_ONE;
    end else begin : g_in
      assign b_valid = mb_valid[i+1];
      assign b_tsk   = tsk[i+1];
      assign b_i     = mb_i[i+1];
      assign b_f     = mb_f[i+1];
      assign b_alpha = mb_alpha[i+1];
    end
    always_ff @(posedge clk) begin
      if (b_valid) tsk[i] <= b_tsk;
    end
    minv_bwd_unit #(.N(N), .J(i)) u_mb (
      .clk, .rst_n,
      .in_valid (b_valid),
      .lk       (lk[i]),
      .s        (b_tsk[i].s),
      .c        (b_tsk[i].c),
      .i_in     (b_i),
      .f_in     (b_f),
      .alpha_in (b_alpha),
      .out_valid(mb_valid[i]),
      .i_out    (mb_i[i]),
      .f_out    (mb_f[i]),
      .alpha_out(mb_alpha[i]),
      .u_a      (mb_u[i]),
      .row_da   (mb_row[i]),
      .d_a      (mb_da[i])
    );
    assign req_valid[i] = mb_valid[i];
    assign req_d[i]     = mb_da[i];
  end

  div_share #(.N(N), .G(II_MB), .RDEPTH(FIFO_DEPTH)) u_div (
    .clk, .rst_n,
    .req_valid, .req_d, .res_pop, .res_empty, .res_q, .arb_wait
  );

  for (genvar i = 0; i < N; i++) begin : g_f
    dtr_t d_out;
    logic d_empty, d_full;
    logic [$clog2(FIFO_DEPTH+1)-1:0] d_cnt;
    sync_fifo #(.T(dtr_t), .DEPTH(FIFO_DEPTH)) u_dtr (
      .clk, .rst_n,
      .push (mb_valid[i]),
      .din  ('{s: tsk[i][i].s, c: tsk[i][i].c, u_a: mb_u[i], row_da: mb_row[i]}),
      .pop  (mf_fire[i]),
      .dout (d_out),
      .empty(d_empty),
      .full (d_full),
      .count(d_cnt)
    );

    logic ftr_ok;
    ftr_t f_in;
    if (i == 0) begin : g_root
      assign ftr_ok = 1'b1;
      assign f_in   = '0;
    end else begin : g_chain
      logic f_empty, f_full;
      logic [$clog2(FIFO_DEPTH+1)-1:0] f_cnt;
      sync_fifo #(.T(ftr_t), .DEPTH(FIFO_DEPTH)) u_ftr (
        .clk, .rst_n,
        .push (mf_valid[i-1]),
        .din  ('{p: mf_p[i-1], m: mf_m[i-1]}),
        .pop  (mf_fire[i]),
        .dout (f_in),
        .empty(f_empty),
        .full (f_full),
        .count(f_cnt)
      );
      assign ftr_ok = !f_empty;
    end

    assign mf_fire[i]  = ftr_ok && !d_empty && !res_empty[i];
    assign res_pop[i]  = mf_fire[i];
    assign fwait[i]    = ftr_ok && !d_empty && res_empty[i];

    minv_fwd_unit #(.N(N), .J(i)) u_mf (
      .clk, .rst_n,
      .in_valid (mf_fire[i]),
      .lk       (lk[i]),
      .s        (d_out.s),
      .c        (d_out.c),
      .u_a      (d_out.u_a),
      .row_da   (d_out.row_da),
      .ddef     (res_q[i]),
      .p_par    (f_in.p),
      .minv_in  (f_in.m),
      .out_valid(mf_valid[i]),
      .p_out    (mf_p[i]),
      .minv_out (mf_m[i])
    );
  end

  assign fwd_wait = |fwait;

  // mirror the upper triangle
  fx_t [N-1:0][N-1:0] sym;
  always_comb begin
    for (int r = 0; r < N; r++)
      for (int k = 0; k < N; k++) sym[r][k] = (k >= r) ? mf_m[N-1][r][k] : mf_m[N-1][k][r];
  end

  minv_compensation #(.N(N)) u_comp (
    .clk, .rst_n,
    .in_valid (mf_valid[N-1]),
    .minv_in  (sym),
    .offset   (comp_offset),
    .out_valid(out_valid),
    .minv_out (minv)
  );
endmodule
