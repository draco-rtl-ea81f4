// minv_bwd_unit (Mb): backward-pass stage of the division-deferring mass
// matrix inversion (Algorithm 2, lines 1-12, of the DRACO Minv algorithm).
//
// The original algorithm divides by D_i = S^T U_i inside the backward pass,
// putting a reciprocal on the longest latency path. Here nothing is divided:
// every quantity handed to the parent is multiplied by the "holding" factor
// alpha_i = (D_i alpha_{i+1}) * alpha_{i+1}, with alpha_{N+1} = 1, so all
// inputs arrive pre-scaled by alpha_{i+1}. For joint i the unit computes
//   I^A_i a   = I_i * a + I_in                      (a = alpha_{i+1})
//   U_i a     = I^A_i a * S,   D_i a = S^T U_i a
//   alpha_i   = D_i a * a
//   Minv[i,j] D_i a = -S^T F_in[:,j]  (j > i),  = a  (j = i, the diagonal)
// and, if the joint has a parent,
//   F_i D_i a^2      = F_in * D_i a + U_i a * Minv[i,:] D_i a
//   F_out            = X_i^T F_i D_i a^2                     (btr to parent)
//   I^A_i D_i a^2    = I^A_i a * D_i a - U_i a (U_i a)^T
//   I_out            = X_i^T I^A_i D_i a^2 X_i               (btr to parent)
// D_i a goes to the shared divider; s/c, U_i a, the scaled row of M^-1 and
// D_i a go to the joint's FIFO for the forward unit (downward transfer).
// F matrices are kept as N columns; columns outside the subtree are zero.
//
// Interface: in_valid qualifies the backward transfer (i_in, f_in, alpha_in)
// and s/c of this joint. Timing: one cycle, outputs registered. For J = 0
// (the base joint) no parent transfer is produced: i_out and f_out are
// constant zero in that instance.
// The full-parallel datapath is this implementation's choice.
module minv_bwd_unit
  import draco_pkg::*;
#(
  parameter int unsigned N = 7,
  parameter int unsigned J = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  link_t       lk,
  input  fx_t         s,
  input  fx_t         c,
  input  m6_t         i_in,
  input  v6_t [N-1:0] f_in,
  input  fx_t         alpha_in,
  output logic        out_valid,
  output m6_t         i_out,
  output v6_t [N-1:0] f_out,
  output fx_t         alpha_out,
  output v6_t         u_a,
  output fx_t [N-1:0] row_da,
  output fx_t         d_a
);
  xform_t      x;
  m6_t         ia, iad, xmm;
  v6_t         u;
  fx_t         da, al;
  fx_t [N-1:0] row;
  v6_t [N-1:0] fo;
  m6_t         io;

  always_comb begin
    x = joint_xform(lk, s, c);
    for (int r = 0; r < 6; r++)
      for (int k = 0; k < 6; k++) ia[r][k] = fx_mul(lk.I[r][k], alpha_in) + i_in[r][k];
    for (int r = 0; r < 6; r++) u[r] = ia[r][2];
    da = u[2];
    al = fx_mul(da, alpha_in);
    for (int j = 0; j < N; j++) begin
      if (j > J)       row[j] = -f_in[j][2];
      else if (j == J) row[j] = alpha_in;
      else             row[j] = '0;
    end
    fo  = '0;
    io  = '0;
    iad = '0;
    xmm = '0;
    if (J > 0) begin
      for (int j = 0; j < N; j++) begin
        if (j >= J) begin
          v6_t fs;
          for (int k = 0; k < 6; k++) fs[k] = fx_mul(f_in[j][k], da) + fx_mul(u[k], row[j]);
          fo[j] = xft(x, fs);
        end
      end
      for (int r = 0; r < 6; r++)
        for (int k = 0; k < 6; k++) iad[r][k] = fx_mul(ia[r][k], da) - fx_mul(u[r], u[k]);
      xmm = xmat(x);
      io  = m6mul(m6t(xmm), m6mul(iad, xmm));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      i_out     <= io;
      f_out     <= fo;
      alpha_out <= al;
      u_a       <= u;
      row_da    <= row;
      d_a       <= da;
    end
  end
endmodule
