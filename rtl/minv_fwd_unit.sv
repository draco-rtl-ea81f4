// minv_fwd_unit (Mf): forward-pass stage of the division-deferring mass
// matrix inversion (Algorithm 2, lines 14-26).
//
// The reciprocal Ddef_i = (D_i alpha_{i+1})^-1 was computed by the shared
// pipelined divider in parallel with the rest of the backward pass; here it
// resolves the holding factors. For joint i, with the scaled row
// Minv[i,:] D_i alpha_{i+1} and U_i alpha_{i+1} from the joint's FIFO:
//   root joint:  Minv[i,j] = Ddef_i * (Minv[i,j] D_i a)
//   otherwise:   Minv[i,j] = Ddef_i * (Minv[i,j] D_i a - (U_i a)^T X_i P_par[:,j])
//   P_i[:,j]   = S_i Minv[i,j] + X_i P_par[:,j]
// for the columns j >= i (the subtree of i in a serial chain). The diagonal
// element of the scaled row holds alpha_{i+1}, so the same formula gives
// Minv[i,i] = Ddef_i * alpha_{i+1} (line 16). Row i of M^-1 is written into
// the matrix that travels with the forward transfer; after the last joint it
// holds the upper triangle of M^-1.
//
// Interface: in_valid qualifies the joint's FIFO entry (s, c, u_a, row_da),
// the reciprocal ddef and the forward transfer (p_par, minv_in).
// Timing: one cycle, outputs registered. The full-parallel datapath is this
// implementation's choice. For J = 0 (the base joint) p_par is not used and
// P_0 = S * row, so five of the six elements of every P column are constant
// zero in that instance.
module minv_fwd_unit
  import draco_pkg::*;
#(
  parameter int unsigned N = 7,
  parameter int unsigned J = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  link_t                 lk,
  input  fx_t                   s,
  input  fx_t                   c,
  input  v6_t                   u_a,
  input  fx_t [N-1:0]           row_da,
  input  fx_t                   ddef,
  input  v6_t [N-1:0]           p_par,
  input  fx_t [N-1:0][N-1:0]    minv_in,
  output logic                  out_valid,
  output v6_t [N-1:0]           p_out,
  output fx_t [N-1:0][N-1:0]    minv_out
);
  xform_t             x;
  v6_t [N-1:0]        xp;
  fx_t [N-1:0]        row;
  fx_t [N-1:0][N-1:0] mo;

  always_comb begin
    x  = joint_xform(lk, s, c);
    xp = '0;
    for (int j = 0; j < N; j++) begin
      row[j] = '0;
      if (j >= J) begin
        fx_t t;
        t = '0;
        if (J > 0) begin
          xp[j] = xm(x, p_par[j]);
          for (int k = 0; k < 6; k++) t = t + fx_mul(u_a[k], xp[j][k]);
        end
        row[j] = fx_mul(ddef, row_da[j] - t);
        xp[j][2] = xp[j][2] + row[j];
      end
    end
    mo = minv_in;
    mo[J] = row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      p_out    <= xp;
      minv_out <= mo;
    end
  end
endmodule
