// matvec_multiplier: the multiplier module that combines module results into
// forward dynamics and its derivatives.
//
//   FD:  qdd       = M^-1 (tau - C)
//   dFD: d qdd/du  = M^-1 (d tau/du)     one column of d tau/du per call
// It computes y = minv * (vec - sub); the caller passes sub = C for FD and
// sub = 0 for dFD. N*N multiplies in parallel.
//
// Interface: in_valid with minv, vec, sub and a tag that is returned with the
// result (column index for dFD). Timing: one cycle, registered.
module matvec_multiplier
  import draco_pkg::*;
#(
  parameter int unsigned N     = 7,
  parameter int unsigned TAG_W = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  fx_t [N-1:0][N-1:0] minv,
  input  fx_t [N-1:0]        vec,
  input  fx_t [N-1:0]        sub,
  input  logic [TAG_W-1:0]   in_tag,
  output logic               out_valid,
  output fx_t [N-1:0]        y,
  output logic [TAG_W-1:0]   out_tag
);
  fx_t [N-1:0] d, yc;

  always_comb begin
    for (int k = 0; k < N; k++) d[k] = vec[k] - sub[k];
    for (int r = 0; r < N; r++) begin
      yc[r] = '0;
      for (int k = 0; k < N; k++) yc[r] = yc[r] + fx_mul(minv[r][k], d[k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      y       <= yc;
      out_tag <= in_tag;
    end
  end
endmodule
