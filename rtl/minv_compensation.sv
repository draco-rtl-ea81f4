// minv_compensation: fixed-pattern error compensation of the quantised M^-1.
//
// Quantised reciprocals give M^-1 a structural error that depends little on
// the trajectory and sits mainly on the diagonal. The offline quantisation
// flow fits, per robot and application, an offset matrix that is added to the
// hardware result; this block applies it: minv_out = minv_in + offset.
// The offset is an input (a per-robot constant, tie it off or load it from a
// configuration register); an all-zero offset disables compensation.
//
// Interface: in_valid/minv_in, offset; out_valid/minv_out.
// Timing: one cycle, registered. The element-wise additive form follows the
// paper's "offset matrix applied to the quantized M^-1"; how the offsets are
// obtained is outside the hardware.
module minv_compensation
  import draco_pkg::*;
#(
  parameter int unsigned N = 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  fx_t [N-1:0][N-1:0] minv_in,
  input  fx_t [N-1:0][N-1:0] offset,
  output logic               out_valid,
  output fx_t [N-1:0][N-1:0] minv_out
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) minv_out[i][j] <= minv_in[i][j] + offset[i][j];
  end
endmodule
