// rnea_bwd_unit (Rb): backward-pass stage of the Recursive Newton-Euler
// Algorithm for one joint.
//
// Task data flows from the end effector back to the base. For joint i the unit
// adds the force handed down by its child (already expressed in frame i) to
// the link force f_i that the forward unit left in the joint's FIFO, reads the
// joint torque tau_i = S^T f_i and transfers the total force to the parent
// frame: btr = X_i^T f_i. For a serial chain the torques of the deeper joints
// travel with the backward transfer, so the unit of joint 1 delivers the whole
// torque vector of a task.
//
// Interface: in_valid qualifies f_own/x_own (from the FIFO), f_child and
// tau_in. Timing: one cycle, outputs registered. The full-parallel datapath
// is this implementation's choice.
module rnea_bwd_unit
  import draco_pkg::*;
#(
  parameter int unsigned N = 7,   // joints in the chain
  parameter int unsigned J = 0    // this unit's joint index, 0-based
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  v6_t    f_own,
  input  xform_t x_own,
  input  v6_t    f_child,
  input  fx_t [N-1:0] tau_in,
  output logic   out_valid,
  output v6_t    f_par,
  output fx_t [N-1:0] tau_out
);
  v6_t ftot, fp;
  fx_t [N-1:0] tau_c;

  always_comb begin
    for (int k = 0; k < 6; k++) ftot[k] = f_own[k] + f_child[k];
    fp = xft(x_own, ftot);
    tau_c = tau_in;
    tau_c[J] = ftot[2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      f_par   <= fp;
      tau_out <= tau_c;
    end
  end
endmodule
