// dsp_alloc_ctrl: inter-module DSP reuse controller and task issue pacing.
//
// Two DSP groups are shared between module pairs: DSP_DR between RNEA and
// dRNEA, DSP_MR between RNEA and Minv. Which module owns them depends on the
// RBD function being computed, so that the modules working together run at
// the same initiation interval (II) and none idles waiting for a slower one:
//   function  DSP_DR   DSP_MR   active modules            II
//   ID        RNEA     RNEA     RNEA                      II_ID   (3)
//   Minv      idle     Minv     Minv                      II_MINV (4, assumed)
//   FD        idle     Minv     RNEA, Minv, multiplier    II_FD   (4)
//   dID       dRNEA    idle     RNEA, dRNEA               II_DID  (4)
//   dFD       dRNEA    Minv     RNEA, dRNEA, Minv, mult.  II_DFD  (4, assumed)
// RNEA holds the shared groups only when ID runs alone; with any partner it
// gives them up. A group whose partner module is inactive stays idle.
// The controller keeps the current function. A task of another function is
// held (mode switch) until no task is in flight, then the allocation changes.
// Tasks of the current function are issued at most once every II cycles.
//
// Interface: req_valid/req_fn from the task source, inflight (tasks issued and
// not yet finished); issue (task accepted this cycle), cur_fn, the owner
// selects and module enables, and event pulses ii_stall (a task waited for
// its II slot) and mode_switch (allocation changed).
// Timing: issue is combinational from req_valid; the first task after reset
// or after a drained mode switch issues in the cycle after the switch.
// The II numbers for ID, FD and dID follow the design's schedule; those for
// Minv alone and dFD are assumed. The owner selects are outputs: the
// per-unit multiplier datapaths here are fully parallel, so the selects
// document the allocation rather than steer physical multipliers.
module dsp_alloc_ctrl
  import draco_pkg::*;
#(
  parameter int unsigned II_ID   = 3,
  parameter int unsigned II_MINV = 4,
  parameter int unsigned II_FD   = 4,
  parameter int unsigned II_DID  = 4,
  parameter int unsigned II_DFD  = 4,
  parameter int unsigned CNT_W   = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  input  fn_e              req_fn,
  input  logic [CNT_W-1:0] inflight,
  output logic             issue,
  output fn_e              cur_fn,
  output logic [3:0]       cur_ii,
  output logic             shared_to_rnea, // DSP_DR and DSP_MR owned by RNEA
  output logic             dr_to_drnea,    // DSP_DR owned by dRNEA
  output logic             mr_to_minv,     // DSP_MR owned by Minv
  output logic             en_rnea,
  output logic             en_minv,
  output logic             en_drnea,
  output logic             en_mul,
  output logic             ii_stall,
  output logic             mode_switch
);
  logic [3:0] since;  // cycles since the last issue, saturating
  logic       switch_now;

  function automatic logic [3:0] ii_of(fn_e f);
    case (f)
      FN_ID:   return 4'(II_ID);
      FN_MINV: return 4'(II_MINV);
      FN_FD:   return 4'(II_FD);
      FN_DID:  return 4'(II_DID);
      default: return 4'(II_DFD);
    endcase
  endfunction

  assign cur_ii      = ii_of(cur_fn);
  assign switch_now  = req_valid && (req_fn != cur_fn) && (inflight == '0);
  assign issue       = req_valid && (req_fn == cur_fn) && (since >= cur_ii);
  assign ii_stall    = req_valid && (req_fn == cur_fn) && (since < cur_ii);
  assign mode_switch = switch_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_fn <= FN_ID;
      since  <= 4'hF;
    end else begin
      if (switch_now) cur_fn <= req_fn;
      if (issue)            since <= 4'd1;
      else if (since != 4'hF) since <= since + 4'd1;
    end
  end

  always_comb begin
    shared_to_rnea = (cur_fn == FN_ID);
    dr_to_drnea = (cur_fn == FN_DID) || (cur_fn == FN_DFD);
    mr_to_minv  = (cur_fn == FN_MINV) || (cur_fn == FN_FD) || (cur_fn == FN_DFD);
    en_rnea     = (cur_fn != FN_MINV);
    en_minv     = (cur_fn == FN_MINV) || (cur_fn == FN_FD) || (cur_fn == FN_DFD);
    en_drnea    = (cur_fn == FN_DID) || (cur_fn == FN_DFD);
    en_mul      = (cur_fn == FN_FD) || (cur_fn == FN_DFD);
  end

  a_no_mixed_issue: assert property (@(posedge clk) disable iff (!rst_n)
                                     issue |-> req_fn == cur_fn);
endmodule
