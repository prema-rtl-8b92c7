// mechanism_select: dynamic choice between DRAIN and CHECKPOINT.
//
// When the scheduling policy picks a candidate other than the running task,
// this block decides whether to really preempt. With
//   rem_cur  = Estimated_cur  - Executed_cur
//   rem_cand = Estimated_cand - Executed_cand
// the policy compares the slowdown each choice inflicts:
//   Degradation_current   = rem_cand / Estimated_cur   (if the candidate runs first)
//   Degradation_candidate = rem_cur  / Estimated_cand  (if the current task drains)
// and returns DRAIN when Degradation_current > Degradation_candidate,
// otherwise CHECKPOINT. The two quotients are compared by cross
// multiplication (rem_cand * Estimated_cand > rem_cur * Estimated_cur), which
// is exact and needs no divider; a remaining time that would be negative
// (the estimate was too short) counts as zero. This is the design's dynamic
// preemption mechanism selection; the static modes force CHECKPOINT or KILL
// for every preemption. Combinational.
module mechanism_select
  import npu_pkg::*;
(
  input  mech_mode_e        mode,
  input  logic [TIME_W-1:0] cur_estimated,
  input  logic [TIME_W-1:0] cur_executed,
  input  logic [TIME_W-1:0] cand_estimated,
  input  logic [TIME_W-1:0] cand_executed,
  output mech_e             mech
);
  logic [TIME_W-1:0]   rem_cur, rem_cand;
  logic [2*TIME_W-1:0] lhs, rhs;

  always_comb begin
    rem_cur  = (cur_executed  >= cur_estimated)  ? '0 : cur_estimated  - cur_executed;
    rem_cand = (cand_executed >= cand_estimated) ? '0 : cand_estimated - cand_executed;
    lhs      = rem_cand * cand_estimated;   // ~ Degradation_current
    rhs      = rem_cur  * cur_estimated;    // ~ Degradation_candidate
    unique case (mode)
      MODE_CHECKPOINT: mech = MECH_CHECKPOINT;
      MODE_KILL:       mech = MECH_KILL;
      default:         mech = (lhs > rhs) ? MECH_DRAIN : MECH_CHECKPOINT;
    endcase
  end
endmodule
