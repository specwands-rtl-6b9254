// sw_issue_port: one issue port's control register and Victim_Slot.
//
// The control register holds Free_Flag, Owner_TID, Owner_Spec_Flag and
// Owner_Spec_Degree. Owner_TID survives the release of the port: it names
// the thread that used the port last, which is what the LOP policy needs.
// Owner_Spec_Flag is cleared when the port is released, as in the source's
// acquire/release model ("port.status := false").
//
// Every op issued to the unpipelined unit is also copied into the
// Victim_Slot. When the select logic decides to preempt (NOP or EOP), the
// port asserts kill to its execution unit and hands the Victim_Slot content
// back to the reservation station (reinsert_*) in the same cycle, while the
// new op is written into the slot. Pipelined ops hold the port only for the
// cycle they issue in, so the port is free again in the next cycle.
//
// The register tracks the occupant's speculation tag while it runs
// (occ_tag, looked up from the checker), so an occupant that becomes
// non-speculative is no longer preemptable; this refresh is this design's
// choice. An occupant younger than a mispredicted branch of its thread is
// killed without re-insertion.
//
// Timing: ctrl is valid in the same cycle and already shows the port free
// in a cycle in which the occupant completes or is squashed. kill and
// reinsert_* are combinational and last one cycle. eu_start/eu_op are the
// granted op passed straight to the unit (the port adds no pipeline stage),
// so those output bits follow inputs directly.
module sw_issue_port
  import sw_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // issue request from the select logic (already granted by the policy)
  input  logic        issue_valid,
  input  op_t         issue_op,
  input  spec_tag_t   issue_tag,
  input  logic        preempt,
  // current tag of the occupant, from the speculation checker
  input  spec_tag_t   occ_tag,
  // result bus of this port's execution unit
  input  result_t     eu_result,
  // per-thread squash
  input  logic        squash_valid [NUM_THREADS],
  input  seq_t        squash_seq   [NUM_THREADS],
  // control register
  output port_ctrl_t  ctrl,
  // to the execution unit
  output logic        eu_start,
  output op_t         eu_op,
  output logic        kill,
  // Victim_Slot
  output logic        victim_valid,
  output op_t         victim_op,
  output logic        reinsert_valid,
  output op_t         reinsert_op
);

  logic       occ_q;     // the unpipelined unit holds victim_q
  op_t        victim_q;
  tid_t       owner_tid_q;
  logic       owner_sf_q;
  deg_t       owner_deg_q;

  logic occ_done, occ_squashed, occ_gone;
  assign occ_done     = occ_q && eu_result.valid && eu_result.tid == victim_q.tid &&
                        eu_result.seq == victim_q.seq && eu_result.rob_idx == victim_q.rob_idx;
  assign occ_squashed = occ_q && squash_valid[victim_q.tid] &&
                        seq_older(squash_seq[victim_q.tid], victim_q.seq);
  assign occ_gone     = occ_done || occ_squashed;

  always_comb begin
    ctrl.free_flag         = !occ_q || occ_gone;
    ctrl.owner_tid         = owner_tid_q;
    ctrl.owner_spec_flag   = ctrl.free_flag ? 1'b0 : owner_sf_q;
    ctrl.owner_spec_degree = owner_deg_q;
  end

  assign eu_start       = issue_valid;
  assign eu_op          = issue_op;
  assign kill           = (issue_valid && preempt) || occ_squashed;
  assign reinsert_valid = issue_valid && preempt && occ_q && !occ_gone;
  assign reinsert_op    = victim_q;
  assign victim_valid   = occ_q;
  assign victim_op      = victim_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ_q       <= 1'b0;
      victim_q    <= '0;
      owner_tid_q <= '0;
      owner_sf_q  <= 1'b0;
      owner_deg_q <= '0;
    end else if (issue_valid) begin
      owner_tid_q <= issue_op.tid;
      owner_deg_q <= issue_tag.spec_degree;
      if (is_unpipelined(issue_op.uop)) begin
        occ_q      <= 1'b1;
        victim_q   <= issue_op;
        owner_sf_q <= issue_tag.spec_flag;
      end else begin
        occ_q      <= 1'b0;
        owner_sf_q <= 1'b0;   // released at the end of the issue cycle
      end
    end else if (occ_gone) begin
      occ_q      <= 1'b0;
      owner_sf_q <= 1'b0;
    end else if (occ_q) begin
      owner_sf_q  <= occ_tag.spec_flag;
      owner_deg_q <= occ_tag.spec_degree;
    end
  end

  // a preemption needs something to preempt; a busy port is only entered
  // by preemption
  a_preempt_has_victim: assert property (@(posedge clk) disable iff (!rst_n)
      issue_valid && preempt |-> occ_q && !occ_gone);
  a_busy_needs_preempt: assert property (@(posedge clk) disable iff (!rst_n)
      issue_valid && !ctrl.free_flag |-> preempt);
  // LOP: a speculative op of another thread never takes the port
  a_lop: assert property (@(posedge clk) disable iff (!rst_n)
      issue_valid && issue_op.tid != owner_tid_q |-> issue_tag.spec_flag);

endmodule
