// specwands_core: the hardened issue stage of a two-thread SMT out-of-order
// core: ROB status partitions, speculation checkers, the reservation station
// with per-port NOP/LOP/EOP select logic, the issue ports with their control
// registers and Victim_Slots, and the execution units behind them.
//
// Data flow: each thread's front end (not modelled: fetch, decode, rename,
// branch prediction, caches and the register file are outside this block)
// offers one op per cycle on fe_*; the op gets a ROB entry of its thread and
// a reservation-station entry in the same cycle. The speculation checker of
// each thread tags ROB entries as (non-)speculative; the reservation
// station copies those tags, and the select logic of each port issues by the
// three policies. Preempted divider ops return through the Victim_Slot.
// Branch ops resolve when they complete: a correct one lets the checker
// advance, a mispredicted one squashes the younger ops of its thread
// everywhere in the same cycle. Completed ops retire in order, one per
// thread per cycle.
//
// mode_all selects the definition of "non-speculative": 0 = Spectre mode
// (all older branches resolved), 1 = All mode (op at the ROB head).
//
// Operand values travel with the op (op1/op2) and results leave on
// result[]; a register dependence only delays issue (fe.dep_dist).
// The ev_* outputs pulse once per event and exist for observation.
module specwands_core
  import sw_pkg::*;
#(
  parameter int unsigned NUM_PORTS  = 8,
  parameter int unsigned RS_ENTRIES = 64,
  parameter int unsigned ROB_DEPTH  = ROB_PER_T,
  parameter int unsigned SCAN_W     = 8,
  parameter int unsigned DIV_BPC    = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mode_all,
  // front end, one op per thread per cycle
  input  logic       fe_valid [NUM_THREADS],
  input  fe_op_t     fe_op    [NUM_THREADS],
  output logic       fe_ready [NUM_THREADS],
  output seq_t       fe_seq   [NUM_THREADS],
  // results, retirement, squash
  output result_t    result   [NUM_PORTS],
  output logic       retire_valid [NUM_THREADS],
  output seq_t       retire_seq   [NUM_THREADS],
  output logic       squash_valid [NUM_THREADS],
  output seq_t       squash_seq   [NUM_THREADS],
  // observation
  output port_ctrl_t port_ctrl       [NUM_PORTS],
  output logic       ev_issue        [NUM_PORTS],
  output logic       ev_preempt_nop  [NUM_PORTS],
  output logic       ev_preempt_eop  [NUM_PORTS],
  output logic       ev_lop_block    [NUM_PORTS],
  output logic       ev_owner_switch [NUM_PORTS],
  output logic       ev_reinsert     [NUM_PORTS],
  output logic       ev_squash_kill  [NUM_PORTS],
  output logic [SSC_REG_W-1:0] ssc_last_pos [NUM_THREADS],
  output logic [SSC_REG_W-1:0] ssc_last_ns  [NUM_THREADS],
  output logic [SSC_REG_W-1:0] ssc_counter  [NUM_THREADS],
  output logic [$clog2(RS_ENTRIES):0] rs_occupancy [NUM_THREADS]
);

  // ---------------- per-thread ROB + checker ----------------
  logic               rob_alloc_ready [NUM_THREADS];
  rob_idx_t           rob_alloc_idx   [NUM_THREADS];
  seq_t               rob_alloc_seq   [NUM_THREADS];
  rob_idx_t           rob_head        [NUM_THREADS];
  logic [ROB_IDX_W:0] rob_count       [NUM_THREADS];
  logic [ROB_DEPTH-1:0] rob_valid [NUM_THREADS];
  logic [ROB_DEPTH-1:0] rob_br    [NUM_THREADS];
  logic [ROB_DEPTH-1:0] rob_res   [NUM_THREADS];
  logic [ROB_DEPTH-1:0] rob_done  [NUM_THREADS];
  seq_t               rob_seq   [NUM_THREADS][ROB_DEPTH];
  spec_tag_t          ssc_tag   [NUM_THREADS][ROB_DEPTH];
  rob_idx_t           sq_idx    [NUM_THREADS];
  logic               spec_upd  [NUM_THREADS];
  logic               accept    [NUM_THREADS];
  logic               rs_disp_ready [NUM_THREADS];

  op_t      disp_op        [NUM_THREADS];
  logic     disp_dep_valid [NUM_THREADS];
  rob_idx_t disp_dep_idx   [NUM_THREADS];
  seq_t     disp_dep_seq   [NUM_THREADS];

  for (genvar t = 0; t < NUM_THREADS; t++) begin : g_thr
    assign fe_ready[t] = rob_alloc_ready[t] && rs_disp_ready[t];
    assign accept[t]   = fe_valid[t] && fe_ready[t];
    assign fe_seq[t]   = rob_alloc_seq[t];

    always_comb begin
      automatic logic [ROB_IDX_W:0] back;
      disp_op[t].tid        = tid_t'(t);
      disp_op[t].rob_idx    = rob_alloc_idx[t];
      disp_op[t].seq        = rob_alloc_seq[t];
      disp_op[t].port       = fe_op[t].port;
      disp_op[t].uop        = fe_op[t].uop;
      disp_op[t].mispredict = fe_op[t].mispredict;
      disp_op[t].op1        = fe_op[t].op1;
      disp_op[t].op2        = fe_op[t].op2;
      disp_dep_valid[t]     = fe_op[t].dep_dist != '0;
      disp_dep_seq[t]       = rob_alloc_seq[t] - seq_t'(fe_op[t].dep_dist);
      back = (ROB_IDX_W+1)'(rob_alloc_idx[t]) - (ROB_IDX_W+1)'(fe_op[t].dep_dist);
      if (back[ROB_IDX_W]) back = back + (ROB_IDX_W+1)'(ROB_DEPTH);  // wrapped
      disp_dep_idx[t] = rob_idx_t'(back);
    end

    sw_rob #(.DEPTH(ROB_DEPTH), .NCMPL(NUM_PORTS), .THREAD_ID(tid_t'(t))) u_rob (
      .clk, .rst_n,
      .alloc_valid     (accept[t]),
      .alloc_is_branch (fe_op[t].uop == UOP_BR),
      .alloc_ready     (rob_alloc_ready[t]),
      .alloc_idx       (rob_alloc_idx[t]),
      .alloc_seq       (rob_alloc_seq[t]),
      .cmpl            (result),
      .head            (rob_head[t]),
      .count           (rob_count[t]),
      .ent_valid       (rob_valid[t]),
      .br_flag         (rob_br[t]),
      .res_flag        (rob_res[t]),
      .done_flag       (rob_done[t]),
      .ent_seq         (rob_seq[t]),
      .retire_valid    (retire_valid[t]),
      .retire_seq      (retire_seq[t]),
      .squash_valid    (squash_valid[t]),
      .squash_seq      (squash_seq[t]),
      .squash_idx      (sq_idx[t]),
      .spec_update     (spec_upd[t])
    );

    sw_ssc #(.DEPTH(ROB_DEPTH), .SCAN_W(SCAN_W)) u_ssc (
      .clk, .rst_n,
      .mode_all            (mode_all),
      .head                (rob_head[t]),
      .count               (rob_count[t]),
      .br_flag             (rob_br[t]),
      .res_flag            (rob_res[t]),
      .ent_seq             (rob_seq[t]),
      .alloc_valid         (accept[t]),
      .alloc_idx           (rob_alloc_idx[t]),
      .retire_valid        (retire_valid[t]),
      .squash_valid        (squash_valid[t]),
      .squash_idx          (sq_idx[t]),
      .spec_update         (spec_upd[t]),
      .tag                 (ssc_tag[t]),
      .last_pos            (ssc_last_pos[t]),
      .last_ns             (ssc_last_ns[t]),
      .spec_degree_counter (ssc_counter[t])
    );
  end

  // ---------------- reservation station ----------------
  logic      victim_valid   [NUM_PORTS];
  op_t       victim_op      [NUM_PORTS];
  logic      reinsert_valid [NUM_PORTS];
  op_t       reinsert_op    [NUM_PORTS];
  logic      issue_valid    [NUM_PORTS];
  op_t       issue_op       [NUM_PORTS];
  spec_tag_t issue_tag      [NUM_PORTS];
  logic      issue_preempt  [NUM_PORTS];
  logic      issue_by_nop   [NUM_PORTS];
  logic      issue_by_eop   [NUM_PORTS];

  sw_rs #(.N(RS_ENTRIES), .NUM_PORTS(NUM_PORTS), .DEPTH(ROB_DEPTH)) u_rs (
    .clk, .rst_n,
    .mode_all       (mode_all),
    .disp_valid     (accept),
    .disp_op        (disp_op),
    .disp_dep_valid (disp_dep_valid),
    .disp_dep_idx   (disp_dep_idx),
    .disp_dep_seq   (disp_dep_seq),
    .disp_ready     (rs_disp_ready),
    .rob_valid      (rob_valid),
    .rob_done       (rob_done),
    .rob_seq        (rob_seq),
    .ssc_tag        (ssc_tag),
    .squash_valid   (squash_valid),
    .squash_seq     (squash_seq),
    .port_ctrl      (port_ctrl),
    .victim_valid   (victim_valid),
    .victim_op      (victim_op),
    .reinsert_valid (reinsert_valid),
    .reinsert_op    (reinsert_op),
    .issue_valid    (issue_valid),
    .issue_op       (issue_op),
    .issue_tag      (issue_tag),
    .issue_preempt  (issue_preempt),
    .issue_by_nop   (issue_by_nop),
    .issue_by_eop   (issue_by_eop),
    .lop_blocked    (ev_lop_block),
    .occupancy      (rs_occupancy)
  );

  // ---------------- issue ports + execution units ----------------
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    logic      eu_start, kill;
    op_t       eu_op;
    spec_tag_t occ_tag;

    assign occ_tag = ssc_tag[victim_op[p].tid][victim_op[p].rob_idx];

    sw_issue_port u_port (
      .clk, .rst_n,
      .issue_valid    (issue_valid[p]),
      .issue_op       (issue_op[p]),
      .issue_tag      (issue_tag[p]),
      .preempt        (issue_preempt[p]),
      .occ_tag        (occ_tag),
      .eu_result      (result[p]),
      .squash_valid   (squash_valid),
      .squash_seq     (squash_seq),
      .ctrl           (port_ctrl[p]),
      .eu_start       (eu_start),
      .eu_op          (eu_op),
      .kill           (kill),
      .victim_valid   (victim_valid[p]),
      .victim_op      (victim_op[p]),
      .reinsert_valid (reinsert_valid[p]),
      .reinsert_op    (reinsert_op[p])
    );

    sw_exec_unit #(.BPC(DIV_BPC)) u_eu (
      .clk, .rst_n,
      .start  (eu_start),
      .op     (eu_op),
      .kill   (kill),
      .result (result[p]),
      .busy   ()
    );

    assign ev_issue[p]        = issue_valid[p];
    assign ev_preempt_nop[p]  = issue_by_nop[p];
    assign ev_preempt_eop[p]  = issue_by_eop[p];
    assign ev_owner_switch[p] = issue_valid[p] && issue_op[p].tid != port_ctrl[p].owner_tid;
    assign ev_reinsert[p]     = reinsert_valid[p];
    assign ev_squash_kill[p]  = kill && !issue_preempt[p];
  end

endmodule
