// sw_rs: reservation station of the two-thread core, with one NOP/LOP/EOP
// select unit per issue port.
//
// N entries (64) are fairly partitioned: thread t owns entries
// [t*N/2, (t+1)*N/2). Each entry holds an op, one source dependence
// (ROB index and sequence number of its producer) and the two speculation
// fields Spec_Flag / Spec_Degree, which are refreshed every cycle from the
// speculation checker of the entry's thread.
//
// An entry is ready when its producer has completed or has left the ROB.
// Each port's sw_select picks at most one ready entry for that port per
// cycle; the picked entry leaves the station at the clock edge. A preempted
// op comes back from its port's Victim_Slot (reinsert_*) in the cycle of the
// preemption and takes a free entry of its thread's partition. To make sure
// that entry exists, dispatch into a partition is allowed only while its free
// entries outnumber the ops of that thread sitting in Victim_Slots.
// Entries younger than a mispredicted branch are dropped in the squash cycle
// and are not offered to the select logic in that cycle.
//
// Tags are copied from the checker at every clock edge, so they are one
// cycle old. In the cycle right after dispatch an entry has no copy yet: it
// is then speculative with degree 127 in Spectre mode (the youngest possible
// position, which keeps the per-thread order of tags intact) and carries its
// own sequence number in All mode.
//
// One dispatch per thread per cycle, the one-source dependence model and the
// reservation rule are this design's choices; the partitioning, the size
// and the tag fields follow the source.
module sw_rs
  import sw_pkg::*;
#(
  parameter int unsigned N         = 64,
  parameter int unsigned NUM_PORTS = 8,
  parameter int unsigned DEPTH     = ROB_PER_T
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               mode_all,
  // dispatch, one op per thread
  input  logic               disp_valid     [NUM_THREADS],
  input  op_t                disp_op        [NUM_THREADS],
  input  logic               disp_dep_valid [NUM_THREADS],
  input  rob_idx_t           disp_dep_idx   [NUM_THREADS],
  input  seq_t               disp_dep_seq   [NUM_THREADS],
  output logic               disp_ready     [NUM_THREADS],
  // ROB and checker state
  input  logic [DEPTH-1:0]   rob_valid [NUM_THREADS],
  input  logic [DEPTH-1:0]   rob_done  [NUM_THREADS],
  input  seq_t               rob_seq   [NUM_THREADS][DEPTH],
  input  spec_tag_t          ssc_tag   [NUM_THREADS][DEPTH],
  // squash
  input  logic               squash_valid [NUM_THREADS],
  input  seq_t               squash_seq   [NUM_THREADS],
  // ports
  input  port_ctrl_t         port_ctrl      [NUM_PORTS],
  input  logic               victim_valid   [NUM_PORTS],
  input  op_t                victim_op      [NUM_PORTS],
  input  logic               reinsert_valid [NUM_PORTS],
  input  op_t                reinsert_op    [NUM_PORTS],
  output logic               issue_valid    [NUM_PORTS],
  output op_t                issue_op       [NUM_PORTS],
  output spec_tag_t          issue_tag      [NUM_PORTS],
  output logic               issue_preempt  [NUM_PORTS],
  output logic               issue_by_nop   [NUM_PORTS],
  output logic               issue_by_eop   [NUM_PORTS],
  output logic               lop_blocked    [NUM_PORTS],
  output logic [$clog2(N):0] occupancy      [NUM_THREADS]
);

  localparam int unsigned HALF  = N / NUM_THREADS;
  localparam int unsigned IDX_W = $clog2(N);

  typedef struct packed {
    logic      valid;
    op_t       op;
    logic      dep_valid;
    rob_idx_t  dep_idx;
    seq_t      dep_seq;
    spec_tag_t tag;
  } rs_entry_t;

  rs_entry_t ent_q [N];
  rs_entry_t ent_d [N];

  // ---------------- readiness and squash ----------------
  logic [N-1:0] ready, squashing;
  tid_t         ent_tid [N];
  spec_tag_t    ent_tag [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      automatic tid_t t = ent_q[i].op.tid;
      automatic rob_idx_t d = ent_q[i].dep_idx;
      ent_tid[i]   = t;
      ent_tag[i]   = ent_q[i].tag;
      squashing[i] = ent_q[i].valid && squash_valid[t] &&
                     seq_older(squash_seq[t], ent_q[i].op.seq);
      ready[i]     = ent_q[i].valid && !squashing[i] &&
                     (!ent_q[i].dep_valid || !rob_valid[t][d] ||
                      rob_seq[t][d] != ent_q[i].dep_seq || rob_done[t][d]);
    end
  end

  // ---------------- per-port selection ----------------
  logic [N-1:0]     port_req [NUM_PORTS];
  logic [IDX_W-1:0] gidx     [NUM_PORTS];
  logic [N-1:0]     issued;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    always_comb begin
      for (int i = 0; i < N; i++)
        port_req[p][i] = ready[i] && (32'(ent_q[i].op.port) == p);
    end
    sw_select #(.N(N)) u_sel (
      .mode_all    (mode_all),
      .ctrl        (port_ctrl[p]),
      .req         (port_req[p]),
      .tid         (ent_tid),
      .tag         (ent_tag),
      .grant_valid (issue_valid[p]),
      .grant_idx   (gidx[p]),
      .preempt     (issue_preempt[p]),
      .by_nop      (issue_by_nop[p]),
      .by_eop      (issue_by_eop[p]),
      .lop_blocked (lop_blocked[p])
    );
    assign issue_op[p]  = ent_q[gidx[p]].op;
    assign issue_tag[p] = ent_q[gidx[p]].tag;
  end

  always_comb begin
    issued = '0;
    for (int p = 0; p < NUM_PORTS; p++)
      if (issue_valid[p]) issued[gidx[p]] = 1'b1;
  end

  // ---------------- dispatch reservation ----------------
  logic [$clog2(N):0] free_cnt [NUM_THREADS];
  logic [$clog2(N):0] vic_cnt  [NUM_THREADS];
  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      free_cnt[t]  = '0;
      vic_cnt[t]   = '0;
      occupancy[t] = '0;
      for (int i = t * HALF; i < (t + 1) * HALF; i++) begin
        if (!ent_q[i].valid) free_cnt[t]++;
        else occupancy[t]++;
      end
      for (int p = 0; p < NUM_PORTS; p++)
        if (victim_valid[p] && 32'(victim_op[p].tid) == t) vic_cnt[t]++;
      disp_ready[t] = free_cnt[t] > vic_cnt[t];
    end
  end

  // ---------------- next state ----------------
  always_comb begin
    logic [N-1:0] claimed;
    logic         placed;
    claimed = '0;
    for (int i = 0; i < N; i++) begin
      ent_d[i] = ent_q[i];
      if (issued[i] || squashing[i]) ent_d[i].valid = 1'b0;
      // Spec_Flag / Spec_Degree refresh from the checker
      if (ent_q[i].valid) ent_d[i].tag = ssc_tag[ent_q[i].op.tid][ent_q[i].op.rob_idx];
    end
    // re-insert preempted ops first, then dispatch
    for (int p = 0; p < NUM_PORTS; p++) begin
      placed = 1'b0;
      if (reinsert_valid[p] &&
          !(squash_valid[reinsert_op[p].tid] &&
            seq_older(squash_seq[reinsert_op[p].tid], reinsert_op[p].seq))) begin
        for (int i = 0; i < N; i++) begin
          if (!placed && !ent_q[i].valid && !claimed[i] &&
              i / HALF == 32'(reinsert_op[p].tid)) begin
            placed          = 1'b1;
            claimed[i]      = 1'b1;
            ent_d[i].valid  = 1'b1;
            ent_d[i].op     = reinsert_op[p];
            ent_d[i].dep_valid = 1'b0;     // it had issued: operands ready
            ent_d[i].tag    = ssc_tag[reinsert_op[p].tid][reinsert_op[p].rob_idx];
          end
        end
      end
    end
    for (int t = 0; t < NUM_THREADS; t++) begin
      placed = 1'b0;
      if (disp_valid[t] && disp_ready[t]) begin
        for (int i = t * HALF; i < (t + 1) * HALF; i++) begin
          if (!placed && !ent_q[i].valid && !claimed[i]) begin
            placed             = 1'b1;
            claimed[i]         = 1'b1;
            ent_d[i].valid     = 1'b1;
            ent_d[i].op        = disp_op[t];
            ent_d[i].op.tid    = tid_t'(t);
            ent_d[i].dep_valid = disp_dep_valid[t];
            ent_d[i].dep_idx   = disp_dep_idx[t];
            ent_d[i].dep_seq   = disp_dep_seq[t];
            // first-cycle tag before the checker's copy arrives: the most
            // speculative degree in Spectre mode (never earlier than an older
            // op); in All mode the op's own sequence number, which is exact
            ent_d[i].tag       = '{spec_flag: 1'b0,
                                   spec_degree: mode_all ? deg_t'(disp_op[t].seq)
                                                         : deg_t'(DEG_MAX)};
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) ent_q[i] <= '0;
    end else begin
      for (int i = 0; i < N; i++) ent_q[i] <= ent_d[i];
    end
  end

endmodule
