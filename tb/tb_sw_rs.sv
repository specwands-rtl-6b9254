// tb_sw_rs: self-checking test of the reservation station with its per-port
// select logic.
//
// The testbench plays the ROB, the speculation checker and the ports: it
// drives ROB state for dependences, the speculation tags and the port
// control registers, and checks which op each port issues and when:
// plain issue, wait on a producer, LOP hold and release once the op turns
// non-speculative (one cycle after the checker's tag changes, since the
// station copies tags), NOP preemption request, re-insertion of a preempted
// op, squash of younger ops, the partition limit and the dispatch
// reservation for ops sitting in Victim_Slots, two ports issuing in the
// same cycle, and the All-mode ordering key of an entry in its first cycle.
module tb_sw_rs;
  import sw_pkg::*;

  localparam int N = 8, P = 2, DEPTH = 8;

  logic      clk = 0, rst_n = 0;
  logic      mode_all;
  logic      disp_valid [NUM_THREADS];
  op_t       disp_op [NUM_THREADS];
  logic      disp_dep_valid [NUM_THREADS];
  rob_idx_t  disp_dep_idx [NUM_THREADS];
  seq_t      disp_dep_seq [NUM_THREADS];
  logic      disp_ready [NUM_THREADS];
  logic [DEPTH-1:0] rob_valid [NUM_THREADS];
  logic [DEPTH-1:0] rob_done  [NUM_THREADS];
  seq_t      rob_seq [NUM_THREADS][DEPTH];
  spec_tag_t ssc_tag [NUM_THREADS][DEPTH];
  logic      squash_valid [NUM_THREADS];
  seq_t      squash_seq [NUM_THREADS];
  port_ctrl_t port_ctrl [P];
  logic      victim_valid [P];
  op_t       victim_op [P];
  logic      reinsert_valid [P];
  op_t       reinsert_op [P];
  logic      issue_valid [P];
  op_t       issue_op [P];
  spec_tag_t issue_tag [P];
  logic      issue_preempt [P], issue_by_nop [P], issue_by_eop [P], lop_blocked [P];
  logic [$clog2(N):0] occupancy [NUM_THREADS];

  int checks = 0, failures = 0;

  sw_rs #(.N(N), .NUM_PORTS(P), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic op_t mk(tid_t t, int idx, int seq, int port, uop_e u);
    op_t o;
    o = '0;
    o.tid = t; o.rob_idx = rob_idx_t'(idx); o.seq = seq_t'(seq);
    o.port = 3'(port); o.uop = u; o.op1 = 32'(seq); o.op2 = 32'd1;
    return o;
  endfunction

  task automatic idle_inputs();
    for (int t = 0; t < NUM_THREADS; t++) begin
      disp_valid[t] = 0; disp_dep_valid[t] = 0; squash_valid[t] = 0;
    end
    for (int p = 0; p < P; p++) reinsert_valid[p] = 0;
  endtask

  task automatic dispatch(op_t o, bit dep = 0, int didx = 0, int dseq = 0);
    disp_valid[o.tid] = 1; disp_op[o.tid] = o;
    disp_dep_valid[o.tid] = dep; disp_dep_idx[o.tid] = rob_idx_t'(didx);
    disp_dep_seq[o.tid] = seq_t'(dseq);
    @(negedge clk);
    idle_inputs();
  endtask

  // wait up to n cycles for port p to issue seq s of thread t; returns cycles
  task automatic wait_issue(int p, tid_t t, int s, int n, output int waited);
    waited = -1;
    for (int k = 0; k < n; k++) begin
      #1;
      if (issue_valid[p] && issue_op[p].tid == t && issue_op[p].seq == seq_t'(s)) begin
        waited = k;
        @(negedge clk);
        return;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    int w;
    mode_all = 0;
    idle_inputs();
    for (int t = 0; t < NUM_THREADS; t++) begin
      rob_valid[t] = '0; rob_done[t] = '0; squash_seq[t] = '0;
      disp_op[t] = '0; disp_dep_idx[t] = '0; disp_dep_seq[t] = '0;
      for (int i = 0; i < DEPTH; i++) begin
        rob_seq[t][i] = '0; ssc_tag[t][i] = '{1'b0, 7'd1};
      end
    end
    for (int p = 0; p < P; p++) begin
      port_ctrl[p] = '{free_flag: 1'b1, owner_tid: 1'b0, owner_spec_flag: 1'b0, owner_spec_degree: '0};
      victim_valid[p] = 0; victim_op[p] = '0; reinsert_op[p] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. plain issue on the owner's free port, next cycle after dispatch
    dispatch(mk(0, 0, 0, 0, UOP_ADD));
    wait_issue(0, 0, 0, 4, w);
    expect_eq("plain issue delay", w, 0);
    #1 expect_eq("entry freed", occupancy[0], 0);

    // 2. dependence: producer ROB[3] seq 7 not done
    rob_valid[0][3] = 1; rob_seq[0][3] = 7; rob_done[0][3] = 0;
    dispatch(mk(0, 4, 8, 0, UOP_ADD), 1, 3, 7);
    wait_issue(0, 0, 8, 5, w);
    expect_eq("waits for producer", w, -1);
    rob_done[0][3] = 1;
    wait_issue(0, 0, 8, 3, w);
    expect_eq("issues once producer done", w, 0);

    // 3. LOP: last owner of port 1 is HT1; a speculative HT0 op waits
    port_ctrl[1].owner_tid = 1;
    ssc_tag[0][5] = '{1'b0, 7'd2};
    dispatch(mk(0, 5, 9, 1, UOP_DIV));
    #1;
    expect_eq("lop blocked", lop_blocked[1], 1);
    wait_issue(1, 0, 9, 5, w);
    expect_eq("LOP holds speculative op", w, -1);
    ssc_tag[0][5] = '{1'b1, 7'd0};   // becomes non-speculative
    @(negedge clk); #1;             // tag copied into the RS entry
    expect_eq("NOP grant after tag update", issue_valid[1], 1);
    expect_eq("no preempt on free port", issue_preempt[1], 0);
    @(negedge clk);
    port_ctrl[1].owner_tid = 0;

    // 4. NOP preemption request: port 0 busy with a speculative HT1 op
    port_ctrl[0] = '{free_flag: 1'b0, owner_tid: 1'b1, owner_spec_flag: 1'b0, owner_spec_degree: 7'd3};
    ssc_tag[0][6] = '{1'b1, 7'd0};
    dispatch(mk(0, 6, 10, 0, UOP_DIV));
    @(negedge clk); #1;
    expect_eq("preempt request", issue_valid[0] && issue_preempt[0] && issue_by_nop[0], 1);
    @(negedge clk);
    port_ctrl[0] = '{free_flag: 1'b1, owner_tid: 1'b0, owner_spec_flag: 1'b0, owner_spec_degree: '0};

    // 5. re-insertion of a preempted op, then it issues again
    port_ctrl[1] = '{free_flag: 1'b0, owner_tid: 1'b1, owner_spec_flag: 1'b1, owner_spec_degree: '0};
    reinsert_valid[1] = 1; reinsert_op[1] = mk(1, 2, 20, 1, UOP_DIV);
    @(negedge clk);
    idle_inputs();
    #1 expect_eq("reinserted entry", occupancy[1], 1);
    port_ctrl[1].free_flag = 1; port_ctrl[1].owner_spec_flag = 0;
    wait_issue(1, 1, 20, 3, w);
    expect_eq("reinserted op issues", w, 0);

    // 6. squash: HT1 ops seq 30 (branch), 31, 32 on a port owned by HT0
    port_ctrl[0].owner_tid = 0;
    ssc_tag[1][0] = '{1'b0, 7'd1};
    ssc_tag[1][1] = '{1'b0, 7'd1};
    ssc_tag[1][2] = '{1'b0, 7'd1};
    dispatch(mk(1, 0, 30, 0, UOP_BR));
    dispatch(mk(1, 1, 31, 0, UOP_ADD));
    dispatch(mk(1, 2, 32, 0, UOP_ADD));
    #1 expect_eq("three HT1 entries", occupancy[1], 3);
    squash_valid[1] = 1; squash_seq[1] = 7'd30;
    #1 expect_eq("squashed ops not offered", issue_valid[0], 0);
    @(negedge clk);
    idle_inputs();
    #1 expect_eq("younger ops dropped", occupancy[1], 1);
    port_ctrl[0].owner_tid = 1;
    wait_issue(0, 1, 30, 3, w);
    expect_eq("branch survives", w, 0);

    // 7. partition limit and Victim_Slot reservation (HT0 half = 4 entries)
    port_ctrl[1] = '{free_flag: 1'b1, owner_tid: 1'b1, owner_spec_flag: 1'b0, owner_spec_degree: '0};
    for (int i = 0; i < DEPTH; i++) ssc_tag[0][i] = '{1'b0, 7'd1};
    victim_valid[0] = 1; victim_op[0] = mk(0, 7, 50, 0, UOP_DIV);
    for (int k = 0; k < 3; k++) dispatch(mk(0, k, 40 + k, 1, UOP_ADD));
    #1;
    expect_eq("HT0 entries held by LOP", occupancy[0], 3);
    expect_eq("last entry reserved for the victim", disp_ready[0], 0);
    expect_eq("HT1 may still dispatch", disp_ready[1], 1);
    victim_valid[0] = 0;
    #1 expect_eq("reservation released", disp_ready[0], 1);
    dispatch(mk(0, 3, 43, 1, UOP_ADD));
    #1 expect_eq("partition full", disp_ready[0], 0);

    // 8. two ports issue in the same cycle; EOP order on port 1
    for (int i = 0; i < DEPTH; i++) ssc_tag[0][i] = '{1'b0, 7'(6 - i)};
    port_ctrl[1].owner_tid = 0;
    dispatch(mk(1, 4, 60, 0, UOP_ADD));
    #1;
    expect_eq("port0 issues", issue_valid[0], 1);
    expect_eq("port1 issues", issue_valid[1], 1);
    expect_eq("EOP: smallest degree first", issue_op[1].seq, 43);
    @(negedge clk);

    // 9. All mode: before the checker's tag is copied, a new entry carries
    //    its own sequence number as the ordering key
    mode_all = 1;
    port_ctrl[0] = '{free_flag: 1'b1, owner_tid: 1'b1, owner_spec_flag: 1'b0, owner_spec_degree: '0};
    dispatch(mk(1, 5, 70, 0, UOP_DIV));
    #1;
    expect_eq("all-mode first-cycle issue", issue_valid[0] && issue_op[0].seq == 70, 1);
    expect_eq("all-mode first-cycle key", issue_tag[0].spec_degree, 70);
    @(negedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
