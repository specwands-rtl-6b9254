// tb_sw_issue_port: self-checking test of a port's control register and
// Victim_Slot.
//
// Walks the port through: issue of a speculative divide (port busy, owner
// recorded, op copied into the Victim_Slot), tag refresh while it runs,
// preemption (kill + the old op handed back for re-insertion, the new op in
// the slot, owner switched), completion (port free, Owner_Spec_Flag cleared,
// Owner_TID kept for LOP), a pipelined op (port free again next cycle), and a
// squash of the occupant (kill without re-insertion).
module tb_sw_issue_port;
  import sw_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       issue_valid, preempt;
  op_t        issue_op;
  spec_tag_t  issue_tag, occ_tag;
  result_t    eu_result;
  logic       squash_valid [NUM_THREADS];
  seq_t       squash_seq   [NUM_THREADS];
  port_ctrl_t ctrl;
  logic       eu_start, kill, victim_valid, reinsert_valid;
  op_t        eu_op, victim_op, reinsert_op;

  int checks = 0, failures = 0;

  sw_issue_port dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h exp %0h", what, got, exp);
    end
  endtask

  function automatic op_t mk(uop_e u, tid_t t, seq_t s);
    op_t o;
    o = '0;
    o.uop = u; o.tid = t; o.seq = s; o.rob_idx = rob_idx_t'(s);
    o.op1 = 32'(s) * 3; o.op2 = 32'd5;
    return o;
  endfunction

  task automatic idle();
    issue_valid = 0; preempt = 0; eu_result = '0;
    squash_valid[0] = 0; squash_valid[1] = 0;
  endtask

  initial begin
    op_t a, b;
    idle();
    issue_op = '0; issue_tag = '0; occ_tag = '0;
    squash_seq[0] = '0; squash_seq[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq("reset free", ctrl.free_flag, 1);
    expect_eq("reset owner", ctrl.owner_tid, 0);

    // speculative divide of HT0, degree 3
    a = mk(UOP_DIV, 1'b0, 7'd10);
    issue_valid = 1; issue_op = a; issue_tag = '{1'b0, 7'd3};
    #1;
    expect_eq("start to EU", eu_start, 1);
    expect_eq("no kill on plain issue", kill, 0);
    @(negedge clk);
    idle();
    occ_tag = '{1'b0, 7'd3};
    #1;
    expect_eq("busy", ctrl.free_flag, 0);
    expect_eq("owner HT0", ctrl.owner_tid, 0);
    expect_eq("owner spec", ctrl.owner_spec_flag, 0);
    expect_eq("owner degree", ctrl.owner_spec_degree, 3);
    expect_eq("victim holds op", victim_valid && victim_op == a, 1);

    // occupant's degree drops to 1 (older branches resolved): tracked
    occ_tag = '{1'b0, 7'd1};
    @(negedge clk);
    expect_eq("degree tracked", ctrl.owner_spec_degree, 1);

    // HT1 non-speculative op preempts (NOP)
    b = mk(UOP_REM, 1'b1, 7'd40);
    issue_valid = 1; preempt = 1; issue_op = b; issue_tag = '{1'b1, 7'd0};
    #1;
    expect_eq("kill on preempt", kill, 1);
    expect_eq("reinsert", reinsert_valid, 1);
    expect_eq("reinsert op", reinsert_op == a, 1);
    @(negedge clk);
    idle();
    occ_tag = '{1'b1, 7'd0};
    #1;
    expect_eq("owner switched", ctrl.owner_tid, 1);
    expect_eq("owner non-spec", ctrl.owner_spec_flag, 1);
    expect_eq("victim new op", victim_op == b, 1);

    // completion of b frees the port in the same cycle
    eu_result = '0;
    eu_result.valid = 1; eu_result.tid = 1; eu_result.seq = b.seq; eu_result.rob_idx = b.rob_idx;
    #1;
    expect_eq("free in done cycle", ctrl.free_flag, 1);
    expect_eq("released flag", ctrl.owner_spec_flag, 0);
    @(negedge clk);
    idle();
    #1;
    expect_eq("free after done", ctrl.free_flag, 1);
    expect_eq("owner kept (LOP)", ctrl.owner_tid, 1);
    expect_eq("slot empty", victim_valid, 0);

    // an unrelated result does not free a busy port
    issue_valid = 1; issue_op = mk(UOP_DIV, 1'b1, 7'd50); issue_tag = '{1'b0, 7'd2};
    @(negedge clk);
    idle();
    occ_tag = '{1'b0, 7'd2};
    eu_result.valid = 1; eu_result.tid = 1; eu_result.seq = 7'd51;
    #1;
    expect_eq("other result keeps busy", ctrl.free_flag, 0);
    @(negedge clk);
    idle();

    // squash of the occupant (branch seq 45 older than 50): kill, no reinsert
    squash_valid[1] = 1; squash_seq[1] = 7'd45;
    #1;
    expect_eq("squash kill", kill, 1);
    expect_eq("no reinsert on squash", reinsert_valid, 0);
    expect_eq("free on squash", ctrl.free_flag, 1);
    @(negedge clk);
    idle();
    #1;
    expect_eq("slot empty after squash", victim_valid, 0);

    // a pipelined op holds the port for its issue cycle only
    issue_valid = 1; issue_op = mk(UOP_ADD, 1'b1, 7'd60); issue_tag = '{1'b0, 7'd0};
    @(negedge clk);
    idle();
    #1;
    expect_eq("pipelined free next cycle", ctrl.free_flag, 1);
    expect_eq("pipelined owner", ctrl.owner_tid, 1);
    expect_eq("pipelined released", ctrl.owner_spec_flag, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
