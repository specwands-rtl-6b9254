// tb_sw_rob: self-checking test of one thread's ROB status partition.
//
// A queue model in the testbench mirrors the ROB: ops are allocated with
// random branch flags, completed in random order, and the model predicts
// in-order retirement, the Branch/Resolve flags, the full condition, the
// correct-resolution pulse and the squash caused by a mispredicted branch
// (younger entries dropped, sequence numbers reused from the branch on).
module tb_sw_rob;
  import sw_pkg::*;

  localparam int DEPTH = 10;
  localparam int NC    = 2;

  logic               clk = 0, rst_n = 0;
  logic               alloc_valid, alloc_is_branch, alloc_ready;
  rob_idx_t           alloc_idx;
  seq_t               alloc_seq;
  result_t            cmpl [NC];
  rob_idx_t           head;
  logic [ROB_IDX_W:0] count;
  logic [DEPTH-1:0]   ent_valid, br_flag, res_flag, done_flag;
  seq_t               ent_seq [DEPTH];
  logic               retire_valid, squash_valid, spec_update;
  seq_t               retire_seq, squash_seq;
  rob_idx_t           squash_idx;

  int checks = 0, failures = 0;

  sw_rob #(.DEPTH(DEPTH), .NCMPL(NC), .THREAD_ID(1'b1)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  typedef struct { int idx; int seq; bit br; bit done; } m_t;
  m_t model[$];
  int next_seq = 0, tail = 0;
  int n_retired = 0, n_squash = 0, n_full = 0;

  initial begin
    alloc_valid = 0; alloc_is_branch = 0;
    foreach (cmpl[c]) cmpl[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int cyc = 0; cyc < 3000; cyc++) begin
      int pick, sq_pos;
      bit do_cmpl, misp, exp_upd;
      // ---- drive
      alloc_valid     = ($urandom_range(0, 2) != 0);
      alloc_is_branch = ($urandom_range(0, 3) == 0);
      foreach (cmpl[c]) cmpl[c] = '0;
      do_cmpl = 0; misp = 0; sq_pos = -1; exp_upd = 0;
      pick = -1;
      if (model.size() > 0 && $urandom_range(0, 1)) begin
        pick = $urandom_range(0, model.size() - 1);
        if (!model[pick].done) begin
          do_cmpl = 1;
          cmpl[1].valid = 1; cmpl[1].tid = 1'b1;
          cmpl[1].rob_idx = rob_idx_t'(model[pick].idx);
          cmpl[1].seq = seq_t'(model[pick].seq);
          cmpl[1].is_branch = model[pick].br;
          misp = model[pick].br && ($urandom_range(0, 4) == 0);
          cmpl[1].mispredict = misp;
          if (misp) sq_pos = pick; else if (model[pick].br) exp_upd = 1;
        end
      end
      // a completion of another thread must be ignored
      cmpl[0].valid = 1; cmpl[0].tid = 1'b0; cmpl[0].is_branch = 1; cmpl[0].mispredict = 1;
      #1;
      // ---- check combinational outputs against the model
      expect_eq("count", count, model.size());
      if (model.size() > 0) begin
        expect_eq("head", head, model[0].idx);
        expect_eq("retire", retire_valid, model[0].done);
        if (model[0].done) expect_eq("retire seq", retire_seq, model[0].seq % 128);
      end
      expect_eq("squash", squash_valid, misp);
      expect_eq("spec_update", spec_update, exp_upd);
      if (misp) begin
        expect_eq("squash idx", squash_idx, model[sq_pos].idx);
        expect_eq("squash seq", squash_seq, model[sq_pos].seq % 128);
      end
      expect_eq("alloc_ready", alloc_ready, model.size() < DEPTH && !misp);
      if (model.size() == DEPTH) n_full++;
      if (alloc_ready) expect_eq("alloc seq", alloc_seq, next_seq % 128);
      foreach (model[k]) begin
        expect_eq("br flag", br_flag[model[k].idx], model[k].br);
        expect_eq("res flag", res_flag[model[k].idx], model[k].br && model[k].done);
      end
      // ---- update the model like the clock edge
      if (do_cmpl) model[pick].done = 1;
      if (alloc_valid && alloc_ready) begin
        model.push_back('{tail, next_seq, alloc_is_branch, 0});
        tail = (tail + 1) % DEPTH; next_seq++;
      end
      if (misp) begin
        n_squash++;
        while (model.size() > sq_pos + 1) void'(model.pop_back());
        tail = (model[sq_pos].idx + 1) % DEPTH;
        next_seq = model[sq_pos].seq + 1;
      end
      if (retire_valid) begin void'(model.pop_front()); n_retired++; end
      @(negedge clk);
    end
    checks++;
    if (n_retired < 100 || n_squash < 10 || n_full < 5) begin
      failures++;
      $display("FAIL coverage retired=%0d squash=%0d full=%0d", n_retired, n_squash, n_full);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
