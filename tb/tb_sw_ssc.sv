// tb_sw_ssc: self-checking test of the Speculative Status Checker.
//
// The testbench keeps its own ROB model (head, entries with Branch_Flag and
// Resolve_Flag, sequence numbers) and produces random allocations,
// retirements, correct branch resolutions and mispredict squashes. The
// reference tag of an entry is computed directly: non-speculative iff no
// older branch is unresolved, degree = number of older unresolved branches.
// Checked:
//  * every cycle, the safety rule: an entry is never tagged non-speculative
//    while the reference says it is speculative, and its degree is never
//    below the reference (stale tags may only be conservative);
//  * after a quiet period long enough for the progressive scan, every tag
//    equals the reference exactly;
//  * the scan rate: SCAN_W entries per cycle from an empty start;
//  * All mode: only the head is non-speculative; degree = sequence number.
module tb_sw_ssc;
  import sw_pkg::*;

  localparam int DEPTH  = 46;
  localparam int SCAN_W = 8;

  logic               clk = 0, rst_n = 0;
  logic               mode_all;
  rob_idx_t           head;
  logic [ROB_IDX_W:0] count;
  logic [DEPTH-1:0]   br_flag, res_flag;
  seq_t               ent_seq [DEPTH];
  logic               alloc_valid, retire_valid, squash_valid, spec_update;
  rob_idx_t           alloc_idx, squash_idx;
  spec_tag_t          tag [DEPTH];
  logic [SSC_REG_W-1:0] last_pos, last_ns, spec_degree_counter;

  int checks = 0, failures = 0;

  sw_ssc #(.DEPTH(DEPTH), .SCAN_W(SCAN_W)) dut (.*);

  always #5 clk = ~clk;

  typedef struct { bit br; bit res; int seq; } e_t;
  e_t q[$];
  int h = 0, nseq = 0;
  int n_resolve = 0, n_squash = 0, n_retire = 0;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic int ref_deg(int k);
    int d = 0;
    for (int j = 0; j < k; j++) if (q[j].br && !q[j].res) d++;
    return d > 127 ? 127 : d;
  endfunction

  // drive the ROB view from the model
  task automatic drive_view();
    head = rob_idx_t'(h);
    count = (ROB_IDX_W+1)'(q.size());
    foreach (q[k]) begin
      br_flag[(h + k) % DEPTH]  = q[k].br;
      res_flag[(h + k) % DEPTH] = q[k].res;
      ent_seq[(h + k) % DEPTH]  = seq_t'(q[k].seq);
    end
  endtask

  task automatic check_safe(string what);
    foreach (q[k]) begin
      automatic int i = (h + k) % DEPTH;
      automatic int d = ref_deg(k);
      checks++;
      if ((tag[i].spec_flag && d != 0) || int'(tag[i].spec_degree) < d) begin
        failures++;
        $display("FAIL %s: entry %0d tag=(%0b,%0d) ref deg %0d", what, k,
                 tag[i].spec_flag, tag[i].spec_degree, d);
      end
    end
  endtask

  task automatic check_exact(string what);
    foreach (q[k]) begin
      automatic int i = (h + k) % DEPTH;
      expect_eq({what, " flag"}, tag[i].spec_flag, ref_deg(k) == 0);
      expect_eq({what, " degree"}, tag[i].spec_degree, ref_deg(k));
    end
  endtask

  task automatic quiet(int n);
    alloc_valid = 0; retire_valid = 0; squash_valid = 0; spec_update = 0;
    repeat (n) begin
      drive_view();
      @(negedge clk);
    end
    drive_view();
    #1;
  endtask

  initial begin
    mode_all = 0;
    br_flag = '0; res_flag = '0;
    foreach (ent_seq[i]) ent_seq[i] = '0;
    alloc_idx = '0; squash_idx = '0;
    quiet(2);
    rst_n = 1;

    // ---- scan rate: fill the ROB in one go (model only), then watch
    for (int k = 0; k < DEPTH; k++) q.push_back('{(k % 5 == 2), 0, nseq++});
    // entries are written directly (no alloc pulses), so their tags hold the
    // reset value until scanned
    quiet(0);
    for (int c = 1; c <= (DEPTH + SCAN_W - 1) / SCAN_W; c++) begin
      @(negedge clk); drive_view(); #1;
      expect_eq("scan progress", last_pos, (c * SCAN_W > DEPTH) ? DEPTH : c * SCAN_W);
      // first unscanned entry still carries the reset tag
      if (c * SCAN_W < DEPTH) begin
        expect_eq("unscanned stays speculative", tag[(h + c * SCAN_W) % DEPTH].spec_flag, 0);
        expect_eq("unscanned degree", tag[(h + c * SCAN_W) % DEPTH].spec_degree, 127);
      end
    end
    check_exact("full scan");
    expect_eq("counter", spec_degree_counter, ref_deg(DEPTH));
    expect_eq("last_ns", last_ns, 2);   // entry 2 is the first branch

    // ---- random operation
    for (int it = 0; it < 3000; it++) begin
      int ev;
      alloc_valid = 0; retire_valid = 0; squash_valid = 0; spec_update = 0;
      drive_view();
      ev = $urandom_range(0, 9);
      if (ev <= 3 && q.size() < DEPTH) begin
        alloc_valid = 1; alloc_idx = rob_idx_t'((h + q.size()) % DEPTH);
      end else if (ev <= 5 && q.size() > 0 && !(q[0].br && !q[0].res)) begin
        retire_valid = 1;
      end else if (ev <= 8) begin
        // resolve a random unresolved branch
        int cand[$];
        foreach (q[k]) if (q[k].br && !q[k].res) cand.push_back(k);
        if (cand.size() > 0) begin
          int k = cand[$urandom_range(0, cand.size() - 1)];
          if ($urandom_range(0, 3) == 0) begin
            squash_valid = 1; squash_idx = rob_idx_t'((h + k) % DEPTH);
            // the ROB raises spec_update too if another branch resolves
            // correctly in the same cycle; here only the mispredict happens
          end else begin
            spec_update = 1;
          end
          #1;
          check_safe("before edge");
          @(negedge clk);
          q[k].res = 1;
          if (squash_valid) begin
            while (q.size() > k + 1) void'(q.pop_back());
            nseq = q[k].seq + 1;
            n_squash++;
          end else n_resolve++;
          drive_view(); #1;
          check_safe("after resolve");
          continue;
        end
      end
      #1;
      check_safe("before edge");
      @(negedge clk);
      if (alloc_valid) q.push_back('{($urandom_range(0, 3) == 0), 0, nseq++});
      if (retire_valid) begin void'(q.pop_front()); h = (h + 1) % DEPTH; n_retire++; end
      drive_view(); #1;
      check_safe("after edge");
      if (it % 25 == 24) begin
        quiet((DEPTH + SCAN_W - 1) / SCAN_W + 2);
        check_exact("converged");
      end
    end
    checks++;
    if (n_resolve < 20 || n_squash < 5 || n_retire < 20) begin
      failures++;
      $display("FAIL coverage resolve=%0d squash=%0d retire=%0d", n_resolve, n_squash, n_retire);
    end

    // ---- All mode
    mode_all = 1;
    quiet(1);
    foreach (q[k]) begin
      automatic int i = (h + k) % DEPTH;
      expect_eq("all-mode flag", tag[i].spec_flag, k == 0);
      expect_eq("all-mode degree", tag[i].spec_degree, q[k].seq % 128);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
