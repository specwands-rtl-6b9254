// tb_specwands_core: end-to-end self-checking test of the SpecWands issue
// stage with its default (full-size) parameters: 8 ports, 64 RS entries,
// 46 ROB entries per thread, 8-entry checker scan, radix-8 divider.
//
// Two random instruction streams (one per hardware thread) are fed on fe_*.
// Divides and remainders are steered to ports 0-1 so the threads contend for
// the unpipelined units; branches often depend on a divide, so they stay
// unresolved long enough to make younger ops speculative; some branches
// are marked mispredicted.
//
// The reference model keeps each thread's in-flight ops in program order and
// checks:
//  * every result: the op exists and is not yet complete, data matches a
//    software model of the ALU/divider, branch and mispredict flags;
//  * every squash: it names a mispredicted branch completing in that cycle,
//    younger ops are dropped, and no result of a dropped op appears later;
//  * every retirement: in program order, only after the op completed;
//  * sequence numbers handed to the front end, including reuse after squash;
//  * the security rule of the policies: whenever a port gets an op of a
//    thread other than its last owner, that op is non-speculative (Spectre
//    mode: all older branches of its thread resolved in an earlier cycle;
//    All mode: it is the oldest op of its thread);
//  * every EOP preemption is made by an op older in program order than the
//    op it preempts, of the same thread;
//  * liveness: some op retires at least every 2000 cycles while work exists.
// The run is done in Spectre mode and then in All mode, draining in between.
// Every mechanism (issue, NOP preemption, EOP preemption, LOP block, owner
// switch, re-insertion, squash kill, squash, retirement in each mode) must
// have happened at least once; each one that never did counts a failure.
module tb_specwands_core;
  import sw_pkg::*;

  localparam int NP     = 8;
  localparam int CYCLES = 12000;   // fed cycles per mode

  logic       clk = 0, rst_n = 0;
  logic       mode_all;
  logic       fe_valid [NUM_THREADS];
  fe_op_t     fe_op    [NUM_THREADS];
  logic       fe_ready [NUM_THREADS];
  seq_t       fe_seq   [NUM_THREADS];
  result_t    result   [NP];
  logic       retire_valid [NUM_THREADS];
  seq_t       retire_seq   [NUM_THREADS];
  logic       squash_valid [NUM_THREADS];
  seq_t       squash_seq   [NUM_THREADS];
  port_ctrl_t port_ctrl       [NP];
  logic       ev_issue        [NP];
  logic       ev_preempt_nop  [NP];
  logic       ev_preempt_eop  [NP];
  logic       ev_lop_block    [NP];
  logic       ev_owner_switch [NP];
  logic       ev_reinsert     [NP];
  logic       ev_squash_kill  [NP];
  logic [SSC_REG_W-1:0] ssc_last_pos [NUM_THREADS];
  logic [SSC_REG_W-1:0] ssc_last_ns  [NUM_THREADS];
  logic [SSC_REG_W-1:0] ssc_counter  [NUM_THREADS];
  logic [6:0] rs_occupancy [NUM_THREADS];

  specwands_core dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct {
    int    seq;
    uop_e  uop;
    data_t op1, op2;
    bit    misp;
    bit    done;
    int    done_cyc;
  } m_t;
  m_t q [NUM_THREADS][$];
  int nseq [NUM_THREADS];
  int since_div [NUM_THREADS];
  bit pending [NUM_THREADS];
  bit feed;

  typedef enum int {
    E_ISSUE, E_NOP, E_EOP, E_LOP, E_SWITCH, E_REINSERT, E_SQKILL,
    E_SQUASH, E_RET_SPECTRE, E_RET_ALL, E_NUM
  } ev_e;
  int evc [E_NUM];
  int last_retire_cyc = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 30) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  function automatic data_t ref_alu(uop_e u, data_t a, data_t b);
    case (u)
      UOP_ADD: return a + b;
      UOP_SUB: return a - b;
      UOP_AND: return a & b;
      UOP_XOR: return a ^ b;
      UOP_BR:  return data_t'(a == b);
      UOP_DIV: return (b == 0) ? '1 : a / b;
      UOP_REM: return (b == 0) ? a : a % b;
      default: return '0;
    endcase
  endfunction

  function automatic int find(int t, int s);
    foreach (q[t][k]) if (q[t][k].seq == s) return k;
    return -1;
  endfunction

  // random op for thread t
  task automatic gen(int t);
    fe_op_t o;
    int r;
    o = '0;
    r = $urandom_range(0, 99);
    o.op1 = $urandom;
    o.op2 = $urandom >> $urandom_range(0, 28);
    if (r < 16) begin
      o.uop = UOP_BR;
      o.port = 3'($urandom_range(2, 3));
      o.mispredict = ($urandom_range(0, 5) == 0);
      if ($urandom_range(0, 1)) o.op2 = o.op1;
      if (since_div[t] < 20 && $urandom_range(0, 3) != 0)
        o.dep_dist = rob_idx_t'(since_div[t] + 1);
    end else if (r < 42) begin
      o.uop = $urandom_range(0, 1) ? UOP_DIV : UOP_REM;
      o.port = 3'($urandom_range(0, 1));
      if ($urandom_range(0, 2) == 0) o.dep_dist = rob_idx_t'($urandom_range(1, 4));
    end else begin
      o.uop = uop_e'($urandom_range(0, 3));
      o.port = 3'($urandom_range(0, NP - 1));
      o.dep_dist = rob_idx_t'($urandom_range(0, 3));
    end
    fe_op[t] = o;
  endtask

  // one clock cycle: drive at the falling edge, check before the rising edge
  task automatic step();
    @(negedge clk);
    cyc++;
    for (int t = 0; t < NUM_THREADS; t++) begin
      if (!pending[t]) begin gen(t); pending[t] = 1; end
      fe_valid[t] = feed && ($urandom_range(0, 9) < 8);
    end
    #1;
    // ---- events
    for (int p = 0; p < NP; p++) begin
      if (ev_issue[p])       evc[E_ISSUE]++;
      if (ev_preempt_nop[p]) evc[E_NOP]++;
      if (ev_preempt_eop[p]) begin
        op_t n, v;
        int kn, kv;
        evc[E_EOP]++;
        n = dut.issue_op[p];
        v = dut.victim_op[p];
        kn = find(n.tid, n.seq);
        kv = find(v.tid, v.seq);
        checks++;
        if (!dut.victim_valid[p] || n.tid != v.tid || kn < 0 || kv < 0 || kn >= kv)
          fail($sformatf("EOP on port %0d: seq %0d preempted seq %0d, not older", p, n.seq, v.seq));
      end
      if (ev_lop_block[p])   evc[E_LOP]++;
      if (ev_reinsert[p])    evc[E_REINSERT]++;
      if (ev_squash_kill[p]) evc[E_SQKILL]++;
      if (ev_owner_switch[p]) begin
        op_t o;
        int k;
        evc[E_SWITCH]++;
        o = dut.issue_op[p];
        k = find(o.tid, o.seq);
        checks++;
        if (k < 0) fail($sformatf("port %0d switched to unknown op", p));
        else if (mode_all) begin
          if (k != 0) fail($sformatf("All mode: port %0d switched owner to non-head op", p));
        end else begin
          for (int j = 0; j < k; j++)
            if (q[o.tid][j].uop == UOP_BR && !(q[o.tid][j].done && q[o.tid][j].done_cyc < cyc))
              fail($sformatf("Spectre mode: port %0d switched owner to speculative op T%0d seq %0d",
                             p, o.tid, o.seq));
        end
      end
    end
    // ---- results
    for (int p = 0; p < NP; p++) if (result[p].valid) begin
      int t = result[p].tid;
      int k = find(t, result[p].seq);
      checks++;
      if (k < 0) begin
        fail($sformatf("result of unknown op T%0d seq %0d on port %0d", t, result[p].seq, p));
        continue;
      end
      if (q[t][k].done) fail($sformatf("second result for T%0d seq %0d", t, result[p].seq));
      if (result[p].data != ref_alu(q[t][k].uop, q[t][k].op1, q[t][k].op2))
        fail($sformatf("data T%0d seq %0d: %h", t, result[p].seq, result[p].data));
      if (result[p].is_branch != (q[t][k].uop == UOP_BR)) fail("is_branch flag");
      if (result[p].mispredict != (q[t][k].uop == UOP_BR && q[t][k].misp)) fail("mispredict flag");
      q[t][k].done = 1;
      q[t][k].done_cyc = cyc;
    end
    // ---- squash
    for (int t = 0; t < NUM_THREADS; t++) begin
      int oldest = -1;
      foreach (q[t][k])
        if (q[t][k].done_cyc == cyc && q[t][k].done && q[t][k].uop == UOP_BR && q[t][k].misp) begin
          oldest = k;
          break;
        end
      checks++;
      if ((oldest >= 0) != squash_valid[t]) fail($sformatf("squash_valid T%0d", t));
      if (squash_valid[t] && oldest >= 0) begin
        if (q[t][oldest].seq != squash_seq[t]) fail("squash names wrong branch");
        while (q[t].size() > oldest + 1) void'(q[t].pop_back());
        nseq[t] = (q[t][oldest].seq + 1) % 128;
        evc[E_SQUASH]++;
      end
    end
    // ---- retirement
    for (int t = 0; t < NUM_THREADS; t++) if (retire_valid[t]) begin
      checks++;
      if (q[t].size() == 0) fail("retire from empty ROB");
      else begin
        if (retire_seq[t] != q[t][0].seq) fail($sformatf("retire order T%0d", t));
        if (!(q[t][0].done && q[t][0].done_cyc < cyc)) fail("retire before completion");
        void'(q[t].pop_front());
      end
      if (mode_all) evc[E_RET_ALL]++; else evc[E_RET_SPECTRE]++;
      last_retire_cyc = cyc;
    end
    // ---- dispatch
    for (int t = 0; t < NUM_THREADS; t++) if (fe_valid[t] && fe_ready[t]) begin
      m_t m;
      checks++;
      if (fe_seq[t] != seq_t'(nseq[t])) fail($sformatf("fe_seq T%0d %0d exp %0d", t, fe_seq[t], nseq[t]));
      m.seq = fe_seq[t]; m.uop = fe_op[t].uop; m.op1 = fe_op[t].op1; m.op2 = fe_op[t].op2;
      m.misp = fe_op[t].mispredict; m.done = 0; m.done_cyc = 0;
      q[t].push_back(m);
      nseq[t] = (nseq[t] + 1) % 128;
      if (q[t].size() > ROB_PER_T) fail("ROB partition overflow");
      since_div[t] = (fe_op[t].uop inside {UOP_DIV, UOP_REM}) ? 0 : since_div[t] + 1;
      pending[t] = 0;
    end
    // ---- liveness
    if ((q[0].size() != 0 || q[1].size() != 0) && cyc - last_retire_cyc > 2000) begin
      fail("no retirement for 2000 cycles");
      last_retire_cyc = cyc;
    end
  endtask

  task automatic run_mode(bit m);
    int n;
    mode_all = m;
    feed = 1;
    repeat (CYCLES) step();
    feed = 0;
    n = 0;
    while ((q[0].size() != 0 || q[1].size() != 0) && n < 5000) begin step(); n++; end
    checks++;
    if (q[0].size() != 0 || q[1].size() != 0) fail("pipeline did not drain");
    repeat (20) step();
    for (int t = 0; t < NUM_THREADS; t++) begin
      checks++;
      if (rs_occupancy[t] != 0) fail("RS not empty after drain");
    end
  endtask

  initial begin
    static string names [E_NUM] = '{"issue", "NOP preempt", "EOP preempt", "LOP block",
                                    "owner switch", "reinsert", "squash kill", "squash",
                                    "retire (Spectre mode)", "retire (All mode)"};
    mode_all = 0; feed = 0;
    for (int t = 0; t < NUM_THREADS; t++) begin
      fe_valid[t] = 0; fe_op[t] = '0; nseq[t] = 0; since_div[t] = 99; pending[t] = 0;
    end
    foreach (evc[i]) evc[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    run_mode(0);
    run_mode(1);

    for (int i = 0; i < E_NUM; i++) begin
      $display("  %-22s %0d", names[i], evc[i]);
      checks++;
      if (evc[i] == 0) fail($sformatf("mechanism never exercised: %s", names[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * CYCLES + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
