// tb_poc_contention: the contention kernels of speculative covert-channel
// attacks, run on the full-size issue stage, checking that the receiver
// cannot tell whether the sender ran.
//
// Each case is run twice from reset, with secret = 0 and secret = 1, and the
// receiver's timing must be identical. The sender is a group of divides on
// port 0 that only exist (secret = 1) on the wrong path of a mispredicted
// branch whose condition depends on a slow divide; with secret = 0 the same
// slots hold ALU ops on an unrelated port.
//
//  * Inter-thread kernel (NOP + LOP): thread 0 is the sender; thread 1, the
//    receiver, runs a dependent chain of three divides on port 0, starting
//    D cycles later (D = 0..15). Measured: cycle of the chain's last result.
//  * Intra-thread kernel (EOP): one thread. The receiver is a divide on
//    port 0 that waits for an older slow divide; the mispredicted branch and
//    the sender divides come after it in program order and are dispatched
//    with an extra front-end delay of D cycles. Measured: the receiver's
//    result cycle.
//
// Both kernels run in Spectre mode and in All mode. Besides equal timing,
// the test requires that with secret = 1 the sender really did contend: a
// NOP preemption (inter-thread) and an EOP preemption (intra-thread) must
// each have happened in at least one case, and every case must squash.
// An unprotected first-come-first-served port would let the sender's divide
// delay the receiver by up to one divide latency (12 cycles).
module tb_poc_contention;
  import sw_pkg::*;

  localparam int NP = 8;

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
  int n_nop = 0, n_eop = 0;

  // scripted front end: op list and earliest dispatch cycle per op
  typedef struct { fe_op_t op; int at; bit is_rx; } s_t;
  s_t script [NUM_THREADS][$];

  function automatic fe_op_t mk(uop_e u, int port, int dep = 0, bit misp = 0);
    fe_op_t o;
    o = '0;
    o.uop = u; o.port = 3'(port); o.dep_dist = rob_idx_t'(dep); o.mispredict = misp;
    o.op1 = 32'hDEAD_BEEF; o.op2 = 32'd7;
    return o;
  endfunction

  task automatic add(int t, fe_op_t o, int at, bit rx = 0);
    s_t s;
    s.op = o; s.at = at; s.is_rx = rx;
    script[t].push_back(s);
  endtask

  // run the scripted ops from reset; return the cycle of the last receiver
  // result, and the preemption / squash counts seen
  task automatic run(bit m, output int rx_done, output int nop, output int eop, output int sq);
    int cyc = 0;
    int rx_left = 0;
    seq_t rx_seq [NUM_THREADS][$];
    rx_done = -1; nop = 0; eop = 0; sq = 0;
    foreach (script[t, k]) if (script[t][k].is_rx) rx_left++;
    mode_all = m;
    rst_n = 0;
    for (int t = 0; t < NUM_THREADS; t++) begin fe_valid[t] = 0; fe_op[t] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (cyc < 120) begin   // long enough for every branch to resolve
      for (int t = 0; t < NUM_THREADS; t++) begin
        fe_valid[t] = script[t].size() > 0 && cyc >= script[t][0].at;
        fe_op[t] = script[t].size() > 0 ? script[t][0].op : '0;
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        if (ev_preempt_nop[p]) nop++;
        if (ev_preempt_eop[p]) eop++;
        if (result[p].valid) foreach (rx_seq[result[p].tid][k])
          if (rx_seq[result[p].tid][k] == result[p].seq) begin
            rx_left--; rx_done = cyc;
          end
      end
      for (int t = 0; t < NUM_THREADS; t++) begin
        if (squash_valid[t]) sq++;
        if (fe_valid[t] && fe_ready[t]) begin
          if (script[t][0].is_rx) rx_seq[t].push_back(fe_seq[t]);
          void'(script[t].pop_front());
        end
      end
      @(negedge clk);
      cyc++;
    end
    for (int t = 0; t < NUM_THREADS; t++) fe_valid[t] = 0;
    if (rx_left != 0) rx_done = -1;
  endtask

  // inter-thread kernel: sender thread 0, receiver thread 1
  task automatic build_inter(bit secret, int d);
    script[0].delete(); script[1].delete();
    add(0, mk(UOP_DIV, 1), 0);                 // slow branch condition
    add(0, mk(UOP_BR, 2, 1, 1'b1), 0);         // mispredicted branch
    for (int k = 0; k < 3; k++)                // wrong path: the sender
      add(0, secret ? mk(UOP_DIV, 0) : mk(UOP_ADD, 5), 0);
    add(1, mk(UOP_DIV, 0), d, 1);              // receiver chain
    add(1, mk(UOP_DIV, 0, 1), d, 1);
    add(1, mk(UOP_DIV, 0, 1), d, 1);
  endtask

  // intra-thread kernel: receiver older than the branch, sender younger
  task automatic build_intra(bit secret, int d);
    script[0].delete(); script[1].delete();
    add(0, mk(UOP_DIV, 1), 0);                 // slow producer of the receiver
    add(0, mk(UOP_DIV, 0, 1), 0, 1);           // receiver
    add(0, mk(UOP_DIV, 1, 2), 0);              // slower branch condition
    add(0, mk(UOP_BR, 2, 1, 1'b1), d);         // mispredicted branch
    for (int k = 0; k < 3; k++)                // wrong path: the sender
      add(0, secret ? mk(UOP_DIV, 0) : mk(UOP_ADD, 5), d);
  endtask

  initial begin
    int t0, t1, nop, eop, sq0, sq1, dummy;
    mode_all = 0;
    for (int t = 0; t < NUM_THREADS; t++) begin fe_valid[t] = 0; fe_op[t] = '0; end
    for (int m = 0; m < 2; m++) begin
      for (int d = 0; d < 16; d++) begin
        // inter-thread
        build_inter(0, d); run(m[0], t0, dummy, dummy, sq0);
        build_inter(1, d); run(m[0], t1, nop, dummy, sq1);
        n_nop += nop;
        checks++;
        if (t0 < 0 || t0 != t1 || sq0 == 0 || sq1 == 0) begin
          failures++;
          $display("FAIL inter mode=%0d D=%0d: receiver done %0d (secret 0) vs %0d (secret 1), squashes %0d/%0d",
                   m, d, t0, t1, sq0, sq1);
        end
        // intra-thread
        build_intra(0, d); run(m[0], t0, dummy, dummy, sq0);
        build_intra(1, d); run(m[0], t1, dummy, eop, sq1);
        n_eop += eop;
        checks++;
        if (t0 < 0 || t0 != t1 || sq0 == 0 || sq1 == 0) begin
          failures++;
          $display("FAIL intra mode=%0d D=%0d: receiver done %0d (secret 0) vs %0d (secret 1), squashes %0d/%0d",
                   m, d, t0, t1, sq0, sq1);
        end
      end
    end
    $display("  NOP preemptions by the receiver: %0d, EOP preemptions: %0d", n_nop, n_eop);
    checks++;
    if (n_nop == 0) begin failures++; $display("FAIL sender never contended (inter-thread)"); end
    checks++;
    if (n_eop == 0) begin failures++; $display("FAIL sender never contended (intra-thread)"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
