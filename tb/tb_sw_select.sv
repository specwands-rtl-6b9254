// tb_sw_select: self-checking test of the NOP/LOP/EOP select logic.
//
// A reference written straight from the issue flow chart (steps 2-8) decides
// for each candidate whether it may issue and whether it preempts; the
// reference then picks the winner with the documented tie-break (non-
// speculative first, then the earlier op of the same thread, then the lowest
// index). Directed cases reproduce the scenarios of the three policies, and
// random vectors cover both modes.
module tb_sw_select;
  import sw_pkg::*;

  localparam int N = 6;

  logic         mode_all;
  port_ctrl_t   ctrl;
  logic [N-1:0] req;
  tid_t         tid [N];
  spec_tag_t    tag [N];
  logic         grant_valid, preempt, by_nop, by_eop, lop_blocked;
  logic [$clog2(N)-1:0] grant_idx;

  int checks = 0, failures = 0;

  sw_select #(.N(N)) dut (.*);

  // ---------- reference ----------
  function automatic logic ref_earlier(logic m, deg_t a, deg_t b);
    int diff;
    if (!m) return int'(a) < int'(b);
    diff = (int'(b) - int'(a) + 128) % 128;
    return diff >= 1 && diff <= 63;
  endfunction

  // returns 0 = skip, 1 = issue, 2 = issue with preemption
  function automatic int ref_flow(int i);
    if (tid[i] == ctrl.owner_tid) begin              // step 2: Y
      if (ctrl.free_flag) return 1;                 // step 3: Y -> 7
      if (ref_earlier(mode_all, tag[i].spec_degree, ctrl.owner_spec_degree))
        return 2;                                   // step 4: Y -> 6
      return 0;                                     // step 8
    end
    // step 5: candidate non-speculative, owner speculative (or released)
    if (tag[i].spec_flag == 1'b1 && (ctrl.free_flag || ctrl.owner_spec_flag == 1'b0))
      return ctrl.free_flag ? 1 : 2;
    return 0;
  endfunction

  task automatic check_now(string what);
    int exp_idx, d;
    logic exp_lop;
    exp_idx = -1;
    exp_lop = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (!req[i]) continue;
      if (tid[i] != ctrl.owner_tid && !tag[i].spec_flag) exp_lop = 1'b1;
      d = ref_flow(i);
      if (d == 0) continue;
      if (exp_idx < 0) exp_idx = i;
      else if (tag[i].spec_flag && !tag[exp_idx].spec_flag) exp_idx = i;
      else if (tag[i].spec_flag == tag[exp_idx].spec_flag && tid[i] == tid[exp_idx] &&
               ref_earlier(mode_all, tag[i].spec_degree, tag[exp_idx].spec_degree)) exp_idx = i;
    end
    #1;
    checks++;
    if (grant_valid !== (exp_idx >= 0)) begin
      failures++; $display("FAIL %s: grant_valid=%0b exp %0b", what, grant_valid, exp_idx >= 0);
    end else if (exp_idx >= 0) begin
      checks++;
      if (int'(grant_idx) != exp_idx || preempt != (ref_flow(exp_idx) == 2)) begin
        failures++;
        $display("FAIL %s: idx=%0d pre=%0b exp idx=%0d pre=%0b", what, grant_idx, preempt,
                 exp_idx, ref_flow(exp_idx) == 2);
      end
    end
    checks++;
    if (lop_blocked != exp_lop) begin
      failures++; $display("FAIL %s: lop_blocked=%0b exp %0b", what, lop_blocked, exp_lop);
    end
  endtask

  task automatic clear_all();
    req = '0;
    for (int i = 0; i < N; i++) begin tid[i] = '0; tag[i] = '0; end
  endtask

  initial begin
    mode_all = 1'b0;
    clear_all();
    ctrl = '{free_flag: 1'b1, owner_tid: 1'b0, owner_spec_flag: 1'b0, owner_spec_degree: '0};

    // NOP (a): port free, owner HT0; speculative I_X of HT0 and
    // non-speculative I_Y of HT1 both ready -> I_Y takes it, owner switches.
    req[0] = 1; tid[0] = 0; tag[0] = '{1'b0, 7'd2};
    req[1] = 1; tid[1] = 1; tag[1] = '{1'b1, 7'd0};
    check_now("NOP free port");
    if (!(grant_idx == 1 && !preempt)) begin failures++; $display("FAIL NOP(a) pick"); end
    checks++;

    // NOP (b): speculative HT0 op occupies the port, HT1 op becomes
    // non-speculative -> preempts.
    clear_all();
    ctrl = '{free_flag: 1'b0, owner_tid: 1'b0, owner_spec_flag: 1'b0, owner_spec_degree: 7'd3};
    req[2] = 1; tid[2] = 1; tag[2] = '{1'b1, 7'd0};
    check_now("NOP preempt");
    checks++;
    if (!(grant_valid && preempt && by_nop)) begin failures++; $display("FAIL NOP(b)"); end

    // ... but a non-speculative occupant is never preempted by the other HT
    ctrl.owner_spec_flag = 1'b1;
    check_now("NOP no preempt of non-spec");

    // LOP (a): port free, last owner HT1; speculative HT0 op must wait.
    clear_all();
    ctrl = '{free_flag: 1'b1, owner_tid: 1'b1, owner_spec_flag: 1'b0, owner_spec_degree: '0};
    req[0] = 1; tid[0] = 0; tag[0] = '{1'b0, 7'd1};
    check_now("LOP hold");
    checks++;
    if (grant_valid || !lop_blocked) begin failures++; $display("FAIL LOP(a)"); end
    // the owner's speculative op is issued right away
    req[3] = 1; tid[3] = 1; tag[3] = '{1'b0, 7'd5};
    check_now("LOP owner issues");

    // EOP (a): both speculative from HT0, port free -> earlier one first.
    clear_all();
    ctrl = '{free_flag: 1'b1, owner_tid: 1'b0, owner_spec_flag: 1'b0, owner_spec_degree: '0};
    req[0] = 1; tid[0] = 0; tag[0] = '{1'b0, 7'd4};
    req[1] = 1; tid[1] = 0; tag[1] = '{1'b0, 7'd2};
    check_now("EOP order");
    checks++;
    if (grant_idx != 1) begin failures++; $display("FAIL EOP(a)"); end
    // EOP (b): later op occupies, earlier one becomes ready -> preempts.
    clear_all();
    ctrl = '{free_flag: 1'b0, owner_tid: 1'b0, owner_spec_flag: 1'b0, owner_spec_degree: 7'd4};
    req[5] = 1; tid[5] = 0; tag[5] = '{1'b0, 7'd2};
    check_now("EOP preempt");
    checks++;
    if (!(preempt && by_eop)) begin failures++; $display("FAIL EOP(b)"); end
    // same degree (same basic block): no preemption in Spectre mode
    tag[5].spec_degree = 7'd4;
    check_now("EOP same degree");
    // All mode: degree field is a wrapping sequence number (126 older than 3)
    mode_all = 1'b1;
    ctrl.owner_spec_degree = 7'd3;
    tag[5].spec_degree = 7'd126;
    check_now("EOP all-mode wrap");
    checks++;
    if (!preempt) begin failures++; $display("FAIL EOP wrap"); end

    // random
    for (int n = 0; n < 4000; n++) begin
      mode_all = $urandom_range(0, 1);
      ctrl = port_ctrl_t'($urandom);
      if (ctrl.free_flag) ctrl.owner_spec_flag = 1'b0;
      for (int i = 0; i < N; i++) begin
        req[i] = ($urandom_range(0, 2) != 0);
        tid[i] = tid_t'($urandom_range(0, 1));
        tag[i].spec_flag = ($urandom_range(0, 3) == 0);
        tag[i].spec_degree = deg_t'($urandom_range(0, 7));
        if (tag[i].spec_flag && !mode_all) tag[i].spec_degree = '0;
      end
      check_now($sformatf("random %0d", n));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
