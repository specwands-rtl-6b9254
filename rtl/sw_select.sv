// sw_select: the NOP + LOP + EOP select logic of one issue port.
//
// Every reservation-station entry that is valid, operand-ready and bound to
// this port is a candidate. For each candidate the issue flow is evaluated
// in parallel against the port's control register (sw_pkg::policy_check):
//   same thread as Owner_TID: port free -> issue; else issue and preempt
//     if the candidate is earlier than the occupant (EOP);
//   other thread: issue (and preempt a speculative occupant) only if the
//     candidate is non-speculative and the occupant is not (NOP);
//     a speculative candidate of another thread waits (LOP).
// The flow's "skip the candidate and try next" becomes a parallel search:
// among the candidates the policy allows, a non-speculative one is taken
// first, then the earlier of two ops of the same thread, then the lowest
// entry index. This tie-break order is this design's choice.
// Purely combinational; the grant is used in the same cycle.
module sw_select
  import sw_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic           mode_all,
  input  port_ctrl_t     ctrl,
  input  logic [N-1:0]   req,
  input  tid_t           tid [N],
  input  spec_tag_t      tag [N],
  output logic           grant_valid,
  output logic [$clog2(N)-1:0] grant_idx,
  output logic           preempt,
  output logic           by_nop,      // the grant preempts/overtakes by NOP
  output logic           by_eop,      // the grant preempts by EOP
  output logic           lop_blocked  // some request was held back by LOP
);

  policy_t pol [N];

  always_comb begin
    logic    better;
    policy_t best_p;
    grant_valid = 1'b0;
    grant_idx   = '0;
    best_p      = '0;
    better      = 1'b0;
    lop_blocked = 1'b0;
    for (int i = 0; i < N; i++) begin
      pol[i] = policy_check(mode_all, tid[i], tag[i], ctrl);
      if (req[i] && pol[i].lop_block) lop_blocked = 1'b1;
      if (req[i] && pol[i].grant) begin
        if (!grant_valid) begin
          better = 1'b1;
        end else if (tag[i].spec_flag != tag[grant_idx].spec_flag) begin
          better = tag[i].spec_flag;
        end else begin
          better = (tid[i] == tid[grant_idx]) &&
                   eop_earlier(mode_all, tag[i].spec_degree, tag[grant_idx].spec_degree);
        end
        if (better) begin
          grant_valid = 1'b1;
          grant_idx   = ($clog2(N))'(i);
          best_p      = pol[i];
        end
      end
    end
    preempt = grant_valid && best_p.preempt;
    by_nop  = grant_valid && best_p.nop && best_p.preempt;
    by_eop  = grant_valid && best_p.eop;
  end

endmodule
