// sw_pkg: types, constants and the issue-policy functions shared by the
// priority-based SMT issue scheduler (NOP / LOP / EOP policies).
//
// The scheduler tags every in-flight micro-op with a speculation tag
// {spec_flag, spec_degree} and every issue port with a control register
// {free_flag, owner_tid, owner_spec_flag, owner_spec_degree}. The function
// policy_check() is the per-candidate decision of the issue flow
// (steps 2-6): it says whether a ready candidate may take a port and whether
// doing so preempts the port's current occupant.
//
// Encodings (this design's choice where the source is silent):
//  * spec_flag = 1 means the op is NON-speculative. The issue flow compares
//    "candidate.Spec_Flag > Owner_Spec_Flag" to let a non-speculative
//    candidate win, and the acquire/release model calls the same bit
//    "status" with false = speculative; both only work with 1 = resolved.
//  * free_flag = 1 means the port is free (the flow chart goes to "occupy"
//    on Free_Flag = Y).
//  * spec_degree: in Spectre mode the number of unresolved older branches
//    (saturating at 127); in All mode the low 7 bits of the op's program-
//    order sequence number, compared with wrap-around.
package sw_pkg;

  // Paper numbers: 2-context SMT, 7-bit Spec_Degree, 8-bit SSC registers.
  localparam int unsigned NUM_THREADS = 2;
  localparam int unsigned TID_W       = 1;
  localparam int unsigned DEG_W       = 7;
  localparam int unsigned SSC_REG_W   = 8;
  localparam int unsigned SEQ_W       = 7;   // program-order tag per thread
  localparam int unsigned DATA_W      = 32;  // operand width (assumed)
  localparam int unsigned ROB_PER_T   = 46;  // 92-entry ROB, fair partition
  localparam int unsigned ROB_IDX_W   = 6;
  localparam int unsigned PORT_IDX_W  = 3;   // up to 8 issue ports
  localparam int unsigned DEG_MAX     = (1 << DEG_W) - 1;

  typedef logic [TID_W-1:0]     tid_t;
  typedef logic [DEG_W-1:0]     deg_t;
  typedef logic [SEQ_W-1:0]     seq_t;
  typedef logic [ROB_IDX_W-1:0] rob_idx_t;
  typedef logic [DATA_W-1:0]    data_t;

  typedef enum logic [2:0] {
    UOP_ADD = 3'd0,
    UOP_SUB = 3'd1,
    UOP_AND = 3'd2,
    UOP_XOR = 3'd3,
    UOP_BR  = 3'd4,   // branch: resolves at completion, may carry a mispredict
    UOP_DIV = 3'd5,   // unsigned divide, unpipelined unit
    UOP_REM = 3'd6    // unsigned remainder, unpipelined unit
  } uop_e;

  // A micro-op as it travels RS -> port -> execution unit (and back through
  // the Victim_Slot when it is preempted).
  typedef struct packed {
    tid_t                  tid;
    rob_idx_t              rob_idx;
    seq_t                  seq;
    logic [PORT_IDX_W-1:0] port;
    uop_e                  uop;
    logic                  mispredict;  // branch outcome known to the model
    data_t                 op1;
    data_t                 op2;
  } op_t;

  // An op as the front end (decode/rename, not modelled) hands it to the
  // scheduler. dep_dist = k > 0 makes it depend on the k-th older op of the
  // same thread; 0 means no register dependence.
  typedef struct packed {
    uop_e                  uop;
    logic [PORT_IDX_W-1:0] port;
    logic                  mispredict;
    rob_idx_t              dep_dist;
    data_t                 op1;
    data_t                 op2;
  } fe_op_t;

  // Speculation tag kept per ROB entry and per RS entry.
  typedef struct packed {
    logic spec_flag;    // 1 = non-speculative
    deg_t spec_degree;
  } spec_tag_t;

  // Per-port intrinsic control register.
  typedef struct packed {
    logic free_flag;          // 1 = port free
    tid_t owner_tid;          // last (or current) owner thread
    logic owner_spec_flag;    // occupant non-speculative; 0 once released
    deg_t owner_spec_degree;
  } port_ctrl_t;

  // Result leaving an execution unit.
  typedef struct packed {
    logic     valid;
    tid_t     tid;
    rob_idx_t rob_idx;
    seq_t     seq;
    logic     is_branch;
    logic     mispredict;
    data_t    data;
  } result_t;

  function automatic logic is_unpipelined(uop_e u);
    return (u == UOP_DIV) || (u == UOP_REM);
  endfunction

  // a is older than b in a thread's program order (sequence numbers wrap;
  // fewer than 2^(SEQ_W-1) ops of one thread are ever in flight).
  function automatic logic seq_older(seq_t a, seq_t b);
    seq_t d;
    d = b - a;
    return (d != '0) && !d[SEQ_W-1];
  endfunction

  // EOP ordering: candidate is "earlier" than the occupant.
  // Spectre mode: smaller speculative degree. All mode: older in program
  // order (degree field holds the sequence number).
  function automatic logic eop_earlier(logic mode_all, deg_t cand, deg_t owner);
    if (mode_all) return seq_older(seq_t'(cand), seq_t'(owner));
    return cand < owner;
  endfunction

  typedef struct packed {
    logic grant;    // candidate may issue on this port this cycle
    logic preempt;  // issuing it kills the current occupant
    logic nop;      // decided by NOP (cross-thread, non-speculative wins)
    logic eop;      // decided by EOP (same thread, earlier wins)
    logic lop_block;// speculative cross-thread candidate held back by LOP
  } policy_t;

  // Issue flow, steps 2-8, for one candidate against one port.
  function automatic policy_t policy_check(logic mode_all, tid_t cand_tid,
                                           spec_tag_t cand, port_ctrl_t ctrl);
    policy_t p;
    p = '0;
    if (cand_tid == ctrl.owner_tid) begin
      if (ctrl.free_flag) begin
        p.grant = 1'b1;                                    // step 3 -> 7
      end else if (eop_earlier(mode_all, cand.spec_degree,
                               ctrl.owner_spec_degree)) begin
        p.grant = 1'b1; p.preempt = 1'b1; p.eop = 1'b1;    // step 4 -> 6 -> 7
      end
    end else begin
      if (cand.spec_flag && !ctrl.owner_spec_flag) begin   // step 5
        p.grant = 1'b1; p.preempt = !ctrl.free_flag; p.nop = 1'b1;
      end else if (!cand.spec_flag) begin
        p.lop_block = 1'b1;                                // step 8 by LOP
      end
    end
    return p;
  endfunction

endpackage
