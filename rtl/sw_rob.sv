// sw_rob: status part of one hardware thread's reorder-buffer partition.
//
// The 92-entry ROB is fairly partitioned between the two hardware threads,
// so each thread owns one instance of DEPTH = 46 entries kept as a circular
// buffer. Each entry holds the fields the speculation checker reads:
// SEQ (program-order tag), Branch_Flag, Resolve_Flag, plus a completion bit.
// Operand values, register mappings and exceptions are not modelled.
//
// Interface and timing:
//  * alloc_*   : one op per cycle enters at the tail; alloc_idx/alloc_seq
//                name the entry it gets. alloc_ready drops when full or when
//                a squash happens in the same cycle.
//  * cmpl      : result buses of all execution units; entries of this thread
//                are marked complete, branches marked resolved.
//  * A completing branch with mispredict squashes every younger entry in the
//    same cycle (squash_* outputs, combinational); the oldest such branch wins.
//    spec_update pulses when a branch resolves correctly.
//  * The head retires (one per cycle) once complete.
// Retire width, alloc width and the squash mechanics are this design's
// choices; the source gives the ROB size and the SEQ/Branch/Resolve fields.
module sw_rob
  import sw_pkg::*;
#(
  parameter int unsigned DEPTH     = ROB_PER_T,
  parameter int unsigned NCMPL     = 8,
  parameter tid_t        THREAD_ID = '0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // allocation
  input  logic                  alloc_valid,
  input  logic                  alloc_is_branch,
  output logic                  alloc_ready,
  output rob_idx_t              alloc_idx,
  output seq_t                  alloc_seq,
  // completion
  input  result_t               cmpl [NCMPL],
  // status
  output rob_idx_t              head,
  output logic [ROB_IDX_W:0]    count,
  output logic [DEPTH-1:0]      ent_valid,
  output logic [DEPTH-1:0]      br_flag,
  output logic [DEPTH-1:0]      res_flag,
  output logic [DEPTH-1:0]      done_flag,
  output seq_t                  ent_seq [DEPTH],
  // events
  output logic                  retire_valid,
  output seq_t                  retire_seq,
  output logic                  squash_valid,
  output seq_t                  squash_seq,     // seq of the mispredicted branch
  output rob_idx_t              squash_idx,     // youngest surviving entry
  output logic                  spec_update
);

  function automatic rob_idx_t inc(rob_idx_t i);
    return (32'(i) == DEPTH - 1) ? '0 : rob_idx_t'(i + 1'b1);
  endfunction
  function automatic logic [ROB_IDX_W:0] offs(rob_idx_t from, rob_idx_t to);
    return (to >= from) ? (ROB_IDX_W+1)'(to - from)
                        : (ROB_IDX_W+1)'(32'(to) + DEPTH - 32'(from));
  endfunction

  rob_idx_t          head_q, tail_q;
  logic [ROB_IDX_W:0] count_q;
  seq_t              next_seq_q;
  logic [DEPTH-1:0]  br_q, res_q, done_q;
  seq_t              seq_q [DEPTH];

  // validity of each entry from head/count
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      ent_valid[i] = offs(head_q, rob_idx_t'(i)) < count_q;
    end
  end

  // oldest mispredicted branch completing this cycle
  logic [ROB_IDX_W:0] best_d;
  always_comb begin
    squash_valid = 1'b0;
    squash_idx   = '0;
    squash_seq   = '0;
    spec_update  = 1'b0;
    best_d       = '1;
    for (int c = 0; c < NCMPL; c++) begin
      if (cmpl[c].valid && cmpl[c].tid == THREAD_ID && cmpl[c].is_branch &&
          ent_valid[cmpl[c].rob_idx]) begin
        if (cmpl[c].mispredict) begin
          if (offs(head_q, cmpl[c].rob_idx) < best_d) begin
            best_d       = offs(head_q, cmpl[c].rob_idx);
            squash_valid = 1'b1;
            squash_idx   = cmpl[c].rob_idx;
            squash_seq   = cmpl[c].seq;
          end
        end else begin
          spec_update = 1'b1;
        end
      end
    end
  end

  assign retire_valid = (count_q != 0) && done_q[head_q];
  assign retire_seq   = seq_q[head_q];
  assign alloc_ready  = (32'(count_q) < DEPTH) && !squash_valid;
  assign alloc_idx    = tail_q;
  assign alloc_seq    = next_seq_q;
  assign head         = head_q;
  assign count        = count_q;
  assign br_flag      = br_q;
  assign res_flag     = res_q;
  assign done_flag    = done_q;
  always_comb for (int i = 0; i < DEPTH; i++) ent_seq[i] = seq_q[i];

  logic do_alloc;
  assign do_alloc = alloc_valid && alloc_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q     <= '0;
      tail_q     <= '0;
      count_q    <= '0;
      next_seq_q <= '0;
      br_q       <= '0;
      res_q      <= '0;
      done_q     <= '0;
      for (int i = 0; i < DEPTH; i++) seq_q[i] <= '0;
    end else begin
      // completions
      for (int c = 0; c < NCMPL; c++) begin
        if (cmpl[c].valid && cmpl[c].tid == THREAD_ID &&
            ent_valid[cmpl[c].rob_idx] && seq_q[cmpl[c].rob_idx] == cmpl[c].seq) begin
          done_q[cmpl[c].rob_idx] <= 1'b1;
          if (cmpl[c].is_branch) res_q[cmpl[c].rob_idx] <= 1'b1;
        end
      end
      // allocation (never in a squash cycle)
      if (do_alloc) begin
        br_q[tail_q]   <= alloc_is_branch;
        res_q[tail_q]  <= 1'b0;
        done_q[tail_q] <= 1'b0;
        seq_q[tail_q]  <= next_seq_q;
        tail_q         <= inc(tail_q);
        next_seq_q     <= next_seq_q + 1'b1;
      end
      // head / count
      if (squash_valid) begin
        tail_q     <= inc(squash_idx);
        next_seq_q <= squash_seq + 1'b1;
        count_q    <= offs(head_q, squash_idx) + 1'b1 - (ROB_IDX_W+1)'(retire_valid);
      end else begin
        count_q <= count_q + (ROB_IDX_W+1)'(do_alloc) - (ROB_IDX_W+1)'(retire_valid);
      end
      if (retire_valid) head_q <= inc(head_q);
    end
  end

endmodule
