// sw_ssc: Speculative Status Checker for one hardware thread's ROB partition.
//
// It keeps, per ROB entry, the speculation tag read by the scheduler:
// Spec_Flag (1 = non-speculative) and a 7-bit Spec_Degree.
//
// Spectre mode (mode_all = 0): an op is non-speculative when every older
// branch has resolved; its degree is the number of older unresolved
// branches. The checker does not rescan the whole ROB: each cycle it scans
// at most SCAN_W entries (the issue width) and keeps three registers between
// rounds, as the source describes:
//   Last_Pos  - where the previous scan ended (kept here as an offset from
//               the ROB head, i.e. the number of entries already scanned),
//   Last_NS   - the last non-speculative entry seen (head offset),
//   Spec_Degree_Counter - unresolved branches met so far.
// Each scanned entry gets Spec_Flag = (counter == 0), Spec_Degree = counter;
// a branch whose Resolve_Flag is clear (Branch_Flag & ~Resolve_Flag)
// then increments the counter.
// When a branch resolves correctly (spec_update) the scan restarts at Last_NS
// with the counter cleared, so later entries are re-tagged on the next rounds.
// On a squash, Last_Pos is pulled back to the youngest surviving entry and
// Last_NS / the counter are recovered from that entry's Spec_Flag and
// Spec_Degree. A newly allocated entry is tagged speculative with the
// largest degree until the scan reaches it. Keeping the registers
// head-relative and the restart-at-Last_NS rule are this design's choices.
//
// All mode (mode_all = 1): only the ROB head is non-speculative (no
// exceptions are modelled), and the degree field carries the entry's
// sequence number so that the scheduler orders ops by age.
//
// Timing: tags are registered; a change in the ROB is reflected in the tags
// from the next cycle on, SCAN_W entries per cycle.
module sw_ssc
  import sw_pkg::*;
#(
  parameter int unsigned DEPTH  = ROB_PER_T,
  parameter int unsigned SCAN_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               mode_all,
  // ROB state (current cycle)
  input  rob_idx_t           head,
  input  logic [ROB_IDX_W:0] count,
  input  logic [DEPTH-1:0]   br_flag,
  input  logic [DEPTH-1:0]   res_flag,
  input  seq_t               ent_seq [DEPTH],
  // ROB events (current cycle, take effect at the clock edge)
  input  logic               alloc_valid,
  input  rob_idx_t           alloc_idx,
  input  logic               retire_valid,
  input  logic               squash_valid,
  input  rob_idx_t           squash_idx,
  input  logic               spec_update,
  // tags and scan registers
  output spec_tag_t          tag [DEPTH],
  output logic [SSC_REG_W-1:0] last_pos,
  output logic [SSC_REG_W-1:0] last_ns,
  output logic [SSC_REG_W-1:0] spec_degree_counter
);

  typedef logic [SSC_REG_W-1:0] reg_t;

  function automatic rob_idx_t wrap_add(rob_idx_t base, reg_t off);
    logic [SSC_REG_W:0] s;
    s = (SSC_REG_W+1)'(base) + (SSC_REG_W+1)'(off);
    if (32'(s) >= DEPTH) s = s - (SSC_REG_W+1)'(DEPTH);
    return rob_idx_t'(s);
  endfunction
  function automatic reg_t offs(rob_idx_t from, rob_idx_t to);
    return (to >= from) ? reg_t'(32'(to) - 32'(from)) : reg_t'(32'(to) + DEPTH - 32'(from));
  endfunction

  reg_t      lp_q, ln_q, cnt_q;
  spec_tag_t tag_q [DEPTH];

  reg_t      lp_d, ln_d, cnt_d;
  spec_tag_t tag_d [DEPTH];

  always_comb begin
    reg_t     keep, off;
    rob_idx_t idx;
    keep  = '0;
    off   = '0;
    idx   = '0;
    lp_d  = lp_q;
    ln_d  = ln_q;
    cnt_d = cnt_q;
    for (int i = 0; i < DEPTH; i++) tag_d[i] = tag_q[i];

    if (squash_valid || spec_update) begin
      if (squash_valid) begin
        keep = offs(head, squash_idx) + 1'b1;
        if (lp_q >= keep) begin
          // recover from the youngest surviving entry (a resolved branch)
          lp_d  = keep;
          cnt_d = reg_t'(tag_q[squash_idx].spec_degree);
          ln_d  = tag_q[squash_idx].spec_flag ? keep - 1'b1 :
                  ((ln_q > keep - 1'b1) ? keep - 1'b1 : ln_q);
        end
      end
      if (spec_update) begin
        // a branch resolved: rescan from the last non-speculative entry
        lp_d  = ln_d;
        cnt_d = '0;
      end
    end else begin
      for (int k = 0; k < SCAN_W; k++) begin
        off = lp_d;
        if (32'(off) < 32'(count)) begin
          idx = wrap_add(head, off);
          tag_d[idx].spec_flag   = (cnt_d == '0);
          tag_d[idx].spec_degree = (cnt_d > reg_t'(DEG_MAX)) ? deg_t'(DEG_MAX)
                                                               : deg_t'(cnt_d);
          if (cnt_d == '0) ln_d = off;
          if (br_flag[idx] && !res_flag[idx] && cnt_d != '1) cnt_d = cnt_d + 1'b1;
          lp_d = lp_d + 1'b1;
        end
      end
    end

    // head moves on retirement: keep the registers head-relative
    if (retire_valid) begin
      lp_d = (lp_d != '0) ? lp_d - 1'b1 : '0;
      ln_d = (ln_d != '0) ? ln_d - 1'b1 : '0;
    end

    if (alloc_valid) begin
      tag_d[alloc_idx].spec_flag   = 1'b0;
      tag_d[alloc_idx].spec_degree = deg_t'(DEG_MAX);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lp_q  <= '0;
      ln_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) tag_q[i] <= '{spec_flag: 1'b0, spec_degree: deg_t'(DEG_MAX)};
    end else begin
      lp_q  <= lp_d;
      ln_q  <= ln_d;
      cnt_q <= cnt_d;
      for (int i = 0; i < DEPTH; i++) tag_q[i] <= tag_d[i];
    end
  end

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      if (mode_all) begin
        tag[i].spec_flag   = (count != '0) && (rob_idx_t'(i) == head);
        tag[i].spec_degree = deg_t'(ent_seq[i]);
      end else begin
        tag[i] = tag_q[i];
      end
    end
  end

  assign last_pos            = lp_q;
  assign last_ns             = ln_q;
  assign spec_degree_counter = cnt_q;

endmodule
