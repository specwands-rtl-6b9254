// sw_exec_unit: the execution units behind one issue port.
//
// Two paths share the port's input latch and output bus:
//  * a pipelined integer ALU (ADD, SUB, AND, XOR, BR): result one cycle
//    after issue, a new op can be accepted every cycle;
//  * an unpipelined unsigned divider (DIV, REM): a radix-2^BPC restoring
//    divider that retires BPC quotient bits per cycle. With DATA_W = 32 and
//    BPC = 3 it iterates 11 times, so the result appears 12 cycles after
//    issue, the integer-division latency the source quotes.
// kill clears the divider's internal state in the same cycle so that a new
// op can start in the same cycle as the kill (the preempting op); a killed
// op never produces a result. Division by zero returns an all-ones quotient
// and the dividend as remainder (this design's choice).
// The unit mix of real ports (FP, SIMD, multiplier, load/store) is not
// modelled; every port carries this ALU + divider pair.
// Timing: result.valid for exactly one cycle per completed op; busy is high
// while the divider iterates.
module sw_exec_unit
  import sw_pkg::*;
#(
  parameter int unsigned BPC = 3   // quotient bits per divider cycle
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  op_t     op,
  input  logic    kill,
  output result_t result,
  output logic    busy
);

  localparam int unsigned ITERS = (DATA_W + BPC - 1) / BPC;
  localparam int unsigned PAD_W = ITERS * BPC;           // dividend padded
  localparam int unsigned CNT_W = $clog2(ITERS + 1);

  // ---------------- pipelined ALU ----------------
  result_t alu_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alu_q <= '0;
    end else begin
      alu_q.valid <= start && !is_unpipelined(op.uop);
      alu_q.tid        <= op.tid;
      alu_q.rob_idx    <= op.rob_idx;
      alu_q.seq        <= op.seq;
      alu_q.is_branch  <= (op.uop == UOP_BR);
      alu_q.mispredict <= (op.uop == UOP_BR) && op.mispredict;
      unique case (op.uop)
        UOP_ADD: alu_q.data <= op.op1 + op.op2;
        UOP_SUB: alu_q.data <= op.op1 - op.op2;
        UOP_AND: alu_q.data <= op.op1 & op.op2;
        UOP_XOR: alu_q.data <= op.op1 ^ op.op2;
        UOP_BR:  alu_q.data <= data_t'(op.op1 == op.op2);
        default: alu_q.data <= '0;
      endcase
    end
  end

  // ---------------- unpipelined divider ----------------
  logic               div_busy_q;
  logic [CNT_W-1:0]   div_cnt_q;
  logic [PAD_W-1:0]   div_n_q;     // remaining dividend bits, MSB first
  logic [PAD_W-1:0]   div_q_q;     // quotient bits collected
  logic [DATA_W:0]    div_r_q;     // partial remainder
  data_t              div_d_q;
  op_t                div_op_q;
  result_t            div_res_q;

  // BPC restoring steps in one cycle
  logic [DATA_W:0]  r_step;
  logic [PAD_W-1:0] n_step, q_step;
  always_comb begin
    r_step = div_r_q;
    n_step = div_n_q;
    q_step = div_q_q;
    for (int b = 0; b < BPC; b++) begin
      r_step = {r_step[DATA_W-1:0], n_step[PAD_W-1]};
      n_step = {n_step[PAD_W-2:0], 1'b0};
      if (r_step >= {1'b0, div_d_q}) begin
        r_step = r_step - {1'b0, div_d_q};
        q_step = {q_step[PAD_W-2:0], 1'b1};
      end else begin
        q_step = {q_step[PAD_W-2:0], 1'b0};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_busy_q <= 1'b0;
      div_cnt_q  <= '0;
      div_n_q    <= '0;
      div_q_q    <= '0;
      div_r_q    <= '0;
      div_d_q    <= '0;
      div_op_q   <= '0;
      div_res_q  <= '0;
    end else begin
      div_res_q.valid <= 1'b0;
      if (start && is_unpipelined(op.uop)) begin
        div_busy_q <= 1'b1;
        div_cnt_q  <= CNT_W'(ITERS);
        div_n_q    <= PAD_W'(op.op1);
        div_q_q    <= '0;
        div_r_q    <= '0;
        div_d_q    <= op.op2;
        div_op_q   <= op;
      end else if (kill) begin
        div_busy_q <= 1'b0;
        div_cnt_q  <= '0;
      end else if (div_busy_q) begin
        div_n_q   <= n_step;
        div_q_q   <= q_step;
        div_r_q   <= r_step;
        div_cnt_q <= div_cnt_q - 1'b1;
        if (div_cnt_q == CNT_W'(1)) begin
          div_busy_q           <= 1'b0;
          div_res_q.valid      <= 1'b1;
          div_res_q.tid        <= div_op_q.tid;
          div_res_q.rob_idx    <= div_op_q.rob_idx;
          div_res_q.seq        <= div_op_q.seq;
          div_res_q.is_branch  <= 1'b0;
          div_res_q.mispredict <= 1'b0;
          if (div_d_q == '0)
            div_res_q.data <= (div_op_q.uop == UOP_DIV) ? '1 : div_op_q.op1;
          else
            div_res_q.data <= (div_op_q.uop == UOP_DIV) ? data_t'(q_step)
                                                        : data_t'(r_step);
        end
      end
    end
  end

  assign busy   = div_busy_q;
  assign result = div_res_q.valid ? div_res_q : alu_q;

  // the port never issues to a busy divider unless it kills it first
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
      start && is_unpipelined(op.uop) && div_busy_q |-> kill);
  a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
      !(div_res_q.valid && alu_q.valid));

endmodule
