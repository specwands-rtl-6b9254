// tb_sw_exec_unit: self-checking test of the execution unit behind a port.
//
// Checks ALU results one cycle after issue, divider quotient/remainder
// against the simulator's own / and % operators, the 12-cycle divider
// latency, back-to-back pipelined ALU issue, and that a kill aborts a
// running division (no result appears) while a new division started in the
// kill cycle completes normally.
module tb_sw_exec_unit;
  import sw_pkg::*;

  logic    clk = 0, rst_n = 0;
  logic    start, kill, busy;
  op_t     op;
  result_t result;

  int checks = 0, failures = 0;
  int cycle = 0;

  sw_exec_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h exp %0h", what, got, exp);
    end
  endtask

  function automatic op_t mk(uop_e u, data_t a, data_t b, seq_t s);
    op_t o;
    o = '0;
    o.uop = u; o.op1 = a; o.op2 = b; o.seq = s; o.tid = tid_t'(s[0]);
    o.rob_idx = rob_idx_t'(s);
    o.mispredict = s[1];
    return o;
  endfunction

  function automatic data_t ref_alu(op_t o);
    case (o.uop)
      UOP_ADD: return o.op1 + o.op2;
      UOP_SUB: return o.op1 - o.op2;
      UOP_AND: return o.op1 & o.op2;
      UOP_XOR: return o.op1 ^ o.op2;
      UOP_BR:  return data_t'(o.op1 == o.op2);
      UOP_DIV: return (o.op2 == 0) ? '1 : o.op1 / o.op2;
      UOP_REM: return (o.op2 == 0) ? o.op1 : o.op1 % o.op2;
      default: return '0;
    endcase
  endfunction

  // issue one op and return the number of cycles until its result
  task automatic run_one(op_t o, output int lat, output data_t data);
    int t0;
    @(negedge clk);
    start = 1; op = o;
    t0 = cycle;
    @(negedge clk);
    start = 0;
    lat = -1;
    for (int k = 0; k < 40; k++) begin
      if (result.valid) begin
        lat = cycle - t0;
        data = result.data;
        expect_eq("result seq", result.seq, o.seq);
        expect_eq("result branch", result.is_branch, o.uop == UOP_BR);
        expect_eq("result mispredict", result.mispredict, (o.uop == UOP_BR) && o.mispredict);
        break;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    int lat;
    data_t d;
    op_t o;
    start = 0; kill = 0; op = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // latencies
    run_one(mk(UOP_ADD, 32'd5, 32'd7, 7'd1), lat, d);
    expect_eq("ALU latency", lat, 1);
    expect_eq("ADD", d, 32'd12);
    run_one(mk(UOP_DIV, 32'd1000, 32'd7, 7'd2), lat, d);
    expect_eq("DIV latency", lat, 12);
    expect_eq("DIV", d, 32'd142);

    // random ops
    for (int n = 0; n < 300; n++) begin
      o = mk(uop_e'($urandom_range(0, 6)), $urandom, $urandom, seq_t'(n));
      if (n % 5 == 0) o.op2 = o.op2 >> $urandom_range(0, 31);
      if (n % 37 == 0) o.op2 = '0;
      run_one(o, lat, d);
      expect_eq($sformatf("op %0d uop %0d", n, o.uop), d, ref_alu(o));
      expect_eq("latency", lat, is_unpipelined(o.uop) ? 12 : 1);
    end

    // pipelined: one ALU op per cycle, results in order one cycle later
    @(negedge clk);
    for (int k = 0; k < 4; k++) begin
      start = 1; op = mk(UOP_ADD, data_t'(k), 32'd100, seq_t'(k));
      @(negedge clk);
      expect_eq("pipelined valid", result.valid, 1);
      expect_eq("pipelined data", result.data, 100 + k);
    end
    start = 0;
    @(negedge clk);

    // kill a running division; start a new one in the kill cycle
    start = 1; op = mk(UOP_DIV, 32'd99, 32'd9, 7'd20);
    @(negedge clk);
    start = 0;
    expect_eq("busy after start", busy, 1);
    repeat (5) @(negedge clk);
    kill = 1; start = 1; op = mk(UOP_REM, 32'd100, 32'd7, 7'd21);
    @(negedge clk);
    kill = 0; start = 0;
    begin
      int got = 0, seq_seen = -1, when = -1;
      for (int k = 0; k < 20; k++) begin
        if (result.valid) begin got++; seq_seen = result.seq; d = result.data; when = k; end
        @(negedge clk);
      end
      expect_eq("one result after kill", got, 1);
      expect_eq("killed op gave no result", seq_seen, 21);
      expect_eq("new op result", d, 32'd2);
      expect_eq("new op latency", when + 1, 12);
    end

    // kill alone frees the divider
    start = 1; op = mk(UOP_DIV, 32'd99, 32'd9, 7'd30);
    @(negedge clk);
    start = 0;
    repeat (3) @(negedge clk);
    kill = 1;
    @(negedge clk);
    kill = 0;
    expect_eq("idle after kill", busy, 0);
    begin
      int got = 0;
      for (int k = 0; k < 15; k++) begin
        if (result.valid) got++;
        @(negedge clk);
      end
      expect_eq("no result after kill", got, 0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
