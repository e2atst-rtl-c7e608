// tb_global_ctrl: self-checking test of the global controller. It writes and
// reads back the configuration registers, pushes a random stream of commands
// (all opcodes, NOPs included) through the staging registers, and plays the
// three fetch&store units with random completion delays. Each command must
// start the right unit, in FIFO order, one at a time; the done and
// per-opcode counters, busy, and the dropping of pushes into a full FIFO
// are checked.
module tb_global_ctrl;
  import e2atst_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic reg_we, reg_re;
  logic [4:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  cfg_t cfg;
  cmd_t cur_cmd;
  logic start_mm, start_soma, start_bn, done_mm, done_soma, done_bn, busy;
  op_e active_op;
  int checks = 0, failures = 0;

  global_ctrl #(.DEPTH(4)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = 5'(a); reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk);
    reg_re = 1; reg_addr = 5'(a);
    @(negedge clk);
    reg_re = 0;
    d = reg_rdata;
  endtask

  task automatic push(cmd_t c);
    logic [127:0] w;
    w = c;
    for (int i = 0; i < 4; i++) wr(8 + i, w[32*i +: 32]);
    wr(12, 0);
  endtask

  // engine models: done after a random delay, check the started command
  cmd_t exp_q [$];
  int   op_seen [7];
  int   nstarted = 0;
  always @(posedge clk) if (rst_n && (start_mm || start_soma || start_bn)) begin
    cmd_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected start"); end
    else begin
      e = exp_q.pop_front();
      if (cur_cmd !== e) begin failures++; $display("FAIL order: got op %0d exp op %0d", cur_cmd.op, e.op); end
      if ((start_mm != (e.op == OP_MM)) ||
          (start_soma != (e.op inside {OP_SOMA, OP_GRAD, OP_RES})) ||
          (start_bn != (e.op inside {OP_BNF, OP_BNB}))) begin
        failures++; $display("FAIL wrong unit started for op %0d", e.op);
      end
      op_seen[e.op]++;
      nstarted++;
    end
  end

  logic pending = 0, hold = 0;
  int   delay;
  op_e  pend_op;
  always @(posedge clk) begin
    done_mm <= 0; done_soma <= 0; done_bn <= 0;
    if (!rst_n) pending <= 0;
    else if (start_mm || start_soma || start_bn) begin
      pending <= 1; delay <= $urandom_range(0, 6); pend_op <= cur_cmd.op;
    end else if (pending) begin
      checks++;
      if (!busy || active_op != pend_op) begin failures++; $display("FAIL busy/active_op while running"); end
      if (delay == 0 && !hold) begin
        pending <= 0;
        case (pend_op)
          OP_MM: done_mm <= 1;
          OP_SOMA, OP_GRAD, OP_RES: done_soma <= 1;
          default: done_bn <= 1;
        endcase
      end else if (delay != 0) delay <= delay - 1;
    end
  end

  initial begin
    logic [31:0] d;
    int n_nop;
    reg_we = 0; reg_re = 0; reg_addr = 0; reg_wdata = 0; pending = 0;
    n_nop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 6; a++) wr(a, 32'h1000 + a * 7);
    for (int a = 0; a < 6; a++) begin
      rd(a, d);
      checks++;
      if (d !== 32'h1000 + a * 7) begin failures++; $display("FAIL cfg reg %0d", a); end
    end
    checks++;
    if (cfg.alpha !== 16'h1000 || cfg.eps !== 16'h1023) begin failures++; $display("FAIL cfg outputs"); end
    for (int i = 0; i < 40; i++) begin
      cmd_t c;
      c = cmd_t'({$urandom, $urandom, $urandom, $urandom});
      c.op = op_e'($urandom_range(0, 6));
      if (c.op == OP_NOP) n_nop++; else exp_q.push_back(c);
      push(c);
      // keep the 4-deep FIFO from overflowing
      do rd(16, d); while (d[31:24] >= 3);
    end
    do rd(16, d); while (d[16] || d[31:24] != 0);
    checks++;
    if (d[15:0] != 40) begin failures++; $display("FAIL done count %0d", d[15:0]); end
    for (int o = 1; o < 7; o++) begin
      rd(16 + o, d);
      checks++;
      if (d != op_seen[o]) begin failures++; $display("FAIL op count %0d: %0d vs %0d", o, d, op_seen[o]); end
    end
    // overflow: hold the unit busy, push 6 into a 4-deep FIFO
    hold = 1;
    begin
      cmd_t c;
      c = '0; c.op = OP_MM;
      for (int i = 0; i < 6; i++) begin
        push(c);
        if (i < 5) exp_q.push_back(c);
      end
    end
    rd(24, d);
    checks++;
    if (d != 1) begin failures++; $display("FAIL drop count %0d", d); end
    hold = 0;
    do rd(16, d); while (d[16]);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d commands never started", exp_q.size()); end
    $display("started=%0d nops=%0d", nstarted, n_nop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
