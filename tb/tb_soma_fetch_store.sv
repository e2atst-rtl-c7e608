// tb_soma_fetch_store: self-checking test of the SOMA/GRAD/RES fetch&store
// unit with the 64-lane reuse module and the behavioural memory. A sequence
// of SOMA commands over time steps (the first with "first" set), GRAD
// commands backwards over the same steps and a RES command is run. Every
// word written (U, spikes, masks, dU, sums) is compared with a real-valued
// reference of the LIF equations, and each command must raise done len + 4
// cycles after its start.
module tb_soma_fetch_store;
  import e2atst_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, first, in_valid, out_valid;
  cmd_t cmd;
  cfg_t cfg;
  mem_req_t req;
  mem_rsp_t rsp;
  rm_mode_e mode;
  fpvec_t op_ps, op_u, op_du, sum;
  spkvec_t op_s, op_mask, spike, mask;
  int checks = 0, failures = 0;

  soma_fetch_store dut (.*);
  soma_grad_res #(.N(LANES)) u_rm (.clk, .rst_n, .mode, .first, .cfg, .in_valid,
    .ps(op_ps), .u_prev(op_u), .s_prev(op_s), .u_cur(op_u), .s_cur(op_s),
    .mask_cur(op_mask), .du_next(op_du), .res_in(op_u), .out_valid, .sum, .spike, .mask);
  tb_mem_model #(.DEPTH(256)) mem (.clk, .req, .rsp);

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(cmd_t c);
    int n;
    @(negedge clk);
    cmd = c; start = 1;
    @(negedge clk);
    start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (n != int'(c.len) + 4) begin failures++; $display("FAIL op %s took %0d cycles, expected %0d", c.op.name(), n, c.len + 4); end
    @(negedge clk);
  endtask

  task automatic chk(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  localparam int L = 6;     // vectors per time step
  localparam int TS = 4;    // time steps
  // bank use: 0 = PS (BN results), 1 = U(t), 2 = MM gradients, 3 = dU
  initial begin
    cmd_t c;
    logic [15:0] U [TS][L][LANES];
    logic        S [TS][L][LANES];
    logic        K [TS][L][LANES];
    logic [15:0] DU [TS][L][LANES];
    start = 0; cmd = '0;
    cfg = '0;
    cfg.alpha = r2f(0.75); cfg.beta_sg = r2f(0.5);
    cfg.th_f = r2f(1.0); cfg.th_l = r2f(0.4); cfg.th_r = r2f(1.6);
    for (int b = 0; b < NFP; b++) for (int a = 0; a < 256; a++) mem.fp[b][a] = '0;
    for (int b = 0; b < NSPK; b++) for (int a = 0; a < 256; a++) mem.spk[b][a] = '0;
    for (int a = 0; a < TS * L; a++)
      for (int l = 0; l < LANES; l++) begin
        mem.fp[0][a][l] = r2f((real'($urandom_range(0, 3000)) - 800.0) / 1500.0);
        mem.fp[2][a][l] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 900.0);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // forward: U(t) in bank 1 at t*L, spikes/masks at t*L
    for (int t = 0; t < TS; t++) begin
      c = '0;
      c.op = OP_SOMA; c.first = (t == 0); c.len = 12'(L);
      c.s0_bank = 0; c.s0_addr = AW'(t * L);
      c.s1_bank = 1; c.s1_addr = AW'((t == 0) ? 0 : (t - 1) * L);
      c.d0_bank = 1; c.d0_addr = AW'(t * L);
      c.sk_raddr = AW'((t == 0) ? 0 : (t - 1) * L); c.sk_waddr = AW'(t * L);
      run(c);
      for (int i = 0; i < L; i++)
        for (int l = 0; l < LANES; l++) begin
          logic [15:0] ps;
          ps = mem.fp[0][t * L + i][l];
          if (t == 0 || S[t-1][i][l]) U[t][i][l] = radd(ps, 16'h0);
          else U[t][i][l] = radd(ps, rmul(cfg.alpha, U[t-1][i][l]));
          S[t][i][l] = f2r(U[t][i][l]) >= f2r(cfg.th_f);
          K[t][i][l] = f2r(U[t][i][l]) > f2r(cfg.th_l) && f2r(U[t][i][l]) < f2r(cfg.th_r);
          chk($sformatf("U t%0d", t), mem.fp[1][t * L + i][l], U[t][i][l]);
          chk($sformatf("S t%0d", t), 16'(mem.spk[0][t * L + i][l]), 16'(S[t][i][l]));
          chk($sformatf("mask t%0d", t), 16'(mem.spk[1][t * L + i][l]), 16'(K[t][i][l]));
        end
    end
    // backward: dU(t) in bank 3 at t*L
    for (int t = TS - 1; t >= 0; t--) begin
      c = '0;
      c.op = OP_GRAD; c.first = (t == TS - 1); c.len = 12'(L);
      c.s0_bank = 2; c.s0_addr = AW'(t * L);
      c.s1_bank = 1; c.s1_addr = AW'(t * L);
      c.s2_bank = 3; c.s2_addr = AW'((t == TS - 1) ? 0 : (t + 1) * L);
      c.d0_bank = 3; c.d0_addr = AW'(t * L);
      c.sk_raddr = AW'(t * L);
      run(c);
      for (int i = 0; i < L; i++)
        for (int l = 0; l < LANES; l++) begin
          logic [15:0] adu, ds;
          adu = (t == TS - 1) ? 16'h0 : rmul(cfg.alpha, DU[t+1][i][l]);
          ds  = radd(mem.fp[2][t * L + i][l], rmul(r2f(-f2r(U[t][i][l])), adu));
          DU[t][i][l] = radd(rmul(ds, K[t][i][l] ? cfg.beta_sg : 16'h0), S[t][i][l] ? 16'h0 : adu);
          chk($sformatf("dU t%0d", t), mem.fp[3][t * L + i][l], DU[t][i][l]);
        end
    end
    // residual: bank 2 (at 100) <- bank 0 + bank 1
    c = '0;
    c.op = OP_RES; c.len = 12'(L);
    c.s0_bank = 0; c.s0_addr = 0; c.s1_bank = 1; c.s1_addr = 0;
    c.d0_bank = 2; c.d0_addr = 100;
    run(c);
    for (int i = 0; i < L; i++)
      for (int l = 0; l < LANES; l++)
        chk("RES", mem.fp[2][100 + i][l], radd(mem.fp[0][i][l], mem.fp[1][i][l]));
    checks++;
    if (mem.conflicts != 0) begin failures++; $display("FAIL bank conflicts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
