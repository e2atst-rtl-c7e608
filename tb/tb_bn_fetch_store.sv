// tb_bn_fetch_store: self-checking test of the BN fetch&store unit with the
// 64-lane forward and backward BN units and the behavioural memory. A
// forward BN command normalises a batch and saves N and sqrt; a backward BN
// command then uses them with random incoming gradients. y, N, sqrt, dgamma,
// dbeta and dX in memory are compared with a real-valued FP16 reference of
// the BN equations, and the command durations (done 2*m + 11 and 2*m + 12 cycles after start)
// are checked.
module tb_bn_fetch_store;
  import e2atst_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done;
  cmd_t cmd;
  mem_req_t req;
  mem_rsp_t rsp;
  logic [LENW-1:0] m;
  fpvec_t par_a, par_b, op_x, op_n;
  logic f_load, f_acc, f_fin, f_norm, f_stat_valid, f_y_valid;
  logic b_load, b_acc, b_fin, b_out, b_stat_valid, b_dx_valid;
  fpvec_t f_mu, f_sqrt, f_y, f_n, b_dgamma, b_dbeta, b_dx;
  logic [15:0] eps;
  int checks = 0, failures = 0;

  bn_fetch_store dut (.*);
  bn_fp #(.N(LANES)) u_f (.clk, .rst_n, .load(f_load), .gamma(par_a), .beta(par_b), .eps,
    .m, .acc_valid(f_acc), .fin(f_fin), .norm_valid(f_norm), .x(op_x),
    .stat_valid(f_stat_valid), .mu_out(f_mu), .sqrt_out(f_sqrt), .y_valid(f_y_valid),
    .y(f_y), .n_out(f_n));
  bn_bp #(.N(LANES)) u_b (.clk, .rst_n, .load(b_load), .gamma(par_a), .sqrt_in(par_b), .m,
    .acc_valid(b_acc), .fin(b_fin), .out_valid(b_out), .g(op_x), .n_in(op_n),
    .stat_valid(b_stat_valid), .dgamma(b_dgamma), .dbeta(b_dbeta), .dx_valid(b_dx_valid),
    .dx(b_dx));
  tb_mem_model #(.DEPTH(256)) mem (.clk, .req, .rsp);

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(cmd_t c, int expect_cycles);
    int n;
    @(negedge clk);
    cmd = c; start = 1;
    @(negedge clk);
    start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (n != expect_cycles) begin failures++; $display("FAIL %s took %0d cycles, expected %0d", c.op.name(), n, expect_cycles); end
    @(negedge clk);
  endtask

  task automatic chk(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  localparam int M = 16;
  initial begin
    cmd_t c;
    logic [15:0] mf;
    start = 0; cmd = '0;
    eps = r2f(1.0 / 1024.0);
    mf = r2f(real'(M));
    for (int b = 0; b < NFP; b++) for (int a = 0; a < 256; a++) mem.fp[b][a] = '0;
    for (int a = 0; a < 64; a++) mem.par[a] = '0;
    for (int s = 0; s < M; s++)
      for (int l = 0; l < LANES; l++) begin
        mem.fp[0][s][l] = r2f((real'($urandom_range(0, 4000)) - 2000.0) / 600.0);
        mem.fp[3][s][l] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 1000.0);
      end
    for (int l = 0; l < LANES; l++) begin
      mem.par[1][l] = r2f(real'($urandom_range(20, 300)) / 100.0);
      mem.par[2][l] = r2f((real'($urandom_range(0, 200)) - 100.0) / 100.0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    c = '0;
    c.op = OP_BNF; c.len = 12'(M);
    c.s0_bank = 0; c.s0_addr = 0;
    c.d0_bank = 1; c.d0_addr = 0; c.d1_bank = 2; c.d1_addr = 0;
    c.p0 = 1; c.p1 = 2; c.p2 = 3;
    run(c, 2 * M + 11);
    c = '0;
    c.op = OP_BNB; c.len = 12'(M);
    c.s0_bank = 3; c.s0_addr = 0; c.s1_bank = 2; c.s1_addr = 0;
    c.d0_bank = 0; c.d0_addr = 128;
    c.p0 = 1; c.p1 = 3; c.p2 = 4; c.p3 = 5;
    run(c, 2 * M + 12);
    for (int l = 0; l < LANES; l++) begin
      logic [15:0] sx, sx2, mu, sq, g, isq, sn, smm, smn, sdy, c1, c2, c3;
      logic [15:0] nv [M];
      sx = 0; sx2 = 0;
      for (int s = 0; s < M; s++) begin
        sx  = radd(sx, mem.fp[0][s][l]);
        sx2 = radd(sx2, rmul(mem.fp[0][s][l], mem.fp[0][s][l]));
      end
      mu = rdiv(sx, mf);
      sq = rsqrt(radd(rsub(rdiv(sx2, mf), rmul(mu, mu)), eps));
      chk("sqrt", mem.par[3][l], sq);
      g = mem.par[1][l];
      for (int s = 0; s < M; s++) begin
        nv[s] = rsub(mem.fp[0][s][l], mu);
        chk("N", mem.fp[2][s][l], nv[s]);
        chk("y", mem.fp[1][s][l], radd(rmul(g, rdiv(nv[s], sq)), mem.par[2][l]));
      end
      isq = rdiv(16'h3C00, sq);
      sn = 0; smm = 0; smn = 0; sdy = 0;
      for (int s = 0; s < M; s++) begin
        logic [15:0] mv;
        mv  = rmul(rmul(g, mem.fp[3][s][l]), isq);
        sn  = radd(sn, nv[s]);
        smm = radd(smm, mv);
        smn = radd(smn, rmul(mv, nv[s]));
        sdy = radd(sdy, mem.fp[3][s][l]);
      end
      chk("dgamma", mem.par[4][l], rdiv(smn, g));
      chk("dbeta", mem.par[5][l], sdy);
      c1 = rdiv(rmul(smn, rmul(isq, isq)), mf);
      c2 = rdiv(rmul(c1, sn), mf);
      c3 = rdiv(smm, mf);
      for (int s = 0; s < M; s++) begin
        logic [15:0] mv;
        mv = rmul(rmul(g, mem.fp[3][s][l]), isq);
        chk("dX", mem.fp[0][128 + s][l], rsub(radd(rsub(mv, rmul(nv[s], c1)), c2), c3));
      end
    end
    checks++;
    if (mem.conflicts != 0) begin failures++; $display("FAIL bank conflicts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
