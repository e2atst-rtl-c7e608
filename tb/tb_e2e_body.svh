// tb_e2e_body.svh: the end-to-end training-step test, included by
// tb_e2atst_top. The including module declares localparam N (matrix array
// size = tile size), the bus signals and the instance `dut`, so the same
// test can be compiled for any array size.
//
// Everything goes through the SoC bus: the host loads data, configuration
// and a stream of commands, waits for the controller, reads results back and
// re-lays out one operand. A reference model executes the same commands on
// a copy of the memories (ref_exec below, an independent behavioural
// description of every command); at the end every word of every SRAM bank
// of the chip is compared with the reference copy. One forward step of a
// spiking layer over two time steps, its backward step and its weight
// gradient are run:
//   FP : Z = X * W (spike MM) -> BN forward -> SOMA t=0 (first), SOMA t=1
//        -> RES (y + U(1))
//   BP : GRAD t=1 (last step), GRAD t=0 -> BN backward -> dZ
//        dX = dZ * W^T (FP16 MM, dZ^T re-laid out by the host)
//   WG : dW = X^T * dZ (spike MM)
// MM latencies are checked against 2*ROWS + COLS + T - 2, the FIFO is seen
// holding several commands, bus accesses to the SRAMs are seen stalled while
// the controller is busy; each of these mechanisms, and each opcode, must
// have happened at least once or the test fails.

  import e2atst_pkg::*;
  import fp16_ref_pkg::*;

  localparam int D = 1 << AW;

  int checks = 0, failures = 0;
  int stalls = 0, max_fifo = 0, mm_lat_ok = 0, spikes_seen = 0, masks_seen = 0;
  int n_op[8];
  int mm_spk_beats = 0, mm_fp_beats = 0, soma_first = 0, soma_next = 0, grad_last = 0, grad_next = 0;

  // reference memories
  logic [15:0] rf [NFP][D][LANES];
  logic        rs [NSPK][D][LANES];
  logic [15:0] rp [1 << PAW][LANES];
  cfg_t        rcfg;

  initial begin
    clk = 0;
    forever #1 clk = ~clk;
  end

  initial begin
    #(2 * (400000 + 300 * N * N));
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  // ------------------------------------------------------------ bus host
  task automatic bus_wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    #0.5;
    while (!bus_ready) begin stalls++; @(negedge clk); #0.5; end
    @(negedge clk);
    bus_valid = 0; bus_we = 0;
  endtask

  task automatic bus_rd(input logic [19:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 0; bus_addr = a;
    #0.5;
    while (!bus_ready) begin stalls++; @(negedge clk); #0.5; end
    @(negedge clk);
    bus_valid = 0;
    checks++;
    if (!bus_rvalid) begin failures++; $display("FAIL rvalid"); end
    d = bus_rdata;
  endtask

  function automatic logic [19:0] fa(int bank, int word, int chunk);
    return {4'(1 + bank), 1'b0, 10'(word), 5'(chunk)};
  endfunction

  task automatic wr_fp(int bank, int word, logic [15:0] v [LANES]);
    for (int p = 0; p < LANES / 2; p++) bus_wr(fa(bank, word, p), {v[2*p+1], v[2*p]});
    for (int l = 0; l < LANES; l++) rf[bank][word][l] = v[l];
  endtask

  task automatic wr_spk(int bank, int word, logic v [LANES]);
    logic [31:0] w;
    for (int h = 0; h < 2; h++) begin
      for (int l = 0; l < 32; l++) w[l] = v[32*h + l];
      bus_wr({4'(5 + bank), 1'b0, 10'(word), 5'(h)}, w);
    end
    for (int l = 0; l < LANES; l++) rs[bank][word][l] = v[l];
  endtask

  task automatic wr_par(int word, logic [15:0] v [LANES]);
    for (int p = 0; p < LANES / 2; p++) bus_wr({4'd7, 6'd0, 5'(word), 5'(p)}, {v[2*p+1], v[2*p]});
    for (int l = 0; l < LANES; l++) rp[word][l] = v[l];
  endtask

  task automatic rd_fp(int bank, int word, output logic [15:0] v [LANES]);
    logic [31:0] d;
    for (int p = 0; p < LANES / 2; p++) begin
      bus_rd(fa(bank, word, p), d);
      v[2*p] = d[15:0]; v[2*p+1] = d[31:16];
    end
  endtask

  task automatic wr_reg(int r, logic [31:0] d);
    bus_wr({4'd0, 11'd0, 5'(r)}, d);
  endtask

  task automatic push(cmd_t c);
    logic [127:0] b;
    b = c;
    for (int w = 0; w < 4; w++) wr_reg(8 + w, b[32*w +: 32]);
    wr_reg(12, 0);
    ref_exec(c);
  endtask

  task automatic wait_idle();
    logic [31:0] st;
    do bus_rd({4'd0, 11'd0, 5'd16}, st); while (st[16]);
  endtask

  // ------------------------------------------------------------ reference
  function automatic logic [15:0] rneg(logic [15:0] a);
    return r2f(-f2r(a));
  endfunction

  task automatic ref_exec(cmd_t c);
    logic [15:0] acc, ps, u, du, a_du, ds, y;
    logic [15:0] sx [LANES], sx2 [LANES], mu [LANES], sq [LANES], isq [LANES];
    logic [15:0] sn [LANES], sm [LANES], smn [LANES], sdy [LANES], c1 [LANES], c2 [LANES], c3 [LANES];
    logic [15:0] mf, mv, n;
    int L;
    L = int'(c.len);
    unique case (c.op)
      OP_MM: begin
        for (int r = 0; r < N; r++)
          for (int col = 0; col < N; col++) begin
            acc = 0;
            for (int k = 0; k < L; k++)
              acc = radd(acc, c.a_spike ? (rs[c.s0_bank[0]][c.s0_addr + k][r] ? rf[c.s1_bank][c.s1_addr + k][col] : 16'h0)
                                        : rmul(rf[c.s0_bank][c.s0_addr + k][r], rf[c.s1_bank][c.s1_addr + k][col]));
            rf[c.d0_bank][c.d0_addr + r][col] = acc;
          end
      end
      OP_SOMA, OP_GRAD, OP_RES: begin
        for (int i = 0; i < L; i++)
          for (int l = 0; l < LANES; l++) begin
            ps = rf[c.s0_bank][c.s0_addr + i][l];
            u  = rf[c.s1_bank][c.s1_addr + i][l];
            if (c.op == OP_SOMA) begin
              y = (c.first || rs[0][c.sk_raddr + i][l]) ? radd(ps, 16'h0) : radd(ps, rmul(rcfg.alpha, u));
              rf[c.d0_bank][c.d0_addr + i][l] = y;
              rs[0][c.sk_waddr + i][l] = f2r(y) >= f2r(rcfg.th_f);
              rs[1][c.sk_waddr + i][l] = (f2r(y) > f2r(rcfg.th_l)) && (f2r(y) < f2r(rcfg.th_r));
            end else if (c.op == OP_GRAD) begin
              du   = rf[c.s2_bank][c.s2_addr + i][l];
              a_du = c.first ? 16'h0 : rmul(rcfg.alpha, du);
              ds   = radd(ps, rmul(rneg(u), a_du));
              rf[c.d0_bank][c.d0_addr + i][l] =
                radd(rmul(ds, rs[1][c.sk_raddr + i][l] ? rcfg.beta_sg : 16'h0),
                     rs[0][c.sk_raddr + i][l] ? 16'h0 : a_du);
            end else begin
              rf[c.d0_bank][c.d0_addr + i][l] = radd(ps, u);
            end
          end
      end
      OP_BNF: begin
        mf = r2f(real'(L));
        for (int l = 0; l < LANES; l++) begin
          sx[l] = 0; sx2[l] = 0;
          for (int s = 0; s < L; s++) begin
            sx[l]  = radd(sx[l], rf[c.s0_bank][c.s0_addr + s][l]);
            sx2[l] = radd(sx2[l], rmul(rf[c.s0_bank][c.s0_addr + s][l], rf[c.s0_bank][c.s0_addr + s][l]));
          end
          mu[l] = rdiv(sx[l], mf);
          sq[l] = rsqrt(radd(rsub(rdiv(sx2[l], mf), rmul(mu[l], mu[l])), rcfg.eps));
          rp[c.p2][l] = sq[l];
        end
        for (int s = 0; s < L; s++)
          for (int l = 0; l < LANES; l++) begin
            n = rsub(rf[c.s0_bank][c.s0_addr + s][l], mu[l]);
            rf[c.d0_bank][c.d0_addr + s][l] = radd(rmul(rp[c.p0][l], rdiv(n, sq[l])), rp[c.p1][l]);
            rf[c.d1_bank][c.d1_addr + s][l] = n;
          end
      end
      OP_BNB: begin
        mf = r2f(real'(L));
        for (int l = 0; l < LANES; l++) begin
          isq[l] = rdiv(16'h3C00, rp[c.p1][l]);
          sn[l] = 0; sm[l] = 0; smn[l] = 0; sdy[l] = 0;
          for (int s = 0; s < L; s++) begin
            mv = rmul(rmul(rp[c.p0][l], rf[c.s0_bank][c.s0_addr + s][l]), isq[l]);
            n  = rf[c.s1_bank][c.s1_addr + s][l];
            sn[l]  = radd(sn[l], n);
            sm[l]  = radd(sm[l], mv);
            smn[l] = radd(smn[l], rmul(mv, n));
            sdy[l] = radd(sdy[l], rf[c.s0_bank][c.s0_addr + s][l]);
          end
          c1[l] = rdiv(rmul(smn[l], rmul(isq[l], isq[l])), mf);
          c2[l] = rdiv(rmul(c1[l], sn[l]), mf);
          c3[l] = rdiv(sm[l], mf);
        end
        for (int l = 0; l < LANES; l++) begin
          rp[c.p2][l] = rdiv(smn[l], rp[c.p0][l]);
          rp[c.p3][l] = sdy[l];
        end
        for (int s = 0; s < L; s++)
          for (int l = 0; l < LANES; l++) begin
            mv = rmul(rmul(rp[c.p0][l], rf[c.s0_bank][c.s0_addr + s][l]), isq[l]);
            n  = rf[c.s1_bank][c.s1_addr + s][l];
            rf[c.d0_bank][c.d0_addr + s][l] = rsub(radd(rsub(mv, rmul(n, c1[l])), c2[l]), c3[l]);
          end
      end
      default: ;
    endcase
    n_op[c.op]++;
  endtask

  // ------------------------------------------------------------ monitors
  int mm_first, mm_last, cyc;
  logic [LENW-1:0] mm_len;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (int'(dut.u_ctrl.cnt) > max_fifo) max_fifo = int'(dut.u_ctrl.cnt);
    if (dut.start_mm) begin mm_first = -1; mm_len = dut.cur_cmd.len; end
    if (dut.mm_in_valid && mm_first < 0) mm_first = cyc;
    if (dut.active_op == OP_MM && dut.req.fw[0].en) mm_last = cyc;
    if (dut.done_mm) begin
      checks++;
      if (mm_last - mm_first + 1 != 2 * N + N + int'(mm_len) - 2) begin
        failures++;
        $display("FAIL MM latency %0d expected %0d", mm_last - mm_first + 1, 2 * N + N + int'(mm_len) - 2);
      end else mm_lat_ok++;
    end
    if (dut.mm_in_valid) begin
      if (dut.mm_spike) mm_spk_beats++; else mm_fp_beats++;
    end
    if (dut.start_soma && dut.cur_cmd.op == OP_SOMA) begin if (dut.cur_cmd.first) soma_first++; else soma_next++; end
    if (dut.start_soma && dut.cur_cmd.op == OP_GRAD) begin if (dut.cur_cmd.first) grad_last++; else grad_next++; end
    if (dut.active_op == OP_SOMA && dut.req.sw[0].en) begin
      spikes_seen += $countones(dut.req.sw[0].data);
      masks_seen  += $countones(dut.req.sw[1].data);
    end
  end

  function automatic cmd_t mk(op_e op, int len);
    cmd_t c;
    c = '0;
    c.op = op;
    c.len = LENW'(len);
    return c;
  endfunction

  task automatic mechanism(string name, int count);
    checks++;
    $display("mechanism %-28s %0d", name, count);
    if (count == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
  endtask

  // chip memory contents (generate scopes take constant indices only)
  function automatic logic [15:0] dut_fp(int k, int w, int l);
    unique case (k)
      0: return dut.g_fp[0].u_fp_sram.mem[w][l];
      1: return dut.g_fp[1].u_fp_sram.mem[w][l];
      2: return dut.g_fp[2].u_fp_sram.mem[w][l];
      default: return dut.g_fp[3].u_fp_sram.mem[w][l];
    endcase
  endfunction

  function automatic logic dut_spk(int k, int w, int l);
    return (k == 0) ? dut.g_spk[0].u_spike_sram.mem[w][l] : dut.g_spk[1].u_spike_sram.mem[w][l];
  endfunction

  // ------------------------------------------------------------ the test
  initial begin : main
    logic [15:0] v [LANES];
    logic        b [LANES];
    logic [15:0] W [N][N];
    logic        X [N][N];
    logic [15:0] dz [N][LANES];
    cmd_t c;
    int words_bad;

    for (int i = 0; i < 8; i++) n_op[i] = 0;
    for (int k = 0; k < NFP; k++) for (int w = 0; w < D; w++) for (int l = 0; l < LANES; l++) rf[k][w][l] = 0;
    for (int k = 0; k < NSPK; k++) for (int w = 0; w < D; w++) for (int l = 0; l < LANES; l++) rs[k][w][l] = 0;
    for (int w = 0; w < (1 << PAW); w++) for (int l = 0; l < LANES; l++) rp[w][l] = 0;
    cyc = 0; mm_first = -1; mm_last = 0; mm_len = 0;
    bus_valid = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0;
    rst_n = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // configuration: alpha 0.5, beta 1.0, th_f 1.0, th_l 0.25, th_r 1.75, eps 2^-10
    rcfg = '{alpha: 16'h3800, beta_sg: 16'h3C00, th_f: 16'h3C00, th_l: 16'h3400,
             th_r: 16'h3F00, eps: 16'h1400};
    wr_reg(0, rcfg.alpha); wr_reg(1, rcfg.beta_sg); wr_reg(2, rcfg.th_f);
    wr_reg(3, rcfg.th_l);  wr_reg(4, rcfg.th_r);    wr_reg(5, rcfg.eps);

    // operands: X (B x C spikes) as X^T words at spike bank 0 @0 and as X
    // rows at @100; W (C x K) rows in FP bank 1 @0, W^T rows at @100
    for (int r = 0; r < N; r++)
      for (int col = 0; col < N; col++) begin
        X[r][col] = ($urandom_range(0, 2) == 0);
        W[r][col] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 400.0);
      end
    for (int col = 0; col < N; col++) begin
      for (int l = 0; l < LANES; l++) b[l] = (l < N) ? X[l][col] : 1'b0;
      wr_spk(0, col, b);
    end
    for (int r = 0; r < N; r++) begin
      for (int l = 0; l < LANES; l++) b[l] = (l < N) ? X[r][l] : 1'b0;
      wr_spk(0, 100 + r, b);
    end
    for (int r = 0; r < N; r++) begin
      for (int l = 0; l < LANES; l++) v[l] = (l < N) ? W[r][l] : 16'h0;
      wr_fp(1, r, v);
      for (int l = 0; l < LANES; l++) v[l] = (l < N) ? W[l][r] : 16'h0;
      wr_fp(1, 100 + r, v);
    end
    for (int l = 0; l < LANES; l++) v[l] = r2f(real'($urandom_range(50, 200)) / 100.0);
    wr_par(0, v);                                    // gamma
    for (int l = 0; l < LANES; l++) v[l] = r2f((real'($urandom_range(0, 200)) - 40.0) / 100.0);
    wr_par(1, v);                                    // beta

    // ---- forward step, all commands queued back to back
    c = mk(OP_MM, N);  c.a_spike = 1; c.s0_bank = 0; c.s0_addr = 0; c.s1_bank = 1; c.s1_addr = 0;
                       c.d0_bank = 2; c.d0_addr = 0;                                   push(c);
    c = mk(OP_BNF, N); c.s0_bank = 2; c.s0_addr = 0; c.d0_bank = 0; c.d0_addr = 0;
                       c.d1_bank = 3; c.d1_addr = 0; c.p0 = 0; c.p1 = 1; c.p2 = 2;      push(c);
    c = mk(OP_SOMA, N); c.first = 1; c.s0_bank = 0; c.s0_addr = 0; c.s1_bank = 3; c.s1_addr = 500;
                       c.d0_bank = 2; c.d0_addr = 100; c.sk_raddr = 300; c.sk_waddr = 300; push(c);
    c = mk(OP_SOMA, N); c.s0_bank = 0; c.s0_addr = 0; c.s1_bank = 2; c.s1_addr = 100;
                       c.d0_bank = 2; c.d0_addr = 200; c.sk_raddr = 300; c.sk_waddr = 400; push(c);
    c = mk(OP_RES, N); c.s0_bank = 0; c.s0_addr = 0; c.s1_bank = 2; c.s1_addr = 200;
                       c.d0_bank = 3; c.d0_addr = 200;                                  push(c);
    c = mk(OP_NOP, 0);                                                                   push(c);
    // an SRAM write while the queue runs: held off by bus_ready
    for (int l = 0; l < LANES; l++) v[l] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 500.0);
    wr_fp(0, 300, v);                                // dS(t=1)
    wait_idle();
    for (int i = 0; i < N; i++) begin
      for (int l = 0; l < LANES; l++) v[l] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 500.0);
      wr_fp(0, 300 + i, v);                          // dS(t=1), from the next layer
      for (int l = 0; l < LANES; l++) v[l] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 500.0);
      wr_fp(0, 400 + i, v);                          // dS(t=0)
    end

    // ---- backward step
    c = mk(OP_GRAD, N); c.first = 1; c.s0_bank = 0; c.s0_addr = 300; c.s1_bank = 2; c.s1_addr = 200;
                       c.s2_bank = 3; c.s2_addr = 600; c.sk_raddr = 400; c.d0_bank = 1; c.d0_addr = 300; push(c);
    c = mk(OP_GRAD, N); c.s0_bank = 0; c.s0_addr = 400; c.s1_bank = 2; c.s1_addr = 100;
                       c.s2_bank = 1; c.s2_addr = 300; c.sk_raddr = 300; c.d0_bank = 1; c.d0_addr = 400; push(c);
    c = mk(OP_BNB, N); c.s0_bank = 1; c.s0_addr = 400; c.s1_bank = 3; c.s1_addr = 0;
                       c.d0_bank = 0; c.d0_addr = 500; c.p0 = 0; c.p1 = 2; c.p2 = 3; c.p3 = 4; push(c);
    // ---- weight gradient dW = X^T dZ: A word b = X[b][:], B word b = dZ[b][:]
    c = mk(OP_MM, N);  c.a_spike = 1; c.s0_bank = 0; c.s0_addr = 100; c.s1_bank = 0; c.s1_addr = 500;
                       c.d0_bank = 2; c.d0_addr = 300;                                 push(c);
    wait_idle();

    // host re-layout of dZ into dZ^T words for dX = dZ W^T
    for (int i = 0; i < N; i++) begin
      rd_fp(0, 500 + i, v);
      for (int l = 0; l < LANES; l++) begin
        dz[i][l] = v[l];
        checks++;
        if (v[l] !== rf[0][500 + i][l]) begin
          failures++;
          if (failures < 20) $display("FAIL bus read dZ[%0d][%0d] %h exp %h", i, l, v[l], rf[0][500 + i][l]);
        end
      end
    end
    for (int k = 0; k < N; k++) begin
      for (int l = 0; l < LANES; l++) v[l] = (l < N) ? dz[l][k] : 16'h0;
      wr_fp(3, 700 + k, v);
    end
    c = mk(OP_MM, N);  c.s0_bank = 3; c.s0_addr = 700; c.s1_bank = 1; c.s1_addr = 100;
                       c.d0_bank = 2; c.d0_addr = 400;                                 push(c);
    wait_idle();

    // ---- compare every memory word with the reference
    words_bad = 0;
    for (int k = 0; k < NFP; k++)
      for (int w = 0; w < D; w++) begin
        checks++;
        for (int l = 0; l < LANES; l++)
          if (dut_fp(k, w, l) !== rf[k][w][l]) begin
            failures++; words_bad++;
            if (words_bad < 20) $display("FAIL fp bank %0d word %0d lane %0d got %h exp %h",
                                         k, w, l, dut_fp(k, w, l), rf[k][w][l]);
            break;
          end
      end
    for (int k = 0; k < NSPK; k++)
      for (int w = 0; w < D; w++) begin
        checks++;
        for (int l = 0; l < LANES; l++)
          if (dut_spk(k, w, l) !== rs[k][w][l]) begin
            failures++; words_bad++;
            if (words_bad < 20) $display("FAIL spike bank %0d word %0d lane %0d", k, w, l);
            break;
          end
      end
    for (int w = 0; w < (1 << PAW); w++) begin
      checks++;
      for (int l = 0; l < LANES; l++)
        if (dut.u_para_sram.mem[w][l] !== rp[w][l]) begin
          failures++; words_bad++;
          if (words_bad < 20) $display("FAIL para word %0d lane %0d got %h exp %h", w, l, dut.u_para_sram.mem[w][l], rp[w][l]);
          break;
        end
    end

    // ---- controller counters against the commands issued
    begin
      logic [31:0] d;
      for (int op = 1; op <= 6; op++) begin
        bus_rd({4'd0, 11'd0, 5'(16 + op)}, d);
        checks++;
        if (int'(d[15:0]) != n_op[op]) begin failures++; $display("FAIL op count %0d: %0d exp %0d", op, d[15:0], n_op[op]); end
      end
      bus_rd({4'd0, 11'd0, 5'd16}, d);
      checks++;
      if (int'(d[15:0]) != n_op[0] + n_op[1] + n_op[2] + n_op[3] + n_op[4] + n_op[5] + n_op[6]) begin
        failures++; $display("FAIL done count %0d", d[15:0]);
      end
    end

    mechanism("spike-mode MM beats (FP, WG)", mm_spk_beats);
    mechanism("FP16 MM beats (BP)", mm_fp_beats);
    mechanism("MM latency 2R+C+T-2", mm_lat_ok);
    mechanism("SOMA first time step", soma_first);
    mechanism("SOMA later time step", soma_next);
    mechanism("spikes fired", spikes_seen);
    mechanism("gradient masks set", masks_seen);
    mechanism("GRAD last time step", grad_last);
    mechanism("GRAD earlier time step", grad_next);
    mechanism("RES", n_op[OP_RES]);
    mechanism("BN forward", n_op[OP_BNF]);
    mechanism("BN backward", n_op[OP_BNB]);
    mechanism("NOP retire", n_op[OP_NOP]);
    mechanism("command FIFO depth > 1", max_fifo > 1 ? max_fifo : 0);
    mechanism("bus stalled while busy", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
