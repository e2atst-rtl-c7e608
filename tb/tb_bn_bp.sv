// tb_bn_bp: self-checking test of the backward batch-norm unit with 4 lanes.
// Random batches of gradients dY and centred values N (m = 3..40) with
// random gamma and sqrt are run through both passes; dgamma, dbeta and every
// dX are compared with a real-valued FP16 reference of the backward BN
// equations, evaluated in the unit's documented order. Latencies of the
// statistics and of each dX are checked.
module tb_bn_bp;
  import fp16_ref_pkg::*;

  localparam int N = 4, MMAX = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, acc_valid, fin, out_valid, stat_valid, dx_valid;
  logic [N-1:0][15:0] gamma, sqrt_in, g, n_in, dgamma, dbeta, dx;
  logic [11:0] m;
  int checks = 0, failures = 0;

  bn_bp #(.N(N), .LENW(12)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  logic [15:0] G [MMAX][N];
  logic [15:0] NN [MMAX][N];

  initial begin
    load = 0; acc_valid = 0; fin = 0; out_valid = 0; g = '0; n_in = '0;
    gamma = '0; sqrt_in = '0; m = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      int mm;
      logic [15:0] isq [N], sn [N], sm [N], smn [N], sdy [N], c1 [N], c2 [N], c3 [N];
      logic [15:0] mf;
      mm = $urandom_range(3, MMAX);
      m  = 12'(mm);
      mf = r2f(real'(mm));
      for (int s = 0; s < mm; s++)
        for (int l = 0; l < N; l++) begin
          G[s][l]  = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 1000.0);
          NN[s][l] = r2f((real'($urandom_range(0, 4000)) - 2000.0) / 700.0);
        end
      for (int l = 0; l < N; l++) begin
        gamma[l]   = r2f(real'($urandom_range(20, 400)) / 100.0);
        sqrt_in[l] = r2f(real'($urandom_range(20, 400)) / 100.0);
        isq[l] = rdiv(16'h3C00, sqrt_in[l]);
        sn[l] = 0; sm[l] = 0; smn[l] = 0; sdy[l] = 0;
        for (int s = 0; s < mm; s++) begin
          logic [15:0] mv;
          mv = rmul(rmul(gamma[l], G[s][l]), isq[l]);
          sn[l]  = radd(sn[l], NN[s][l]);
          sm[l]  = radd(sm[l], mv);
          smn[l] = radd(smn[l], rmul(mv, NN[s][l]));
          sdy[l] = radd(sdy[l], G[s][l]);
        end
        c1[l] = rdiv(rmul(smn[l], rmul(isq[l], isq[l])), mf);
        c2[l] = rdiv(rmul(c1[l], sn[l]), mf);
        c3[l] = rdiv(sm[l], mf);
      end
      @(negedge clk);
      load = 1;
      @(negedge clk);
      load = 0;
      for (int s = 0; s < mm; s++) begin
        acc_valid = 1;
        for (int l = 0; l < N; l++) begin g[l] = G[s][l]; n_in[l] = NN[s][l]; end
        @(negedge clk);
      end
      acc_valid = 0;
      fin = 1;
      @(negedge clk);
      fin = 0;
      checks++;
      if (!stat_valid) begin failures++; $display("FAIL stat_valid timing"); end
      for (int l = 0; l < N; l++) begin
        chk($sformatf("batch %0d dgamma[%0d]", b, l), dgamma[l], rdiv(smn[l], gamma[l]));
        chk($sformatf("batch %0d dbeta[%0d]", b, l), dbeta[l], sdy[l]);
      end
      for (int s = 0; s < mm; s++) begin
        out_valid = 1;
        for (int l = 0; l < N; l++) begin g[l] = G[s][l]; n_in[l] = NN[s][l]; end
        @(negedge clk);
        out_valid = 0;
        checks++;
        if (!dx_valid) begin failures++; $display("FAIL dx_valid timing"); end
        for (int l = 0; l < N; l++) begin
          logic [15:0] mv;
          mv = rmul(rmul(gamma[l], G[s][l]), isq[l]);
          chk($sformatf("batch %0d dx[%0d][%0d]", b, s, l), dx[l],
              rsub(radd(rsub(mv, rmul(NN[s][l], c1[l])), c2[l]), c3[l]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
