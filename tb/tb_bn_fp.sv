// tb_bn_fp: self-checking test of the forward batch-norm unit with 4 lanes.
// For several random batches (m = 3..40 samples, random gamma/beta) the two
// passes are driven by hand; mu, sqrt(var+eps), N = x - mu and y are compared
// with a real-valued FP16 reference that follows the BN forward equations
// in the same accumulation order. The one-cycle latencies of the statistics
// and of each normalised sample are checked.
module tb_bn_fp;
  import fp16_ref_pkg::*;

  localparam int N = 4, MMAX = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, acc_valid, fin, norm_valid, stat_valid, y_valid;
  logic [N-1:0][15:0] gamma, beta, x, mu_out, sqrt_out, y, n_out;
  logic [15:0] eps;
  logic [11:0] m;
  int checks = 0, failures = 0;

  bn_fp #(.N(N), .LENW(12)) dut (.*);

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

  logic [15:0] X [MMAX][N];

  initial begin
    load = 0; acc_valid = 0; fin = 0; norm_valid = 0; x = '0; gamma = '0; beta = '0;
    eps = r2f(1.0 / 1024.0); m = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      int mm;
      logic [15:0] sx [N], sx2 [N], emu [N], esq [N];
      mm = $urandom_range(3, MMAX);
      m = 12'(mm);
      for (int s = 0; s < mm; s++)
        for (int l = 0; l < N; l++)
          X[s][l] = r2f((real'($urandom_range(0, 4000)) - 2000.0) / 500.0);
      for (int l = 0; l < N; l++) begin
        gamma[l] = r2f(real'($urandom_range(1, 400)) / 100.0);
        beta[l]  = r2f((real'($urandom_range(0, 400)) - 200.0) / 100.0);
        sx[l] = 0; sx2[l] = 0;
        for (int s = 0; s < mm; s++) begin
          sx[l]  = radd(sx[l], X[s][l]);
          sx2[l] = radd(sx2[l], rmul(X[s][l], X[s][l]));
        end
        emu[l] = rdiv(sx[l], r2f(real'(mm)));
        esq[l] = rsqrt(radd(rsub(rdiv(sx2[l], r2f(real'(mm))), rmul(emu[l], emu[l])), eps));
      end
      @(negedge clk);
      load = 1;
      @(negedge clk);
      load = 0;
      for (int s = 0; s < mm; s++) begin
        acc_valid = 1;
        for (int l = 0; l < N; l++) x[l] = X[s][l];
        @(negedge clk);
      end
      acc_valid = 0;
      fin = 1;
      @(negedge clk);
      fin = 0;
      checks++;
      if (!stat_valid) begin failures++; $display("FAIL stat_valid timing"); end
      for (int l = 0; l < N; l++) begin
        chk($sformatf("batch %0d mu[%0d]", b, l), mu_out[l], emu[l]);
        chk($sformatf("batch %0d sqrt[%0d]", b, l), sqrt_out[l], esq[l]);
      end
      for (int s = 0; s < mm; s++) begin
        norm_valid = 1;
        for (int l = 0; l < N; l++) x[l] = X[s][l];
        @(negedge clk);
        norm_valid = 0;
        checks++;
        if (!y_valid) begin failures++; $display("FAIL y_valid timing"); end
        for (int l = 0; l < N; l++) begin
          logic [15:0] en;
          en = rsub(X[s][l], emu[l]);
          chk($sformatf("batch %0d N[%0d][%0d]", b, s, l), n_out[l], en);
          chk($sformatf("batch %0d y[%0d][%0d]", b, s, l), y[l],
              radd(rmul(gamma[l], rdiv(en, esq[l])), beta[l]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
