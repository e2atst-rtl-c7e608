// tb_soma_grad_res: self-checking test of the SOMA/GRAD/RES reuse module.
// Random vectors are applied in all three modes, with and without the
// "first" flag; expected U(t), S(t), mask, dU(t) and residual sums are
// computed with the real-valued reference arithmetic from the LIF forward
// and backward equations, and the one-cycle latency is checked.
module tb_soma_grad_res;
  import e2atst_pkg::*;
  import fp16_ref_pkg::*;

  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rm_mode_e mode;
  logic first, in_valid, out_valid;
  cfg_t cfg;
  logic [N-1:0][15:0] ps, u_prev, u_cur, du_next, res_in, sum;
  logic [N-1:0] s_prev, s_cur, mask_cur, spike, mask;
  int checks = 0, failures = 0;
  int n_soma = 0, n_grad = 0, n_res = 0, n_fire = 0, n_mask = 0;

  soma_grad_res #(.N(N)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check16(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    logic [N-1:0][15:0] e_sum;
    logic [N-1:0] e_spk, e_msk;
    cfg = '0;
    cfg.alpha = r2f(0.5); cfg.beta_sg = r2f(1.0);
    cfg.th_f = r2f(1.0); cfg.th_l = r2f(0.5); cfg.th_r = r2f(1.5);
    in_valid = 0; mode = RM_SOMA; first = 0;
    ps = '0; u_prev = '0; u_cur = '0; du_next = '0; res_in = '0;
    s_prev = '0; s_cur = '0; mask_cur = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      @(negedge clk);
      mode  = rm_mode_e'(it % 3);
      first = ($urandom_range(0, 4) == 0);
      for (int i = 0; i < N; i++) begin
        ps[i] = r2f((real'($urandom_range(0, 4000)) - 1000.0) / 1600.0);
        u_prev[i] = r2f(real'($urandom_range(0, 3000)) / 1500.0);
        u_cur[i]  = r2f((real'($urandom_range(0, 3000)) - 1500.0) / 1000.0);
        du_next[i] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 700.0);
        res_in[i] = rnd(8, 20);
        s_prev[i] = $urandom_range(0, 1);
        s_cur[i]  = $urandom_range(0, 1);
        mask_cur[i] = $urandom_range(0, 1);
      end
      for (int i = 0; i < N; i++) begin
        logic [15:0] a_du, sh, ds, fp;
        e_spk[i] = 0; e_msk[i] = 0;
        case (mode)
          RM_SOMA: begin
            e_sum[i] = (first || s_prev[i]) ? ps[i] : radd(ps[i], rmul(cfg.alpha, u_prev[i]));
            if (first || s_prev[i]) e_sum[i] = radd(ps[i], 16'h0000);
            e_spk[i] = f2r(e_sum[i]) >= f2r(cfg.th_f);
            e_msk[i] = (f2r(e_sum[i]) > f2r(cfg.th_l)) && (f2r(e_sum[i]) < f2r(cfg.th_r));
          end
          RM_GRAD: begin
            a_du = first ? 16'h0000 : rmul(cfg.alpha, du_next[i]);
            sh   = rmul(r2f(-f2r(u_cur[i])), a_du);
            ds   = radd(ps[i], sh);
            fp   = mask_cur[i] ? cfg.beta_sg : 16'h0000;
            e_sum[i] = radd(rmul(ds, fp), s_cur[i] ? 16'h0000 : a_du);
          end
          default: e_sum[i] = radd(ps[i], res_in[i]);
        endcase
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid not one cycle after in_valid"); end
      for (int i = 0; i < N; i++) begin
        check16($sformatf("mode %0d lane %0d sum", mode, i), sum[i], e_sum[i]);
        checks++;
        if (spike[i] !== e_spk[i] || mask[i] !== e_msk[i]) begin
          failures++;
          if (failures < 10) $display("FAIL spike/mask lane %0d got %b%b exp %b%b", i, spike[i], mask[i], e_spk[i], e_msk[i]);
        end
        n_fire += spike[i];
        n_mask += mask[i];
      end
      case (mode) RM_SOMA: n_soma++; RM_GRAD: n_grad++; default: n_res++; endcase
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid held"); end
    end
    $display("soma=%0d grad=%0d res=%0d spikes=%0d masks=%0d", n_soma, n_grad, n_res, n_fire, n_mask);
    checks++;
    if (n_fire == 0 || n_mask == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
