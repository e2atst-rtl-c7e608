// bn_fp: forward batch normalization for N feature lanes, FP16 throughout.
//
// The datapath of each lane is the paper's FP BN: two accumulators (sum of x
// and sum of x^2), the divisions by the batch size m, the variance as
// E[x^2] - mu^2, a square root of var + eps, the centred value N = x - mu and
// y = gamma * (N / sqrt) + beta. The paper's text counts two dividers per
// path while its figure draws three divisions (two by m, one by sqrt); this
// lane has all three.
// Operation, one batch of m samples (one sample per cycle, one feature per
// lane):
//   load      : clears the accumulators and captures gamma, beta.
//   acc_valid : pass 1, x accumulated.
//   fin       : mu, var, sqrt computed; stat_valid pulses one cycle later
//               with sqrt_out (kept for the backward BN).
//   norm_valid: pass 2, x read again; y and N appear one cycle later with
//               y_valid.
// The two-pass schedule (statistics need the whole batch before any sample
// can be normalized) and the single register stage per step are this
// design's choices; the paper only says the units are deeply pipelined.
module bn_fp
  import fp16_pkg::*;
#(
  parameter int unsigned N    = 64,
  parameter int unsigned LENW = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [N-1:0][15:0]  gamma,
  input  logic [N-1:0][15:0]  beta,
  input  logic [15:0]         eps,
  input  logic [LENW-1:0]     m,
  input  logic                acc_valid,
  input  logic                fin,
  input  logic                norm_valid,
  input  logic [N-1:0][15:0]  x,
  output logic                stat_valid,
  output logic [N-1:0][15:0]  mu_out,
  output logic [N-1:0][15:0]  sqrt_out,
  output logic                y_valid,
  output logic [N-1:0][15:0]  y,
  output logic [N-1:0][15:0]  n_out
);

  logic [N-1:0][15:0] g_q, b_q, sx, sx2;
  logic [N-1:0][15:0] mu_c, sq_c, y_c, n_c;
  fp16_t              m_fp;

  assign m_fp = fp16_from_uint(26'(m));

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      fp16_t ex2, var_b;
      mu_c[i] = fp16_div(sx[i], m_fp);
      ex2     = fp16_div(sx2[i], m_fp);
      var_b   = fp16_sub(ex2, fp16_mul(mu_c[i], mu_c[i]));
      sq_c[i] = fp16_sqrt(fp16_add(var_b, eps));
      n_c[i]  = fp16_sub(x[i], mu_out[i]);
      y_c[i]  = fp16_add(fp16_mul(g_q[i], fp16_div(n_c[i], sqrt_out[i])), b_q[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q <= '0; b_q <= '0; sx <= '0; sx2 <= '0;
      mu_out <= '0; sqrt_out <= '0; y <= '0; n_out <= '0;
      stat_valid <= 1'b0;
      y_valid    <= 1'b0;
    end else begin
      stat_valid <= fin;
      y_valid    <= norm_valid;
      if (load) begin
        g_q <= gamma;
        b_q <= beta;
        sx  <= '0;
        sx2 <= '0;
      end else if (acc_valid) begin
        for (int i = 0; i < int'(N); i++) begin
          sx[i]  <= fp16_add(sx[i], x[i]);
          sx2[i] <= fp16_add(sx2[i], fp16_mul(x[i], x[i]));
        end
      end
      if (fin) begin
        mu_out   <= mu_c;
        sqrt_out <= sq_c;
      end
      if (norm_valid) begin
        y     <= y_c;
        n_out <= n_c;
      end
    end
  end

endmodule
