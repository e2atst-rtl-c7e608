// bn_bp: backward batch normalization for N feature lanes, FP16 throughout.
//
// Inputs per sample are the incoming gradient g = dY and the centred value
// N saved by the forward BN; per feature, gamma and the saved sqrt(var+eps).
// Each lane computes, as in the paper's BP BN:
//   M      = (gamma * g) * (1/sqrt)
//   S_N    = sum N,   S_M = sum M,   S_MN = sum M*N,   sum g
//   dgamma = S_MN / gamma,   dbeta = sum g
//   dX     = M - N*S_MN/(m*sqrt^2) + S_N*S_MN/(sqrt^2*m^2) - S_M/m
// The three constant terms are formed once per batch as
//   c1 = (S_MN * (1/sqrt)^2) / m,  c2 = (c1 * S_N) / m,  c3 = S_M / m
// and dX = ((M - N*c1) + c2) - c3; this evaluation order is this design's.
// Operation: load (captures gamma and sqrt, forms 1/sqrt, clears the sums),
// acc_valid for the m samples of pass 1, fin (stat_valid one cycle later with
// dgamma and dbeta), then out_valid for the m samples of pass 2 (dx_valid
// and dx one cycle later). g and N are read twice rather than M being
// stored, a choice of this design.
module bn_bp
  import fp16_pkg::*;
#(
  parameter int unsigned N    = 64,
  parameter int unsigned LENW = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [N-1:0][15:0]  gamma,
  input  logic [N-1:0][15:0]  sqrt_in,
  input  logic [LENW-1:0]     m,
  input  logic                acc_valid,
  input  logic                fin,
  input  logic                out_valid,
  input  logic [N-1:0][15:0]  g,
  input  logic [N-1:0][15:0]  n_in,
  output logic                stat_valid,
  output logic [N-1:0][15:0]  dgamma,
  output logic [N-1:0][15:0]  dbeta,
  output logic                dx_valid,
  output logic [N-1:0][15:0]  dx
);

  logic [N-1:0][15:0] g_q, isq, s_n, s_m, s_mn, s_dy, c1, c2, c3;
  logic [N-1:0][15:0] m_c, c1_c, c2_c, c3_c, dx_c, dg_c;
  fp16_t              m_fp;

  assign m_fp = fp16_from_uint(26'(m));

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      fp16_t isq2;
      m_c[i]  = fp16_mul(fp16_mul(g_q[i], g[i]), isq[i]);
      isq2    = fp16_mul(isq[i], isq[i]);
      c1_c[i] = fp16_div(fp16_mul(s_mn[i], isq2), m_fp);
      c2_c[i] = fp16_div(fp16_mul(c1_c[i], s_n[i]), m_fp);
      c3_c[i] = fp16_div(s_m[i], m_fp);
      dg_c[i] = fp16_div(s_mn[i], g_q[i]);
      dx_c[i] = fp16_sub(fp16_add(fp16_sub(m_c[i], fp16_mul(n_in[i], c1[i])), c2[i]), c3[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q <= '0; isq <= '0; s_n <= '0; s_m <= '0; s_mn <= '0; s_dy <= '0;
      c1 <= '0; c2 <= '0; c3 <= '0; dgamma <= '0; dbeta <= '0; dx <= '0;
      stat_valid <= 1'b0;
      dx_valid   <= 1'b0;
    end else begin
      stat_valid <= fin;
      dx_valid   <= out_valid;
      if (load) begin
        g_q <= gamma;
        for (int i = 0; i < int'(N); i++) isq[i] <= fp16_div(FP16_ONE, sqrt_in[i]);
        s_n <= '0; s_m <= '0; s_mn <= '0; s_dy <= '0;
      end else if (acc_valid) begin
        for (int i = 0; i < int'(N); i++) begin
          s_n[i]  <= fp16_add(s_n[i], n_in[i]);
          s_m[i]  <= fp16_add(s_m[i], m_c[i]);
          s_mn[i] <= fp16_add(s_mn[i], fp16_mul(m_c[i], n_in[i]));
          s_dy[i] <= fp16_add(s_dy[i], g[i]);
        end
      end
      if (fin) begin
        c1     <= c1_c;
        c2     <= c2_c;
        c3     <= c3_c;
        dgamma <= dg_c;
        dbeta  <= s_dy;
      end
      if (out_valid) dx <= dx_c;
    end
  end

endmodule
