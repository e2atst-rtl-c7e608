// soma_grad_res: the SOMA/GRAD/RES resource reuse module, LANES lanes of
// reuse_lane behind one output register stage.
//
// Each cycle with in_valid it takes one vector of LANES neurons (one SRAM
// word of every operand) and, one cycle later, presents with out_valid the
// mode's results: U(t), S(t) and the spike gradient mask (SOMA), dU(t)
// (GRAD) or the residual sum (RES). Mode and the scalars alpha, beta, th_f,
// th_l, th_r are common to all lanes. Throughput is one vector per cycle,
// latency one cycle. Lane behaviour is the paper's; the vector width, the
// single register stage and the valid signalling are this design's choice.
module soma_grad_res
  import e2atst_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  rm_mode_e            mode,
  input  logic                first,
  input  cfg_t                cfg,
  input  logic                in_valid,
  input  logic [N-1:0][15:0]  ps,
  input  logic [N-1:0][15:0]  u_prev,
  input  logic [N-1:0]        s_prev,
  input  logic [N-1:0][15:0]  u_cur,
  input  logic [N-1:0]        s_cur,
  input  logic [N-1:0]        mask_cur,
  input  logic [N-1:0][15:0]  du_next,
  input  logic [N-1:0][15:0]  res_in,
  output logic                out_valid,
  output logic [N-1:0][15:0]  sum,
  output logic [N-1:0]        spike,
  output logic [N-1:0]        mask
);

  logic [N-1:0][15:0] sum_c;
  logic [N-1:0]       spike_c, mask_c;

  for (genvar i = 0; i < int'(N); i++) begin : g_lane
    reuse_lane u_lane (
      .mode, .first,
      .alpha(cfg.alpha), .beta_sg(cfg.beta_sg),
      .th_f(cfg.th_f), .th_l(cfg.th_l), .th_r(cfg.th_r),
      .ps(ps[i]), .u_prev(u_prev[i]), .s_prev(s_prev[i]),
      .u_cur(u_cur[i]), .s_cur(s_cur[i]), .mask_cur(mask_cur[i]),
      .du_next(du_next[i]), .res_in(res_in[i]),
      .sum(sum_c[i]), .spike(spike_c[i]), .mask(mask_c[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
      spike     <= '0;
      mask      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        sum   <= sum_c;
        spike <= spike_c;
        mask  <= mask_c;
      end
    end
  end

endmodule
