// reuse_lane: one lane of the SOMA/GRAD/RES resource reuse module,
// combinational. A single FP16 adder is shared by the three modes: its first
// operand is always the partial sum PS, its second operand comes from a
// three-way multiplexer whose selector numbering follows the paper's figure
// (0 = GRAD, 1 = SOMA, 2 = RES).
//   SOMA: U(t)  = PS + (S(t-1) ? 0 : alpha*U(t-1));  S(t) = U(t) >= th_f;
//         mask  = th_l < U(t) < th_r.
//   GRAD: dS(t) = PS + (-U(t)) * (alpha*dU(t+1));
//         dU(t) = dS(t) * (mask ? beta : 0) + (S(t) ? 0 : alpha*dU(t+1)).
//   RES:  sum   = PS + R, R read from an FP16 SRAM bank.
// The equations are the paper's LIF forward/backward rules. The paper writes
// the fire condition as U >= th_f in its equations and as th_f < U in the
// figure; this lane uses >=. The mask window's lower bound is a separate
// input th_l as printed in the figure (the equations use th_f there); set
// th_l = th_f to obtain the equations' mask. "first" replaces U(t-1), S(t-1)
// (SOMA) or dU(t+1) (GRAD) by zero at the first processed time step, which is
// this design's reading of the constant-0 inputs in the figure.
module reuse_lane
  import e2atst_pkg::rm_mode_e, e2atst_pkg::RM_GRAD, e2atst_pkg::RM_SOMA, e2atst_pkg::RM_RES;
  import fp16_pkg::*;
(
  input  rm_mode_e mode,
  input  logic     first,
  input  fp16_t    alpha,
  input  fp16_t    beta_sg,
  input  fp16_t    th_f,
  input  fp16_t    th_l,
  input  fp16_t    th_r,
  input  fp16_t    ps,        // partial sum PS (BN result in FP, MM result in BP)
  input  fp16_t    u_prev,    // SOMA: U(t-1)
  input  logic     s_prev,    // SOMA: S(t-1)
  input  fp16_t    u_cur,     // GRAD: U(t)
  input  logic     s_cur,     // GRAD: S(t)
  input  logic     mask_cur,  // GRAD: spike gradient mask at t
  input  fp16_t    du_next,   // GRAD: dU(t+1)
  input  fp16_t    res_in,    // RES: value read from FP16 SRAM
  output fp16_t    sum,       // U(t) | dU(t) | residual sum
  output logic     spike,     // SOMA: S(t)
  output logic     mask       // SOMA: spike gradient mask
);

  fp16_t au_prev, soma_in, a_du, grad_in, mux_out, shared, fprime, t1, t2;

  always_comb begin
    au_prev = fp16_mul(alpha, u_prev);
    soma_in = (first || s_prev) ? FP16_ZERO : au_prev;
    a_du    = first ? FP16_ZERO : fp16_mul(alpha, du_next);
    grad_in = fp16_mul(fp16_neg(u_cur), a_du);
    unique case (mode)
      RM_GRAD: mux_out = grad_in;
      RM_SOMA: mux_out = soma_in;
      RM_RES:  mux_out = res_in;
      default: mux_out = FP16_ZERO;
    endcase
    shared = fp16_add(ps, mux_out);
    fprime = mask_cur ? beta_sg : FP16_ZERO;
    t1     = fp16_mul(shared, fprime);
    t2     = s_cur ? FP16_ZERO : a_du;
    sum    = (mode == RM_GRAD) ? fp16_add(t1, t2) : shared;
    spike  = (mode == RM_SOMA) && fp16_ge(shared, th_f);
    mask   = (mode == RM_SOMA) && fp16_lt(th_l, shared) && fp16_lt(shared, th_r);
  end

endmodule
