// soma_fetch_store: fetch&store unit of the SOMA/GRAD/RES reuse module. It
// runs one OP_SOMA, OP_GRAD or OP_RES command over len vectors (SRAM words)
// i = 0 .. len-1, one vector per cycle.
//   SOMA reads PS (FP16 bank s0), U(t-1) (bank s1) and S(t-1) (spike bank 0
//        at sk_raddr); writes U(t) to bank d0, S(t) to spike bank 0 and the
//        gradient mask to spike bank 1, both at sk_waddr.
//   GRAD reads PS = MM result (s0), U(t) (s1), dU(t+1) (s2), S(t) (spike bank
//        0) and the mask (spike bank 1) at sk_raddr; writes dU(t) to d0.
//   RES  reads PS (s0) and the residual operand (s1); writes the sum to d0.
// Reads are issued in cycle i, the module computes in cycle i+1 and the
// writes happen in cycle i+2; done pulses len + 4 cycles after start. The operands of one command must sit in different FP16 banks
// (one read port per bank); a result may go back into a bank that is read,
// at another address. Bank assignment of spikes and masks and this schedule
// are this design's choices.
module soma_fetch_store
  import e2atst_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  cmd_t      cmd,
  output logic      done,
  output mem_req_t  req,
  input  mem_rsp_t  rsp,
  // reuse-module side
  output rm_mode_e  mode,
  output logic      first,
  output logic      in_valid,
  output fpvec_t    op_ps,     // PS
  output fpvec_t    op_u,      // U(t-1) | U(t) | residual operand
  output fpvec_t    op_du,     // dU(t+1)
  output spkvec_t   op_s,      // S(t-1) | S(t)
  output spkvec_t   op_mask,   // gradient mask at t
  input  logic      out_valid,
  input  fpvec_t    sum,
  input  spkvec_t   spike,
  input  spkvec_t   mask
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} state_e;
  state_e          st;
  cmd_t            c;
  logic [LENW-1:0] i;
  logic [LENW-1:0] i_d1, i_d2;
  logic            pend;

  always_comb begin
    unique case (c.op)
      OP_GRAD: mode = RM_GRAD;
      OP_RES:  mode = RM_RES;
      default: mode = RM_SOMA;
    endcase
  end
  assign first    = c.first;
  assign in_valid = pend;
  assign op_ps    = rsp.fr[0];
  assign op_u     = rsp.fr[1];
  assign op_du    = rsp.fr[2];
  assign op_s     = rsp.sr[0];
  assign op_mask  = rsp.sr[1];

  always_comb begin
    req = '0;
    if (st == S_RUN) begin
      req.fr[0] = '{en: 1'b1, bank: c.s0_bank, addr: c.s0_addr + AW'(i)};
      req.fr[1] = '{en: 1'b1, bank: c.s1_bank, addr: c.s1_addr + AW'(i)};
      if (c.op == OP_GRAD)
        req.fr[2] = '{en: 1'b1, bank: c.s2_bank, addr: c.s2_addr + AW'(i)};
      if (c.op == OP_SOMA || c.op == OP_GRAD)
        req.sr[0] = '{en: 1'b1, bank: 1'b0, addr: c.sk_raddr + AW'(i)};
      if (c.op == OP_GRAD)
        req.sr[1] = '{en: 1'b1, bank: 1'b1, addr: c.sk_raddr + AW'(i)};
    end
    if (out_valid) begin
      req.fw[0] = '{en: 1'b1, bank: c.d0_bank, addr: c.d0_addr + AW'(i_d2),
                    mask: '1, data: sum};
      if (c.op == OP_SOMA) begin
        req.sw[0] = '{en: 1'b1, bank: 1'b0, addr: c.sk_waddr + AW'(i_d2),
                      mask: '1, data: spike};
        req.sw[1] = '{en: 1'b1, bank: 1'b1, addr: c.sk_waddr + AW'(i_d2),
                      mask: '1, data: mask};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      c    <= '0;
      i    <= '0;
      i_d1 <= '0;
      i_d2 <= '0;
      pend <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      pend <= (st == S_RUN);
      i_d1 <= i;
      i_d2 <= i_d1;
      unique case (st)
        S_IDLE: if (start) begin
          c    <= cmd;
          i    <= '0;
          st   <= (cmd.len == '0) ? S_FLUSH : S_RUN;
        end
        S_RUN: begin
          i <= i + 1'b1;
          if (i == c.len - 1'b1) st <= S_FLUSH;
        end
        S_FLUSH: if (!pend && !out_valid) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
