// bn_fetch_store: fetch&store unit of the BN units. It runs one OP_BNF
// (forward BN) or OP_BNB (backward BN) command over a batch of m = len
// samples; SRAM word s0_addr+i holds sample i of LANES features.
//   OP_BNF: Para[p0] = gamma, Para[p1] = beta are read and loaded; pass 1
//           streams x (bank s0) into the accumulators; after the statistics
//           Para[p2] <- sqrt(var+eps); pass 2 streams x again and writes
//           y to bank d0 and N = x - mu to bank d1 (N and sqrt are the values
//           the backward BN needs).
//   OP_BNB: Para[p0] = gamma, Para[p1] = sqrt are loaded; pass 1 streams
//           dY (bank s0) and N (bank s1); then Para[p2] <- dgamma and
//           Para[p3] <- dbeta; pass 2 streams dY and N again and writes dX
//           to bank d0.
// Each pass reads one word per cycle; results are written two cycles after
// their read. done pulses 2*len + 11 (OP_BNF) or 2*len + 12 (OP_BNB)
// cycles after start. Sequence and layout
// are this design's; the paper names the unit only.
module bn_fetch_store
  import e2atst_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  cmd_t            cmd,
  output logic            done,
  output mem_req_t        req,
  input  mem_rsp_t        rsp,
  // BN side, common
  output logic [LENW-1:0] m,
  output fpvec_t          par_a,     // gamma
  output fpvec_t          par_b,     // beta (BNF) | sqrt (BNB)
  output fpvec_t          op_x,      // x | dY
  output fpvec_t          op_n,      // N
  // forward BN
  output logic            f_load,
  output logic            f_acc,
  output logic            f_fin,
  output logic            f_norm,
  input  logic            f_stat_valid,
  input  fpvec_t          f_sqrt,
  input  logic            f_y_valid,
  input  fpvec_t          f_y,
  input  fpvec_t          f_n,
  // backward BN
  output logic            b_load,
  output logic            b_acc,
  output logic            b_fin,
  output logic            b_out,
  input  logic            b_stat_valid,
  input  fpvec_t          b_dgamma,
  input  fpvec_t          b_dbeta,
  input  logic            b_dx_valid,
  input  fpvec_t          b_dx
);

  typedef enum logic [3:0] {
    S_IDLE, S_P0, S_P1, S_P2, S_LOAD, S_PASS1, S_FIN, S_STAT, S_STAT2,
    S_PASS2, S_FLUSH
  } state_e;

  state_e          st;
  cmd_t            c;
  logic [LENW-1:0] i, i_d1, i_d2;
  logic            pend, pass2_q;
  logic            is_bp;

  assign is_bp = (c.op == OP_BNB);
  assign m     = c.len;
  assign op_x  = rsp.fr[0];
  assign op_n  = rsp.fr[1];

  assign f_load = (st == S_LOAD) && !is_bp;
  assign b_load = (st == S_LOAD) &&  is_bp;
  assign f_acc  = pend && !pass2_q && !is_bp;
  assign b_acc  = pend && !pass2_q &&  is_bp;
  assign f_norm = pend &&  pass2_q && !is_bp;
  assign b_out  = pend &&  pass2_q &&  is_bp;
  assign f_fin  = (st == S_FIN) && !pend && !is_bp;
  assign b_fin  = (st == S_FIN) && !pend &&  is_bp;

  always_comb begin
    req = '0;
    unique case (st)
      S_P0: req.pr = '{en: 1'b1, addr: c.p0};
      S_P1: req.pr = '{en: 1'b1, addr: c.p1};
      S_PASS1, S_PASS2: begin
        req.fr[0] = '{en: 1'b1, bank: c.s0_bank, addr: c.s0_addr + AW'(i)};
        if (is_bp)
          req.fr[1] = '{en: 1'b1, bank: c.s1_bank, addr: c.s1_addr + AW'(i)};
      end
      S_STAT: if (f_stat_valid || b_stat_valid)
        req.pw = '{en: 1'b1, addr: c.p2, mask: '1, data: is_bp ? b_dgamma : f_sqrt};
      S_STAT2:
        req.pw = '{en: 1'b1, addr: c.p3, mask: '1, data: b_dbeta};
      default: ;
    endcase
    if (f_y_valid) begin
      req.fw[0] = '{en: 1'b1, bank: c.d0_bank, addr: c.d0_addr + AW'(i_d2), mask: '1, data: f_y};
      req.fw[1] = '{en: 1'b1, bank: c.d1_bank, addr: c.d1_addr + AW'(i_d2), mask: '1, data: f_n};
    end
    if (b_dx_valid)
      req.fw[0] = '{en: 1'b1, bank: c.d0_bank, addr: c.d0_addr + AW'(i_d2), mask: '1, data: b_dx};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      c       <= '0;
      i       <= '0;
      i_d1    <= '0;
      i_d2    <= '0;
      pend    <= 1'b0;
      pass2_q <= 1'b0;
      par_a   <= '0;
      par_b   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      pend <= (st == S_PASS1) || (st == S_PASS2);
      pass2_q <= (st == S_PASS2);
      i_d1 <= i;
      i_d2 <= i_d1;
      unique case (st)
        S_IDLE: if (start) begin
          c  <= cmd;
          st <= S_P0;
        end
        S_P0:   st <= S_P1;
        S_P1: begin
          par_a <= rsp.pr;
          st    <= S_P2;
        end
        S_P2: begin
          par_b <= rsp.pr;
          st    <= S_LOAD;
        end
        S_LOAD: begin
          i  <= '0;
          st <= (c.len == '0) ? S_FIN : S_PASS1;
        end
        S_PASS1: begin
          i <= i + 1'b1;
          if (i == c.len - 1'b1) st <= S_FIN;
        end
        S_FIN: if (!pend) st <= S_STAT;
        S_STAT: if (f_stat_valid || b_stat_valid) begin
          i  <= '0;
          st <= is_bp ? S_STAT2 : ((c.len == '0) ? S_FLUSH : S_PASS2);
        end
        S_STAT2: st <= (c.len == '0) ? S_FLUSH : S_PASS2;
        S_PASS2: begin
          i <= i + 1'b1;
          if (i == c.len - 1'b1) st <= S_FLUSH;
        end
        S_FLUSH: if (!pend && !f_y_valid && !b_dx_valid) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
