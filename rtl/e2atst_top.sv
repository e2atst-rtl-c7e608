// e2atst_top: the training accelerator for spiking transformers.
//
// Three compute modules share a banked on-chip memory under one global
// controller:
//   * mm_array       - the MM_ROWS x MM_COLS matrix array (64 x 64), spike x
//                      FP16 additions in FP/WG, FP16 multiply-accumulate in BP,
//                      output-stationary dataflow;
//   * soma_grad_res  - LANES lanes of the SOMA / GRAD / RES reuse module;
//   * bn_fp, bn_bp   - LANES lanes of forward and backward batch norm;
// each fed by its fetch&store unit. The memory is four FP16 SRAM banks, two
// Spike SRAM banks (spikes, gradient masks) and a Para SRAM (gamma, beta,
// sqrt, dgamma, dbeta), each bank with one read and one write port. The host
// writes data and a stream of commands over a 32-bit SoC bus (bus_if); the
// controller runs the commands in order, one at a time, and the SRAM ports
// belong to the running unit (or to the bus while the controller is idle).
// Each requester drives up to three FP16 reads, two FP16 writes, two spike
// reads, two spike writes and one Para read and write per cycle; the
// crossbar below steers each to the bank it names and returns read data one
// cycle later. Two requests of one requester to the same bank port in one
// cycle are a command-programming error, caught by an assertion. That
// assertion is disabled during reset through rst_n, which lint reports as
// rst_n being used both as asynchronous reset and as synchronous signal; the
// double use is intended and adds no logic.
// The DRAM and DMA of the SoC sit behind the bus port. Module set and their
// connection follow the paper's architecture figure; memory organisation,
// bus and command format are this design's.
module e2atst_top
  import e2atst_pkg::*;
#(
  parameter int unsigned MM_ROWS   = LANES,
  parameter int unsigned MM_COLS   = LANES,
  parameter int unsigned FP_DEPTH  = 1 << AW,
  parameter int unsigned SPK_DEPTH = 1 << AW,
  parameter int unsigned PAR_DEPTH = 1 << PAW,
  parameter int unsigned CMD_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_valid,
  input  logic        bus_we,
  input  logic [19:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic        bus_ready,
  output logic        bus_rvalid,
  output logic [31:0] bus_rdata,
  output logic        busy
);

  // ---------------------------------------------------------------- control
  cfg_t        cfg;
  cmd_t        cur_cmd;
  op_e         active_op;
  logic        start_mm, start_soma, start_bn, done_mm, done_soma, done_bn;
  logic        reg_we, reg_re;
  logic [4:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  mem_req_t    bus_req, mm_req, soma_req, bn_req, req;
  mem_rsp_t    rsp;

  global_ctrl #(.DEPTH(CMD_DEPTH)) u_ctrl (
    .clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata,
    .cfg, .cur_cmd, .start_mm, .start_soma, .start_bn,
    .done_mm, .done_soma, .done_bn, .active_op, .busy
  );

  bus_if u_bus (
    .clk, .rst_n, .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_ready,
    .bus_rvalid, .bus_rdata, .ctrl_busy(busy), .reg_we, .reg_re, .reg_addr,
    .reg_wdata, .reg_rdata, .req(bus_req), .rsp
  );

  // ---------------------------------------------------------------- MM
  logic                        mm_spike, mm_clear, mm_drain, mm_in_valid, mm_busy;
  logic [MM_ROWS-1:0][15:0]    mm_a;
  logic [MM_COLS-1:0][15:0]    mm_b, mm_out;

  mm_fetch_store #(.ROWS(MM_ROWS), .COLS(MM_COLS)) u_mm_fs (
    .clk, .rst_n, .start(start_mm), .cmd(cur_cmd), .done(done_mm),
    .req(mm_req), .rsp, .spike_mode(mm_spike), .clear(mm_clear),
    .drain(mm_drain), .in_valid(mm_in_valid), .a_col(mm_a), .b_row(mm_b),
    .out_row(mm_out), .arr_busy(mm_busy)
  );

  mm_array #(.ROWS(MM_ROWS), .COLS(MM_COLS)) u_mm (
    .clk, .rst_n, .spike_mode(mm_spike), .clear(mm_clear), .drain(mm_drain),
    .in_valid(mm_in_valid), .a_col(mm_a), .b_row(mm_b), .out_row(mm_out),
    .busy(mm_busy)
  );

  // ---------------------------------------------------------------- SOMA/GRAD/RES
  rm_mode_e rm_mode;
  logic     rm_first, rm_in_valid, rm_out_valid;
  fpvec_t   rm_ps, rm_u, rm_du, rm_sum;
  spkvec_t  rm_s, rm_mask_in, rm_spike, rm_mask;

  soma_fetch_store u_soma_fs (
    .clk, .rst_n, .start(start_soma), .cmd(cur_cmd), .done(done_soma),
    .req(soma_req), .rsp, .mode(rm_mode), .first(rm_first),
    .in_valid(rm_in_valid), .op_ps(rm_ps), .op_u(rm_u), .op_du(rm_du),
    .op_s(rm_s), .op_mask(rm_mask_in), .out_valid(rm_out_valid),
    .sum(rm_sum), .spike(rm_spike), .mask(rm_mask)
  );

  soma_grad_res #(.N(LANES)) u_soma (
    .clk, .rst_n, .mode(rm_mode), .first(rm_first), .cfg,
    .in_valid(rm_in_valid), .ps(rm_ps), .u_prev(rm_u), .s_prev(rm_s),
    .u_cur(rm_u), .s_cur(rm_s), .mask_cur(rm_mask_in), .du_next(rm_du),
    .res_in(rm_u), .out_valid(rm_out_valid), .sum(rm_sum), .spike(rm_spike),
    .mask(rm_mask)
  );

  // ---------------------------------------------------------------- BN
  logic [LENW-1:0] bn_m;
  fpvec_t          bn_pa, bn_pb, bn_x, bn_n;
  logic            f_load, f_acc, f_fin, f_norm, f_stat_valid, f_y_valid;
  logic            b_load, b_acc, b_fin, b_out, b_stat_valid, b_dx_valid;
  fpvec_t          f_mu, f_sqrt, f_y, f_n, b_dgamma, b_dbeta, b_dx;

  bn_fetch_store u_bn_fs (
    .clk, .rst_n, .start(start_bn), .cmd(cur_cmd), .done(done_bn),
    .req(bn_req), .rsp, .m(bn_m), .par_a(bn_pa), .par_b(bn_pb),
    .op_x(bn_x), .op_n(bn_n),
    .f_load, .f_acc, .f_fin, .f_norm, .f_stat_valid, .f_sqrt, .f_y_valid,
    .f_y, .f_n,
    .b_load, .b_acc, .b_fin, .b_out, .b_stat_valid, .b_dgamma, .b_dbeta,
    .b_dx_valid, .b_dx
  );

  bn_fp #(.N(LANES), .LENW(LENW)) u_bnf (
    .clk, .rst_n, .load(f_load), .gamma(bn_pa), .beta(bn_pb), .eps(cfg.eps),
    .m(bn_m), .acc_valid(f_acc), .fin(f_fin), .norm_valid(f_norm), .x(bn_x),
    .stat_valid(f_stat_valid), .mu_out(f_mu), .sqrt_out(f_sqrt),
    .y_valid(f_y_valid), .y(f_y), .n_out(f_n)
  );

  bn_bp #(.N(LANES), .LENW(LENW)) u_bnb (
    .clk, .rst_n, .load(b_load), .gamma(bn_pa), .sqrt_in(bn_pb), .m(bn_m),
    .acc_valid(b_acc), .fin(b_fin), .out_valid(b_out), .g(bn_x),
    .n_in(bn_n), .stat_valid(b_stat_valid), .dgamma(b_dgamma),
    .dbeta(b_dbeta), .dx_valid(b_dx_valid), .dx(b_dx)
  );

  // ---------------------------------------------------------------- port owner
  always_comb begin
    unique case (active_op)
      OP_MM:                    req = mm_req;
      OP_SOMA, OP_GRAD, OP_RES: req = soma_req;
      OP_BNF, OP_BNB:           req = bn_req;
      default:                  req = busy ? '0 : bus_req;
    endcase
  end

  // ---------------------------------------------------------------- SRAM banks
  localparam int unsigned FBW = $clog2(NFP);
  localparam int unsigned SBW = $clog2(NSPK);

  logic   [NFP-1:0]           f_re, f_we;
  logic   [NFP-1:0][AW-1:0]   f_ra, f_wa;
  logic   [NFP-1:0][LANES-1:0] f_wm;
  fpvec_t [NFP-1:0]           f_wd, f_rd;
  logic   [NSPK-1:0]          s_re, s_we;
  logic   [NSPK-1:0][AW-1:0]  s_ra, s_wa;
  logic   [NSPK-1:0][LANES-1:0] s_wm;
  spkvec_t [NSPK-1:0]         s_wd, s_rd;
  fpvec_t                     p_rd;
  logic                       conflict;

  always_comb begin
    f_re = '0; f_we = '0; f_ra = '0; f_wa = '0; f_wm = '0; f_wd = '0;
    s_re = '0; s_we = '0; s_ra = '0; s_wa = '0; s_wm = '0; s_wd = '0;
    conflict = 1'b0;
    for (int j = 0; j < int'(NFP_RD); j++)
      if (req.fr[j].en) begin
        conflict |= f_re[req.fr[j].bank];
        f_re[req.fr[j].bank] = 1'b1;
        f_ra[req.fr[j].bank] = req.fr[j].addr;
      end
    for (int j = 0; j < int'(NFP_WR); j++)
      if (req.fw[j].en) begin
        conflict |= f_we[req.fw[j].bank];
        f_we[req.fw[j].bank] = 1'b1;
        f_wa[req.fw[j].bank] = req.fw[j].addr;
        f_wm[req.fw[j].bank] = req.fw[j].mask;
        f_wd[req.fw[j].bank] = req.fw[j].data;
      end
    for (int j = 0; j < int'(NSPK_RD); j++)
      if (req.sr[j].en) begin
        conflict |= s_re[req.sr[j].bank];
        s_re[req.sr[j].bank] = 1'b1;
        s_ra[req.sr[j].bank] = req.sr[j].addr;
      end
    for (int j = 0; j < int'(NSPK_WR); j++)
      if (req.sw[j].en) begin
        conflict |= s_we[req.sw[j].bank];
        s_we[req.sw[j].bank] = 1'b1;
        s_wa[req.sw[j].bank] = req.sw[j].addr;
        s_wm[req.sw[j].bank] = req.sw[j].mask;
        s_wd[req.sw[j].bank] = req.sw[j].data;
      end
  end

  a_no_bank_conflict: assert property (@(posedge clk) disable iff (!rst_n) !conflict)
    else $error("two requests to one SRAM bank port in one cycle");

  for (genvar b = 0; b < int'(NFP); b++) begin : g_fp
    sram_2p #(.LANES(LANES), .LW(16), .DEPTH(FP_DEPTH)) u_fp_sram (
      .clk, .rst_n, .re(f_re[b]), .raddr(f_ra[b][$clog2(FP_DEPTH)-1:0]), .rdata(f_rd[b]),
      .we(f_we[b]), .waddr(f_wa[b][$clog2(FP_DEPTH)-1:0]), .wmask(f_wm[b]), .wdata(f_wd[b])
    );
  end

  for (genvar b = 0; b < int'(NSPK); b++) begin : g_spk
    sram_2p #(.LANES(LANES), .LW(1), .DEPTH(SPK_DEPTH)) u_spike_sram (
      .clk, .rst_n, .re(s_re[b]), .raddr(s_ra[b][$clog2(SPK_DEPTH)-1:0]), .rdata(s_rd[b]),
      .we(s_we[b]), .waddr(s_wa[b][$clog2(SPK_DEPTH)-1:0]), .wmask(s_wm[b]), .wdata(s_wd[b])
    );
  end

  sram_2p #(.LANES(LANES), .LW(16), .DEPTH(PAR_DEPTH)) u_para_sram (
    .clk, .rst_n, .re(req.pr.en), .raddr(req.pr.addr[$clog2(PAR_DEPTH)-1:0]), .rdata(p_rd),
    .we(req.pw.en), .waddr(req.pw.addr[$clog2(PAR_DEPTH)-1:0]), .wmask(req.pw.mask),
    .wdata(req.pw.data)
  );

  // read data back to the requesting slot
  logic [NFP_RD-1:0][FBW-1:0]  fr_bank_q;
  logic [NSPK_RD-1:0][SBW-1:0] sr_bank_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fr_bank_q <= '0;
      sr_bank_q <= '0;
    end else begin
      for (int j = 0; j < int'(NFP_RD); j++)  fr_bank_q[j] <= req.fr[j].bank;
      for (int j = 0; j < int'(NSPK_RD); j++) sr_bank_q[j] <= req.sr[j].bank;
    end
  end

  always_comb begin
    for (int j = 0; j < int'(NFP_RD); j++)  rsp.fr[j] = f_rd[fr_bank_q[j]];
    for (int j = 0; j < int'(NSPK_RD); j++) rsp.sr[j] = s_rd[sr_bank_q[j]];
    rsp.pr = p_rd;
  end

endmodule
