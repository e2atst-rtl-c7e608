// global_ctrl: the global controller. It holds the scalar configuration
// (alpha, surrogate beta, th_f, th_l, th_r, eps), a FIFO of commands written
// by the host over the SoC bus, and runs the commands one after another by
// starting the fetch&store unit of the addressed module (MM, SOMA/GRAD/RES
// or BN) and waiting for its done pulse.
//
// Register map (32-bit word index reg_addr):
//   0 alpha   1 beta_sg   2 th_f   3 th_l   4 th_r   5 eps  (bits 15:0)
//   8..11     command staging words 0..3 (word 0 = cmd bits 31:0)
//   12        write: push the staged command into the FIFO
//   16        read : status {fifo_count[7:0], 7'b0, busy, done_count[15:0]}
//   17..23    read : completed commands per opcode (17 = OP_MM ... 22 = OP_BNB)
//   24        read : FIFO-full rejections (pushes dropped while full)
// A push when the FIFO is full is dropped and counted. busy is high while a
// command runs or the FIFO is not empty; the host may touch the SRAMs only
// when busy is low. reg_rdata is valid one cycle after reg_re. The paper says
// only that a global controller controls the modules; this command-queue
// organisation is this design's.
module global_ctrl
  import e2atst_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic        reg_re,
  input  logic [4:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output cfg_t        cfg,
  output cmd_t        cur_cmd,
  output logic        start_mm,
  output logic        start_soma,
  output logic        start_bn,
  input  logic        done_mm,
  input  logic        done_soma,
  input  logic        done_bn,
  output op_e         active_op,
  output logic        busy
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [3:0][31:0]  stage;
  cmd_t              fifo [DEPTH];
  logic [PW-1:0]     rp, wp;
  logic [PW:0]       cnt;
  logic              running;
  logic [15:0]       done_cnt, drop_cnt;
  logic [6:0][15:0]  op_cnt;
  logic              push, pop, any_done;

  assign push     = reg_we && reg_addr == 5'd12;
  assign pop      = !running && cnt != 0;
  assign any_done = done_mm | done_soma | done_bn;
  assign busy     = running || cnt != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg      <= '0;
      stage    <= '0;
      rp       <= '0;
      wp       <= '0;
      cnt      <= '0;
      running  <= 1'b0;
      cur_cmd  <= '0;
      done_cnt <= '0;
      drop_cnt <= '0;
      op_cnt   <= '0;
      start_mm <= 1'b0;
      start_soma <= 1'b0;
      start_bn <= 1'b0;
      reg_rdata <= '0;
      for (int i = 0; i < int'(DEPTH); i++) fifo[i] <= '0;
    end else begin
      start_mm   <= 1'b0;
      start_soma <= 1'b0;
      start_bn   <= 1'b0;
      if (reg_we) begin
        unique case (reg_addr)
          5'd0: cfg.alpha   <= reg_wdata[15:0];
          5'd1: cfg.beta_sg <= reg_wdata[15:0];
          5'd2: cfg.th_f    <= reg_wdata[15:0];
          5'd3: cfg.th_l    <= reg_wdata[15:0];
          5'd4: cfg.th_r    <= reg_wdata[15:0];
          5'd5: cfg.eps     <= reg_wdata[15:0];
          5'd8, 5'd9, 5'd10, 5'd11: stage[reg_addr[1:0]] <= reg_wdata;
          default: ;
        endcase
      end
      // FIFO
      if (push && cnt == (PW+1)'(DEPTH)) drop_cnt <= drop_cnt + 1'b1;
      if (push && cnt != (PW+1)'(DEPTH)) begin
        fifo[wp] <= cmd_t'(stage);
        wp <= wp + 1'b1;
      end
      if (pop) begin
        cur_cmd <= fifo[rp];
        rp      <= rp + 1'b1;
        running <= 1'b1;
        unique case (fifo[rp].op)
          OP_MM:                   start_mm   <= 1'b1;
          OP_SOMA, OP_GRAD, OP_RES: start_soma <= 1'b1;
          OP_BNF, OP_BNB:          start_bn   <= 1'b1;
          default:                 running    <= 1'b0;  // NOP retires at once
        endcase
        if (fifo[rp].op == OP_NOP) done_cnt <= done_cnt + 1'b1;
      end
      cnt <= cnt + (PW+1)'(push && cnt != (PW+1)'(DEPTH)) - (PW+1)'(pop);
      if (running && any_done) begin
        running  <= 1'b0;
        done_cnt <= done_cnt + 1'b1;
        op_cnt[cur_cmd.op] <= op_cnt[cur_cmd.op] + 1'b1;
      end
      // register read
      if (reg_re) begin
        unique case (reg_addr)
          5'd0: reg_rdata <= {16'd0, cfg.alpha};
          5'd1: reg_rdata <= {16'd0, cfg.beta_sg};
          5'd2: reg_rdata <= {16'd0, cfg.th_f};
          5'd3: reg_rdata <= {16'd0, cfg.th_l};
          5'd4: reg_rdata <= {16'd0, cfg.th_r};
          5'd5: reg_rdata <= {16'd0, cfg.eps};
          5'd16: reg_rdata <= {8'(cnt), 7'd0, busy, done_cnt};
          5'd17, 5'd18, 5'd19, 5'd20, 5'd21, 5'd22:
                 reg_rdata <= {16'd0, op_cnt[3'(reg_addr - 5'd16)]};
          5'd24: reg_rdata <= {16'd0, drop_cnt};
          default: reg_rdata <= '0;
        endcase
      end
    end
  end

  assign active_op = running ? cur_cmd.op : OP_NOP;

endmodule
