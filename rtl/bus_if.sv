// bus_if: SoC bus interface of the accelerator. The host (a CPU, or the DMA
// moving data from DRAM) reaches the controller registers and every SRAM
// bank through it, 32 bits at a time.
//
// Bus: a request is accepted in a cycle with bus_valid && bus_ready; reads
// return bus_rdata with bus_rvalid one cycle later. Word address map
// (bus_addr[19:16] selects the target):
//   0      controller registers, bus_addr[4:0] (see global_ctrl)
//   1..4   FP16 banks 0..3: bus_addr[14:5] word, bus_addr[4:0] lane pair
//          (bits 15:0 = lane 2n, bits 31:16 = lane 2n+1)
//   5..6   spike banks 0..1: bus_addr[14:5] word, bus_addr[0] selects
//          lanes 0..31 or 32..63
//   7      Para SRAM: bus_addr[10:5] word, bus_addr[4:0] lane pair
// SRAM accesses are held off (bus_ready low) while the controller is busy,
// because the fetch&store units then own the SRAM ports; register accesses
// are always accepted. The paper shows only that SRAMs and the controller sit
// on an SoC bus; protocol and map are this design's.
module bus_if
  import e2atst_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_valid,
  input  logic        bus_we,
  input  logic [19:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic        bus_ready,
  output logic        bus_rvalid,
  output logic [31:0] bus_rdata,
  // controller registers
  input  logic        ctrl_busy,
  output logic        reg_we,
  output logic        reg_re,
  output logic [4:0]  reg_addr,
  output logic [31:0] reg_wdata,
  input  logic [31:0] reg_rdata,
  // SRAM access
  output mem_req_t    req,
  input  mem_rsp_t    rsp
);

  logic [3:0]    region;
  logic [AW-1:0] word;
  logic [4:0]    chunk;
  logic          is_reg, acc;
  logic [3:0]    region_q;
  logic [4:0]    chunk_q;
  logic          rd_q;

  assign region    = bus_addr[19:16];
  assign word      = bus_addr[5 +: AW];
  assign chunk     = bus_addr[4:0];
  assign is_reg    = (region == 4'd0);
  assign bus_ready = is_reg || !ctrl_busy;
  assign acc       = bus_valid && bus_ready;

  assign reg_we    = acc && is_reg && bus_we;
  assign reg_re    = acc && is_reg && !bus_we;
  assign reg_addr  = bus_addr[4:0];
  assign reg_wdata = bus_wdata;

  always_comb begin
    req = '0;
    if (acc && !is_reg) begin
      if (region >= 4'd1 && region <= 4'd4) begin
        if (bus_we) begin
          req.fw[0].en   = 1'b1;
          req.fw[0].bank = 2'(region - 4'd1);
          req.fw[0].addr = word;
          req.fw[0].mask[2*chunk]     = 1'b1;
          req.fw[0].mask[2*chunk + 1] = 1'b1;
          req.fw[0].data[2*chunk]     = bus_wdata[15:0];
          req.fw[0].data[2*chunk + 1] = bus_wdata[31:16];
        end else begin
          req.fr[0] = '{en: 1'b1, bank: 2'(region - 4'd1), addr: word};
        end
      end else if (region == 4'd5 || region == 4'd6) begin
        if (bus_we) begin
          req.sw[0].en   = 1'b1;
          req.sw[0].bank = (region == 4'd6);
          req.sw[0].addr = word;
          req.sw[0].mask[32*chunk[0] +: 32] = '1;
          req.sw[0].data[32*chunk[0] +: 32] = bus_wdata;
        end else begin
          req.sr[0] = '{en: 1'b1, bank: (region == 4'd6), addr: word};
        end
      end else if (region == 4'd7) begin
        if (bus_we) begin
          req.pw.en   = 1'b1;
          req.pw.addr = word[PAW-1:0];
          req.pw.mask[2*chunk]     = 1'b1;
          req.pw.mask[2*chunk + 1] = 1'b1;
          req.pw.data[2*chunk]     = bus_wdata[15:0];
          req.pw.data[2*chunk + 1] = bus_wdata[31:16];
        end else begin
          req.pr = '{en: 1'b1, addr: word[PAW-1:0]};
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      region_q   <= '0;
      chunk_q    <= '0;
      rd_q       <= 1'b0;
    end else begin
      rd_q     <= acc && !bus_we;
      region_q <= region;
      chunk_q  <= chunk;
    end
  end

  assign bus_rvalid = rd_q;

  always_comb begin
    bus_rdata = '0;
    if (region_q == 4'd0)
      bus_rdata = reg_rdata;
    else if (region_q >= 4'd1 && region_q <= 4'd4)
      bus_rdata = {rsp.fr[0][2*chunk_q + 1], rsp.fr[0][2*chunk_q]};
    else if (region_q == 4'd5 || region_q == 4'd6)
      bus_rdata = rsp.sr[0][32*chunk_q[0] +: 32];
    else if (region_q == 4'd7)
      bus_rdata = {rsp.pr[2*chunk_q + 1], rsp.pr[2*chunk_q]};
  end

endmodule
