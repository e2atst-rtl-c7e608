// tb_mem_model: behavioural memory for the fetch&store testbenches. It
// answers a mem_req_t bundle like the SRAM banks of the top level: 4 FP16
// banks, 2 spike banks and the Para memory, reads returned one cycle later,
// masked writes at the clock edge. The arrays are public so that a
// testbench can preload and inspect them hierarchically. Two requests to one
// bank port in a cycle are counted in conflicts.
module tb_mem_model
  import e2atst_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic      clk,
  input  mem_req_t  req,
  output mem_rsp_t  rsp
);
  fpvec_t  fp  [NFP][DEPTH];
  spkvec_t spk [NSPK][DEPTH];
  fpvec_t  par [1 << PAW];
  int      conflicts = 0;

  always @(posedge clk) begin
    logic [NFP-1:0] fr_used, fw_used;
    logic [NSPK-1:0] sr_used, sw_used;
    fr_used = '0; fw_used = '0; sr_used = '0; sw_used = '0;
    for (int j = 0; j < int'(NFP_RD); j++) begin
      if (req.fr[j].en) begin
        if (fr_used[req.fr[j].bank]) conflicts++;
        fr_used[req.fr[j].bank] = 1'b1;
        rsp.fr[j] <= fp[req.fr[j].bank][req.fr[j].addr % DEPTH];
      end
    end
    for (int j = 0; j < int'(NSPK_RD); j++) begin
      if (req.sr[j].en) begin
        if (sr_used[req.sr[j].bank]) conflicts++;
        sr_used[req.sr[j].bank] = 1'b1;
        rsp.sr[j] <= spk[req.sr[j].bank][req.sr[j].addr % DEPTH];
      end
    end
    if (req.pr.en) rsp.pr <= par[req.pr.addr];
    for (int j = 0; j < int'(NFP_WR); j++)
      if (req.fw[j].en) begin
        if (fw_used[req.fw[j].bank]) conflicts++;
        fw_used[req.fw[j].bank] = 1'b1;
        for (int l = 0; l < int'(LANES); l++)
          if (req.fw[j].mask[l]) fp[req.fw[j].bank][req.fw[j].addr % DEPTH][l] <= req.fw[j].data[l];
      end
    for (int j = 0; j < int'(NSPK_WR); j++)
      if (req.sw[j].en) begin
        if (sw_used[req.sw[j].bank]) conflicts++;
        sw_used[req.sw[j].bank] = 1'b1;
        for (int l = 0; l < int'(LANES); l++)
          if (req.sw[j].mask[l]) spk[req.sw[j].bank][req.sw[j].addr % DEPTH][l] <= req.sw[j].data[l];
      end
    if (req.pw.en)
      for (int l = 0; l < int'(LANES); l++)
        if (req.pw.mask[l]) par[req.pw.addr][l] <= req.pw.data[l];
  end
endmodule
