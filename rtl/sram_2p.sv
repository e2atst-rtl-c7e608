// sram_2p: one on-chip SRAM bank with a read port and a write port
// (two-port SRAM), written as an array. The accelerator instantiates it as
// the Spike SRAM (LW = 1), the FP16 SRAM banks (LW = 16) and the Para SRAM
// (LW = 16, holding per-feature BN parameters and statistics).
//
// A word is LANES lanes of LW bits. Writes take effect at the clock edge,
// per lane under wmask. Reads are synchronous: rdata shows the word at raddr
// one cycle after re. A read and a write of the same address in one cycle
// return the old word. Contents are cleared at reset so that a read never
// returns an uninitialised word (a reset-cleared array is this design's own
// choice; the paper gives the banks only as Spike/FP16/Para SRAM with
// 1-bit and 16-bit entries and no sizes).
module sram_2p #(
  parameter int unsigned LANES = 64,
  parameter int unsigned LW    = 16,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     re,
  input  logic [AW-1:0]            raddr,
  output logic [LANES-1:0][LW-1:0] rdata,
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic [LANES-1:0]         wmask,
  input  logic [LANES-1:0][LW-1:0] wdata
);

  logic [LANES-1:0][LW-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else if (we) begin
      for (int l = 0; l < int'(LANES); l++)
        if (wmask[l]) mem[waddr][l] <= wdata[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

endmodule
