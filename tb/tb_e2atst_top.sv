// tb_e2atst_top: end-to-end test of the accelerator top with a reduced 8x8
// matrix array (memories, lanes and everything else at the default sizes).
// It runs one training step of a spiking layer through the SoC bus and
// compares every SRAM word with a reference model; see tb_e2e_body.svh.
module tb_e2atst_top;
  localparam int N = 8;

  logic        clk, rst_n;
  logic        bus_valid, bus_we, bus_ready, bus_rvalid, busy;
  logic [19:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;

  e2atst_top #(.MM_ROWS(N), .MM_COLS(N)) dut (
    .clk, .rst_n, .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_ready,
    .bus_rvalid, .bus_rdata, .busy
  );

`include "tb_e2e_body.svh"

endmodule
