// tb_sram_2p: self-checking test of the two-port SRAM bank (8 lanes x 16 bit,
// 32 words). Random lane-masked writes and reads are checked against a
// scoreboard, including read-during-write of the same address (old data),
// the one-cycle read latency and the reset-cleared contents.
module tb_sram_2p;
  localparam int L = 8, W = 16, D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic re, we;
  logic [4:0] raddr, waddr;
  logic [L-1:0][W-1:0] rdata, wdata;
  logic [L-1:0] wmask;
  logic [L-1:0][W-1:0] model [D];
  int checks = 0, failures = 0;

  sram_2p #(.LANES(L), .LW(W), .DEPTH(D)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L-1:0][W-1:0] exp_q;
    logic exp_v;
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = '0; wmask = '0;
    for (int i = 0; i < D; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_v = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rdata !== exp_q) begin
          failures++;
          if (failures < 10) $display("FAIL read got %h exp %h", rdata, exp_q);
        end
      end
      re = $urandom_range(0, 1);
      we = $urandom_range(0, 1);
      raddr = 5'($urandom_range(0, D - 1));
      waddr = ($urandom_range(0, 3) == 0) ? raddr : 5'($urandom_range(0, D - 1));
      wmask = L'($urandom);
      for (int l = 0; l < L; l++) wdata[l] = W'($urandom);
      exp_v = re;
      if (re) exp_q = model[raddr];
      @(posedge clk);
      if (we) for (int l = 0; l < L; l++) if (wmask[l]) model[waddr][l] = wdata[l];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
