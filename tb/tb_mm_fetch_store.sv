// tb_mm_fetch_store: self-checking test of the MM fetch&store unit driving
// an 8 x 8 array against the behavioural memory. Commands with spike A
// operands (read from a spike bank) and FP16 A operands, random banks,
// addresses and reduction lengths are run; the tile written back must equal
// a real-valued FP16 reference, lanes beyond the array must stay untouched,
// and the time from the first array input to the last stored row must be
// 2*ROWS + COLS + len - 2 cycles.
module tb_mm_fetch_store;
  import e2atst_pkg::*;
  import fp16_ref_pkg::*;

  localparam int R = 8, C = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, spike_mode, clear, drain, in_valid, arr_busy;
  cmd_t cmd;
  mem_req_t req;
  mem_rsp_t rsp;
  logic [R-1:0][15:0] a_col;
  logic [C-1:0][15:0] b_row, out_row;
  int checks = 0, failures = 0;

  mm_fetch_store #(.ROWS(R), .COLS(C)) dut (.*);
  mm_array #(.ROWS(R), .COLS(C)) u_arr (.clk, .rst_n, .spike_mode, .clear, .drain,
    .in_valid, .a_col, .b_row, .out_row, .busy(arr_busy));
  tb_mem_model #(.DEPTH(256)) mem (.clk, .req, .rsp);

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc, c_first, c_last;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && c_first < 0) c_first = cyc;
    if (req.fw[0].en) c_last = cyc;
  end

  initial begin
    logic [15:0] E [R][C];
    cyc = 0;
    start = 0; cmd = '0;
    for (int b = 0; b < NFP; b++) for (int a = 0; a < 256; a++) mem.fp[b][a] = '0;
    for (int b = 0; b < NSPK; b++) for (int a = 0; a < 256; a++) mem.spk[b][a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      int T;
      logic [1:0] ab, bb, ob;
      logic [AW-1:0] aa, ba, oa;
      T = $urandom_range(1, 30);
      ab = 2'(t % 4); bb = 2'((t + 1) % 4); ob = 2'((t + 2) % 4);
      aa = AW'($urandom_range(0, 60)); ba = AW'($urandom_range(64, 120)); oa = AW'($urandom_range(128, 200));
      cmd = '0;
      cmd.op = OP_MM; cmd.a_spike = t[0]; cmd.len = 12'(T);
      cmd.s0_bank = ab; cmd.s0_addr = aa; cmd.s1_bank = bb; cmd.s1_addr = ba;
      cmd.d0_bank = ob; cmd.d0_addr = oa;
      for (int k = 0; k < T; k++) begin
        for (int l = 0; l < LANES; l++) begin
          mem.fp[ab][aa + k][l] = rnd(12, 17);
          mem.spk[ab[0]][aa + k][l] = 1'($urandom_range(0, 1));
          mem.fp[bb][ba + k][l] = rnd(12, 17);
        end
      end
      for (int r = 0; r < R; r++) mem.fp[ob][oa + r] = {LANES{16'h1234}};
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          E[r][c] = 0;
          for (int k = 0; k < T; k++)
            E[r][c] = radd(E[r][c], cmd.a_spike ? (mem.spk[ab[0]][aa + k][r] ? mem.fp[bb][ba + k][c] : 16'h0)
                                                : rmul(mem.fp[ab][aa + k][r], mem.fp[bb][ba + k][c]));
        end
      c_first = -1;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int r = 0; r < R; r++) begin
        for (int c = 0; c < C; c++) begin
          checks++;
          if (mem.fp[ob][oa + r][c] !== E[r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL cmd %0d O[%0d][%0d] got %h exp %h", t, r, c, mem.fp[ob][oa + r][c], E[r][c]);
          end
        end
        checks++;
        if (mem.fp[ob][oa + r][LANES-1] !== 16'h1234) begin failures++; $display("FAIL lane mask"); end
      end
      checks++;
      if (c_last - c_first + 1 != 2*R + C + T - 2) begin
        failures++;
        $display("FAIL latency %0d expected %0d", c_last - c_first + 1, 2*R + C + T - 2);
      end
    end
    checks++;
    if (mem.conflicts != 0) begin failures++; $display("FAIL bank conflicts %0d", mem.conflicts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
