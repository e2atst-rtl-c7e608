// tb_mm_array: self-checking test of the output-stationary matrix array at a
// reduced 6 x 5 size. Random tiles are run in spike mode (A is 0/1, the array
// adds weights) and in FP16 mode (multiply-accumulate) with random reduction
// lengths T. Expected outputs are sequential FP16 accumulations computed with
// the real-valued reference arithmetic. The test drains as soon as busy
// drops and checks that a tile takes 2*ROWS + COLS + T - 2 cycles from the
// first input to the last output row, the paper's OS latency formula.
module tb_mm_array;
  import fp16_ref_pkg::*;

  localparam int R = 6, C = 5, TMAX = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic spike_mode, clear, drain, in_valid, busy;
  logic [R-1:0][15:0] a_col;
  logic [C-1:0][15:0] b_row, out_row;
  int checks = 0, failures = 0;
  int n_spike = 0, n_fp = 0;

  mm_array #(.ROWS(R), .COLS(C)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] A [R][TMAX];
  logic [15:0] B [TMAX][C];
  logic [15:0] E [R][C];

  initial begin
    spike_mode = 0; clear = 0; drain = 0; in_valid = 0; a_col = '0; b_row = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 24; tile++) begin
      int T, cyc, c0;
      logic sm;
      sm = tile[0];
      T  = $urandom_range(1, TMAX);
      for (int r = 0; r < R; r++)
        for (int k = 0; k < T; k++)
          A[r][k] = sm ? 16'($urandom_range(0, 1)) : rnd(10, 18);
      for (int k = 0; k < T; k++)
        for (int c = 0; c < C; c++)
          B[k][c] = rnd(10, 18);
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          E[r][c] = 16'h0000;
          for (int k = 0; k < T; k++)
            E[r][c] = radd(E[r][c], sm ? (A[r][k][0] ? B[k][c] : 16'h0000) : rmul(A[r][k], B[k][c]));
        end
      @(negedge clk);
      spike_mode = sm; clear = 1;
      @(negedge clk);
      clear = 0;
      cyc = 0;
      for (int k = 0; k < T; k++) begin
        in_valid = 1;
        for (int r = 0; r < R; r++) a_col[r] = A[r][k];
        for (int c = 0; c < C; c++) b_row[c] = B[k][c];
        @(negedge clk);
        cyc++;
      end
      in_valid = 0;
      while (busy) begin @(negedge clk); cyc++; end
      for (int j = 0; j < R; j++) begin
        drain = 1;
        for (int c = 0; c < C; c++) begin
          checks++;
          if (out_row[c] !== E[R-1-j][c]) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d row %0d col %0d got %h exp %h", tile, R-1-j, c, out_row[c], E[R-1-j][c]);
          end
        end
        @(negedge clk);
        cyc++;
      end
      drain = 0;
      checks++;
      if (cyc != 2*R + C + T - 2) begin
        failures++;
        $display("FAIL latency %0d expected %0d (T=%0d)", cyc, 2*R + C + T - 2, T);
      end
      if (sm) n_spike++; else n_fp++;
    end
    checks++;
    if (n_spike == 0 || n_fp == 0) failures++;
    $display("spike tiles=%0d fp16 tiles=%0d", n_spike, n_fp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
