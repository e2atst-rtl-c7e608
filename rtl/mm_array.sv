// mm_array: the ROWS x COLS matrix-multiply array (64 x 64 in the paper),
// run in the output-stationary (OS) dataflow that the paper's dataflow study
// finds best (OS_C).
//
// Element (r,c) keeps output O[r][c] = sum_k A[r][k] * B[k][c]. Each cycle
// with in_valid the array takes one column of A (a_col[r] = A[r][k], one per
// row) and one row of B (b_row[c] = B[k][c]); k runs over the reduction length
// T. Input skew registers delay row r by r cycles and column c by c cycles so
// that A[r][k] and B[k][c] meet in element (r,c) at cycle k + r + c. In spike
// mode only bit 0 of a_col is used and the array adds weights instead of
// multiplying (FP and WG phases); otherwise it multiplies FP16 values (BP).
// After the last input, ROWS+COLS-2 cycles later every sum is complete;
// then drain shifts the sums down one row per cycle and out_row presents
// rows ROWS-1, ROWS-2, ..., 0 in successive drain cycles. With the T input
// cycles, the latency of one tile is 2*ROWS + COLS + T - 2 cycles, the
// paper's formula for OS tiles. busy is high while any valid beat is still
// travelling through the array. Control of clear/drain comes from the
// MM fetch&store unit.
module mm_array
  import fp16_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    spike_mode,
  input  logic                    clear,
  input  logic                    drain,
  input  logic                    in_valid,
  input  logic [ROWS-1:0][15:0]   a_col,
  input  logic [COLS-1:0][15:0]   b_row,
  output logic [COLS-1:0][15:0]   out_row,
  output logic                    busy
);

  // skewed edge operands
  logic [ROWS-1:0][15:0] a_sk;
  logic [ROWS-1:0]       v_sk;
  logic [ROWS-1:0]       chain_v;   // any valid inside row r's skew chain
  logic [COLS-1:0][15:0] b_sk;

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_askew
    if (r == 0) begin : g_d0
      assign a_sk[r] = a_col[r];
      assign v_sk[r] = in_valid;
      assign chain_v[r] = 1'b0;
    end else begin : g_dn
      logic [r-1:0][15:0] da;
      logic [r-1:0]       dv;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          da <= '0;
          dv <= '0;
        end else begin
          da[0] <= a_col[r];
          dv[0] <= in_valid;
          for (int i = 1; i < r; i++) begin
            da[i] <= da[i-1];
            dv[i] <= dv[i-1];
          end
        end
      end
      assign a_sk[r] = da[r-1];
      assign v_sk[r] = dv[r-1];
      assign chain_v[r] = |dv;
    end
  end

  for (genvar c = 0; c < int'(COLS); c++) begin : g_bskew
    if (c == 0) begin : g_d0
      assign b_sk[c] = b_row[c];
    end else begin : g_dn
      logic [c-1:0][15:0] db;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) db <= '0;
        else begin
          db[0] <= b_row[c];
          for (int i = 1; i < c; i++) db[i] <= db[i-1];
        end
      end
      assign b_sk[c] = db[c-1];
    end
  end

  // PE grid wiring: a/v flow right, b flows down, acc drains down
  logic [ROWS-1:0][COLS:0][15:0] a_w;
  logic [ROWS-1:0][COLS:0]       v_w;
  logic [ROWS:0][COLS-1:0][15:0] b_w;
  logic [ROWS-1:0][COLS-1:0][15:0] acc;
  logic [ROWS-1:0][COLS-1:0]     v_any;

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    assign a_w[r][0] = a_sk[r];
    assign v_w[r][0] = v_sk[r];
    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      if (r == 0) begin : g_top
        assign b_w[0][c] = b_sk[c];
      end
      mm_pe u_pe (
        .clk, .rst_n, .spike_mode, .clear, .drain,
        .v_in  (v_w[r][c]),
        .a_in  (a_w[r][c]),
        .b_in  (b_w[r][c]),
        .acc_up((r == 0) ? 16'h0000 : acc[(r == 0) ? 0 : r-1][c]),
        .v_out (v_w[r][c+1]),
        .a_out (a_w[r][c+1]),
        .b_out (b_w[r+1][c]),
        .acc   (acc[r][c])
      );
      assign v_any[r][c] = v_w[r][c];
    end
  end

  assign out_row = acc[ROWS-1];

  // any valid beat still in flight (edge skew or inside the grid)
  assign busy = (|chain_v) | (|v_any) | in_valid;

endmodule
