// mm_fetch_store: fetch&store unit of the matrix array. It runs one OP_MM
// command: one output tile of ROWS x COLS with reduction length len.
//
// Memory layout: word s0_addr+k of the A bank holds column k of A (lane r =
// A[r][k]); in spike mode it is read from spike bank s0_bank[0], otherwise
// from FP16 bank s0_bank. Word s1_addr+k of FP16 bank s1_bank holds row k of B
// (lane c = B[k][c]). The result row r is written to FP16 bank d0_bank at
// d0_addr+r (lane c = O[r][c]).
// Schedule: one cycle clears the partial sums, then len read cycles feed the
// array (data one cycle after each read); once no valid beat is left in the
// array the drain starts in the same cycle and writes ROWS rows, bottom row
// first. From the first array input to the last result this takes
// 2*ROWS + COLS + len - 2 cycles, the OS-tile latency formula of the paper.
// Larger matrices are split by the controller's command stream; partial sums
// of split reductions are added with RES commands. done pulses after the last
// write. The layout and schedule are this design's; the paper names the unit
// only.
module mm_fetch_store
  import e2atst_pkg::*;
#(
  parameter int unsigned ROWS = LANES,
  parameter int unsigned COLS = LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  cmd_t                    cmd,
  output logic                    done,
  output mem_req_t                req,
  input  mem_rsp_t                rsp,
  // array side
  output logic                    spike_mode,
  output logic                    clear,
  output logic                    drain,
  output logic                    in_valid,
  output logic [ROWS-1:0][15:0]   a_col,
  output logic [COLS-1:0][15:0]   b_row,
  input  logic [COLS-1:0][15:0]   out_row,
  input  logic                    arr_busy
);

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_FEED, S_WAIT, S_DRAIN} state_e;
  state_e          st;
  cmd_t            c;
  logic [LENW-1:0] k;
  logic [$clog2(ROWS+1)-1:0] j;
  logic            pend;

  assign spike_mode = c.a_spike;
  assign clear      = (st == S_CLR);
  assign drain      = (st == S_DRAIN) || (st == S_WAIT && !arr_busy && !pend);
  assign in_valid   = pend;

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++)
      a_col[r] = c.a_spike ? {15'd0, rsp.sr[0][r]} : rsp.fr[0][r];
    for (int q = 0; q < int'(COLS); q++)
      b_row[q] = rsp.fr[1][q];
  end

  always_comb begin
    req = '0;
    if (st == S_FEED) begin
      if (c.a_spike) begin
        req.sr[0].en   = 1'b1;
        req.sr[0].bank = c.s0_bank[0];
        req.sr[0].addr = c.s0_addr + AW'(k);
      end else begin
        req.fr[0].en   = 1'b1;
        req.fr[0].bank = c.s0_bank;
        req.fr[0].addr = c.s0_addr + AW'(k);
      end
      req.fr[1].en   = 1'b1;
      req.fr[1].bank = c.s1_bank;
      req.fr[1].addr = c.s1_addr + AW'(k);
    end
    if (drain) begin
      req.fw[0].en   = 1'b1;
      req.fw[0].bank = c.d0_bank;
      req.fw[0].addr = c.d0_addr + AW'(ROWS - 1 - j);
      for (int q = 0; q < int'(COLS); q++) begin
        req.fw[0].mask[q] = 1'b1;
        req.fw[0].data[q] = out_row[q];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      c    <= '0;
      k    <= '0;
      j    <= '0;
      pend <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      pend <= (st == S_FEED);
      unique case (st)
        S_IDLE: if (start) begin
          c  <= cmd;
          st <= S_CLR;
        end
        S_CLR: begin
          k  <= '0;
          j  <= '0;
          st <= (cmd_len_zero(c)) ? S_WAIT : S_FEED;
        end
        S_FEED: begin
          k <= k + 1'b1;
          if (k == c.len - 1'b1) st <= S_WAIT;
        end
        S_WAIT: if (drain) begin
          j  <= j + 1'b1;
          st <= S_DRAIN;
          if (ROWS == 1) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        S_DRAIN: begin
          j <= j + 1'b1;
          if (j == ($clog2(ROWS+1))'(ROWS - 1)) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  function automatic logic cmd_len_zero(cmd_t x);
    return x.len == '0;
  endfunction

endmodule
