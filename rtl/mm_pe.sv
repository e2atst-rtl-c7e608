// mm_pe: one processing element of the output-stationary matrix array.
//
// Operand a travels left to right with its valid bit, operand b top to
// bottom; both are registered and passed on every cycle. On a valid beat the
// element accumulates into its stationary FP16 partial sum:
//   spike mode (FP, WG): acc += a[0] ? b : 0   (an addition, no multiply)
//   FP16 mode  (BP):     acc += a * b
// clear zeroes the partial sum. During drain the partial sums shift one row
// down per cycle (acc <= acc_up), so the array's bottom row streams the
// results out. Accumulation in FP16 follows the paper's statement that the
// output operand keeps FP16 precision.
module mm_pe
  import fp16_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        spike_mode,
  input  logic        clear,
  input  logic        drain,
  input  logic        v_in,
  input  fp16_t       a_in,
  input  fp16_t       b_in,
  input  fp16_t       acc_up,
  output logic        v_out,
  output fp16_t       a_out,
  output fp16_t       b_out,
  output fp16_t       acc
);

  fp16_t addend;

  always_comb begin
    if (spike_mode) addend = a_in[0] ? b_in : FP16_ZERO;
    else            addend = fp16_mul(a_in, b_in);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_out <= 1'b0;
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else begin
      v_out <= v_in;
      a_out <= a_in;
      b_out <= b_in;
      if (clear)      acc <= FP16_ZERO;
      else if (drain) acc <= acc_up;
      else if (v_in)  acc <= fp16_add(acc, addend);
    end
  end

endmodule
