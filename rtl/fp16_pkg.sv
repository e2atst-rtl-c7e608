// fp16_pkg: IEEE-754 binary16 arithmetic used by every datapath of the
// accelerator (matrix array, SOMA/GRAD/RES lanes, forward and backward BN).
//
// All functions are combinational and synthesizable. They implement
// round-to-nearest-even on an 11-bit significand. Two simplifications are
// this design's own choice, as accelerators commonly make them:
//   * subnormals are flushed to zero, on inputs and on results (a result whose
//     rounded magnitude is below 2^-14 becomes +0);
//   * every zero result is +0.
// Overflow gives +/-Inf, invalid operations give the quiet NaN 16'h7E00.
// fp16_norm_round() is the shared back end: callers hand it a magnitude whose
// bit 25 has weight 2^(expb-15), with any lost bits ORed into bit 0.
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_QNAN = 16'h7E00;

  function automatic logic fp16_is_zero(fp16_t a);
    return a[14:10] == 5'd0;
  endfunction

  function automatic logic fp16_is_special(fp16_t a);
    return a[14:10] == 5'd31;
  endfunction

  // Normalise, round to nearest even, pack. mag: 27 bits, bit 25 weighs
  // 2^(expb-15); bit 0 may carry a sticky bit.
  function automatic fp16_t fp16_norm_round(logic sign, int expb, logic [26:0] mag);
    int        p;
    int        e;
    logic [26:0] m;
    logic [11:0] r;
    logic        g, st, up;
    if (mag == '0) return FP16_ZERO;
    p = 0;
    for (int i = 0; i < 27; i++) if (mag[i]) p = i;
    e = expb + (p - 25);
    if (p == 26) m = {1'b0, mag[26:1]} | {26'd0, mag[0]};
    else         m = mag << (25 - p);
    g  = m[14];
    st = |m[13:0];
    up = g & (st | m[15]);
    r  = {1'b0, m[25:15]} + {11'd0, up};
    if (r[11]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e >= 31) return {sign, 5'd31, 10'd0};
    if (e <= 0)  return FP16_ZERO;
    return {sign, e[4:0], r[9:0]};
  endfunction

  function automatic fp16_t fp16_neg(fp16_t a);
    if (fp16_is_zero(a)) return FP16_ZERO;
    return {~a[15], a[14:0]};
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       x, y;
    logic [10:0] mx, my;
    logic [26:0] ax, by, sum;
    logic        sticky;
    int          d;
    if (fp16_is_special(a) || fp16_is_special(b)) begin
      if (fp16_is_special(a) && a[9:0] != 0) return FP16_QNAN;
      if (fp16_is_special(b) && b[9:0] != 0) return FP16_QNAN;
      if (fp16_is_special(a) && fp16_is_special(b) && a[15] != b[15]) return FP16_QNAN;
      return fp16_is_special(a) ? a : b;
    end
    if (fp16_is_zero(a)) return fp16_is_zero(b) ? FP16_ZERO : b;
    if (fp16_is_zero(b)) return a;
    // x holds the larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    mx = {1'b1, x[9:0]};
    my = {1'b1, y[9:0]};
    d  = int'(x[14:10]) - int'(y[14:10]);
    ax = {1'b0, mx, 15'd0};
    by = {1'b0, my, 15'd0};
    sticky = 1'b0;
    if (d >= 27) begin
      by = '0;
      sticky = 1'b1;
    end else if (d > 0) begin
      for (int i = 0; i < 27; i++) if (i < d && by[i]) sticky = 1'b1;
      by = by >> d;
    end
    by[0] = by[0] | sticky;
    if (x[15] == y[15]) sum = ax + by;
    else                sum = ax - by;
    if (sum == '0) return FP16_ZERO;
    return fp16_norm_round(x[15], int'(x[14:10]), sum);
  endfunction

  function automatic fp16_t fp16_sub(fp16_t a, fp16_t b);
    return fp16_add(a, fp16_neg(b));
  endfunction

  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    s = a[15] ^ b[15];
    if (fp16_is_special(a) || fp16_is_special(b)) begin
      if ((fp16_is_special(a) && a[9:0] != 0) || (fp16_is_special(b) && b[9:0] != 0)) return FP16_QNAN;
      if (fp16_is_zero(a) || fp16_is_zero(b)) return FP16_QNAN;
      return {s, 5'd31, 10'd0};
    end
    if (fp16_is_zero(a) || fp16_is_zero(b)) return FP16_ZERO;
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    return fp16_norm_round(s, int'(a[14:10]) + int'(b[14:10]) - 15, {p, 5'd0});
  endfunction

  function automatic fp16_t fp16_div(fp16_t a, fp16_t b);
    logic        s;
    logic [23:0] num;
    logic [13:0] q;
    logic [10:0] rem;
    s = a[15] ^ b[15];
    if (fp16_is_special(a) || fp16_is_special(b)) begin
      if (fp16_is_special(a) && !fp16_is_special(b) && a[9:0] == 0) return {s, 5'd31, 10'd0};
      if (!fp16_is_special(a) && fp16_is_special(b) && b[9:0] == 0) return FP16_ZERO;
      return FP16_QNAN;
    end
    if (fp16_is_zero(b)) return fp16_is_zero(a) ? FP16_QNAN : {s, 5'd31, 10'd0};
    if (fp16_is_zero(a)) return FP16_ZERO;
    num = {1'b1, a[9:0], 13'd0};
    q   = 14'(num / {13'd0, 1'b1, b[9:0]});
    rem = 11'(num % {13'd0, 1'b1, b[9:0]});
    return fp16_norm_round(s, int'(a[14:10]) - int'(b[14:10]) + 15,
                           {1'b0, q, 11'd0, (rem != 0)});
  endfunction

  function automatic fp16_t fp16_sqrt(fp16_t a);
    logic [23:0] rad;
    logic [23:0] rem;
    logic [11:0] root;
    logic [13:0] trial;
    int          eadj;
    if (fp16_is_zero(a)) return FP16_ZERO;
    if (a[15]) return FP16_QNAN;
    if (fp16_is_special(a)) return (a[9:0] == 0) ? a : FP16_QNAN;
    if (a[10] == 1'b0) begin  // biased exponent even -> unbiased odd
      rad  = {1'b0, 1'b1, a[9:0], 12'd0} << 1;
      eadj = int'(a[14:10]) - 16;
    end else begin
      rad  = {1'b0, 1'b1, a[9:0], 12'd0};
      eadj = int'(a[14:10]) - 15;
    end
    // restoring integer square root, two radicand bits per step
    rem  = '0;
    root = '0;
    for (int i = 11; i >= 0; i--) begin
      rem   = (rem << 2) | 24'(rad[2*i +: 2]);
      trial = {root, 2'b01};
      if (rem >= 24'(trial)) begin
        rem  = rem - 24'(trial);
        root = (root << 1) | 12'd1;
      end else begin
        root = root << 1;
      end
    end
    return fp16_norm_round(1'b0, (eadj >>> 1) + 15, {1'b0, root, 13'd0, (rem != 0)});
  endfunction

  // a < b, zeros of either sign equal, NaN compares false
  function automatic logic fp16_lt(fp16_t a, fp16_t b);
    logic az, bz;
    az = fp16_is_zero(a);
    bz = fp16_is_zero(b);
    if ((fp16_is_special(a) && a[9:0] != 0) || (fp16_is_special(b) && b[9:0] != 0)) return 1'b0;
    if (az && bz) return 1'b0;
    if (az) return !b[15];
    if (bz) return a[15];
    if (a[15] != b[15]) return a[15];
    if (!a[15]) return a[14:0] < b[14:0];
    return a[14:0] > b[14:0];
  endfunction

  function automatic logic fp16_ge(fp16_t a, fp16_t b);
    if ((fp16_is_special(a) && a[9:0] != 0) || (fp16_is_special(b) && b[9:0] != 0)) return 1'b0;
    return !fp16_lt(a, b);
  endfunction

  // unsigned integer (up to 2^26-1) to fp16, rounded
  function automatic fp16_t fp16_from_uint(logic [25:0] n);
    return fp16_norm_round(1'b0, 40, {1'b0, n});
  endfunction

endpackage
