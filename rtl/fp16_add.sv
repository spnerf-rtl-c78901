// fp16_add: combinational IEEE 754 binary16 adder (subtract by flipping the
// sign bit of b at the caller).
//
// The operands are ordered by magnitude, the smaller significand is aligned
// with guard, round and sticky bits, added or subtracted, renormalised with
// a leading-zero count and rounded to nearest, ties to even. Special-value
// conventions are this design's own (the paper only says "FP16"): subnormal
// inputs and results flush to zero, every zero result is +0, overflow gives
// infinity, inf + (-inf) and NaN inputs give the quiet NaN 7E00.
// Interface: a, b in, y = a + b out; purely combinational.
module fp16_add
  import spnerf_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        sx, sy;            // x: larger magnitude, y: smaller
  logic [4:0]  ex, ey;
  logic [9:0]  fx, fy;
  logic [4:0]  d;
  logic [13:0] mx, my_full, my;
  logic [14:0] sum;
  logic [3:0]  lz;
  logic signed [7:0] e;
  logic [9:0]  mant;
  logic        guard, rs, inc;
  logic [10:0] mant_r;
  logic        xzero, yzero;

  always_comb begin
    if (a[14:0] >= b[14:0]) begin
      {sx, ex, fx} = a; {sy, ey, fy} = b;
    end else begin
      {sx, ex, fx} = b; {sy, ey, fy} = a;
    end
    xzero   = (ex == 5'd0);
    yzero   = (ey == 5'd0);
    mx      = xzero ? 14'd0 : {1'b1, fx, 3'b000};
    my_full = yzero ? 14'd0 : {1'b1, fy, 3'b000};
    d       = ex - ey;
    if (d >= 5'd14) my = (my_full != 0) ? 14'd1 : 14'd0;
    else begin
      my = my_full >> d;
      if ((my_full & ((14'd1 << d) - 14'd1)) != 0) my[0] = 1'b1;
    end
    e  = $signed({3'b0, ex});
    lz = '0;
    if (sx == sy) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[14]) begin
        sum = {1'b0, sum[14:2], sum[1] | sum[0]};
        e   = e + 8'sd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      for (int i = 0; i < 14; i++)
        if (sum[13 - i] == 1'b0 && lz == 4'(i)) lz = 4'(i + 1);
      sum = sum << lz;
      e   = e - $signed({4'b0, lz});
    end
    mant   = sum[12:3];
    guard  = sum[2];
    rs     = sum[1] | sum[0];
    inc    = guard & (rs | mant[0]);
    mant_r = {1'b0, mant} + {10'b0, inc};
    if (mant_r[10]) e = e + 8'sd1;

    if ((ex == 5'd31 && fx != 0) || (ey == 5'd31 && fy != 0))
      y = 16'h7E00;
    else if (ex == 5'd31)
      y = (ey == 5'd31 && sx != sy) ? 16'h7E00 : {sx, 5'h1F, 10'h0};
    else if (xzero)
      y = FP16_ZERO;
    else if (sum[13:0] == 14'd0)
      y = FP16_ZERO;                       // exact cancellation
    else if (e >= 8'sd31)
      y = {sx, 5'h1F, 10'h0};
    else if (e <= 8'sd0)
      y = FP16_ZERO;
    else
      y = {sx, e[4:0], mant_r[9:0]};
  end
endmodule
