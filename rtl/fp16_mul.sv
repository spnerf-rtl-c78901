// fp16_mul: combinational IEEE 754 binary16 multiplier.
//
// The 11-bit significands are multiplied exactly (22-bit product), the
// product is normalised by at most one place and rounded to nearest, ties
// to even, using a guard bit and a sticky bit. The paper computes in FP16
// but does not say how subnormals, zeros or specials are handled; this
// design's choices are: subnormal inputs and results are flushed to zero,
// every zero result is +0, overflow gives infinity of the product's sign,
// and any operation involving infinity or NaN returns infinity, or the
// quiet NaN 7E00 for NaN inputs and inf * 0.
// Interface: a, b in, y out; purely combinational, no clock.
module fp16_mul
  import spnerf_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        sa, sb, s;
  logic [4:0]  ea, eb;
  logic [9:0]  fa, fb;
  logic [21:0] p;
  logic [9:0]  mant;
  logic        guard, sticky, inc;
  logic [10:0] mant_r;
  logic signed [8:0] e;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    s      = sa ^ sb;
    p      = {1'b1, fa} * {1'b1, fb};
    e      = $signed({4'b0, ea}) + $signed({4'b0, eb}) - 9'sd15;
    if (p[21]) begin
      mant   = p[20:11];
      guard  = p[10];
      sticky = |p[9:0];
      e      = e + 9'sd1;
    end else begin
      mant   = p[19:10];
      guard  = p[9];
      sticky = |p[8:0];
    end
    inc    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {10'b0, inc};
    if (mant_r[10]) e = e + 9'sd1;

    if ((ea == 5'd31 && fa != 0) || (eb == 5'd31 && fb != 0))
      y = 16'h7E00;                                   // NaN in
    else if (ea == 5'd31 || eb == 5'd31)
      y = (ea == 5'd0 || eb == 5'd0) ? 16'h7E00 : {s, 5'h1F, 10'h0};
    else if (ea == 5'd0 || eb == 5'd0)
      y = FP16_ZERO;                                  // zero / flushed subnormal in
    else if (e >= 9'sd31)
      y = {s, 5'h1F, 10'h0};                          // overflow
    else if (e <= 9'sd0)
      y = FP16_ZERO;                                  // underflow, flushed
    else
      y = {s, e[4:0], mant_r[9:0]};
  end
endmodule
