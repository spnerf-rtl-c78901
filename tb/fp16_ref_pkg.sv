// fp16_ref_pkg: reference FP16 arithmetic for the testbenches, computed
// independently of the RTL with double-precision reals. A result is the
// exact real result rounded to 11 significant bits (nearest, ties to even),
// flushed to +0 below 2^-14 and saturated to infinity above 65504, which is
// the convention the accelerator's FP16 units use.
package fp16_ref_pkg;

  function automatic real f2r(logic [15:0] h);
    logic [63:0] d;
    if (h[14:10] == 5'd0) return 0.0;
    d = {h[15], 11'(int'(h[14:10]) - 15 + 1023), h[9:0], 42'b0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [15:0] r2f(real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [11:0] keep;
    logic [41:0] rest;
    int e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return 16'h0000;
    e    = int'(d[62:52]) - 1023;
    m    = {1'b1, d[51:0]};
    keep = {1'b0, m[52:42]};
    rest = m[41:0];
    if (rest > 42'h200_0000_0000 || (rest == 42'h200_0000_0000 && keep[0])) keep = keep + 12'd1;
    if (keep == 12'd2048) begin keep = 12'd1024; e++; end
    if (e > 15)  return {d[63], 5'h1F, 10'h0};
    if (e < -14) return 16'h0000;
    return {d[63], 5'(e + 15), keep[9:0]};
  endfunction

  function automatic logic [15:0] fmul(logic [15:0] a, logic [15:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [15:0] fadd(logic [15:0] a, logic [15:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // random normal FP16 with exponent field in [lo, hi]
  function automatic logic [15:0] rnd(int lo, int hi);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(lo + int'($urandom % (hi - lo + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage
