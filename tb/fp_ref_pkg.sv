// fp_ref_pkg: reference FP32 arithmetic for the testbenches, computed through
// the simulator's double-precision reals rather than the RTL's algorithm.
// A binary32 product is exact in binary64, and a binary32 sum rounded to
// binary64 and then to binary32 rounds the same as a single rounding, so
// "compute in real, round once to binary32" gives the correctly rounded
// result. Results are then flushed to zero where binary32 would be
// subnormal, matching the flush-to-zero convention of the RTL.
package fp_ref_pkg;

  // binary32 bits -> real (normal numbers, zeros and infinities)
  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0)       d = {f[31], 63'd0};
    else if (f[30:23] == 8'hff) d = {f[31], 11'h7ff, f[22:0], 29'd0};
    else d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // real -> binary32 bits, round to nearest even, flush-to-zero
  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [23:0] mr;
    logic        g, st;
    d = $realtobits(x);
    s = d[63];
    if (d[62:52] == 11'h7ff) return (d[51:0] != 0) ? 32'h7fc0_0000 : {s, 8'hff, 23'd0};
    if (d[62:52] == 11'd0)   return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    mr = m[52:29];
    g  = m[28];
    st = |m[27:0];
    if (g && (st || mr[0])) begin
      if (mr == 24'hff_ffff) begin mr = 24'h80_0000; e = e + 1; end
      else mr = mr + 24'd1;
    end
    if (e >= 255) return {s, 8'hff, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // random normal binary32 with biased exponent in [lo, hi]
  function automatic logic [31:0] rand_fp(input int lo, input int hi);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(lo + int'($urandom % (hi - lo + 1)));
    return r;
  endfunction

endpackage
