// fp32_mul: combinational IEEE-754 binary32 multiplier, the multiplier of one
// SMA processing element (the "x" of the PE).
//
// The 24-bit significands are multiplied into a 48-bit product, which is
// normalised by at most one position and rounded to nearest, ties to even.
// Subnormal inputs are treated as zero and results that would be subnormal
// are flushed to a signed zero (flush-to-zero); overflow gives infinity;
// NaN inputs, and infinity times zero, give the default quiet NaN.
// The paper names the FP32 multiply-accumulate of each lane but not its
// arithmetic details: rounding mode and subnormal handling are this design's
// choice.
//
// Interface: a, b operands, y = a * b. Purely combinational, no clock.
module fp32_mul
  import sma_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  localparam fp32_t QNAN = 32'h7fc0_0000;

  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, round_up;
  logic [24:0] mant_r;
  logic signed [10:0] exp_u, exp_r;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy     = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hff) && (fa == 23'd0);
    b_inf  = (eb == 8'hff) && (fb == 23'd0);
    a_nan  = (ea == 8'hff) && (fa != 23'd0);
    b_nan  = (eb == 8'hff) && (fb != 23'd0);

    prod  = {1'b1, fa} * {1'b1, fb};
    exp_u = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_u  = exp_u + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + {24'd0, round_up};
    exp_r    = exp_u;
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_u + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = QNAN;
    else if (a_inf || b_inf)
      y = {sy, 8'hff, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (exp_r >= 11'sd255)
      y = {sy, 8'hff, 23'd0};
    else if (exp_r <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, exp_r[7:0], mant_r[22:0]};
  end
endmodule
