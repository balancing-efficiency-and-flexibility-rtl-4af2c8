// fp32_add: combinational IEEE-754 binary32 adder, the adder of one SMA
// processing element (the "+" of the PE) and of the row-end C accumulation.
//
// The operand of larger magnitude is kept, the other one is aligned to it
// with guard, round and sticky bits, the significands are added or
// subtracted, the result is normalised and rounded to nearest, ties to even.
// Subnormal inputs count as zero and subnormal results are flushed to a
// signed zero; overflow gives infinity; NaN inputs and inf - inf give the
// default quiet NaN. An exact zero difference is +0.
// Rounding and subnormal handling are this design's choice; the paper only
// names an FP32 adder per lane.
//
// Interface: a, b operands, y = a + b. Purely combinational, no clock.
module fp32_add
  import sma_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  localparam fp32_t QNAN = 32'h7fc0_0000;

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [22:0] fa, fb;
  logic [23:0] ml, ms;
  logic        a_inf, b_inf, a_nan, b_nan;
  logic        swap;
  logic [7:0]  d;
  logic [26:0] xl, xs, xs_sh;
  logic        sticky_sh;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic        found;
  logic signed [10:0] e, e_r;
  logic [26:0] norm;
  logic        round_up;
  logic [24:0] mant_r;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_inf = (ea == 8'hff) && (fa == 23'd0);
    b_inf = (eb == 8'hff) && (fb == 23'd0);
    a_nan = (ea == 8'hff) && (fa != 23'd0);
    b_nan = (eb == 8'hff) && (fb != 23'd0);

    // order by magnitude (subnormals count as zero)
    swap = ({eb, fb} > {ea, fa});
    if (swap) begin
      sl = sb; el = eb; ml = (eb == 8'd0) ? 24'd0 : {1'b1, fb};
      ss = sa; es = ea; ms = (ea == 8'd0) ? 24'd0 : {1'b1, fa};
    end else begin
      sl = sa; el = ea; ml = (ea == 8'd0) ? 24'd0 : {1'b1, fa};
      ss = sb; es = eb; ms = (eb == 8'd0) ? 24'd0 : {1'b1, fb};
    end
    d  = el - es;
    xl = {ml, 3'b000};
    xs = {ms, 3'b000};
    if (d >= 8'd27) begin
      xs_sh     = 27'd0;
      sticky_sh = |xs;
    end else begin
      xs_sh     = xs >> d;
      sticky_sh = |(xs & ((27'd1 << d) - 27'd1));
    end
    xs_sh[0] = xs_sh[0] | sticky_sh;

    if (sl == ss) sum = {1'b0, xl} + {1'b0, xs_sh};
    else          sum = {1'b0, xl} - {1'b0, xs_sh};

    e    = $signed({3'b000, el});
    norm  = 27'd0;
    found = 1'b0;
    lz   = 5'd0;
    if (sum[27]) begin
      norm = {sum[27:2], sum[1] | sum[0]};
      e    = e + 11'sd1;
    end else begin
      found = 1'b0;
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz    = 5'(26 - i);
        end
      end
      norm = sum[26:0] << lz;
      e    = e - $signed({6'd0, lz});
    end

    round_up = norm[2] & (norm[1] | norm[0] | norm[3]);
    mant_r   = {1'b0, norm[26:3]} + {24'd0, round_up};
    e_r      = e;
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e_r    = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb)))
      y = QNAN;
    else if (a_inf)
      y = a;
    else if (b_inf)
      y = b;
    else if (sum == 28'd0)
      y = (ml == 24'd0 && ms == 24'd0 && sa && sb) ? 32'h8000_0000 : 32'd0;
    else if (e_r >= 11'sd255)
      y = {sl, 8'hff, 23'd0};
    else if (e_r <= 11'sd0)
      y = {sl, 31'd0};
    else
      y = {sl, e_r[7:0], mant_r[22:0]};
  end
endmodule
