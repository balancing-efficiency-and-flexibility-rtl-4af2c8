// sma_pe: one processing element of an SMA unit.
//
// The same FP32 multiplier and adder serve both execution modes, which is the
// point of temporal integration: only the operand sources change.
//   SIMD mode     : y <= a_lane * b + c_lane       (an ordinary FMA lane;
//                   a, b, c come from the operand collector)
//   systolic mode : y <= a_bcast * b + psum_in     (semi-broadcast weight-
//                   stationary cell; b is the stationary weight held in the
//                   repurposed operand collector, a_bcast the element of A
//                   broadcast down this PE's column, psum_in the partial sum
//                   of the left neighbour; y goes to the right neighbour)
// An inactive PE (active mask bit low) passes psum_in through unchanged in
// systolic mode and keeps its result register in SIMD mode.
// The PE structure (b register, multiplier, adder, partial sum passed to the
// right) follows the paper's PE drawing; the multiply is rounded before the
// add (two roundings, not a fused FMA) and the one-cycle register at the
// output are this design's choices.
//
// Timing: one cycle. Operands sampled at the rising edge where en is high,
// result visible on y the cycle after. rst_n (asynchronous, active low)
// clears y.
module sma_pe
  import sma_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_e mode,
  input  logic     en,       // advance this cycle
  input  logic     active,   // active-mask bit
  input  fp32_t    b,        // SIMD operand b / stationary weight
  input  fp32_t    a_lane,   // SIMD operand a
  input  fp32_t    c_lane,   // SIMD operand c
  input  fp32_t    a_bcast,  // broadcast element of A (systolic)
  input  fp32_t    psum_in,  // partial sum from the left (systolic)
  output fp32_t    y
);
  fp32_t mul_a, add_c, prod, sum;

  always_comb begin
    mul_a = (mode == MODE_SYSTOLIC) ? a_bcast : a_lane;
    add_c = (mode == MODE_SYSTOLIC) ? psum_in : c_lane;
  end

  fp32_mul u_mul (.a(mul_a), .b(b),     .y(prod));
  fp32_add u_add (.a(prod),  .b(add_c), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      y <= '0;
    else if (en) begin
      if (active)                      y <= sum;
      else if (mode == MODE_SYSTOLIC)  y <= psum_in;
    end
  end
endmodule
