// tb_sma_pe: checks one processing element in both modes against the
// double-precision reference: SIMD y = a*b + c, systolic y = a_bcast*b +
// psum_in, an inactive PE passing psum_in (systolic) or holding (SIMD),
// en low holding the result, and the one-cycle latency.
module tb_sma_pe;
  import sma_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic en, active;
  fp32_t b, a_lane, c_lane, a_bcast, psum_in, y;
  int checks = 0, failures = 0;

  sma_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_y(input fp32_t e, input string what);
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %s: y=%h expected %h", what, y, e);
    end
  endtask

  initial begin
    fp32_t exp_y, prev;
    mode = MODE_SIMD; en = 0; active = 1;
    b = '0; a_lane = '0; c_lane = '0; a_bcast = '0; psum_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_y(32'd0, "reset");
    for (int i = 0; i < 3000; i++) begin
      mode    = ($urandom % 2) ? MODE_SYSTOLIC : MODE_SIMD;
      en      = ($urandom % 8) != 0;
      active  = ($urandom % 6) != 0;
      b       = rand_fp(100, 150);
      a_lane  = rand_fp(100, 150);
      c_lane  = rand_fp(100, 150);
      a_bcast = rand_fp(100, 150);
      psum_in = rand_fp(100, 150);
      prev    = y;
      if (!en)                        exp_y = prev;
      else if (mode == MODE_SIMD)     exp_y = active ? ref_add(ref_mul(a_lane, b), c_lane) : prev;
      else                            exp_y = active ? ref_add(ref_mul(a_bcast, b), psum_in) : psum_in;
      @(posedge clk);
      // not yet visible before the edge, visible right after it
      #1;
      expect_y(exp_y, "step");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
