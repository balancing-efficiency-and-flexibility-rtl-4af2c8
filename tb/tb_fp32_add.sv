// tb_fp32_add: checks the FP32 adder against a reference computed in
// double precision, on directed cases (exact sums, cancellation, ties,
// infinities, overflow, subnormal results) and on random normal operands.
module tb_fp32_add;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] exp);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", ta, tb_, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3f800000, 32'h40000000, 32'h40400000);   // 1 + 2 = 3
    check(32'h40400000, 32'hc0a00000, 32'hc0000000);   // 3 - 5 = -2
    check(32'h3f800000, 32'hbf800000, 32'h00000000);   // x - x = +0
    check(32'h00000000, 32'hc0000000, 32'hc0000000);
    check(32'h7f800000, 32'hff800000, 32'h7fc00000);   // inf - inf
    check(32'h7f7fffff, 32'h7f7fffff, 32'h7f800000);   // overflow
    check(32'h4b800000, 32'h3f800000, 32'h4b800000);   // 2^24 + 1: tie to even
    check(32'h4b800000, 32'h40400000, 32'h4b800002);   // 2^24 + 3 -> +4
    check(32'h3f800000, 32'hb3800000, 32'h3f7fffff);   // 1 - 2^-24
    check(32'h00800000, 32'h80800001, 32'h80000000);   // result subnormal -> -0
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] ra, rb;
      ra = rand_fp(100, 160);
      rb = (i % 4 == 0) ? {~ra[31], ra[30:23], 23'($urandom)} : rand_fp(100, 160);
      check(ra, rb, ref_add(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
