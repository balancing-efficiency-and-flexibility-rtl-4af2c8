// tb_fp32_mul: checks the FP32 multiplier against a reference computed in
// double precision, on directed cases (exact products, ties, zeros,
// infinities, overflow, underflow to zero) and on random normal operands.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] exp);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", ta, tb_, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3f800000, 32'h40000000, 32'h40000000);   // 1 * 2
    check(32'h40400000, 32'hc0a00000, 32'hc1700000);   // 3 * -5 = -15
    check(32'h00000000, 32'h40000000, 32'h00000000);
    check(32'h80000000, 32'h40000000, 32'h80000000);
    check(32'h7f800000, 32'h40000000, 32'h7f800000);
    check(32'h7f800000, 32'h00000000, 32'h7fc00000);
    check(32'h7f000000, 32'h7f000000, 32'h7f800000);   // overflow
    check(32'h00800000, 32'h00800000, 32'h00000000);   // underflow -> 0
    check(32'h3f800001, 32'h3f800001, 32'h3f800002);
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] ra, rb;
      ra = rand_fp(40, 214);
      rb = rand_fp(40, 214);
      check(ra, rb, ref_mul(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
