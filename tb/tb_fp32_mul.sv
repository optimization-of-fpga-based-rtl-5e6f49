// tb_fp32_mul: checks the FP32 multiplier against double-precision products
// rounded to single (exact for products of singles), on fixed cases (ones,
// signs, zero operands, rounding ties, overflow, underflow) and on random
// operands of moderate and extreme exponents.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] want);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", ta, tb_, y, want);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3F800000, 32'h3F800000, 32'h3F800000);  // 1*1
    check(32'h40000000, 32'hC0400000, 32'hC0C00000);  // 2*-3 = -6
    check(32'h00000000, 32'h40400000, 32'h00000000);  // 0*3
    check(32'h80000000, 32'h40400000, 32'h80000000);  // -0*3
    check(32'h7F000000, 32'h7F000000, 32'h7F800000);  // overflow
    check(32'h00800000, 32'h00800000, 32'h00000000);  // underflow
    check(32'h3F800001, 32'h3F800001, 32'h3F800002);  // (1+u)^2 rounds to 1+2u
    check(32'h3FC00000, 32'h3FC00000, 32'h40100000);  // 1.5*1.5 = 2.25
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] ra, rb;
      ra = rand_f(i < 15000 ? 20 : 126);
      rb = rand_f(i < 15000 ? 20 : 126);
      check(ra, rb, fmul(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
