// tb_fp32_add: checks the FP32 adder against double-precision sums rounded to
// single, on fixed cases (cancellation, carry-out, rounding ties, zero
// operands, overflow) and on random operands with small and large exponent
// differences and both signs.
module tb_fp32_add;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] want);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", ta, tb_, y, want);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3F800000, 32'h3F800000, 32'h40000000);  // 1+1
    check(32'h3F800000, 32'hBF800000, 32'h00000000);  // 1-1
    check(32'h40400000, 32'hBF800000, 32'h40000000);  // 3-1
    check(32'h00000000, 32'hC0A00000, 32'hC0A00000);  // 0+(-5)
    check(32'h4B800000, 32'h3F800000, 32'h4B800000);  // 2^24+1 ties to even
    check(32'h4B800000, 32'h40400000, 32'h4B800002);  // 2^24+3 ties up
    check(32'h7F7FFFFF, 32'h7F7FFFFF, 32'h7F800000);  // overflow
    check(32'h3F800000, 32'hB3800000, 32'h3F7FFFFF);  // 1-2^-24
    for (int i = 0; i < 30000; i++) begin
      logic [31:0] ra, rb;
      ra = rand_f(i < 10000 ? 3 : 30);
      rb = rand_f(i < 10000 ? 3 : 30);
      check(ra, rb, fadd(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
