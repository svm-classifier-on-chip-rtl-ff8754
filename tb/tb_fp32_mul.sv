// tb_fp32_mul: self-checking test of the single-precision multiplier.
// Random normal operands are compared with the product computed in double
// precision and rounded to single (exact reference); special operands
// (zero, subnormal, infinity, NaN, overflow, underflow) against fixed values.
module tb_fp32_mul;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  fp32_t a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic expect_eq(fp32_t exp_y, string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fixed cases
    a = 32'h3FC0_0000; b = 32'h4040_0000; expect_eq(32'h4090_0000, "1.5*3");
    a = 32'hBF80_0000; b = 32'h3F80_0000; expect_eq(32'hBF80_0000, "-1*1");
    a = 32'h0000_0000; b = 32'hC2C8_0000; expect_eq(32'h8000_0000, "0*-100");
    a = 32'h0000_1234; b = 32'h3F80_0000; expect_eq(32'h0000_0000, "subnormal");
    a = 32'h7F80_0000; b = 32'h4000_0000; expect_eq(32'h7F80_0000, "inf*2");
    a = 32'h7F80_0000; b = 32'h0000_0000; expect_eq(FP32_QNAN, "inf*0");
    a = 32'h7FC0_0001; b = 32'h3F80_0000; expect_eq(FP32_QNAN, "nan");
    a = 32'h7F00_0000; b = 32'h7F00_0000; expect_eq(32'h7F80_0000, "overflow");
    a = 32'h0100_0000; b = 32'h0100_0000; expect_eq(32'h0000_0000, "underflow");
    a = 32'h3F80_0001; b = 32'h3F80_0001; expect_eq(32'h3F80_0002, "round 1+2ulp");
    // random operands
    repeat (20000) begin
      a = rand_fp(60, 190);
      b = rand_fp(60, 190);
      expect_eq(real2fp(fp2real(a) * fp2real(b)), "random");
    end
    // random operands close to the range limits
    repeat (5000) begin
      a = rand_fp(1, 254);
      b = rand_fp(1, 254);
      expect_eq(real2fp(fp2real(a) * fp2real(b)), "wide");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
