// tb_fp32_add: self-checking test of the single-precision adder.
// Random operands of both signs (so that additions and cancelling
// subtractions both occur) are compared with the sum computed in double
// precision and rounded to single; the exponent spread of the random operands
// is limited to keep the double-precision sum exact. Special operands are
// compared with fixed values.
module tb_fp32_add;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  fp32_t a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic expect_eq(fp32_t exp_y, string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    a = 32'h3F80_0000; b = 32'h3F80_0000; expect_eq(32'h4000_0000, "1+1");
    a = 32'h3F80_0000; b = 32'hBF80_0000; expect_eq(32'h0000_0000, "1-1");
    a = 32'h4040_0000; b = 32'hBF80_0000; expect_eq(32'h4000_0000, "3-1");
    a = 32'h8000_0000; b = 32'h8000_0000; expect_eq(32'h8000_0000, "-0+-0");
    a = 32'h0000_0000; b = 32'hC000_0000; expect_eq(32'hC000_0000, "0+-2");
    a = 32'h7F80_0000; b = 32'hFF80_0000; expect_eq(FP32_QNAN, "inf-inf");
    a = 32'hFF80_0000; b = 32'h4000_0000; expect_eq(32'hFF80_0000, "-inf+2");
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; expect_eq(32'h7F80_0000, "overflow");
    a = 32'h0080_0001; b = 32'h8080_0000; expect_eq(32'h0000_0000, "underflow");
    a = 32'h4B80_0000; b = 32'h3F80_0000; expect_eq(32'h4B80_0000, "2^24+1 tie to even");
    a = 32'h4B80_0000; b = 32'h4000_0000; expect_eq(32'h4B80_0001, "2^24+2");
    a = 32'h3F80_0000; b = 32'h3380_0000; expect_eq(32'h3F80_0000, "1+2^-24 tie");
    a = 32'h3F80_0000; b = 32'h2000_0000; expect_eq(32'h3F80_0000, "1+tiny");
    repeat (30000) begin
      e = 40 + int'($urandom % 170);
      a = rand_fp(e, e);
      b = rand_fp(e > 25 ? e - 25 : 1, e + 25 > 254 ? 254 : e + 25);
      expect_eq(real2fp(fp2real(a) + fp2real(b)), "random");
    end
    // nearly equal magnitudes: deep cancellation
    repeat (5000) begin
      a = rand_fp(100, 150);
      b = a ^ 32'h8000_0000;
      b[7:0] = 8'($urandom);
      expect_eq(real2fp(fp2real(a) + fp2real(b)), "cancel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
