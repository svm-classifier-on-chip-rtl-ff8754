// tb_class_decision: self-checking test of the classification decision.
// Random D, b and th: the expected difference D - b is computed with
// reference rounding and the class from a real-valued comparison with th.
// Fixed cases cover equality with the threshold (+1), negative thresholds
// and the one-cycle latency. The testbench supplies the adder the block drives.
module tb_class_decision;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  fp32_t d, b, th, diff;
  logic valid;
  logic [31:0] f;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0;

  always #5 clk = ~clk;

  fp32_t add_a, add_b, add_y;
  fp32_add u_add (.a(add_a), .b(add_b), .y(add_y));
  class_decision dut (.*);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic apply(fp32_t dd, fp32_t bb, fp32_t tt, logic [31:0] f_exp, string what);
    fp32_t diff_exp;
    diff_exp = real2fp(fp2real(dd) - fp2real(bb));
    @(negedge clk);
    d = dd; b = bb; th = tt; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(valid, {what, ": valid one cycle after start"});
    check(diff == diff_exp, $sformatf("%s: diff %h expected %h", what, diff, diff_exp));
    check(f == f_exp, $sformatf("%s: f %h expected %h", what, f, f_exp));
    if (f_exp == CLASS_MELANOMA) n_pos++; else n_neg++;
    @(negedge clk);
    check(!valid, {what, ": valid is a pulse"});
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t dd, bb, tt;
    real r;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // 3.0 - 1.0 = 2.0 against th = 2.0: equal gives +1
    apply(32'h4040_0000, 32'h3F80_0000, 32'h4000_0000, CLASS_MELANOMA, "equal");
    apply(32'h4040_0000, 32'h3F80_0000, 32'h4000_0001, CLASS_BENIGN, "just below");
    apply(32'h3F80_0000, 32'h4040_0000, 32'hC000_0000, CLASS_MELANOMA, "-2 >= -2");
    apply(32'h3F80_0000, 32'h4040_0000, 32'h0000_0000, CLASS_BENIGN, "-2 < 0");
    apply(32'h3F80_0000, 32'h3F80_0000, 32'h8000_0000, CLASS_MELANOMA, "0 >= -0");
    for (int k = 0; k < 400; k++) begin
      dd = rand_fp(120, 130);
      bb = rand_fp(120, 130);
      tt = rand_fp(110, 128);
      r  = fp2real(real2fp(fp2real(dd) - fp2real(bb)));
      apply(dd, bb, tt, (r >= fp2real(tt)) ? CLASS_MELANOMA : CLASS_BENIGN, "random");
    end
    check(n_pos > 50 && n_neg > 50, "both classes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
