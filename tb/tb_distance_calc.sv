// tb_distance_calc: self-checking test of the distance calculation block.
// Random X (in a one-cycle-latency behavioural memory) and Z vectors of 27
// features; the expected D is the same left-to-right dot product with
// reference rounding after every operation. Also checks the start-to-done
// latency of N_FEAT + 3 cycles. The testbench supplies the multiplier and
// adder the block drives.
module tb_distance_calc;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N_FEAT = 27;
  localparam int unsigned X_AW   = $clog2(N_FEAT);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done, x_en;
  logic [X_AW-1:0] x_addr;
  fp32_t x_rdata, d;
  fp32_t z [N_FEAT];
  fp32_t x_mem [N_FEAT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp32_t mul_a, mul_b, mul_y, add_a, add_b, add_y;
  fp32_mul u_mul (.a(mul_a), .b(mul_b), .y(mul_y));
  fp32_add u_add (.a(add_a), .b(add_b), .y(add_y));
  distance_calc #(.N_FEAT(N_FEAT)) dut (.*);

  always_ff @(posedge clk) if (x_en) x_rdata <= x_mem[x_addr];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t d_exp, p;
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 20; r++) begin
      d_exp = 32'h0;
      for (int j = 0; j < int'(N_FEAT); j++) begin
        x_mem[j] = rand_fp(118, 134);
        z[j]     = rand_fp(118, 134);
        p        = real2fp(fp2real(x_mem[j]) * fp2real(z[j]));
        d_exp    = real2fp(fp2real(d_exp) + fp2real(p));
      end
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(cyc == int'(N_FEAT) + 3, $sformatf("latency %0d", cyc));
      check(d == d_exp, $sformatf("D=%h expected %h", d, d_exp));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
