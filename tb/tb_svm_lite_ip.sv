// tb_svm_lite_ip: self-checking test of the simplified classifier stage.
// The stage holds a fixed 5-feature model (Z, b, th); random samples X are
// written into it and the class is compared with a reference dot product
// with single-precision rounding. For a -1 result the test also checks that
// the stage passes X on: N_FEAT consecutive words, in order, with the values
// written. Latencies: N_FEAT + 5 cycles from start to done for +1, and
// N_FEAT more when X is passed on.
module tb_svm_lite_ip;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N_FEAT = 5;
  localparam int unsigned X_AW   = $clog2(N_FEAT);
  localparam fp32_t Z [N_FEAT] = '{32'h3F80_0000, 32'hC000_0000, 32'h3F00_0000, 32'h4040_0000, 32'hBE80_0000};
  localparam fp32_t B  = 32'h3F80_0000;  //  1.0
  localparam fp32_t TH = 32'hBF00_0000;  // -0.5

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done, passed, x_we, xo_valid;
  logic [31:0] f;
  logic [X_AW-1:0] x_waddr, xo_addr;
  fp32_t x_wdata, xo_data;
  fp32_t fwd [N_FEAT];
  int n_fwd = 0;
  int checks = 0, failures = 0, n_pos = 0, n_neg = 0;

  always #5 clk = ~clk;

  svm_lite_ip #(.N_FEAT(N_FEAT), .Z_MODEL(Z), .B_MODEL(B), .TH_MODEL(TH), .FWD_X(1'b1)) dut (.*);

  always_ff @(posedge clk) if (xo_valid) begin
    if (32'(xo_addr) == 32'(n_fwd)) fwd[xo_addr] <= xo_data;
    n_fwd <= n_fwd + 1;
  end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t x [N_FEAT];
    fp32_t d, diff;
    logic [31:0] f_exp;
    int cyc;
    x_we = 0; x_waddr = 0; x_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 200; r++) begin
      d = 32'h0;
      for (int j = 0; j < int'(N_FEAT); j++) begin
        x[j] = rand_fp(124, 128);
        @(negedge clk);
        x_we = 1; x_waddr = X_AW'(j); x_wdata = x[j];
        d = mac(d, x[j], Z[j]);
      end
      @(negedge clk);
      x_we = 0;
      diff  = sub(d, B);
      f_exp = decide(diff, TH);
      n_fwd = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(f == f_exp, $sformatf("F=%h expected %h", f, f_exp));
      check(passed == (f_exp == CLASS_BENIGN), "passed flag");
      if (f_exp == CLASS_MELANOMA) begin
        n_pos++;
        check(cyc == int'(N_FEAT) + 5, $sformatf("latency %0d", cyc));
        check(n_fwd == 0, "no X passed on for +1");
      end else begin
        n_neg++;
        check(cyc == 2 * int'(N_FEAT) + 5, $sformatf("latency with hand-over %0d", cyc));
        check(n_fwd == int'(N_FEAT), $sformatf("%0d words passed on", n_fwd));
        for (int j = 0; j < int'(N_FEAT); j++) check(fwd[j] == x[j], $sformatf("passed X[%0d]", j));
      end
    end
    check(n_pos > 10 && n_neg > 10, $sformatf("both classes (%0d/%0d)", n_pos, n_neg));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
