// tb_svs_summation: self-checking test of the SVs summation block.
// A small model (7 SVs, 5 features) with random single-precision data is held
// in behavioural one-cycle-latency memories. The expected Z is computed in the
// same order with reference rounding after every multiply and add. Also
// checked: the start-to-done latency of N_SV*N_FEAT + 3 cycles, that done is a
// single-cycle pulse, and that a second run starts again from Z = 0. The
// testbench supplies the multiplier and adder the block drives.
module tb_svs_summation;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N_SV   = 7;
  localparam int unsigned N_FEAT = 5;
  localparam int unsigned SV_AW  = $clog2(N_SV * N_FEAT);
  localparam int unsigned PAR_AW = $clog2(N_SV + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done, sv_en, par_en;
  logic [SV_AW-1:0]  sv_addr;
  logic [PAR_AW-1:0] par_addr;
  fp32_t sv_rdata, par_rdata;
  fp32_t z [N_FEAT];
  fp32_t sv_mem [N_SV*N_FEAT];
  fp32_t par_mem [N_SV+1];
  fp32_t z_exp [N_FEAT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp32_t mul_a, mul_b, mul_y, add_a, add_b, add_y;
  fp32_mul u_mul (.a(mul_a), .b(mul_b), .y(mul_y));
  fp32_add u_add (.a(add_a), .b(add_b), .y(add_y));
  svs_summation #(.N_SV(N_SV), .N_FEAT(N_FEAT)) dut (.*);

  always_ff @(posedge clk) begin
    if (sv_en)  sv_rdata  <= sv_mem[sv_addr];
    if (par_en) par_rdata <= par_mem[par_addr];
  end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run_once(int seed_round);
    int cyc;
    fp32_t p;
    for (int k = 0; k < int'(N_SV*N_FEAT); k++) sv_mem[k] = rand_fp(118, 136);
    par_mem[0] = rand_fp(120, 130);
    for (int k = 1; k <= int'(N_SV); k++) par_mem[k] = rand_fp(120, 132);
    for (int j = 0; j < int'(N_FEAT); j++) z_exp[j] = 32'h0;
    for (int i = 0; i < int'(N_SV); i++)
      for (int j = 0; j < int'(N_FEAT); j++) begin
        p = real2fp(fp2real(sv_mem[i*N_FEAT+j]) * fp2real(par_mem[i+1]));
        z_exp[j] = real2fp(fp2real(z_exp[j]) + fp2real(p));
      end
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == int'(N_SV*N_FEAT) + 3, $sformatf("latency %0d, expected %0d", cyc, N_SV*N_FEAT + 3));
    for (int j = 0; j < int'(N_FEAT); j++)
      check(z[j] == z_exp[j], $sformatf("round %0d Z[%0d]=%h expected %h", seed_round, j, z[j], z_exp[j]));
    @(negedge clk);
    check(!done && !busy, "done is a single pulse");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 5; r++) run_once(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
