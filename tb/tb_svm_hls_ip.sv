// tb_svm_hls_ip: self-checking test of the full SVM classifier IP.
// A small model (6 SVs, 5 features) and test samples are generated at random
// and held in behavioural one-cycle-latency memories. The reference follows
// the classifier's equations in the same order (Z accumulation, dot product,
// subtraction of b) with single-precision rounding after each operation. The
// threshold is set to the reference difference itself (expect +1) or to the
// next number above it (expect -1), so both classes and the equality edge are
// exercised. Also checked over the control bus: done and idle flags, done
// cleared by a read, the threshold register read-back, and the latency of
// N_SV*N_FEAT + N_FEAT + 10 cycles from the accepted start to done.
module tb_svm_hls_ip;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N_SV   = 6;
  localparam int unsigned N_FEAT = 5;
  localparam int unsigned SV_AW  = $clog2(N_SV * N_FEAT);
  localparam int unsigned PAR_AW = $clog2(N_SV + 1);
  localparam int unsigned X_AW   = $clog2(N_FEAT);
  localparam int LATENCY = N_SV * N_FEAT + N_FEAT + 10;

  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t axi_req;
  axil_rsp_t axi_rsp;
  logic sv_en, par_en, x_en;
  logic [SV_AW-1:0]  sv_addr;
  logic [PAR_AW-1:0] par_addr;
  logic [X_AW-1:0]   x_addr;
  fp32_t sv_rdata, par_rdata, x_rdata;
  fp32_t sv_mem [N_SV*N_FEAT];
  fp32_t par_mem [N_SV+1];
  fp32_t x_mem [N_FEAT];
  int checks = 0, failures = 0, bp_stalls = 0;
  int n_pos = 0, n_neg = 0;
  int cyc = 0, t_start = 0, t_done = 0;
  logic done_prev = 1'b0;

  always #5 clk = ~clk;

  svm_hls_ip #(.N_SV(N_SV), .N_FEAT(N_FEAT)) dut (
    .clk, .rst_n, .s_axi_req(axi_req), .s_axi_rsp(axi_rsp),
    .sv_en, .sv_addr, .sv_rdata, .par_en, .par_addr, .par_rdata, .x_en, .x_addr, .x_rdata
  );

  always_ff @(posedge clk) begin
    if (sv_en)  sv_rdata  <= sv_mem[sv_addr];
    if (par_en) par_rdata <= par_mem[par_addr];
    if (x_en)   x_rdata   <= x_mem[x_addr];
  end

  // cycle stamps of the accepted start and of the rising done flag
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (axi_req.awvalid && axi_rsp.awready && axi_req.awaddr == REG_CTRL && axi_req.wdata[0]) t_start <= cyc;
    done_prev <= dut.ap_done;
    if (dut.ap_done && !done_prev) t_done <= cyc;
  end

  `include "axil_master_tasks.svh"

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t z [N_FEAT];
    fp32_t d, diff, th;
    logic [31:0] f_exp, rd;
    axi_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    axil_read(REG_CTRL, rd);
    check(rd[2] && !rd[1] && !rd[0], "idle after reset");
    for (int r = 0; r < 40; r++) begin
      for (int k = 0; k < int'(N_SV*N_FEAT); k++) sv_mem[k] = rand_fp(120, 132);
      for (int k = 0; k <= int'(N_SV); k++) par_mem[k] = rand_fp(118, 130);
      for (int k = 0; k < int'(N_FEAT); k++) x_mem[k] = rand_fp(120, 130);
      for (int j = 0; j < int'(N_FEAT); j++) z[j] = 32'h0;
      for (int i = 0; i < int'(N_SV); i++)
        for (int j = 0; j < int'(N_FEAT); j++) z[j] = mac(z[j], sv_mem[i*N_FEAT+j], par_mem[i+1]);
      d = 32'h0;
      for (int j = 0; j < int'(N_FEAT); j++) d = mac(d, x_mem[j], z[j]);
      diff = sub(d, par_mem[0]);
      th = (r % 2 == 0) ? diff : next_up(diff);
      f_exp = decide(diff, th);
      axil_write(REG_TH, th);
      axil_read(REG_TH, rd);
      check(rd == th, "threshold read-back");
      axil_write(REG_CTRL, 32'h1);
      do axil_read(REG_CTRL, rd); while (!rd[1]);
      check(rd[2] && !rd[0], "idle with done");
      check(t_done - t_start == LATENCY, $sformatf("latency %0d expected %0d", t_done - t_start, LATENCY));
      axil_read(REG_CTRL, rd);
      check(!rd[1], "done cleared by read");
      axil_read(REG_RETURN, rd);
      check(rd == f_exp, $sformatf("run %0d: F=%h expected %h (diff %h th %h)", r, rd, f_exp, diff, th));
      check(dut.diff == diff, $sformatf("run %0d: D-b=%h expected %h", r, dut.diff, diff));
      if (rd == CLASS_MELANOMA) n_pos++; else n_neg++;
    end
    check(n_pos > 0 && n_neg > 0, "both classes returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
