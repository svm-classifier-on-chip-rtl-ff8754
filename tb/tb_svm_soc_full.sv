// tb_svm_soc_full: the system at its default size, 248 support vectors of
// 27 features, with no parameter changed. A random model and test samples
// are loaded through the BRAM B ports; two classifications (threshold at the
// reference difference, +1, and just above it, -1) are checked against the
// reference, with the latency of 248*27 + 27 + 10 = 6733 cycles. The cascade
// is then run once with its default all-zero stage models: D - b = 0 >= 0,
// so stage 1 decides +1.
module tb_svm_soc_full;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N_SV   = 248;
  localparam int unsigned N_FEAT = 27;
  localparam int unsigned SV_AW  = $clog2(N_SV * N_FEAT);
  localparam int unsigned PAR_AW = $clog2(N_SV + 1);
  localparam int unsigned X_AW   = $clog2(N_FEAT);
  localparam int LATENCY = N_SV * N_FEAT + N_FEAT + 10;

  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t axi_req, svm_req, cas_req;
  axil_rsp_t axi_rsp, svm_rsp, cas_rsp;
  logic bus_sel = 1'b0;
  logic              b1_en, b2_en, b3_en;
  logic [3:0]        b1_we, b2_we, b3_we;
  logic [SV_AW-1:0]  b1_addr;
  logic [PAR_AW-1:0] b2_addr;
  logic [X_AW-1:0]   b3_addr;
  logic [31:0]       b1_wdata, b2_wdata, b3_wdata, b1_rdata, b2_rdata, b3_rdata;
  int checks = 0, failures = 0, bp_stalls = 0;
  int cyc = 0, t_start = 0, t_done = 0;
  logic done_prev = 1'b0;

  always #2 clk = ~clk;  // 250 MHz

  assign svm_req = bus_sel ? '0 : axi_req;
  assign cas_req = bus_sel ? axi_req : '0;
  assign axi_rsp = bus_sel ? cas_rsp : svm_rsp;

  svm_soc_pl dut (
    .clk, .rst_n,
    .s_axi_svm_req(svm_req), .s_axi_svm_rsp(svm_rsp),
    .s_axi_cas_req(cas_req), .s_axi_cas_rsp(cas_rsp),
    .bram1_en(b1_en), .bram1_we(b1_we), .bram1_addr(b1_addr), .bram1_wdata(b1_wdata), .bram1_rdata(b1_rdata),
    .bram2_en(b2_en), .bram2_we(b2_we), .bram2_addr(b2_addr), .bram2_wdata(b2_wdata), .bram2_rdata(b2_rdata),
    .bram3_en(b3_en), .bram3_we(b3_we), .bram3_addr(b3_addr), .bram3_wdata(b3_wdata), .bram3_rdata(b3_rdata)
  );

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (svm_req.awvalid && svm_rsp.awready && svm_req.awaddr == REG_CTRL && svm_req.wdata[0]) t_start <= cyc;
    done_prev <= dut.u_svm.ap_done;
    if (dut.u_svm.ap_done && !done_prev) t_done <= cyc;
  end

  `include "axil_master_tasks.svh"

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  fp32_t sv_m [N_SV*N_FEAT];
  fp32_t par_m [N_SV+1];
  fp32_t x_m [N_FEAT];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t z [N_FEAT];
    fp32_t d, diff, th;
    logic [31:0] rd;
    axi_req = '0;
    b1_en = 0; b2_en = 0; b3_en = 0; b1_we = 0; b2_we = 0; b3_we = 0;
    b1_addr = 0; b2_addr = 0; b3_addr = 0; b1_wdata = 0; b2_wdata = 0; b3_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < int'(N_SV*N_FEAT); k++) sv_m[k] = rand_fp(120, 130);
    for (int k = 0; k <= int'(N_SV); k++) par_m[k] = rand_fp(118, 128);
    for (int k = 0; k < int'(N_FEAT); k++) x_m[k] = rand_fp(122, 128);
    for (int k = 0; k < int'(N_SV*N_FEAT); k++) begin
      @(negedge clk);
      b1_en = 1; b1_we = 4'hF; b1_addr = SV_AW'(k); b1_wdata = sv_m[k];
    end
    for (int k = 0; k <= int'(N_SV); k++) begin
      @(negedge clk);
      b1_en = 0; b1_we = 0;
      b2_en = 1; b2_we = 4'hF; b2_addr = PAR_AW'(k); b2_wdata = par_m[k];
    end
    for (int k = 0; k < int'(N_FEAT); k++) begin
      @(negedge clk);
      b2_en = 0; b2_we = 0;
      b3_en = 1; b3_we = 4'hF; b3_addr = X_AW'(k); b3_wdata = x_m[k];
    end
    @(negedge clk);
    b3_en = 0; b3_we = 0;

    for (int j = 0; j < int'(N_FEAT); j++) z[j] = 32'h0;
    for (int i = 0; i < int'(N_SV); i++)
      for (int j = 0; j < int'(N_FEAT); j++) z[j] = mac(z[j], sv_m[i*N_FEAT+j], par_m[i+1]);
    d = 32'h0;
    for (int j = 0; j < int'(N_FEAT); j++) d = mac(d, x_m[j], z[j]);
    diff = sub(d, par_m[0]);

    for (int r = 0; r < 2; r++) begin
      th = (r == 0) ? diff : next_up(diff);
      axil_write(REG_TH, th);
      axil_write(REG_CTRL, 32'h1);
      do axil_read(REG_CTRL, rd); while (!rd[1]);
      check(t_done - t_start == LATENCY, $sformatf("latency %0d expected %0d", t_done - t_start, LATENCY));
      axil_read(REG_RETURN, rd);
      check(rd == decide(diff, th), $sformatf("F=%h expected %h", rd, decide(diff, th)));
      check(dut.u_svm.diff == diff, $sformatf("D-b=%h expected %h", dut.u_svm.diff, diff));
      $display("run %0d: D-b=%h th=%h F=%0d latency=%0d cycles", r, diff, th, $signed(rd), t_done - t_start);
    end

    bus_sel = 1'b1;
    for (int j = 0; j < int'(N_FEAT); j++) axil_write(REG_X_BASE + 12'(4 * j), x_m[j]);
    axil_write(REG_CTRL, 32'h1);
    do axil_read(REG_CTRL, rd); while (!rd[1]);
    axil_read(REG_RETURN, rd);
    check(rd == CLASS_MELANOMA, "cascade with zero models gives +1");
    axil_read(REG_STAGE, rd);
    check(rd == 32'd1, "cascade with zero models decides at stage 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
