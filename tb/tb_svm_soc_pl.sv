// tb_svm_soc_pl: end-to-end test of the programmable-logic system.
// Acts as the host: it loads models and samples into the three BRAMs through
// their B ports (as the host's BRAM bridges would), reads them back, sets the
// threshold and starts the full classifier over its control bus, and runs the
// two-stage cascade over the other control bus, at times while the full
// classifier is still busy. Reduced sizes (8 SVs, 6 features) keep the run
// short. Every result is compared with a reference computed with
// single-precision rounding after each operation, and the full classifier's
// latency is checked. The test counts each mechanism of the design and fails
// if one never happens: full classifier +1 and -1, a model reload, a
// cascade decision at stage 1, a hand-over of X to stage 2 with each class
// from stage 2, both cores busy at once, and stalled bus responses.
module tb_svm_soc_pl;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N_SV   = 8;
  localparam int unsigned N_FEAT = 6;
  localparam int unsigned SV_AW  = $clog2(N_SV * N_FEAT);
  localparam int unsigned PAR_AW = $clog2(N_SV + 1);
  localparam int unsigned X_AW   = $clog2(N_FEAT);
  localparam int LATENCY = N_SV * N_FEAT + N_FEAT + 10;
  localparam fp32_t Z1 [N_FEAT] = '{32'h3F80_0000, 32'hBF80_0000, 32'h3F00_0000,
                                    32'h4000_0000, 32'hBF00_0000, 32'h3E80_0000};
  localparam fp32_t B1  = 32'h4000_0000;
  localparam fp32_t TH1 = 32'h3F00_0000;
  localparam fp32_t Z2 [N_FEAT] = '{32'hBF00_0000, 32'h3F80_0000, 32'h3FC0_0000,
                                    32'hBF80_0000, 32'h3F00_0000, 32'hBE80_0000};
  localparam fp32_t B2  = 32'hBF00_0000;
  localparam fp32_t TH2 = 32'h3F80_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t axi_req, svm_req, cas_req;
  axil_rsp_t axi_rsp, svm_rsp, cas_rsp;
  logic bus_sel = 1'b0;  // 0: full classifier, 1: cascade
  logic              b1_en, b2_en, b3_en;
  logic [3:0]        b1_we, b2_we, b3_we;
  logic [SV_AW-1:0]  b1_addr;
  logic [PAR_AW-1:0] b2_addr;
  logic [X_AW-1:0]   b3_addr;
  logic [31:0]       b1_wdata, b2_wdata, b3_wdata, b1_rdata, b2_rdata, b3_rdata;
  int checks = 0, failures = 0, bp_stalls = 0;
  int n_full_pos = 0, n_full_neg = 0, n_reload = 0, n_s1 = 0, n_s2_pos = 0, n_s2_neg = 0, n_overlap = 0;
  int cyc = 0, t_start = 0, t_done = 0;
  logic done_prev = 1'b0;

  always #5 clk = ~clk;

  assign svm_req = bus_sel ? '0 : axi_req;
  assign cas_req = bus_sel ? axi_req : '0;
  assign axi_rsp = bus_sel ? cas_rsp : svm_rsp;

  svm_soc_pl #(.N_SV(N_SV), .N_FEAT(N_FEAT), .IP1_Z(Z1), .IP1_B(B1), .IP1_TH(TH1),
               .IP2_Z(Z2), .IP2_B(B2), .IP2_TH(TH2)) dut (
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
    if (32'(dut.u_svm.state) != 0 && 32'(dut.u_cascade.state) != 0) n_overlap <= n_overlap + 1;
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

  // host side of the BRAM bridges: one word per cycle through port B
  task automatic load_brams();
    for (int k = 0; k < int'(N_SV*N_FEAT); k++) begin
      @(negedge clk);
      b1_en = 1; b1_we = 4'hF; b1_addr = SV_AW'(k); b1_wdata = sv_m[k];
    end
    for (int k = 0; k <= int'(N_SV); k++) begin
      @(negedge clk);
      b1_en = 0; b1_we = 0;
      b2_en = 1; b2_we = 4'hF; b2_addr = PAR_AW'(k); b2_wdata = par_m[k];
    end
    @(negedge clk);
    b2_en = 0; b2_we = 0;
  endtask

  task automatic load_x();
    for (int k = 0; k < int'(N_FEAT); k++) begin
      @(negedge clk);
      b3_en = 1; b3_we = 4'hF; b3_addr = X_AW'(k); b3_wdata = x_m[k];
    end
    @(negedge clk);
    b3_en = 0; b3_we = 0;
  endtask

  task automatic readback();
    int k = int'($urandom % (N_SV*N_FEAT));
    @(negedge clk);
    b1_en = 1; b1_we = 0; b1_addr = SV_AW'(k);
    b2_en = 1; b2_we = 0; b2_addr = PAR_AW'(k % (N_SV + 1));
    b3_en = 1; b3_we = 0; b3_addr = X_AW'(k % N_FEAT);
    @(negedge clk);
    b1_en = 0; b2_en = 0; b3_en = 0;
    check(b1_rdata == sv_m[k], "BRAM 1 read-back");
    check(b2_rdata == par_m[k % (N_SV + 1)], "BRAM 2 read-back");
    check(b3_rdata == x_m[k % N_FEAT], "BRAM 3 read-back");
  endtask

  function automatic logic [31:0] stage_class(fp32_t x [N_FEAT], fp32_t z [N_FEAT], fp32_t b, fp32_t th);
    fp32_t d = 32'h0;
    for (int j = 0; j < int'(N_FEAT); j++) d = mac(d, x[j], z[j]);
    return decide(sub(d, b), th);
  endfunction

  // one cascade classification of a random sample, checked against the reference
  task automatic run_cascade();
    fp32_t x [N_FEAT];
    logic [31:0] f1, f_exp, s_exp, rd;
    bus_sel = 1'b1;
    for (int j = 0; j < int'(N_FEAT); j++) begin
      x[j] = rand_fp(125, 128);
      axil_write(REG_X_BASE + 12'(4 * j), x[j]);
    end
    f1 = stage_class(x, Z1, B1, TH1);
    if (f1 == CLASS_MELANOMA) begin f_exp = f1; s_exp = 1; end
    else begin f_exp = stage_class(x, Z2, B2, TH2); s_exp = 2; end
    axil_write(REG_CTRL, 32'h1);
    do axil_read(REG_CTRL, rd); while (!rd[1]);
    axil_read(REG_RETURN, rd);
    check(rd == f_exp, $sformatf("cascade F=%h expected %h", rd, f_exp));
    axil_read(REG_STAGE, rd);
    check(rd == s_exp, $sformatf("cascade stage %0d expected %0d", rd, s_exp));
    if (s_exp == 1) n_s1++;
    else if (f_exp == CLASS_MELANOMA) n_s2_pos++;
    else n_s2_neg++;
    bus_sel = 1'b0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t z [N_FEAT];
    fp32_t d, diff, th;
    logic [31:0] f_exp, rd;
    axi_req = '0;
    b1_en = 0; b2_en = 0; b3_en = 0; b1_we = 0; b2_we = 0; b3_we = 0;
    b1_addr = 0; b2_addr = 0; b3_addr = 0; b1_wdata = 0; b2_wdata = 0; b3_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 4; m++) begin
      // a new trained model of the same size
      for (int k = 0; k < int'(N_SV*N_FEAT); k++) sv_m[k] = rand_fp(120, 132);
      for (int k = 0; k <= int'(N_SV); k++) par_m[k] = rand_fp(118, 130);
      load_brams();
      n_reload++;
      for (int s = 0; s < 8; s++) begin
        for (int k = 0; k < int'(N_FEAT); k++) x_m[k] = rand_fp(120, 130);
        load_x();
        readback();
        for (int j = 0; j < int'(N_FEAT); j++) z[j] = 32'h0;
        for (int i = 0; i < int'(N_SV); i++)
          for (int j = 0; j < int'(N_FEAT); j++) z[j] = mac(z[j], sv_m[i*N_FEAT+j], par_m[i+1]);
        d = 32'h0;
        for (int j = 0; j < int'(N_FEAT); j++) d = mac(d, x_m[j], z[j]);
        diff  = sub(d, par_m[0]);
        th    = (s % 2 == 0) ? diff : next_up(diff);
        f_exp = decide(diff, th);
        axil_write(REG_TH, th);
        axil_write(REG_CTRL, 32'h1);
        if (s % 4 == 1) run_cascade();   // cascade runs while the full classifier works
        do axil_read(REG_CTRL, rd); while (!rd[1]);
        check(t_done - t_start == LATENCY, $sformatf("latency %0d expected %0d", t_done - t_start, LATENCY));
        axil_read(REG_RETURN, rd);
        check(rd == f_exp, $sformatf("full F=%h expected %h", rd, f_exp));
        if (rd == CLASS_MELANOMA) n_full_pos++; else n_full_neg++;
        run_cascade();
      end
    end
    check(n_full_pos > 0, "full classifier returned +1");
    check(n_full_neg > 0, "full classifier returned -1");
    check(n_reload > 1, "model reloaded");
    check(n_s1 > 0, "cascade decided at stage 1");
    check(n_s2_pos > 0, "cascade stage 2 returned +1");
    check(n_s2_neg > 0, "cascade stage 2 returned -1");
    check(n_overlap > 0, "both cores busy at once");
    check(bp_stalls > 0, "stalled bus responses");
    $display("full +1=%0d -1=%0d reloads=%0d cascade s1=%0d s2+1=%0d s2-1=%0d overlap=%0d stalls=%0d",
             n_full_pos, n_full_neg, n_reload, n_s1, n_s2_pos, n_s2_neg, n_overlap, bp_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
