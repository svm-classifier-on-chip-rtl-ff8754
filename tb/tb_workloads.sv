// tb_workloads: the three evaluated configurations at their published sizes,
// on the default 248-SV x 27-feature build.
//   model 1   a 61-SV model run on the full classifier, rows 61..247 padded
//             with alpha*y = 0 and zero features;
//   model 2   a 248-SV model on the full classifier;
//   cascade   stage 1 built from a 61-SV model, stage 2 from a 139-SV model,
//             with Z precomputed ("offline") by a constant function.
// The trained models are not published, so each model is synthetic: small
// integer features and weights, chosen so that Z is an exact integer whatever
// the order of summation. The same 61-SV model (including b and th) is used
// for model 1 and for cascade stage 1, so the full classifier, which folds
// the SVs in hardware, must agree exactly with the stage that holds the
// precomputed Z. Samples are random; every result is compared with a reference
// using single-precision rounding per operation, and latencies are checked.
module tb_workloads;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N_SV   = 248;
  localparam int unsigned N_FEAT = 27;
  localparam int unsigned SV_AW  = $clog2(N_SV * N_FEAT);
  localparam int unsigned PAR_AW = $clog2(N_SV + 1);
  localparam int unsigned X_AW   = $clog2(N_FEAT);
  localparam int LATENCY = N_SV * N_FEAT + N_FEAT + 10;
  localparam int M1_SV = 61, M2_SV = 248, CAS2_SV = 139;

  typedef fp32_t zvec_t [N_FEAT];

  // synthetic model: features in -4..4, alpha*y in -3..3 (model id m)
  function automatic int sv_int(int m, int i, int j);
    return ((i * 7 + j * 3 + m * 11 + (i * j) % 5) % 9) - 4;
  endfunction
  function automatic int ay_int(int m, int i);
    return (((i + m) * 5 + i / 3) % 7) - 3;
  endfunction
  // exact conversion of an integer below 2^24 in magnitude
  function automatic fp32_t int2fp(int n);
    int a, e;
    logic [31:0] u;
    if (n == 0) return 32'h0;
    a = (n < 0) ? -n : n;
    e = 0;
    for (int k = 0; k < 24; k++) if ((a >> k) != 0) e = k;
    u = 32'(a) << (23 - e);
    return {n < 0, 8'(127 + e), u[22:0]};
  endfunction
  function automatic zvec_t z_model(int m, int nsv);
    zvec_t z;
    for (int j = 0; j < int'(N_FEAT); j++) begin
      int acc = 0;
      for (int i = 0; i < nsv; i++) acc += ay_int(m, i) * sv_int(m, i, j);
      z[j] = int2fp(acc);
    end
    return z;
  endfunction

  localparam zvec_t Z1  = z_model(1, M1_SV);
  localparam fp32_t B1  = 32'h40A0_0000;  //  5.0
  localparam fp32_t TH1 = 32'h0000_0000;  //  0.0
  localparam zvec_t Z2  = z_model(3, CAS2_SV);
  localparam fp32_t B2  = 32'hC040_0000;  // -3.0
  localparam fp32_t TH2 = 32'h4000_0000;  //  2.0

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
  int n_m1 [2], n_m2 [2], n_s1 = 0, n_s2 [2];

  always #2 clk = ~clk;

  assign svm_req = bus_sel ? '0 : axi_req;
  assign cas_req = bus_sel ? axi_req : '0;
  assign axi_rsp = bus_sel ? cas_rsp : svm_rsp;

  svm_soc_pl #(.IP1_Z(Z1), .IP1_B(B1), .IP1_TH(TH1), .IP2_Z(Z2), .IP2_B(B2), .IP2_TH(TH2)) dut (
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

  fp32_t x_m [N_FEAT];
  zvec_t z_full;
  fp32_t b_full;

  // load a model of nsv SVs (rows beyond nsv zero) into BRAM 1 and 2
  task automatic load_model(int m, int nsv, fp32_t b);
    int acc;
    for (int i = 0; i < int'(N_SV); i++)
      for (int j = 0; j < int'(N_FEAT); j++) begin
        @(negedge clk);
        b1_en = 1; b1_we = 4'hF; b1_addr = SV_AW'(i * N_FEAT + j);
        b1_wdata = (i < nsv) ? int2fp(sv_int(m, i, j)) : 32'h0;
      end
    for (int k = 0; k <= int'(N_SV); k++) begin
      @(negedge clk);
      b1_en = 0; b1_we = 0;
      b2_en = 1; b2_we = 4'hF; b2_addr = PAR_AW'(k);
      b2_wdata = (k == 0) ? b : ((k <= nsv) ? int2fp(ay_int(m, k - 1)) : 32'h0);
    end
    @(negedge clk);
    b2_en = 0; b2_we = 0;
    z_full = z_model(m, nsv);
    b_full = b;
  endtask

  task automatic new_sample();
    for (int k = 0; k < int'(N_FEAT); k++) begin
      x_m[k] = rand_fp(123, 127);  // |x| in [1/16, 1)
      @(negedge clk);
      b3_en = 1; b3_we = 4'hF; b3_addr = X_AW'(k); b3_wdata = x_m[k];
    end
    @(negedge clk);
    b3_en = 0; b3_we = 0;
  endtask

  function automatic logic [31:0] classify(zvec_t z, fp32_t b, fp32_t th);
    fp32_t d = 32'h0;
    for (int j = 0; j < int'(N_FEAT); j++) d = mac(d, x_m[j], z[j]);
    return decide(sub(d, b), th);
  endfunction

  task automatic run_full(fp32_t th, output logic [31:0] f);
    logic [31:0] rd;
    bus_sel = 1'b0;
    axil_write(REG_TH, th);
    axil_write(REG_CTRL, 32'h1);
    do axil_read(REG_CTRL, rd); while (!rd[1]);
    check(t_done - t_start == LATENCY, $sformatf("latency %0d expected %0d", t_done - t_start, LATENCY));
    axil_read(REG_RETURN, f);
    check(f == classify(z_full, b_full, th), $sformatf("full classifier F=%h expected %h", f, classify(z_full, b_full, th)));
  endtask

  task automatic run_cascade(output logic [31:0] f, output logic [31:0] stage);
    logic [31:0] rd, f1, f_exp, s_exp;
    bus_sel = 1'b1;
    for (int j = 0; j < int'(N_FEAT); j++) axil_write(REG_X_BASE + 12'(4 * j), x_m[j]);
    axil_write(REG_CTRL, 32'h1);
    do axil_read(REG_CTRL, rd); while (!rd[1]);
    axil_read(REG_RETURN, f);
    axil_read(REG_STAGE, stage);
    f1 = classify(Z1, B1, TH1);
    if (f1 == CLASS_MELANOMA) begin f_exp = f1; s_exp = 1; end
    else begin f_exp = classify(Z2, B2, TH2); s_exp = 2; end
    check(f == f_exp && stage == s_exp, $sformatf("cascade F=%h stage %0d, expected %h stage %0d", f, stage, f_exp, s_exp));
    bus_sel = 1'b0;
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] f, fc, st;
    axi_req = '0;
    b1_en = 0; b2_en = 0; b3_en = 0; b1_we = 0; b2_we = 0; b3_we = 0;
    b1_addr = 0; b2_addr = 0; b3_addr = 0; b1_wdata = 0; b2_wdata = 0; b3_wdata = 0;
    n_m1 = '{0, 0}; n_m2 = '{0, 0}; n_s2 = '{0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // model 1 on the full classifier, and the cascade on the same samples
    load_model(1, M1_SV, B1);
    for (int s = 0; s < 24; s++) begin
      new_sample();
      run_full(TH1, f);
      if (f == CLASS_MELANOMA) n_m1[0]++; else n_m1[1]++;
      run_cascade(fc, st);
      check(st != 1 || fc == f, "stage 1 agrees with the full classifier on the same model");
      check((f == CLASS_MELANOMA) == (st == 1), "full classifier -1 exactly when stage 1 passes on");
      if (st == 1) n_s1++; else if (fc == CLASS_MELANOMA) n_s2[0]++; else n_s2[1]++;
    end

    // model 2 on the full classifier
    load_model(2, M2_SV, 32'hC100_0000);  // b = -8.0
    for (int s = 0; s < 12; s++) begin
      new_sample();
      run_full(32'h0000_0000, f);
      if (f == CLASS_MELANOMA) n_m2[0]++; else n_m2[1]++;
    end

    check(n_m1[0] > 0 && n_m1[1] > 0, $sformatf("model 1 gave both classes (%0d/%0d)", n_m1[0], n_m1[1]));
    check(n_m2[0] > 0 && n_m2[1] > 0, $sformatf("model 2 gave both classes (%0d/%0d)", n_m2[0], n_m2[1]));
    check(n_s1 > 0, "cascade decided at stage 1");
    check(n_s2[0] + n_s2[1] > 0, "cascade passed samples to stage 2");
    $display("model 1: +1=%0d -1=%0d  model 2: +1=%0d -1=%0d  cascade: stage1=%0d stage2 +1=%0d -1=%0d",
             n_m1[0], n_m1[1], n_m2[0], n_m2[1], n_s1, n_s2[0], n_s2[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
