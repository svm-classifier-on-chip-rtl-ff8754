// tb_svm_cascade: self-checking test of the two-stage cascade.
// Both stages hold fixed 4-feature models. Random samples are written over
// the control bus; the reference classifies with stage 1 and, for a -1,
// with stage 2. Checked: the final class, the deciding stage, the done flag
// and its clear on read, and the latency from start to done (N_FEAT + 6
// cycles for a stage-1 decision, 3*N_FEAT + 11 through stage 2). The test
// counts samples decided at stage 1 and samples of each class from stage 2,
// and fails if any of the three never occurs.
module tb_svm_cascade;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N_FEAT = 4;
  localparam fp32_t Z1 [N_FEAT] = '{32'h3F80_0000, 32'hBF80_0000, 32'h3F00_0000, 32'h4000_0000};
  localparam fp32_t B1  = 32'h4000_0000;  // 2.0
  localparam fp32_t TH1 = 32'h3F00_0000;  // 0.5
  localparam fp32_t Z2 [N_FEAT] = '{32'hBF00_0000, 32'h3F80_0000, 32'h3FC0_0000, 32'hBF80_0000};
  localparam fp32_t B2  = 32'hBF00_0000;  // -0.5
  localparam fp32_t TH2 = 32'h3F80_0000;  // 1.0

  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t axi_req;
  axil_rsp_t axi_rsp;
  int checks = 0, failures = 0, bp_stalls = 0;
  int n_stage1 = 0, n_stage2_pos = 0, n_stage2_neg = 0;
  int cyc = 0, t_start = 0, t_done = 0;
  logic done_prev = 1'b0;

  always #5 clk = ~clk;

  svm_cascade #(.N_FEAT(N_FEAT), .IP1_Z(Z1), .IP1_B(B1), .IP1_TH(TH1),
                .IP2_Z(Z2), .IP2_B(B2), .IP2_TH(TH2)) dut (
    .clk, .rst_n, .s_axi_req(axi_req), .s_axi_rsp(axi_rsp)
  );

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

  function automatic logic [31:0] stage_class(fp32_t x [N_FEAT], fp32_t z [N_FEAT], fp32_t b, fp32_t th);
    fp32_t d = 32'h0;
    for (int j = 0; j < int'(N_FEAT); j++) d = mac(d, x[j], z[j]);
    return decide(sub(d, b), th);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t x [N_FEAT];
    logic [31:0] f1, f_exp, stage_exp, rd;
    axi_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 150; r++) begin
      for (int j = 0; j < int'(N_FEAT); j++) begin
        x[j] = rand_fp(125, 128);
        axil_write(REG_X_BASE + 12'(4 * j), x[j]);
      end
      f1 = stage_class(x, Z1, B1, TH1);
      if (f1 == CLASS_MELANOMA) begin
        f_exp = f1;
        stage_exp = 1;
      end else begin
        f_exp = stage_class(x, Z2, B2, TH2);
        stage_exp = 2;
      end
      axil_write(REG_CTRL, 32'h1);
      do axil_read(REG_CTRL, rd); while (!rd[1]);
      check(rd[2], "idle with done");
      axil_read(REG_CTRL, rd);
      check(!rd[1], "done cleared by read");
      axil_read(REG_RETURN, rd);
      check(rd == f_exp, $sformatf("F=%h expected %h", rd, f_exp));
      axil_read(REG_STAGE, rd);
      check(rd == stage_exp, $sformatf("stage %0d expected %0d", rd, stage_exp));
      check(t_done - t_start == ((stage_exp == 1) ? int'(N_FEAT) + 6 : 3 * int'(N_FEAT) + 11),
            $sformatf("latency %0d (stage %0d)", t_done - t_start, stage_exp));
      if (stage_exp == 1) n_stage1++;
      else if (f_exp == CLASS_MELANOMA) n_stage2_pos++;
      else n_stage2_neg++;
    end
    check(n_stage1 > 0, "decided at stage 1");
    check(n_stage2_pos > 0, "stage 2 returned +1");
    check(n_stage2_neg > 0, "stage 2 returned -1");
    $display("stage1=%0d stage2(+1)=%0d stage2(-1)=%0d", n_stage1, n_stage2_pos, n_stage2_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
