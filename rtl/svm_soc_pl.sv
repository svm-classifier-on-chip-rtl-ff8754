// svm_soc_pl: programmable-logic side of the melanoma classification system.
//
// Holds the full SVM classifier (svm_hls_ip) with its three dual-port block
// RAMs, one per input array (SVs, Parameters, X), and the two-stage cascade of
// simplified classifiers (svm_cascade) as a second classifier core on the same
// device. The classifier reads each RAM through port A. Port B of each RAM is
// brought out (bram1_* SVs, bram2_* Parameters, bram3_* X, word addressed,
// byte write enables, one cycle of read latency) for the host's AXI-to-BRAM
// bridges. The two AXI4-Lite control slaves, s_axi_svm_* and s_axi_cas_*, are
// brought out for the host's interconnect. The host processor, the
// interconnect, the bridges and the cycle timer are outside this module. The
// blocks and their connections follow the paper's system figure; placing the
// cascade beside the full classifier in one design is this design's choice,
// made on the paper's remark that more classifier cores can be added to the
// same device.
module svm_soc_pl
  import svm_pkg::*;
#(
  parameter int unsigned N_SV             = 248,
  parameter int unsigned N_FEAT           = 27,
  parameter fp32_t       IP1_Z [N_FEAT]   = '{default: 32'h0000_0000},
  parameter fp32_t       IP1_B            = 32'h0000_0000,
  parameter fp32_t       IP1_TH           = 32'h0000_0000,
  parameter fp32_t       IP2_Z [N_FEAT]   = '{default: 32'h0000_0000},
  parameter fp32_t       IP2_B            = 32'h0000_0000,
  parameter fp32_t       IP2_TH           = 32'h0000_0000,
  localparam int unsigned SV_AW  = $clog2(N_SV * N_FEAT),
  localparam int unsigned PAR_AW = $clog2(N_SV + 1),
  localparam int unsigned X_AW   = $clog2(N_FEAT) > 0 ? $clog2(N_FEAT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // control buses from the host interconnect
  input  axil_req_t         s_axi_svm_req,
  output axil_rsp_t         s_axi_svm_rsp,
  input  axil_req_t         s_axi_cas_req,
  output axil_rsp_t         s_axi_cas_rsp,
  // BRAM 1 (SVs), port B
  input  logic              bram1_en,
  input  logic [3:0]        bram1_we,
  input  logic [SV_AW-1:0]  bram1_addr,
  input  logic [31:0]       bram1_wdata,
  output logic [31:0]       bram1_rdata,
  // BRAM 2 (Parameters), port B
  input  logic              bram2_en,
  input  logic [3:0]        bram2_we,
  input  logic [PAR_AW-1:0] bram2_addr,
  input  logic [31:0]       bram2_wdata,
  output logic [31:0]       bram2_rdata,
  // BRAM 3 (X), port B
  input  logic              bram3_en,
  input  logic [3:0]        bram3_we,
  input  logic [X_AW-1:0]   bram3_addr,
  input  logic [31:0]       bram3_wdata,
  output logic [31:0]       bram3_rdata
);

  logic              sv_en, par_en, x_en;
  logic [SV_AW-1:0]  sv_addr;
  logic [PAR_AW-1:0] par_addr;
  logic [X_AW-1:0]   x_addr;
  fp32_t             sv_rdata, par_rdata, x_rdata;

  svm_hls_ip #(.N_SV(N_SV), .N_FEAT(N_FEAT)) u_svm (
    .clk, .rst_n, .s_axi_req(s_axi_svm_req), .s_axi_rsp(s_axi_svm_rsp),
    .sv_en, .sv_addr, .sv_rdata, .par_en, .par_addr, .par_rdata, .x_en, .x_addr, .x_rdata
  );

  dp_bram #(.DEPTH(N_SV * N_FEAT)) u_bram_sv (
    .clk,
    .a_en(sv_en), .a_we(4'h0), .a_addr(sv_addr), .a_wdata(32'd0), .a_rdata(sv_rdata),
    .b_en(bram1_en), .b_we(bram1_we), .b_addr(bram1_addr), .b_wdata(bram1_wdata), .b_rdata(bram1_rdata)
  );

  dp_bram #(.DEPTH(N_SV + 1)) u_bram_par (
    .clk,
    .a_en(par_en), .a_we(4'h0), .a_addr(par_addr), .a_wdata(32'd0), .a_rdata(par_rdata),
    .b_en(bram2_en), .b_we(bram2_we), .b_addr(bram2_addr), .b_wdata(bram2_wdata), .b_rdata(bram2_rdata)
  );

  dp_bram #(.DEPTH(N_FEAT)) u_bram_x (
    .clk,
    .a_en(x_en), .a_we(4'h0), .a_addr(x_addr), .a_wdata(32'd0), .a_rdata(x_rdata),
    .b_en(bram3_en), .b_we(bram3_we), .b_addr(bram3_addr), .b_wdata(bram3_wdata), .b_rdata(bram3_rdata)
  );

  svm_cascade #(
    .N_FEAT(N_FEAT),
    .IP1_Z(IP1_Z), .IP1_B(IP1_B), .IP1_TH(IP1_TH),
    .IP2_Z(IP2_Z), .IP2_B(IP2_B), .IP2_TH(IP2_TH)
  ) u_cascade (
    .clk, .rst_n, .s_axi_req(s_axi_cas_req), .s_axi_rsp(s_axi_cas_rsp)
  );

endmodule
