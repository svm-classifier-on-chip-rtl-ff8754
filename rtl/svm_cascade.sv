// svm_cascade: two-stage cascade of simplified SVM classifier stages.
//
// Stage 1 (IP1) is the melanoma-sensitive classifier: a sample it labels +1
// (melanoma) is final at stage 1 and left to a specialist to confirm. A
// sample it labels -1 (benign) is passed on, with its features X, to stage 2
// (IP2), the benign-sensitive classifier, whose label is then final. Each
// stage is an svm_lite_ip with its own precomputed model (Z, b, th given as
// parameters, default all zero). The host writes X and starts the cascade
// over one AXI4-Lite control bus:
//   0x00 CTRL    write bit 0 = 1 to start; read: bit 0 busy, bit 1 done
//                (cleared by the read), bit 2 idle
//   0x10 RETURN  final F(X), +1 or -1
//   0x14 STAGE   1 if stage 1 decided, 2 if stage 2 decided
//   0x80 + 4*j   X[j] (write only; reads return 0)
// Timing from the accepted start write: done is set N_FEAT + 6 cycles later for
// a stage-1 decision; a stage-1 -1 adds N_FEAT cycles to pass X on and N_FEAT + 5
// more for stage 2 (3*N_FEAT + 11 in all). The cascade order and the roles of the
// two stages follow the paper; the sequencing in hardware, the X hand-over
// and the register map are this design's choices.
module svm_cascade
  import svm_pkg::*;
#(
  parameter int unsigned N_FEAT            = 27,
  parameter fp32_t       IP1_Z [N_FEAT]    = '{default: 32'h0000_0000},
  parameter fp32_t       IP1_B             = 32'h0000_0000,
  parameter fp32_t       IP1_TH            = 32'h0000_0000,
  parameter fp32_t       IP2_Z [N_FEAT]    = '{default: 32'h0000_0000},
  parameter fp32_t       IP2_B             = 32'h0000_0000,
  parameter fp32_t       IP2_TH            = 32'h0000_0000,
  localparam int unsigned X_AW             = $clog2(N_FEAT) > 0 ? $clog2(N_FEAT) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axi_req,
  output axil_rsp_t s_axi_rsp
);

  typedef enum logic [1:0] {S_IDLE, S_STAGE1, S_STAGE2} state_t;
  state_t state;

  logic               wr_en, rd_en;
  logic [AXIL_AW-1:0] wr_addr, rd_addr;
  logic [31:0]        wr_data, rd_data;
  logic [3:0]         wr_strb;
  logic               ap_done;
  logic [31:0]        ret_q, stage_q;

  axil_slave u_ctrl (
    .clk, .rst_n, .req(s_axi_req), .rsp(s_axi_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data
  );

  logic            start_req, x_wr;
  logic [X_AW-1:0] x_widx;
  logic [AXIL_AW-1:0] x_off;

  assign start_req = wr_en && (wr_addr == REG_CTRL) && wr_strb[0] && wr_data[0];
  assign x_off     = wr_addr - REG_X_BASE;
  assign x_wr      = wr_en && (wr_addr >= REG_X_BASE)
                  && (32'(x_off[AXIL_AW-1:2]) < N_FEAT) && (wr_strb == 4'hF);
  assign x_widx    = X_AW'(x_off[AXIL_AW-1:2]);

  always_comb begin
    unique case (rd_addr)
      REG_CTRL:   rd_data = {29'd0, state == S_IDLE, ap_done, state != S_IDLE};
      REG_RETURN: rd_data = ret_q;
      REG_STAGE:  rd_data = stage_q;
      default:    rd_data = 32'd0;
    endcase
  end

  // stages
  logic            s1_start, s1_busy, s1_done, s1_passed;
  logic            s2_start, s2_busy, s2_done, s2_passed;
  logic [31:0]     s1_f, s2_f;
  logic            xo_valid, s2_xo_valid;
  logic [X_AW-1:0] xo_addr, s2_xo_addr;
  fp32_t           xo_data, s2_xo_data;

  svm_lite_ip #(.N_FEAT(N_FEAT), .Z_MODEL(IP1_Z), .B_MODEL(IP1_B), .TH_MODEL(IP1_TH), .FWD_X(1'b1)) u_ip1 (
    .clk, .rst_n, .start(s1_start), .busy(s1_busy), .done(s1_done), .f(s1_f), .passed(s1_passed),
    .x_we(x_wr), .x_waddr(x_widx), .x_wdata(wr_data),
    .xo_valid, .xo_addr, .xo_data
  );

  svm_lite_ip #(.N_FEAT(N_FEAT), .Z_MODEL(IP2_Z), .B_MODEL(IP2_B), .TH_MODEL(IP2_TH), .FWD_X(1'b0)) u_ip2 (
    .clk, .rst_n, .start(s2_start), .busy(s2_busy), .done(s2_done), .f(s2_f), .passed(s2_passed),
    .x_we(xo_valid), .x_waddr(xo_addr), .x_wdata(xo_data),
    .xo_valid(s2_xo_valid), .xo_addr(s2_xo_addr), .xo_data(s2_xo_data)
  );

  assign s1_start = (state == S_IDLE) && start_req;
  assign s2_start = (state == S_STAGE1) && s1_done && s1_passed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ap_done <= 1'b0;
      ret_q   <= 32'd0;
      stage_q <= 32'd0;
    end else begin
      if (rd_en && rd_addr == REG_CTRL) ap_done <= 1'b0;
      unique case (state)
        S_IDLE: if (start_req) state <= S_STAGE1;
        S_STAGE1: if (s1_done) begin
          if (s1_passed) begin
            state <= S_STAGE2;
          end else begin
            ret_q   <= s1_f;
            stage_q <= 32'd1;
            ap_done <= 1'b1;
            state   <= S_IDLE;
          end
        end
        S_STAGE2: if (s2_done) begin
          ret_q   <= s2_f;
          stage_q <= 32'd2;
          ap_done <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_stage2_after_benign: assert property (@(posedge clk) disable iff (!rst_n)
    s2_start |-> s1_f == CLASS_BENIGN);

endmodule
