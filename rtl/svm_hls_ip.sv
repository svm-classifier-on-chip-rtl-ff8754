// svm_hls_ip: complete linear-kernel SVM classifier for one test sample.
//
// Computes F(X) = sign(sum_i alpha_i*y_i*(X . SV_i) - b) against a
// threshold th, in single precision, by the three successive blocks of the
// design: svs_summation folds all support vectors into the vector
// Z = sum_i alpha_i*y_i*SV_i, distance_calc forms D = X . Z, and
// class_decision gives +1 (melanoma) if D - b >= th, else -1 (benign).
// The blocks run one after another and share a single fp32_mul and a single
// fp32_add: the operands come from the summation while it is busy, then from
// the distance block, and otherwise from the decision (one multiplier and one
// adder per classifier, as the published design's DSP count implies).
//
// Memory ports (single port, read only, one cycle of read latency), one per
// input array:
//   SVs         N_SV*N_FEAT words, SV i feature j at word i*N_FEAT + j
//   Parameters  N_SV+1 words, b at word 0, alpha_i*y_i at word i+1
//   X           N_FEAT words, feature j at word j
// Control bus (AXI4-Lite, byte addresses):
//   0x00 CTRL   write bit 0 = 1 to start; read: bit 0 busy, bit 1 done (set at
//               completion, cleared by this read), bit 2 idle
//   0x10 RETURN F(X) as a 32-bit integer, +1 or -1
//   0x18 TH     threshold th, fp32, read/write, 0.0 after reset
// Timing: after the start write, one cycle reads b, svs_summation takes
// N_SV*N_FEAT + 3 cycles, distance_calc N_FEAT + 3 and class_decision 1;
// done is set N_SV*N_FEAT + N_FEAT + 10 cycles after the write is accepted.
// The three blocks, the array layout (b first in Parameters) and the
// AXI4-Lite control follow the paper; the register map, the threshold
// register and the sequencing are this design's choices. The paper's HLS
// result for 248 SVs x 27 features is 8091 cycles; this RTL takes 6733.
module svm_hls_ip
  import svm_pkg::*;
#(
  parameter int unsigned N_SV   = 248,
  parameter int unsigned N_FEAT = 27,
  localparam int unsigned SV_AW  = $clog2(N_SV * N_FEAT),
  localparam int unsigned PAR_AW = $clog2(N_SV + 1),
  localparam int unsigned X_AW   = $clog2(N_FEAT) > 0 ? $clog2(N_FEAT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         s_axi_req,
  output axil_rsp_t         s_axi_rsp,
  output logic              sv_en,
  output logic [SV_AW-1:0]  sv_addr,
  input  fp32_t             sv_rdata,
  output logic              par_en,
  output logic [PAR_AW-1:0] par_addr,
  input  fp32_t             par_rdata,
  output logic              x_en,
  output logic [X_AW-1:0]   x_addr,
  input  fp32_t             x_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH_B, S_LOAD_B, S_SUM, S_DIST, S_DEC} state_t;
  state_t state;

  // control registers
  logic               wr_en, rd_en;
  logic [AXIL_AW-1:0] wr_addr, rd_addr;
  logic [31:0]        wr_data, rd_data;
  logic [3:0]         wr_strb;
  logic               ap_done;
  logic [31:0]        ret_q;
  fp32_t              th_q, b_q;
  logic               start_req;

  axil_slave u_ctrl (
    .clk, .rst_n, .req(s_axi_req), .rsp(s_axi_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data
  );

  assign start_req = wr_en && (wr_addr == REG_CTRL) && wr_strb[0] && wr_data[0];

  always_comb begin
    unique case (rd_addr)
      REG_CTRL:   rd_data = {29'd0, state == S_IDLE, ap_done, state != S_IDLE};
      REG_RETURN: rd_data = ret_q;
      REG_TH:     rd_data = th_q;
      default:    rd_data = 32'd0;
    endcase
  end

  // datapath blocks
  logic  sum_start, sum_busy, sum_done;
  logic  dist_start, dist_busy, dist_done;
  logic  dec_valid;
  logic  s_par_en;
  logic [PAR_AW-1:0] s_par_addr;
  fp32_t z [N_FEAT];
  fp32_t d, diff;
  logic [31:0] f;
  fp32_t mul_a, mul_b, mul_y, add_a, add_b, add_y;
  fp32_t s_mul_a, s_mul_b, s_add_a, s_add_b;
  fp32_t d_mul_a, d_mul_b, d_add_a, d_add_b;
  fp32_t c_add_a, c_add_b;

  fp32_mul u_mul (.a(mul_a), .b(mul_b), .y(mul_y));
  fp32_add u_add (.a(add_a), .b(add_b), .y(add_y));

  always_comb begin
    if (sum_busy) begin
      mul_a = s_mul_a; mul_b = s_mul_b; add_a = s_add_a; add_b = s_add_b;
    end else if (dist_busy) begin
      mul_a = d_mul_a; mul_b = d_mul_b; add_a = d_add_a; add_b = d_add_b;
    end else begin
      mul_a = d_mul_a; mul_b = d_mul_b; add_a = c_add_a; add_b = c_add_b;
    end
  end

  svs_summation #(.N_SV(N_SV), .N_FEAT(N_FEAT)) u_sum (
    .clk, .rst_n, .start(sum_start), .busy(sum_busy), .done(sum_done),
    .sv_en, .sv_addr, .sv_rdata,
    .par_en(s_par_en), .par_addr(s_par_addr), .par_rdata,
    .mul_a(s_mul_a), .mul_b(s_mul_b), .mul_y, .add_a(s_add_a), .add_b(s_add_b), .add_y,
    .z
  );

  distance_calc #(.N_FEAT(N_FEAT)) u_dist (
    .clk, .rst_n, .start(dist_start), .busy(dist_busy), .done(dist_done),
    .x_en, .x_addr, .x_rdata, .z, .d,
    .mul_a(d_mul_a), .mul_b(d_mul_b), .mul_y, .add_a(d_add_a), .add_b(d_add_b), .add_y
  );

  class_decision u_dec (
    .clk, .rst_n, .start(dist_done), .d, .b(b_q), .th(th_q),
    .valid(dec_valid), .f, .diff, .add_a(c_add_a), .add_b(c_add_b), .add_y
  );

  // Parameters port: b is read by the sequencer, alpha*y by the summation
  assign par_en   = (state == S_FETCH_B) || s_par_en;
  assign par_addr = (state == S_FETCH_B) ? '0 : s_par_addr;

  assign sum_start  = (state == S_LOAD_B);
  assign dist_start = (state == S_SUM) && sum_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ap_done <= 1'b0;
      ret_q   <= 32'd0;
      th_q    <= FP32_POS_ZERO;
      b_q     <= FP32_POS_ZERO;
    end else begin
      if (wr_en && wr_addr == REG_TH)
        for (int k = 0; k < 4; k++) if (wr_strb[k]) th_q[8*k +: 8] <= wr_data[8*k +: 8];
      if (rd_en && rd_addr == REG_CTRL) ap_done <= 1'b0;
      unique case (state)
        S_IDLE:    if (start_req) state <= S_FETCH_B;
        S_FETCH_B: state <= S_LOAD_B;
        S_LOAD_B: begin
          b_q   <= par_rdata;
          state <= S_SUM;
        end
        S_SUM:     if (sum_done) state <= S_DIST;
        S_DIST:    if (dist_done) state <= S_DEC;
        S_DEC: if (dec_valid) begin
          ret_q   <= f;
          ap_done <= 1'b1;
          state   <= S_IDLE;
        end
        default:   state <= S_IDLE;
      endcase
    end
  end

  a_start_only_idle: assert property (@(posedge clk) disable iff (!rst_n)
    sum_start |-> !sum_busy);
  // the shared operators are never claimed by two blocks at once
  a_one_user: assert property (@(posedge clk) disable iff (!rst_n)
    !(sum_busy && dist_busy) && !(dist_done && (sum_busy || dist_busy)));

endmodule
