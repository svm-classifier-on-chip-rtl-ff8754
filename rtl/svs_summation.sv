// svs_summation: first block of the SVM IP, Z[j] = sum_i (alpha_i*y_i) * SV_i[j].
//
// The support vectors are folded into one accumulated vector Z of N_FEAT
// features, so that the later dot product with the test sample X needs only
// N_FEAT multiplies. The block walks the SV memory (row-major, SV i feature j
// at word i*N_FEAT + j) with one read per cycle, and reads alpha_i*y_i from
// the Parameters memory at word i+1 (word 0 holds b). Both memories are
// single-port with one cycle of read latency. A pipeline of two stages
// follows: stage 1 multiplies the two read words into a product register,
// stage 2 adds the product into Z[j]. The multiplier and the adder are not
// inside the block: it drives their operands (mul_a/mul_b, add_a/add_b) and
// takes their combinational results (mul_y, add_y), so that the enclosing
// classifier can share one multiplier and one adder among its blocks, which
// run one after another. The block uses them only while busy. Because the feature index is the inner
// loop, consecutive additions go to different Z words, so the pipeline issues
// one multiply-accumulate per cycle with no stall.
//
// Timing: start (one-cycle pulse while idle) clears Z; N_SV*N_FEAT read
// cycles follow, then two cycles of pipeline drain; done pulses for one cycle
// in the cycle after the last Z update, so done comes N_SV*N_FEAT + 3 cycles
// after start. Z is valid from done until the next start.
// The loop order and equation follow the SVM IP's first block; the pipeline
// depth and memory layout are this design's choices.
module svs_summation
  import svm_pkg::*;
#(
  parameter int unsigned N_SV   = 248,
  parameter int unsigned N_FEAT = 27,
  localparam int unsigned SV_AW  = $clog2(N_SV * N_FEAT),
  localparam int unsigned PAR_AW = $clog2(N_SV + 1),
  localparam int unsigned J_W    = $clog2(N_FEAT) > 0 ? $clog2(N_FEAT) : 1,
  localparam int unsigned I_W    = $clog2(N_SV) > 0 ? $clog2(N_SV) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // SVs memory read port
  output logic              sv_en,
  output logic [SV_AW-1:0]  sv_addr,
  input  fp32_t             sv_rdata,
  // Parameters memory read port
  output logic              par_en,
  output logic [PAR_AW-1:0] par_addr,
  input  fp32_t             par_rdata,
  // shared floating-point operators
  output fp32_t             mul_a,
  output fp32_t             mul_b,
  input  fp32_t             mul_y,
  output fp32_t             add_a,
  output fp32_t             add_b,
  input  fp32_t             add_y,
  // accumulated vector
  output fp32_t             z [N_FEAT]
);

  logic             issuing;
  logic [I_W-1:0]   i_cnt;
  logic [J_W-1:0]   j_cnt;
  logic [SV_AW-1:0] lin;
  logic             v1, v2;
  logic [J_W-1:0]   j1, j2;
  fp32_t            prod_c, prod_q, sum_c;
  logic             last_issue;

  assign last_issue = issuing && (i_cnt == I_W'(N_SV - 1)) && (j_cnt == J_W'(N_FEAT - 1));
  assign busy       = issuing || v1 || v2;

  assign sv_en    = issuing;
  assign sv_addr  = lin;
  assign par_en   = issuing;
  assign par_addr = PAR_AW'(i_cnt) + PAR_AW'(1);

  assign mul_a  = sv_rdata;
  assign mul_b  = par_rdata;
  assign prod_c = mul_y;
  assign add_a  = z[j2];
  assign add_b  = prod_q;
  assign sum_c  = add_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      i_cnt   <= '0;
      j_cnt   <= '0;
      lin     <= '0;
      v1      <= 1'b0;
      v2      <= 1'b0;
      j1      <= '0;
      j2      <= '0;
      prod_q  <= FP32_POS_ZERO;
      done    <= 1'b0;
      for (int k = 0; k < int'(N_FEAT); k++) z[k] <= FP32_POS_ZERO;
    end else begin
      done <= v2 && !v1 && !issuing;
      // address generation
      if (start && !busy) begin
        issuing <= 1'b1;
        i_cnt   <= '0;
        j_cnt   <= '0;
        lin     <= '0;
        for (int k = 0; k < int'(N_FEAT); k++) z[k] <= FP32_POS_ZERO;
      end else if (issuing) begin
        lin <= lin + SV_AW'(1);
        if (j_cnt == J_W'(N_FEAT - 1)) begin
          j_cnt <= '0;
          i_cnt <= i_cnt + I_W'(1);
        end else begin
          j_cnt <= j_cnt + J_W'(1);
        end
        if (last_issue) issuing <= 1'b0;
      end
      // stage 1: memory data valid -> product register
      v1 <= issuing;
      j1 <= j_cnt;
      v2 <= v1;
      j2 <= j1;
      if (v1) prod_q <= prod_c;
      // stage 2: accumulate into Z
      if (v2) z[j2] <= sum_c;
    end
  end

endmodule
