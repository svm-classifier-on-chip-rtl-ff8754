// distance_calc: second block of the SVM IP, D = sum_j X[j] * Z[j].
//
// Reads the test sample X one feature per cycle through a memory port with
// one cycle of read latency, multiplies each feature by the matching word of
// the accumulated vector Z (an array input, stable while the block runs) into
// a product register, and adds the product into the running sum D. As in
// svs_summation, the multiplier and adder are outside the block, reached
// through mul_a/mul_b/mul_y and add_a/add_b/add_y, and used only while busy. Each
// addition completes in the cycle it starts, so the loop-carried sum does not
// stall the one-feature-per-cycle pipeline.
//
// Timing: start (one-cycle pulse while idle) clears D; N_FEAT read cycles
// follow; done pulses N_FEAT + 3 cycles after start, and D holds its value
// until the next start. The equation is the SVM IP's second block; the
// pipeline is this design's choice.
module distance_calc
  import svm_pkg::*;
#(
  parameter int unsigned N_FEAT = 27,
  localparam int unsigned X_AW  = $clog2(N_FEAT) > 0 ? $clog2(N_FEAT) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // X memory read port
  output logic            x_en,
  output logic [X_AW-1:0] x_addr,
  input  fp32_t           x_rdata,
  // accumulated vector from the first block (or from internal storage)
  input  fp32_t           z [N_FEAT],
  output fp32_t           d,
  // shared floating-point operators
  output fp32_t           mul_a,
  output fp32_t           mul_b,
  input  fp32_t           mul_y,
  output fp32_t           add_a,
  output fp32_t           add_b,
  input  fp32_t           add_y
);

  logic            issuing;
  logic [X_AW-1:0] j_cnt, j1;
  logic            v1, v2;
  fp32_t           prod_c, prod_q, sum_c;

  assign busy   = issuing || v1 || v2;
  assign x_en   = issuing;
  assign x_addr = j_cnt;

  assign mul_a  = x_rdata;
  assign mul_b  = z[j1];
  assign prod_c = mul_y;
  assign add_a  = d;
  assign add_b  = prod_q;
  assign sum_c  = add_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      j_cnt   <= '0;
      j1      <= '0;
      v1      <= 1'b0;
      v2      <= 1'b0;
      prod_q  <= FP32_POS_ZERO;
      d       <= FP32_POS_ZERO;
      done    <= 1'b0;
    end else begin
      done <= v2 && !v1 && !issuing;
      if (start && !busy) begin
        issuing <= 1'b1;
        j_cnt   <= '0;
        d       <= FP32_POS_ZERO;
      end else if (issuing) begin
        if (j_cnt == X_AW'(N_FEAT - 1)) issuing <= 1'b0;
        else                             j_cnt   <= j_cnt + X_AW'(1);
      end
      v1 <= issuing;
      j1 <= j_cnt;
      v2 <= v1;
      if (v1) prod_q <= prod_c;
      if (v2) d <= sum_c;
    end
  end

endmodule
