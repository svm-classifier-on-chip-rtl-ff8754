// class_decision: third block of the SVM IP, F(X) = sign(D - b) against th.
//
// Subtracts the bias b from the distance D in single precision and compares
// the difference with the threshold th: F(X) = +1 (melanoma) when
// (D - b) >= th and -1 (benign) when (D - b) < th, the classifier's sign
// function with a threshold set in validation. The subtraction uses an
// adder outside the block (add_a/add_b/add_y), shared with the other blocks
// and needed only in the start cycle. A NaN difference, which the
// sign function does not cover, gives -1 (this design's choice).
//
// Timing: the result and the difference are registered; valid pulses one
// cycle after start, and f and diff hold until the next start.
module class_decision
  import svm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  fp32_t       d,
  input  fp32_t       b,
  input  fp32_t       th,
  output logic        valid,
  output logic [31:0] f,
  output fp32_t       diff,
  // shared floating-point adder
  output fp32_t       add_a,
  output fp32_t       add_b,
  input  fp32_t       add_y
);

  fp32_t diff_c;

  assign add_a  = d;
  assign add_b  = {~b[31], b[30:0]};
  assign diff_c = add_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      f     <= CLASS_BENIGN;
      diff  <= FP32_POS_ZERO;
    end else begin
      valid <= start;
      if (start) begin
        diff <= diff_c;
        f    <= fp32_ge(diff_c, th) ? CLASS_MELANOMA : CLASS_BENIGN;
      end
    end
  end

endmodule
