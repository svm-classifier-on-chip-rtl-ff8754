// fp32_add: combinational IEEE-754 single-precision adder.
//
// y = a + b, rounded to nearest, ties to even (a subtraction is an addition
// with the sign of b inverted by the caller). The operand of larger magnitude (op_l)
// is kept as is; the other (op_s) is shifted right by the exponent difference into a
// 27-bit field (24 significand bits, guard, round and a sticky bit that
// collects everything shifted out). After the add or subtract the result is
// renormalised (one place right on carry, or left by the leading-zero count)
// and rounded. Subnormal inputs are read as zero and results below the
// smallest normal are flushed to zero; an exact zero difference is +0.
// Overflow gives infinity, and NaN or (+inf)+(-inf) the quiet NaN 0x7FC00000.
// Single precision follows the classifier's data format; flush-to-zero and
// the combinational form are this design's choices.
module fp32_add
  import svm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  fp32_t       op_l, op_s;
  logic [7:0]  d;
  logic [26:0] mb_big, mb_small, sh;
  logic        st;
  logic [27:0] sum;
  logic [26:0] norm;
  logic signed [9:0] exp_n;
  logic [4:0]  lz;
  logic        found;
  logic        round_up;
  logic [24:0] mant_r;
  logic        eff_sub;

  always_comb begin
    // order by magnitude
    if (a[30:0] >= b[30:0]) begin
      op_l = a; op_s = b;
    end else begin
      op_l = b; op_s = a;
    end
    eff_sub  = op_l[31] ^ op_s[31];
    d        = op_l[30:23] - op_s[30:23];
    mb_big   = {1'b1, op_l[22:0], 3'b000};
    mb_small = {1'b1, op_s[22:0], 3'b000};
    // align the smaller operand, folding lost bits into the sticky bit
    if (d >= 8'd27) begin
      sh = 27'd0;
      st = 1'b1;
    end else begin
      sh = mb_small >> d;
      st = (mb_small & ~(27'h7FF_FFFF << d)) != 27'd0;
    end
    sh[0] = sh[0] | st;

    sum   = eff_sub ? ({1'b0, mb_big} - {1'b0, sh}) : ({1'b0, mb_big} + {1'b0, sh});
    exp_n = $signed({2'b00, op_l[30:23]});

    // normalise
    lz    = 5'd0;
    found = 1'b0;
    for (int i = 26; i >= 0; i--) begin
      if (!found && sum[i]) begin
        found = 1'b1;
        lz    = 5'(26 - i);
      end
    end
    if (sum[27]) begin
      norm  = sum[27:1] | {26'd0, sum[0]};
      exp_n = exp_n + 10'sd1;
    end else begin
      norm  = sum[26:0] << lz;
      exp_n = exp_n - $signed({5'd0, lz});
    end

    // round to nearest even on guard / round / sticky
    round_up = norm[2] & (norm[1] | norm[0] | norm[3]);
    mant_r   = {1'b0, norm[26:3]} + {24'd0, round_up};
    if (mant_r[24]) exp_n = exp_n + 10'sd1;

    if (fp32_is_nan(a) || fp32_is_nan(b))
      y = FP32_QNAN;
    else if (a[30:23] == 8'hFF && b[30:23] == 8'hFF)
      y = (a[31] == b[31]) ? a : FP32_QNAN;
    else if (a[30:23] == 8'hFF)
      y = a;
    else if (b[30:23] == 8'hFF)
      y = b;
    else if (fp32_is_zero(a) && fp32_is_zero(b))
      y = {a[31] & b[31], 31'd0};
    else if (fp32_is_zero(op_s))
      y = op_l;
    else if (sum == 28'd0)
      y = FP32_POS_ZERO;
    else if (exp_n >= 10'sd255)
      y = {op_l[31], 8'hFF, 23'd0};
    else if (exp_n <= 10'sd0)
      y = {op_l[31], 31'd0};
    else
      y = {op_l[31], exp_n[7:0], mant_r[22:0]};
  end

endmodule
