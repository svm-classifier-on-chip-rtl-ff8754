// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// y = a * b, rounded to nearest, ties to even. The 24x24-bit significand
// product is normalised by at most one place, then rounded with a guard bit
// and a sticky bit. Subnormal inputs are read as zero and results below the
// smallest normal number are flushed to a signed zero; overflow gives a
// signed infinity; NaN, or infinity times zero, gives the quiet NaN
// 0x7FC00000. The classifier needs single-precision arithmetic; the
// flush-to-zero handling and the purely combinational form are this design's
// choices (the surrounding datapath places a register after the multiplier).
module fp32_mul
  import svm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sy;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic [22:0] mant;
  logic        guard, sticky, round_up;
  logic [23:0] mant_r;
  logic signed [10:0] exp_n;

  always_comb begin
    ea     = a[30:23];
    eb     = b[30:23];
    sy     = a[31] ^ b[31];
    prod   = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp_n  = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[46:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_n  = exp_n + 11'sd1;
    end else begin
      mant   = prod[45:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + {23'd0, round_up};
    if (mant_r[23]) exp_n = exp_n + 11'sd1;   // rounding carried into the exponent

    if (fp32_is_nan(a) || fp32_is_nan(b)
        || (ea == 8'hFF && fp32_is_zero(b)) || (eb == 8'hFF && fp32_is_zero(a)))
      y = FP32_QNAN;
    else if (ea == 8'hFF || eb == 8'hFF)
      y = {sy, 8'hFF, 23'd0};
    else if (fp32_is_zero(a) || fp32_is_zero(b))
      y = {sy, 31'd0};
    else if (exp_n >= 11'sd255)
      y = {sy, 8'hFF, 23'd0};
    else if (exp_n <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, exp_n[7:0], mant_r[22:0]};
  end

endmodule
