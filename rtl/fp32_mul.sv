// fp32_mul -- single-precision floating-point multiplier (the MULT of one
// acceleration module).
//
// Computes y = a * b for IEEE-754 binary32 operands.  The 24x24-bit significand
// product is normalised by at most one position and rounded to nearest, ties to
// even.  Subnormal operands are treated as zero and results below the normal
// range are flushed to a signed zero (flush-to-zero); results above the range
// give infinity.  Infinities propagate, NaN and inf*0 give the quiet NaN
// 7FC00000.  The unit is purely combinational; the acceleration module registers
// its output so the multiply is one pipeline step.
//
// The paper specifies only "a floating-point multiplier" on 32-bit values; the
// rounding mode, flush-to-zero and NaN handling are this design's choices.
module fp32_mul
  import spmspv_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  fp32_t fa, fb;
  assign fa = fp32_t'(a);
  assign fb = fp32_t'(b);

  logic        sgn;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic [9:0]  exp_sum;     // signed-ish, biased; wide enough for 2*254
  logic [9:0]  exp_n;
  logic [23:0] mant;
  logic        guard, sticky, round_up;
  logic [24:0] mant_r;
  logic [9:0]  exp_r;

  always_comb begin
    sgn    = fa.sign ^ fb.sign;
    a_zero = (fa.exp == 8'd0);
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hFF) && (fa.frac == 23'd0);
    b_inf  = (fb.exp == 8'hFF) && (fb.frac == 23'd0);
    a_nan  = (fa.exp == 8'hFF) && (fa.frac != 23'd0);
    b_nan  = (fb.exp == 8'hFF) && (fb.frac != 23'd0);

    prod    = {1'b1, fa.frac} * {1'b1, fb.frac};
    exp_sum = {2'b00, fa.exp} + {2'b00, fb.exp};   // still carries 2x bias

    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_n  = exp_sum + 10'd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
      exp_n  = exp_sum;
    end

    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + {24'd0, round_up};
    exp_r    = exp_n;
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_n + 10'd1;
    end

    // exp_r holds e_a + e_b (+carry); the biased result exponent is exp_r - 127.
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = FP_QNAN;
    end else if (a_inf || b_inf) begin
      y = {sgn, 8'hFF, 23'd0};
    end else if (a_zero || b_zero || exp_r <= 10'd127) begin
      y = {sgn, 31'd0};                               // zero or flushed underflow
    end else if (exp_r >= 10'd382) begin
      y = {sgn, 8'hFF, 23'd0};                        // overflow to infinity
    end else begin
      y = {sgn, 8'(exp_r - 10'd127), mant_r[22:0]};
    end
  end

endmodule
