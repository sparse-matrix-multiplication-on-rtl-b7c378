// fp32_add -- single-precision floating-point adder, the node of the
// accumulator (ACC) adder tree.
//
// Computes y = a + b for IEEE-754 binary32 operands.  The operand with the
// larger magnitude is kept, the other significand is shifted right by the
// exponent difference into a field with guard, round and sticky bits, the two
// are added or subtracted, the result is normalised (one position right after
// an add carry, up to 26 positions left after a cancelling subtract) and rounded
// to nearest, ties to even.  Subnormal operands count as zero and results below
// the normal range are flushed to zero; overflow gives infinity.  Exact
// cancellation gives +0.  NaN, or inf + (-inf), gives the quiet NaN 7FC00000.
// The unit is combinational.
//
// The paper calls for a floating-point accumulator but not for its adder
// design; everything here beyond "add two 32-bit floats" is this design's own.
module fp32_add
  import spmspv_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  fp32_t fa, fb, fx, fy;   // fx: larger magnitude operand
  assign fa = fp32_t'(a);
  assign fb = fp32_t'(b);

  logic        a_nan, b_nan, a_inf, b_inf;
  logic [23:0] mx, my;
  logic [7:0]  d;
  logic [26:0] xx, yy, ysh;
  logic        sticky;
  logic [27:0] sum;
  logic [26:0] s;
  logic [9:0]  e;
  logic [4:0]  lz;
  logic [23:0] mant;
  logic        g, r, st, round_up;
  logic [24:0] mant_r;
  logic        sub;

  always_comb begin
    a_nan = (fa.exp == 8'hFF) && (fa.frac != 23'd0);
    b_nan = (fb.exp == 8'hFF) && (fb.frac != 23'd0);
    a_inf = (fa.exp == 8'hFF) && (fa.frac == 23'd0);
    b_inf = (fb.exp == 8'hFF) && (fb.frac == 23'd0);

    if ({fa.exp, fa.frac} >= {fb.exp, fb.frac}) begin
      fx = fa; fy = fb;
    end else begin
      fx = fb; fy = fa;
    end

    // Subnormals are read as zero (no hidden bit, significand ignored).
    mx  = (fx.exp == 8'd0) ? 24'd0 : {1'b1, fx.frac};
    my  = (fy.exp == 8'd0) ? 24'd0 : {1'b1, fy.frac};
    d   = fx.exp - fy.exp;
    xx  = {mx, 3'b000};
    yy  = {my, 3'b000};
    if (d >= 8'd27) begin
      ysh    = 27'd0;
      sticky = (my != 24'd0);
    end else begin
      ysh    = yy >> d;
      sticky = |(yy & ((27'd1 << d) - 27'd1));
    end
    ysh[0] = ysh[0] | sticky;

    sub = fx.sign ^ fy.sign;
    e   = {2'b00, fx.exp};
    lz  = 5'd0;
    sum = 28'd0;
    s   = 27'd0;
    if (!sub) begin
      sum = {1'b0, xx} + {1'b0, ysh};
      if (sum[27]) begin
        s = sum[27:1];
        s[0] = s[0] | sum[0];
        e = e + 10'd1;
      end else begin
        s = sum[26:0];
      end
    end else begin
      s = xx - ysh;
      // Leading-zero count of the difference (s[26] is the hidden-bit place).
      for (int i = 0; i <= 26; i++) begin
        if (s[i]) lz = 5'(26 - i);
      end
      s = s << lz;
      e = e - {5'd0, lz};
    end

    mant     = s[26:3];
    g        = s[2];
    r        = s[1];
    st       = s[0];
    round_up = g & (r | st | mant[0]);
    mant_r   = {1'b0, mant} + {24'd0, round_up};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 10'd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (fa.sign != fb.sign))) begin
      y = FP_QNAN;
    end else if (a_inf || b_inf) begin
      y = a_inf ? {fa.sign, 8'hFF, 23'd0} : {fb.sign, 8'hFF, 23'd0};
    end else if (mx == 24'd0 && my == 24'd0) begin
      // Both zero: -0 only for (-0) + (-0).
      y = {fa.sign & fb.sign, 31'd0};
    end else if (s == 27'd0) begin
      y = 32'd0;                                   // exact cancellation
    end else if (e[9] || e == 10'd0) begin
      y = {fx.sign, 31'd0};                        // underflow, flushed
    end else if (e >= 10'd255) begin
      y = {fx.sign, 8'hFF, 23'd0};                 // overflow
    end else begin
      y = {fx.sign, e[7:0], mant_r[22:0]};
    end
  end

endmodule
