// fp32_add: combinational IEEE-754 single-precision adder.
//
// One adder serves the whole classifier: it accumulates the weighted support
// vectors into AC (Eq. 2), sums the dot product D (Eq. 3) and forms D - b
// (b is subtracted by flipping its sign bit before it gets here).
//
// The operand of larger magnitude is taken as the base. The other significand
// is shifted right to align it and carries three extra bits (guard, round,
// sticky). The two are added or subtracted, the sum is normalised (one place
// right after a carry, or left by the leading-zero count after cancellation),
// and the result is rounded to nearest, ties to even. An exact cancellation
// gives +0, as round-to-nearest requires.
//
// Own choices, as the paper only names the number format: subnormal inputs
// are read as zero and results below the normal range are flushed to a signed
// zero; overflow gives infinity; NaN inputs and inf - inf give the quiet NaN
// 0x7FC00000.
//
// Interface: a, b in, s out, no clock; the caller registers the result.
module fp32_add
  import svm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);

  fp32_fields_t fa, fb, op_hi, op_lo;
  assign fa = a;
  assign fb = b;

  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [7:0]  shift;
  logic [26:0] m_big, m_small, m_small_sh;
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic        found;
  logic signed [9:0] exp_s;
  logic [24:0] mant_r;
  logic        round_up;

  always_comb begin
    a_zero = (fa.exp == 8'd0);
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hFF) && (fa.frac == '0);
    b_inf  = (fb.exp == 8'hFF) && (fb.frac == '0);
    a_nan  = (fa.exp == 8'hFF) && (fa.frac != '0);
    b_nan  = (fb.exp == 8'hFF) && (fb.frac != '0);

    // Larger magnitude first.
    if ({fa.exp, fa.frac} >= {fb.exp, fb.frac}) begin
      op_hi = fa; op_lo = fb;
    end else begin
      op_hi = fb; op_lo = fa;
    end

    m_big   = {1'b1, op_hi.frac, 3'b000};
    m_small = {1'b1, op_lo.frac, 3'b000};
    shift   = op_hi.exp - op_lo.exp;

    // Align, folding every bit shifted out into the sticky bit.
    if (shift >= 8'd27) begin
      m_small_sh = 27'd1;
    end else begin
      m_small_sh = m_small >> shift;
      if ((m_small & ((27'd1 << shift) - 27'd1)) != 27'd0)
        m_small_sh[0] = 1'b1;
    end

    if (op_hi.sign == op_lo.sign) sum = {1'b0, m_big} + {1'b0, m_small_sh};
    else                        sum = {1'b0, m_big} - {1'b0, m_small_sh};

    exp_s = $signed({2'b00, op_hi.exp});
    norm  = '0;
    lz    = '0;
    found = 1'b0;
    if (sum[27]) begin
      norm  = {sum[27:2], sum[1] | sum[0]};
      exp_s = exp_s + 10'sd1;
    end else begin
      // Leading-zero count over the 27-bit sum.
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          lz    = 5'(26 - i);
          found = 1'b1;
        end
      end
      norm  = sum[26:0] << lz;
      exp_s = exp_s - $signed({5'd0, lz});
    end

    round_up = norm[2] & (norm[1] | norm[0] | norm[3]);
    mant_r   = {1'b0, norm[26:3]} + {24'd0, round_up};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 10'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (fa.sign != fb.sign))) begin
      s = FP32_QNAN;
    end else if (a_inf) begin
      s = a;
    end else if (b_inf) begin
      s = b;
    end else if (a_zero && b_zero) begin
      s = {fa.sign & fb.sign, 31'd0};
    end else if (b_zero) begin
      s = a;
    end else if (a_zero) begin
      s = b;
    end else if (sum == 28'd0) begin
      s = FP32_POS_ZERO;
    end else if (exp_s >= 10'sd255) begin
      s = {op_hi.sign, 8'hFF, 23'd0};
    end else if (exp_s <= 10'sd0) begin
      s = {op_hi.sign, 31'd0};
    end else begin
      s = {op_hi.sign, exp_s[7:0], mant_r[22:0]};
    end
  end

endmodule
