// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// The classifier keeps all of its data in single-precision float, and this
// unit forms every product it needs: alpha*y times an SV feature for the
// accumulated vector (Eq. 2) and AC times a test feature for the dot product
// (Eq. 3). The 24x24-bit significand product is normalised by at most one
// place and rounded to nearest, ties to even, using a guard bit and a sticky
// bit.
//
// Own choices, as the paper only names the number format: subnormal inputs
// are read as zero and results below the normal range are flushed to a signed
// zero (the usual FPGA floating-point core setting); overflow gives infinity;
// any NaN, and infinity times zero, give the quiet NaN 0x7FC00000.
//
// Interface: a, b in, p out, no clock. The surrounding pipeline registers the
// result, so the unit costs no cycle of its own.
module fp32_mul
  import svm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t p
);

  fp32_fields_t fa, fb;
  assign fa = a;
  assign fb = b;

  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic        sign;
  logic [47:0] prod;
  logic [23:0] mant;
  logic [24:0] mant_r;
  logic        guard, sticky;
  logic signed [10:0] exp_s;

  always_comb begin
    a_zero = (fa.exp == 8'd0);
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hFF) && (fa.frac == '0);
    b_inf  = (fb.exp == 8'hFF) && (fb.frac == '0);
    a_nan  = (fa.exp == 8'hFF) && (fa.frac != '0);
    b_nan  = (fb.exp == 8'hFF) && (fb.frac != '0);
    sign   = fa.sign ^ fb.sign;

    prod  = {1'b1, fa.frac} * {1'b1, fb.frac};
    exp_s = $signed({3'b000, fa.exp}) + $signed({3'b000, fb.exp}) - 11'sd127;

    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_s  = exp_s + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end

    mant_r = {1'b0, mant} + {24'd0, guard & (sticky | mant[0])};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      p = FP32_QNAN;
    end else if (a_inf || b_inf) begin
      p = {sign, 8'hFF, 23'd0};
    end else if (a_zero || b_zero) begin
      p = {sign, 31'd0};
    end else if (exp_s >= 11'sd255) begin
      p = {sign, 8'hFF, 23'd0};
    end else if (exp_s <= 11'sd0) begin
      p = {sign, 31'd0};
    end else begin
      p = {sign, exp_s[7:0], mant_r[22:0]};
    end
  end

endmodule
