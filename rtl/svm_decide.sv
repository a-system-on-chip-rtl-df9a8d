// svm_decide: final decision of the classifier (Eq. 4).
//
// Compares the distance value D - b with the threshold th, both IEEE-754
// single-precision words, and returns +1 (melanoma) when D - b >= th and -1
// (non-melanoma) otherwise, as the last lines of the pseudo code do. The
// comparison works on the raw bit patterns: opposite signs are decided by the
// sign (with +0 equal to -0), equal signs by the magnitude field order,
// reversed for negative numbers. A NaN on either side compares false, giving
// -1, which is what a C comparison would return.
//
// Interface: purely combinational; the core registers the class.
module svm_decide
  import svm_pkg::*;
(
  input  fp32_t              distance,   // D - b
  input  fp32_t              th,     // threshold from the validation phase
  output logic               ge,     // distance >= th
  output logic signed [31:0] label   // +1 or -1
);

  fp32_fields_t fd, ft;
  assign fd = distance;
  assign ft = th;

  logic d_nan, t_nan, both_zero;

  always_comb begin
    d_nan     = (fd.exp == 8'hFF) && (fd.frac != '0);
    t_nan     = (ft.exp == 8'hFF) && (ft.frac != '0);
    both_zero = (distance[30:0] == '0) && (th[30:0] == '0);

    if (d_nan || t_nan)           ge = 1'b0;
    else if (both_zero)           ge = 1'b1;
    else if (fd.sign != ft.sign)  ge = ft.sign;             // distance >= 0 > th
    else if (!fd.sign)            ge = (distance[30:0] >= th[30:0]);
    else                          ge = (distance[30:0] <= th[30:0]);

    label = ge ? CLASS_MELANOMA : CLASS_NON_MELANOMA;
  end

endmodule
