// tb_fp32_mul: self-checking test of the single-precision multiplier.
// Random operands over most of the exponent range, plus directed cases
// (zeros, infinities, NaN, overflow, rounding carry), are compared with the
// double-precision reference of fp_ref_pkg. Results that the reference puts
// at the edge of the normal range are skipped, as the unit flushes them.
module tb_fp32_mul;
  import fp_ref_pkg::*;

  logic [31:0] a, b, p;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .p(p));

  task automatic check(input logic [31:0] x, input logic [31:0] y);
    logic [31:0] ref_p;
    a = x; b = y;
    #1;
    ref_p = fmul_ref(x, y);
    if (is_nan(x) || is_nan(y) ||
        ((x[30:23] == 8'hFF) && y[30:23] == 0) || ((y[30:23] == 8'hFF) && x[30:23] == 0))
      ref_p = 32'h7FC0_0000;
    else if (x[30:23] == 8'hFF || y[30:23] == 8'hFF)
      ref_p = {x[31] ^ y[31], 8'hFF, 23'd0};
    else if (x[30:23] == 0 || y[30:23] == 0)
      ref_p = {x[31] ^ y[31], 31'd0};
    else if (ref_p[30:23] <= 8'd1 && ref_p[30:0] != 0)
      return;   // near underflow: flush boundary, not compared
    else if (ref_p[30:0] == 0 && (int'(x[30:23]) + int'(y[30:23]) - 127) < 2)
      return;
    checks++;
    if (p !== ref_p) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h * %h = %h, expected %h", x, y, p, ref_p);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3FC0_0000, 32'h4020_0000);   // 1.5 * 2.5 = 3.75
    check(32'h3F80_0000, 32'hBF80_0000);   // 1 * -1
    check(32'h3F80_0001, 32'h3F80_0001);
    check(32'h3FFF_FFFF, 32'h3FFF_FFFF);   // rounding carries into exponent
    check(32'h0000_0000, 32'hC000_0000);   // 0 * -2 = -0
    check(32'h7F80_0000, 32'h3F80_0000);   // inf
    check(32'h7F80_0000, 32'h0000_0000);   // inf * 0 = NaN
    check(32'h7FC0_0001, 32'h3F80_0000);   // NaN
    check(32'h7F00_0000, 32'h7F00_0000);   // overflow
    for (int i = 0; i < 20000; i++) check(rand_f(64, 190), rand_f(64, 190));
    for (int i = 0; i < 5000; i++)  check(rand_f(120, 134), rand_f(120, 134));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
