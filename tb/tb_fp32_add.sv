// tb_fp32_add: self-checking test of the single-precision adder.
// Random operands (same and opposite signs, near and far exponents, exact
// cancellation) and directed special cases are compared with the
// double-precision reference of fp_ref_pkg. Results at the edge of the
// normal range are skipped, as the unit flushes them to zero.
module tb_fp32_add;
  import fp_ref_pkg::*;

  logic [31:0] a, b, s;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .s(s));

  task automatic check(input logic [31:0] x, input logic [31:0] y);
    logic [31:0] ref_s;
    a = x; b = y;
    #1;
    if (is_nan(x) || is_nan(y) ||
        (x[30:0] == 31'h7F80_0000 && y[30:0] == 31'h7F80_0000 && x[31] != y[31]))
      ref_s = 32'h7FC0_0000;
    else if (x[30:0] == 31'h7F80_0000) ref_s = x;
    else if (y[30:0] == 31'h7F80_0000) ref_s = y;
    else begin
      ref_s = fadd_ref(x, y);
      if (ref_s[30:23] <= 8'd1 && ref_s[30:0] != 0) return;   // flush boundary
    end
    checks++;
    if (s !== ref_s) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h + %h = %h, expected %h", x, y, s, ref_s);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    check(32'h3F80_0000, 32'h3F80_0000);   // 1 + 1
    check(32'h3F80_0000, 32'hBF80_0000);   // 1 - 1 = +0
    check(32'h3F80_0001, 32'h3380_0000);   // tie, rounds to even
    check(32'h3F80_0000, 32'h3380_0001);   // just above a tie
    check(32'h3F80_0000, 32'hB380_0000);   // borrow into lower binade
    check(32'h4B7F_FFFF, 32'h3F00_0000);   // carry-out after rounding
    check(32'h8000_0000, 32'h8000_0000);   // -0 + -0 = -0
    check(32'h0000_0000, 32'h4040_0000);
    check(32'h7F80_0000, 32'hFF80_0000);   // inf - inf = NaN
    check(32'h7F80_0000, 32'h3F80_0000);
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF);   // overflow
    for (int i = 0; i < 20000; i++) check(rand_f(64, 190), rand_f(64, 190));
    for (int i = 0; i < 20000; i++) check(rand_f(120, 134), rand_f(120, 134));
    for (int i = 0; i < 5000; i++) begin
      r = rand_f(100, 150);
      check(r, {~r[31], r[30:1], 1'($urandom)});          // near cancellation
      check(r, {~r[31], r[30:0]});                        // exact cancellation
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
