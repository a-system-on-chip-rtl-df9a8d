// tb_svm_decide: self-checking test of the Eq. 4 comparator.
// Random and directed pairs (D - b, th) are compared as reals; the expected
// class is +1 when D - b >= th and -1 otherwise (also for NaN).
module tb_svm_decide;
  import fp_ref_pkg::*;

  logic [31:0] d, t;
  logic        ge;
  logic signed [31:0] label;
  int checks = 0, failures = 0;

  svm_decide dut (.distance(d), .th(t), .ge(ge), .label(label));

  task automatic check(input logic [31:0] x, input logic [31:0] y);
    logic exp_ge;
    d = x; t = y;
    #1;
    exp_ge = (is_nan(x) || is_nan(y)) ? 1'b0 : (f2r(x) >= f2r(y));
    checks++;
    if (ge !== exp_ge || label !== (exp_ge ? 32'sd1 : -32'sd1)) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h >= %h : ge=%b label=%0d", x, y, ge, label);
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
    check(32'h0000_0000, 32'h8000_0000);   // +0 >= -0
    check(32'h8000_0000, 32'h0000_0000);   // -0 >= +0
    check(32'h3F80_0000, 32'h3F80_0000);   // equal
    check(32'hBF80_0000, 32'hBF80_0000);
    check(32'hBF80_0000, 32'hC000_0000);   // -1 >= -2
    check(32'hC000_0000, 32'hBF80_0000);   // -2 >= -1 is false
    check(32'h3F80_0000, 32'hBF80_0000);
    check(32'hBF80_0000, 32'h3F80_0000);
    check(32'h7FC0_0000, 32'h0000_0000);   // NaN
    check(32'h7F80_0000, 32'h7F7F_FFFF);   // inf
    for (int i = 0; i < 20000; i++) check(rand_f(100, 150), rand_f(100, 150));
    for (int i = 0; i < 2000; i++) begin
      r = rand_f(100, 150);
      check(r, r);
      check(r, {r[31], r[30:0] + 31'd1});
      check({r[31], r[30:0] + 31'd1}, r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
