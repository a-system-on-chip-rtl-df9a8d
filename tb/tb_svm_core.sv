// tb_svm_core: self-checking test of the classifier core.
// The core is connected to three svm_ram arrays that the testbench fills
// directly (standing in for the stream loader), for a small model of 5 SVs
// with 4 features. For 30 random models and test vectors it checks the
// distance D - b bit for bit against a reference evaluated in the order of
// the pseudo code, the returned class for a threshold at, just below and
// just above D - b, and the number of cycles from the end of loading to done.
module tb_svm_core;
  import fp_ref_pkg::*;
  import svm_pkg::*;

  localparam int N_SV = 5, N_FEAT = 4;
  localparam int SV_WORDS = N_SV * N_FEAT;
  // LOAD exit + CLEAR + ACCUM (+ drain) + DOT (+ drain) + SUB_B + DECIDE + DONE
  localparam int COMPUTE_CYCLES = 1 + N_FEAT + (SV_WORDS + 3) + (N_FEAT + 3) + 2 + 1 + 1;

  logic clk = 0, rst_n = 0;
  logic start = 0, start_ack, idle, done, load_start, load_done = 0;
  logic [31:0] th = '0, distance;
  logic signed [31:0] result;
  phase_e phase;
  logic sv_re, ay_re, test_re;
  logic [4:0] sv_raddr;
  logic [2:0] ay_raddr;
  logic [1:0] test_raddr;
  logic [31:0] sv_rdata, ay_rdata, test_rdata;
  // testbench write ports
  logic sv_we = 0, ay_we = 0, test_we = 0;
  logic [4:0] sv_waddr = '0;
  logic [2:0] ay_waddr = '0;
  logic [1:0] test_waddr = '0;
  logic [31:0] wdata = '0;

  int checks = 0, failures = 0;
  logic [31:0] svs [SV_WORDS];
  logic [31:0] ay [N_SV + 1];
  logic [31:0] xt [N_FEAT];

  svm_core #(.N_SV(N_SV), .N_FEAT(N_FEAT)) dut (.*);
  svm_ram #(.DEPTH(SV_WORDS)) u_svs (.clk, .we(sv_we), .waddr(sv_waddr), .wdata,
                                     .re(sv_re), .raddr(sv_raddr), .rdata(sv_rdata));
  svm_ram #(.DEPTH(N_SV + 1)) u_ay (.clk, .we(ay_we), .waddr(ay_waddr), .wdata,
                                    .re(ay_re), .raddr(ay_raddr), .rdata(ay_rdata));
  svm_ram #(.DEPTH(N_FEAT)) u_test (.clk, .we(test_we), .waddr(test_waddr), .wdata,
                                    .re(test_re), .raddr(test_raddr), .rdata(test_rdata));

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL: %s", msg);
  endtask

  // Reference: the pseudo code, one rounding per operation, same order.
  function automatic logic [31:0] ref_distance();
    logic [31:0] ac [N_FEAT];
    logic [31:0] d;
    foreach (ac[f]) ac[f] = 32'h0;
    for (int s = 0; s < N_SV; s++)
      for (int f = 0; f < N_FEAT; f++)
        ac[f] = fadd_ref(ac[f], fmul_ref(ay[s + 1], svs[s * N_FEAT + f]));
    d = 32'h0;
    for (int f = 0; f < N_FEAT; f++) d = fadd_ref(d, fmul_ref(ac[f], xt[f]));
    return fadd_ref(d, {~ay[0][31], ay[0][30:0]});
  endfunction

  task automatic run(input logic [31:0] thr, output logic [31:0] dist_o,
                     output logic signed [31:0] res_o, output int cycles);
    th = thr;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (phase != PH_LOAD) fail("core did not enter LOAD");
    // fill the arrays while the core waits in LOAD
    for (int i = 0; i < SV_WORDS; i++) begin
      sv_we = 1; sv_waddr = 5'(i); wdata = svs[i]; @(negedge clk);
    end
    sv_we = 0;
    for (int i = 0; i <= N_SV; i++) begin
      ay_we = 1; ay_waddr = 3'(i); wdata = ay[i]; @(negedge clk);
    end
    ay_we = 0;
    for (int i = 0; i < N_FEAT; i++) begin
      test_we = 1; test_waddr = 2'(i); wdata = xt[i]; @(negedge clk);
    end
    test_we = 0;
    load_done = 1; @(negedge clk); load_done = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
      if (cycles > 1000) break;
    end
    dist_o = distance;
    res_o  = result;
    checks++;
    if (!idle) fail("not idle at done");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d_ref, d_got;
    logic signed [31:0] r;
    int cyc, plus = 0, minus = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      foreach (svs[i]) svs[i] = rand_f(118, 130);
      foreach (ay[i])  ay[i]  = rand_f(118, 130);
      foreach (xt[i])  xt[i]  = rand_f(118, 130);
      if (n == 0) ay[2] = 32'h0;                  // a zero weight
      d_ref = ref_distance();
      // threshold equal to D - b: >= holds, class +1
      run(d_ref, d_got, r, cyc);
      checks++;
      if (d_got !== d_ref) fail($sformatf("run %0d: D-b %h expected %h", n, d_got, d_ref));
      checks++;
      if (r !== 32'sd1) fail($sformatf("run %0d: th = D-b gave %0d", n, r));
      checks++;
      if (cyc != COMPUTE_CYCLES) fail($sformatf("compute took %0d cycles, expected %0d", cyc, COMPUTE_CYCLES));
      // threshold one ulp above D - b in magnitude order: class flips
      run(f2r(d_ref) >= 0.0 ? d_ref + 1 : d_ref - 1, d_got, r, cyc);
      checks++;
      if (r !== -32'sd1) fail($sformatf("run %0d: th above D-b gave %0d", n, r));
      // the paper's sign function: th = 0
      run(32'h0, d_got, r, cyc);
      checks++;
      if (r !== ((f2r(d_ref) >= 0.0) ? 32'sd1 : -32'sd1)) fail($sformatf("run %0d: th = 0 gave %0d", n, r));
      if (r == 1) plus++; else minus++;
    end
    checks++;
    if (plus == 0 || minus == 0) fail("both classes were not produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
