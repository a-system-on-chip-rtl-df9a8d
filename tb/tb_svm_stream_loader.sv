// tb_svm_stream_loader: self-checking test of the AXI4-Stream loader.
// A small model (3 SVs of 4 features) is streamed three times: once with no
// gaps (the load must take exactly one cycle per word), once with random
// tvalid gaps, and once after words were offered while the loader was idle
// (they must be ignored). Every array write is checked against the word
// order SVs, b, alpha*y, test; done must pulse once after the last word.
module tb_svm_stream_loader;
  localparam int N_SV = 3, N_FEAT = 4;
  localparam int SV_WORDS = N_SV * N_FEAT, TOTAL = SV_WORDS + N_SV + 1 + N_FEAT;

  logic        clk = 0, rst_n = 0, start = 0;
  logic        busy, done;
  logic [31:0] s_axis_tdata = '0;
  logic        s_axis_tvalid = 0, s_axis_tready;
  logic [31:0] wdata;
  logic        sv_we, ay_we, test_we;
  logic [3:0]  sv_waddr;
  logic [1:0]  ay_waddr, test_waddr;

  int checks = 0, failures = 0;
  logic [31:0] words [TOTAL];
  int taken, dones;

  svm_stream_loader #(.N_SV(N_SV), .N_FEAT(N_FEAT)) dut (.*);

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL: %s", msg);
  endtask

  // Monitor: check each write against the expected word and array.
  always @(posedge clk) if (rst_n) begin
    if (done) dones++;
    if (sv_we || ay_we || test_we) begin
      checks++;
      if (taken >= TOTAL) fail("write past the end");
      else if (wdata !== words[taken]) fail($sformatf("word %0d data %h", taken, wdata));
      else if (taken < SV_WORDS) begin
        if (!sv_we || sv_waddr != 4'(taken)) fail($sformatf("word %0d not to SVs", taken));
      end else if (taken < SV_WORDS + N_SV + 1) begin
        if (!ay_we || ay_waddr != 2'(taken - SV_WORDS)) fail($sformatf("word %0d not to ay", taken));
      end else begin
        if (!test_we || test_waddr != 2'(taken - SV_WORDS - N_SV - 1)) fail($sformatf("word %0d not to test", taken));
      end
      taken++;
    end
  end

  task automatic run(input int gap_pct, output int cycles);
    int i;
    foreach (words[k]) words[k] = $urandom;
    taken = 0; dones = 0; cycles = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!s_axis_tready) fail("tready not high after start");
    i = 0;
    while (i < TOTAL) begin
      s_axis_tvalid = ($urandom_range(99) >= gap_pct);
      s_axis_tdata  = s_axis_tvalid ? words[i] : $urandom;
      @(posedge clk);
      cycles++;
      if (s_axis_tvalid && s_axis_tready) i++;
      @(negedge clk);
    end
    s_axis_tvalid = 0;
    @(negedge clk);
    checks++;
    if (dones != 1 || busy || s_axis_tready) fail("done/busy wrong after load");
    checks++;
    if (taken != TOTAL) fail($sformatf("%0d words written", taken));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, cyc);
    checks++;
    if (cyc != TOTAL) fail($sformatf("unbroken load took %0d cycles, expected %0d", cyc, TOTAL));
    run(40, cyc);
    // words offered while idle are not taken
    taken = 0;
    s_axis_tvalid = 1;
    repeat (5) begin
      @(negedge clk);
      checks++;
      if (s_axis_tready || busy) fail("ready while idle");
    end
    s_axis_tvalid = 0;
    checks++;
    if (taken != 0) fail("write while idle");
    run(20, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
