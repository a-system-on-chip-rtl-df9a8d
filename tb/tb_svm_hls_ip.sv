// tb_svm_hls_ip: end-to-end test of the SVM classifier IP at full size
// (248 support vectors of 27 features, the top's default parameters).
//
// The testbench plays the two parts of the system that are not in the IP:
// the processor on the AXI4-Lite control bus and the DMA engine on the
// AXI4-Stream. Each run follows the host program: write the threshold, set
// start, stream array_SVs, then b and alpha*y, then the test vector, poll the
// control register until done, read the class and the distance. Results are
// compared bit for bit with a reference that evaluates the same pseudo code
// in IEEE single precision (fp_ref_pkg).
//
// Runs: (1) an unbroken stream, where the start-to-done cycle count is
// checked against the formula below; (2) the same model with the threshold
// set to D - b and one step above it, so both classes appear; (3) a new
// model streamed with random gaps; (4) a 61-SV model (the size of the
// paper's small model) padded to 248 SVs with zero alpha*y, whose distance
// must equal that of the 61 SVs alone; (5) stream words offered before
// start, which the IP must hold off. Each of these mechanisms is counted and
// a mechanism that never occurred counts as a failure.
module tb_svm_hls_ip;
  import fp_ref_pkg::*;
  import svm_pkg::*;

  localparam int N_SV = 248, N_FEAT = 27;
  localparam int SV_WORDS   = N_SV * N_FEAT;
  localparam int LOAD_WORDS = SV_WORDS + N_SV + 1 + N_FEAT;
  // Rising edges from the one that takes the start write to the one that
  // raises done: core start (1), one word per edge, load_done seen (1), then
  // CLEAR, ACCUM + drain, DOT + drain, SUB_B (2), DECIDE (1), DONE (1).
  localparam int LATENCY = 1 + LOAD_WORDS + 1 + N_FEAT + (SV_WORDS + 3) + (N_FEAT + 3) + 4;

  logic clk = 0, rst_n = 0;
  logic [5:0]  s_axi_awaddr = '0, s_axi_araddr = '0;
  logic        s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0;
  logic        s_axi_arvalid = 0, s_axi_rready = 0;
  logic [31:0] s_axi_wdata = '0;
  logic [3:0]  s_axi_wstrb = '0;
  logic        s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic [31:0] s_axi_rdata;
  logic [31:0] s_axis_tdata = '0;
  logic        s_axis_tvalid = 0, s_axis_tready;

  svm_hls_ip dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_holdoff = 0, n_plus = 0, n_minus = 0, n_padded = 0, n_thresh = 0;
  // Cycle monitor, sampled at falling edges where every signal is settled.
  // edges = rising edges so far; a handshake seen at a falling edge is
  // taken at the next rising edge.
  int edges = 0, start_edge = 0, done_edge = 0;
  always @(negedge clk) begin
    edges++;
    if (s_axi_awvalid && s_axi_awready && s_axi_wvalid && s_axi_wready &&
        s_axi_awaddr == REG_CTRL && s_axi_wdata[0])
      start_edge = edges + 1;
    if (dut.ap_done) done_edge = edges;
  end

  // Model and test data, in stream order.
  logic [31:0] svs [SV_WORDS];
  logic [31:0] ay  [N_SV + 1];     // ay[0] = b
  logic [31:0] xt  [N_FEAT];

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL: %s", msg);
  endtask

  function automatic logic [31:0] ref_distance(input int n_used);
    logic [31:0] ac [N_FEAT];
    logic [31:0] d;
    foreach (ac[f]) ac[f] = 32'h0;
    for (int s = 0; s < n_used; s++)
      for (int f = 0; f < N_FEAT; f++)
        ac[f] = fadd_ref(ac[f], fmul_ref(ay[s + 1], svs[s * N_FEAT + f]));
    d = 32'h0;
    for (int f = 0; f < N_FEAT; f++) d = fadd_ref(d, fmul_ref(ac[f], xt[f]));
    return fadd_ref(d, {~ay[0][31], ay[0][30:0]});
  endfunction

  task automatic new_model(input int n_real);
    foreach (svs[i]) svs[i] = rand_f(118, 128);
    for (int i = 0; i <= N_SV; i++) ay[i] = (i <= n_real) ? rand_f(118, 128) : 32'h0;
    foreach (xt[i])  xt[i]  = rand_f(118, 128);
  endtask

  // --- processor side: AXI4-Lite master ---
  task automatic axi_write(input logic [5:0] addr, input logic [31:0] data);
    s_axi_awaddr = addr; s_axi_awvalid = 1;
    s_axi_wdata = data; s_axi_wstrb = 4'hF; s_axi_wvalid = 1;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 1;
    do @(posedge clk); while (!s_axi_bvalid);
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(input logic [5:0] addr, output logic [31:0] data);
    s_axi_araddr = addr; s_axi_arvalid = 1;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 0; s_axi_rready = 1;
    do @(posedge clk); while (!s_axi_rvalid);
    data = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  // --- DMA side: AXI4-Stream master sending the three arrays ---
  task automatic dma_send(input int gap_pct);
    int i = 0;
    logic [31:0] w;
    while (i < LOAD_WORDS) begin
      if (i < SV_WORDS)                 w = svs[i];
      else if (i < SV_WORDS + N_SV + 1) w = ay[i - SV_WORDS];
      else                              w = xt[i - SV_WORDS - N_SV - 1];
      s_axis_tvalid = ($urandom_range(99) >= gap_pct);
      s_axis_tdata  = s_axis_tvalid ? w : $urandom;
      @(posedge clk);
      if (s_axis_tvalid && s_axis_tready) i++;
      else if (!s_axis_tvalid) n_stall++;
      @(negedge clk);
    end
    s_axis_tvalid = 0;
  endtask


  // One classification: returns class, distance and start-to-done cycles.
  task automatic classify(input logic [31:0] th, input int gap_pct,
                          output logic signed [31:0] cls, output logic [31:0] dv,
                          output int lat);
    logic [31:0] ctrl;
    axi_write(REG_THRESHOLD, th);
    axi_write(REG_CTRL, 32'h1);
    dma_send(gap_pct);
    do axi_read(REG_CTRL, ctrl); while (!ctrl[1]);
    axi_read(REG_CTRL, ctrl);
    checks++;
    if (ctrl[1]) fail("done not cleared by reading CTRL");
    axi_read(REG_RETURN, ctrl);
    cls = ctrl;
    axi_read(REG_DISTANCE, dv);
    lat = done_edge - start_edge;
    if (cls == 32'sd1) n_plus++;
    else if (cls == -32'sd1) n_minus++;
  endtask

  task automatic check_run(input logic [31:0] th, input logic [31:0] d_ref,
                           input logic signed [31:0] cls, input logic [31:0] dv, input string tag);
    logic signed [31:0] exp_cls;
    exp_cls = (f2r(d_ref) >= f2r(th)) ? 32'sd1 : -32'sd1;
    checks++;
    if (dv !== d_ref) fail($sformatf("%s: D-b %h expected %h", tag, dv, d_ref));
    checks++;
    if (cls !== exp_cls) fail($sformatf("%s: class %0d expected %0d", tag, cls, exp_cls));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [31:0] cls;
    logic [31:0] dv, d_ref, th;
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // (5) words offered before start are held off
    s_axis_tvalid = 1; s_axis_tdata = 32'hDEAD_BEEF;
    repeat (4) begin
      @(posedge clk);
      if (!s_axis_tready) n_holdoff++;
      @(negedge clk);
    end
    s_axis_tvalid = 0;

    // (1) full-size model, unbroken stream, th = 0 (plain sign function)
    new_model(N_SV);
    d_ref = ref_distance(N_SV);
    classify(32'h0, 0, cls, dv, lat);
    check_run(32'h0, d_ref, cls, dv, "run 1");
    checks++;
    if (lat != LATENCY) fail($sformatf("start to done %0d cycles, expected %0d", lat, LATENCY));
    $display("run 1: D-b = %h, class %0d, %0d cycles start to done", dv, cls, lat);

    // (2) threshold at D - b and just above it
    th = d_ref;
    classify(th, 0, cls, dv, lat);
    check_run(th, d_ref, cls, dv, "run 2a");
    th = (f2r(d_ref) >= 0.0) ? d_ref + 1 : d_ref - 1;
    classify(th, 0, cls, dv, lat);
    check_run(th, d_ref, cls, dv, "run 2b");
    n_thresh++;

    // (3) another model, stream with gaps
    new_model(N_SV);
    d_ref = ref_distance(N_SV);
    classify(32'h0, 30, cls, dv, lat);
    check_run(32'h0, d_ref, cls, dv, "run 3");
    checks++;
    if (lat <= LATENCY) fail("gapped stream did not take longer");

    // (4) 61-SV model padded with zero weights
    new_model(61);
    d_ref = ref_distance(61);
    classify(32'h0, 0, cls, dv, lat);
    check_run(32'h0, d_ref, cls, dv, "run 4 (61 SVs padded)");
    n_padded++;

    $display("mechanisms: stream gaps %0d, held-off words %0d, class +1 %0d, class -1 %0d, threshold runs %0d, padded runs %0d",
             n_stall, n_holdoff, n_plus, n_minus, n_thresh, n_padded);
    checks++; if (n_stall == 0)   fail("no stream gap occurred");
    checks++; if (n_holdoff == 0) fail("no word was held off");
    checks++; if (n_plus == 0)    fail("class +1 never returned");
    checks++; if (n_minus == 0)   fail("class -1 never returned");
    checks++; if (n_thresh == 0)  fail("threshold never exercised");
    checks++; if (n_padded == 0)  fail("padded model never run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
