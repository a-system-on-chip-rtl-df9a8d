// svm_ip_harness: one SVM IP build together with a host model, for workload
// tests at model sizes other than the default.
//
// Instantiates svm_hls_ip with the given N_SV and N_FEAT and plays the
// processor (AXI4-Lite) and the DMA engine (AXI4-Stream) around it. It loads
// a random model whose first N_REAL SVs have non-zero alpha*y (the rest are
// zero padding), classifies one random test vector twice (threshold 0, then
// threshold equal to D - b) and checks the distance bit for bit against the
// single-precision reference, the class, and the start-to-done cycle count
// for an unbroken stream. Reports its counts on the output ports and raises
// finished at the end; the enclosing testbench prints the result.
module svm_ip_harness #(
  parameter int N_SV   = 61,
  parameter int N_FEAT = 27,
  parameter int N_REAL = N_SV
) (
  output logic finished,
  output int   checks,
  output int   failures,
  output int   latency
);
  import fp_ref_pkg::*;
  import svm_pkg::*;

  localparam int SV_WORDS   = N_SV * N_FEAT;
  localparam int LOAD_WORDS = SV_WORDS + N_SV + 1 + N_FEAT;
  localparam int LATENCY    = LOAD_WORDS + SV_WORDS + 2 * N_FEAT + 12;

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

  svm_hls_ip #(.N_SV(N_SV), .N_FEAT(N_FEAT)) dut (.*);

  always #5 clk = ~clk;

  logic [31:0] svs [SV_WORDS];
  logic [31:0] ay  [N_SV + 1];
  logic [31:0] xt  [N_FEAT];

  int edges = 0, start_edge = 0, done_edge = 0;
  always @(negedge clk) begin
    edges++;
    if (s_axi_awvalid && s_axi_awready && s_axi_wvalid && s_axi_wready &&
        s_axi_awaddr == REG_CTRL && s_axi_wdata[0])
      start_edge = edges + 1;
    if (dut.ap_done) done_edge = edges;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL (N_SV=%0d): %s", N_SV, msg);
  endtask

  function automatic logic [31:0] ref_distance();
    logic [31:0] ac [N_FEAT];
    logic [31:0] d;
    foreach (ac[f]) ac[f] = 32'h0;
    for (int s = 0; s < N_REAL; s++)
      for (int f = 0; f < N_FEAT; f++)
        ac[f] = fadd_ref(ac[f], fmul_ref(ay[s + 1], svs[s * N_FEAT + f]));
    d = 32'h0;
    for (int f = 0; f < N_FEAT; f++) d = fadd_ref(d, fmul_ref(ac[f], xt[f]));
    return fadd_ref(d, {~ay[0][31], ay[0][30:0]});
  endfunction

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

  task automatic dma_send();
    int i = 0;
    while (i < LOAD_WORDS) begin
      if (i < SV_WORDS)                 s_axis_tdata = svs[i];
      else if (i < SV_WORDS + N_SV + 1) s_axis_tdata = ay[i - SV_WORDS];
      else                              s_axis_tdata = xt[i - SV_WORDS - N_SV - 1];
      s_axis_tvalid = 1;
      @(posedge clk);
      if (s_axis_tready) i++;
      @(negedge clk);
    end
    s_axis_tvalid = 0;
  endtask

  task automatic classify(input logic [31:0] th, input logic [31:0] d_ref);
    logic [31:0] r, dv;
    axi_write(REG_THRESHOLD, th);
    axi_write(REG_CTRL, 32'h1);
    dma_send();
    do axi_read(REG_CTRL, r); while (!r[1]);
    axi_read(REG_DISTANCE, dv);
    axi_read(REG_RETURN, r);
    checks++;
    if (dv !== d_ref) fail($sformatf("D-b %h expected %h", dv, d_ref));
    checks++;
    if (r !== ((f2r(d_ref) >= f2r(th)) ? 32'h1 : 32'hFFFF_FFFF)) fail($sformatf("class %h", r));
    latency = done_edge - start_edge;
    checks++;
    if (latency != LATENCY) fail($sformatf("%0d cycles, expected %0d", latency, LATENCY));
  endtask

  initial begin
    logic [31:0] d_ref;
    finished = 0; checks = 0; failures = 0; latency = 0;
    foreach (svs[i]) svs[i] = rand_f(118, 128);
    for (int i = 0; i <= N_SV; i++) ay[i] = (i <= N_REAL) ? rand_f(118, 128) : 32'h0;
    foreach (xt[i]) xt[i] = rand_f(118, 128);
    d_ref = ref_distance();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    classify(32'h0, d_ref);
    classify(d_ref, d_ref);
    finished = 1;
  end
endmodule
