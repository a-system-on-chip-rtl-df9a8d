// svm_hls_ip: linear-kernel SVM classifier IP for melanoma detection.
//
// The IP classifies one feature vector (27 colour features of a skin-lesion
// image in the melanoma application) with a trained binary SVM:
//     F(x) = +1 (melanoma)  if sum_i alpha_i*y_i*(x_i . x) - b >= th
//            -1 (benign)    otherwise
// It sits in the programmable logic of a Zynq-7000 device. The ARM processor
// starts it through the AXI4-Lite control bus; a DMA engine reads the model and
// the test vector from processor memory and streams them in over a 32-bit
// AXI4-Stream; the processor then polls the control bus for done and reads the
// class. The DMA, the AXI interconnect, the timer and the processor are vendor
// parts outside this module; their connections are the ports below.
//
// Inside: svm_axil_ctrl (control bus), svm_stream_loader (stream to arrays),
// three svm_ram arrays (array_SVs N_SV*N_FEAT words, array_ay N_SV+1 words
// with b first, array_test N_FEAT words) and svm_core (array_AC, the shared
// float multiplier and adder, and the sequencer for Eqs. 2-4). The defaults,
// 248 support vectors of 27 features, are the paper's Model 1, the model it
// names as the one tuned for melanoma detection; a model of another size needs
// the IP rebuilt with other parameters, as in the paper. A model with fewer
// SVs can also run by padding it with SVs whose alpha*y is zero.
//
// Timing: a run is a start write, then LOAD_WORDS = N_SV*N_FEAT + N_SV + 1 +
// N_FEAT stream words (one per cycle when the stream never stalls), then
// computation. With an unbroken stream the core's done rises
// LOAD_WORDS + N_SV*N_FEAT + 2*N_FEAT + 12 cycles after the start write is
// accepted: 13,734 cycles at the defaults, against 14,138 that the paper's
// synthesis report gives for its pipelined Model 1 IP. Single clock,
// active-low asynchronous reset.
module svm_hls_ip
  import svm_pkg::*;
#(
  parameter int unsigned N_SV   = 248,
  parameter int unsigned N_FEAT = 27
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // AXI4-Lite control bus (from the AXI interconnect)
  input  logic [CTRL_ADDR_W-1:0] s_axi_awaddr,
  input  logic                   s_axi_awvalid,
  output logic                   s_axi_awready,
  input  logic [31:0]            s_axi_wdata,
  input  logic [3:0]             s_axi_wstrb,
  input  logic                   s_axi_wvalid,
  output logic                   s_axi_wready,
  output logic [1:0]             s_axi_bresp,
  output logic                   s_axi_bvalid,
  input  logic                   s_axi_bready,
  input  logic [CTRL_ADDR_W-1:0] s_axi_araddr,
  input  logic                   s_axi_arvalid,
  output logic                   s_axi_arready,
  output logic [31:0]            s_axi_rdata,
  output logic [1:0]             s_axi_rresp,
  output logic                   s_axi_rvalid,
  input  logic                   s_axi_rready,
  // AXI4-Stream data bus (from the DMA)
  input  logic [31:0]            s_axis_tdata,
  input  logic                   s_axis_tvalid,
  output logic                   s_axis_tready
);

  localparam int unsigned SV_WORDS = N_SV * N_FEAT;
  localparam int unsigned SV_AW    = (SV_WORDS > 1) ? $clog2(SV_WORDS) : 1;
  localparam int unsigned AY_AW    = $clog2(N_SV + 1);
  localparam int unsigned T_AW     = (N_FEAT > 1) ? $clog2(N_FEAT) : 1;

  logic               ap_start, ap_start_ack, ap_done, ap_idle;
  logic signed [31:0] ap_return;
  fp32_t              distance, th;
  phase_e             phase;
  logic               load_start, load_done, load_busy;

  fp32_t              wdata;
  logic               sv_we, ay_we, test_we;
  logic [SV_AW-1:0]   sv_waddr, sv_raddr;
  logic [AY_AW-1:0]   ay_waddr, ay_raddr;
  logic [T_AW-1:0]    test_waddr, test_raddr;
  logic               sv_re, ay_re, test_re;
  fp32_t              sv_rdata, ay_rdata, test_rdata;

  svm_axil_ctrl u_ctrl (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .ap_start, .ap_start_ack, .ap_done, .ap_idle, .ap_return,
    .distance, .th
  );

  svm_stream_loader #(.N_SV(N_SV), .N_FEAT(N_FEAT)) u_loader (
    .clk, .rst_n,
    .start (load_start),
    .busy  (load_busy),
    .done  (load_done),
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tready,
    .wdata, .sv_we, .sv_waddr, .ay_we, .ay_waddr, .test_we, .test_waddr
  );

  svm_ram #(.DEPTH(SV_WORDS), .WIDTH(32)) u_array_svs (
    .clk, .we(sv_we), .waddr(sv_waddr), .wdata,
    .re(sv_re), .raddr(sv_raddr), .rdata(sv_rdata)
  );

  svm_ram #(.DEPTH(N_SV + 1), .WIDTH(32)) u_array_ay (
    .clk, .we(ay_we), .waddr(ay_waddr), .wdata,
    .re(ay_re), .raddr(ay_raddr), .rdata(ay_rdata)
  );

  svm_ram #(.DEPTH(N_FEAT), .WIDTH(32)) u_array_test (
    .clk, .we(test_we), .waddr(test_waddr), .wdata,
    .re(test_re), .raddr(test_raddr), .rdata(test_rdata)
  );

  svm_core #(.N_SV(N_SV), .N_FEAT(N_FEAT)) u_core (
    .clk, .rst_n,
    .start     (ap_start),
    .start_ack (ap_start_ack),
    .idle      (ap_idle),
    .done      (ap_done),
    .th,
    .result    (ap_return),
    .distance,
    .phase,
    .load_start,
    .load_done,
    .sv_re, .sv_raddr, .sv_rdata,
    .ay_re, .ay_raddr, .ay_rdata,
    .test_re, .test_raddr, .test_rdata
  );

  // The loader only runs while the core waits for it.
  a_load_in_phase: assert property (@(posedge clk) disable iff (!rst_n)
    load_busy |-> phase == PH_LOAD);

endmodule
