// tb_svm_axil_ctrl: self-checking test of the AXI4-Lite control bus.
// Plays the processor on the bus and the core on the other side. Checks the
// reset values, the threshold register (full and byte-strobe writes), the
// start request and its clearing when the core accepts it, the done flag and
// its clear-on-read, the return and distance registers, unmapped offsets, and
// that read data and write responses are held while the master stalls.
module tb_svm_axil_ctrl;
  import svm_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [5:0]  s_axi_awaddr = '0, s_axi_araddr = '0;
  logic        s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0;
  logic        s_axi_arvalid = 0, s_axi_rready = 0;
  logic [31:0] s_axi_wdata = '0;
  logic [3:0]  s_axi_wstrb = '0;
  logic        s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic [31:0] s_axi_rdata;
  logic        ap_start, ap_start_ack = 0, ap_done = 0, ap_idle = 1;
  logic signed [31:0] ap_return = -32'sd1;
  logic [31:0] distance = 32'h4049_0FDB, th;

  int checks = 0, failures = 0;

  svm_axil_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic axi_write(input logic [5:0] addr, input logic [31:0] data,
                           input logic [3:0] strb = 4'hF, input int bready_delay = 0);
    s_axi_awaddr = addr; s_axi_awvalid = 1;
    s_axi_wdata = data; s_axi_wstrb = strb; s_axi_wvalid = 1;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat (bready_delay) begin
      expect_eq(32'(s_axi_bvalid), 1, "bvalid held");
      @(negedge clk);
    end
    s_axi_bready = 1;
    do @(posedge clk); while (!s_axi_bvalid);
    expect_eq(32'(s_axi_bresp), 0, "bresp");
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(input logic [5:0] addr, output logic [31:0] data,
                          input int rready_delay = 0);
    logic [31:0] first;
    s_axi_araddr = addr; s_axi_arvalid = 1;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 0;
    first = s_axi_rdata;
    repeat (rready_delay) begin
      expect_eq(32'(s_axi_rvalid), 1, "rvalid held");
      expect_eq(s_axi_rdata, first, "rdata held");
      @(negedge clk);
    end
    s_axi_rready = 1;
    do @(posedge clk); while (!s_axi_rvalid);
    data = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    axi_read(REG_CTRL, d);          expect_eq(d, 32'h4, "CTRL after reset (idle)");
    axi_read(REG_THRESHOLD, d);     expect_eq(d, 32'h0, "th after reset");
    axi_write(REG_THRESHOLD, 32'hBF80_0000);
    expect_eq(th, 32'hBF80_0000, "th output");
    axi_write(REG_THRESHOLD, 32'h1122_3344, 4'b0101, 3);
    axi_read(REG_THRESHOLD, d, 2);  expect_eq(d, 32'hBF22_0044, "th byte strobes");
    axi_write(REG_THRESHOLD, 32'h3E80_0000);
    // start request
    axi_write(REG_CTRL, 32'h1);
    expect_eq(32'(ap_start), 1, "ap_start set");
    axi_read(REG_CTRL, d);          expect_eq(d, 32'h5, "CTRL start pending");
    ap_start_ack = 1; ap_idle = 0;
    @(negedge clk);
    ap_start_ack = 0;
    expect_eq(32'(ap_start), 0, "ap_start cleared by ack");
    axi_read(REG_CTRL, d);          expect_eq(d, 32'h0, "CTRL busy");
    // a write of 0 does not start
    axi_write(REG_CTRL, 32'h0);
    expect_eq(32'(ap_start), 0, "no start on 0");
    // done
    ap_return = 32'sd1; distance = 32'hC020_0000;
    ap_done = 1; ap_idle = 1;
    @(negedge clk);
    ap_done = 0;
    axi_read(REG_CTRL, d);          expect_eq(d, 32'h6, "CTRL done");
    axi_read(REG_CTRL, d);          expect_eq(d, 32'h4, "done cleared on read");
    axi_read(REG_RETURN, d);        expect_eq(d, 32'h1, "return +1");
    ap_return = -32'sd1;
    axi_read(REG_RETURN, d, 4);     expect_eq(d, 32'hFFFF_FFFF, "return -1");
    axi_read(REG_DISTANCE, d);      expect_eq(d, 32'hC020_0000, "distance");
    axi_read(6'h3C, d);             expect_eq(d, 32'h0, "unmapped read");
    axi_write(6'h3C, 32'hFFFF_FFFF);
    axi_read(REG_THRESHOLD, d);     expect_eq(d, 32'h3E80_0000, "th kept after unmapped write");
    expect_eq(32'(ap_start), 0, "no start from unmapped write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
