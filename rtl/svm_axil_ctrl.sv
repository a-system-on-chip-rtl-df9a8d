// svm_axil_ctrl: AXI4-Lite control bus of the SVM classifier IP.
//
// The processor uses this slave to start the IP, poll it until it has
// finished and read the class it returns, which is how the reference software
// drives it (set up the IP, run it, stream the data, loop until done, read
// the return value). Registers (byte offsets, 32-bit):
//   0x00 CTRL      bit0 start: writing 1 requests a run; reads 1 until the
//                       core accepts the request
//                  bit1 done:  set when a run finishes, cleared by reading CTRL
//                  bit2 idle:  core is idle
//   0x10 RETURN    class of the last run: +1 (melanoma) or -1
//   0x18 THRESHOLD th, IEEE-754 single, read/write, resets to +0.0
//   0x20 DISTANCE  D - b of the last run, IEEE-754 single, read only
// The paper names the control bus and the return value only; this map, the
// threshold register (the paper's th comes from a validation phase but is not
// said to be streamed) and the distance register (the paper checks D against
// the software during verification) are this design's choices. There is no
// interrupt; software polls, as in the paper's program.
//
// Bus timing: one transaction of each kind at a time. A write is accepted in
// the cycle both AW and W are valid and no response is pending, and the
// response (always OKAY) follows in the next cycle. A read address is
// accepted when no read data is pending, and the data follows in the next
// cycle. Writes to unmapped offsets are ignored; unmapped reads return 0.
module svm_axil_ctrl
  import svm_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // AXI4-Lite slave
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
  // core side
  output logic                   ap_start,
  input  logic                   ap_start_ack,
  input  logic                   ap_done,
  input  logic                   ap_idle,
  input  logic signed [31:0]     ap_return,
  input  fp32_t                  distance,
  output fp32_t                  th
);

  logic done_q;
  logic wr_take, rd_take;
  logic [CTRL_ADDR_W-1:0] waddr_w, raddr_w;

  assign waddr_w       = {s_axi_awaddr[CTRL_ADDR_W-1:2], 2'b00};
  assign raddr_w       = {s_axi_araddr[CTRL_ADDR_W-1:2], 2'b00};
  assign wr_take       = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_take;
  assign s_axi_wready  = wr_take;
  assign s_axi_bresp   = AXI_RESP_OKAY;
  assign rd_take       = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = rd_take;
  assign s_axi_rresp   = AXI_RESP_OKAY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap_start     <= 1'b0;
      done_q       <= 1'b0;
      th           <= FP32_POS_ZERO;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      // Write channel.
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (ap_start_ack) ap_start <= 1'b0;
      if (wr_take) begin
        s_axi_bvalid <= 1'b1;
        if (waddr_w == REG_CTRL && s_axi_wstrb[0] && s_axi_wdata[0])
          ap_start <= 1'b1;
        if (waddr_w == REG_THRESHOLD) begin
          for (int i = 0; i < 4; i++)
            if (s_axi_wstrb[i]) th[8*i +: 8] <= s_axi_wdata[8*i +: 8];
        end
      end

      // Read channel; reading CTRL clears done unless a run ends right now.
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_take) begin
        s_axi_rvalid <= 1'b1;
        unique case (raddr_w)
          REG_CTRL:      s_axi_rdata <= {29'd0, ap_idle, done_q, ap_start};
          REG_RETURN:    s_axi_rdata <= ap_return;
          REG_THRESHOLD: s_axi_rdata <= th;
          REG_DISTANCE:  s_axi_rdata <= distance;
          default:       s_axi_rdata <= '0;
        endcase
      end
      if (ap_done)                                    done_q <= 1'b1;
      else if (rd_take && raddr_w == REG_CTRL)        done_q <= 1'b0;
    end
  end

  // AXI rule: a valid response is held, unchanged, until it is accepted.
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);

endmodule
