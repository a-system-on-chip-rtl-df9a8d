// svm_stream_loader: AXI4-Stream input of the classifier IP.
//
// Fills the three operand arrays from one 32-bit AXI4-Stream, in the order of
// the load loops of the pseudo code:
//   1. N_SV*N_FEAT words: the support vectors, SV 0 features 0..N_FEAT-1,
//      then SV 1, ... -> array_SVs[sv*N_FEAT + f]
//   2. 1 word: b                                     -> array_ay[0]
//   3. N_SV words: alpha_i*y_i for each SV           -> array_ay[1..N_SV]
//   4. N_FEAT words: the test instance               -> array_test[0..N_FEAT-1]
// In the reference software these are three DMA transfers (SVs, then the
// alpha*y file with b first, then the test data); the loader sees one
// continuous word sequence and counts it, so TLAST is not needed and not used.
// Each word is already an IEEE-754 single (the "convert to float" step of the
// pseudo code is a reinterpretation of the 32 bits, so no logic is needed).
//
// Timing: after a one-cycle start pulse, tready is high until the last word is
// accepted; one word is taken in each cycle where tvalid and tready are both
// high, so an unbroken stream loads in exactly TOTAL cycles. done pulses in the
// cycle after the last word has been accepted (and written). The word goes to
// the arrays unregistered (wdata is tdata), so the write lands at the same
// clock edge that accepts the word. A start that arrives while a load is in
// progress is ignored; the core only issues one from its idle state.
module svm_stream_loader
  import svm_pkg::*;
#(
  parameter int unsigned N_SV   = 248,
  parameter int unsigned N_FEAT = 27,
  localparam int unsigned SV_WORDS = N_SV * N_FEAT,
  localparam int unsigned AY_WORDS = N_SV + 1,
  localparam int unsigned TOTAL    = SV_WORDS + AY_WORDS + N_FEAT,
  localparam int unsigned SV_AW    = (SV_WORDS > 1) ? $clog2(SV_WORDS) : 1,
  localparam int unsigned AY_AW    = $clog2(AY_WORDS),
  localparam int unsigned T_AW     = (N_FEAT > 1) ? $clog2(N_FEAT) : 1,
  localparam int unsigned CNT_W    = $clog2(TOTAL + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             done,
  // AXI4-Stream slave
  input  fp32_t            s_axis_tdata,
  input  logic             s_axis_tvalid,
  output logic             s_axis_tready,
  // array write ports (shared data)
  output fp32_t            wdata,
  output logic             sv_we,
  output logic [SV_AW-1:0] sv_waddr,
  output logic             ay_we,
  output logic [AY_AW-1:0] ay_waddr,
  output logic             test_we,
  output logic [T_AW-1:0]  test_waddr
);

  logic [CNT_W-1:0] cnt;
  logic             take;

  assign s_axis_tready = busy;
  assign take          = s_axis_tvalid && s_axis_tready;
  assign wdata         = s_axis_tdata;

  always_comb begin
    sv_we      = 1'b0;
    ay_we      = 1'b0;
    test_we    = 1'b0;
    sv_waddr   = SV_AW'(cnt);
    ay_waddr   = AY_AW'(cnt - CNT_W'(SV_WORDS));
    test_waddr = T_AW'(cnt - CNT_W'(SV_WORDS + AY_WORDS));
    if (take) begin
      if (cnt < CNT_W'(SV_WORDS))                 sv_we   = 1'b1;
      else if (cnt < CNT_W'(SV_WORDS + AY_WORDS)) ay_we   = 1'b1;
      else                                        test_we = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          cnt  <= '0;
        end
      end else if (take) begin
        if (cnt == CNT_W'(TOTAL - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

  // Exactly one array is written per accepted word, and only while loading.
  a_one_write: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({sv_we, ay_we, test_we}) && ((sv_we || ay_we || test_we) == take));
  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> cnt < CNT_W'(TOTAL));

endmodule
