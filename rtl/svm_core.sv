// svm_core: controller and pipelined floating-point datapath of the SVM IP.
//
// It evaluates the linear-kernel decision function
//     F(x) = sign( sum_i alpha_i*y_i*(x_i . x) - b )
// rearranged into three steps:
//     AC = sum_i (alpha_i*y_i) * x_i     (Eq. 2, a vector of N_FEAT floats)
//     D  = AC . x                        (Eq. 3)
//     F  = +1 if D - b >= th, else -1    (Eq. 4)
// The phases follow the pseudo code: LOAD (the stream loader fills the
// arrays), CLEAR (array_AC := 0), ACCUM (Eq. 2), DOT (Eq. 3), SUB_B, DECIDE,
// DONE. Sums are formed in exactly the order of the pseudo-code loops, so the
// result is bit-identical to the sequential C code in IEEE single precision.
//
// One multiplier (fp32_mul) and one adder (fp32_add) are shared by all phases,
// as in the paper's low-area "pipeline inner loops" design (its 5 DSP blocks
// are one float multiplier plus one float adder). The inner loops are
// pipelined with an initiation interval of one:
//   stage 0  issue array read addresses (sv, f)
//   stage 1  registered RAM data -> multiply -> product register
//   stage 2  add product into AC[f] (ACCUM) or into D (DOT)
// In ACCUM, AC[f] is read and written in the same stage 2 cycle and the next
// read of the same element comes N_FEAT cycles later, so there is no
// read-after-write hazard. In DOT, D is updated every cycle by the
// single-cycle adder, so the loop-carried sum does not stall either. The
// one-cycle adder and multiplier are this design's choice; a faster clock
// would split them into more stages.
//
// Cycle counts: from the cycle load_done pulses to the cycle done pulses,
// N_SV*N_FEAT + 2*N_FEAT + 11 cycles (LOAD exit 1, CLEAR N_FEAT, ACCUM
// N_SV*N_FEAT + 3 with the pipeline drain, DOT N_FEAT + 3, SUB_B 2, DECIDE 1,
// DONE 1). The load before it takes one cycle per stream word.
//
// Interface: start is sampled in IDLE (idle high); start_ack pulses when it is
// taken. done pulses for one cycle in DONE; result (+1/-1) and distance (D - b)
// then hold until the next run finishes. th is read in the DECIDE cycle.
module svm_core
  import svm_pkg::*;
#(
  parameter int unsigned N_SV   = 248,
  parameter int unsigned N_FEAT = 27,
  localparam int unsigned SV_WORDS = N_SV * N_FEAT,
  localparam int unsigned SV_AW    = (SV_WORDS > 1) ? $clog2(SV_WORDS) : 1,
  localparam int unsigned AY_AW    = $clog2(N_SV + 1),
  localparam int unsigned T_AW     = (N_FEAT > 1) ? $clog2(N_FEAT) : 1,
  localparam int unsigned SVC_W    = $clog2(N_SV + 1),
  localparam int unsigned FC_W     = $clog2(N_FEAT + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  output logic              start_ack,
  output logic              idle,
  output logic              done,
  input  fp32_t             th,
  output logic signed [31:0] result,
  output fp32_t             distance,
  output phase_e            phase,
  // stream loader handshake
  output logic              load_start,
  input  logic              load_done,
  // array read ports (registered data, one cycle after re)
  output logic              sv_re,
  output logic [SV_AW-1:0]  sv_raddr,
  input  fp32_t             sv_rdata,
  output logic              ay_re,
  output logic [AY_AW-1:0]  ay_raddr,
  input  fp32_t             ay_rdata,
  output logic              test_re,
  output logic [T_AW-1:0]   test_raddr,
  input  fp32_t             test_rdata
);

  // array_AC: N_FEAT accumulators, read asynchronously by the datapath.
  fp32_t ac [N_FEAT];

  logic [SVC_W-1:0] sv_cnt;      // SV index of the issue stage
  logic [FC_W-1:0]  f_cnt;       // feature index of the issue stage
  logic [SV_AW-1:0] lin_addr;    // sv_cnt*N_FEAT + f_cnt
  logic             issuing;     // issue stage active
  logic             s1_v, s2_v;  // pipeline valid bits
  logic [FC_W-1:0]  s1_f, s2_f;  // feature index carried down the pipe
  fp32_t            prod_q;      // stage-2 product register
  fp32_t            d_acc;       // running D
  logic             b_pending;   // SUB_B: b read issued, data next cycle

  fp32_t mul_a, mul_b, mul_p;
  fp32_t add_a, add_b, add_s;
  logic  dec_ge;
  logic signed [31:0] dec_label;

  fp32_mul u_mul (.a(mul_a), .b(mul_b), .p(mul_p));
  fp32_add u_add (.a(add_a), .b(add_b), .s(add_s));
  svm_decide u_dec (.distance(distance), .th(th), .ge(dec_ge), .label(dec_label));

  assign idle       = (phase == PH_IDLE);
  assign start_ack  = idle && start;
  assign load_start = start_ack;

  // Last element of the issue loops.
  logic last_f, last_sv;
  assign last_f  = (f_cnt == FC_W'(N_FEAT - 1));
  assign last_sv = (sv_cnt == SVC_W'(N_SV - 1));

  // Read ports and shared operator inputs.
  always_comb begin
    sv_re      = (phase == PH_ACCUM) && issuing;
    sv_raddr   = lin_addr;
    ay_re      = ((phase == PH_ACCUM) && issuing) || ((phase == PH_SUB_B) && !b_pending);
    ay_raddr   = (phase == PH_SUB_B) ? '0 : AY_AW'(sv_cnt + 1'b1);
    test_re    = (phase == PH_DOT) && issuing;
    test_raddr = T_AW'(f_cnt);

    if (phase == PH_DOT) begin
      mul_a = ac[s1_f];
      mul_b = test_rdata;
    end else begin
      mul_a = sv_rdata;
      mul_b = ay_rdata;
    end

    if (phase == PH_ACCUM) begin
      add_a = ac[s2_f];
      add_b = prod_q;
    end else if (phase == PH_SUB_B) begin
      add_a = d_acc;
      add_b = {~ay_rdata[31], ay_rdata[30:0]};   // -b
    end else begin
      add_a = d_acc;
      add_b = prod_q;
    end
  end

  // array_AC write port: zeroed in CLEAR, accumulated in ACCUM stage 2.
  logic            ac_we;
  logic [FC_W-1:0] ac_waddr;
  fp32_t           ac_wdata;

  always_comb begin
    ac_we    = 1'b0;
    ac_waddr = s2_f;
    ac_wdata = add_s;
    if (phase == PH_CLEAR) begin
      ac_we    = 1'b1;
      ac_waddr = f_cnt;
      ac_wdata = FP32_POS_ZERO;
    end else if (phase == PH_ACCUM && s2_v) begin
      ac_we    = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (ac_we) ac[ac_waddr] <= ac_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PH_IDLE;
      done      <= 1'b0;
      result    <= CLASS_NON_MELANOMA;
      distance      <= FP32_POS_ZERO;
      sv_cnt    <= '0;
      f_cnt     <= '0;
      lin_addr  <= '0;
      issuing   <= 1'b0;
      s1_v      <= 1'b0;
      s2_v      <= 1'b0;
      s1_f      <= '0;
      s2_f      <= '0;
      prod_q    <= FP32_POS_ZERO;
      d_acc     <= FP32_POS_ZERO;
      b_pending <= 1'b0;
    end else begin
      done <= 1'b0;

      // Stage 1 -> 2: multiply the registered operands.
      s2_v   <= s1_v;
      s2_f   <= s1_f;
      prod_q <= mul_p;
      // Stage 0 -> 1.
      s1_v   <= issuing && ((phase == PH_ACCUM) || (phase == PH_DOT));
      s1_f   <= f_cnt;

      unique case (phase)
        PH_IDLE: begin
          if (start) phase <= PH_LOAD;
        end

        PH_LOAD: begin
          if (load_done) begin
            phase <= PH_CLEAR;
            f_cnt <= '0;
          end
        end

        PH_CLEAR: begin
          if (last_f) begin
            phase    <= PH_ACCUM;
            f_cnt    <= '0;
            sv_cnt   <= '0;
            lin_addr <= '0;
            issuing  <= 1'b1;
          end else begin
            f_cnt <= f_cnt + 1'b1;
          end
        end

        PH_ACCUM: begin
          if (issuing) begin
            lin_addr <= lin_addr + 1'b1;
            if (last_f) begin
              f_cnt <= '0;
              if (last_sv) issuing <= 1'b0;
              else         sv_cnt  <= sv_cnt + 1'b1;
            end else begin
              f_cnt <= f_cnt + 1'b1;
            end
          end else if (!s1_v && !s2_v) begin
            // Pipeline drained: start the dot product.
            phase   <= PH_DOT;
            f_cnt   <= '0;
            issuing <= 1'b1;
            d_acc   <= FP32_POS_ZERO;
          end
        end

        PH_DOT: begin
          if (s2_v) d_acc <= add_s;
          if (issuing) begin
            if (last_f) issuing <= 1'b0;
            else        f_cnt   <= f_cnt + 1'b1;
          end else if (!s1_v && !s2_v) begin
            phase     <= PH_SUB_B;
            b_pending <= 1'b0;
          end
        end

        PH_SUB_B: begin
          if (!b_pending) begin
            b_pending <= 1'b1;          // array_ay[0] read this cycle
          end else begin
            distance      <= add_s;         // D - b
            b_pending <= 1'b0;
            phase     <= PH_DECIDE;
          end
        end

        PH_DECIDE: begin
          result <= dec_label;
          phase  <= PH_DONE;
        end

        PH_DONE: begin
          done  <= 1'b1;
          phase <= PH_IDLE;
        end

        default: phase <= PH_IDLE;
      endcase
    end
  end

  // The issue stage only runs in the two pipelined loops.
  a_issue_phase: assert property (@(posedge clk) disable iff (!rst_n)
    issuing |-> (phase == PH_ACCUM || phase == PH_DOT));
  // No array is read while the loader may be writing it.
  a_no_read_in_load: assert property (@(posedge clk) disable iff (!rst_n)
    (phase == PH_LOAD) |-> !(sv_re || ay_re || test_re));

endmodule
