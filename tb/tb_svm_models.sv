// tb_svm_models: workload test for the three melanoma models of the paper.
//
// Each model size is its own build of the IP, as in the paper: Model 1 with
// 248 SVs, Model 2 with 346 SVs and the small Model S with 61 SVs, all with 27
// features. A fourth instance runs Model S on the 248-SV build by padding it
// with zero-weight SVs. The trained models themselves are not published, so
// each instance classifies random data of the model's size and checks the
// result bit for bit against the single-precision reference and the cycle
// count against the formula; the cycle counts are printed for comparison
// with the synthesis latencies the paper reports.
module tb_svm_models;
  logic fin [4];
  int   chk [4], fl [4], lat [4];

  svm_ip_harness #(.N_SV(248), .N_FEAT(27))              m1  (.finished(fin[0]), .checks(chk[0]), .failures(fl[0]), .latency(lat[0]));
  svm_ip_harness #(.N_SV(346), .N_FEAT(27))              m2  (.finished(fin[1]), .checks(chk[1]), .failures(fl[1]), .latency(lat[1]));
  svm_ip_harness #(.N_SV(61),  .N_FEAT(27))              ms  (.finished(fin[2]), .checks(chk[2]), .failures(fl[2]), .latency(lat[2]));
  svm_ip_harness #(.N_SV(248), .N_FEAT(27), .N_REAL(61)) msp (.finished(fin[3]), .checks(chk[3]), .failures(fl[3]), .latency(lat[3]));

  int checks, failures;

  initial begin
    #2_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", chk.sum() + 1, fl.sum() + 1);
    $finish;
  end

  initial begin
    #1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    checks   = chk.sum();
    failures = fl.sum();
    $display("Model 1 (248 SVs): %0d cycles start to done", lat[0]);
    $display("Model 2 (346 SVs): %0d cycles start to done", lat[1]);
    $display("Model S (61 SVs):  %0d cycles start to done", lat[2]);
    $display("Model S padded to 248 SVs: %0d cycles start to done", lat[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
