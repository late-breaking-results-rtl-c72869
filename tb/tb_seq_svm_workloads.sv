// tb_seq_svm_workloads: the sequential SVM at the sizes of the five evaluated
// data sets.
//
// Feature and class counts of the UCI data sets: Cardio 21 x 3, Dermatology
// 34 x 6, PenDigits 16 x 10, RedWine 11 x 6, WhiteWine 11 x 7. Each is built
// as its own bespoke seq_svm with placeholder coefficients (trained models
// are not available) and checked for correct classes and an N_CLASSES-cycle
// latency; the latencies match the published latency x frequency products
// (3, 6, 10, 6 and 7 cycles).
module tb_seq_svm_workloads;
  logic fin [5];
  int   chk [5];
  int   fl  [5];

  svm_workload_runner #(.NAME("cardio"),      .N_CLASSES(3),  .N_FEATURES(21), .SEED(11)) u_cardio (.finished(fin[0]), .checks(chk[0]), .failures(fl[0]));
  svm_workload_runner #(.NAME("dermatology"), .N_CLASSES(6),  .N_FEATURES(34), .SEED(12)) u_derm   (.finished(fin[1]), .checks(chk[1]), .failures(fl[1]));
  svm_workload_runner #(.NAME("pendigits"),   .N_CLASSES(10), .N_FEATURES(16), .SEED(13)) u_pd     (.finished(fin[2]), .checks(chk[2]), .failures(fl[2]));
  svm_workload_runner #(.NAME("redwine"),     .N_CLASSES(6),  .N_FEATURES(11), .SEED(14)) u_rw     (.finished(fin[3]), .checks(chk[3]), .failures(fl[3]));
  svm_workload_runner #(.NAME("whitewine"),   .N_CLASSES(7),  .N_FEATURES(11), .SEED(15)) u_ww     (.finished(fin[4]), .checks(chk[4]), .failures(fl[4]));

  logic clk = 1'b0;
  always #5 clk = ~clk;

  task automatic report(input int extra_failures);
    int checks, failures;
    checks = 0;
    failures = extra_failures;
    for (int i = 0; i < 5; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    #1;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4]);
    report(0);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    report(1);
    $finish;
  end
endmodule
