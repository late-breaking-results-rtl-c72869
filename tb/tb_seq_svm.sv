// tb_seq_svm: end-to-end test of the sequential SVM at its default size.
//
// Runs 400 random samples (plus the all-zero and all-full-scale samples)
// through seq_svm with every parameter at its default and compares each
// predicted class with svm_ref_pkg. Checks that done comes N_CLASSES clock
// edges after the edge that accepted start and that busy lasts N_CLASSES
// cycles. Starts are given idle, back-to-back in the done cycle, and also
// while busy (must be ignored). Counts how often each mechanism happened:
// the voter replacing its stored class, the voter keeping it (both seen from
// the final class), a completed
// classification, an ignored start and a back-to-back start; any count that
// stays zero is a failure.
module tb_seq_svm;
  localparam int unsigned N  = svm_pkg::N_CLASSES_DEF;
  localparam int unsigned M  = svm_pkg::N_FEATURES_DEF;
  localparam int unsigned XB = svm_pkg::X_BITS_DEF;
  localparam int unsigned CB = svm_pkg::cnt_bits(N);
  localparam int          SAMPLES = 400;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          start = 1'b0;
  logic [XB-1:0] features [M];
  logic          busy, done;
  logic [CB-1:0] predicted_class;

  seq_svm dut (.clk, .rst_n, .start, .features, .busy, .done, .predicted_class);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_replace = 0, n_keep = 0, n_done = 0, n_ignored = 0, n_b2b = 0;
  int class_hist [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // Mechanism counters, sampled on every rising edge. The voter's choices are
  // seen at the ports: a final class other than 0 means the voter replaced
  // its stored class at least once in that classification, a final class
  // other than N_CLASSES-1 means it kept its stored class in the last cycle.
  always @(posedge clk) if (rst_n) begin
    if (done && predicted_class != '0) n_replace++;
    if (done && predicted_class != CB'(N - 1)) n_keep++;
    if (done) n_done++;
    if (start && busy) n_ignored++;
    if (start && done) n_b2b++;
  end

  int x [];

  // Present sample 'x' at the current negedge (the controller is idle or in
  // its done cycle), then follow the classification to its end.
  task automatic classify(input int idx, input bit poke);
    int edges, busy_cycles, expected;
    for (int i = 0; i < int'(M); i++) features[i] = XB'(x[i]);
    expected = svm_ref_pkg::ref_class(svm_pkg::SEED_DEF, N, M, svm_pkg::W_BITS_DEF,
                                      svm_pkg::B_BITS_DEF, x);
    start = 1'b1;
    #1 check(!busy, $sformatf("sample %0d accepted when idle", idx));
    @(negedge clk);
    start = 1'b0;
    edges = 1;
    busy_cycles = 0;
    // Scramble the inputs: the captured copy must be used.
    for (int i = 0; i < int'(M); i++) features[i] = XB'($urandom);
    while (!done && edges < 4 * int'(N)) begin
      if (busy) busy_cycles++;
      if (poke && edges == 1) start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      edges++;
    end
    edges--;
    check(done, $sformatf("sample %0d done", idx));
    check(edges == int'(N), $sformatf("sample %0d latency %0d edges", idx, edges));
    check(busy_cycles == int'(N), $sformatf("sample %0d busy %0d cycles", idx, busy_cycles));
    check(int'(predicted_class) == expected,
          $sformatf("sample %0d class %0d expected %0d", idx, predicted_class, expected));
    if (int'(predicted_class) < int'(N)) class_hist[predicted_class]++;
  endtask

  initial begin
    x = new[M];
    for (int i = 0; i < int'(M); i++) features[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < int'(M); i++) x[i] = 0;
    classify(-2, 1'b0);
    @(negedge clk);
    for (int i = 0; i < int'(M); i++) x[i] = (1 << XB) - 1;
    classify(-1, 1'b1);
    for (int t = 0; t < SAMPLES; t++) begin
      for (int i = 0; i < int'(M); i++) x[i] = int'($urandom_range(0, (1 << XB) - 1));
      // Every third sample starts in the done cycle of the previous one.
      if (t % 3 != 0) @(negedge clk);
      classify(t, t % 5 == 0);
    end
    @(negedge clk);
    check(!done && !busy, "idle at the end");
    for (int k = 0; k < int'(N); k++) $display("class %0d predicted %0d times", k, class_hist[k]);
    $display("classifications where the voter replaced %0d / kept %0d; done %0d; ignored starts %0d; back-to-back %0d",
             n_replace, n_keep, n_done, n_ignored, n_b2b);
    check(n_replace > 0, "voter replaced its class at least once");
    check(n_keep > 0, "voter kept its class at least once");
    check(n_done == SAMPLES + 2, "one done per classification");
    check(n_ignored > 0, "a start was ignored while busy");
    check(n_b2b > 0, "a back-to-back start happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
