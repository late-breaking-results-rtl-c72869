// svm_workload_runner: drives one seq_svm sized for one data set.
//
// Instantiates seq_svm with N_CLASSES classes and N_FEATURES features (other
// parameters at their defaults, placeholder coefficients from SEED), runs
// SAMPLES random samples back to back and checks each predicted class against
// svm_ref_pkg and each latency against N_CLASSES cycles. Reports its counts
// on its outputs and raises finished when done.
module svm_workload_runner #(
  parameter string       NAME       = "cardio",
  parameter int unsigned N_CLASSES  = 3,
  parameter int unsigned N_FEATURES = 21,
  parameter int unsigned SEED       = 1,
  parameter int          SAMPLES    = 200
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned XB = svm_pkg::X_BITS_DEF;
  localparam int unsigned CB = svm_pkg::cnt_bits(N_CLASSES);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          start = 1'b0;
  logic [XB-1:0] features [N_FEATURES];
  logic          busy, done;
  logic [CB-1:0] predicted_class;

  seq_svm #(
    .N_CLASSES  (N_CLASSES),
    .N_FEATURES (N_FEATURES),
    .SEED       (SEED)
  ) dut (.clk, .rst_n, .start, .features, .busy, .done, .predicted_class);

  always #5 clk = ~clk;

  int n_replace = 0;
  int hist [N_CLASSES];

  // A final class other than 0 means the voter replaced its stored class.
  always @(posedge clk)
    if (rst_n && done && predicted_class != '0) n_replace++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: %s (t=%0t)", NAME, what, $time);
    end
  endtask

  initial begin
    int x [];
    int edges, expected;
    finished = 1'b0;
    checks = 0;
    failures = 0;
    x = new[N_FEATURES];
    for (int i = 0; i < int'(N_FEATURES); i++) features[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < SAMPLES; t++) begin
      for (int i = 0; i < int'(N_FEATURES); i++) begin
        x[i] = int'($urandom_range(0, (1 << XB) - 1));
        features[i] = XB'(x[i]);
      end
      expected = svm_ref_pkg::ref_class(SEED, N_CLASSES, N_FEATURES, svm_pkg::W_BITS_DEF,
                                        svm_pkg::B_BITS_DEF, x);
      start = 1'b1;
      #1 check(!busy, $sformatf("sample %0d accepted when idle", t));
      @(negedge clk);
      start = 1'b0;
      edges = 1;
      while (!done && edges < 4 * int'(N_CLASSES)) begin
        @(negedge clk);
        edges++;
      end
      // edges counts from the negedge where start was raised: done comes
      // N_CLASSES edges after the accepting edge, one more after that negedge.
      check(done && edges - 1 == int'(N_CLASSES),
            $sformatf("sample %0d latency %0d cycles", t, edges - 1));
      check(int'(predicted_class) == expected,
            $sformatf("sample %0d class %0d expected %0d", t, predicted_class, expected));
      if (int'(predicted_class) < int'(N_CLASSES)) hist[predicted_class]++;
    end
    check(n_replace > 0, "voter replaced its class at least once");
    $display("%s: %0d classes x %0d features, %0d samples, %0d cycles each; %0d classifications won by a class other than 0",
             NAME, N_CLASSES, N_FEATURES, SAMPLES, N_CLASSES, n_replace);
    finished = 1'b1;
  end
endmodule
