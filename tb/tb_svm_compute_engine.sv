// tb_svm_compute_engine: self-checking test of the multiply-add engine.
//
// Default sizes (21 features, 4-bit features, 8-bit weights, 12-bit bias).
// Random operands and the corner cases (all features at full scale with all
// weights at the most negative or most positive value and the bias at its
// extremes) are compared with a sum computed in 32-bit integers.
module tb_svm_compute_engine;
  localparam int unsigned M  = svm_pkg::N_FEATURES_DEF;
  localparam int unsigned XB = svm_pkg::X_BITS_DEF;
  localparam int unsigned WB = svm_pkg::W_BITS_DEF;
  localparam int unsigned BB = svm_pkg::B_BITS_DEF;
  localparam int unsigned AB = svm_pkg::acc_bits(XB, WB, BB, M);

  logic        [XB-1:0] x      [M];
  logic signed [WB-1:0] weight [M];
  logic signed [BB-1:0] bias;
  logic signed [AB-1:0] score;

  svm_compute_engine dut (.x, .weight, .bias, .score);

  int checks = 0;
  int failures = 0;

  task automatic apply_and_check(input string what);
    int expected;
    expected = int'(bias);
    for (int i = 0; i < int'(M); i++) expected += int'(weight[i]) * int'(x[i]);
    #1;
    checks++;
    if (int'(score) != expected) begin
      failures++;
      $display("FAIL: %s: score %0d expected %0d", what, score, expected);
    end
  endtask

  initial begin
    // Corner cases.
    for (int c = 0; c < 4; c++) begin
      for (int i = 0; i < int'(M); i++) begin
        x[i]      = '1;
        weight[i] = (c[0]) ? {1'b0, {(WB-1){1'b1}}} : {1'b1, {(WB-1){1'b0}}};
      end
      bias = (c[1]) ? {1'b0, {(BB-1){1'b1}}} : {1'b1, {(BB-1){1'b0}}};
      apply_and_check($sformatf("corner %0d", c));
    end
    // One non-zero product at a time: each multiplier on its own.
    for (int j = 0; j < int'(M); j++) begin
      for (int i = 0; i < int'(M); i++) begin
        x[i]      = (i == j) ? XB'($urandom_range(1, (1 << XB) - 1)) : '0;
        weight[i] = WB'($urandom);
      end
      bias = '0;
      apply_and_check($sformatf("single product %0d", j));
    end
    // Random operands.
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < int'(M); i++) begin
        x[i]      = XB'($urandom);
        weight[i] = WB'($urandom);
      end
      bias = BB'($urandom);
      apply_and_check($sformatf("random %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
