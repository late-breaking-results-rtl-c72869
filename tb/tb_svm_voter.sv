// tb_svm_voter: self-checking test of the sequential argmax.
//
// Feeds sequences of scores (random, with forced ties, all equal, strictly
// rising and strictly falling) one per cycle, with first high on the first,
// and checks after every cycle that the stored class and score equal a
// running argmax kept by the testbench (strictly greater replaces, so ties
// keep the earlier class). Also checks that nothing changes while en is low.
module tb_svm_voter;
  localparam int unsigned AB = 18;
  localparam int unsigned CB = 4;
  localparam int unsigned N  = 10;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 en = 1'b0;
  logic                 first = 1'b0;
  logic signed [AB-1:0] score = '0;
  logic        [CB-1:0] class_id = '0;
  logic        [CB-1:0] best_class;
  logic signed [AB-1:0] best_score;

  svm_voter #(.ACC_BITS(AB), .CNT_BITS(CB)) dut (
    .clk, .rst_n, .en, .first, .score, .class_id, .best_class, .best_score
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // mode 0 random, 1 small range (many ties), 2 all equal, 3 rising, 4 falling
  task automatic run_seq(input int mode);
    int ref_score, ref_class, s;
    for (int k = 0; k < int'(N); k++) begin
      case (mode)
        0: s = $signed(AB'($urandom));
        1: s = int'($urandom_range(0, 3)) - 2;
        2: s = -7;
        3: s = -100000 + k * 1000;
        default: s = 100000 - k * 1000;
      endcase
      en = 1'b1;
      first = (k == 0);
      score = AB'(s);
      class_id = CB'(k);
      if (k == 0 || s > ref_score) begin
        ref_score = s;
        ref_class = k;
      end
      @(negedge clk);
      check(int'(best_score) == ref_score,
            $sformatf("mode %0d step %0d score %0d expected %0d", mode, k, best_score, ref_score));
      check(int'(best_class) == ref_class,
            $sformatf("mode %0d step %0d class %0d expected %0d", mode, k, best_class, ref_class));
    end
    // Hold with en low, even with a larger score presented.
    en = 1'b0;
    first = 1'b1;
    score = {1'b0, {(AB-1){1'b1}}};
    class_id = '1;
    repeat (2) @(negedge clk);
    check(int'(best_score) == ref_score && int'(best_class) == ref_class,
          $sformatf("mode %0d holds while en is low", mode));
  endtask

  initial begin
    @(negedge clk);
    check(best_score == '0 && best_class == '0, "reset clears registers");
    rst_n = 1'b1;
    @(negedge clk);
    for (int m = 0; m < 5; m++) run_seq(m);
    for (int t = 0; t < 200; t++) run_seq(t % 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
