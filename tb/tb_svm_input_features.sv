// tb_svm_input_features: self-checking test of the feature register.
//
// Checks the reset value, that random feature vectors are captured on an edge
// with load high, and that the register holds while the inputs change with
// load low.
module tb_svm_input_features;
  localparam int unsigned M  = svm_pkg::N_FEATURES_DEF;
  localparam int unsigned XB = svm_pkg::X_BITS_DEF;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          load = 1'b0;
  logic [XB-1:0] x_in  [M];
  logic [XB-1:0] x_out [M];
  logic [XB-1:0] expected [M];

  svm_input_features dut (.clk, .rst_n, .load, .x_in, .x_out);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic compare(input string what);
    for (int i = 0; i < int'(M); i++) begin
      checks++;
      if (x_out[i] != expected[i]) begin
        failures++;
        $display("FAIL: %s feature %0d: %0d expected %0d", what, i, x_out[i], expected[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < int'(M); i++) begin
      x_in[i] = XB'($urandom);
      expected[i] = '0;
    end
    @(negedge clk);
    compare("reset");
    rst_n = 1'b1;
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < int'(M); i++) x_in[i] = XB'($urandom);
      load = 1'b1;
      expected = x_in;
      @(negedge clk);
      compare($sformatf("load %0d", t));
      load = 1'b0;
      for (int h = 0; h < 3; h++) begin
        for (int i = 0; i < int'(M); i++) x_in[i] = XB'($urandom);
        @(negedge clk);
        compare($sformatf("hold %0d.%0d", t, h));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
