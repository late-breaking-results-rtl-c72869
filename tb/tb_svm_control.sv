// tb_svm_control: self-checking test of the class counter.
//
// Uses 5 classes (a 3-bit counter that does not wrap naturally). Checks that
// a start captures (load) in the same cycle, that busy lasts exactly
// N_CLASSES cycles with sel = 0..N_CLASSES-1 and first only at sel = 0, that
// done pulses once N_CLASSES edges after the accepting edge, that start is
// ignored while busy, and that a start in the done cycle begins the next run.
module tb_svm_control;
  localparam int unsigned N  = 5;
  localparam int unsigned CB = svm_pkg::cnt_bits(N);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          start = 1'b0;
  logic          load, busy, first, done;
  logic [CB-1:0] sel;

  int checks = 0;
  int failures = 0;

  svm_control #(.N_CLASSES(N)) dut (
    .clk, .rst_n, .start, .load, .busy, .first, .sel, .done
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // One classification, start given at the current negedge. If poke is set,
  // start is also raised mid-run (must be ignored). If b2b is set, a second
  // classification is started in the done cycle of the first.
  task automatic run(input bit poke, input bit b2b);
    int edges;
    for (int r = 0; r <= int'(b2b); r++) begin
      start = 1'b1;
      #1 check(load == 1'b1, "load with start when idle");
      @(negedge clk);
      start = 1'b0;
      edges = 1;
      for (int k = 0; k < int'(N); k++) begin
        if (poke && k == 2) start = 1'b1;
        #1;
        check(busy == 1'b1, $sformatf("busy in step %0d", k));
        check(sel == CB'(k), $sformatf("sel %0d in step %0d", sel, k));
        check(first == (k == 0), $sformatf("first in step %0d", k));
        check(done == 1'b0, $sformatf("no done in step %0d", k));
        check(load == 1'b0, $sformatf("no load while busy, step %0d", k));
        @(negedge clk);
        start = 1'b0;
        edges++;
      end
      edges--;
      check(done == 1'b1, "done after last classifier");
      check(busy == 1'b0, "idle when done");
      check(edges == int'(N), $sformatf("latency %0d edges", edges));
    end
    @(negedge clk);
    check(done == 1'b0, "done is a single pulse");
    check(busy == 1'b0, "stays idle");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    #1 check(busy == 1'b0 && done == 1'b0 && sel == '0, "reset state");
    rst_n = 1'b1;
    @(negedge clk);
    run(1'b0, 1'b0);
    repeat (3) @(negedge clk);
    check(busy == 1'b0 && done == 1'b0, "idle without start");
    run(1'b1, 1'b0);
    run(1'b0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
