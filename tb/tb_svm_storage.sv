// tb_svm_storage: self-checking test of the hardwired coefficient multiplexer.
//
// A small instance (4 classes, 3 features) gets coefficients from an
// independent formula of this testbench; every select value, including the
// unused codes, is checked against that formula. A second instance with all
// defaults is checked against svm_pkg::gen_coef for every coefficient.
module tb_svm_storage;
  localparam int unsigned N  = 4;
  localparam int unsigned M  = 3;
  localparam int unsigned WB = 8;
  localparam int unsigned BB = 12;
  localparam int unsigned CB = 3;  // wider than needed: codes 4..7 are unused

  function automatic int w_of(int k, int i);
    return ((k * 37 + i * 11 + 5) % 256) - 128;
  endfunction
  function automatic int b_of(int k);
    return ((k * 1009 + 77) % 4096) - 2048;
  endfunction
  function automatic logic [N*M*WB-1:0] pack_w();
    logic [N*M*WB-1:0] v;
    for (int k = 0; k < int'(N); k++)
      for (int i = 0; i < int'(M); i++)
        v[(k*M + i)*WB +: WB] = WB'(w_of(k, i));
    return v;
  endfunction
  function automatic logic [N*BB-1:0] pack_b();
    logic [N*BB-1:0] v;
    for (int k = 0; k < int'(N); k++) v[k*BB +: BB] = BB'(b_of(k));
    return v;
  endfunction

  logic        [CB-1:0] sel;
  logic signed [WB-1:0] weight [M];
  logic signed [BB-1:0] bias;

  svm_storage #(
    .N_CLASSES(N), .N_FEATURES(M), .W_BITS(WB), .B_BITS(BB), .CNT_BITS(CB),
    .WEIGHTS(pack_w()), .BIASES(pack_b())
  ) dut (.sel, .weight, .bias);

  // Default-size instance.
  localparam int unsigned DN = svm_pkg::N_CLASSES_DEF;
  localparam int unsigned DM = svm_pkg::N_FEATURES_DEF;
  logic        [svm_pkg::cnt_bits(DN)-1:0] dsel;
  logic signed [svm_pkg::W_BITS_DEF-1:0]   dweight [DM];
  logic signed [svm_pkg::B_BITS_DEF-1:0]   dbias;

  svm_storage ddut (.sel(dsel), .weight(dweight), .bias(dbias));

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int k = 0; k < (1 << CB); k++) begin
      sel = CB'(k);
      #1;
      for (int i = 0; i < int'(M); i++)
        check(int'(weight[i]) == ((k < int'(N)) ? w_of(k, i) : 0),
              $sformatf("weight sv %0d feature %0d = %0d", k, i, weight[i]));
      check(int'(bias) == ((k < int'(N)) ? b_of(k) : 0),
            $sformatf("bias sv %0d = %0d", k, bias));
    end
    for (int k = 0; k < int'(DN); k++) begin
      dsel = $bits(dsel)'(k);
      #1;
      for (int i = 0; i < int'(DM); i++)
        check(int'(dweight[i]) == svm_pkg::gen_coef(svm_pkg::SEED_DEF, k*DM + i, svm_pkg::W_BITS_DEF),
              $sformatf("default weight sv %0d feature %0d", k, i));
      check(int'(dbias) == svm_pkg::gen_coef(svm_pkg::SEED_DEF, DN*DM + k, svm_pkg::B_BITS_DEF),
            $sformatf("default bias sv %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
