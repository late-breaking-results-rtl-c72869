// svm_compute_engine: the folded weighted-sum engine.
//
// Computes y = sum_{i=1..m} w_i * x_i + b for the support vector currently
// selected from storage: N_FEATURES parallel multipliers and one multi-operand
// adder that also adds the bias. All support vectors share this engine, one
// per cycle. Structure as in the paper; the number formats are this design's
// own: features are unsigned X_BITS integers (the [0,1] range scaled to
// 0..2^X_BITS-1), weights and bias two's complement, and the sum is exact in
// ACC_BITS bits, so no rounding or saturation takes place.
//
// Interface and timing: purely combinational, from x/weight/bias to score.
module svm_compute_engine #(
  parameter int unsigned N_FEATURES = svm_pkg::N_FEATURES_DEF,
  parameter int unsigned X_BITS     = svm_pkg::X_BITS_DEF,
  parameter int unsigned W_BITS     = svm_pkg::W_BITS_DEF,
  parameter int unsigned B_BITS     = svm_pkg::B_BITS_DEF,
  parameter int unsigned ACC_BITS   = svm_pkg::acc_bits(X_BITS, W_BITS, B_BITS, N_FEATURES)
) (
  input  logic        [X_BITS-1:0]   x      [N_FEATURES],
  input  logic signed [W_BITS-1:0]   weight [N_FEATURES],
  input  logic signed [B_BITS-1:0]   bias,
  output logic signed [ACC_BITS-1:0] score
);

  // Products: signed weight times zero-extended (non-negative) feature.
  logic signed [W_BITS+X_BITS-1:0] prod [N_FEATURES];

  always_comb begin
    for (int i = 0; i < N_FEATURES; i++)
      prod[i] = weight[i] * $signed({1'b0, x[i]});
  end

  // Multi-operand adder: bias plus all products.
  always_comb begin
    score = ACC_BITS'(bias);
    for (int i = 0; i < N_FEATURES; i++)
      score = score + ACC_BITS'(prod[i]);
  end

endmodule
