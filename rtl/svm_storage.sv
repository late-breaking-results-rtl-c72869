// svm_storage: bespoke multiplexer-based coefficient storage.
//
// There is no memory: the data inputs of a multiplexer are hardwired to the
// weights and bias of each of the N_CLASSES one-vs-rest support vectors, and
// the class counter drives its select. In a bespoke printed circuit the
// constants are folded into the logic by synthesis. This follows the paper;
// the flat packing of the coefficients into parameters is this design's own.
//
// Coefficient layout: weight i of support vector k is
//   WEIGHTS[(k*N_FEATURES + i)*W_BITS +: W_BITS]   (two's complement)
// and the bias of support vector k is BIASES[k*B_BITS +: B_BITS].
// The defaults are placeholders generated by svm_pkg::gen_coef().
//
// Interface and timing: purely combinational. A select value of N_CLASSES or
// above (never produced by the counter) gives all-zero coefficients.
module svm_storage #(
  parameter int unsigned N_CLASSES  = svm_pkg::N_CLASSES_DEF,
  parameter int unsigned N_FEATURES = svm_pkg::N_FEATURES_DEF,
  parameter int unsigned W_BITS     = svm_pkg::W_BITS_DEF,
  parameter int unsigned B_BITS     = svm_pkg::B_BITS_DEF,
  parameter int unsigned SEED       = svm_pkg::SEED_DEF,
  parameter int unsigned CNT_BITS   = svm_pkg::cnt_bits(N_CLASSES),
  parameter logic [N_CLASSES*N_FEATURES*W_BITS-1:0] WEIGHTS = default_weights(),
  parameter logic [N_CLASSES*B_BITS-1:0]            BIASES  = default_biases()
) (
  input  logic        [CNT_BITS-1:0] sel,
  output logic signed [W_BITS-1:0]   weight [N_FEATURES],
  output logic signed [B_BITS-1:0]   bias
);

  function automatic logic [N_CLASSES*N_FEATURES*W_BITS-1:0] default_weights();
    logic [N_CLASSES*N_FEATURES*W_BITS-1:0] v;
    for (int j = 0; j < N_CLASSES * N_FEATURES; j++)
      v[j*W_BITS +: W_BITS] = W_BITS'(svm_pkg::gen_coef(SEED, j, W_BITS));
    return v;
  endfunction

  function automatic logic [N_CLASSES*B_BITS-1:0] default_biases();
    logic [N_CLASSES*B_BITS-1:0] v;
    for (int k = 0; k < N_CLASSES; k++)
      v[k*B_BITS +: B_BITS] =
        B_BITS'(svm_pkg::gen_coef(SEED, N_CLASSES * N_FEATURES + k, B_BITS));
    return v;
  endfunction

  always_comb begin
    bias = '0;
    for (int i = 0; i < N_FEATURES; i++) weight[i] = '0;
    for (int k = 0; k < N_CLASSES; k++) begin
      if (sel == CNT_BITS'(k)) begin
        bias = BIASES[k*B_BITS +: B_BITS];
        for (int i = 0; i < N_FEATURES; i++)
          weight[i] = WEIGHTS[(k*N_FEATURES + i)*W_BITS +: W_BITS];
      end
    end
  end

endmodule
