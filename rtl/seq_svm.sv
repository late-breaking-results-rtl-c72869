// seq_svm: sequential one-vs-rest linear SVM classifier.
//
// A multi-class linear SVM built as one-vs-rest has one classifier (support
// vector plus bias) per class, and the predicted class is the one with the
// highest weighted sum. Instead of one multiply-add tree per classifier, this
// circuit folds all of them onto a single compute engine and evaluates one
// classifier per clock cycle:
//
//   svm_control         class counter: selects support vector k in cycle k and
//                       stops after N_CLASSES cycles
//   svm_storage         multiplexer with hardwired weights and bias per class
//   svm_input_features  holds the sample's features during the classification
//   svm_compute_engine  N_FEATURES multipliers and a multi-operand adder
//   svm_voter           running argmax: best score and its class id
//
// The block structure follows the paper; handshake, number formats, tie rule
// and reset are this design's own choices (see each block).
//
// Interface and timing: when idle, a start pulse captures features[] on the
// clock edge that accepts it. busy is then high for N_CLASSES cycles, and done
// pulses for one cycle N_CLASSES clock edges after the accepting edge, with
// predicted_class valid from then until the next classification starts.
// start is ignored while busy; it may be given again in the done cycle.
module seq_svm #(
  parameter int unsigned N_CLASSES  = svm_pkg::N_CLASSES_DEF,
  parameter int unsigned N_FEATURES = svm_pkg::N_FEATURES_DEF,
  parameter int unsigned X_BITS     = svm_pkg::X_BITS_DEF,
  parameter int unsigned W_BITS     = svm_pkg::W_BITS_DEF,
  parameter int unsigned B_BITS     = svm_pkg::B_BITS_DEF,
  parameter int unsigned SEED       = svm_pkg::SEED_DEF,
  parameter int unsigned CNT_BITS   = svm_pkg::cnt_bits(N_CLASSES),
  parameter int unsigned ACC_BITS   = svm_pkg::acc_bits(X_BITS, W_BITS, B_BITS, N_FEATURES),
  // Hardwired model, same layout as in svm_storage.
  parameter logic [N_CLASSES*N_FEATURES*W_BITS-1:0] WEIGHTS = default_weights(),
  parameter logic [N_CLASSES*B_BITS-1:0]            BIASES  = default_biases()
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [X_BITS-1:0]   features [N_FEATURES],
  output logic                busy,
  output logic                done,
  output logic [CNT_BITS-1:0] predicted_class
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

  logic                       load;
  logic                       first;
  logic        [CNT_BITS-1:0] sel;
  logic        [X_BITS-1:0]   x      [N_FEATURES];
  logic signed [W_BITS-1:0]   weight [N_FEATURES];
  logic signed [B_BITS-1:0]   bias;
  logic signed [ACC_BITS-1:0] score;

  svm_control #(
    .N_CLASSES (N_CLASSES),
    .CNT_BITS  (CNT_BITS)
  ) u_control (
    .clk   (clk),
    .rst_n (rst_n),
    .start (start),
    .load  (load),
    .busy  (busy),
    .first (first),
    .sel   (sel),
    .done  (done)
  );

  svm_input_features #(
    .N_FEATURES (N_FEATURES),
    .X_BITS     (X_BITS)
  ) u_features (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (load),
    .x_in  (features),
    .x_out (x)
  );

  svm_storage #(
    .N_CLASSES  (N_CLASSES),
    .N_FEATURES (N_FEATURES),
    .W_BITS     (W_BITS),
    .B_BITS     (B_BITS),
    .SEED       (SEED),
    .CNT_BITS   (CNT_BITS),
    .WEIGHTS    (WEIGHTS),
    .BIASES     (BIASES)
  ) u_storage (
    .sel    (sel),
    .weight (weight),
    .bias   (bias)
  );

  svm_compute_engine #(
    .N_FEATURES (N_FEATURES),
    .X_BITS     (X_BITS),
    .W_BITS     (W_BITS),
    .B_BITS     (B_BITS),
    .ACC_BITS   (ACC_BITS)
  ) u_engine (
    .x      (x),
    .weight (weight),
    .bias   (bias),
    .score  (score)
  );

  // The stored best score is internal: only the class id leaves the chip.
  svm_voter #(
    .ACC_BITS (ACC_BITS),
    .CNT_BITS (CNT_BITS)
  ) u_voter (
    .clk        (clk),
    .rst_n      (rst_n),
    .en         (busy),
    .first      (first),
    .score      (score),
    .class_id   (sel),
    .best_class (predicted_class),
    .best_score ()
  );

endmodule
