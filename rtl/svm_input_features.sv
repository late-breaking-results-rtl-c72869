// svm_input_features: the input feature register.
//
// Holds the N_FEATURES feature values of one sample steady while the n
// classifiers are evaluated over n cycles. It is loaded in the cycle a
// classification is accepted (load high) and keeps its value otherwise. The
// figure of the design shows an "Input Features" block feeding all
// multipliers; making it a load-enabled register cleared by reset is this
// design's own choice.
//
// Interface and timing: x_out takes x_in on the rising clock edge where load
// is high; asynchronous active-low reset clears it.
module svm_input_features #(
  parameter int unsigned N_FEATURES = svm_pkg::N_FEATURES_DEF,
  parameter int unsigned X_BITS     = svm_pkg::X_BITS_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [X_BITS-1:0] x_in  [N_FEATURES],
  output logic [X_BITS-1:0] x_out [N_FEATURES]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_FEATURES; i++) x_out[i] <= '0;
    end else if (load) begin
      x_out <= x_in;
    end
  end

endmodule
