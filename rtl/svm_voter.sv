// svm_voter: sequential argmax over the classifier scores.
//
// Two registers, the best score so far and its class id, and one comparator
// between the incoming score (A) and the stored score (B). When A > B, the
// two 2:1 multiplexers in front of the registers pass the new score and the
// current counter value; otherwise they recirculate the stored values. This
// is the structure the paper describes. Two points are this design's own:
// in the first cycle of a classification (first high) both registers load
// unconditionally, and the comparison is strict, so on a tie the class with
// the lower index is kept.
//
// Interface and timing: registers update on the rising edge where en is high;
// best_class holds the predicted class after the last classifier until the
// next classification begins. Asynchronous active-low reset clears both.
module svm_voter #(
  parameter int unsigned ACC_BITS = svm_pkg::acc_bits(svm_pkg::X_BITS_DEF, svm_pkg::W_BITS_DEF,
                                                      svm_pkg::B_BITS_DEF, svm_pkg::N_FEATURES_DEF),
  parameter int unsigned CNT_BITS = svm_pkg::cnt_bits(svm_pkg::N_CLASSES_DEF)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic                       first,
  input  logic signed [ACC_BITS-1:0] score,
  input  logic        [CNT_BITS-1:0] class_id,
  output logic        [CNT_BITS-1:0] best_class,
  output logic signed [ACC_BITS-1:0] best_score
);

  logic                       a_gt_b;
  logic                       take;
  logic signed [ACC_BITS-1:0] score_d;
  logic        [CNT_BITS-1:0] class_d;

  // Single comparator: A = current score, B = stored score.
  assign a_gt_b = score > best_score;
  assign take   = a_gt_b || first;

  // The two multiplexers in front of the registers.
  assign score_d = take ? score    : best_score;
  assign class_d = take ? class_id : best_class;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_score <= '0;
      best_class <= '0;
    end else if (en) begin
      best_score <= score_d;
      best_class <= class_d;
    end
  end

endmodule
