// svm_control: the class counter that sequences one classification.
//
// A ceil(log2(n))-bit counter steps through the n one-vs-rest classifiers, one
// per clock cycle. Its value is both the support-vector select of the
// coefficient multiplexer and the class id handed to the voter. After the
// last classifier it stops and pulses done, ending the multi-cycle process.
// The counter itself follows the paper; the start/busy/done handshake around
// it, the reset and the 'first' flag are this design's own choices.
//
// Interface and timing:
//   start  sampled when idle; load is high in that same cycle so the input
//          features are captured on the same edge that makes busy rise.
//   busy   high for exactly N_CLASSES cycles; sel = 0, 1, ..., N_CLASSES-1.
//   first  high while sel = 0 (the voter loads unconditionally then).
//   done   one-cycle pulse after the last classifier, N_CLASSES clock edges
//          after the edge that accepted start. start is ignored while busy;
//          a new start may be given in the cycle done is high.
module svm_control #(
  parameter int unsigned N_CLASSES = svm_pkg::N_CLASSES_DEF,
  parameter int unsigned CNT_BITS  = svm_pkg::cnt_bits(N_CLASSES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                load,
  output logic                busy,
  output logic                first,
  output logic [CNT_BITS-1:0] sel,
  output logic                done
);

  localparam logic [CNT_BITS-1:0] LAST = CNT_BITS'(N_CLASSES - 1);

  logic last;

  assign load  = start && !busy;
  assign last  = busy && (sel == LAST);
  assign first = busy && (sel == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      sel  <= '0;
      done <= 1'b0;
    end else begin
      done <= last;
      if (load) begin
        busy <= 1'b1;
        sel  <= '0;
      end else if (last) begin
        busy <= 1'b0;
        sel  <= '0;
      end else if (busy) begin
        sel  <= sel + 1'b1;
      end
    end
  end

  // The counter never leaves the range of stored support vectors.
  a_sel_range: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (sel <= LAST));
  // done is a single-cycle pulse.
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    done |=> !done);

endmodule
