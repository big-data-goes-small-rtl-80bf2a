// argmax_unit: turns the class scores of the output layer into a decision.
//
// Watches the write port of the last fully-connected layer. Each score written
// is stored (so the controller can read all of them) and compared with the
// best so far; the first, lowest-numbered class wins a tie. clear, pulsed at
// the start of an inference, forgets the previous best. best_class and
// best_score are valid once all NCLS scores of an inference have been
// written; the sequencer reports them together with its done pulse.
// The paper says the last layer holds the classification output and that the
// learning core hands inferred knowledge to the actuation core; taking the
// largest score as that knowledge is this design's choice.
module argmax_unit
  import rflearn_pkg::*;
#(
  parameter int unsigned NCLS = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     score_we,
  input  logic [idx_w(NCLS)-1:0]   score_idx,
  input  data_t                    score,
  output logic [idx_w(NCLS)-1:0]   best_class,
  output data_t                    best_score,
  output data_t                    scores [NCLS]
);
  logic have;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      have       <= 1'b0;
      best_class <= '0;
      best_score <= DATA_MIN;
      for (int k = 0; k < int'(NCLS); k++) scores[k] <= '0;
    end else if (clear) begin
      have       <= 1'b0;
      best_class <= '0;
      best_score <= DATA_MIN;
    end else if (score_we) begin
      scores[score_idx] <= score;
      if (!have || score > best_score) begin
        have       <= 1'b1;
        best_class <= score_idx;
        best_score <= score;
      end
    end
  end
endmodule
