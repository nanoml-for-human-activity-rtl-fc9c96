// argmax: picks the predicted class from the class activations.
//
// Scans the NUM_CLASSES popcounts and keeps the first strictly larger one,
// so on a tie the lowest class index wins (the convention of a software
// argmax). The winning index, its score and a copy of all scores are
// registered.
//
// Interface and timing: scores/in_valid -> class_idx/max_score/scores_q/
// out_valid one clock later; a new set every clock. Only the valid bit is
// reset.
//
// That the largest class activation gives the prediction follows the source;
// the tie rule and the single register stage are this design's choices.
module argmax #(
  parameter int NUM_CLASSES = dwn_pkg::NUM_CLASSES,
  parameter int CW          = 11,
  localparam int IW         = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [CW-1:0] scores [NUM_CLASSES],
  output logic          out_valid,
  output logic [IW-1:0] class_idx,
  output logic [CW-1:0] max_score,
  output logic [CW-1:0] scores_q [NUM_CLASSES]
);

  logic [IW-1:0] idx_d;
  logic [CW-1:0] max_d;

  always_comb begin
    idx_d = '0;
    max_d = scores[0];
    for (int c = 1; c < NUM_CLASSES; c++) begin
      if (scores[c] > max_d) begin
        max_d = scores[c];
        idx_d = IW'(c);
      end
    end
  end

  always_ff @(posedge clk) begin
    class_idx <= idx_d;
    max_score <= max_d;
    scores_q  <= scores;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
