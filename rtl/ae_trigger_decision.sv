// ae_trigger_decision -- threshold on the anomaly score.
//
// An event is flagged as anomalous when its score is above a lower threshold;
// the threshold sets the background acceptance (the working point of the
// trigger).  The strict comparison and the registered output are this
// design's choices.  The threshold is a quasi-static input from the
// coefficient register file.
//
// Timing: one registered stage; score_out is the score of the same event.
module ae_trigger_decision #(
  parameter int unsigned SCORE_W = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [SCORE_W-1:0] score,
  input  logic [SCORE_W-1:0] threshold,
  output logic               out_valid,
  output logic [SCORE_W-1:0] score_out,
  output logic               accept
);
  always_ff @(posedge clk) begin
    score_out <= score;
    if (!rst_n) begin
      out_valid <= 1'b0;
      accept    <= 1'b0;
    end else begin
      out_valid <= in_valid;
      accept    <= in_valid && (score > threshold);
    end
  end

endmodule
