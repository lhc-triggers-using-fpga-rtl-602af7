// trigger_decision: turns the classifier score into the trigger accept bit.
//
// A crossing is accepted when its score is strictly greater than `threshold`
// (unsigned, same 16-bit format as the score); the threshold sets the working
// point, e.g. the score that gives a 10 kHz accept rate. The decision is
// registered: dec_valid/accept follow score_valid by one cycle. Two free-running
// counters give the number of scored and accepted crossings since reset, for
// rate monitoring.
//
// The threshold cut follows the paper; the counters are this design's addition.
module trigger_decision
  import cnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        score_valid,
  input  score_t      score,
  input  score_t      threshold,
  output logic        dec_valid,
  output logic        accept,
  output logic [31:0] n_scored,
  output logic [31:0] n_accepted
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dec_valid  <= 1'b0;
      accept     <= 1'b0;
      n_scored   <= '0;
      n_accepted <= '0;
    end else begin
      dec_valid <= score_valid;
      if (score_valid) begin
        accept   <= score > threshold;
        n_scored <= n_scored + 1;
        if (score > threshold) n_accepted <= n_accepted + 1;
      end
    end
  end

endmodule
