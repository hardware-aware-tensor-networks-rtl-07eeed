// anomaly_score: anomaly score and trigger decision.
//
// The score of an event is the absolute distance of its squared norm from the
// median squared norm of background events,
//     score = | nrm - median |,
// kept in the 16-bit, 8-fraction-bit saturating format of the norm. An event
// is accepted (trig = 1) when its score exceeds a programmable threshold; the
// threshold sets the background acceptance of the trigger. median and
// threshold are calibration inputs: the median must be re-measured after
// quantisation, so it is not a design constant. Score formula from the
// reference; the strict comparison and the register stage are this design's
// choices. out_valid follows in_valid by one cycle.
module anomaly_score
  import tn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  nrm_t nrm,
  input  nrm_t median,
  input  nrm_t threshold,
  output logic out_valid,
  output nrm_t score,
  output logic trig
);

  logic signed [FX_W:0] diff, mag;
  nrm_t s;

  always_comb begin
    diff = {nrm[FX_W-1], nrm} - {median[FX_W-1], median};
    mag  = diff[FX_W] ? -diff : diff;
    s    = (mag > 17'sh07fff) ? 16'sh7fff : mag[FX_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      score <= '0;
      trig <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        score <= s;
        trig  <= s > threshold;
      end
    end
  end

endmodule
