// sq_norm: squared norm of the final one-site MPS.
//
// The output vector v[0..PO-1] of the network is first scaled by the event
// normalisation 1/Gamma (the embedded event MPS is defined as the tensor
// product of the site vectors divided by Gamma; the network is linear in its
// input, so the scale can be applied once, to the output vector), then
//     nrm = sum_p (v[p] * gscale)^2
// is formed exactly and stored as a 16-bit value with 8 fraction bits,
// truncated and saturated to [-128, 128): events with a larger norm are
// clipped to just below 2^7, as in the reference implementation.
// Applying 1/Gamma at the output rather than at the input is this design's
// choice. One register stage: out_valid follows in_valid by one cycle.
module sq_norm
  import tn_pkg::*;
#(
  parameter int PO = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  v [PO],
  input  fx_t  gscale,
  output logic out_valid,
  output nrm_t nrm,
  output logic sat            // high with out_valid when nrm was clipped
);

  acc_t sum;
  always_comb begin
    sum = '0;
    for (int p = 0; p < PO; p++) begin
      fx_t s;
      s = fx_quant(mul(v[p], gscale));
      sum += mul(s, s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      nrm <= '0;
      sat <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        nrm <= nrm_quant(sum);
        sat <= (sum >>> (2*FX_FRAC - NR_FRAC)) > acc_t'(16'sh7fff);
      end
    end
  end

endmodule
