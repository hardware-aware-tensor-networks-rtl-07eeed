// group_contract: grouped contraction of one cascade layer-1 group.
//
// In the first cascade layer only every third site has a physical output leg.
// The two sites between output sites are plain B1 x B1 bond matrices after the
// vertical contraction. They are contracted in two steps:
//   step 1 (chain):  D[l][r] = sum_k A1[l][k] * A2[k][r]        (B1^3 MACs)
//   step 2 (absorb): out[p][l][r] = sum_k D[l][k] * C[p][k][r]  (P*B1^2*BR MACs)
// where C is the output site to the right of the pair. The result is one site
// of the intermediate MPS, with left bond B1, right bond BR (1 for the last
// site of the chain) and physical dimension P. Both steps are cut back to
// fx_t. The two steps and the choice of the right-hand neighbour follow the
// reference; one register per step is this design's choice, so out_valid
// follows in_valid by two cycles. Six of these run side by side in the cascade.
module group_contract
  import tn_pkg::*;
#(
  parameter int B1 = 2,
  parameter int P  = 3,
  parameter int BR = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  a1 [B1][B1],
  input  fx_t  a2 [B1][B1],
  input  fx_t  c  [P][B1][BR],
  output logic out_valid,
  output fx_t  out [P][B1][BR]
);

  fx_t  d   [B1][B1];
  fx_t  c_q [P][B1][BR];
  logic v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      out_valid <= 1'b0;
      for (int l = 0; l < B1; l++)
        for (int r = 0; r < B1; r++) d[l][r] <= '0;
      for (int p = 0; p < P; p++)
        for (int l = 0; l < B1; l++)
          for (int r = 0; r < BR; r++) begin
            c_q[p][l][r] <= '0;
            out[p][l][r] <= '0;
          end
    end else begin
      v1 <= in_valid;
      out_valid <= v1;
      if (in_valid) begin
        for (int l = 0; l < B1; l++)
          for (int r = 0; r < B1; r++) begin
            acc_t a;
            a = '0;
            for (int k = 0; k < B1; k++) a += mul(a1[l][k], a2[k][r]);
            d[l][r] <= fx_quant(a);
          end
        c_q <= c;
      end
      if (v1) begin
        for (int p = 0; p < P; p++)
          for (int l = 0; l < B1; l++)
            for (int r = 0; r < BR; r++) begin
              acc_t a;
              a = '0;
              for (int k = 0; k < B1; k++) a += mul(d[l][k], c_q[p][k][r]);
              out[p][l][r] <= fx_quant(a);
            end
      end
    end
  end

endmodule
