// merge3: three-site contraction at the output (anchor) site.
//
// Once the bi-directional sweep has reduced the chain to a left environment,
// the anchor tensor T[p][l][r] and a right environment, the output vector is
// formed in two passes, as in the reference MAC count:
//     pass 1: rc[p][l] = sum_r T[p][l][r] * renv[r]   (PO*B*B MACs)
//     pass 2: out[p]   = sum_l lenv[l]   * rc[p][l]   (PO*B MACs)
// Each pass is cut back to fx_t. One register stage follows each pass, so
// out_valid comes two cycles after in_valid. The inputs need only be valid in
// the in_valid cycle. Registering each pass is this design's choice.
module merge3
  import tn_pkg::*;
#(
  parameter int PO = 3,
  parameter int B  = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  t    [PO][B][B],
  input  fx_t  lenv [B],
  input  fx_t  renv [B],
  output logic out_valid,
  output fx_t  out  [PO]
);

  fx_t  rc [PO][B];
  fx_t  lenv_q [B];
  logic v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      out_valid <= 1'b0;
      for (int p = 0; p < PO; p++) begin
        out[p] <= '0;
        for (int l = 0; l < B; l++) rc[p][l] <= '0;
      end
      for (int l = 0; l < B; l++) lenv_q[l] <= '0;
    end else begin
      v1 <= in_valid;
      out_valid <= v1;
      if (in_valid) begin
        for (int p = 0; p < PO; p++)
          for (int l = 0; l < B; l++) begin
            acc_t a;
            a = '0;
            for (int r = 0; r < B; r++) a += mul(t[p][l][r], renv[r]);
            rc[p][l] <= fx_quant(a);
          end
        lenv_q <= lenv;
      end
      if (v1) begin
        for (int p = 0; p < PO; p++) begin
          acc_t a;
          a = '0;
          for (int l = 0; l < B; l++) a += mul(lenv_q[l], rc[p][l]);
          out[p] <= fx_quant(a);
        end
      end
    end
  end

endmodule
