// vert_contract: vertical contraction of one MPS site with one SMPO site.
//
// The physical leg of the incoming MPS site (length PI) is summed against the
// physical input leg of the operator site:
//     out[p][lm*WL+ls][rm*WR+rs] = sum_i mps[i][lm][rm] * w[i][p][ls][rs]
// For the embedded event (bond dimension 1 on both sides, ML = MR = 1) this is
// the plain contraction of the single-layer SMPO and of the first cascade
// layer. For the second cascade layer the incoming site is a tensor of the
// intermediate MPS and the bonds become composite indices (MPS bond major,
// operator bond minor), as in the composite-index formula of the reference
// MAC count. Every output element costs PI multiply-accumulates; the sum is
// exact and is cut back to fx_t (truncate, wrap) once at the end.
//
// Interface: purely combinational; the enclosing engine registers the result.
// Boundary sites are instantiated with a bond size of 1 on their open side and
// non-output sites with PO = 1, so only the elements the network really has
// are computed.
module vert_contract
  import tn_pkg::*;
#(
  parameter int PI = 3,   // physical input dimension
  parameter int PO = 3,   // physical output dimension of this site (1 if none)
  parameter int ML = 1,   // left bond of the incoming MPS site
  parameter int MR = 1,   // right bond of the incoming MPS site
  parameter int WL = 4,   // left bond of the operator site
  parameter int WR = 4    // right bond of the operator site
) (
  input  fx_t mps [PI][ML][MR],
  input  fx_t w   [PI][PO][WL][WR],
  output fx_t out [PO][ML*WL][MR*WR]
);

  always_comb begin
    for (int p = 0; p < PO; p++)
      for (int lm = 0; lm < ML; lm++)
        for (int ls = 0; ls < WL; ls++)
          for (int rm = 0; rm < MR; rm++)
            for (int rs = 0; rs < WR; rs++) begin
              acc_t acc;
              acc = '0;
              for (int i = 0; i < PI; i++)
                acc += mul(mps[i][lm][rm], w[i][p][ls][rs]);
              out[p][lm*WL+ls][rm*WR+rs] = fx_quant(acc);
            end
  end

endmodule
