// weight_regfile: register storage for the trained tensors of one SMPO layer.
//
// Each operator site s holds a tensor w[s][pi][po][l][r] (physical input,
// physical output, left bond, right bond). The array is sized for the largest
// site; boundary sites use only index 0 of their open bond and sites without
// an output leg use only po = 0, so the unused elements are never read and
// vanish in synthesis. The weights sit in flip-flops (fully partitioned), so
// every element is available to the parallel contraction units at once.
// They are written one element per cycle through wreq (see tn_pkg::wreq_t);
// a request is taken when wreq.we is set and wreq.layer equals LAYER. The
// weights are model parameters loaded after reset (the reference model had
// them compiled in); the load port and its address layout are this design's
// choices. Reset clears all weights to zero.
module weight_regfile
  import tn_pkg::*;
#(
  parameter int       NS    = 19,
  parameter int       PI    = 3,
  parameter int       PO    = 3,
  parameter int       BW    = 4,
  parameter bit [1:0] LAYER = 2'd0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  wreq_t wreq,
  output fx_t   w [NS][PI][PO][BW][BW]
);

  logic hit;
  assign hit = wreq.we && wreq.layer == LAYER && int'(wreq.site) < NS &&
               int'(wreq.pi) < PI && int'(wreq.po) < PO &&
               int'(wreq.l) < BW && int'(wreq.r) < BW;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NS; s++)
        for (int i = 0; i < PI; i++)
          for (int p = 0; p < PO; p++)
            for (int l = 0; l < BW; l++)
              for (int r = 0; r < BW; r++) w[s][i][p][l][r] <= '0;
    end else if (hit) begin
      w[int'(wreq.site)][int'(wreq.pi)][int'(wreq.po)][int'(wreq.l)][int'(wreq.r)] <= wreq.data;
    end
  end

endmodule
