// csmpo_engine: inference of the cascaded SMPO 19 -> 7 -> 1.
//
// The cascade applies two SMPOs in a row. Layer 1 (bond B1) has an output leg
// on every SPACE-th site (sites 0, 3, ..., 18) and turns the 19-site event
// MPS into a 7-site MPS of physical dimension PM and bond B1. Layer 2
// (bond B2) reduces that MPS to one vector of length PO, exactly like the
// single SMPO but on composite bonds of size B1*B2.
// Steps:
//   1. layer-1 vertical contraction of all 19 sites in parallel;
//   2. grouped contraction, six groups side by side (group_contract): the two
//      bond matrices between output sites are multiplied together, then
//      absorbed into the output site on their right; site 0 passes unchanged;
//   3. layer 2: vertical contraction with composite bonds, 2-step
//      bi-directional sweep, three-site contraction and squared norm
//      (smpo_engine with NS = 7, BM = B1, BW = B2).
// Layer-1 weights are written through wreq with layer code 1, layer-2 weights
// with layer code 2.
//
// Interface and timing: the event MPS is sampled on the clock edge where
// start is high (ignored while busy). Counting the start cycle as cycle 0,
// done is a one-cycle pulse in cycle 9 (layer 2 starts in cycle 3); vec, nrm
// and sat hold the result until the next event. gscale is sampled at the end
// of cycle 8. busy is high from cycle 1 to cycle 8.
// The structure, sizes and contraction order are the reference model's; the
// register placement is this design's choice.
// The lint note that rst_n is used both asynchronously and synchronously
// refers to the disable condition of the assertion below; the logic itself
// uses rst_n only as an asynchronous reset.
module csmpo_engine
  import tn_pkg::*;
#(
  parameter int NS    = 19,
  parameter int PI    = 3,
  parameter int PM    = 3,
  parameter int PO    = 3,
  parameter int B1    = 2,
  parameter int B2    = 2,
  parameter int SPACE = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  wreq_t wreq,
  input  logic  start,
  input  fx_t   mps [NS][PI],
  input  fx_t   gscale,
  output logic  busy,
  output logic  done,
  output fx_t   vec [PO],
  output nrm_t  nrm,
  output logic  sat
);

  localparam int M  = (NS - 1) / SPACE + 1;   // intermediate sites
  localparam int NG = M - 1;                  // groups of SPACE-1 plain sites

  fx_t w1 [NS][PI][PM][B1][B1];

  weight_regfile #(.NS(NS), .PI(PI), .PO(PM), .BW(B1), .LAYER(2'd1)) u_w1 (
    .clk, .rst_n, .wreq, .w(w1)
  );

  logic go;
  assign go = start && !busy;

  // ---- layer 1, step 1: vertical contraction ------------------------------
  fx_t plain [NS][B1][B1];          // sites without output leg, as matrices
  fx_t first [PM][1][B1];           // site 0
  fx_t l2_mps [M][PM][B1][B1];      // intermediate MPS fed to layer 2

  for (genvar s = 0; s < NS; s++) begin : g_site
    localparam bit IS_OUT = (s % SPACE) == 0;
    localparam int WL = (s == 0)      ? 1 : B1;
    localparam int WR = (s == NS - 1) ? 1 : B1;
    localparam int P  = IS_OUT ? PM : 1;

    fx_t m_s [PI][1][1];
    fx_t w_s [PI][P][WL][WR];
    fx_t o_s [P][WL][WR];
    fx_t vq  [P][WL][WR];

    always_comb begin
      for (int i = 0; i < PI; i++) begin
        m_s[i][0][0] = mps[s][i];
        for (int p = 0; p < P; p++)
          for (int l = 0; l < WL; l++)
            for (int r = 0; r < WR; r++) w_s[i][p][l][r] = w1[s][i][p][l][r];
      end
    end

    vert_contract #(.PI(PI), .PO(P), .ML(1), .MR(1), .WL(WL), .WR(WR)) u_v (
      .mps(m_s), .w(w_s), .out(o_s)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int p = 0; p < P; p++)
          for (int l = 0; l < WL; l++)
            for (int r = 0; r < WR; r++) vq[p][l][r] <= '0;
      end else if (go) begin
        vq <= o_s;
      end
    end

    if (s == 0) begin : g_first
      assign first = vq;
    end else if (!IS_OUT) begin : g_plain
      assign plain[s] = vq[0];
    end else begin : g_unused
      // output sites other than 0 are read through g_grp below
    end
  end

  // rows of plain[] that belong to output sites are not used
  for (genvar s = 0; s < NS; s += SPACE) begin : g_tie
    for (genvar l = 0; l < B1; l++) begin : g_l
      for (genvar r = 0; r < B1; r++) begin : g_z
        assign plain[s][l][r] = '0;
      end
    end
  end

  logic st1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st1 <= 1'b0;
    else        st1 <= go;
  end

  // ---- layer 1, step 2: grouped contraction -------------------------------
  logic [NG-1:0] grp_valid;

  for (genvar g = 0; g < NG; g++) begin : g_grp
    localparam int ANCH = (g + 1) * SPACE;
    localparam int BR   = (ANCH == NS - 1) ? 1 : B1;
    fx_t gout [PM][B1][BR];

    group_contract #(.B1(B1), .P(PM), .BR(BR)) u_g (
      .clk, .rst_n, .in_valid(st1),
      .a1(plain[ANCH-2]), .a2(plain[ANCH-1]), .c(g_site[ANCH].vq),
      .out_valid(grp_valid[g]), .out(gout)
    );

    for (genvar p = 0; p < PM; p++) begin : g_p
      for (genvar l = 0; l < B1; l++) begin : g_l
        for (genvar r = 0; r < B1; r++) begin : g_map
          if (r < BR) begin : g_v
            assign l2_mps[g+1][p][l][r] = gout[p][l][r];
          end else begin : g_z
            assign l2_mps[g+1][p][l][r] = '0;
          end
        end
      end
    end
  end

  for (genvar p = 0; p < PM; p++) begin : g_p0
    for (genvar l = 0; l < B1; l++) begin : g_l0
      for (genvar r = 0; r < B1; r++) begin : g_map0
        if (l == 0) begin : g_v
          assign l2_mps[0][p][l][r] = first[p][0][r];
        end else begin : g_z
          assign l2_mps[0][p][l][r] = '0;
        end
      end
    end
  end

  // ---- layer 2 -------------------------------------------------------------
  logic l2_busy;
  smpo_engine #(.NS(M), .PI(PM), .PO(PO), .BW(B2), .BM(B1), .LAYER(2'd2)) u_l2 (
    .clk, .rst_n, .wreq, .start(grp_valid[0]), .mps(l2_mps), .gscale,
    .busy(l2_busy), .done, .vec, .nrm, .sat
  );

  // layer 1 is busy from the start until layer 2 takes over
  logic l1_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            l1_busy <= 1'b0;
    else if (go)           l1_busy <= 1'b1;
    else if (grp_valid[0]) l1_busy <= 1'b0;
  end
  assign busy = l1_busy || l2_busy;

  // all six groups finish together, and layer 2 is idle when they do
  assert property (@(posedge clk) disable iff (!rst_n) grp_valid[0] |-> (&grp_valid) && !l2_busy);

endmodule
