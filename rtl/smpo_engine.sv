// smpo_engine: inference of one N -> 1 spaced matrix product operator.
//
// The operator has NS sites in a chain with bond dimension BW; only the middle
// site OUT = (NS-1)/2 has a physical output leg (PO). It is applied to an
// NS-site input MPS of physical dimension PI and bond dimension BM and
// reduces it to one vector of length PO, whose squared norm is the model
// output. Used twice in this design:
//   * the single-layer SMPO 19 -> 1 on the embedded event (BW = 4, BM = 1),
//   * the second cascade layer 7 -> 1 on the intermediate MPS (BW = 2, BM = 2),
//     where bonds become composite indices of size B = BM * BW = 4.
// Steps (the latency-optimal order of the reference implementation):
//   1. vertical contraction of all NS sites in parallel (vert_contract);
//   2. bi-directional sweep: the two chain ends absorb one neighbour per
//      cycle, NSTEP = OUT - 1 steps per wing (bidir_sweep);
//   3. three-site contraction at the anchor site (merge3);
//   4. scaling by 1/Gamma and squared norm (sq_norm).
// The trained weights are held in a weight_regfile written through wreq with
// layer code LAYER.
//
// Interface and timing: the MPS sites are sampled on the clock edge where
// start is high (start is ignored while busy). Counting the start cycle as
// cycle 0, done is a one-cycle pulse in cycle NSTEP + 4 (cycle 12 for the
// 19-site SMPO, cycle 6 for the 7-site second cascade layer); gscale is
// sampled at the end of cycle NSTEP + 3. vec, nrm and sat then hold the
// result until the next event; busy is high from cycle 1 to cycle NSTEP + 3. One event is processed at a time. The register
// placement between the steps is this design's choice.
// The lint note that rst_n is used both asynchronously and synchronously
// refers to the disable condition of the assertion below; the logic itself
// uses rst_n only as an asynchronous reset.
module smpo_engine
  import tn_pkg::*;
#(
  parameter int       NS    = 19,
  parameter int       PI    = 3,
  parameter int       PO    = 3,
  parameter int       BW    = 4,
  parameter int       BM    = 1,
  parameter bit [1:0] LAYER = 2'd0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  wreq_t wreq,
  input  logic  start,
  input  fx_t   mps [NS][PI][BM][BM],
  input  fx_t   gscale,
  output logic  busy,
  output logic  done,
  output fx_t   vec [PO],
  output nrm_t  nrm,
  output logic  sat
);

  localparam int OUT   = (NS - 1) / 2;
  localparam int NSTEP = OUT - 1;
  localparam int B     = BW * BM;

  fx_t w [NS][PI][PO][BW][BW];

  weight_regfile #(.NS(NS), .PI(PI), .PO(PO), .BW(BW), .LAYER(LAYER)) u_w (
    .clk, .rst_n, .wreq, .w
  );

  logic go;
  assign go = start && !busy;

  fx_t lenv0 [B], renv0 [B];
  fx_t lmat [NSTEP][B][B], rmat [NSTEP][B][B];
  fx_t anchor [PO][B][B];

  // ---- step 1: vertical contraction, one unit per site --------------------
  for (genvar s = 0; s < NS; s++) begin : g_site
    localparam int ML = (s == 0)      ? 1 : BM;
    localparam int MR = (s == NS - 1) ? 1 : BM;
    localparam int WL = (s == 0)      ? 1 : BW;
    localparam int WR = (s == NS - 1) ? 1 : BW;
    localparam int P  = (s == OUT)    ? PO : 1;

    fx_t m_s [PI][ML][MR];
    fx_t w_s [PI][P][WL][WR];
    fx_t o_s [P][ML*WL][MR*WR];
    fx_t vq  [P][ML*WL][MR*WR];

    always_comb begin
      for (int i = 0; i < PI; i++) begin
        for (int l = 0; l < ML; l++)
          for (int r = 0; r < MR; r++) m_s[i][l][r] = mps[s][i][l][r];
        for (int p = 0; p < P; p++)
          for (int l = 0; l < WL; l++)
            for (int r = 0; r < WR; r++) w_s[i][p][l][r] = w[s][i][p][l][r];
      end
    end

    vert_contract #(.PI(PI), .PO(P), .ML(ML), .MR(MR), .WL(WL), .WR(WR)) u_v (
      .mps(m_s), .w(w_s), .out(o_s)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int p = 0; p < P; p++)
          for (int l = 0; l < ML*WL; l++)
            for (int r = 0; r < MR*WR; r++) vq[p][l][r] <= '0;
      end else if (go) begin
        vq <= o_s;
      end
    end

    // route the contracted site to its role in the horizontal contraction
    if (s == 0) begin : g_lend
      assign lenv0 = vq[0][0];
    end else if (s < OUT) begin : g_lwing
      assign lmat[s-1] = vq[0];
    end else if (s == OUT) begin : g_anchor
      assign anchor = vq;
    end else if (s < NS - 1) begin : g_rwing
      assign rmat[NS-2-s] = vq[0];
    end else begin : g_rend
      for (genvar l = 0; l < B; l++) begin : g_col
        assign renv0[l] = vq[0][l][0];
      end
    end
  end

  // ---- step 2: bi-directional sweep ---------------------------------------
  logic sweep_start, sweep_busy, sweep_done;
  fx_t  lenv [B], renv [B];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sweep_start <= 1'b0;
    else        sweep_start <= go;
  end

  bidir_sweep #(.B(B), .NSTEP(NSTEP)) u_sweep (
    .clk, .rst_n, .start(sweep_start), .lenv0, .renv0, .lmat, .rmat,
    .lenv, .renv, .busy(sweep_busy), .done(sweep_done)
  );

  // ---- step 3: three-site contraction -------------------------------------
  logic merge_valid;
  merge3 #(.PO(PO), .B(B)) u_merge (
    .clk, .rst_n, .in_valid(sweep_done), .t(anchor), .lenv, .renv,
    .out_valid(merge_valid), .out(vec)
  );

  // ---- step 4: squared norm -----------------------------------------------
  sq_norm #(.PO(PO)) u_norm (
    .clk, .rst_n, .in_valid(merge_valid), .v(vec), .gscale,
    .out_valid(done), .nrm, .sat
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    busy <= 1'b0;
    else if (go)   busy <= 1'b1;
    else if (merge_valid) busy <= 1'b0;
  end

  // the sweep can only be running while the engine is busy
  assert property (@(posedge clk) disable iff (!rst_n) sweep_busy |-> busy);

endmodule
