// tn_trigger_top: tensor-network anomaly trigger, single and cascaded SMPO.
//
// One collision event (19 particles) enters per accepted in_valid. It is
// embedded into a 19-site MPS (event_embed), its normalisation 1/Gamma is
// computed alongside (mps_gamma), and both published models evaluate it side
// by side:
//   * the single-layer SMPO 19 -> 1, bond 4        (smpo_engine)
//   * the cascaded SMPO 19 -> 7 -> 1, bonds 2 and 2 (csmpo_engine)
// Each model's squared norm is turned into an anomaly score and a trigger
// decision against its own background median and threshold (anomaly_score).
// Running both models in one top, so that either result can be used, is this
// design's choice; each engine is complete on its own.
//
// Interface:
//   in_valid/in_ready  event handshake; an event is taken on a clock edge with
//                      both high. in_ready is low from acceptance until both
//                      models have delivered their result (one event at a time).
//   particles          raw particles, slot order in event_embed.
//   wreq               weight load port, one tensor element per cycle
//                      (tn_pkg::wreq_t; layer 0 SMPO, 1 and 2 cascade layers).
//   *_median, *_thresh calibration of each model (nrm_t, 8 fraction bits).
//   smpo_* / csmpo_*   results; *_valid is a one-cycle pulse, the other outputs
//                      hold until the next event. *_sat flags a clipped norm.
// Timing: counting the cycle in which the event is accepted as cycle 0,
// smpo_valid is high in cycle 14 and csmpo_valid in cycle 11 (77 ns and
// 60.5 ns at the 5.5 ns clock period of the reference FPGA implementation).
// The lint note that rst_n is used both asynchronously and synchronously
// refers to the disable condition of the assertion below; the logic itself
// uses rst_n only as an asynchronous reset.
module tn_trigger_top
  import tn_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  particle_t particles [NSITE],
  input  wreq_t     wreq,
  input  nrm_t      smpo_median,
  input  nrm_t      smpo_thresh,
  input  nrm_t      csmpo_median,
  input  nrm_t      csmpo_thresh,
  output logic      smpo_valid,
  output nrm_t      smpo_nrm,
  output nrm_t      smpo_score,
  output logic      smpo_trig,
  output logic      smpo_sat,
  output logic      csmpo_valid,
  output nrm_t      csmpo_nrm,
  output nrm_t      csmpo_score,
  output logic      csmpo_trig,
  output logic      csmpo_sat
);

  logic accept;
  logic pend_s, pend_c;
  assign in_ready = !pend_s && !pend_c;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_s <= 1'b0;
      pend_c <= 1'b0;
    end else begin
      if (accept)          pend_s <= 1'b1;
      else if (smpo_valid) pend_s <= 1'b0;
      if (accept)           pend_c <= 1'b1;
      else if (csmpo_valid) pend_c <= 1'b0;
    end
  end

  // ---- embedding and normalisation ------------------------------------------
  logic emb_valid, gam_valid;
  fx_t  sites [NSITE][PHYS_IN];
  fx_t  inv_gamma;

  event_embed u_embed (
    .clk, .rst_n, .in_valid(accept), .particles,
    .out_valid(emb_valid), .sites
  );

  mps_gamma #(.NS(NSITE)) u_gamma (
    .clk, .rst_n, .in_valid(emb_valid), .sites,
    .out_valid(gam_valid), .inv_gamma
  );

  // ---- single SMPO ------------------------------------------------------------
  fx_t  smpo_in [NSITE][PHYS_IN][1][1];
  always_comb
    for (int s = 0; s < NSITE; s++)
      for (int i = 0; i < PHYS_IN; i++) smpo_in[s][i][0][0] = sites[s][i];

  logic s_busy, s_done, s_sat;
  fx_t  s_vec [PHYS_OUT];   // unscaled output vector, not needed by the trigger
  nrm_t s_nrm;

  smpo_engine #(.NS(NSITE), .PI(PHYS_IN), .PO(PHYS_OUT), .BW(SMPO_B), .BM(1),
                .LAYER(2'd0)) u_smpo (
    .clk, .rst_n, .wreq, .start(emb_valid), .mps(smpo_in), .gscale(inv_gamma),
    .busy(s_busy), .done(s_done), .vec(s_vec), .nrm(s_nrm), .sat(s_sat)
  );

  // ---- cascaded SMPO ------------------------------------------------------------
  logic c_busy, c_done, c_sat;
  fx_t  c_vec [PHYS_OUT];   // unscaled output vector, not needed by the trigger
  nrm_t c_nrm;

  csmpo_engine #(.NS(NSITE), .PI(PHYS_IN), .PM(PHYS_MID), .PO(PHYS_OUT),
                 .B1(CS_B1), .B2(CS_B2), .SPACE(CS_SPACE)) u_csmpo (
    .clk, .rst_n, .wreq, .start(emb_valid), .mps(sites), .gscale(inv_gamma),
    .busy(c_busy), .done(c_done), .vec(c_vec), .nrm(c_nrm), .sat(c_sat)
  );

  // ---- scores and decisions ----------------------------------------------------
  anomaly_score u_score_s (
    .clk, .rst_n, .in_valid(s_done), .nrm(s_nrm), .median(smpo_median),
    .threshold(smpo_thresh), .out_valid(smpo_valid), .score(smpo_score),
    .trig(smpo_trig)
  );

  anomaly_score u_score_c (
    .clk, .rst_n, .in_valid(c_done), .nrm(c_nrm), .median(csmpo_median),
    .threshold(csmpo_thresh), .out_valid(csmpo_valid), .score(csmpo_score),
    .trig(csmpo_trig)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      smpo_nrm <= '0; smpo_sat <= 1'b0;
      csmpo_nrm <= '0; csmpo_sat <= 1'b0;
    end else begin
      if (s_done) begin smpo_nrm <= s_nrm; smpo_sat <= s_sat; end
      if (c_done) begin csmpo_nrm <= c_nrm; csmpo_sat <= c_sat; end
    end
  end

  // the engines are only started while the top is holding an event
  assert property (@(posedge clk) disable iff (!rst_n) emb_valid |-> (!s_busy && !c_busy));
  // 1/Gamma is ready long before either engine samples it
  assert property (@(posedge clk) disable iff (!rst_n) (s_done || c_done) |-> !emb_valid && !gam_valid);

endmodule
