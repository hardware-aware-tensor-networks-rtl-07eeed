// tb_tn_trigger_top: end-to-end test of the trigger at its full size.
//
// Loads random weights into all three layers through the load port, then
// sends random collision events (with absent, zero-padded particles) through
// the in_valid/in_ready handshake, partly back to back so that the source is
// held off. For every event the squared norms, anomaly scores, trigger
// decisions and saturation flags of both models are compared bit for bit with
// a reference model (embedding recomputed from the formulas, whole-tensor
// network evaluation). 1/Gamma is taken from the design and checked against
// the real-valued formula to 1 %. Latencies: smpo_valid in cycle 14 and
// csmpo_valid in cycle 11 after the accepting cycle.
// Phases: (1) moderate weights, threshold above every score (no trigger);
// (2) threshold set near the typical score, so some events fire and some do
// not; (3) strong weights reloaded, so that norms saturate.
// Every mechanism is counted and a failure is counted for one that never
// happened: handshake hold-off, the SMPO sweep, the cascade's grouped
// contraction, absent particles, norm saturation in each model, trigger
// accepted and rejected in each model, weight reload.
// Models, sizes and score formula are the published ones; weights, medians
// and thresholds are random or chosen here, since trained values are not
// available. Runs at the default size of the design (no parameter overrides).
module tb_tn_trigger_top;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready;
  particle_t particles [NSITE];
  wreq_t wreq;
  nrm_t smpo_median, smpo_thresh, csmpo_median, csmpo_thresh;
  logic smpo_valid, smpo_trig, smpo_sat, csmpo_valid, csmpo_trig, csmpo_sat;
  nrm_t smpo_nrm, smpo_score, csmpo_nrm, csmpo_score;

  tn_trigger_top dut (.*);
  always #5 clk = ~clk;

  w4_t W;
  w2_t W1, W2;

  int n_holdoff = 0, n_sweep = 0, n_group = 0, n_absent = 0, n_reload = 0;
  int n_sat_s = 0, n_sat_c = 0, n_fire_s = 0, n_fire_c = 0, n_rej_s = 0, n_rej_c = 0;
  int n_events = 0;

  always @(posedge clk) begin
    if (rst_n && in_valid && !in_ready) n_holdoff++;
    if (rst_n && dut.u_smpo.u_sweep.done) n_sweep++;
    if (rst_n && dut.u_csmpo.grp_valid[0]) n_group++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int src [NSITE] = '{4, 3, 18, 17, 2, 16, 14, 1, 0, 5, 13, 9, 12, 10, 11, 15, 6, 7, 8};

  function automatic int recip(int slot);
    real r;
    r = (slot >= 9) ? 2500.0 : (slot >= 5) ? 800.0 : 1200.0;
    return int'($floor(16777216.0 / r + 0.5));
  endfunction

  task automatic wr(int layer, int s, int i, int p, int l, int r, int v);
    @(negedge clk);
    wreq = '{we: 1'b1, layer: 2'(layer), site: 5'(s), pi: 2'(i), po: 2'(p), l: 2'(l), r: 2'(r), data: fx_t'(v)};
  endtask

  task automatic load_all(int lim4, int lim2);
    for (int s = 0; s < 19; s++) for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++)
      for (int l = 0; l < 4; l++) for (int r = 0; r < 4; r++) begin
        W[s][i][p][l][r] = rnd_fx(lim4);
        wr(0, s, i, p, l, r, W[s][i][p][l][r]);
      end
    for (int s = 0; s < 19; s++) for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++)
      for (int l = 0; l < 2; l++) for (int r = 0; r < 2; r++) begin
        W1[s][i][p][l][r] = rnd_fx(lim2);
        wr(1, s, i, p, l, r, W1[s][i][p][l][r]);
        if (s < 7) begin
          W2[s][i][p][l][r] = rnd_fx(lim2);
          wr(2, s, i, p, l, r, W2[s][i][p][l][r]);
        end
      end
    @(negedge clk) wreq = '0;
  endtask

  // one event; back_to_back raises in_valid in the cycle after a result
  task automatic run_event(bit back_to_back, output int s_score);
    x_t X;
    int ev [3], ens, enc, es_s, es_c, cyc, tv, cv;
    bit ss, sc, got_s, got_c;
    real lg, g_exp, g_got;
    for (int n = 0; n < NSITE; n++) begin
      if ($urandom_range(2) == 0) begin particles[n] = '0; n_absent++; end
      else begin
        particles[n].pt  = 16'($urandom_range(n >= 9 ? 4000 : 2000));
        particles[n].eta = fx_t'(int'($urandom_range(8*1024)) - 4*1024);
        particles[n].phi = fx_t'(int'($urandom_range(2*3217)) - 3217);
      end
    end
    // reference embedding, in the spectral site order
    lg = 0.0;
    for (int k = 0; k < NSITE; k++) begin
      int sl;
      real s2;
      sl = src[k];
      X[k][0] = int'(shortint'((longint'(particles[sl].pt) * recip(sl)) >>> 16));
      X[k][1] = (sl == 0) ? 512 : int'(shortint'(((longint'(particles[sl].eta) * 1677722) >>> 24) + 512));
      X[k][2] = int'(shortint'(((longint'(particles[sl].phi) * 2670177) >>> 24) + 512));
      s2 = 0.0;
      for (int i = 0; i < 3; i++) s2 += (real'(X[k][i]) / 1024.0) ** 2;
      lg += 0.5 * $ln(s2);
    end
    g_exp = $exp(-lg / 19.0);
    if (!back_to_back) @(negedge clk);
    in_valid = 1;
    // wait for acceptance
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    n_events++;
    cyc = 1; got_s = 0; got_c = 0; tv = 0; cv = 0;
    while (!(got_s && got_c) && cyc < 40) begin
      if (smpo_valid)  begin got_s = 1; tv = cyc; end
      if (csmpo_valid) begin got_c = 1; cv = cyc; end
      if (!(got_s && got_c)) begin @(negedge clk); cyc++; end
    end
    g_got = real'(dut.inv_gamma) / 1024.0;
    checks += 3;
    if (g_got > g_exp * 1.01 + 2.0/1024.0 || g_got < g_exp * 0.99 - 2.0/1024.0) begin
      failures++; $display("inv_gamma %f exp %f", g_got, g_exp);
    end
    if (tv != 14) begin failures++; $display("smpo latency %0d, expected 14", tv); end
    if (cv != 11) begin failures++; $display("csmpo latency %0d, expected 11", cv); end
    smpo_ref(X, W, int'(dut.inv_gamma), ev, ens, ss);
    csmpo_ref(X, W1, W2, int'(dut.inv_gamma), ev, enc, sc);
    es_s = ens - int'(smpo_median);  if (es_s < 0) es_s = -es_s;  if (es_s > 32767) es_s = 32767;
    es_c = enc - int'(csmpo_median); if (es_c < 0) es_c = -es_c;  if (es_c > 32767) es_c = 32767;
    checks += 8;
    if (int'(smpo_nrm) != ens)    begin failures++; if (failures < 20) $display("smpo nrm %0d exp %0d", smpo_nrm, ens); end
    if (int'(csmpo_nrm) != enc)   begin failures++; if (failures < 20) $display("csmpo nrm %0d exp %0d", csmpo_nrm, enc); end
    if (int'(smpo_score) != es_s) begin failures++; if (failures < 20) $display("smpo score %0d exp %0d", smpo_score, es_s); end
    if (int'(csmpo_score) != es_c) begin failures++; if (failures < 20) $display("csmpo score %0d exp %0d", csmpo_score, es_c); end
    if (smpo_trig != (es_s > int'(smpo_thresh)))   begin failures++; $display("smpo trig"); end
    if (csmpo_trig != (es_c > int'(csmpo_thresh))) begin failures++; $display("csmpo trig"); end
    if (smpo_sat != ss)  begin failures++; $display("smpo sat %0b exp %0b", smpo_sat, ss); end
    if (csmpo_sat != sc) begin failures++; $display("csmpo sat %0b exp %0b", csmpo_sat, sc); end
    if (ss) n_sat_s++;
    if (sc) n_sat_c++;
    if (smpo_trig) n_fire_s++; else n_rej_s++;
    if (csmpo_trig) n_fire_c++; else n_rej_c++;
    s_score = es_s;
  endtask

  initial begin
    int sc, sum_s;
    wreq = '0;
    for (int n = 0; n < NSITE; n++) particles[n] = '0;
    smpo_median = nrm_t'(2 * 256); csmpo_median = nrm_t'(3 * 256);
    smpo_thresh = 16'sh7fff;       csmpo_thresh = 16'sh7fff;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1
    load_all(700, 1000);
    sum_s = 0;
    for (int n = 0; n < 20; n++) begin run_event(n % 2 == 1, sc); sum_s += sc; end
    // phase 2: thresholds near the typical score
    smpo_thresh  = nrm_t'(sum_s / 20);
    csmpo_thresh = nrm_t'(64);
    for (int n = 0; n < 30; n++) run_event(n % 3 == 0, sc);
    // phase 3: strong weights
    load_all(2400, 3000);
    n_reload++;
    for (int n = 0; n < 20; n++) run_event(1'b1, sc);

    $display("events %0d hold-off cycles %0d sweeps %0d groups %0d absent particles %0d reloads %0d",
             n_events, n_holdoff, n_sweep, n_group, n_absent, n_reload);
    $display("smpo: fired %0d rejected %0d saturated %0d", n_fire_s, n_rej_s, n_sat_s);
    $display("csmpo: fired %0d rejected %0d saturated %0d", n_fire_c, n_rej_c, n_sat_c);
    checks += 12;
    if (n_holdoff == 0) begin failures++; $display("no hold-off"); end
    if (n_sweep != n_events) begin failures++; $display("sweeps %0d != events", n_sweep); end
    if (n_group != n_events) begin failures++; $display("groups %0d != events", n_group); end
    if (n_absent == 0) begin failures++; $display("no absent particle"); end
    if (n_reload == 0) begin failures++; $display("no reload"); end
    if (n_sat_s == 0) begin failures++; $display("smpo never saturated"); end
    if (n_sat_c == 0) begin failures++; $display("csmpo never saturated"); end
    if (n_fire_s == 0) begin failures++; $display("smpo never fired"); end
    if (n_fire_c == 0) begin failures++; $display("csmpo never fired"); end
    if (n_rej_s == 0) begin failures++; $display("smpo never rejected"); end
    if (n_rej_c == 0) begin failures++; $display("csmpo never rejected"); end
    if (n_events != 70) begin failures++; $display("events %0d", n_events); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
