// tb_smpo_engine: the single-layer SMPO 19 -> 1 (bond 4, output leg 3 at the
// middle site) at its full size. Random weights are loaded through the write
// port (every element, including the ones the network does not use, which
// must have no effect), random events are run and the output vector, the
// squared norm and its saturation flag are compared bit for bit with the
// whole-tensor reference model. Also checks the latency (done in cycle 12), that a
// start pulse while busy is ignored, and that large weights saturate the norm.
// Sizes are the published ones; weights and events are random, since trained
// weights are not available.
module tb_smpo_engine;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0, nsat = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, sat;
  wreq_t wreq;
  fx_t mps [19][3][1][1];
  fx_t gscale;
  fx_t vec [3];
  nrm_t nrm;

  w4_t W;
  x_t  X;

  smpo_engine dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights(int lim);
    for (int s = 0; s < 19; s++) for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++)
      for (int l = 0; l < 4; l++) for (int r = 0; r < 4; r++) begin
        @(negedge clk);
        W[s][i][p][l][r] = rnd_fx(lim);
        wreq = '{we: 1'b1, layer: 2'd0, site: 5'(s), pi: 2'(i), po: 2'(p), l: 2'(l), r: 2'(r),
                 data: fx_t'(W[s][i][p][l][r])};
      end
    @(negedge clk) wreq = '0;
  endtask

  task automatic run_event(bit poke_busy);
    int ev [3], en, cyc;
    bit es;
    for (int s = 0; s < 19; s++)
      for (int i = 0; i < 3; i++) begin
        X[s][i] = int'($urandom_range(1024));
        mps[s][i][0][0] = fx_t'(X[s][i]);
      end
    gscale = fx_t'($urandom_range(1400, 700));
    smpo_ref(X, W, int'(gscale), ev, en, es);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    // inputs are sampled at start: change them
    for (int s = 0; s < 19; s++) mps[s][0][0][0] = fx_t'($urandom);
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (poke_busy && cyc == 4) start = 1;
      else start = 0;
      if (cyc > 50) break;
    end
    start = 0;
    checks += 4;
    if (cyc != 12) begin failures++; $display("latency %0d, expected 12", cyc); end
    if (int'(nrm) != en) begin failures++; if (failures < 10) $display("nrm %0d exp %0d", nrm, en); end
    if (sat != es) begin failures++; $display("sat %0b exp %0b", sat, es); end
    if (busy) begin failures++; $display("busy after done"); end
    for (int p = 0; p < 3; p++) begin
      checks++;
      if (int'(vec[p]) != ev[p]) begin failures++; if (failures < 10) $display("vec[%0d] %0d exp %0d", p, vec[p], ev[p]); end
    end
    if (es) nsat++;
    @(negedge clk);
    checks++;
    if (done) begin failures++; $display("second done from ignored start"); end
  endtask

  initial begin
    wreq = '0;
    gscale = FX_ONE;
    for (int s = 0; s < 19; s++) for (int i = 0; i < 3; i++) mps[s][i][0][0] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights(640);
    for (int n = 0; n < 20; n++) run_event(n % 4 == 1);
    load_weights(2400);              // strong weights: large norms
    for (int n = 0; n < 20; n++) run_event(1'b0);
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("saturated events %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
