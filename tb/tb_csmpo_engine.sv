// tb_csmpo_engine: the cascaded SMPO 19 -> 7 -> 1 (bonds 2 and 2, spacing 3)
// at its full size. Random layer-1 and layer-2 weights are loaded through the
// write port (every element of both arrays), random events are run and the
// output vector, squared norm and saturation flag are compared bit for bit
// with the whole-tensor reference model, including the grouped contraction
// and the composite bonds of layer 2. Also checks the latency (done in cycle 9) and that busy covers the whole run.
// Sizes are the published ones; weights and events are random, since trained
// weights are not available.
module tb_csmpo_engine;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0, nsat = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, sat;
  wreq_t wreq;
  fx_t mps [19][3];
  fx_t gscale;
  fx_t vec [3];
  nrm_t nrm;

  w2_t W1, W2;
  x_t  X;

  csmpo_engine dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights(int lim);
    for (int layer = 1; layer <= 2; layer++)
      for (int s = 0; s < (layer == 1 ? 19 : 7); s++) for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++)
        for (int l = 0; l < 2; l++) for (int r = 0; r < 2; r++) begin
          int v;
          @(negedge clk);
          v = rnd_fx(lim);
          if (layer == 1) W1[s][i][p][l][r] = v; else W2[s][i][p][l][r] = v;
          wreq = '{we: 1'b1, layer: 2'(layer), site: 5'(s), pi: 2'(i), po: 2'(p), l: 2'(l), r: 2'(r),
                   data: fx_t'(v)};
        end
    @(negedge clk) wreq = '0;
  endtask

  task automatic run_event();
    int ev [3], en, cyc;
    bit es;
    for (int s = 0; s < 19; s++)
      for (int i = 0; i < 3; i++) begin
        X[s][i] = int'($urandom_range(1024));
        mps[s][i] = fx_t'(X[s][i]);
      end
    gscale = fx_t'($urandom_range(1400, 700));
    csmpo_ref(X, W1, W2, int'(gscale), ev, en, es);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int s = 0; s < 19; s++) mps[s][0] = fx_t'($urandom);
    cyc = 1;
    while (!done && cyc < 50) begin
      checks++;
      if (!busy) begin failures++; $display("busy low in cycle %0d", cyc); end
      @(negedge clk); cyc++;
    end
    checks++;
    if (busy) begin failures++; $display("busy high with done"); end
    checks += 3;
    if (cyc != 9) begin failures++; $display("latency %0d, expected 9", cyc); end
    if (int'(nrm) != en) begin failures++; if (failures < 10) $display("nrm %0d exp %0d", nrm, en); end
    if (sat != es) begin failures++; $display("sat %0b exp %0b", sat, es); end
    for (int p = 0; p < 3; p++) begin
      checks++;
      if (int'(vec[p]) != ev[p]) begin failures++; if (failures < 10) $display("vec[%0d] %0d exp %0d", p, vec[p], ev[p]); end
    end
    if (es) nsat++;
  endtask

  initial begin
    wreq = '0;
    gscale = FX_ONE;
    for (int s = 0; s < 19; s++) for (int i = 0; i < 3; i++) mps[s][i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights(900);
    for (int n = 0; n < 30; n++) run_event();
    load_weights(3000);
    for (int n = 0; n < 30; n++) run_event();
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("saturated events %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
