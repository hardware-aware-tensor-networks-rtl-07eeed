// tb_bidir_sweep: the bi-directional sweep against a step-by-step model of
// the two environment updates, at the single-SMPO size (bond 4, 8 steps per
// wing). Also checks that done arrives exactly NSTEP cycles after start and
// that the environments hold afterwards.
// The sweep order follows the published contraction scheme; the one-step-
// per-clock timing that is checked is this design's own.
module tb_bidir_sweep;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  localparam int B = 4, NSTEP = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fx_t lenv0 [B], renv0 [B], lenv [B], renv [B];
  fx_t lmat [NSTEP][B][B], rmat [NSTEP][B][B];

  bidir_sweep #(.B(B), .NSTEP(NSTEP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int el [B], er [B], nl [B], nr [B];
    int cyc;
    longint a;
    for (int i = 0; i < B; i++) begin lenv0[i] = '0; renv0[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < B; i++) begin
        lenv0[i] = fx_t'(rnd_fx(1024)); renv0[i] = fx_t'(rnd_fx(1024));
        el[i] = lenv0[i]; er[i] = renv0[i];
      end
      for (int k = 0; k < NSTEP; k++)
        for (int l = 0; l < B; l++)
          for (int r = 0; r < B; r++) begin
            lmat[k][l][r] = fx_t'(rnd_fx(700));
            rmat[k][l][r] = fx_t'(rnd_fx(700));
          end
      for (int k = 0; k < NSTEP; k++) begin
        for (int r = 0; r < B; r++) begin
          a = 0;
          for (int b = 0; b < B; b++) a += longint'(el[b]) * lmat[k][b][r];
          nl[r] = fxq(a);
          a = 0;
          for (int b = 0; b < B; b++) a += longint'(rmat[k][r][b]) * er[b];
          nr[r] = fxq(a);
        end
        el = nl; er = nr;
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != NSTEP) begin failures++; $display("latency %0d, expected %0d", cyc, NSTEP); end
      repeat (2) @(negedge clk);   // results must hold after done
      for (int i = 0; i < B; i++) begin
        checks += 2;
        if (int'(lenv[i]) != el[i]) begin failures++; if (failures < 10) $display("lenv[%0d] %0d exp %0d", i, lenv[i], el[i]); end
        if (int'(renv[i]) != er[i]) begin failures++; if (failures < 10) $display("renv[%0d] %0d exp %0d", i, renv[i], er[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
