// tb_merge3: three-site contraction against the two-pass formula of the
// reference MAC count, at the single-SMPO size (p_o = 3, bond 4). Checks the
// two-cycle latency.
// The two passes follow the published MAC breakdown; their timing is this
// design's own.
module tb_merge3;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t t [3][4][4];
  fx_t lenv [4], renv [4], out [3];

  merge3 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rc [3][4], ex [3];
    longint a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        lenv[l] = fx_t'(rnd_fx(n < 100 ? 2048 : 32767));
        renv[l] = fx_t'(rnd_fx(n < 100 ? 2048 : 32767));
        for (int p = 0; p < 3; p++) for (int r = 0; r < 4; r++) t[p][l][r] = fx_t'(rnd_fx(2048));
      end
      for (int p = 0; p < 3; p++)
        for (int l = 0; l < 4; l++) begin
          a = 0;
          for (int r = 0; r < 4; r++) a += longint'(t[p][l][r]) * renv[r];
          rc[p][l] = fxq(a);
        end
      for (int p = 0; p < 3; p++) begin
        a = 0;
        for (int l = 0; l < 4; l++) a += longint'(lenv[l]) * rc[p][l];
        ex[p] = fxq(a);
      end
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      for (int l = 0; l < 4; l++) begin lenv[l] = '0; renv[l] = '0; end   // inputs only valid for one cycle
      checks++;
      if (out_valid) begin failures++; $display("out_valid after one cycle"); end
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing after two cycles"); end
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (int'(out[p]) != ex[p]) begin failures++; if (failures < 10) $display("out[%0d] %0d exp %0d", p, out[p], ex[p]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
