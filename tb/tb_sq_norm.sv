// tb_sq_norm: scaled squared norm, truncated and saturated to 8 fraction bits
// (range [-128, 128)). Random vectors, some large enough to saturate; checks
// the value, the saturation flag and the one-cycle latency.
// The output format is the published one; the scaling by 1/Gamma at the
// output is this design's own.
module tb_sq_norm;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0, nsat = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, sat;
  fx_t v [3], gscale;
  nrm_t nrm;

  sq_norm dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vi [3], ex;
    bit es;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        vi[p] = rnd_fx(n % 2 ? 4096 : 12288);
        v[p] = fx_t'(vi[p]);
      end
      gscale = fx_t'($urandom_range(2048, 256));
      ex = norm_ref(vi, int'(gscale), es);
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks += 3;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      if (int'(nrm) != ex) begin failures++; if (failures < 10) $display("nrm %0d exp %0d", nrm, ex); end
      if (sat != es) begin failures++; $display("sat %0b exp %0b", sat, es); end
      if (es) nsat++;
    end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("saturated %0d of 400", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
