// tb_anomaly_score: score = |norm - median| (saturating) and the threshold
// decision, with random and corner values (saturation, score exactly equal to
// the threshold); one-cycle latency.
// Score formula from the published model; the strict comparison and the
// random stimulus are this design's own. Watchdog: 20000 cycles.
module tb_anomaly_score;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0, nfire = 0, nsat = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, trig;
  nrm_t nrm, median, threshold, score;

  anomaly_score dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, es;
    bit et;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      nrm       = nrm_t'($urandom_range(65535));
      median    = (n % 3 == 0) ? nrm_t'($urandom_range(65535)) : nrm_t'($urandom_range(12800));
      threshold = nrm_t'($urandom_range(6400));
      if (n == 7) begin nrm = 16'sh7fff; median = 16'sh8000; end
      d  = int'(nrm) - int'(median);
      if (d < 0) d = -d;
      // every fifth event sits exactly on the threshold: it must not fire
      if (n % 5 == 4 && d <= 32767) threshold = nrm_t'(d);
      es = d > 32767 ? 32767 : d;
      if (d > 32767) nsat++;
      et = es > int'(threshold);
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks += 3;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      if (int'(score) != es) begin failures++; if (failures < 10) $display("score %0d exp %0d", score, es); end
      if (trig != et) begin failures++; if (failures < 10) $display("trig %0b exp %0b", trig, et); end
      if (et) nfire++;
    end
    checks += 2;
    if (nfire == 0 || nfire == 500) begin failures++; $display("trigger decision not exercised both ways"); end
    if (nsat == 0) begin failures++; $display("score saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
