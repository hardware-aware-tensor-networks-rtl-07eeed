// tb_mps_gamma: 1/Gamma = (prod ||x_i||)^(-1/19) for random embedded events
// against the real-valued formula. The log-domain approximation and the fx_t
// resolution are allowed 1 % relative error plus 2 LSB.
// The formula is the published one; the approximation tolerance is this
// design's own.
module tb_mps_gamma;
  import tn_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t sites [NSITE][PHYS_IN];
  fx_t inv_gamma;
  real worst = 0.0;

  mps_gamma dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      real lg, ex, got, err;
      @(negedge clk);
      lg = 0.0;
      for (int s = 0; s < NSITE; s++) begin
        real s2;
        s2 = 0.0;
        for (int i = 0; i < PHYS_IN; i++) begin
          // mostly realistic values in [0,1]; some events with larger pT
          sites[s][i] = fx_t'($urandom_range((n % 5 == 0 && i == 0) ? 8192 : 1024, (i == 0) ? 0 : 1));
          s2 += (real'(sites[s][i]) / 1024.0) ** 2;
        end
        lg += 0.5 * $ln(s2);
      end
      ex = $exp(-lg / 19.0);
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      got = real'(inv_gamma) / 1024.0;
      err = got - ex;
      if (err < 0) err = -err;
      if (err / ex > worst) worst = err / ex;
      checks += 2;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      if (err > 0.01 * ex + 2.0/1024.0) begin
        failures++;
        if (failures < 10) $display("inv_gamma %f exp %f", got, ex);
      end
    end
    $display("worst relative error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
