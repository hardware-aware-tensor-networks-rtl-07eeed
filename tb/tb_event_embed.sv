// tb_event_embed: embedding of random events against the real-valued
// formulas x0 = pT/pT_ref, x1 = (eta+5)/10, x2 = (phi+pi)/(2 pi), with a
// tolerance of 2 LSB (2^-9) for the rounding of the constant multipliers; the
// spectral site order is checked element by element. Empty particles (all
// zero) must give (0, 0.5, 0.5).
// Scaling constants and site order are the published ones; the input
// formats are this design's own.
module tb_event_embed;
  import tn_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  particle_t particles [NSITE];
  fx_t sites [NSITE][PHYS_IN];

  event_embed dut (.*);
  always #5 clk = ~clk;

  // slot feeding each site, from the spectral order
  // e3 e2 j9 j8 e1 j7 j5 e0 MET mu0 j4 j0 j3 j1 j2 j6 mu1 mu2 mu3
  // with slots MET=0, e0..3=1..4, mu0..3=5..8, j0..9=9..18
  int src [NSITE] = '{4, 3, 18, 17, 2, 16, 14, 1, 0, 5, 13, 9, 12, 10, 11, 15, 6, 7, 8};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ptref(int slot);
    if (slot >= 9) return 2500.0;
    if (slot >= 5) return 800.0;
    return 1200.0;
  endfunction

  task automatic chk(int k, int i, real exp_v);
    real got;
    got = real'(sites[k][i]) / 1024.0;
    checks++;
    if (got - exp_v > 2.0/1024.0 || exp_v - got > 2.0/1024.0) begin
      failures++;
      if (failures < 10) $display("site %0d comp %0d: %f exp %f", k, i, got, exp_v);
    end
  endtask

  initial begin
    real pi_c;
    pi_c = 3.14159265358979;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int s = 0; s < NSITE; s++) begin
        if ($urandom_range(3) == 0) particles[s] = '0;   // absent particle
        else begin
          particles[s].pt  = 16'($urandom_range(n < 150 ? 4000 : 65535));
          particles[s].eta = fx_t'(int'($urandom_range(2*5*1024)) - 5*1024);
          particles[s].phi = fx_t'(int'($urandom_range(2*3217)) - 3217);
        end
      end
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int k = 0; k < NSITE; k++) begin
        int sl;
        real eta;
        sl = src[k];
        eta = (sl == 0) ? 0.0 : real'(particles[sl].eta) / 1024.0;
        chk(k, 0, real'(particles[sl].pt) / 4.0 / ptref(sl));
        chk(k, 1, (eta + 5.0) / 10.0);
        chk(k, 2, (real'(particles[sl].phi) / 1024.0 + pi_c) / (2.0 * pi_c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
