// tb_group_contract: cascade layer-1 grouped contraction (chain of two 2x2
// bond matrices, then absorption into the output site on the right), for an
// interior group (right bond 2) and for the last group (right bond 1).
// Checks values and the two-cycle latency.
// The chain-then-absorb order is the published one; the two-cycle timing
// is this design's own.
module tb_group_contract;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, ov0, ov1;
  fx_t a1 [2][2], a2 [2][2];
  fx_t c0 [3][2][2], c1 [3][2][1];
  fx_t o0 [3][2][2], o1 [3][2][1];

  group_contract u0 (.clk, .rst_n, .in_valid, .a1, .a2, .c(c0), .out_valid(ov0), .out(o0));
  group_contract #(.B1(2), .P(3), .BR(1)) u1 (.clk, .rst_n, .in_valid, .a1, .a2, .c(c1), .out_valid(ov1), .out(o1));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d [2][2], e0 [3][2][2], e1 [3][2];
    longint a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int l = 0; l < 2; l++)
        for (int r = 0; r < 2; r++) begin
          a1[l][r] = fx_t'(rnd_fx(n < 100 ? 2048 : 32767));
          a2[l][r] = fx_t'(rnd_fx(n < 100 ? 2048 : 32767));
          for (int p = 0; p < 3; p++) c0[p][l][r] = fx_t'(rnd_fx(4096));
        end
      for (int p = 0; p < 3; p++) for (int l = 0; l < 2; l++) c1[p][l][0] = fx_t'(rnd_fx(4096));
      for (int l = 0; l < 2; l++)
        for (int r = 0; r < 2; r++) begin
          a = 0;
          for (int k = 0; k < 2; k++) a += longint'(a1[l][k]) * a2[k][r];
          d[l][r] = fxq(a);
        end
      for (int p = 0; p < 3; p++)
        for (int l = 0; l < 2; l++) begin
          for (int r = 0; r < 2; r++) begin
            a = 0;
            for (int k = 0; k < 2; k++) a += longint'(d[l][k]) * c0[p][k][r];
            e0[p][l][r] = fxq(a);
          end
          a = 0;
          for (int k = 0; k < 2; k++) a += longint'(d[l][k]) * c1[p][k][0];
          e1[p][l] = fxq(a);
        end
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks++;
      if (ov0 || ov1) begin failures++; $display("out_valid too early"); end
      @(negedge clk);
      checks++;
      if (!ov0 || !ov1) begin failures++; $display("out_valid missing"); end
      for (int p = 0; p < 3; p++)
        for (int l = 0; l < 2; l++) begin
          for (int r = 0; r < 2; r++) begin
            checks++;
            if (int'(o0[p][l][r]) != e0[p][l][r]) begin failures++; if (failures < 10) $display("o0 %0d exp %0d", o0[p][l][r], e0[p][l][r]); end
          end
          checks++;
          if (int'(o1[p][l][0]) != e1[p][l]) begin failures++; if (failures < 10) $display("o1 %0d exp %0d", o1[p][l][0], e1[p][l]); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
