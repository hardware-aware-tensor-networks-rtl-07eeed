// tb_vert_contract: random check of the vertical contraction unit, once in
// its plain form (single SMPO interior site: bond 4, output leg 3) and once
// with composite bonds (second cascade layer: MPS bond 2 x operator bond 2).
// Expected values are the direct sums over the physical index.
// The contraction is the published one; the composite index layout is this
// design's own.
module tb_vert_contract;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  fx_t m0 [3][1][1];
  fx_t w0 [3][3][4][4];
  fx_t o0 [3][4][4];
  fx_t m1 [3][2][2];
  fx_t w1 [3][3][2][2];
  fx_t o1 [3][4][4];

  vert_contract u0 (.mps(m0), .w(w0), .out(o0));
  vert_contract #(.PI(3), .PO(3), .ML(2), .MR(2), .WL(2), .WR(2)) u1 (.mps(m1), .w(w1), .out(o1));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      int lim;
      lim = (t < 100) ? 1024 : 32767;   // second half lets the sums wrap
      for (int i = 0; i < 3; i++) begin
        m0[i][0][0] = fx_t'(rnd_fx(lim));
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) m1[i][a][b] = fx_t'(rnd_fx(lim));
        for (int p = 0; p < 3; p++)
          for (int l = 0; l < 4; l++)
            for (int r = 0; r < 4; r++) begin
              w0[i][p][l][r] = fx_t'(rnd_fx(lim));
              if (l < 2 && r < 2) w1[i][p][l][r] = fx_t'(rnd_fx(lim));
            end
      end
      #1;
      for (int p = 0; p < 3; p++)
        for (int l = 0; l < 4; l++)
          for (int r = 0; r < 4; r++) begin
            longint a0, a1;
            a0 = 0; a1 = 0;
            for (int i = 0; i < 3; i++) begin
              a0 += longint'(m0[i][0][0]) * w0[i][p][l][r];
              a1 += longint'(m1[i][l/2][r/2]) * w1[i][p][l%2][r%2];
            end
            checks += 2;
            if (int'(o0[p][l][r]) != fxq(a0)) begin
              failures++;
              if (failures < 10) $display("plain p%0d l%0d r%0d: got %0d exp %0d", p, l, r, o0[p][l][r], fxq(a0));
            end
            if (int'(o1[p][l][r]) != fxq(a1)) begin
              failures++;
              if (failures < 10) $display("composite p%0d l%0d r%0d: got %0d exp %0d", p, l, r, o1[p][l][r], fxq(a1));
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
