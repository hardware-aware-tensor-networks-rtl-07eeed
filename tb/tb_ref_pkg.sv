// tb_ref_pkg: reference arithmetic for the testbenches.
//
// A plain, loop-by-loop model of the network evaluation written on whole
// tensors with int/longint arithmetic, independent of the RTL structure. It
// reproduces the number formats of the design: every contraction result is
// truncated to 10 fraction bits and wrapped to 16 bits; the squared norm is
// truncated to 8 fraction bits and saturated to 16 bits.
// Tensors are stored as [site][p][l][r] with the largest bond (4) and the
// largest physical dimension (3); open boundary bonds use index 0 only.
package tb_ref_pkg;

  typedef int tens_t [19][3][4][4];

  function automatic int fxq(input longint a);
    return int'(shortint'(a >>> 10));
  endfunction

  function automatic int nrmq(input longint a);
    longint s;
    s = a >>> 12;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  // random fx value in [-lim, lim] (lim in LSBs)
  function automatic int rnd_fx(input int lim);
    return int'($urandom_range(2*lim, 0)) - lim;
  endfunction

  // horizontal contraction of an NS-site chain of contracted tensors T with
  // composite bond B and output site (NS-1)/2: bi-directional sweep, then the
  // two merge passes
  function automatic void chain_ref(input tens_t T, input int NS, input int B,
                                    input int PO, output int vec [3]);
    int lenv [4], renv [4], nl [4], nr [4], rc [3][4];
    int out_s;
    longint a;
    out_s = (NS - 1) / 2;
    for (int r = 0; r < B; r++) lenv[r] = T[0][0][0][r];
    for (int l = 0; l < B; l++) renv[l] = T[NS-1][0][l][0];
    for (int s = 1; s < out_s; s++) begin
      for (int r = 0; r < B; r++) begin
        a = 0;
        for (int b = 0; b < B; b++) a += longint'(lenv[b]) * T[s][0][b][r];
        nl[r] = fxq(a);
      end
      for (int l = 0; l < B; l++) begin
        a = 0;
        for (int b = 0; b < B; b++) a += longint'(T[NS-1-s][0][l][b]) * renv[b];
        nr[l] = fxq(a);
      end
      lenv = nl;
      renv = nr;
    end
    for (int p = 0; p < PO; p++)
      for (int l = 0; l < B; l++) begin
        a = 0;
        for (int r = 0; r < B; r++) a += longint'(T[out_s][p][l][r]) * renv[r];
        rc[p][l] = fxq(a);
      end
    for (int p = 0; p < 3; p++) vec[p] = 0;
    for (int p = 0; p < PO; p++) begin
      a = 0;
      for (int l = 0; l < B; l++) a += longint'(lenv[l]) * rc[p][l];
      vec[p] = fxq(a);
    end
  endfunction

  function automatic int norm_ref(input int vec [3], input int g, output bit sat);
    longint a;
    int s;
    a = 0;
    for (int p = 0; p < 3; p++) begin
      s = fxq(longint'(vec[p]) * g);
      a += longint'(s) * s;
    end
    sat = (a >>> 12) > 32767;
    return nrmq(a);
  endfunction

  typedef int w4_t [19][3][3][4][4];   // [site][pi][po][l][r]
  typedef int w2_t [19][3][3][2][2];
  typedef int x_t  [19][3];

  // single SMPO 19 -> 1, bond 4, output site 9
  function automatic void smpo_ref(input x_t x, input w4_t w, input int g,
                                   output int vec [3], output int nrm, output bit sat);
    tens_t t;
    longint a;
    for (int s = 0; s < 19; s++)
      for (int p = 0; p < 3; p++)
        for (int l = 0; l < 4; l++)
          for (int r = 0; r < 4; r++) begin
            t[s][p][l][r] = 0;
            if ((p == 0 || s == 9) && (l == 0 || s != 0) && (r == 0 || s != 18)) begin
              a = 0;
              for (int i = 0; i < 3; i++) a += longint'(x[s][i]) * w[s][i][p][l][r];
              t[s][p][l][r] = fxq(a);
            end
          end
    chain_ref(t, 19, 4, 3, vec);
    nrm = norm_ref(vec, g, sat);
  endfunction

  // cascaded SMPO 19 -> 7 -> 1, bonds 2 and 2, spacing 3
  function automatic void csmpo_ref(input x_t x, input w2_t w1, input w2_t w2, input int g,
                                    output int vec [3], output int nrm, output bit sat);
    int u [19][3][2][2];      // layer-1 contracted sites
    int m [7][3][2][2];       // intermediate MPS [site][p'][l][r]
    int d [2][2];
    tens_t t;
    longint a;
    for (int s = 0; s < 19; s++)
      for (int p = 0; p < 3; p++)
        for (int l = 0; l < 2; l++)
          for (int r = 0; r < 2; r++) begin
            u[s][p][l][r] = 0;
            if ((p == 0 || s % 3 == 0) && (l == 0 || s != 0) && (r == 0 || s != 18)) begin
              a = 0;
              for (int i = 0; i < 3; i++) a += longint'(x[s][i]) * w1[s][i][p][l][r];
              u[s][p][l][r] = fxq(a);
            end
          end
    m[0] = u[0];
    for (int k = 1; k < 7; k++) begin
      for (int l = 0; l < 2; l++)
        for (int r = 0; r < 2; r++) begin
          a = 0;
          for (int j = 0; j < 2; j++) a += longint'(u[3*k-2][0][l][j]) * u[3*k-1][0][j][r];
          d[l][r] = fxq(a);
        end
      for (int p = 0; p < 3; p++)
        for (int l = 0; l < 2; l++)
          for (int r = 0; r < 2; r++) begin
            a = 0;
            for (int j = 0; j < 2; j++) a += longint'(d[l][j]) * u[3*k][p][j][r];
            m[k][p][l][r] = (k == 6 && r != 0) ? 0 : fxq(a);
          end
    end
    // layer 2: composite bonds, index = mps bond * 2 + operator bond
    for (int s = 0; s < 19; s++)
      for (int p = 0; p < 3; p++)
        for (int l = 0; l < 4; l++)
          for (int r = 0; r < 4; r++) t[s][p][l][r] = 0;
    for (int s = 0; s < 7; s++)
      for (int p = 0; p < ((s == 3) ? 3 : 1); p++)
        for (int lm = 0; lm < ((s == 0) ? 1 : 2); lm++)
          for (int ls = 0; ls < ((s == 0) ? 1 : 2); ls++)
            for (int rm = 0; rm < ((s == 6) ? 1 : 2); rm++)
              for (int rs = 0; rs < ((s == 6) ? 1 : 2); rs++) begin
                a = 0;
                for (int i = 0; i < 3; i++) a += longint'(m[s][i][lm][rm]) * w2[s][i][p][ls][rs];
                t[s][p][lm*((s == 0) ? 1 : 2) + ls][rm*((s == 6) ? 1 : 2) + rs] = fxq(a);
              end
    chain_ref(t, 7, 4, 3, vec);
    nrm = norm_ref(vec, g, sat);
  endfunction

endpackage
