// mps_gamma: normalisation factor of the embedded event MPS.
//
// The event MPS is the tensor product of the 19 site vectors divided by
//     Gamma = (prod_i ||x_i||)^(1/19),
// so that events with many empty (zero-padded) particles do not collapse to a
// vanishing norm. This block computes 1/Gamma in fx_t, in the log domain:
//     s_i   = ||x_i||^2                           (exact)
//     L     = sum_i log2(s_i)
//     1/Gamma = 2^(-L/38)                         (38 = 2 * 19)
// log2 is taken from the position of the leading one plus a corrected linear
// interpolation of the mantissa, log2(1+m) ~ m + 0.3467 m (1-m); 2^f for the
// fraction part likewise as 1 + f - 0.3430 f (1-f); both err by less than
// about 0.3 %. The division by 38 is a multiplication by round(2^20/38).
// A site whose norm is zero counts as 2^-20. The result saturates at the
// largest fx_t value and flushes to zero below the fx_t resolution.
// The formula for Gamma is the reference model's; computing it in hardware,
// and the logarithmic method, are this design's choices.
// One register stage: out_valid follows in_valid by one cycle.
module mps_gamma
  import tn_pkg::*;
#(
  parameter int NS = 19
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  sites [NS][PHYS_IN],
  output logic out_valid,
  output fx_t  inv_gamma
);

  localparam int SW   = 36;           // width of a squared norm, 20 fraction bits
  localparam int LF   = 12;           // fraction bits of the logarithms
  localparam int LW   = 24;           // width of the log sum
  localparam longint SH   = 64'(LF) - 64'(FX_FRAC);   // LF -> FX_FRAC shift
  localparam longint INV38 = ((64'd1 << 20) + 19) / 38;   // round(2^20 / 38)
  localparam longint CLOG  = 1420;    // 0.3467 * 2^12
  localparam longint CEXP  = 1405;    // 0.3430 * 2^12

  // log2 of an unsigned value with 2*FX_FRAC fraction bits, LF fraction bits out
  function automatic logic signed [LW-1:0] log2_fx(input logic [SW-1:0] s);
    int k;
    logic [SW-1:0] norm;
    longint m, corr;
    k = 0;
    for (int b = 0; b < SW; b++) if (s[b]) k = b;
    norm = s << (SW - 1 - k);
    m    = longint'(norm[SW-2 -: LF]);
    corr = (m * ((64'd1 << LF) - m) * CLOG) >> (2*LF);
    return LW'((longint'(k) - 2*FX_FRAC) * (64'd1 << LF) + m + corr);
  endfunction

  logic signed [LW-1:0] lsum;
  fx_t g;

  always_comb begin
    longint e, ie, f, y;
    lsum = '0;
    for (int n = 0; n < NS; n++) begin
      logic [SW-1:0] s;
      s = '0;
      for (int i = 0; i < PHYS_IN; i++)
        s += SW'(mul(sites[n][i], sites[n][i]));
      lsum += log2_fx(s);
    end
    // e = -lsum / 38, LF fraction bits
    e  = -((longint'(lsum) * INV38) >>> 20);
    ie = e >>> LF;
    f  = e - (ie << LF);
    y  = (64'd1 << LF) + f - ((f * ((64'd1 << LF) - f) * CEXP) >> (2*LF));
    // y has LF fraction bits; fx_t has FX_FRAC
    if (ie - SH >= 0) begin
      if (ie - SH > 1) g = 16'sh7fff;
      else                         g = fx_t'(y << (ie - SH));
    end else if (SH - ie >= 14) begin
      g = '0;
    end else begin
      g = fx_t'(y >> (SH - ie));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      inv_gamma <= FX_ONE;
    end else begin
      out_valid <= in_valid;
      if (in_valid) inv_gamma <= g;
    end
  end

endmodule
