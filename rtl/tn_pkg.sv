// tn_pkg: number formats, sizes and shared helpers of the tensor-network
// anomaly trigger.
//
// Arithmetic follows the fixed-point formats of the reference implementation:
//   fx_t   16-bit signed, 6 integer bits (sign included), 10 fraction bits
//          (the ap_fixed<16,6> of the high-level-synthesis model). Every
//          tensor element, weight and input value is stored in this format.
//          A contraction accumulates the exact products and is then cut back
//          to fx_t by truncation towards minus infinity and wrap-around, which
//          is the default quantisation and overflow mode of ap_fixed.
//   nrm_t  16-bit signed, 8 integer bits, 8 fraction bits, truncated and
//          saturated (ap_fixed<16,8,AP_TRN,AP_SAT>): range [-128, 128). Used
//          for the squared norm, the background median, the anomaly score and
//          the trigger threshold.
// The network sizes (19 sites, physical dimension 3, bond 4 for the single
// SMPO, bonds 2 and 2 with 7 intermediate sites for the cascaded SMPO) are the
// published model sizes. The address layout of the weight write port is this
// design's own choice.
package tn_pkg;

  localparam int FX_W    = 16;
  localparam int FX_FRAC = 10;
  localparam int NR_FRAC = 8;

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic signed [FX_W-1:0] nrm_t;

  // accumulator wide enough for a sum of up to 64 products of two fx_t
  localparam int ACC_W = 2*FX_W + 6;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam fx_t FX_ONE  = fx_t'(1 << FX_FRAC);
  localparam fx_t FX_HALF = fx_t'(1 << (FX_FRAC-1));

  // model sizes
  localparam int NSITE   = 19;  // input MPS sites (particles)
  localparam int PHYS_IN = 3;   // p_i
  localparam int PHYS_OUT= 3;   // p_o
  localparam int PHYS_MID= 3;   // p' (cascade intermediate)
  localparam int SMPO_B  = 4;   // single-layer bond dimension b
  localparam int CS_B1   = 2;   // cascade layer-1 bond b1
  localparam int CS_B2   = 2;   // cascade layer-2 bond b2
  localparam int CS_SPACE= 3;   // cascade layer-1 spacing
  localparam int CS_M    = 7;   // cascade intermediate sites

  // raw particle as delivered to the trigger
  //   pt  : unsigned, GeV, 2 fraction bits (0.25 GeV steps, up to 16383.75 GeV)
  //   eta : fx_t, pseudorapidity
  //   phi : fx_t, azimuth in radians
  typedef struct packed {
    logic [15:0] pt;
    fx_t         eta;
    fx_t         phi;
  } particle_t;

  // one embedded MPS site, x[0] = scaled pT, x[1] = scaled eta, x[2] = scaled phi
  typedef fx_t site_vec_t [PHYS_IN];

  // weight write request: one 16-bit tensor element per cycle
  //   layer : 0 = single SMPO, 1 = cascade layer 1, 2 = cascade layer 2
  //   site, pi (physical input), po (physical output), l, r (bond indices)
  typedef struct packed {
    logic       we;
    logic [1:0] layer;
    logic [4:0] site;
    logic [1:0] pi;
    logic [1:0] po;
    logic [1:0] l;
    logic [1:0] r;
    fx_t        data;
  } wreq_t;

  // exact product sum (2*FX_FRAC fraction bits) back to fx_t:
  // truncate towards minus infinity, wrap on overflow
  function automatic fx_t fx_quant(input acc_t a);
    return fx_t'(a >>> FX_FRAC);
  endfunction

  // exact product sum (2*FX_FRAC fraction bits) to nrm_t: truncate, saturate
  function automatic nrm_t nrm_quant(input acc_t a);
    acc_t s;
    s = a >>> (2*FX_FRAC - NR_FRAC);
    if (s > acc_t'(16'sh7fff))       return 16'sh7fff;
    else if (s < -acc_t'(17'sh8000)) return 16'sh8000;
    else                             return s[FX_W-1:0];
  endfunction

  function automatic acc_t mul(input fx_t a, input fx_t b);
    return acc_t'(a) * acc_t'(b);
  endfunction

endpackage
