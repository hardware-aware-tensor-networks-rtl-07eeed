// event_embed: embedding of a collision event into the sites of the input MPS.
//
// An event is described by 19 particles: the missing transverse energy, four
// electrons, four muons and ten jets, each with pT, eta and phi. Absent
// particles arrive as zeros. Each particle becomes one 3-component site
// vector in fx_t:
//     x0 = pT / pT_ref      (pT_ref: 2500 GeV jets, 800 GeV muons,
//                            1200 GeV electrons and missing energy)
//     x1 = (eta + 5) / 10   (forced to 0.5 for the missing energy, whose
//                            eta is defined as 0)
//     x2 = (phi + pi) / (2 pi)
// and the sites are then placed in the spectral (mutual-information) order
// the models were trained with. The scaling, the reference momenta and the
// site order follow the reference model. The input formats of particle_t
// (pT in 0.25 GeV steps, eta and phi in fx_t), the constant multipliers,
// which are the reciprocals rounded to 24 fraction bits, and the slot order of
// the input port are this design's choices.
//
// Input slot order (index into particles): 0 missing energy, 1-4 electrons
// e0..e3, 5-8 muons mu0..mu3, 9-18 jets j0..j9, each class in descending pT.
// Output site order: e3 e2 j9 j8 e1 j7 j5 e0 MET mu0 j4 j0 j3 j1 j2 j6 mu1 mu2 mu3.
// One register stage: out_valid follows in_valid by one cycle.
module event_embed
  import tn_pkg::*;
#(
  parameter int PT_REF_JET   = 2500,
  parameter int PT_REF_MU    = 800,
  parameter int PT_REF_E_MET = 1200
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  particle_t particles [NSITE],
  output logic      out_valid,
  output fx_t       sites [NSITE][PHYS_IN]
);

  // reciprocals with 24 fraction bits, rounded
  localparam longint PJ = longint'(PT_REF_JET);
  localparam longint PM = longint'(PT_REF_MU);
  localparam longint PE = longint'(PT_REF_E_MET);
  localparam longint RJET  = (64'd1 << 24) / PJ + (((64'd1 << 24) % PJ) * 2 >= PJ ? 1 : 0);
  localparam longint RMU   = (64'd1 << 24) / PM + (((64'd1 << 24) % PM) * 2 >= PM ? 1 : 0);
  localparam longint REMET = (64'd1 << 24) / PE + (((64'd1 << 24) % PE) * 2 >= PE ? 1 : 0);
  localparam longint RETA  = 1677722;   // 0.1 * 2^24
  localparam longint RPHI  = 2670177;   // 2^24 / (2 pi)

  // site k of the MPS takes input slot SPECTRAL_SRC[k]
  localparam int SPECTRAL_SRC [NSITE] = '{4, 3, 18, 17, 2, 16, 14, 1, 0, 5,
                                          13, 9, 12, 10, 11, 15, 6, 7, 8};

  function automatic longint recip_of(input int slot);
    if (slot >= 9)      return RJET;
    else if (slot >= 5) return RMU;
    else                return REMET;
  endfunction

  fx_t emb [NSITE][PHYS_IN];

  always_comb begin
    for (int n = 0; n < NSITE; n++) begin
      logic signed [47:0] pt_s, eta_s, phi_s;
      // pT has 2 fraction bits, the reciprocal 24: drop 16 to reach 10
      pt_s  = (48'(particles[n].pt) * 48'(recip_of(n))) >>> 16;
      // eta, phi have 10 fraction bits, the constants 24: drop 24
      eta_s = (48'(signed'(particles[n].eta)) * 48'(RETA)) >>> 24;
      phi_s = (48'(signed'(particles[n].phi)) * 48'(RPHI)) >>> 24;
      emb[n][0] = pt_s[FX_W-1:0];
      emb[n][1] = (n == 0) ? FX_HALF : eta_s[FX_W-1:0] + FX_HALF;
      emb[n][2] = phi_s[FX_W-1:0] + FX_HALF;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < NSITE; k++)
        for (int i = 0; i < PHYS_IN; i++) sites[k][i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int k = 0; k < NSITE; k++) sites[k] <= emb[SPECTRAL_SRC[k]];
    end
  end

endmodule
