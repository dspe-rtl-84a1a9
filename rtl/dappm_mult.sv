// dappm_mult: one DA-Posit multiplier PE core of the Dynamic Adaptive Posit
// Processing Mechanism.
//
// Path: two DA-Posit decoders -> mode path (16 / 9 / 4 array-multiplier PEs
// chosen by the pair mode) -> PP accumulation (CSA tree + CPA) -> scale path
// (compare with 2, shift, compensate E = E_act + E_wgt + dE) -> DA-Posit
// encoder. The sign is the XOR of the operand signs. Zero times anything is
// zero; NaR in either operand gives NaR. Because the mode only drops
// significand bits that are zero, the result equals an exact posit product
// rounded once. Combinational; the Attention Core registers the outputs.
//
// Lint note: the decoder's regime, exponent and Dyn-field width outputs and the
// scale path's dE and composite exponent are intermediate values kept visible
// for debugging; only the encoded product leaves the lane.
module dappm_mult (
  input  logic [7:0] act,
  input  logic [7:0] wgt,
  output logic [7:0] prod,
  output logic [1:0] mode,
  output logic [4:0] active_pes
);

  logic              za, zw, na, nw, sa, sw;
  logic signed [4:0] ka, kw;
  logic        [1:0] ea, ew, ma, mw, e_low;
  logic signed [6:0] big_ea, big_ew;
  logic        [3:0] siga, sigw;
  logic        [2:0] dwa, dww;
  logic        [7:0] pp [16];
  logic        [7:0] p;
  logic        [6:0] frac;
  logic              de;
  logic signed [7:0] e_out;
  logic signed [5:0] k_out;

  da_posit_decoder u_dec_a (.x(act), .is_zero(za), .is_nar(na), .sign(sa), .k(ka), .e(ea),
                            .big_e(big_ea), .sig(siga), .mode(ma), .dyn_w(dwa));
  da_posit_decoder u_dec_w (.x(wgt), .is_zero(zw), .is_nar(nw), .sign(sw), .k(kw), .e(ew),
                            .big_e(big_ew), .sig(sigw), .mode(mw), .dyn_w(dww));

  mode_path #(.FB(4)) u_mode (.sig_a(siga), .sig_w(sigw), .mode_a(ma), .mode_w(mw),
                             .mode(mode), .pp(pp), .active_pes(active_pes));

  pp_accumulation #(.N_PP(16), .W(8)) u_acc (.pp(pp), .sum(p));

  scale_path u_scale (.p(p), .e_act(big_ea), .e_wgt(big_ew), .frac(frac), .de(de),
                      .e_out(e_out), .k_out(k_out), .e_low(e_low));

  da_posit_encoder u_enc (.sign(sa ^ sw), .k(k_out), .e(e_low), .frac(frac),
                          .zero(za | zw), .nar(na | nw), .y(prod));

endmodule
