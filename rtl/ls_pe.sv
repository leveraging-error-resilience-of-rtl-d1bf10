// ls_pe: element-wise product (PE) of the LS core, z = g * m for one element of a column.
//
// With a = real(g), b = imag(g), c = real(m), d = imag(m) the four multipliers form ac, bd, ad
// and bc; real(z) = ac - bd and imag(z) = ad + bc, exactly as in the published signal flow.
// real(z) leaves at two word lengths, e_mac (23 bits) for the MAC and e_sac (21 bits) for the
// SAC, and imag(z) likewise as f_mac (24 bits) and f_sac (20 bits); the narrower copy drops LSBs
// of the wider one.
//
// Purely combinational. Each product is rounded to nearest at the binary point of real(z) or imag(z)
// before the add/subtract, and the sums saturate to their word lengths (binary points, rounding
// and saturation are this implementation's choices, see ls_pkg).
module ls_pe
  import ls_pkg::*;
(
  input  gain_t                      g,
  input  model_t                     m,
  output logic signed [W_E_MAC-1:0]  e_mac,
  output logic signed [W_F_MAC-1:0]  f_mac,
  output logic signed [W_E_SAC-1:0]  e_sac,
  output logic signed [W_F_SAC-1:0]  f_sac
);

  localparam int WP = W_G + W_M;               // full product width
  localparam int SH_RE = FR_G + FR_M - FR_E_MAC;
  localparam int SH_IM = FR_G + FR_M - FR_F_MAC;

  logic signed [WP-1:0] ac, bd, ad, bc;
  longint ac_q, bd_q, ad_q, bc_q, z_re, z_im;

  always_comb begin
    ac = g.re * m.re;
    bd = g.im * m.im;
    ad = g.re * m.im;
    bc = g.im * m.re;
    ac_q = sat(shr(longint'(ac), SH_RE), W_ACC);
    bd_q = sat(shr(longint'(bd), SH_RE), W_ACC);
    ad_q = sat(shr(longint'(ad), SH_IM), W_ACC);
    bc_q = sat(shr(longint'(bc), SH_IM), W_ACC);
    z_re = sat(ac_q - bd_q, W_E_MAC);
    z_im = sat(ad_q + bc_q, W_F_MAC);
    e_mac = W_E_MAC'(z_re);
    f_mac = W_F_MAC'(z_im);
    e_sac = W_E_SAC'(z_re >>> (W_E_MAC - W_E_SAC));
    f_sac = W_F_SAC'(z_im >>> (W_F_MAC - W_F_SAC));
  end

endmodule
