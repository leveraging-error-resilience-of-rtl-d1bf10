// ls_mac: multiply-accumulate (MAC) of the LS core, the numerator V^H_{:,p} . Z_{:,p}.
//
// Four multipliers form eh, ft, et and fh from e = real(z), f = imag(z), h = real(v) and
// t = imag(v); mac_real accumulates eh - ft and mac_imag accumulates et + fh, as the published
// signal flow draws them (subtractor on eh/ft, adder on et/fh). That is the product v * z with
// no conjugate, so the v stream must already hold the elements of V^H_{:,p}; for a Hermitian
// covariance matrix V these are the elements of row p of V.
//
// Approximation: TR_E, TR_F, TR_H and TR_T least significant bits of e, f, h and t are dropped
// before the multipliers, which are then that much narrower. 0 everywhere gives the accurate
// core; the approximate core drops 8 (e) and 12 (f) bits. The products are re-aligned to the
// accumulator's binary point (rounded to nearest) and saturated to 28 bits.
//
// Timing: one element per clock. On a cycle with acc_en high the registers load the element's
// term when clr is high (first element of a column) and add it otherwise. en low holds the
// registers (the core is switched off). The accumulators wrap on overflow.
module ls_mac
  import ls_pkg::*;
#(
  parameter int TR_E = 0,
  parameter int TR_F = 0,
  parameter int TR_H = 0,
  parameter int TR_T = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      acc_en,
  input  logic                      clr,
  input  logic signed [W_E_MAC-1:0] e_mac,
  input  logic signed [W_F_MAC-1:0] f_mac,
  input  vis_t                      v,
  output acc_t                      mac_real,
  output acc_t                      mac_imag
);

  localparam int WE = W_E_MAC - TR_E;
  localparam int WF = W_F_MAC - TR_F;
  localparam int WH = W_H - TR_H;
  localparam int WT = W_T - TR_T;
  localparam int SH_EH = (FR_E_MAC - TR_E) + (FR_V - TR_H) - FR_MAC;
  localparam int SH_FT = (FR_F_MAC - TR_F) + (FR_V - TR_T) - FR_MAC;
  localparam int SH_ET = (FR_E_MAC - TR_E) + (FR_V - TR_T) - FR_MAC;
  localparam int SH_FH = (FR_F_MAC - TR_F) + (FR_V - TR_H) - FR_MAC;

  // truncated multiplier inputs
  logic signed [WE-1:0] e_t;
  logic signed [WF-1:0] f_t;
  logic signed [WH-1:0] h_t;
  logic signed [WT-1:0] t_t;
  logic signed [WE+WH-1:0] eh;
  logic signed [WF+WT-1:0] ft;
  logic signed [WE+WT-1:0] et;
  logic signed [WF+WH-1:0] fh;
  acc_t term_re, term_im;

  always_comb begin
    e_t = WE'(e_mac >>> TR_E);
    f_t = WF'(f_mac >>> TR_F);
    h_t = WH'(v.re >>> TR_H);
    t_t = WT'(v.im >>> TR_T);
    eh = e_t * h_t;
    ft = f_t * t_t;
    et = e_t * t_t;
    fh = f_t * h_t;
    term_re = W_ACC'(sat(shr(longint'(eh), SH_EH), W_ACC) - sat(shr(longint'(ft), SH_FT), W_ACC));
    term_im = W_ACC'(sat(shr(longint'(et), SH_ET), W_ACC) + sat(shr(longint'(fh), SH_FH), W_ACC));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_real <= '0;
      mac_imag <= '0;
    end else if (en && acc_en) begin
      mac_real <= clr ? term_re : mac_real + term_re;
      mac_imag <= clr ? term_im : mac_imag + term_im;
    end
  end

endmodule
