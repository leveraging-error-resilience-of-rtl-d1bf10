// ls_sac: square-accumulate (SAC) of the LS core, the denominator Z^H_{:,p} . Z_{:,p}.
//
// Two squarers form esq = e_sac^2 and fsq = f_sac^2, and the register sac accumulates
// esq + fsq, as in the published signal flow. Approximation: TR_E and TR_F least significant
// bits of e_sac and f_sac are dropped before the squarers (0 in the accurate core, 8 and 8 in
// the approximate core). The squares are re-aligned to the accumulator's binary point (rounded to nearest,
// or a left shift where truncation left fewer fraction bits than the accumulator has) and
// saturated to 28 bits.
//
// Timing as ls_mac: one element per clock, clr loads instead of adding, en low holds.
module ls_sac
  import ls_pkg::*;
#(
  parameter int TR_E = 0,
  parameter int TR_F = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      acc_en,
  input  logic                      clr,
  input  logic signed [W_E_SAC-1:0] e_sac,
  input  logic signed [W_F_SAC-1:0] f_sac,
  output acc_t                      sac
);

  localparam int WE = W_E_SAC - TR_E;
  localparam int WF = W_F_SAC - TR_F;
  localparam int SH_E = 2 * (FR_E_SAC - TR_E) - FR_SAC;
  localparam int SH_F = 2 * (FR_F_SAC - TR_F) - FR_SAC;

  logic signed [WE-1:0] e_t;
  logic signed [WF-1:0] f_t;
  logic signed [2*WE-1:0] esq;
  logic signed [2*WF-1:0] fsq;
  acc_t term;

  always_comb begin
    e_t  = WE'(e_sac >>> TR_E);
    f_t  = WF'(f_sac >>> TR_F);
    esq  = e_t * e_t;
    fsq  = f_t * f_t;
    term = W_ACC'(sat(shr(longint'(esq), SH_E), W_ACC) + sat(shr(longint'(fsq), SH_F), W_ACC));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      sac <= '0;
    else if (en && acc_en)
      sac <= clr ? term : sac + term;
  end

endmodule
