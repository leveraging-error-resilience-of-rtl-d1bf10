// ls_core: one least-squares (LS) core of the heterogeneous accelerator. For each column p it
// streams the P elements (g_k, m_kp, v_kp), k = 1..P, and returns the new gain
//   g_p = sum_k v_kp * z_k / sum_k |z_k|^2,  z_k = g_k * m_kp,
// which is one StEFCal least-squares update (v_kp taken from V^H_{:,p}, see ls_mac).
//
// Structure, as in the published signal flow: the element-wise product (ls_pe) feeds the
// multiply-accumulate (ls_mac, registers mac_real/mac_imag) and the square-accumulate (ls_sac,
// register sac) in the same cycle; the divider (ls_div) turns the finished sums into g_p. The
// parameters TR_* are the numbers of LSBs dropped in front of the MAC multipliers and the SAC
// squarers: all 0 gives the accurate core, the values of ls_core_approx the approximate core.
//
// Interface (this implementation's choice): a valid/ready element stream with in_first on the
// first and in_last on the last element of a column (both on a one-element column); the result
// comes out as a one-cycle out_valid pulse with out_g. en low switches the core off: every
// register holds and in_ready is low.
//
// Timing: one element per clock. When a column's last element is taken, the sums are handed to
// the divider on the next free cycle and g_p appears ls_div's latency (W_ACC + DIV_SHIFT = 43
// clocks) later: out_valid is high 44 clocks after the edge that took the last element when the
// divider was free. The next column can stream meanwhile; in_ready drops only when a column is
// complete while the divider is still busy with the one before, which happens only for columns
// shorter than the divider latency.
module ls_core
  import ls_pkg::*;
#(
  parameter int TR_H     = 0,
  parameter int TR_T     = 0,
  parameter int TR_E_SAC = 0,
  parameter int TR_F_SAC = 0,
  parameter int TR_E_MAC = 0,
  parameter int TR_F_MAC = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  output logic  in_ready,
  input  logic  in_first,
  input  logic  in_last,
  input  beat_t in_beat,
  output logic  out_valid,
  output gain_t out_g,
  output logic  busy
);

  logic signed [W_E_MAC-1:0] e_mac;
  logic signed [W_F_MAC-1:0] f_mac;
  logic signed [W_E_SAC-1:0] e_sac;
  logic signed [W_F_SAC-1:0] f_sac;
  acc_t mac_real, mac_imag, sac;

  logic take;        // an element is accepted this cycle
  logic acc_full;    // the accumulators hold a finished column not yet given to the divider
  logic in_col;      // a column has started and its last element has not come yet
  logic div_start, div_busy, div_done;

  assign take      = en && in_valid && in_ready;
  assign in_ready  = en && (!acc_full || !div_busy);
  assign div_start = acc_full && !div_busy;
  assign busy      = in_col || acc_full || div_busy;
  // a result is presented once, on a clock where the core is on
  assign out_valid = div_done && en;

  ls_pe u_pe (
    .g     (in_beat.g),
    .m     (in_beat.m),
    .e_mac (e_mac),
    .f_mac (f_mac),
    .e_sac (e_sac),
    .f_sac (f_sac)
  );

  ls_mac #(
    .TR_E (TR_E_MAC),
    .TR_F (TR_F_MAC),
    .TR_H (TR_H),
    .TR_T (TR_T)
  ) u_mac (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (en),
    .acc_en   (take),
    .clr      (in_first),
    .e_mac    (e_mac),
    .f_mac    (f_mac),
    .v        (in_beat.v),
    .mac_real (mac_real),
    .mac_imag (mac_imag)
  );

  ls_sac #(
    .TR_E (TR_E_SAC),
    .TR_F (TR_F_SAC)
  ) u_sac (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (en),
    .acc_en (take),
    .clr    (in_first),
    .e_sac  (e_sac),
    .f_sac  (f_sac),
    .sac    (sac)
  );

  ls_div u_div (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (en),
    .start  (div_start),
    .num_re (mac_real),
    .num_im (mac_imag),
    .den    (sac),
    .busy   (div_busy),
    .done   (div_done),
    .q_re   (out_g.re),
    .q_im   (out_g.im)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_full <= 1'b0;
      in_col   <= 1'b0;
    end else if (en) begin
      if (take && in_last)
        acc_full <= 1'b1;
      else if (div_start)
        acc_full <= 1'b0;
      if (take)
        in_col <= !in_last;
    end
  end

  // A column starts with in_first and no element arrives between columns without it.
  a_first_opens_column : assert property (@(posedge clk) disable iff (!rst_n)
    take |-> (in_first == !in_col));

endmodule
