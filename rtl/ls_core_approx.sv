// ls_core_approx: the approximate LS core, the reduced-precision member of the heterogeneous
// pair. It is the accurate core's datapath (ls_core) with input truncation in front of the four
// MAC multipliers and the two SAC squarers: 8 LSBs of e_mac, 12 of f_mac, 8 of e_sac and 8 of
// f_sac are dropped, h and t are kept whole (the published truncation table). The PE and the
// divider are unchanged. Interface and timing are those of ls_core; the results differ from the
// accurate core's by the truncation error, which is what lets the first iterations of a
// calibration run on this cheaper core.
module ls_core_approx
  import ls_pkg::*;
(
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

  ls_core #(
    .TR_H     (TR_AX_H),
    .TR_T     (TR_AX_T),
    .TR_E_SAC (TR_AX_E_SAC),
    .TR_F_SAC (TR_AX_F_SAC),
    .TR_E_MAC (TR_AX_E_MAC),
    .TR_F_MAC (TR_AX_F_MAC)
  ) u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (en),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_first  (in_first),
    .in_last   (in_last),
    .in_beat   (in_beat),
    .out_valid (out_valid),
    .out_g     (out_g),
    .busy      (busy)
  );

endmodule
