// hetero_ls_accel: heterogeneous least-squares accelerator for StEFCal antenna-gain calibration.
//
// Two LS cores share one data bus: an accurate core (ls_core, full word lengths) and an
// approximate core (ls_core_approx, truncated MAC/SAC inputs). A host processor streams the
// elements of each column (g_k, m_kp, v_kp) and collects one gain g_p per column. It runs the
// first iterations of a calibration on the approximate core and the rest on the accurate core,
// and only the selected core is switched on, which is where the energy saving comes from.
//
// Control (this implementation's realisation of the host's control line): core_sel asks for a
// core. The active core (active_core) changes to the requested one only when both cores are idle
// and no element is being accepted, so a column is never split between cores; while a change is
// pending, a column already under way still finishes on the old core, but in_ready is held low
// for the first element of a new column until the old core has drained and the change is made.
// core_on is one-hot: the active core's enable (its registers are clocked); the other core is
// held with its enable low and its operand inputs forced to zero so that nothing toggles in it.
//
// Bus: in_valid/in_ready/in_first/in_last/in_beat carry the elements; out_valid/out_g return a
// gain; busy is high while either core still has work. Timing is that of ls_core.
module hetero_ls_accel
  import ls_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  core_sel_e core_sel,
  output core_sel_e active_core,
  output logic [1:0] core_on,      // [0] accurate, [1] approximate
  input  logic      in_valid,
  output logic      in_ready,
  input  logic      in_first,
  input  logic      in_last,
  input  beat_t     in_beat,
  output logic      out_valid,
  output gain_t     out_g,
  output logic      busy
);

  core_sel_e sel_q;
  logic      acc_ready, apx_ready, acc_valid, apx_valid, acc_busy, apx_busy;
  gain_t     acc_g, apx_g;
  beat_t     acc_beat, apx_beat;
  logic      switching, hold;

  assign active_core = sel_q;
  assign core_on     = {sel_q == CORE_APX, sel_q == CORE_ACC};
  assign switching   = (core_sel != sel_q);
  assign busy        = acc_busy || apx_busy;

  // operand isolation of the core that is off
  assign acc_beat = core_on[0] ? in_beat : '0;
  assign apx_beat = core_on[1] ? in_beat : '0;

  // While a change of core is pending, a column already under way finishes on the old core but
  // no new column (in_first) is taken.
  assign hold      = switching && in_first;
  assign in_ready  = !hold && (core_on[1] ? apx_ready : acc_ready);
  assign out_valid = core_on[1] ? apx_valid : acc_valid;
  assign out_g     = core_on[1] ? apx_g : acc_g;

  ls_core u_accurate (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (core_on[0]),
    .in_valid  (in_valid && core_on[0] && !hold),
    .in_ready  (acc_ready),
    .in_first  (in_first),
    .in_last   (in_last),
    .in_beat   (acc_beat),
    .out_valid (acc_valid),
    .out_g     (acc_g),
    .busy      (acc_busy)
  );

  ls_core_approx u_approximate (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (core_on[1]),
    .in_valid  (in_valid && core_on[1] && !hold),
    .in_ready  (apx_ready),
    .in_first  (in_first),
    .in_last   (in_last),
    .in_beat   (apx_beat),
    .out_valid (apx_valid),
    .out_g     (apx_g),
    .busy      (apx_busy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      sel_q <= CORE_ACC;
    else if (switching && !busy)
      sel_q <= core_sel;
  end

  // Only the core that is switched on may produce a result.
  a_off_core_silent : assert property (@(posedge clk) disable iff (!rst_n)
    !(acc_valid && !core_on[0]) && !(apx_valid && !core_on[1]));

endmodule
