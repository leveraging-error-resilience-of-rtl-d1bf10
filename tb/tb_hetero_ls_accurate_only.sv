// tb_hetero_ls_accurate_only: the baseline schedule the energy saving is measured against. The
// same full-size calibration as tb_hetero_ls_full (P = 124 sensors, at most 92 StEFCal
// iterations, top at its default configuration), but every iteration runs on the accurate core
// and the approximate core stays switched off throughout. The host (stefcal_host.svh) checks
// every gain bit-true, the iteration time of 124 * 124 clocks plus the divider tail, that the
// off core never moves, and the final gains against a double-precision run of the same schedule.
// Comparing its log with tb_hetero_ls_full shows what the 52 approximate iterations cost in
// accuracy: both must end within the same 1e-3 bound of the double-precision solution.
module tb_hetero_ls_accurate_only;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  localparam int P = 124;
  localparam int MAXIT = 92;
  localparam int NAX = 0;
  localparam bit SHORT_TESTS = 1'b0;

  initial begin
    #200_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

`include "stefcal_host.svh"

  hetero_ls_accel dut (.clk, .rst_n, .core_sel, .active_core, .core_on, .in_valid, .in_ready,
                       .in_first, .in_last, .in_beat, .out_valid, .out_g, .busy);
endmodule
