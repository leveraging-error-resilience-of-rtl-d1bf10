// tb_hetero_ls_accel: end-to-end test of the heterogeneous LS accelerator with a small array
// (P = 16 sensors): a complete StEFCal calibration, the first 10 iterations on the approximate
// core and the rest on the accurate core (stefcal_host.svh), plus a directed change of core
// while the old core is still busy. With columns shorter than the divider latency the stream
// stalls, so every mechanism of the top is exercised: core switch, held first element during a
// pending switch, stall, and the switched-off core staying quiet.
module tb_hetero_ls_accel;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  localparam int P = 16;
  localparam int MAXIT = 40;
  localparam int NAX = 10;
  localparam bit SHORT_TESTS = 1'b1;

  initial begin
    #50_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

`include "stefcal_host.svh"

  hetero_ls_accel dut (.clk, .rst_n, .core_sel, .active_core, .core_on, .in_valid, .in_ready,
                       .in_first, .in_last, .in_beat, .out_valid, .out_g, .busy);
endmodule
