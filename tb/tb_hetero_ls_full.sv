// tb_hetero_ls_full: the calibration workload at full size on the accelerator with its default
// configuration: P = 124 sensors, 92 StEFCal iterations at most, the first 52 on the approximate
// core and the rest on the accurate core (stefcal_host.svh). Columns of 124 elements stream at
// one element per clock, so an iteration takes 124 * 124 clocks plus the divider tail, which is
// checked. Every gain is checked bit-true, and the final gains against a double-precision run.
module tb_hetero_ls_full;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  localparam int P = 124;
  localparam int MAXIT = 92;
  localparam int NAX = 52;
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
