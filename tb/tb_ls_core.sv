// tb_ls_core: self-checking testbench of the accurate LS core (ls_core with no truncation).
// See tb_core_body.svh for what is driven and checked; here the double-precision tolerance is
// tight (0.1 % of the numerator scale |v||z|/|z|^2 plus 8 gain LSBs) because the accurate core
// only rounds at each quantisation.
module tb_ls_core;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  localparam trunc_t TR_SET = TR_ACCURATE;
  localparam real REL_TOL = 1.0e-3;

`include "tb_core_body.svh"
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ls_core dut (.clk, .rst_n, .en, .in_valid, .in_ready, .in_first, .in_last, .in_beat,
               .out_valid, .out_g, .busy);
endmodule
