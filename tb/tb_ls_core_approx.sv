// tb_ls_core_approx: self-checking testbench of the approximate LS core. Same stimulus and
// checks as tb_ls_core (tb_core_body.svh) with the approximate truncation in the reference, a
// looser double-precision tolerance (2 % of the numerator scale), and a check that the approximate gains do differ from
// what the accurate core would return for most columns.
module tb_ls_core_approx;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  localparam trunc_t TR_SET = TR_APPROX;
  localparam real REL_TOL = 2.0e-2;

`include "tb_core_body.svh"
    checks++;
    if (differ < results / 2) begin
      failures++;
      $display("approximate gains equal the accurate ones too often");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ls_core_approx dut (.clk, .rst_n, .en, .in_valid, .in_ready, .in_first, .in_last, .in_beat,
                      .out_valid, .out_g, .busy);
endmodule
