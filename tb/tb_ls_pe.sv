// tb_ls_pe: checks the element-wise product against the reference model on random operands
// (some large enough to saturate real(z)/imag(z)) and on the extreme operand values, and checks
// real-number agreement of z with g * m for operands that do not saturate.
module tb_ls_pe;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  gain_t  g;
  model_t m;
  logic signed [W_E_MAC-1:0] e_mac;
  logic signed [W_F_MAC-1:0] f_mac;
  logic signed [W_E_SAC-1:0] e_sac;
  logic signed [W_F_SAC-1:0] f_sac;
  int checks = 0, failures = 0, saturations = 0;

  ls_pe dut (.g(g), .m(m), .e_mac(e_mac), .f_mac(f_mac), .e_sac(e_sac), .f_sac(f_sac));

  function automatic real abs_r(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  task automatic apply(longint a, longint b, longint c, longint d);
    z_t z;
    real zr, zi;
    g.re = 18'(a); g.im = 18'(b); m.re = 18'(c); m.im = 18'(d);
    #1;
    z = pe(a, b, c, d);
    checks++;
    if (e_mac != z.em || f_mac != z.fm || e_sac != z.es || f_sac != z.fs) begin
      failures++;
      if (failures < 10) $display("PE mismatch a=%0d b=%0d c=%0d d=%0d: got %0d %0d %0d %0d exp %0d %0d %0d %0d",
        a, b, c, d, e_mac, f_mac, e_sac, f_sac, z.em, z.fm, z.es, z.fs);
    end
    if (z.em == (1 <<< 22) - 1 || z.em == -(1 <<< 22) || z.fm == (1 <<< 23) - 1 || z.fm == -(1 <<< 23))
      saturations++;
    else begin
      // real-number check: within 2 LSBs of the exact complex product
      zr = (real'(a) * real'(c) - real'(b) * real'(d)) / (2.0 ** (G_FR + M_FR));
      zi = (real'(a) * real'(d) + real'(b) * real'(c)) / (2.0 ** (G_FR + M_FR));
      checks++;
      if (abs_r(zr - real'(e_mac) / (2.0 ** ZE_FR)) > 2.0 / (2.0 ** ZE_FR) ||
          abs_r(zi - real'(f_mac) / (2.0 ** ZF_FR)) > 2.0 / (2.0 ** ZF_FR)) begin
        failures++;
        if (failures < 10) $display("PE real mismatch zr=%f zi=%f", zr, zi);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(0, 0, 0, 0);
    apply(131071, 131071, 131071, 131071);
    apply(-131072, -131072, -131072, -131072);
    apply(-131072, 131071, 131071, -131072);
    apply(16384, 0, 65536 - 1, 0);
    for (int i = 0; i < 3000; i++)
      apply(rnd(18, (i % 3 == 0) ? 0 : 2), rnd(18, 2), rnd(18, (i % 5 == 0) ? 0 : 1), rnd(18, 1));
    if (saturations == 0) begin
      failures++;
      $display("no saturating operands were applied");
    end
    $display("saturating cases: %0d", saturations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
