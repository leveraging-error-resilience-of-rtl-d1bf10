// tb_ls_sac: drives random e_sac/f_sac elements into two SAC units (accurate word lengths and
// the approximate core's 8/8-bit truncation) with random column starts, idle and switched-off
// cycles, and compares sac after every clock with the reference model. Small operands are mixed
// in so that the truncation to zero is exercised.
module tb_ls_sac;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  logic clk = 0, rst_n = 0, en, acc_en, clr;
  logic signed [W_E_SAC-1:0] e_sac;
  logic signed [W_F_SAC-1:0] f_sac;
  acc_t acc_s, apx_s;
  longint m_acc = 0, m_apx = 0;
  int checks = 0, failures = 0, differ = 0, cycles = 0;

  ls_sac u_acc (.clk, .rst_n, .en, .acc_en, .clr, .e_sac, .f_sac, .sac(acc_s));
  ls_sac #(.TR_E(TR_AX_E_SAC), .TR_F(TR_AX_F_SAC)) u_apx (.clk, .rst_n, .en, .acc_en, .clr,
                                                       .e_sac, .f_sac, .sac(apx_s));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    z_t z;
    en = 1; acc_en = 0; clr = 0; e_sac = '0; f_sac = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      en     = ($urandom % 10) != 0;
      acc_en = ($urandom % 8) != 0;
      clr    = ($urandom % 16) == 0;
      z.es = rnd(W_E_SAC, (i % 4 == 0) ? 12 : 2);
      z.fs = rnd(W_F_SAC, (i % 4 == 0) ? 12 : 2);
      e_sac = W_E_SAC'(z.es); f_sac = W_F_SAC'(z.fs);
      if (en && acc_en) begin
        m_acc = clr ? sac_term(z, TR_ACCURATE) : wrap(m_acc + sac_term(z, TR_ACCURATE), ACC_W);
        m_apx = clr ? sac_term(z, TR_APPROX)   : wrap(m_apx + sac_term(z, TR_APPROX), ACC_W);
      end
      @(posedge clk);
      #1;
      checks++;
      if (acc_s != m_acc || apx_s != m_apx) begin
        failures++;
        if (failures < 10) $display("SAC mismatch at %0d: acc %0d exp %0d, apx %0d exp %0d",
                                    i, acc_s, m_acc, apx_s, m_apx);
      end
      if (acc_s != apx_s) differ++;
    end
    checks++;
    if (differ < 100) begin
      failures++;
      $display("truncated SAC too rarely differs from the accurate one (%0d)", differ);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
