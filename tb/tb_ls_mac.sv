// tb_ls_mac: drives random e_mac/f_mac/h/t elements into two MAC units, one with the accurate
// core's word lengths and one with the approximate core's truncation, with random column starts
// (clr), idle cycles and switched-off cycles (en low), and compares mac_real/mac_imag after every
// clock with the reference model. Also checks that the truncated unit actually differs.
module tb_ls_mac;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  logic clk = 0, rst_n = 0, en, acc_en, clr;
  logic signed [W_E_MAC-1:0] e_mac;
  logic signed [W_F_MAC-1:0] f_mac;
  vis_t v;
  acc_t acc_re, acc_im, apx_re, apx_im;
  longint m_acc_re = 0, m_acc_im = 0, m_apx_re = 0, m_apx_im = 0;
  int checks = 0, failures = 0, differ = 0, cycles = 0;

  ls_mac u_acc (.clk, .rst_n, .en, .acc_en, .clr, .e_mac, .f_mac, .v,
                .mac_real(acc_re), .mac_imag(acc_im));
  ls_mac #(.TR_E(TR_AX_E_MAC), .TR_F(TR_AX_F_MAC), .TR_H(TR_AX_H), .TR_T(TR_AX_T)) u_apx (
                .clk, .rst_n, .en, .acc_en, .clr, .e_mac, .f_mac, .v,
                .mac_real(apx_re), .mac_imag(apx_im));

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
    longint tre, tim;
    en = 1; acc_en = 0; clr = 0; e_mac = '0; f_mac = '0; v = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      en     = ($urandom % 10) != 0;
      acc_en = ($urandom % 8) != 0;
      clr    = ($urandom % 16) == 0;
      z.em = rnd(W_E_MAC, 1); z.fm = rnd(W_F_MAC, 1);
      e_mac = W_E_MAC'(z.em); f_mac = W_F_MAC'(z.fm);
      v.re = W_H'(rnd(W_H, 0)); v.im = W_T'(rnd(W_T, 0));
      if (en && acc_en) begin
        mac_term(z, longint'(v.re), longint'(v.im), TR_ACCURATE, tre, tim);
        m_acc_re = clr ? tre : wrap(m_acc_re + tre, ACC_W);
        m_acc_im = clr ? tim : wrap(m_acc_im + tim, ACC_W);
        mac_term(z, longint'(v.re), longint'(v.im), TR_APPROX, tre, tim);
        m_apx_re = clr ? tre : wrap(m_apx_re + tre, ACC_W);
        m_apx_im = clr ? tim : wrap(m_apx_im + tim, ACC_W);
      end
      @(posedge clk);
      #1;
      checks++;
      if (acc_re != m_acc_re || acc_im != m_acc_im || apx_re != m_apx_re || apx_im != m_apx_im) begin
        failures++;
        if (failures < 10) $display("MAC mismatch at %0d: acc %0d %0d exp %0d %0d, apx %0d %0d exp %0d %0d",
          i, acc_re, acc_im, m_acc_re, m_acc_im, apx_re, apx_im, m_apx_re, m_apx_im);
      end
      if (acc_re != apx_re) differ++;
    end
    checks++;
    if (differ < 100) begin
      failures++;
      $display("truncated MAC too rarely differs from the accurate one (%0d)", differ);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
