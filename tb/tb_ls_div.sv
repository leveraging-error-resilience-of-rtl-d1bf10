// tb_ls_div: random numerator/denominator pairs (including zero, negative and tiny denominators
// that make the quotient saturate) through the divider; checks both quotients against the
// reference, that done comes exactly 43 clocks after start is taken, that busy covers that
// interval, that start is ignored while busy, and that en low freezes the divider.
module tb_ls_div;
  import ls_pkg::*;
  import ls_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, start = 0;
  acc_t num_re, num_im, den;
  logic busy, done;
  logic signed [W_G-1:0] q_re, q_im;
  int checks = 0, failures = 0, cycles = 0, sats = 0;

  ls_div dut (.clk, .rst_n, .en, .start, .num_re, .num_im, .den, .busy, .done, .q_re, .q_im);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(longint nr, longint ni, longint dn, int freeze);
    int lat = 0;
    longint er = div(nr, dn), ei = div(ni, dn);
    @(negedge clk);
    num_re = acc_t'(nr); num_im = acc_t'(ni); den = acc_t'(dn); start = 1;
    @(posedge clk);
    #1 start = 0;
    // a second start while busy must be ignored
    num_re = '0; num_im = '0; den = 1;
    @(negedge clk) start = 1;
    while (!done) begin
      if (freeze > 0 && lat == 10) begin
        en = 0; repeat (freeze) @(negedge clk); en = 1;
      end
      checks++;
      if (!busy) begin failures++; $display("busy low before done"); end
      @(posedge clk); #1;
      lat++;
      if (lat > 200) break;
    end
    start = 0;
    checks++;
    // en low freezes the divider, so only active clocks are counted
    if (lat != DIV_LAT) begin
      failures++;
      $display("latency %0d, expected %0d", lat, DIV_LAT);
    end
    checks++;
    if (q_re != er || q_im != ei) begin
      failures++;
      if (failures < 10) $display("DIV mismatch %0d/%0d, %0d/%0d: got %0d %0d exp %0d %0d", nr, dn, ni, dn, q_re, q_im, er, ei);
    end
    if (er == 131071 || er == -131071 || ei == 131071 || ei == -131071) sats++;
    @(posedge clk); #1;
    checks++;
    if (done || busy) begin failures++; $display("done/busy not cleared"); end
  endtask

  initial begin
    num_re = '0; num_im = '0; den = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1 <<< 15, -(1 <<< 15), 1 <<< 16, 0);   // 1 / 1 -> gain 1.0
    run(12345, -54321, 0, 0);
    run(-(1 <<< 27), (1 <<< 27) - 1, 1, 0);
    run(1000, 1000, -5, 0);
    run(777777, -123, 3333, 7);
    for (int i = 0; i < 600; i++)
      run(rnd(28, $urandom % 14), rnd(28, $urandom % 14), (rnd(28, $urandom % 26) & 64'h7ffffff), 0);
    checks++;
    if (sats == 0) begin failures++; $display("no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
