// Shared body of the LS core testbenches (included inside the testbench module, after
// `localparam trunc_t TR_SET` and `localparam real REL_TOL` and before the DUT instance).
// It streams columns of many lengths (1 .. 130 elements, several of the full 124) with random
// gaps, checks every returned gain bit-true against the reference model and against a
// double-precision evaluation of sum(v*z)/sum(|z|^2), the 44-clock latency from a column's last
// element to its gain when the divider was idle, one element per clock over a long column,
// stalls (in_ready low) for columns shorter than the divider latency, and that en low holds the
// core.

  logic clk = 0, rst_n = 0, en = 1;
  logic in_valid = 0, in_ready, in_first = 0, in_last = 0, out_valid, busy;
  beat_t in_beat = '0;
  gain_t out_g;
  int checks = 0, failures = 0, cycles = 0;
  int stalls = 0, results = 0, lat_checked = 0, differ = 0;
  longint exp_re[$], exp_im[$];
  real    real_re[$], real_im[$], scale_q[$];
  longint acc_re_q[$], acc_im_q[$];
  int     last_cycle[$];
  logic   idle_at_last[$];
  int     pending = 0;

  always #5 clk = ~clk;

  initial begin
    wait (cycles == 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid && !in_ready && en) stalls++;

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // clock counter and result monitor; the monitor sees a gain one edge after ls_div raised it
  always @(posedge clk) begin
    cycles++;
    if (rst_n && out_valid) begin
      longint er, ei, av_re, av_im;
      real rr, ri, tol, sc;
      int lc;
      logic idl;
      er = exp_re.pop_front(); ei = exp_im.pop_front();
      rr = real_re.pop_front(); ri = real_im.pop_front(); sc = scale_q.pop_front();
      av_re = acc_re_q.pop_front(); av_im = acc_im_q.pop_front();
      lc = last_cycle.pop_front(); idl = idle_at_last.pop_front();
      pending--;
      results++;
      checks++;
      if (out_g.re != er || out_g.im != ei) begin
        failures++;
        if (failures < 10) $display("gain %0d: got %0d %0d exp %0d %0d", results, out_g.re, out_g.im, er, ei);
      end
      if (out_g.re != av_re || out_g.im != av_im) differ++;
      // double-precision comparison where the gain did not saturate
      if (absr(rr) < 7.0 && absr(ri) < 7.0) begin
        // error bound scaled by |v||z|/|z|^2, the size the numerator's rounding works at
        tol = REL_TOL * sc + 8.0 / (2.0 ** G_FR);
        checks++;
        if (absr(real'(out_g.re) / (2.0 ** G_FR) - rr) > tol ||
            absr(real'(out_g.im) / (2.0 ** G_FR) - ri) > tol) begin
          failures++;
          if (failures < 10) $display("gain %0d: %f %f vs double %f %f", results,
            real'(out_g.re) / (2.0 ** G_FR), real'(out_g.im) / (2.0 ** G_FR), rr, ri);
        end
      end
      if (idl) begin
        lat_checked++;
        checks++;
        // the gain is valid DIV_LAT + 1 clocks after the edge that took the last element
        if (cycles - lc != DIV_LAT + 2) begin
          failures++;
          $display("latency %0d clocks, expected %0d (gain %0d)", cycles - lc - 1, DIV_LAT + 1, results);
        end
      end
    end
  end

  // Stream one column of n random elements; gap: percentage of idle cycles; flick: toggle en.
  task automatic send_column(int n, int gap, int flick);
    longint a[] = new[n], b[] = new[n], c[] = new[n], d[] = new[n], h[] = new[n], t[] = new[n];
    longint er, ei, av_re, av_im;
    real nr = 0.0, ni = 0.0, dd = 0.0, vv = 0.0, zr, zi, vr, vi;
    int first_cycle = 0;
    for (int k = 0; k < n; k++) begin
      a[k] = rnd(W_G, 3); b[k] = rnd(W_G, 3);
      c[k] = rnd(W_M, 2); d[k] = rnd(W_M, 2);
      h[k] = rnd(W_H, 4); t[k] = rnd(W_T, 4);
      zr = (real'(a[k]) * real'(c[k]) - real'(b[k]) * real'(d[k])) / (2.0 ** (G_FR + M_FR));
      zi = (real'(a[k]) * real'(d[k]) + real'(b[k]) * real'(c[k])) / (2.0 ** (G_FR + M_FR));
      vr = real'(h[k]) / (2.0 ** V_FR); vi = real'(t[k]) / (2.0 ** V_FR);
      nr += vr * zr - vi * zi;
      ni += vr * zi + vi * zr;
      dd += zr * zr + zi * zi;
      vv += vr * vr + vi * vi;
    end
    column(n, a, b, c, d, h, t, TR_SET, er, ei);
    column(n, a, b, c, d, h, t, TR_ACCURATE, av_re, av_im);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      while (gap > 0 && ($urandom % 100) < gap) begin
        in_valid = 0;
        @(negedge clk);
      end
      if (flick) en = ($urandom % 4) != 0;
      in_valid = 1;
      in_first = (k == 0);
      in_last  = (k == n - 1);
      in_beat.g.re = W_G'(a[k]); in_beat.g.im = W_G'(b[k]);
      in_beat.m.re = W_M'(c[k]); in_beat.m.im = W_M'(d[k]);
      in_beat.v.re = W_H'(h[k]); in_beat.v.im = W_T'(t[k]);
      #1;
      // the element is taken on the next rising edge only if the core is on and ready now
      while (!(in_ready && en)) begin
        @(negedge clk);
        if (flick) en = ($urandom % 4) != 0;
        #1;
      end
      @(posedge clk);
      #1;
      if (k == 0) first_cycle = cycles;
    end
    exp_re.push_back(er); exp_im.push_back(ei);
    real_re.push_back(nr / dd); real_im.push_back(ni / dd); scale_q.push_back($sqrt(vv * dd) / dd);
    acc_re_q.push_back(av_re); acc_im_q.push_back(av_im);
    last_cycle.push_back(cycles);
    idle_at_last.push_back(pending == 0 && !flick);
    pending++;
    if (gap == 0 && !flick && n >= 100) begin
      checks++;
      if (cycles - first_cycle != n - 1) begin
        failures++;
        $display("column of %0d took %0d clocks, expected %0d", n, cycles - first_cycle + 1, n);
      end
    end
    @(negedge clk);
    in_valid = 0; in_first = 0; in_last = 0;
    en = 1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // full-size columns back to back, no gaps: one element per clock
    for (int i = 0; i < 6; i++) send_column(124, 0, 0);
    repeat (60) @(posedge clk);
    // short columns: the divider is the bottleneck and the stream must stall
    for (int i = 0; i < 20; i++) send_column(1 + ($urandom % 8), 0, 0);
    // mixed lengths and gaps
    for (int i = 0; i < 60; i++) send_column(1 + ($urandom % 130), $urandom % 40, 0);
    // core switched off and on while streaming (after the last result is out, so that the
    // latency check above is not disturbed)
    wait (pending == 0);
    for (int i = 0; i < 10; i++) send_column(10 + ($urandom % 60), 10, 1);
    repeat (300) @(posedge clk);
    checks++;
    if (pending != 0) begin failures++; $display("%0d gains never came out", pending); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall was exercised"); end
    checks++;
    if (lat_checked < 5) begin failures++; $display("too few latency checks (%0d)", lat_checked); end
    $display("columns %0d, stall cycles %0d, latency checks %0d, differing from accurate %0d",
             results, stalls, lat_checked, differ);
