// Behavioural host for the heterogeneous LS accelerator, shared by the end-to-end testbenches
// (included inside the testbench module after the localparams P (sensors), MAXIT (iteration
// limit), NAX (iterations on the approximate core) and SHORT_TESTS (run the directed
// short-column and core-change tests), and before the DUT instance).
//
// It builds a synthetic calibration problem: random true gains g (magnitude 0.5..1.5, random
// phase), a random Hermitian model covariance M with zero diagonal, and the measured covariance
// V = G M G^H plus a little Hermitian noise, all quantised to the accelerator's formats. It then
// runs StEFCal: starting from g = 1, each iteration streams the P columns (g_k, m_kp, v_kp) with
// v_kp = conj(V_kp) = V_pk, collects the P new gains, replaces the gains of every even iteration
// by the mean of the two last iterates, and stops when ||g_i - g_(i-1)|| / ||g_i|| <= 1e-6 or
// after MAXIT iterations. The first NAX iterations are sent to the approximate core, the rest to
// the accurate core. Every returned gain is checked bit-true against the reference model of the
// core that computed it; the final gains are compared with a double-precision StEFCal run on the
// same quantised data and the same schedule (relative distance, the quality measure the
// accelerator is judged by). It also counts the clocks each core works and, with the published
// power of the two cores, turns them into the energy saving against the accurate core alone; at
// full size that must equal the saving predicted from the iteration counts.

  logic clk = 0, rst_n = 0;
  core_sel_e core_sel = CORE_ACC, active_core;
  logic [1:0] core_on;
  logic in_valid = 0, in_ready, in_first = 0, in_last = 0, out_valid, busy;
  beat_t in_beat = '0;
  gain_t out_g;

  int checks = 0, failures = 0;
  longint cycles = 0;
  // mechanism counters
  int n_switch = 0, n_stall = 0, n_hold = 0, n_apx_cols = 0, n_acc_cols = 0, n_off_quiet = 0;
  // clocks in which each core is on and working (a stream element waiting or a column in flight)
  longint n_apx_clk = 0, n_acc_clk = 0;
  // published power of the two cores at 50 MHz (mW), used only for the energy-saving estimate
  localparam real P_ACC_MW = 3.55, P_APX_MW = 2.08;
  core_sel_e last_active = CORE_ACC;

  // problem data (fixed point)
  longint mre[P][P], mim[P][P], vre[P][P], vim[P][P];
  longint gre[P], gim[P], nre[P], nim[P];
  real    fre[P], fim[P], fnre[P], fnim[P];      // double-precision run

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cycles++;
    if (rst_n) begin
      if (in_valid && !in_ready) n_stall++;
      if (in_valid && in_first && core_sel != active_core) n_hold++;
      if (active_core != last_active) n_switch++;
      if (in_valid || busy) begin
        if (core_on[1]) n_apx_clk++; else n_acc_clk++;
      end
      last_active <= active_core;
    end
  end

  // the core that is off must hold its accumulators
  acc_t off_mac_q;
  always @(posedge clk) begin
    acc_t cur;
    cur = core_on[0] ? dut.u_approximate.u_core.mac_real : dut.u_accurate.mac_real;
    if (rst_n && core_on == core_on_q && cycles > 10) begin
      checks++;
      if (cur != off_mac_q) begin
        failures++;
        if (failures < 10) $display("switched-off core changed its accumulator");
      end else n_off_quiet++;
    end
    off_mac_q <= cur;
  end
  logic [1:0] core_on_q;
  always @(posedge clk) core_on_q <= core_on;

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic longint q(real x, int fr, int w);
    return clamp(longint'($floor(x * (2.0 ** fr) + 0.5)), w);
  endfunction

  task automatic make_problem();
    real tr[P], ti[P], mag, ph, a, b;
    for (int k = 0; k < P; k++) begin
      mag = 0.5 + real'($urandom % 1000) / 1000.0;
      ph  = 6.283185307 * real'($urandom % 1000) / 1000.0;
      tr[k] = mag * $cos(ph); ti[k] = mag * $sin(ph);
    end
    for (int k = 0; k < P; k++) begin
      mre[k][k] = 0; mim[k][k] = 0; vre[k][k] = 0; vim[k][k] = 0;
      for (int p = k + 1; p < P; p++) begin
        real mr, mi, vr, vi, nr, ni;
        mag = 0.2 + 0.8 * real'($urandom % 1000) / 1000.0;
        ph  = 6.283185307 * real'($urandom % 1000) / 1000.0;
        mr = mag * $cos(ph); mi = mag * $sin(ph);
        // V_kp = g_k conj(g_p) M_kp + noise
        a = tr[k] * tr[p] + ti[k] * ti[p];
        b = ti[k] * tr[p] - tr[k] * ti[p];
        nr = 1.0e-3 * (real'($urandom % 2001) - 1000.0) / 1000.0;
        ni = 1.0e-3 * (real'($urandom % 2001) - 1000.0) / 1000.0;
        vr = a * mr - b * mi + nr;
        vi = a * mi + b * mr + ni;
        mre[k][p] = q(mr, M_FR, 18);  mim[k][p] = q(mi, M_FR, 18);
        mre[p][k] = mre[k][p];        mim[p][k] = -mim[k][p];
        vre[k][p] = q(vr, V_FR, 18);  vim[k][p] = q(vi, V_FR, 18);
        vre[p][k] = vre[k][p];        vim[p][k] = -vim[k][p];
      end
    end
  endtask

  // Stream one column p of the current gains; back to back with the previous column.
  task automatic send_column(int p, longint a[P], longint b[P]);
    for (int k = 0; k < P; k++) begin
      in_valid = 1;
      in_first = (k == 0);
      in_last  = (k == P - 1);
      in_beat.g.re = W_G'(a[k]);      in_beat.g.im = W_G'(b[k]);
      in_beat.m.re = W_M'(mre[k][p]); in_beat.m.im = W_M'(mim[k][p]);
      in_beat.v.re = W_H'(vre[p][k]); in_beat.v.im = W_T'(vim[p][k]);   // element of V^H_{:,p}
      #1;
      while (!in_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0; in_first = 0; in_last = 0;
  endtask

  // Reference gain of column p for the given core.
  task automatic ref_column(int p, longint a[P], longint b[P], trunc_t tr,
                            output longint er, output longint ei);
    longint c[] = new[P], d[] = new[P], h[] = new[P], t[] = new[P], aa[] = new[P], bb[] = new[P];
    for (int k = 0; k < P; k++) begin
      aa[k] = a[k]; bb[k] = b[k];
      c[k] = mre[k][p]; d[k] = mim[k][p]; h[k] = vre[p][k]; t[k] = vim[p][k];
    end
    column(P, aa, bb, c, d, h, t, tr, er, ei);
  endtask

  // One StEFCal iteration on the accelerator: all P columns, results in column order.
  task automatic hw_iteration(int it, core_sel_e sel, output longint iter_cycles);
    longint t0;
    trunc_t tr = (sel == CORE_APX) ? TR_APPROX : TR_ACCURATE;
    core_sel = sel;
    @(negedge clk);
    t0 = cycles;
    fork
      begin
        for (int p = 0; p < P; p++) send_column(p, gre, gim);
      end
      begin
        for (int p = 0; p < P; p++) begin
          longint er, ei;
          @(posedge clk iff out_valid);
          nre[p] = out_g.re; nim[p] = out_g.im;
          ref_column(p, gre, gim, tr, er, ei);
          checks++;
          if (nre[p] != er || nim[p] != ei) begin
            failures++;
            if (failures < 10) $display("iteration %0d column %0d: got %0d %0d exp %0d %0d",
                                        it, p, nre[p], nim[p], er, ei);
          end
          checks++;
          if (active_core != sel) begin
            failures++;
            $display("iteration %0d ran on the wrong core", it);
          end
          if (sel == CORE_APX) n_apx_cols++; else n_acc_cols++;
        end
      end
    join
    iter_cycles = cycles - t0;
  endtask

  task automatic float_iteration(int it);
    for (int p = 0; p < P; p++) begin
      real sr = 0.0, si = 0.0, sd = 0.0, zr, zi, vr, vi, mr, mi;
      for (int k = 0; k < P; k++) begin
        mr = real'(mre[k][p]) / (2.0 ** M_FR); mi = real'(mim[k][p]) / (2.0 ** M_FR);
        vr = real'(vre[p][k]) / (2.0 ** V_FR); vi = real'(vim[p][k]) / (2.0 ** V_FR);
        zr = fre[k] * mr - fim[k] * mi;
        zi = fre[k] * mi + fim[k] * mr;
        sr += vr * zr - vi * zi;
        si += vr * zi + vi * zr;
        sd += zr * zr + zi * zi;
      end
      fnre[p] = sr / sd; fnim[p] = si / sd;
    end
    if (it % 2 == 0)
      for (int p = 0; p < P; p++) begin
        fnre[p] = (fnre[p] + fre[p]) / 2.0; fnim[p] = (fnim[p] + fim[p]) / 2.0;
      end
    for (int p = 0; p < P; p++) begin fre[p] = fnre[p]; fim[p] = fnim[p]; end
  endtask

  task automatic run_stefcal();
    real conv, dn, nn, da, diff_rel, diff_al;
    int it;
    longint ic, maxc = 0;
    for (int k = 0; k < P; k++) begin
      gre[k] = 64'sd1 <<< G_FR; gim[k] = 0;
      fre[k] = 1.0; fim[k] = 0.0;
    end
    conv = 1.0;
    for (it = 1; it <= MAXIT; it++) begin
      hw_iteration(it, (it <= NAX) ? CORE_APX : CORE_ACC, ic);
      if (ic > maxc) maxc = ic;
      if (it % 2 == 0)
        for (int p = 0; p < P; p++) begin
          nre[p] = (nre[p] + gre[p]) >>> 1; nim[p] = (nim[p] + gim[p]) >>> 1;
        end
      dn = 0.0; nn = 0.0;
      for (int p = 0; p < P; p++) begin
        dn += real'((nre[p] - gre[p]) * (nre[p] - gre[p]) + (nim[p] - gim[p]) * (nim[p] - gim[p]));
        nn += real'(nre[p] * nre[p] + nim[p] * nim[p]);
        gre[p] = nre[p]; gim[p] = nim[p];
      end
      conv = $sqrt(dn / nn);
      float_iteration(it);
      if (it == NAX || it == NAX + 1 || it % 10 == 0)
        $display("iteration %0d on the %s core: convergence %e", it,
                 (it <= NAX) ? "approximate" : "accurate", conv);
      if (conv <= 1.0e-6 && it > NAX) break;
    end
    if (it > MAXIT) it = MAXIT;
    // relative distance to the double-precision gains, raw and after removing the common phase
    // (StEFCal gains are defined only up to one common phase factor, which rounding can drift)
    begin
      real cr = 0.0, ci = 0.0, cm, ur, ui, hr, hi;
      for (int p = 0; p < P; p++) begin
        hr = real'(gre[p]) / (2.0 ** G_FR); hi = real'(gim[p]) / (2.0 ** G_FR);
        cr += fre[p] * hr + fim[p] * hi;     // sum g_float * conj(g_hw)
        ci += fim[p] * hr - fre[p] * hi;
      end
      cm = $sqrt(cr * cr + ci * ci);
      ur = cr / cm; ui = ci / cm;
      dn = 0.0; nn = 0.0; da = 0.0;
      for (int p = 0; p < P; p++) begin
        real er, ei, av_re, av_im;
        hr = real'(gre[p]) / (2.0 ** G_FR); hi = real'(gim[p]) / (2.0 ** G_FR);
        er = fre[p] - hr; ei = fim[p] - hi;
        av_re = fre[p] - (hr * ur - hi * ui); av_im = fim[p] - (hr * ui + hi * ur);
        dn += er * er + ei * ei;
        da += av_re * av_re + av_im * av_im;
        nn += fre[p] * fre[p] + fim[p] * fim[p];
      end
    end
    diff_rel = $sqrt(dn / nn);
    diff_al  = $sqrt(da / nn);
    $display("StEFCal: P=%0d, %0d iterations (%0d approximate), last convergence %e",
             P, it, (it < NAX) ? it : NAX, conv);
    $display("Diff_rel to double precision %e, %e after removing the common phase", diff_rel, diff_al);
    checks++;
    if (diff_al > 1.0e-3) begin
      failures++;
      $display("final gains too far from the double-precision solution");
    end
    $display("longest iteration: %0d clocks for %0d elements", maxc, P * P);
    // energy saving against the accurate core alone, S_E = (P_acc - P_ax) N_ax / (P_acc N), once
    // from iteration counts and once from the clocks each core actually worked; they agree only
    // if an iteration takes the same time on both cores
    begin
      real se_it, se_clk;
      int n_ax;
      n_ax = (it < NAX) ? it : NAX;
      se_it  = (P_ACC_MW - P_APX_MW) * n_ax / (P_ACC_MW * it);
      se_clk = (P_ACC_MW - P_APX_MW) * n_apx_clk / (P_ACC_MW * (n_apx_clk + n_acc_clk));
      $display("energy saving against the accurate core over the same iterations: %.1f %% from iteration counts, %.1f %% from measured core clocks",
               100.0 * se_it, 100.0 * se_clk);
      if (!SHORT_TESTS) begin
        checks++;
        if (absr(se_it - se_clk) > 0.002) begin
          failures++;
          $display("the cores' working times do not match their iteration shares");
        end
      end
    end
    checks++;
    if (conv > 1.0e-4) begin
      failures++;
      $display("gains did not settle");
    end
    // one element per clock: a full iteration takes P*P clocks plus the divider tail
    checks++;
    if (P >= DIV_LAT + 2 && maxc > P * P + DIV_LAT + 4) begin
      failures++;
      $display("iteration took %0d clocks, more than %0d", maxc, P * P + DIV_LAT + 4);
    end
  endtask

  // Directed test: change core while the old one is still dividing; the first element of the
  // next column must wait, and that column must be computed by the new core.
  task automatic core_change_test();
    longint er, ei, got_re, got_im;
    int held = 0;
    core_sel = CORE_ACC;
    @(negedge clk);
    wait (active_core == CORE_ACC && !busy);
    @(negedge clk);
    send_column(0, gre, gim);
    core_sel = CORE_APX;
    // present the next column's first element at once
    @(negedge clk);
    in_valid = 1; in_first = 1; in_last = (P == 1);
    #1;
    while (!in_ready) begin held++; @(negedge clk); #1; end
    in_valid = 0; in_first = 0;
    checks++;
    if (held < DIV_LAT / 2 || active_core != CORE_APX) begin
      failures++;
      $display("core change did not wait for the old core (held %0d clocks)", held);
    end
    // the old core's gain for column 0 came out before the change; the next gain is column 1,
    // computed by the approximate core
    fork
      send_column(1, gre, gim);
      begin
        @(posedge clk iff out_valid);
        got_re = out_g.re; got_im = out_g.im;
      end
    join
    ref_column(1, gre, gim, TR_APPROX, er, ei);
    checks++;
    if (got_re != er || got_im != ei) begin
      failures++;
      $display("column after core change: got %0d %0d exp %0d %0d", got_re, got_im, er, ei);
    end
    core_sel = CORE_ACC;
    wait (active_core == CORE_ACC);
  endtask

  task automatic finish_run();
    checks++;
    if (n_acc_cols == 0) begin failures++; $display("the accurate core never ran"); end
    checks++;
    if (n_off_quiet == 0) begin failures++; $display("switched-off core never observed"); end
    // a schedule with approximate iterations must switch cores and use the approximate core
    if (NAX > 0 || SHORT_TESTS) begin
      checks++;
      if (n_switch == 0) begin failures++; $display("no core switch happened"); end
      checks++;
      if (n_apx_cols == 0) begin failures++; $display("the approximate core never ran"); end
    end
    if (SHORT_TESTS) begin
      checks++;
      if (n_stall == 0) begin failures++; $display("no stall happened"); end
      checks++;
      if (n_hold == 0) begin failures++; $display("no held core change happened"); end
    end
    $display("mechanisms: core switches %0d, approximate columns %0d, accurate columns %0d, stall clocks %0d, held-first clocks %0d, off-core quiet clocks %0d",
             n_switch, n_apx_cols, n_acc_cols, n_stall, n_hold, n_off_quiet);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    make_problem();
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_stefcal();
    if (SHORT_TESTS) core_change_test();
    finish_run();
  end
