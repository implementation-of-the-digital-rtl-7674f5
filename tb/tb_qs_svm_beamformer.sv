// tb_qs_svm_beamformer: end-to-end test of the beamformer at its default
// size (57 elements, 87 processing cycles per snapshot).
//
// Scenario: a desired narrowband source at 45 degrees and two interferers
// at 30 and 50 degrees (the three directions of the source design's
// example) arrive at the array together with white noise; the steering
// vector points at 45 degrees. The testbench's array model is a uniform
// line of elements at half-wavelength spacing (its own choice; the real
// array geometry is not modelled here), with element n seeing the phase
// pi * n * sin(theta). A new snapshot is offered at every sample_tick.
//
// Checks:
//  * every output sample y equals w^H a(t) formed here from the output
//    weights and the applied snapshot, 16 cycles after the snapshot and 14
//    cycles after the weights (exact integer comparison);
//  * every weight vector the design delivers once at least N + 8 rows
//    have gone in since the last restart matches, to a relative error of
//    1e-3, the MVDR weights P^-1 h / (h^H P^-1 h) worked out here in double
//    precision (Cholesky factorisation) from the snapshots the solver took;
//  * after training, the weights pass the desired direction with unit gain
//    (Re(w^H h45) = 1 within 1 %) and place nulls below -10 dB on both
//    interferers;
//  * a restart discards the old statistics: after retraining with the
//    interferers moved to 20 and 60 degrees the nulls follow them;
//  * mechanisms counted and required at least once: restart, a restart
//    arriving while the solver is busy (held until it is ready), a snapshot
//    skipped because the solver was busy, a weight result held by the
//    downsampler until the next tick, and a validOut.
module tb_qs_svm_beamformer;
  import beamformer_pkg::*;
  localparam int N = N_ELEM, IW = IN_W, IF = IN_F, WW = WGT_W, WF = WGT_F;
  localparam int L = $clog2(N), YW = WW + IW + 2 + L;
  localparam int LAG_A = 16, LAG_W = 14, HIST = 32;
  localparam real PI = 3.14159265358979;
  localparam int TRAIN_ROWS = N + 25;
  localparam real W_TOL = 1e-3;    // relative weight error allowed

  logic clk = 0, rst = 1;
  logic signed [IW-1:0] a_re [N], a_im [N], sv_re [N], sv_im [N];
  logic valid_in = 0, restart = 0;
  logic signed [YW-1:0] y_re, y_im;
  logic signed [WW-1:0] w_re [N], w_im [N];
  logic valid_out, ready_a, ready_b, sample_tick;

  qs_svm_beamformer dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_restart = 0, n_rs_busy = 0, n_skip = 0, n_pending = 0, n_valid = 0, n_rows = 0, n_ycheck = 0;
  logic signed [IW-1:0] ah_re [HIST][N], ah_im [HIST][N];
  logic signed [WW-1:0] wh_re [HIST][N], wh_im [HIST][N];
  real th_d, th_i1, th_i2;
  int snap = 0;

  always #5 clk = ~clk;

  // watchdog
  always @(posedge clk) begin
    if (cyc > 6000000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // mechanism counters
  always @(posedge clk) if (!rst) begin
    if (sample_tick && valid_in && !ready_a) n_skip++;
    if (dut.u_solver.valid_a && dut.u_solver.ready_a) n_rows++;
    if (dut.u_down.valid_in && !dut.u_down.tick) n_pending++;
    if (dut.rows_restart) n_restart++;
    if (dut.rows_restart && !ready_a) n_rs_busy++;
  end

  // ---- reference MVDR weights in double precision ----
  // P_ref = sum lambda^(T-t) a_t a_t^H over the snapshots the solver took
  // (the one on the inputs when sample_tick rose), cleared by a restart
  // before the next row; at each new X the reference w = P^-1 h / (h^H P^-1 h)
  // is queued and compared with the output weights when they appear.
  typedef real rvec_t [N];
  real pr_ref [N][N], pi_ref [N][N];
  real cand_r [N], cand_i [N];
  real wq_r [$], wq_i [$];          // N entries per queued result
  int wq_rows [$];
  int ref_rows = 0, n_wcheck = 0;
  bit ref_pend = 0;
  real max_werr = 0.0;

  always @(posedge clk) if (!rst) begin
    if (dut.rows_restart) ref_pend = 1;
    if (dut.u_solver.valid_a && dut.u_solver.ready_a) begin
      if (ref_pend) begin
        foreach (pr_ref[i, j]) begin pr_ref[i][j] = 0.0; pi_ref[i][j] = 0.0; end
        ref_rows = 0;
        ref_pend = 0;
      end
      foreach (pr_ref[i, j]) begin
        pr_ref[i][j] = LAMBDA * pr_ref[i][j] + cand_r[i] * cand_r[j] + cand_i[i] * cand_i[j];
        pi_ref[i][j] = LAMBDA * pi_ref[i][j] + cand_i[i] * cand_r[j] - cand_r[i] * cand_i[j];
      end
      ref_rows++;
    end
    if (dut.u_solver.valid_out) begin
      rvec_t wr, wi;
      ref_weights(wr, wi);
      for (int n = 0; n < N; n++) begin wq_r.push_back(wr[n]); wq_i.push_back(wi[n]); end
      wq_rows.push_back(ref_rows);
    end
  end

  // Cholesky P = L L^H, then L z = h, L^H x = z, w = x / (h^H x)
  task automatic ref_weights(output rvec_t wr, output rvec_t wi);
    real lr [N][N], li [N][N], zr [N], zi [N], xr [N], xi [N], hr [N], hi [N];
    real sr, si, d;
    for (int n = 0; n < N; n++) begin
      hr[n] = real'(sv_re[n]) / 2.0 ** IF; hi[n] = real'(sv_im[n]) / 2.0 ** IF;
    end
    foreach (lr[i, j]) begin lr[i][j] = 0.0; li[i][j] = 0.0; end
    for (int j = 0; j < N; j++) begin
      sr = pr_ref[j][j];
      for (int k = 0; k < j; k++) sr -= lr[j][k] * lr[j][k] + li[j][k] * li[j][k];
      lr[j][j] = (sr > 0.0) ? $sqrt(sr) : 1e-30;
      for (int i = j + 1; i < N; i++) begin
        // L[i][j] = (P[i][j] - sum_k L[i][k] conj(L[j][k])) / L[j][j]
        sr = pr_ref[i][j]; si = pi_ref[i][j];
        for (int k = 0; k < j; k++) begin
          sr -= lr[i][k] * lr[j][k] + li[i][k] * li[j][k];
          si -= li[i][k] * lr[j][k] - lr[i][k] * li[j][k];
        end
        lr[i][j] = sr / lr[j][j]; li[i][j] = si / lr[j][j];
      end
    end
    for (int i = 0; i < N; i++) begin
      sr = hr[i]; si = hi[i];
      for (int k = 0; k < i; k++) begin
        sr -= lr[i][k] * zr[k] - li[i][k] * zi[k];
        si -= lr[i][k] * zi[k] + li[i][k] * zr[k];
      end
      zr[i] = sr / lr[i][i]; zi[i] = si / lr[i][i];
    end
    for (int i = N - 1; i >= 0; i--) begin
      // (L^H)[i][k] = conj(L[k][i])
      sr = zr[i]; si = zi[i];
      for (int k = i + 1; k < N; k++) begin
        sr -= lr[k][i] * xr[k] + li[k][i] * xi[k];
        si -= lr[k][i] * xi[k] - li[k][i] * xr[k];
      end
      xr[i] = sr / lr[i][i]; xi[i] = si / lr[i][i];
    end
    d = 0.0;
    for (int n = 0; n < N; n++) d += hr[n] * xr[n] + hi[n] * xi[n];
    for (int n = 0; n < N; n++) begin wr[n] = xr[n] / d; wi[n] = xi[n] / d; end
  endtask

  // compare the output weights with the queued reference
  always @(negedge clk) if (!rst && valid_out) begin
    real en, wn, dr, di;
    rvec_t wr, wi;
    int rows;
    if (wq_rows.size() == 0) begin
      checks++; failures++; $display("validOut with no solver result behind it");
    end else begin
      for (int n = 0; n < N; n++) begin wr[n] = wq_r.pop_front(); wi[n] = wq_i.pop_front(); end
      rows = wq_rows.pop_front();
      if (rows >= N + 8) begin
        en = 0.0; wn = 0.0;
        for (int n = 0; n < N; n++) begin
          dr = real'(w_re[n]) / 2.0 ** WF - wr[n];
          di = real'(w_im[n]) / 2.0 ** WF - wi[n];
          en += dr * dr + di * di;
          wn += wr[n] * wr[n] + wi[n] * wi[n];
        end
        en = $sqrt(en / wn);
        if (en > max_werr) max_werr = en;
        checks++; n_wcheck++;
        if (en > W_TOL) begin
          failures++;
          if (failures < 8) $display("weights after %0d rows: relative error %f against the MVDR reference", rows, en);
        end
      end
    end
  end

  function automatic void steer(input real th, output real pr [N], output real pim [N]);
    for (int n = 0; n < N; n++) begin
      pr[n] = $cos(PI * n * $sin(th * PI / 180.0));
      pim[n] = $sin(PI * n * $sin(th * PI / 180.0));
    end
  endfunction

  function automatic logic signed [IW-1:0] q(input real v);
    return IW'($rtoi(v * 2.0 ** IF + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  // drive one snapshot on every tick
  task automatic drive_snapshot();
    real hd_r [N], hd_i [N], h1_r [N], h1_i [N], h2_r [N], h2_i [N];
    real sd_r, sd_i, s1_r, s1_i, s2_r, s2_i;
    steer(th_d, hd_r, hd_i);
    steer(th_i1, h1_r, h1_i);
    steer(th_i2, h2_r, h2_i);
    sd_r = 0.4 * $cos(2.0 * PI * snap / 16.0); sd_i = 0.4 * $sin(2.0 * PI * snap / 16.0);
    s1_r = 0.35 * gauss(); s1_i = 0.35 * gauss();
    s2_r = 0.35 * gauss(); s2_i = 0.35 * gauss();
    for (int n = 0; n < N; n++) begin
      a_re[n] = q(sd_r * hd_r[n] - sd_i * hd_i[n] + s1_r * h1_r[n] - s1_i * h1_i[n]
                  + s2_r * h2_r[n] - s2_i * h2_i[n] + 0.03 * gauss());
      a_im[n] = q(sd_r * hd_i[n] + sd_i * hd_r[n] + s1_r * h1_i[n] + s1_i * h1_r[n]
                  + s2_r * h2_i[n] + s2_i * h2_r[n] + 0.03 * gauss());
    end
    snap++;
  endtask

  // gain of the current output weights towards theta: w^H h(theta)
  task automatic gain(input real th, output real gr, output real gi);
    real hr [N], hi [N], wr, wi;
    steer(th, hr, hi);
    gr = 0.0; gi = 0.0;
    for (int n = 0; n < N; n++) begin
      wr = real'(w_re[n]) / 2.0 ** WF; wi = real'(w_im[n]) / 2.0 ** WF;
      gr += wr * hr[n] + wi * hi[n];
      gi += wr * hi[n] - wi * hr[n];
    end
  endtask

  task automatic check_pattern(input string tag);
    real gr, gi, p1, p2;
    gain(th_d, gr, gi);
    checks++;
    if (gr < 0.99 || gr > 1.01 || gi > 0.01 || gi < -0.01) begin
      failures++; $display("%s: desired gain (%f, %f), expected 1", tag, gr, gi);
    end
    gain(th_i1, gr, gi); p1 = gr * gr + gi * gi;
    checks++;
    if (p1 > 0.1) begin failures++; $display("%s: interferer at %0.0f deg power %f", tag, th_i1, p1); end
    gain(th_i2, gr, gi); p2 = gr * gr + gi * gi;
    checks++;
    if (p2 > 0.1) begin failures++; $display("%s: interferer at %0.0f deg power %f", tag, th_i2, p2); end
    $display("%s: null depths %0.1f dB at %0.0f deg, %0.1f dB at %0.0f deg", tag,
             10.0 * $log10(p1 + 1e-30), th_i1, 10.0 * $log10(p2 + 1e-30), th_i2);
  endtask

  // exact check of y against w^H a with the pipeline lags
  always @(negedge clk) begin
    int ia, iw;
    longint er, ei;
    cyc++;
    for (int n = 0; n < N; n++) begin
      ah_re[cyc % HIST][n] = a_re[n]; ah_im[cyc % HIST][n] = a_im[n];
      wh_re[cyc % HIST][n] = w_re[n]; wh_im[cyc % HIST][n] = w_im[n];
    end
    if (!rst && cyc > 100) begin
      ia = (cyc - LAG_A) % HIST; iw = (cyc - LAG_W + HIST) % HIST;
      ia = (cyc - LAG_A + HIST) % HIST;
      er = 0; ei = 0;
      for (int n = 0; n < N; n++) begin
        er += longint'(wh_re[iw][n]) * longint'(ah_re[ia][n]) + longint'(wh_im[iw][n]) * longint'(ah_im[ia][n]);
        ei += longint'(wh_re[iw][n]) * longint'(ah_im[ia][n]) - longint'(wh_im[iw][n]) * longint'(ah_re[ia][n]);
      end
      checks++;
      n_ycheck++;
      if (longint'(y_re) != er || longint'(y_im) != ei) begin
        failures++;
        if (failures < 6) $display("cycle %0d: y = (%0d, %0d), expected (%0d, %0d)", cyc, y_re, y_im, er, ei);
      end
    end
  end

  always @(posedge clk) if (valid_out) n_valid++;

  // one clock step; at a tick, note the snapshot the design samples at the
  // end of this cycle (the one on the inputs when the tick rose), then
  // optionally drive the next one
  task automatic step(input bit drive);
    @(negedge clk);
    if (sample_tick) begin
      for (int n = 0; n < N; n++) begin
        cand_r[n] = real'(a_re[n]) / 2.0 ** IF; cand_i[n] = real'(a_im[n]) / 2.0 ** IF;
      end
      if (drive) drive_snapshot();
    end
  endtask

  task automatic train(input int rows);
    int r0;
    r0 = n_rows;
    while (n_rows - r0 < rows) step(1'b1);
    // let the last solve and weight update finish and reach the output
    while (!ready_a) step(1'b1);
    repeat (3 * RATE) step(1'b1);
  endtask

  initial begin
    real hr [N], hi [N];
    th_d = 45.0; th_i1 = 30.0; th_i2 = 50.0;
    steer(th_d, hr, hi);
    for (int n = 0; n < N; n++) begin
      a_re[n] = 0; a_im[n] = 0;
      sv_re[n] = q(hr[n]); sv_im[n] = q(hi[n]);
    end
    repeat (4) @(posedge clk);
    @(negedge clk);
    rst = 0;
    valid_in = 1;
    train(TRAIN_ROWS);
    check_pattern("45/30/50");
    // restart with moved interferers: held for two snapshot periods so
    // that one tick sees it
    th_i1 = 20.0; th_i2 = 60.0;
    @(negedge clk);
    restart = 1;
    repeat (2 * RATE) step(1'b0);
    restart = 0;
    train(TRAIN_ROWS);
    check_pattern("45/20/60");
    $display("rows taken %0d, snapshots skipped %0d, restarts %0d (%0d while busy), held results %0d, validOut %0d, y checks %0d",
             n_rows, n_skip, n_restart, n_rs_busy, n_pending, n_valid, n_ycheck);
    checks++; if (n_restart == 0) begin failures++; $display("restart never happened"); end
    checks++; if (n_rs_busy == 0) begin failures++; $display("no restart arrived while the solver was busy"); end
    checks++; if (n_skip == 0)    begin failures++; $display("no snapshot skipped"); end
    checks++; if (n_pending == 0) begin failures++; $display("downsampler never held a result"); end
    checks++; if (n_valid == 0)   begin failures++; $display("validOut never high"); end
    $display("weights checked against the MVDR reference: %0d, largest relative error %f", n_wcheck, max_werr);
    checks++; if (n_wcheck < 20)  begin failures++; $display("too few weight checks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
