// tb_qless_qr: self-checking test of qless_qr at N = 8, lambda = 0.99.
// Random rows (parts in [-1, 1)) are fed one by one; the testbench keeps
// the exponentially weighted Gram matrix P = sum lambda^(T-t) a_t^H a_t in
// double precision and, after selected rows, reads R back and checks that
// R is upper triangular with a real non-negative diagonal and that
// R^H R = P within fixed-point tolerance. A restart is then applied and the
// first row after it must give R^H R = a^H a; the same is checked for a
// restart pulsed together with a row, and for one pulsed during an update
// (which must finish on the old R, the restart applying to the next row).
// The cycle count of each row update is checked against
// N*(W + 2F + 8) + N*(N-1)/2.
module tb_qless_qr;
  import beamformer_pkg::*;
  localparam int N = 8, IW = IN_W, IF = IN_F, W = ACC_W, F = ACC_F;
  localparam real FF = 0.99;
  localparam int AWD = $clog2(N);
  localparam int MAXCYC = N * (W + 2 * F + 8) + N * (N - 1) / 2;
  logic clk = 0, rst = 1, restart = 0, row_valid = 0, row_ready, done;
  logic signed [IW-1:0] row_re [N], row_im [N];
  logic [AWD-1:0] rd_row, rd_col;
  logic signed [W-1:0] rd_re, rd_im;
  int checks = 0, failures = 0, cyc = 0;
  real pr [N][N], pi [N][N];
  real rr [N][N], ri [N][N];

  qless_qr #(.N(N), .FF(FF)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (cyc > 400000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // forget = 0: the row is expected to go into an empty R. rs_with pulses
  // restart together with the row, rs_mid pulses it halfway through the
  // update (it must not disturb that update and applies to the next row).
  task automatic send_row(input bit forget, input bit rs_with = 1'b0, input bit rs_mid = 1'b0);
    int c0;
    real ar [N], ai [N];
    for (int i = 0; i < N; i++) begin
      row_re[i] = IW'($signed($urandom % (2 << IF)) - (1 << IF));
      row_im[i] = IW'($signed($urandom % (2 << IF)) - (1 << IF));
      ar[i] = real'(row_re[i]) / (2.0 ** IF);
      ai[i] = real'(row_im[i]) / (2.0 ** IF);
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        // (a^H a)[i][j] = conj(a_i) a_j
        pr[i][j] = (forget ? FF * pr[i][j] : 0.0) + ar[i] * ar[j] + ai[i] * ai[j];
        pi[i][j] = (forget ? FF * pi[i][j] : 0.0) + ar[i] * ai[j] - ai[i] * ar[j];
      end
    @(negedge clk);
    while (!row_ready) @(negedge clk);
    row_valid = 1;
    restart = rs_with;
    @(negedge clk);
    row_valid = 0;
    restart = 0;
    c0 = cyc;
    if (rs_mid) begin
      repeat (MAXCYC / 2) @(negedge clk);
      restart = 1;
      @(negedge clk);
      restart = 0;
    end
    while (!done) @(negedge clk);
    checks++;
    if (cyc - c0 > MAXCYC) begin
      failures++;
      $display("row update took %0d cycles, limit %0d", cyc - c0, MAXCYC);
    end
  endtask

  task automatic check_r(input string tag);
    real maxp, err, sr, si;
    @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        rd_row = AWD'(i); rd_col = AWD'(j);
        #1;
        rr[i][j] = real'(rd_re) / (2.0 ** F);
        ri[i][j] = real'(rd_im) / (2.0 ** F);
        if (j < i) begin
          checks++;
          if (rd_re != 0 || rd_im != 0) begin failures++; $display("%s: R[%0d][%0d] below diagonal not 0", tag, i, j); end
        end
        if (j == i) begin
          checks++;
          if (rd_im != 0 || rd_re < 0) begin failures++; $display("%s: diagonal %0d not real >= 0", tag, i); end
        end
      end
    maxp = 0.0;
    foreach (pr[i, j]) if (pr[i][j] > maxp) maxp = pr[i][j];
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        // (R^H R)[i][j] = sum_k conj(R[k][i]) R[k][j]
        sr = 0.0; si = 0.0;
        for (int k = 0; k < N; k++) begin
          sr += rr[k][i] * rr[k][j] + ri[k][i] * ri[k][j];
          si += rr[k][i] * ri[k][j] - ri[k][i] * rr[k][j];
        end
        err = (sr - pr[i][j]) * (sr - pr[i][j]) + (si - pi[i][j]) * (si - pi[i][j]);
        checks++;
        if (err > (1e-5 * maxp) * (1e-5 * maxp)) begin
          failures++;
          if (failures < 8) $display("%s: (R^H R)[%0d][%0d] = (%f, %f), expected (%f, %f)", tag, i, j, sr, si, pr[i][j], pi[i][j]);
        end
      end
  endtask

  initial begin
    rd_row = 0; rd_col = 0;
    foreach (row_re[i]) begin row_re[i] = 0; row_im[i] = 0; end
    foreach (pr[i, j]) begin pr[i][j] = 0.0; pi[i][j] = 0.0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    // empty R after reset
    check_r("empty");
    for (int t = 0; t < 3 * N; t++) begin
      send_row(1'b1);
      if (t == 0 || t == 3 || t == N - 1 || t == 3 * N - 1) check_r($sformatf("row %0d", t));
    end
    // restart: R must be empty again, then hold a single row
    @(negedge clk);
    restart = 1;
    @(negedge clk);
    restart = 0;
    foreach (pr[i, j]) begin pr[i][j] = 0.0; pi[i][j] = 0.0; end
    check_r("after restart");
    send_row(1'b0);
    check_r("first row after restart");
    for (int t = 0; t < N; t++) send_row(1'b1);
    check_r("rows after restart");
    // restart during an update: that update completes on the old R
    send_row(1'b1, 1'b0, 1'b1);
    check_r("restart during update");
    send_row(1'b0);
    check_r("row after held restart");
    for (int t = 0; t < 3; t++) send_row(1'b1);
    // restart offered together with a row
    send_row(1'b0, 1'b1);
    check_r("restart with row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
