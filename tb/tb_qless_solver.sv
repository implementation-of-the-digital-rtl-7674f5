// tb_qless_solver: self-checking test of qless_solver at N = 8,
// lambda = 0.99. Random rows A(i,:) and a fixed random B are offered; the
// testbench keeps P = sum lambda^(T-t) A_t^H A_t in double precision and,
// once P has full rank, checks each X against P X = B. It also checks that
// rows offered all through the busy time of an update are refused
// (ready_a low, no extra valid_out), that after a restart X depends on the
// new rows only (also for a restart pulsed while busy, which must not
// disturb the running solve), and the per-row cycle budget.
module tb_qless_solver;
  import beamformer_pkg::*;
  localparam int N = 8, IW = IN_W, IF = IN_F, W = ACC_W, F = ACC_F;
  localparam real FF = 0.99;
  localparam int MAXCYC = N * (W + 2 * F + 8) + N * (N - 1) / 2 + N * (2 * F + 4) + N * N + 2 * N + 4;
  logic clk = 0, rst = 1, restart = 0, valid_a = 0, valid_b = 0, ready_a, ready_b, valid_out;
  logic signed [IW-1:0] a_re [N], a_im [N], b_re [N], b_im [N];
  logic signed [W-1:0] x_re [N], x_im [N];
  int checks = 0, failures = 0, cyc = 0, nvalid = 0, skipped = 0;
  real pr [N][N], pi [N][N];

  qless_solver #(.N(N), .FF(FF)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (valid_out) nvalid++;
    if (cyc > 400000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  function automatic real iv(input logic signed [IW-1:0] v);
    return real'(v) / (2.0 ** IF);
  endfunction

  task automatic check_x(input string tag);
    real sr, si, err, bn;
    for (int i = 0; i < N; i++) begin
      sr = 0.0; si = 0.0;
      for (int j = 0; j < N; j++) begin
        sr += pr[i][j] * (real'(x_re[j]) / 2.0 ** F) - pi[i][j] * (real'(x_im[j]) / 2.0 ** F);
        si += pr[i][j] * (real'(x_im[j]) / 2.0 ** F) + pi[i][j] * (real'(x_re[j]) / 2.0 ** F);
      end
      err = (sr - iv(b_re[i])) ** 2 + (si - iv(b_im[i])) ** 2;
      checks++;
      if (err > 1e-6) begin
        failures++;
        if (failures < 8) $display("%s row %0d: (P x) = (%f, %f), b = (%f, %f)", tag, i, sr, si, iv(b_re[i]), iv(b_im[i]));
      end
    end
  endtask

  task automatic send_row(input int t, input bit rs_mid = 1'b0);
    int c0, n0;
    real ar [N], ai [N];
    for (int i = 0; i < N; i++) begin
      a_re[i] = IW'($signed($urandom % (2 << IF)) - (1 << IF));
      a_im[i] = IW'($signed($urandom % (2 << IF)) - (1 << IF));
      ar[i] = iv(a_re[i]); ai[i] = iv(a_im[i]);
    end
    foreach (pr[i, j]) begin
      pr[i][j] = FF * pr[i][j] + ar[i] * ar[j] + ai[i] * ai[j];
      pi[i][j] = FF * pi[i][j] + ar[i] * ai[j] - ai[i] * ar[j];
    end
    @(negedge clk);
    while (!ready_a) @(negedge clk);
    valid_a = 1; valid_b = 1;
    @(negedge clk);
    valid_a = 0; valid_b = 0;
    c0 = cyc; n0 = nvalid;
    // offer a row every 37 cycles while busy, through both the row update
    // and the substitution: ready_a must stay low and none may be taken
    while (!valid_out) begin
      restart = rs_mid && (cyc - c0 == 100);
      if ((cyc - c0) % 37 == 20) begin
        checks++;
        if (ready_a) begin
          failures++;
          if (failures < 8) $display("row %0d: ready_a high while busy, %0d cycles in", t, cyc - c0);
        end
        valid_a = 1;
        skipped++;
      end else begin
        valid_a = 0;
      end
      @(negedge clk);
    end
    valid_a = 0;
    checks++;
    if (cyc - c0 > MAXCYC) begin failures++; $display("row %0d took %0d cycles", t, cyc - c0); end
    @(negedge clk);
    if (t % 100 >= N + 2 || rs_mid) check_x($sformatf("row %0d", t));
    // a restart seen while busy applies from the next row on
    if (rs_mid) foreach (pr[i, j]) begin pr[i][j] = 0.0; pi[i][j] = 0.0; end
  endtask

  initial begin
    foreach (a_re[i]) begin a_re[i] = 0; a_im[i] = 0; end
    foreach (pr[i, j]) begin pr[i][j] = 0.0; pi[i][j] = 0.0; end
    for (int i = 0; i < N; i++) begin
      b_re[i] = IW'($signed($urandom % (2 << IF)) - (1 << IF));
      b_im[i] = IW'($signed($urandom % (2 << IF)) - (1 << IF));
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 3 * N; t++) send_row(t);
    checks++;
    if (nvalid != 3 * N) begin failures++; $display("%0d results for %0d rows", nvalid, 3 * N); end
    // restart: the old rows are forgotten, so after N + 3 new rows X must
    // solve the system made of the new rows alone
    @(negedge clk);
    restart = 1;
    @(negedge clk);
    restart = 0;
    foreach (pr[i, j]) begin pr[i][j] = 0.0; pi[i][j] = 0.0; end
    for (int t = 0; t < N + 3; t++) send_row(100 + t);
    // restart pulsed in the middle of an update: that X still solves the
    // old system, and the rows after it build a new one
    send_row(199, 1'b1);
    for (int t = 0; t < N + 3; t++) send_row(200 + t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
