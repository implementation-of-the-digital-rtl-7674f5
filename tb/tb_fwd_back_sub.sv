// tb_fwd_back_sub: self-checking test of fwd_back_sub at N = 8. The
// testbench models the R read port with a random upper-triangular matrix
// (real positive diagonal), starts a solve for a random b and checks that
// the returned x satisfies R^H R x = b within fixed-point tolerance, that
// done comes within N*(2F+4) + N*N + 2N cycles and that x is zero when R is
// zero.
module tb_fwd_back_sub;
  import beamformer_pkg::*;
  localparam int N = 8, W = ACC_W, F = ACC_F, AWD = $clog2(N);
  localparam int MAXCYC = N * (2 * F + 4) + N * N + 2 * N;
  logic clk = 0, rst = 1, start = 0, busy, done;
  logic signed [W-1:0] b_re [N], b_im [N], x_re [N], x_im [N];
  logic [AWD-1:0] rd_row, rd_col;
  logic signed [W-1:0] rd_re, rd_im;
  logic signed [W-1:0] mr [N][N], mi [N][N];
  int checks = 0, failures = 0, cyc = 0;

  fwd_back_sub #(.N(N)) dut (.*);

  assign rd_re = mr[rd_row][rd_col];
  assign rd_im = mi[rd_row][rd_col];

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (cyc > 100000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  function automatic real rv(input logic signed [W-1:0] v);
    return real'(v) / (2.0 ** F);
  endfunction

  task automatic solve_and_check(input bit zero_r);
    int c0;
    real xr [N], xi [N], tr [N], ti [N], sr, si, err, bmax;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (zero_r || j < i) begin mr[i][j] = 0; mi[i][j] = 0; end
        else if (j == i) begin
          mr[i][j] = W'((2 ** F) + ($urandom % (3 << F)));   // 1 .. 4
          mi[i][j] = 0;
        end else begin
          mr[i][j] = W'($signed($urandom % (2 << F)) - (1 << F));
          mi[i][j] = W'($signed($urandom % (2 << F)) - (1 << F));
        end
      end
    bmax = 0.0;
    for (int i = 0; i < N; i++) begin
      b_re[i] = W'($signed($urandom % (2 << F)) - (1 << F));
      b_im[i] = W'($signed($urandom % (2 << F)) - (1 << F));
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    c0 = cyc;
    while (!done) @(negedge clk);
    checks++;
    if (cyc - c0 > MAXCYC) begin failures++; $display("solve took %0d cycles", cyc - c0); end
    for (int i = 0; i < N; i++) begin xr[i] = rv(x_re[i]); xi[i] = rv(x_im[i]); end
    if (zero_r) begin
      for (int i = 0; i < N; i++) begin
        checks++;
        if (x_re[i] != 0 || x_im[i] != 0) begin failures++; $display("x not zero for R = 0"); end
      end
      return;
    end
    // t = R x
    for (int i = 0; i < N; i++) begin
      tr[i] = 0.0; ti[i] = 0.0;
      for (int j = i; j < N; j++) begin
        tr[i] += rv(mr[i][j]) * xr[j] - rv(mi[i][j]) * xi[j];
        ti[i] += rv(mr[i][j]) * xi[j] + rv(mi[i][j]) * xr[j];
      end
    end
    // R^H t must equal b
    for (int i = 0; i < N; i++) begin
      sr = 0.0; si = 0.0;
      for (int j = 0; j <= i; j++) begin
        sr += rv(mr[j][i]) * tr[j] + rv(mi[j][i]) * ti[j];
        si += rv(mr[j][i]) * ti[j] - rv(mi[j][i]) * tr[j];
      end
      err = (sr - rv(b_re[i])) ** 2 + (si - rv(b_im[i])) ** 2;
      checks++;
      if (err > 1e-8) begin
        failures++;
        if (failures < 8) $display("row %0d: (R^H R x) = (%f, %f), b = (%f, %f)", i, sr, si, rv(b_re[i]), rv(b_im[i]));
      end
    end
  endtask

  initial begin
    foreach (b_re[i]) begin b_re[i] = 0; b_im[i] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (10) solve_and_check(1'b0);
    solve_and_check(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
