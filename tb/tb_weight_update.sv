// tb_weight_update: self-checking test of weight_update at N = 8. For a
// random steering vector h and a solver output x the weights must equal
// x / Re(h^H x) to within 2 LSB of the weight format, give Re(w^H h) = 1
// (h^H x is real for the solver output x = P^-1 h; here x is random), and
// arrive within 2N + 2F + 6 cycles of valid_in. A negative h^H x and x = 0
// (w must be 0) are also applied.
module tb_weight_update;
  import beamformer_pkg::*;
  localparam int N = 8, IW = IN_W, IF = IN_F, XW = ACC_W, XF = ACC_F, WW = WGT_W, WF = WGT_F;
  localparam int MAXCYC = 2 * N + 2 * XF + 6;
  logic clk = 0, rst = 1, valid_in = 0, valid_out;
  logic signed [IW-1:0] h_re [N], h_im [N];
  logic signed [XW-1:0] x_re [N], x_im [N];
  logic signed [WW-1:0] w_re [N], w_im [N];
  int checks = 0, failures = 0, cyc = 0;

  weight_update #(.N(N)) dut (.*);

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

  task automatic run(input real scale, input bit zero);
    int c0;
    real hr [N], hi [N], xr [N], xi [N], dr, di, er, ei, wr, wi, gr, gi, tol;
    for (int i = 0; i < N; i++) begin
      h_re[i] = IW'($signed($urandom % (2 << IF)) - (1 << IF));
      h_im[i] = IW'($signed($urandom % (2 << IF)) - (1 << IF));
      hr[i] = real'(h_re[i]) / 2.0 ** IF; hi[i] = real'(h_im[i]) / 2.0 ** IF;
      xr[i] = zero ? 0.0 : scale * hr[i] + 0.01 * (real'($urandom % 1000) / 1000.0 - 0.5);
      xi[i] = zero ? 0.0 : scale * hi[i] + 0.01 * (real'($urandom % 1000) / 1000.0 - 0.5);
      x_re[i] = XW'($rtoi(xr[i] * 2.0 ** XF));
      x_im[i] = XW'($rtoi(xi[i] * 2.0 ** XF));
      xr[i] = real'(x_re[i]) / 2.0 ** XF; xi[i] = real'(x_im[i]) / 2.0 ** XF;
    end
    dr = 0.0; di = 0.0;
    for (int i = 0; i < N; i++) dr += hr[i] * xr[i] + hi[i] * xi[i];
    @(negedge clk);
    valid_in = 1;
    @(negedge clk);
    valid_in = 0;
    c0 = cyc;
    while (!valid_out) @(negedge clk);
    checks++;
    if (cyc - c0 > MAXCYC) begin failures++; $display("update took %0d cycles", cyc - c0); end
    gr = 0.0; gi = 0.0;
    for (int i = 0; i < N; i++) begin
      wr = real'(w_re[i]) / 2.0 ** WF; wi = real'(w_im[i]) / 2.0 ** WF;
      er = zero ? 0.0 : xr[i] / dr; ei = zero ? 0.0 : xi[i] / dr;  // d = Re(h^H x)
      // tolerance: 2 LSB plus the relative error of 1/d
      tol = 2.0 / 2.0 ** WF + 1e-6 * ((er < 0 ? -er : er) + (ei < 0 ? -ei : ei));
      checks++;
      if ((wr - er) ** 2 + (wi - ei) ** 2 > tol * tol * 2) begin
        failures++;
        if (failures < 8) $display("w[%0d] = (%f, %f), expected (%f, %f)", i, wr, wi, er, ei);
      end
      // w^H h
      gr += wr * hr[i] + wi * hi[i];
      gi += wr * hi[i] - wi * hr[i];
    end
    if (!zero) begin
      checks++;
      if ((gr - 1.0) ** 2 > 1e-8) begin failures++; $display("w^H h = (%f, %f)", gr, gi); end
    end
  endtask

  initial begin
    foreach (h_re[i]) begin h_re[i] = 0; h_im[i] = 0; x_re[i] = 0; x_im[i] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (6) run(0.05, 1'b0);
    repeat (3) run(2.0, 1'b0);
    repeat (3) run(-0.3, 1'b0);
    run(0.0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
