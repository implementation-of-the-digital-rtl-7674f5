// tb_batch_latency: latency of the whole beamformer, at its default size,
// for training batches of 5, 10, ..., 35 rows.
//
// For each batch size B the design is restarted, then a new random
// snapshot is offered at every sample_tick until B rows have been taken by
// the solver. Snapshots are then withheld (validIn low) until the weights
// of the last row have reached the output. The latency of the batch is
// counted from the clock edge where the first row is taken to the validOut
// that carries the weights of the B-th row.
//
// Checks, for every batch:
//  * exactly B weight vectors come out (one per row taken, none lost in
//    the rate change);
//  * the latency lies between B times the least work a row needs (the
//    N(N-1)/2 rotations of the row update plus the N*N steps of the two
//    substitutions) and B times the per-row cycle budget of the solver
//    plus a wait for the next snapshot instant, plus the weight update and
//    the output path once;
//  * the latency grows with B.
// The table of latencies in clock cycles is printed. Converting it to time
// needs the clock frequency of the target device.
module tb_batch_latency;
  import beamformer_pkg::*;
  localparam int N = N_ELEM, IW = IN_W, IF = IN_F, W = ACC_W, F = ACC_F, WW = WGT_W;
  localparam int L = $clog2(N), YW = WW + IW + 2 + L;
  localparam int QR_MAX  = N * (W + 2 * F + 8) + N * (N - 1) / 2;
  localparam int FB_MAX  = N * (2 * F + 4) + N * N + 2 * N + 4;
  localparam int ROW_MAX = QR_MAX + FB_MAX + RATE + 2;
  localparam int ROW_MIN = N * (N - 1) / 2 + N * N;
  localparam int OUT_MAX = 2 * N + 2 * F + 4 + RATE + 4;
  localparam int NB = 7;

  logic clk = 0, rst = 1;
  logic signed [IW-1:0] a_re [N], a_im [N], sv_re [N], sv_im [N];
  logic valid_in = 0, restart = 0;
  logic signed [YW-1:0] y_re, y_im;
  logic signed [WW-1:0] w_re [N], w_im [N];
  logic valid_out, ready_a, ready_b, sample_tick;

  qs_svm_beamformer dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_taken = 0, n_out = 0, c_first = -1, c_last = 0;
  int lat [NB];

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc++;
    if (cyc > 4000000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  always @(posedge clk) if (!rst) begin
    if (dut.u_solver.valid_a && dut.u_solver.ready_a) begin
      if (n_taken == 0) c_first = cyc;
      n_taken++;
    end
    if (valid_out) begin
      n_out++;
      c_last = cyc;
    end
  end

  function automatic logic signed [IW-1:0] rnd();
    return IW'($signed($urandom % (1 << IF)) - (1 << (IF - 1)));
  endfunction

  task automatic run_batch(input int b, output int cycles);
    int o0;
    // restart with no rows offered
    valid_in = 0;
    restart = 1;
    repeat (2 * RATE) @(negedge clk);
    restart = 0;
    repeat (RATE) @(negedge clk);
    n_taken = 0; o0 = n_out;
    valid_in = 1;
    while (n_taken < b) begin
      @(negedge clk);
      if (n_taken == b) valid_in = 0;
      if (sample_tick) foreach (a_re[i]) begin a_re[i] = rnd(); a_im[i] = rnd(); end
    end
    valid_in = 0;
    while (n_out - o0 < b) @(negedge clk);
    repeat (3 * RATE) @(negedge clk);
    cycles = c_last - c_first;
    checks++;
    if (n_out - o0 != b || n_taken != b) begin
      failures++;
      $display("batch %0d: %0d rows taken, %0d weight vectors out", b, n_taken, n_out - o0);
    end
    checks++;
    if (cycles < b * ROW_MIN || cycles > b * ROW_MAX + OUT_MAX) begin
      failures++;
      $display("batch %0d: latency %0d cycles outside [%0d, %0d]", b, cycles, b * ROW_MIN, b * ROW_MAX + OUT_MAX);
    end
  endtask

  initial begin
    foreach (a_re[i]) begin
      a_re[i] = 0; a_im[i] = 0;
      sv_re[i] = rnd(); sv_im[i] = rnd();
    end
    repeat (4) @(posedge clk);
    @(negedge clk);
    rst = 0;
    $display("batch  latency (cycles)  cycles per row");
    for (int k = 0; k < NB; k++) begin
      run_batch(5 * (k + 1), lat[k]);
      $display("%5d  %16d  %14d", 5 * (k + 1), lat[k], lat[k] / (5 * (k + 1)));
      if (k > 0) begin
        checks++;
        if (lat[k] <= lat[k - 1]) begin failures++; $display("latency does not grow with the batch size"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
